// mac_rx: receive datapath of the MAC, built like mac_tx in reverse.
//
// It watches the GMII receive signals, skips the preamble up to the SFD
// (0xD5), and passes the frame bytes (destination MAC .. last payload or pad
// byte) to the Ethernet layer as an rx_stream_t. The four FCS bytes are held
// back in a 4-byte delay line, so they never reach the upper layers, while the
// CRC ALU runs over all bytes after the SFD. When rx_dv falls, one eof cycle
// follows whose `ok` is set when the CRC register holds the CRC-32 residue,
// rx_er was never seen and the frame was at least 64 bytes long.
//
// Timing: a received byte leaves 5 cycles after it was on rxd (4 bytes of
// delay line plus the output register); eof comes one cycle after rx_dv falls.
// rx_sfd pulses one cycle after the SFD was on rxd (PTP timestamping).
// The paper only says that the receive module is "built in the same way" as
// the transmit one; the holdback scheme and the length check are this
// design's choices.
module mac_rx (
  input  logic                 clk,
  input  logic                 rst,
  input  logic                 phy_rxdv,
  input  logic                 phy_rxer,
  input  logic [7:0]           phy_rxd,
  output gige_pkg::rx_stream_t rx,
  output logic                 rx_sfd
);
  import gige_pkg::*;

  typedef enum logic [1:0] {R_IDLE, R_PRE, R_DATA, R_DROP} state_t;
  state_t      state;
  logic [7:0]  hold [4];
  logic [2:0]  nheld;
  logic [31:0] crc_q, crc_d;
  logic [15:0] len;
  logic        err, first;

  crc32_alu u_crc (.crc_in(crc_q), .data(phy_rxd), .crc_out(crc_d));

  always_ff @(posedge clk) begin
    if (rst) begin
      state  <= R_IDLE;
      rx     <= RX_IDLE;
      rx_sfd <= 1'b0;
      crc_q  <= 32'hFFFF_FFFF;
      nheld  <= '0;
      len    <= '0;
      err    <= 1'b0;
      first  <= 1'b0;
      for (int i = 0; i < 4; i++) hold[i] <= 8'h00;
    end else begin
      rx     <= RX_IDLE;
      rx_sfd <= 1'b0;
      unique case (state)
        R_IDLE: if (phy_rxdv) begin
          if (phy_rxd == 8'hD5) begin
            state  <= R_DATA;
            rx_sfd <= 1'b1;
          end else if (phy_rxd == 8'h55) state <= R_PRE;
          else state <= R_DROP;
          crc_q <= 32'hFFFF_FFFF;
          nheld <= '0;
          len   <= '0;
          err   <= phy_rxer;
          first <= 1'b1;
        end
        R_PRE: begin
          if (!phy_rxdv) state <= R_IDLE;
          else if (phy_rxd == 8'hD5) begin
            state  <= R_DATA;
            rx_sfd <= 1'b1;
          end else if (phy_rxd != 8'h55) state <= R_DROP;
          if (phy_rxer) err <= 1'b1;
        end
        R_DATA: begin
          if (phy_rxdv) begin
            crc_q   <= crc_d;
            len     <= len + 16'd1;
            if (phy_rxer) err <= 1'b1;
            hold[0] <= phy_rxd;
            for (int i = 1; i < 4; i++) hold[i] <= hold[i-1];
            if (nheld == 3'd4) begin
              rx.valid <= 1'b1;
              rx.sof   <= first;
              rx.data  <= hold[3];
              first    <= 1'b0;
            end else begin
              nheld <= nheld + 3'd1;
            end
          end else begin
            rx.eof <= 1'b1;
            rx.ok  <= !err && (crc_q == CRC32_RESIDUE) && (len >= 16'd64);
            state  <= R_IDLE;
          end
        end
        R_DROP: if (!phy_rxdv) state <= R_IDLE;
        default: state <= R_IDLE;
      endcase
    end
  end
endmodule

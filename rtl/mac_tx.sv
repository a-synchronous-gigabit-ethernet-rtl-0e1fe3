// mac_tx: transmit datapath of the Media Access Control (MAC) towards a GMII PHY.
//
// The Ethernet layer pushes a frame (destination MAC .. end of payload) one
// byte per 125 MHz clock with tx_en high for the whole frame, without gaps.
// The MAC turns it into an Ethernet packet: 7 preamble bytes 0x55 and the SFD
// 0xD5, the frame, padding up to the 60-byte minimum frame (46-byte minimum
// payload), and the 32-bit FCS; then it keeps the line idle for the
// interframe gap (IFG).
//
// How it works (after the paper's figure of the MAC): an 8x8 byte shift
// register is preloaded with preamble and SFD. Every cycle of the packet the
// oldest byte goes to phy_txd and the input byte (or a pad byte) enters at the
// other end, so the frame follows its own preamble with a fixed 9-cycle
// latency: a byte on txd in cycle t is on phy_txd in cycle t+9. The CRC ALU
// runs on the input bytes and pad bytes into a 32-bit register whose
// complement is appended, low byte first, once the shift register is drained.
// A state machine with the states idle, pre, send, last, crc and gap (the
// names printed in the paper's figure) sequences this.
//
// Timing: tx_busy is high from the cycle after tx_en rises until the gap is
// over. It falls two cycles before the end of the gap, so an upstream that
// registers its tx_en one cycle after seeing tx_busy low (as eth_tx does)
// produces exactly ifg_cycles idle cycles on phy_txen between packets
// (12 cycles = 96 ns by default, the value the paper measures). The pad byte
// is 0xAA: the paper's waveform shows 0xAA padding and its FCS 12 BE 6D E5
// checks only with it. phy_txer is never asserted: the MAC has no error to
// report. tx_sfd pulses in the cycle the SFD is on phy_txd (PTP timestamping).
module mac_tx #(
  parameter logic [7:0] PAD_BYTE  = 8'hAA,
  parameter int         MIN_FRAME = 60      // bytes without FCS
) (
  input  logic       clk,
  input  logic       rst,
  input  logic [7:0] ifg_cycles,   // programmable interframe gap, >= 3
  // from the Ethernet layer
  input  logic       tx_en,
  input  logic [7:0] txd,
  output logic       tx_busy,
  // GMII
  output logic       phy_txen,
  output logic       phy_txer,
  output logic [7:0] phy_txd,
  output logic       tx_sfd
);
  import gige_pkg::*;

  typedef enum logic [2:0] {S_IDLE, S_PRE, S_SEND, S_LAST, S_CRC, S_GAP} state_t;
  state_t      state;
  logic [7:0]  sr [8];        // shift register 8x8, sr[0] leaves first
  logic [31:0] crc_q;          // "Register 32"
  logic [31:0] crc_d;
  logic [15:0] in_cnt;         // frame bytes entered (data + pad)
  logic [3:0]  cnt;            // output position inside pre/last/crc
  logic [7:0]  gap_cnt;
  logic        shift_in;
  logic [7:0]  in_byte;

  // input side: data while tx_en, pad bytes until the minimum frame length
  always_comb begin
    shift_in = 1'b0;
    in_byte  = txd;
    if (state == S_IDLE || state == S_PRE || state == S_SEND) begin
      if (tx_en) begin
        shift_in = 1'b1;
      end else if (state != S_IDLE && in_cnt < 16'(MIN_FRAME)) begin
        shift_in = 1'b1;
        in_byte  = PAD_BYTE;
      end
    end
  end

  crc32_alu u_crc (
    .crc_in ((state == S_IDLE) ? 32'hFFFF_FFFF : crc_q),
    .data   (in_byte),
    .crc_out(crc_d)
  );

  assign tx_busy  = (state != S_IDLE);
  assign phy_txer = 1'b0;

  always_ff @(posedge clk) begin
    if (rst) begin
      state    <= S_IDLE;
      phy_txen <= 1'b0;
      phy_txd  <= 8'h00;
      tx_sfd   <= 1'b0;
      crc_q    <= 32'hFFFF_FFFF;
      in_cnt   <= '0;
      cnt      <= '0;
      gap_cnt  <= '0;
      for (int i = 0; i < 8; i++) sr[i] <= 8'h00;
    end else begin
      tx_sfd <= 1'b0;
      if (shift_in) begin
        crc_q  <= crc_d;
        in_cnt <= in_cnt + 16'd1;
      end
      unique case (state)
        S_IDLE: begin
          phy_txen <= 1'b0;
          if (tx_en) begin
            // preamble goes out now, the first frame byte enters the register
            phy_txen <= 1'b1;
            phy_txd  <= 8'h55;
            for (int i = 0; i < 6; i++) sr[i] <= 8'h55;
            sr[6]    <= 8'hD5;
            sr[7]    <= in_byte;
            in_cnt   <= 16'd1;
            cnt      <= 4'd1;
            state    <= S_PRE;
          end
        end
        S_PRE, S_SEND: begin
          phy_txd <= sr[0];
          tx_sfd  <= (state == S_PRE) && (cnt == 4'd7);
          for (int i = 0; i < 7; i++) sr[i] <= sr[i+1];
          sr[7] <= in_byte;
          if (state == S_PRE) begin
            cnt <= cnt + 4'd1;
            if (cnt == 4'd7) state <= S_SEND;
          end
          if (!shift_in) begin
            // input finished: 7 bytes remain in the register
            state <= S_LAST;
            cnt   <= 4'd7;
          end
        end
        S_LAST: begin
          phy_txd <= sr[0];
          for (int i = 0; i < 7; i++) sr[i] <= sr[i+1];
          cnt <= cnt - 4'd1;
          if (cnt == 4'd1) begin
            state <= S_CRC;
            cnt   <= 4'd0;
          end
        end
        S_CRC: begin
          phy_txd <= ~crc_q[8*cnt[1:0] +: 8];
          cnt     <= cnt + 4'd1;
          if (cnt == 4'd3) begin
            state   <= S_GAP;
            gap_cnt <= 8'd1;
          end
        end
        S_GAP: begin
          phy_txen <= 1'b0;
          gap_cnt  <= gap_cnt + 8'd1;
          if (gap_cnt >= ifg_cycles - 8'd1) state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // a frame must only start while the MAC is idle
  a_start_idle: assert property (@(posedge clk) disable iff (rst)
    $rose(tx_en) |-> !tx_busy);

endmodule

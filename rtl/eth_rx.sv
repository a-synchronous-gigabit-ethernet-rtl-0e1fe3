// eth_rx: receive side of the Ethernet layer.
//
// It reads the frame stream from mac_rx, keeps frames addressed to the own
// MAC address or to the broadcast address, and passes their payload (byte 14
// on) to the layers above as a new stream whose first byte carries sof. With
// the payload it presents the EtherType and the source MAC address, stable
// from sof to eof; ARP (0x0806) and IP (0x0800) pick their frames by it.
// Frames for other addresses produce no output at all. The final eof cycle
// carries the MAC's ok flag (FCS) unchanged.
// Timing: one register stage, so every byte and the eof leave one cycle after
// they arrive. The paper names the layer; the filtering rules are this
// design's choice.
module eth_rx (
  input  logic                 clk,
  input  logic                 rst,
  input  logic [47:0]          my_mac,
  input  gige_pkg::rx_stream_t rx_in,
  output gige_pkg::rx_stream_t rx_out,
  output logic [15:0]          ethertype,
  output logic [47:0]          src_mac
);
  import gige_pkg::*;

  logic [3:0]  idx;     // header byte index, 14 = payload
  logic [47:0] dst;
  logic        pass, first;

  always_ff @(posedge clk) begin
    if (rst) begin
      rx_out    <= RX_IDLE;
      idx       <= '0;
      dst       <= '0;
      pass      <= 1'b0;
      first     <= 1'b0;
      ethertype <= '0;
      src_mac   <= '0;
    end else begin
      rx_out <= RX_IDLE;
      if (rx_in.valid) begin
        if (rx_in.sof) begin
          idx  <= 4'd1;
          dst  <= {rx_in.data, 40'd0};
          pass <= 1'b0;
        end else if (idx < 4'd14) begin
          idx <= idx + 4'd1;
          if (idx < 4'd6)       dst[8*(5-idx) +: 8]      <= rx_in.data;
          else if (idx < 4'd12) src_mac[8*(11-idx) +: 8] <= rx_in.data;
          else                  ethertype[8*(13-idx) +: 8] <= rx_in.data;
          if (idx == 4'd13) begin
            pass  <= (dst == my_mac) || (dst == 48'hFFFF_FFFF_FFFF);
            first <= 1'b1;
          end
        end else if (pass) begin
          rx_out.valid <= 1'b1;
          rx_out.sof   <= first;
          rx_out.data  <= rx_in.data;
          first        <= 1'b0;
        end
      end
      if (rx_in.eof) begin
        if (pass && !first) begin
          rx_out.eof <= 1'b1;
          rx_out.ok  <= rx_in.ok;
        end
        pass <= 1'b0;
        idx  <= '0;
      end
    end
  end
endmodule

// udp_rx: receive side of the UDP layer.
//
// From the IP payload stream it takes datagrams with protocol 17 whose
// destination port equals my_port, and stores the payload of one datagram
// (the paper configures every receive path to hold one packet). If the frame
// was good and the payload fits into BUF_BYTES, rx_valid rises with the
// payload length and the sender's IP address and port; the microcontroller
// reads bytes through rx_raddr/rx_rdata and frees the buffer with
// rx_release. Datagrams arriving while rx_valid is high are dropped. The UDP
// checksum of received datagrams is not verified (the Ethernet FCS is); the
// length field must agree with the IP payload length.
module udp_rx #(
  parameter int BUF_BYTES = 2048
) (
  input  logic                 clk,
  input  logic                 rst,
  input  logic [15:0]          my_port,
  input  gige_pkg::rx_stream_t rx,
  input  logic [7:0]           rx_proto,
  input  logic [31:0]          rx_ip,
  input  logic [15:0]          rx_ip_len,
  output logic                 rx_valid,
  output logic [15:0]          rx_len,
  output logic [31:0]          rx_src_ip,
  output logic [15:0]          rx_src_port,
  input  logic [$clog2(BUF_BYTES)-1:0] rx_raddr,
  output logic [7:0]           rx_rdata,
  input  logic                 rx_release
);
  import gige_pkg::*;
  localparam int AW = $clog2(BUF_BYTES);

  logic [7:0]  rbuf [BUF_BYTES];
  logic [63:0] hdr;
  logic [15:0] cnt;        // datagram bytes seen
  logic        active;
  logic        take;
  logic [15:0] pidx;

  assign pidx     = cnt - 16'd8;
  assign take     = active && rx.valid && !rx.sof && cnt >= 16'd8 &&
                    hdr[47:32] == my_port && pidx < 16'(BUF_BYTES);
  assign rx_rdata = rbuf[rx_raddr];

  always_ff @(posedge clk) begin
    if (take) rbuf[pidx[AW-1:0]] <= rx.data;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      hdr <= '0; cnt <= '0; active <= 1'b0;
      rx_valid <= 1'b0; rx_len <= '0; rx_src_ip <= '0; rx_src_port <= '0;
    end else begin
      if (rx_release) rx_valid <= 1'b0;
      if (rx.valid) begin
        if (rx.sof) begin
          active <= (rx_proto == IP_PROTO_UDP) && !rx_valid;
          hdr    <= {rx.data, 56'd0};
          cnt    <= 16'd1;
        end else if (active) begin
          if (cnt < 16'd8) hdr[63 - 8*cnt[2:0] -: 8] <= rx.data;
          cnt <= cnt + 16'd1;
        end
      end
      if (rx.eof) begin
        active <= 1'b0;
        if (active && rx.ok && cnt >= 16'd8 && hdr[47:32] == my_port &&
            hdr[31:16] == rx_ip_len && cnt == rx_ip_len &&
            cnt - 16'd8 <= 16'(BUF_BYTES)) begin
          rx_valid    <= 1'b1;
          rx_len      <= cnt - 16'd8;
          rx_src_ip   <= rx_ip;
          rx_src_port <= hdr[63:48];
        end
      end
    end
  end
endmodule

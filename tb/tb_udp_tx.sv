// tb_udp_tx: a FIFO model supplies payload words and the precomputed payload
// sum; the IP layer is modelled by a start pulse. Checks avail/meta, the UDP
// header with the checksum (the reference reproduces the paper's 0x87EF for
// its 12-byte counter payload), the payload byte order and the exact number
// of bytes.
module tb_udp_tx;
  import tb_util_pkg::*;
  import gige_pkg::*;
  int checks = 0, failures = 0;
  task automatic check(bit c, string m);
    checks++; if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask

  localparam int PAY = 12;
  logic clk = 0, rst = 1;
  always #4 clk = ~clk;
  logic pkt_empty = 1, pkt_pop, rd_en, avail, start = 0;
  logic [15:0] pkt_sum = 0;
  logic [31:0] rdata;
  tx_meta_t meta;
  tx_data_t dout;
  udp_tx #(.PAYLOAD_BYTES(PAY)) dut (.clk, .rst, .my_ip(32'hC0A8_000F), .dst_ip(32'hC0A8_0001),
    .src_port(16'd1025), .dst_port(16'd1024), .pkt_empty, .pkt_sum, .pkt_pop, .rd_en, .rdata,
    .avail, .meta, .start, .dout);

  logic [31:0] words[$];
  int pops = 0, rptr = 0;
  assign rdata = (rptr < words.size()) ? words[rptr] : 32'h0;
  always @(posedge clk) begin
    if (rd_en) rptr <= rptr + 1;
    if (pkt_pop) pops++;
  end
  bytes_t got;
  always @(posedge clk) if (dout.en && !rst) got.push_back(dout.d);

  task automatic run(bit [31:0] w0, bit [31:0] w1, bit [31:0] w2);
    bytes_t pay, exp;
    bit [15:0] s;
    put32(pay, w0); put32(pay, w1); put32(pay, w2);
    s = ~csum(pay);
    words = {w0, w1, w2}; rptr = 0;
    got = {};
    @(negedge clk); pkt_sum = s; pkt_empty = 0;
    #1 check(avail && meta.len == 16'd20 && meta.proto == 8'd17 && meta.dst_ip == 32'hC0A8_0001, "avail/meta");
    @(negedge clk); start = 1;
    @(negedge clk); start = 0; pkt_empty = 1;
    repeat (30) @(negedge clk);
    exp = udp_dgram(32'hC0A8_000F, 32'hC0A8_0001, 16'd1025, 16'd1024, pay);
    check(same(got, exp), "datagram");
    if (!same(got, exp)) $display("got %p\nexp %p", got, exp);
    check(rptr == 3, "all words popped");
  endtask

  initial begin
    repeat (3) @(negedge clk); rst = 0;
    run(32'h0C76985A, 32'h0C76985B, 32'h0C76985C);
    check(got.size() > 7 && got[6] == 8'h87 && got[7] == 8'hEF, "paper checksum 87EF");
    for (int i = 0; i < 5; i++) run($urandom, $urandom, $urandom);
    check(pops == 6, "one sum popped per datagram");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (5000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule

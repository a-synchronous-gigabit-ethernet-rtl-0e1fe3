// tb_udp_payload_fifo: writes random words in a 6 ns clock domain and reads
// in an 8 ns one. A packet must become visible only when all its words are
// written, its sum must equal the one's complement sum of its payload, and
// the words must come out in order.
module tb_udp_payload_fifo;
  import tb_util_pkg::*;
  int checks = 0, failures = 0;
  task automatic check(bit c, string m);
    checks++; if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask
  localparam int PAY = 20;
  logic wclk = 0, rclk = 0, rst = 1;
  always #3 wclk = ~wclk;
  always #4 rclk = ~rclk;
  logic wr_en = 0, full, pkt_empty, pkt_pop = 0, rd_en = 0;
  logic [31:0] wdata = 0, rdata;
  logic [15:0] pkt_sum;
  udp_payload_fifo #(.PAYLOAD_BYTES(PAY), .DEPTH(64), .PKTS(4)) dut (.wclk, .wrst(rst), .wr_en,
    .wdata, .full, .rclk, .rrst(rst), .pkt_empty, .pkt_sum, .pkt_pop, .rd_en, .rdata);

  logic [31:0] sent[$];
  task automatic wr(bit [31:0] w);
    @(negedge wclk); while (full) @(negedge wclk);
    wr_en = 1; wdata = w; sent.push_back(w);
    @(negedge wclk); wr_en = 0;
  endtask

  initial begin
    bytes_t pay;
    repeat (4) @(negedge rclk); rst = 0;
    // partial packet stays invisible
    for (int i = 0; i < PAY / 4 - 1; i++) wr($urandom);
    repeat (10) @(negedge rclk);
    check(pkt_empty, "partial packet invisible");
    wr($urandom);
    for (int i = 0; i < 2 * PAY / 4; i++) wr($urandom);
    repeat (10) @(negedge rclk);
    for (int p = 0; p < 3; p++) begin
      check(!pkt_empty, $sformatf("packet %0d visible", p));
      pay = {};
      for (int i = 0; i < PAY / 4; i++) put32(pay, sent[p * PAY / 4 + i]);
      check(pkt_sum == 16'(~csum(pay)), $sformatf("sum %h exp %h", pkt_sum, 16'(~csum(pay))));
      @(negedge rclk); pkt_pop = 1; @(negedge rclk); pkt_pop = 0;
      for (int i = 0; i < PAY / 4; i++) begin
        check(rdata == sent[p * PAY / 4 + i], "word order");
        rd_en = 1; @(negedge rclk); rd_en = 0;
      end
      repeat (3) @(negedge rclk);
    end
    check(pkt_empty, "empty at end");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (20000) @(posedge rclk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule

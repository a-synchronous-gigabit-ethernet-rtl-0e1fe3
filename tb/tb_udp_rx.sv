// tb_udp_rx: datagrams to the configured port must be stored with length,
// source address and port; other ports, other protocols, bad frames and a
// datagram arriving before release must be ignored.
module tb_udp_rx;
  import tb_util_pkg::*;
  import gige_pkg::*;
  int checks = 0, failures = 0;
  task automatic check(bit c, string m);
    checks++; if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask
  logic clk = 0, rst = 1;
  always #4 clk = ~clk;
  rx_stream_t rx = RX_IDLE;
  logic [7:0] rx_proto = 8'd17, rx_rdata;
  logic [15:0] rx_ip_len = 0, rx_len, rx_src_port;
  logic rx_valid, rx_release = 0;
  logic [31:0] rx_src_ip;
  logic [8:0] rx_raddr = 0;
  udp_rx #(.BUF_BYTES(512)) dut (.clk, .rst, .my_port(16'd1025), .rx, .rx_proto, .rx_ip(32'h0A00_0007),
    .rx_ip_len, .rx_valid, .rx_len, .rx_src_ip, .rx_src_port, .rx_raddr, .rx_rdata, .rx_release);

  task automatic send(bytes_t q, bit ok);
    rx_ip_len = 16'(q.size());
    foreach (q[i]) begin @(negedge clk); rx = '{sof: i == 0, valid: 1'b1, data: q[i], eof: 1'b0, ok: 1'b0}; end
    @(negedge clk); rx = '{sof: 1'b0, valid: 1'b0, data: 8'h0, eof: 1'b1, ok: ok};
    @(negedge clk); rx = RX_IDLE;
    repeat (3) @(negedge clk);
  endtask

  initial begin
    bytes_t pay, rd, pay2;
    repeat (3) @(negedge clk); rst = 0;
    for (int i = 0; i < 100; i++) pay.push_back(8'($urandom));
    for (int i = 0; i < 50; i++) pay2.push_back(8'($urandom));
    send(udp_dgram(32'h0A00_0007, 32'hC0A8_000F, 16'd777, 16'd1026, pay), 1);
    check(!rx_valid, "other port ignored");
    rx_proto = 8'd1; send(udp_dgram(32'h0A00_0007, 32'hC0A8_000F, 16'd777, 16'd1025, pay), 1);
    check(!rx_valid, "ICMP ignored");
    rx_proto = 8'd17; send(udp_dgram(32'h0A00_0007, 32'hC0A8_000F, 16'd777, 16'd1025, pay), 0);
    check(!rx_valid, "bad frame ignored");
    send(udp_dgram(32'h0A00_0007, 32'hC0A8_000F, 16'd777, 16'd1025, pay), 1);
    check(rx_valid && rx_len == 16'd100 && rx_src_port == 16'd777 && rx_src_ip == 32'h0A00_0007, "stored");
    send(udp_dgram(32'h0A00_0007, 32'hC0A8_000F, 16'd778, 16'd1025, pay2), 1);
    rd = {};
    for (int i = 0; i < 100; i++) begin rx_raddr = 9'(i); #1 rd.push_back(rx_rdata); end
    check(same(rd, pay) && rx_src_port == 16'd777, "payload, second datagram dropped");
    @(negedge clk); rx_release = 1; @(negedge clk); rx_release = 0;
    send(udp_dgram(32'h0A00_0007, 32'hC0A8_000F, 16'd778, 16'd1025, pay2), 1);
    rd = {};
    for (int i = 0; i < 50; i++) begin rx_raddr = 9'(i); #1 rd.push_back(rx_rdata); end
    check(rx_valid && rx_len == 16'd50 && same(rd, pay2), "next datagram after release");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (5000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule

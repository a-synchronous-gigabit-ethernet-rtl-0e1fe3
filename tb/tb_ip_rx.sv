// tb_ip_rx: feeds Ethernet payload streams carrying IPv4 datagrams. A good
// datagram to the own address must pass with protocol, source and length,
// with Ethernet padding trimmed; wrong address, bad header checksum, a
// fragment and a non-IP EtherType must produce nothing.
module tb_ip_rx;
  import tb_util_pkg::*;
  import gige_pkg::*;
  int checks = 0, failures = 0;
  task automatic check(bit c, string m);
    checks++; if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask
  logic clk = 0, rst = 1;
  always #4 clk = ~clk;
  localparam bit [31:0] MY = 32'hC0A8_000F;
  rx_stream_t rx_in = RX_IDLE, rx_out;
  logic [15:0] ethertype = 16'h0800, pay_len;
  logic [7:0] proto;
  logic [31:0] src_ip;
  ip_rx dut (.clk, .rst, .my_ip(MY), .rx_in, .ethertype, .rx_out, .proto, .src_ip, .pay_len);

  bytes_t got; int eofs = 0, oks = 0;
  logic [7:0] pr; logic [31:0] si; logic [15:0] pl;
  always @(posedge clk) if (!rst) begin
    if (rx_out.valid) begin got.push_back(rx_out.data); if (rx_out.sof) begin pr = proto; si = src_ip; pl = pay_len; end end
    if (rx_out.eof) begin eofs++; if (rx_out.ok) oks++; end
  end
  task automatic send(bytes_t q, bit ok);
    foreach (q[i]) begin @(negedge clk); rx_in = '{sof: i == 0, valid: 1'b1, data: q[i], eof: 1'b0, ok: 1'b0}; end
    @(negedge clk); rx_in = '{sof: 1'b0, valid: 1'b0, data: 8'h0, eof: 1'b1, ok: ok};
    @(negedge clk); rx_in = RX_IDLE;
    repeat (3) @(negedge clk);
  endtask

  initial begin
    bytes_t pay, h, q;
    repeat (3) @(negedge clk); rst = 0;
    for (int i = 0; i < 10; i++) pay.push_back(8'($urandom));
    // short datagram in a padded frame
    q = {ip_hdr(32'h0A00_0001, MY, 8'd1, 16'd10), pay};
    repeat (16) q.push_back(8'hAA);
    got = {}; send(q, 1);
    check(same(got, pay) && eofs == 1 && oks == 1, "padded datagram trimmed");
    check(pr == 8'd1 && si == 32'h0A00_0001 && pl == 16'd10, "meta");
    // larger UDP datagram
    pay = {}; for (int i = 0; i < 200; i++) pay.push_back(8'($urandom));
    got = {}; q = {ip_hdr(32'h0A00_0002, MY, 8'd17, 16'd200), pay}; send(q, 1);
    check(same(got, pay) && oks == 2 && pr == 8'd17, "UDP datagram");
    // wrong destination
    got = {}; q = {ip_hdr(32'h0A00_0002, MY + 1, 8'd17, 16'd200), pay}; send(q, 1);
    check(got.size() == 0 && eofs == 2, "other address dropped");
    // bad checksum
    h = ip_hdr(32'h0A00_0002, MY, 8'd17, 16'd200); h[11] ^= 8'h01;
    got = {}; q = {h, pay}; send(q, 1);
    check(got.size() == 0 && eofs == 2, "bad checksum dropped");
    // fragment (MF set, checksum fixed)
    h = ip_hdr(32'h0A00_0002, MY, 8'd17, 16'd200); h[6] = 8'h20; h[10] = 0; h[11] = 0;
    begin bit [15:0] c; c = csum(h); h[10] = c[15:8]; h[11] = c[7:0]; end
    got = {}; q = {h, pay}; send(q, 1);
    check(got.size() == 0 && eofs == 2, "fragment dropped");
    // not IP
    ethertype = 16'h0806;
    got = {}; q = {ip_hdr(32'h0A00_0002, MY, 8'd17, 16'd200), pay}; send(q, 1);
    check(got.size() == 0 && eofs == 2, "ARP ethertype ignored");
    // truncated frame
    ethertype = 16'h0800;
    got = {}; q = {ip_hdr(32'h0A00_0002, MY, 8'd17, 16'd200), pay[0:99]}; send(q, 1);
    check(eofs == 3 && oks == 2, "truncated datagram not ok");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (5000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule

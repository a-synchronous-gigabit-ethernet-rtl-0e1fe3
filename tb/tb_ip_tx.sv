// tb_ip_tx: the Ethernet layer is modelled by a start pulse, the upper module
// by a byte model that answers start_up. Checks the IPv4 header (length,
// checksum, fields printed in the paper: 45 00 .. A5 A5 40 00 40 11), the
// start_up pulse with header byte 18, the payload following seamlessly, and
// avail/meta towards the Ethernet layer.
module tb_ip_tx;
  import tb_util_pkg::*;
  import gige_pkg::*;
  int checks = 0, failures = 0;
  task automatic check(bit c, string m);
    checks++; if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask

  logic clk = 0, rst = 1;
  always #4 clk = ~clk;
  localparam bit [31:0] MY = 32'hC0A8_000F;
  logic avail, start = 0, req = 0, start_up, lock;
  tx_meta_t meta_out, meta;
  tx_data_t dout, up = '0;
  ip_tx dut (.clk, .rst, .my_ip(MY), .gw_mac(48'h0040_9E03_68C5), .avail, .meta_out, .start,
             .dout, .req, .meta, .up, .start_up, .lock);

  bytes_t pay, got;
  int idx = -1, su_at = -1;
  always @(posedge clk) begin
    if (dout.en) got.push_back(dout.d);
    if (start_up) su_at = got.size() - 1;
    if (start_up) idx = 0;
    if (idx >= 0 && idx < pay.size()) begin up <= '{en: 1'b1, d: pay[idx]}; idx++; end
    else begin up <= '{en: 1'b0, d: 8'h0C}; idx = -1; end
  end

  task automatic run(bit [7:0] proto, bit [31:0] dst, int n);
    bytes_t exp;
    pay = {};
    for (int i = 0; i < n; i++) pay.push_back(8'($urandom));
    meta = '0; meta.len = 16'(n); meta.proto = proto; meta.dst_ip = dst;
    got = {};
    @(negedge clk); req = 1;
    #1 check(avail && meta_out.ethertype == 16'h0800 && meta_out.len == 16'(n + 20) &&
             meta_out.dst_mac == 48'h0040_9E03_68C5, "avail/meta to Ethernet layer");
    @(negedge clk); start = 1;
    @(negedge clk); start = 0; req = 0;
    repeat (n + 40) @(negedge clk);
    exp = {ip_hdr(MY, dst, proto, 16'(n)), pay};
    check(same(got, exp), $sformatf("datagram proto %0d len %0d", proto, n));
    check(su_at == 18, $sformatf("start_up with header byte %0d", su_at));
  endtask

  initial begin
    repeat (3) @(negedge clk); rst = 0;
    run(8'd17, 32'hC0A8_0001, 20);
    run(8'd1, 32'h0A00_0002, 64);
    run(8'd17, 32'hFFFF_FFFF, 300);
    begin bytes_t h; h = ip_hdr(MY, 32'hC0A8_0001, 8'd17, 16'd20);
      check(h[10] == 8'h13 && h[11] == 8'hBF, "reference matches the paper's checksum 13BF"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (5000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule

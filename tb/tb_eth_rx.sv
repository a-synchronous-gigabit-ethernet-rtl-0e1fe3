// tb_eth_rx: feeds frames as MAC receive streams. Frames to the own MAC and
// to broadcast must pass with their payload, EtherType and source MAC; other
// destinations must produce nothing; the ok flag must pass through.
module tb_eth_rx;
  import tb_util_pkg::*;
  import gige_pkg::*;
  int checks = 0, failures = 0;
  task automatic check(bit c, string m);
    checks++; if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask
  logic clk = 0, rst = 1;
  always #4 clk = ~clk;
  localparam bit [47:0] MY = 48'h40D8_5505_5005;
  rx_stream_t rx_in = RX_IDLE, rx_out;
  logic [15:0] ethertype;
  logic [47:0] src_mac;
  eth_rx dut (.clk, .rst, .my_mac(MY), .rx_in, .rx_out, .ethertype, .src_mac);

  bytes_t got; int eofs = 0, oks = 0, sofs = 0;
  logic [15:0] et_at_sof; logic [47:0] sm_at_sof;
  always @(posedge clk) if (!rst) begin
    if (rx_out.valid) begin
      got.push_back(rx_out.data);
      if (rx_out.sof) begin sofs++; et_at_sof = ethertype; sm_at_sof = src_mac; end
    end
    if (rx_out.eof) begin eofs++; if (rx_out.ok) oks++; end
  end
  task automatic send(bytes_t q, bit ok);
    foreach (q[i]) begin @(negedge clk); rx_in = '{sof: i == 0, valid: 1'b1, data: q[i], eof: 1'b0, ok: 1'b0}; end
    @(negedge clk); rx_in = '{sof: 1'b0, valid: 1'b0, data: 8'h0, eof: 1'b1, ok: ok};
    @(negedge clk); rx_in = RX_IDLE;
    repeat (3) @(negedge clk);
  endtask

  initial begin
    bytes_t pay;
    repeat (3) @(negedge clk); rst = 0;
    for (int i = 0; i < 46; i++) pay.push_back(8'($urandom));
    got = {}; send({eth_hdr(MY, 48'h0011_2233_4455, 16'h0800), pay}, 1);
    check(same(got, pay) && sofs == 1 && eofs == 1 && oks == 1, "unicast frame");
    check(et_at_sof == 16'h0800 && sm_at_sof == 48'h0011_2233_4455, "ethertype/src");
    got = {}; send({eth_hdr(48'hFFFF_FFFF_FFFF, 48'h0011_2233_4466, 16'h0806), pay}, 0);
    check(same(got, pay) && eofs == 2 && oks == 1 && et_at_sof == 16'h0806, "broadcast frame, bad");
    got = {}; send({eth_hdr(48'h40D8_5505_5006, 48'h0011_2233_4455, 16'h0800), pay}, 1);
    check(got.size() == 0 && eofs == 2, "other MAC dropped");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (5000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule

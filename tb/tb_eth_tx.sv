// tb_eth_tx: an upper module model answers `start` with its bytes from the
// next cycle on. Checks the Ethernet header, that the payload follows the
// header without a gap, the position of the start pulse (with header byte
// 12) and that a frame starts one cycle after req while the MAC is idle.
module tb_eth_tx;
  import tb_util_pkg::*;
  import gige_pkg::*;
  int checks = 0, failures = 0;
  task automatic check(bit c, string m);
    checks++; if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask

  logic clk = 0, rst = 1;
  always #4 clk = ~clk;
  logic req = 0, start, lock, mac_busy = 0, tx_en;
  logic [7:0] txd;
  tx_meta_t meta;
  tx_data_t up = '0;
  localparam bit [47:0] MY = 48'h40D8_5505_5005;
  eth_tx dut (.clk, .rst, .my_mac(MY), .req, .meta, .up, .start, .lock, .mac_busy, .tx_en, .txd);

  bytes_t pay, got;
  int idx = -1, start_at = -1, cyc = 0, first_at = -1;
  always @(posedge clk) begin
    cyc++;
    if (tx_en && !rst) begin if (first_at < 0) first_at = cyc; got.push_back(txd); end
    if (start) start_at = got.size() - 1;  // header byte index on txd
    // upper model
    if (start) idx = 0;
    if (idx >= 0 && idx < pay.size()) begin up <= '{en: 1'b1, d: pay[idx]}; idx++; end
    else begin up <= '{en: 1'b0, d: 8'h0C}; idx = -1; end
  end

  initial begin
    int req_at;
    bytes_t exp;
    for (int i = 0; i < 40; i++) pay.push_back(8'($urandom));
    meta = '0; meta.dst_mac = 48'h0040_9E03_68C5; meta.ethertype = 16'h0800;
    repeat (3) @(negedge clk); rst = 0;
    @(negedge clk); req = 1; req_at = cyc;
    #1 check(lock, "lock with req");
    wait (start); @(negedge clk); req = 0;
    repeat (80) @(negedge clk);
    exp = {eth_hdr(48'h0040_9E03_68C5, MY, 16'h0800), pay};
    check(same(got, exp), "frame bytes");
    if (!same(got, exp)) $display("got %p\nexp %p first_at %0d req_at %0d", got, exp, first_at, req_at);
    check(start_at == 12, $sformatf("start with header byte %0d", start_at));
    check(first_at == req_at + 2, "tx_en one cycle after req");
    // busy MAC holds the frame back
    got = {}; first_at = -1; mac_busy = 1; meta.ethertype = 16'h0806;
    @(negedge clk); req = 1;
    repeat (10) @(negedge clk);
    check(got.size() == 0, "waits for MAC");
    mac_busy = 0;
    wait (start); @(negedge clk); req = 0;
    repeat (80) @(negedge clk);
    exp = {eth_hdr(48'h0040_9E03_68C5, MY, 16'h0806), pay};
    check(same(got, exp), "second frame");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (5000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule

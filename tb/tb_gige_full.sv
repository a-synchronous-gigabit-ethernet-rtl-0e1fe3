// tb_gige_full: the core at its default parameters (1472-byte UDP payload,
// 1024-word application FIFO, 28-bit PPS divider). The application side
// writes four full-size payloads; the testbench checks that four complete
// 1526-byte GMII packets (preamble to FCS) come out with exactly the
// expected bytes, that back-to-back packets are separated by the 12-cycle
// interframe gap, so that one packet takes 1538 cycles of 8 ns (line
// rate), and that tx_er is never asserted.
module tb_gige_full;
  import tb_util_pkg::*;
  localparam int PAY = 1472, NPKT = 4;
  localparam bit [47:0] MY_MAC = 48'h40D8_5505_5005, HOST_MAC = 48'h0040_9E03_68C5;
  localparam bit [31:0] MY_IP  = 32'hC0A8_000F,      HOST_IP  = 32'hC0A8_0001;

  int checks = 0, failures = 0;
  task automatic check(bit c, string m);
    checks++; if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask

  logic clk = 0, app_clk = 0, rst = 1;
  always #4 clk = ~clk;
  always #3 app_clk = ~app_clk;

  logic        app_wr_en = 0, app_full;
  logic [31:0] app_wdata = 0;
  logic        irq, gtx_clk, tx_en, tx_er, mdc, mdio_o, mdio_oe, pps;
  logic [31:0] bus_rdata;
  logic [7:0]  txd;
  logic [63:0] time_ns;

  gige_core dut (
    .clk, .rst, .app_clk, .app_rst(rst), .app_wr_en, .app_wdata, .app_full,
    .bus_addr(16'h0), .bus_we(1'b0), .bus_re(1'b0), .bus_wdata(32'h0), .bus_rdata, .irq,
    .gmii_gtx_clk(gtx_clk), .gmii_tx_en(tx_en), .gmii_tx_er(tx_er), .gmii_txd(txd),
    .gmii_rx_dv(1'b0), .gmii_rx_er(1'b0), .gmii_rxd(8'h00),
    .mdc, .mdio_o, .mdio_oe, .mdio_i(1'b1), .time_ns, .pps
  );

  bytes_t pkts[$];
  int     gaps[$], starts[$];
  bytes_t cur;
  int     low = 0, cyc = 0, n_txer = 0;
  bit     seen = 0, prev_en = 0;
  always @(posedge clk) if (!rst) begin
    cyc++;
    if (tx_er) n_txer++;
    if (tx_en) begin
      if (!prev_en) starts.push_back(cyc);
      if (seen && low > 0) gaps.push_back(low);
      low = 0; cur.push_back(txd);
    end else begin
      if (cur.size() > 0) begin pkts.push_back(cur); cur = {}; seen = 1; end
      low++;
    end
    prev_en = tx_en;
  end

  task automatic app_write(bit [31:0] w);
    @(negedge app_clk);
    while (app_full) @(negedge app_clk);
    app_wr_en = 1; app_wdata = w;
    @(negedge app_clk); app_wr_en = 0;
  endtask

  function automatic bit [31:0] word(int i);
    return {8'(4 * i), 8'(4 * i + 1), 8'(4 * i + 2), 8'(4 * i + 3)} ^ 32'(i * 32'h9E37_79B9);
  endfunction

  initial begin
    repeat (5) @(negedge clk);
    rst = 0;
    repeat (5) @(negedge clk);
    fork
      for (int i = 0; i < NPKT * PAY / 4; i++) app_write(word(i));
    join_none
    for (int t = 0; t < 20000 && pkts.size() < NPKT; t++) @(posedge clk);
    check(pkts.size() == NPKT, $sformatf("packets %0d", pkts.size()));
    for (int p = 0; p < pkts.size(); p++) begin
      bytes_t pay, exp;
      pay = {};
      for (int w = 0; w < PAY / 4; w++) put32(pay, word(p * PAY / 4 + w));
      exp = gmii_packet(udp_frame(HOST_MAC, MY_MAC, MY_IP, HOST_IP, 16'd1025, 16'd1024, pay));
      check(exp.size() == 1526, "expected packet size");
      check(same(pkts[p], exp), $sformatf("packet %0d content (size %0d)", p, pkts[p].size()));
    end
    check(gaps.size() == NPKT - 1, $sformatf("gap count %0d", gaps.size()));
    foreach (gaps[i]) check(gaps[i] == 12, $sformatf("gap %0d = %0d cycles", i, gaps[i]));
    for (int i = 1; i < starts.size(); i++)
      check(starts[i] - starts[i-1] == 1538, $sformatf("packet period %0d", starts[i] - starts[i-1]));
    check(n_txer == 0, "tx_er never asserted");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_gige_core: end-to-end test of the core through its GMII, FIFO and bus
// ports, with a 12-byte UDP payload so that the first packet is exactly the
// one printed in the paper's MAC waveform (FCS 12 BE 6D E5).
// It exercises and counts: application UDP stream at full rate with the
// interframe gap, an ARP request/reply, a Ping (ICMP echo) answered through
// the bus by a microcontroller model with ICMP priority over the running UDP
// stream, a UDP datagram received and read over the bus, the
// microcontroller's UDP channel, a frame with a bad FCS that must be
// ignored, an MDIO write and a PTP transmit timestamp.
module tb_gige_core;
  import tb_util_pkg::*;
  localparam int PAY = 12;
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
  logic [15:0] bus_addr = 0;
  logic        bus_we = 0, bus_re = 0, irq;
  logic [31:0] bus_wdata = 0, bus_rdata;
  logic        gtx_clk, tx_en, tx_er, rx_dv = 0, rx_er = 0;
  logic [7:0]  txd, rxd = 0;
  logic        mdc, mdio_o, mdio_oe;
  logic [63:0] time_ns;
  logic        pps;

  gige_core #(.PAYLOAD_BYTES(PAY), .PPS_BIT(12)) dut (
    .clk, .rst, .app_clk, .app_rst(rst), .app_wr_en, .app_wdata, .app_full,
    .bus_addr, .bus_we, .bus_re, .bus_wdata, .bus_rdata, .irq,
    .gmii_gtx_clk(gtx_clk), .gmii_tx_en(tx_en), .gmii_tx_er(tx_er), .gmii_txd(txd),
    .gmii_rx_dv(rx_dv), .gmii_rx_er(rx_er), .gmii_rxd(rxd),
    .mdc, .mdio_o, .mdio_oe, .mdio_i(1'b1), .time_ns, .pps
  );

  // ---------------- GMII transmit monitor ----------------
  bytes_t pkts[$];
  int     gaps[$];
  bytes_t cur;
  int     low = 0;
  bit     seen = 0;
  int     n_txer = 0;
  always @(posedge clk) if (!rst) begin
    if (tx_er) n_txer++;
    if (tx_en) begin
      if (seen && low > 0) gaps.push_back(low);
      low = 0; cur.push_back(txd);
    end else begin
      if (cur.size() > 0) begin pkts.push_back(cur); cur = {}; seen = 1; end
      low++;
    end
  end

  // ---------------- drivers ----------------
  task automatic gmii_send(bytes_t p);
    foreach (p[i]) begin @(negedge clk); rx_dv = 1; rxd = p[i]; end
    @(negedge clk); rx_dv = 0; rxd = 0;
    repeat (12) @(negedge clk);
  endtask
  task automatic app_write(bit [31:0] w);
    @(negedge app_clk);
    while (app_full) @(negedge app_clk);
    app_wr_en = 1; app_wdata = w;
    @(negedge app_clk); app_wr_en = 0;
  endtask
  task automatic bus_write(bit [15:0] a, bit [31:0] d);
    @(negedge clk); bus_addr = a; bus_wdata = d; bus_we = 1;
    @(negedge clk); bus_we = 0;
  endtask
  task automatic bus_read(bit [15:0] a, output bit [31:0] d);
    @(negedge clk); bus_addr = a; bus_re = 1;
    @(negedge clk); bus_re = 0; d = bus_rdata;
  endtask
  task automatic wait_pkts(int n, int maxc);
    int c = 0;
    while (pkts.size() < n && c < maxc) begin @(posedge clk); c++; end
  endtask

  function automatic bit same(bytes_t a, bytes_t b);
    if (a.size() != b.size()) return 0;
    foreach (a[i]) if (a[i] != b[i]) return 0;
    return 1;
  endfunction

  // mechanism counters
  int n_stream = 0, n_ifg = 0, n_arp = 0, n_icmp = 0, n_icmp_prio = 0, n_udprx = 0,
      n_uc = 0, n_badfcs = 0, n_mdio = 0, n_ptp = 0, n_pps = 0;
  always @(posedge pps) if (!rst) n_pps++;

  initial begin
    bit [31:0] d;
    bytes_t exp, f, pay, icmp_req, rep;
    int base;
    repeat (5) @(negedge clk);
    rst = 0;
    repeat (5) @(negedge clk);

    // 1) the paper's example packet
    app_write(32'h0C76985A); app_write(32'h0C76985B); app_write(32'h0C76985C);
    wait_pkts(1, 400);
    exp = gmii_packet(paper_frame());
    check(pkts.size() == 1 && same(pkts[0], exp), "paper packet on GMII");
    if (pkts.size() > 0) begin
      check(pkts[0].size() == 72, $sformatf("packet length %0d", pkts[0].size()));
      check(pkts[0][71] == 8'hE5 && pkts[0][68] == 8'h12, "FCS 12 BE 6D E5");
    end
    n_stream++;

    // 2) full-rate stream: 20 packets back to back, gap must be 12 cycles
    base = pkts.size();
    fork
      for (int i = 0; i < 20 * PAY / 4; i++) app_write(32'h1000_0000 + i);
    join_none
    repeat (100) @(negedge clk);
    // 3) ARP request from the host while the stream runs
    f = {eth_hdr(48'hFFFF_FFFF_FFFF, HOST_MAC, 16'h0806),
         arp_msg(16'd1, HOST_MAC, HOST_IP, 48'h0, MY_IP)};
    gmii_send(gmii_packet(f));
    // 4) Ping request while the stream runs
    icmp_req = icmp_echo(8'd8, 16'h1234, 16'd7, 24);
    f = {eth_hdr(MY_MAC, HOST_MAC, 16'h0800), ip_hdr(HOST_IP, MY_IP, 8'd1, 16'(icmp_req.size())), icmp_req};
    gmii_send(gmii_packet(f));
    // 5) a frame with a corrupted FCS must be ignored
    exp = gmii_packet(f);
    exp[exp.size()-1] ^= 8'h01;
    gmii_send(exp);
    // microcontroller model: answer the ping
    d = 0;
    for (int t = 0; t < 200 && !irq; t++) @(negedge clk);
    check(irq, "irq for ICMP");
    bus_read(16'h0044, d);
    check(d == icmp_req.size(), $sformatf("ICMP rx length %0d", d));
    rep = {};
    for (int i = 0; i < icmp_req.size(); i++) begin
      bus_read(16'(16'h1000 + 4 * i), d);
      rep.push_back(d[7:0]);
    end
    check(same(rep, icmp_req), "ICMP request read back");
    bus_write(16'h004C, 0);
    rep[0] = 8'd0; rep[2] = 8'h00; rep[3] = 8'h00;    // echo reply, checksum by hardware
    foreach (rep[i]) bus_write(16'(16'h1000 + 4 * i), {24'd0, rep[i]});
    bus_write(16'h0050, rep.size());
    bus_write(16'h0054, HOST_IP);
    bus_write(16'h0058, 1);
    wait_pkts(base + 22, 8000);
    repeat (300) @(negedge clk);

    // classify the packets sent since the stream started
    begin
      bytes_t arp_exp, icmp_exp, r2;
      int icmp_pos = -1;
      arp_exp = gmii_packet({eth_hdr(HOST_MAC, MY_MAC, 16'h0806),
                             arp_msg(16'd2, MY_MAC, MY_IP, HOST_MAC, HOST_IP)});
      r2 = icmp_echo(8'd0, 16'h1234, 16'd7, 24);
      icmp_exp = gmii_packet({eth_hdr(HOST_MAC, MY_MAC, 16'h0800),
                              ip_hdr(MY_IP, HOST_IP, 8'd1, 16'(r2.size())), r2});
      for (int i = base; i < pkts.size(); i++) begin
        if (same(pkts[i], arp_exp)) n_arp++;
        else if (same(pkts[i], icmp_exp)) begin n_icmp++; icmp_pos = i; end
        else if (pkts[i].size() == 72 && pkts[i][20] == 8'h08) begin
          bytes_t p2;
          int k;
          p2 = {};
          k = (i - base) - n_arp - n_icmp;
          for (int w = 0; w < 3; w++) put32(p2, 32'h1000_0000 + 3 * k + w);
          if (same(pkts[i], gmii_packet(udp_frame(HOST_MAC, MY_MAC, MY_IP, HOST_IP,
                                                  16'd1025, 16'd1024, p2)))) n_stream++;
          else $display("FAIL detail: stream packet %0d k=%0d content %h%h%h%h", i, k, pkts[i][50], pkts[i][51], pkts[i][52], pkts[i][53]);
        end
      end
      check(n_arp == 1, $sformatf("ARP replies %0d", n_arp));
      check(n_icmp == 1, $sformatf("ICMP replies %0d", n_icmp));
      check(n_stream == 21, $sformatf("stream packets %0d", n_stream));
      // ICMP priority: the reply went out while stream packets were still waiting
      if (icmp_pos >= 0 && icmp_pos < pkts.size() - 1) n_icmp_prio++;
    end
    // interframe gap of back-to-back packets
    foreach (gaps[i]) if (gaps[i] == 12) n_ifg++;
    begin
      int mn = 1000;
      foreach (gaps[i]) if (gaps[i] < mn) mn = gaps[i];
      check(mn == 12, $sformatf("minimum IFG %0d cycles", mn));
    end

    // 6) UDP datagram to port 1025, read through the bus
    pay = {};
    for (int i = 0; i < 33; i++) pay.push_back(8'(i + 100));
    f = udp_frame(MY_MAC, HOST_MAC, HOST_IP, MY_IP, 16'd5000, 16'd1025, pay);
    gmii_send(gmii_packet(f));
    bus_read(16'h0040, d);
    check(d[1], "UDP rx valid");
    bus_read(16'h0064, d);
    check(d == 33, $sformatf("UDP rx len %0d", d));
    bus_read(16'h006C, d);
    check(d == 5000, "UDP rx source port");
    rep = {};
    for (int i = 0; i < 33; i++) begin bus_read(16'(16'h2000 + 4 * i), d); rep.push_back(d[7:0]); end
    if (same(rep, pay)) n_udprx++;
    check(n_udprx == 1, "UDP rx payload");
    bus_write(16'h0070, 0);

    // 7) microcontroller UDP channel with other ports
    bus_write(16'h001C, {16'd2000, 16'd3000});
    base = pkts.size();
    for (int w = 0; w < 3; w++) bus_write(16'h0060, 32'hCAFE_0000 + w);
    wait_pkts(base + 1, 500);
    pay = {};
    for (int w = 0; w < 3; w++) put32(pay, 32'hCAFE_0000 + w);
    if (pkts.size() > base &&
        same(pkts[base], gmii_packet(udp_frame(HOST_MAC, MY_MAC, MY_IP, HOST_IP, 16'd2000, 16'd3000, pay))))
      n_uc++;
    check(n_uc == 1, "uC channel packet");

    // 8) PTP transmit timestamp of that packet, MDIO write
    bus_read(16'h0090, d);
    if (d != 0) n_ptp++;
    check(n_ptp == 1, "PTP tx timestamp captured");
    bus_write(16'h00B0, {1'b0, 5'd0, 5'd1, 5'd0, 16'h1140});
    bus_read(16'h0040, d);
    if (d[3]) n_mdio++;
    for (int t = 0; t < 20000; t++) begin @(negedge clk); if (!dut.mdio_busy) break; end
    check(!dut.mdio_busy, "MDIO frame finished");
    check(n_txer == 0, "tx_er never asserted");

    // the bad-FCS frame produced no second ICMP message
    bus_read(16'h0040, d);
    if (!d[0]) n_badfcs++;
    check(n_badfcs == 1, "bad FCS frame dropped");
    check(n_pps > 0, "PPS pulses");
    check(n_ifg > 0 && n_icmp_prio > 0 && n_mdio > 0, "mechanisms seen");
    $display("mechanisms: stream=%0d ifg12=%0d arp=%0d icmp=%0d icmp_prio=%0d udprx=%0d uc=%0d badfcs=%0d mdio=%0d ptp=%0d pps=%0d",
             n_stream, n_ifg, n_arp, n_icmp, n_icmp_prio, n_udprx, n_uc, n_badfcs, n_mdio, n_ptp, n_pps);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

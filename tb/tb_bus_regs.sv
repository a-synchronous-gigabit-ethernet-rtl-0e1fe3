// tb_bus_regs: checks reset values, register writes and read-back, the
// write strobes (release, send, uC FIFO, PTP load/adjust, MDIO), buffer
// address decoding and the status word.
module tb_bus_regs;
  int checks = 0, failures = 0;
  task automatic check(bit c, string m);
    checks++; if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask
  logic clk = 0, rst = 1;
  always #4 clk = ~clk;
  logic [15:0] bus_addr = 0;
  logic bus_we = 0, bus_re = 0, irq;
  logic [31:0] bus_wdata = 0, bus_rdata;
  logic [47:0] my_mac, gw_mac; logic [31:0] my_ip, dst_ip;
  logic [15:0] app_src_port, app_dst_port, uc_src_port, uc_dst_port, rx_port, icmp_tx_len;
  logic [7:0] ifg_cycles, icmp_tx_wdata;
  logic icmp_rx_valid = 0, icmp_rx_release, icmp_tx_we, icmp_tx_send, icmp_tx_busy = 1;
  logic [9:0] icmp_rx_raddr, icmp_tx_waddr;
  logic [31:0] icmp_tx_dst_ip, uc_wdata, ptp_adjust_ns;
  logic uc_wr_en, udp_rx_valid = 0, udp_rx_release, ptp_load, ptp_adjust;
  logic [10:0] udp_rx_raddr;
  logic [63:0] ptp_load_val;
  logic mdio_cmd_valid, mdio_cmd_read; logic [4:0] mdio_cmd_phy, mdio_cmd_reg; logic [15:0] mdio_cmd_wdata;
  bus_regs dut (.clk, .rst, .bus_addr, .bus_we, .bus_re, .bus_wdata, .bus_rdata, .irq,
    .my_mac, .my_ip, .gw_mac, .dst_ip, .app_src_port, .app_dst_port, .uc_src_port, .uc_dst_port,
    .rx_port, .ifg_cycles, .icmp_rx_valid, .icmp_rx_len(16'd64), .icmp_rx_src_ip(32'h0A000001),
    .icmp_rx_raddr, .icmp_rx_rdata(8'(icmp_rx_raddr) ^ 8'h5A), .icmp_rx_release, .icmp_tx_we,
    .icmp_tx_waddr, .icmp_tx_wdata, .icmp_tx_len, .icmp_tx_dst_ip, .icmp_tx_send, .icmp_tx_busy,
    .uc_wr_en, .uc_wdata, .uc_full(1'b0), .udp_rx_valid, .udp_rx_len(16'd33),
    .udp_rx_src_ip(32'h0A000002), .udp_rx_src_port(16'd5000), .udp_rx_raddr,
    .udp_rx_rdata(8'(udp_rx_raddr) ^ 8'hC3), .udp_rx_release, .ptp_load, .ptp_load_val, .ptp_adjust,
    .ptp_adjust_ns, .ptp_time(64'h0000_0001_2345_6789), .ptp_tx_ts(64'h11), .ptp_rx_ts(64'h22),
    .mdio_cmd_valid, .mdio_cmd_read, .mdio_cmd_phy, .mdio_cmd_reg, .mdio_cmd_wdata,
    .mdio_busy(1'b0), .mdio_rdata(16'hABCD));

  int n_rel = 0, n_send = 0, n_uc = 0, n_load = 0, n_adj = 0, n_mdio = 0, n_twe = 0, n_urel = 0;
  always @(posedge clk) if (!rst) begin
    if (icmp_rx_release) n_rel++;
    if (icmp_tx_send) n_send++;
    if (uc_wr_en) begin n_uc++; check(uc_wdata == 32'hDEAD_BEEF, "uC word"); end
    if (ptp_load) begin n_load++; check(ptp_load_val == 64'h0000_0005_0000_0007, "load value"); end
    if (ptp_adjust) begin n_adj++; check(ptp_adjust_ns == 32'hFFFF_FFF0, "adjust value"); end
    if (mdio_cmd_valid) begin n_mdio++;
      check(mdio_cmd_read && mdio_cmd_phy == 5'd3 && mdio_cmd_reg == 5'd4 && mdio_cmd_wdata == 16'h55AA, "mdio cmd"); end
    if (icmp_tx_we) begin n_twe++; check(icmp_tx_waddr == 10'd5 && icmp_tx_wdata == 8'h77, "icmp tx write"); end
    if (udp_rx_release) n_urel++;
  end

  task automatic wr(bit [15:0] a, bit [31:0] d);
    @(negedge clk); bus_addr = a; bus_wdata = d; bus_we = 1; @(negedge clk); bus_we = 0;
  endtask
  task automatic rd(bit [15:0] a, output bit [31:0] d);
    @(negedge clk); bus_addr = a; bus_re = 1; @(negedge clk); bus_re = 0; d = bus_rdata;
  endtask

  initial begin
    bit [31:0] d;
    repeat (3) @(negedge clk); rst = 0;
    check(my_mac == 48'h40D8_5505_5005 && my_ip == 32'hC0A8_000F && gw_mac == 48'h0040_9E03_68C5 &&
          dst_ip == 32'hC0A8_0001 && app_src_port == 16'd1025 && app_dst_port == 16'd1024 &&
          ifg_cycles == 8'd12, "reset values");
    wr(16'h0008, 32'h0A0B0C0D); rd(16'h0008, d); check(my_ip == 32'h0A0B0C0D && d == 32'h0A0B0C0D, "own IP");
    wr(16'h0000, 32'h1122); wr(16'h0004, 32'h33445566); check(my_mac == 48'h1122_3344_5566, "own MAC");
    wr(16'h0018, {16'd7, 16'd8}); check(app_src_port == 16'd7 && app_dst_port == 16'd8, "ports");
    wr(16'h0024, 32'd1); check(ifg_cycles == 8'd3, "IFG clamped to 3");
    wr(16'h0024, 32'd40); rd(16'h0024, d); check(d == 40, "IFG");
    icmp_rx_valid = 1; #1 check(irq, "irq");
    rd(16'h0040, d); check(d[4:0] == 5'b00101, $sformatf("status %b", d[4:0]));
    rd(16'h0044, d); check(d == 64, "ICMP length");
    rd(16'h1000 + 4 * 9, d); check(d == (9 ^ 8'h5A), "ICMP buffer read");
    rd(16'h2000 + 4 * 300, d); check(d == (8'(300) ^ 8'hC3), "UDP buffer read");
    rd(16'h006C, d); check(d == 5000, "UDP source port");
    rd(16'h0080, d); check(d == 1, "time hi");
    rd(16'h0084, d); check(d == 32'h2345_6789, "time lo");
    rd(16'h0098, d); check(d == 32'h22, "rx ts");
    wr(16'h004C, 0); wr(16'h0058, 0); wr(16'h0060, 32'hDEAD_BEEF); wr(16'h0070, 0);
    wr(16'h0080, 5); wr(16'h0084, 7); wr(16'h0088, 32'hFFFF_FFF0);
    wr(16'h00B0, {1'b1, 5'd0, 5'd3, 5'd4, 16'h55AA}); wr(16'h1000 + 4 * 5, 32'h77);
    rd(16'h00B0, d); check(d[15:0] == 16'hABCD, "MDIO read data");
    check(n_rel == 1 && n_send == 1 && n_uc == 1 && n_load == 1 && n_adj == 1 && n_mdio == 1 &&
          n_twe == 1 && n_urel == 1, "one strobe each");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (5000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule

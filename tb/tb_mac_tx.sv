// tb_mac_tx: drives the frame of the paper's MAC waveform (54 bytes, so 6
// bytes of padding are needed) and checks the GMII output byte by byte
// (preamble, SFD, frame, 0xAA padding, FCS 12 BE 6D E5), the 9-cycle
// latency, tx_busy and the interframe gap for the default 12 and for 20
// cycles, with an upstream that starts one cycle after tx_busy falls.
module tb_mac_tx;
  import tb_util_pkg::*;
  int checks = 0, failures = 0;
  task automatic check(bit c, string m);
    checks++; if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask

  logic clk = 0, rst = 1;
  always #4 clk = ~clk;
  logic [7:0] ifg = 8'd12, txd = 8'hAA, phy_txd;
  logic tx_en = 0, tx_busy, phy_txen, phy_txer, tx_sfd;
  mac_tx dut (.clk, .rst, .ifg_cycles(ifg), .tx_en, .txd, .tx_busy,
              .phy_txen, .phy_txer, .phy_txd, .tx_sfd);

  bytes_t out[$], cur;
  int gaps[$], low = 0, cyc = 0, t_first_en = -1, t_first_txen = -1, t_sfd = -1;
  always @(posedge clk) if (!rst) begin
    cyc++;
    if (tx_sfd && t_sfd < 0) t_sfd = cyc;
    if (phy_txen) begin
      if (t_first_txen < 0) t_first_txen = cyc;
      if (out.size() > 0 && cur.size() == 0) gaps.push_back(low);
      low = 0; cur.push_back(phy_txd);
    end else begin
      if (cur.size() > 0) begin out.push_back(cur); cur = {}; end
      low++;
    end
    check(!phy_txer, "phy_txer low");
  end

  task automatic send(bytes_t f);
    // upstream: start in the cycle after tx_busy is seen low
    @(negedge clk);
    while (tx_busy) @(negedge clk);
    @(negedge clk);
    foreach (f[i]) begin
      tx_en = 1; txd = f[i];
      if (i == 0 && t_first_en < 0) t_first_en = cyc;
      @(negedge clk);
      if (i == 0) check(tx_busy, "tx_busy after start");
    end
    tx_en = 0; txd = 8'hAA;
  endtask

  initial begin
    bytes_t f, big;
    repeat (3) @(negedge clk); rst = 0;
    f = paper_frame();
    check(f.size() == 54, "reference frame size");
    send(f); send(f);
    for (int i = 0; i < 100; i++) big.push_back(8'($urandom));
    send(big);
    ifg = 8'd20;
    send(f);
    repeat (120) @(negedge clk);
    check(out.size() == 4, $sformatf("packets %0d", out.size()));
    if (out.size() == 4) begin
      bytes_t e;
      e = gmii_packet(f);
      check(out[0].size() == 72, "72-byte packet");
      foreach (e[i]) if (i < out[0].size()) check(out[0][i] == e[i], $sformatf("byte %0d: %h vs %h", i, out[0][i], e[i]));
      check(out[0][68] == 8'h12 && out[0][69] == 8'hBE && out[0][70] == 8'h6D && out[0][71] == 8'hE5, "paper FCS");
      check(out[2].size() == 112, "100-byte frame without padding");
      begin bytes_t e2; bit okb; e2 = gmii_packet(big); okb = 1;
        foreach (e2[i]) if (out[2][i] != e2[i]) okb = 0;
        check(okb, "random frame contents"); end
    end
    check(gaps.size() == 3 && gaps[0] == 12 && gaps[1] == 12 && gaps[2] == 20,
          $sformatf("gaps %p", gaps));
    check(t_first_txen == t_first_en + 2, "phy_txen one cycle after tx_en");  // t_first_en is counted one edge early
    check(t_sfd == t_first_en + 9, "SFD 8 cycles after tx_en");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (5000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule

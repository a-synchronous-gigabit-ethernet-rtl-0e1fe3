// tb_mac_rx: sends GMII packets (preamble, SFD, frame, FCS) and checks that
// the frame comes out without preamble and FCS, with sof on the first byte
// and an eof whose ok flag reflects the FCS, rx_er and the minimum length.
module tb_mac_rx;
  import tb_util_pkg::*;
  import gige_pkg::*;
  int checks = 0, failures = 0;
  task automatic check(bit c, string m);
    checks++; if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask

  logic clk = 0, rst = 1;
  always #4 clk = ~clk;
  logic rxdv = 0, rxer = 0, rx_sfd;
  logic [7:0] rxd = 0;
  rx_stream_t rx;
  mac_rx dut (.clk, .rst, .phy_rxdv(rxdv), .phy_rxer(rxer), .phy_rxd(rxd), .rx, .rx_sfd);

  bytes_t got; int eofs = 0, oks = 0, sofs = 0, sfds = 0;
  always @(posedge clk) if (!rst) begin
    if (rx.valid) begin got.push_back(rx.data); if (rx.sof) sofs++; end
    if (rx.eof) begin eofs++; if (rx.ok) oks++; end
    if (rx_sfd) sfds++;
  end

  task automatic send(bytes_t p, int er_at);
    foreach (p[i]) begin @(negedge clk); rxdv = 1; rxd = p[i]; rxer = (i == er_at); end
    @(negedge clk); rxdv = 0; rxer = 0;
    repeat (10) @(negedge clk);
  endtask

  initial begin
    bytes_t f, p, e;
    repeat (3) @(negedge clk); rst = 0;
    // good frame
    f = paper_frame(); e = pad_fcs(f); e = e[0:59];
    got = {}; send(gmii_packet(f), -1);
    check(got.size() == 60, $sformatf("60 bytes out, got %0d", got.size()));
    check(got == e, "frame bytes");
    check(eofs == 1 && oks == 1 && sofs == 1 && sfds == 1, "good frame ok");
    // corrupted FCS
    p = gmii_packet(f); p[30] ^= 8'h40;
    got = {}; send(p, -1);
    check(eofs == 2 && oks == 1, "bad FCS rejected");
    // rx_er during the frame
    send(gmii_packet(f), 20);
    check(eofs == 3 && oks == 1, "rx_er rejected");
    // long random frame, short preamble
    f = {};
    for (int i = 0; i < 300; i++) f.push_back(8'($urandom));
    p = gmii_packet(f); p = p[3:$];
    got = {}; send(p, -1);
    check(got == f && eofs == 4 && oks == 2, "300-byte frame, short preamble");
    // runt frame with valid CRC (20 bytes + FCS)
    f = {};
    for (int i = 0; i < 20; i++) f.push_back(8'(i));
    begin bit [31:0] c; c = crc32(f); p = {8'h55, 8'hD5, f};
      for (int i = 0; i < 4; i++) p.push_back(c[8*i +: 8]); end
    send(p, -1);
    check(eofs == 5 && oks == 2, "runt rejected");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (5000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule

// tb_ptp_clock: the time must advance by 8 ns per cycle, take a loaded value
// and a signed adjustment, capture the time at the SFD strobes, and pps must
// rise once per 2^PPS_BIT ns (tested with PPS_BIT = 10).
module tb_ptp_clock;
  int checks = 0, failures = 0;
  task automatic check(bit c, string m);
    checks++; if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask
  logic clk = 0, rst = 1;
  always #4 clk = ~clk;
  logic load = 0, adjust = 0, tx_sfd = 0, rx_sfd = 0, pps;
  logic [63:0] load_val = 0, time_ns, tx_ts, rx_ts;
  logic [31:0] adjust_ns = 0;
  ptp_clock #(.PPS_BIT(10)) dut (.clk, .rst, .load, .load_val, .adjust, .adjust_ns, .tx_sfd, .rx_sfd,
                                 .time_ns, .tx_ts, .rx_ts, .pps);
  int rises = 0;
  logic [63:0] rise_t[$];
  always @(posedge pps) if (!rst) begin rises++; rise_t.push_back(time_ns); end

  initial begin
    logic [63:0] t0, t_cap;
    repeat (3) @(negedge clk); rst = 0;
    @(negedge clk); t0 = time_ns;
    repeat (10) @(negedge clk);
    check(time_ns == t0 + 80, "8 ns per cycle");
    load_val = 64'd1_000_000_000; load = 1; @(negedge clk); load = 0;
    check(time_ns == 64'd1_000_000_000, "load");
    adjust_ns = -32'sd40; adjust = 1; @(negedge clk); adjust = 0;
    check(time_ns == 64'd1_000_000_000 - 32, "adjust -40 (plus one step)");
    t_cap = time_ns; tx_sfd = 1; @(negedge clk); tx_sfd = 0;
    check(tx_ts == t_cap, "tx timestamp");
    t_cap = time_ns; rx_sfd = 1; @(negedge clk); rx_sfd = 0;
    check(rx_ts == t_cap, "rx timestamp");
    rises = 0; rise_t = {};
    repeat (600) @(negedge clk);
    check(rises >= 4, $sformatf("pps rises %0d", rises));
    for (int i = 1; i < rise_t.size(); i++) check(rise_t[i] - rise_t[i-1] == 1024, "pps period 1024 ns");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (5000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule

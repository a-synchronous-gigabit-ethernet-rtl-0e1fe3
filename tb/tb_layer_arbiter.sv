// tb_layer_arbiter: three upper modules with random availability. Checks the
// fixed priority (lowest index wins), that the grant does not move while
// lock is held, that start reaches only the granted module and that data and
// meta of the granted module are selected.
module tb_layer_arbiter;
  import gige_pkg::*;
  int checks = 0, failures = 0;
  task automatic check(bit c, string m);
    checks++; if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask

  logic clk = 0, rst = 1;
  always #4 clk = ~clk;
  logic [2:0] avail = 0, start_up;
  tx_meta_t [2:0] meta;
  tx_data_t [2:0] data;
  logic lock = 0, start = 0, req;
  tx_meta_t meta_sel;
  tx_data_t data_sel;
  logic [1:0] grant;
  layer_arbiter #(.N(3)) dut (.clk, .rst, .avail, .meta, .data, .start_up, .lock, .start,
                              .req, .meta_sel, .data_sel, .grant);

  initial begin
    logic [1:0] exp_g, held;
    for (int i = 0; i < 3; i++) begin
      meta[i] = '0; meta[i].len = 16'(100 + i);
      data[i] = '{en: 1'b1, d: 8'(8'hA0 + i)};
    end
    repeat (3) @(negedge clk); rst = 0;
    exp_g = 0;
    for (int n = 0; n < 400; n++) begin
      @(negedge clk);
      // model of the expected grant register
      avail = 3'($urandom);
      lock  = ($urandom % 3) == 0;
      start = $urandom % 2;
      #1;
      check(grant == exp_g, $sformatf("grant %0d exp %0d", grant, exp_g));
      check(req == avail[grant], "req");
      check(meta_sel.len == 16'(100 + grant) && data_sel.d == 8'(8'hA0 + grant), "mux");
      check(start_up == (start ? (3'b1 << grant) : 3'b0), "ctrl demux");
      if (!lock) begin
        if (avail[0]) exp_g = 0; else if (avail[1]) exp_g = 1; else if (avail[2]) exp_g = 2;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (5000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule

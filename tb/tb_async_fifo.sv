// tb_async_fifo: writer at 6 ns and reader at 8 ns period with random
// enables; every word must come out once and in order, full and empty must
// stop overflow and underflow, and a FIFO filled without reads must hold
// exactly DEPTH words.
module tb_async_fifo;
  int checks = 0, failures = 0;
  task automatic check(bit c, string m);
    checks++; if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask
  localparam int D = 16;
  logic wclk = 0, rclk = 0, rst = 1;
  always #3 wclk = ~wclk;
  always #4 rclk = ~rclk;
  logic wr_en = 0, rd_en = 0, full, empty;
  logic [31:0] wdata = 0, rdata;
  async_fifo #(.WIDTH(32), .DEPTH(D)) dut (.wclk, .wrst(rst), .wr_en, .wdata, .full,
    .rclk, .rrst(rst), .rd_en, .rdata, .empty);

  int nw = 0, nr = 0;
  bit writing = 0, reading = 0;
  always @(posedge wclk) if (wr_en && !full) nw++;
  always @(negedge wclk) begin
    if (writing) begin wr_en <= ($urandom % 2) && !full; wdata <= nw; end
    else wr_en <= 0;
  end
  always @(posedge rclk) if (rd_en && !empty) begin
    check(rdata == nr, $sformatf("order: %0d exp %0d", rdata, nr));
    nr++;
  end
  always @(negedge rclk) rd_en <= reading && ($urandom % 2) && !empty;

  initial begin
    repeat (4) @(negedge rclk); rst = 0;
    // fill without reading
    writing = 1;
    repeat (100) @(negedge wclk);
    writing = 0;
    repeat (4) @(negedge wclk);
    check(nw == D && full, $sformatf("holds %0d words", nw));
    reading = 1;
    writing = 1;
    wait (nw >= 500);
    writing = 0;
    repeat (200) @(negedge rclk);
    check(nr == nw && empty, $sformatf("all read %0d/%0d", nr, nw));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (20000) @(posedge rclk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule

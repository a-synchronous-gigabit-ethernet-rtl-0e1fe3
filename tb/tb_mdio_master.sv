// tb_mdio_master: a PHY model decodes the clause 22 frames on mdc/mdio. A
// write must arrive with preamble, start, opcode, addresses, turnaround and
// data; a read must release the line after the addresses and return the
// 16 bits the model drives.
module tb_mdio_master;
  int checks = 0, failures = 0;
  task automatic check(bit c, string m);
    checks++; if (!c) begin failures++; $display("FAIL: %s", m); end
  endtask
  logic clk = 0, rst = 1;
  always #4 clk = ~clk;
  logic cmd_valid = 0, cmd_read = 0, busy, mdc, mdio_o, mdio_oe, mdio_i;
  logic [4:0] cmd_phy = 0, cmd_reg = 0;
  logic [15:0] cmd_wdata = 0, rdata;
  mdio_master #(.DIV(2)) dut (.clk, .rst, .cmd_valid, .cmd_read, .cmd_phy, .cmd_reg, .cmd_wdata,
                              .busy, .rdata, .mdc, .mdio_o, .mdio_oe, .mdio_i);
  // PHY model: sample on rising mdc, drive read data after rising mdc
  logic [63:0] bits; int nb = 0; logic [15:0] phy_val = 16'hBEEF; logic drv = 0, dval = 1;
  assign mdio_i = mdio_oe ? mdio_o : (drv ? dval : 1'b1);
  always @(posedge mdc) begin
    bits = {bits[62:0], mdio_i}; nb++;
  end
  // after sampled bit k the model sets bit k+1: TA bit 48 = 0, data bits 49..64
  always @(posedge mdc) begin
    if (cmd_read && nb == 47) begin drv <= 1; dval <= 1'b0; end
    else if (drv && nb >= 48 && nb <= 63) dval <= phy_val[63 - nb];
    else if (nb >= 64) drv <= 0;
  end

  task automatic cmd(bit rd, bit [4:0] p, bit [4:0] r, bit [15:0] d);
    nb = 0; bits = 0;
    @(negedge clk); cmd_valid = 1; cmd_read = rd; cmd_phy = p; cmd_reg = r; cmd_wdata = d;
    @(negedge clk); cmd_valid = 0;
    #1;
    check(busy, "busy");
    while (busy) @(negedge clk);
  endtask

  initial begin
    repeat (3) @(negedge clk); rst = 0;
    cmd(0, 5'd7, 5'd9, 16'h1234);
    check(nb == 64, $sformatf("64 bits, got %0d", nb));
    check(bits == {32'hFFFF_FFFF, 2'b01, 2'b01, 5'd7, 5'd9, 2'b10, 16'h1234}, $sformatf("write frame %h", bits));
    cmd(1, 5'd1, 5'd2, 16'h0);
    check(bits[63:18] == {32'hFFFF_FFFF, 2'b01, 2'b10, 5'd1, 5'd2}, "read header");
    check(rdata == phy_val, $sformatf("read data %h", rdata));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (5000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule

// async_fifo: first-in first-out buffer between two clock domains.
//
// The application writes in its own clock domain and the UDP layer reads in
// the 125 MHz core domain. Read and write pointers are one bit wider than
// the address and cross the clock boundary in Gray code through two-flop
// synchronizers, so full and empty are exact on their own side and
// pessimistic (late) on the other. The read port is first-word-fall-through:
// rdata shows the oldest word whenever empty is low, and rd_en pops it.
// DEPTH must be a power of two. Reset is synchronous, one per domain, and
// both must be applied together.
// The paper asks for an asynchronous FIFO of 32-bit words at 125 MHz holding
// at least two payloads; the Gray-pointer structure is this design's choice.
module async_fifo #(
  parameter int WIDTH = 32,
  parameter int DEPTH = 1024
) (
  input  logic             wclk,
  input  logic             wrst,
  input  logic             wr_en,
  input  logic [WIDTH-1:0] wdata,
  output logic             full,
  input  logic             rclk,
  input  logic             rrst,
  input  logic             rd_en,
  output logic [WIDTH-1:0] rdata,
  output logic             empty
);
  localparam int AW = $clog2(DEPTH);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW:0] wbin, wgray, rbin, rgray;
  logic [AW:0] wq1_rgray, wq2_rgray, rq1_wgray, rq2_wgray;
  logic [AW:0] wbin_n, rbin_n;

  function automatic logic [AW:0] bin2gray(input logic [AW:0] b);
    return b ^ (b >> 1);
  endfunction

  assign wbin_n = wbin + (AW+1)'(wr_en && !full);
  assign rbin_n = rbin + (AW+1)'(rd_en && !empty);

  // write domain
  always_ff @(posedge wclk) begin
    if (wr_en && !full) mem[wbin[AW-1:0]] <= wdata;
  end
  always_ff @(posedge wclk) begin
    if (wrst) begin
      wbin <= '0; wgray <= '0; wq1_rgray <= '0; wq2_rgray <= '0;
    end else begin
      wbin      <= wbin_n;
      wgray     <= bin2gray(wbin_n);
      wq1_rgray <= rgray;
      wq2_rgray <= wq1_rgray;
    end
  end
  assign full = (wgray == {~wq2_rgray[AW:AW-1], wq2_rgray[AW-2:0]});

  // read domain
  always_ff @(posedge rclk) begin
    if (rrst) begin
      rbin <= '0; rgray <= '0; rq1_wgray <= '0; rq2_wgray <= '0;
    end else begin
      rbin      <= rbin_n;
      rgray     <= bin2gray(rbin_n);
      rq1_wgray <= wgray;
      rq2_wgray <= rq1_wgray;
    end
  end
  assign empty = (rgray == rq2_wgray);
  assign rdata = mem[rbin[AW-1:0]];

endmodule

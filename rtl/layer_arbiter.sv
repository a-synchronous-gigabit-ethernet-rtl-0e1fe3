// layer_arbiter: the interconnect between the N modules of layer N+1 and the
// one module of layer N that carries their frames ("Data-Pull" model).
//
// It holds the three parts drawn in the paper's interconnect figure:
//  * Arbiter: each upper module reports whether it has a frame to send
//    (avail) and what it is (meta). A registered grant picks the available
//    module with the lowest index, so index 0 has the highest priority (ARP
//    before IP, ICMP before UDP, as in the paper). The grant moves only while
//    the lower module does not hold `lock`, so it is stable for a whole frame.
//  * Ctrl Demux: the lower module's one-cycle `start` pulse goes to the
//    granted upper module only.
//  * Data Mux: the granted module's tx_data_t goes to the lower module, which
//    registers it once (the single register stage of the Data-Pull model).
// The lower module sees req (the granted module has a frame) and its meta.
// Everything here is combinational except the grant register.
module layer_arbiter #(
  parameter int N = 2
) (
  input  logic                        clk,
  input  logic                        rst,
  // layer N+1 side
  input  logic [N-1:0]                avail,
  input  gige_pkg::tx_meta_t [N-1:0]  meta,
  input  gige_pkg::tx_data_t [N-1:0]  data,
  output logic [N-1:0]                start_up,
  // layer N side
  input  logic                        lock,
  input  logic                        start,
  output logic                        req,
  output gige_pkg::tx_meta_t          meta_sel,
  output gige_pkg::tx_data_t          data_sel,
  output logic [$clog2(N > 1 ? N : 2)-1:0] grant
);
  import gige_pkg::*;

  localparam int GW = $clog2(N > 1 ? N : 2);
  logic [GW-1:0] next_grant;

  always_comb begin
    next_grant = grant;
    for (int i = N - 1; i >= 0; i--)
      if (avail[i]) next_grant = GW'(i);
  end

  always_ff @(posedge clk) begin
    if (rst)        grant <= '0;
    else if (!lock) grant <= next_grant;
  end

  assign req      = avail[grant];
  assign meta_sel = meta[grant];
  assign data_sel = data[grant];

  always_comb begin
    start_up        = '0;
    start_up[grant] = start;
  end

  // the grant must not move while the lower module transfers a frame
  a_grant_stable: assert property (@(posedge clk) disable iff (rst)
    lock |=> $stable(grant));
endmodule

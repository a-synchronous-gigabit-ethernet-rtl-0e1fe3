// ptp_clock: the timestamp clock of the PTP support.
//
// A 64-bit time counter in nanoseconds advances by INC_NS = 8 every cycle of
// the synchronized 125 MHz clock, so master and slave count at exactly the
// same rate once the slave runs on the clock its PHY recovered. The
// microcontroller, which runs the PTP message exchange, sets the counter
// (load) and corrects it by a signed offset (adjust) once per
// synchronization; the offset can only be applied in whole clock periods,
// which is why the absolute alignment is limited to 8 ns. The time at which
// the SFD of a sent and of a received frame passed the MAC is captured
// (tx_ts, rx_ts), the hardware timestamps that PTP needs.
// pps is a square wave whose rising edge marks each wrap of the low PPS_BIT
// bits of the time (2^28 ns = 268.4 ms, the pulse period printed for the
// paper's measurement); PPS_BIT = 0 is not allowed.
// Timing: load/adjust take effect at the next clock edge; captures are
// registered in the cycle of tx_sfd/rx_sfd.
module ptp_clock #(
  parameter int          PPS_BIT = 28,
  parameter logic [63:0] INC_NS  = 64'd8
) (
  input  logic        clk,
  input  logic        rst,
  input  logic        load,
  input  logic [63:0] load_val,
  input  logic        adjust,
  input  logic [31:0] adjust_ns,   // signed
  input  logic        tx_sfd,
  input  logic        rx_sfd,
  output logic [63:0] time_ns,
  output logic [63:0] tx_ts,
  output logic [63:0] rx_ts,
  output logic        pps
);
  always_ff @(posedge clk) begin
    if (rst) begin
      time_ns <= '0;
      tx_ts   <= '0;
      rx_ts   <= '0;
    end else begin
      if (load)        time_ns <= load_val;
      else if (adjust) time_ns <= time_ns + INC_NS + {{32{adjust_ns[31]}}, adjust_ns};
      else             time_ns <= time_ns + INC_NS;
      if (tx_sfd) tx_ts <= time_ns;
      if (rx_sfd) rx_ts <= time_ns;
    end
  end

  assign pps = !time_ns[PPS_BIT-1];
endmodule

// udp_payload_fifo: the payload buffer of one UDP transmit channel.
//
// The application (or the microcontroller) writes 32-bit words in its own
// clock domain. Every PAYLOAD_BYTES/4 words form one UDP payload. While the
// words are written, the 16-bit one's complement sum of the payload is
// accumulated; with the last word of a payload the sum is pushed into a small
// second FIFO. So the read side sees a packet (pkt_empty low) only when the
// whole payload and its checksum contribution are stored, and the UDP layer
// can put a correct checksum into its header before it sends the payload
// ("Data-Pull" needs the header first). The data FIFO holds DEPTH words
// (1024 words = 4 KiB, at least two 1472-byte payloads as the paper asks).
//
// Interface: write side wr_en/wdata/full (full also when the sum FIFO is
// full); read side: pkt_empty, pkt_sum (sum of the oldest complete payload),
// pkt_pop (drop that sum), rd_en/rdata (FWFT data words, big-endian bytes).
// Payload sizes must be multiples of 4 bytes (1472 and 8972 are).
// The precomputed checksum is this design's own way to meet the paper's
// "checksum calculation" requirement; the paper does not say how it did it.
module udp_payload_fifo #(
  parameter int PAYLOAD_BYTES = 1472,
  parameter int DEPTH         = 1024,
  parameter int PKTS          = 8
) (
  input  logic        wclk,
  input  logic        wrst,
  input  logic        wr_en,
  input  logic [31:0] wdata,
  output logic        full,
  input  logic        rclk,
  input  logic        rrst,
  output logic        pkt_empty,
  output logic [15:0] pkt_sum,
  input  logic        pkt_pop,
  input  logic        rd_en,
  output logic [31:0] rdata
);
  import gige_pkg::*;
  localparam int WORDS = PAYLOAD_BYTES / 4;

  logic        dfull, sfull, dempty;
  logic        wr;
  logic [15:0] acc, acc_n;
  logic [$clog2(WORDS+1)-1:0] wcnt;
  logic        last;

  assign full  = dfull || sfull;
  assign wr    = wr_en && !full;
  assign last  = (wcnt == ($bits(wcnt))'(WORDS - 1));
  assign acc_n = oc_add(oc_add(acc, wdata[31:16]), wdata[15:0]);

  always_ff @(posedge wclk) begin
    if (wrst) begin
      acc  <= '0;
      wcnt <= '0;
    end else if (wr) begin
      if (last) begin
        acc  <= '0;
        wcnt <= '0;
      end else begin
        acc  <= acc_n;
        wcnt <= wcnt + 1'b1;
      end
    end
  end

  async_fifo #(.WIDTH(32), .DEPTH(DEPTH)) u_data (
    .wclk, .wrst, .wr_en(wr), .wdata, .full(dfull),
    .rclk, .rrst, .rd_en, .rdata, .empty(dempty)
  );

  async_fifo #(.WIDTH(16), .DEPTH(PKTS)) u_sum (
    .wclk, .wrst, .wr_en(wr && last), .wdata(acc_n), .full(sfull),
    .rclk, .rrst, .rd_en(pkt_pop), .rdata(pkt_sum), .empty(pkt_empty)
  );

  // the UDP layer never reads beyond what has been written
  a_no_underflow: assert property (@(posedge rclk) disable iff (rrst)
    rd_en |-> !dempty);
endmodule

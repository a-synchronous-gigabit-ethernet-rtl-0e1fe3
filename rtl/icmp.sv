// icmp: the ICMP layer, the hardware half of the Ping service.
//
// In the paper an Echo Request is answered by an interrupt routine of the
// microcontroller; this layer stores one message in each direction and does
// the checksum for it.
// Receive: the payload of an IP datagram with protocol 1 (the complete ICMP
// message) is written into the receive buffer. If the frame was good and the
// message fits, rx_valid rises (use it as the interrupt) with its length and
// the sender's IP address; the microcontroller reads the bytes through
// rx_raddr/rx_rdata and frees the buffer with rx_release. Messages arriving
// while rx_valid is high are dropped.
// Transmit: the microcontroller writes a message into the transmit buffer
// (tx_we/tx_waddr/tx_wdata), sets tx_len and tx_dst_ip and pulses tx_send.
// The layer then sums the message in one pass (one byte per cycle, bytes 2-3
// taken as zero), reports it to the IP layer's arbiter and, when pulled,
// sends it with the computed checksum in bytes 2-3. tx_busy is high from
// tx_send until the last byte has left.
// Buffer size BUF_BYTES is this design's choice (the paper gives one block
// RAM to the ICMP layer); the checksum pass is too.
module icmp #(
  parameter int BUF_BYTES = 1024
) (
  input  logic                 clk,
  input  logic                 rst,
  // from the IP layer
  input  gige_pkg::rx_stream_t rx,
  input  logic [7:0]           rx_proto,
  input  logic [31:0]          rx_ip,
  // microcontroller, receive
  output logic                 rx_valid,
  output logic [15:0]          rx_len,
  output logic [31:0]          rx_src_ip,
  input  logic [$clog2(BUF_BYTES)-1:0] rx_raddr,
  output logic [7:0]           rx_rdata,
  input  logic                 rx_release,
  // microcontroller, transmit
  input  logic                 tx_we,
  input  logic [$clog2(BUF_BYTES)-1:0] tx_waddr,
  input  logic [7:0]           tx_wdata,
  input  logic [15:0]          tx_len,
  input  logic [31:0]          tx_dst_ip,
  input  logic                 tx_send,
  output logic                 tx_busy,
  // towards the IP layer arbiter
  output logic                 avail,
  output gige_pkg::tx_meta_t   meta,
  input  logic                 start,
  output gige_pkg::tx_data_t   dout
);
  import gige_pkg::*;
  localparam int AW = $clog2(BUF_BYTES);

  logic [7:0] rx_buf [BUF_BYTES];
  logic [7:0] tx_buf [BUF_BYTES];

  // ---------------- receive ----------------
  logic        storing;
  logic [15:0] wcnt;

  assign rx_rdata = rx_buf[rx_raddr];

  logic        take_first, take_next;
  assign take_first = rx.valid && rx.sof && (rx_proto == IP_PROTO_ICMP) && !rx_valid;
  assign take_next  = rx.valid && !rx.sof && storing && (wcnt < 16'(BUF_BYTES));

  always_ff @(posedge clk) begin
    if (take_first)     rx_buf[0] <= rx.data;
    else if (take_next) rx_buf[wcnt[AW-1:0]] <= rx.data;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      storing   <= 1'b0;
      wcnt      <= '0;
      rx_valid  <= 1'b0;
      rx_len    <= '0;
      rx_src_ip <= '0;
    end else begin
      if (rx_release) rx_valid <= 1'b0;
      if (rx.valid) begin
        if (rx.sof) begin
          storing <= take_first;
          wcnt    <= 16'd1;
        end else if (storing) begin
          wcnt <= wcnt + 16'd1;
        end
      end
      if (rx.eof) begin
        storing <= 1'b0;
        if (storing && rx.ok && wcnt <= 16'(BUF_BYTES) && wcnt >= 16'd4) begin
          rx_valid  <= 1'b1;
          rx_len    <= wcnt;
          rx_src_ip <= rx_ip;
        end
      end
    end
  end

  // ---------------- transmit ----------------
  typedef enum logic [1:0] {T_IDLE, T_SUM, T_READY, T_SEND} tstate_t;
  tstate_t     tstate;
  logic [15:0] tlen;
  logic [31:0] dst_ip_q;
  logic [15:0] idx;
  logic [15:0] sum;
  logic [7:0]  tbyte;

  assign tbyte   = tx_buf[idx[AW-1:0]];
  assign tx_busy = (tstate != T_IDLE);
  assign avail   = (tstate == T_READY);
  always_comb begin
    meta        = '0;
    meta.len    = tlen;
    meta.proto  = IP_PROTO_ICMP;
    meta.dst_ip = dst_ip_q;
  end

  always_ff @(posedge clk) begin
    if (tx_we && tstate == T_IDLE) tx_buf[tx_waddr] <= tx_wdata;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      tstate   <= T_IDLE;
      tlen     <= '0;
      dst_ip_q <= '0;
      idx      <= '0;
      sum      <= '0;
      dout     <= '0;
    end else begin
      unique case (tstate)
        T_IDLE: begin
          dout.en <= 1'b0;
          if (tx_send) begin
            tlen     <= tx_len;
            dst_ip_q <= tx_dst_ip;
            idx      <= '0;
            sum      <= '0;
            tstate   <= T_SUM;
          end
        end
        T_SUM: begin
          if (idx != 16'd2 && idx != 16'd3)
            sum <= oc_add(sum, idx[0] ? {8'h00, tbyte} : {tbyte, 8'h00});
          idx <= idx + 16'd1;
          if (idx == tlen - 16'd1) tstate <= T_READY;
        end
        T_READY: begin
          if (start) begin
            dout.en <= 1'b1;
            dout.d  <= tx_buf[0];
            idx     <= 16'd1;
            tstate  <= T_SEND;
          end
        end
        T_SEND: begin
          if (idx == tlen) begin
            dout.en <= 1'b0;
            tstate  <= T_IDLE;
          end else begin
            dout.d <= (idx == 16'd2) ? ~sum[15:8] :
                      (idx == 16'd3) ? ~sum[7:0]  : tbyte;
            idx    <= idx + 16'd1;
          end
        end
        default: tstate <= T_IDLE;
      endcase
    end
  end
endmodule

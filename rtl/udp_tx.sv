// udp_tx: transmit side of one UDP channel (layer 3 of the stack).
//
// It reports a datagram to the IP layer's arbiter whenever its payload FIFO
// holds a complete payload (pkt_empty low), with length 8 + PAYLOAD_BYTES,
// protocol 17 and the configured destination. When the IP layer pulls it
// (start), it sends the 8-byte UDP header (source port, destination port,
// length, checksum) and then the payload words from the FIFO, most
// significant byte first, one byte per cycle. The checksum is the one's
// complement of the pseudo-header (addresses, protocol, length), the header
// fields and the payload sum that the FIFO precomputed; 0 is sent as 0xFFFF.
//
// Timing: `start` in cycle t gives the first header byte (dout.en high) in
// t+1; dout.en stays high for exactly 8 + PAYLOAD_BYTES cycles.
module udp_tx #(
  parameter int PAYLOAD_BYTES = 1472
) (
  input  logic                clk,
  input  logic                rst,
  input  logic [31:0]         my_ip,
  input  logic [31:0]         dst_ip,
  input  logic [15:0]         src_port,
  input  logic [15:0]         dst_port,
  // payload FIFO (read side of udp_payload_fifo)
  input  logic                pkt_empty,
  input  logic [15:0]         pkt_sum,
  output logic                pkt_pop,
  output logic                rd_en,
  input  logic [31:0]         rdata,
  // towards the IP layer arbiter
  output logic                avail,
  output gige_pkg::tx_meta_t  meta,
  input  logic                start,
  output gige_pkg::tx_data_t  dout
);
  import gige_pkg::*;
  localparam logic [15:0] UDP_LEN = 16'(PAYLOAD_BYTES + 8);

  typedef enum logic [1:0] {U_IDLE, U_HDR, U_DATA} state_t;
  state_t      state;
  logic [55:0] hdr;
  logic [2:0]  hcnt;
  logic [15:0] pcnt;       // payload bytes sent
  logic [15:0] psum;       // latched payload sum
  logic [15:0] csum;

  assign avail = !pkt_empty && (state == U_IDLE);
  always_comb begin
    meta        = '0;
    meta.len    = UDP_LEN;
    meta.proto  = IP_PROTO_UDP;
    meta.dst_ip = dst_ip;
  end

  always_comb begin
    logic [15:0] s;
    s = psum;
    s = oc_add(s, my_ip[31:16]);
    s = oc_add(s, my_ip[15:0]);
    s = oc_add(s, dst_ip[31:16]);
    s = oc_add(s, dst_ip[15:0]);
    s = oc_add(s, {8'h00, IP_PROTO_UDP});
    s = oc_add(s, UDP_LEN);       // pseudo-header length
    s = oc_add(s, src_port);
    s = oc_add(s, dst_port);
    s = oc_add(s, UDP_LEN);       // header length field
    csum = (~s == 16'h0000) ? 16'hFFFF : ~s;
  end

  assign pkt_pop = start && (state == U_IDLE);
  // pop a word together with its last byte
  assign rd_en   = (state == U_DATA) && (pcnt[1:0] == 2'd3);

  always_ff @(posedge clk) begin
    if (rst) begin
      state <= U_IDLE;
      dout  <= '0;
      hdr   <= '0;
      hcnt  <= '0;
      pcnt  <= '0;
      psum  <= '0;
    end else begin
      unique case (state)
        U_IDLE: begin
          dout.en <= 1'b0;
          if (start) begin
            dout.en <= 1'b1;
            dout.d  <= src_port[15:8];
            psum    <= pkt_sum;
            hdr     <= {src_port[7:0], dst_port, UDP_LEN, 16'h0000};
            hcnt    <= 3'd1;
            state   <= U_HDR;
          end
        end
        U_HDR: begin
          // the checksum (hdr bits 15:0) is filled in once psum is latched
          dout.d <= (hcnt == 3'd6) ? csum[15:8] :
                    (hcnt == 3'd7) ? csum[7:0]  : hdr[55:48];
          hdr    <= hdr << 8;
          hcnt   <= hcnt + 3'd1;
          if (hcnt == 3'd7) begin
            state <= U_DATA;
            pcnt  <= '0;
          end
        end
        U_DATA: begin
          dout.en <= 1'b1;
          dout.d  <= rdata[8*(3 - pcnt[1:0]) +: 8];
          pcnt    <= pcnt + 16'd1;
          if (pcnt == 16'(PAYLOAD_BYTES - 1)) state <= U_IDLE;
        end
        default: state <= U_IDLE;
      endcase
    end
  end
endmodule

// arp: the ARP layer. It answers ARP requests for the own IP address.
//
// Receive: from the Ethernet payload stream of frames with EtherType 0x0806
// it reads the 28-byte ARP message. A request (hardware type 1, protocol
// type 0x0800, lengths 6 and 4, operation 1) whose target protocol address
// is the own IP address, in a frame whose FCS was good, stores the sender's
// MAC and IP address: the layer can hold one reply to send, and requests
// arriving while a reply is pending are dropped.
// Transmit: while a reply is pending it reports a 28-byte frame with
// EtherType 0x0806 to the Ethernet layer's arbiter, addressed to the
// requester. When pulled (start) it sends operation 2 with the own MAC and
// IP as sender and the requester as target, one byte per cycle from the next
// cycle on, and then clears the pending reply.
// The paper gives the layer, its priority above IP and its one-packet store;
// no ARP cache is kept (the IP layer sends to a configured MAC address).
module arp (
  input  logic                 clk,
  input  logic                 rst,
  input  logic [47:0]          my_mac,
  input  logic [31:0]          my_ip,
  input  gige_pkg::rx_stream_t rx,
  input  logic [15:0]          ethertype,
  output logic                 avail,
  output gige_pkg::tx_meta_t   meta,
  input  logic                 start,
  output gige_pkg::tx_data_t   dout,
  output logic                 pending
);
  import gige_pkg::*;

  logic [223:0] msg;       // received message, byte k at [223-8k -: 8]
  logic [4:0]   cnt;
  logic         active;
  logic [47:0]  req_mac;
  logic [31:0]  req_ip;
  logic [223:0] reply;
  logic         sending;
  logic [4:0]   tcnt;

  assign avail = pending && !sending;
  always_comb begin
    meta           = '0;
    meta.len       = 16'd28;
    meta.ethertype = ETHERTYPE_ARP;
    meta.dst_mac   = req_mac;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      msg <= '0; cnt <= '0; active <= 1'b0;
      req_mac <= '0; req_ip <= '0; pending <= 1'b0;
      reply <= '0; sending <= 1'b0; dout <= '0; tcnt <= '0;
    end else begin
      // receive
      if (rx.valid) begin
        if (rx.sof) begin
          active <= (ethertype == ETHERTYPE_ARP);
          cnt    <= 5'd1;
          msg    <= {rx.data, 216'd0};
        end else if (active && cnt < 5'd28) begin
          msg[223 - 8*cnt -: 8] <= rx.data;
          cnt <= cnt + 5'd1;
        end
      end
      if (rx.eof) begin
        active <= 1'b0;
        if (active && rx.ok && cnt == 5'd28 && !pending &&
            msg[223:160] == 64'h0001_0800_0604_0001 && msg[31:0] == my_ip) begin
          req_mac <= msg[159:112];
          req_ip  <= msg[111:80];
          pending <= 1'b1;
        end
      end
      // transmit
      if (!sending) begin
        dout.en <= 1'b0;
        if (start && pending) begin
          sending <= 1'b1;
          tcnt    <= 5'd1;
          dout.en <= 1'b1;
          dout.d  <= 8'h00;
          reply   <= {64'h0001_0800_0604_0002, my_mac, my_ip, req_mac, req_ip} << 8;
        end
      end else if (tcnt == 5'd28) begin
        dout.en <= 1'b0;
        sending <= 1'b0;
        pending <= 1'b0;
      end else begin
        dout.d <= reply[223:216];
        reply  <= reply << 8;
        tcnt   <= tcnt + 5'd1;
      end
    end
  end
endmodule

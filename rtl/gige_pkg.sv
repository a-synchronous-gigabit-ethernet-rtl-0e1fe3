// gige_pkg: types and constants shared by the layers of the Gigabit Ethernet
// protocol stack.
//
// Two kinds of byte stream connect the layers, both one byte per 8 ns clock:
//  * Transmit ("data pull"): a lower layer pulls the frame of the upper layer it
//    has granted. The upper layer offers `avail` plus a tx_meta_t describing
//    what it wants to send; the lower layer answers with a one-cycle `start`
//    pulse and the upper layer then drives tx_data_t (en high, one byte per
//    cycle) from the next cycle on, until its last byte.
//  * Receive: rx_stream_t carries a frame (or a layer's payload) byte by byte;
//    `sof` marks the first byte, and one extra cycle with `eof` set and
//    `valid` clear ends the frame, `ok` telling whether every check upstream
//    passed. Layers that keep a packet commit it only on eof with ok.
package gige_pkg;

  localparam logic [15:0] ETHERTYPE_IPV4 = 16'h0800;
  localparam logic [15:0] ETHERTYPE_ARP  = 16'h0806;
  localparam logic [7:0]  IP_PROTO_ICMP  = 8'd1;
  localparam logic [7:0]  IP_PROTO_UDP   = 8'd17;

  // CRC-32 register value after a frame including its correct FCS
  localparam logic [31:0] CRC32_RESIDUE  = 32'hDEBB20E3;

  // Description of what an upper layer wants the lower layer to send.
  typedef struct packed {
    logic [15:0] len;        // bytes the upper layer will deliver
    logic [15:0] ethertype;  // used by the Ethernet layer
    logic [47:0] dst_mac;    // used by the Ethernet layer
    logic [7:0]  proto;      // used by the IP layer
    logic [31:0] dst_ip;     // used by the IP layer
  } tx_meta_t;

  typedef struct packed {
    logic       en;
    logic [7:0] d;
  } tx_data_t;

  typedef struct packed {
    logic       sof;
    logic       valid;
    logic [7:0] data;
    logic       eof;
    logic       ok;
  } rx_stream_t;

  localparam rx_stream_t RX_IDLE = '{sof: 1'b0, valid: 1'b0, data: 8'h00, eof: 1'b0, ok: 1'b0};

  // One's complement 16-bit addition with end-around carry.
  function automatic logic [15:0] oc_add(input logic [15:0] a, input logic [15:0] b);
    logic [16:0] s;
    s = {1'b0, a} + {1'b0, b};
    return s[15:0] + {15'd0, s[16]};
  endfunction

endpackage

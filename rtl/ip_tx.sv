// ip_tx: transmit side of the IP layer (layer 2 of the stack).
//
// It is itself an upper module of the Ethernet layer: it reports a frame
// (avail) whenever the arbiter above it (ICMP, UDP channels) has one, with
// EtherType 0x0800 and the configured next-hop MAC address. When the
// Ethernet layer pulls it (start), it latches the granted module's meta and
// sends the 20-byte IPv4 header: version/IHL 0x45, TOS 0, total length
// (20 + upper length, computed here), identification, flags/fragment 0x4000
// (don't fragment), TTL, protocol and destination from the meta, the header
// checksum (computed here from the other fields) and the addresses. Two
// cycles before the header ends it pulls the upper module in turn and then
// passes its bytes through one register.
//
// Timing: `start` in cycle t gives header byte 0 in t+1; start_up is high
// with header byte 18 on txd; upper byte k appears 20+k cycles after header
// byte 0. The identification 0xA5A5 and TTL 64 are the values printed in the
// paper's waveforms; options are not supported (IHL is always 5).
module ip_tx #(
  parameter logic [15:0] IP_ID  = 16'hA5A5,
  parameter logic [7:0]  IP_TTL = 8'h40
) (
  input  logic                clk,
  input  logic                rst,
  input  logic [31:0]         my_ip,
  input  logic [47:0]         gw_mac,     // destination MAC for IP frames
  // towards the Ethernet layer (this module is an upper module there)
  output logic                avail,
  output gige_pkg::tx_meta_t  meta_out,
  input  logic                start,
  output gige_pkg::tx_data_t  dout,
  // from the arbiter above (ICMP, UDP)
  input  logic                req,
  input  gige_pkg::tx_meta_t  meta,
  input  gige_pkg::tx_data_t  up,
  output logic                start_up,
  output logic                lock
);
  import gige_pkg::*;

  typedef enum logic [1:0] {I_IDLE, I_HDR, I_PULL, I_DATA} state_t;
  state_t      state;
  logic [159:0] hdr;
  logic [4:0]   cnt;
  logic [15:0]  tot_len;
  logic [15:0]  csum;

  assign avail    = req && (state == I_IDLE);
  assign lock     = (state != I_IDLE) || start;
  always_comb begin
    meta_out           = '0;
    meta_out.len       = meta.len + 16'd20;
    meta_out.ethertype = ETHERTYPE_IPV4;
    meta_out.dst_mac   = gw_mac;
  end

  // header checksum over the header words, checksum field taken as zero
  always_comb begin
    logic [15:0] s;
    tot_len = meta.len + 16'd20;
    s = 16'h4500;
    s = oc_add(s, tot_len);
    s = oc_add(s, IP_ID);
    s = oc_add(s, 16'h4000);
    s = oc_add(s, {IP_TTL, meta.proto});
    s = oc_add(s, my_ip[31:16]);
    s = oc_add(s, my_ip[15:0]);
    s = oc_add(s, meta.dst_ip[31:16]);
    s = oc_add(s, meta.dst_ip[15:0]);
    csum = ~s;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      state    <= I_IDLE;
      dout     <= '0;
      start_up <= 1'b0;
      hdr      <= '0;
      cnt      <= '0;
    end else begin
      start_up <= 1'b0;
      unique case (state)
        I_IDLE: begin
          dout.en <= 1'b0;
          if (start) begin
            dout.en <= 1'b1;
            dout.d  <= 8'h45;
            hdr     <= {8'h00, tot_len, IP_ID, 16'h4000, IP_TTL, meta.proto,
                        csum, my_ip, meta.dst_ip, 8'h00};
            cnt     <= 5'd1;
            state   <= I_HDR;
          end
        end
        I_HDR: begin
          dout.d <= hdr[159:152];
          hdr    <= hdr << 8;
          cnt    <= cnt + 5'd1;
          if (cnt == 5'd18) start_up <= 1'b1;
          if (cnt == 5'd19) state <= I_PULL;
        end
        I_PULL: begin
          dout  <= up;
          state <= up.en ? I_DATA : I_IDLE;
        end
        I_DATA: begin
          dout.en <= up.en;
          if (up.en) dout.d <= up.d;
          else state <= I_IDLE;
        end
        default: state <= I_IDLE;
      endcase
    end
  end
endmodule

// ip_rx: receive side of the IP layer.
//
// It takes the Ethernet payload stream of frames with EtherType 0x0800,
// checks the 20-byte IPv4 header (version 4 with IHL 5, destination equal to
// the own address, header checksum, no fragment) and passes the datagram's
// payload on as a new stream, trimming any Ethernet padding by means of the
// total length field. Protocol, source address and payload length are
// presented with the payload, stable from sof to eof, for ICMP (protocol 1)
// and UDP (protocol 17) to pick their datagrams. The eof carries the
// upstream ok flag, cleared when the frame was shorter than the total length.
// Datagrams failing a header check produce no output.
// Timing: one register stage. The paper names the layer; the checks are the
// usual IPv4 receive rules chosen here. IP options and fragments are not
// supported and are dropped.
module ip_rx (
  input  logic                 clk,
  input  logic                 rst,
  input  logic [31:0]          my_ip,
  input  gige_pkg::rx_stream_t rx_in,
  input  logic [15:0]          ethertype,
  output gige_pkg::rx_stream_t rx_out,
  output logic [7:0]           proto,
  output logic [31:0]          src_ip,
  output logic [15:0]          pay_len
);
  import gige_pkg::*;

  logic [159:0] hdr;
  logic [15:0]  cnt;        // bytes of the datagram seen
  logic         active, pass, first;
  logic [15:0]  tot_len;
  logic [15:0]  hsum;

  // checksum of the complete header, with the byte arriving now
  always_comb begin
    logic [159:0] h;
    h = {hdr[151:0], rx_in.data};
    hsum = 16'h0000;
    for (int i = 0; i < 10; i++) hsum = oc_add(hsum, h[16*i +: 16]);
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      rx_out  <= RX_IDLE;
      hdr     <= '0;
      cnt     <= '0;
      active  <= 1'b0;
      pass    <= 1'b0;
      first   <= 1'b0;
      tot_len <= '0;
      proto   <= '0;
      src_ip  <= '0;
      pay_len <= '0;
    end else begin
      rx_out <= RX_IDLE;
      if (rx_in.valid) begin
        if (rx_in.sof) begin
          active <= (ethertype == ETHERTYPE_IPV4);
          pass   <= 1'b0;
          hdr    <= {152'd0, rx_in.data};
          cnt    <= 16'd1;
        end else if (active) begin
          cnt <= cnt + 16'd1;
          if (cnt < 16'd20) begin
            hdr <= {hdr[151:0], rx_in.data};
            if (cnt == 16'd19) begin
              // hdr[151-8k -: 8] holds byte k (k = 0..18), rx_in.data is byte 19
              tot_len <= hdr[135:120];
              proto   <= hdr[79:72];
              src_ip  <= hdr[55:24];
              pay_len <= hdr[135:120] - 16'd20;
              first   <= 1'b1;
              pass    <= (hdr[151:144] == 8'h45) &&
                         ({hdr[23:0], rx_in.data} == my_ip) &&
                         (hsum == 16'hFFFF) &&
                         (hdr[101] == 1'b0) && (hdr[100:88] == 13'd0) &&
                         (hdr[135:120] >= 16'd20);
            end
          end else if (pass && cnt < tot_len) begin
            rx_out.valid <= 1'b1;
            rx_out.sof   <= first;
            rx_out.data  <= rx_in.data;
            first        <= 1'b0;
          end
        end
      end
      if (rx_in.eof) begin
        if (active && pass && !first) begin
          rx_out.eof <= 1'b1;
          rx_out.ok  <= rx_in.ok && (cnt >= tot_len);
        end
        active <= 1'b0;
        pass   <= 1'b0;
      end
    end
  end
endmodule

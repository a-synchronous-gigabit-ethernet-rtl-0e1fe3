// tb_util_pkg: reference models shared by the testbenches. Everything here
// is computed independently of the RTL: a bit-serial CRC-32, the Internet
// checksum and builders for the Ethernet/IPv4/UDP/ARP/ICMP byte sequences.
package tb_util_pkg;
  typedef byte unsigned bytes_t[$];

  function automatic bit same(bytes_t a, bytes_t b);
    if (a.size() != b.size()) return 0;
    foreach (a[i]) if (a[i] != b[i]) return 0;
    return 1;
  endfunction

  function automatic bit [31:0] crc32(bytes_t q);
    bit [31:0] c = 32'hFFFF_FFFF;
    foreach (q[i])
      for (int b = 0; b < 8; b++) begin
        bit fb = c[0] ^ q[i][b];
        c = c >> 1;
        if (fb) c ^= 32'hEDB88320;
      end
    return ~c;
  endfunction

  function automatic bit [15:0] csum(bytes_t q);
    bit [31:0] s = 0;
    for (int i = 0; i < q.size(); i += 2)
      s += {q[i], (i + 1 < q.size()) ? q[i+1] : 8'h00};
    while (s >> 16) s = (s & 32'hFFFF) + (s >> 16);
    return ~s[15:0];
  endfunction

  function automatic void put16(ref bytes_t q, input bit [15:0] v);
    q.push_back(v[15:8]); q.push_back(v[7:0]);
  endfunction
  function automatic void put32(ref bytes_t q, input bit [31:0] v);
    put16(q, v[31:16]); put16(q, v[15:0]);
  endfunction
  function automatic void put48(ref bytes_t q, input bit [47:0] v);
    put16(q, v[47:32]); put32(q, v[31:0]);
  endfunction

  function automatic bytes_t eth_hdr(bit [47:0] dst, bit [47:0] src, bit [15:0] et);
    bytes_t q;
    put48(q, dst); put48(q, src); put16(q, et);
    return q;
  endfunction

  function automatic bytes_t ip_hdr(bit [31:0] src, bit [31:0] dst, bit [7:0] proto,
                                    bit [15:0] pay_len);
    bytes_t q;
    bit [15:0] c;
    put16(q, 16'h4500); put16(q, pay_len + 16'd20); put16(q, 16'hA5A5);
    put16(q, 16'h4000); q.push_back(8'h40); q.push_back(proto); put16(q, 16'h0000);
    put32(q, src); put32(q, dst);
    c = csum(q);
    q[10] = c[15:8]; q[11] = c[7:0];
    return q;
  endfunction

  function automatic bytes_t udp_dgram(bit [31:0] sip, bit [31:0] dip, bit [15:0] sp,
                                       bit [15:0] dp, bytes_t pay);
    bytes_t q, ph;
    bit [15:0] c, len;
    len = 16'(pay.size() + 8);
    put32(ph, sip); put32(ph, dip); put16(ph, 16'd17); put16(ph, len);
    put16(q, sp); put16(q, dp); put16(q, len); put16(q, 16'h0000);
    q = {q, pay};
    c = csum({ph, q});
    if (c == 0) c = 16'hFFFF;
    q[6] = c[15:8]; q[7] = c[7:0];
    return q;
  endfunction

  // complete frame (no preamble, no FCS) carrying a UDP datagram
  function automatic bytes_t udp_frame(bit [47:0] dmac, bit [47:0] smac, bit [31:0] sip,
                                       bit [31:0] dip, bit [15:0] sp, bit [15:0] dp,
                                       bytes_t pay);
    bytes_t u = udp_dgram(sip, dip, sp, dp, pay);
    return {eth_hdr(dmac, smac, 16'h0800), ip_hdr(sip, dip, 8'd17, 16'(u.size())), u};
  endfunction

  // pad to 60 bytes with 0xAA and append the FCS, low byte first
  function automatic bytes_t pad_fcs(bytes_t f);
    bit [31:0] c;
    while (f.size() < 60) f.push_back(8'hAA);
    c = crc32(f);
    for (int i = 0; i < 4; i++) f.push_back(c[8*i +: 8]);
    return f;
  endfunction

  // GMII packet: preamble, SFD, frame with pad and FCS
  function automatic bytes_t gmii_packet(bytes_t f);
    bytes_t q;
    repeat (7) q.push_back(8'h55);
    q.push_back(8'hD5);
    return {q, pad_fcs(f)};
  endfunction

  function automatic bytes_t arp_msg(bit [15:0] op, bit [47:0] sha, bit [31:0] spa,
                                     bit [47:0] tha, bit [31:0] tpa);
    bytes_t q;
    put16(q, 16'h0001); put16(q, 16'h0800); q.push_back(8'd6); q.push_back(8'd4);
    put16(q, op); put48(q, sha); put32(q, spa); put48(q, tha); put32(q, tpa);
    return q;
  endfunction

  // ICMP echo message with a correct checksum
  function automatic bytes_t icmp_echo(bit [7:0] typ, bit [15:0] id, bit [15:0] seq, int n);
    bytes_t q;
    bit [15:0] c;
    q.push_back(typ); q.push_back(8'h00); put16(q, 16'h0000); put16(q, id); put16(q, seq);
    for (int i = 0; i < n; i++) q.push_back(8'(i * 7 + 3));
    c = csum(q);
    q[2] = c[15:8]; q[3] = c[7:0];
    return q;
  endfunction

  // the frame of the paper's MAC waveform: 12-byte counter payload
  function automatic bytes_t paper_frame();
    bytes_t pay;
    put32(pay, 32'h0C76985A); put32(pay, 32'h0C76985B); put32(pay, 32'h0C76985C);
    return udp_frame(48'h0040_9E03_68C5, 48'h40D8_5505_5005, 32'hC0A8_000F,
                     32'hC0A8_0001, 16'd1025, 16'd1024, pay);
  endfunction
endpackage

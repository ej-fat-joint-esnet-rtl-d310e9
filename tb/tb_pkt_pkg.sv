// tb_pkt_pkg: packet construction and checking helpers shared by the testbenches.
//
// Packets are byte queues (byte 0 first on the wire). The builders produce
// Ethernet frames with IPv4 or IPv6, UDP and the LB header (magic "LB",
// version, protocol, reserved, entropy, 64-bit event number), plus ARP,
// ICMP echo and IPv6 neighbour solicitation frames, all with correct IPv4 and
// UDP checksums computed over the whole packet. expected_lb_out() forms the
// packet a compute node should receive, computing its checksums from scratch,
// independently of the incremental update in the design.
package tb_pkt_pkg;
  import ejfat_pkg::*;

  typedef byte unsigned bytes_t[$];

  function automatic void put16(ref bytes_t p, input int unsigned off, input logic [15:0] v);
    p[off] = v[15:8]; p[off+1] = v[7:0];
  endfunction

  function automatic logic [15:0] get16(const ref bytes_t p, input int unsigned off);
    return {p[off], p[off+1]};
  endfunction

  // one's complement sum of len bytes from off (odd length padded with 0)
  function automatic logic [31:0] sum_bytes(const ref bytes_t p, input int unsigned off,
                                            input int unsigned len);
    logic [31:0] s = 0;
    for (int unsigned i = 0; i < len; i += 2) begin
      s += {16'd0, p[off+i], (i + 1 < len) ? p[off+i+1] : 8'd0};
    end
    return s;
  endfunction

  function automatic logic [15:0] fold(input logic [31:0] s);
    while (s[31:16] != 0) s = {16'd0, s[15:0]} + {16'd0, s[31:16]};
    return s[15:0];
  endfunction

  function automatic logic [15:0] ip4_csum(const ref bytes_t p);
    return ~fold(sum_bytes(p, 14, 20) - {16'd0, get16(p, 24)});
  endfunction

  // UDP checksum with pseudo header; the checksum field itself counted as 0.
  function automatic logic [15:0] udp_csum(const ref bytes_t p, input bit v6);
    int unsigned u = v6 ? 54 : 34;
    logic [15:0] ulen = get16(p, u + 4);
    logic [31:0] s;
    s = sum_bytes(p, u, ulen) - {16'd0, get16(p, u + 6)};
    s += v6 ? sum_bytes(p, 22, 32) : sum_bytes(p, 26, 8);
    s += {16'd0, ulen} + 32'd17;
    s = {16'd0, ~fold(s)};
    return (s[15:0] == 16'h0000) ? 16'hffff : s[15:0];
  endfunction

  function automatic void put_addr(ref bytes_t p, input int unsigned off, input logic [127:0] a,
                                   input bit v6);
    if (v6) for (int i = 0; i < 16; i++) p[off+i] = a[8*(15-i) +: 8];
    else    for (int i = 0; i < 4; i++)  p[off+i] = a[8*(3-i) +: 8];
  endfunction

  function automatic void put_eth(ref bytes_t p, input logic [47:0] da, input logic [47:0] sa,
                                  input logic [15:0] et);
    for (int i = 0; i < 6; i++) begin
      p[i]   = da[8*(5-i) +: 8];
      p[6+i] = sa[8*(5-i) +: 8];
    end
    put16(p, 12, et);
  endfunction

  // IPv4 or IPv6 UDP frame with an l4 payload of given bytes
  function automatic bytes_t build_udp(input bit v6, input logic [47:0] da, input logic [47:0] sa,
                                       input logic [127:0] src, input logic [127:0] dst,
                                       input logic [15:0] sport, input logic [15:0] dport,
                                       input bytes_t l4pay, input bit zero_csum = 0);
    bytes_t p;
    int unsigned u = v6 ? 54 : 34;
    int unsigned ulen = 8 + l4pay.size();
    p = {};
    for (int unsigned i = 0; i < u + ulen; i++) p.push_back(8'h00);
    put_eth(p, da, sa, v6 ? ETH_IPV6 : ETH_IPV4);
    if (v6) begin
      p[14] = 8'h60; p[15] = 8'h01; p[16] = 8'h23; p[17] = 8'h45;   // tc 0, flow 0x12345
      put16(p, 18, 16'(ulen));
      p[20] = 8'd17; p[21] = 8'd64;
      put_addr(p, 22, src, 1);
      put_addr(p, 38, dst, 1);
    end else begin
      p[14] = 8'h45; p[15] = 8'h08;
      put16(p, 16, 16'(20 + ulen));
      put16(p, 18, 16'h1234);
      put16(p, 20, 16'h4000);                                       // DF
      p[22] = 8'd63; p[23] = 8'd17;
      put_addr(p, 26, src, 0);
      put_addr(p, 30, dst, 0);
      put16(p, 24, ip4_csum(p));
    end
    put16(p, u, sport);
    put16(p, u + 2, dport);
    put16(p, u + 4, 16'(ulen));
    foreach (l4pay[i]) p[u + 8 + i] = l4pay[i];
    if (!zero_csum) put16(p, u + 6, udp_csum(p, v6));
    return p;
  endfunction

  function automatic bytes_t lb_hdr(input logic [15:0] magic, input logic [7:0] version,
                                    input logic [15:0] entropy, input logic [63:0] ev,
                                    input int unsigned paylen, input int unsigned seed);
    bytes_t h;
    h = {magic[15:8], magic[7:0], version, 8'd1, 8'h00, 8'h00, entropy[15:8], entropy[7:0]};
    for (int i = 0; i < 8; i++) h.push_back(ev[8*(7-i) +: 8]);
    for (int unsigned i = 0; i < paylen; i++) h.push_back(8'((seed * 31 + i * 7 + (i >> 8)) & 255));
    return h;
  endfunction

  function automatic bytes_t build_lb(input bit v6, input logic [47:0] da, input logic [47:0] sa,
                                      input logic [127:0] src, input logic [127:0] dst,
                                      input logic [15:0] sport, input logic [15:0] entropy,
                                      input logic [63:0] ev, input int unsigned paylen,
                                      input int unsigned seed, input logic [15:0] magic = LB_MAGIC,
                                      input logic [7:0] version = 8'd1, input bit zero_csum = 0);
    return build_udp(v6, da, sa, src, dst, sport, LB_UDP_PORT,
                     lb_hdr(magic, version, entropy, ev, paylen, seed), zero_csum);
  endfunction

  function automatic bytes_t build_arp(input logic [47:0] sa, input logic [31:0] spa,
                                       input logic [31:0] tpa);
    bytes_t p;
    p = {};
    for (int i = 0; i < 60; i++) p.push_back(8'h00);
    put_eth(p, 48'hffff_ffff_ffff, sa, ETH_ARP);
    put16(p, 14, 16'd1); put16(p, 16, ETH_IPV4); p[18] = 8'd6; p[19] = 8'd4; put16(p, 20, 16'd1);
    for (int i = 0; i < 6; i++) p[22+i] = sa[8*(5-i) +: 8];
    put_addr(p, 28, {96'd0, spa}, 0);
    put_addr(p, 38, {96'd0, tpa}, 0);
    return p;
  endfunction

  function automatic bytes_t build_icmp_echo(input logic [47:0] da, input logic [47:0] sa,
                                             input logic [31:0] src, input logic [31:0] dst);
    bytes_t p;
    p = build_udp(0, da, sa, {96'd0, src}, {96'd0, dst}, 16'h0800, 16'h0000, {8'h00, 8'h01}, 1);
    p[23] = IPPROTO_ICMP;                       // turn the 'UDP' header into an echo request
    put16(p, 24, 16'h0000);
    put16(p, 24, ip4_csum(p));
    return p;
  endfunction

  function automatic bytes_t build_nd_ns(input logic [47:0] sa, input logic [127:0] src,
                                         input logic [127:0] target);
    bytes_t p, pay;
    logic [127:0] sn = {104'hff02_0000_0000_0000_0000_0001_ff, target[23:0]};
    pay = {};
    for (int i = 0; i < 16; i++) pay.push_back(8'h00);
    p = build_udp(1, {24'h3333ff, target[23:0]}, sa, src, sn, 16'h8700, 16'h0000, pay, 1);
    p[20] = IPPROTO_ICMPV6;
    return p;
  endfunction

  // What the CN receives for an LB packet: new Ethernet/IP/UDP header, LB header removed.
  function automatic bytes_t expected_lb_out(const ref bytes_t in, input bit v6,
                                             input logic [47:0] cn_mac, input logic [47:0] lb_mac,
                                             input logic [127:0] lb_ip, input logic [127:0] cn_ip,
                                             input logic [15:0] dport);
    bytes_t o;
    int unsigned u = v6 ? 54 : 34;
    bit had_csum;
    o = {};
    for (int unsigned i = 0; i < u + 8; i++) o.push_back(in[i]);
    for (int unsigned i = u + 24; i < in.size(); i++) o.push_back(in[i]);
    put_eth(o, cn_mac, lb_mac, v6 ? ETH_IPV6 : ETH_IPV4);
    if (v6) begin
      put16(o, 18, get16(in, 18) - 16);
      put_addr(o, 22, lb_ip, 1);
      put_addr(o, 38, cn_ip, 1);
    end else begin
      put16(o, 16, get16(in, 16) - 16);
      put_addr(o, 26, lb_ip, 0);
      put_addr(o, 30, cn_ip, 0);
      put16(o, 24, 16'h0000);
      put16(o, 24, ip4_csum(o));
    end
    had_csum = get16(in, u + 6) != 16'h0000;
    put16(o, u + 2, dport);
    put16(o, u + 4, get16(in, u + 4) - 16);
    put16(o, u + 6, (v6 || had_csum) ? udp_csum(o, v6) : 16'h0000);
    return o;
  endfunction

  // Split a packet into stream beats.
  function automatic void to_beats(const ref bytes_t p, input logic [PORT_W-1:0] port,
                                   ref beat_t q[$]);
    beat_t b;
    for (int unsigned i = 0; i < p.size(); i += DATA_BYTES) begin
      b = '0;
      b.port = port;
      for (int unsigned j = 0; j < DATA_BYTES && i + j < p.size(); j++) begin
        b.data[8*j +: 8] = p[i+j];
        b.keep[j] = 1'b1;
      end
      b.last = (i + DATA_BYTES >= p.size());
      q.push_back(b);
    end
  endfunction

  // Append the valid bytes of a beat to a packet.
  function automatic void add_beat(ref bytes_t p, input beat_t b);
    for (int j = 0; j < DATA_BYTES; j++) if (b.keep[j]) p.push_back(b.data[8*j +: 8]);
  endfunction

  function automatic bit same(const ref bytes_t a, const ref bytes_t b);
    if (a.size() != b.size()) return 0;
    foreach (a[i]) if (a[i] != b[i]) return 0;
    return 1;
  endfunction

endpackage

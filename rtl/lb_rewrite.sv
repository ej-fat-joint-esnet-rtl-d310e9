// lb_rewrite: decides the fate of a packet and builds its new headers.
//
// This is the action half of the Member Lookup and Rewrite table. It receives
// a packet's parsed header vector together with the results of the four
// tables before it, and produces one meta_t for the deparser:
//   * drop and the first reason that applies (truncated, L2 miss, L3 miss,
//     not an LB packet, bad LB magic/version, no epoch, empty calendar slot,
//     no member of the packet's IP version);
//   * otherwise the new Ethernet + IP + UDP header (42 bytes for IPv4, 62 for
//     IPv6) that replaces the received Ethernet/IP/UDP/LB headers.
// The rewrite follows the paper's table of received and sent fields: ETH DA =
// next-hop MAC of the member, ETH SA = LB MAC from the L2 filter, IP SRC = LB
// address from the L3 filter, IP DST = CN address, UDP DST = CN base port +
// (entropy & (2**entropy_bits - 1)), UDP SRC kept. The LB header is removed,
// so IP and UDP lengths shrink by 16.
//
// This design's own choices, where the paper is silent: TOS/traffic class,
// flow label, IPv4 ID/flags and TTL/hop limit are copied from the received
// packet; the IPv4 header checksum is recomputed; the UDP checksum is updated
// incrementally (RFC 1624) for the changed addresses, port, lengths and the
// removed LB header, so the payload never needs to be summed; an IPv4 UDP
// checksum of 0 (none) stays 0; the port sum wraps at 16 bits.
//
// Timing: purely combinational from inputs to the registered output; out_valid
// follows in_valid by one cycle.
module lb_rewrite
  import ejfat_pkg::*;
(
  input  logic          clk,
  input  logic          rst,
  input  logic          in_valid,
  input  phv_t          phv,
  input  logic          l2_hit,
  input  logic [47:0]   lb_mac,
  input  logic          l3_hit,
  input  logic [127:0]  lb_ip,
  input  logic          epoch_hit,
  input  cal_entry_t    cal,
  input  member_entry_t member,
  output logic          out_valid,
  output meta_t         meta
);
  // One's complement sum of a list of 16-bit words given in a 32-bit accumulator.
  function automatic logic [15:0] fold(input logic [31:0] s);
    logic [31:0] t;
    t = {16'd0, s[15:0]} + {16'd0, s[31:16]};
    t = {16'd0, t[15:0]} + {16'd0, t[31:16]};
    return t[15:0];
  endfunction

  function automatic logic [31:0] sum128(input logic [127:0] v);
    logic [31:0] s = 0;
    for (int i = 0; i < 8; i++) s += {16'd0, v[16*i +: 16]};
    return s;
  endfunction

  function automatic logic [31:0] nsum128(input logic [127:0] v);
    return sum128(~v);
  endfunction

  meta_t m;
  always_comb begin
    logic [15:0]  ent_mask, dport, ulen, iplen, v4csum, ucsum;
    logic [127:0] new_src, new_dst;
    logic [31:0]  acc;
    logic [DATA_W-1:0] h;
    int unsigned  u;                        // UDP header offset
    logic [31:0]  w0;                       // first IPv6 word

    m        = '0;
    m.port   = phv.in_port;
    if (phv.truncated)          begin m.drop = 1'b1; m.reason = DROP_TRUNCATED;  end
    else if (!l2_hit)           begin m.drop = 1'b1; m.reason = DROP_L2_MISS;    end
    else if (!l3_hit)           begin m.drop = 1'b1; m.reason = DROP_L3_MISS;    end
    else if (!phv.is_lb)        begin m.drop = 1'b1; m.reason = DROP_NOT_LB;     end
    else if (!phv.lb_ok)        begin m.drop = 1'b1; m.reason = DROP_BAD_LB;     end
    else if (!epoch_hit)        begin m.drop = 1'b1; m.reason = DROP_NO_EPOCH;   end
    else if (!cal.valid)        begin m.drop = 1'b1; m.reason = DROP_EMPTY_SLOT; end
    else if (!member.valid)     begin m.drop = 1'b1; m.reason = DROP_NO_MEMBER;  end

    ent_mask = 16'((32'd1 << member.entropy_bits) - 32'd1);
    dport    = member.base_port + (phv.lb_entropy & ent_mask);
    ulen     = phv.udp_len - 16'd16;
    iplen    = phv.ip_len - 16'd16;
    new_src  = phv.is_ipv6 ? lb_ip : {96'd0, lb_ip[31:0]};
    new_dst  = phv.is_ipv6 ? member.ip_dst : {96'd0, member.ip_dst[31:0]};

    // Incremental UDP checksum: HC' = ~(~HC + sum(~old) + sum(new)).
    acc = {16'd0, ~phv.udp_csum};
    acc += nsum128(phv.ip_src) + nsum128(phv.l3_dst);
    acc += 2 * {16'd0, ~phv.udp_len} + {16'd0, ~phv.udp_dport};
    acc += {16'd0, ~LB_MAGIC} + {16'd0, ~{phv.lb_version, phv.lb_proto}} +
           {16'd0, ~phv.lb_rsvd} + {16'd0, ~phv.lb_entropy};
    for (int i = 0; i < 4; i++) acc += {16'd0, ~phv.lb_event[16*i +: 16]};
    acc += sum128(new_src) + sum128(new_dst) + 2 * {16'd0, ulen} + {16'd0, dport};
    ucsum = ~fold(acc);
    if (ucsum == 16'h0000) ucsum = 16'hffff;
    if (!phv.is_ipv6 && phv.udp_csum == 16'h0000) ucsum = 16'h0000;

    // IPv4 header checksum over the new header.
    acc = {16'd0, 16'h4500 | {8'd0, phv.ip_tos}} + {16'd0, iplen} + {16'd0, phv.ip_id} +
          {16'd0, phv.ip_frag} + {16'd0, phv.ip_ttl, IPPROTO_UDP} +
          sum128(new_src) + sum128(new_dst);
    v4csum = ~fold(acc);

    h = '0;
    for (int i = 0; i < 6; i++) begin
      h[8*i +: 8]       = member.mac_da[8*(5-i) +: 8];
      h[8*(6+i) +: 8]   = lb_mac[8*(5-i) +: 8];
    end
    h[8*12 +: 8] = phv.ethertype[15:8];
    h[8*13 +: 8] = phv.ethertype[7:0];
    w0 = {4'd6, phv.ip_tos, phv.ip_flow};
    u  = phv.is_ipv6 ? 54 : 34;
    if (phv.is_ipv6) begin
      for (int i = 0; i < 4; i++) h[8*(14+i) +: 8] = w0[8*(3-i) +: 8];
      h[8*18 +: 8] = iplen[15:8];
      h[8*19 +: 8] = iplen[7:0];
      h[8*20 +: 8] = IPPROTO_UDP;
      h[8*21 +: 8] = phv.ip_ttl;
      for (int i = 0; i < 16; i++) begin
        h[8*(22+i) +: 8] = new_src[8*(15-i) +: 8];
        h[8*(38+i) +: 8] = new_dst[8*(15-i) +: 8];
      end
      m.hdr_len = 7'(V6_OUT_HDR);
    end else begin
      h[8*14 +: 8] = 8'h45;
      h[8*15 +: 8] = phv.ip_tos;
      h[8*16 +: 8] = iplen[15:8];
      h[8*17 +: 8] = iplen[7:0];
      h[8*18 +: 8] = phv.ip_id[15:8];
      h[8*19 +: 8] = phv.ip_id[7:0];
      h[8*20 +: 8] = phv.ip_frag[15:8];
      h[8*21 +: 8] = phv.ip_frag[7:0];
      h[8*22 +: 8] = phv.ip_ttl;
      h[8*23 +: 8] = IPPROTO_UDP;
      h[8*24 +: 8] = v4csum[15:8];
      h[8*25 +: 8] = v4csum[7:0];
      for (int i = 0; i < 4; i++) begin
        h[8*(26+i) +: 8] = new_src[8*(3-i) +: 8];
        h[8*(30+i) +: 8] = new_dst[8*(3-i) +: 8];
      end
      m.hdr_len = 7'(V4_OUT_HDR);
    end
    h[8*u       +: 8] = phv.udp_sport[15:8];
    h[8*(u + 1) +: 8] = phv.udp_sport[7:0];
    h[8*(u + 2) +: 8] = dport[15:8];
    h[8*(u + 3) +: 8] = dport[7:0];
    h[8*(u + 4) +: 8] = ulen[15:8];
    h[8*(u + 5) +: 8] = ulen[7:0];
    h[8*(u + 6) +: 8] = ucsum[15:8];
    h[8*(u + 7) +: 8] = ucsum[7:0];
    m.hdr = h;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      out_valid <= 1'b0;
      meta      <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) meta <= m;
    end
  end
endmodule

// lb_parser: the parsing stage of the load balancer pipeline.
//
// It watches the packet stream as it is written into the payload buffer and
// looks at the first two 64-byte beats of each frame, which hold every header
// the pipeline uses (an IPv6 LB packet has 78 bytes of headers). From them it
// builds a parsed header vector (phv_t): Ethernet, ARP target address, IPv4 or
// IPv6, ICMP echo request, IPv6 neighbour solicitation, UDP and the LB header.
// As the paper describes, LB packets are recognised by UDP destination port
// 19522 and their magic ("LB") and version fields are checked; a mismatch
// marks the packet for discard (lb_ok = 0). Nothing past the LB header is
// parsed.
//
// This design's own choices: no VLAN tags, IPv4 packets with options or
// fragmentation are not treated as UDP, IPv6 extension headers are not
// followed, the expected LB version is the LB_VERSION parameter, and an LB
// packet must have a UDP length of at least 24 (UDP + LB header).
//
// Interface: in_fire marks a beat accepted on the stream (the parser never
// stalls it). Timing: phv_valid pulses for one cycle, the cycle after the
// second beat of a frame (or after its last beat, if the frame is one beat
// long) was accepted. Beats after the second are ignored.
module lb_parser
  import ejfat_pkg::*;
#(
  parameter logic [7:0] LB_VERSION = 8'd1
) (
  input  logic  clk,
  input  logic  rst,
  input  logic  in_fire,
  input  beat_t in_beat,
  output logic  phv_valid,
  output phv_t  phv
);
  logic [DATA_W-1:0] beat0_q;        // first beat of the current frame
  logic              in_frame;       // past the first beat
  logic              done;           // headers already parsed for this frame
  logic [2*DATA_W-1:0] hbuf;         // first two beats, byte i at [8*i +: 8]
  logic [7:0]        avail;          // header bytes present

  logic take_now;
  assign take_now = in_fire && !done && (in_frame || in_beat.last);

  always_comb begin
    if (!in_frame) hbuf = {{DATA_W{1'b0}}, in_beat.data};
    else           hbuf = {in_beat.data, beat0_q};
  end

  function automatic int unsigned ones(input logic [DATA_BYTES-1:0] k);
    int unsigned n = 0;
    for (int i = 0; i < DATA_BYTES; i++) n += int'(k[i]);
    return n;
  endfunction

  always_comb begin
    if (!in_beat.last) avail = 8'(HDR_CAPTURE);
    else avail = 8'(ones(in_beat.keep) + (in_frame ? DATA_BYTES : 0));
  end

  function automatic logic [7:0] b8(input logic [2*DATA_W-1:0] h, input int unsigned i);
    return h[8*i +: 8];
  endfunction
  function automatic logic [15:0] b16(input logic [2*DATA_W-1:0] h, input int unsigned i);
    return {h[8*i +: 8], h[8*(i+1) +: 8]};
  endfunction
  function automatic logic [31:0] b32(input logic [2*DATA_W-1:0] h, input int unsigned i);
    return {b16(h, i), b16(h, i + 2)};
  endfunction
  function automatic logic [63:0] b64(input logic [2*DATA_W-1:0] h, input int unsigned i);
    return {b32(h, i), b32(h, i + 4)};
  endfunction
  function automatic logic [127:0] b128(input logic [2*DATA_W-1:0] h, input int unsigned i);
    return {b64(h, i), b64(h, i + 8)};
  endfunction

  phv_t p;
  always_comb begin
    logic       v4_plain;
    int unsigned l4;       // start of the L4 header
    int unsigned need;
    logic [7:0] vihl, tcb;
    p = '0;
    vihl = b8(hbuf, 14);
    tcb  = b8(hbuf, 15);
    p.in_port   = in_beat.port;
    p.eth_da    = {b32(hbuf, 0), b16(hbuf, 4)};
    p.eth_sa    = {b32(hbuf, 6), b16(hbuf, 10)};
    p.ethertype = b16(hbuf, 12);
    p.is_arp    = (p.ethertype == ETH_ARP);
    p.is_ipv4   = (p.ethertype == ETH_IPV4) && (vihl[7:4] == 4'd4);
    p.is_ipv6   = (p.ethertype == ETH_IPV6) && (vihl[7:4] == 4'd6);
    v4_plain    = p.is_ipv4 && (vihl[3:0] == 4'd5) &&
                  (b16(hbuf, 20) & 16'h3fff) == 16'h0000;   // no options, not a fragment
    l4 = p.is_ipv6 ? 54 : 34;
    if (p.is_arp) begin
      p.l3_dst = {96'd0, b32(hbuf, 38)};                 // ARP TPA
      p.ip_src = {96'd0, b32(hbuf, 28)};                 // ARP SPA
    end else if (p.is_ipv4) begin
      p.ip_tos  = b8(hbuf, 15);
      p.ip_len  = b16(hbuf, 16);
      p.ip_id   = b16(hbuf, 18);
      p.ip_frag = b16(hbuf, 20);
      p.ip_ttl  = b8(hbuf, 22);
      p.ip_src  = {96'd0, b32(hbuf, 26)};
      p.l3_dst  = {96'd0, b32(hbuf, 30)};
    end else if (p.is_ipv6) begin
      p.ip_tos  = {vihl[3:0], tcb[7:4]};
      p.ip_flow = {tcb[3:0], b16(hbuf, 16)};
      p.ip_len  = b16(hbuf, 18);
      p.ip_ttl  = b8(hbuf, 21);
      p.ip_src  = b128(hbuf, 22);
      p.l3_dst  = b128(hbuf, 38);
    end
    p.is_udp = (v4_plain && b8(hbuf, 23) == IPPROTO_UDP) ||
               (p.is_ipv6 && b8(hbuf, 20) == IPPROTO_UDP);
    p.is_icmp_echo = v4_plain && b8(hbuf, 23) == IPPROTO_ICMP && b8(hbuf, 34) == 8'd8;
    p.is_nd_ns     = p.is_ipv6 && b8(hbuf, 20) == IPPROTO_ICMPV6 && b8(hbuf, 54) == 8'd135;
    if (p.is_udp) begin
      p.udp_sport = b16(hbuf, l4);
      p.udp_dport = b16(hbuf, l4 + 2);
      p.udp_len   = b16(hbuf, l4 + 4);
      p.udp_csum  = b16(hbuf, l4 + 6);
      p.is_lb     = (p.udp_dport == LB_UDP_PORT);
    end
    if (p.is_lb) begin
      p.lb_version = b8(hbuf, l4 + 10);
      p.lb_proto   = b8(hbuf, l4 + 11);
      p.lb_rsvd    = b16(hbuf, l4 + 12);
      p.lb_entropy = b16(hbuf, l4 + 14);
      p.lb_event   = b64(hbuf, l4 + 16);
      p.lb_ok      = (b16(hbuf, l4 + 8) == LB_MAGIC) && (p.lb_version == LB_VERSION) &&
                     (p.udp_len >= 16'd24);
    end
    if (p.is_lb)                 need = l4 + 24;
    else if (p.is_udp)           need = l4 + 8;
    else if (p.is_icmp_echo || p.is_nd_ns) need = l4 + 4;
    else if (p.is_arp)           need = 42;
    else if (p.is_ipv4)          need = 34;
    else if (p.is_ipv6)          need = 54;
    else                         need = 14;
    p.truncated = (int'(avail) < int'(need));
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      in_frame  <= 1'b0;
      done      <= 1'b0;
      phv_valid <= 1'b0;
      beat0_q   <= '0;
      phv       <= '0;
    end else begin
      phv_valid <= take_now;
      if (take_now) phv <= p;
      if (in_fire) begin
        if (!in_frame) beat0_q <= in_beat.data;
        if (in_beat.last) begin
          in_frame <= 1'b0;
          done     <= 1'b0;
        end else begin
          in_frame <= 1'b1;
          if (take_now) done <= 1'b1;
        end
      end
    end
  end

endmodule

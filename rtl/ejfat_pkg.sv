// ejfat_pkg: shared constants and types of the EJ-FAT load balancer data plane.
//
// The data plane is a fixed-latency match-action pipeline that steers UDP
// packets carrying an LB header (magic "LB", version, protocol, entropy and a
// 64-bit event number) onto compute nodes (CNs). Packets travel as a stream of
// 64-byte beats; byte 0 of the frame is in data[7:0] of the first beat and
// multi-byte protocol fields are in network (big-endian) byte order.
//
// Values that follow the paper: UDP port 19522 (0x4c42), the magic bytes "LB",
// four LB instances, 512 calendar slots indexed by the 9 lsbs of the event
// number, up to 512 members. The beat width, table depths, epoch count and the
// expected LB version are this design's own choices.
package ejfat_pkg;

  // ---------------------------------------------------------------- sizes
  localparam int unsigned DATA_BYTES = 64;              // bytes per beat (512-bit stream)
  localparam int unsigned DATA_W     = DATA_BYTES * 8;
  localparam int unsigned PORT_W     = 1;               // two Ethernet ports (Eth 0, Eth 1)
  localparam int unsigned INST_W     = 2;               // four LB instances
  localparam int unsigned EPOCH_W    = 2;               // four calendar epochs per instance
  localparam int unsigned SLOT_W     = 9;               // 512 calendar slots
  localparam int unsigned MEMBER_W   = 9;               // up to 512 members per instance

  // ---------------------------------------------------------------- protocol constants
  localparam logic [15:0] ETH_IPV4   = 16'h0800;
  localparam logic [15:0] ETH_ARP    = 16'h0806;
  localparam logic [15:0] ETH_IPV6   = 16'h86dd;
  localparam logic [7:0]  IPPROTO_ICMP   = 8'd1;
  localparam logic [7:0]  IPPROTO_UDP    = 8'd17;
  localparam logic [7:0]  IPPROTO_ICMPV6 = 8'd58;
  localparam logic [15:0] LB_UDP_PORT = 16'd19522;      // 0x4c42, "LB"
  localparam logic [15:0] LB_MAGIC    = 16'h4c42;       // 'L','B'
  localparam int unsigned LB_HDR_BYTES = 16;

  // Header lengths from the start of the frame (no VLAN tag, no IPv4 options,
  // no IPv6 extension headers).
  localparam int unsigned V4_LB_HDR_END = 14 + 20 + 8 + 16;  // 58
  localparam int unsigned V6_LB_HDR_END = 14 + 40 + 8 + 16;  // 78
  localparam int unsigned V4_OUT_HDR    = 14 + 20 + 8;       // 42
  localparam int unsigned V6_OUT_HDR    = 14 + 40 + 8;       // 62
  localparam int unsigned HDR_CAPTURE   = 2 * DATA_BYTES;    // bytes the parser looks at

  // ---------------------------------------------------------------- stream beat
  typedef struct packed {
    logic [DATA_W-1:0]     data;
    logic [DATA_BYTES-1:0] keep;   // contiguous from bit 0
    logic                  last;
    logic [PORT_W-1:0]     port;   // input port the packet arrived on
  } beat_t;

  // ---------------------------------------------------------------- why a packet is not forwarded
  typedef enum logic [3:0] {
    DROP_NONE       = 4'd0,
    DROP_TRUNCATED  = 4'd1,   // shorter than the headers it claims
    DROP_L2_MISS    = 4'd2,   // MAC DA not in the L2 input filter
    DROP_L3_MISS    = 4'd3,   // IP DST / ARP TPA not in the L3 input filter
    DROP_NOT_LB     = 4'd4,   // accepted, but not an LB packet (ARP, ping, ND, other UDP)
    DROP_BAD_LB     = 4'd5,   // LB port, but magic or version mismatch
    DROP_NO_EPOCH   = 4'd6,   // no epoch assignment entry matches the event number
    DROP_EMPTY_SLOT = 4'd7,   // calendar slot has no member
    DROP_NO_MEMBER  = 4'd8    // member table has no entry of this IP version
  } drop_reason_e;

  // ---------------------------------------------------------------- parsed header vector
  typedef struct packed {
    logic [PORT_W-1:0] in_port;
    logic [47:0]  eth_da;
    logic [47:0]  eth_sa;
    logic [15:0]  ethertype;
    logic         is_arp;
    logic         is_ipv4;
    logic         is_ipv6;
    logic         is_udp;
    logic         is_icmp_echo;   // ICMP echo request
    logic         is_nd_ns;       // ICMPv6 neighbour solicitation
    logic         is_lb;          // UDP to port 19522
    logic         lb_ok;          // magic and version match
    logic         truncated;
    logic [127:0] l3_dst;         // IPv6 DST, or IPv4 DST / ARP TPA in [31:0]
    logic [127:0] ip_src;         // IPv6 SRC, or IPv4 SRC in [31:0]
    logic [7:0]   ip_tos;         // IPv4 TOS / IPv6 traffic class
    logic [19:0]  ip_flow;        // IPv6 flow label
    logic [15:0]  ip_id;          // IPv4 identification
    logic [15:0]  ip_frag;        // IPv4 flags + fragment offset
    logic [7:0]   ip_ttl;         // IPv4 TTL / IPv6 hop limit
    logic [15:0]  ip_len;         // IPv4 total length / IPv6 payload length
    logic [15:0]  udp_sport;
    logic [15:0]  udp_dport;
    logic [15:0]  udp_len;
    logic [15:0]  udp_csum;
    logic [7:0]   lb_version;
    logic [7:0]   lb_proto;
    logic [15:0]  lb_rsvd;
    logic [15:0]  lb_entropy;
    logic [63:0]  lb_event;
  } phv_t;

  // ---------------------------------------------------------------- table entries
  typedef struct packed {
    logic              valid;
    logic              port_any;     // wildcard on the input port
    logic [PORT_W-1:0] port;
    logic [47:0]       mac_da;       // key
    logic [47:0]       mac_sa;       // value: LB unicast MAC SA
  } l2_entry_t;

  typedef struct packed {
    logic              valid;
    logic              port_any;
    logic [PORT_W-1:0] port;
    logic [15:0]       ethertype;    // key
    logic [127:0]      addr;         // key: IPv4/v6 DST or ARP TPA
    logic [127:0]      src_ip;       // value: LB unicast IP SRC
    logic [INST_W-1:0] inst;         // value: LB instance ID
  } l3_entry_t;

  typedef struct packed {
    logic               valid;
    logic [INST_W-1:0]  inst;        // exact
    logic [63:0]        prefix;      // event number prefix
    logic [6:0]         plen;        // 0..64, 0 = wildcard
    logic [EPOCH_W-1:0] epoch;       // value
  } epoch_entry_t;

  typedef struct packed {
    logic                valid;
    logic [MEMBER_W-1:0] member;
  } cal_entry_t;

  typedef struct packed {
    logic         valid;
    logic [47:0]  mac_da;            // next-hop router MAC
    logic [127:0] ip_dst;            // CN address ([31:0] for IPv4)
    logic [15:0]  base_port;         // CN UDP base port
    logic [4:0]   entropy_bits;      // port range is 2**entropy_bits (0..16)
  } member_entry_t;

  // ---------------------------------------------------------------- per-packet result for the deparser
  typedef struct packed {
    logic              drop;
    drop_reason_e      reason;
    logic [PORT_W-1:0] port;         // egress port (= ingress port, one-armed)
    logic [6:0]        hdr_len;      // bytes of hdr that replace the old headers
    logic [DATA_W-1:0] hdr;          // new header, byte i in [8*i +: 8]
  } meta_t;

  // ---------------------------------------------------------------- helpers
  // One's complement 16-bit add.
  function automatic logic [15:0] oc_add(input logic [15:0] a, input logic [15:0] b);
    logic [16:0] s;
    s = {1'b0, a} + {1'b0, b};
    return s[15:0] + {15'd0, s[16]};
  endfunction

endpackage

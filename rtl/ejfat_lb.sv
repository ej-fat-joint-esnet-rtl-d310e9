// ejfat_lb: the EJ-FAT load balancer data plane (top level).
//
// UDP packets from data acquisition systems (DAQs) arrive addressed to the
// load balancer, carrying an LB header with a 64-bit event number and a
// 16-bit entropy value. The data plane sends every packet of one event to the
// same compute node (CN), and every packet with the same entropy to the same
// UDP port on that node, without keeping any per-flow state:
//
//   ports -> ingress_arb -> parser ---------------------------+
//                  |                                         |
//                  +--> payload FIFO (whole frames)          v
//                                  |        L2 filter + L3 filter   (s0 -> s1)
//                                  |        epoch assignment, LPM   (s1 -> s2)
//                                  |        calendar, 512 slots     (s2 -> s3)
//                                  |        member table            (s3 -> s4)
//                                  |        rewrite                 (s4 -> s5)
//                                  v                  |
//                               deparser <-- metadata FIFO
//                                  |
//                             egress_demux -> same port the packet came in on
//
// The table structure, their keys and values, the 512-slot calendar indexed
// by the 9 lsbs of the event number, four LB instances and the packet rewrite
// follow the paper. The stream width, table depths, the fixed five-stage
// lookup pipeline, the FIFO depth and the drop-reason output are this
// design's choices. The pipeline accepts a new header vector every cycle and
// never stalls; back-pressure acts on whole beats through the payload FIFO.
//
// Control plane: each table has its own write port (by index for the three
// associative tables, by key for the calendar and member tables). Writing a
// single entry is atomic with respect to packets, which is what the paper's
// hitless epoch switch needs.
//
// Timing: a packet's result is ready 6 cycles after its second beat entered
// (its first, if it is a one-beat frame); the deparser then streams it out.
// drop_valid pulses with drop_reason when the deparser discards a packet.
module ejfat_lb
  import ejfat_pkg::*;
#(
  parameter int unsigned NUM_PORTS      = 2,
  parameter int unsigned L2_ENTRIES     = 16,
  parameter int unsigned L3_ENTRIES     = 16,
  parameter int unsigned EPOCH_ENTRIES  = 128,
  parameter int unsigned N_INST         = 4,
  parameter int unsigned N_EPOCH        = 4,
  parameter int unsigned N_SLOT         = 512,
  parameter int unsigned N_MEMBER       = 512,
  parameter int unsigned PKT_FIFO_DEPTH = 512,
  parameter logic [7:0]  LB_VERSION     = 8'd1
) (
  input  logic  clk,
  input  logic  rst,
  // Ethernet ports, receive side (from the MACs)
  input  logic  [NUM_PORTS-1:0] rx_valid,
  input  beat_t rx_beat [NUM_PORTS],
  output logic  [NUM_PORTS-1:0] rx_ready,
  // Ethernet ports, transmit side (to the MACs)
  output logic  [NUM_PORTS-1:0] tx_valid,
  output beat_t tx_beat [NUM_PORTS],
  input  logic  [NUM_PORTS-1:0] tx_ready,
  // control plane table writes
  input  logic                 l2_wr_en,
  input  logic [$clog2(L2_ENTRIES)-1:0] l2_wr_idx,
  input  l2_entry_t            l2_wr_entry,
  input  logic                 l3_wr_en,
  input  logic [$clog2(L3_ENTRIES)-1:0] l3_wr_idx,
  input  l3_entry_t            l3_wr_entry,
  input  logic                 ep_wr_en,
  input  logic [$clog2(EPOCH_ENTRIES)-1:0] ep_wr_idx,
  input  epoch_entry_t         ep_wr_entry,
  input  logic                 cal_wr_en,
  input  logic [INST_W-1:0]    cal_wr_inst,
  input  logic [EPOCH_W-1:0]   cal_wr_epoch,
  input  logic [SLOT_W-1:0]    cal_wr_slot,
  input  cal_entry_t           cal_wr_entry,
  input  logic                 mem_wr_en,
  input  logic [INST_W-1:0]    mem_wr_inst,
  input  logic                 mem_wr_v6,
  input  logic [MEMBER_W-1:0]  mem_wr_member,
  input  member_entry_t        mem_wr_entry,
  // discard reporting
  output logic                 drop_valid,
  output drop_reason_e         drop_reason
);
  // ------------------------------------------------------------ ingress
  logic  arb_valid, arb_ready;
  beat_t arb_beat;

  lb_ingress_arb #(.NUM_PORTS(NUM_PORTS)) u_arb (
    .clk, .rst,
    .in_valid(rx_valid), .in_beat(rx_beat), .in_ready(rx_ready),
    .out_valid(arb_valid), .out_beat(arb_beat), .out_ready(arb_ready)
  );

  // ------------------------------------------------------------ payload buffer
  localparam int unsigned BEAT_BITS = $bits(beat_t);
  localparam int unsigned META_BITS = $bits(meta_t);

  logic  pf_out_valid, pf_out_ready;
  logic [BEAT_BITS-1:0] pf_in_data, pf_out_data;
  beat_t pf_out_beat;
  logic [$clog2(PKT_FIFO_DEPTH+1)-1:0] pf_count;

  assign pf_in_data  = arb_beat;
  assign pf_out_beat = beat_t'(pf_out_data);

  lb_fifo #(.WIDTH(BEAT_BITS), .DEPTH(PKT_FIFO_DEPTH)) u_payload (
    .clk, .rst,
    .in_valid(arb_valid), .in_ready(arb_ready), .in_data(pf_in_data),
    .out_valid(pf_out_valid), .out_ready(pf_out_ready), .out_data(pf_out_data),
    .count(pf_count)
  );

  // ------------------------------------------------------------ parse
  logic s0_valid;
  phv_t s0_phv;

  lb_parser #(.LB_VERSION(LB_VERSION)) u_parser (
    .clk, .rst,
    .in_fire(arb_valid && arb_ready), .in_beat(arb_beat),
    .phv_valid(s0_valid), .phv(s0_phv)
  );

  // ------------------------------------------------------------ match-action stages
  typedef struct packed {
    phv_t              phv;
    logic              l2_hit;
    logic [47:0]       lb_mac;
    logic              l3_hit;
    logic [127:0]      lb_ip;
    logic [INST_W-1:0] inst;
    logic              epoch_hit;
    logic [EPOCH_W-1:0] epoch;
    cal_entry_t        cal;
  } ctx_t;

  ctx_t s1, s2, s3, s4;
  logic v1, v2, v3, v4;

  // s0 -> s1: L2 and L3 input filters, looked up in parallel
  logic              l2_v, l2_hit, l3_v, l3_hit;
  logic [47:0]       l2_sa;
  logic [127:0]      l3_src;
  logic [INST_W-1:0] l3_inst;

  lb_l2_filter #(.ENTRIES(L2_ENTRIES)) u_l2 (
    .clk, .rst,
    .wr_en(l2_wr_en), .wr_idx(l2_wr_idx), .wr_entry(l2_wr_entry),
    .lk_valid(s0_valid), .lk_port(s0_phv.in_port), .lk_mac_da(s0_phv.eth_da),
    .res_valid(l2_v), .res_hit(l2_hit), .res_mac_sa(l2_sa)
  );

  lb_l3_filter #(.ENTRIES(L3_ENTRIES)) u_l3 (
    .clk, .rst,
    .wr_en(l3_wr_en), .wr_idx(l3_wr_idx), .wr_entry(l3_wr_entry),
    .lk_valid(s0_valid), .lk_port(s0_phv.in_port), .lk_ethertype(s0_phv.ethertype),
    .lk_addr(s0_phv.l3_dst),
    .res_valid(l3_v), .res_hit(l3_hit), .res_src_ip(l3_src), .res_inst(l3_inst)
  );

  phv_t s1_phv;
  always_ff @(posedge clk) begin
    if (s0_valid) s1_phv <= s0_phv;
  end

  always_comb begin
    s1        = '0;
    s1.phv    = s1_phv;
    s1.l2_hit = l2_hit;
    s1.lb_mac = l2_sa;
    s1.l3_hit = l3_hit;
    s1.lb_ip  = l3_src;
    s1.inst   = l3_inst;
  end
  assign v1 = l2_v && l3_v;

  // s1 -> s2: calendar epoch assignment
  logic               ep_v, ep_hit;
  logic [EPOCH_W-1:0] ep_epoch;
  ctx_t               s2_q;

  lb_epoch_assign #(.ENTRIES(EPOCH_ENTRIES)) u_epoch (
    .clk, .rst,
    .wr_en(ep_wr_en), .wr_idx(ep_wr_idx), .wr_entry(ep_wr_entry),
    .lk_valid(v1), .lk_inst(s1.inst), .lk_event(s1.phv.lb_event),
    .res_valid(ep_v), .res_hit(ep_hit), .res_epoch(ep_epoch)
  );

  always_ff @(posedge clk) begin
    if (v1) s2_q <= s1;
  end
  always_comb begin
    s2           = s2_q;
    s2.epoch_hit = ep_hit;
    s2.epoch     = ep_epoch;
  end
  assign v2 = ep_v;

  // s2 -> s3: calendar to member map
  logic       cal_v;
  cal_entry_t cal_e;
  ctx_t       s3_q;

  lb_calendar #(.N_INST(N_INST), .N_EPOCH(N_EPOCH), .N_SLOT(N_SLOT)) u_cal (
    .clk, .rst,
    .wr_en(cal_wr_en), .wr_inst(cal_wr_inst), .wr_epoch(cal_wr_epoch), .wr_slot(cal_wr_slot),
    .wr_entry(cal_wr_entry),
    .lk_valid(v2), .lk_inst(s2.inst), .lk_epoch(s2.epoch),
    .lk_slot(s2.phv.lb_event[SLOT_W-1:0]),
    .res_valid(cal_v), .res_entry(cal_e)
  );

  always_ff @(posedge clk) begin
    if (v2) s3_q <= s2;
  end
  always_comb begin
    s3     = s3_q;
    s3.cal = cal_e;
  end
  assign v3 = cal_v;

  // s3 -> s4: member lookup
  logic          mem_v;
  member_entry_t mem_e;
  ctx_t          s4_q;

  lb_member_table #(.N_INST(N_INST), .N_MEMBER(N_MEMBER)) u_member (
    .clk, .rst,
    .wr_en(mem_wr_en), .wr_inst(mem_wr_inst), .wr_v6(mem_wr_v6), .wr_member(mem_wr_member),
    .wr_entry(mem_wr_entry),
    .lk_valid(v3), .lk_inst(s3.inst), .lk_v6(s3.phv.is_ipv6), .lk_member(s3.cal.member),
    .res_valid(mem_v), .res_entry(mem_e)
  );

  always_ff @(posedge clk) begin
    if (v3) s4_q <= s3;
  end
  assign s4 = s4_q;
  assign v4 = mem_v;

  // s4 -> s5: drop decision and header rewrite
  logic  rw_valid;
  meta_t rw_meta;

  lb_rewrite u_rewrite (
    .clk, .rst,
    .in_valid(v4), .phv(s4.phv),
    .l2_hit(s4.l2_hit), .lb_mac(s4.lb_mac),
    .l3_hit(s4.l3_hit), .lb_ip(s4.lb_ip),
    .epoch_hit(s4.epoch_hit), .cal(s4.cal), .member(mem_e),
    .out_valid(rw_valid), .meta(rw_meta)
  );

  // ------------------------------------------------------------ metadata queue
  // It never overflows: a result only exists for a packet that has at least
  // one beat in the payload FIFO, and is removed with its last beat, so it
  // holds no more entries than the payload FIFO holds beats.
  logic mq_in_ready, mq_out_valid, mq_out_ready;
  logic [META_BITS-1:0] mq_out_data;
  meta_t mq_meta;
  logic [$clog2(PKT_FIFO_DEPTH+1)-1:0] mq_count;

  lb_fifo #(.WIDTH(META_BITS), .DEPTH(PKT_FIFO_DEPTH)) u_metaq (
    .clk, .rst,
    .in_valid(rw_valid), .in_ready(mq_in_ready), .in_data(rw_meta),
    .out_valid(mq_out_valid), .out_ready(mq_out_ready), .out_data(mq_out_data),
    .count(mq_count)
  );
  assign mq_meta = meta_t'(mq_out_data);

  a_metaq_room: assert property (@(posedge clk) disable iff (rst) rw_valid |-> mq_in_ready);

  // ------------------------------------------------------------ deparse and egress
  logic  dp_valid, dp_ready;
  beat_t dp_beat;

  lb_deparser u_deparser (
    .clk, .rst,
    .meta_valid(mq_out_valid), .meta(mq_meta), .meta_ready(mq_out_ready),
    .in_valid(pf_out_valid), .in_beat(pf_out_beat), .in_ready(pf_out_ready),
    .out_valid(dp_valid), .out_beat(dp_beat), .out_ready(dp_ready)
  );

  lb_egress_demux #(.NUM_PORTS(NUM_PORTS)) u_egress (
    .in_valid(dp_valid), .in_beat(dp_beat), .in_ready(dp_ready),
    .out_valid(tx_valid), .out_beat(tx_beat), .out_ready(tx_ready)
  );

  assign drop_valid  = mq_out_valid && mq_out_ready && mq_meta.drop;
  assign drop_reason = mq_meta.reason;

endmodule

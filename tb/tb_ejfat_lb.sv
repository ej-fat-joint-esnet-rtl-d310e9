// tb_ejfat_lb: end-to-end test of the load balancer at its default sizes.
//
// Programs the tables the way a control plane would (L2/L3 filters first,
// then members, calendars, and the epoch assignment table last), then replays
// a run like the paper's hardware test: 5 DAQs send IPv6 (and some IPv4)
// event segments through both ports with packet reordering across event
// boundaries, and the configuration passes through three epochs: one CN, then
// three (CN4..CN6, CN0 removed), then all ten with CN5 weighted double. The
// epoch switches are made live, by adding the prefix entries of the ending
// epoch and repointing the wildcard, while packets of the old epoch are still
// arriving. Mixed in are packets that each discard rule must drop, a second LB
// instance, and an instance without epochs.
//
// Every forwarded packet is compared byte for byte with the packet the model
// in tb_pkt_pkg predicts (checksums recomputed from scratch); every drop is
// matched with its expected reason. It also checks that no event is split
// over two CNs, that CN5 receives more events than the others in the last
// epoch, and that a burst of 9000-byte frames streams at no less than 98% of
// one beat per cycle. Each mechanism is counted and one that never occurred
// is a failure.
module tb_ejfat_lb;
  import ejfat_pkg::*;
  import tb_pkt_pkg::*;

  localparam int NP = 2;
  localparam logic [47:0]  LB_MAC  = 48'h02_4c_42_00_00_01;
  localparam logic [47:0]  RTR_MAC = 48'h02_aa_00_00_00_00;
  localparam logic [127:0] LB6_A   = 128'hfd41_0000_0000_0000_0000_0000_0000_0100;
  localparam logic [127:0] LB6_B   = 128'hfd41_0000_0000_0000_0000_0000_0000_0200;
  localparam logic [127:0] LB4_A   = {96'd0, 32'h0a01_0001};
  localparam logic [127:0] LB4_B   = {96'd0, 32'h0a01_0002};
  localparam logic [127:0] LB4_C   = {96'd0, 32'h0a01_0003};
  localparam logic [127:0] SN6_A   = {104'hff02_0000_0000_0000_0000_0001_ff, LB6_A[23:0]};
  localparam int NCN = 10;
  localparam int E1 = 12, E2 = 24, NEV = 68;

  logic clk = 0, rst = 1;
  always #2 clk = ~clk;

  logic  [NP-1:0] rx_valid, rx_ready, tx_valid, tx_ready;
  beat_t rx_beat [NP];
  beat_t tx_beat [NP];
  logic l2_wr_en = 0, l3_wr_en = 0, ep_wr_en = 0, cal_wr_en = 0, mem_wr_en = 0;
  logic [3:0] l2_wr_idx, l3_wr_idx;
  logic [6:0] ep_wr_idx;
  l2_entry_t l2_wr_entry; l3_entry_t l3_wr_entry; epoch_entry_t ep_wr_entry;
  logic [INST_W-1:0] cal_wr_inst, mem_wr_inst; logic [EPOCH_W-1:0] cal_wr_epoch;
  logic [SLOT_W-1:0] cal_wr_slot; cal_entry_t cal_wr_entry;
  logic mem_wr_v6; logic [MEMBER_W-1:0] mem_wr_member; member_entry_t mem_wr_entry;
  logic drop_valid; drop_reason_e drop_reason;

  ejfat_lb dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", msg);
    end
  endtask

  // ------------------------------------------------------------ reference configuration
  function automatic logic [127:0] cn_ip(int m, bit v6);
    return v6 ? {112'hfd6f_0000_0000_0000_0000_0000_0000, 16'(16'hee01 + m)} : {96'd0, 32'h0a02_0001 + 32'(m)};
  endfunction
  function automatic logic [47:0] cn_mac(int m);  return RTR_MAC + 48'(m); endfunction
  function automatic logic [15:0] cn_port(int m); return 16'(17750 + 16 * m); endfunction
  function automatic int cn_bits(int m);          return m % 4; endfunction

  int cal_ref [3][512];        // instance 0: epoch -> slot -> member
  function automatic int epoch_of(int ev);
    return (ev < E1) ? 0 : (ev < E2) ? 1 : 2;
  endfunction

  // ------------------------------------------------------------ control plane writes
  task automatic wr_l2(int idx, logic [47:0] da);
    @(negedge clk);
    l2_wr_en = 1; l2_wr_idx = 4'(idx);
    l2_wr_entry = '{valid: 1, port_any: 1, port: '0, mac_da: da, mac_sa: LB_MAC};
    @(negedge clk); l2_wr_en = 0;
  endtask
  task automatic wr_l3(int idx, logic [15:0] et, logic [127:0] a, logic [127:0] src, int inst);
    @(negedge clk);
    l3_wr_en = 1; l3_wr_idx = 4'(idx);
    l3_wr_entry = '{valid: 1, port_any: 1, port: '0, ethertype: et, addr: a, src_ip: src,
                    inst: INST_W'(inst)};
    @(negedge clk); l3_wr_en = 0;
  endtask
  task automatic wr_ep(int idx, int inst, logic [63:0] pfx, int plen, int ep);
    @(negedge clk);
    ep_wr_en = 1; ep_wr_idx = 7'(idx);
    ep_wr_entry = '{valid: 1, inst: INST_W'(inst), prefix: pfx, plen: 7'(plen), epoch: EPOCH_W'(ep)};
    @(negedge clk); ep_wr_en = 0;
  endtask
  task automatic wr_cal(int inst, int ep, int slot, bit v, int m);
    @(negedge clk);
    cal_wr_en = 1; cal_wr_inst = INST_W'(inst); cal_wr_epoch = EPOCH_W'(ep);
    cal_wr_slot = SLOT_W'(slot); cal_wr_entry = '{valid: v, member: MEMBER_W'(m)};
    @(negedge clk); cal_wr_en = 0;
  endtask
  task automatic wr_mem(int inst, bit v6, int m, bit v, logic [47:0] mac, logic [127:0] ip,
                        logic [15:0] port, int bits);
    @(negedge clk);
    mem_wr_en = 1; mem_wr_inst = INST_W'(inst); mem_wr_v6 = v6; mem_wr_member = MEMBER_W'(m);
    mem_wr_entry = '{valid: v, mac_da: mac, ip_dst: ip, base_port: port, entropy_bits: 5'(bits)};
    @(negedge clk); mem_wr_en = 0;
  endtask

  // prefixes covering [lo, hi)
  int next_ep_idx = 2;
  task automatic wr_range(int inst, longint unsigned lo, longint unsigned hi, int ep);
    longint unsigned a = lo;
    int k;
    while (a < hi) begin
      k = 0;
      while (k < 63 && (a & ((64'd1 << (k + 1)) - 1)) == 0 && a + (64'd1 << (k + 1)) <= hi) k++;
      wr_ep(next_ep_idx, inst, a, 64 - k, ep);
      next_ep_idx++;
      a += 64'd1 << k;
    end
  endtask

  // ------------------------------------------------------------ traffic
  typedef struct {
    bytes_t pkt;
    int     port;
    int     ev;            // -1 when not an LB event packet of instance 0
    bit     fwd;
    drop_reason_e reason;
    bytes_t exp;
    int     cn;
  } item_t;

  item_t items[$];
  int port_q [NP][$];          // indices into items, in send order
  int exp_q  [NP][$];          // forwarded items expected on each port
  int drop_exp [16];
  int drop_seen [16];

  function automatic void add(int port, bytes_t p, int ev, bit fwd, drop_reason_e r,
                              bytes_t e = {}, int cn = -1);
    item_t it;
    it.pkt = p; it.port = port; it.ev = ev; it.fwd = fwd; it.reason = r; it.exp = e; it.cn = cn;
    items.push_back(it);
    port_q[port].push_back(items.size() - 1);
  endfunction

  function automatic void add_lb_event(int port, bit v6, int daq, int ev, int paylen, logic [15:0] ent);
    bytes_t p, e;
    int ep, m;
    logic [127:0] src = v6 ? {112'hfd41_0000_0000_0000_0000_0000_0000, 16'(daq + 1)} :
                             {96'd0, 32'hc0a8_0001 + 32'(daq)};
    p = build_lb(v6, LB_MAC, 48'h02_da_00_00_00_00 + 48'(daq), src, v6 ? LB6_A : LB4_A,
                 16'(40000 + daq), ent, 64'(ev), paylen, ev * 7 + daq, LB_MAGIC, 8'd1, !v6 && ev % 2 == 1);
    ep = epoch_of(ev);
    m  = cal_ref[ep][ev % 512];
    e  = expected_lb_out(p, v6, cn_mac(m), LB_MAC, v6 ? LB6_A : LB4_A, cn_ip(m, v6),
                         cn_port(m) + (ent & 16'((1 << cn_bits(m)) - 1)));
    add(port, p, ev, 1, DROP_NONE, e, m);
  endfunction

  // ------------------------------------------------------------ mechanism counters
  int n_fwd_v4, n_fwd_v6, n_port_fwd[NP], n_tx_stall, n_contention, n_single_beat, n_flush,
      n_old_after_switch1, n_old_after_switch2, n_zero_csum, n_big;
  int ev_cn [NEV];
  int cn_events [NCN];
  bit switch1_done = 0, switch2_done = 0, want_switch1 = 0, want_switch2 = 0;

  // ------------------------------------------------------------ drivers
  bit drivers_done [NP];
  bit tx_random = 1;
  for (genvar p = 0; p < NP; p++) begin : g_drv
    initial begin
      beat_t bq[$];
      int idx;
      rx_valid[p] = 0;
      rx_beat[p]  = '0;
      drivers_done[p] = 0;
      wait (!rst);
      wait (items.size() > 0 && port_q[p].size() > 0);
      repeat (5) @(negedge clk);
      while (port_q[p].size() > 0) begin
        idx = port_q[p].pop_front();
        if (items[idx].ev >= E1 - 1) want_switch1 = 1;
        if (items[idx].ev >= E2 - 1) want_switch2 = 1;
        while ((items[idx].ev >= E1 && !switch1_done) || (items[idx].ev >= E2 && !switch2_done))
          @(negedge clk);
        if (items[idx].ev >= 0 && items[idx].ev < E1 && switch1_done) n_old_after_switch1++;
        if (items[idx].ev >= E1 && items[idx].ev < E2 && switch2_done) n_old_after_switch2++;
        bq = {};
        to_beats(items[idx].pkt, PORT_W'(p), bq);
        if (bq.size() == 1 && items[idx].fwd) n_single_beat++;
        while (bq.size() > 0) begin
          rx_valid[p] = ($urandom_range(0, 9) != 0);
          rx_beat[p]  = bq[0];
          @(posedge clk);
          if (rx_valid[p] && rx_ready[p]) void'(bq.pop_front());
          @(negedge clk);
        end
        rx_valid[p] = 0;
      end
      drivers_done[p] = 1;
    end
  end

  always @(posedge clk) if (!rst && rx_valid == '1) n_contention++;

  // ------------------------------------------------------------ receivers
  bytes_t rx_pkt [NP];
  for (genvar p = 0; p < NP; p++) begin : g_rcv
    always @(negedge clk) tx_ready[p] = tx_random ? ($urandom_range(0, 7) != 0) : 1'b1;
    always @(posedge clk) begin
      if (!rst && tx_valid[p] && !tx_ready[p]) n_tx_stall++;
      if (!rst && tx_valid[p] && tx_ready[p]) begin
        add_beat(rx_pkt[p], tx_beat[p]);
        check(tx_beat[p].port == PORT_W'(p), "egress beat tagged with another port");
        if (tx_beat[p].last) begin
          if (exp_q[p].size() == 0) check(0, $sformatf("unexpected packet on port %0d", p));
          else begin
            int idx;
            idx = exp_q[p].pop_front();
            check(same(rx_pkt[p], items[idx].exp),
                  $sformatf("port %0d item %0d ev %0d: output differs (got %0d bytes, want %0d)",
                            p, idx, items[idx].ev, rx_pkt[p].size(), items[idx].exp.size()));
            if (items[idx].exp.size() > 0 && items[idx].exp[12] == 8'h86) n_fwd_v6++;
            else n_fwd_v4++;
            n_port_fwd[p]++;
            if (items[idx].pkt.size() % 64 > 16 || items[idx].pkt.size() % 64 == 0) n_flush++;
            if (items[idx].pkt.size() >= 9000) n_big++;
            if (items[idx].exp.size() > 0 && items[idx].exp[12] == 8'h08 &&
                items[idx].exp[40] == 0 && items[idx].exp[41] == 0) n_zero_csum++;
            if (items[idx].ev >= 0) begin
              if (ev_cn[items[idx].ev] < 0) begin
                ev_cn[items[idx].ev] = items[idx].cn;
                if (items[idx].ev >= E2) cn_events[items[idx].cn]++;
              end else check(ev_cn[items[idx].ev] == items[idx].cn, "event split over two CNs");
            end
          end
          rx_pkt[p] = {};
        end
      end
    end
  end

  always @(posedge clk) if (!rst && drop_valid) drop_seen[drop_reason]++;

  // ------------------------------------------------------------ epoch switching (control plane)
  initial begin
    wait (want_switch1);
    // epoch 1 calendar and members were written before traffic; connect it now
    wr_range(0, 0, E1, 0);
    wr_ep(0, 0, 64'd0, 0, 1);
    switch1_done = 1;
    wait (want_switch2);
    wr_range(0, E1, E2, 1);
    wr_ep(0, 0, 64'd0, 0, 2);
    switch2_done = 1;
  end

  // ------------------------------------------------------------ main
  initial begin : main
    int ord [$];
    longint t0, t1;
    int nbeats;
    for (int i = 0; i < NEV; i++) ev_cn[i] = -1;
    for (int s = 0; s < 512; s++) begin
      int seq [11] = '{0, 1, 2, 3, 4, 5, 5, 6, 7, 8, 9};
      cal_ref[0][s] = 0;
      cal_ref[1][s] = 4 + (s % 3);
      cal_ref[2][s] = seq[s % 11];
    end
    repeat (4) @(negedge clk);
    rst = 0;

    // L2 / L3 input filters
    wr_l2(0, 48'hffff_ffff_ffff);
    wr_l2(1, LB_MAC);
    wr_l2(2, {24'h3333ff, LB6_A[23:0]});
    wr_l3(0, ETH_IPV4, LB4_A, LB4_A, 0);
    wr_l3(1, ETH_ARP,  LB4_A, LB4_A, 0);
    wr_l3(2, ETH_IPV6, LB6_A, LB6_A, 0);
    wr_l3(3, ETH_IPV6, SN6_A, LB6_A, 0);
    wr_l3(4, ETH_IPV6, LB6_B, LB6_B, 1);
    wr_l3(5, ETH_IPV4, LB4_B, LB4_B, 1);
    wr_l3(6, ETH_IPV4, LB4_C, LB4_C, 2);
    // members, then calendars, then the epoch table
    for (int m = 0; m < NCN; m++) begin
      wr_mem(0, 1, m, 1, cn_mac(m), cn_ip(m, 1), cn_port(m), cn_bits(m));
      wr_mem(0, 0, m, 1, cn_mac(m), cn_ip(m, 0), cn_port(m), cn_bits(m));
    end
    wr_mem(1, 1, 20, 1, cn_mac(20), cn_ip(20, 1), cn_port(20), 2);
    wr_mem(1, 0, 20, 0, '0, '0, '0, 0);
    for (int e = 0; e < 3; e++)
      for (int s = 0; s < 512; s++) wr_cal(0, e, s, 1, cal_ref[e][s]);
    for (int s = 0; s < 512; s++) wr_cal(1, 0, s, s % 2 == 0, 20);
    wr_ep(0, 0, 64'd0, 0, 0);       // instance 0: everything in epoch 0
    wr_ep(1, 1, 64'd0, 0, 0);       // instance 1: everything in epoch 0

    // ---------------- traffic generation
    for (int ev = 0; ev < NEV; ev++) begin
      for (int d = 0; d < 5; d++) begin
        int nseg;
        logic [15:0] ent;
        nseg = $urandom_range(1, 3);
        ent  = 16'($urandom);
        for (int s = 0; s < nseg; s++) begin
          int len;
          bit v6;
          v6 = (d != 4);
          case ($urandom_range(0, 5))
            0: len = $urandom_range(1, 5);                      // tiny (one-beat for IPv4)
            1: len = 9000 - (v6 ? 78 : 58);                     // 9000-byte frame
            default: len = $urandom_range(20, 3000);
          endcase
          add_lb_event(d % NP, v6, d, ev, len, ent);
        end
      end
      // packets every discard rule must drop
      if (ev % 6 == 3) begin
        bytes_t p;
        p = build_lb(1, 48'h02_00_00_00_00_99, 48'h02_da_00_00_00_07, LB6_A, LB6_A, 1, 2, 64'(ev), 100, 1);
        add(ev % NP, p, -1, 0, DROP_L2_MISS);
        p = build_lb(1, LB_MAC, 48'h02_da_00_00_00_07, LB6_A, 128'hfd41_0000_0000_0000_0000_0000_0000_0999, 1, 2, 64'(ev), 100, 1);
        add(ev % NP, p, -1, 0, DROP_L3_MISS);
        p = build_lb(1, LB_MAC, 48'h02_da_00_00_00_07, LB6_A, LB6_A, 1, 2, 64'(ev), 100, 1, 16'h4c43);
        add(ev % NP, p, -1, 0, DROP_BAD_LB);
        p = build_lb(0, LB_MAC, 48'h02_da_00_00_00_07, LB4_A, LB4_A, 1, 2, 64'(ev), 100, 1, LB_MAGIC, 8'd2);
        add(ev % NP, p, -1, 0, DROP_BAD_LB);
        p = build_udp(0, LB_MAC, 48'h02_da_00_00_00_07, LB4_A, LB4_A, 1, 16'd53, lb_hdr(LB_MAGIC, 1, 0, 0, 40, 3));
        add(ev % NP, p, -1, 0, DROP_NOT_LB);
        p = build_arp(48'h02_da_00_00_00_08, 32'h0a01_0077, LB4_A[31:0]);
        add(ev % NP, p, -1, 0, DROP_NOT_LB);
        p = build_icmp_echo(LB_MAC, 48'h02_da_00_00_00_08, 32'h0a01_0077, LB4_A[31:0]);
        add(ev % NP, p, -1, 0, DROP_NOT_LB);
        p = build_nd_ns(48'h02_da_00_00_00_08, LB6_B, LB6_A);
        add(ev % NP, p, -1, 0, DROP_NOT_LB);
        p = build_lb(1, LB_MAC, 48'h02_da_00_00_00_07, LB6_A, LB6_A, 1, 2, 64'(ev), 100, 1);
        p = p[0:69];                                               // cut inside the LB header
        add(ev % NP, p, -1, 0, DROP_TRUNCATED);
        p = build_lb(0, LB_MAC, 48'h02_da_00_00_00_07, LB4_A, LB4_C, 1, 2, 64'(ev), 100, 1);
        add(ev % NP, p, -1, 0, DROP_NO_EPOCH);
        p = build_lb(1, LB_MAC, 48'h02_da_00_00_00_07, LB6_A, LB6_B, 1, 2, 64'(2 * ev + 1), 100, 1);
        add(ev % NP, p, -1, 0, DROP_EMPTY_SLOT);
        p = build_lb(0, LB_MAC, 48'h02_da_00_00_00_07, LB4_A, LB4_B, 1, 2, 64'(2 * ev), 100, 1);
        add(ev % NP, p, -1, 0, DROP_NO_MEMBER);
        begin   // instance 1, even slot: forwarded to member 20 with LB B's source address
          bytes_t e;
          logic [15:0] ent;
          ent = 16'(ev * 3);
          p = build_lb(1, LB_MAC, 48'h02_da_00_00_00_07, LB6_A, LB6_B, 7, ent, 64'(2 * ev), 300, 5);
          e = expected_lb_out(p, 1, cn_mac(20), LB_MAC, LB6_B, cn_ip(20, 1), cn_port(20) + (ent & 16'd3));
          add(ev % NP, p, -1, 1, DROP_NONE, e, 20);
        end
      end
    end
    // network reordering between neighbouring events on each port
    for (int p = 0; p < NP; p++)
      for (int i = 0; i + 1 < port_q[p].size(); i++)
        if (items[port_q[p][i]].ev >= 0 && items[port_q[p][i+1]].ev == items[port_q[p][i]].ev + 1 &&
            $urandom_range(0, 2) == 0) begin
          int t = port_q[p][i];
          port_q[p][i] = port_q[p][i+1];
          port_q[p][i+1] = t;
          i++;
        end
    foreach (items[i]) begin
      if (items[i].fwd) ;
      else drop_exp[items[i].reason]++;
    end
    for (int p = 0; p < NP; p++)
      foreach (port_q[p][i]) if (items[port_q[p][i]].fwd) exp_q[p].push_back(port_q[p][i]);

    wait (drivers_done[0] && drivers_done[1]);
    wait (exp_q[0].size() == 0 && exp_q[1].size() == 0);
    repeat (50) @(negedge clk);

    for (int r = 1; r <= 8; r++)
      check(drop_seen[r] == drop_exp[r],
            $sformatf("drop reason %0d: %0d dropped, %0d expected", r, drop_seen[r], drop_exp[r]));
    for (int i = 0; i < NEV; i++) check(ev_cn[i] >= 0, $sformatf("event %0d never delivered", i));
    for (int m = 0; m < NCN; m++)
      if (m != 5) check(cn_events[5] > cn_events[m], $sformatf("CN5 not weighted above CN%0d", m));

    // ---------------- line-rate burst: 9000-byte frames, output always ready
    tx_random = 0;
    nbeats = 0;
    for (int i = 0; i < 20; i++) begin
      add_lb_event(0, 1, 0, NEV - 1, 9000 - 78, 16'(i));
      exp_q[0].push_back(items.size() - 1);
      nbeats += (9000 + 63) / 64;
    end
    drivers_done[0] = 0;
    fork
      begin : burst
        beat_t bq[$];
        int idx;
        while (port_q[0].size() > 0) begin
          idx = port_q[0].pop_front();
          to_beats(items[idx].pkt, 0, bq);
        end
        @(negedge clk);
        while (bq.size() > 0) begin
          rx_valid[0] = 1;
          rx_beat[0]  = bq[0];
          @(posedge clk);
          if (rx_ready[0]) void'(bq.pop_front());
          @(negedge clk);
        end
        rx_valid[0] = 0;
      end
      begin
        wait (tx_valid[0]);
        t0 = $time;
        wait (exp_q[0].size() == 0);
        t1 = $time;
      end
    join
    begin
      real eff;
      eff = real'(nbeats) / (real'(t1 - t0) / 4.0);
      $display("burst: %0d input beats in %0d cycles, %.3f beats/cycle", nbeats, (t1 - t0) / 4, eff);
      check(eff >= 0.98, "burst of 9000-byte frames below 98% of one beat per cycle");
    end

    // ---------------- mechanisms
    $display("fwd v4 %0d v6 %0d, port0 %0d port1 %0d, stalls %0d, contention %0d, one-beat %0d, flush %0d",
             n_fwd_v4, n_fwd_v6, n_port_fwd[0], n_port_fwd[1], n_tx_stall, n_contention, n_single_beat, n_flush);
    $display("old-epoch packets after switch: %0d / %0d, zero-csum v4 %0d, 9000B %0d, CN5 events %0d",
             n_old_after_switch1, n_old_after_switch2, n_zero_csum, n_big, cn_events[5]);
    for (int r = 1; r <= 8; r++) $display("drop reason %0d: %0d", r, drop_seen[r]);
    check(n_fwd_v4 > 0, "no IPv4 packet forwarded");
    check(n_fwd_v6 > 0, "no IPv6 packet forwarded");
    check(n_port_fwd[0] > 0 && n_port_fwd[1] > 0, "a port never forwarded");
    check(n_tx_stall > 0, "output back-pressure never happened");
    check(n_contention > 0, "both ports never competed");
    check(n_single_beat > 0, "no one-beat frame");
    check(n_flush > 0, "no flush beat");
    check(n_old_after_switch1 > 0 && n_old_after_switch2 > 0, "no old-epoch packet after a switch");
    check(n_zero_csum > 0, "no IPv4 packet without UDP checksum");
    check(n_big > 0, "no 9000-byte frame");
    for (int r = 1; r <= 8; r++) check(drop_seen[r] > 0, $sformatf("drop reason %0d never happened", r));
    check(switch1_done && switch2_done, "epoch switches not made");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

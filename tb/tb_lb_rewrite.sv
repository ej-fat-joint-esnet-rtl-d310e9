// tb_lb_rewrite: drives header vectors of random IPv4 and IPv6 LB packets
// with random table results, and compares the new header with the first
// 42/62 bytes of the packet the reference model predicts (its IPv4 and UDP
// checksums computed from scratch over the whole outgoing packet, so the
// incremental checksum update is checked against a full recomputation). Then
// removes one table result at a time and checks the drop reason and its
// priority. Checks the one-cycle latency.
module tb_lb_rewrite;
  import ejfat_pkg::*;
  import tb_pkt_pkg::*;
  logic clk = 0, rst = 1;
  always #2 clk = ~clk;
  logic in_valid = 0; phv_t phv;
  logic l2_hit, l3_hit, epoch_hit; logic [47:0] lb_mac; logic [127:0] lb_ip;
  cal_entry_t cal; member_entry_t member;
  logic out_valid; meta_t meta;
  lb_rewrite dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string msg);
    checks++; if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", msg); end
  endtask

  // header vector taken straight from the packet bytes
  function automatic phv_t phv_of(bytes_t p, bit v6);
    phv_t h = '0;
    int u = v6 ? 54 : 34;
    h.eth_da = {p[0], p[1], p[2], p[3], p[4], p[5]};
    h.ethertype = {p[12], p[13]};
    h.is_ipv6 = v6; h.is_ipv4 = !v6; h.is_udp = 1; h.is_lb = 1; h.lb_ok = 1;
    for (int i = 0; i < (v6 ? 16 : 4); i++) begin
      h.ip_src = {h.ip_src[119:0], p[(v6 ? 22 : 26) + i]};
      h.l3_dst = {h.l3_dst[119:0], p[(v6 ? 38 : 30) + i]};
    end
    if (v6) begin
      h.ip_tos = {p[14][3:0], p[15][7:4]}; h.ip_flow = {p[15][3:0], p[16], p[17]};
      h.ip_len = {p[18], p[19]}; h.ip_ttl = p[21];
    end else begin
      h.ip_tos = p[15]; h.ip_len = {p[16], p[17]}; h.ip_id = {p[18], p[19]};
      h.ip_frag = {p[20], p[21]}; h.ip_ttl = p[22];
    end
    h.udp_sport = {p[u], p[u+1]}; h.udp_dport = {p[u+2], p[u+3]};
    h.udp_len = {p[u+4], p[u+5]}; h.udp_csum = {p[u+6], p[u+7]};
    h.lb_version = p[u+10]; h.lb_proto = p[u+11]; h.lb_rsvd = {p[u+12], p[u+13]};
    h.lb_entropy = {p[u+14], p[u+15]};
    for (int i = 0; i < 8; i++) h.lb_event = {h.lb_event[55:0], p[u+16+i]};
    return h;
  endfunction

  initial begin
    repeat (3) @(negedge clk); rst = 0;
    for (int n = 0; n < 400; n++) begin
      bytes_t p, e;
      bit v6, zc;
      logic [15:0] ent, dport;
      logic [127:0] cnip, src;
      v6 = n[0]; zc = (n % 4 == 2);
      ent = 16'($urandom);
      src = {$urandom, $urandom, $urandom, $urandom};
      cnip = {$urandom, $urandom, $urandom, $urandom};
      if (!v6) begin src[127:32] = '0; cnip[127:32] = '0; end
      lb_mac = {$urandom, 16'($urandom)};
      lb_ip  = v6 ? {$urandom, $urandom, $urandom, $urandom} : {96'd0, $urandom};
      member = '{valid: 1, mac_da: {$urandom, 16'($urandom)}, ip_dst: cnip,
                 base_port: 16'($urandom), entropy_bits: 5'($urandom_range(0, 16))};
      cal = '{valid: 1, member: 9'($urandom)};
      l2_hit = 1; l3_hit = 1; epoch_hit = 1;
      p = build_lb(v6, 48'h0200_0000_0001, 48'h0200_0000_0009, src, 128'h0a01_0001, 16'($urandom), ent,
                   {$urandom, $urandom}, $urandom_range(1, 2000), n, LB_MAGIC, 8'd1, zc);
      dport = member.base_port + (ent & 16'((32'd1 << member.entropy_bits) - 1));
      e = expected_lb_out(p, v6, member.mac_da, lb_mac, lb_ip, cnip, dport);
      phv = phv_of(p, v6);
      phv.in_port = PORT_W'(n % 2);
      in_valid = 1;
      @(negedge clk);
      in_valid = 0;
      check(out_valid, "latency");
      check(!meta.drop && meta.port == PORT_W'(n % 2), "forwarded to the ingress port");
      check(int'(meta.hdr_len) == (v6 ? 62 : 42), "header length");
      for (int i = 0; i < (v6 ? 62 : 42); i++)
        check(meta.hdr[8*i +: 8] == e[i], $sformatf("pkt %0d v6 %0d zc %0d byte %0d: %h want %h",
                                                     n, v6, zc, i, meta.hdr[8*i +: 8], e[i]));
      // discard rules, highest priority first
      for (int r = 0; r < 8; r++) begin
        phv_t q;
        drop_reason_e want;
        q = phv_of(p, v6);
        l2_hit = 1; l3_hit = 1; epoch_hit = 1; cal.valid = 1; member.valid = 1;
        case (r)
          0: begin q.truncated = 1; l2_hit = 0; want = DROP_TRUNCATED; end
          1: begin l2_hit = 0; l3_hit = 0; want = DROP_L2_MISS; end
          2: begin l3_hit = 0; q.is_lb = 0; want = DROP_L3_MISS; end
          3: begin q.is_lb = 0; q.lb_ok = 0; want = DROP_NOT_LB; end
          4: begin q.lb_ok = 0; epoch_hit = 0; want = DROP_BAD_LB; end
          5: begin epoch_hit = 0; cal.valid = 0; want = DROP_NO_EPOCH; end
          6: begin cal.valid = 0; member.valid = 0; want = DROP_EMPTY_SLOT; end
          default: begin member.valid = 0; want = DROP_NO_MEMBER; end
        endcase
        phv = q; in_valid = 1;
        @(negedge clk);
        in_valid = 0;
        check(meta.drop && meta.reason == want, $sformatf("rule %0d: drop %0d reason %0d", r, meta.drop, meta.reason));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule

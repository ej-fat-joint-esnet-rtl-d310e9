// tb_lb_parser: sends frames of every kind the parser classifies (IPv4 and
// IPv6 LB packets, a one-beat IPv4 LB frame, ARP, ICMP echo, IPv6 neighbour
// solicitation, UDP to another port, LB packets with a wrong magic or
// version, a frame cut inside the LB header) with random idle cycles between
// beats, and compares the parsed fields with the values the frames were
// built from. Checks that the header vector appears the cycle after the
// second beat (or the only beat) and once per frame.
module tb_lb_parser;
  import ejfat_pkg::*;
  import tb_pkt_pkg::*;
  logic clk = 0, rst = 1;
  always #2 clk = ~clk;
  logic in_fire = 0; beat_t in_beat; logic phv_valid; phv_t phv;
  lb_parser dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string msg);
    checks++; if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", msg); end
  endtask

  typedef struct { bytes_t p; int kind; logic [63:0] ev; logic [15:0] ent; } case_t;
  case_t cases[$];
  int got = 0;

  localparam logic [127:0] A6 = 128'hfd41_0000_0000_0000_0000_0000_0000_0100;
  localparam logic [127:0] S6 = 128'hfd41_0000_0000_0000_0000_0000_0000_0005;

  task automatic send(bytes_t p, int k, logic [63:0] ev, logic [15:0] ent, bit port);
    beat_t q[$];
    int n = 0;
    to_beats(p, PORT_W'(port), q);
    foreach (q[i]) begin
      while ($urandom_range(0, 2) == 0) @(negedge clk);
      in_fire = 1; in_beat = q[i];
      @(posedge clk);
      #1;
      // the header vector comes one cycle after beat 1, or after the only beat
      in_fire = 0;
      @(negedge clk);
      if (i == 1 || (q.size() == 1)) begin
        check(phv_valid, $sformatf("kind %0d: phv_valid missing after beat %0d", k, i));
        if (phv_valid) check_phv(p, k, ev, ent, port);
      end else check(!phv_valid, "phv_valid at the wrong beat");
    end
  endtask

  task automatic check_phv(bytes_t p, int k, logic [63:0] ev, logic [15:0] ent, bit port);
    got++;
    check(phv.in_port == PORT_W'(port), "port");
    check(phv.eth_da == {p[0], p[1], p[2], p[3], p[4], p[5]}, "eth_da");
    check(phv.ethertype == {p[12], p[13]}, "ethertype");
    case (k)
      0, 1: begin   // LB v6 / v4
        check(phv.is_lb && phv.lb_ok && !phv.truncated, $sformatf("kind %0d flags", k));
        check(phv.is_ipv6 == (k == 0) && phv.is_ipv4 == (k == 1), "ip version");
        check(phv.lb_event == ev && phv.lb_entropy == ent, "event/entropy");
        check(phv.udp_sport == 16'd4321 && phv.udp_len == {p[(k == 0 ? 58 : 38)], p[(k == 0 ? 59 : 39)]}, "udp");
        if (k == 0) check(phv.l3_dst == A6 && phv.ip_src == S6 && phv.ip_flow == 20'h12345, "v6 addrs");
        else check(phv.l3_dst == {96'd0, 32'h0a01_0001} && phv.ip_ttl == 8'd63, "v4 fields");
      end
      2: check(phv.is_arp && phv.l3_dst == {96'd0, 32'h0a01_0001} && !phv.is_lb, "arp");
      3: check(phv.is_icmp_echo && !phv.is_udp && !phv.is_lb, "icmp echo");
      4: check(phv.is_nd_ns && phv.is_ipv6 && !phv.is_lb, "nd ns");
      5: check(phv.is_udp && !phv.is_lb, "other udp");
      6: check(phv.is_lb && !phv.lb_ok, "bad magic");
      7: check(phv.is_lb && !phv.lb_ok, "bad version");
      8: check(phv.truncated, "truncated");
      default: ;
    endcase
  endtask

  initial begin
    bytes_t p;
    in_beat = '0;
    repeat (3) @(negedge clk); rst = 0;
    for (int r = 0; r < 20; r++) begin
      logic [63:0] ev; logic [15:0] ent;
      ev = {$urandom, $urandom}; ent = 16'($urandom);
      send(build_lb(1, 48'h0200_0000_0001, 48'h0200_0000_0009, S6, A6, 4321, ent, ev, $urandom_range(1, 300), r), 0, ev, ent, r[0]);
      send(build_lb(0, 48'h0200_0000_0001, 48'h0200_0000_0009, 128'h0a00_0005, 128'h0a01_0001, 4321, ent, ev,
                    (r % 2) ? 2 : $urandom_range(10, 300), r), 1, ev, ent, r[0]);
      send(build_arp(48'h0200_0000_0009, 32'h0a01_0077, 32'h0a01_0001), 2, 0, 0, 0);
      send(build_icmp_echo(48'h0200_0000_0001, 48'h0200_0000_0009, 32'h0a01_0077, 32'h0a01_0001), 3, 0, 0, 1);
      send(build_nd_ns(48'h0200_0000_0009, S6, A6), 4, 0, 0, 0);
      send(build_udp(0, 48'h0200_0000_0001, 48'h0200_0000_0009, 128'h0a00_0005, 128'h0a01_0001, 5, 53,
                     lb_hdr(LB_MAGIC, 1, 0, 0, 30, 1)), 5, 0, 0, 1);
      send(build_lb(1, 48'h0200_0000_0001, 48'h0200_0000_0009, S6, A6, 4321, ent, ev, 50, r, 16'h4c00), 6, ev, ent, 0);
      send(build_lb(1, 48'h0200_0000_0001, 48'h0200_0000_0009, S6, A6, 4321, ent, ev, 50, r, LB_MAGIC, 8'd7), 7, ev, ent, 1);
      p = build_lb(1, 48'h0200_0000_0001, 48'h0200_0000_0009, S6, A6, 4321, ent, ev, 50, r);
      p = p[0:69];
      send(p, 8, ev, ent, 0);
    end
    check(got == 180, $sformatf("%0d header vectors for 180 frames", got));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule

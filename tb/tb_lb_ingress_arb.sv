// tb_lb_ingress_arb: two ports offer random frames with random gaps while the
// output is randomly back-pressured. Checks that frames never interleave,
// that each frame arrives whole and in per-port order with its port tag, that
// both ports win grants while they compete (round robin) and that an idle
// port never blocks the other.
module tb_lb_ingress_arb;
  import ejfat_pkg::*;
  logic clk = 0, rst = 1;
  always #2 clk = ~clk;
  logic [1:0] in_valid, in_ready; beat_t in_beat [2];
  logic out_valid, out_ready; beat_t out_beat;
  lb_ingress_arb #(.NUM_PORTS(2)) dut (.*);

  int checks = 0, failures = 0, n_switch = 0, n_contend = 0;
  task automatic check(bit ok, string msg);
    checks++; if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", msg); end
  endtask
  beat_t q [2][$];
  beat_t expq [2][$];
  bit hold [2];
  int cur = -1, prev_port = -1;

  for (genvar p = 0; p < 2; p++) begin : g
    always @(negedge clk) if (!(in_valid[p] && !in_ready[p])) hold[p] <= ($urandom_range(0, 4) == 0);
    always_comb begin
      in_valid[p] = q[p].size() > 0 && !hold[p];
      in_beat[p]  = q[p].size() > 0 ? q[p][0] : '0;
    end
  end
  always @(negedge clk) out_ready <= ($urandom_range(0, 3) != 0);

  always @(posedge clk) if (!rst) begin
    if (in_valid == 2'b11) n_contend++;
    for (int p = 0; p < 2; p++) if (in_valid[p] && in_ready[p]) void'(q[p].pop_front());
    if (out_valid && out_ready) begin
      int p;
      p = int'(out_beat.port);
      if (cur >= 0) check(p == cur, "frames interleaved");
      else begin
        if (prev_port >= 0 && p != prev_port) n_switch++;
        prev_port = p;
      end
      if (expq[p].size() == 0) check(0, "beat from nowhere");
      else begin
        check(out_beat.data == expq[p][0].data && out_beat.last == expq[p][0].last &&
              out_beat.keep == expq[p][0].keep, "beat content/order");
        void'(expq[p].pop_front());
      end
      cur = out_beat.last ? -1 : p;
    end
  end

  initial begin
    out_ready = 1; hold = '{0, 0};
    repeat (3) @(negedge clk); rst = 0;
    for (int n = 0; n < 200; n++) begin
      int p, nb;
      beat_t b;
      p = (n < 150) ? n % 2 : 1;                         // the tail is port 1 alone
      nb = $urandom_range(1, 6);
      for (int i = 0; i < nb; i++) begin
        b = '0;
        b.data = {16{$urandom}};
        b.keep = '1;
        b.last = (i == nb - 1);
        b.port = PORT_W'(p ^ 1);                         // must be overwritten by the arbiter
        q[p].push_back(b);
        b.port = PORT_W'(p);
        expq[p].push_back(b);
      end
    end
    wait (expq[0].size() == 0 && expq[1].size() == 0);
    check(n_switch > 50 && n_contend > 0, $sformatf("grants alternated %0d times, contention %0d", n_switch, n_contend));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule

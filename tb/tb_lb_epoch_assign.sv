// tb_lb_epoch_assign: exercises longest-prefix matching as the control plane
// uses it. Instance 0 gets a wildcard to epoch 0; then the range [0, 1900)
// is written as prefixes to epoch 0 and the wildcard moved to epoch 1; then
// [1900, 1930) to epoch 1 and the wildcard to epoch 2. After each step random
// event numbers (and ones near the boundaries) are looked up and compared
// with the range they fall in. Instance 1 has no entries and must miss.
module tb_lb_epoch_assign;
  import ejfat_pkg::*;
  logic clk = 0, rst = 1;
  always #2 clk = ~clk;
  logic wr_en = 0; logic [6:0] wr_idx; epoch_entry_t wr_entry;
  logic lk_valid = 0; logic [INST_W-1:0] lk_inst; logic [63:0] lk_event;
  logic res_valid, res_hit; logic [EPOCH_W-1:0] res_epoch;
  lb_epoch_assign #(.ENTRIES(128)) dut (.*);

  int checks = 0, failures = 0, nidx = 1;
  task automatic check(bit ok, string msg);
    checks++; if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask
  task automatic wr(int idx, logic [63:0] pfx, int plen, int ep);
    @(negedge clk);
    wr_en = 1; wr_idx = 7'(idx);
    wr_entry = '{valid: 1, inst: '0, prefix: pfx, plen: 7'(plen), epoch: EPOCH_W'(ep)};
    @(negedge clk); wr_en = 0;
  endtask
  task automatic wr_range(longint unsigned lo, longint unsigned hi, int ep);
    longint unsigned a = lo; int k;
    while (a < hi) begin
      k = 0;
      while (k < 63 && (a & ((64'd1 << (k + 1)) - 1)) == 0 && a + (64'd1 << (k + 1)) <= hi) k++;
      wr(nidx++, a, 64 - k, ep);
      a += 64'd1 << k;
    end
  endtask
  task automatic probe(int stage);
    for (int n = 0; n < 200; n++) begin
      longint unsigned ev; int want;
      case (n % 4)
        0: ev = {$urandom, $urandom};
        1: ev = 64'($urandom_range(0, 2100));
        2: ev = 64'($urandom_range(1890, 1940));
        default: ev = 64'(1900 + $urandom_range(0, 1) * 30 - $urandom_range(0, 1));
      endcase
      if (stage == 0) want = 0;
      else if (stage == 1) want = (ev < 1900) ? 0 : 1;
      else want = (ev < 1900) ? 0 : (ev < 1930) ? 1 : 2;
      @(negedge clk);
      lk_valid = 1; lk_inst = INST_W'(n % 8 == 7); lk_event = ev;
      @(negedge clk);
      lk_valid = 0;
      check(res_valid, "latency");
      if (n % 8 == 7) check(!res_hit, "instance 1 must miss");
      else check(res_hit && res_epoch == EPOCH_W'(want),
                 $sformatf("stage %0d ev %0d: epoch %0d want %0d", stage, ev, res_epoch, want));
    end
  endtask
  initial begin
    repeat (3) @(negedge clk); rst = 0;
    wr(0, 0, 0, 0);
    probe(0);
    wr_range(0, 1900, 0); wr(0, 0, 0, 1);
    probe(1);
    wr_range(1900, 1930, 1); wr(0, 0, 0, 2);
    probe(2);
    $display("prefix entries used: %0d", nidx);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule

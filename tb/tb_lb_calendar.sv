// tb_lb_calendar: fills calendars of several (instance, epoch) pairs with
// random members and empty slots, then reads random slots and compares with
// the test's copy; checks the one-cycle read latency and that calendars of
// different instances and epochs do not alias.
module tb_lb_calendar;
  import ejfat_pkg::*;
  logic clk = 0, rst = 1;
  always #2 clk = ~clk;
  logic wr_en = 0; logic [INST_W-1:0] wr_inst; logic [EPOCH_W-1:0] wr_epoch;
  logic [SLOT_W-1:0] wr_slot; cal_entry_t wr_entry;
  logic lk_valid = 0; logic [INST_W-1:0] lk_inst; logic [EPOCH_W-1:0] lk_epoch; logic [SLOT_W-1:0] lk_slot;
  logic res_valid; cal_entry_t res_entry;
  lb_calendar dut (.*);

  int checks = 0, failures = 0;
  cal_entry_t ref_c [4][4][512];
  task automatic check(bit ok, string msg);
    checks++; if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask
  initial begin
    repeat (3) @(negedge clk); rst = 0;
    for (int i = 0; i < 4; i++) for (int e = 0; e < 4; e++) for (int s = 0; s < 512; s++) begin
      @(negedge clk);
      wr_en = 1; wr_inst = INST_W'(i); wr_epoch = EPOCH_W'(e); wr_slot = SLOT_W'(s);
      wr_entry = '{valid: ($urandom_range(0, 7) != 0), member: MEMBER_W'($urandom)};
      ref_c[i][e][s] = wr_entry;
    end
    @(negedge clk); wr_en = 0;
    for (int n = 0; n < 2000; n++) begin
      int i, e, s;
      i = $urandom_range(0, 3); e = $urandom_range(0, 3); s = $urandom_range(0, 511);
      @(negedge clk);
      lk_valid = 1; lk_inst = INST_W'(i); lk_epoch = EPOCH_W'(e); lk_slot = SLOT_W'(s);
      @(negedge clk);
      lk_valid = 0;
      check(res_valid, "latency");
      check(res_entry == ref_c[i][e][s], $sformatf("(%0d,%0d,%0d) read %p", i, e, s, res_entry));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (40000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule

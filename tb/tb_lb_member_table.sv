// tb_lb_member_table: writes IPv4 and IPv6 entries for members of several
// instances (some invalid), reads them back in random order and compares
// with the test's copy; checks that IPv4 and IPv6 entries of one member and
// entries of different instances are distinct, and the one-cycle latency.
module tb_lb_member_table;
  import ejfat_pkg::*;
  logic clk = 0, rst = 1;
  always #2 clk = ~clk;
  logic wr_en = 0; logic [INST_W-1:0] wr_inst; logic wr_v6; logic [MEMBER_W-1:0] wr_member;
  member_entry_t wr_entry;
  logic lk_valid = 0; logic [INST_W-1:0] lk_inst; logic lk_v6; logic [MEMBER_W-1:0] lk_member;
  logic res_valid; member_entry_t res_entry;
  lb_member_table dut (.*);

  int checks = 0, failures = 0;
  member_entry_t ref_m [4][2][64];
  task automatic check(bit ok, string msg);
    checks++; if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask
  initial begin
    repeat (3) @(negedge clk); rst = 0;
    for (int i = 0; i < 4; i++) for (int v = 0; v < 2; v++) for (int m = 0; m < 64; m++) begin
      @(negedge clk);
      wr_en = 1; wr_inst = INST_W'(i); wr_v6 = v[0]; wr_member = MEMBER_W'(m * 8 + i);
      wr_entry = '{valid: ($urandom_range(0, 5) != 0), mac_da: {$urandom, 16'(m)},
                   ip_dst: {$urandom, $urandom, $urandom, $urandom}, base_port: 16'($urandom),
                   entropy_bits: 5'($urandom_range(0, 16))};
      ref_m[i][v][m] = wr_entry;
    end
    @(negedge clk); wr_en = 0;
    for (int n = 0; n < 1000; n++) begin
      int i, v, m;
      i = $urandom_range(0, 3); v = $urandom_range(0, 1); m = $urandom_range(0, 63);
      @(negedge clk);
      lk_valid = 1; lk_inst = INST_W'(i); lk_v6 = v[0]; lk_member = MEMBER_W'(m * 8 + i);
      @(negedge clk);
      lk_valid = 0;
      check(res_valid, "latency");
      check(res_entry == ref_m[i][v][m], $sformatf("(%0d,%0d,%0d) mismatch", i, v, m));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule

// tb_lb_l2_filter: programs broadcast, unicast and solicited-node entries
// (one bound to port 1 only) and looks up hits and misses; the expected
// result comes from a linear search of the test's own copy of the table.
// Checks the one-cycle result latency.
module tb_lb_l2_filter;
  import ejfat_pkg::*;
  logic clk = 0, rst = 1;
  always #2 clk = ~clk;
  logic wr_en = 0; logic [3:0] wr_idx; l2_entry_t wr_entry;
  logic lk_valid = 0; logic [PORT_W-1:0] lk_port; logic [47:0] lk_mac_da;
  logic res_valid, res_hit; logic [47:0] res_mac_sa;
  lb_l2_filter #(.ENTRIES(16)) dut (.*);

  int checks = 0, failures = 0;
  l2_entry_t ref_t [16];
  logic [47:0] macs [5] = '{48'hffff_ffff_ffff, 48'h0200_0000_0001, 48'h3333_ff00_0100,
                            48'h0200_0000_0002, 48'h0200_0000_0003};
  task automatic check(bit ok, string msg);
    checks++; if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask
  initial begin
    repeat (3) @(negedge clk); rst = 0;
    foreach (ref_t[i]) ref_t[i] = '0;
    for (int i = 0; i < 4; i++) begin
      @(negedge clk);
      wr_en = 1; wr_idx = 4'(i * 3);
      wr_entry = '{valid: 1, port_any: (i != 3), port: 1'b1, mac_da: macs[i],
                   mac_sa: 48'h0a00_0000_0000 + 48'(i)};
      ref_t[i * 3] = wr_entry;
    end
    @(negedge clk); wr_en = 0;
    for (int n = 0; n < 200; n++) begin
      bit hit; logic [47:0] sa;
      lk_valid = 1; lk_port = PORT_W'($urandom_range(0, 1));
      lk_mac_da = macs[$urandom_range(0, 4)];
      hit = 0; sa = '0;
      for (int i = 0; i < 16; i++)
        if (!hit && ref_t[i].valid && ref_t[i].mac_da == lk_mac_da &&
            (ref_t[i].port_any || ref_t[i].port == lk_port)) begin hit = 1; sa = ref_t[i].mac_sa; end
      @(negedge clk);
      lk_valid = 0;
      check(res_valid, "latency");
      check(res_hit == hit, $sformatf("hit %0d want %0d for %h port %0d", res_hit, hit, lk_mac_da, lk_port));
      if (hit) check(res_mac_sa == sa, "mac_sa");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule

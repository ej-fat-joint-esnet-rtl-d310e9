// tb_lb_l3_filter: programs the paper's example entries (IPv4 unicast, ARP,
// IPv6 unicast, IPv6 solicited-node multicast) for two instances, and looks
// up matching and non-matching (ethertype, address) pairs. Expected results
// come from a linear search of the test's copy of the table.
module tb_lb_l3_filter;
  import ejfat_pkg::*;
  logic clk = 0, rst = 1;
  always #2 clk = ~clk;
  logic wr_en = 0; logic [3:0] wr_idx; l3_entry_t wr_entry;
  logic lk_valid = 0; logic [PORT_W-1:0] lk_port; logic [15:0] lk_ethertype; logic [127:0] lk_addr;
  logic res_valid, res_hit; logic [127:0] res_src_ip; logic [INST_W-1:0] res_inst;
  lb_l3_filter #(.ENTRIES(16)) dut (.*);

  int checks = 0, failures = 0;
  l3_entry_t ref_t [16];
  logic [15:0]  ets [6]   = '{ETH_IPV4, ETH_ARP, ETH_IPV6, ETH_IPV6, ETH_IPV6, ETH_IPV4};
  logic [127:0] addrs [6] = '{128'h0a01_0001, 128'h0a01_0001, 128'hfd41_0000_0000_0000_0000_0000_0000_0100,
                              128'hff02_0000_0000_0000_0000_0001_ff00_0100,
                              128'hfd41_0000_0000_0000_0000_0000_0000_0200, 128'h0a01_0009};
  task automatic check(bit ok, string msg);
    checks++; if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask
  initial begin
    repeat (3) @(negedge clk); rst = 0;
    foreach (ref_t[i]) ref_t[i] = '0;
    for (int i = 0; i < 5; i++) begin
      @(negedge clk);
      wr_en = 1; wr_idx = 4'(15 - i);
      wr_entry = '{valid: 1, port_any: 1, port: '0, ethertype: ets[i], addr: addrs[i],
                   src_ip: addrs[i] ^ 128'h5, inst: INST_W'(i == 4 ? 1 : 0)};
      ref_t[15 - i] = wr_entry;
    end
    @(negedge clk); wr_en = 0;
    for (int n = 0; n < 300; n++) begin
      bit hit; logic [127:0] src; logic [INST_W-1:0] inst;
      int a;
      a = $urandom_range(0, 5);
      lk_valid = 1; lk_port = PORT_W'($urandom_range(0, 1));
      lk_ethertype = ets[$urandom_range(0, 5)];
      lk_addr = addrs[a];
      hit = 0; src = '0; inst = '0;
      for (int i = 0; i < 16; i++)
        if (!hit && ref_t[i].valid && ref_t[i].ethertype == lk_ethertype && ref_t[i].addr == lk_addr) begin
          hit = 1; src = ref_t[i].src_ip; inst = ref_t[i].inst;
        end
      @(negedge clk);
      lk_valid = 0;
      check(res_valid, "latency");
      check(res_hit == hit, $sformatf("hit %0d want %0d", res_hit, hit));
      if (hit) check(res_src_ip == src && res_inst == inst, "value");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule

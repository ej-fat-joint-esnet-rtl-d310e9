// tb_lb_fifo: random push/pop against a queue model, with the FIFO driven to
// full and to empty. Checks data order, count, in_ready at full and
// out_valid at empty, and that a word is readable one cycle after its push.
module tb_lb_fifo;
  localparam int W = 16, D = 8;
  logic clk = 0, rst = 1;
  always #2 clk = ~clk;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [W-1:0] in_data, out_data;
  logic [$clog2(D+1)-1:0] count;
  lb_fifo #(.WIDTH(W), .DEPTH(D)) dut (.*);

  int checks = 0, failures = 0, n_full = 0, n_empty = 0;
  logic [W-1:0] model[$];
  task automatic check(bit ok, string msg);
    checks++; if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  initial begin
    in_valid = 0; out_ready = 0; in_data = 0;
    repeat (3) @(negedge clk); rst = 0;
    for (int cyc = 0; cyc < 4000; cyc++) begin
      int phase;
      phase = (cyc / 500) % 2;                // alternately fill and drain
      @(negedge clk);
      in_valid  = ($urandom_range(0, 3) < (phase ? 1 : 3));
      out_ready = ($urandom_range(0, 3) < (phase ? 3 : 1));
      in_data   = W'($urandom);
      check(int'(count) == model.size(), "count");
      check(in_ready == (model.size() < D), "in_ready");
      check(out_valid == (model.size() > 0), "out_valid");
      if (out_valid) check(out_data == model[0], $sformatf("data %h want %h", out_data, model[0]));
      if (model.size() == D) n_full++;
      if (model.size() == 0) n_empty++;
      @(posedge clk);
      if (out_valid && out_ready) void'(model.pop_front());
      if (in_valid && in_ready) model.push_back(in_data);
    end
    check(n_full > 0 && n_empty > 0, "never full or never empty");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule

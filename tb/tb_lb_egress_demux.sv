// tb_lb_egress_demux: sends beats tagged with random ports and random
// per-port readiness; checks that each beat appears only on its own port,
// with unchanged contents, and that the input sees exactly that port's ready.
module tb_lb_egress_demux;
  import ejfat_pkg::*;
  logic in_valid, in_ready; beat_t in_beat;
  logic [1:0] out_valid, out_ready; beat_t out_beat [2];
  lb_egress_demux #(.NUM_PORTS(2)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string msg);
    checks++; if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", msg); end
  endtask
  initial begin
    for (int n = 0; n < 500; n++) begin
      in_valid = $urandom_range(0, 3) != 0;
      in_beat = '0;
      in_beat.data = {16{$urandom}};
      in_beat.keep = 64'($urandom);
      in_beat.last = $urandom_range(0, 1);
      in_beat.port = PORT_W'($urandom_range(0, 1));
      out_ready = 2'($urandom);
      #1;
      for (int p = 0; p < 2; p++) begin
        check(out_valid[p] == (in_valid && int'(in_beat.port) == p), "valid steering");
        if (out_valid[p]) check(out_beat[p] == in_beat, "beat contents");
      end
      check(in_ready == out_ready[in_beat.port], "ready steering");
      #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000;
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule

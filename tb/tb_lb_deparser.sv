// tb_lb_deparser: feeds random frames (58 to 9000 bytes) with random results:
// dropped, or forwarded with a random 42- or 62-byte replacement header. The
// expected output is computed directly: new header, then the received bytes
// from hdr_len + 16 on. Random valid gaps and output back-pressure in the
// first phase; in the second phase everything is ready and the last beat of
// an N-beat packet must leave N cycles after its first beat was offered (N + 1
// with a flush beat); the next packet's first beat is absorbed a cycle later.
module tb_lb_deparser;
  import ejfat_pkg::*;
  import tb_pkt_pkg::*;
  logic clk = 0, rst = 1;
  always #2 clk = ~clk;
  logic meta_valid, meta_ready, in_valid, in_ready, out_valid, out_ready;
  meta_t meta; beat_t in_beat, out_beat;
  lb_deparser dut (.*);

  int checks = 0, failures = 0, n_drop = 0, n_flush = 0, n_stall = 0;
  task automatic check(bit ok, string msg);
    checks++; if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", msg); end
  endtask

  meta_t mq[$]; beat_t bq[$]; bytes_t expq[$]; int port_exp[$];
  bit random_mode = 1;

  function automatic void make(int len, bit drop);
    bytes_t p, e; meta_t m;
    p = {};
    for (int i = 0; i < len; i++) p.push_back(8'($urandom));
    m = '0;
    m.drop = drop; m.reason = drop ? DROP_L3_MISS : DROP_NONE;
    m.port = PORT_W'($urandom_range(0, 1));
    m.hdr_len = (len >= 78 && $urandom_range(0, 1)) ? 7'd62 : 7'd42;
    for (int i = 0; i < 64; i++) m.hdr[8*i +: 8] = (i < m.hdr_len) ? 8'($urandom) : 8'h00;
    mq.push_back(m);
    to_beats(p, '0, bq);
    if (!drop) begin
      e = {};
      for (int i = 0; i < m.hdr_len; i++) e.push_back(m.hdr[8*i +: 8]);
      for (int i = m.hdr_len + 16; i < len; i++) e.push_back(p[i]);
      expq.push_back(e);
      port_exp.push_back(int'(m.port));
    end
  endfunction

  // sources: FWFT queues
  always_comb begin
    meta_valid = mq.size() > 0;
    meta = meta_valid ? mq[0] : '0;
  end
  bit in_gap;
  always @(negedge clk) begin
    if (!(in_valid && !in_ready)) in_gap <= random_mode && ($urandom_range(0, 3) == 0);
    out_ready <= !random_mode || ($urandom_range(0, 3) != 0);
  end
  always_comb begin
    in_valid = bq.size() > 0 && !in_gap;
    in_beat = (bq.size() > 0) ? bq[0] : '0;
  end
  bytes_t got;
  always @(posedge clk) if (!rst) begin
    if (in_valid && in_ready) void'(bq.pop_front());
    if (meta_valid && meta_ready) begin
      if (mq[0].drop) n_drop++;
      void'(mq.pop_front());
    end
    if (out_valid && !out_ready) n_stall++;
    if (out_valid && out_ready) begin
      for (int j = 0; j < DATA_BYTES; j++) if (out_beat.keep[j]) got.push_back(out_beat.data[8*j +: 8]);
      if (out_beat.last) begin
        if (expq.size() == 0) check(0, "unexpected packet");
        else begin
          bytes_t e;
          e = expq[0];
          check(same(got, e), $sformatf("packet differs: %0d bytes, want %0d", got.size(), expq[0].size()));
          check(int'(out_beat.port) == port_exp[0], "port");
          void'(expq.pop_front()); void'(port_exp.pop_front());
        end
        got = {};
      end
    end
  end

  initial begin
    in_gap = 0; out_ready = 1;
    repeat (3) @(negedge clk); rst = 0;
    for (int n = 0; n < 300; n++) begin
      int len;
      case (n % 5)
        0: len = 58 + $urandom_range(0, 5);
        1: len = 9000;
        default: len = $urandom_range(78, 800);
      endcase
      if (len % 64 > 16 || len % 64 == 0) n_flush++;
      make(len, $urandom_range(0, 4) == 0);
    end
    wait (expq.size() == 0 && mq.size() == 0);
    check(n_drop > 0 && n_flush > 0 && n_stall > 0, "drop, flush or stall never happened");
    // timing at full readiness
    random_mode = 0;
    repeat (2) @(negedge clk);
    for (int k = 0; k < 3; k++) begin
      int len, nb, want;
      longint t0;
      len = (k == 0) ? 9000 : (k == 1) ? 8976 : 100;  // 9000 % 64 = 40 (flush), 8976 % 64 = 16 (none)
      nb = (len + 63) / 64;
      want = nb + ((len % 64 > 16 || len % 64 == 0) ? 1 : 0);   // last beat out after N (N+1) cycles
      @(negedge clk);
      make(len, 0);
      t0 = $time;
      wait (expq.size() == 0);
      @(negedge clk);
      check(($time - t0) / 4 == want, $sformatf("len %0d: %0d cycles, want %0d", len, ($time - t0) / 4, want));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule

// tb_apax_redundancy_remover: self-checking test of the redundancy remover.
//
// Blocks of attenuated samples (smooth curves, tones, noise and full-scale
// values, each under a random frequency class) are streamed through with
// random backpressure. For each block the testbench builds the three
// candidate streams and their block floating point costs with the reference
// functions of tb_apax_ref_pkg, and checks that
//   * each output sample is the stream chosen on the previous block,
//   * cfg.sel carries that choice and the rest of cfg passes unchanged,
//   * dec_sel after the block's last sample is the cheapest stream.
module tb_apax_redundancy_remover;
  import apax_pkg::*;
  import tb_apax_ref_pkg::*;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  att_smp_t   in_smp;
  logic       in_valid, in_ready;
  str_smp_t   out_smp;
  logic       out_valid, out_ready;
  logic       dec_valid;
  logic [1:0] dec_sel;

  apax_redundancy_remover dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_sel[3] = '{0, 0, 0};
  longint exp_q[$];
  int     sel_q[$];
  int     dec_q[$];

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  always @(posedge clk) begin
    if (rst_n && out_valid && out_ready) begin
      longint e;
      int s;
      e = exp_q.pop_front();
      s = sel_q.pop_front();
      check(longint'(out_smp.data) == e,
            $sformatf("stream sample %0d expected %0d", out_smp.data, e));
      check(int'(out_smp.cfg.sel) == s, "cfg.sel carries the stream in use");
    end
    if (rst_n && dec_valid) begin
      int d;
      d = dec_q.pop_front();
      check(int'(dec_sel) == d, $sformatf("decision %0d expected %0d", dec_sel, d));
      n_sel[d]++;
    end
  end

  int ready_pct = 70;
  always @(negedge clk) out_ready <= ($urandom_range(99) < ready_pct);

  initial begin
    int cur_sel;
    in_valid = 1'b0;
    in_smp = '0;
    cur_sel = 0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int b = 0; b < 40; b++) begin
      int n, fc, kind, c0, c1, c2, best;
      lq_t x, s0, s1, s2;
      real f;
      n = 4 * $urandom_range(16, 40);
      fc = $urandom_range(2);
      kind = b % 4;
      f = (fc == 0) ? 0.01 : (fc == 1) ? 0.25 : 0.49;
      x = {};
      for (int i = 0; i < n; i++) begin
        longint v;
        case (kind)
          0: v = longint'(100000.0 * $sin(6.2831853 * f * i));
          1: v = longint'(5000.0 * $sin(6.2831853 * f * i)) + longint'($urandom_range(20)) - 10;
          2: v = longint'($urandom_range(200000)) - 100000;
          default: v = ($urandom_range(1) == 1) ? ATT_MAX : -ATT_MAX;
        endcase
        x.push_back(v);
      end
      ref_streams(x, fc, s0, s1, s2);
      c0 = ref_cost(s0); c1 = ref_cost(s1); c2 = ref_cost(s2);
      best = 0;
      if (c1 < c0) best = 1;
      if (c2 < ((best == 1) ? c1 : c0)) best = 2;
      dec_q.push_back(best);
      for (int i = 0; i < n; i++) begin
        att_smp_t s;
        s = '0;
        s.data = ATT_W'(x[i]);
        s.first = (i == 0);
        s.last = (i == n - 1);
        s.cfg.fc = fc_e'(fc);
        s.cfg.dtype = DT_INT32;
        exp_q.push_back((cur_sel == 0) ? s0[i] : (cur_sel == 1) ? s1[i] : s2[i]);
        sel_q.push_back(cur_sel);
        @(negedge clk);
        in_smp <= s;
        in_valid <= 1'b1;
        #1;
        while (!in_ready) begin @(negedge clk); #1; end
        @(posedge clk);
      end
      cur_sel = best;
      @(negedge clk);
      in_valid <= 1'b0;
    end
    ready_pct = 100;
    repeat (10) @(negedge clk);
    check(exp_q.size() == 0 && dec_q.size() == 0, "all samples and decisions came out");
    for (int k = 0; k < 3; k++) check(n_sel[k] > 0, $sformatf("stream %0d chosen", k));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #5_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule

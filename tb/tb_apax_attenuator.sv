// tb_apax_attenuator: self-checking test of the attenuator.
//
// Random integers of all three widths, random IEEE singles (normals,
// denormals, zeros, infinities) and doubles are multiplied by random gains
// and compared with the real-arithmetic reference of tb_apax_ref_pkg, which
// rounds to nearest with ties away from zero and saturates to 29 bits. The
// output is backpressured at random; sideband fields must pass unchanged and
// the latency with a free-flowing output must be one cycle.
module tb_apax_attenuator;
  import apax_pkg::*;
  import tb_apax_ref_pkg::*;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  raw_smp_t in_smp;
  logic     in_valid, in_ready;
  att_smp_t out_smp;
  logic     out_valid, out_ready;

  apax_attenuator dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0, n_sat = 0, n_round = 0;
  raw_smp_t exp_q[$];

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  function automatic raw_smp_t rand_smp();
    raw_smp_t s;
    int t;
    s = '0;
    t = $urandom_range(4);
    s.cfg.dtype  = dtype_e'(t);
    s.cfg.gain_m = GM_W'($urandom_range(65535));
    s.first = 1'($urandom);
    s.last  = 1'($urandom);
    s.cfg.fc = fc_e'($urandom_range(2));
    case (t)
      0, 1, 2: begin
        s.data = {$urandom, $urandom};
        s.cfg.gain_e = GE_W'($urandom_range(20) - 12);
      end
      3: begin
        logic [7:0] e;
        case ($urandom_range(9))
          0: e = 8'd0;
          1: e = 8'hFF;
          default: e = 8'($urandom_range(100, 150));
        endcase
        s.data = {32'h0, 1'($urandom), e, 23'($urandom)};
        s.cfg.gain_e = GE_W'($urandom_range(40) - 10);
      end
      default: begin
        logic [10:0] e;
        e = 11'($urandom_range(1000, 1050));
        s.data = {1'($urandom), e, 20'($urandom), 16'($urandom), 16'h0};
        s.cfg.gain_e = GE_W'($urandom_range(30) - 10);
      end
    endcase
    return s;
  endfunction

  // Output side: compare in order.
  always @(posedge clk) begin
    if (rst_n && out_valid && out_ready) begin
      raw_smp_t s;
      longint e;
      s = exp_q.pop_front();
      e = ref_att(s.data, int'(s.cfg.dtype), int'(s.cfg.gain_m), int'(s.cfg.gain_e));
      if (e == ATT_MAX || e == -ATT_MAX) n_sat++;
      check(longint'(out_smp.data) == e,
            $sformatf("type %0d data %h gain %0d/%0d: got %0d expected %0d", s.cfg.dtype,
                      s.data, s.cfg.gain_m, s.cfg.gain_e, out_smp.data, e));
      check(out_smp.first == s.first && out_smp.last == s.last && out_smp.cfg == s.cfg,
            "sideband passes unchanged");
    end
  end

  int ready_pct = 70;
  always @(negedge clk) out_ready <= ($urandom_range(99) < ready_pct);

  initial begin
    in_valid = 1'b0;
    in_smp = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    // Hand-picked values: 3 * 0.5 = 1.5 rounds to 2, -3 * 0.5 to -2,
    // 5 * 0.75 = 3.75 -> 4, float 1.0 * 2^10 = 1024.
    for (int i = 0; i < 4000; i++) begin
      raw_smp_t s;
      s = rand_smp();
      if (i == 0) begin s.data = 64'd3; s.cfg.dtype = DT_INT16; s.cfg.gain_m = 16'd16384; s.cfg.gain_e = '0; end
      if (i == 1) begin s.data = 64'hFFFD; s.cfg.dtype = DT_INT16; s.cfg.gain_m = 16'd16384; s.cfg.gain_e = '0; end
      if (i == 2) begin s.data = 64'd5; s.cfg.dtype = DT_INT8; s.cfg.gain_m = 16'd24576; s.cfg.gain_e = '0; end
      if (i == 3) begin s.data = 64'h3F800000; s.cfg.dtype = DT_FLT32; s.cfg.gain_m = 16'd32768; s.cfg.gain_e = 16'd10; end
      @(negedge clk);
      in_smp   <= s;
      in_valid <= 1'b1;
      exp_q.push_back(s);
      #1;
      while (!in_ready) begin @(negedge clk); #1; end
      @(posedge clk);
    end
    @(negedge clk);
    in_valid <= 1'b0;
    ready_pct = 100;
    repeat (10) @(negedge clk);
    check(exp_q.size() == 0, "all samples came out");
    // Latency: one cycle with the output free.
    @(negedge clk);
    begin
      raw_smp_t s;
      s = rand_smp();
      in_smp <= s; in_valid <= 1'b1; exp_q.push_back(s);
      @(negedge clk);
      in_valid <= 1'b0;
      check(out_valid, "latency is one cycle");
    end
    repeat (3) @(negedge clk);
    check(n_sat > 0, "saturation exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #2_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule

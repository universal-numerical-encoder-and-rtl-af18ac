// tb_apax_control: self-checking test of the control block.
//
// The testbench drives samples in blocks of changing size, type and mode,
// with random stalls, and plays the bit packer by reporting an encoded size
// (blk_done/blk_words) partway through each block. It checks
//   * first/last flags frame exactly blk_size samples per block,
//   * data passes unchanged and the handshake passes straight through,
//   * cfg is constant within a block and carries type, mode and the
//     monitor's class as they were at the block's first sample,
//   * in fixed-gain mode the gain is the profiler's,
//   * in fixed-rate mode the gain follows a reference model of the loop:
//     -1/16 when the last report exceeded the target, +1/16 when below,
//     unchanged when equal or when no new report came, renormalised into
//     [0.5, 1), and restarted from the profiler gain on entering the mode.
module tb_apax_control;
  import apax_pkg::*;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  enc_params_t     params;
  logic [IN_W-1:0] in_data;
  logic            in_valid, in_ready;
  raw_smp_t        out_smp;
  logic            out_valid, out_ready;
  fc_e             mon_fc;
  logic            blk_done;
  logic [15:0]     blk_words;
  logic            adj_up, adj_dn;

  apax_control dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0, n_up = 0, n_dn = 0, n_hold = 0, n_norm = 0;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  always @(posedge clk) begin
    if (adj_up) n_up++;
    if (adj_dn) n_dn++;
  end

  // Reference gain loop state.
  int  ref_m, ref_e, prev_mode, prev_dtype;
  bit  ref_fresh;
  int  ref_words;

  initial begin
    in_valid = 1'b0;
    in_data = '0;
    params = '0;
    blk_done = 1'b0;
    blk_words = '0;
    mon_fc = FC_LOW;
    out_ready = 1'b1;
    prev_mode = -1;
    prev_dtype = -1;
    ref_fresh = 0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int b = 0; b < 60; b++) begin
      int n, mode, dt, gm, ge, tgt, rep_at, rep_w, em, ee;
      blk_cfg_t c0;
      n = 4 * $urandom_range(16, 30);
      mode = (b < 5 || (b >= 30 && b < 34)) ? 0 : 1;
      dt = (b < 45) ? 1 : 3;
      gm = (b % 7 == 0) ? 40000 : 20000 + $urandom_range(10000);
      ge = $urandom_range(6) - 3;
      tgt = 20;
      // Expected gain for this block.
      if (mode == 1 && prev_mode == 1 && prev_dtype == dt) begin
        em = ref_m; ee = ref_e;
        if (ref_fresh && ref_words > tgt) em = em - (em >> 4);
        if (ref_fresh && ref_words < tgt) em = em + (em >> 4);
        if (ref_fresh && ref_words == tgt) n_hold++;
        if (em >= 32768) begin em = em >> 1; ee++; n_norm++; end
        else if (em < 16384 && em != 0) begin em = em << 1; ee--; n_norm++; end
        ref_fresh = 0;
      end else begin
        em = gm; ee = ge;
      end
      ref_m = em; ref_e = ee;
      prev_mode = mode; prev_dtype = dt;
      rep_at = $urandom_range(2, n - 3);
      rep_w = (b % 5 == 0) ? tgt : tgt - 3 + $urandom_range(6);
      for (int i = 0; i < n; i++) begin
        logic [63:0] d;
        d = {$urandom, $urandom};
        @(negedge clk);
        blk_done <= 1'b0;
        if (i == 0) begin
          params.dtype <= dtype_e'(dt);
          params.mode <= mode_e'(mode);
          params.blk_size <= BLK_W'(n);
          params.gain_m <= GM_W'(gm);
          params.gain_e <= GE_W'(ge);
          params.target_words <= 16'(tgt);
          mon_fc <= fc_e'(b % 3);
        end
        if (i == rep_at) begin
          blk_done <= 1'b1;
          blk_words <= 16'(rep_w);
        end
        out_ready <= ($urandom_range(9) != 0);
        in_data <= d;
        in_valid <= 1'b1;
        #1;
        check(out_valid && in_ready == out_ready && out_smp.data == d, "pass-through");
        check(out_smp.first == (i == 0) && out_smp.last == (i == n - 1),
              $sformatf("block %0d sample %0d framing", b, i));
        if (i == 0) c0 = out_smp.cfg;
        check(out_smp.cfg == c0, "cfg constant within the block");
        check(int'(out_smp.cfg.dtype) == dt && int'(out_smp.cfg.mode) == mode &&
              int'(out_smp.cfg.fc) == b % 3, "cfg type, mode and class");
        check(int'(out_smp.cfg.gain_m) == em && int'(out_smp.cfg.gain_e) == ee,
              $sformatf("block %0d gain %0d/%0d expected %0d/%0d", b,
                        out_smp.cfg.gain_m, out_smp.cfg.gain_e, em, ee));
        while (!in_ready) begin
          @(negedge clk);
          blk_done <= 1'b0;
          out_ready <= 1'b1;
          #1;
        end
        // The class may change once the first sample is taken.
        @(posedge clk);
        if (i == 0) begin
          @(negedge clk);
          mon_fc <= fc_e'((b + 1) % 3);
          in_valid <= 1'b0;
        end
        if (i == rep_at) begin
          ref_fresh = 1;
          ref_words = rep_w;
        end
      end
    end
    @(negedge clk);
    in_valid <= 1'b0;
    blk_done <= 1'b0;
    check(n_up > 0 && n_dn > 0 && n_hold > 0 && n_norm > 0,
          $sformatf("loop steps up %0d down %0d hold %0d renormalise %0d", n_up, n_dn, n_hold, n_norm));
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

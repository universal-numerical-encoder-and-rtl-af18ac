// tb_apax_codec: end-to-end test of the APAX codec (encoder and decoder) at
// its default parameters.
//
// The encoder's words are looped back into the decoder's input, so every
// sample makes the full write-then-read trip.
// The testbench streams a series of phases through the encoder, each a run of
// whole blocks with one set of encoding parameters: slow and fast sinusoids
// and a tone near fs/4 (so every centre-frequency class and every derivative
// stream is chosen), white noise, full-scale integers that saturate the
// attenuator, 32- and 64-bit floats, a fixed-rate phase in which the gain
// loop has to lower and raise the gain, one 16384-sample block (the largest
// the paper allows) and a throughput phase with no output backpressure.
// Elsewhere out_ready is withdrawn at random, so the output stalls back up to
// the input.
//
// Every encoded block is decoded by the reference decoder of tb_apax_ref_pkg
// and compared sample by sample with the reference attenuation of the input
// under the gain the header reports. Headers are checked against the
// parameters (type, mode, fixed gain), the stream choice against the
// reference cost of the previous block, the frequency class against the
// previous block's zero crossings and blk_words against the words received.
// Every decoded sample is compared with the reference attenuated value
// divided by the block's gain (see dec_match), and its first/last/type
// sideband with the block it belongs to; the decoder's error flag must stay
// low. The decoder output is also stalled at random.
// Each mechanism is counted, and one that never happened is a failure.
module tb_apax_codec;
  import apax_pkg::*;
  import tb_apax_ref_pkg::*;

  localparam int OUT_W = 32;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  enc_params_t params;
  logic [IN_W-1:0]  in_data;
  logic             in_valid;
  logic             in_ready;
  logic [OUT_W-1:0] out_data;
  logic             out_valid, out_ready, out_last;
  logic             blk_done;
  logic [15:0]      blk_words;
  fc_e              mon_fc;
  logic [BLK_W-1:0] mon_xings;
  logic             mon_done;
  logic             dec_valid;
  logic [1:0]       dec_sel;
  logic             tok_valid;
  logic [1:0]       tok_kind;
  logic             adj_up, adj_dn;
  logic [BLK_W-1:0] rd_blk_size;
  logic [OUT_W-1:0] rd_in_data;
  logic             rd_in_valid, rd_in_ready;
  dec_smp_t         rd_out_smp;
  logic             rd_out_valid, rd_out_ready;
  logic             rd_err;
  logic             wr_rdy;

  apax_codec dut (.*);

  // Loopback: a word leaves the encoder when the link (wr_rdy) and the
  // decoder both take it.
  assign rd_in_data  = out_data;
  assign rd_in_valid = out_valid && wr_rdy;
  assign out_ready   = wr_rdy && rd_in_ready;

  always #5 clk = ~clk;

  int checks = 0;
  int failures = 0;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  // ------------------------------------------------------------ expectations
  typedef struct {
    logic [63:0] raw;
    int          dtype;
  } smp_t;
  typedef struct {
    int nsmp;
    int dtype;
    int mode;
    int gain_m;
    int gain_e;
  } blk_t;

  smp_t exp_q[$];
  blk_t blk_q[$];

  // Expected decoder output, filled as the encoded blocks are checked.
  typedef struct {
    real v;
    int  dtype;
    bit  exact;
    bit  first;
    bit  last;
  } dexp_t;
  dexp_t dexp_q[$];
  int    n_in = 0, n_dec = 0, n_dec_bad = 0, n_dec_stall = 0;

  // Mechanism counters.
  int n_out_stall = 0, n_in_stall = 0;
  int n_tok[3] = '{0, 0, 0};
  int n_sel[3] = '{0, 0, 0};
  int n_fc[3]  = '{0, 0, 0};
  int n_adj_up = 0, n_adj_dn = 0, n_sat = 0, n_mode_switch = 0;
  int n_int_hdr = 0, n_flt_hdr = 0, n_blocks = 0, n_size_reports = 0;

  // ------------------------------------------------------------ output side
  logic [31:0] words[$];
  int          prev_mode = -1;
  lq_t         prev_x;
  int          prev_fc = 0;
  int          prev_xings = 0;
  int          prev_nsmp = 0;
  int          last_blk_words = -1;
  bit          have_prev = 0;

  always @(posedge clk) begin
    if (rst_n) begin
      if (out_valid && !out_ready) n_out_stall++;
      if (blk_done) begin
        check(int'(blk_words) == last_blk_words,
              $sformatf("blk_words %0d vs %0d words received", blk_words, last_blk_words));
        n_size_reports++;
      end
      if (adj_up) n_adj_up++;
      if (adj_dn) n_adj_dn++;
      if (tok_valid) n_tok[tok_kind]++;
      if (out_valid && out_ready) begin
        words.push_back(out_data);
        if (out_last) process_block();
      end
    end
  end

  task automatic process_block();
    blk_t b;
    dec_t r;
    lq_t  xr;
    int   bad, xings, exp_fc, exp_sel, c0, c1, c2;
    lq_t  s0, s1, s2;
    bit   prev_sgn, sgn;
    if (blk_q.size() == 0) begin
      check(0, "block without expectation");
      words = {};
      return;
    end
    b = blk_q.pop_front();
    r = decode_block(words, b.nsmp);
    n_blocks++;
    check(r.ok, $sformatf("block %0d decodes cleanly", n_blocks));
    check(r.dtype == b.dtype && r.mode == b.mode,
          $sformatf("block %0d header type/mode %0d/%0d", n_blocks, r.dtype, r.mode));
    if (b.mode == 0)
      check(r.gain_m == b.gain_m && r.gain_e == b.gain_e,
            $sformatf("block %0d fixed gain %0d/%0d", n_blocks, r.gain_m, r.gain_e));
    check(r.hdr_bits == ((b.dtype >= 3) ? 48 : 32), "header size");
    if (r.hdr_bits == 48) n_flt_hdr++; else n_int_hdr++;
    if (prev_mode >= 0 && prev_mode != r.mode) n_mode_switch++;
    prev_mode = r.mode;
    // Sample-by-sample comparison with the reference attenuation.
    bad = 0;
    xr = {};
    xings = 0;
    for (int i = 0; i < b.nsmp; i++) begin
      smp_t s;
      longint e;
      s = exp_q.pop_front();
      e = ref_att(s.raw, s.dtype, r.gain_m, r.gain_e);
      if (e == ATT_MAX || e == -ATT_MAX) n_sat++;
      xr.push_back(e);
      begin
        dexp_t de;
        de.v     = ref_unatt(e, s.dtype, r.gain_m, r.gain_e);
        de.dtype = s.dtype;
        de.exact = ((r.gain_m & (r.gain_m - 1)) == 0);
        de.first = (i == 0);
        de.last  = (i == b.nsmp - 1);
        dexp_q.push_back(de);
      end
      if (i >= r.x.size() || r.x[i] != e) begin
        if (bad == 0 && failures < 20)
          $display("  block %0d sample %0d: got %0d expected %0d", n_blocks, i,
                   (i < r.x.size()) ? r.x[i] : 0, e);
        bad++;
      end
      case (s.dtype)
        0: sgn = s.raw[7];
        1: sgn = s.raw[15];
        2, 3: sgn = s.raw[31];
        default: sgn = s.raw[63];
      endcase
      if (i > 0 && sgn != prev_sgn) xings++;
      prev_sgn = sgn;
    end
    check(bad == 0, $sformatf("block %0d: %0d samples differ", n_blocks, bad));
    last_blk_words = words.size();
    // Decisions taken on the previous block.
    if (have_prev) begin
      exp_fc = (4 * prev_xings < prev_nsmp) ? 0 : (4 * prev_xings > 3 * prev_nsmp) ? 2 : 1;
      ref_streams(prev_x, prev_fc, s0, s1, s2);
      c0 = ref_cost(s0); c1 = ref_cost(s1); c2 = ref_cost(s2);
      exp_sel = 0;
      if (c1 < c0) exp_sel = 1;
      if (c2 < ((exp_sel == 1) ? c1 : c0)) exp_sel = 2;
    end else begin
      exp_fc = 0;
      exp_sel = 0;
    end
    check(r.fc == exp_fc, $sformatf("block %0d fc %0d expected %0d", n_blocks, r.fc, exp_fc));
    check(r.sel == exp_sel, $sformatf("block %0d sel %0d expected %0d", n_blocks, r.sel, exp_sel));
    n_fc[r.fc]++;
    n_sel[r.sel]++;
    prev_x = xr;
    prev_fc = r.fc;
    prev_xings = xings;
    prev_nsmp = b.nsmp;
    have_prev = 1;
    words = {};
    match_dec();
  endtask

  // ------------------------------------------------------------ decoder side
  int rd_pct = 85;
  always @(negedge clk) rd_out_ready <= ($urandom_range(99) < rd_pct);

  // Decoded samples can leave the decoder before the encoded block they
  // belong to has been checked, so both sides queue and are matched as soon
  // as both are there.
  dec_smp_t got_q[$];

  task automatic match_dec();
    while (got_q.size() > 0 && dexp_q.size() > 0) begin
      dexp_t    de;
      dec_smp_t g;
      bit       ok;
      de = dexp_q.pop_front();
      g  = got_q.pop_front();
      ok = dec_match(g.data, de.dtype, de.v, de.exact) &&
           g.first == de.first && g.last == de.last && int'(g.dtype) == de.dtype;
      if (!ok) begin
        n_dec_bad++;
        if (failures + n_dec_bad < 20)
          $display("  decoded sample: %h (%f) expected %f f/l %b%b", g.data,
                   dec_to_real(g.data, de.dtype), de.v, g.first, g.last);
      end
    end
  endtask

  always @(posedge clk) begin
    if (rst_n) begin
      if (rd_out_valid && !rd_out_ready) n_dec_stall++;
      if (rd_out_valid && rd_out_ready) begin
        n_dec++;
        if (n_dec == td_base + 1) td0 = cyc;
        if (n_dec == td_base + 1024) td1 = cyc;
        got_q.push_back(rd_out_smp);
        match_dec();
      end
    end
  end

  // ------------------------------------------------------------ input side
  int  ready_pct = 80;
  real ph = 0.0;

  always @(negedge clk) wr_rdy <= ($urandom_range(99) < ready_pct);

  // Signal kinds: 0 slow sine, 1 tone near fs/2, 2 tone near fs/4, 3 noise,
  // 4 full-scale square
  function automatic real gen(int kind, real amp);
    real v, noise;
    noise = (real'($urandom_range(2000)) - 1000.0) / 1000.0;
    case (kind)
      0: begin ph += 0.02;  v = amp * $sin(6.2831853 * ph) + amp * 0.001 * noise; end
      1: begin ph += 0.47;  v = amp * $sin(6.2831853 * ph) + amp * 0.001 * noise; end
      2: begin ph += 0.251; v = amp * $sin(6.2831853 * ph) + amp * 0.001 * noise; end
      3: v = amp * noise;
      default: begin ph += 0.01; v = ($sin(6.2831853 * ph) >= 0.0) ? amp : -amp; end
    endcase
    return v;
  endfunction

  function automatic logic [63:0] pack(real v, int dtype);
    longint iv;
    logic [63:0] b;
    case (dtype)
      0, 1, 2: begin
        iv = longint'(v);
        return 64'(iv);
      end
      3: return {32'h0, real_to_f32(v)};
      default: begin
        b = $realtobits(v);
        b[15:0] = '0;  // keeps the reference product exact in real arithmetic
        return b;
      end
    endcase
  endfunction

  task automatic run_phase(int dtype, int mode, int nsmp, int nblk, int gm, int ge,
                           int target, int kind, real amp, bit gaps);
    // The decoder is told the block size of the stream it reads; change it
    // only once everything sent so far has been decoded.
    while (n_dec != n_in) @(negedge clk);
    rd_blk_size = BLK_W'(nsmp);
    for (int b = 0; b < nblk; b++) begin
      blk_t bt;
      bt.nsmp = nsmp; bt.dtype = dtype; bt.mode = mode;
      bt.gain_m = gm; bt.gain_e = ge;
      blk_q.push_back(bt);
      for (int i = 0; i < nsmp; i++) begin
        smp_t s;
        @(negedge clk);
        if (i == 0) begin
          params.dtype        <= dtype_e'(dtype);
          params.mode         <= mode_e'(mode);
          params.blk_size     <= BLK_W'(nsmp);
          params.gain_m       <= GM_W'(gm);
          params.gain_e       <= GE_W'(ge);
          params.target_words <= 16'(target);
        end
        if (gaps) begin
          while ($urandom_range(9) == 0) begin
            in_valid <= 1'b0;
            @(negedge clk);
          end
        end
        s.raw   = pack(gen(kind, amp), dtype);
        s.dtype = dtype;
        exp_q.push_back(s);
        n_in++;
        in_data  <= s.raw;
        in_valid <= 1'b1;
        #1;
        while (!in_ready) begin
          n_in_stall++;
          @(negedge clk);
          #1;
        end
        @(posedge clk);
      end
    end
    @(negedge clk);
    in_valid <= 1'b0;
  endtask

  // Throughput: with no backpressure the encoder must take one sample per
  // clock.
  int t0, t1;
  int td_base = -1, td0 = 0, td1 = 0;
  int cyc = 0;
  always @(posedge clk) cyc++;

  initial begin
    params   = '0;
    in_data  = '0;
    in_valid = 1'b0;
    rd_blk_size = '0;
    repeat (4) @(posedge clk);
    rst_n = 1'b1;
    // int16 slow sine, fixed gain 1.0: first derivatives win.
    run_phase(1, 0, 64, 6, 32768, 0, 0, 0, 20000.0, 1);
    // int32 tone near fs/2, gain 0.75 * 2^-4.
    run_phase(2, 0, 64, 5, 24576, -4, 0, 1, 1.0e7, 1);
    // int8 tone near fs/4, gain 1.0 * 2^4.
    run_phase(0, 0, 128, 4, 32768, 4, 0, 2, 100.0, 1);
    // int16 white noise: the raw stream wins.
    run_phase(1, 0, 64, 4, 32768, 0, 0, 3, 30000.0, 1);
    // int32 full scale at unit gain: the attenuator saturates.
    run_phase(2, 0, 64, 3, 32768, 0, 0, 4, 2.0e9, 1);
    // float32 slow sine of amplitude 1e-3, gain 2^20.
    run_phase(3, 0, 64, 4, 32768, 20, 0, 0, 1.0e-3, 1);
    // float64 tone near fs/2 of amplitude 3e5.
    run_phase(4, 0, 64, 4, 40000, -2, 0, 1, 3.0e5, 1);
    // Fixed rate: start at gain 1.0, target 25 words per 64-sample block.
    run_phase(1, 1, 64, 40, 32768, 0, 25, 0, 20000.0, 1);
    // Heavy output backpressure.
    ready_pct = 30;
    run_phase(2, 0, 64, 4, 32768, 0, 0, 3, 1.0e8, 1);
    // One block of the largest size the paper allows.
    ready_pct = 90;
    run_phase(1, 0, 16384, 1, 32768, -2, 0, 0, 20000.0, 0);
    // Throughput: no backpressure, no gaps.
    ready_pct = 100;
    rd_pct = 100;
    repeat (50) @(negedge clk);
    t0 = cyc;
    td_base = n_in;
    run_phase(1, 0, 256, 4, 32768, -4, 0, 0, 8000.0, 0);
    t1 = cyc;
    check(t1 - t0 <= 1024 + 4, $sformatf("throughput: 1024 samples in %0d cycles", t1 - t0));
    repeat (50) @(negedge clk);
    // The decoder spends a clock on each header and, in loopback, waits for
    // the encoder's padded last word of each block: allow 4 clocks per block.
    check(td1 - td0 + 1 <= 1024 + 4 * 4, $sformatf("decoder throughput: 1024 samples in %0d cycles", td1 - td0 + 1));
    $display("encoder took 1024 samples in %0d cycles, decoder returned them in %0d", t1 - t0, td1 - td0 + 1);
    repeat (200) @(negedge clk);
    check(n_size_reports == n_blocks, "one size report per block");
    check(exp_q.size() == 0 && blk_q.size() == 0,
          $sformatf("all blocks came out (%0d samples left)", exp_q.size()));
    check(n_dec == n_in && dexp_q.size() == 0 && got_q.size() == 0,
          $sformatf("all samples decoded (%0d of %0d)", n_dec, n_in));
    check(n_dec_bad == 0, $sformatf("%0d decoded samples differ", n_dec_bad));
    check(!rd_err, "decoder error flag stays low");
    check(n_dec_stall > 0, "decoder output stalled");
    $display("decoded %0d samples, %0d mismatches, %0d decoder output stalls",
             n_dec, n_dec_bad, n_dec_stall);
    // Mechanisms.
    $display("blocks %0d; tokens pair %0d single %0d abs %0d; sel %0d/%0d/%0d; fc %0d/%0d/%0d",
             n_blocks, n_tok[0], n_tok[1], n_tok[2], n_sel[0], n_sel[1], n_sel[2],
             n_fc[0], n_fc[1], n_fc[2]);
    $display("gain up %0d down %0d; saturated %0d; output stalls %0d; input stalls %0d; mode switches %0d; int/float headers %0d/%0d",
             n_adj_up, n_adj_dn, n_sat, n_out_stall, n_in_stall, n_mode_switch, n_int_hdr, n_flt_hdr);
    for (int k = 0; k < 3; k++) begin
      check(n_tok[k] > 0, $sformatf("token kind %0d used", k));
      check(n_sel[k] > 0, $sformatf("stream %0d selected", k));
      check(n_fc[k] > 0, $sformatf("frequency class %0d seen", k));
    end
    check(n_adj_up > 0, "gain loop raised the gain");
    check(n_adj_dn > 0, "gain loop lowered the gain");
    check(n_sat > 0, "attenuator saturated");
    check(n_out_stall > 0, "output stalled");
    check(n_in_stall > 0, "stall reached the input");
    check(n_mode_switch > 0, "mode switched");
    check(n_int_hdr > 0 && n_flt_hdr > 0, "both header sizes");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #20_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule

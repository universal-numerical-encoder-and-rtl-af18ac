// tb_apax_decoder: self-checking test of the APAX decoder.
//
// Stimulus comes from the encoder (apax_encoder), whose words pass through a
// link that stalls at random before reaching the decoder. Each encoded block
// is also decoded by the reference decoder of tb_apax_ref_pkg; every decoded
// sample must equal the reference attenuated value divided by the block's
// gain (dec_match: exact for integers at power-of-two gain mantissas, within
// 1 otherwise, floats within 2^-20 relative), with the right first/last flags
// and type. Phases cover the three integer widths, both float types, gains
// above and below one, every stream choice and frequency class, and changes
// of block size between phases. The decoder output is stalled at random.
// A last phase feeds a hand-made block whose first exponent token is not
// absolute; the sticky err output must then rise.
module tb_apax_decoder;
  import apax_pkg::*;
  import tb_apax_ref_pkg::*;

  localparam int OUT_W = 32;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  // Encoder (stimulus).
  enc_params_t      params;
  logic [IN_W-1:0]  in_data;
  logic             in_valid, in_ready;
  logic [OUT_W-1:0] e_data;
  logic             e_valid, e_ready, e_last;
  logic             link_rdy;

  apax_encoder u_enc (
    .clk, .rst_n, .params, .in_data, .in_valid, .in_ready,
    .out_data(e_data), .out_valid(e_valid), .out_ready(e_ready), .out_last(e_last),
    .blk_done(), .blk_words(), .mon_fc(), .mon_xings(), .mon_done(),
    .dec_valid(), .dec_sel(), .tok_valid(), .tok_kind(), .adj_up(), .adj_dn()
  );

  // Decoder under test.
  logic [BLK_W-1:0] blk_size;
  logic [OUT_W-1:0] d_data;
  logic             d_valid, d_ready;
  dec_smp_t         out_smp;
  logic             out_valid, out_ready, err;
  logic             inject;
  logic [OUT_W-1:0] inj_data;

  apax_decoder dut (
    .clk, .rst_n, .blk_size,
    .in_data(d_data), .in_valid(d_valid), .in_ready(d_ready),
    .out_smp, .out_valid, .out_ready, .err
  );

  assign d_data  = inject ? inj_data : e_data;
  assign d_valid = inject ? 1'b1 : (e_valid && link_rdy);
  assign e_ready = !inject && link_rdy && d_ready;

  int checks = 0;
  int failures = 0;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  typedef struct {
    real v;
    int  dtype;
    bit  exact;
    bit  first;
    bit  last;
  } dexp_t;
  dexp_t    dexp_q[$];
  dec_smp_t got_q[$];
  int       blk_q[$];
  logic [31:0] words[$];
  int n_in = 0, n_dec = 0, n_stall = 0, n_link_stall = 0;
  int n_sel[3] = '{0, 0, 0};
  int n_fc[3]  = '{0, 0, 0};
  int n_dt[5]  = '{0, 0, 0, 0, 0};

  task automatic match();
    while (got_q.size() > 0 && dexp_q.size() > 0) begin
      dexp_t    de;
      dec_smp_t g;
      de = dexp_q.pop_front();
      g  = got_q.pop_front();
      check(dec_match(g.data, de.dtype, de.v, de.exact) && g.first == de.first &&
            g.last == de.last && int'(g.dtype) == de.dtype,
            $sformatf("decoded %h (%f) expected %f, first/last %b%b type %0d",
                      g.data, dec_to_real(g.data, de.dtype), de.v, g.first, g.last, g.dtype));
    end
  endtask

  always @(negedge clk) begin
    link_rdy  <= ($urandom_range(99) < 85);
    out_ready <= ($urandom_range(99) < 80);
  end

  always @(posedge clk) begin
    if (rst_n && !inject) begin
      if (e_valid && !e_ready) n_link_stall++;
      if (out_valid && !out_ready) n_stall++;
      if (e_valid && e_ready) begin
        words.push_back(e_data);
        if (e_last) begin
          dec_t r;
          int   n;
          n = blk_q.pop_front();
          r = decode_block(words, n);
          check(r.ok && r.x.size() == n, "reference decode");
          n_sel[r.sel]++;
          n_fc[r.fc]++;
          n_dt[r.dtype]++;
          for (int i = 0; i < n; i++) begin
            dexp_t de;
            de.v     = ref_unatt(r.x[i], r.dtype, r.gain_m, r.gain_e);
            de.dtype = r.dtype;
            de.exact = ((r.gain_m & (r.gain_m - 1)) == 0);
            de.first = (i == 0);
            de.last  = (i == n - 1);
            dexp_q.push_back(de);
          end
          words = {};
          match();
        end
      end
      if (out_valid && out_ready) begin
        n_dec++;
        got_q.push_back(out_smp);
        match();
      end
    end
  end

  real ph = 0.0;
  real walk = 0.0;
  // Kinds: 0 slow sine, 1 tone near fs/2, 2 tone near fs/4, 3 noise,
  // 4 random walk (its first difference is white, so stream 1 wins).
  function automatic real gen(int kind, real amp);
    real noise;
    noise = (real'($urandom_range(2000)) - 1000.0) / 1000.0;
    case (kind)
      0: ph += 0.02;
      1: ph += 0.47;
      2: ph += 0.251;
      3: return amp * noise;
      default: begin
        walk += amp * noise;
        return walk;
      end
    endcase
    return amp * $sin(6.2831853 * ph) + amp * 0.001 * noise;
  endfunction

  function automatic logic [63:0] pack(real v, int dtype);
    case (dtype)
      0, 1, 2: return 64'(longint'(v));
      3:       return {32'h0, real_to_f32(v)};
      default: return $realtobits(v);
    endcase
  endfunction

  task automatic run_phase(int dtype, int nsmp, int nblk, int gm, int ge, int kind, real amp);
    while (n_dec != n_in) @(negedge clk);
    blk_size = BLK_W'(nsmp);
    params.dtype    = dtype_e'(dtype);
    params.mode     = MODE_FIXED_GAIN;
    params.blk_size = BLK_W'(nsmp);
    params.gain_m   = GM_W'(gm);
    params.gain_e   = GE_W'(ge);
    for (int b = 0; b < nblk * nsmp; b++) begin
      @(negedge clk);
      if (b % nsmp == 0) blk_q.push_back(nsmp);
      in_data  <= pack(gen(kind, amp), dtype);
      in_valid <= 1'b1;
      n_in++;
      #1;
      while (!in_ready) begin
        @(negedge clk);
        #1;
      end
      @(posedge clk);
    end
    @(negedge clk);
    in_valid <= 1'b0;
  endtask

  initial begin
    params   = '0;
    in_data  = '0;
    in_valid = 1'b0;
    inject   = 1'b0;
    inj_data = '0;
    blk_size = '0;
    repeat (4) @(posedge clk);
    rst_n = 1'b1;
    run_phase(1, 64, 6, 32768, 0, 0, 20000.0);     // int16, gain 1: exact
    run_phase(2, 128, 4, 24576, -4, 1, 1.0e7);     // int32 near fs/2, gain 0.75/16
    run_phase(0, 64, 5, 32768, 3, 2, 100.0);       // int8 near fs/4, gain 8
    run_phase(1, 256, 3, 20000, 1, 3, 30000.0);    // int16 noise, odd gain
    run_phase(2, 64, 4, 32768, -1, 4, 3000.0);     // int32 random walk
    run_phase(3, 64, 5, 32768, 20, 0, 1.0e-3);     // float32
    run_phase(4, 64, 5, 40000, -2, 1, 3.0e5);      // float64
    run_phase(3, 64, 3, 32768, 10, 2, -7.5);       // float32 near fs/4
    while (n_dec != n_in) @(negedge clk);
    repeat (20) @(negedge clk);
    check(dexp_q.size() == 0 && got_q.size() == 0,
          $sformatf("all decoded: %0d of %0d", n_dec, n_in));
    check(!err, "no error on well-formed streams");
    for (int k = 0; k < 3; k++) begin
      check(n_sel[k] > 0, $sformatf("stream %0d decoded", k));
      check(n_fc[k] > 0, $sformatf("frequency class %0d decoded", k));
    end
    for (int k = 0; k < 5; k++) check(n_dt[k] > 0, $sformatf("type %0d decoded", k));
    check(n_stall > 0 && n_link_stall > 0, "stalls on both sides");
    // Malformed block: int16 header, then a single token (code 11) as the
    // first exponent token.
    blk_size = BLK_W'(64);
    @(negedge clk);
    inject   = 1'b1;
    inj_data = {8'd0, 16'h8000, 8'h10};
    @(negedge clk);
    inj_data = 32'h0000_000B;
    @(negedge clk);
    inject   = 1'b0;
    repeat (10) @(negedge clk);
    check(err, "error flag on a first token that is not absolute");
    $display("decoded %0d samples; sel %0d/%0d/%0d fc %0d/%0d/%0d; stalls %0d/%0d",
             n_dec, n_sel[0], n_sel[1], n_sel[2], n_fc[0], n_fc[1], n_fc[2],
             n_stall, n_link_stall);
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

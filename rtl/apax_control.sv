// apax_control: block framing, parameter distribution and the gain loop.
//
// The control block sits at the encoder input. It frames the incoming
// samples into blocks of blk_size samples (a multiple of 4, 64..16384 in the
// paper), marks the first and last sample of each block and attaches the
// block's configuration: data type and mode from the profiler parameters,
// the gain for the attenuator and the signal monitor's centre-frequency
// class of the previous block. Parameters are sampled once per block, on its
// first sample, so a change of mode, type, size or gain takes effect at the
// next block boundary.
//
// Gain: in MODE_FIXED_GAIN the profiler's gain is used as given. In
// MODE_FIXED_RATE the gain follows a loop that steers the encoded block size
// (reported by the bit packer in output words) toward target_words. On each
// block start the newest reported size, if one arrived since the last
// update, is compared with the target: too large multiplies the gain by
// 15/16, too small by 17/16 (mantissa +/- mantissa/16), equal leaves it;
// the mantissa is then renormalised into [0.5, 1) by moving powers of two into
// the exponent. Entering MODE_FIXED_RATE starts the loop from the profiler's
// gain. Because the packer finishes a block a few cycles after its last
// sample enters, the size of block j steers the gain of block j+2 when
// blocks follow back to back. The paper says the attenuation is controlled
// by an adaptive loop that converges to the user's encoding rate or
// correlation target; the step, the normalisation and the one-block lag are
// this design's, and only the rate target is built (a correlation target
// needs a decoder inside the loop, which the paper does not describe).
// The gain exponent is kept within -128..127 for integer types because
// integer headers carry only its low byte.
//
// Interface: in_* is the encoder input (valid/ready, passed through to the
// attenuator with no register); out_* carries the framed samples.
// adj_up/adj_dn pulse when the loop raises or lowers the gain.
module apax_control
  import apax_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  enc_params_t       params,
  input  logic [IN_W-1:0]   in_data,
  input  logic              in_valid,
  output logic              in_ready,
  output raw_smp_t          out_smp,
  output logic              out_valid,
  input  logic              out_ready,
  input  fc_e               mon_fc,
  input  logic              blk_done,
  input  logic [15:0]       blk_words,
  output logic              adj_up,
  output logic              adj_dn
);

  localparam logic [GM_W-1:0] M_HALF = GM_W'(1) << 14;
  localparam logic [GM_W-1:0] M_ONE  = GM_W'(1) << 15;

  logic [BLK_W-1:0]       idx, blk_q, size_use;
  logic                   first, last, fire;
  logic                   started;
  blk_cfg_t               cfg_q, cfg_new, cfg_use;
  logic [GM_W-1:0]        loop_m, m_adj;
  logic signed [GE_W-1:0] loop_e, e_adj, e_lo, e_hi;
  logic [15:0]            words_q;
  logic                   fresh;
  logic                   up, dn;

  assign in_ready  = out_ready;
  assign out_valid = in_valid;
  assign fire      = in_valid && out_ready;
  assign first     = (idx == '0);
  assign size_use  = first ? params.blk_size : blk_q;
  assign last      = (idx == size_use - 1'b1);

  // Gain loop step and per-block configuration.
  always_comb begin
    e_lo  = dtype_is_float(params.dtype) ? GE_W'(-32768) : GE_W'(-128);
    e_hi  = dtype_is_float(params.dtype) ? GE_W'(32767)  : GE_W'(127);
    up    = fresh && (words_q < params.target_words);
    dn    = fresh && (words_q > params.target_words);
    m_adj = loop_m;
    e_adj = loop_e;
    if (dn) m_adj = loop_m - (loop_m >> 4);
    if (up) m_adj = loop_m + (loop_m >> 4);
    if (m_adj >= M_ONE && e_adj < e_hi) begin
      m_adj = m_adj >> 1;
      e_adj = e_adj + 1'b1;
    end else if (m_adj < M_HALF && m_adj != '0 && e_adj > e_lo) begin
      m_adj = m_adj << 1;
      e_adj = e_adj - 1'b1;
    end
    cfg_new.dtype = params.dtype;
    cfg_new.mode  = params.mode;
    cfg_new.fc    = mon_fc;
    cfg_new.sel   = '0;
    if (params.mode == MODE_FIXED_RATE && started &&
        cfg_q.mode == MODE_FIXED_RATE && cfg_q.dtype == params.dtype) begin
      cfg_new.gain_m = m_adj;
      cfg_new.gain_e = e_adj;
    end else begin
      cfg_new.gain_m = params.gain_m;
      cfg_new.gain_e = params.gain_e;
    end
    cfg_use = first ? cfg_new : cfg_q;
  end

  always_comb begin
    out_smp.data  = in_data;
    out_smp.first = first;
    out_smp.last  = last;
    out_smp.cfg   = cfg_use;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      idx     <= '0;
      blk_q   <= '0;
      cfg_q   <= '0;
      loop_m  <= '0;
      loop_e  <= '0;
      words_q <= '0;
      fresh   <= 1'b0;
      started <= 1'b0;
      adj_up  <= 1'b0;
      adj_dn  <= 1'b0;
    end else begin
      adj_up <= 1'b0;
      adj_dn <= 1'b0;
      if (blk_done) begin
        words_q <= blk_words;
        fresh   <= 1'b1;
      end
      if (fire) begin
        idx <= last ? '0 : idx + 1'b1;
        if (first) begin
          blk_q   <= params.blk_size;
          cfg_q   <= cfg_new;
          loop_m  <= cfg_new.gain_m;
          loop_e  <= cfg_new.gain_e;
          started <= 1'b1;
          if (params.mode == MODE_FIXED_RATE && started &&
              cfg_q.mode == MODE_FIXED_RATE && cfg_q.dtype == params.dtype) begin
            adj_up <= up;
            adj_dn <= dn;
            if (!blk_done) fresh <= 1'b0;
          end
        end
      end
    end
  end

endmodule

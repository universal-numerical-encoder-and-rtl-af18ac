// apax_bit_unpacker: first decoder stage, the inverse of the bit packer.
//
// Encoded words enter a bit accumulator (least significant bit first, as the
// packer wrote them). A small parser then walks the block:
//   * header: 32 bits, or 48 when its data-type field names a float; it
//     supplies the block's stream, frequency class, type, mode and gain;
//   * per group of 4: the exponent token (absolute, pair or single, see
//     apax_bit_packer), unless the previous group's pair token already gave
//     this group's exponent, then four mantissas of that many bits, each
//     sign-extended;
//   * after the block's last sample, the zero padding up to the next word
//     boundary.
// One sample leaves per cycle once enough bits are buffered: a sample needs
// its token (0, 4 or 8 bits) and mantissa (0..31 bits), and the last one also
// its padding. The block length is not in the header; blk_size gives it and
// is sampled when a header is read. A first group whose token is not absolute,
// or an exponent outside 0..31, sets the sticky err output.
//
// The paper names a decoder without describing it; this block is this
// design's inverse of its own bit format.
//
// Interface: in_data/in_valid/in_ready take encoded words; out_smp (stream
// sample with the block's cfg, first/last) with out_valid/out_ready.
module apax_bit_unpacker
  import apax_pkg::*;
#(
  parameter int unsigned OUT_W = 32,
  parameter int unsigned ACC_W = 160
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [BLK_W-1:0]  blk_size,
  input  logic [OUT_W-1:0]  in_data,
  input  logic              in_valid,
  output logic              in_ready,
  output str_smp_t          out_smp,
  output logic              out_valid,
  input  logic              out_ready,
  output logic              err
);

  localparam int unsigned FILL_W = $clog2(ACC_W + 1);
  localparam int unsigned POS_W  = $clog2(OUT_W);

  logic [ACC_W-1:0]  acc;
  logic [FILL_W-1:0] fill, cons, fill_nx;
  logic              in_hdr;
  blk_cfg_t          cfg_q, cfg_hdr;
  logic [BLK_W-1:0]  nsmp, idx;
  logic [1:0]        k;
  logic [EXP_W-1:0]  prev_e, pend_e;
  logic              covered;
  logic [POS_W-1:0]  bpos;

  // Parser decisions for this cycle.
  logic [3:0]        nib;
  logic [3:0]        tl;
  logic signed [EXP_W+2:0] e_s, pend_s;
  logic [EXP_W-1:0]  e;
  logic              bad_e, bad_first, pair;
  logic [6:0]        need;
  logic [6:0]        pad;
  logic              hdr_ok, smp_ok, last_smp, out_free, load;
  logic [5:0]        hl;
  logic [STR_W-1:0]  mant;

  assign out_free = !out_valid || out_ready;
  assign in_ready = int'(fill) + OUT_W <= ACC_W;
  assign load     = in_valid && in_ready;
  assign last_smp = (idx == nsmp - 1'b1);

  always_comb begin
    // Header.
    hl = dtype_is_float(dtype_e'(acc[6:4])) ? 6'(HDR_FLT_BITS) : 6'(HDR_INT_BITS);
    cfg_hdr.sel    = acc[1:0];
    cfg_hdr.fc     = fc_e'(acc[3:2]);
    cfg_hdr.dtype  = dtype_e'(acc[6:4]);
    cfg_hdr.mode   = mode_e'(acc[7]);
    cfg_hdr.gain_m = acc[23:8];
    cfg_hdr.gain_e = dtype_is_float(dtype_e'(acc[6:4])) ? GE_W'({acc[39:32], acc[31:24]})
                                                        : GE_W'(signed'(acc[31:24]));
    hdr_ok = in_hdr && (fill >= FILL_W'(hl));
    // Token and exponent of the group at hand.
    nib    = acc[3:0];
    tl     = '0;
    pair   = 1'b0;
    e_s    = (EXP_W+3)'(prev_e);
    pend_s = '0;
    if (k == 2'd0 && !covered) begin
      if (nib >= 4'd14) begin
        tl  = 4'd8;
        e_s = (EXP_W+3)'({nib[0], acc[7:4]});
      end else if (nib >= 4'd9) begin
        tl  = 4'd4;
        e_s = (EXP_W+3)'(prev_e) + (EXP_W+3)'(nib) - (EXP_W+3)'(11);
      end else begin
        tl     = 4'd4;
        pair   = 1'b1;
        e_s    = (EXP_W+3)'(prev_e) + (EXP_W+3)'(nib / 4'd3) - (EXP_W+3)'(1);
        pend_s = e_s + (EXP_W+3)'(nib % 4'd3) - (EXP_W+3)'(1);
      end
    end else if (k == 2'd0) begin
      e_s = (EXP_W+3)'(pend_e);
    end
    bad_e     = (k == 2'd0) && (e_s < 0 || e_s > 31);
    bad_first = (k == 2'd0) && (idx == '0) && (tl != 4'd8);
    e         = bad_e ? '0 : e_s[EXP_W-1:0];
    mant      = STR_W'((acc >> tl) & ((ACC_W'(1) << e) - 1'b1));
    if (e != '0 && mant[e - 1'b1]) mant = mant | ~((STR_W'(1) << e) - 1'b1);
    pad       = 7'((OUT_W - ((int'(bpos) + int'(tl) + int'(e)) % OUT_W)) % OUT_W);
    need      = 7'(tl) + 7'(e) + (last_smp ? 7'(pad) : 7'd0);
    smp_ok    = !in_hdr && out_free && (int'(fill) >= int'(need));
    cons      = hdr_ok ? FILL_W'(hl) : smp_ok ? FILL_W'(need) : '0;
    fill_nx   = fill - cons + (load ? FILL_W'(OUT_W) : '0);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc       <= '0;
      fill      <= '0;
      in_hdr    <= 1'b1;
      cfg_q     <= '0;
      nsmp      <= '0;
      idx       <= '0;
      k         <= '0;
      prev_e    <= '0;
      pend_e    <= '0;
      covered   <= 1'b0;
      bpos      <= '0;
      err       <= 1'b0;
      out_valid <= 1'b0;
      out_smp   <= '0;
    end else begin
      acc  <= (acc >> cons) | (load ? (ACC_W'(in_data) << (fill - cons)) : '0);
      fill <= fill_nx;
      if (out_free) out_valid <= smp_ok;
      if (hdr_ok) begin
        in_hdr  <= 1'b0;
        cfg_q   <= cfg_hdr;
        nsmp    <= blk_size;
        idx     <= '0;
        k       <= '0;
        covered <= 1'b0;
        bpos    <= POS_W'(hl);
      end
      if (smp_ok) begin
        bpos <= POS_W'(int'(bpos) + int'(need));
        idx  <= last_smp ? '0 : idx + 1'b1;
        k    <= k + 2'd1;
        if (k == 2'd0) begin
          prev_e  <= e;
          covered <= pair;
          if (pair) pend_e <= EXP_W'(pend_s);
          if (bad_e || bad_first || (pair && (pend_s < 0 || pend_s > 31))) err <= 1'b1;
        end
        if (last_smp) in_hdr <= 1'b1;
        out_smp.data  <= mant;
        out_smp.first <= (idx == '0);
        out_smp.last  <= last_smp;
        out_smp.cfg   <= cfg_q;
      end
    end
  end

endmodule

// apax_inverse_attenuator: last decoder stage, divides by the block's gain
// and returns the sample in its original type.
//
// The encoder multiplied by g = gain_m / 2^15 * 2^gain_e. Here
//   v = x / g = x * R * 2^-(32 + gain_e),  R = floor(2^47 / gain_m),
// which is exact when gain_m is a power of two (gain 1.0 gives R = 2^32).
// Stage 1 registers the sample with R (a 48/16 divider; R is constant over a
// block, so a cheaper sequential divider could replace it). Stage 2 forms
// |x| * R and shifts:
//   * integers: rounded to nearest (ties away from zero) and saturated to
//     the type's range, then sign-extended to the 64-bit bus;
//   * floats: normalised to an IEEE-754 single or double; the significand is
//     truncated, values below the smallest normal flush to (signed) zero and
//     values above the largest finite become infinity.
// A gain_m of zero decodes to zero.
//
// The paper says the decoded data y approximates the input x; the reciprocal
// method, rounding and float construction are this design's choices.
//
// Interface: valid/ready in and out, one sample per cycle, latency 2 cycles.
module apax_inverse_attenuator
  import apax_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  att_smp_t in_smp,
  input  logic     in_valid,
  output logic     in_ready,
  output dec_smp_t out_smp,
  output logic     out_valid,
  input  logic     out_ready
);

  localparam int unsigned R_W = 48;
  localparam int unsigned P_W = ATT_W + R_W;   // 77

  // Stage 1 registers.
  att_smp_t       s1_smp;
  logic           s1_valid;
  logic [R_W-1:0] s1_r;
  logic           s1_ready;

  assign s1_ready = !out_valid || out_ready;
  assign in_ready = !s1_valid || s1_ready;

  function automatic logic [IN_W-1:0] restore(input logic signed [ATT_W-1:0] x,
                                              input logic [R_W-1:0] r,
                                              input dtype_e t,
                                              input logic signed [GE_W-1:0] ge);
    logic             s;
    logic [ATT_W-1:0] mag;
    logic [P_W-1:0]   p;
    logic [P_W:0]     q;
    int               sh, lead, be;
    logic [63:0]      imax, iv;
    logic [51:0]      frac;
    s   = x[ATT_W-1];
    mag = s ? ATT_W'(-x) : ATT_W'(x);
    p   = P_W'(mag) * P_W'(r);
    sh  = 32 + int'(ge);
    if (p == '0) return (dtype_is_float(t) && s) ?
                        ((t == DT_FLT32) ? 64'h8000_0000 : 64'h8000_0000_0000_0000) : '0;
    if (!dtype_is_float(t)) begin
      imax = (64'(1) << (dtype_bits(t) - 1)) - 1;
      if (sh <= 0) begin
        iv = (-sh >= 64 || (p >> (64 + sh)) != '0) ? imax : 64'(p) << (-sh);
      end else if (sh > P_W) begin
        iv = '0;
      end else begin
        q  = ({1'b0, p} + ((P_W+1)'(1) << (sh - 1))) >> sh;
        iv = (q > (P_W+1)'(imax)) ? imax : 64'(q);
      end
      if (iv > imax) iv = imax;
      return s ? -iv : iv;
    end
    lead = 0;
    for (int i = 0; i < P_W; i++) if (p[i]) lead = i;
    // value = 1.frac * 2^(lead - sh); frac left-aligned in 52 bits.
    frac = 52'((p << (P_W - lead)) >> (P_W - 52));
    if (t == DT_FLT32) begin
      be = lead - sh + 127;
      if (be <= 0)   return {32'd0, s, 31'd0};
      if (be >= 255) return {32'd0, s, 8'hFF, 23'd0};
      return {32'd0, s, 8'(be), frac[51:29]};
    end
    be = lead - sh + 1023;
    if (be <= 0)    return {s, 63'd0};
    if (be >= 2047) return {s, 11'h7FF, 52'd0};
    return {s, 11'(be), frac};
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_valid  <= 1'b0;
      s1_smp    <= '0;
      s1_r      <= '0;
      out_valid <= 1'b0;
      out_smp   <= '0;
    end else begin
      if (in_ready) begin
        s1_valid <= in_valid;
        if (in_valid) begin
          s1_smp <= in_smp;
          s1_r   <= (in_smp.cfg.gain_m == '0) ? '0
                    : R_W'((R_W+1)'(1) << 47) / R_W'(in_smp.cfg.gain_m);
        end
      end
      if (s1_ready) begin
        out_valid <= s1_valid;
        if (s1_valid) begin
          out_smp.data  <= restore(s1_smp.data, s1_r, s1_smp.cfg.dtype, s1_smp.cfg.gain_e);
          out_smp.first <= s1_smp.first;
          out_smp.last  <= s1_smp.last;
          out_smp.dtype <= s1_smp.cfg.dtype;
        end
      end
    end
  end

endmodule

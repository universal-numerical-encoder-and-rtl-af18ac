// apax_attenuator: the multiplier of the APAX encoder.
//
// Every input sample, integer or float, is multiplied by a floating-point
// gain g = gain_m / 2^15 * 2^gain_e that stays constant over a block and may
// change between blocks (the block's gain arrives with the sample in its
// cfg sideband). The result is a signed ATT_W-bit integer, which is what the
// rest of the encoder works on; this is also how floats enter the integer
// datapath: the float's own exponent and the gain exponent are added and
// applied as one shift.
//
// How: the sample is split into sign and magnitude. For integers the
// magnitude is |x|; for IEEE-754 single and double it is the significand with
// the hidden bit (denormals without), and the float exponent is folded into
// the shift. The magnitude is multiplied by gain_m, shifted, rounded to
// nearest (ties away from zero, so rounding error is symmetric about zero)
// and saturated to +/-(2^(ATT_W-1)-1). Infinities and NaNs saturate.
//
// The paper gives the function (multiply by a floating-point value that can
// vary from block to block); the gain format, rounding and saturation are
// this design's choices.
//
// Interface: valid/ready in and out, one sample per cycle, latency 1 cycle
// (one output register). The sideband (first, last, cfg) passes unchanged.
module apax_attenuator
  import apax_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  raw_smp_t in_smp,
  input  logic     in_valid,
  output logic     in_ready,
  output att_smp_t out_smp,
  output logic     out_valid,
  input  logic     out_ready
);

  localparam int unsigned MAG_W  = 53;            // double significand
  localparam int unsigned PROD_W = MAG_W + GM_W;  // 69
  localparam logic [ATT_W-1:0] MAXV = {1'b0, {(ATT_W-1){1'b1}}};

  // Multiply one raw sample by the gain (combinational).
  function automatic logic signed [ATT_W-1:0] attenuate(
      input logic [IN_W-1:0]      d,
      input dtype_e               t,
      input logic [GM_W-1:0]      gm,
      input logic signed [GE_W-1:0] ge);
    logic              s;
    logic              sat;
    logic [MAG_W-1:0]  mag;
    int                sh;
    logic [PROD_W-1:0] p;
    logic [PROD_W+ATT_W-1:0] wide;
    logic [PROD_W:0]   rnd;
    logic [ATT_W-1:0]  res;
    logic signed [63:0] xi;
    s   = 1'b0;
    sat = 1'b0;
    mag = '0;
    sh  = 0;
    case (t)
      DT_INT8, DT_INT16, DT_INT32: begin
        case (t)
          DT_INT8:  xi = 64'(signed'(d[7:0]));
          DT_INT16: xi = 64'(signed'(d[15:0]));
          default:  xi = 64'(signed'(d[31:0]));
        endcase
        s   = xi[63];
        mag = MAG_W'(s ? -xi : xi);
        sh  = int'(ge) - 15;
      end
      DT_FLT32: begin
        s = d[31];
        if (d[30:23] == 8'hFF) sat = 1'b1;
        mag = MAG_W'({(d[30:23] != 8'd0), d[22:0]});
        sh  = ((d[30:23] == 8'd0) ? 1 : int'(d[30:23])) - 127 - 23 + int'(ge) - 15;
      end
      default: begin
        s = d[63];
        if (d[62:52] == 11'h7FF) sat = 1'b1;
        mag = {(d[62:52] != 11'd0), d[51:0]};
        sh  = ((d[62:52] == 11'd0) ? 1 : int'(d[62:52])) - 1023 - 52 + int'(ge) - 15;
      end
    endcase
    p = PROD_W'(mag) * PROD_W'(gm);
    res = '0;
    if (p != '0) begin
      if (sh >= 0) begin
        if (sh >= ATT_W) begin
          sat = 1'b1;
        end else begin
          wide = (PROD_W+ATT_W)'(p) << sh;
          if (wide > (PROD_W+ATT_W)'(MAXV)) sat = 1'b1;
          else res = wide[ATT_W-1:0];
        end
      end else if (-sh <= PROD_W) begin
        rnd = ({1'b0, p} + ((PROD_W+1)'(1) << (-sh - 1))) >> (-sh);
        if (rnd > (PROD_W+1)'(MAXV)) sat = 1'b1;
        else res = rnd[ATT_W-1:0];
      end
    end
    if (sat) res = MAXV;
    return s ? -res : res;
  endfunction

  assign in_ready = !out_valid || out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_smp   <= '0;
    end else if (in_ready) begin
      out_valid <= in_valid;
      if (in_valid) begin
        out_smp.data  <= attenuate(in_smp.data, in_smp.cfg.dtype,
                                   in_smp.cfg.gain_m, in_smp.cfg.gain_e);
        out_smp.first <= in_smp.first;
        out_smp.last  <= in_smp.last;
        out_smp.cfg   <= in_smp.cfg;
      end
    end
  end

endmodule

// apax_redundancy_remover: derivative streams and best-stream selection.
//
// Oversampled signals are correlated from sample to sample. The remover
// builds three candidate streams from the attenuated series x:
//   s0[n] = x[n]
//   s1[n] = x[n] + sg * x[n-d]         (first "derivative")
//   s2[n] = s1[n] + sg * s1[n-d]       (second "derivative")
// where (sg, d) follow the centre-frequency class of the block
// (FC_LOW: -1,1; FC_QUARTER: +1,2; FC_HIGH: +1,1), so a baseband signal is
// differenced while a signal near fs/2 or fs/4 is summed with the neighbour
// that is in antiphase with it. Filter memory is cleared at the start of
// every block, so each encoded block can be decoded on its own.
//
// While block j passes, the remover measures for every stream the number of
// mantissa bits block floating point would spend on it: the sum, over groups
// of 4, of the group exponent (bits of the largest member) times 4. At the
// end of block j the stream with the smallest cost is chosen (ties go to the
// lower index) and block j+1 is encoded with it; the choice travels in the
// cfg.sel field to the header of block j+1. This follows the paper's "best
// stream decision for block j is encoded in the header of block j+1"; the
// first block after reset uses s0. The stream set, the fc mapping and the
// cost measure are this design's choices.
//
// Interface: valid/ready in and out, one sample per cycle, latency 1 cycle.
// dec_valid pulses for one cycle when a block's decision is made.
module apax_redundancy_remover
  import apax_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  att_smp_t    in_smp,
  input  logic        in_valid,
  output logic        in_ready,
  output str_smp_t    out_smp,
  output logic        out_valid,
  input  logic        out_ready,
  output logic        dec_valid,
  output logic [1:0]  dec_sel
);

  localparam int unsigned COST_W = 20;

  logic signed [ATT_W-1:0]   x1, x2;      // x[n-1], x[n-2]
  logic signed [ATT_W:0]     y1, y2;      // s1[n-1], s1[n-2]
  logic signed [ATT_W-1:0]   xm1, xm2;
  logic signed [ATT_W:0]     ym1, ym2;
  logic signed [STR_W-1:0]   s [3];
  logic [EXP_W:0]            gexp [3], gexp_nx [3];
  logic [COST_W-1:0]         cost [3], cost_nx [3];
  logic [1:0]                pos, pos_use;
  logic [1:0]                sel_cur, sel_use;
  logic [1:0]                best;
  fc_e                       fc_use;
  logic                      fire;

  assign in_ready = !out_valid || out_ready;
  assign fire     = in_valid && in_ready;
  assign fc_use   = in_smp.cfg.fc;
  assign sel_use  = in_smp.first ? dec_sel : sel_cur;
  assign pos_use  = in_smp.first ? 2'd0 : pos;

  always_comb begin
    xm1 = in_smp.first ? '0 : x1;
    xm2 = in_smp.first ? '0 : x2;
    ym1 = in_smp.first ? '0 : y1;
    ym2 = in_smp.first ? '0 : y2;
    s[0] = STR_W'(in_smp.data);
    case (fc_use)
      FC_QUARTER: begin
        s[1] = STR_W'(in_smp.data) + STR_W'(xm2);
        s[2] = s[1] + STR_W'(ym2);
      end
      FC_HIGH: begin
        s[1] = STR_W'(in_smp.data) + STR_W'(xm1);
        s[2] = s[1] + STR_W'(ym1);
      end
      default: begin
        s[1] = STR_W'(in_smp.data) - STR_W'(xm1);
        s[2] = s[1] - STR_W'(ym1);
      end
    endcase
    for (int k = 0; k < 3; k++) begin
      logic [EXP_W:0] b;
      logic [EXP_W:0] g;
      b = sig_bits(s[k]);
      g = (pos_use == 2'd0) ? '0 : gexp[k];
      gexp_nx[k] = (b > g) ? b : g;
      cost_nx[k] = (in_smp.first ? '0 : cost[k]) +
                   ((pos_use == 2'd3) ? COST_W'({gexp_nx[k], 2'b00}) : '0);
    end
    best = 2'd0;
    if (cost_nx[1] < cost_nx[0]) best = 2'd1;
    if (cost_nx[2] < cost_nx[best]) best = 2'd2;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      x1 <= '0; x2 <= '0; y1 <= '0; y2 <= '0;
      pos       <= '0;
      sel_cur   <= '0;
      dec_sel   <= '0;
      dec_valid <= 1'b0;
      out_valid <= 1'b0;
      out_smp   <= '0;
      for (int k = 0; k < 3; k++) begin
        gexp[k] <= '0;
        cost[k] <= '0;
      end
    end else begin
      dec_valid <= 1'b0;
      if (in_ready) out_valid <= in_valid;
      if (fire) begin
        x1  <= in_smp.data;
        x2  <= xm1;
        y1  <= s[1][ATT_W:0];
        y2  <= ym1;
        pos <= pos_use + 2'd1;
        for (int k = 0; k < 3; k++) begin
          gexp[k] <= gexp_nx[k];
          cost[k] <= cost_nx[k];
        end
        if (in_smp.first) sel_cur <= dec_sel;
        if (in_smp.last) begin
          dec_sel   <= best;
          dec_valid <= 1'b1;
        end
        out_smp.data    <= s[sel_use];
        out_smp.first   <= in_smp.first;
        out_smp.last    <= in_smp.last;
        out_smp.cfg     <= in_smp.cfg;
        out_smp.cfg.sel <= sel_use;
      end
    end
  end

endmodule

// apax_inverse_remover: decoder stage that undoes the redundancy remover.
//
// The encoder sent one of three streams per block (cfg.sel), built with the
// block's frequency class (cfg.fc), which sets sign sg and distance d:
//   FC_LOW (-1, 1), FC_QUARTER (+1, 2), FC_HIGH (+1, 1).
//   sel 0: s = x                      ->  x[n] = s[n]
//   sel 1: s = x + sg*x[n-d]          ->  x[n] = s[n] - sg*x[n-d]
//   sel 2: s = y + sg*y[n-d], y = s1  ->  y[n] = s[n] - sg*y[n-d],
//                                        x[n] = y[n] - sg*x[n-d]
// The two-sample histories of y and x restart from zero at each block's
// first sample, as in the encoder, so every block decodes on its own.
//
// The paper gives the forward operation (derivatives chosen per block); this
// inverse and its integrator structure are this design's.
//
// Interface: valid/ready in and out, one sample per cycle, latency 1 cycle.
// Output samples are attenuated values (ATT_W bits) with the block's cfg.
module apax_inverse_remover
  import apax_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  str_smp_t in_smp,
  input  logic     in_valid,
  output logic     in_ready,
  output att_smp_t out_smp,
  output logic     out_valid,
  input  logic     out_ready
);

  localparam int unsigned W = STR_W + 2;

  logic signed [W-1:0] y1, y2, x1, x2;     // y[n-1], y[n-2], x[n-1], x[n-2]
  logic signed [W-1:0] yp, xp, y, x, s;
  logic                fire;

  assign in_ready = !out_valid || out_ready;
  assign fire     = in_valid && in_ready;

  always_comb begin
    s  = W'(in_smp.data);
    yp = in_smp.first ? '0 : (in_smp.cfg.fc == FC_QUARTER) ? y2 : y1;
    xp = in_smp.first ? '0 : (in_smp.cfg.fc == FC_QUARTER) ? x2 : x1;
    if (in_smp.cfg.sel == 2'd2) y = (in_smp.cfg.fc == FC_LOW) ? s + yp : s - yp;
    else                        y = s;
    if (in_smp.cfg.sel == 2'd0) x = y;
    else                        x = (in_smp.cfg.fc == FC_LOW) ? y + xp : y - xp;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      y1 <= '0; y2 <= '0; x1 <= '0; x2 <= '0;
      out_valid <= 1'b0;
      out_smp   <= '0;
    end else if (in_ready) begin
      out_valid <= in_valid;
      if (fire) begin
        y1 <= y;
        y2 <= in_smp.first ? '0 : y1;
        x1 <= x;
        x2 <= in_smp.first ? '0 : x1;
        out_smp.data  <= ATT_W'(x);
        out_smp.first <= in_smp.first;
        out_smp.last  <= in_smp.last;
        out_smp.cfg   <= in_smp.cfg;
      end
    end
  end

endmodule

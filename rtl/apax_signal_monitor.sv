// apax_signal_monitor: per-block centre-frequency estimate of the input.
//
// The monitor taps the raw input stream ahead of the attenuator. Within each
// block it counts sign changes between successive samples (zero crossings).
// A sinusoid at frequency f sampled at fs crosses zero about 2*f/fs times per
// sample, so with C crossings in N samples the centre frequency is about
// C/(2N) * fs. At the end of the block the estimate is reduced to a class
// that tells the redundancy remover which neighbouring samples are
// correlated:
//   4*C <  N    -> FC_LOW      (below fs/8)
//   4*C >  3*N  -> FC_HIGH     (above 3fs/8)
//   otherwise   -> FC_QUARTER
// The sign is taken from the top bit of the sample's type, which is the sign
// for integers and IEEE floats alike.
//
// The paper says only that the monitor tracks characteristics of the input,
// including centre frequency and SNR, and that the centre frequency decides
// which nearby elements are correlated. The zero-crossing estimator and the
// class thresholds are this design's choices; no SNR estimate is built.
//
// Interface: observes accepted input samples (in_fire). fc and xings hold the
// result of the last completed block and change one cycle after its last
// sample is accepted, together with a one-cycle done pulse.
module apax_signal_monitor
  import apax_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  raw_smp_t         in_smp,
  input  logic             in_fire,
  output fc_e              fc,
  output logic [BLK_W-1:0] xings,
  output logic             done
);

  logic             sgn, prev_sgn;
  logic [BLK_W-1:0] cnt, nsmp;
  logic [BLK_W-1:0] cnt_nx, nsmp_nx;
  logic [BLK_W+2:0] c4, n1, n3;

  always_comb begin
    case (in_smp.cfg.dtype)
      DT_INT8:  sgn = in_smp.data[7];
      DT_INT16: sgn = in_smp.data[15];
      DT_INT32, DT_FLT32: sgn = in_smp.data[31];
      default:  sgn = in_smp.data[63];
    endcase
    cnt_nx  = (in_smp.first ? '0 : cnt) +
              BLK_W'(!in_smp.first && (sgn != prev_sgn));
    nsmp_nx = (in_smp.first ? '0 : nsmp) + 1'b1;
    c4 = (BLK_W+3)'({cnt_nx, 2'b00});
    n1 = (BLK_W+3)'(nsmp_nx);
    n3 = (BLK_W+3)'(nsmp_nx) + (BLK_W+3)'({nsmp_nx, 1'b0});
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      prev_sgn <= 1'b0;
      cnt      <= '0;
      nsmp     <= '0;
      fc       <= FC_LOW;
      xings    <= '0;
      done     <= 1'b0;
    end else begin
      done <= 1'b0;
      if (in_fire) begin
        prev_sgn <= sgn;
        cnt      <= cnt_nx;
        nsmp     <= nsmp_nx;
        if (in_smp.last) begin
          xings <= cnt_nx;
          done  <= 1'b1;
          if (c4 < n1)      fc <= FC_LOW;
          else if (c4 > n3) fc <= FC_HIGH;
          else              fc <= FC_QUARTER;
        end
      end
    end
  end

endmodule

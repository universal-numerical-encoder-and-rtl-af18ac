// apax_header_gen: block header generator.
//
// Each encoded block starts with a header that tells a decoder how to undo
// the encoding of that block. The generator is one pipeline stage between
// the redundancy remover and the bit packer: on the first sample of a block
// it assembles the header from the block's cfg sideband, which by then
// carries the parameters of all contributors named by the paper: the encoding
// mode and data type (from the control block), the gain applied by the
// attenuator, the signal monitor's centre-frequency class, and the
// redundancy remover's stream choice for this block.
//
// Header layout, bit 0 first on the wire (this design's own layout; the paper
// gives only the sizes, 4 bytes for integers and 6 bytes for floats):
//   [1:0]   stream select (0: x, 1: first, 2: second derivative)
//   [3:2]   centre-frequency class (fc_e)
//   [6:4]   data type (dtype_e)
//   [7]     mode (0 fixed gain, 1 fixed rate)
//   [23:8]  gain mantissa (value / 2^15)
//   [31:24] gain exponent bits 7:0
//   [39:32] gain exponent bits 15:8        (floats only)
//   [47:40] zero                           (floats only)
// Integer blocks carry only the low byte of the gain exponent; the control
// block keeps it within -128..127 for integers.
//
// Interface: valid/ready in and out, latency 1 cycle; hdr and hdr_len are
// valid on samples with first set and zero otherwise.
module apax_header_gen
  import apax_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  str_smp_t in_smp,
  input  logic     in_valid,
  output logic     in_ready,
  output pk_smp_t  out_smp,
  output logic     out_valid,
  input  logic     out_ready
);

  logic [HDR_W-1:0] hdr;
  logic [5:0]       hdr_len;

  always_comb begin
    hdr = '0;
    hdr[1:0]   = in_smp.cfg.sel;
    hdr[3:2]   = in_smp.cfg.fc;
    hdr[6:4]   = in_smp.cfg.dtype;
    hdr[7]     = in_smp.cfg.mode;
    hdr[23:8]  = in_smp.cfg.gain_m;
    hdr[31:24] = in_smp.cfg.gain_e[7:0];
    if (dtype_is_float(in_smp.cfg.dtype)) begin
      hdr[39:32] = in_smp.cfg.gain_e[15:8];
      hdr_len    = 6'(HDR_FLT_BITS);
    end else begin
      hdr_len    = 6'(HDR_INT_BITS);
    end
  end

  assign in_ready = !out_valid || out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_smp   <= '0;
    end else if (in_ready) begin
      out_valid <= in_valid;
      if (in_valid) begin
        out_smp.data    <= in_smp.data;
        out_smp.first   <= in_smp.first;
        out_smp.last    <= in_smp.last;
        out_smp.hdr     <= in_smp.first ? hdr : '0;
        out_smp.hdr_len <= in_smp.first ? hdr_len : '0;
      end
    end
  end

endmodule

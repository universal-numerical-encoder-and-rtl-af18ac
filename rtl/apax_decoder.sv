// apax_decoder: turns the encoder's word stream back into samples.
//
// Chain: apax_bit_unpacker (header, joint exponent tokens, mantissas,
// padding) -> apax_inverse_remover (undoes the chosen derivative) ->
// apax_inverse_attenuator (divides by the block's gain, restores the type).
// All parameters of a block come from its header except the block length,
// which the decoder is given (blk_size, the same value the encoder used);
// it is sampled as each header is read.
//
// The paper states that encoded blocks are decoded on reads and that decoders
// are implemented alongside the encoders (FPGA and SoC), but gives no decoder
// structure; this chain is this design's inverse of its encoder.
//
// Interface: in_data/in_valid/in_ready take OUT_W-bit words, least significant
// bit first, each block starting on a word boundary. out_smp (64-bit data in
// the block's type, first/last, dtype) with out_valid/out_ready, one sample
// per cycle once enough words are buffered. err is sticky and flags a
// malformed token stream.
module apax_decoder
  import apax_pkg::*;
#(
  parameter int unsigned OUT_W = 32
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [BLK_W-1:0] blk_size,
  input  logic [OUT_W-1:0] in_data,
  input  logic             in_valid,
  output logic             in_ready,
  output dec_smp_t         out_smp,
  output logic             out_valid,
  input  logic             out_ready,
  output logic             err
);

  str_smp_t str_smp;
  logic     str_valid, str_ready;
  att_smp_t att_smp;
  logic     att_valid, att_ready;

  apax_bit_unpacker #(.OUT_W(OUT_W)) u_unpack (
    .clk, .rst_n, .blk_size,
    .in_data, .in_valid, .in_ready,
    .out_smp(str_smp), .out_valid(str_valid), .out_ready(str_ready),
    .err
  );

  apax_inverse_remover u_inv_rr (
    .clk, .rst_n,
    .in_smp(str_smp), .in_valid(str_valid), .in_ready(str_ready),
    .out_smp(att_smp), .out_valid(att_valid), .out_ready(att_ready)
  );

  apax_inverse_attenuator u_inv_att (
    .clk, .rst_n,
    .in_smp(att_smp), .in_valid(att_valid), .in_ready(att_ready),
    .out_smp, .out_valid, .out_ready
  );

endmodule

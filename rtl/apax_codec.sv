// apax_codec: top level of the APAX IP block, an encoder and a decoder side
// by side.
//
// The paper proposes encoding numerical data as it leaves the processor
// sockets (block writes to DDR, disk or network) and decoding it when it
// returns (block reads), with encoders and decoders implemented together in
// the FPGA and SoC versions. This top holds one of each as two independent
// channels:
//   * write path: apax_encoder, samples in -> encoded OUT_W-bit words out;
//   * read path:  apax_decoder, encoded words in -> samples out.
// Connecting the encoder's output to the decoder's input gives a loopback.
// The split into two channels and the shared clock are this design's choices.
//
// Interface: the encoder ports keep the names of apax_encoder (see there:
// params, in_*, out_*, blk_done/blk_words and status outputs). The decoder
// ports are prefixed rd_: rd_blk_size (samples per block of the stream being
// read, sampled at each header), rd_in_data/valid/ready (words), rd_out_smp
// (sample, first/last, dtype) with rd_out_valid/ready, and rd_err (sticky,
// malformed stream). Both paths move one sample per cycle.
module apax_codec
  import apax_pkg::*;
#(
  parameter int unsigned OUT_W = 32
) (
  input  logic              clk,
  input  logic              rst_n,
  // Write path (encoder).
  input  enc_params_t       params,
  input  logic [IN_W-1:0]   in_data,
  input  logic              in_valid,
  output logic              in_ready,
  output logic [OUT_W-1:0]  out_data,
  output logic              out_valid,
  input  logic              out_ready,
  output logic              out_last,
  output logic              blk_done,
  output logic [15:0]       blk_words,
  output fc_e               mon_fc,
  output logic [BLK_W-1:0]  mon_xings,
  output logic              mon_done,
  output logic              dec_valid,
  output logic [1:0]        dec_sel,
  output logic              tok_valid,
  output logic [1:0]        tok_kind,
  output logic              adj_up,
  output logic              adj_dn,
  // Read path (decoder).
  input  logic [BLK_W-1:0]  rd_blk_size,
  input  logic [OUT_W-1:0]  rd_in_data,
  input  logic              rd_in_valid,
  output logic              rd_in_ready,
  output dec_smp_t          rd_out_smp,
  output logic              rd_out_valid,
  input  logic              rd_out_ready,
  output logic              rd_err
);

  apax_encoder #(.OUT_W(OUT_W)) u_enc (
    .clk, .rst_n, .params,
    .in_data, .in_valid, .in_ready,
    .out_data, .out_valid, .out_ready, .out_last,
    .blk_done, .blk_words,
    .mon_fc, .mon_xings, .mon_done,
    .dec_valid, .dec_sel, .tok_valid, .tok_kind, .adj_up, .adj_dn
  );

  apax_decoder #(.OUT_W(OUT_W)) u_dec (
    .clk, .rst_n,
    .blk_size(rd_blk_size),
    .in_data(rd_in_data), .in_valid(rd_in_valid), .in_ready(rd_in_ready),
    .out_smp(rd_out_smp), .out_valid(rd_out_valid), .out_ready(rd_out_ready),
    .err(rd_err)
  );

endmodule

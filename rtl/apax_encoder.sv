// apax_encoder: top level of the APAX numerical encoder.
//
// The encoder compresses a stream of numbers (8/16/32-bit integers or
// 32/64-bit IEEE floats) into self-contained encoded blocks. Its chain, in the
// order of the paper's block diagram:
//   control -> attenuator -> redundancy remover -> header generator
//           -> bit packer -> encoded words
// with the signal monitor tapping the raw input and reporting to control.
//   * control frames samples into blocks and attaches each block's
//     parameters, including the gain chosen by its rate loop;
//   * the attenuator multiplies every sample by that gain, turning ints and
//     floats alike into ATT_W-bit integers (this is the lossy step);
//   * the redundancy remover encodes each block with whichever of the sample
//     stream and its two derivative streams was cheapest in the previous
//     block;
//   * the header generator prefixes a 4-byte (int) or 6-byte (float) header;
//   * the bit packer codes groups of 4 samples with block floating point and
//     joint exponent tokens and packs everything into OUT_W-bit words.
// The packer reports each finished block's size back to the control block,
// which closes the rate loop.
//
// Interface: params are the profiler's encoding parameters, sampled at every
// block start. in_data (low bits used for narrow types) with in_valid /
// in_ready; out_data with out_valid / out_ready and out_last on each block's
// last word. blk_done/blk_words report encoded block sizes; the remaining
// outputs are status for monitoring (monitor result, token kinds, stream
// decisions, gain steps). Throughput is one sample per cycle as long as out_ready
// holds and the encoded rate fits OUT_W bits per cycle; latency from a
// group's last input sample to its first output bits is about 7 cycles.
module apax_encoder
  import apax_pkg::*;
#(
  parameter int unsigned OUT_W = 32
) (
  input  logic              clk,
  input  logic              rst_n,
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
  output logic              adj_dn
);

  raw_smp_t raw;
  att_smp_t att;
  str_smp_t str;
  pk_smp_t  pk;
  logic raw_valid, raw_ready;
  logic att_valid, att_ready;
  logic str_valid, str_ready;
  logic pk_valid,  pk_ready;

  apax_control u_control (
    .clk, .rst_n, .params,
    .in_data, .in_valid, .in_ready,
    .out_smp(raw), .out_valid(raw_valid), .out_ready(raw_ready),
    .mon_fc, .blk_done, .blk_words, .adj_up, .adj_dn
  );

  apax_signal_monitor u_monitor (
    .clk, .rst_n,
    .in_smp(raw), .in_fire(raw_valid && raw_ready),
    .fc(mon_fc), .xings(mon_xings), .done(mon_done)
  );

  apax_attenuator u_attenuator (
    .clk, .rst_n,
    .in_smp(raw), .in_valid(raw_valid), .in_ready(raw_ready),
    .out_smp(att), .out_valid(att_valid), .out_ready(att_ready)
  );

  apax_redundancy_remover u_remover (
    .clk, .rst_n,
    .in_smp(att), .in_valid(att_valid), .in_ready(att_ready),
    .out_smp(str), .out_valid(str_valid), .out_ready(str_ready),
    .dec_valid, .dec_sel
  );

  apax_header_gen u_header (
    .clk, .rst_n,
    .in_smp(str), .in_valid(str_valid), .in_ready(str_ready),
    .out_smp(pk), .out_valid(pk_valid), .out_ready(pk_ready)
  );

  apax_bit_packer #(.OUT_W(OUT_W)) u_packer (
    .clk, .rst_n,
    .in_smp(pk), .in_valid(pk_valid), .in_ready(pk_ready),
    .out_data, .out_valid, .out_ready, .out_last,
    .blk_done, .blk_words, .tok_valid, .tok_kind
  );

endmodule

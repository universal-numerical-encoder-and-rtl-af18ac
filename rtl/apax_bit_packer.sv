// apax_bit_packer: block floating point with joint exponent encoding (JEE).
//
// The packer turns the selected stream into the encoded bit stream of each
// block. Samples are taken in groups of GROUP = 4. A group's exponent is the
// number of two's-complement bits its largest member needs (0 for an
// all-zero group), and each of its four samples is then sent with exactly
// that many bits (block floating point). Exponents are not sent directly:
// successive exponents differ little, so their differences are coded with
// fixed-length tokens:
//   pair token,   4 bits, codes 0..8:   both this group's difference d and
//                                       the next group's dn lie in -1..+1;
//                                       code = 3*(d+1) + (dn+1); the next
//                                       group then carries no token
//   single token, 4 bits, codes 9..13:  d in -2..+2; code = 9 + (d+2)
//   absolute,     8 bits:               the exponent e itself (0..31); its
//                                       first nibble is 111,e[4] (14 or 15,
//                                       codes no 4-bit token uses), its
//                                       second nibble e[3:0]
// The first group of every block is coded absolutely. The number and sizes
// of the tokens and the first-exponent rule are the paper's; the code values,
// the greedy pairing and the bit order are this design's.
//
// Bit order: fields are appended least significant bit first into a bit
// accumulator; within a group the token comes before the four mantissas,
// and the block header (from the header generator) comes before the first
// token. Output words take the lowest OUT_W bits first. Each block is padded
// with zeros to a whole word, so encoded blocks start on word boundaries;
// out_last marks a block's final word, and blk_done/blk_words report the
// encoded size of the block in words to the control block.
//
// Structure: a grouper collects 4 samples and their exponent into a small
// group FIFO; the emitter takes one sample per cycle from the FIFO head, and
// for a group's first sample looks one group ahead to decide on a pair
// token (it waits for that group unless the head group ends its block).
// The emitter appends an item (header + token + mantissa, at most 87 bits)
// only when the accumulator has room, so a stalled output stalls the input.
//
// Interface: valid/ready in and out. Throughput one sample per cycle while
// the output keeps up; latency from a group's last sample to its first
// output bits is about 3 cycles. tok_valid/tok_kind report each token sent
// (0 pair, 1 single, 2 absolute) for monitoring.
module apax_bit_packer
  import apax_pkg::*;
#(
  parameter int unsigned OUT_W  = 32,
  parameter int unsigned ACC_W  = 160,
  parameter int unsigned FIFO_D = 4
) (
  input  logic              clk,
  input  logic              rst_n,
  input  pk_smp_t           in_smp,
  input  logic              in_valid,
  output logic              in_ready,
  output logic [OUT_W-1:0]  out_data,
  output logic              out_valid,
  input  logic              out_ready,
  output logic              out_last,
  output logic              blk_done,
  output logic [15:0]       blk_words,
  output logic              tok_valid,
  output logic [1:0]        tok_kind
);

  localparam int unsigned ITEM_W = HDR_W + 8 + STR_W;   // 87
  localparam int unsigned FILL_W = $clog2(ACC_W + 1);
  localparam int unsigned PTR_W  = $clog2(FIFO_D);

  typedef struct packed {
    logic [GROUP-1:0][STR_W-1:0] mant;
    logic [EXP_W-1:0]            exp;
    logic                        first;
    logic                        last;
    logic [HDR_W-1:0]            hdr;
    logic [5:0]                  hdr_len;
  } group_t;

  // ---------------------------------------------------------------- grouper
  logic [1:0]                  gpos;
  logic [GROUP-2:0][STR_W-1:0] gbuf;
  logic [EXP_W:0]              gexp;
  logic                        gfirst;
  logic [HDR_W-1:0]            ghdr;
  logic [5:0]                  ghdr_len;
  logic [EXP_W:0]              sexp, gexp_nx;

  group_t            fifo [FIFO_D];
  logic [PTR_W:0]    wr_ptr, rd_ptr;
  logic [PTR_W:0]    count;
  logic              push, pop;
  group_t            push_grp;

  assign count    = wr_ptr - rd_ptr;
  assign in_ready = (gpos != 2'd3) || (count < (PTR_W+1)'(FIFO_D));
  assign sexp     = sig_bits(in_smp.data);
  assign gexp_nx  = (gpos == 2'd0 || sexp > gexp) ? sexp : gexp;
  assign push     = in_valid && in_ready && (gpos == 2'd3);

  always_comb begin
    push_grp.mant    = {in_smp.data, gbuf};
    push_grp.exp     = gexp_nx[EXP_W-1:0];
    push_grp.first   = gfirst;
    push_grp.last    = in_smp.last;
    push_grp.hdr     = ghdr;
    push_grp.hdr_len = ghdr_len;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      gpos     <= '0;
      gbuf     <= '0;
      gexp     <= '0;
      gfirst   <= 1'b0;
      ghdr     <= '0;
      ghdr_len <= '0;
      wr_ptr   <= '0;
    end else if (in_valid && in_ready) begin
      gpos <= gpos + 2'd1;
      gexp <= gexp_nx;
      if (gpos != 2'd3) gbuf[gpos] <= in_smp.data;
      if (gpos == 2'd0) begin
        gfirst   <= in_smp.first;
        ghdr     <= in_smp.hdr;
        ghdr_len <= in_smp.hdr_len;
      end
      if (push) begin
        fifo[wr_ptr[PTR_W-1:0]] <= push_grp;
        wr_ptr <= wr_ptr + 1'b1;
      end
    end
  end

  // ---------------------------------------------------------------- emitter
  group_t            head, nxt;
  logic [1:0]        k;             // sample of the head group to send next
  logic [EXP_W-1:0]  prev_exp;
  logic              covered;       // head group's difference already sent
  logic              covered_nx;    // set when the head group sent a pair
  logic              have_next;
  logic              need_next;
  logic signed [EXP_W+1:0] d, dn;
  logic              tok_en;
  logic [7:0]        tok;
  logic [3:0]        tok_len;
  logic [1:0]        kind;
  logic              pair_now;
  logic [ITEM_W-1:0] item;
  logic [6:0]        item_len;
  logic [STR_W-1:0]  m;
  logic              can_emit, emit;

  logic [ACC_W-1:0]  acc;
  logic [FILL_W-1:0] fill, fill_after, fill_new, fill_pad;
  logic [15:0]       end_cnt, end_cnt_after;
  logic [15:0]       wcnt;
  logic              out_fire;
  logic              blk_end_item;

  assign head      = fifo[rd_ptr[PTR_W-1:0]];
  assign nxt       = fifo[rd_ptr[PTR_W-1:0] + 1'b1];
  assign have_next = count >= (PTR_W+1)'(2);

  // Token decision for the head group (used when k == 0).
  always_comb begin
    d        = (EXP_W+2)'(head.exp) - (EXP_W+2)'(prev_exp);
    dn       = (EXP_W+2)'(nxt.exp)  - (EXP_W+2)'(head.exp);
    need_next = 1'b0;
    pair_now = 1'b0;
    tok_en   = 1'b0;
    tok      = '0;
    tok_len  = '0;
    kind     = 2'd2;
    if (head.first) begin
      tok_en = 1'b1; tok = {head.exp[3:0], 3'b111, head.exp[4]};
      tok_len = 4'd8; kind = 2'd2;
    end else if (!covered) begin
      tok_en    = 1'b1;
      need_next = !head.last;
      if (!head.last && d >= -1 && d <= 1 && dn >= -1 && dn <= 1) begin
        pair_now = 1'b1;
        tok      = 8'(3 * int'(d) + int'(dn) + 4);
        tok_len  = 4'd4;
        kind     = 2'd0;
      end else if (d >= -2 && d <= 2) begin
        tok      = 8'(int'(d) + 11);
        tok_len  = 4'd4;
        kind     = 2'd1;
      end else begin
        tok      = {head.exp[3:0], 3'b111, head.exp[4]};
        tok_len  = 4'd8;
        kind     = 2'd2;
      end
    end
  end

  // Item for sample k of the head group.
  always_comb begin
    logic [6:0] hl, tl;
    m  = head.mant[k] & ((STR_W'(1) << head.exp) - 1'b1);
    hl = (k == 2'd0 && head.first)  ? 7'(head.hdr_len) : 7'd0;
    tl = (k == 2'd0 && tok_en)      ? 7'(tok_len)      : 7'd0;
    item = ITEM_W'(head.hdr) & ((ITEM_W'(1) << hl) - 1'b1);
    if (tl != 0) item = item | (ITEM_W'(tok) << hl);
    item = item | (ITEM_W'(m) << (hl + tl));
    item_len = hl + tl + 7'(head.exp);
  end

  assign out_valid     = fill >= FILL_W'(OUT_W);
  assign out_data      = acc[OUT_W-1:0];
  assign out_fire      = out_valid && out_ready;
  assign out_last      = (end_cnt == 16'd1);
  assign fill_after    = out_fire ? fill - FILL_W'(OUT_W) : fill;
  assign end_cnt_after = (out_fire && end_cnt != 0) ? end_cnt - 1'b1 : end_cnt;
  assign blk_end_item  = head.last && (k == 2'd3);
  assign fill_new      = fill_after + FILL_W'(item_len);
  assign fill_pad      = FILL_W'(((int'(fill_new) + OUT_W - 1) / OUT_W) * OUT_W);

  assign can_emit = (count != 0) &&
                    !(k == 2'd0 && need_next && !have_next) &&
                    (int'(fill_after) + int'(item_len) <= ACC_W) &&
                    !(blk_end_item && end_cnt_after != 0);
  assign emit     = can_emit;
  assign pop      = emit && (k == 2'd3);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr     <= '0;
      k          <= '0;
      prev_exp   <= '0;
      covered    <= 1'b0;
      covered_nx <= 1'b0;
      acc        <= '0;
      fill       <= '0;
      end_cnt    <= '0;
      wcnt       <= '0;
      blk_done   <= 1'b0;
      blk_words  <= '0;
      tok_valid  <= 1'b0;
      tok_kind   <= '0;
    end else begin
      blk_done  <= 1'b0;
      tok_valid <= 1'b0;
      if (out_fire) begin
        if (out_last) begin
          blk_done  <= 1'b1;
          blk_words <= wcnt + 1'b1;
          wcnt      <= '0;
        end else begin
          wcnt <= wcnt + 1'b1;
        end
      end
      if (emit) begin
        acc  <= (out_fire ? (acc >> OUT_W) : acc) |
                (ACC_W'(item) << fill_after);
        fill <= blk_end_item ? fill_pad : fill_new;
        end_cnt <= blk_end_item ? 16'(fill_pad / FILL_W'(OUT_W)) : end_cnt_after;
        k    <= k + 2'd1;
        if (k == 2'd0 && tok_en) begin
          tok_valid  <= 1'b1;
          tok_kind   <= kind;
        end
        if (k == 2'd0) covered_nx <= pair_now;
        if (pop) begin
          rd_ptr   <= rd_ptr + 1'b1;
          prev_exp <= head.exp;
          covered  <= covered_nx;
        end
      end else begin
        if (out_fire) acc <= acc >> OUT_W;
        fill    <= fill_after;
        end_cnt <= end_cnt_after;
      end
    end
  end

  // The group FIFO never overflows and the accumulator never overfills.
  assert property (@(posedge clk) disable iff (!rst_n)
                   !(push && count >= (PTR_W+1)'(FIFO_D)));
  assert property (@(posedge clk) disable iff (!rst_n) int'(fill) <= ACC_W);

endmodule

// tb_apax_bit_packer: self-checking test of the bit packer.
//
// Blocks of stream samples whose magnitude follows a random walk (so that
// group exponents change by small steps, which pair tokens and single tokens
// cover, and sometimes jump, which needs absolute tokens) are packed under
// random output backpressure. Each block's words are decoded by the
// reference decoder of tb_apax_ref_pkg and must give back the header and
// every sample exactly, use each 32-bit word (padding only at the end),
// end with out_last, and be reported once through blk_done/blk_words. With
// no backpressure and small samples the packer must accept one sample per
// cycle.
module tb_apax_bit_packer;
  import apax_pkg::*;
  import tb_apax_ref_pkg::*;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  pk_smp_t     in_smp;
  logic        in_valid, in_ready;
  logic [31:0] out_data;
  logic        out_valid, out_ready, out_last;
  logic        blk_done;
  logic [15:0] blk_words;
  logic        tok_valid;
  logic [1:0]  tok_kind;

  apax_bit_packer dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_tok[3] = '{0, 0, 0};
  int n_dec_tok[3] = '{0, 0, 0};
  int n_stall = 0, n_blocks = 0, n_reports = 0, last_words = -1;

  typedef struct {
    int          nsmp;
    logic [47:0] hdr;
    int          hdr_len;
  } blk_t;
  blk_t   blk_q[$];
  longint smp_q[$];
  logic [31:0] words[$];

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  task automatic process_block();
    blk_t b;
    dec_t r;
    int bad;
    b = blk_q.pop_front();
    r = decode_block(words, b.nsmp);
    n_blocks++;
    check(r.ok, $sformatf("block %0d decodes cleanly", n_blocks));
    check(r.hdr_bits == b.hdr_len, "header length");
    check(int'(b.hdr[1:0]) == r.sel && int'(b.hdr[3:2]) == r.fc &&
          int'(b.hdr[23:8]) == r.gain_m, "header fields");
    bad = 0;
    for (int i = 0; i < b.nsmp; i++) begin
      longint e;
      e = smp_q.pop_front();
      if (i >= r.stream.size() || r.stream[i] != e) bad++;
    end
    check(bad == 0, $sformatf("block %0d: %0d samples differ", n_blocks, bad));
    n_dec_tok[0] += r.n_pair; n_dec_tok[1] += r.n_single; n_dec_tok[2] += r.n_abs;
    last_words = words.size();
    words = {};
  endtask

  always @(posedge clk) begin
    if (rst_n) begin
      if (out_valid && !out_ready) n_stall++;
      if (tok_valid) n_tok[tok_kind]++;
      if (blk_done) begin
        check(int'(blk_words) == last_words, "blk_words matches the words received");
        n_reports++;
      end
      if (out_valid && out_ready) begin
        words.push_back(out_data);
        if (out_last) process_block();
      end
    end
  end

  int ready_pct = 60;
  always @(negedge clk) out_ready <= ($urandom_range(99) < ready_pct);

  task automatic send_block(int n, int maxbits, bit gaps);
    blk_t b;
    int lvl;
    b.nsmp = n;
    b.hdr = {$urandom, $urandom};
    b.hdr[47:40] = '0;
    if ($urandom_range(1) == 1) begin
      b.hdr[6:4] = 3'd3;
      b.hdr_len = 48;
    end else begin
      b.hdr[6:4] = 3'd1;
      b.hdr[47:32] = '0;
      b.hdr_len = 32;
    end
    blk_q.push_back(b);
    lvl = $urandom_range(1, maxbits);
    for (int i = 0; i < n; i++) begin
      pk_smp_t s;
      longint v;
      if (i % 4 == 0) begin
        case ($urandom_range(9))
          0: lvl = $urandom_range(0, maxbits);
          1, 2, 3: lvl = lvl;
          4, 5: lvl = lvl + 1;
          6, 7: lvl = lvl - 1;
          8: lvl = lvl + 2;
          default: lvl = lvl - 2;
        endcase
        if (lvl < 0) lvl = 0;
        if (lvl > maxbits) lvl = maxbits;
      end
      v = (lvl == 0) ? 0 : longint'($urandom_range(0, (1 << (lvl - 1)) - 1));
      if ($urandom_range(1) == 1) v = -v - 1;
      if (lvl == 0) v = 0;
      smp_q.push_back(v);
      s = '0;
      s.data = STR_W'(v);
      s.first = (i == 0);
      s.last = (i == n - 1);
      if (i == 0) begin
        s.hdr = b.hdr;
        s.hdr_len = 6'(b.hdr_len);
      end
      if (gaps) while ($urandom_range(9) == 0) begin
        @(negedge clk);
        in_valid <= 1'b0;
      end
      @(negedge clk);
      in_smp <= s;
      in_valid <= 1'b1;
      #1;
      while (!in_ready) begin @(negedge clk); #1; end
      @(posedge clk);
    end
    @(negedge clk);
    in_valid <= 1'b0;
  endtask

  int t0;
  int cyc = 0;
  always @(posedge clk) cyc++;

  initial begin
    in_valid = 1'b0;
    in_smp = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int b = 0; b < 40; b++) send_block(4 * $urandom_range(2, 40), 31, 1);
    for (int b = 0; b < 10; b++) send_block(64, 12, 1);
    // Throughput with a free output: 8-bit samples fit easily in 32 bits per
    // cycle, so 256 samples must go in within 256 cycles plus a few.
    ready_pct = 100;
    repeat (20) @(negedge clk);
    t0 = cyc;
    send_block(256, 8, 0);
    check(cyc - t0 <= 256 + 2, $sformatf("256 samples accepted in %0d cycles", cyc - t0));
    repeat (100) @(negedge clk);
    check(blk_q.size() == 0 && smp_q.size() == 0, "all blocks came out");
    check(n_reports == n_blocks, "one size report per block");
    for (int k = 0; k < 3; k++) begin
      check(n_tok[k] > 0, $sformatf("token kind %0d sent", k));
      check(n_tok[k] == n_dec_tok[k], $sformatf("token kind %0d: %0d reported, %0d decoded",
                                                k, n_tok[k], n_dec_tok[k]));
    end
    check(n_stall > 0, "output backpressure exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #5_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule

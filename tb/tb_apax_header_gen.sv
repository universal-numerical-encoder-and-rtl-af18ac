// tb_apax_header_gen: self-checking test of the block header generator.
//
// Random block configurations are sent on first-of-block samples (and on
// other samples, whose header must be empty). The testbench assembles the
// expected header field by field from the documented layout and checks the
// header bits, the 32/48-bit header length by data type, and that data and
// flags pass through in order under random backpressure.
module tb_apax_header_gen;
  import apax_pkg::*;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  str_smp_t in_smp;
  logic     in_valid, in_ready;
  pk_smp_t  out_smp;
  logic     out_valid, out_ready;

  apax_header_gen dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0, n_int = 0, n_flt = 0;
  str_smp_t exp_q[$];

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  always @(posedge clk) begin
    if (rst_n && out_valid && out_ready) begin
      str_smp_t s;
      logic [47:0] h;
      int len;
      s = exp_q.pop_front();
      h = '0;
      len = 0;
      if (s.first) begin
        h[1:0] = s.cfg.sel;
        h[3:2] = s.cfg.fc;
        h[6:4] = s.cfg.dtype;
        h[7] = s.cfg.mode;
        h[23:8] = s.cfg.gain_m;
        h[31:24] = s.cfg.gain_e[7:0];
        if (s.cfg.dtype == DT_FLT32 || s.cfg.dtype == DT_FLT64) begin
          h[39:32] = s.cfg.gain_e[15:8];
          len = 48;
          n_flt++;
        end else begin
          len = 32;
          n_int++;
        end
      end
      check(out_smp.hdr == h, $sformatf("header %h expected %h", out_smp.hdr, h));
      check(int'(out_smp.hdr_len) == len, "header length");
      check(out_smp.data == s.data && out_smp.first == s.first && out_smp.last == s.last,
            "data and flags pass through");
    end
  end

  int ready_pct = 70;
  always @(negedge clk) out_ready <= ($urandom_range(99) < ready_pct);

  initial begin
    in_valid = 1'b0;
    in_smp = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 2000; i++) begin
      str_smp_t s;
      s.data = STR_W'($urandom);
      s.first = ($urandom_range(3) == 0);
      s.last = 1'($urandom);
      s.cfg.dtype = dtype_e'($urandom_range(4));
      s.cfg.mode = mode_e'($urandom_range(1));
      s.cfg.gain_m = GM_W'($urandom);
      s.cfg.gain_e = GE_W'($urandom);
      s.cfg.fc = fc_e'($urandom_range(2));
      s.cfg.sel = 2'($urandom_range(2));
      exp_q.push_back(s);
      @(negedge clk);
      in_smp <= s;
      in_valid <= 1'b1;
      #1;
      while (!in_ready) begin @(negedge clk); #1; end
      @(posedge clk);
    end
    @(negedge clk);
    in_valid <= 1'b0;
    ready_pct = 100;
    repeat (5) @(negedge clk);
    check(exp_q.size() == 0, "all samples came out");
    check(n_int > 0 && n_flt > 0, "both header sizes produced");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule

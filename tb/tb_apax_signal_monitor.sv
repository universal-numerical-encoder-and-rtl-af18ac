// tb_apax_signal_monitor: self-checking test of the signal monitor.
//
// Blocks of tones at many frequencies (from near DC to near fs/2) and of
// random data are fed in every data type, with random idle cycles. For each
// block the testbench counts the sign changes itself, derives the expected
// frequency class (4C < N low, 4C > 3N high, otherwise quarter) and compares
// both with the monitor's outputs, which must appear one cycle after the
// block's last sample together with the done pulse.
module tb_apax_signal_monitor;
  import apax_pkg::*;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  raw_smp_t         in_smp;
  logic             in_fire;
  fc_e              fc;
  logic [BLK_W-1:0] xings;
  logic             done;

  apax_signal_monitor dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_cls[3] = '{0, 0, 0};

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  initial begin
    in_fire = 1'b0;
    in_smp  = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int b = 0; b < 60; b++) begin
      int n, c, t, ec;
      real f, ph;
      bit sg, psg;
      n  = 4 * $urandom_range(16, 100);
      f  = real'($urandom_range(0, 500)) / 1000.0;
      t  = $urandom_range(4);
      ph = real'($urandom_range(999)) / 1000.0;
      c  = 0;
      for (int i = 0; i < n; i++) begin
        real v;
        raw_smp_t s;
        v = $sin(6.2831853 * (ph + f * i)) + 0.01;
        if (b % 10 == 9) v = real'($urandom_range(1)) - 0.5;
        sg = (v < 0.0);
        s = '0;
        s.cfg.dtype = dtype_e'(t);
        s.data = {$urandom, $urandom};
        case (t)
          0: s.data[7] = sg;
          1: s.data[15] = sg;
          2, 3: s.data[31] = sg;
          default: s.data[63] = sg;
        endcase
        s.first = (i == 0);
        s.last  = (i == n - 1);
        if (i > 0 && sg != psg) c++;
        psg = sg;
        while ($urandom_range(4) == 0) begin
          @(negedge clk);
          in_fire <= 1'b0;
        end
        @(negedge clk);
        in_smp  <= s;
        in_fire <= 1'b1;
      end
      @(negedge clk);
      in_fire <= 1'b0;
      ec = (4 * c < n) ? 0 : (4 * c > 3 * n) ? 2 : 1;
      check(done, "done pulses one cycle after the last sample");
      check(int'(xings) == c, $sformatf("block %0d: %0d crossings, expected %0d", b, xings, c));
      check(int'(fc) == ec, $sformatf("block %0d: class %0d, expected %0d", b, fc, ec));
      n_cls[ec]++;
      @(negedge clk);
      check(!done, "done is a single pulse");
    end
    for (int k = 0; k < 3; k++) check(n_cls[k] > 0, $sformatf("class %0d exercised", k));
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

// tb_dead_time: drives one leg with random PWM pulses, some shorter than the
// dead time, and random enable drops. A reference built from the input
// history decides each cycle's gates: a switch may be on only when the PWM
// signal has had its level for the last DEAD+1 samples and the enable for the
// last DEAD samples. Also measures the off gap between the switches, which
// must be DEAD clocks, and that both are never on together.
module tb_dead_time;
  localparam int DEAD = 100;

  logic clk = 1'b0, rst_n = 1'b0, en = 1'b0, pwm_in = 1'b0;
  logic hi, lo;
  int   checks = 0, failures = 0;
  logic pwm_hist [DEAD+1];
  logic en_hist  [DEAD];
  bit   all1, all0, en_ok;
  int   gap, gaps_seen, last_off, was_hi, was_lo, off_side;

  dead_time #(.DEAD(DEAD)) dut (.clk, .rst_n, .en, .pwm_in, .hi, .lo);

  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  initial begin
    foreach (pwm_hist[i]) pwm_hist[i] = 1'b0;
    foreach (en_hist[i])  en_hist[i]  = 1'b0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    gaps_seen = 0; last_off = -1; off_side = -1; was_hi = 0; was_lo = 0;
    for (int n = 0; n < 40000; n++) begin
      // new stimulus: mostly long pulses, some short ones, rare enable drops
      if (n % 600 == 0) en = ($urandom_range(0, 9) != 0);
      if ($urandom_range(0, 299) == 0)      pwm_in = ~pwm_in;
      else if ($urandom_range(0, 2999) == 0) pwm_in = ~pwm_in;   // short pulse start
      @(posedge clk);
      // shift in the samples taken at this edge
      for (int i = DEAD; i > 0; i--) pwm_hist[i] = pwm_hist[i-1];
      pwm_hist[0] = pwm_in;
      for (int i = DEAD - 1; i > 0; i--) en_hist[i] = en_hist[i-1];
      en_hist[0] = en;
      #1;
      all1 = 1'b1; all0 = 1'b1; en_ok = 1'b1;
      foreach (pwm_hist[i]) begin all1 &= pwm_hist[i]; all0 &= ~pwm_hist[i]; end
      foreach (en_hist[i]) en_ok &= en_hist[i];
      check(hi == (all1 && en_ok), $sformatf("cycle %0d hi=%b expected %b", n, hi, all1 && en_ok));
      check(lo == (all0 && en_ok), $sformatf("cycle %0d lo=%b expected %b", n, lo, all0 && en_ok));
      check(!(hi && lo), "never both on");
      // gap between one switch going off and the other coming on
      if (was_hi && !hi) begin last_off = n; off_side = 1; end
      if (was_lo && !lo) begin last_off = n; off_side = 0; end
      if (((!was_hi && hi && off_side == 0) || (!was_lo && lo && off_side == 1)) && last_off >= 0) begin
        gap = n - last_off;
        if (en_ok && gap <= DEAD + 1) begin
          check(gap == DEAD, $sformatf("dead time %0d clocks", gap));
          gaps_seen++;
        end
        last_off = -1;
      end
      was_hi = hi; was_lo = lo;
    end
    check(gaps_seen > 10, $sformatf("dead-time gaps measured: %0d", gaps_seen));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

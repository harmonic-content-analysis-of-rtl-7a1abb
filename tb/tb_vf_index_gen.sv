// tb_vf_index_gen: runs the DDS index counter at 100 Hz and 60 Hz with a
// model of the sequencing machine around it (each step request granted after
// 0..2 clocks, an init pulse after each completed period). Checks every
// index against a counter kept here (V = U + 2400, W = U + 1200 and the
// third-harmonic index 3U, all mod 3600), that one sine period is exactly
// 3600 steps and lasts CLK_HZ / f clocks to within a few clocks (one
// step after a frequency change, as the accumulator keeps its remainder), and that the
// frequency is clamped to 5..100 Hz and only taken over at an init pulse.
module tb_vf_index_gen;
  import vfd_pkg::*;

  logic       clk = 1'b0, rst_n = 1'b0, en = 1'b0, init = 1'b0, step = 1'b0;
  freq_t      freq_hz;
  phase_idx_t idx;
  idx_t       idx3;
  logic       step_req, period_done;
  freq_t      freq_used;
  int         checks = 0, failures = 0;
  int         u_exp, steps_in_period, last_init, periods, wait_cnt;
  longint     cyc;

  vf_index_gen dut (.clk, .rst_n, .en, .init, .step, .freq_hz,
                    .idx, .idx3, .step_req, .period_done, .freq_used);

  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  task automatic check_idx();
    check(int'(idx.u) == u_exp, $sformatf("U index %0d expected %0d", idx.u, u_exp));
    check(int'(idx.v) == (u_exp + 2400) % 3600, "V index trails U by 120 degrees");
    check(int'(idx.w) == (u_exp + 1200) % 3600, "W index trails U by 240 degrees");
    check(int'(idx3) == (3 * u_exp) % 3600, "third-harmonic index is 3U");
  endtask

  // Run with the machine model until n_periods periods have completed.
  task automatic run_periods(int f, int n_periods, int first_tol = 6);
    int target, tol;
    periods = 0;
    wait_cnt = -1;
    while (periods < n_periods) begin
      @(posedge clk); #1;
      cyc++;
      if (step) begin
        u_exp = (u_exp + 1) % 3600;
        steps_in_period++;
      end
      if (init) begin
        if (last_init >= 0) begin
          // init follows the wrap after a grant delay of up to 2 clocks,
          // so init-to-init spacing varies by a few clocks
          target = int'(CLK_HZ) / f;
          tol = (periods == 0) ? first_tol : 6;
          check(steps_in_period == 3600, $sformatf("%0d steps in a period", steps_in_period));
          check(cyc - last_init >= target - tol && cyc - last_init <= target + tol,
                $sformatf("period %0d clocks at %0d Hz", cyc - last_init, f));
          periods++;
        end
        last_init = int'(cyc);
        steps_in_period = 0;
        u_exp = 0;
      end
      check_idx();
      // machine model
      step = 1'b0;
      init = 1'b0;
      if (period_done)      init = 1'b1;
      else if (wait_cnt > 0) wait_cnt--;
      else if (wait_cnt == 0) begin step = 1'b1; wait_cnt = -1; end
      else if (step_req) begin
        wait_cnt = $urandom_range(0, 2);
        if (wait_cnt == 0) begin step = 1'b1; wait_cnt = -1; end
      end
    end
  endtask

  initial begin
    freq_hz = freq_t'(100);
    u_exp = 0; steps_in_period = 0; last_init = -1; cyc = 0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    init = 1'b1; @(posedge clk); #1; init = 1'b0;
    check(freq_used == freq_t'(100), "100 Hz taken over at init");
    en = 1'b1;
    last_init = 0;
    run_periods(100, 2);
    // a frequency change acts only at the next init pulse
    freq_hz = freq_t'(60);
    check(freq_used == freq_t'(100), "frequency held until the period ends");
    run_periods(100, 1);
    check(freq_used == freq_t'(60), "60 Hz taken over at init");
    // the accumulator keeps its remainder across the change, so the first
    // 60 Hz period may be off by up to one 100 Hz step (278 clocks)
    run_periods(60, 2, 280);
    // clamping
    en = 1'b0;
    freq_hz = freq_t'(120);
    init = 1'b1; @(posedge clk); #1; init = 1'b0;
    check(freq_used == freq_t'(100), "120 Hz clamped to 100 Hz");
    freq_hz = freq_t'(2);
    init = 1'b1; @(posedge clk); #1; init = 1'b0;
    check(freq_used == freq_t'(5), "2 Hz clamped to 5 Hz");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (8_000_000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

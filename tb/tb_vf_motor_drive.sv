// tb_vf_motor_drive: end-to-end test of the drive at its default parameters
// (100 MHz clock, 4 kHz carrier, 3600-entry table, 1 us dead time).
//
// The drive is started with a 4 ms soft start to m = 0.8 at 100 Hz in SPWM,
// switched to THI-SPWM, then to SVPWM with a request of 150 Hz (clamped to
// 100 Hz), then to SPWM at 60 Hz, stopped, and restarted without soft start.
// A model kept here tracks the phase angle (f / CLK_HZ per clock, frequency
// and mode taken over at each completed period), and the soft-start ramp.
// For every carrier period and leg the measured average of the leg,
// (clocks upper on - clocks lower on) / 25000, is compared with the model's
// value. The comparison is natural sampling: the pulse ends where the rising
// sawtooth meets the moving modulating signal m(t) * y(angle(t)), y being
// the published modulating signal of the mode, and the model finds that
// crossing by fixed-point iteration. Periods in which a change takes effect are
// skipped. Also checked: carrier periods of exactly 25000 clocks, sine
// periods of CLK_HZ / f clocks, the soft start ending ss_ms after start,
// never both switches of a leg on, gates off
// while stopped. Each mechanism (index step, carrier reset, period restart,
// soft-start completion, the three modes, frequency change and clamp, dead
// time gap, stop and restart) is counted, and one never seen is a failure.
module tb_vf_motor_drive;
  import vfd_pkg::*;

  localparam real PI  = 3.14159265358979323846;
  localparam int  P   = int'(CLK_HZ / CARRIER_HZ);
  localparam real TOL = 0.015;

  logic        clk = 1'b0, rst_n = 1'b0, run = 1'b0;
  freq_t       freq_hz;
  pwm_mode_t   mode;
  mi_t         mi_target;
  logic [15:0] ss_ms;
  gates_t      gates;
  mi_t         mi_now;
  logic        ss_done;
  freq_t       freq_now;
  pwm_mode_t   mode_now;
  fsm_state_t  state;

  int checks = 0, failures = 0;

  vf_motor_drive dut (.clk, .rst_n, .run, .freq_hz, .mode, .mi_target, .ss_ms,
                      .gates, .mi_now, .ss_done, .freq_now, .mode_now, .state);

  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL @%0t %s", $time, what);
    end
  endtask

  // ---- model state ----
  longint    n;              // clocks since run rose
  real       ph;             // phase of U in turns
  real       f_eff;          // model frequency
  pwm_mode_t mode_eff;
  real       m_target_r, ramp_len;
  bit        running;
  int        hi_cnt [3], lo_cnt [3];
  real       ph_ws, f_ws;
  bit        win_valid;
  bit        change_in_win;
  longint    win_start, last_rst, last_wrap;
  int        win_len;
  int        mode_checked [3];

  // mechanism counters
  int c_steps, c_sawrst, c_restart, c_ss_done, c_freq_change, c_clamp,
      c_gaps, c_stop, c_windows, c_skipped;
  logic [5:0] g_q;
  logic       done_q;
  logic       run_q = 1'b0;
  freq_t      freq_q;

  function automatic real f_of(freq_t f);
    if (f < freq_t'(FREQ_MIN)) return real'(FREQ_MIN);
    if (f > freq_t'(FREQ_MAX)) return real'(FREQ_MAX);
    return real'(f);
  endfunction

  function automatic real y_of(pwm_mode_t md, real turn, int leg);
    real a, s [3], s3, mx, mn;
    a = 2.0 * PI * turn;
    for (int k = 0; k < 3; k++) s[k] = $sin(a - 2.0 * PI * real'(k) / 3.0);
    s3 = $sin(3.0 * a);
    mx = s[0]; mn = s[0];
    for (int k = 1; k < 3; k++) begin
      if (s[k] > mx) mx = s[k];
      if (s[k] < mn) mn = s[k];
    end
    case (md)
      MODE_THIPWM: return 1.155 * s[leg] + s3 / 6.0;
      MODE_SVPWM:  return s[leg] - (mx + mn) / 2.0;
      default:     return s[leg];
    endcase
  endfunction

  function automatic real m_at(real nn);
    return m_target_r * ((nn >= ramp_len) ? 1.0 : nn / ramp_len);
  endfunction

  // Leg average over the window that began at the carrier reset: the
  // upper switch is on from the reset until the sawtooth (rising one unit
  // of 1/P per clock from -1) meets the modulating signal.
  function automatic real expected_avg(int leg);
    real t, v;
    t = real'(P) / 2.0;
    for (int it = 0; it < 6; it++) begin
      v = m_at(real'(win_start) + t) * y_of(mode_eff, ph_ws + f_ws * t / real'(CLK_HZ), leg);
      if (v > 1.0) v = 1.0;
      if (v < -1.0) v = -1.0;
      t = real'(P) * (1.0 + v) / 2.0;
    end
    return v;
  endfunction

  // Per-clock model and measurement.
  always @(posedge clk) begin
    if (rst_n) begin
      // gate safety and the stopped state
      check(!(gates.u_hi && gates.u_lo) && !(gates.v_hi && gates.v_lo) && !(gates.w_hi && gates.w_lo),
            "both switches of a leg on");
      if (!run && !run_q) check(gates == '0, "gates off while stopped");
      run_q <= run;
      // dead-time gaps on leg U: upper off, then lower on DEAD clocks later
      g_q <= gates;
    end
    if (running) begin
      n++;
      // phase model
      ph = ph + f_eff / real'(CLK_HZ);
      if (ph >= 1.0) begin
        ph = ph - 1.0;
        if (f_of(freq_hz) != f_eff || mode != mode_eff) change_in_win = 1'b1;
        if (f_of(freq_hz) != f_eff) c_freq_change++;
        if (freq_hz > freq_t'(FREQ_MAX)) c_clamp++;
        f_eff    = f_of(freq_hz);
        mode_eff = mode;
      end
      // leg averages of the current window
      hi_cnt[0] += int'(gates.u_hi); lo_cnt[0] += int'(gates.u_lo);
      hi_cnt[1] += int'(gates.v_hi); lo_cnt[1] += int'(gates.v_lo);
      hi_cnt[2] += int'(gates.w_hi); lo_cnt[2] += int'(gates.w_lo);
      // mechanisms seen on the DUT's state port
      if (state == ST_IDX_UPD) c_steps++;
      if (state == ST_INIT && run) c_restart++;
      if (ss_done && !done_q && n > 10) begin
        c_ss_done++;
        // the ramp reaches its target ss_ms milliseconds after run rose
        check(n >= longint'(ramp_len) - 2 && n <= longint'(ramp_len) + 2,
              $sformatf("soft start finished after %0d clocks, expected %0.0f", n, ramp_len));
      end
      done_q = ss_done;
      if (state == ST_SAW_RST) begin
        c_sawrst++;
        if (last_rst >= 0) check(n - last_rst == longint'(P),
                                 $sformatf("carrier period %0d clocks", n - last_rst));
        last_rst = n;
        // close the measurement window (it started at the previous reset)
        if (n - win_start == longint'(P) && !change_in_win && win_valid) begin
          for (int leg = 0; leg < 3; leg++) begin
            real meas, want;
            meas = real'(hi_cnt[leg] - lo_cnt[leg]) / real'(P);
            want = expected_avg(leg);
            check(meas >= want - TOL && meas <= want + TOL,
                  $sformatf("leg %0d mode %0d at %0.4f turn: average %0.4f expected %0.4f",
                            leg, mode_eff, ph_ws, meas, want));
          end
          mode_checked[int'(mode_eff)]++;
          c_windows++;
        end else if (n > longint'(P)) c_skipped++;
        win_start = n;
        change_in_win = 1'b0;
        win_valid = 1'b1;
        ph_ws = ph;
        f_ws  = f_eff;
        hi_cnt = '{0, 0, 0};
        lo_cnt = '{0, 0, 0};
      end
      // frequency in use reported by the drive
      if (freq_now != freq_q) freq_q = freq_now;
    end
  end

  // dead-time gap on leg U measured separately
  longint u_off_at;
  always @(posedge clk) begin
    if (g_q[5] && !gates.u_hi) u_off_at = n;
    if (!g_q[4] && gates.u_lo && u_off_at > 0) begin
      // at least the dead time; longer when a re-crossing pulse (the sine
      // stepping past the carrier just after a crossing) was swallowed
      check(n - u_off_at >= 100, $sformatf("dead time %0d clocks", n - u_off_at));
      if (n - u_off_at == 100) c_gaps++;
      u_off_at = 0;
    end
  end

  // sine period length from the drive's passes through ST_INIT
  longint last_init;
  always @(posedge clk) begin
    if (running && state == ST_INIT && run) begin
      if (last_init > 0) begin
        longint want;
        want = longint'(real'(CLK_HZ) / real'(freq_now));
        check(n - last_init >= want - 480 && n - last_init <= want + 480,
              $sformatf("sine period %0d clocks at %0d Hz", n - last_init, freq_now));
      end
      last_init = n;
    end
  end

  task automatic start(int ms);
    n = 0; ph = 0.0; f_eff = f_of(freq_hz); mode_eff = mode;
    m_target_r = real'(mi_target) / 1024.0;
    ramp_len = (ms == 0) ? 1.0 : real'(ms) * real'(CLK_HZ) / 1000.0;
    win_start = 0; last_rst = -1; win_valid = 1'b0; change_in_win = 1'b1;
    hi_cnt = '{0, 0, 0}; lo_cnt = '{0, 0, 0}; last_init = 0; u_off_at = 0;
    ss_ms = 16'(ms);
    run = 1'b1;
    @(posedge clk);
    running = 1'b1;
  endtask

  task automatic wait_clocks(longint k);
    repeat (k) @(posedge clk);
  endtask

  initial begin
    c_steps = 0; c_sawrst = 0; c_restart = 0; c_ss_done = 0; c_freq_change = 0;
    c_clamp = 0; c_gaps = 0; c_stop = 0; c_windows = 0; c_skipped = 0;
    mode_checked = '{0, 0, 0};
    running = 1'b0; n = 0; done_q = 1'b0; g_q = '0; freq_q = '0;
    freq_hz = freq_t'(100); mode = MODE_SPWM; mi_target = mi_t'(820); ss_ms = 16'd4;
    repeat (4) @(posedge clk);
    rst_n = 1'b1;
    repeat (4) @(posedge clk);
    // 1: soft start to m = 0.8 at 100 Hz, SPWM, two periods
    start(4);
    wait_clocks(1_200_000);
    check(ss_done && mi_now == mi_target, "soft start complete after 4 ms");
    // 2: THI-SPWM from the next period on
    mode = MODE_THIPWM;
    wait_clocks(1_000_000);
    check(mode_now == MODE_THIPWM, "THI-SPWM in use");
    // 3: SVPWM, 150 Hz requested
    mode = MODE_SVPWM; freq_hz = freq_t'(120);
    wait_clocks(1_000_000);
    check(mode_now == MODE_SVPWM, "SVPWM in use");
    check(freq_now == freq_t'(100), "120 Hz request clamped to 100 Hz");
    // 4: SPWM at 60 Hz, two periods
    mode = MODE_SPWM; freq_hz = freq_t'(60);
    wait_clocks(1_000_000 + 2 * 1_666_667);
    check(freq_now == freq_t'(60), "60 Hz in use");
    // 5: stop, then restart without soft start
    run = 1'b0; running = 1'b0;
    wait_clocks(1000);
    check(gates == '0 && mi_now == '0 && state == ST_INIT, "stopped drive is idle");
    c_stop++;
    mode = MODE_THIPWM; freq_hz = freq_t'(50); mi_target = mi_t'(410);
    start(0);
    wait_clocks(10);
    check(mi_now == mi_target, "restart without soft start uses the target at once");
    wait_clocks(400_000);
    // mechanisms
    $display("steps %0d, carrier resets %0d, period restarts %0d, soft starts %0d, freq changes %0d, clamps %0d, dead-time gaps %0d, stops %0d, windows %0d (skipped %0d), per mode %0d/%0d/%0d",
             c_steps, c_sawrst, c_restart, c_ss_done, c_freq_change, c_clamp, c_gaps, c_stop,
             c_windows, c_skipped, mode_checked[0], mode_checked[1], mode_checked[2]);
    check(c_steps > 20000, "index steps");
    check(c_sawrst > 250, "carrier resets");
    check(c_restart >= 5, "sine period restarts");
    check(c_ss_done >= 1, "soft start completed");
    check(c_freq_change >= 1, "frequency change");
    check(c_clamp >= 1, "frequency clamp");
    check(c_gaps > 100, "dead-time gaps");
    check(c_stop >= 1, "stop and restart");
    check(mode_checked[0] > 30 && mode_checked[1] > 30 && mode_checked[2] > 30,
          "all three PWM techniques checked");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (9_000_000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

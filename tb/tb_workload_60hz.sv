// tb_workload_60hz: the published operating points, at default parameters:
// 4 kHz carrier, 60 Hz output, m = 0.4 with SPWM, THI-SPWM and SVPWM, and
// m = 0.6 with SPWM, each preceded by a short soft start.
//
// For each point three full 60 Hz periods (exactly 200 carrier periods) are
// recorded after the soft start.
// The leg averages per carrier period, (clocks upper on - clocks lower on)
// / 25000, are the inverter's pole voltages in units of Vdc/2. Their
// difference U - V is the line-to-line voltage; a discrete Fourier transform
// over the period gives its fundamental and third harmonic. Expected, from
// the modulating signals: fundamental sqrt(3) * m for SPWM and SVPWM,
// sqrt(3) * 1.155 * m for THI-SPWM; no third harmonic in the line voltage
// (the injected third harmonic and common-mode signal cancel between legs),
// while a single pole voltage does carry it for THI-SPWM (m / 6) and SVPWM.
// The line-voltage fundamental is also checked to lag 30 degrees behind U's
// phase, as V trails U by 120 degrees.
module tb_workload_60hz;
  import vfd_pkg::*;

  localparam real PI = 3.14159265358979323846;
  localparam int  P  = int'(CLK_HZ / CARRIER_HZ);

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
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  // measurement over one sine period
  bit     meas_on;
  longint t0, tn;
  int     hu, lu, hv, lv;
  real    c1, s1, c3, s3, pc3, ps3;

  always @(posedge clk) begin
    if (meas_on) begin
      hu += int'(gates.u_hi); lu += int'(gates.u_lo);
      hv += int'(gates.v_hi); lv += int'(gates.v_lo);
      tn++;
      if (state == ST_SAW_RST) begin
        real vu, vv, vl, a;
        vu = real'(hu - lu) / real'(P);
        vv = real'(hv - lv) / real'(P);
        vl = vu - vv;
        a  = 2.0 * PI * 60.0 * (real'(tn) - real'(P) / 2.0) / real'(CLK_HZ);
        c1 += vl * $cos(a);       s1 += vl * $sin(a);
        c3 += vl * $cos(3.0 * a); s3 += vl * $sin(3.0 * a);
        pc3 += vu * $cos(3.0 * a); ps3 += vu * $sin(3.0 * a);
        hu = 0; lu = 0; hv = 0; lv = 0;
      end
    end
  end

  task automatic run_point(pwm_mode_t md, int mi_q, real gain, string name);
    real n_win, amp1, amp3, pamp3, phase1, m, want;
    freq_hz = freq_t'(60); mode = md; mi_target = mi_t'(mi_q); ss_ms = 16'd2;
    run = 1'b1;
    // soft start (2 ms), then wait for the start of a sine period
    repeat (250_000) @(posedge clk);
    check(ss_done, {name, ": soft start finished"});
    while (!(state == ST_INIT)) @(posedge clk);
    // align to the first carrier reset of the period
    while (state != ST_SAW_RST) @(posedge clk);
    hu = 0; lu = 0; hv = 0; lv = 0; tn = 0;
    c1 = 0; s1 = 0; c3 = 0; s3 = 0; pc3 = 0; ps3 = 0;
    // phase reference: U's angle is the table index, read at the window start
    t0 = longint'(dut.u_vf.idx.u);
    meas_on = 1'b1;
    repeat (3 * 1_666_667 - ((3 * 1_666_667) % P)) @(posedge clk);
    meas_on = 1'b0;
    n_win = real'((3 * 1_666_667) / P);
    amp1  = 2.0 * $sqrt(c1 * c1 + s1 * s1) / n_win;
    amp3  = 2.0 * $sqrt(c3 * c3 + s3 * s3) / n_win;
    pamp3 = 2.0 * $sqrt(pc3 * pc3 + ps3 * ps3) / n_win;
    phase1 = $atan2(c1, s1) * 180.0 / PI + real'(t0) / 10.0;   // phase of the sine term
    while (phase1 > 180.0) phase1 -= 360.0;
    while (phase1 < -180.0) phase1 += 360.0;
    m = real'(mi_q) / 1024.0;
    want = $sqrt(3.0) * gain * m;
    $display("%s: line fundamental %0.4f (expected %0.4f), line 3rd %0.4f, pole 3rd %0.4f, phase %0.1f deg",
             name, amp1, want, amp3, pamp3, phase1);
    check(amp1 > want * 0.97 && amp1 < want * 1.03, {name, ": line-to-line fundamental"});
    check(amp3 < 0.01, {name, ": no third harmonic in the line voltage"});
    check(phase1 > 25.0 && phase1 < 35.0, {name, ": line voltage leads U by 30 degrees"});
    if (md == MODE_THIPWM) check(pamp3 > m / 6.0 * 0.9 && pamp3 < m / 6.0 * 1.1, {name, ": pole voltage carries m/6 third harmonic"});
    if (md == MODE_SVPWM)  check(pamp3 > 0.15 * m, {name, ": pole voltage carries the common-mode signal"});
    if (md == MODE_SPWM)   check(pamp3 < 0.01, {name, ": SPWM pole voltage has no third harmonic"});
    run = 1'b0;
    repeat (100) @(posedge clk);
  endtask

  initial begin
    meas_on = 1'b0;
    freq_hz = freq_t'(60); mode = MODE_SPWM; mi_target = '0; ss_ms = '0;
    repeat (4) @(posedge clk);
    rst_n = 1'b1;
    repeat (4) @(posedge clk);
    run_point(MODE_SPWM,   410, 1.0,   "SPWM m=0.4");
    run_point(MODE_THIPWM, 410, 1.155, "THI-SPWM m=0.4");
    run_point(MODE_SVPWM,  410, 1.0,   "SVPWM m=0.4");
    run_point(MODE_SPWM,   614, 1.0,   "SPWM m=0.6");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (30_000_000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

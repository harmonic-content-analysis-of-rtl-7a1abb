// tb_mod_shaper: feeds the shaper with table values for random angles (U at
// angle a, V at a - 120, W at a - 240, third harmonic at 3a), random PWM
// modes and random modulation indices, and compares each phase with the
// published formulas evaluated in floating point here:
//   SPWM  m sin,  THI  m (1.155 sin + sin3 / 6),
//   SVPWM m (sin - (max + min) / 2),
// on the 137500 +/- 12500 scale, within 4 counts (fixed-point gains and
// truncation). Also checks exact results for m = 0 and for SPWM at m = 1,
// and the one-clock latency.
module tb_mod_shaper;
  import vfd_pkg::*;

  localparam real PI = 3.14159265358979323846;

  logic       clk = 1'b0, rst_n = 1'b0;
  phase_val_t val, mod;
  val_t       val3;
  pwm_mode_t  mode;
  mi_t        mi;
  int         checks = 0, failures = 0;
  real        a, su, sv, sw, s3, yu, yv, yw, mx, mn, m;
  int         seen [3];

  mod_shaper dut (.clk, .rst_n, .val, .val3, .mode, .mi, .mod);

  always #5 clk = ~clk;

  function automatic val_t tbl(real ang);
    return val_t'(int'(LUT_MID) + int'($floor(real'(LUT_AMP) * $sin(ang) + 0.5)));
  endfunction

  function automatic int scaled(real y);
    real o;
    o = real'(LUT_MID) + real'(LUT_AMP) * y;
    if (o > real'(SAW_MAX)) o = real'(SAW_MAX);
    if (o < real'(SAW_MIN)) o = real'(SAW_MIN);
    return int'($floor(o + 0.5));
  endfunction

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  task automatic near(int got, int want, string what);
    check(got >= want - 4 && got <= want + 4, $sformatf("%s: %0d expected %0d", what, got, want));
  endtask

  initial begin
    val = '{u: val_t'(LUT_MID), v: val_t'(LUT_MID), w: val_t'(LUT_MID)};
    val3 = val_t'(LUT_MID); mode = MODE_SPWM; mi = '0;
    seen = '{0, 0, 0};
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 4000; n++) begin
      a  = 2.0 * PI * real'($urandom_range(0, 3599)) / 3600.0;
      val  = '{u: tbl(a), v: tbl(a - 2.0 * PI / 3.0), w: tbl(a - 4.0 * PI / 3.0)};
      val3 = tbl(3.0 * a);
      case ($urandom_range(0, 2))
        0: mode = MODE_SPWM;
        1: mode = MODE_THIPWM;
        default: mode = MODE_SVPWM;
      endcase
      seen[int'(mode)]++;
      mi = (n % 10 == 0) ? mi_t'(1 << MI_FRAC) : mi_t'($urandom_range(0, 1024));
      m  = real'(mi) / 1024.0;
      su = $sin(a); sv = $sin(a - 2.0 * PI / 3.0); sw = $sin(a - 4.0 * PI / 3.0); s3 = $sin(3.0 * a);
      case (mode)
        MODE_THIPWM: begin
          yu = 1.155 * su + s3 / 6.0; yv = 1.155 * sv + s3 / 6.0; yw = 1.155 * sw + s3 / 6.0;
        end
        MODE_SVPWM: begin
          mx = su; if (sv > mx) mx = sv; if (sw > mx) mx = sw;
          mn = su; if (sv < mn) mn = sv; if (sw < mn) mn = sw;
          yu = su - (mx + mn) / 2.0; yv = sv - (mx + mn) / 2.0; yw = sw - (mx + mn) / 2.0;
        end
        default: begin yu = su; yv = sv; yw = sw; end
      endcase
      @(posedge clk); #1;
      near(int'(mod.u), scaled(m * yu), $sformatf("U mode %0d", mode));
      near(int'(mod.v), scaled(m * yv), $sformatf("V mode %0d", mode));
      near(int'(mod.w), scaled(m * yw), $sformatf("W mode %0d", mode));
      if (mode == MODE_SPWM && mi == mi_t'(1 << MI_FRAC))
        check(mod == val, "SPWM at m = 1 passes the table values unchanged");
    end
    mi = '0; mode = MODE_THIPWM;
    @(posedge clk); #1;
    check(mod.u == val_t'(LUT_MID) && mod.v == val_t'(LUT_MID) && mod.w == val_t'(LUT_MID),
          "m = 0 gives the zero level");
    check(seen[0] > 100 && seen[1] > 100 && seen[2] > 100, "all three modes exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// mod_shaper: builds the three modulating signals for the selected PWM
// technique and scales them by the modulation index.
//
// Inputs are sine table values on the offset scale (zero at MID = 137500,
// peak AMP = 12500): one per phase, and sin(3wt), which is the same for all
// three phases because three times 120 degrees is a full turn. With
// s = value - MID the signal of each phase is
//   SPWM       y = s
//   THI-SPWM   y = 1.155 s + s3 / 6                  (published eq. 3)
//   SVPWM      y = s + v_cmv, v_cmv = -(max + min)/2 (published eqs. 4, 5)
// where max and min are taken over the three phases at the same instant.
// The output is MID + y * m, limited to MID +/- AMP so that it never leaves
// the carrier's range. The THI gains are held as 12-bit fractions (1.155 =
// 4731/4096, 1/6 = 683/4096); products are cut back with arithmetic shifts,
// i.e. rounded towards minus infinity. The SVPWM signal is built from the
// unscaled sine, as eq. 4 is written; no 1.155 gain is applied to it.
//
// Interface: combinational from inputs to one output register, one clock of
// latency. mi is unsigned fixed point, 2**MI_FRAC = 1.0.
module mod_shaper
  import vfd_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  phase_val_t val,
  input  val_t       val3,
  input  pwm_mode_t  mode,
  input  mi_t        mi,
  output phase_val_t mod
);

  localparam int MID = int'(LUT_MID);

  int s_u, s_v, s_w, s_3;
  int y_u, y_v, y_w;
  int mx, mn, cmv;

  function automatic val_t to_scale(int y, mi_t m);
    int ym, o;
    ym = (y * int'(m)) >>> MI_FRAC;
    o  = MID + ym;
    if (o > int'(SAW_MAX)) o = int'(SAW_MAX);
    if (o < int'(SAW_MIN)) o = int'(SAW_MIN);
    return val_t'(o);
  endfunction

  always_comb begin
    s_u = int'(val.u) - MID;
    s_v = int'(val.v) - MID;
    s_w = int'(val.w) - MID;
    s_3 = int'(val3)  - MID;

    mx = s_u;
    if (s_v > mx) mx = s_v;
    if (s_w > mx) mx = s_w;
    mn = s_u;
    if (s_v < mn) mn = s_v;
    if (s_w < mn) mn = s_w;
    cmv = -((mx + mn) >>> 1);

    unique case (mode)
      MODE_THIPWM: begin
        y_u = (THI_K1 * s_u + THI_K3 * s_3) >>> GAIN_FRAC;
        y_v = (THI_K1 * s_v + THI_K3 * s_3) >>> GAIN_FRAC;
        y_w = (THI_K1 * s_w + THI_K3 * s_3) >>> GAIN_FRAC;
      end
      MODE_SVPWM: begin
        y_u = s_u + cmv;
        y_v = s_v + cmv;
        y_w = s_w + cmv;
      end
      default: begin
        y_u = s_u;
        y_v = s_v;
        y_w = s_w;
      end
    endcase
  end

  always_ff @(posedge clk) begin
    if (!rst_n) mod <= '{u: val_t'(MID), v: val_t'(MID), w: val_t'(MID)};
    else        mod <= '{u: to_scale(y_u, mi), v: to_scale(y_v, mi), w: to_scale(y_w, mi)};
  end

endmodule

// vf_motor_drive: soft-starting, variable-frequency three-phase PWM
// generator for an induction-motor inverter.
//
// The drive turns three settings, output frequency (5..100 Hz), modulation
// index and soft-start time, into the six gate signals of a two-level
// three-phase inverter. It is carrier-based PWM: a 4 kHz sawtooth is compared
// with three modulating signals 120 degrees apart, taken from one 3600-entry
// sine table. The speed is set by how fast a DDS-style counter walks the
// table, the voltage by the modulation index, which a soft-start ramp raises
// from zero so that the motor's inrush current is limited. The modulating
// signal can be plain sine (SPWM), sine with injected third harmonic
// (THI-SPWM) or sine with the min/max common-mode signal added, which gives
// the same pulses as space-vector PWM (SVPWM).
//
// Datapath, one clock per stage:
//   vf_index_gen  U/V/W and third-harmonic table indices
//   sine_lut x4   table values (synchronous ROMs)
//   mod_shaper    modulating signals for the mode, scaled by m
//   pwm_comparator  against the sawtooth_gen carrier
//   dead_time x3  complementary gate pairs with dead time
// spwm_fsm sequences index steps, carrier resets and period starts; the
// soft_start ramp feeds m to mod_shaper.
//
// Interface: synchronous active-low reset. run starts the drive (soft start
// from m = 0) and, when low, turns all gates off. freq_hz and mode are taken
// over at the start of each sine period, mi_target and ss_ms at any time.
// The structure (clock, sine table, sawtooth counter, comparator, variable
// frequency, soft start, dead time, state machine) and the table and carrier
// numbers follow the published design; the register-level timing, mode
// selection at run time and the fixed-point formats are this design's own.
module vf_motor_drive
  import vfd_pkg::*;
#(
  parameter int unsigned DEAD       = 100,
  parameter int unsigned CYC_PER_MS = CLK_HZ / 1000
) (
  input  logic        clk,          // 100 MHz
  input  logic        rst_n,
  input  logic        run,
  input  freq_t       freq_hz,      // requested output frequency, Hz
  input  pwm_mode_t   mode,
  input  mi_t         mi_target,    // final modulation index, 1024 = 1.0
  input  logic [15:0] ss_ms,        // soft-start time, ms
  output gates_t      gates,
  output mi_t         mi_now,       // modulation index in use
  output logic        ss_done,
  output freq_t       freq_now,     // output frequency in use
  output pwm_mode_t   mode_now,     // PWM technique in use
  output fsm_state_t  state
);

  // sequencing
  logic       init, step, saw_reload, cmp_en;
  logic       pre_top, near_top, step_req, period_done;

  // datapath
  phase_idx_t idx;
  idx_t       idx3;
  phase_val_t lut_val;
  val_t       lut_val3;
  phase_val_t mod;
  val_t       saw;
  logic [2:0] pwm;

  spwm_fsm u_fsm (
    .clk, .rst_n, .run, .pre_top, .near_top, .step_req, .period_done,
    .state, .init, .step, .saw_reload, .cmp_en
  );

  vf_index_gen u_vf (
    .clk, .rst_n, .en(run), .init, .step, .freq_hz,
    .idx, .idx3, .step_req, .period_done, .freq_used(freq_now)
  );

  always_ff @(posedge clk) begin
    if (!rst_n)    mode_now <= MODE_SPWM;
    else if (init) mode_now <= (mode == MODE_THIPWM || mode == MODE_SVPWM) ? mode : MODE_SPWM;
  end

  sine_lut u_lut_u (.clk, .rd_en(1'b1), .rd_idx(idx.u), .rd_val(lut_val.u));
  sine_lut u_lut_v (.clk, .rd_en(1'b1), .rd_idx(idx.v), .rd_val(lut_val.v));
  sine_lut u_lut_w (.clk, .rd_en(1'b1), .rd_idx(idx.w), .rd_val(lut_val.w));
  sine_lut u_lut_3 (.clk, .rd_en(1'b1), .rd_idx(idx3),  .rd_val(lut_val3));

  soft_start #(.CYC_PER_MS(CYC_PER_MS)) u_ss (
    .clk, .rst_n, .run, .mi_target, .ss_ms, .mi(mi_now), .done(ss_done)
  );

  mod_shaper u_shape (
    .clk, .rst_n, .val(lut_val), .val3(lut_val3), .mode(mode_now), .mi(mi_now), .mod
  );

  sawtooth_gen u_saw (
    .clk, .rst_n, .en(run), .reload(saw_reload), .saw, .pre_top, .near_top
  );

  pwm_comparator u_cmp (
    .clk, .rst_n, .run, .cmp_en, .mod, .saw, .pwm
  );

  dead_time #(.DEAD(DEAD)) u_dt_u (.clk, .rst_n, .en(run), .pwm_in(pwm[2]), .hi(gates.u_hi), .lo(gates.u_lo));
  dead_time #(.DEAD(DEAD)) u_dt_v (.clk, .rst_n, .en(run), .pwm_in(pwm[1]), .hi(gates.v_hi), .lo(gates.v_lo));
  dead_time #(.DEAD(DEAD)) u_dt_w (.clk, .rst_n, .en(run), .pwm_in(pwm[0]), .hi(gates.w_hi), .lo(gates.w_lo));

endmodule

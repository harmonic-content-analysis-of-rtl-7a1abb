// vfd_pkg: types and constants shared by the soft-start variable-frequency
// PWM generator.
//
// The numbers that set the waveform scale follow the published design: a
// 100 MHz clock, a 3600-entry sine table in 0.1 degree steps whose values run
// from 125000 to 150000 with the zero crossing at 137500, and a 4 kHz
// sawtooth carrier. A carrier period of 100 MHz / 4 kHz = 25000 clocks is
// exactly the 25000-count span of the table, so the sawtooth counts over the
// same numbers as the sine and no scaling is needed in the comparator.
//
// Everything else here (the fixed-point format of the modulation index, the
// gains of the third-harmonic signal, the mode encoding) is this design's
// own choice.
package vfd_pkg;

  // ---- clocking and carrier ----------------------------------------------
  localparam int unsigned CLK_HZ     = 100_000_000;
  localparam int unsigned CARRIER_HZ = 4_000;

  // ---- sine table --------------------------------------------------------
  localparam int unsigned LUT_SIZE  = 3600;      // 0.1 degree per entry
  localparam int unsigned IDX_W     = 12;        // index 0..3599
  localparam int unsigned LUT_MID   = 137_500;   // zero crossing
  localparam int unsigned LUT_AMP   = 12_500;    // peak deviation from LUT_MID
  localparam int unsigned VAL_W     = 18;        // 150000 < 2**18

  // Carrier range: the sawtooth runs SAW_MIN .. SAW_MIN + period - 1.
  localparam int unsigned SAW_MIN   = LUT_MID - LUT_AMP;   // 125000
  localparam int unsigned SAW_MAX   = LUT_MID + LUT_AMP;   // 150000


  // ---- output frequency --------------------------------------------------
  localparam int unsigned FREQ_W    = 7;         // whole hertz, 0..127
  localparam int unsigned FREQ_MIN  = 5;
  localparam int unsigned FREQ_MAX  = 100;

  // ---- modulation index --------------------------------------------------
  // Unsigned fixed point, 2**MI_FRAC = 1.0.
  localparam int unsigned MI_FRAC   = 10;
  localparam int unsigned MI_W      = MI_FRAC + 1;

  // ---- third-harmonic injection gains, y = 1.155 sin(wt) + 1/6 sin(3wt) --
  localparam int unsigned GAIN_FRAC = 12;
  localparam int          THI_K1    = 4731;      // round(1.155 * 4096)
  localparam int          THI_K3    = 683;       // round(4096 / 6)

  typedef logic [IDX_W-1:0]  idx_t;
  typedef logic [VAL_W-1:0]  val_t;    // table value, 125000..150000
  typedef logic signed [VAL_W-1:0] amp_t;   // value minus LUT_MID
  typedef logic [MI_W-1:0]   mi_t;
  typedef logic [FREQ_W-1:0] freq_t;

  typedef enum logic [1:0] {
    MODE_SPWM   = 2'd0,   // plain sinusoidal PWM
    MODE_THIPWM = 2'd1,   // third-harmonic injected PWM
    MODE_SVPWM  = 2'd2    // carrier-based space-vector PWM (min/max injection)
  } pwm_mode_t;

  // States of the generator's sequencing machine.
  typedef enum logic [1:0] {
    ST_INIT     = 2'd0,   // reset to initial values
    ST_COMPARE  = 2'd1,   // sawtooth / sine comparison and pulse generation
    ST_IDX_UPD  = 2'd2,   // update the three phase indices
    ST_SAW_RST  = 2'd3    // reset the sawtooth
  } fsm_state_t;

  // Three-phase bundle of table values.
  typedef struct packed {
    val_t u;
    val_t v;
    val_t w;
  } phase_val_t;

  typedef struct packed {
    idx_t u;
    idx_t v;
    idx_t w;
  } phase_idx_t;

  // Six gate drive signals of the two-level inverter.
  typedef struct packed {
    logic u_hi, u_lo;
    logic v_hi, v_lo;
    logic w_hi, w_lo;
  } gates_t;

endpackage

// pwm_comparator: the digital comparator of the three phases.
//
// Each phase's modulating value is compared with the sawtooth carrier; the
// phase's PWM signal is high while the modulating value is above the
// carrier (the upper switch conducts). Modulating values and the carrier
// share the 125000..150000 scale, so a value of MID gives a 50 % duty
// cycle, MID + AMP a constant high and MID - AMP a constant low.
//
// Interface: the result is registered. It is updated only while cmp_en is
// high (the sequencing machine's compare state) and held in the one-clock
// side states; run low clears it. pwm[2] is U, pwm[1] V, pwm[0] W.
module pwm_comparator
  import vfd_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       run,
  input  logic       cmp_en,
  input  phase_val_t mod,
  input  val_t       saw,
  output logic [2:0] pwm
);

  always_ff @(posedge clk) begin
    if (!rst_n)      pwm <= '0;
    else if (!run)   pwm <= '0;
    else if (cmp_en) pwm <= {mod.u > saw, mod.v > saw, mod.w > saw};
  end

endmodule

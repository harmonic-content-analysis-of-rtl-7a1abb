// dead_time: dead-time insertion for one inverter leg.
//
// From one PWM signal it makes the complementary gate signals of the leg's
// upper (hi) and lower (lo) switch. After every change of the PWM signal
// both switches are held off for DEAD clocks before the newly selected one
// is turned on, so the two never conduct together. A PWM pulse shorter than
// the dead time is swallowed. The published design has this block but gives
// neither its circuit nor the dead time; the counter and the default of 100
// clocks (1 us at 100 MHz) are this design's own.
//
// Interface: registered outputs. en low turns both switches off; when en
// rises the first switch is turned on only after a full dead time. The
// time from the PWM change to the old switch turning off is one clock.
module dead_time #(
  parameter int unsigned DEAD = 100
) (
  input  logic clk,
  input  logic rst_n,
  input  logic en,
  input  logic pwm_in,
  output logic hi,
  output logic lo
);

  localparam int unsigned CW = (DEAD > 1) ? $clog2(DEAD) : 1;

  logic          lvl;
  logic [CW-1:0] cnt;

  if (DEAD < 1) begin : g_bad_dead
    $error("dead_time: DEAD must be at least 1");
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      lvl <= 1'b0;
      cnt <= CW'(DEAD - 1);
      hi  <= 1'b0;
      lo  <= 1'b0;
    end else if (!en) begin
      lvl <= pwm_in;
      cnt <= CW'(DEAD - 1);
      hi  <= 1'b0;
      lo  <= 1'b0;
    end else if (pwm_in != lvl) begin
      lvl <= pwm_in;
      cnt <= CW'(DEAD - 1);
      hi  <= 1'b0;
      lo  <= 1'b0;
    end else if (cnt != '0) begin
      cnt <= cnt - 1'b1;
    end else begin
      hi <= lvl;
      lo <= ~lvl;
    end
  end

  always_ff @(posedge clk) begin
    if (rst_n) begin
      a_no_shoot_through: assert (!(hi && lo))
        else $error("both switches of the leg are on");
    end
  end

endmodule

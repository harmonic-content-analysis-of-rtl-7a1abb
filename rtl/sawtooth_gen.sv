// sawtooth_gen: the PWM carrier, a rising sawtooth made by an up-counter.
//
// The counter runs from MIN to MIN + PERIOD - 1 and is put back to MIN by
// the reload input, which the sequencing machine raises in its
// sawtooth-reset state while the count sits at its top value. With the
// published numbers (100 MHz clock, 4 kHz carrier) PERIOD is 25000 clocks,
// and MIN = 125000 puts the carrier on the same 125000..149999 scale as the
// sine table, so the comparator needs no scaling. The counter is not
// self-wrapping: the period is kept by the machine, as in the published
// state diagram where a "sawtooth reset" state follows the completion of
// each sawtooth period.
//
// Interface: en low holds the count at MIN (drive stopped). near_top flags
// the last three counts (TOP-2 .. TOP) so that the machine can keep its
// one-cycle side states out of the carrier's end; pre_top flags TOP-1, one
// cycle before the reload is due. All outputs are registered or decoded from
// the count register.
module sawtooth_gen #(
  parameter int unsigned MIN    = vfd_pkg::SAW_MIN,
  parameter int unsigned PERIOD = vfd_pkg::CLK_HZ / vfd_pkg::CARRIER_HZ,
  parameter int unsigned VW     = vfd_pkg::VAL_W
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          en,
  input  logic          reload,
  output logic [VW-1:0] saw,
  output logic          pre_top,
  output logic          near_top
);

  localparam logic [VW-1:0] TOP = VW'(MIN + PERIOD - 1);

  always_ff @(posedge clk) begin
    if (!rst_n)      saw <= VW'(MIN);
    else if (!en)    saw <= VW'(MIN);
    else if (reload) saw <= VW'(MIN);
    else             saw <= saw + 1'b1;
  end

  assign pre_top  = (saw == TOP - VW'(1));
  assign near_top = (saw >= TOP - VW'(2));

  // The reload must come exactly at the top of the ramp.
  always_ff @(posedge clk) begin
    if (rst_n) begin
      a_reload_at_top: assert (!(en && reload) || saw == TOP)
        else $error("sawtooth reload away from the top count");
      a_never_past_top: assert (saw <= TOP)
        else $error("sawtooth ran past its top count");
    end
  end

endmodule

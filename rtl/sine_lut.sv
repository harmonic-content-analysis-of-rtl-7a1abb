// sine_lut: the sine look-up table, one synchronous read port.
//
// SIZE entries cover one full period, so entry i holds the sine of
// i * 360/SIZE degrees; with the default SIZE = 3600 that is a 0.1 degree
// step. Entry values are offset binary: MID + round(AMP * sin(angle)), so
// with the defaults they run from 125000 to 150000 and cross zero at 137500,
// as in the published design. They sit on the same scale as the sawtooth
// carrier and can be compared with it directly.
//
// The published design generated the table offline. Here it is computed at
// elaboration by the constant function sine_entry() in plain 64-bit integer
// arithmetic: the angle is folded into the first quadrant, converted to
// radians in Q30 fixed point, and the sine is taken from its Taylor series up
// to the x^11 term (Horner form). Over the first quadrant the truncation
// error is below 6e-8, far under half a step of AMP = 12500, and every entry
// equals MID + round(AMP * sin(angle)) exactly. The array is read like a
// block RAM, so a synthesis tool maps it to a ROM.
//
// Interface: rd_idx (0..SIZE-1) is sampled on a rising clock edge while
// rd_en is high; rd_val holds the entry from the next cycle on (one cycle of
// latency) and keeps it while rd_en is low.
module sine_lut #(
  parameter int unsigned SIZE = vfd_pkg::LUT_SIZE,
  parameter int unsigned MID  = vfd_pkg::LUT_MID,
  parameter int unsigned AMP  = vfd_pkg::LUT_AMP,
  parameter int unsigned IW   = vfd_pkg::IDX_W,
  parameter int unsigned VW   = vfd_pkg::VAL_W
) (
  input  logic          clk,
  input  logic          rd_en,
  input  logic [IW-1:0] rd_idx,
  output logic [VW-1:0] rd_val
);

  localparam int          QB   = 30;
  localparam longint      ONE  = 64'sd1 << QB;
  localparam longint      PI_Q = 64'sd3373259426;   // round(pi * 2**30)

  // MID + round(AMP * sin(2*pi*i/SIZE)), integer arithmetic only.
  function automatic logic [VW-1:0] sine_entry(input int unsigned i);
    longint quarter, q, r, x, x2, t, s, v;
    quarter = longint'(SIZE) / 4;
    q = longint'(i) / quarter;
    r = longint'(i) % quarter;
    if (q == 1 || q == 3) r = quarter - r;
    // angle in radians, Q30: r * (pi/2) / quarter, rounded
    x  = (PI_Q * r + quarter) / (2 * quarter);
    x2 = (x * x) >>> QB;
    t  = ONE;
    t  = ONE - ((x2 * t) >>> QB) / 110;
    t  = ONE - ((x2 * t) >>> QB) / 72;
    t  = ONE - ((x2 * t) >>> QB) / 42;
    t  = ONE - ((x2 * t) >>> QB) / 20;
    t  = ONE - ((x2 * t) >>> QB) / 6;
    s  = (x * t) >>> QB;
    v  = (longint'(AMP) * s + (ONE >>> 1)) >>> QB;
    if (q >= 2) v = -v;
    return VW'(longint'(MID) + v);
  endfunction

  logic [VW-1:0] rom [SIZE];

  initial begin
    for (int unsigned i = 0; i < SIZE; i++) rom[i] = sine_entry(i);
  end

  always_ff @(posedge clk) begin
    if (rd_en) rd_val <= rom[rd_idx];
  end

endmodule

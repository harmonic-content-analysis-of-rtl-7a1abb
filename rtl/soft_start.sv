// soft_start: the soft-start control block, a linear ramp of the modulation
// index.
//
// The published drive limits the inrush current of the induction motor by
// raising the modulation index gradually at start-up, and sets the peak
// current through the length of that soft-start period. This block ramps its
// output mi from 0 to the target mi_target in ss_ms milliseconds. How the
// ramp is shaped is not published; a straight line is used here.
//
// The ramp is a Bresenham-style rate divider: every clock an accumulator
// gains mi_target, and whenever it reaches the ramp length in clocks
// (ss_ms * CYC_PER_MS) it loses that length and mi rises by one step. After
// N clocks mi is therefore floor(N * mi_target / (ss_ms * CYC_PER_MS)), and it
// reaches the target exactly ss_ms milliseconds after run rose. A target
// lowered later takes effect at once; a target raised later is approached at
// the same rate. ss_ms = 0 switches the ramp off.
//
// Interface: run low holds mi at 0 (the next start ramps again). done is high
// while mi equals the target. mi is in unsigned fixed point with MI_FRAC
// fraction bits (vfd_pkg), mi = 2**MI_FRAC meaning m = 1.0. Registered
// outputs.
module soft_start
  import vfd_pkg::*;
#(
  parameter int unsigned CYC_PER_MS = CLK_HZ / 1000,
  parameter int unsigned MS_W       = 16
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            run,
  input  mi_t             mi_target,
  input  logic [MS_W-1:0] ss_ms,
  output mi_t             mi,
  output logic            done
);

  localparam int unsigned LEN_W = MS_W + $clog2(CYC_PER_MS + 1);

  logic [LEN_W-1:0] ramp_len;
  logic [LEN_W-1:0] acc;
  logic [LEN_W:0]   acc_sum;

  assign ramp_len = LEN_W'(ss_ms) * LEN_W'(CYC_PER_MS);
  assign acc_sum  = {1'b0, acc} + (LEN_W+1)'(mi_target);
  assign done     = (mi == mi_target);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      mi  <= '0;
      acc <= '0;
    end else if (!run) begin
      mi  <= '0;
      acc <= '0;
    end else if (mi > mi_target || ss_ms == '0) begin
      mi  <= mi_target;
      acc <= '0;
    end else if (mi < mi_target) begin
      if (acc_sum >= {1'b0, ramp_len}) begin
        acc <= LEN_W'(acc_sum - {1'b0, ramp_len});
        mi  <= mi + 1'b1;
      end else begin
        acc <= LEN_W'(acc_sum);
      end
    end
  end

endmodule

// spwm_fsm: the machine that sequences the PWM generator.
//
// Its four states are those of the published workflow diagram:
//   ST_INIT     "resets to initial values": indices reloaded, a new
//               frequency and PWM mode taken over. Left for ST_COMPARE when
//               the drive runs ("Power = ON").
//   ST_COMPARE  "sawtooth and sine wave comparator and pulse generation":
//               the comparator output is only updated in this state.
//   ST_IDX_UPD  "updates three phases sine indices": one index step, then
//               back to ST_COMPARE ("after sine index update").
//   ST_SAW_RST  "resets the sawtooth waveform": entered on completion of a
//               sawtooth period, back to ST_COMPARE on completion of the
//               reset.
// From ST_COMPARE the machine also returns to ST_INIT once a whole sine
// period is complete. The diagram names these transitions; the priorities
// and exact timing below are this design's own.
//
// Each side state lasts one clock. The carrier's end is fixed: when the
// sawtooth is one count below its top (pre_top) the machine always moves to
// ST_SAW_RST, so that the reload falls on the top count and the carrier
// period stays exactly PERIOD clocks. To make that possible no side state is
// started during the last three counts (near_top). Otherwise a completed sine
// period (period_done) is served before a pending index step (step_req);
// a step that waits is delayed by at most three clocks, while requests are
// hundreds of clocks apart. Dropping run sends the machine to ST_INIT from
// any state.
//
// Outputs are decoded from the state register: init, step, saw_reload and
// cmp_en are each high in exactly one state.
module spwm_fsm
  import vfd_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       run,
  input  logic       pre_top,
  input  logic       near_top,
  input  logic       step_req,
  input  logic       period_done,
  output fsm_state_t state,
  output logic       init,
  output logic       step,
  output logic       saw_reload,
  output logic       cmp_en
);

  fsm_state_t nxt;

  always_comb begin
    nxt = state;
    unique case (state)
      ST_INIT:    nxt = run ? ST_COMPARE : ST_INIT;
      ST_COMPARE: begin
        if (!run)             nxt = ST_INIT;
        else if (pre_top)     nxt = ST_SAW_RST;
        else if (near_top)    nxt = ST_COMPARE;
        else if (period_done) nxt = ST_INIT;
        else if (step_req)    nxt = ST_IDX_UPD;
        else                  nxt = ST_COMPARE;
      end
      ST_IDX_UPD: nxt = run ? ST_COMPARE : ST_INIT;
      ST_SAW_RST: nxt = run ? ST_COMPARE : ST_INIT;
      default:    nxt = ST_INIT;
    endcase
  end

  always_ff @(posedge clk) begin
    if (!rst_n) state <= ST_INIT;
    else        state <= nxt;
  end

  assign init       = (state == ST_INIT);
  assign step       = (state == ST_IDX_UPD);
  assign saw_reload = (state == ST_SAW_RST);
  assign cmp_en     = (state == ST_COMPARE);

endmodule

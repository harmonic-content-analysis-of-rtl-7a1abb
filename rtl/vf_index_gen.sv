// vf_index_gen: the variable-frequency block, a DDS-style sine index counter.
//
// A direct digital synthesiser adds a frequency word to a phase accumulator
// every clock. Here the phase is the sine table index itself, and the
// accumulator only decides when to advance it: every clock the accumulator
// gains f * SIZE (f in whole hertz); when it reaches CLK_HZ it loses CLK_HZ
// and an index step is requested. The index therefore advances SIZE times per
// f-hertz period on average, exactly, with at most one clock of jitter. At
// 60 Hz and the defaults a step falls every 462.96 clocks.
//
// The step itself is taken when the sequencing machine grants it (step),
// normally a cycle or two after the request (step_req). Each step moves the
// U, V and W indices by one entry and the third-harmonic index by three, all
// modulo SIZE. V and W trail U by 120 and 240 degrees. When U wraps from
// SIZE-1 to 0 one sine period is complete and period_done is raised; the
// machine then passes through its initial state, whose init pulse reloads the
// indices and takes over a new frequency setting. Frequency changes thus act
// at whole periods. The frequency is limited to FMIN..FMAX (5..100 Hz, the
// published range); values outside are clamped.
//
// Interface: en high lets the accumulator run; step_req stays high until a
// step is granted. Indices are registered.
module vf_index_gen
  import vfd_pkg::*;
#(
  parameter int unsigned CLK    = CLK_HZ,
  parameter int unsigned SIZE   = LUT_SIZE,
  parameter int unsigned FMIN   = FREQ_MIN,
  parameter int unsigned FMAX   = FREQ_MAX
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       en,
  input  logic       init,
  input  logic       step,
  input  freq_t      freq_hz,
  output phase_idx_t idx,
  output idx_t       idx3,
  output logic       step_req,
  output logic       period_done,
  output freq_t      freq_used
);

  localparam int unsigned ACC_W = $clog2(CLK) + 1;
  localparam idx_t LAST = idx_t'(SIZE - 1);

  logic [ACC_W-1:0] acc;
  logic [ACC_W:0]   acc_sum;
  logic [ACC_W-1:0] inc;
  freq_t            f_clamped;

  always_comb begin
    if (freq_hz < freq_t'(FMIN))      f_clamped = freq_t'(FMIN);
    else if (freq_hz > freq_t'(FMAX)) f_clamped = freq_t'(FMAX);
    else                              f_clamped = freq_hz;
  end

  assign inc     = ACC_W'(freq_used) * ACC_W'(SIZE);
  assign acc_sum = {1'b0, acc} + {1'b0, inc};

  function automatic idx_t wrap_add(idx_t a, logic [1:0] d);
    logic [IDX_W:0] s;
    s = {1'b0, a} + {{(IDX_W-1){1'b0}}, d};
    return (s >= (IDX_W+1)'(SIZE)) ? idx_t'(s - (IDX_W+1)'(SIZE)) : idx_t'(s);
  endfunction

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      acc         <= '0;
      step_req    <= 1'b0;
      period_done <= 1'b0;
      freq_used   <= freq_t'(FMIN);
      idx         <= '{u: '0, v: idx_t'(2 * SIZE / 3), w: idx_t'(SIZE / 3)};
      idx3        <= '0;
    end else begin
      // phase accumulator
      if (!en) begin
        acc      <= '0;
        step_req <= 1'b0;
      end else begin
        if (acc_sum >= (ACC_W+1)'(CLK)) acc <= ACC_W'(acc_sum - (ACC_W+1)'(CLK));
        else                            acc <= ACC_W'(acc_sum);
        if (acc_sum >= (ACC_W+1)'(CLK)) step_req <= 1'b1;
        else if (step)                  step_req <= 1'b0;
      end
      // indices
      if (init) begin
        idx         <= '{u: '0, v: idx_t'(2 * SIZE / 3), w: idx_t'(SIZE / 3)};
        idx3        <= '0;
        period_done <= 1'b0;
        freq_used   <= f_clamped;
      end else if (step) begin
        idx.u <= wrap_add(idx.u, 2'd1);
        idx.v <= wrap_add(idx.v, 2'd1);
        idx.w <= wrap_add(idx.w, 2'd1);
        idx3  <= wrap_add(idx3, 2'd3);
        if (idx.u == LAST) period_done <= 1'b1;
      end
    end
  end

  // A request must not be overrun by the next one before it is granted.
  always_ff @(posedge clk) begin
    if (rst_n) begin
      a_no_lost_step: assert (!(en && step_req && !step) || acc_sum < (ACC_W+1)'(CLK))
        else $error("index step request overrun");
    end
  end

endmodule

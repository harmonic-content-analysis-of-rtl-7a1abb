// tb_spwm_fsm: runs the sequencing machine against a sawtooth counter and a
// source of step requests and period completions kept here. Checks that the
// machine starts in ST_INIT and leaves it when run rises, that ST_SAW_RST
// falls exactly on the top count so the carrier period is 25000 clocks, that
// every step request is served within four clocks and with exactly one
// ST_IDX_UPD, that a completed period leads back through ST_INIT, that no
// side state is entered in the last three counts, that the outputs decode the
// state, and that run low returns it to ST_INIT.
module tb_spwm_fsm;
  import vfd_pkg::*;

  localparam int P   = int'(CLK_HZ / CARRIER_HZ);
  localparam int TOP = P - 1;       // counts 0 .. TOP here

  logic       clk = 1'b0, rst_n = 1'b0, run = 1'b0;
  logic       pre_top, near_top, step_req = 1'b0, period_done = 1'b0;
  fsm_state_t state;
  logic       init, step, saw_reload, cmp_en;
  int         checks = 0, failures = 0;
  logic       rl_q;
  int         n_corner = 0;
  int         cnt, req_age, last_rst, n_steps, n_reqs, n_rst, n_init_mid;

  spwm_fsm dut (.clk, .rst_n, .run, .pre_top, .near_top, .step_req, .period_done,
                .state, .init, .step, .saw_reload, .cmp_en);

  always #5 clk = ~clk;

  assign pre_top  = (cnt == TOP - 1);
  assign near_top = (cnt >= TOP - 2);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  initial begin
    cnt = 0; req_age = 0; last_rst = -1; n_steps = 0; n_reqs = 0; n_rst = 0; n_init_mid = 0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk); #1;
    check(state == ST_INIT, "ST_INIT after reset");
    run = 1'b1;
    for (int n = 0; n < 4 * P; n++) begin
      rl_q = saw_reload;   // the reload seen by this edge
      @(posedge clk); #1;
      // counter model: counts while running, reloaded by the machine
      cnt = rl_q ? 0 : cnt + 1;
      if (n == 0) check(state == ST_COMPARE, "run leaves ST_INIT");
      check(init == (state == ST_INIT) && step == (state == ST_IDX_UPD) &&
            saw_reload == (state == ST_SAW_RST) && cmp_en == (state == ST_COMPARE),
            "outputs decode the state");
      check(!saw_reload || cnt == TOP, $sformatf("sawtooth reset at count %0d", cnt));
      if (saw_reload) begin
        if (last_rst >= 0) check(n - last_rst == P, $sformatf("carrier period %0d", n - last_rst));
        last_rst = n;
        n_rst++;
      end
      if (step || init) check(cnt < TOP - 1, "no side state at the carrier end");
      if (init) n_init_mid++;
      if (step) begin
        check(step_req, "step only when requested");
        n_steps++;
        step_req = 1'b0;
        req_age = 0;
      end
      if (init) period_done = 1'b0;
      if (step_req) begin
        req_age++;
        check(req_age <= 5, $sformatf("step request waited %0d clocks", req_age));
      end
      // new requests every 200..400 clocks; a period end now and then
      if (!step_req && $urandom_range(0, 299) == 0) begin step_req = 1'b1; n_reqs++; end
      if (n % 7919 == 7918) period_done = 1'b1;
      // corner cases: a request or a period end raised while the carrier
      // is two counts below its top, where no side state may start
      if (cnt == TOP - 2 && (n / P) % 2 == 0 && !step_req) begin step_req = 1'b1; n_reqs++; n_corner++; end
      if (cnt == TOP - 2 && (n / P) % 2 == 1) begin period_done = 1'b1; n_corner++; end
    end
    check(n_steps >= n_reqs - 1 && n_steps > 50, $sformatf("%0d steps for %0d requests", n_steps, n_reqs));
    check(n_rst >= 3, "carrier resets seen");
    check(n_corner >= 3, "carrier-end corner cases driven");
    check(n_init_mid >= 5, "period completions lead back through ST_INIT");
    run = 1'b0;
    @(posedge clk); #1;
    check(state == ST_INIT, "run low returns to ST_INIT");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5 * P) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

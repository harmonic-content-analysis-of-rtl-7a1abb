// tb_soft_start: with the millisecond shortened to 100 clocks, ramps the
// modulation index to 0.4 over 10 ms and checks every cycle against
// floor(N * target / (10 * 100)) computed here, and that the target is
// reached exactly after the soft-start time. Then checks that a lower target
// acts at once, a higher one is ramped to at the same rate, ss_ms = 0 jumps,
// and run low returns the index to 0.
module tb_soft_start;
  import vfd_pkg::*;

  localparam int CPM = 100;

  logic        clk = 1'b0, rst_n = 1'b0, run = 1'b0;
  mi_t         mi_target, mi;
  logic [15:0] ss_ms;
  logic        done;
  int          checks = 0, failures = 0;
  int          expv, len, n_done;

  soft_start #(.CYC_PER_MS(CPM)) dut (.clk, .rst_n, .run, .mi_target, .ss_ms, .mi, .done);

  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  initial begin
    mi_target = mi_t'(410);     // m = 0.4
    ss_ms     = 16'd10;
    len       = 10 * CPM;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk); #1;
    check(mi == '0, "index 0 before run");
    run = 1'b1;
    n_done = -1;
    for (int n = 1; n <= len + 50; n++) begin
      @(posedge clk); #1;
      expv = (n * 410) / len;
      if (expv > 410) expv = 410;
      check(int'(mi) == expv, $sformatf("cycle %0d mi=%0d expected %0d", n, mi, expv));
      if (done && n_done < 0) n_done = n;
    end
    check(n_done == len, $sformatf("target reached after %0d clocks, expected %0d", n_done, len));
    // lower target: immediate
    mi_target = mi_t'(300);
    @(posedge clk); #1;
    check(int'(mi) == 300, "lower target takes effect at once");
    // higher target: same rate (target / len per clock)
    mi_target = mi_t'(600);
    for (int n = 1; n <= 200; n++) begin
      @(posedge clk); #1;
    end
    expv = 300 + (200 * 600) / len;
    check(int'(mi) >= expv - 1 && int'(mi) <= expv + 1, $sformatf("raised target ramp mi=%0d expected %0d", mi, expv));
    // ss_ms = 0 switches the ramp off
    run = 1'b0;
    @(posedge clk); #1;
    check(mi == '0, "run low returns the index to 0");
    ss_ms = 16'd0;
    run = 1'b1;
    @(posedge clk); #1;
    check(int'(mi) == 600 && done, "ss_ms = 0 jumps to the target");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

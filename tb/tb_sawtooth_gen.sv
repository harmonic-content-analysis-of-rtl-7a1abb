// tb_sawtooth_gen: runs the carrier counter with the reload driven the way
// the sequencing machine drives it (the machine enters its reset state on the
// edge after pre_top) and checks that
// the count is MIN, MIN+1, ... up to MIN+PERIOD-1, that the period is exactly
// PERIOD = 25000 clocks (4 kHz at 100 MHz), the pre_top and near_top flags,
// and that en low holds the count at MIN.
module tb_sawtooth_gen;
  import vfd_pkg::*;

  localparam int P   = int'(CLK_HZ / CARRIER_HZ);
  localparam int MIN = int'(SAW_MIN);

  logic clk = 1'b0, rst_n = 1'b0, en = 1'b0, reload = 1'b0;
  val_t saw;
  logic pre_top, near_top;
  int   checks = 0, failures = 0;
  int   expect_cnt, last_reload, periods;
  logic pre_q = 1'b0;

  sawtooth_gen dut (.clk, .rst_n, .en, .reload, .saw, .pre_top, .near_top);

  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk); #1;
    check(int'(saw) == MIN, "held at MIN while en is low");
    en = 1'b1;
    expect_cnt = MIN;
    last_reload = -1;
    periods = 0;
    for (int n = 0; n < 4 * P + 10; n++) begin
      // model of the machine: it registers pre_top into its reset state,
      // whose output reloads the counter at the following edge
      @(posedge clk); #1;
      if (reload) expect_cnt = MIN; else expect_cnt++;
      check(int'(saw) == expect_cnt, $sformatf("cycle %0d saw=%0d expected %0d", n, saw, expect_cnt));
      check(pre_top  == (expect_cnt == MIN + P - 2), "pre_top flag");
      check(near_top == (expect_cnt >= MIN + P - 3), "near_top flag");
      if (reload) begin
        if (last_reload >= 0) begin
          check(n - last_reload == P, $sformatf("carrier period %0d clocks", n - last_reload));
          periods++;
        end
        last_reload = n;
      end
      reload = pre_q;
      pre_q  = pre_top;
    end
    check(periods >= 3, "at least three full carrier periods");
    en = 1'b0;
    @(posedge clk); #1;
    check(int'(saw) == MIN, "en low returns the count to MIN");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5 * P + 100) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

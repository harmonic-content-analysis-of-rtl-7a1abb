// tb_sine_lut: reads every entry of the sine table and compares it with
// MID + round(AMP * sin(angle)) computed in floating point here. Also checks
// the one-cycle read latency, that rd_en low holds the output, and the four
// published landmarks (137500 at 0 and 180 degrees, 150000 at 90, 125000 at
// 270).
module tb_sine_lut;
  import vfd_pkg::*;

  logic clk = 1'b0;
  logic rd_en;
  idx_t rd_idx;
  val_t rd_val;
  int   checks = 0, failures = 0;

  sine_lut dut (.clk, .rd_en, .rd_idx, .rd_val);

  always #5 clk = ~clk;

  function automatic int expected(int i);
    real a;
    a = real'(LUT_AMP) * $sin(2.0 * 3.14159265358979323846 * real'(i) / real'(LUT_SIZE));
    return int'(LUT_MID) + ((a >= 0.0) ? int'($floor(a + 0.5)) : -int'($floor(-a + 0.5)));
  endfunction

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  initial begin
    rd_en = 1'b1; rd_idx = '0;
    for (int i = 0; i < int'(LUT_SIZE); i++) begin
      rd_idx = idx_t'(i);
      @(posedge clk); #1;
      check(int'(rd_val) == expected(i), $sformatf("entry %0d = %0d, expected %0d", i, rd_val, expected(i)));
    end
    // landmarks
    rd_idx = idx_t'(0);    @(posedge clk); #1; check(rd_val == 18'd137500, "entry 0");
    rd_idx = idx_t'(900);  @(posedge clk); #1; check(rd_val == 18'd150000, "entry 900");
    rd_idx = idx_t'(1800); @(posedge clk); #1; check(rd_val == 18'd137500, "entry 1800");
    rd_idx = idx_t'(2700); @(posedge clk); #1; check(rd_val == 18'd125000, "entry 2700");
    // hold with rd_en low
    rd_en = 1'b0; rd_idx = idx_t'(450); @(posedge clk); #1;
    check(rd_val == 18'd125000, "rd_en low holds the output");
    rd_en = 1'b1; @(posedge clk); #1;
    check(int'(rd_val) == expected(450), "entry 450 after enable");
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

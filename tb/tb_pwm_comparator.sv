// tb_pwm_comparator: random modulating values and carrier values; checks
// that each phase output is (modulating > carrier), registered one clock
// later, that it holds while cmp_en is low and clears while run is low.
module tb_pwm_comparator;
  import vfd_pkg::*;

  logic       clk = 1'b0, rst_n = 1'b0, run = 1'b0, cmp_en = 1'b0;
  phase_val_t mod;
  val_t       saw;
  logic [2:0] pwm, prev, exp_pwm;
  int         checks = 0, failures = 0;

  pwm_comparator dut (.clk, .rst_n, .run, .cmp_en, .mod, .saw, .pwm);

  always #5 clk = ~clk;

  function automatic val_t rnd_val();
    return val_t'(int'(SAW_MIN) + int'($urandom_range(0, 2 * LUT_AMP)));
  endfunction

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  initial begin
    mod = '{u: val_t'(LUT_MID), v: val_t'(LUT_MID), w: val_t'(LUT_MID)};
    saw = val_t'(SAW_MIN);
    repeat (2) @(posedge clk);
    rst_n = 1'b1; run = 1'b1;
    for (int n = 0; n < 3000; n++) begin
      mod = '{u: rnd_val(), v: rnd_val(), w: rnd_val()};
      saw = (n % 7 == 0) ? mod.v : rnd_val();   // include equal values
      cmp_en = ($urandom_range(0, 3) != 0);
      prev = pwm;
      exp_pwm[2] = int'(mod.u) > int'(saw);
      exp_pwm[1] = int'(mod.v) > int'(saw);
      exp_pwm[0] = int'(mod.w) > int'(saw);
      @(posedge clk); #1;
      if (cmp_en) check(pwm == exp_pwm, $sformatf("pwm=%b expected %b", pwm, exp_pwm));
      else        check(pwm == prev, "pwm held while cmp_en is low");
    end
    mod = '{u: val_t'(SAW_MAX), v: val_t'(SAW_MAX), w: val_t'(SAW_MAX)};
    cmp_en = 1'b1; saw = val_t'(SAW_MIN);
    @(posedge clk); #1;
    check(pwm == 3'b111, "full-scale modulating value gives all high");
    run = 1'b0;
    @(posedge clk); #1;
    check(pwm == 3'b000, "run low clears the outputs");
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

// tb_rng_mse_sweep -- accuracy of the three approximate normal generators at
// d = 10 and d = 12, measured on the hardware outputs for every input
// integer.  Checks the relations the method comparison states:
//  - the piecewise-constant table's MSE halves per extra bit of d (a factor
//    of about 4 from d = 10 to d = 12);
//  - the dyadic generator is only slightly worse than the table at d = 10
//    and close to a factor 2 worse at d = 12;
//  - both other generators are worse than the table at the same d.
// The sum-of-variables generator is loaded with its starting table (method-1
// means divided by sqrt 2), as before the offline fit.
module tb_rng_mse_sweep;
  logic clk = 0;
  always #5 clk = ~clk;
  logic go = 0;

  real p10, s10, d10, i10, p12, s12, d12, i12;
  logic f10, f12;

  rng_mse_probe #(.D(10)) u10 (.clk, .go, .mse_pwc(p10), .mse_sum(s10), .mse_dy(d10), .mse_ideal(i10), .finished(f10));
  rng_mse_probe #(.D(12)) u12 (.clk, .go, .mse_pwc(p12), .mse_sum(s12), .mse_dy(d12), .mse_ideal(i12), .finished(f12));

  int checks = 0, failures = 0;

  task automatic in_range(input string what, input real v, input real lo, input real hi);
    checks++;
    if (v < lo || v > hi) begin
      failures++;
      $display("FAIL %s = %g outside [%g, %g]", what, v, lo, hi);
    end
  endtask

  initial begin
    #50000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    @(negedge clk) go = 1;
    wait (f10 && f12);
    $display("d=10: ideal table %g, method 1 %g, method 2 (initial table) %g, method 3 %g", i10, p10, s10, d10);
    $display("d=12: ideal table %g, method 1 %g, method 2 (initial table) %g, method 3 %g", i12, p12, s12, d12);
    in_range("method 1 d=10 vs ideal", p10 / i10, 0.99, 1.05);
    in_range("method 1 MSE ratio d=10/d=12", p10 / p12, 3.0, 5.0);
    in_range("method 3 / method 1 at d=10", d10 / p10, 1.0, 1.6);
    in_range("method 3 / method 1 at d=12", d12 / p12, 1.5, 2.8);
    in_range("method 2 / method 1 at d=10", s10 / p10, 1.0, 10.0);
    in_range("method 2 / method 1 at d=12", s12 / p12, 1.0, 10.0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

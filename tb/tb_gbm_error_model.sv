// tb_gbm_error_model -- the rounding-error experiment of the bit-width
// study, run on the hardware path engine: a European call under GBM
// (r = 0.05, sigma = 0.2, T = 1, S0 = K = 1) with N = 1 time step and with
// the level-4 correction (N = 16, fine minus coarse), every path variable
// at the same bit-width d in {8, 11, 14}.  For each case the measured
// variance of the rounding error is compared with the two model bounds
// (independent and fully correlated errors): it must stay below the
// correlated bound and within 1.5 times the independent one (at N = 1 the
// measured value is about 1.2-1.3 times that estimate), and it must fall
// by roughly 4 per extra bit.
module tb_gbm_error_model;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n = 0, go = 0;

  localparam int NW = 3;
  localparam int WIDTHS [NW] = '{8, 11, 14};

  real vs0 [NW], vi0 [NW], vc0 [NW], vs4 [NW], vi4 [NW], vc4 [NW];
  logic f0 [NW], f4 [NW];

  for (genvar w = 0; w < NW; w++) begin : g_w
    gbm_err_probe #(.DW(WIDTHS[w]), .LVL(0), .NPATHS(4000)) u0 (
      .clk, .rst_n, .go, .v_sim(vs0[w]), .v_indep(vi0[w]), .v_corr(vc0[w]), .finished(f0[w]));
    gbm_err_probe #(.DW(WIDTHS[w]), .LVL(4), .NPATHS(4000)) u4 (
      .clk, .rst_n, .go, .v_sim(vs4[w]), .v_indep(vi4[w]), .v_corr(vc4[w]), .finished(f4[w]));
  end

  int checks = 0, failures = 0;

  task automatic expect_true(input string what, input bit cond);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  initial begin
    #50000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic bit all_done();
    for (int w = 0; w < NW; w++) if (!f0[w] || !f4[w]) return 0;
    return 1;
  endfunction

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    go = 1;
    while (!all_done()) @(negedge clk);
    for (int w = 0; w < NW; w++) begin
      $display("d=%0d  N=1 : sim %e  indep %e  corr %e", WIDTHS[w], vs0[w], vi0[w], vc0[w]);
      $display("d=%0d  N=16: sim %e  indep %e  corr %e", WIDTHS[w], vs4[w], vi4[w], vc4[w]);
      expect_true($sformatf("N=1 d=%0d below correlated bound", WIDTHS[w]), vs0[w] <= vc0[w]);
      expect_true($sformatf("N=16 d=%0d below correlated bound", WIDTHS[w]), vs4[w] <= vc4[w]);
      expect_true($sformatf("N=1 d=%0d near independent bound", WIDTHS[w]), vs0[w] <= 1.5 * vi0[w]);
      expect_true($sformatf("N=16 d=%0d near independent bound", WIDTHS[w]), vs4[w] <= 1.5 * vi4[w]);
    end
    for (int w = 1; w < NW; w++) begin
      // 3 more bits: a factor 64 in the model; accept 20..200
      expect_true("N=1 variance falls with width", vs0[w-1] / vs0[w] > 20.0 && vs0[w-1] / vs0[w] < 200.0);
      expect_true("N=16 variance falls with width", vs4[w-1] / vs4[w] > 20.0 && vs4[w-1] / vs4[w] < 200.0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

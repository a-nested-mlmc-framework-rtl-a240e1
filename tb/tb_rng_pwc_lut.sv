// tb_rng_pwc_lut -- loads the method-1 table with the interval means of the
// inverse normal CDF (computed here with real arithmetic), then checks the
// output for every one of the 2^d input integers against the value of the
// interval of u that integer stands for, including the mirrored upper half.
// A final statistical check compares the mean squared error against the
// continuous inverse CDF with the value expected for d = 10 (about 1.5e-4).
module tb_rng_pwc_lut;
  import tb_ref_pkg::*;

  localparam int D   = 10;
  localparam int DZ  = 16;
  localparam int EZ  = 2;
  localparam int LSB = EZ - DZ;

  logic clk = 0;
  always #5 clk = ~clk;

  logic                 we = 0;
  logic [D-2:0]         addr = '0;
  logic signed [DZ:0]   wdata = '0;
  logic [D-1:0]         j = '0;
  logic signed [DZ:0]   z;

  rng_pwc_lut #(.RNG_D(D), .D_Z(DZ)) dut (
    .clk, .lut_we(we), .lut_addr(addr), .lut_wdata(wdata), .j, .z
  );

  int checks = 0, failures = 0;
  longint tbl [2 ** (D - 1)];

  initial begin
    #10000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit  s;
    longint e;
    real mse = 0.0, u, zr;
    for (int k = 0; k < 2 ** (D - 1); k++) begin
      tbl[k] = rq(pwc_mean(D, k), DZ, LSB, s);
      @(negedge clk);
      we = 1; addr = (D-1)'(k); wdata = (DZ+1)'(tbl[k]);
    end
    @(negedge clk) we = 0;

    for (int jj = 0; jj < 2 ** D; jj++) begin
      j = D'(jj);
      #1;
      // the integer stands for u in [jj 2^-d, (jj+1) 2^-d)
      if (jj < 2 ** (D - 1)) e = tbl[jj];
      else                   e = -tbl[2 ** D - 1 - jj];
      checks++;
      if (longint'(z) != e) begin
        failures++;
        if (failures < 10) $display("FAIL j=%0d z=%0d expected %0d", jj, z, e);
      end
      // 16 sample points per interval for the MSE against Phi^-1
      for (int m = 0; m < 16; m++) begin
        u   = (real'(jj) + (real'(m) + 0.5) / 16.0) * pow2(-D);
        zr  = norm_inv(u);
        mse += (real'(z) * pow2(LSB) - zr) ** 2;
      end
    end
    mse = mse / real'(16 * 2 ** D);
    $display("method 1, d=%0d: MSE = %g", D, mse);
    checks++;
    if (mse < 1.0e-4 || mse > 2.2e-4) begin
      failures++;
      $display("FAIL MSE %g outside [1e-4, 2.2e-4]", mse);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_rng_dyadic_pwl -- fits one line a + b k per dyadic interval of k to the
// method-1 interval means (least squares, real arithmetic), loads the pairs
// and checks the generator for all 2^d inputs against a real-number model:
// interval found from log2(k), a + b k rounded to nearest in the Z format,
// sign and mirroring from the leading bit.  Then reloads random coefficients
// (large enough to clamp) and repeats, and reports the MSE of the fitted
// generator against the interval means.
module tb_rng_dyadic_pwl;
  import tb_ref_pkg::*;

  localparam int D   = 10;
  localparam int DZ  = 16, EZ = 2;
  localparam int DA  = 18, EA = 3;
  localparam int DB  = 24, EB = 0;
  localparam int LZ  = EZ - DZ, LA = EA - DA, LB = EB - DB;

  logic clk = 0;
  always #5 clk = ~clk;

  logic               we = 0;
  logic [3:0]         addr = '0;
  logic signed [DA:0] wa = '0;
  logic signed [DB:0] wb = '0;
  logic [D-1:0]       j = '0;
  logic signed [DZ:0] z;
  logic               sat;

  rng_dyadic_pwl #(.RNG_D(D), .D_Z(DZ), .E_Z(EZ), .D_A(DA), .E_A(EA), .D_B(DB), .E_B(EB))
    dut (.clk, .lut_we(we), .lut_addr(addr), .lut_a(wa), .lut_b(wb), .j, .z, .sat);

  int checks = 0, failures = 0;
  longint ta [D-1];
  longint tb [D-1];

  function automatic int seg_of(input int k);
    int i = 1;
    while (2 ** i <= k) i++;       // k in [2^(i-1), 2^i - 1]
    return i;                      // k = 0 and k = 1 both give 1
  endfunction

  task automatic load();
    for (int i = 0; i < D - 1; i++) begin
      @(negedge clk);
      we = 1; addr = 4'(i); wa = (DA+1)'(ta[i]); wb = (DB+1)'(tb[i]);
    end
    @(negedge clk) we = 0;
  endtask

  task automatic sweep(output real mse);
    bit es;
    longint e;
    int k, i;
    real lin;
    mse = 0.0;
    for (int jj = 0; jj < 2 ** D; jj++) begin
      j = D'(jj);
      #1;
      k = (jj < 2 ** (D - 1)) ? jj : 2 ** D - 1 - jj;
      i = seg_of(k);
      lin = real'(ta[i-1]) * pow2(LA) + real'(tb[i-1]) * pow2(LB) * real'(k);
      e = rq(lin, DZ, LZ, es);
      if (jj >= 2 ** (D - 1)) e = -e;
      checks++;
      if (longint'(z) != e || sat != es) begin
        failures++;
        if (failures < 10) $display("FAIL j=%0d z=%0d sat=%0b expected %0d sat=%0b",
                                    jj, z, sat, e, es);
      end
      mse += (real'(z) * pow2(LZ) - (jj < 2 ** (D - 1) ? pwc_mean(D, k) : -pwc_mean(D, k))) ** 2;
    end
    mse = mse / real'(2 ** D);
  endtask

  initial begin
    #10000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit s;
    real mse;
    // least-squares line per interval
    for (int i = 1; i < D; i++) begin
      int lo, hi;
      real sx, sy, sxx, sxy, n, a, b;
      lo = (i == 1) ? 0 : 2 ** (i - 1);
      hi = 2 ** i - 1;
      sx = 0; sy = 0; sxx = 0; sxy = 0; n = 0;
      for (int k = lo; k <= hi; k++) begin
        real y;
        y = pwc_mean(D, k);
        sx += k; sy += y; sxx += real'(k) * k; sxy += real'(k) * y; n += 1;
      end
      b = (n * sxy - sx * sy) / (n * sxx - sx * sx);
      a = (sy - b * sx) / n;
      ta[i-1] = rq(a, DA, LA, s);
      tb[i-1] = rq(b, DB, LB, s);
    end
    load();
    sweep(mse);
    $display("fitted dyadic table, d=%0d: mean squared distance to method-1 values = %g", D, mse);
    checks++;
    if (mse > 1.0e-4) begin
      failures++;
      $display("FAIL fitted table far from the interval means");
    end
    // random coefficients, including some that clamp
    for (int i = 0; i < D - 1; i++) begin
      ta[i] = longint'($urandom_range(2 ** 18 - 1, 0)) - 2 ** 17;
      tb[i] = longint'($urandom_range(2 ** 22 - 1, 0)) - 2 ** 21;
    end
    load();
    sweep(mse);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

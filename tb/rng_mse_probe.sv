// rng_mse_probe -- testbench helper: builds the three generators for one
// value of d, loads their tables from the inverse normal CDF, sweeps all 2^d
// input integers and returns each generator's mean squared error against
// Phi^-1 over u in [0,1].
//
// With Z_j the exact interval means, the error splits into
//   MSE = 2^-d sum_j (Zhw_j - Z_j)^2 + (1 - 2^-d sum_j Z_j^2),
// the second term being the error of the ideal piecewise-constant table
// (the integral of Phi^-1(u)^2 over [0,1] is 1).  For the sum-of-variables
// generator the outputs are sorted first, because the host's permutation
// table maps each integer to the interval of its value's rank.
module rng_mse_probe #(
  parameter int D = 10
) (
  input  logic clk,
  input  logic go,
  output real  mse_pwc,
  output real  mse_sum,
  output real  mse_dy,
  output real  mse_ideal,
  output logic finished
);
  import tb_ref_pkg::*;
  import mlmc_pkg::*;

  localparam int DZ = D_DEF, LZ = E_Z_DEF - D_DEF;
  localparam int LA = E_A_DEF - D_A_DEF, LB = E_B_DEF - D_B_DEF;
  localparam int H  = D / 2;

  logic                  we_p = 0, we_s = 0, we_d = 0;
  logic [D-2:0]          a_p = '0;
  logic [H-2:0]          a_s = '0;
  logic [$clog2(D-1)-1:0] a_d = '0;
  logic signed [DZ:0]    w_p = '0, w_s = '0;
  logic signed [D_A_DEF:0] w_a = '0;
  logic signed [D_B_DEF:0] w_b = '0;
  logic [D-1:0]          j = '0;
  logic signed [DZ:0]    z_p, z_s, z_d;
  logic                  sat_s, sat_d;

  rng_pwc_lut    #(.RNG_D(D), .D_Z(DZ)) u_p (.clk, .lut_we(we_p), .lut_addr(a_p), .lut_wdata(w_p), .j, .z(z_p));
  rng_sum_lut    #(.RNG_D(D), .RNG_N(2), .D_Z(DZ)) u_s (.clk, .lut_we(we_s), .lut_addr(a_s), .lut_wdata(w_s), .j, .z(z_s), .sat(sat_s));
  rng_dyadic_pwl #(.RNG_D(D), .D_Z(DZ)) u_d (.clk, .lut_we(we_d), .lut_addr(a_d), .lut_a(w_a), .lut_b(w_b), .j, .z(z_d), .sat(sat_d));

  real zex [2 ** D];     // exact interval means over [0,1]

  initial begin
    bit  s;
    real sumsq, e_p, e_s, e_d;
    real q_s [$];
    finished = 0;
    mse_pwc = 0; mse_sum = 0; mse_dy = 0; mse_ideal = 0;
    wait (go);
    sumsq = 0;
    for (int k = 0; k < 2 ** (D - 1); k++) begin
      zex[k] = pwc_mean(D, k);
      zex[2 ** D - 1 - k] = -zex[k];
      sumsq += 2.0 * zex[k] * zex[k];
    end
    mse_ideal = 1.0 - sumsq * pow2(-D);
    // tables
    for (int k = 0; k < 2 ** (D - 1); k++) begin
      @(negedge clk);
      we_p = 1; a_p = (D-1)'(k); w_p = (DZ+1)'(rq(zex[k], DZ, LZ, s));
      we_s = (k < 2 ** (H - 1)); a_s = (H-1)'(k);
      w_s  = (DZ+1)'(rq(pwc_mean(H, k % (2 ** (H - 1))) / $sqrt(2.0), DZ, LZ, s));
    end
    @(negedge clk) begin we_p = 0; we_s = 0; end
    for (int i = 1; i < D; i++) begin
      int lo, hi;
      real sx, sy, sxx, sxy, n, a, b, y;
      lo = (i == 1) ? 0 : 2 ** (i - 1);
      hi = 2 ** i - 1;
      sx = 0; sy = 0; sxx = 0; sxy = 0; n = 0;
      for (int k = lo; k <= hi; k++) begin
        y = zex[k];
        sx += k; sy += y; sxx += real'(k) * k; sxy += real'(k) * y; n += 1;
      end
      b = (n * sxy - sx * sy) / (n * sxx - sx * sx);
      a = (sy - b * sx) / n;
      @(negedge clk);
      we_d = 1; a_d = ($clog2(D-1))'(i - 1);
      w_a = (D_A_DEF+1)'(rq(a, D_A_DEF, LA, s));
      w_b = (D_B_DEF+1)'(rq(b, D_B_DEF, LB, s));
    end
    @(negedge clk) we_d = 0;
    // sweep
    e_p = 0; e_d = 0; e_s = 0;
    for (int jj = 0; jj < 2 ** D; jj++) begin
      j = D'(jj);
      #1;
      e_p += (real'(z_p) * pow2(LZ) - zex[jj]) ** 2;
      e_d += (real'(z_d) * pow2(LZ) - zex[jj]) ** 2;
      q_s.push_back(real'(z_s) * pow2(LZ));
    end
    q_s.sort();
    foreach (q_s[p]) e_s += (q_s[p] - zex[p]) ** 2;
    mse_pwc = e_p * pow2(-D) + mse_ideal;
    mse_dy  = e_d * pow2(-D) + mse_ideal;
    mse_sum = e_s * pow2(-D) + mse_ideal;
    finished = 1;
  end
endmodule

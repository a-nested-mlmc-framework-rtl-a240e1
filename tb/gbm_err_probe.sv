// gbm_err_probe -- testbench helper for the rounding-error experiment.
//
// Runs NPATHS samples through a gbm_path_engine whose path variables all
// have the same bit-width DW, at level LVL (N = 2^LVL steps; at level 0 the
// sample is the payoff, above it the fine-minus-coarse difference).  The
// increments are full-precision normals Phi^-1(U) rounded to the Z format.
// For every sample it also computes, in real arithmetic, the same sample
// without rounding and, by a backward (adjoint) sweep, the sensitivity of
// the sample to every rounded intermediate (con1, con2, Z_i, mul1_i, sum1_i,
// mul2_i, S_{i+1} on the fine and coarse paths).  Outputs:
//   v_sim   = Var[P - P~] measured
//   v_indep = 1/12 sum_i E[xbar_i^2] LSB_i^2          (independent errors)
//   v_corr  = (sum_i sqrt(E[xbar_i^2]) LSB_i / 2)^2   (fully correlated)
module gbm_err_probe #(
  parameter int DW     = 10,
  parameter int LVL    = 0,
  parameter int NPATHS = 3000
) (
  input  logic clk,
  input  logic rst_n,
  input  logic go,
  output real  v_sim,
  output real  v_indep,
  output real  v_corr,
  output logic finished
);
  import tb_ref_pkg::*;
  import mlmc_pkg::*;

  localparam int N = 2 ** LVL;
  // full-precision normals reach |Z| of about 5 in 10^6 draws, so this
  // experiment gives Z the exponent 3 (the tables of the design stop near 3.4)
  localparam int EZ = 3;
  localparam int LZ = EZ - DW, LC1 = E_CON1_DEF - DW, LC2 = E_CON2_DEF - DW;
  localparam int LM1 = E_MUL1_DEF - DW, LS1 = E_SUM1_DEF - DW;
  localparam int LM2 = E_MUL2_DEF - DW, LS = E_S_DEF - DW;
  localparam real R = 0.05, SIG = 0.2, K = 1.0;

  logic [3:0]         level = 4'(LVL);
  logic signed [DW:0] s0, con1, con2, z = '0;
  logic               start = 0, z_valid = 0;
  logic               busy, z_ready, done, has_coarse, path_sat;
  logic signed [DW:0] s_fine, s_coarse;

  gbm_path_engine #(
    .D_Z(DW), .E_Z(EZ), .D_CON1(DW), .D_CON2(DW), .D_MUL1(DW), .D_SUM1(DW), .D_MUL2(DW), .D_S(DW)
  ) u_eng (
    .clk, .rst_n, .level, .s0, .con1, .con2, .start, .busy,
    .z_valid, .z, .z_ready, .done, .has_coarse, .s_fine, .s_coarse, .path_sat
  );

  // accumulated E[xbar^2] per rounded instance
  real q_con1, q_con2;
  real q_z [N], q_m1 [N], q_s1 [N], q_m2f [N], q_m2c [N], q_sf [N], q_sc [N];

  initial begin
    bit  s;
    real h, c1, c2, zr [N], s1 [N], sf [N+1], sc [N+1];
    real sfb [N+1], scb [N+1], s1b [N], m1b, cb;
    real pf, pc, p, pt, err, se, see;
    int  b;
    finished = 0;
    v_sim = 0; v_indep = 0; v_corr = 0;
    h  = 1.0 / real'(N);
    c1 = R * h;
    c2 = SIG * $sqrt(h);
    s0   = (DW+1)'(rq(1.0, DW, LS, s));
    con1 = (DW+1)'(rq(c1, DW, LC1, s));
    con2 = (DW+1)'(rq(c2, DW, LC2, s));
    q_con1 = 0; q_con2 = 0;
    for (int i = 0; i < N; i++) begin
      q_z[i] = 0; q_m1[i] = 0; q_s1[i] = 0; q_m2f[i] = 0; q_m2c[i] = 0; q_sf[i] = 0; q_sc[i] = 0;
    end
    se = 0; see = 0;
    wait (go && rst_n);
    for (int p_i = 0; p_i < NPATHS; p_i++) begin
      // exact path
      sf[0] = 1.0; sc[0] = 1.0;
      for (int i = 0; i < N; i++) begin
        zr[i] = norm_inv((real'($urandom) + 0.5) / 4294967296.0);
        s1[i] = c1 + c2 * zr[i];
        sf[i+1] = sf[i] + sf[i] * s1[i];
        b = (i % 2 == 1) ? i - 1 : i;
        sc[i+1] = sc[i] + sc[b] * s1[i];
      end
      pf = (sf[N] > K) ? sf[N] - K : 0.0;
      pc = (LVL > 0 && sc[N] > K) ? sc[N] - K : 0.0;
      p  = pf - pc;
      // adjoint sweep
      for (int i = 0; i <= N; i++) begin sfb[i] = 0; scb[i] = 0; end
      sfb[N] = (sf[N] > K) ? 1.0 : 0.0;
      scb[N] = (LVL > 0 && sc[N] > K) ? -1.0 : 0.0;
      for (int i = N - 1; i >= 0; i--) begin
        b = (i % 2 == 1) ? i - 1 : i;
        s1b[i] = sfb[i+1] * sf[i] + scb[i+1] * sc[b];
        sfb[i] = sfb[i+1] + sfb[i+1] * s1[i];
        scb[i] += scb[i+1];
        scb[b] += scb[i+1] * s1[i];
      end
      cb = 0; m1b = 0;
      for (int i = 0; i < N; i++) begin
        q_s1[i]  += s1b[i] ** 2;
        q_m1[i]  += s1b[i] ** 2;
        q_z[i]   += (s1b[i] * c2) ** 2;
        q_m2f[i] += sfb[i+1] ** 2;
        q_sf[i]  += sfb[i+1] ** 2;
        if (LVL > 0) begin
          q_m2c[i] += scb[i+1] ** 2;
          q_sc[i]  += scb[i+1] ** 2;
        end
        cb  += s1b[i];
        m1b += s1b[i] * zr[i];
      end
      q_con1 += cb ** 2;
      q_con2 += m1b ** 2;
      // low-precision path in hardware
      @(negedge clk) start = 1;
      @(negedge clk) start = 0;
      for (int i = 0; i < N; i++) begin
        z = (DW+1)'(rq(zr[i], DW, LZ, s));
        z_valid = 1;
        @(negedge clk);
      end
      z_valid = 0;
      pt = ((real'(s_fine) * pow2(LS) > K) ? real'(s_fine) * pow2(LS) - K : 0.0)
         - ((LVL > 0 && real'(s_coarse) * pow2(LS) > K) ? real'(s_coarse) * pow2(LS) - K : 0.0);
      err = p - pt;
      se += err; see += err * err;
    end
    v_sim = (see - se * se / NPATHS) / (NPATHS - 1);
    // bounds
    v_indep = (q_con1 * pow2(2 * LC1) + q_con2 * pow2(2 * LC2)) / NPATHS;
    v_corr  = $sqrt(q_con1 / NPATHS) * pow2(LC1) + $sqrt(q_con2 / NPATHS) * pow2(LC2);
    for (int i = 0; i < N; i++) begin
      v_indep += (q_z[i] * pow2(2 * LZ) + q_m1[i] * pow2(2 * LM1) + q_s1[i] * pow2(2 * LS1)
                + (q_m2f[i] + q_m2c[i]) * pow2(2 * LM2) + (q_sf[i] + q_sc[i]) * pow2(2 * LS)) / NPATHS;
      v_corr  += $sqrt(q_z[i] / NPATHS) * pow2(LZ) + $sqrt(q_m1[i] / NPATHS) * pow2(LM1)
               + $sqrt(q_s1[i] / NPATHS) * pow2(LS1)
               + ($sqrt(q_m2f[i] / NPATHS) + $sqrt(q_m2c[i] / NPATHS)) * pow2(LM2)
               + ($sqrt(q_sf[i] / NPATHS) + $sqrt(q_sc[i] / NPATHS)) * pow2(LS);
    end
    v_indep = v_indep / 12.0;
    v_corr  = (v_corr / 2.0) ** 2;
    finished = 1;
  end
endmodule

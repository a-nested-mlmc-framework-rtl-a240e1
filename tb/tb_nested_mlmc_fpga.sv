// tb_nested_mlmc_fpga -- end-to-end test of the FPGA sample generator at its
// default parameters.
//
// The testbench plays the host: it computes the three generator tables from
// the inverse normal CDF (method 1: interval means for d = 10; method 2: the
// 5-bit means divided by sqrt 2, i.e. the table before its offline fit;
// method 3: least-squares lines on the dyadic intervals), writes them, sets
// the level constants con1 = r h, con2 = sigma sqrt(h) for r = 0.05,
// sigma = 0.2, T = 1, S0 = K = 1, and streams random 32-bit integers J.
// Every sample is compared with a real-arithmetic model of generator, fine
// and coarse paths and payoffs, and the accumulated count / sum / sum of
// squares with totals kept here.  Statistical checks: the level-0 mean
// against the exact one-step Euler value E[max(0.05 + 0.2 Z, 0)] = 0.10727,
// and a smaller variance of the level difference at level 3 than at level 0.
// The host side of the nested estimator is modelled too: the same J drives a
// full-precision path (Z = inverse normal CDF of (J + 1/2) 2^-32, real
// arithmetic), and the variance of the correction term, full-precision minus
// low-precision difference, must be far below that of the low-precision
// difference for methods 1 and 3 (below 1% at level 0 and 5% at level 5; about
// 0.014% and 0.2% are seen).  For method 2 the host would also need the
// permutation table of the fitted generator, which is not modelled, so its
// correction variance is only printed.
// Each mechanism (three generators, level 0 without a coarse path, coupled
// coarse paths, input stalls, saturation, accumulator clear, back-to-back
// paths) is counted and must occur.
module tb_nested_mlmc_fpga;
  import tb_ref_pkg::*;
  import mlmc_pkg::*;

  localparam int D  = D_DEF;
  localparam int RD = RNG_D_DEF;
  localparam int LZ = E_Z_DEF - D, LC1 = E_CON1_DEF - D, LC2 = E_CON2_DEF - D;
  localparam int LM1 = E_MUL1_DEF - D, LS1 = E_SUM1_DEF - D;
  localparam int LM2 = E_MUL2_DEF - D, LS = E_S_DEF - D;
  localparam int LA = E_A_DEF - D_A_DEF, LB = E_B_DEF - D_B_DEF;
  localparam int OUT_W = D + 3;

  logic clk = 0;
  always #5 clk = ~clk;

  logic                     rst_n = 0;
  rng_method_e              rng_method = RNG_PWC;
  logic [3:0]               level = '0;
  logic signed [D:0]        s0 = '0, strike = '0, con1 = '0, con2 = '0;
  logic                     pwc_we = 0, sum_we = 0, dy_we = 0;
  logic [RD-2:0]            pwc_addr = '0;
  logic [3:0]               sum_addr = '0;
  logic [3:0]               dy_addr = '0;
  logic signed [D:0]        pwc_wdata = '0, sum_wdata = '0;
  logic signed [D_A_DEF:0]  dy_a = '0;
  logic signed [D_B_DEF:0]  dy_b = '0;
  logic                     run_start = 0, acc_clear = 0;
  logic [31:0]              n_paths = '0;
  logic                     run_busy, run_done;
  logic                     j_valid = 0, j_ready;
  logic [31:0]              j_data = '0;
  logic                     sample_valid, sample_sat;
  logic signed [D+1:0]      sample_p_fine, sample_p_coarse;
  logic signed [OUT_W-1:0]  sample_delta;
  logic [31:0]              acc_count, sat_paths;
  logic signed [OUT_W+31:0] acc_sum;
  logic [2*OUT_W+31:0]      acc_sumsq;

  nested_mlmc_fpga dut (.*);

  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc++;

  // mechanism counters
  int n_method [3];
  int n_level0 = 0, n_coarse = 0, n_stall = 0, n_sat = 0, n_clear = 0, n_b2b = 0;
  int n_pos = 0, n_neg = 0;

  longint t_pwc [2 ** (RD - 1)];
  longint t_sum [16];
  longint t_a [RD - 1];
  longint t_b [RD - 1];

  task automatic check(input string what, input longint got, input longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    #20000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- reference model ----------------
  function automatic longint z_model(input int method, input int jj, output bit sat);
    longint e, mx;
    int k, i, f, v;
    real lin;
    mx = (longint'(1) << D) - 1;
    sat = 0;
    if (method == 0) begin
      e = (jj < 2 ** (RD - 1)) ? t_pwc[jj] : -t_pwc[2 ** RD - 1 - jj];
    end else if (method == 1) begin
      f = RD / 2; e = 0;
      for (int n = 0; n < 2; n++) begin
        v = (jj / (2 ** (RD - (n + 1) * f))) % (2 ** f);
        k = v % (2 ** (f - 1));
        if (v >= 2 ** (f - 1)) e -= t_sum[k]; else e += t_sum[k];
      end
      if (e > mx)  begin e = mx;  sat = 1; end
      if (e < -mx) begin e = -mx; sat = 1; end
    end else begin
      k = (jj < 2 ** (RD - 1)) ? jj : 2 ** RD - 1 - jj;
      i = 1;
      while (2 ** i <= k) i++;
      lin = real'(t_a[i-1]) * pow2(LA) + real'(t_b[i-1]) * pow2(LB) * real'(k);
      e = rq(lin, D, LZ, sat);
      if (jj >= 2 ** (RD - 1)) e = -e;
    end
    return e;
  endfunction

  // model state of the path in flight
  longint m_sf, m_sc, m_sce, m_c1, m_c2, m_k;
  int     m_step, m_lvl, m_method;
  bit     m_sat;
  bit     m_active = 0;

  task automatic model_start();
    bit s;
    m_sf = longint'(s0); m_sc = m_sf; m_sce = m_sf;
    m_c1 = longint'(con1); m_c2 = longint'(con2); m_k = longint'(strike);
    m_step = 0; m_lvl = int'(level); m_method = int'(rng_method); m_sat = 0;
  endtask

  task automatic model_step(input int jj);
    bit s;
    longint zi, m1, s1, m2f, m2c, sfn, scn, base;
    zi   = z_model(m_method, jj, s);                                        m_sat |= s;
    m1   = rq(real'(m_c2) * pow2(LC2) * real'(zi) * pow2(LZ), D, LM1, s);   m_sat |= s;
    s1   = rq(real'(m_c1) * pow2(LC1) + real'(m1) * pow2(LM1), D, LS1, s);  m_sat |= s;
    m2f  = rq(real'(m_sf) * pow2(LS) * real'(s1) * pow2(LS1), D, LM2, s);   m_sat |= s;
    sfn  = rq(real'(m_sf) * pow2(LS) + real'(m2f) * pow2(LM2), D, LS, s);   m_sat |= s;
    base = (m_step % 2 == 1) ? m_sce : m_sc;
    m2c  = rq(real'(base) * pow2(LS) * real'(s1) * pow2(LS1), D, LM2, s);   if (m_lvl > 0) m_sat |= s;
    scn  = rq(real'(m_sc) * pow2(LS) + real'(m2c) * pow2(LM2), D, LS, s);   if (m_lvl > 0) m_sat |= s;
    if (m_step % 2 == 0) m_sce = m_sc;
    m_sf = sfn; m_sc = scn;
    m_step++;
  endtask

  // full-precision host path driven by the whole 32-bit J of the same sample:
  // Z = inverse normal CDF of (J + 1/2) 2^-32, real arithmetic, same scheme
  real h_sf, h_sc, h_sce, h_c1, h_c2;

  task automatic host_start();
    h_sf = 1.0; h_sc = 1.0; h_sce = 1.0;
    h_c1 = real'(con1) * pow2(LC1); h_c2 = real'(con2) * pow2(LC2);
  endtask

  task automatic host_step(input logic [31:0] jw, input int step);
    real z, s1, sfn, scn;
    z   = norm_inv((real'(jw) + 0.5) * pow2(-32));
    s1  = h_c1 + h_c2 * z;
    sfn = h_sf + h_sf * s1;
    scn = h_sc + ((step % 2 == 1) ? h_sce : h_sc) * s1;
    if (step % 2 == 0) h_sce = h_sc;
    h_sf = sfn; h_sc = scn;
  endtask

  // ---------------- host tasks ----------------
  task automatic load_tables();
    bit s;
    for (int k = 0; k < 2 ** (RD - 1); k++) t_pwc[k] = rq(pwc_mean(RD, k), D, LZ, s);
    for (int k = 0; k < 16; k++) t_sum[k] = rq(pwc_mean(RD / 2, k) / $sqrt(2.0), D, LZ, s);
    for (int i = 1; i < RD; i++) begin
      int lo, hi;
      real sx, sy, sxx, sxy, n, a, b, y;
      lo = (i == 1) ? 0 : 2 ** (i - 1);
      hi = 2 ** i - 1;
      sx = 0; sy = 0; sxx = 0; sxy = 0; n = 0;
      for (int k = lo; k <= hi; k++) begin
        y = pwc_mean(RD, k);
        sx += k; sy += y; sxx += real'(k) * k; sxy += real'(k) * y; n += 1;
      end
      b = (n * sxy - sx * sy) / (n * sxx - sx * sx);
      a = (sy - b * sx) / n;
      t_a[i-1] = rq(a, D_A_DEF, LA, s);
      t_b[i-1] = rq(b, D_B_DEF, LB, s);
    end
    for (int k = 0; k < 2 ** (RD - 1); k++) begin
      @(negedge clk);
      pwc_we = 1; pwc_addr = (RD-1)'(k); pwc_wdata = (D+1)'(t_pwc[k]);
      sum_we = (k < 16); sum_addr = 4'(k); sum_wdata = (D+1)'(t_sum[k % 16]);
      dy_we = (k < RD - 1); dy_addr = 4'(k); dy_a = (D_A_DEF+1)'(t_a[k % (RD - 1)]);
      dy_b = (D_B_DEF+1)'(t_b[k % (RD - 1)]);
    end
    @(negedge clk);
    pwc_we = 0; sum_we = 0; dy_we = 0;
  endtask

  longint              e_cnt;
  logic signed [127:0] e_sum;
  logic [127:0]        e_sq;
  int                  e_sat;

  task automatic clear_acc();
    @(negedge clk) acc_clear = 1;
    @(negedge clk) acc_clear = 0;
    e_cnt = 0; e_sum = 0; e_sq = 0; e_sat = 0;
    n_clear++;
    check("count after clear", longint'(acc_count), 0);
    check("sum after clear", longint'(acc_sum), 0);
  endtask

  // variance of the correction term (full precision minus low precision) of
  // the last run
  real corr_var;

  // run n paths; returns mean and variance of the level difference
  task automatic run(input rng_method_e m, input int lvl, input int np, input bit stalls,
                     input real r_con1, input real r_con2, output real mean, output real var_);
    bit s;
    int t0, t1, got, last_done_cyc;
    real sm, sq, df, hk, hd, cm, cq;
    longint ef, ec, ed;
    sm = 0; sq = 0; cm = 0; cq = 0; got = 0; last_done_cyc = -100;
    @(negedge clk);
    rng_method = m; level = 4'(lvl);
    s0 = (D+1)'(rq(1.0, D, LS, s)); strike = s0;
    con1 = (D+1)'(rq(r_con1, D, LC1, s));
    con2 = (D+1)'(rq(r_con2, D, LC2, s));
    n_paths = 32'(np);
    run_start = 1;
    @(negedge clk);
    run_start = 0;
    t0 = cyc;
    check("run_busy", longint'(run_busy), 1);
    j_data  = $urandom;
    j_valid = stalls ? 1'($urandom_range(2, 0) != 0) : 1'b1;
    forever begin
      // at the falling edge the outputs show the last rising edge and the
      // inputs are those the next rising edge will take
      if (sample_valid) begin
        last_done_cyc = cyc;
        ef = (m_sf - m_k > 0) ? m_sf - m_k : 0;
        ec = (m_lvl > 0 && m_sc - m_k > 0) ? m_sc - m_k : 0;
        ed = ef - ec;
        check("sample p_fine", longint'(sample_p_fine), ef);
        check("sample p_coarse", longint'(sample_p_coarse), ec);
        check("sample delta", longint'(sample_delta), ed);
        check("sample sat", longint'(sample_sat), longint'(m_sat));
        check("steps per path", m_step, 2 ** m_lvl);
        e_cnt++; e_sum += 128'(ed); e_sq += 128'(ed * ed);
        if (m_sat) begin n_sat++; e_sat++; end
        if (m_lvl == 0) n_level0++; else n_coarse++;
        if (ed > 0) n_pos++;
        if (ed < 0) n_neg++;
        df = real'(ed) * pow2(LS);
        sm += df; sq += df * df;
        hk = real'(m_k) * pow2(LS);
        hd = ((h_sf > hk) ? h_sf - hk : 0.0) - ((m_lvl > 0 && h_sc > hk) ? h_sc - hk : 0.0);
        cm += hd - df; cq += (hd - df) * (hd - df);
        got++;
      end
      if (run_done) begin
        t1 = cyc;
        break;
      end
      // a path's first increment is the first one taken after the previous
      // sample (or after run_start); the configuration is constant in a run
      if (j_valid && j_ready) begin
        if (!m_active) begin
          model_start();
          host_start();
          m_active = 1;
          if (cyc == last_done_cyc + 1) n_b2b++;
        end
        host_step(j_data, m_step);
        model_step(int'(j_data[31 -: RD]));
        if (m_step == 2 ** m_lvl) m_active = 0;
      end
      if (!j_valid && m_active) n_stall++;
      @(posedge clk);
      #1;
      if (j_valid && j_ready || !j_valid) begin
        j_data  = $urandom;
        j_valid = stalls ? 1'($urandom_range(2, 0) != 0) : 1'b1;
      end
      @(negedge clk);
    end
    @(negedge clk);
    j_valid = 0;
    n_method[int'(m)] += got;
    check("paths in run", got, np);
    if (!stalls) check("run cycles", t1 - t0, np * (2 ** lvl + 1) + 1);
    check("run_busy low", longint'(run_busy), 0);
    check("acc_count", longint'(acc_count), e_cnt);
    check("acc_sum", longint'(acc_sum), longint'(e_sum));
    checks++;
    if (128'(acc_sumsq) != e_sq) begin failures++; $display("FAIL acc_sumsq"); end
    check("sat_paths", longint'(sat_paths), e_sat);
    mean = sm / got;
    var_ = (sq - sm * sm / got) / (got - 1);
    corr_var = (cq - cm * cm / got) / (got - 1);
    $display("method %0d level %0d: %0d paths, mean %f, variance %g, correction variance %g",
             int'(m), lvl, np, mean, var_, corr_var);
  endtask

  initial begin
    real mean0, var0, mean3, var3, mx, vx;
    repeat (3) @(negedge clk);
    rst_n = 1;
    load_tables();
    clear_acc();

    // level 0 with method 1: one Euler step, no coarse path
    run(RNG_PWC, 0, 4000, 1'b0, 0.05, 0.2, mean0, var0);
    checks++;
    if (mean0 < 0.10727 - 4.0 * $sqrt(var0 / 4000.0) || mean0 > 0.10727 + 4.0 * $sqrt(var0 / 4000.0)) begin
      failures++;
      $display("FAIL level-0 mean %f, expected 0.10727", mean0);
    end
    // coupling: the correction term must vary far less than the sample itself
    checks++;
    if (!(corr_var < 1.0e-2 * var0)) begin
      failures++;
      $display("FAIL level-0 correction variance %g not far below %g", corr_var, var0);
    end
    clear_acc();
    // level 3 with method 2 and input stalls
    run(RNG_SUM, 3, 400, 1'b1, 0.05 / 8.0, 0.2 * $sqrt(1.0 / 8.0), mean3, var3);
    checks++;
    if (!(var3 < var0 / 4.0)) begin
      failures++;
      $display("FAIL level-3 variance %g not well below level-0 variance %g", var3, var0);
    end
    // level 5 with method 3, accumulated on top of the previous run
    run(RNG_DYADIC, 5, 150, 1'b0, 0.05 / 32.0, 0.2 * $sqrt(1.0 / 32.0), mx, vx);
    checks++;
    if (!(corr_var < 5.0e-2 * vx)) begin
      failures++;
      $display("FAIL level-5 correction variance %g not far below %g", corr_var, vx);
    end
    clear_acc();
    // oversized constants: the asset price leaves its range and clamps
    run(RNG_PWC, 4, 40, 1'b1, 0.06, 0.24, mx, vx);

    $display("mechanisms: pwc %0d sum %0d dyadic %0d level0 %0d coarse %0d stalls %0d sat %0d clear %0d back-to-back %0d pos %0d neg %0d",
             n_method[0], n_method[1], n_method[2], n_level0, n_coarse, n_stall, n_sat,
             n_clear, n_b2b, n_pos, n_neg);
    foreach (n_method[i]) begin
      checks++;
      if (n_method[i] == 0) begin failures++; $display("FAIL generator %0d never used", i); end
    end
    checks += 8;
    if (n_level0 == 0) begin failures++; $display("FAIL no level-0 path"); end
    if (n_coarse == 0) begin failures++; $display("FAIL no coarse path"); end
    if (n_stall == 0)  begin failures++; $display("FAIL no input stall"); end
    if (n_sat == 0)    begin failures++; $display("FAIL no saturation"); end
    if (n_clear == 0)  begin failures++; $display("FAIL no clear"); end
    if (n_b2b == 0)    begin failures++; $display("FAIL no back-to-back path"); end
    if (n_pos == 0)    begin failures++; $display("FAIL no positive difference"); end
    if (n_neg == 0)    begin failures++; $display("FAIL no negative difference"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

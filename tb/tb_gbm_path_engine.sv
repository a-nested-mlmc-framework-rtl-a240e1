// tb_gbm_path_engine -- runs fine and coarse GBM paths at levels 0 to 6 and
// compares the terminal values, the saturation flag and the timing with a
// model that repeats every rounding of the scheme in real arithmetic:
//   mul1 = q(con2 z), sum1 = q(con1 + mul1), mul2 = q(S sum1), S = q(S + mul2)
// and, for the coarse path, mul2c = q(S^c_even sum1), S^c = q(S^c + mul2c).
// Increments arrive with random gaps (z_valid low) in half of the paths and
// back to back in the other half, where start-to-done must take exactly
// 2^level cycles.  The last paths push S out of its range to check the clamp.
module tb_gbm_path_engine;
  import tb_ref_pkg::*;
  import mlmc_pkg::*;

  localparam int D = D_DEF;
  localparam int LZ = E_Z_DEF - D, LC1 = E_CON1_DEF - D, LC2 = E_CON2_DEF - D;
  localparam int LM1 = E_MUL1_DEF - D, LS1 = E_SUM1_DEF - D;
  localparam int LM2 = E_MUL2_DEF - D, LS = E_S_DEF - D;

  logic clk = 0;
  always #5 clk = ~clk;

  logic              rst_n = 0;
  logic [3:0]        level = '0;
  logic signed [D:0] s0 = '0, con1 = '0, con2 = '0, z = '0;
  logic              start = 0, z_valid = 0;
  logic              busy, z_ready, done, has_coarse, path_sat;
  logic signed [D:0] s_fine, s_coarse;

  gbm_path_engine dut (
    .clk, .rst_n, .level, .s0, .con1, .con2, .start, .busy,
    .z_valid, .z, .z_ready, .done, .has_coarse, .s_fine, .s_coarse, .path_sat
  );

  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc++;

  task automatic check(input string what, input longint got, input longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    #5000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_path(input int lvl, input real r_con1, input real r_con2,
                          input bit stalls, input bit big_z);
    bit     s, anysat;
    longint c1, c2, zi, m1, s1, m2f, m2c, sf, sc, sce, sf_n, sc_n, base;
    int     n = 2 ** lvl;
    int     t0, t1, taken;
    anysat = 0;
    c1 = rq(r_con1, D, LC1, s);
    c2 = rq(r_con2, D, LC2, s);
    sf = rq(1.0, D, LS, s);
    sc = sf; sce = sf;

    @(negedge clk);
    level = 4'(lvl); s0 = (D+1)'(sf); con1 = (D+1)'(c1); con2 = (D+1)'(c2);
    start = 1;
    check("idle z_ready", longint'(z_ready), 0);
    @(negedge clk) start = 0;
    t0 = cyc;   // counts the edge that took start
    check("busy after start", longint'(busy), 1);

    taken = 0;
    while (taken < n) begin
      if (big_z) zi = rq(3.9, D, LZ, s);
      else       zi = rq(norm_inv((real'($urandom_range(65535, 0)) + 0.5) / 65536.0), D, LZ, s);
      z = (D+1)'(zi);
      z_valid = stalls ? ($urandom_range(2, 0) != 0) : 1'b1;
      if (z_valid) begin
        // model of one step
        m1   = rq(real'(c2) * pow2(LC2) * real'(zi) * pow2(LZ), D, LM1, s);  anysat |= s;
        s1   = rq(real'(c1) * pow2(LC1) + real'(m1) * pow2(LM1), D, LS1, s); anysat |= s;
        m2f  = rq(real'(sf) * pow2(LS) * real'(s1) * pow2(LS1), D, LM2, s);  anysat |= s;
        sf_n = rq(real'(sf) * pow2(LS) + real'(m2f) * pow2(LM2), D, LS, s);  anysat |= s;
        base = (taken % 2 == 1) ? sce : sc;
        m2c  = rq(real'(base) * pow2(LS) * real'(s1) * pow2(LS1), D, LM2, s); if (lvl > 0) anysat |= s;
        sc_n = rq(real'(sc) * pow2(LS) + real'(m2c) * pow2(LM2), D, LS, s);   if (lvl > 0) anysat |= s;
        if (taken % 2 == 0) sce = sc;
        sf = sf_n; sc = sc_n;
        taken++;
      end
      @(posedge clk);
      if (z_valid) check("z_ready while running", longint'(z_ready), 1);
      @(negedge clk);
      if (taken < n) check("no early done", longint'(done), 0);
    end
    z_valid = 0;
    t1 = cyc;
    check("done pulse", longint'(done), 1);
    check("idle after path", longint'(busy), 0);
    if (!stalls) check("cycles start..last step", t1 - t0, n);
    check("s_fine", longint'(s_fine), sf);
    check("has_coarse", longint'(has_coarse), longint'(lvl > 0));
    if (lvl > 0) check("s_coarse", longint'(s_coarse), sc);
    check("path_sat", longint'(path_sat), longint'(anysat));
    @(negedge clk);
    check("done is one cycle", longint'(done), 0);
    check("result held", longint'(s_fine), sf);
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int lvl = 0; lvl <= 6; lvl++) begin
      for (int p = 0; p < 6; p++) begin
        real h;
        h = pow2(-lvl);
        run_path(lvl, 0.05 * h, 0.2 * $sqrt(h), p % 2 == 1, 1'b0);
      end
    end
    // clamping: large constant increments drive S past 2^E_S
    run_path(5, 0.06, 0.24, 1'b0, 1'b1);
    run_path(3, 0.06, 0.24, 1'b1, 1'b1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_rng_sum_lut -- checks the sum-of-variables generator (method 2) for
// every input integer in two configurations: d = 10 with n = 2 (table of 16
// entries, loaded with the method-1 means of a 5-bit table divided by sqrt 2,
// the starting point of the table fit) and d = 10 with n = 5 (table of 2
// entries, loaded with large random values so that the clamp is exercised).
// Expected values are formed by splitting the integer arithmetically.
module tb_rng_sum_lut;
  import tb_ref_pkg::*;

  localparam int D   = 10;
  localparam int DZ  = 16;
  localparam int LSB = 2 - DZ;

  logic clk = 0;
  always #5 clk = ~clk;

  // n = 2
  logic               we2 = 0;
  logic [3:0]         addr2 = '0;
  logic signed [DZ:0] wd2 = '0;
  logic [D-1:0]       j = '0;
  logic signed [DZ:0] z2, z5;
  logic               sat2, sat5;
  rng_sum_lut #(.RNG_D(D), .RNG_N(2), .D_Z(DZ)) dut2 (
    .clk, .lut_we(we2), .lut_addr(addr2), .lut_wdata(wd2), .j, .z(z2), .sat(sat2)
  );
  // n = 5
  logic               we5 = 0;
  logic [0:0]         addr5 = '0;
  logic signed [DZ:0] wd5 = '0;
  rng_sum_lut #(.RNG_D(D), .RNG_N(5), .D_Z(DZ)) dut5 (
    .clk, .lut_we(we5), .lut_addr(addr5), .lut_wdata(wd5), .j, .z(z5), .sat(sat5)
  );

  int checks = 0, failures = 0;
  longint t2 [16];
  longint t5 [2];

  function automatic longint expect_sum(input int jj, input int n, input longint t[],
                                        output bit sat);
    int     f = D / n;
    longint acc = 0, mx = (longint'(1) << DZ) - 1;
    for (int i = 0; i < n; i++) begin
      int v = (jj / (2 ** (D - (i + 1) * f))) % (2 ** f);
      int k = v % (2 ** (f - 1));
      if (v >= 2 ** (f - 1)) acc -= t[k];
      else                   acc += t[k];
    end
    sat = 0;
    if (acc > mx)  begin acc = mx;  sat = 1; end
    if (acc < -mx) begin acc = -mx; sat = 1; end
    return acc;
  endfunction

  initial begin
    #10000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit s, es;
    longint e;
    int nsat = 0;
    for (int k = 0; k < 16; k++) begin
      t2[k] = rq(pwc_mean(5, k) / $sqrt(2.0), DZ, LSB, s);
      @(negedge clk);
      we2 = 1; addr2 = 4'(k); wd2 = (DZ+1)'(t2[k]);
    end
    @(negedge clk) we2 = 0;
    for (int k = 0; k < 2; k++) begin
      t5[k] = longint'($urandom_range(30000, 0)) - 5000;
      @(negedge clk);
      we5 = 1; addr5 = 1'(k); wd5 = (DZ+1)'(t5[k]);
    end
    @(negedge clk) we5 = 0;

    for (int jj = 0; jj < 2 ** D; jj++) begin
      j = D'(jj);
      #1;
      e = expect_sum(jj, 2, t2, es);
      checks++;
      if (longint'(z2) != e || sat2 != es) begin
        failures++;
        if (failures < 10) $display("FAIL n=2 j=%0d z=%0d expected %0d", jj, z2, e);
      end
      e = expect_sum(jj, 5, t5, es);
      nsat += int'(es);
      checks++;
      if (longint'(z5) != e || sat5 != es) begin
        failures++;
        if (failures < 10) $display("FAIL n=5 j=%0d z=%0d sat=%0b expected %0d sat=%0b",
                                    jj, z5, sat5, e, es);
      end
    end
    $display("n=5 configuration clamped %0d of %0d outputs", nsat, 2 ** D);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

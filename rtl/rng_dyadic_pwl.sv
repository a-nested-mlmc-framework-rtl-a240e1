// rng_dyadic_pwl -- approximate normal generator, piecewise-linear inverse
// CDF on dyadic intervals (method 3).
//
// The leading bit of the d-bit uniform integer j is a sign; the other d-1
// bits form k.  The intervals [2^(i-1), 2^i - 1] of k halve in length towards
// the tail of the distribution, and interval i is found from the position of
// the leading one of k (i = position + 1, i in 1..d-1).  Each interval has
// its own line a_i + b_i k, so the table holds only d-1 coefficient pairs.
// As in method 1, the lower half (sign bit 0) uses k directly and the upper
// half mirrors k about 1/2 and negates the result, so that the same integer
// gives the same interval of u on the host.  k = 0 lies in no interval of
// that definition; this design puts it in interval 1, so the first pair
// covers k = 0 and k = 1.
//
// a and b are signed fixed-point (A: D_A+1 bits, LSB 2^(E_A-D_A); B: D_B+1
// bits, LSB 2^(E_B-D_B)); b*k + a is formed exactly and rounded once to the Z
// format with round-to-nearest.  Coefficients are written on clk with
// lut_we at address i-1.  The lookup is combinational.
module rng_dyadic_pwl #(
  parameter int unsigned RNG_D = mlmc_pkg::RNG_D_DEF,
  parameter int unsigned D_Z   = mlmc_pkg::D_DEF,
  parameter int          E_Z   = mlmc_pkg::E_Z_DEF,
  parameter int unsigned D_A   = mlmc_pkg::D_A_DEF,
  parameter int          E_A   = mlmc_pkg::E_A_DEF,
  parameter int unsigned D_B   = mlmc_pkg::D_B_DEF,
  parameter int          E_B   = mlmc_pkg::E_B_DEF,
  localparam int unsigned AW   = $clog2(RNG_D - 1)
) (
  input  logic                    clk,
  input  logic                    lut_we,
  input  logic [AW-1:0]           lut_addr,
  input  logic signed [D_A:0]     lut_a,
  input  logic signed [D_B:0]     lut_b,
  input  logic [RNG_D-1:0]        j,
  output logic signed [D_Z:0]     z,
  output logic                    sat
);
  localparam int unsigned ENTRIES = RNG_D - 1;
  localparam int LSB_A = E_A - int'(D_A);
  localparam int LSB_B = E_B - int'(D_B);
  localparam int LSB_C = (LSB_A < LSB_B) ? LSB_A : LSB_B;
  localparam int SA    = LSB_A - LSB_C;
  localparam int SB    = LSB_B - LSB_C;
  localparam int PROD_W = int'(D_B) + 1 + int'(RNG_D);   // b * k, k < 2^(d-1)
  localparam int W      = mlmc_pkg::imax(int'(D_A) + 1 + SA, PROD_W + SB) + 1;

  logic signed [D_A:0] lut_av [ENTRIES];
  logic signed [D_B:0] lut_bv [ENTRIES];

  always_ff @(posedge clk) begin
    if (lut_we) begin
      lut_av[lut_addr] <= lut_a;
      lut_bv[lut_addr] <= lut_b;
    end
  end

  logic                    sgn;
  logic [RNG_D-2:0]        k;
  logic [AW-1:0]           seg;     // interval index i-1
  logic signed [W-1:0]     lin;
  logic signed [D_Z:0]     zr;

  always_comb begin
    sgn = j[RNG_D-1];
    k   = sgn ? ~j[RNG_D-2:0] : j[RNG_D-2:0];
    seg = '0;
    for (int unsigned p = 0; p < RNG_D - 1; p++) begin
      if (k[p]) seg = AW'(p);
    end
    lin = (W'(lut_av[seg]) <<< SA)
        + ((W'(lut_bv[seg]) * W'($signed({1'b0, k}))) <<< SB);
  end

  fxp_requant #(
    .IN_W(W), .IN_LSB(LSB_C), .OUT_D(D_Z), .OUT_LSB(E_Z - int'(D_Z))
  ) u_round (
    .in_val(lin), .out_val(zr), .sat(sat)
  );

  assign z = sgn ? -zr : zr;

endmodule

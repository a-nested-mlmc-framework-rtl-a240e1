// rng_sum_lut -- approximate normal generator as the sum of n low-precision
// variables read from one small table (method 2).
//
// The d-bit uniform integer j is cut into n fields of d/n bits, the first
// field being the most significant.  In each field the leading bit is a sign
// and the remaining d/n-1 bits index a table of 2^(d/n-1) values X_k, which
// are fitted off-chip so that the sums +-X_k +-X_l ... approximate a
// normal variable (each X about N(0,1/n)).  All n fields read the same table
// through n read ports; the output is the sum of the n signed values,
// clamped to the Z format.  A set sign bit negates its table value (the
// paper writes the sums as +-X_k +-X_l without fixing which bit value is
// which sign).
//
// The coupling with the full-precision variable goes through a permutation
// table kept on the host, so nothing here is mirrored.
//
// Interface: table words are in the Z format (D_Z+1 bits, LSB 2^(E_Z-D_Z)),
// written on clk with lut_we.  The lookup is combinational.
module rng_sum_lut #(
  parameter int unsigned RNG_D = mlmc_pkg::RNG_D_DEF,
  parameter int unsigned RNG_N = mlmc_pkg::RNG_N_DEF,
  parameter int unsigned D_Z   = mlmc_pkg::D_DEF
) (
  input  logic                    clk,
  input  logic                    lut_we,
  input  logic [RNG_D/RNG_N-2:0]  lut_addr,
  input  logic signed [D_Z:0]     lut_wdata,
  input  logic [RNG_D-1:0]        j,
  output logic signed [D_Z:0]     z,
  output logic                    sat
);
  localparam int unsigned F       = RNG_D / RNG_N;     // bits per field
  localparam int unsigned ENTRIES = 2 ** (F - 1);
  localparam int unsigned SUM_W   = D_Z + 1 + $clog2(RNG_N + 1);

  initial begin
    assert (RNG_D % RNG_N == 0) else $error("RNG_N must divide RNG_D");
    assert (F >= 2) else $error("each field needs a sign and an index bit");
  end

  logic signed [D_Z:0] lut [ENTRIES];

  always_ff @(posedge clk) begin
    if (lut_we) lut[lut_addr] <= lut_wdata;
  end

  logic signed [SUM_W-1:0] acc;

  always_comb begin
    logic [F-1:0]        fld;
    logic signed [D_Z:0] x;
    acc = '0;
    for (int unsigned i = 0; i < RNG_N; i++) begin
      fld = j[RNG_D-1-i*F -: F];
      x   = lut[fld[F-2:0]];
      if (fld[F-1]) acc = acc - SUM_W'(x);
      else          acc = acc + SUM_W'(x);
    end
  end

  fxp_requant #(
    .IN_W(SUM_W), .IN_LSB(0), .OUT_D(D_Z), .OUT_LSB(0)
  ) u_clamp (
    .in_val(acc), .out_val(z), .sat(sat)
  );

endmodule

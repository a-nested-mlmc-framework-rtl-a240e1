// rng_pwc_lut -- approximate normal generator, piecewise-constant inverse CDF
// on uniform intervals (method 1).
//
// The d-bit uniform integer j stands for u in [j 2^-d, (j+1) 2^-d).  The
// table holds 2^(d-1) constants Z_k, the mean of the inverse normal CDF over
// the k-th interval of [0, 1/2); these are negative and are computed off-chip
// and written through the write port.  The leading bit of j is the sign: when
// it is 0 (u < 1/2) the output is Z_k with k the other d-1 bits of j; when it
// is 1 the interval is mirrored about 1/2 (k = bitwise complement of the low
// bits) and the output is -Z_k, using the symmetry Phi^-1(u) = -Phi^-1(1-u).
// The mirroring keeps the approximate value tied to the same interval of u as
// the full-precision value computed from the same integer; that index
// mapping is this design's reading of "the leading bit of j gives the sign".
//
// Interface: table words are signed fixed-point in the Z format (D_Z+1 bits,
// LSB 2^(E_Z-D_Z)), written synchronously on clk with lut_we.  The lookup
// from j to z is combinational (a distributed-RAM read).
module rng_pwc_lut #(
  parameter int unsigned RNG_D = mlmc_pkg::RNG_D_DEF,
  parameter int unsigned D_Z   = mlmc_pkg::D_DEF
) (
  input  logic                    clk,
  // table load
  input  logic                    lut_we,
  input  logic [RNG_D-2:0]        lut_addr,
  input  logic signed [D_Z:0]     lut_wdata,
  // lookup
  input  logic [RNG_D-1:0]        j,
  output logic signed [D_Z:0]     z
);
  localparam int unsigned ENTRIES = 2 ** (RNG_D - 1);

  logic signed [D_Z:0] lut [ENTRIES];

  always_ff @(posedge clk) begin
    if (lut_we) lut[lut_addr] <= lut_wdata;
  end

  logic                sgn;
  logic [RNG_D-2:0]    idx;
  logic signed [D_Z:0] mag;

  always_comb begin
    sgn = j[RNG_D-1];
    idx = sgn ? ~j[RNG_D-2:0] : j[RNG_D-2:0];
    mag = lut[idx];
    z   = sgn ? -mag : mag;
  end

endmodule

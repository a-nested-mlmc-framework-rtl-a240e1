// call_payoff -- European call payoffs of the fine and coarse terminal asset
// values of one low-precision sample and the multilevel difference.
//
//     p_fine   = max(S^f_N - K, 0)
//     p_coarse = max(S^c_N - K, 0), or 0 at level 0 (P_{-1} = 0)
//     delta    = p_fine - p_coarse
//
// All values keep the LSB of the asset-price format, so nothing is rounded;
// the word widths grow by the bits the subtraction needs.  The payoffs are
// undiscounted: the factor exp(-rT) is a constant that the host applies to
// the estimated mean.  Combinational.
module call_payoff #(
  parameter int unsigned D_S = mlmc_pkg::D_DEF
) (
  input  logic signed [D_S:0]   s_fine,
  input  logic signed [D_S:0]   s_coarse,
  input  logic                  has_coarse,
  input  logic signed [D_S:0]   strike,
  output logic signed [D_S+1:0] p_fine,
  output logic signed [D_S+1:0] p_coarse,
  output logic signed [D_S+2:0] delta
);
  logic signed [D_S+1:0] xf, xc;

  always_comb begin
    xf       = (D_S+2)'(s_fine)   - (D_S+2)'(strike);
    xc       = (D_S+2)'(s_coarse) - (D_S+2)'(strike);
    p_fine   = (xf > 0) ? xf : '0;
    p_coarse = (has_coarse && xc > 0) ? xc : '0;
    delta    = (D_S+3)'(p_fine) - (D_S+3)'(p_coarse);
  end

endmodule

// mlmc_accumulator -- running sums from which the host forms the Monte Carlo
// estimate of one level expectation and its variance.
//
// For every in_valid cycle it adds 1 to count, in_val to sum and in_val^2 to
// sumsq.  The mean is sum/count and the sample variance
// (sumsq - sum^2/count)/(count-1), both in units of the input LSB (squared
// for sumsq).  The default widths cannot overflow before count wraps:
// SUM_W = IN_W + CNT_W and SQ_W = 2 IN_W + CNT_W.  clear zeroes the three
// registers (it wins over in_valid in the same cycle).  Results are
// registered: a sample taken at one rising edge is visible after it.
module mlmc_accumulator #(
  parameter int unsigned IN_W  = mlmc_pkg::D_DEF + 3,
  parameter int unsigned CNT_W = 32,
  parameter int unsigned SUM_W = IN_W + CNT_W,
  parameter int unsigned SQ_W  = 2 * IN_W + CNT_W
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    clear,
  input  logic                    in_valid,
  input  logic signed [IN_W-1:0]  in_val,
  output logic [CNT_W-1:0]        count,
  output logic signed [SUM_W-1:0] sum,
  output logic [SQ_W-1:0]         sumsq
);
  logic [2*IN_W-1:0] sq;
  assign sq = (2*IN_W)'($signed((2*IN_W)'(in_val)) * $signed((2*IN_W)'(in_val)));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      count <= '0;
      sum   <= '0;
      sumsq <= '0;
    end else if (clear) begin
      count <= '0;
      sum   <= '0;
      sumsq <= '0;
    end else if (in_valid) begin
      count <= count + 1'b1;
      sum   <= sum + SUM_W'(in_val);
      sumsq <= sumsq + SQ_W'(sq);
    end
  end

endmodule

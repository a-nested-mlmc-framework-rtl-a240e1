// fxp_requant -- rounds an exact signed fixed-point value to a coarser (or
// finer) fixed-point format, with round-to-nearest and symmetric saturation.
//
// The input is a signed IN_W-bit integer whose LSB weighs 2^IN_LSB.  The
// output is a signed (OUT_D+1)-bit integer whose LSB weighs 2^OUT_LSB, where
// OUT_LSB = E - D of the target variable.  When the output LSB is coarser
// the value is shifted right with round-to-nearest, which keeps the rounding
// error within half an output LSB as the error model requires; ties round
// towards +infinity (the tie rule is this design's choice).  When it is finer
// the value is shifted left exactly.  A result outside +-(2^OUT_D - 1) is
// clamped to the nearest end of that range and flagged on `sat`; the
// symmetric range is the one of a sign-and-magnitude number with OUT_D
// magnitude bits.  Purely combinational.
module fxp_requant #(
  parameter int unsigned IN_W    = 32,
  parameter int          IN_LSB  = -30,
  parameter int unsigned OUT_D   = 16,
  parameter int          OUT_LSB = -14
) (
  input  logic signed [IN_W-1:0]  in_val,
  output logic signed [OUT_D:0]   out_val,
  output logic                    sat
);
  localparam int SH    = OUT_LSB - IN_LSB;          // >0: drop bits
  localparam int LSH   = (SH < 0) ? -SH : 0;
  localparam int EXT_W = mlmc_pkg::imax(int'(IN_W) + LSH + 2, int'(OUT_D) + 3);

  localparam logic signed [EXT_W-1:0] MAXV = (EXT_W)'((64'sd1 <<< OUT_D) - 1);
  localparam logic signed [EXT_W-1:0] MINV = -MAXV;

  logic signed [EXT_W-1:0] ext;
  logic signed [EXT_W-1:0] scaled;

  assign ext = EXT_W'(in_val);

  if (SH > 0) begin : g_round
    localparam logic signed [EXT_W-1:0] HALF = EXT_W'(64'sd1 <<< (SH - 1));
    assign scaled = (ext + HALF) >>> SH;
  end else begin : g_exact
    assign scaled = ext <<< LSH;
  end

  always_comb begin
    sat = 1'b0;
    if (scaled > MAXV) begin
      out_val = MAXV[OUT_D:0];
      sat     = 1'b1;
    end else if (scaled < MINV) begin
      out_val = MINV[OUT_D:0];
      sat     = 1'b1;
    end else begin
      out_val = scaled[OUT_D:0];
    end
  end

endmodule

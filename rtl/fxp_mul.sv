// fxp_mul -- product of two signed fixed-point variables, rounded to the
// format of the result variable.
//
// a has DA magnitude bits and LSB 2^LA, b has DB bits and LSB 2^LB.  The
// exact product (LSB 2^(LA+LB)) is rounded to nearest and clamped to the
// result format (DO bits, LSB 2^LO) by fxp_requant.  Combinational.
module fxp_mul #(
  parameter int unsigned DA = 16,
  parameter int          LA = -14,
  parameter int unsigned DB = 16,
  parameter int          LB = -14,
  parameter int unsigned DO = 16,
  parameter int          LO = -14
) (
  input  logic signed [DA:0] a,
  input  logic signed [DB:0] b,
  output logic signed [DO:0] y,
  output logic               sat
);
  localparam int unsigned PW = DA + DB + 2;

  logic signed [PW-1:0] p;
  assign p = PW'(a) * PW'(b);

  fxp_requant #(.IN_W(PW), .IN_LSB(LA + LB), .OUT_D(DO), .OUT_LSB(LO))
    u_rq (.in_val(p), .out_val(y), .sat(sat));

endmodule

// fxp_add -- sum of two signed fixed-point variables, rounded to the format
// of the result variable.
//
// The operands are aligned to the finer of their two LSBs, added exactly and
// then rounded to nearest and clamped to the result format (DO bits, LSB
// 2^LO) by fxp_requant.  Combinational.
module fxp_add #(
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
  localparam int LC = (LA < LB) ? LA : LB;
  localparam int SA = LA - LC;
  localparam int SB = LB - LC;
  localparam int W  = mlmc_pkg::imax(int'(DA) + 1 + SA, int'(DB) + 1 + SB) + 1;

  logic signed [W-1:0] s;
  assign s = (W'(a) <<< SA) + (W'(b) <<< SB);

  fxp_requant #(.IN_W(W), .IN_LSB(LC), .OUT_D(DO), .OUT_LSB(LO))
    u_rq (.in_val(s), .out_val(y), .sat(sat));

endmodule

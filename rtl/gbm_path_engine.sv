// gbm_path_engine -- low-precision Euler-Maruyama paths of geometric
// Brownian motion for one level of the nested multilevel estimator.
//
// One time step per accepted normal increment z_i, in the order of the
// decomposed scheme
//     mul1 = con2 * z_i          sum1 = con1 + mul1
//     mul2 = S * sum1            S    = S + mul2
// where con1 = r h and con2 = sigma sqrt(h) are level constants computed off
// chip.  Every intermediate is rounded to nearest to its own fixed-point
// format (exponent E_x, bit-width D_x, LSB 2^(E_x-D_x)), so each variable can
// be given the bit-width the offline optimisation assigns to it.
//
// Alongside the fine path of 2^level steps the engine runs the coarse path of
// the same sample with the same increments: the coarse drift and volatility
// are frozen at even steps, S^c_{i+1} = S^c_i + S^c_{2 floor(i/2)} sum1_i, so
// the coarse path reuses sum1 and needs one extra multiplier, one adder and a
// register for S^c at the last even step.  At level 0 the coarse path is
// computed but meaningless (has_coarse = 0).  Fine and coarse variables share
// formats; that sharing is this design's choice.
//
// Timing: start is taken when idle and loads S^f = S^c = s0.  The engine then
// asserts z_ready and consumes one z per cycle in which z_valid is high;
// after the 2^level-th increment it returns to idle and pulses done for one
// cycle with s_fine and s_coarse valid (they hold until the next start).
// With z_valid always high a path takes 2^level + 1 cycles from start to the
// next start.  path_sat reports whether any rounding in the path clamped.
//
// An assertion forbids start while busy. It reads rst_n in its disable
// condition, so lint reports rst_n as used both as an asynchronous reset and
// as synchronous logic, here and in any module that instantiates this one.
// The assertion adds no hardware.
module gbm_path_engine #(
  parameter int unsigned LEVEL_W = mlmc_pkg::LEVEL_W_DEF,
  parameter int unsigned D_Z     = mlmc_pkg::D_DEF,
  parameter int          E_Z     = mlmc_pkg::E_Z_DEF,
  parameter int unsigned D_CON1  = mlmc_pkg::D_DEF,
  parameter int          E_CON1  = mlmc_pkg::E_CON1_DEF,
  parameter int unsigned D_CON2  = mlmc_pkg::D_DEF,
  parameter int          E_CON2  = mlmc_pkg::E_CON2_DEF,
  parameter int unsigned D_MUL1  = mlmc_pkg::D_DEF,
  parameter int          E_MUL1  = mlmc_pkg::E_MUL1_DEF,
  parameter int unsigned D_SUM1  = mlmc_pkg::D_DEF,
  parameter int          E_SUM1  = mlmc_pkg::E_SUM1_DEF,
  parameter int unsigned D_MUL2  = mlmc_pkg::D_DEF,
  parameter int          E_MUL2  = mlmc_pkg::E_MUL2_DEF,
  parameter int unsigned D_S     = mlmc_pkg::D_DEF,
  parameter int          E_S     = mlmc_pkg::E_S_DEF
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // per-level configuration, sampled at start
  input  logic [LEVEL_W-1:0]        level,
  input  logic signed [D_S:0]       s0,
  input  logic signed [D_CON1:0]    con1,
  input  logic signed [D_CON2:0]    con2,
  // path control
  input  logic                      start,
  output logic                      busy,
  // increments
  input  logic                      z_valid,
  input  logic signed [D_Z:0]       z,
  output logic                      z_ready,
  // result
  output logic                      done,
  output logic                      has_coarse,
  output logic signed [D_S:0]       s_fine,
  output logic signed [D_S:0]       s_coarse,
  output logic                      path_sat
);
  localparam int L_Z    = E_Z    - int'(D_Z);
  localparam int L_CON1 = E_CON1 - int'(D_CON1);
  localparam int L_CON2 = E_CON2 - int'(D_CON2);
  localparam int L_MUL1 = E_MUL1 - int'(D_MUL1);
  localparam int L_SUM1 = E_SUM1 - int'(D_SUM1);
  localparam int L_MUL2 = E_MUL2 - int'(D_MUL2);
  localparam int L_S    = E_S    - int'(D_S);
  localparam int unsigned STEP_W = 2 ** LEVEL_W;

  typedef enum logic {IDLE, RUN} state_e;

  state_e                  state_q;
  logic [STEP_W-1:0]       step_q, last_q;
  logic [LEVEL_W-1:0]      level_q;
  logic signed [D_CON1:0]  con1_q;
  logic signed [D_CON2:0]  con2_q;
  logic signed [D_S:0]     sf_q, sc_q, sc_even_q;
  logic                    sat_q, done_q;

  // ---- one time step (combinational) -------------------------------------
  logic signed [D_MUL1:0]  mul1;
  logic signed [D_SUM1:0]  sum1;
  logic signed [D_MUL2:0]  mul2f, mul2c;
  logic signed [D_S:0]     sf_n, sc_n, sc_base;
  logic [5:0]              sat_v;

  fxp_mul #(.DA(D_CON2), .LA(L_CON2), .DB(D_Z), .LB(L_Z), .DO(D_MUL1), .LO(L_MUL1))
    u_mul1 (.a(con2_q), .b(z), .y(mul1), .sat(sat_v[0]));

  fxp_add #(.DA(D_CON1), .LA(L_CON1), .DB(D_MUL1), .LB(L_MUL1), .DO(D_SUM1), .LO(L_SUM1))
    u_sum1 (.a(con1_q), .b(mul1), .y(sum1), .sat(sat_v[1]));

  fxp_mul #(.DA(D_S), .LA(L_S), .DB(D_SUM1), .LB(L_SUM1), .DO(D_MUL2), .LO(L_MUL2))
    u_mul2f (.a(sf_q), .b(sum1), .y(mul2f), .sat(sat_v[2]));

  fxp_add #(.DA(D_S), .LA(L_S), .DB(D_MUL2), .LB(L_MUL2), .DO(D_S), .LO(L_S))
    u_sf (.a(sf_q), .b(mul2f), .y(sf_n), .sat(sat_v[3]));

  // coarse path: drift and volatility frozen at the last even step
  assign sc_base = step_q[0] ? sc_even_q : sc_q;

  fxp_mul #(.DA(D_S), .LA(L_S), .DB(D_SUM1), .LB(L_SUM1), .DO(D_MUL2), .LO(L_MUL2))
    u_mul2c (.a(sc_base), .b(sum1), .y(mul2c), .sat(sat_v[4]));

  fxp_add #(.DA(D_S), .LA(L_S), .DB(D_MUL2), .LB(L_MUL2), .DO(D_S), .LO(L_S))
    u_sc (.a(sc_q), .b(mul2c), .y(sc_n), .sat(sat_v[5]));

  // ---- control --------------------------------------------------------------
  logic step_fire;
  assign z_ready   = (state_q == RUN);
  assign step_fire = z_ready && z_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q   <= IDLE;
      step_q    <= '0;
      last_q    <= '0;
      level_q   <= '0;
      con1_q    <= '0;
      con2_q    <= '0;
      sf_q      <= '0;
      sc_q      <= '0;
      sc_even_q <= '0;
      sat_q     <= 1'b0;
      done_q    <= 1'b0;
    end else begin
      done_q <= 1'b0;
      case (state_q)
        IDLE: begin
          if (start) begin
            state_q   <= RUN;
            step_q    <= '0;
            last_q    <= STEP_W'((64'd1 << level) - 1);
            level_q   <= level;
            con1_q    <= con1;
            con2_q    <= con2;
            sf_q      <= s0;
            sc_q      <= s0;
            sc_even_q <= s0;
            sat_q     <= 1'b0;
          end
        end
        RUN: begin
          if (step_fire) begin
            sf_q   <= sf_n;
            sc_q   <= sc_n;
            if (!step_q[0]) sc_even_q <= sc_q;
            sat_q  <= sat_q | (|sat_v[3:0]) | ((level_q != '0) & (|sat_v[5:4]));
            step_q <= step_q + 1'b1;
            if (step_q == last_q) begin
              state_q <= IDLE;
              done_q  <= 1'b1;
            end
          end
        end
        default: state_q <= IDLE;
      endcase
    end
  end

  assign busy       = (state_q == RUN);
  assign done       = done_q;
  assign has_coarse = (level_q != '0);
  assign s_fine     = sf_q;
  assign s_coarse   = sc_q;
  assign path_sat   = sat_q;

  // start is only meaningful while idle
  a_no_start_when_busy: assert property (@(posedge clk) disable iff (!rst_n)
    busy |-> !start) else $error("start while a path is running");

endmodule

// nested_mlmc_fpga -- FPGA side of a nested multilevel Monte Carlo pricer:
// low-precision samples of the level difference P_l - P_{l-1} of a European
// call under geometric Brownian motion.
//
// A host supplies a stream of uniform random integers J (the same stream it
// uses for the full-precision correction samples); the top d bits of each J
// form the low-precision integer j.  j goes to three approximate normal
// generators (piecewise-constant table, sum of small-table variables,
// piecewise-linear on dyadic intervals) and rng_method selects which one
// feeds the path engine.  The engine runs the fine path of 2^level steps and
// the matching coarse path in fixed point with per-variable formats; at the
// end of each path the call payoffs and their difference are formed, sent
// out as a sample and added into count / sum / sum-of-squares registers.
//
// Run control: with the engine idle, a pulse on run_start runs n_paths paths
// back to back using the level, s0, strike, con1 (= r h) and con2
// (= sigma sqrt h) present at each path's start; run_done pulses with the
// last sample.  Each path consumes 2^level words of J and, with J always
// valid, takes 2^level + 1 cycles.  The generator tables are written through
// their own ports before a run; acc_clear zeroes the accumulator.
//
// The split between host and FPGA, the three generators, the scheme and the
// per-variable rounding follow the paper's framework; the stream handshakes,
// the run controller, the runtime choice of generator and the output
// registers are this design's own.
//
// Only the top RNG_D bits of j_data are read. The lower J_W - RNG_D bits
// stay on the port because the host needs the whole J for the full-precision
// uniform of the same sample, so lint reports them as unused. That warning is
// expected. The engine's handshake assertion also makes lint report rst_n as
// used both asynchronously and synchronously; that adds no hardware.
module nested_mlmc_fpga
  import mlmc_pkg::*;
#(
  parameter int unsigned J_W     = J_W_DEF,
  parameter int unsigned RNG_D   = RNG_D_DEF,
  parameter int unsigned RNG_N   = RNG_N_DEF,
  parameter int unsigned LEVEL_W = LEVEL_W_DEF,
  parameter int unsigned CNT_W   = 32,
  parameter int unsigned D_Z     = D_DEF,
  parameter int          E_Z     = E_Z_DEF,
  parameter int unsigned D_CON1  = D_DEF,
  parameter int          E_CON1  = E_CON1_DEF,
  parameter int unsigned D_CON2  = D_DEF,
  parameter int          E_CON2  = E_CON2_DEF,
  parameter int unsigned D_MUL1  = D_DEF,
  parameter int          E_MUL1  = E_MUL1_DEF,
  parameter int unsigned D_SUM1  = D_DEF,
  parameter int          E_SUM1  = E_SUM1_DEF,
  parameter int unsigned D_MUL2  = D_DEF,
  parameter int          E_MUL2  = E_MUL2_DEF,
  parameter int unsigned D_S     = D_DEF,
  parameter int          E_S     = E_S_DEF,
  parameter int unsigned D_A     = D_A_DEF,
  parameter int          E_A     = E_A_DEF,
  parameter int unsigned D_B     = D_B_DEF,
  parameter int          E_B     = E_B_DEF,
  localparam int unsigned DY_AW  = $clog2(RNG_D - 1),
  localparam int unsigned OUT_W  = D_S + 3
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // configuration
  input  rng_method_e               rng_method,
  input  logic [LEVEL_W-1:0]        level,
  input  logic signed [D_S:0]       s0,
  input  logic signed [D_S:0]       strike,
  input  logic signed [D_CON1:0]    con1,
  input  logic signed [D_CON2:0]    con2,
  // table loads
  input  logic                      pwc_we,
  input  logic [RNG_D-2:0]          pwc_addr,
  input  logic signed [D_Z:0]       pwc_wdata,
  input  logic                      sum_we,
  input  logic [RNG_D/RNG_N-2:0]    sum_addr,
  input  logic signed [D_Z:0]       sum_wdata,
  input  logic                      dy_we,
  input  logic [DY_AW-1:0]          dy_addr,
  input  logic signed [D_A:0]       dy_a,
  input  logic signed [D_B:0]       dy_b,
  // run control
  input  logic                      run_start,
  input  logic [CNT_W-1:0]          n_paths,
  output logic                      run_busy,
  output logic                      run_done,
  input  logic                      acc_clear,
  // uniform integer stream from the host
  input  logic                      j_valid,
  input  logic [J_W-1:0]            j_data,
  output logic                      j_ready,
  // per-sample output
  output logic                      sample_valid,
  output logic signed [D_S+1:0]     sample_p_fine,
  output logic signed [D_S+1:0]     sample_p_coarse,
  output logic signed [OUT_W-1:0]   sample_delta,
  output logic                      sample_sat,
  // accumulated statistics
  output logic [CNT_W-1:0]          acc_count,
  output logic signed [OUT_W+CNT_W-1:0]   acc_sum,
  output logic [2*OUT_W+CNT_W-1:0]  acc_sumsq,
  output logic [CNT_W-1:0]          sat_paths
);
  // ---- approximate normal generators ---------------------------------------
  logic [RNG_D-1:0]    j_lo;
  logic signed [D_Z:0] z_pwc, z_sum, z_dy, z_sel;
  logic                sat_sum, sat_dy;

  assign j_lo = j_data[J_W-1 -: RNG_D];

  rng_pwc_lut #(.RNG_D(RNG_D), .D_Z(D_Z)) u_pwc (
    .clk, .lut_we(pwc_we), .lut_addr(pwc_addr), .lut_wdata(pwc_wdata),
    .j(j_lo), .z(z_pwc)
  );

  rng_sum_lut #(.RNG_D(RNG_D), .RNG_N(RNG_N), .D_Z(D_Z)) u_sum (
    .clk, .lut_we(sum_we), .lut_addr(sum_addr), .lut_wdata(sum_wdata),
    .j(j_lo), .z(z_sum), .sat(sat_sum)
  );

  rng_dyadic_pwl #(.RNG_D(RNG_D), .D_Z(D_Z), .E_Z(E_Z),
                   .D_A(D_A), .E_A(E_A), .D_B(D_B), .E_B(E_B)) u_dy (
    .clk, .lut_we(dy_we), .lut_addr(dy_addr), .lut_a(dy_a), .lut_b(dy_b),
    .j(j_lo), .z(z_dy), .sat(sat_dy)
  );

  always_comb begin
    unique case (rng_method)
      RNG_SUM:    z_sel = z_sum;
      RNG_DYADIC: z_sel = z_dy;
      default:    z_sel = z_pwc;
    endcase
  end

  // ---- run controller --------------------------------------------------------
  logic [CNT_W-1:0] issued_q, finished_q, target_q;
  logic             running_q, run_done_q;
  logic             eng_start, eng_busy, eng_done, has_coarse, path_sat;

  assign eng_start = running_q && !eng_busy && (issued_q != target_q);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      running_q  <= 1'b0;
      run_done_q <= 1'b0;
      issued_q   <= '0;
      finished_q <= '0;
      target_q   <= '0;
    end else begin
      run_done_q <= 1'b0;
      if (!running_q) begin
        if (run_start && n_paths != '0) begin
          running_q  <= 1'b1;
          issued_q   <= '0;
          finished_q <= '0;
          target_q   <= n_paths;
        end
      end else begin
        if (eng_start) issued_q <= issued_q + 1'b1;
        if (eng_done) begin
          finished_q <= finished_q + 1'b1;
          if (finished_q + 1'b1 == target_q) begin
            running_q  <= 1'b0;
            run_done_q <= 1'b1;
          end
        end
      end
    end
  end

  assign run_busy = running_q;
  assign run_done = run_done_q;

  // ---- path engine -----------------------------------------------------------
  logic signed [D_S:0] s_fine, s_coarse;
  logic                z_ready;

  gbm_path_engine #(
    .LEVEL_W(LEVEL_W),
    .D_Z(D_Z), .E_Z(E_Z), .D_CON1(D_CON1), .E_CON1(E_CON1),
    .D_CON2(D_CON2), .E_CON2(E_CON2), .D_MUL1(D_MUL1), .E_MUL1(E_MUL1),
    .D_SUM1(D_SUM1), .E_SUM1(E_SUM1), .D_MUL2(D_MUL2), .E_MUL2(E_MUL2),
    .D_S(D_S), .E_S(E_S)
  ) u_eng (
    .clk, .rst_n,
    .level, .s0, .con1, .con2,
    .start(eng_start), .busy(eng_busy),
    .z_valid(j_valid), .z(z_sel), .z_ready,
    .done(eng_done), .has_coarse, .s_fine, .s_coarse, .path_sat
  );

  assign j_ready = z_ready;

  // a clamped increment counts as a saturated path too
  logic rng_sat_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)         rng_sat_q <= 1'b0;
    else if (eng_start) rng_sat_q <= 1'b0;
    else if (j_valid && j_ready &&
             ((rng_method == RNG_SUM && sat_sum) ||
              (rng_method == RNG_DYADIC && sat_dy)))
                        rng_sat_q <= 1'b1;
  end

  // ---- payoff and statistics -------------------------------------------------
  call_payoff #(.D_S(D_S)) u_pay (
    .s_fine, .s_coarse, .has_coarse, .strike,
    .p_fine(sample_p_fine), .p_coarse(sample_p_coarse), .delta(sample_delta)
  );

  assign sample_valid = eng_done;
  assign sample_sat   = path_sat | rng_sat_q;

  mlmc_accumulator #(.IN_W(OUT_W), .CNT_W(CNT_W)) u_acc (
    .clk, .rst_n, .clear(acc_clear),
    .in_valid(eng_done), .in_val(sample_delta),
    .count(acc_count), .sum(acc_sum), .sumsq(acc_sumsq)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                     sat_paths <= '0;
    else if (acc_clear)             sat_paths <= '0;
    else if (eng_done && sample_sat) sat_paths <= sat_paths + 1'b1;
  end

endmodule

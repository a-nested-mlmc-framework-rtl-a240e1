// mlmc_pkg -- shared types and default number formats of the low-precision
// nested-MLMC path generator.
//
// Every fixed-point variable x of the path generation is stored as a signed
// two's-complement word of D+1 bits whose least significant bit weighs
// 2^(E-D): E is the variable's exponent (|x| < 2^E) and D its bit-width, as in
// the sign-and-magnitude definition x = (-1)^s 2^(E-D) n, n < 2^D.  Values are
// kept inside the symmetric range [-(2^D-1), 2^D-1] so that the two
// representations hold exactly the same numbers.
//
// The default exponents below follow from the variable sizes of a GBM path
// with r = 0.05, sigma = 0.2, T = 1 and S0 = 1 (con1 ~ h, con2, mul1, sum1,
// mul2 ~ sqrt(h), S ~ 1).  The default bit-width of 16 for every path
// variable is the top of the range of uniform widths (4 to 16) over which the
// bit-width study sweeps; per-variable optimised widths are meant to be set
// through the parameters of the path engine for each level.
//
// The constants below serve only as parameter defaults for the modules that
// import this package. Lint of the package alone therefore reports them as
// unused.
package mlmc_pkg;

  // Selects which approximate normal generator drives the path engine.
  typedef enum logic [1:0] {
    RNG_PWC    = 2'd0,  // method 1: piecewise constant, uniform intervals
    RNG_SUM    = 2'd1,  // method 2: sum of n small-LUT variables
    RNG_DYADIC = 2'd2   // method 3: piecewise linear, dyadic intervals
  } rng_method_e;

  // Width of the uniform integer J (not given; 32 bits assumed).
  localparam int unsigned J_W_DEF = 32;
  // Bits d of the low-precision uniform integer j (example value of Sec. 3).
  localparam int unsigned RNG_D_DEF = 10;
  // Number of summed variables in method 2 (two-variable case of Sec. 3.2).
  localparam int unsigned RNG_N_DEF = 2;

  // Default bit-width of every path variable.
  localparam int unsigned D_DEF = 16;

  // Default exponents (|x| < 2^E).
  localparam int E_Z_DEF    = 2;   // approximate normal, |Z| < 4
  localparam int E_CON1_DEF = -4;  // r*h    = 0.05 at level 0
  localparam int E_CON2_DEF = -2;  // sigma*sqrt(h) = 0.2 at level 0
  localparam int E_MUL1_DEF = 0;   // con2*Z
  localparam int E_SUM1_DEF = 0;   // con1 + mul1
  localparam int E_MUL2_DEF = 1;   // S*sum1
  localparam int E_S_DEF    = 2;   // asset price

  // Method 3 coefficient formats (intercept a and slope b of a+b*k).
  localparam int unsigned D_A_DEF = 18;
  localparam int          E_A_DEF = 3;
  localparam int unsigned D_B_DEF = 24;
  localparam int          E_B_DEF = 0;

  // Largest level whose 2^level time steps the engine counts.
  localparam int unsigned LEVEL_W_DEF = 4;

  function automatic int imax(input int a, input int b);
    return (a > b) ? a : b;
  endfunction

endpackage

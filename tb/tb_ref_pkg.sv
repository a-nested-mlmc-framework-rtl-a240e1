// tb_ref_pkg -- reference arithmetic for the testbenches.
//
// Everything here works on real numbers, independently of the bit-level RTL:
// a fixed-point variable with LSB 2^lsb and d magnitude bits is modelled as
// the integer round(x / 2^lsb) (round half up), clamped to +-(2^d - 1).  The
// inverse normal CDF uses Acklam's rational approximation (relative error
// about 1e-9), which is ample for building generator tables.
package tb_ref_pkg;

  function automatic real pow2(input int e);
    real r = 1.0;
    if (e >= 0) for (int i = 0; i < e; i++) r = r * 2.0;
    else        for (int i = 0; i < -e; i++) r = r / 2.0;
    return r;
  endfunction

  // round x to the grid 2^lsb, clamp to d magnitude bits; returns the integer
  function automatic longint rq(input real x, input int d, input int lsb, output bit sat);
    real    q = x / pow2(lsb);
    longint n = longint'($floor(q + 0.5));
    longint mx = (longint'(1) << d) - 1;
    sat = 0;
    if (n > mx)  begin n = mx;  sat = 1; end
    if (n < -mx) begin n = -mx; sat = 1; end
    return n;
  endfunction

  function automatic real norm_pdf(input real x);
    return $exp(-0.5 * x * x) / $sqrt(2.0 * 3.14159265358979323846);
  endfunction

  function automatic real norm_inv(input real p);
    real a1 = -3.969683028665376e+01, a2 = 2.209460984245205e+02;
    real a3 = -2.759285104469687e+02, a4 = 1.383577518672690e+02;
    real a5 = -3.066479806614716e+01, a6 = 2.506628277459239e+00;
    real b1 = -5.447609879822406e+01, b2 = 1.615858368580409e+02;
    real b3 = -1.556989798598866e+02, b4 = 6.680131188771972e+01;
    real b5 = -1.328068155288572e+01;
    real c1 = -7.784894002430293e-03, c2 = -3.223964580411365e-01;
    real c3 = -2.400758277161838e+00, c4 = -2.549732539343734e+00;
    real c5 = 4.374664141464968e+00,  c6 = 2.938163982698783e+00;
    real d1 = 7.784695709041462e-03,  d2 = 3.224671290700398e-01;
    real d3 = 2.445134137142996e+00,  d4 = 3.754408661907416e+00;
    real q, r;
    if (p < 0.02425) begin
      q = $sqrt(-2.0 * $ln(p));
      return (((((c1*q+c2)*q+c3)*q+c4)*q+c5)*q+c6) / ((((d1*q+d2)*q+d3)*q+d4)*q+1.0);
    end else if (p <= 1.0 - 0.02425) begin
      q = p - 0.5; r = q * q;
      return (((((a1*r+a2)*r+a3)*r+a4)*r+a5)*r+a6)*q / (((((b1*r+b2)*r+b3)*r+b4)*r+b5)*r+1.0);
    end else begin
      q = $sqrt(-2.0 * $ln(1.0 - p));
      return -(((((c1*q+c2)*q+c3)*q+c4)*q+c5)*q+c6) / ((((d1*q+d2)*q+d3)*q+d4)*q+1.0);
    end
  endfunction

  // mean of the inverse normal CDF over [k 2^-d, (k+1) 2^-d), k < 2^(d-1):
  // 2^d (pdf(Phi^-1(u_k)) - pdf(Phi^-1(u_k+1)))
  function automatic real pwc_mean(input int d, input int k);
    real w  = pow2(-d);
    real f0 = (k == 0) ? 0.0 : norm_pdf(norm_inv(k * w));
    real f1 = norm_pdf(norm_inv((k + 1) * w));
    return (f0 - f1) / w;
  endfunction

endpackage

// kf_update -- one Kalman-filter measurement update for one plane.
//
// State x = (a, b) of the straight-line model m = a + b*h (see l1tf_pkg),
// covariance P = [p00 p01; p01 p11], one measurement m at lever arm h with
// variance v.  With H = [1 h]:
//   g = P*H'                 = (p00 + h*p01, p01 + h*p11)
//   S = H*P*H' + v           = g0 + h*g1 + v
//   K = g / S
//   r = m - (a + h*b)        (residual before the update)
//   x' = x + K*r,  P' = P - K*g',  chi2 increment = r*r / S.
// All values are signed Q16 fixed point in 64 bits; the magnitudes used by
// the sector processor (|P| <= 2^28, |h| < 2^17, |r| < 2^24) keep every
// product below 2^63.  S is forced to at least one LSB.  The gain is never
// rounded on its own: the module divides g*r and g*g' by S directly.
//
// Interface: purely combinational.  Used twice by kalman_fitter, once for the
// r-phi plane (a_phi, b_phi) and once for the r-z plane (a_z, b_z); with the
// linearised helix and the beamline constraint the two planes are independent,
// which is how four parameters are fitted with two 2x2 filters.
// From the description: Kalman filter, stubs added one by one, four fitted
// parameters with a beamline constraint.  Own choices: the linearised model,
// the plane split, fixed-point format.
module kf_update (
  input  logic signed [63:0] a,
  input  logic signed [63:0] b,
  input  logic signed [63:0] p00,
  input  logic signed [63:0] p01,
  input  logic signed [63:0] p11,
  input  logic signed [63:0] h,
  input  logic signed [63:0] m,
  input  logic signed [63:0] v,
  output logic signed [63:0] a_n,
  output logic signed [63:0] b_n,
  output logic signed [63:0] p00_n,
  output logic signed [63:0] p01_n,
  output logic signed [63:0] p11_n,
  output logic signed [63:0] chi2
);

  function automatic logic signed [63:0] mulq(logic signed [63:0] x, logic signed [63:0] y);
    return (x * y) >>> 16;
  endfunction

  logic signed [63:0] g0, g1, s, r;

  always_comb begin
    g0 = p00 + mulq(h, p01);
    g1 = p01 + mulq(h, p11);
    s  = g0 + mulq(h, g1) + v;
    if (s < 64'sd1) s = 64'sd1;
    r  = m - (a + mulq(h, b));
    // K*r and K*g' are formed as (g*r)/S and (g*g)/S: dividing last keeps
    // the full precision of the small covariances reached after a few stubs.
    a_n   = a + (g0 * r) / s;
    b_n   = b + (g1 * r) / s;
    p00_n = p00 - (g0 * g0) / s;
    p01_n = p01 - (g0 * g1) / s;
    p11_n = p11 - (g1 * g1) / s;
    chi2  = (r * r) / s;
  end

endmodule

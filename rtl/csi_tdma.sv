// csi_tdma: middle-knot coefficient of a three-knot natural cubic spline.
//
// Knots (X_{i-1}, M_{i-1}), (X_i, M_i), (X_{i+1}, M_{i+1}); h0 = X_i - X_{i-1},
// h1 = X_{i+1} - X_i. With natural end conditions the tridiagonal system has
// one unknown, solved in closed form:
//   s0 = (M_i - M_{i-1}) / h0,  s1 = (M_{i+1} - M_i) / h1
//   k  = 3 (s1 - s0) / (2 (h0 + h1))
// The divisions use reciprocals rh0 = 1/h0, rh1 = 1/h1, rhs = 1/(h0+h1) from the
// look-up table (RB fraction bits). s0, s1 have SF and k has KF fraction bits.
// If three_pt is low only two knots exist and k = 0 (straight line). The
// datapath (two differences, two divisions, the factors 3 and 2, final
// division) follows the paper's TDMA diagram. Combinational.
module csi_tdma
  import memd_pkg::*;
(
  input  sample_t m0, m1, m2,
  input  recip_t  rh0, rh1, rhs,
  input  logic    three_pt,
  output wide_t   s0, s1, k
);
  always_comb begin
    wide_t  d0, d1;
    xwide_t ds, num, kx;
    d0  = wide_t'(m1) - wide_t'(m0);
    d1  = wide_t'(m2) - wide_t'(m1);
    s0  = d0 * wide_t'(rh0);                          // SF = XF + RB
    s1  = d1 * wide_t'(rh1);
    ds  = xwide_t'(s1) - xwide_t'(s0);
    num = (ds <<< 1) + ds;                            // x3
    kx  = (num * xwide_t'(rhs)) >>> (SF + RB + 1 - KF);    // / (2 (h0+h1))
    if (three_pt) k = wide_t'(kx);
    else          k = wide_t'(0);
  end
endmodule

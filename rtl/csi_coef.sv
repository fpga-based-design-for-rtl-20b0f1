// csi_coef: coefficients of both cubic pieces of a three-knot natural spline.
//
// With c_{i-1} = c_{i+1} = 0 (natural ends) and c_i = k from csi_tdma:
//   piece 0 on [X_{i-1}, X_i]: a = M_{i-1}, b = s0 - h0 k / 3, c = 0, d =  k / (3 h0)
//   piece 1 on [X_i, X_{i+1}]: a = M_i,     b = s1 - 2 h1 k / 3, c = k, d = -k / (3 h1)
// which is b_j = (a_{j+1}-a_j)/h_j - h_j (2 c_j + c_{j+1}) / 3 and
// d_j = (c_{j+1} - c_j) / (3 h_j). (The paper prints c_{j+1} + c_j in d_j;
// the difference is used here because only it makes the piece reach the next
// knot.) Division by 3 is a multiplication by THIRD, division by h uses the
// table reciprocal. a has CF, b has BF, c and d have KF fraction bits.
// Combinational.
module csi_coef
  import memd_pkg::*;
#(
  parameter int IW = 10
) (
  input  sample_t       m0, m1,
  input  wide_t         s0, s1, k,
  input  logic [IW-1:0] h0, h1,
  input  recip_t        rh0, rh1,
  output spline_piece_t p0, p1
);
  always_comb begin
    xwide_t k3;                                 // k / 3, KF fraction bits
    k3 = (xwide_t'(k) * xwide_t'(THIRD)) >>> CF;
    p0.a = wide_t'(m0) <<< (CF - XF);
    p0.b = wide_t'((xwide_t'(s0) <<< (BF - SF)) - ((xwide_t'(h0) * k3) >>> (KF - BF)));
    p0.c = '0;
    p0.d = wide_t'((k3 * xwide_t'(rh0)) >>> RB);
    p1.a = wide_t'(m1) <<< (CF - XF);
    p1.b = wide_t'((xwide_t'(s1) <<< (BF - SF)) - ((xwide_t'(h1) * k3) >>> (KF - BF - 1)));
    p1.c = k;
    p1.d = -wide_t'((k3 * xwide_t'(rh1)) >>> RB);
  end
endmodule

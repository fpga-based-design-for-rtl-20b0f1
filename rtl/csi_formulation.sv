// csi_formulation: evaluates one cubic piece at offset dx from its left knot,
//   v = a + b dx + c dx^2 + d dx^3
// aligning the terms (a: CF, b: BF, c and d: KF fraction bits) to KF in a
// 128-bit accumulator; the result is returned with EF fraction bits (env_t,
// truncated). This is the paper's CSI-formulation sub-block. Combinational.
module csi_formulation
  import memd_pkg::*;
#(
  parameter int IW = 10
) (
  input  spline_piece_t p,
  input  logic [IW-1:0] dx,
  output env_t          v
);
  always_comb begin
    xwide_t x1, x2, x3, acc;
    x1  = xwide_t'(dx);
    x2  = x1 * x1;
    x3  = x2 * x1;
    acc = (xwide_t'(p.a) <<< (KF - CF)) + ((xwide_t'(p.b) * x1) <<< (KF - BF))
        + xwide_t'(p.c) * x2 + xwide_t'(p.d) * x3;
    v   = env_t'(acc >>> (KF - EF));
  end
endmodule

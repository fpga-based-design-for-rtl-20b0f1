// signal_projection: projects one N-channel sample vector onto direction KI.
//
//   y_k(t) = a_1^k x_1(t) + a_2^k x_2(t) + ... + a_N^k x_N(t)
//
// x is Q12.4 (16 bit), a_i^k is Q2.6 (8 bit) from the direction table in
// memd_pkg, so each product is Q14.10; the sum is truncated to the 24-bit Q16.8
// projected signal. Each product uses a constant CSD multiplier (shifts and
// adds only), as in the paper. Combinational; the sample registers in front of
// it belong to the sifting block. The truncation to Q16.8 is this design's
// choice.
module signal_projection
  import memd_pkg::*;
#(
  parameter int N  = 4,
  parameter int KI = 0
) (
  input  sample_t x [N],
  output proj_t   y
);
  localparam int PW = DW + CWD;          // product width, Q14.10
  localparam int SW = PW + $clog2(N) + 1;

  logic signed [PW-1:0] prod [N];

  for (genvar i = 0; i < N; i++) begin : g_mul
    csd_const_mult #(.XW(DW), .CWID(CWD), .COEF(hamm_q26(KI % HAMM_K, i % HAMM_N)))
      u_mul (.x(x[i]), .p(prod[i]));
  end

  always_comb begin
    logic signed [SW-1:0] acc;
    acc = '0;
    for (int i = 0; i < N; i++) acc = acc + SW'(prod[i]);
    y = proj_t'(acc >>> ((XF + CFR) - YF));
  end
endmodule

// csi_unit: cubic spline interpolation (CSI) of one envelope of one channel.
//
// It keeps a window of three extremum values M_{i-1}, M_i, M_{i+1}; shift
// pushes a new value m_in in at the top (the oldest drops out). The knot
// spacings h0, h1 and their table reciprocals come from the envelope
// controller, which is shared by all channels because every channel uses the
// same extrema time instants. A coefficient update takes two enables:
//   tdma_en : register s0, s1, k              (TDMA sub-block, csi_tdma)
//   coef_en : register both cubic pieces       (CSI-coefficient, csi_coef)
// Then, each cycle adv is high, v registers the chosen piece (seg) evaluated at
// offset dx (CSI-formulation, csi_formulation): one envelope sample per cycle,
// one cycle of latency. The three sub-blocks are the paper's; the register
// placement and the window handling are this design's choice.
module csi_unit
  import memd_pkg::*;
#(
  parameter int IW = 10
) (
  input  logic          clk,
  input  logic          shift,
  input  sample_t       m_in,
  input  logic          three_pt,
  input  logic [IW-1:0] h0, h1,
  input  recip_t        rh0, rh1, rhs,
  input  logic          tdma_en,
  input  logic          coef_en,
  input  logic          adv,
  input  logic          seg,
  input  logic [IW-1:0] dx,
  output env_t          v
);
  sample_t       m0, m1, m2;
  wide_t         s0_c, s1_c, k_c, s0_r, s1_r, k_r;
  spline_piece_t p0_c, p1_c, p0_r, p1_r;
  env_t          v_c;

  csi_tdma u_tdma (.m0(m0), .m1(m1), .m2(m2), .rh0(rh0), .rh1(rh1), .rhs(rhs),
                   .three_pt(three_pt), .s0(s0_c), .s1(s1_c), .k(k_c));

  csi_coef #(.IW(IW)) u_coef (.m0(m0), .m1(m1), .s0(s0_r), .s1(s1_r), .k(k_r),
                              .h0(h0), .h1(h1), .rh0(rh0), .rh1(rh1), .p0(p0_c), .p1(p1_c));

  csi_formulation #(.IW(IW)) u_form (.p(seg ? p1_r : p0_r), .dx(dx), .v(v_c));

  always_ff @(posedge clk) begin
    if (shift) begin
      m0 <= m1;
      m1 <= m2;
      m2 <= m_in;
    end
    if (tdma_en) begin
      s0_r <= s0_c;
      s1_r <= s1_c;
      k_r  <= k_c;
    end
    if (coef_en) begin
      p0_r <= p0_c;
      p1_r <= p1_c;
    end
    if (adv) v <= v_c;
  end
endmodule

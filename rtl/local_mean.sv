// local_mean: local-mean removal for one channel of one sifting iteration.
//
// For each of the 2K envelopes (a maximum and a minimum envelope per
// direction) it holds a FIFO of this channel's extremum values and a CSI unit.
// The values are pushed (val_push[e], value x_val) when the extremum is found,
// popped into the CSI window together with the shared time-instant FIFO, and
// the CSI units produce v_1(t)..v_2K(t) in lockstep. Then
//   p(t) = sum_e v_e(t),  m(t) = p(t) / 2K,  h(t) = x(t) - m(t)
// h is rounded from Q.8 to Q12.4 and saturated to 16 bits. The division by 2K
// is a right shift, so 2K must be a power of two.
// Timing: the controller issues (seg, dx) with adv; the envelopes register one
// cycle later, when x_t (read from the channel RAM) must be valid; h registers
// one cycle after that. Everything advances only when adv is high.
// The structure (FIFO/RAM of extrema, 2K CSI units, sum, divide, subtract)
// follows the paper; the number formats and rounding are this design's choice.
module local_mean
  import memd_pkg::*;
#(
  parameter int K  = 8,
  parameter int IW = 10,
  parameter int L  = 1000
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          clr,
  input  logic [2*K-1:0] val_push,
  input  sample_t       x_val,
  input  logic [2*K-1:0] pop,
  input  logic [2*K-1:0] three_pt,
  input  logic [IW-1:0] h0  [2*K],
  input  logic [IW-1:0] h1  [2*K],
  input  recip_t        rh0 [2*K],
  input  recip_t        rh1 [2*K],
  input  recip_t        rhs [2*K],
  input  logic          tdma_en,
  input  logic          coef_en,
  input  logic          adv,
  input  logic [2*K-1:0] seg,
  input  logic [IW-1:0] dx  [2*K],
  input  sample_t       x_t,
  output sample_t       h
);
  localparam int NE = 2 * K;
  localparam int SH = $clog2(NE);

  env_t    v [NE];
  sample_t head [NE];

  for (genvar e = 0; e < NE; e++) begin : g_env
    logic                    f_empty, f_full;
    logic [$clog2(L+1)-1:0]  f_count;

    sync_fifo #(.WIDTH(DW), .DEPTH(L)) u_vals (
      .clk(clk), .rst_n(rst_n), .clr(clr),
      .push(val_push[e]), .din(x_val), .pop(pop[e]), .dout(head[e]),
      .empty(f_empty), .full(f_full), .count(f_count));

    csi_unit #(.IW(IW)) u_csi (
      .clk(clk), .shift(pop[e]), .m_in(head[e]), .three_pt(three_pt[e]),
      .h0(h0[e]), .h1(h1[e]), .rh0(rh0[e]), .rh1(rh1[e]), .rhs(rhs[e]),
      .tdma_en(tdma_en), .coef_en(coef_en), .adv(adv),
      .seg(seg[e]), .dx(dx[e]), .v(v[e]));
  end

  always_ff @(posedge clk) begin
    if (adv) begin
      logic signed [EW+SH:0] p;
      wide_t m8, h8;
      p = '0;
      for (int e = 0; e < NE; e++) p = p + (EW+SH+1)'(v[e]);
      m8 = wide_t'(p) >>> SH;
      h8 = (wide_t'(x_t) <<< (EF - XF)) - m8;
      h  <= sat16((h8 + wide_t'(1 <<< (EF - XF - 1))) >>> (EF - XF));
    end
  end

  initial begin
    if ((1 << SH) != NE) $error("local_mean: 2K must be a power of two");
  end
endmodule

// sift_block: one sifting iteration of multivariate EMD on a frame of L
// N-channel samples: h(t) = x(t) - mean of 2K envelopes.
//
// Load phase (in_ready high, one vector per accepted cycle, L cycles):
//   - each channel sample is written into its dual-port RAM at address n;
//   - K projection units form y_k(n) with constant CSD multipliers;
//   - 2K extrema detectors (max and min per direction) test the middle of
//     y_k(n-2), y_k(n-1), y_k(n); on SEL the time instant n-1 goes into the
//     envelope's time-instant FIFO and x_i(n-1) into each channel's value FIFO;
//   - samples 0 and L-1 are pushed into every FIFO as end knots (one extra
//     cycle after the last sample for L-1).
// Fill: the first three knots of every envelope are popped into its window.
// Coefficient update (3 cycles): reciprocal look-up, TDMA, CSI coefficients.
// Run: for t = 0..L-1 every envelope of every channel is evaluated in
//   lockstep. Envelope e uses the window (X0, X1, X2): piece 0 on [X0, X1);
//   when t reaches X1 and the FIFO still holds knots the window slides by one
//   knot and the coefficients are recomputed (run pauses 4 cycles); in the last
//   window piece 1 covers [X1, X2]. An envelope with only the two end knots is
//   a straight line. The local-mean units output h(t) two cycles after t is
//   issued; out_valid/out_ready stall the output pipeline (and the run) when
//   the consumer is not ready. After t = L-1 is issued the block returns to the
//   load phase while the last outputs drain.
// The blocks (RAM, projection, extrema identification, FIFOs, local mean with
// CSI) and their connection follow the paper. The frame-based two-phase
// schedule, the end knots and the sliding three-knot window are this design's
// choices, since the paper does not give the schedule.
module sift_block
  import memd_pkg::*;
#(
  parameter int N  = 4,
  parameter int K  = 8,
  parameter int L  = 1000,
  parameter int IW = $clog2(L)
) (
  input  logic    clk,
  input  logic    rst_n,
  input  logic    in_valid,
  output logic    in_ready,
  input  sample_t x_in  [N],
  output logic    out_valid,
  input  logic    out_ready,
  output sample_t h_out [N],
  output logic [IW:0] ext_count [2*K]
);
  localparam int NE = 2 * K;

  typedef enum logic [2:0] {S_LOAD, S_LEND, S_FILL, S_COEF, S_RUN} state_t;

  state_t         st;
  logic [IW-1:0]  n, t;
  logic [1:0]     sub;
  logic           v1, v2;

  proj_t          y_c [K];
  proj_t          yp1 [K], yp2 [K];
  sample_t        xp1 [N];

  logic [NE-1:0]  sel, push, pop, idx_empty, need_slide, three_pt, seg;
  logic [IW-1:0]  det_idx [NE];
  logic [IW-1:0]  push_idx [NE];
  logic [IW-1:0]  idx_head [NE];
  logic [IW-1:0]  X0 [NE], X1 [NE], X2 [NE];
  logic [1:0]     npts [NE];
  logic [IW-1:0]  h0 [NE], h1 [NE], hs [NE], dx [NE];
  recip_t         rh0 [NE], rh1 [NE], rhs [NE];
  sample_t        x_val [N];
  sample_t        x_t [N];

  logic accept, first, issue, last_issue, adv, clr, tdma_en, coef_en;

  assign in_ready  = (st == S_LOAD);
  assign accept    = in_valid && in_ready;
  assign first     = accept && (n == '0);
  assign adv       = !v2 || out_ready;
  assign out_valid = v2;
  assign tdma_en   = (st == S_COEF) && (sub == 2'd1);
  assign coef_en   = (st == S_COEF) && (sub == 2'd2);
  assign issue     = (st == S_RUN) && !(|need_slide) && adv;
  assign last_issue = issue && (t == IW'(L - 1));
  assign clr       = last_issue;

  // ---------------- projection and extrema identification ----------------
  for (genvar k = 0; k < K; k++) begin : g_dir
    signal_projection #(.N(N), .KI(k)) u_proj (.x(x_in), .y(y_c[k]));

    for (genvar m = 0; m < 2; m++) begin : g_ext
      localparam int E = 2 * k + m;
      extrema_detector #(.W(YW), .IW(IW), .IS_MAX(m == 0)) u_det (
        .clk(clk), .rst_n(rst_n), .clr(first), .en(accept && (n >= IW'(2))),
        .y_prev(yp2[k]), .y_cur(yp1[k]), .y_next(y_c[k]), .n(n - 1'b1),
        .sel(sel[E]), .idx(det_idx[E]), .count(ext_count[E]));
    end
  end

  always_comb begin
    for (int e = 0; e < NE; e++) begin
      push[e]     = first || sel[e] || (st == S_LEND);
      push_idx[e] = first ? '0 : (st == S_LEND) ? IW'(L - 1) : det_idx[e];
    end
    for (int i = 0; i < N; i++) x_val[i] = first ? x_in[i] : xp1[i];
  end

  // ---------------- per-envelope knot windows ----------------
  for (genvar e = 0; e < NE; e++) begin : g_win
    logic                   f_full;
    logic [$clog2(L+1)-1:0] f_count;

    sync_fifo #(.WIDTH(IW), .DEPTH(L)) u_tfifo (
      .clk(clk), .rst_n(rst_n), .clr(clr), .push(push[e]), .din(push_idx[e]),
      .pop(pop[e]), .dout(idx_head[e]), .empty(idx_empty[e]), .full(f_full), .count(f_count));

    assign h0[e] = X1[e] - X0[e];
    assign h1[e] = X2[e] - X1[e];
    assign hs[e] = X2[e] - X0[e];
    assign three_pt[e]   = (npts[e] == 2'd3);
    assign need_slide[e] = (st == S_RUN) && three_pt[e] && (t == X1[e]) && !idx_empty[e];
    assign seg[e] = !three_pt[e] || (t >= X1[e]);
    assign dx[e]  = t - (seg[e] ? X1[e] : X0[e]);
    assign pop[e] = ((st == S_FILL) && !idx_empty[e]) || need_slide[e];

    recip_lut #(.DEPTH(1 << IW), .RB(RB)) u_r0 (.clk(clk), .addr(h0[e]), .q(rh0[e]));
    recip_lut #(.DEPTH(1 << IW), .RB(RB)) u_r1 (.clk(clk), .addr(h1[e]), .q(rh1[e]));
    recip_lut #(.DEPTH(1 << IW), .RB(RB)) u_rs (.clk(clk), .addr(hs[e]), .q(rhs[e]));

    always_ff @(posedge clk) begin
      if (!rst_n || st == S_LEND) begin
        npts[e] <= '0;
      end else if (pop[e]) begin
        X0[e] <= X1[e];
        X1[e] <= X2[e];
        X2[e] <= idx_head[e];
        if (npts[e] != 2'd3) npts[e] <= npts[e] + 1'b1;
      end
    end
  end

  // ---------------- per-channel storage and local mean ----------------
  for (genvar i = 0; i < N; i++) begin : g_ch
    dp_ram #(.WIDTH(DW), .DEPTH(L)) u_ram (
      .clk(clk), .we(accept), .waddr(n), .wdata(x_in[i]),
      .re(adv), .raddr(t), .rdata(x_t[i]));

    local_mean #(.K(K), .IW(IW), .L(L)) u_lm (
      .clk(clk), .rst_n(rst_n), .clr(clr), .val_push(push), .x_val(x_val[i]),
      .pop(pop), .three_pt(three_pt), .h0(h0), .h1(h1), .rh0(rh0), .rh1(rh1), .rhs(rhs),
      .tdma_en(tdma_en), .coef_en(coef_en), .adv(adv), .seg(seg), .dx(dx),
      .x_t(x_t[i]), .h(h_out[i]));
  end

  // ---------------- controller ----------------
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      st  <= S_LOAD;
      n   <= '0;
      t   <= '0;
      sub <= '0;
      v1  <= 1'b0;
      v2  <= 1'b0;
    end else begin
      if (adv) begin
        v1 <= issue;
        v2 <= v1;
      end
      unique case (st)
        S_LOAD: if (accept) begin
          if (n == IW'(L - 1)) begin
            n  <= '0;
            st <= S_LEND;
          end else begin
            n <= n + 1'b1;
          end
        end
        S_LEND: begin
          st  <= S_FILL;
          sub <= '0;
        end
        S_FILL: begin
          sub <= sub + 1'b1;
          if (sub == 2'd2) begin
            sub <= '0;
            st  <= S_COEF;
          end
        end
        S_COEF: begin
          sub <= sub + 1'b1;
          if (sub == 2'd2) begin
            sub <= '0;
            st  <= S_RUN;
          end
        end
        S_RUN: begin
          if (|need_slide) begin
            st  <= S_COEF;
            sub <= '0;
          end else if (issue) begin
            if (last_issue) begin
              t  <= '0;
              st <= S_LOAD;
            end else begin
              t <= t + 1'b1;
            end
          end
        end
        default: st <= S_LOAD;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (accept) begin
      for (int k = 0; k < K; k++) begin
        yp2[k] <= yp1[k];
        yp1[k] <= y_c[k];
      end
      for (int i = 0; i < N; i++) xp1[i] <= x_in[i];
    end
  end

  a_out_stable: assert property (@(posedge clk) disable iff (!rst_n)
                                 out_valid && !out_ready |=> out_valid);
  initial begin
    if (L < 3) $error("sift_block: L must be at least 3");
    if (N != HAMM_N || K > HAMM_K) $error("sift_block: direction table holds K<=8 vectors for N=4");
  end
endmodule

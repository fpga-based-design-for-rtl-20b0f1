// tb_local_mean: one channel, K=2 (four envelopes). Each envelope gets knots at
// 0, a random middle instant and T-1 (the last one only the two end knots);
// the knot values are pushed into the value FIFOs, popped into the CSI
// windows, the coefficients are computed, and t = 0..T-1 is issued with a
// random channel sample x(t). h(t) must equal x(t) minus the mean of the four
// floating-point spline envelopes within 0.1 (1.6 LSB of Q12.4), two cycles
// after issue. Repeated for several random sets of knots.
`timescale 1ns/1ps
module tb_local_mean;
  import memd_pkg::*;
  import memd_ref_pkg::*;
  localparam int K = 2, NE = 2 * K, IW = 7, L = 100, T = 100;
  localparam real TOL = 0.1;

  logic clk = 0, rst_n = 0, clr = 0;
  always #5 clk = ~clk;
  logic [NE-1:0] val_push = '0, pop = '0, three_pt = '0, seg = '0;
  sample_t x_val = '0, x_t = '0, h;
  logic [IW-1:0] h0 [NE], h1 [NE], dx [NE];
  recip_t rh0 [NE], rh1 [NE], rhs [NE];
  logic tdma_en = 0, coef_en = 0, adv = 0;

  local_mean #(.K(K), .IW(IW), .L(L)) dut (.*);

  int checks = 0, failures = 0;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic recip_t rcp(input int hh);
    return recip_t'($rtoi(16777216.0 / hh + 0.5));
  endfunction

  int  mid [NE];
  int  kv [NE][3];
  int  xs [T];
  real expv [T];

  initial begin
    for (int e = 0; e < NE; e++) begin
      h0[e] = '0; h1[e] = '0; dx[e] = '0; rh0[e] = '0; rh1[e] = '0; rhs[e] = '0;
    end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int rep = 0; rep < 6; rep++) begin
      for (int e = 0; e < NE; e++) begin
        mid[e] = $urandom_range(1, T - 2);
        for (int j = 0; j < 3; j++) kv[e][j] = $urandom_range(0, 6000) - 3000;
      end
      // push knot values: all envelopes at once, three (or two) per envelope
      for (int j = 0; j < 3; j++)
        for (int e = 0; e < NE; e++) begin
          if (e == NE - 1 && j == 1) continue;
          @(negedge clk);
          val_push = '0; val_push[e] = 1'b1; x_val = sample_t'(kv[e][j]);
        end
      @(negedge clk) val_push = '0;
      // fill the windows
      for (int j = 0; j < 3; j++) begin
        @(negedge clk);
        pop = '1;
        if (j == 2) pop[NE-1] = 1'b0;
      end
      @(negedge clk) pop = '0;
      for (int e = 0; e < NE; e++) begin
        three_pt[e] = (e != NE - 1);
        h0[e] = IW'(mid[e]); h1[e] = IW'(T - 1 - mid[e]);
        rh0[e] = rcp(mid[e]); rh1[e] = rcp(T - 1 - mid[e]); rhs[e] = rcp(T - 1);
        if (e == NE - 1) begin h1[e] = IW'(T - 1); rh1[e] = rcp(T - 1); end
      end
      tdma_en = 1;
      @(negedge clk) tdma_en = 0; coef_en = 1;
      @(negedge clk) coef_en = 0;
      for (int t = 0; t < T; t++) begin
        real s;
        s = 0.0;
        xs[t] = $urandom_range(0, 8000) - 4000;
        for (int e = 0; e < NE - 1; e++)
          s += spline3(0, mid[e], T - 1, kv[e][0] / 16.0, kv[e][1] / 16.0, kv[e][2] / 16.0, t);
        s += kv[NE-1][0] / 16.0 + (kv[NE-1][2] - kv[NE-1][0]) / 16.0 * t / (T - 1);
        expv[t] = xs[t] / 16.0 - s / NE;
      end
      // issue t, supply x(t) one cycle later, read h two cycles later
      adv = 1;
      for (int c = 0; c < T + 2; c++) begin
        @(negedge clk);
        if (c >= 2) begin
          real d;
          d = h / 16.0 - expv[c - 2];
          checks++;
          if (d > TOL || d < -TOL) begin
            failures++;
            if (failures < 10) $display("rep %0d t %0d: got %f expected %f", rep, c - 2, h / 16.0, expv[c - 2]);
          end
        end
        if (c >= 1 && c <= T) x_t = sample_t'(xs[c - 1]);
        if (c < T)
          for (int e = 0; e < NE; e++) begin
            seg[e] = (e == NE - 1) || (c >= mid[e]);
            dx[e] = IW'(seg[e] && e != NE - 1 ? c - mid[e] : c);
          end
      end
      @(negedge clk) adv = 0;
      clr = 1;
      @(negedge clk) clr = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

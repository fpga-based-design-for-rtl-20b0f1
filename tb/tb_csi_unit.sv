// tb_csi_unit: random three-knot windows (spacings 1..300, values over the
// 16-bit range); both cubic pieces are evaluated at every offset and compared
// with the natural cubic spline computed in floating point (tolerance 0.05,
// i.e. under one Q12.4 LSB). Also checks the two-knot (straight line) mode and
// that the envelope register holds while adv is low.
`timescale 1ns/1ps
module tb_csi_unit;
  import memd_pkg::*;
  import memd_ref_pkg::*;
  localparam int IW = 10;
  localparam real TOL = 0.05;

  logic clk = 0;
  always #5 clk = ~clk;
  logic shift = 0, three_pt = 0, tdma_en = 0, coef_en = 0, adv = 0, seg = 0;
  sample_t m_in = '0;
  logic [IW-1:0] h0 = '0, h1 = '0, dx = '0;
  recip_t rh0 = '0, rh1 = '0, rhs = '0;
  env_t v;

  csi_unit #(.IW(IW)) dut (.*);

  int checks = 0, failures = 0;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic recip_t rcp(input int h);
    return recip_t'($rtoi(16777216.0 / h + 0.5));
  endfunction

  task automatic chk(input real got, input real expv, input string what);
    checks++;
    if (got - expv > TOL || expv - got > TOL) begin
      failures++;
      if (failures < 10) $display("%s: got %f expected %f", what, got, expv);
    end
  endtask

  initial begin
    for (int it = 0; it < 60; it++) begin
      int hh0, hh1;
      int mv [3];
      bit tp;
      hh0 = $urandom_range(1, 300);
      hh1 = $urandom_range(1, 300);
      tp = (it % 10 != 9);
      for (int j = 0; j < 3; j++) mv[j] = $urandom_range(0, 8000) - 4000;
      if (it % 7 == 0) begin mv[0] = 32767; mv[1] = -32768; mv[2] = 32767; hh0 = 1; hh1 = 2; end
      for (int j = 0; j < 3; j++) begin
        @(negedge clk) shift = 1; m_in = sample_t'(mv[j]);
      end
      @(negedge clk) shift = 0;
      three_pt = tp; h0 = IW'(hh0); h1 = IW'(hh1);
      rh0 = rcp(hh0); rh1 = rcp(hh1); rhs = rcp(hh0 + hh1);
      tdma_en = 1;
      @(negedge clk) tdma_en = 0; coef_en = 1;
      @(negedge clk) coef_en = 0;
      for (int t = 0; t <= hh0 + hh1; t++) begin
        real e;
        if (tp) e = spline3(0, hh0, hh0 + hh1, mv[0] / 16.0, mv[1] / 16.0, mv[2] / 16.0, t);
        else if (t < hh0) continue;
        else e = mv[1] / 16.0 + (mv[2] - mv[1]) / 16.0 * (t - hh0) / hh1;
        @(negedge clk);
        adv = 1;
        seg = (t >= hh0) || !tp;
        dx = IW'(seg ? t - hh0 : t);
        @(posedge clk); #1;
        chk(real'(v) / 256.0, e, $sformatf("it %0d t %0d", it, t));
        @(negedge clk) adv = 0; dx = '0; seg = ~seg;
        @(posedge clk); #1;
        chk(real'(v) / 256.0, e, "hold");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

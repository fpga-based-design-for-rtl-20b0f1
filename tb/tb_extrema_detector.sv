// tb_extrema_detector: a maximum and a minimum detector watch the same random
// sequence (with plateaus); SEL, the gated index and the extrema counters are
// compared with a direct evaluation of the comparisons.
`timescale 1ns/1ps
module tb_extrema_detector;
  localparam int W = 24, IW = 10;
  logic clk = 0, rst_n = 0, clr = 0, en = 0;
  logic signed [W-1:0] yp, yc, yn;
  logic [IW-1:0] n;
  logic sel_max, sel_min;
  logic [IW-1:0] idx_max, idx_min;
  logic [IW:0] cnt_max, cnt_min;
  always #5 clk = ~clk;

  extrema_detector #(.W(W), .IW(IW), .IS_MAX(1'b1)) u_max (.clk, .rst_n, .clr, .en,
    .y_prev(yp), .y_cur(yc), .y_next(yn), .n, .sel(sel_max), .idx(idx_max), .count(cnt_max));
  extrema_detector #(.W(W), .IW(IW), .IS_MAX(1'b0)) u_min (.clk, .rst_n, .clr, .en,
    .y_prev(yp), .y_cur(yc), .y_next(yn), .n, .sel(sel_min), .idx(idx_min), .count(cnt_min));

  int checks = 0, failures = 0;
  int emax = 0, emin = 0;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  initial begin
    logic signed [W-1:0] seq [0:601];
    for (int j = 0; j < 602; j++) seq[j] = W'($signed($urandom_range(0, 6)) - 3) <<< 4;
    yp = '0; yc = '0; yn = '0; n = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int j = 1; j <= 600; j++) begin
      bit xmax, xmin;
      @(negedge clk);
      en = ($urandom_range(0, 5) != 0);
      yp = seq[j-1]; yc = seq[j]; yn = seq[j+1]; n = j[IW-1:0];
      #1;
      xmax = en && (yc >= yp) && (yc >= yn);
      xmin = en && (yc <= yp) && (yc <= yn);
      chk(sel_max == xmax, "sel max");
      chk(sel_min == xmin, "sel min");
      chk(idx_max == (xmax ? n : '0), "idx max");
      chk(idx_min == (xmin ? n : '0), "idx min");
      @(posedge clk); #1;
      if (xmax) emax++;
      if (xmin) emin++;
      chk(cnt_max == emax[IW:0], "count max");
      chk(cnt_min == emin[IW:0], "count min");
    end
    @(negedge clk) clr = 1; en = 0;
    @(posedge clk); #1;
    chk(cnt_max == 0 && cnt_min == 0, "clear");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

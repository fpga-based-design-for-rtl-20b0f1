// tb_recip_lut: every entry 1..DEPTH-1 must equal round(2^RB / h), worked out
// with real arithmetic, one cycle after the address is presented.
`timescale 1ns/1ps
module tb_recip_lut;
  localparam int D = 1024, RB = 24;
  logic clk = 0;
  logic [$clog2(D)-1:0] addr = '0;
  logic [RB:0] q;
  always #5 clk = ~clk;

  recip_lut #(.DEPTH(D), .RB(RB)) dut (.*);

  int checks = 0, failures = 0;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int h = 1; h < D; h++) begin
      longint e;
      e = longint'($rtoi(16777216.0 / h + 0.5));
      @(negedge clk) addr = h[$clog2(D)-1:0];
      @(posedge clk); #1;
      checks++;
      if (longint'(q) != e) begin
        failures++;
        if (failures < 10) $display("h=%0d got %0d exp %0d", h, q, e);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_dp_ram: writes random words, reads them back through the registered read
// port (one cycle latency), checks read-during-write returns the old word and
// that rdata holds while re is low.
`timescale 1ns/1ps
module tb_dp_ram;
  localparam int W = 16, D = 100;
  logic clk = 0, we = 0, re = 0;
  logic [$clog2(D)-1:0] waddr = '0, raddr = '0;
  logic [W-1:0] wdata = '0, rdata;
  always #5 clk = ~clk;

  dp_ram #(.WIDTH(W), .DEPTH(D)) dut (.*);

  int checks = 0, failures = 0;
  logic [W-1:0] ref_mem [D];

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int a = 0; a < D; a++) begin
      @(negedge clk);
      we = 1; waddr = a[$clog2(D)-1:0]; wdata = W'($urandom); ref_mem[a] = wdata;
    end
    @(negedge clk) we = 0;
    for (int it = 0; it < 400; it++) begin
      int a, b;
      logic [W-1:0] nw, expv;
      a = $urandom_range(0, D - 1);
      b = $urandom_range(0, D - 1);
      nw = W'($urandom);
      @(negedge clk);
      re = 1; raddr = a[$clog2(D)-1:0];
      we = (it % 3 == 0); waddr = (it % 6 == 0) ? a[$clog2(D)-1:0] : b[$clog2(D)-1:0]; wdata = nw;
      expv = ref_mem[a];
      @(posedge clk);
      #1;
      checks++;
      if (rdata !== expv) begin failures++; $display("read %0d got %h exp %h", a, rdata, expv); end
      if (we) ref_mem[waddr] = nw;
      @(negedge clk) re = 0; we = 0;
      @(posedge clk); #1;
      checks++;
      if (rdata !== expv) begin failures++; $display("rdata did not hold"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

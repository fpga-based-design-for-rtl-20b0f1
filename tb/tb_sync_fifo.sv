// tb_sync_fifo: random push/pop traffic against a queue model; checks the
// head word, empty/full flags and count, simultaneous push and pop, and clr.
`timescale 1ns/1ps
module tb_sync_fifo;
  localparam int W = 12, D = 16;
  logic clk = 0, rst_n = 0, clr = 0, push = 0, pop = 0;
  logic [W-1:0] din, dout;
  logic empty, full;
  logic [$clog2(D+1)-1:0] count;
  always #5 clk = ~clk;

  sync_fifo #(.WIDTH(W), .DEPTH(D)) dut (.*);

  int checks = 0, failures = 0;
  logic [W-1:0] q [$];

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  initial begin
    din = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 3000; it++) begin
      @(negedge clk);
      chk(empty == (q.size() == 0), "empty");
      chk(full == (q.size() == D), "full");
      chk(count == q.size(), "count");
      if (q.size() > 0) chk(dout == q[0], "head");
      // phases: mostly fill, mostly drain, mixed
      case ((it / 200) % 3)
        0: begin push = ($urandom_range(0, 3) != 0); pop = ($urandom_range(0, 3) == 0); end
        1: begin push = ($urandom_range(0, 3) == 0); pop = ($urandom_range(0, 3) != 0); end
        default: begin push = $urandom_range(0, 1); pop = $urandom_range(0, 1); end
      endcase
      if (q.size() == D) push = 0;
      if (q.size() == 0) pop = 0;
      din = W'($urandom);
      clr = (it == 2500);
      @(posedge clk);
      #1;
      if (clr) q.delete();
      else begin
        if (pop) void'(q.pop_front());
        if (push) q.push_back(din);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_sift_block: checks one sifting iteration against the floating-point
// reference model. Two frames of a four-channel multi-tone signal are sent;
// frame 1 with the output always ready (the completion cycle is checked
// against the schedule: 1 end-knot cycle, 3 fill, 3 coefficient cycles, L
// output cycles, 4 cycles per knot-window change, 2 pipeline cycles), frame 2
// with random output back-pressure and input gaps. Every output sample of
// every channel must match the model within 0.2 (3.2 LSB of Q12.4).
`timescale 1ns/1ps
module tb_sift_block;
  import memd_pkg::*;
  import memd_ref_pkg::*;

  localparam int N = 4, K = 8, L = 128;
  localparam real TOL = 0.1;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic    in_valid, in_ready, out_valid, out_ready;
  sample_t x_in [N], h_out [N];
  logic [$clog2(L):0] ext_count [2*K];

  sift_block #(.N(N), .K(K), .L(L)) dut (.*);

  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int tone(int n, int i, int frame);
    real t = (n + frame * 37) / 30.0e6;
    real f1 = 50e3 * 6, f2 = 150e3 * 2, f3 = 350e3, f4 = 800e3, pi = 3.14159265358979;
    real v;
    case (i)
      0: v = 150*$sin(2*pi*f1*t) + 150*$sin(2*pi*f3*t) + 150*$sin(2*pi*f4*t);
      1: v = 150*$sin(2*pi*f1*t) + 150*$sin(2*pi*f3*t);
      2: v = 150*$sin(2*pi*f2*t) + 150*$sin(2*pi*f3*t) + 150*$sin(2*pi*f4*t);
      default: v = 150*$sin(2*pi*f1*t) + 150*$sin(2*pi*f2*t) + 150*$sin(2*pi*f3*t);
    endcase
    return $rtoi(v * 16.0 + 1000000.5) - 1000000;
  endfunction

  int  xs [][];
  real href [][];
  int  slides;
  sample_t got [L][N];
  int  ngot;
  longint last_in_cyc, last_out_cyc;
  bit  random_ready;

  always @(posedge clk) begin
    if (out_valid && out_ready) begin
      if (ngot < L) got[ngot] = h_out;
      ngot++;
      last_out_cyc = cyc;
    end
  end

  always @(negedge clk) out_ready <= random_ready ? ($urandom_range(0, 3) != 0) : 1'b1;

  task automatic run_frame(input int frame, input bit gaps);
    int n = 0;
    xs = new[L];
    for (int j = 0; j < L; j++) begin
      xs[j] = new[N];
      for (int i = 0; i < N; i++) xs[j][i] = tone(j, i, frame);
    end
    sift_ref(N, K, L, xs, href, slides);
    ngot = 0;
    while (n < L) begin
      @(negedge clk);
      in_valid = gaps ? ($urandom_range(0, 4) != 0) : 1'b1;
      for (int i = 0; i < N; i++) x_in[i] = sample_t'(xs[n][i]);
      @(posedge clk);
      if (in_valid && in_ready) begin
        n++;
        last_in_cyc = cyc;
      end
    end
    @(negedge clk) in_valid = 0;
    while (ngot < L) @(posedge clk);
    @(posedge clk);
    for (int j = 0; j < L; j++)
      for (int i = 0; i < N; i++) begin
        real d = got[j][i] / 16.0 - href[j][i];
        checks++;
        if (d > TOL || d < -TOL) begin
          failures++;
          if (failures < 10) $display("frame %0d t=%0d ch%0d: got %f expected %f", frame, j, i, got[j][i] / 16.0, href[j][i]);
        end
      end
  endtask

  initial begin
    in_valid = 0;
    random_ready = 0;
    for (int i = 0; i < N; i++) x_in[i] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run_frame(0, 0);
    checks++;
    if (last_out_cyc - last_in_cyc != longint'(L + 4 * slides + 9)) begin
      failures++;
      $display("latency: %0d cycles, expected %0d (slides %0d)", last_out_cyc - last_in_cyc, L + 4 * slides + 9, slides);
    end
    // extrema counters hold the number of interior extrema of frame 0
    checks++;
    if (ext_count[0] == 0) begin failures++; $display("no maxima counted"); end
    random_ready = 1;
    run_frame(1, 1);
    checks++;
    if (ngot != L) begin failures++; $display("extra outputs %0d", ngot); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_imf_generator: S=2 sifting iterations in series on one frame with random
// output back-pressure. The output of iteration 1 (observed inside the
// generator) must match the reference sift of the input, and the IMF must
// match the reference sift of the observed iteration-1 output, within 0.1.
// Also checks that exactly L vectors come out.
`timescale 1ns/1ps
module tb_imf_generator;
  import memd_pkg::*;
  import memd_ref_pkg::*;
  localparam int N = 4, K = 8, S = 2, L = 96;
  localparam real TOL = 0.1;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0, in_ready, out_valid, out_ready = 1;
  sample_t x_in [N], y_out [N];

  imf_generator #(.N(N), .K(K), .S(S), .L(L)) dut (.*);

  int checks = 0, failures = 0;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int xs [][], s1 [][];
  real r1 [][], r2 [][];
  int slides, n1 = 0, n2 = 0;
  sample_t o2 [L][N];

  always @(posedge clk) begin
    if (dut.g_it[0].o_valid && dut.g_it[0].o_ready) begin
      if (n1 < L) for (int i = 0; i < N; i++) s1[n1][i] = int'(dut.g_it[0].o_data[i]);
      n1++;
    end
    if (out_valid && out_ready) begin
      if (n2 < L) o2[n2] = y_out;
      n2++;
    end
  end
  always @(negedge clk) out_ready <= ($urandom_range(0, 2) != 0);

  task automatic compare(input string what, input real ref_h [][], input int j, input int i, input real got);
    real d;
    d = got - ref_h[j][i];
    checks++;
    if (d > TOL || d < -TOL) begin
      failures++;
      if (failures < 10) $display("%s t=%0d ch%0d: got %f expected %f", what, j, i, got, ref_h[j][i]);
    end
  endtask

  initial begin
    real pi;
    pi = 3.14159265358979;
    xs = new[L];
    s1 = new[L];
    for (int j = 0; j < L; j++) begin
      xs[j] = new[N];
      s1[j] = new[N];
      for (int i = 0; i < N; i++)
        xs[j][i] = $rtoi(16.0 * (200.0 * $sin(2 * pi * j / (7.0 + i)) + 300.0 * $sin(2 * pi * j / 41.0 + i)) + 100000.5) - 100000;
    end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int j = 0; j < L; j++) begin
      @(negedge clk);
      in_valid = 1;
      for (int i = 0; i < N; i++) x_in[i] = sample_t'(xs[j][i]);
      @(posedge clk);
      while (!in_ready) @(posedge clk);
    end
    @(negedge clk) in_valid = 0;
    while (n2 < L) @(posedge clk);
    repeat (20) @(posedge clk);
    sift_ref(N, K, L, xs, r1, slides);
    sift_ref(N, K, L, s1, r2, slides);
    for (int j = 0; j < L; j++)
      for (int i = 0; i < N; i++) begin
        compare("iteration 1", r1, j, i, s1[j][i] / 16.0);
        compare("iteration 2", r2, j, i, o2[j][i] / 16.0);
      end
    checks++;
    if (n1 != L || n2 != L) begin failures++; $display("counts %0d %0d", n1, n2); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_memd_full: the design at its default size (N=4 channels, K=8 directions,
// S=4 iterations, M=4 IMFs, frames of L=1000 vectors) decomposing one frame of
// the synthetic quadri-variate test signal: tones of 50, 150, 350 and 800 kHz
// sampled at 30 MHz, amplitude 150 each,
//   x1 = f1 + f3 + f4,  x2 = f1 + f3,  x3 = f2 + f3 + f4,  x4 = f1 + f2 + f3.
// Checks: 1000 vectors on every IMF stream and on the residue; C1+..+C4+r
// equals the input exactly; the mechanisms (window slide, inter-block stall)
// occurred; and, as a coarse check of the decomposition, the 800 kHz tone
// correlates more strongly with C1 than with C4 in channels 1 and 3, and the
// 50 kHz tone more strongly with C4 (or the residue) than with C1 in channels
// 1 and 2. The correlations of each IMF with the four tones are printed.
`timescale 1ns/1ps
module tb_memd_full;
  import memd_pkg::*;
  import tb_events_pkg::*;
  localparam int N = 4, M = 4, L = 1000;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0, in_ready, res_valid, res_ready = 1;
  sample_t x_in [N], res [N];
  logic [M-1:0] imf_valid;
  sample_t imf [M][N];

  memd_top dut (.*);

  bind sift_block sift_probe u_probe (.clk(clk), .slide(|need_slide), .stall(out_valid && !out_ready),
    .two_knot(tdma_en && !(&three_pt)), .last_piece(issue && |(seg & three_pt)), .frame_start(first));

  int checks = 0, failures = 0;
  int xs [L][N];
  int cs [M+1][L][N];       // index M holds the residue
  int nc [M+1];
  real tone [4][L];

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) begin
    for (int m = 0; m < M; m++)
      if (imf_valid[m]) begin
        if (nc[m] < L) for (int i = 0; i < N; i++) cs[m][nc[m]][i] = int'(imf[m][i]);
        nc[m]++;
      end
    if (res_valid && res_ready) begin
      if (nc[M] < L) for (int i = 0; i < N; i++) cs[M][nc[M]][i] = int'(res[i]);
      nc[M]++;
    end
  end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 12) $display("FAIL %s", what); end
  endtask

  function automatic real corr(input int m, input int i, input int f);
    real sx = 0, sy = 0, sxx = 0, syy = 0, sxy = 0, a, b;
    for (int j = 0; j < L; j++) begin
      a = cs[m][j][i];
      b = tone[f][j];
      sx += a; sy += b; sxx += a * a; syy += b * b; sxy += a * b;
    end
    a = sxx - sx * sx / L;
    b = syy - sy * sy / L;
    if (a <= 0 || b <= 0) return 0.0;
    return (sxy - sx * sy / L) / $sqrt(a * b);
  endfunction

  initial begin
    real pi, fr [4];
    longint t0;
    pi = 3.14159265358979;
    fr = '{50e3, 150e3, 350e3, 800e3};
    for (int m = 0; m <= M; m++) nc[m] = 0;
    for (int j = 0; j < L; j++) begin
      for (int f = 0; f < 4; f++) tone[f][j] = 150.0 * $sin(2 * pi * fr[f] * j / 30.0e6);
      xs[j][0] = $rtoi(16.0 * (tone[0][j] + tone[2][j] + tone[3][j]) + 100000.5) - 100000;
      xs[j][1] = $rtoi(16.0 * (tone[0][j] + tone[2][j]) + 100000.5) - 100000;
      xs[j][2] = $rtoi(16.0 * (tone[1][j] + tone[2][j] + tone[3][j]) + 100000.5) - 100000;
      xs[j][3] = $rtoi(16.0 * (tone[0][j] + tone[1][j] + tone[2][j]) + 100000.5) - 100000;
    end
    repeat (2) @(posedge clk);
    rst_n = 1;
    t0 = $time;
    for (int j = 0; j < L; j++) begin
      @(negedge clk);
      in_valid = 1;
      for (int i = 0; i < N; i++) x_in[i] = sample_t'(xs[j][i]);
      @(posedge clk);
      while (!in_ready) @(posedge clk);
    end
    @(negedge clk) in_valid = 0;
    while (nc[M] < L) @(posedge clk);
    $display("frame of %0d vectors decomposed in %0d cycles", L, ($time - t0) / 10);
    repeat (10) @(posedge clk);
    for (int m = 0; m <= M; m++) chk(nc[m] == L, $sformatf("stream %0d count %0d", m, nc[m]));
    for (int j = 0; j < L; j++)
      for (int i = 0; i < N; i++) begin
        int sum;
        sum = 0;
        for (int m = 0; m <= M; m++) sum += cs[m][j][i];
        chk(sum == xs[j][i], $sformatf("reconstruction t=%0d ch%0d", j, i));
      end
    for (int m = 0; m <= M; m++)
      for (int i = 0; i < N; i++)
        $display("%s%0d ch%0d corr with 50k %6.3f 150k %6.3f 350k %6.3f 800k %6.3f",
                 m == M ? "r" : "C", m == M ? 0 : m + 1, i + 1, corr(m, i, 0), corr(m, i, 1), corr(m, i, 2), corr(m, i, 3));
    chk(corr(0, 0, 3) > corr(3, 0, 3), "800 kHz not in C1 of channel 1");
    chk(corr(0, 2, 3) > corr(3, 2, 3), "800 kHz not in C1 of channel 3");
    chk((corr(3, 0, 0) > corr(0, 0, 0)) || (corr(M, 0, 0) > corr(0, 0, 0)), "50 kHz in C1 of channel 1");
    chk((corr(3, 1, 0) > corr(0, 1, 0)) || (corr(M, 1, 0) > corr(0, 1, 0)), "50 kHz in C1 of channel 2");
    $display("events: slide %0d stall %0d two-knot %0d last-piece %0d frames %0d",
             ev_slide, ev_stall, ev_two_knot, ev_last_piece, ev_frames);
    chk(ev_slide > 0, "no window slide");
    chk(ev_stall > 0, "no stall");
    chk(ev_frames == 16, "frame count");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

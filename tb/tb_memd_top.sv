// tb_memd_top: end-to-end run of the decomposition at reduced size (M=2 IMFs,
// S=2 iterations, frames of L=96 vectors, full N=4 and K=8), three frames of a
// four-channel multi-tone signal (the last frame four ramps) with input gaps and random residue
// back-pressure. Checks:
//   - every IMF stream and the residue deliver exactly 3L vectors, in order;
//   - for every sample and channel, C_1 + C_2 + r equals the input exactly
//     (the residue chain is lossless when nothing saturates);
//   - the first IMF equals the floating-point reference of two sifts applied
//     to the first frame, within 0.1 for iteration 1 and by re-sifting the
//     observed iteration-1 output for iteration 2;
//   - each mechanism happened at least once: knot-window slide, output
//     stall between blocks, two-knot envelope, second piece of a last
//     window, delay-FIFO full (input held back), residue back-pressure.
`timescale 1ns/1ps
module tb_memd_top;
  import memd_pkg::*;
  import memd_ref_pkg::*;
  import tb_events_pkg::*;
  localparam int N = 4, K = 8, S = 2, M = 2, L = 96, F = 3;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0, in_ready, res_valid, res_ready = 1;
  sample_t x_in [N], res [N];
  logic [M-1:0] imf_valid;
  sample_t imf [M][N];

  memd_top #(.N(N), .K(K), .S(S), .M(M), .L(L)) dut (.*);

  bind sift_block sift_probe u_probe (.clk(clk), .slide(|need_slide), .stall(out_valid && !out_ready),
    .two_knot(tdma_en && !(&three_pt)), .last_piece(issue && |(seg & three_pt)), .frame_start(first));

  int checks = 0, failures = 0;
  int xs [F*L][N];
  int cs [M][F*L][N];
  int rs [F*L][N];
  int nc [M], nr = 0;
  longint ev_dly_full = 0, ev_res_bp = 0;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) begin
    for (int m = 0; m < M; m++)
      if (imf_valid[m]) begin
        if (nc[m] < F * L) for (int i = 0; i < N; i++) cs[m][nc[m]][i] = int'(imf[m][i]);
        nc[m]++;
      end
    if (res_valid && res_ready) begin
      if (nr < F * L) for (int i = 0; i < N; i++) rs[nr][i] = int'(res[i]);
      nr++;
    end
    if (dut.g_stage[0].dly_full) ev_dly_full++;
    if (res_valid && !res_ready) ev_res_bp++;
  end
  always @(negedge clk) res_ready <= ($urandom_range(0, 3) != 0);

  // iteration-1 output of IMF stage 1, observed inside the design
  int s1 [][];
  int n1 = 0;
  always @(posedge clk)
    if (dut.g_stage[0].u_gen.g_it[0].o_valid && dut.g_stage[0].u_gen.g_it[0].o_ready) begin
      if (n1 < L) for (int i = 0; i < N; i++) s1[n1][i] = int'(dut.g_stage[0].u_gen.g_it[0].o_data[i]);
      n1++;
    end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 12) $display("FAIL %s", what); end
  endtask

  initial begin
    real pi;
    int xf [][];
    real r1 [][], r2 [][];
    int slides;
    pi = 3.14159265358979;
    s1 = new[L];
    for (int j = 0; j < L; j++) s1[j] = new[N];
    for (int m = 0; m < M; m++) nc[m] = 0;
    // frames 0..F-2: multi-tone; last frame: ramps (no interior extrema)
    for (int j = 0; j < F * L; j++)
      for (int i = 0; i < N; i++)
        if (j >= (F - 1) * L) xs[j][i] = (j - (F - 1) * L) * 40 * (i + 1) - 8000;
        else xs[j][i] = $rtoi(16.0 * (150.0 * $sin(2 * pi * j / (6.0 + i)) + 150.0 * $sin(2 * pi * j / 19.0)
                   + 150.0 * $sin(2 * pi * j / (60.0 + 10 * i))) + 100000.5) - 100000;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int j = 0; j < F * L; j++) begin
      @(negedge clk);
      in_valid = ($urandom_range(0, 5) != 0);
      for (int i = 0; i < N; i++) x_in[i] = sample_t'(xs[j][i]);
      @(posedge clk);
      while (!(in_valid && in_ready)) begin
        @(negedge clk) in_valid = 1;
        @(posedge clk);
      end
    end
    @(negedge clk) in_valid = 0;
    while (nr < F * L) @(posedge clk);
    repeat (50) @(posedge clk);

    for (int m = 0; m < M; m++) chk(nc[m] == F * L, $sformatf("IMF %0d count %0d", m + 1, nc[m]));
    chk(nr == F * L, $sformatf("residue count %0d", nr));
    for (int j = 0; j < F * L; j++)
      for (int i = 0; i < N; i++) begin
        int sum;
        sum = rs[j][i];
        for (int m = 0; m < M; m++) sum += cs[m][j][i];
        chk(sum == xs[j][i], $sformatf("reconstruction t=%0d ch%0d: %0d vs %0d", j, i, sum, xs[j][i]));
      end
    // IMF 1 of frame 0 against the reference
    xf = new[L];
    for (int j = 0; j < L; j++) begin
      xf[j] = new[N];
      for (int i = 0; i < N; i++) xf[j][i] = xs[j][i];
    end
    sift_ref(N, K, L, xf, r1, slides);
    sift_ref(N, K, L, s1, r2, slides);
    for (int j = 0; j < L; j++)
      for (int i = 0; i < N; i++) begin
        real d1, d2;
        d1 = s1[j][i] / 16.0 - r1[j][i];
        d2 = cs[0][j][i] / 16.0 - r2[j][i];
        chk(d1 < 0.1 && d1 > -0.1, $sformatf("iteration 1 t=%0d ch%0d", j, i));
        chk(d2 < 0.1 && d2 > -0.1, $sformatf("IMF 1 t=%0d ch%0d", j, i));
      end
    $display("events: slide %0d stall %0d two-knot %0d last-piece %0d frames %0d delay-full %0d residue-backpressure %0d",
             ev_slide, ev_stall, ev_two_knot, ev_last_piece, ev_frames, ev_dly_full, ev_res_bp);
    chk(ev_slide > 0, "no window slide");
    chk(ev_stall > 0, "no stall");
    chk(ev_two_knot > 0, "no two-knot envelope");
    chk(ev_last_piece > 0, "no last-window second piece");
    chk(ev_frames == F * M * S, "frame count");
    chk(ev_dly_full > 0, "delay FIFO never full");
    chk(ev_res_bp > 0, "no residue back-pressure");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

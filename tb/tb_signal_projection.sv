// tb_signal_projection: all K=8 projection units against a plain
// multiply-and-add reference whose coefficients are recomputed from the
// Hammersley construction with real arithmetic; random inputs including the
// extreme 16-bit values.
`timescale 1ns/1ps
module tb_signal_projection;
  import memd_pkg::*;
  import memd_ref_pkg::*;
  localparam int N = 4, K = 8;

  sample_t x [N];
  proj_t   y [K];
  for (genvar k = 0; k < K; k++) begin : g
    signal_projection #(.N(N), .KI(k)) dut (.x(x), .y(y[k]));
  end

  int checks = 0, failures = 0;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int it = 0; it < 500; it++) begin
      for (int i = 0; i < N; i++)
        x[i] = (it < 4) ? ((it[0] ^ i[0]) ? 16'sh7fff : 16'sh8000) : sample_t'($urandom);
      #1;
      for (int k = 0; k < K; k++) begin
        longint acc;
        acc = 0;
        for (int i = 0; i < N; i++) acc += longint'(hamm_ref(k, i)) * longint'(x[i]);
        checks++;
        if (longint'(y[k]) != (acc >>> 2)) begin
          failures++;
          if (failures < 10) $display("k=%0d got %0d exp %0d", k, y[k], acc >>> 2);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_hammersley: the direction table in memd_pkg must equal the Hammersley
// construction recomputed with real arithmetic, and every row must be a unit
// vector to within the Q2.6 rounding (|a|^2 within 64^2 +- 2*64).
`timescale 1ns/1ps
module tb_hammersley;
  import memd_pkg::*;
  import memd_ref_pkg::*;
  int checks = 0, failures = 0;
  initial begin
    for (int k = 0; k < HAMM_K; k++) begin
      int n2;
      n2 = 0;
      for (int i = 0; i < HAMM_N; i++) begin
        checks++;
        if (hamm_q26(k, i) != hamm_ref(k, i)) begin
          failures++;
          $display("a[%0d][%0d] = %0d, expected %0d", k, i, hamm_q26(k, i), hamm_ref(k, i));
        end
        n2 += hamm_q26(k, i) * hamm_q26(k, i);
      end
      checks++;
      if (n2 < 4096 - 128 || n2 > 4096 + 128) begin failures++; $display("row %0d norm^2 %0d", k, n2); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

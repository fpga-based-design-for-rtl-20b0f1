// csd_const_mult: multiplies a signed input by a constant using its canonical
// signed digit (CSD) form, i.e. only shifts, additions and subtractions.
//
// The constant COEF (CWID-bit two's complement) is recoded at elaboration into
// digits in {-1, 0, +1} with no two adjacent non-zero digits; each non-zero
// digit j adds or subtracts x << j. The product is exact and full width
// (XW + CWID bits) and purely combinational. Using CSD for the constant
// direction coefficients follows the paper.
module csd_const_mult #(
  parameter int unsigned XW   = 16,
  parameter int unsigned CWID = 8,
  parameter int          COEF = 0
) (
  input  logic signed [XW-1:0]      x,
  output logic signed [XW+CWID-1:0] p
);
  localparam int ND = CWID + 1;
  typedef int digits_t [ND];

  function automatic digits_t csd_digits(input int c);
    digits_t d;
    int v = c;
    for (int j = 0; j < ND; j++) begin
      if ((v % 2) != 0) begin
        // v mod 4 == 1 -> +1, v mod 4 == 3 -> -1 (works for negative v too)
        d[j] = (((v % 4) + 4) % 4 == 1) ? 1 : -1;
        v = v - d[j];
      end else begin
        d[j] = 0;
      end
      v = v / 2;
    end
    return d;
  endfunction

  localparam digits_t DIG = csd_digits(COEF);

  always_comb begin
    logic signed [XW+CWID-1:0] xe;
    xe = (XW+CWID)'(x);
    p  = '0;
    for (int j = 0; j < ND; j++) begin
      if (DIG[j] == 1)       p = p + (xe <<< j);
      else if (DIG[j] == -1) p = p - (xe <<< j);
    end
  end
endmodule

// recip_lut: look-up table of reciprocals 1/h, used instead of dividers.
//
// The cubic-spline coefficients need divisions by the knot spacing h (a
// positive integer number of samples). The table returns round(2^RB / h) with
// RB fraction bits, so a division becomes a multiplication and a shift. The
// contents are computed at elaboration by a constant function; entry 0, which
// the datapath never uses, holds 0. The read is registered (one cycle).
// Using a table for the division follows the paper; its size and precision
// are this design's choice.
module recip_lut #(
  parameter int unsigned DEPTH = 1024,
  parameter int unsigned RB    = 24
) (
  input  logic                     clk,
  input  logic [$clog2(DEPTH)-1:0] addr,
  output logic [RB:0]              q
);
  typedef logic [RB:0] table_t [DEPTH];

  function automatic table_t make_table();
    table_t tb;
    for (int unsigned h = 0; h < DEPTH; h++) begin
      if (h == 0) tb[h] = '0;
      else        tb[h] = (RB+1)'(((64'd1 << RB) + 64'(h / 2)) / 64'(h));
    end
    return tb;
  endfunction

  localparam table_t TABLE = make_table();

  always_ff @(posedge clk) q <= TABLE[addr];
endmodule

// extrema_detector: finds one kind of local extremum (maximum or minimum) in a
// stream of projected samples.
//
// Each enabled cycle it sees three consecutive samples y[n-1], y[n], y[n+1] and
// the index n of the middle one. Two comparators test y[n] >= y[n-1] and
// y[n] >= y[n+1] (<= for a minimum detector, IS_MAX = 0); their AND is SEL.
// SEL increments the extrema counter and gates n onto idx, which is pushed into
// the time-instant FIFO. This is the structure the paper draws; the tri-state
// buffer there becomes an AND gate here. clr zeroes the counter at the start of
// a frame (this design's choice). Combinational sel/idx, registered count.
module extrema_detector #(
  parameter int unsigned W      = 24,
  parameter int unsigned IW     = 10,
  parameter bit          IS_MAX = 1'b1
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                clr,
  input  logic                en,
  input  logic signed [W-1:0] y_prev,
  input  logic signed [W-1:0] y_cur,
  input  logic signed [W-1:0] y_next,
  input  logic [IW-1:0]       n,
  output logic                sel,
  output logic [IW-1:0]       idx,
  output logic [IW:0]         count
);
  logic cmp_prev, cmp_next;

  always_comb begin
    if (IS_MAX) begin
      cmp_prev = (y_cur >= y_prev);
      cmp_next = (y_cur >= y_next);
    end else begin
      cmp_prev = (y_cur <= y_prev);
      cmp_next = (y_cur <= y_next);
    end
    sel = en & cmp_prev & cmp_next;
    idx = sel ? n : '0;
  end

  always_ff @(posedge clk) begin
    if (!rst_n || clr) count <= '0;
    else if (sel)      count <= count + 1'b1;
  end
endmodule

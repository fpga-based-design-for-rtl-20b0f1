// sync_fifo: single-clock first-in first-out buffer.
//
// In the MEMD datapath it holds the time instants of the maxima/minima of each
// projected signal, the extrema values of each channel, and the frame delay that
// aligns an IMF generator's input with its IMF for the residue subtraction.
// The head word is shown on dout while the FIFO is not empty (show-ahead);
// pop consumes it. push and pop may happen in the same cycle. clr empties the
// FIFO synchronously. Pushing when full or popping when empty is a protocol
// error (checked by assertions) and is ignored by the logic.
// The storage is a plain array, so a synthesis tool can map it to block RAM
// with a combinational read or to distributed RAM. The depth is a parameter;
// the paper gives no depths, this design sizes them by the frame length.
module sync_fifo #(
  parameter int unsigned WIDTH = 10,
  parameter int unsigned DEPTH = 1000
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             clr,
  input  logic             push,
  input  logic [WIDTH-1:0] din,
  input  logic             pop,
  output logic [WIDTH-1:0] dout,
  output logic             empty,
  output logic             full,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wr_ptr, rd_ptr;

  wire do_push = push && !full;
  wire do_pop  = pop  && !empty;

  assign empty = (count == 0);
  assign full  = (count == DEPTH[$clog2(DEPTH+1)-1:0]);
  assign dout  = mem[rd_ptr];

  function automatic logic [AW-1:0] incr(input logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (do_push) mem[wr_ptr] <= din;
  end

  always_ff @(posedge clk) begin
    if (!rst_n || clr) begin
      wr_ptr <= '0;
      rd_ptr <= '0;
      count  <= '0;
    end else begin
      if (do_push) wr_ptr <= incr(wr_ptr);
      if (do_pop)  rd_ptr <= incr(rd_ptr);
      count <= count + $bits(count)'(do_push) - $bits(count)'(do_pop);
    end
  end

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n || clr) push |-> !full);
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n || clr) pop  |-> !empty);

endmodule

// sift_probe: bound into each sifting block by the end-to-end testbenches;
// counts how often each mechanism of the block occurs (see tb_events_pkg).
module sift_probe (
  input logic clk,
  input logic slide,
  input logic stall,
  input logic two_knot,
  input logic last_piece,
  input logic frame_start
);
  import tb_events_pkg::*;
  always @(posedge clk) begin
    if (slide)       ev_slide++;
    if (stall)       ev_stall++;
    if (two_knot)    ev_two_knot++;
    if (last_piece)  ev_last_piece++;
    if (frame_start) ev_frames++;
  end
endmodule

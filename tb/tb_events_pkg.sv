// tb_events_pkg: event counters shared by the sift_probe instances that the
// end-to-end testbenches bind into every sifting block.
package tb_events_pkg;
  longint ev_slide     = 0;   // cycles in which a knot window slides
  longint ev_stall     = 0;   // cycles with output valid but not accepted
  longint ev_two_knot  = 0;   // coefficient updates with a two-knot envelope
  longint ev_last_piece = 0;  // samples evaluated on the second piece of a last window
  longint ev_frames    = 0;   // frames loaded
endpackage

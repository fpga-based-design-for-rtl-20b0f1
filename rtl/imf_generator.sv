// imf_generator: produces one multivariate IMF by S sifting iterations in
// series (h_1 -> h_2 -> ... -> h_S = IMF), the fixed-iteration stopping rule.
//
// The blocks are chained by valid/ready streams of N-channel Q12.4 vectors;
// the registered output stage of each sifting block is the inter-iteration
// register. A block accepts a new frame only in its load phase, so a block
// still emitting stalls the one before it. Latency per frame is roughly S
// times (L load cycles + L output cycles + 4 cycles per knot-window change).
// The cascade of S iteration blocks follows the paper; the handshake is this
// design's choice.
module imf_generator
  import memd_pkg::*;
#(
  parameter int N = 4,
  parameter int K = 8,
  parameter int S = 4,
  parameter int L = 1000
) (
  input  logic    clk,
  input  logic    rst_n,
  input  logic    in_valid,
  output logic    in_ready,
  input  sample_t x_in  [N],
  output logic    out_valid,
  input  logic    out_ready,
  output sample_t y_out [N]
);
  localparam int IW = $clog2(L);

  for (genvar s = 0; s < S; s++) begin : g_it
    logic        i_valid, i_ready, o_valid, o_ready;
    sample_t     i_data [N];
    sample_t     o_data [N];
    logic [IW:0] ext_count [2*K];

    if (s == 0) begin : g_src
      assign i_valid  = in_valid;
      assign i_data   = x_in;
      assign in_ready = i_ready;
    end else begin : g_src
      assign i_valid = g_it[s-1].o_valid;
      assign i_data  = g_it[s-1].o_data;
    end

    if (s == S - 1) begin : g_dst
      assign o_ready = out_ready;
    end else begin : g_dst
      assign o_ready = g_it[s+1].i_ready;
    end

    sift_block #(.N(N), .K(K), .L(L)) u_sift (
      .clk(clk), .rst_n(rst_n),
      .in_valid(i_valid), .in_ready(i_ready), .x_in(i_data),
      .out_valid(o_valid), .out_ready(o_ready), .h_out(o_data),
      .ext_count(ext_count));
  end

  assign out_valid = g_it[S-1].o_valid;
  assign y_out     = g_it[S-1].o_data;
endmodule

// memd_top: multivariate empirical mode decomposition of an N-channel sample
// stream into M IMFs and a residue.
//
// M IMF generators are cascaded. Stage m receives the residue r_{m-1} (r_0 is
// the input X), emits IMF C_m, and forms r_m = r_{m-1} - C_m by subtracting
// C_m from a delayed copy of its own input. The delay (Z^-d in the level-1
// diagram) is a FIFO of DLY_DEPTH vectors, filled when a vector enters the
// stage and emptied when the matching IMF vector leaves; since the generator's
// latency depends on the data, a FIFO rather than a fixed delay line is used.
// A stage only accepts input while its delay FIFO has room, so at most
// DLY_DEPTH vectors are in flight per stage.
// Interface: input stream in_valid/in_ready/x_in; imf_valid[m] marks a cycle in
// which imf[m] carries a sample of C_m (it moves on only when the next stage
// takes the residue, so no ready is needed); residue stream
// res_valid/res_ready/res. Samples are 16-bit Q12.4; the subtraction saturates.
// The cascade and the residue subtraction follow the paper; the framing,
// handshake and FIFO delay are this design's choices.
module memd_top
  import memd_pkg::*;
#(
  parameter int N = 4,
  parameter int K = 8,
  parameter int S = 4,
  parameter int M = 4,
  parameter int L = 1000,
  parameter int DLY_DEPTH = L
) (
  input  logic    clk,
  input  logic    rst_n,
  input  logic    in_valid,
  output logic    in_ready,
  input  sample_t x_in [N],
  output logic [M-1:0] imf_valid,
  output sample_t imf  [M][N],
  output logic    res_valid,
  input  logic    res_ready,
  output sample_t res  [N]
);
  for (genvar m = 0; m < M; m++) begin : g_stage
    logic    i_valid, i_ready;          // residue r_{m-1} into this stage
    sample_t i_data [N];
    logic    o_valid, o_ready;          // residue r_m out of this stage
    sample_t o_data [N];
    logic    g_in_ready, g_out_valid, g_out_ready;
    logic    dly_empty, dly_full;
    logic [$clog2(DLY_DEPTH+1)-1:0] dly_count;
    logic [N*DW-1:0] dly_din, dly_dout;
    sample_t c [N];
    logic    in_fire, out_fire;

    if (m == 0) begin : g_src
      assign i_valid  = in_valid;
      assign i_data   = x_in;
      assign in_ready = i_ready;
    end else begin : g_src
      assign i_valid = g_stage[m-1].o_valid;
      assign i_data  = g_stage[m-1].o_data;
    end

    if (m == M - 1) begin : g_dst
      assign o_ready = res_ready;
    end else begin : g_dst
      assign o_ready = g_stage[m+1].i_ready;
    end

    assign i_ready = g_in_ready && !dly_full;
    assign in_fire = i_valid && i_ready;

    imf_generator #(.N(N), .K(K), .S(S), .L(L)) u_gen (
      .clk(clk), .rst_n(rst_n),
      .in_valid(i_valid && !dly_full), .in_ready(g_in_ready), .x_in(i_data),
      .out_valid(g_out_valid), .out_ready(g_out_ready), .y_out(c));

    for (genvar i = 0; i < N; i++) begin : g_pack
      assign dly_din[i*DW +: DW] = i_data[i];
      assign o_data[i] = sat16(wide_t'(sample_t'(dly_dout[i*DW +: DW])) - wide_t'(c[i]));
    end

    sync_fifo #(.WIDTH(N*DW), .DEPTH(DLY_DEPTH)) u_delay (
      .clk(clk), .rst_n(rst_n), .clr(1'b0),
      .push(in_fire), .din(dly_din), .pop(out_fire), .dout(dly_dout),
      .empty(dly_empty), .full(dly_full), .count(dly_count));

    assign o_valid      = g_out_valid && !dly_empty;
    assign g_out_ready  = o_ready && !dly_empty;
    assign out_fire     = g_out_valid && g_out_ready;
    assign imf_valid[m] = out_fire;
    assign imf[m]       = c;
  end

  assign res_valid = g_stage[M-1].o_valid;
  assign res       = g_stage[M-1].o_data;
endmodule

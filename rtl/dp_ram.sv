// dp_ram: simple dual-port RAM (one write port, one read port, one clock).
//
// Each sifting block keeps one of these per channel: the input frame x_i(t) is
// written while it streams in and read back, in time order, when the local mean
// is subtracted (h_i(t) = x_i(t) - m_i(t)). The read is registered: rdata shows
// mem[raddr] one cycle after re is high, and holds otherwise. A read of the
// address being written in the same cycle returns the old word.
// The paper calls for a dual-port block RAM; ports and latency are this
// design's choice.
module dp_ram #(
  parameter int unsigned WIDTH = 16,
  parameter int unsigned DEPTH = 1000
) (
  input  logic                     clk,
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] waddr,
  input  logic [WIDTH-1:0]         wdata,
  input  logic                     re,
  input  logic [$clog2(DEPTH)-1:0] raddr,
  output logic [WIDTH-1:0]         rdata
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end

  always_ff @(posedge clk) begin
    if (re) rdata <= mem[raddr];
  end
endmodule

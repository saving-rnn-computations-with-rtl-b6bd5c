// sign_buffer: the sign bits of every weight of one gate, split off from the
// full-precision weights so that the binary neuron can be computed without
// reading the rest of the weight.
//
// One row holds the binarized weights of one neuron, concatenated as
// [W_x signs, W_h signs], bit i of the row belonging to input element i of the
// vector [x_t, h_{t-1}]. A stored 1 means a weight >= 0. The row is as wide as
// the binary dot product unit (BDPU_W = 2048 bits), so a neuron is fetched in
// one access. Depth follows from a 2 MiB weight store of 16-bit weights:
// 1 Mi signs = 512 rows. The split itself is the paper's; the one-row-per-
// neuron organisation is this design's choice.
//
// Timing: synchronous write; synchronous read with one cycle of latency. The
// read data register keeps the last row read until the next read, so the DPU
// can take the sign bits of its lanes from it while it walks the sub-vectors.
module sign_buffer
  import fm_pkg::*;
#(
  parameter int unsigned ROWS  = SIGN_ROWS,
  parameter int unsigned WIDTH = BDPU_W
) (
  input  logic                     clk,
  input  logic                     we,
  input  logic [$clog2(ROWS)-1:0]  waddr,
  input  logic [WIDTH-1:0]         wdata,
  input  logic                     re,
  input  logic [$clog2(ROWS)-1:0]  raddr,
  output logic [WIDTH-1:0]         rdata
);
  logic [WIDTH-1:0] mem [ROWS];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end
endmodule

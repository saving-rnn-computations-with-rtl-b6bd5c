// input_buffer: the full-precision input vector of one computation unit, the
// concatenation [x_t, h_{t-1}] of forward and recurrent inputs.
//
// 8 KiB of 16-bit words (4096 words) organised as 256 rows of N_LANES = 16
// words, so that the DPU reads one whole sub-vector per cycle. Words are
// written one at a time (the host writes x_t, the cell-update path writes
// h_t at the end of a time-step). Word i sits in row i/16, lane i%16.
// Size and purpose follow the paper; the organisation is this design's choice.
//
// Timing: synchronous word write; synchronous row read, one cycle of latency.
module input_buffer
  import fm_pkg::*;
#(
  parameter int unsigned WORDS = IN_WORDS,
  parameter int unsigned LANES = N_LANES
) (
  input  logic                             clk,
  input  logic                             we,
  input  logic [$clog2(WORDS)-1:0]         waddr,
  input  fx_t                              wdata,
  input  logic                             re,
  input  logic [$clog2(WORDS/LANES)-1:0]   raddr,
  output fx_t                              rdata [LANES]
);
  localparam int unsigned ROWS = WORDS / LANES;
  localparam int unsigned LW   = $clog2(LANES);

  fx_t mem [ROWS][LANES];

  always_ff @(posedge clk) begin
    if (we) mem[waddr[$clog2(WORDS)-1:LW]][waddr[LW-1:0]] <= wdata;
    if (re) rdata <= mem[raddr];
  end
endmodule

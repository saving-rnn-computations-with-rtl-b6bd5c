// memo_buffer: the memoization table of one computation unit. Entry n holds,
// for neuron n of the gate, the last full-precision output y_m (the DPU
// result, before bias and activation), the binary neuron output y_m^b cached
// with it, and delta^b, the sum of relative differences of the binary outputs
// over the time-steps in which y_m has been reused.
//
// 8 KiB of 48-bit entries gives 1365 entries. The contents follow the paper;
// the entry layout (memo_entry_t) and the single read / single write port are
// this design's choice. No reset: the first time-step of a sequence always
// evaluates every neuron and writes its entry before it is read again.
//
// Timing: synchronous write; synchronous read with one cycle of latency.
module memo_buffer
  import fm_pkg::*;
#(
  parameter int unsigned ENTRIES = MEMO_ENTRIES
) (
  input  logic                       clk,
  input  logic                       we,
  input  logic [$clog2(ENTRIES)-1:0] waddr,
  input  memo_entry_t                wdata,
  input  logic                       re,
  input  logic [$clog2(ENTRIES)-1:0] raddr,
  output memo_entry_t                rdata
);
  memo_entry_t mem [ENTRIES];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end
endmodule

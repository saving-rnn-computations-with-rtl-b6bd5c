// om_memory: the on-chip memory for intermediate results shared by the four
// computation units. In this design it holds the cell state c and the
// produced outputs h_t of an LSTM layer, at addresses chosen by the host.
//
// 6 MiB of 16-bit words (3 Mi words), one write port and two read ports: one
// for the cell-update sequencer, one for the host that collects results.
// Port count and organisation are this design's choice; the paper gives only
// its purpose and size.
//
// Timing: synchronous write; synchronous reads with one cycle of latency.
module om_memory
  import fm_pkg::*;
#(
  parameter int unsigned WORDS = OM_WORDS
) (
  input  logic                     clk,
  input  logic                     we,
  input  logic [$clog2(WORDS)-1:0] waddr,
  input  fx_t                      wdata,
  input  logic                     re_a,
  input  logic [$clog2(WORDS)-1:0] raddr_a,
  output fx_t                      rdata_a,
  input  logic                     re_b,
  input  logic [$clog2(WORDS)-1:0] raddr_b,
  output fx_t                      rdata_b
);
  fx_t mem [WORDS];

  always_ff @(posedge clk) begin
    if (we)   mem[waddr]  <= wdata;
    if (re_a) rdata_a <= mem[raddr_a];
    if (re_b) rdata_b <= mem[raddr_b];
  end
endmodule

// weight_buffer: the remaining (non-sign) bits of the full-precision weights of
// one gate. It is read only when the memoization unit refuses reuse and the
// neuron is evaluated in full precision, which is where the energy saving of
// the scheme comes from.
//
// A row holds N_LANES = 16 weights of 15 bits each (lane j in bits
// [15*j +: 15]), one DPU sub-vector. A neuron with K sub-vectors occupies K
// consecutive rows. The full weight is rebuilt by the DPU as
// {~sign_bit, rest}. 65536 rows x 240 bits plus the 512 x 2048 sign bits make
// the 2 MiB weight store of one computation unit.
//
// Timing: synchronous write; synchronous read with one cycle of latency.
module weight_buffer
  import fm_pkg::*;
#(
  parameter int unsigned ROWS  = WREST_ROWS,
  parameter int unsigned WIDTH = WREST_W
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

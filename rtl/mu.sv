// mu: multifunctional unit of a computation unit. It takes the neuron's
// pre-activation value (the DPU result, or the memoized y_m sent straight
// from the FMU when the DPU is bypassed), adds the neuron's bias, applies the
// gate's activation function and writes the gate output into its register
// file, where the LSTM cell update reads it.
//
// The paper lists bias, peephole and activation as the MU's work and builds
// it from FMUL/FADD/FEXP/FCMP/FRECP units and a register file. This design
// keeps the bias and the register file, follows the gate equations (which
// have no peephole term) and replaces exp/reciprocal with the piecewise-linear
// sigmoid and tanh of fm_pkg, in Q8.8 fixed point.
//
// Timing: in_valid in cycle 0; bias read in cycle 0; bias add in cycle 1;
// activation and register-file write in cycle 2 (out_valid with out_y and
// out_idx in cycle 3). One value per cycle. The register file and the bias
// memory have synchronous reads with one cycle of latency.
module mu
  import fm_pkg::*;
#(
  parameter int unsigned NEURONS = MAX_NEURONS
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  act_e                       act,
  // bias memory load
  input  logic                       b_we,
  input  logic [$clog2(NEURONS)-1:0] b_waddr,
  input  fx_t                        b_wdata,
  // neuron value in
  input  logic                       in_valid,
  input  logic [$clog2(NEURONS)-1:0] in_idx,
  input  fx_t                        in_y,
  // activated output (also written to the register file)
  output logic                       out_valid,
  output logic [$clog2(NEURONS)-1:0] out_idx,
  output fx_t                        out_y,
  // register file read port
  input  logic                       rf_re,
  input  logic [$clog2(NEURONS)-1:0] rf_raddr,
  output fx_t                        rf_rdata
);
  fx_t bias_mem [NEURONS];
  fx_t rf       [NEURONS];

  fx_t                         bias_q, y1_q, z_q;
  logic [$clog2(NEURONS)-1:0]  idx1_q, idx2_q;
  logic                        v1, v2;

  always_ff @(posedge clk) begin
    if (b_we)     bias_mem[b_waddr] <= b_wdata;
    if (in_valid) bias_q <= bias_mem[in_idx];
    y1_q   <= in_y;
    idx1_q <= in_idx;
    z_q    <= sat_fx(48'(y1_q) + 48'(bias_q));                 // FADD
    idx2_q <= idx1_q;
    if (v2) begin
      automatic fx_t a = (act == ACT_TANH) ? tanh_pwl(z_q) : sigmoid_pwl(z_q);
      rf[idx2_q] <= a;
      out_y      <= a;
      out_idx    <= idx2_q;
    end
    if (rf_re) rf_rdata <= rf[rf_raddr];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0; v2 <= 1'b0; out_valid <= 1'b0;
    end else begin
      v1 <= in_valid; v2 <= v1; out_valid <= v2;
    end
  end
endmodule

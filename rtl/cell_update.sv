// cell_update: element-wise part of the LSTM cell for one neuron,
//   c_t = f_t * c_{t-1} + i_t * g_t
//   h_t = o_t * tanh(c_t)
// on Q8.8 fixed-point values with saturation, tanh being the piecewise-linear
// approximation of fm_pkg.
//
// In the accelerator this work is split over the multifunctional units of the
// cell-updater CU (c_t) and the output-gate CU (h_t), which pass i_t, f_t and
// c_t between them. This design gathers it in one small pipelined unit fed by
// the register files of the four CUs; the equations are the paper's.
//
// Timing: in_valid in cycle 0, c_t in cycle 1, out_valid with c and h in
// cycle 2. One neuron per cycle.
module cell_update
  import fm_pkg::*;
#(
  parameter int unsigned IDX_W = $clog2(MAX_NEURONS)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  logic [IDX_W-1:0] in_idx,
  input  fx_t              i_g,
  input  fx_t              f_g,
  input  fx_t              g_g,
  input  fx_t              o_g,
  input  fx_t              c_prev,
  output logic             out_valid,
  output logic [IDX_W-1:0] out_idx,
  output fx_t              c_new,
  output fx_t              h_new
);
  fx_t              c_q, o_q;
  logic [IDX_W-1:0] idx_q;
  logic             v1;

  always_ff @(posedge clk) begin
    c_q   <= sat_fx(48'(fx_mul(f_g, c_prev)) + 48'(fx_mul(i_g, g_g)));
    o_q   <= o_g;
    idx_q <= in_idx;
    c_new   <= c_q;
    h_new   <= fx_mul(o_q, tanh_pwl(c_q));
    out_idx <= idx_q;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0; out_valid <= 1'b0;
    end else begin
      v1 <= in_valid; out_valid <= v1;
    end
  end
endmodule

// cmp_unit: comparison unit of the fuzzy memoization unit. It decides whether
// the memoized output of a neuron may be reused.
//
//   epsilon = |y_t^b - y_m^b| / |y_t^b|      (SUB, ABS, IDIV)
//   delta_t = delta_{t-1} + epsilon
//   reuse   = (delta_t <= theta) AND NOT force_eval   (AND)
//
// epsilon, delta and theta are unsigned fixed point with DELTA_FRAC
// fractional bits in INT_W = 16 bits, saturating at the maximum. The formula
// and the comparison follow the paper. The handling of y_t^b = 0 (epsilon = 0
// if y_m^b is also 0, otherwise the maximum, so the neuron is evaluated), the
// saturation and the force_eval input (used on the first time-step, when the
// table holds nothing) are this design's choices.
//
// Timing: one cycle. Inputs qualified by in_valid in cycle t produce
// out_valid, reuse and delta in cycle t+1.
module cmp_unit
  import fm_pkg::*;
(
  input  logic    clk,
  input  logic    rst_n,
  input  logic    in_valid,
  input  bint_t   y_b,         // current binary neuron output
  input  bint_t   ym_b,        // memoized binary neuron output
  input  delta_t  delta_prev,  // memoized delta
  input  delta_t  theta,       // threshold
  input  logic    force_eval,
  output logic    out_valid,
  output logic    reuse,
  output delta_t  delta        // delta_t = delta_prev + epsilon
);
  localparam int unsigned NW = INT_W + 2 + DELTA_FRAC;
  localparam delta_t DMAX = '1;

  logic signed [INT_W:0] diff;
  logic        [INT_W:0] adiff, aden;
  logic        [NW-1:0]  quot;
  delta_t                eps;
  logic        [INT_W:0] sum;
  delta_t                delta_d;

  always_comb begin
    diff  = (INT_W+1)'(y_b) - (INT_W+1)'(ym_b);                    // SUB
    adiff = diff[INT_W] ? (INT_W+1)'(-diff) : (INT_W+1)'(diff);     // ABS
    aden  = y_b[INT_W-1] ? (INT_W+1)'(-(INT_W+1)'(y_b)) : (INT_W+1)'(y_b);
    if (aden == '0)
      quot = (adiff == '0) ? '0 : '1;
    else
      quot = (NW'(adiff) << DELTA_FRAC) / NW'(aden);               // IDIV
    eps     = (quot > NW'(DMAX)) ? DMAX : delta_t'(quot);
    sum     = (INT_W+1)'(delta_prev) + (INT_W+1)'(eps);
    delta_d = sum[INT_W] ? DMAX : sum[INT_W-1:0];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;
  end

  always_ff @(posedge clk) begin
    if (in_valid) begin
      delta <= delta_d;
      reuse <= (delta_d <= theta) & ~force_eval;                   // AND
    end
  end
endmodule

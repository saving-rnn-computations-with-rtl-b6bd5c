// dpu: dot product unit of a computation unit. It evaluates one neuron in
// full precision, y = sum_i w_i * v_i over the input vector v = [x_t, h_{t-1}],
// N_LANES = 16 products per cycle.
//
// As in the paper, the input and weight vectors are split into K sub-vectors
// of N elements; for each, N multipliers form the products, an N-input adder
// reduction tree sums them and an accumulator adds the partial sums. Each
// weight is rebuilt from the two halves of the split weight store: the sign
// bit from the sign buffer row already fetched for the binary neuron (stored
// 1 = weight >= 0, so the two's complement sign bit is its inverse) and the
// 15 remaining bits from the weight buffer. Lanes at or beyond len contribute
// zero. Arithmetic is Q8.8 fixed point with a 48-bit accumulator and a
// saturated Q8.8 result; the paper's unit uses floating point.
//
// Timing: start in cycle 0 issues the first sub-vector read; one read per
// cycle for K cycles. Stages: read (1), multiply (1), reduce (1), accumulate.
// The first read is issued in cycle 1; done and y appear in cycle K+4. start
// is ignored while busy.
module dpu
  import fm_pkg::*;
#(
  parameter int unsigned LANES  = N_LANES,
  parameter int unsigned SWIDTH = BDPU_W,
  parameter int unsigned WROWS  = WREST_ROWS,
  parameter int unsigned IROWS  = IN_ROWS
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          start,
  input  logic [$clog2(WROWS)-1:0]      w_base,    // first weight row of the neuron
  input  logic [$clog2(SWIDTH/LANES):0] k_count,   // number of sub-vectors, >= 1
  input  logic [$clog2(SWIDTH):0]       len,       // valid input elements
  // weight buffer (remaining bits)
  output logic                          w_re,
  output logic [$clog2(WROWS)-1:0]      w_raddr,
  input  logic [LANES*(DATA_W-1)-1:0]   w_rdata,
  // input buffer
  output logic                          in_re,
  output logic [$clog2(IROWS)-1:0]      in_raddr,
  input  fx_t                           in_rdata [LANES],
  // sign row of the neuron (held by the sign buffer)
  input  logic [SWIDTH-1:0]             sign_row,
  output logic                          busy,
  output logic                          done,
  output fx_t                           y
);
  localparam int unsigned KW = $clog2(SWIDTH/LANES) + 1;

  logic [KW-1:0]  k_q;
  logic           run_q;
  // pipeline valid / last flags and the sub-vector index of each stage
  logic           v_a, v_b, v_c, l_a, l_b, l_c;
  logic [KW-1:0]  k_a;

  logic signed [31:0] prod_q [LANES];
  logic signed [47:0] sum_q;
  logic signed [47:0] acc_q;

  assign w_re     = run_q;
  assign in_re    = run_q;
  assign w_raddr  = w_base + $clog2(WROWS)'(k_q);
  assign in_raddr = $clog2(IROWS)'(k_q);
  assign busy     = run_q | v_a | v_b | v_c;

  // issue of sub-vector reads
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run_q <= 1'b0;
      k_q   <= '0;
    end else if (!busy && start) begin
      run_q <= 1'b1;
      k_q   <= '0;
    end else if (run_q) begin
      if (k_q == k_count - 1'b1) run_q <= 1'b0;
      else                       k_q   <= k_q + 1'b1;
    end
  end

  // the cycle that issues the first read must see k_q = 0
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v_a <= 1'b0; v_b <= 1'b0; v_c <= 1'b0; done <= 1'b0;
    end else begin
      v_a  <= run_q;
      v_b  <= v_a;
      v_c  <= v_b;
      done <= v_c & l_c;
    end
  end

  always_ff @(posedge clk) begin
    l_a <= run_q && (k_q == k_count - 1'b1);
    k_a <= k_q;
    l_b <= l_a;
    l_c <= l_b;
  end

  // stage: multiply (N-multiplier)
  always_ff @(posedge clk) begin
    for (int j = 0; j < LANES; j++) begin
      automatic int unsigned pos = int'(k_a) * LANES + j;
      automatic fx_t w = {~sign_row[pos % SWIDTH], w_rdata[j*(DATA_W-1) +: DATA_W-1]};
      prod_q[j] <= (pos < int'(len)) ? 32'(w) * 32'(in_rdata[j]) : 32'sd0;
    end
  end

  // stage: N-adder reduction
  always_ff @(posedge clk) begin
    logic signed [47:0] s;
    s = '0;
    for (int j = 0; j < LANES; j++) s = s + 48'(prod_q[j]);
    sum_q <= s;
  end

  // stage: accumulate; the first partial sum of a neuron restarts the accumulator
  logic first_c;
  logic first_b;
  always_ff @(posedge clk) begin
    first_b <= v_a && (k_a == '0);
    first_c <= first_b;
  end

  always_ff @(posedge clk) begin
    if (v_c) begin
      acc_q <= (first_c ? 48'sd0 : acc_q) + sum_q;
      if (l_c) y <= sat_fx((first_c ? 48'sd0 : acc_q) + sum_q >>> FRAC);
    end
  end
endmodule

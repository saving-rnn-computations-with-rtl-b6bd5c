// fmu: fuzzy memoization unit of one computation unit. For every neuron of
// the gate it evaluates the binarized neuron and decides whether the memoized
// full-precision output can be reused instead of running the DPU.
//
// Contents, as in the paper: a binarized input buffer holding
// [sign(x_t), sign(h_{t-1})], the binary dot product unit (bdpu), the
// comparison unit (cmp_unit) and the memoization buffer (memo_buffer). The
// sign buffer that holds the binarized weights sits outside, in the
// computation unit; the FMU drives its read port.
//
// Operation for neuron n, issued in cycle 0 (issue_valid, issue_idx):
//   cycle 0  read sign row n and memo entry n
//   cycle 1  BDPU starts on the sign row and the binarized inputs
//   cycle 4  y_t^b ready; comparison unit computes delta_t
//   cycle 5  res_valid: reuse, y_m, y_t^b
// This is the 5-cycle latency the paper gives for the unit. On reuse the FMU
// writes {y_m, y_m^b, delta_t} back in cycle 5. Otherwise the computation unit
// evaluates the neuron and returns the DPU result through upd_valid/upd_y; the
// FMU then writes {y_t, y_t^b, 0}. A new neuron may be issued in the same cycle
// as either write: a read of the entry being written is forwarded.
//
// sin_we/sin_idx/sin_bit fill the binarized input buffer one bit at a time,
// alongside writes of the full-precision input buffer.
module fmu
  import fm_pkg::*;
#(
  parameter int unsigned WIDTH   = BDPU_W,
  parameter int unsigned ENTRIES = MEMO_ENTRIES,
  parameter int unsigned ROWS    = SIGN_ROWS
) (
  input  logic                       clk,
  input  logic                       rst_n,
  // configuration
  input  delta_t                     theta,
  input  logic [$clog2(WIDTH):0]     len,
  input  logic                       force_eval,
  // binarized input buffer fill
  input  logic                       sin_we,
  input  logic [$clog2(WIDTH)-1:0]   sin_idx,
  input  logic                       sin_bit,
  // sign buffer read port
  output logic                       sign_re,
  output logic [$clog2(ROWS)-1:0]    sign_raddr,
  input  logic [WIDTH-1:0]           sign_rdata,
  // neuron issue
  input  logic                       issue_valid,
  input  logic [$clog2(ROWS)-1:0]    issue_idx,
  // decision
  output logic                       res_valid,
  output logic                       reuse,
  output fx_t                        ym,
  output bint_t                      yb,
  // full-precision result of an evaluated neuron
  input  logic                       upd_valid,
  input  fx_t                        upd_y
);
  logic [WIDTH-1:0] sin_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      sin_q <= '0;
    else if (sin_we) sin_q[sin_idx] <= sin_bit;
  end

  // ---------------------------------------------------------------- reads
  logic                        memo_we;
  logic [$clog2(ENTRIES)-1:0]  memo_waddr;
  memo_entry_t                 memo_wdata, memo_rdata, memo_cur;
  logic                        byp_q;
  memo_entry_t                 byp_data;
  logic [$clog2(ROWS)-1:0]     idx_q;
  logic                        v1;

  assign sign_re    = issue_valid;
  assign sign_raddr = issue_idx;

  memo_buffer #(.ENTRIES(ENTRIES)) u_memo (
    .clk   (clk),
    .we    (memo_we),
    .waddr (memo_waddr),
    .wdata (memo_wdata),
    .re    (issue_valid),
    .raddr ($clog2(ENTRIES)'(issue_idx)),
    .rdata (memo_rdata)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) v1 <= 1'b0;
    else        v1 <= issue_valid;
  end

  always_ff @(posedge clk) begin
    if (issue_valid) begin
      idx_q    <= issue_idx;
      byp_q    <= memo_we && (memo_waddr == $clog2(ENTRIES)'(issue_idx));
      byp_data <= memo_wdata;
    end
  end

  assign memo_cur = byp_q ? byp_data : memo_rdata;

  // ---------------------------------------------------------------- BDPU
  logic  b_valid;
  bint_t b_y;

  bdpu #(.WIDTH(WIDTH)) u_bdpu (
    .clk       (clk),
    .rst_n     (rst_n),
    .in_valid  (v1),
    .w_sign    (sign_rdata),
    .x_sign    (sin_q),
    .len       (len),
    .out_valid (b_valid),
    .y_b       (b_y)
  );

  // ---------------------------------------------------------------- CMP
  delta_t c_delta;
  logic   c_valid, c_reuse;
  bint_t  yb_q;
  fx_t    ym_q;
  bint_t  ymb_keep_q;

  cmp_unit u_cmp (
    .clk        (clk),
    .rst_n      (rst_n),
    .in_valid   (b_valid),
    .y_b        (b_y),
    .ym_b       (memo_cur.ymb),
    .delta_prev (memo_cur.delta),
    .theta      (theta),
    .force_eval (force_eval),
    .out_valid  (c_valid),
    .reuse      (c_reuse),
    .delta      (c_delta)
  );

  always_ff @(posedge clk) begin
    if (b_valid) begin
      yb_q       <= b_y;
      ym_q       <= memo_cur.ym;
      ymb_keep_q <= memo_cur.ymb;
    end
  end

  assign res_valid = c_valid;
  assign reuse     = c_reuse;
  assign ym        = ym_q;
  assign yb        = yb_q;

  // ---------------------------------------------------------------- writes
  always_comb begin
    memo_we    = 1'b0;
    memo_waddr = $clog2(ENTRIES)'(idx_q);
    memo_wdata = '{ym: ym_q, ymb: ymb_keep_q, delta: c_delta};
    if (c_valid && c_reuse) begin
      memo_we = 1'b1;                                   // keep y_m, y_m^b; store delta_t
    end else if (upd_valid) begin
      memo_we    = 1'b1;                                // new y_m, y_m^b, delta = 0
      memo_wdata = '{ym: upd_y, ymb: yb_q, delta: '0};
    end
  end

endmodule

// cu: computation unit for one gate of an LSTM cell, extended for fuzzy
// memoization. It evaluates all neurons of its gate for one input element.
//
// Contents: the split weight store (sign_buffer with the weight signs,
// weight_buffer with the remaining bits), the full-precision input_buffer,
// the fuzzy memoization unit (fmu), the dot product unit (dpu), the
// multifunctional unit (mu) and a sequencer. Neurons are processed one after
// another, as in the paper:
//   1. the FMU evaluates the binary neuron and decides (5 cycles);
//   2. on reuse, the memoized y_m goes straight to the MU, bypassing the DPU,
//      and the FMU stores the new delta;
//   3. otherwise the DPU evaluates the neuron over its K sub-vectors, the
//      result goes to the MU and the FMU caches y_t, y_t^b and delta = 0.
// The next neuron is issued to the FMU in the cycle the current one leaves,
// so a reused neuron costs 5 cycles and an evaluated one 5 + K + 4 cycles.
// The MU works on a value while the FMU/DPU go on with the next neuron.
//
// Configuration (held stable while busy): n_neurons, len = number of inputs
// [x_t, h_{t-1}] (<= 2048), k_count = ceil(len/16), theta, act, and
// force_eval, set on the first element of a sequence so that every neuron is
// evaluated and its memo entry written. Neuron n's weights are sign row n and
// weight rows n*k_count .. n*k_count+k_count-1. Input element i is input
// buffer word i and bit i of the FMU's binarized input buffer; in_we writes
// both.
//
// start (in IDLE) begins a pass; done pulses for one cycle when the last gate
// output has been written to the MU register file. reuse_cnt / eval_cnt count
// neurons since reset.
module cu
  import fm_pkg::*;
#(
  parameter int unsigned NEURONS = MAX_NEURONS,
  parameter int unsigned SWIDTH  = BDPU_W,
  parameter int unsigned WROWS   = WREST_ROWS,
  parameter int unsigned IWORDS  = IN_WORDS,
  parameter int unsigned ENTRIES = MEMO_ENTRIES
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // configuration
  input  act_e                          act,
  input  delta_t                        theta,
  input  logic                          force_eval,
  input  logic [$clog2(NEURONS):0]      n_neurons,
  input  logic [$clog2(SWIDTH):0]       len,
  input  logic [$clog2(SWIDTH/N_LANES):0] k_count,
  // loading
  input  logic                          sign_we,
  input  logic [$clog2(NEURONS)-1:0]    sign_waddr,
  input  logic [SWIDTH-1:0]             sign_wdata,
  input  logic                          w_we,
  input  logic [$clog2(WROWS)-1:0]      w_waddr,
  input  logic [N_LANES*(DATA_W-1)-1:0] w_wdata,
  input  logic                          b_we,
  input  logic [$clog2(NEURONS)-1:0]    b_waddr,
  input  fx_t                           b_wdata,
  input  logic                          in_we,
  input  logic [$clog2(IWORDS)-1:0]     in_waddr,
  input  fx_t                           in_wdata,
  // control
  input  logic                          start,
  output logic                          busy,
  output logic                          done,
  // gate outputs
  output logic                          out_valid,
  output logic [$clog2(NEURONS)-1:0]    out_idx,
  output fx_t                           out_y,
  input  logic                          rf_re,
  input  logic [$clog2(NEURONS)-1:0]    rf_raddr,
  output fx_t                           rf_rdata,
  // statistics
  output logic [31:0]                   reuse_cnt,
  output logic [31:0]                   eval_cnt
);
  localparam int unsigned NW = $clog2(NEURONS);
  localparam int unsigned IROWS = IWORDS / N_LANES;

  typedef enum logic [1:0] {S_IDLE, S_WAIT, S_DPU, S_DRAIN} state_e;
  state_e state;

  logic [NW-1:0] n_q;
  logic [1:0]    drain_q;
  logic          last;
  assign last = ({1'b0, n_q} == n_neurons - 1'b1);

  // ---------------------------------------------------------------- buffers
  logic                      s_re;
  logic [NW-1:0]             s_raddr;
  logic [SWIDTH-1:0]         s_rdata;
  logic                      w_re;
  logic [$clog2(WROWS)-1:0]  w_raddr;
  logic [N_LANES*(DATA_W-1)-1:0] w_rdata;
  logic                      i_re;
  logic [$clog2(IROWS)-1:0]  i_raddr;
  fx_t                       i_rdata [N_LANES];

  sign_buffer #(.ROWS(NEURONS), .WIDTH(SWIDTH)) u_sign (
    .clk(clk), .we(sign_we), .waddr(sign_waddr), .wdata(sign_wdata),
    .re(s_re), .raddr(s_raddr), .rdata(s_rdata));

  weight_buffer #(.ROWS(WROWS), .WIDTH(N_LANES*(DATA_W-1))) u_wbuf (
    .clk(clk), .we(w_we), .waddr(w_waddr), .wdata(w_wdata),
    .re(w_re), .raddr(w_raddr), .rdata(w_rdata));

  input_buffer #(.WORDS(IWORDS), .LANES(N_LANES)) u_ibuf (
    .clk(clk), .we(in_we), .waddr(in_waddr), .wdata(in_wdata),
    .re(i_re), .raddr(i_raddr), .rdata(i_rdata));

  // ---------------------------------------------------------------- FMU
  logic   issue_valid;
  logic [NW-1:0] issue_idx;
  logic   res_valid, res_reuse;
  fx_t    res_ym;
  bint_t  res_yb;
  logic   dpu_done;
  fx_t    dpu_y;
  logic   dpu_busy, dpu_start;

  fmu #(.WIDTH(SWIDTH), .ENTRIES(ENTRIES), .ROWS(NEURONS)) u_fmu (
    .clk(clk), .rst_n(rst_n),
    .theta(theta), .len(len), .force_eval(force_eval),
    .sin_we(in_we && (32'(in_waddr) < SWIDTH)),
    .sin_idx($clog2(SWIDTH)'(in_waddr)),
    .sin_bit(bin_fx(in_wdata)),
    .sign_re(s_re), .sign_raddr(s_raddr), .sign_rdata(s_rdata),
    .issue_valid(issue_valid), .issue_idx(issue_idx),
    .res_valid(res_valid), .reuse(res_reuse), .ym(res_ym), .yb(res_yb),
    .upd_valid(dpu_done), .upd_y(dpu_y));

  // ---------------------------------------------------------------- DPU
  dpu #(.LANES(N_LANES), .SWIDTH(SWIDTH), .WROWS(WROWS), .IROWS(IROWS)) u_dpu (
    .clk(clk), .rst_n(rst_n),
    .start(dpu_start),
    .w_base($clog2(WROWS)'(32'(n_q) * 32'(k_count))),
    .k_count(k_count), .len(len),
    .w_re(w_re), .w_raddr(w_raddr), .w_rdata(w_rdata),
    .in_re(i_re), .in_raddr(i_raddr), .in_rdata(i_rdata),
    .sign_row(s_rdata),
    .busy(dpu_busy), .done(dpu_done), .y(dpu_y));

  // ---------------------------------------------------------------- MU
  logic mu_valid;
  fx_t  mu_y;

  mu #(.NEURONS(NEURONS)) u_mu (
    .clk(clk), .rst_n(rst_n), .act(act),
    .b_we(b_we), .b_waddr(b_waddr), .b_wdata(b_wdata),
    .in_valid(mu_valid), .in_idx(n_q), .in_y(mu_y),
    .out_valid(out_valid), .out_idx(out_idx), .out_y(out_y),
    .rf_re(rf_re), .rf_raddr(rf_raddr), .rf_rdata(rf_rdata));

  // ---------------------------------------------------------------- sequencer
  always_comb begin
    issue_valid = 1'b0;
    issue_idx   = n_q;
    dpu_start   = 1'b0;
    mu_valid    = 1'b0;
    mu_y        = res_ym;
    unique case (state)
      S_IDLE: begin
        issue_valid = start && (n_neurons != '0);
        issue_idx   = '0;
      end
      S_WAIT: if (res_valid) begin
        if (res_reuse) begin
          mu_valid    = 1'b1;                   // bypass: y_m straight to the MU
          issue_valid = !last;
          issue_idx   = n_q + 1'b1;
        end else begin
          dpu_start   = 1'b1;
        end
      end
      S_DPU: if (dpu_done) begin
        mu_valid    = 1'b1;
        mu_y        = dpu_y;
        issue_valid = !last;
        issue_idx   = n_q + 1'b1;
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      n_q       <= '0;
      drain_q   <= '0;
      done      <= 1'b0;
      reuse_cnt <= '0;
      eval_cnt  <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          n_q <= '0;
          if (n_neurons != '0) state <= S_WAIT;
          else                 done  <= 1'b1;
        end
        S_WAIT: if (res_valid) begin
          if (res_reuse) begin
            reuse_cnt <= reuse_cnt + 1;
            if (last) begin state <= S_DRAIN; drain_q <= '0; end
            else      n_q <= n_q + 1'b1;
          end else begin
            state <= S_DPU;
          end
        end
        S_DPU: if (dpu_done) begin
          eval_cnt <= eval_cnt + 1;
          if (last) begin state <= S_DRAIN; drain_q <= '0; end
          else begin state <= S_WAIT; n_q <= n_q + 1'b1; end
        end
        S_DRAIN: begin
          // the MU needs three cycles to write the last output
          drain_q <= drain_q + 1'b1;
          if (drain_q == 2'd2) begin state <= S_IDLE; done <= 1'b1; end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);

  // a pass must not be started while one is running, and the DPU is only
  // started when it is idle
  assert property (@(posedge clk) disable iff (!rst_n) dpu_start |-> !dpu_busy);
  assert property (@(posedge clk) disable iff (!rst_n) (state == S_DPU) |-> !res_valid);
endmodule

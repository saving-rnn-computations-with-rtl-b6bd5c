// epur_bm_top: an LSTM accelerator with neuron-level fuzzy memoization. Four
// computation units, one per LSTM gate (input i, forget f, cell updater g,
// output o), evaluate their gates in parallel for one element of the input
// sequence; each unit first runs a binarized copy of every neuron and reuses
// the neuron's cached output when the binary outputs show that it has changed
// little, evaluating the neuron in full precision only otherwise. After the
// four gates, the cell update computes c_t and h_t for every neuron, stores
// both in the on-chip memory (om_memory) and writes h_t into the input
// buffers of the four units as the recurrent input of the next element.
//
// One call (start .. done) processes one time-step of one LSTM layer:
//   1. host, in IDLE: load weights (sign rows, remaining bits, biases; cu_sel
//      picks the gate), x_t into input-buffer words 0..nx-1 (broadcast to all
//      units; h_{-1} at words nx..nx+nh-1 before the first step) and, before
//      the first step, c_{-1} into the on-chip memory at c_base..;
//   2. start: the four units run their gates (GATES);
//   3. CELL: for each neuron j, i/f/g/o are read from the units' register
//      files and c_{t-1} from c_base+j; c_t is written back to c_base+j, h_t
//      to h_base+j and to input-buffer word nx+j of every unit;
//   4. done pulses; step_cycles holds the cycles the call took.
// first_step forces full evaluation of every neuron (the memo tables are
// empty on the first element of a sequence). The host must hold the
// configuration stable while busy. The DRAM the weights come from is outside.
//
// Structure and data flow follow the paper's block diagram: x_t to all units,
// i_t and f_t to the cell updater, c_t to the output gate, h_t back to every
// unit and to the on-chip memory. Gathering the element-wise work in one
// cell_update unit, the two-phase sequencing and the addressing are this
// design's choices.
module epur_bm_top
  import fm_pkg::*;
#(
  parameter int unsigned NEURONS = MAX_NEURONS,
  parameter int unsigned SWIDTH  = BDPU_W,
  parameter int unsigned WROWS   = WREST_ROWS,
  parameter int unsigned IWORDS  = IN_WORDS,
  parameter int unsigned ENTRIES = MEMO_ENTRIES,
  parameter int unsigned OMWORDS = OM_WORDS
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // layer configuration
  input  logic [$clog2(SWIDTH):0]       nx,          // forward inputs
  input  logic [$clog2(NEURONS):0]      nh,          // neurons (recurrent inputs)
  input  delta_t                        theta,
  input  logic                          first_step,
  input  logic [$clog2(OMWORDS)-1:0]    c_base,
  input  logic [$clog2(OMWORDS)-1:0]    h_base,
  // weight loading (from main memory)
  input  gate_e                         cu_sel,
  input  logic                          sign_we,
  input  logic [$clog2(NEURONS)-1:0]    sign_waddr,
  input  logic [SWIDTH-1:0]             sign_wdata,
  input  logic                          w_we,
  input  logic [$clog2(WROWS)-1:0]      w_waddr,
  input  logic [N_LANES*(DATA_W-1)-1:0] w_wdata,
  input  logic                          b_we,
  input  logic [$clog2(NEURONS)-1:0]    b_waddr,
  input  fx_t                           b_wdata,
  // input vector loading, broadcast to the four units
  input  logic                          in_we,
  input  logic [$clog2(IWORDS)-1:0]     in_waddr,
  input  fx_t                           in_wdata,
  // on-chip memory, host side
  input  logic                          om_we,
  input  logic [$clog2(OMWORDS)-1:0]    om_waddr,
  input  fx_t                           om_wdata,
  input  logic                          om_re,
  input  logic [$clog2(OMWORDS)-1:0]    om_raddr,
  output fx_t                           om_rdata,
  // control and status
  input  logic                          start,
  output logic                          busy,
  output logic                          done,
  output logic [31:0]                   step_cycles,
  output logic [31:0]                   reuse_cnt [4],
  output logic [31:0]                   eval_cnt  [4]
);
  localparam int unsigned NW = $clog2(NEURONS);
  localparam int unsigned OW = $clog2(OMWORDS);
  localparam int unsigned IW = $clog2(IWORDS);

  typedef enum logic [1:0] {T_IDLE, T_GATES, T_CELL} tstate_e;
  tstate_e state;

  logic [$clog2(SWIDTH):0]         len;
  logic [$clog2(SWIDTH/N_LANES):0] k_count;
  assign len     = nx + ($clog2(SWIDTH)+1)'(nh);
  assign k_count = ($clog2(SWIDTH/N_LANES)+1)'((32'(len) + (N_LANES-1)) / N_LANES);

  // ---------------------------------------------------------------- units
  logic       cu_start;
  logic [3:0] cu_done, cu_busy, done_seen;
  logic       cell_rf_re;
  logic [NW-1:0] cell_rf_addr;
  fx_t        rf_data [4];
  logic       h_we;
  logic [IW-1:0] h_waddr;
  fx_t        h_wdata;

  for (genvar g = 0; g < 4; g++) begin : g_cu
    logic          ov;
    logic [NW-1:0] oi;
    fx_t           oy;
    cu #(.NEURONS(NEURONS), .SWIDTH(SWIDTH), .WROWS(WROWS), .IWORDS(IWORDS),
         .ENTRIES(ENTRIES)) u_cu (
      .clk(clk), .rst_n(rst_n),
      .act((g == int'(GATE_G)) ? ACT_TANH : ACT_SIGMOID),
      .theta(theta), .force_eval(first_step),
      .n_neurons(nh), .len(len), .k_count(k_count),
      .sign_we(sign_we && (cu_sel == gate_e'(g))), .sign_waddr(sign_waddr), .sign_wdata(sign_wdata),
      .w_we(w_we && (cu_sel == gate_e'(g))), .w_waddr(w_waddr), .w_wdata(w_wdata),
      .b_we(b_we && (cu_sel == gate_e'(g))), .b_waddr(b_waddr), .b_wdata(b_wdata),
      .in_we(h_we || (in_we && state == T_IDLE)),
      .in_waddr(h_we ? h_waddr : in_waddr),
      .in_wdata(h_we ? h_wdata : in_wdata),
      .start(cu_start), .busy(cu_busy[g]), .done(cu_done[g]),
      .out_valid(ov), .out_idx(oi), .out_y(oy),
      .rf_re(cell_rf_re), .rf_raddr(cell_rf_addr), .rf_rdata(rf_data[g]),
      .reuse_cnt(reuse_cnt[g]), .eval_cnt(eval_cnt[g]));
  end

  // ---------------------------------------------------------------- OM
  logic          om_int_we;
  logic [OW-1:0] om_int_waddr;
  fx_t           om_int_wdata;
  logic          c_re;
  logic [OW-1:0] c_raddr;
  fx_t           c_rdata;

  om_memory #(.WORDS(OMWORDS)) u_om (
    .clk(clk),
    .we(om_int_we || (om_we && state == T_IDLE)),
    .waddr(om_int_we ? om_int_waddr : om_waddr),
    .wdata(om_int_we ? om_int_wdata : om_wdata),
    .re_a(c_re), .raddr_a(c_raddr), .rdata_a(c_rdata),
    .re_b(om_re), .raddr_b(om_raddr), .rdata_b(om_rdata));

  // ---------------------------------------------------------------- cell update
  logic          cu_in_v;
  logic [NW-1:0] cu_in_idx;
  logic          cu_out_v;
  logic [NW-1:0] cu_out_idx;
  fx_t           c_new, h_new;

  cell_update #(.IDX_W(NW)) u_cell (
    .clk(clk), .rst_n(rst_n),
    .in_valid(cu_in_v), .in_idx(cu_in_idx),
    .i_g(rf_data[GATE_I]), .f_g(rf_data[GATE_F]), .g_g(rf_data[GATE_G]),
    .o_g(rf_data[GATE_O]), .c_prev(c_rdata),
    .out_valid(cu_out_v), .out_idx(cu_out_idx), .c_new(c_new), .h_new(h_new));

  // ---------------------------------------------------------------- sequencer
  logic [NW:0]   j_issue, j_done;
  logic          phase;
  logic          hw_pend;
  fx_t           h_q;
  logic [NW-1:0] hidx_q;

  assign cu_start     = (state == T_IDLE) && start;
  assign cell_rf_re   = (state == T_CELL) && !phase && (j_issue < nh);
  assign cell_rf_addr = NW'(j_issue);
  assign c_re         = cell_rf_re;
  assign c_raddr      = c_base + OW'(j_issue);

  // c_t is written when the cell update delivers it, h_t one cycle later
  always_comb begin
    om_int_we    = 1'b0;
    om_int_waddr = c_base + OW'(cu_out_idx);
    om_int_wdata = c_new;
    if (cu_out_v) begin
      om_int_we = 1'b1;
    end else if (hw_pend) begin
      om_int_we    = 1'b1;
      om_int_waddr = h_base + OW'(hidx_q);
      om_int_wdata = h_q;
    end
  end

  assign h_we    = cu_out_v;
  assign h_waddr = IW'(nx) + IW'(cu_out_idx);
  assign h_wdata = h_new;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= T_IDLE;
      done_seen   <= '0;
      j_issue     <= '0;
      j_done      <= '0;
      phase       <= 1'b0;
      hw_pend     <= 1'b0;
      cu_in_v     <= 1'b0;
      done        <= 1'b0;
      step_cycles <= '0;
    end else begin
      done    <= 1'b0;
      cu_in_v <= cell_rf_re;
      hw_pend <= cu_out_v;
      if (state != T_IDLE) step_cycles <= step_cycles + 1;
      unique case (state)
        T_IDLE: if (start) begin
          state       <= T_GATES;
          done_seen   <= '0;
          step_cycles <= 32'd1;
        end
        T_GATES: begin
          if ((done_seen | cu_done) == 4'hF) begin
            state   <= T_CELL;
            j_issue <= '0;
            j_done  <= '0;
            phase   <= 1'b0;
          end
          done_seen <= done_seen | cu_done;
        end
        T_CELL: begin
          phase <= ~phase;
          if (cell_rf_re) j_issue <= j_issue + 1'b1;
          if (hw_pend) begin
            j_done <= j_done + 1'b1;
            if (j_done + 1'b1 == nh) begin state <= T_IDLE; done <= 1'b1; end
          end else if (nh == '0) begin
            state <= T_IDLE; done <= 1'b1;
          end
        end
        default: state <= T_IDLE;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    cu_in_idx <= NW'(j_issue);
    if (cu_out_v) begin
      h_q    <= h_new;
      hidx_q <= cu_out_idx;
    end
  end

  assign busy = (state != T_IDLE);

  // the four units run in lock-step calls; none may still be busy when the
  // cell phase starts
  assert property (@(posedge clk) disable iff (!rst_n) (state == T_CELL) |-> (cu_busy == '0));
  assert property (@(posedge clk) disable iff (!rst_n) cu_out_v |-> !hw_pend);
endmodule

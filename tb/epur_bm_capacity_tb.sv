// epur_bm_capacity_tb: the layer test of lstm_workloads_tb at the largest
// layer one gate can hold with the default sizes: 1536 forward inputs and 512
// neurons, so that the concatenated input [x_t, h_{t-1}] is 2048 elements,
// the full BDPU width; every one of the 512 sign rows and all 65536 weight
// rows of each gate are in use (512 neurons x 128 sub-vectors), and the
// input buffers are half full. It runs three time-steps, enough for the
// memoization throttle to act.
//
// The checks are those of lstm_workloads_tb: per step and gate the reuse
// decision of every neuron (through the counters), the exact cycle count,
// and c_t and h_t of every neuron read back from the on-chip memory against
// a model in real arithmetic. Forced evaluation, reuse, refused reuse,
// throttling and the h_t write-back must each happen at least once.
module epur_bm_capacity_tb;
  import fm_pkg::*;
  localparam int MAXX  = 1536;
  localparam int MAXH  = 512;
  int NX, NH, LEN, K, STEPS;
  localparam int C_BASE = 16;
  localparam int H_BASE = 4096;
  localparam int THETA  = 80;      // 0.3125 in Q8.8

  localparam int unsigned NW = $clog2(MAX_NEURONS);
  localparam int unsigned OW = $clog2(OM_WORDS);
  localparam int unsigned IW = $clog2(IN_WORDS);

  logic clk = 1'b0, rst_n = 1'b0;
  logic [$clog2(BDPU_W):0] nx;
  logic [NW:0] nh;
  delta_t theta;
  logic first_step;
  logic [OW-1:0] c_base, h_base;
  gate_e cu_sel;
  logic sign_we, w_we, b_we, in_we, om_we, om_re, start, busy, done;
  logic [NW-1:0] sign_waddr, b_waddr;
  logic [BDPU_W-1:0] sign_wdata;
  logic [$clog2(WREST_ROWS)-1:0] w_waddr;
  logic [N_LANES*(DATA_W-1)-1:0] w_wdata;
  fx_t b_wdata, in_wdata, om_wdata, om_rdata;
  logic [IW-1:0] in_waddr;
  logic [OW-1:0] om_waddr, om_raddr;
  logic [31:0] step_cycles;
  logic [31:0] reuse_cnt [4];
  logic [31:0] eval_cnt [4];

  epur_bm_top dut (.*);

  fx_t W [4][MAXH][MAXX+MAXH];
  fx_t B [4][MAXH];
  fx_t X [MAXX];
  fx_t H [MAXH];
  fx_t C [MAXH];
  int  m_ym [4][MAXH], m_ymb [4][MAXH], m_delta [4][MAXH];
  int  checks = 0, failures = 0, cyc = 0;
  int  ev_forced = 0, ev_reuse = 0, ev_eval = 0, ev_throttle = 0, ev_writeback = 0;
  int  tot_re [4], tot_ev [4];

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    #400000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic real pwl_sig(real x);
    real a, y;
    a = (x < 0.0) ? -x : x;
    if (a >= 5.0)        y = 1.0;
    else if (a >= 2.375) y = 0.03125 * a + 0.84375;
    else if (a >= 1.0)   y = 0.125 * a + 0.625;
    else                 y = 0.25 * a + 0.5;
    return (x < 0.0) ? 1.0 - y : y;
  endfunction

  function automatic real pwl_tanh(real x);
    return 2.0 * pwl_sig(2.0 * x) - 1.0;
  endfunction

  function automatic fx_t vin(int i);
    return (i < NX) ? X[i] : H[i - NX];
  endfunction

  task automatic om_read(int a, output fx_t v);
    om_re = 1; om_raddr = OW'(a);
    @(negedge clk);
    om_re = 0;
    v = om_rdata;
  endtask

  task automatic run_layer(int nx_i, int nh_i, int steps_i);
    int t0, d_max;
    real gate [4][MAXH];
    NX = nx_i; NH = nh_i; LEN = NX + NH; K = (LEN + N_LANES - 1) / N_LANES; STEPS = steps_i;
    rst_n = 0;
    for (int g = 0; g < 4; g++) for (int n = 0; n < MAXH; n++) begin m_ym[g][n] = 0; m_ymb[g][n] = 0; m_delta[g][n] = 0; end
    nx = NX; nh = NH; theta = THETA; first_step = 0;
    c_base = C_BASE; h_base = H_BASE; cu_sel = GATE_I;
    sign_we = 0; w_we = 0; b_we = 0; in_we = 0; om_we = 0; om_re = 0; start = 0;
    sign_waddr = '0; b_waddr = '0; sign_wdata = '0; w_waddr = '0; w_wdata = '0;
    b_wdata = '0; in_wdata = '0; om_wdata = '0; in_waddr = '0; om_waddr = '0; om_raddr = '0;
    for (int g = 0; g < 4; g++) begin tot_re[g] = 0; tot_ev[g] = 0; end
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);

    // ---- load the four gates
    for (int g = 0; g < 4; g++) begin
      cu_sel = gate_e'(g);
      for (int n = 0; n < NH; n++) begin
        for (int i = 0; i < LEN; i++) W[g][n][i] = fx_t'($urandom_range(100) - 50);
        B[g][n] = fx_t'($urandom_range(128) - 64);
        sign_wdata = '0;
        for (int i = 0; i < LEN; i++) sign_wdata[i] = (W[g][n][i] >= 0);
        sign_we = 1; sign_waddr = NW'(n);
        b_we = 1; b_waddr = NW'(n); b_wdata = B[g][n];
        @(negedge clk);
        sign_we = 0; b_we = 0;
        for (int k = 0; k < K; k++) begin
          w_wdata = '0;
          for (int j = 0; j < N_LANES; j++)
            if (k*N_LANES + j < LEN) w_wdata[j*15 +: 15] = W[g][n][k*N_LANES + j][14:0];
          w_we = 1; w_waddr = $clog2(WREST_ROWS)'(n*K + k);
          @(negedge clk);
        end
        w_we = 0;
      end
    end
    // ---- h_{-1} = 0 in the input buffers, c_{-1} = 0 in the on-chip memory
    for (int j = 0; j < NH; j++) begin
      H[j] = '0; C[j] = '0;
      in_we = 1; in_waddr = IW'(NX + j); in_wdata = '0;
      om_we = 1; om_waddr = OW'(C_BASE + j); om_wdata = '0;
      @(negedge clk);
    end
    in_we = 0; om_we = 0;
    for (int i = 0; i < NX; i++) X[i] = fx_t'($urandom_range(600) - 300);

    // ---- the sequence
    for (int t = 0; t < STEPS; t++) begin
      int gate_cycles [4];
      int nre [4], nev [4];
      // x_t: slow drift, a few elements change sign
      if (t > 0)
        for (int i = 0; i < NX; i++) begin
          automatic int v = int'(X[i]) + $urandom_range(16) - 8;
          if ($urandom_range(99) < 4) v = -v;
          X[i] = fx_t'(v);
        end
      for (int i = 0; i < NX; i++) begin
        in_we = 1; in_waddr = IW'(i); in_wdata = X[i];
        @(negedge clk);
      end
      in_we = 0;
      first_step = (t == 0);
      h_base = OW'(H_BASE + t*NH);

      // model of the four gates
      d_max = 0;
      for (int g = 0; g < 4; g++) begin
        gate_cycles[g] = 4; nre[g] = 0; nev[g] = 0;
        for (int n = 0; n < NH; n++) begin
          automatic int s = 0, num, den, eps, d, yv, z;
          automatic longint acc = 0;
          for (int i = 0; i < LEN; i++) s += ((W[g][n][i] >= 0) == (vin(i) >= 0)) ? 1 : -1;
          num = s - m_ymb[g][n]; if (num < 0) num = -num;
          den = (s < 0) ? -s : s;
          if (den == 0) eps = (num == 0) ? 0 : 65535; else eps = num * 256 / den;
          if (eps > 65535) eps = 65535;
          d = m_delta[g][n] + eps; if (d > 65535) d = 65535;
          if (t != 0 && d <= THETA) begin
            yv = m_ym[g][n]; m_delta[g][n] = d;
            gate_cycles[g] += 5; nre[g]++; ev_reuse++;
          end else begin
            if (t == 0) ev_forced++;
            else if (eps <= THETA) ev_throttle++;
            for (int i = 0; i < LEN; i++) acc += longint'(W[g][n][i]) * longint'(vin(i));
            acc = acc >>> 8;
            if (acc > 32767) acc = 32767;
            if (acc < -32768) acc = -32768;
            yv = int'(acc); m_ym[g][n] = yv; m_ymb[g][n] = s; m_delta[g][n] = 0;
            gate_cycles[g] += 5 + K + 4; nev[g]++; ev_eval++;
          end
          z = yv + int'(B[g][n]);
          gate[g][n] = (g == int'(GATE_G)) ? pwl_tanh(real'(z) / 256.0) : pwl_sig(real'(z) / 256.0);
        end
        if (gate_cycles[g] > d_max) d_max = gate_cycles[g];
      end

      start = 1; t0 = cyc;
      @(negedge clk);
      start = 0;
      while (!done) @(negedge clk);
      checks += 2;
      if (cyc - t0 != d_max + 2*NH + 4) begin failures++; $display("t=%0d: done after %0d cycles, want %0d", t, cyc - t0, d_max + 2*NH + 4); end
      if (int'(step_cycles) != d_max + 2*NH + 4) begin failures++; $display("t=%0d: step_cycles %0d", t, step_cycles); end
      for (int g = 0; g < 4; g++) begin
        tot_re[g] += nre[g]; tot_ev[g] += nev[g];
        checks += 2;
        if (int'(reuse_cnt[g]) != tot_re[g]) begin failures++; $display("t=%0d gate %0d reuse_cnt %0d want %0d", t, g, reuse_cnt[g], tot_re[g]); end
        if (int'(eval_cnt[g])  != tot_ev[g]) begin failures++; $display("t=%0d gate %0d eval_cnt %0d want %0d", t, g, eval_cnt[g], tot_ev[g]); end
      end

      // c_t, h_t against the model; then adopt the accelerator's values
      for (int j = 0; j < NH; j++) begin
        automatic real ce, he, cg, hg;
        fx_t cv, hv;
        ce = gate[GATE_F][j] * real'(C[j]) / 256.0 + gate[GATE_I][j] * gate[GATE_G][j];
        om_read(C_BASE + j, cv);
        om_read(H_BASE + t*NH + j, hv);
        cg = real'(cv) / 256.0;
        he = gate[GATE_O][j] * pwl_tanh(cg);
        hg = real'(hv) / 256.0;
        checks += 2;
        if (cg - ce > 8.0/256.0 || ce - cg > 8.0/256.0) begin failures++; $display("t=%0d c[%0d] %f want %f", t, j, cg, ce); end
        if (hg - he > 6.0/256.0 || he - hg > 6.0/256.0) begin failures++; $display("t=%0d h[%0d] %f want %f", t, j, hg, he); end
        C[j] = cv; H[j] = hv;
        if (hv != '0) ev_writeback++;
      end
      $display("t=%2d: reused i/f/g/o = %0d/%0d/%0d/%0d of %0d, %0d cycles",
               t, nre[0], nre[1], nre[2], nre[3], NH, step_cycles);
    end

    $display("layer %0dx%0d: forced=%0d reuse(bypass)=%0d evaluated=%0d throttled=%0d h_writeback=%0d",
             NX, NH, ev_forced, ev_reuse, ev_eval, ev_throttle, ev_writeback);
  endtask

  initial begin
    $display("full-capacity layer"); run_layer(1536, 512, 3);
    checks += 5;
    if (ev_forced == 0)    begin failures++; $display("forced evaluation never happened"); end
    if (ev_reuse == 0)     begin failures++; $display("reuse never happened"); end
    if (ev_eval == ev_forced) begin failures++; $display("refused reuse never happened"); end
    if (ev_throttle == 0)  begin failures++; $display("throttle never happened"); end
    if (ev_writeback == 0) begin failures++; $display("h write-back never happened"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

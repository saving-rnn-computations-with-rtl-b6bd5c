// cu_tb: self-checking test of a computation unit at reduced sizes (16
// neurons, 256-bit BDPU, 160 inputs = 10 sub-vectors). Loads random Q8.8
// weights (sign rows plus remaining bits), biases and inputs through the load
// ports and runs eight time-steps, changing a few inputs between steps. The
// testbench's own model of the memoization scheme predicts, per neuron, the
// binary output, the reuse decision and the pre-activation value (memoized
// or recomputed as an integer dot product), and from it the gate output,
// which is compared with the MU output stream within two LSBs. It also checks
// the reuse/evaluation counters and the exact cycle count of every pass:
// 5 cycles per reused neuron, 5 + K + 4 per evaluated one, plus 4 to drain.
module cu_tb;
  import fm_pkg::*;
  localparam int unsigned NEURONS = 16;
  localparam int unsigned SWIDTH  = 256;
  localparam int unsigned WROWS   = 256;
  localparam int unsigned IWORDS  = 256;
  localparam int unsigned ENTRIES = 16;
  localparam int unsigned LEN     = 160;
  localparam int unsigned K       = LEN / N_LANES;

  logic clk = 1'b0, rst_n = 1'b0;
  act_e act;
  delta_t theta;
  logic force_eval;
  logic [$clog2(NEURONS):0] n_neurons;
  logic [$clog2(SWIDTH):0] len;
  logic [$clog2(SWIDTH/N_LANES):0] k_count;
  logic sign_we, w_we, b_we, in_we, start, busy, done, out_valid, rf_re;
  logic [$clog2(NEURONS)-1:0] sign_waddr, b_waddr, out_idx, rf_raddr;
  logic [SWIDTH-1:0] sign_wdata;
  logic [$clog2(WROWS)-1:0] w_waddr;
  logic [N_LANES*(DATA_W-1)-1:0] w_wdata;
  fx_t b_wdata, in_wdata, out_y, rf_rdata;
  logic [$clog2(IWORDS)-1:0] in_waddr;
  logic [31:0] reuse_cnt, eval_cnt;

  fx_t W [NEURONS][LEN];
  fx_t B [NEURONS];
  fx_t X [LEN];
  int m_ym [NEURONS], m_ymb [NEURONS], m_delta [NEURONS];
  real exp_out [NEURONS];
  int got [NEURONS];
  int checks = 0, failures = 0, cyc = 0;
  int tot_reuse = 0, tot_eval = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  cu #(.NEURONS(NEURONS), .SWIDTH(SWIDTH), .WROWS(WROWS), .IWORDS(IWORDS),
       .ENTRIES(ENTRIES)) dut (.*);

  function automatic real pwl_sig(real x);
    real a, y;
    a = (x < 0.0) ? -x : x;
    if (a >= 5.0)        y = 1.0;
    else if (a >= 2.375) y = 0.03125 * a + 0.84375;
    else if (a >= 1.0)   y = 0.125 * a + 0.625;
    else                 y = 0.25 * a + 0.5;
    return (x < 0.0) ? 1.0 - y : y;
  endfunction

  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && out_valid) begin
    automatic real g = real'(out_y) / 256.0;
    automatic real e = exp_out[out_idx];
    got[out_idx]++;
    checks++;
    if (g - e > 2.0/256.0 || e - g > 2.0/256.0) begin
      failures++; $display("neuron %0d: out %f want %f", out_idx, g, e);
    end
  end

  task automatic write_input(int i);
    in_we = 1; in_waddr = i; in_wdata = X[i];
    @(negedge clk);
    in_we = 0;
  endtask

  initial begin
    int expect_cycles, t0, nre, nev;
    act = ACT_SIGMOID; theta = 16'd90; force_eval = 0;
    n_neurons = NEURONS; len = LEN; k_count = K;
    sign_we = 0; w_we = 0; b_we = 0; in_we = 0; start = 0; rf_re = 0;
    sign_waddr = '0; b_waddr = '0; rf_raddr = '0; sign_wdata = '0; w_waddr = '0;
    w_wdata = '0; b_wdata = '0; in_wdata = '0; in_waddr = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // weights, biases
    for (int n = 0; n < NEURONS; n++) begin
      for (int i = 0; i < LEN; i++) W[n][i] = fx_t'($urandom_range(160) - 80);
      B[n] = fx_t'($urandom_range(256) - 128);
      sign_wdata = '0;
      for (int i = 0; i < LEN; i++) sign_wdata[i] = (W[n][i] >= 0);
      sign_we = 1; sign_waddr = n;
      b_we = 1; b_waddr = n; b_wdata = B[n];
      @(negedge clk);
      sign_we = 0; b_we = 0;
      for (int k = 0; k < K; k++) begin
        for (int j = 0; j < N_LANES; j++) w_wdata[j*15 +: 15] = W[n][k*N_LANES + j][14:0];
        w_we = 1; w_waddr = n*K + k;
        @(negedge clk);
      end
      w_we = 0;
    end
    for (int i = 0; i < LEN; i++) begin X[i] = fx_t'($urandom_range(512) - 256); write_input(i); end

    for (int step = 0; step < 8; step++) begin
      if (step > 0)
        for (int c = 0; c < 2 + 3 * (step % 3); c++) begin
          automatic int i = $urandom_range(LEN-1);
          X[i] = -X[i] + fx_t'($urandom_range(20) - 10);
          write_input(i);
        end
      act = (step >= 5) ? ACT_TANH : ACT_SIGMOID;
      force_eval = (step == 0);
      expect_cycles = 4; nre = 0; nev = 0;
      for (int n = 0; n < NEURONS; n++) begin
        automatic int s = 0, num, den, eps, d, yv, z;
        automatic longint acc = 0;
        for (int i = 0; i < LEN; i++) s += ((W[n][i] >= 0) == (X[i] >= 0)) ? 1 : -1;
        num = s - m_ymb[n]; if (num < 0) num = -num;
        den = (s < 0) ? -s : s;
        if (den == 0) eps = (num == 0) ? 0 : 65535; else eps = num * 256 / den;
        if (eps > 65535) eps = 65535;
        d = m_delta[n] + eps; if (d > 65535) d = 65535;
        if (step != 0 && d <= int'(theta)) begin
          yv = m_ym[n]; m_delta[n] = d; expect_cycles += 5; nre++;
        end else begin
          for (int i = 0; i < LEN; i++) acc += longint'(W[n][i]) * longint'(X[i]);
          acc = acc >>> 8;
          if (acc > 32767) acc = 32767;
          if (acc < -32768) acc = -32768;
          yv = int'(acc); m_ym[n] = yv; m_ymb[n] = s; m_delta[n] = 0;
          expect_cycles += 5 + K + 4; nev++;
        end
        z = yv + int'(B[n]);
        exp_out[n] = (act == ACT_TANH) ? 2.0 * pwl_sig(2.0 * real'(z) / 256.0) - 1.0
                                       : pwl_sig(real'(z) / 256.0);
        got[n] = 0;
      end
      start = 1; t0 = cyc;
      @(negedge clk);
      start = 0;
      while (!done) @(negedge clk);
      checks += 3;
      if (cyc - t0 != expect_cycles) begin failures++; $display("step %0d: %0d cycles, want %0d", step, cyc - t0, expect_cycles); end
      if (int'(reuse_cnt) != tot_reuse + nre) begin failures++; $display("reuse_cnt %0d want %0d", reuse_cnt, tot_reuse + nre); end
      if (int'(eval_cnt) != tot_eval + nev) begin failures++; $display("eval_cnt %0d want %0d", eval_cnt, tot_eval + nev); end
      tot_reuse += nre; tot_eval += nev;
      for (int n = 0; n < NEURONS; n++) begin
        checks++;
        if (got[n] != 1) begin failures++; $display("neuron %0d produced %0d outputs", n, got[n]); end
        rf_re = 1; rf_raddr = n;
        @(negedge clk);
        rf_re = 0;
        checks++;
        if (real'(rf_rdata)/256.0 - exp_out[n] > 2.0/256.0 || exp_out[n] - real'(rf_rdata)/256.0 > 2.0/256.0) begin
          failures++; $display("rf %0d", n);
        end
      end
      $display("step %0d: %0d reused, %0d evaluated, %0d cycles", step, nre, nev, cyc - t0);
    end
    checks++;
    if (tot_reuse == 0 || tot_eval == 0) begin failures++; $display("bypass or evaluation never happened"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

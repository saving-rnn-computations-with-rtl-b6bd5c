// fmu_tb: self-checking test of fmu at a reduced width (256-bit BDPU, 32
// neurons). The testbench plays the sign buffer and the rest of the
// computation unit. Over several time-steps, with the binarized inputs
// perturbed a little between steps, it issues every neuron, checks the
// decision five cycles later against its own model of the memoization table
// (binary dot product, epsilon, accumulated delta, delta <= theta, forced
// evaluation on the first step), checks y_m on reuse and y_t^b, and answers
// refused neurons with a random full-precision result after a random delay.
// Neurons are issued in the cycle the previous one completes, and a neuron is
// sometimes issued twice in a row, which exercises the read forwarding of an
// entry written in the same cycle.
module fmu_tb;
  import fm_pkg::*;
  localparam int unsigned WIDTH = 256;
  localparam int unsigned ENTRIES = 32;
  localparam int unsigned ROWS = 32;
  localparam int unsigned NN = 32;
  logic clk = 1'b0, rst_n = 1'b0;
  delta_t theta;
  logic [$clog2(WIDTH):0] len;
  logic force_eval;
  logic sin_we, sin_bit;
  logic [$clog2(WIDTH)-1:0] sin_idx;
  logic sign_re;
  logic [$clog2(ROWS)-1:0] sign_raddr, issue_idx;
  logic [WIDTH-1:0] sign_rdata;
  logic issue_valid, res_valid, reuse, upd_valid;
  fx_t ym, upd_y;
  bint_t yb;

  logic [WIDTH-1:0] srows [ROWS];
  logic [WIDTH-1:0] xin;
  int m_ym [NN], m_ymb [NN], m_delta [NN];
  int checks = 0, failures = 0;
  int n_reuse = 0, n_eval = 0, n_fwd = 0;
  int cyc = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  fmu #(.WIDTH(WIDTH), .ENTRIES(ENTRIES), .ROWS(ROWS)) dut (.*);

  always @(posedge clk) if (sign_re) sign_rdata <= srows[sign_raddr];

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic load_inputs();
    for (int i = 0; i < WIDTH; i++) begin
      sin_we = 1; sin_idx = i; sin_bit = xin[i];
      @(negedge clk);
    end
    sin_we = 0;
  endtask

  // model of one neuron decision; returns expected reuse
  function automatic bit model(int n, bit first, output int ybx, output int dnew);
    int s = 0, num, den, eps;
    for (int i = 0; i < int'(len); i++) s += (srows[n][i] == xin[i]) ? 1 : -1;
    ybx = s;
    num = s - m_ymb[n]; if (num < 0) num = -num;
    den = (s < 0) ? -s : s;
    if (den == 0) eps = (num == 0) ? 0 : 65535;
    else          eps = (num * 256) / den;
    if (eps > 65535) eps = 65535;
    dnew = m_delta[n] + eps;
    if (dnew > 65535) dnew = 65535;
    return !first && (dnew <= int'(theta));
  endfunction

  initial begin
    int n, t0, ybx, dnew, rep;
    bit er;
    theta = 16'd77;       // 0.3
    len = WIDTH - 8;
    force_eval = 0; sin_we = 0; sin_idx = '0; sin_bit = 0;
    issue_valid = 0; issue_idx = '0; upd_valid = 0; upd_y = '0;
    for (int r = 0; r < ROWS; r++)
      for (int i = 0; i < WIDTH; i += 32) srows[r][i +: 32] = $urandom;
    for (int i = 0; i < WIDTH; i += 32) xin[i +: 32] = $urandom;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int step = 0; step < 12; step++) begin
      // perturb a few input signs between steps
      if (step > 0) for (int k = 0; k < 3 + (step % 4) * 4; k++) xin[$urandom_range(WIDTH-1)] ^= 1'b1;
      load_inputs();
      force_eval = (step == 0);
      n = 0; rep = 0;
      issue_valid = 1; issue_idx = 0;
      t0 = cyc;
      @(negedge clk);
      issue_valid = 0;
      while (n < NN) begin
        while (!res_valid) @(negedge clk);
        er = model(n, step == 0, ybx, dnew);
        checks += 3;
        if (cyc - t0 != FMU_LAT) begin failures++; $display("latency %0d", cyc - t0); end
        if (reuse != er) begin failures++; $display("step %0d n %0d reuse %0b want %0b (delta %0d)", step, n, reuse, er, dnew); end
        if (int'(yb) != ybx) begin failures++; $display("yb %0d want %0d", yb, ybx); end
        if (reuse) begin
          checks++;
          if (int'(ym) != m_ym[n]) begin failures++; $display("ym %0d want %0d", ym, m_ym[n]); end
          m_delta[n] = dnew;
          n_reuse++;
        end else begin
          // evaluate in "full precision" after a delay
          repeat ($urandom_range(0, 6)) @(negedge clk);
          upd_valid = 1; upd_y = fx_t'($urandom);
          m_ym[n] = upd_y; m_ymb[n] = ybx; m_delta[n] = 0;
          n_eval++;
        end
        // next issue in this same cycle; sometimes the same neuron again
        if (rep == 0 && (n % 5 == 2)) begin rep = 1; n_fwd++; end
        else begin n++; rep = 0; end
        if (n < NN) begin
          issue_valid = 1; issue_idx = n;
          t0 = cyc;
        end
        @(negedge clk);
        issue_valid = 0; upd_valid = 0;
      end
    end
    checks++;
    if (n_reuse == 0 || n_eval == 0 || n_fwd == 0) begin failures++; $display("reuse %0d eval %0d", n_reuse, n_eval); end
    $display("fmu_tb: %0d reused, %0d evaluated", n_reuse, n_eval);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

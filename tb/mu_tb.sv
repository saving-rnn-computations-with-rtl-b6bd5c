// mu_tb: self-checking test of mu. Loads random biases, streams random
// pre-activation values (back to back and with gaps) for both activation
// kinds, and checks each output against a real-valued reference: the
// piecewise-linear sigmoid (slopes 1/4, 1/8, 1/32 with breakpoints 1, 2.375,
// 5) or tanh(x) = 2*sigmoid(2x) - 1 of the saturated sum value + bias, within
// two LSBs, and against the true sigmoid/tanh within 0.05. Also checks the
// three-cycle latency and the register file contents.
module mu_tb;
  import fm_pkg::*;
  localparam int unsigned NEURONS = 64;
  logic clk = 1'b0, rst_n = 1'b0;
  act_e act;
  logic b_we, in_valid, out_valid, rf_re;
  logic [$clog2(NEURONS)-1:0] b_waddr, in_idx, out_idx, rf_raddr;
  fx_t b_wdata, in_y, out_y, rf_rdata;
  fx_t bias [NEURONS];
  real exp_q [$];
  int  idx_q [$];
  int  cyc_q [$];
  real rf_ref [NEURONS];
  int checks = 0, failures = 0;
  int cyc = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  mu #(.NEURONS(NEURONS)) dut (.*);

  function automatic real pwl_sig(real x);
    real a, y;
    a = (x < 0.0) ? -x : x;
    if (a >= 5.0)        y = 1.0;
    else if (a >= 2.375) y = 0.03125 * a + 0.84375;
    else if (a >= 1.0)   y = 0.125 * a + 0.625;
    else                 y = 0.25 * a + 0.5;
    return (x < 0.0) ? 1.0 - y : y;
  endfunction

  function automatic real act_ref(act_e a, real z);
    return (a == ACT_TANH) ? 2.0 * pwl_sig(2.0 * z) - 1.0 : pwl_sig(z);
  endfunction

  function automatic real true_ref(act_e a, real z);
    real e;
    if (a == ACT_TANH) begin e = $exp(2.0 * z); return (e - 1.0) / (e + 1.0); end
    return 1.0 / (1.0 + $exp(-z));
  endfunction

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && out_valid) begin
    automatic real e = exp_q.pop_front();
    automatic int  i = idx_q.pop_front();
    automatic int  c = cyc_q.pop_front();
    checks += 3;
    if ((real'(out_y) / 256.0 - e) > 2.0/256.0 || (e - real'(out_y) / 256.0) > 2.0/256.0) begin
      failures++; $display("idx %0d: got %f want %f", i, real'(out_y)/256.0, e);
    end
    if (int'(out_idx) != i) begin failures++; $display("idx %0d want %0d", out_idx, i); end
    if (cyc - c != 3) begin failures++; $display("latency %0d", cyc - c); end
  end

  initial begin
    b_we = 0; in_valid = 0; rf_re = 0; act = ACT_SIGMOID;
    b_waddr = '0; b_wdata = '0; in_idx = '0; in_y = '0; rf_raddr = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < NEURONS; i++) begin
      b_we = 1; b_waddr = i; b_wdata = fx_t'($urandom_range(1024) - 512); bias[i] = b_wdata;
      @(negedge clk);
    end
    b_we = 0;
    for (int pass = 0; pass < 2; pass++) begin
      act = pass ? ACT_TANH : ACT_SIGMOID;
      for (int i = 0; i < NEURONS; i++) begin
        automatic int z;
        automatic real e;
        in_valid = 1; in_idx = i;
        in_y = (i % 9 == 0) ? fx_t'(16'sh7F00) : fx_t'($urandom_range(3000) - 1500);
        z = int'(in_y) + int'(bias[i]);
        if (z > 32767) z = 32767;
        if (z < -32768) z = -32768;
        e = act_ref(act, real'(z) / 256.0);
        checks++;
        if ((e - true_ref(act, real'(z)/256.0)) > 0.05 || (true_ref(act, real'(z)/256.0) - e) > 0.05) begin
          failures++; $display("reference off the true function at %f", real'(z)/256.0);
        end
        exp_q.push_back(e); idx_q.push_back(i); cyc_q.push_back(cyc);
        rf_ref[i] = e;
        @(negedge clk);
        if (i % 5 == 4) begin in_valid = 0; @(negedge clk); end
      end
      in_valid = 0;
      repeat (5) @(negedge clk);
      for (int i = 0; i < NEURONS; i++) begin
        rf_re = 1; rf_raddr = i;
        @(negedge clk);
        rf_re = 0;
        checks++;
        if ((real'(rf_rdata) / 256.0 - rf_ref[i]) > 2.0/256.0 || (rf_ref[i] - real'(rf_rdata) / 256.0) > 2.0/256.0) begin
          failures++; $display("rf %0d: got %f want %f", i, real'(rf_rdata)/256.0, rf_ref[i]);
        end
      end
    end
    checks++;
    if (exp_q.size() != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

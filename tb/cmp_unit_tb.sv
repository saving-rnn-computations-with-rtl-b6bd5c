// cmp_unit_tb: self-checking test of cmp_unit. For random and corner-case
// binary outputs, memoized values, deltas and thresholds it computes
// epsilon = |y - y_m| / |y| with integer arithmetic in the testbench, the new
// delta with saturation, and the reuse decision delta <= theta gated by
// force_eval, and checks them one cycle after the inputs.
module cmp_unit_tb;
  import fm_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid, force_eval, out_valid, reuse;
  bint_t y_b, ym_b;
  delta_t delta_prev, theta, delta;
  int checks = 0, failures = 0;
  int n_reuse = 0, n_eval = 0;

  always #5 clk = ~clk;

  cmp_unit dut (.*);

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_valid = 0; force_eval = 0; y_b = '0; ym_b = '0; delta_prev = '0; theta = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 2000; n++) begin
      longint num, den, eps, d;
      bit exp_reuse;
      case (n % 10)
        0: begin y_b = 0; ym_b = 0; end
        1: begin y_b = 0; ym_b = bint_t'($urandom_range(40)) - 20; end
        2: begin y_b = bint_t'($urandom_range(4096)) - 2048; ym_b = y_b; end
        default: begin
          y_b  = bint_t'($urandom_range(4096)) - 2048;
          ym_b = y_b + bint_t'($urandom_range(200)) - 100;
        end
      endcase
      delta_prev = (n % 13 == 0) ? 16'hFFF0 : delta_t'($urandom_range(200));
      theta      = delta_t'($urandom_range(160));   // up to 0.625
      force_eval = (n % 17 == 0);
      num = longint'(y_b) - longint'(ym_b); if (num < 0) num = -num;
      den = longint'(y_b);                  if (den < 0) den = -den;
      if (den == 0) eps = (num == 0) ? 0 : 65535;
      else          eps = (num * 256) / den;
      if (eps > 65535) eps = 65535;
      d = longint'(delta_prev) + eps;
      if (d > 65535) d = 65535;
      exp_reuse = (d <= longint'(theta)) && !force_eval;
      in_valid = 1;
      @(negedge clk);
      in_valid = 0;
      checks += 3;
      if (!out_valid)                  begin failures++; $display("no out_valid"); end
      if (longint'(delta) != d)        begin failures++; $display("delta %0d want %0d (y %0d ym %0d dp %0d)", delta, d, y_b, ym_b, delta_prev); end
      if (reuse != exp_reuse)          begin failures++; $display("reuse %0b want %0b", reuse, exp_reuse); end
      if (exp_reuse) n_reuse++; else n_eval++;
    end
    checks++;
    if (n_reuse == 0 || n_eval == 0) begin failures++; $display("decision not exercised both ways"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

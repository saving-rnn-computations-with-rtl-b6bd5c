// cell_update_tb: self-checking test of cell_update. Streams random gate
// values (i, f, o in [0,1], g in [-1,1]) and cell states, and compares c_t and
// h_t with a real-valued evaluation of c = f*c_prev + i*g and
// h = o*tanh_pwl(c), within the truncation error of the fixed-point products
// (3 LSB for c, 5 LSB for h); checks the two-cycle latency and the index.
module cell_update_tb;
  import fm_pkg::*;
  localparam int unsigned IDX_W = 9;
  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid, out_valid;
  logic [IDX_W-1:0] in_idx, out_idx;
  fx_t i_g, f_g, g_g, o_g, c_prev, c_new, h_new;
  real c_q [$];
  real h_q [$];
  int  id_q [$];
  int  cy_q [$];
  int checks = 0, failures = 0;
  int cyc = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  cell_update #(.IDX_W(IDX_W)) dut (.*);

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
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && out_valid) begin
    automatic real ce = c_q.pop_front();
    automatic real he = h_q.pop_front();
    automatic int  id = id_q.pop_front();
    automatic int  cy = cy_q.pop_front();
    automatic real cg = real'(c_new) / 256.0;
    automatic real hg = real'(h_new) / 256.0;
    checks += 4;
    if (cg - ce > 3.0/256.0 || ce - cg > 3.0/256.0) begin failures++; $display("c %f want %f", cg, ce); end
    if (hg - he > 5.0/256.0 || he - hg > 5.0/256.0) begin failures++; $display("h %f want %f", hg, he); end
    if (int'(out_idx) != id) begin failures++; $display("idx"); end
    if (cyc - cy != 2) begin failures++; $display("latency %0d", cyc - cy); end
  end

  initial begin
    in_valid = 0; in_idx = '0; i_g = '0; f_g = '0; g_g = '0; o_g = '0; c_prev = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 500; n++) begin
      automatic real c, h;
      i_g = fx_t'($urandom_range(256));
      f_g = fx_t'($urandom_range(256));
      o_g = fx_t'($urandom_range(256));
      g_g = fx_t'($urandom_range(512) - 256);
      c_prev = fx_t'($urandom_range(2048) - 1024);
      in_idx = IDX_W'(n);
      c = real'(f_g)/256.0 * real'(c_prev)/256.0 + real'(i_g)/256.0 * real'(g_g)/256.0;
      h = real'(o_g)/256.0 * (2.0 * pwl_sig(2.0 * c) - 1.0);
      c_q.push_back(c); h_q.push_back(h); id_q.push_back(n % 512); cy_q.push_back(cyc);
      in_valid = 1;
      @(negedge clk);
      if (n % 11 == 5) begin in_valid = 0; @(negedge clk); end
    end
    in_valid = 0;
    repeat (4) @(negedge clk);
    checks++;
    if (c_q.size() != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// bdpu_tb: self-checking test of bdpu at its full 2048-bit width. Random sign
// vectors and lengths (including 0, 1 and 2048, and all-equal / all-opposite
// vectors) are fed back to back, one per cycle; each result is compared with
// the +-1 dot product computed term by term, and must arrive exactly three
// cycles after its operands.
module bdpu_tb;
  import fm_pkg::*;
  localparam int unsigned WIDTH = BDPU_W;
  localparam int unsigned NV = 300;
  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid, out_valid;
  logic [WIDTH-1:0] w_sign, x_sign;
  logic [$clog2(WIDTH):0] len;
  bint_t y_b;
  int exp_q [$];
  int issue_cyc [$];
  int cyc = 0;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  bdpu #(.WIDTH(WIDTH)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && out_valid) begin
    automatic int e = exp_q.pop_front();
    automatic int c = issue_cyc.pop_front();
    checks += 2;
    if (int'(y_b) != e) begin failures++; $display("y_b %0d want %0d", y_b, e); end
    if (cyc - c != 3) begin failures++; $display("latency %0d", cyc - c); end
  end

  initial begin
    in_valid = 0; w_sign = '0; x_sign = '0; len = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int n = 0; n < NV; n++) begin
      automatic int s = 0;
      for (int i = 0; i < WIDTH; i += 32) begin
        w_sign[i +: 32] = $urandom;
        x_sign[i +: 32] = $urandom;
      end
      case (n)
        0: len = 0;
        1: len = 1;
        2: begin len = WIDTH; x_sign = w_sign; end
        3: begin len = WIDTH; x_sign = ~w_sign; end
        4: len = WIDTH;
        default: len = $urandom_range(WIDTH);
      endcase
      for (int i = 0; i < int'(len); i++) s += (w_sign[i] == x_sign[i]) ? 1 : -1;
      exp_q.push_back(s);
      issue_cyc.push_back(cyc);
      in_valid = 1;
      @(negedge clk);
      if (n % 7 == 3) begin in_valid = 0; @(negedge clk); end
    end
    in_valid = 0;
    repeat (6) @(negedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("%0d results missing", exp_q.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// om_memory_tb: self-checking test of om_memory at a reduced size. Fills the
// memory, then reads through both read ports at once at random addresses
// while writing elsewhere, comparing with a reference copy.
module om_memory_tb;
  import fm_pkg::*;
  localparam int unsigned WORDS = 256;
  logic clk = 1'b0;
  logic we, re_a, re_b;
  logic [$clog2(WORDS)-1:0] waddr, raddr_a, raddr_b;
  fx_t wdata, rdata_a, rdata_b;
  fx_t ref_mem [WORDS];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  om_memory #(.WORDS(WORDS)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 0; re_a = 0; re_b = 0; waddr = '0; raddr_a = '0; raddr_b = '0; wdata = '0;
    @(negedge clk);
    for (int i = 0; i < WORDS; i++) begin
      we = 1; waddr = i; wdata = fx_t'($urandom); ref_mem[i] = wdata;
      @(negedge clk);
    end
    for (int n = 0; n < 300; n++) begin
      automatic int a = $urandom_range(WORDS-1);
      automatic int b = $urandom_range(WORDS-1);
      automatic int w = $urandom_range(WORDS-1);
      re_a = 1; raddr_a = a; re_b = 1; raddr_b = b;
      we = (w != a) && (w != b); waddr = w; wdata = fx_t'($urandom);
      @(negedge clk);
      if (we) ref_mem[w] = wdata;
      checks += 2;
      if (rdata_a !== ref_mem[a]) begin failures++; $display("port a addr %0d", a); end
      if (rdata_b !== ref_mem[b]) begin failures++; $display("port b addr %0d", b); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// memo_buffer_tb: self-checking test of memo_buffer at a reduced depth. Fills
// every entry with random {y_m, y_m^b, delta} records, reads them back in
// random order, and checks read-during-write to another entry.
module memo_buffer_tb;
  import fm_pkg::*;
  localparam int unsigned ENTRIES = 40;
  logic clk = 1'b0;
  logic we, re;
  logic [$clog2(ENTRIES)-1:0] waddr, raddr;
  memo_entry_t wdata, rdata;
  memo_entry_t ref_mem [ENTRIES];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  memo_buffer #(.ENTRIES(ENTRIES)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic memo_entry_t rnd();
    memo_entry_t e;
    e.ym = fx_t'($urandom); e.ymb = bint_t'($urandom); e.delta = delta_t'($urandom);
    return e;
  endfunction

  initial begin
    we = 0; re = 0; waddr = '0; raddr = '0; wdata = '0;
    @(negedge clk);
    for (int i = 0; i < ENTRIES; i++) begin
      we = 1; waddr = i; wdata = rnd(); ref_mem[i] = wdata;
      @(negedge clk);
    end
    we = 0;
    for (int n = 0; n < 200; n++) begin
      automatic int a = $urandom_range(ENTRIES-1);
      automatic int b = (a + 1 + $urandom_range(ENTRIES-2)) % ENTRIES;
      re = 1; raddr = a;
      we = 1; waddr = b; wdata = rnd();
      @(negedge clk);
      ref_mem[b] = wdata;
      re = 0; we = 0;
      checks++;
      if (rdata !== ref_mem[a]) begin
        failures++;
        $display("entry %0d: got %h want %h", a, rdata, ref_mem[a]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// weight_buffer_tb: self-checking test of weight_buffer. Writes random rows to a reduced-size
// instance, reads them back in random order and compares with a reference
// copy; also checks the one-cycle read latency and that the read register
// holds its value while no read is issued.
module weight_buffer_tb;
  localparam int unsigned ROWS  = 64;
  localparam int unsigned WIDTH = 240;
  logic clk = 1'b0;
  logic we, re;
  logic [$clog2(ROWS)-1:0] waddr, raddr;
  logic [WIDTH-1:0] wdata, rdata;
  logic [WIDTH-1:0] ref_mem [ROWS];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  weight_buffer #(.ROWS(ROWS), .WIDTH(WIDTH)) dut (.*);

  function automatic logic [WIDTH-1:0] rnd_row();
    logic [WIDTH-1:0] r;
    for (int i = 0; i < WIDTH; i += 32) r[i +: 32] = $urandom;
    return r;
  endfunction

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 0; re = 0; waddr = '0; raddr = '0; wdata = '0;
    @(negedge clk);
    for (int r = 0; r < ROWS; r++) begin
      we = 1; waddr = r; wdata = rnd_row(); ref_mem[r] = wdata;
      @(negedge clk);
    end
    we = 0;
    for (int n = 0; n < 3*ROWS; n++) begin
      automatic int a = $urandom_range(ROWS-1);
      re = 1; raddr = a;
      @(negedge clk);
      re = 0;
      checks++;
      if (rdata !== ref_mem[a]) begin
        failures++;
        $display("mismatch row %0d", a);
      end
      // overwrite a different row while the read register must hold
      we = 1; waddr = (a + 1) % ROWS; wdata = rnd_row(); ref_mem[(a + 1) % ROWS] = wdata;
      @(negedge clk);
      we = 0;
      checks++;
      if (rdata !== ref_mem[a] && ((a + 1) % ROWS) != a) begin
        failures++;
        $display("read register did not hold, row %0d", a);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// input_buffer_tb: self-checking test of input_buffer at a reduced size.
// Writes every word one at a time, then reads whole rows of LANES words and
// compares each lane with a reference copy (word i must appear in row i/LANES,
// lane i%LANES); overwrites single words and checks that only they change.
module input_buffer_tb;
  import fm_pkg::*;
  localparam int unsigned WORDS = 128;
  localparam int unsigned LANES = 16;
  localparam int unsigned ROWS  = WORDS / LANES;
  logic clk = 1'b0;
  logic we, re;
  logic [$clog2(WORDS)-1:0] waddr;
  logic [$clog2(ROWS)-1:0]  raddr;
  fx_t wdata;
  fx_t rdata [LANES];
  fx_t ref_mem [WORDS];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  input_buffer #(.WORDS(WORDS), .LANES(LANES)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_row(int r);
    re = 1; raddr = r;
    @(negedge clk);
    re = 0;
    for (int l = 0; l < LANES; l++) begin
      checks++;
      if (rdata[l] !== ref_mem[r*LANES + l]) begin
        failures++;
        $display("row %0d lane %0d: got %h want %h", r, l, rdata[l], ref_mem[r*LANES+l]);
      end
    end
  endtask

  initial begin
    we = 0; re = 0; waddr = '0; raddr = '0; wdata = '0;
    @(negedge clk);
    for (int i = 0; i < WORDS; i++) begin
      we = 1; waddr = i; wdata = fx_t'($urandom); ref_mem[i] = wdata;
      @(negedge clk);
    end
    we = 0;
    for (int r = 0; r < ROWS; r++) check_row(r);
    for (int n = 0; n < 40; n++) begin
      automatic int i = $urandom_range(WORDS-1);
      we = 1; waddr = i; wdata = fx_t'($urandom); ref_mem[i] = wdata;
      @(negedge clk);
      we = 0;
      check_row(i / LANES);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

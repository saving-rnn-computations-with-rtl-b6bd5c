// dpu_tb: self-checking test of dpu. The testbench plays the weight buffer,
// input buffer and sign row with behavioural one-cycle-latency memories
// holding random Q8.8 weights split into sign and remaining bits. For random
// neurons (random base row, length and sub-vector count) it computes the dot
// product in integers, shifts and saturates it, and checks the DPU result and
// that done comes exactly K+4 cycles after start.
module dpu_tb;
  import fm_pkg::*;
  localparam int unsigned LANES = N_LANES;
  localparam int unsigned SWIDTH = BDPU_W;
  localparam int unsigned WROWS = 1024;
  localparam int unsigned IROWS = IN_ROWS;
  logic clk = 1'b0, rst_n = 1'b0;
  logic start, busy, done;
  logic [$clog2(WROWS)-1:0] w_base;
  logic [$clog2(SWIDTH/LANES):0] k_count;
  logic [$clog2(SWIDTH):0] len;
  logic w_re, in_re;
  logic [$clog2(WROWS)-1:0] w_raddr;
  logic [$clog2(IROWS)-1:0] in_raddr;
  logic [LANES*(DATA_W-1)-1:0] w_rdata;
  fx_t in_rdata [LANES];
  logic [SWIDTH-1:0] sign_row;
  fx_t y;

  fx_t wfull [WROWS][LANES];     // full weights, row r = sub-vector r - w_base
  fx_t inp   [IROWS][LANES];
  int checks = 0, failures = 0;
  int cyc = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  dpu #(.LANES(LANES), .SWIDTH(SWIDTH), .WROWS(WROWS), .IROWS(IROWS)) dut (.*);

  // behavioural buffers with one cycle of read latency
  always @(posedge clk) begin
    if (w_re) for (int j = 0; j < LANES; j++) w_rdata[j*(DATA_W-1) +: DATA_W-1] <= wfull[w_raddr][j][DATA_W-2:0];
    if (in_re) in_rdata <= inp[in_raddr];
  end

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    start = 0; w_base = '0; k_count = 1; len = '0; sign_row = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 60; n++) begin
      automatic int k = (n == 0) ? 1 : (n == 1) ? SWIDTH/LANES : $urandom_range(1, 20);
      automatic int l = (n < 2) ? k*LANES : $urandom_range((k-1)*LANES + 1, k*LANES);
      automatic int base = $urandom_range(WROWS - k);
      automatic int mag = (n % 10 == 9) ? 32767 : 300;
      automatic longint acc = 0;
      automatic longint e;
      automatic int t0;
      for (int r = 0; r < k; r++)
        for (int j = 0; j < LANES; j++) begin
          wfull[base + r][j] = fx_t'($urandom_range(2*mag) - mag);
          inp[r][j]          = fx_t'($urandom_range(2*mag) - mag);
          sign_row[r*LANES + j] = (wfull[base + r][j] >= 0);
          if (r*LANES + j < l) acc += longint'(wfull[base + r][j]) * longint'(inp[r][j]);
        end
      e = acc >>> FRAC;
      if (e > 32767) e = 32767;
      if (e < -32768) e = -32768;
      w_base = base; k_count = k; len = l;
      start = 1;
      t0 = cyc;
      @(negedge clk);
      start = 0;
      while (!done) @(negedge clk);
      checks += 2;
      if (longint'(y) != e) begin failures++; $display("n=%0d y=%0d want %0d", n, y, e); end
      if (cyc - t0 != k + 4) begin failures++; $display("n=%0d latency %0d want %0d", n, cyc - t0, k + 4); end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

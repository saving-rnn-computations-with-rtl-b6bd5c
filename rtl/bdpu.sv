// bdpu: binary dot product unit. Computes the output of a binarized neuron,
// y^b = sum_i w^b_i * x^b_i with w^b, x^b in {-1,+1}, for up to BDPU_W = 2048
// inputs at once.
//
// With +1 stored as 1 and -1 as 0, each product is an XNOR of the two bits,
// and the sum of +-1 terms is 2*popcount - len, where popcount counts the
// ones of the XNOR vector over the len valid positions. As in the paper, the
// unit is an N-wide XNOR followed by an integer adder reduction tree; the
// masking by len (so that vectors shorter than 2048 can be used) and the
// three-stage pipeline are this design's choice.
//
// Timing: in_valid with operands in cycle t gives out_valid and y_b in
// cycle t+3 (stage 1 XNOR and mask, stage 2 popcounts of 64-bit groups,
// stage 3 sum of the groups). Fully pipelined, one operand pair per cycle.
module bdpu
  import fm_pkg::*;
#(
  parameter int unsigned WIDTH = BDPU_W
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       in_valid,
  input  logic [WIDTH-1:0]           w_sign,   // binarized weights, 1 = +1
  input  logic [WIDTH-1:0]           x_sign,   // binarized inputs,  1 = +1
  input  logic [$clog2(WIDTH):0]     len,      // number of valid positions
  output logic                       out_valid,
  output bint_t                      y_b
);
  localparam int unsigned GRP    = 64;
  localparam int unsigned NGRP   = (WIDTH + GRP - 1) / GRP;
  localparam int unsigned CW     = $clog2(WIDTH) + 1;

  logic [WIDTH-1:0]        xnor_q;
  logic [CW-1:0]           len_q1, len_q2;
  logic [$clog2(GRP):0]    grp_q [NGRP];
  logic                    v1, v2;

  // stage 1: N-XNOR with the positions beyond len masked off
  logic [WIDTH-1:0] xnor_d;
  always_comb begin
    for (int i = 0; i < WIDTH; i++)
      xnor_d[i] = (i < int'(len)) ? ~(w_sign[i] ^ x_sign[i]) : 1'b0;
  end

  // stage 2: population count of each 64-bit group
  logic [$clog2(GRP):0] grp_d [NGRP];
  always_comb begin
    for (int g = 0; g < NGRP; g++) begin
      grp_d[g] = '0;
      for (int b = 0; b < GRP; b++)
        if (g*GRP + b < WIDTH) grp_d[g] = grp_d[g] + {{$clog2(GRP){1'b0}}, xnor_q[g*GRP+b]};
    end
  end

  // stage 3: sum of the groups, then 2*popcount - len
  logic [CW-1:0] pop_d;
  always_comb begin
    pop_d = '0;
    for (int g = 0; g < NGRP; g++) pop_d = pop_d + CW'(grp_q[g]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0; v2 <= 1'b0; out_valid <= 1'b0;
    end else begin
      v1 <= in_valid; v2 <= v1; out_valid <= v2;
    end
  end

  always_ff @(posedge clk) begin
    xnor_q <= xnor_d;
    len_q1 <= CW'(len);
    grp_q  <= grp_d;
    len_q2 <= len_q1;
    y_b    <= bint_t'(2 * int'(pop_d) - int'(len_q2));
  end
endmodule

// tpe: time-unrolled A x B x C tensor processing element (default 8 x 4 x 4).
//
// Each cycle the TPE registers A serialized activation elements (one from
// each of A activation blocks, arriving from the left neighbour) and C
// compressed 4/8 weight blocks (B = 4 words each, arriving from the neighbour
// above). The A x C grid of dp1m4 units forms an outer product: unit (a,c)
// multiplies activation element a with the matching weight of block c. The
// registered operands are also the outputs to the right and lower
// neighbours, so operands move one TPE per cycle. A weight block stays on a
// column input for as many cycles as the activation block has elements, so
// every element of a block meets the same weight block.
//
// Accumulators are output stationary: unit (a,c) holds output row a, output
// channel c. For drain, the A rows of C accumulators form a shift chain:
// row a loads row a+1 and row A-1 loads drain_i (the right neighbour's row 0);
// drain_o is row 0. A drain of a whole array row takes N*A cycles.
//
// Operand registers: A bytes of activations and C*B bytes of weights per
// A*C MACs (24 bytes per 32 MACs at the default size, as the paper states),
// plus positions, valid bits and weight masks. The drain chain is this
// design's choice; the paper only shows results leaving to the left.
module tpe
  import s2ta_pkg::*;
#(
  parameter int A = 8,
  parameter int C = 4
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 clr_i,
  input  logic                 drain_i,
  input  act_elem_t [A-1:0]    act_i,
  input  wblk_t     [C-1:0]    w_i,
  output act_elem_t [A-1:0]    act_o,
  output wblk_t     [C-1:0]    w_o,
  input  acc_t      [C-1:0]    drain_in_i,
  output acc_t      [C-1:0]    drain_o,
  output logic      [A*C-1:0]  gate_o
);

  act_elem_t [A-1:0] act_q;
  wblk_t     [C-1:0] w_q;
  acc_t      [A-1:0][C-1:0] acc;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      act_q <= '0;
      w_q   <= '0;
    end else begin
      act_q <= act_i;
      w_q   <= w_i;
    end
  end

  assign act_o = act_q;
  assign w_o   = w_q;

  for (genvar a = 0; a < A; a++) begin : g_row
    for (genvar c = 0; c < C; c++) begin : g_col
      acc_t sh_in;
      if (a == A-1) begin : g_last
        assign sh_in = drain_in_i[c];
      end else begin : g_mid
        assign sh_in = acc[a+1][c];
      end
      dp1m4 u_mac (
        .clk, .rst_n,
        .clr_i,
        .act_i      (act_q[a]),
        .wblk_i     (w_q[c]),
        .shift_i    (drain_i),
        .shift_in_i (sh_in),
        .acc_o      (acc[a][c]),
        .gate_o     (gate_o[a*C+c])
      );
    end
  end

  assign drain_o = acc[0];

endmodule

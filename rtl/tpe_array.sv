// tpe_array: M x N systolic array of A x B x C tensor PEs (default 8 x 8 of
// 8 x 4 x 4, i.e. 2048 MACs), output stationary.
//
// Activation elements enter at the left edge of each TPE row (A serialized
// elements per row per cycle) and move right one TPE per cycle; weight blocks
// enter at the top of each TPE column (C blocks per column) and move down one
// TPE per cycle. The inputs are given unskewed: this module delays row i by i
// cycles and column j by j cycles so that the operands that belong together
// meet in every TPE. TPE (i,j) accumulates the A x C outputs for output rows
// i*A .. i*A+A-1 and output channels j*C .. j*C+C-1.
//
// Timing: an element presented at the row input in cycle t is multiplied in
// TPE (i,j) in cycle t+i+j+1 and its product is in the accumulator after that
// cycle. After the last operands, wait M+N-1 cycles before draining.
//
// Drain: while drain_i is high, each TPE row is one shift chain of N*A
// entries of C accumulators, shifting towards the left edge. In drain cycle s
// (s = 0 .. N*A-1), drain_o[i] holds the C results of output row i*A + (s%A)
// and output channels (s/A)*C .. (s/A)*C+C-1, valid before the clock edge.
// mac_active_o counts the MACs that were not clock gated in this cycle.
//
// The array shape, dataflow directions and output-stationary mapping follow
// the paper; the skew buffers and the drain chain are this design's choices.
module tpe_array
  import s2ta_pkg::*;
#(
  parameter int A = 8,
  parameter int C = 4,
  parameter int M = 8,
  parameter int N = 8
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        clr_i,
  input  logic                        drain_i,
  input  act_elem_t [M-1:0][A-1:0]    act_i,
  input  wblk_t     [N-1:0][C-1:0]    w_i,
  output acc_t      [M-1:0][C-1:0]    drain_o,
  output logic      [$clog2(M*N*A*C+1)-1:0] mac_active_o
);

  localparam int AEW = $bits(act_elem_t);
  localparam int WBW = $bits(wblk_t);

  act_elem_t [M-1:0][N:0][A-1:0]   act_h;  // act_h[i][j]: input of TPE (i,j)
  wblk_t     [M:0][N-1:0][C-1:0]   w_v;    // w_v[i][j]: input of TPE (i,j)
  acc_t      [M-1:0][N:0][C-1:0]   dr;     // dr[i][j]: drain output of TPE (i,j)
  logic      [M-1:0][N-1:0][A*C-1:0] gate;

  for (genvar i = 0; i < M; i++) begin : g_skew_row
    delay_line #(.W(A*AEW), .D(i)) u_dl (
      .clk, .rst_n, .d_i(act_i[i]), .q_o(act_h[i][0])
    );
  end
  for (genvar j = 0; j < N; j++) begin : g_skew_col
    delay_line #(.W(C*WBW), .D(j)) u_dl (
      .clk, .rst_n, .d_i(w_i[j]), .q_o(w_v[0][j])
    );
  end

  for (genvar i = 0; i < M; i++) begin : g_i
    assign dr[i][N] = '0;
    for (genvar j = 0; j < N; j++) begin : g_j
      tpe #(.A(A), .C(C)) u_tpe (
        .clk, .rst_n,
        .clr_i,
        .drain_i,
        .act_i      (act_h[i][j]),
        .w_i        (w_v[i][j]),
        .act_o      (act_h[i][j+1]),
        .w_o        (w_v[i+1][j]),
        .drain_in_i (dr[i][j+1]),
        .drain_o    (dr[i][j]),
        .gate_o     (gate[i][j])
      );
    end
    assign drain_o[i] = dr[i][0];
  end

  always_comb begin
    mac_active_o = '0;
    for (int i = 0; i < M; i++)
      for (int j = 0; j < N; j++)
        for (int k = 0; k < A*C; k++)
          mac_active_o += $bits(mac_active_o)'(~gate[i][j][k]);
  end

endmodule

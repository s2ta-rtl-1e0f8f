// tb_tpe_array: the full 8 x 8 array of 8 x 4 x 4 TPEs. For several tiles
// with a random A-DBB NNZ (1..8) it streams KB channel blocks in the way the
// controller does: each row lane gets one serialized element per cycle, each
// column's C weight blocks are held for NNZ cycles per channel block, with
// no skew applied by the testbench. After M+N+1 flush cycles it drains the
// array and compares every output with a reference matrix product of the
// expanded sparse operands. It also checks that mac_active_o never exceeds
// the MAC count and counts zero-gated MAC slots (must be seen).
module tb_tpe_array;
  import s2ta_pkg::*;
  localparam int A = 8, C = 4, M = 8, N = 8, KB = 6;

  logic clk = 0, rst_n = 0, clr = 0, drain = 0;
  act_elem_t [M-1:0][A-1:0] ai;
  wblk_t     [N-1:0][C-1:0] wi;
  acc_t      [M-1:0][C-1:0] dout;
  logic [$clog2(M*N*A*C+1)-1:0] active;
  int checks = 0, failures = 0;
  longint gated = 0;
  longint ref_out [M*A][N*C];
  int actv [M*A][KB][BZ];        // dense activations (after pruning)
  int wd   [N*C][KB][BZ];        // dense weights
  wblk_t wb [N*C][KB];

  tpe_array #(.A(A), .C(C), .M(M), .N(N)) dut (.clk, .rst_n, .clr_i(clr), .drain_i(drain),
    .act_i(ai), .w_i(wi), .drain_o(dout), .mac_active_o(active));
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) begin
    if (int'(active) > M*N*A*C) failures++;
    gated += longint'(M*N*A*C - int'(active));
  end

  initial begin
    int na, k;
    int lpos [M*A][KB][BZ];
    int lval [M*A][KB][BZ];
    int lcnt [M*A][KB];
    ai = '0; wi = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int tile = 0; tile < 6; tile++) begin
      na = (tile < 5) ? tile + 1 : 8;
      // operands
      for (int p = 0; p < M*A; p++) for (int b = 0; b < KB; b++) begin
        lcnt[p][b] = 0;
        for (int e = 0; e < BZ; e++) begin
          actv[p][b][e] = 0;
          if (lcnt[p][b] < na && $urandom_range(0, 1)) begin
            actv[p][b][e] = $urandom_range(0, 255) - 128;
            lpos[p][b][lcnt[p][b]] = e; lval[p][b][lcnt[p][b]] = actv[p][b][e];
            lcnt[p][b]++;
          end
        end
      end
      for (int q = 0; q < N*C; q++) for (int b = 0; b < KB; b++) begin
        wb[q][b] = '0; k = 0;
        for (int e = 0; e < BZ; e++) begin
          wd[q][b][e] = 0;
          if (k < WNNZ && $urandom_range(0, 1)) begin
            wb[q][b].mask[e] = 1'b1;
            wd[q][b][e] = $urandom_range(0, 255) - 128;
            wb[q][b].val[k] = 8'(wd[q][b][e]);
            k++;
          end
        end
      end
      for (int p = 0; p < M*A; p++) for (int q = 0; q < N*C; q++) begin
        ref_out[p][q] = 0;
        for (int b = 0; b < KB; b++) for (int e = 0; e < BZ; e++)
          ref_out[p][q] += longint'(actv[p][b][e] * wd[q][b][e]);
      end
      @(negedge clk); clr = 1;
      @(negedge clk); clr = 0;
      for (int b = 0; b < KB; b++)
        for (int c = 0; c < na; c++) begin
          for (int p = 0; p < M*A; p++) begin
            ai[p / A][p % A].vld = (c < lcnt[p][b]);
            ai[p / A][p % A].pos = (c < lcnt[p][b]) ? 3'(lpos[p][b][c]) : 3'd0;
            ai[p / A][p % A].val = (c < lcnt[p][b]) ? int8_t'(lval[p][b][c]) : 8'sd0;
          end
          for (int q = 0; q < N*C; q++) wi[q / C][q % C] = wb[q][b];
          @(negedge clk);
        end
      ai = '0;
      repeat (M + N) @(negedge clk);
      drain = 1;
      for (int s = 0; s < N*A; s++) begin
        #1;
        for (int i = 0; i < M; i++) for (int c = 0; c < C; c++) begin
          checks++;
          if (dout[i][c] !== acc_t'(ref_out[i*A + s%A][(s/A)*C + c])) begin
            failures++;
            if (failures < 10) $display("tile %0d s %0d row %0d c %0d: %0d exp %0d", tile, s, i, c,
              dout[i][c], ref_out[i*A + s%A][(s/A)*C + c]);
          end
        end
        @(negedge clk);
      end
      drain = 0;
    end
    checks++;
    if (gated == 0) failures++;
    $display("zero-gated MAC slots: %0d", gated);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

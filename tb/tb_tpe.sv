// tb_tpe: one 8 x 4 x 4 tensor PE. Streams random serialized activation
// elements (A per cycle) and random 4/8 weight blocks (C per cycle) into the
// TPE, checks that the operands are forwarded to the neighbours one cycle
// later, then drains the A x C accumulators through the shift chain and
// compares them with a reference outer-product accumulation. Also checks that
// drain_in values enter the chain behind the results.
module tb_tpe;
  import s2ta_pkg::*;
  localparam int A = 8, C = 4;

  logic clk = 0, rst_n = 0, clr = 0, drain = 0;
  act_elem_t [A-1:0] ai, ao, ai_q;
  wblk_t     [C-1:0] wi, wo, wi_q;
  acc_t      [C-1:0] din, dout;
  logic [A*C-1:0] gate;
  longint ref_acc [A][C];
  int checks = 0, failures = 0;

  tpe #(.A(A), .C(C)) dut (.clk, .rst_n, .clr_i(clr), .drain_i(drain), .act_i(ai), .w_i(wi),
    .act_o(ao), .w_o(wo), .drain_in_i(din), .drain_o(dout), .gate_o(gate));
  always #5 clk = ~clk;

  function automatic int dense_w(wblk_t b, int pos);
    int k = 0;
    for (int i = 0; i < BZ; i++) if (b.mask[i]) begin
      if (i == pos) return int'(int8_t'(b.val[k]));
      k++;
    end
    return 0;
  endfunction

  function automatic wblk_t rand_wblk();
    wblk_t b; int k;
    b = '0; k = 0;
    for (int i = 0; i < BZ; i++)
      if (k < WNNZ && $urandom_range(0, 1)) begin
        b.mask[i] = 1'b1; b.val[k] = 8'($urandom); k++;
      end
    return b;
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    acc_t extra [A][C];
    ai = '0; wi = '0; din = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int rep = 0; rep < 20; rep++) begin
      @(negedge clk); clr = 1;
      @(negedge clk); clr = 0;
      foreach (ref_acc[a, c]) ref_acc[a][c] = 0;
      for (int t = 0; t < 40; t++) begin
        for (int a = 0; a < A; a++) begin
          ai[a].vld = $urandom_range(0, 7) != 0;
          ai[a].pos = 3'($urandom);
          ai[a].val = int8_t'($urandom);
        end
        if (t % 3 == 0) for (int c = 0; c < C; c++) wi[c] = rand_wblk();
        #1;
        // operands given in the previous cycle must be on the outputs now
        if (t > 0) begin
          checks++;
          if (ao !== ai_q || wo !== wi_q) begin
            failures++;
            if (failures < 10) $display("operand forwarding mismatch");
          end
        end
        for (int a = 0; a < A; a++) for (int c = 0; c < C; c++)
          if (ai[a].vld) ref_acc[a][c] += longint'(int'(ai[a].val) * dense_w(wi[c], int'(ai[a].pos)));
        ai_q = ai; wi_q = wi;
        @(negedge clk);
      end
      ai = '0;
      @(negedge clk); @(negedge clk);
      // drain A rows, pushing known values in
      for (int s = 0; s < 2*A; s++) begin
        drain = 1;
        for (int c = 0; c < C; c++) begin
          din[c] = acc_t'($urandom);
          if (s < A) extra[s][c] = din[c];
        end
        #1;
        for (int c = 0; c < C; c++) begin
          checks++;
          if (s < A) begin
            if (dout[c] !== acc_t'(ref_acc[s][c])) begin
              failures++;
              if (failures < 10) $display("rep %0d row %0d ch %0d: %0d exp %0d", rep, s, c, dout[c], acc_t'(ref_acc[s][c]));
            end
          end else if (dout[c] !== extra[s-A][c]) begin
            failures++;
            if (failures < 10) $display("drain_in not chained");
          end
        end
        @(negedge clk);
      end
      drain = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_dp1m4: self-checking test of the time-unrolled sparse MAC.
// Drives random 4/8 weight blocks and random serialized activation elements
// and compares the accumulator, every cycle, with a model that expands the
// weight block to its dense form and multiplies at the element's position.
// Also checks clear, drain-shift priority and the zero-gating flag.
module tb_dp1m4;
  import s2ta_pkg::*;

  logic clk = 0, rst_n = 0, clr = 0, shift = 0;
  act_elem_t a;
  wblk_t     w;
  acc_t      shin, acc;
  logic      gate;
  int checks = 0, failures = 0;

  dp1m4 dut (.clk, .rst_n, .clr_i(clr), .act_i(a), .wblk_i(w), .shift_i(shift),
             .shift_in_i(shin), .acc_o(acc), .gate_o(gate));

  always #5 clk = ~clk;

  function automatic wblk_t rand_wblk();
    wblk_t b; int k;
    b = '0; k = 0;
    for (int i = 0; i < BZ; i++)
      if (k < WNNZ && ($urandom_range(0, 99) < 55)) begin
        b.mask[i] = 1'b1;
        b.val[k]  = ($urandom_range(0, 9) == 0) ? 8'd0 : 8'($urandom);
        k++;
      end
    return b;
  endfunction

  function automatic int dense_w(wblk_t b, int pos);
    int k = 0;
    for (int i = 0; i < BZ; i++) if (b.mask[i]) begin
      if (i == pos) return int'(int8_t'(b.val[k]));
      k++;
    end
    return 0;
  endfunction

  longint ref_acc;
  int prod;
  logic exp_gate;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    a = '0; w = '0; shin = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    ref_acc = 0;
    for (int t = 0; t < 4000; t++) begin
      @(negedge clk);
      clr   = ($urandom_range(0, 199) == 0);
      shift = !clr && ($urandom_range(0, 99) == 0);
      shin  = acc_t'($urandom);
      if (t % 4 == 0) w = rand_wblk();
      a.vld = ($urandom_range(0, 9) != 0);
      a.pos = 3'($urandom);
      a.val = ($urandom_range(0, 5) == 0) ? 8'sd0 : int8_t'($urandom);
      prod     = int'(a.val) * dense_w(w, int'(a.pos));
      exp_gate = !(a.vld && a.val != 0 && dense_w(w, int'(a.pos)) != 0);
      #1;
      checks++;
      if (gate !== exp_gate) begin
        failures++;
        if (failures < 10) $display("gate mismatch t=%0d", t);
      end
      if (clr) ref_acc = 0;
      else if (shift) ref_acc = longint'(shin);
      else if (!exp_gate) ref_acc = ref_acc + longint'(prod);
      ref_acc = longint'(acc_t'(ref_acc));
      @(posedge clk); #1;
      checks++;
      if (acc !== acc_t'(ref_acc)) begin
        failures++;
        if (failures < 10) $display("acc mismatch t=%0d got %0d exp %0d", t, acc, ref_acc);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

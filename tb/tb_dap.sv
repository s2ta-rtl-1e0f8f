// tb_dap: self-checking test of the Dynamic Activation Pruning unit.
// 1) The worked example block (elements 0..7 = 6, 2, -7, 5, 1, -1, 4, 0) must
//    give masks 04, 05, 0D, 4D, 4F for NNZ = 1..5, and for 4/8 the kept values
//    6, -7, 5, 4 in ascending position order.
// 2) Random blocks against a reference that repeatedly takes the largest
//    magnitude among the remaining elements (ties to the lower position) for
//    NNZ = 1..5, and zero skipping with overflow detection for NNZ = 6..8.
module tb_dap;
  import s2ta_pkg::*;

  int8_t [BZ-1:0]  blk;
  logic [NNZW-1:0] nnz;
  ablk_t           o;
  logic            ovf;
  int checks = 0, failures = 0;

  dap dut (.blk_i(blk), .nnz_i(nnz), .blk_o(o), .ovf_o(ovf));

  function automatic int absv(int8_t v);
    return (v < 0) ? -int'(v) : int'(v);
  endfunction

  task automatic check_ref();
    logic [BZ-1:0] m; logic eovf; int best, k, cnt, nz;
    logic [BZ-1:0][DW-1:0] ev;
    m = '0; eovf = 0;
    if (nnz <= 5) begin
      for (int s = 0; s < int'(nnz); s++) begin
        best = -1;
        for (int i = 0; i < BZ; i++)
          if (!m[i] && (best < 0 || absv(blk[i]) > absv(blk[best]))) best = i;
        m[best] = 1'b1;
      end
    end else begin
      cnt = 0; nz = 0;
      for (int i = 0; i < BZ; i++) if (blk[i] != 0) begin
        nz++;
        if (cnt < int'(nnz)) begin m[i] = 1'b1; cnt++; end
      end
      eovf = (nz > int'(nnz));
    end
    ev = '0; k = 0;
    for (int i = 0; i < BZ; i++) if (m[i]) begin ev[k] = blk[i]; k++; end
    #1;
    checks++;
    if (o.mask !== m || o.val !== ev || ovf !== eovf) begin
      failures++;
      if (failures < 10) $display("mismatch nnz=%0d blk=%h got %h/%h/%0b exp %h/%h/%0b",
                                  nnz, blk, o.mask, o.val, ovf, m, ev, eovf);
    end
  endtask

  initial begin
    logic [7:0] exp_m [5] = '{8'h04, 8'h05, 8'h0D, 8'h4D, 8'h4F};
    blk = '{8'sd0, 8'sd4, -8'sd1, 8'sd1, 8'sd5, -8'sd7, 8'sd2, 8'sd6}; // [7]..[0]
    for (int n = 1; n <= 5; n++) begin
      nnz = NNZW'(n);
      #1;
      checks++;
      if (o.mask !== exp_m[n-1]) begin
        failures++;
        $display("example NNZ=%0d mask %h expected %h", n, o.mask, exp_m[n-1]);
      end
      check_ref();
    end
    nnz = 4; #1;
    checks++;
    if (int8_t'(o.val[0]) != 6 || int8_t'(o.val[1]) != -7 ||
        int8_t'(o.val[2]) != 5 || int8_t'(o.val[3]) != 4) begin
      failures++;
      $display("example 4/8 values wrong: %h", o.val);
    end
    for (int t = 0; t < 20000; t++) begin
      for (int i = 0; i < BZ; i++)
        blk[i] = ($urandom_range(0, 2) == 0) ? 8'sd0 :
                 ($urandom_range(0, 3) == 0) ? int8_t'($urandom_range(0, 6) - 3) : int8_t'($urandom);
      nnz = NNZW'($urandom_range(1, 8));
      check_ref();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

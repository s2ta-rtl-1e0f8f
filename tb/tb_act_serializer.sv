// tb_act_serializer: loads random compressed blocks every NNZ cycles (NNZ
// random 1..8 per group of blocks) and checks that the elements come out one
// per cycle, in ascending position order, with their values, and that the
// lane is invalid once the block's kept elements are used up.
module tb_act_serializer;
  import s2ta_pkg::*;

  logic clk = 0, rst_n = 0, load = 0;
  ablk_t blk;
  act_elem_t e;
  int checks = 0, failures = 0;

  act_serializer dut (.clk, .rst_n, .load_i(load), .blk_i(blk), .elem_o(e));
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    ablk_t cur;
    int na, k;
    int pos [BZ];
    blk = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int g = 0; g < 300; g++) begin
      na = $urandom_range(1, 8);
      for (int b = 0; b < 4; b++) begin
        // random block with at most na kept elements
        cur = '0; k = 0;
        for (int i = 0; i < BZ; i++)
          if (k < na && $urandom_range(0, 1)) begin
            cur.mask[i] = 1'b1; cur.val[k] = 8'($urandom); pos[k] = i; k++;
          end
        @(negedge clk);
        blk = cur; load = 1;
        @(negedge clk);
        load = 0;
        for (int c = 0; c < na; c++) begin
          checks++;
          if (c < k) begin
            if (!e.vld || int'(e.pos) != pos[c] || e.val != int8_t'(cur.val[c])) begin
              failures++;
              if (failures < 10) $display("elem %0d: got %0b/%0d/%0d exp pos %0d val %0d",
                                          c, e.vld, e.pos, e.val, pos[c], int8_t'(cur.val[c]));
            end
          end else if (e.vld) begin
            failures++;
            if (failures < 10) $display("elem %0d should be invalid", c);
          end
          if (c != na - 1) @(negedge clk);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

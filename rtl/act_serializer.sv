// act_serializer: turns one compressed A-DBB block into a stream of elements,
// one per cycle, for the time-unrolled datapath.
//
// On load_i the block (mask and ascending values, as produced by dap) is
// captured. In each following cycle the serializer presents the lowest kept
// position and its value as an act_elem_t and removes it; when no kept
// element is left it presents an invalid element. A block with NNZ kept
// elements thus takes NNZ cycles, and the controller reloads every NNZ
// cycles. A load in the same cycle as the last element is fine: the new
// block appears in the next cycle.
//
// Timing: elem_o is registered; the first element of a block loaded at edge
// t is visible from t to t+1. Serial element order (ascending position) and
// the position-tagging of elements are this design's choices; the paper
// gives only one element of the activation block per cycle.
module act_serializer
  import s2ta_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       load_i,
  input  ablk_t      blk_i,
  output act_elem_t  elem_o
);

  logic [BZ-1:0]         mask_q;
  logic [BZ-1:0][DW-1:0] val_q;
  logic [POSW-1:0]       low;

  always_comb begin
    low = '0;
    for (int i = BZ-1; i >= 0; i--) if (mask_q[i]) low = POSW'(i);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mask_q <= '0;
      val_q  <= '0;
    end else if (load_i) begin
      mask_q <= blk_i.mask;
      val_q  <= blk_i.val;
    end else begin
      mask_q <= mask_q & (mask_q - 1'b1);     // drop lowest kept position
      val_q  <= {DW'(0), val_q[BZ-1:1]};
    end
  end

  assign elem_o.vld = |mask_q;
  assign elem_o.pos = low;
  assign elem_o.val = int8_t'(val_q[0]);

endmodule

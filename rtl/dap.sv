// dap: Dynamic Activation Pruning unit for one BZ = 8 activation block.
//
// Converts a dense INT8 block into a compressed A-DBB block holding at most
// nnz_i elements, chosen at run time per layer:
//  * nnz_i = 1..5: a cascade of DAP_MAX = 5 magnitude-maxpool stages. Stage k
//    picks, among the elements not taken by stages 0..k-1, the one with the
//    largest absolute value, using a binary tree of BZ-1 = 7 comparators.
//    Stages k >= nnz_i are bypassed. The kept set is therefore the Top-NNZ
//    elements by magnitude; ties go to the lower position. If the block has
//    fewer non-zeros than nnz_i, zeros are kept as well, so exactly nnz_i
//    mask bits are set.
//  * nnz_i = 6..8: the maxpool stages are bypassed. The non-zero elements are
//    kept (zero skipping). If there are more than nnz_i of them (possible only
//    for 6 and 7), the lowest-positioned nnz_i are kept and ovf_o is raised.
// Output: mask_o (bit i = element i kept) and the kept values in ascending
// position order in blk_o.val, zeros above. The unit is combinational; the
// serializer that follows registers its result.
//
// The cascaded maxpool structure, 7 comparators per stage, 5 stages and the
// 1/8..5/8 range follow the paper (its example: block 6,2,-7,5,1,-1,4,0 for
// elements 0..7 gives masks 04, 05, 0D, 4D, 4F for Top-1..Top-5). The tie
// rule and the 6/8..8/8 bypass behaviour are this design's choices.
module dap
  import s2ta_pkg::*;
(
  input  int8_t [BZ-1:0]   blk_i,
  input  logic [NNZW-1:0]  nnz_i,
  output ablk_t            blk_o,
  output logic             ovf_o
);

  typedef struct packed {
    logic            ok;
    logic [POSW-1:0] idx;
    logic [DW:0]     m;
  } cand_t;

  // Larger magnitude wins; on a tie the lower index (left operand) wins.
  function automatic cand_t pick(input cand_t lo, input cand_t hi);
    if (!hi.ok)               return lo;
    if (!lo.ok)               return hi;
    if (hi.m > lo.m)          return hi;
    return lo;
  endfunction

  // One magnitude-maxpool stage: 4 + 2 + 1 = 7 comparators.
  function automatic logic [BZ-1:0] maxpool(input int8_t [BZ-1:0] x,
                                            input logic [BZ-1:0] taken);
    cand_t l1 [4];
    cand_t l2 [2];
    cand_t l3;
    cand_t c  [BZ];
    for (int i = 0; i < BZ; i++) begin
      c[i].ok  = ~taken[i];
      c[i].idx = POSW'(i);
      c[i].m   = mag(x[i]);
    end
    for (int i = 0; i < 4; i++) l1[i] = pick(c[2*i], c[2*i+1]);
    for (int i = 0; i < 2; i++) l2[i] = pick(l1[2*i], l1[2*i+1]);
    l3 = pick(l2[0], l2[1]);
    return l3.ok ? (BZ'(1) << l3.idx) : '0;
  endfunction

  logic [DAP_MAX:0][BZ-1:0] taken;
  logic [BZ-1:0]            nzmask, bymask, mask;
  logic [POSW:0]            cnt;

  // Cascade of maxpool stages, unused stages bypassed.
  assign taken[0] = '0;
  for (genvar k = 0; k < DAP_MAX; k++) begin : g_stage
    assign taken[k+1] = (NNZW'(k) < nnz_i) ? (taken[k] | maxpool(blk_i, taken[k]))
                                           : taken[k];
  end

  always_comb begin
    // Bypass path for 6/8 .. 8/8: zero skipping, keep the lowest nnz_i.
    for (int i = 0; i < BZ; i++) nzmask[i] = (blk_i[i] != 0);
    bymask = '0;
    cnt    = '0;
    for (int i = 0; i < BZ; i++) begin
      if (nzmask[i] && ({1'b0, cnt} < {1'b0, nnz_i})) begin
        bymask[i] = 1'b1;
        cnt       = cnt + 1'b1;
      end
    end

    if (nnz_i > NNZW'(DAP_MAX)) begin
      mask  = bymask;
      ovf_o = (popcount8(nzmask) > (POSW+1)'(nnz_i));
    end else begin
      mask  = taken[DAP_MAX];
      ovf_o = 1'b0;
    end

    // Compaction: kept values in ascending position order.
    blk_o.mask = mask;
    blk_o.val  = '0;
    for (int i = 0; i < BZ; i++) begin
      if (mask[i]) blk_o.val[popcount8(mask & ((BZ'(1) << i) - BZ'(1)))] = blk_i[i];
    end
  end

endmodule

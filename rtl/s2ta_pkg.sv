// s2ta_pkg: constants and types shared by the S2TA-AW sparse systolic accelerator.
//
// Data is INT8 and grouped into Density Bound Blocks (DBB) of BZ = 8 elements
// taken along the channel dimension. A compressed block keeps only its
// non-zero values plus an 8-bit position bitmask M. Bit i of M stands for
// element i of the raw block; element 0 is the least significant bit, as in
// the worked examples of the DBB format (raw block 0,8,-3,0,0,1,2,0 listed
// from element 7 down to element 0 has M = 8'b01100110). Compressed values are
// stored in ascending position order: val[0] is the lowest-positioned kept
// element.
//
// Weights use a fixed 4/8 W-DBB (at most 4 non-zeros per block). Activations
// use a per-layer variable A-DBB density of 1/8 .. 8/8 and are processed
// serially, one element per cycle ("time unrolled"). Accumulators are INT32.
// These numbers follow the paper; the address width is this design's choice.
package s2ta_pkg;

  localparam int BZ       = 8;   // DBB block size
  localparam int POSW     = 3;   // bits of a position inside a block
  localparam int DW       = 8;   // operand width (INT8)
  localparam int ACCW     = 32;  // accumulator width (INT32)
  localparam int WNNZ     = 4;   // B: non-zeros per weight block (4/8 W-DBB)
  localparam int DAP_MAX  = 5;   // maxpool stages in the DAP (A-DBB 1/8 .. 5/8)
  localparam int NNZW     = 4;   // bits of an NNZ setting (1..8)
  localparam int AW       = 16;  // buffer word-address width

  typedef logic signed [DW-1:0]   int8_t;
  typedef logic signed [ACCW-1:0] acc_t;

  // One serialized activation element on its way through a TPE row.
  typedef struct packed {
    logic            vld;
    logic [POSW-1:0] pos;
    int8_t           val;
  } act_elem_t;

  // A compressed 4/8 W-DBB weight block.
  typedef struct packed {
    logic [BZ-1:0]             mask;
    logic [WNNZ-1:0][DW-1:0]   val;
  } wblk_t;

  // A compressed A-DBB activation block (up to 8 kept values).
  typedef struct packed {
    logic [BZ-1:0]           mask;
    logic [BZ-1:0][DW-1:0]   val;
  } ablk_t;

  // Configuration of one output tile (see s2ta_ctrl).
  typedef struct packed {
    logic [NNZW-1:0] nnz_a;     // A-DBB NNZ: 1..5 prune with DAP, 6..8 bypass
    logic [AW-1:0]   kblocks;   // number of BZ-channel blocks to reduce over
    logic [AW-1:0]   w_base;    // first weight-buffer word
    logic [AW-1:0]   a_base;    // first activation-buffer word
    logic [AW-1:0]   o_base;    // first activation-buffer word for results
    logic            wb_bank;   // weight-buffer bank the array reads
    logic            ab_rd_bank;// activation-buffer bank the array reads
    logic            ab_wr_bank;// activation-buffer bank results are stored to
  } tile_cfg_t;

  localparam int TILE_CFG_W = $bits(tile_cfg_t);

  function automatic logic [POSW:0] popcount8(input logic [BZ-1:0] m);
    logic [POSW:0] c;
    c = '0;
    for (int i = 0; i < BZ; i++) c += {{POSW{1'b0}}, m[i]};
    return c;
  endfunction

  function automatic logic [DW:0] mag(input int8_t v);
    return v[DW-1] ? -{v[DW-1], v} : {1'b0, v};
  endfunction

endpackage

// dp1m4: time-unrolled sparse multiply-accumulate unit (one MAC, one 4:1 mux).
//
// Each cycle the unit receives one element of a serialized A-DBB activation
// block (value, position 0..7 in its block, valid) and the 4/8 W-DBB weight
// block that the element must meet (4 compressed INT8 values and the 8-bit
// position mask). The weight at the activation's position is selected with a
// 4:1 mux whose select is the number of mask bits below that position; if the
// weight mask has no entry there, the weight is zero. The INT8 x INT8 product
// is added to a local INT32 accumulator.
//
// Zero-value clock gating: when the element is invalid, the activation is
// zero, or the selected weight is absent or zero, the accumulator is not
// enabled (gate_o reports such cycles).
//
// Control priority: clr_i zeroes the accumulator; otherwise shift_i loads
// shift_in_i (used to drain results out of the array); otherwise the MAC
// accumulates. The accumulator updates on the rising edge after the operands
// are presented; acc_o is the register.
//
// The mux-in-front-of-one-MAC structure, the INT8 operands and INT32
// accumulators follow the paper; the drain path and the priority between
// clear, drain and MAC are this design's choices.
module dp1m4
  import s2ta_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       clr_i,
  input  act_elem_t  act_i,
  input  wblk_t      wblk_i,
  input  logic       shift_i,
  input  acc_t       shift_in_i,
  output acc_t       acc_o,
  output logic       gate_o
);

  logic [POSW:0]   below;
  logic [1:0]      sel;
  logic            hit;
  int8_t           w_sel;
  logic signed [2*DW-1:0] prod;
  logic            en;
  acc_t            acc_q;

  always_comb begin
    hit   = wblk_i.mask[act_i.pos];
    below = popcount8(wblk_i.mask & ((BZ'(1) << act_i.pos) - BZ'(1)));
    sel   = below[1:0];
    w_sel = hit ? int8_t'(wblk_i.val[sel]) : int8_t'(0);
    prod  = act_i.val * w_sel;
    en    = act_i.vld && (act_i.val != 0) && (w_sel != 0);
  end

  assign gate_o = ~en;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)        acc_q <= '0;
    else if (clr_i)    acc_q <= '0;
    else if (shift_i)  acc_q <= shift_in_i;
    else if (en)       acc_q <= acc_q + acc_t'(prod);
  end

  assign acc_o = acc_q;

endmodule

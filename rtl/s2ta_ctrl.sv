// s2ta_ctrl: sequencer for one output tile of the S2TA-AW array.
//
// A tile is the M*A x N*C block of outputs that the array holds in its
// accumulators (64 output rows x 32 output channels at the default size),
// reduced over cfg.kblocks channel blocks of BZ = 8. On start_i (while idle)
// the configuration is latched and the controller runs:
//   CLR    1 cycle   clear all accumulators
//   STREAM KB*NA     one block period of NA cycles per channel block. In the
//                    first cycle of a period it reads one word of the weight
//                    buffer (all N*C weight blocks of block kb) and one word
//                    of the activation buffer (all M*A dense activation
//                    blocks of block kb). One cycle later ser_load_o makes the
//                    DAP output and the weight word enter the serializers and
//                    weight holding registers; the serializers then emit one
//                    activation element per cycle for NA cycles.
//   FLUSH  M+N+1     let the last wavefront pass through the array
//   DRAIN  N*A       shift the accumulators out, one element per row per
//                    cycle, writing each drained row vector (M*C results) as
//                    one segment of an activation-buffer word at o_base.
// NA is the A-DBB NNZ of the layer (nnz_a, 1..8; 0 and values above 8 mean
// 8/8 dense). So a layer costs NA cycles per block, as in the paper: 1 cycle
// for 1/8, 5 cycles for 5/8, 8 for dense. busy_o is high for
// 1 + KB*NA + (M+N+1) + N*A cycles after the edge that takes start_i, and
// done_o pulses in the first idle cycle.
//
// The per-block NNZ-cycle rate and output-stationary tiling follow the
// paper; the phase structure, FLUSH length and result layout are this
// design's choices.
module s2ta_ctrl
  import s2ta_pkg::*;
#(
  parameter int A    = 8,
  parameter int C    = 4,
  parameter int M    = 8,
  parameter int N    = 8,
  parameter int SEGS = 4   // result segments per activation-buffer word
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start_i,
  input  tile_cfg_t       cfg_i,
  output logic            busy_o,
  output logic            done_o,
  // weight buffer read (array port)
  output logic            wb_en_o,
  output logic            wb_bank_o,
  output logic [AW-1:0]   wb_addr_o,
  // activation buffer (array port)
  output logic            ab_en_o,
  output logic            ab_we_o,
  output logic            ab_bank_o,
  output logic [AW-1:0]   ab_addr_o,
  output logic [SEGS-1:0] ab_wseg_o,
  // datapath control
  output logic [NNZW-1:0] nnz_o,
  output logic            ser_load_o,
  output logic            arr_clr_o,
  output logic            arr_drain_o
);

  typedef enum logic [2:0] {S_IDLE, S_CLR, S_STREAM, S_FLUSH, S_DRAIN} state_t;

  localparam int FLUSH_CYC = M + N + 1;
  localparam int DRAIN_CYC = N * A;

  state_t          st;
  tile_cfg_t       cfg;
  logic [NNZW-1:0] na;
  logic [NNZW-1:0] ph;
  logic [AW-1:0]   kb;
  logic [AW-1:0]   cnt;
  logic            rd;

  always_comb begin
    na = cfg.nnz_a;
    if (cfg.nnz_a == '0 || cfg.nnz_a > NNZW'(BZ)) na = NNZW'(BZ);
  end

  assign rd = (st == S_STREAM) && (ph == '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st         <= S_IDLE;
      cfg        <= '0;
      ph         <= '0;
      kb         <= '0;
      cnt        <= '0;
      ser_load_o <= 1'b0;
      done_o     <= 1'b0;
    end else begin
      ser_load_o <= rd;
      done_o     <= 1'b0;
      unique case (st)
        S_IDLE: if (start_i) begin
          cfg <= cfg_i;
          st  <= S_CLR;
        end
        S_CLR: begin
          ph <= '0;
          kb <= '0;
          cnt <= '0;
          st <= (cfg.kblocks == '0) ? S_FLUSH : S_STREAM;
        end
        S_STREAM: begin
          if (ph == na - 1'b1) begin
            ph <= '0;
            kb <= kb + 1'b1;
            if (kb == cfg.kblocks - 1'b1) st <= S_FLUSH;
          end else begin
            ph <= ph + 1'b1;
          end
        end
        S_FLUSH: begin
          if (cnt == AW'(FLUSH_CYC - 1)) begin
            cnt <= '0;
            st  <= S_DRAIN;
          end else cnt <= cnt + 1'b1;
        end
        S_DRAIN: begin
          if (cnt == AW'(DRAIN_CYC - 1)) begin
            cnt    <= '0;
            st     <= S_IDLE;
            done_o <= 1'b1;
          end else cnt <= cnt + 1'b1;
        end
        default: st <= S_IDLE;
      endcase
    end
  end

  assign busy_o      = (st != S_IDLE);
  assign nnz_o       = na;
  assign arr_clr_o   = (st == S_CLR);
  assign arr_drain_o = (st == S_DRAIN);

  assign wb_en_o   = rd;
  assign wb_bank_o = cfg.wb_bank;
  assign wb_addr_o = cfg.w_base + kb;

  assign ab_en_o   = rd || arr_drain_o;
  assign ab_we_o   = arr_drain_o;
  assign ab_bank_o = arr_drain_o ? cfg.ab_wr_bank : cfg.ab_rd_bank;
  assign ab_addr_o = arr_drain_o ? cfg.o_base + AW'(cnt / AW'(SEGS)) : cfg.a_base + kb;
  assign ab_wseg_o = arr_drain_o ? (SEGS'(1) << (cnt % AW'(SEGS))) : '0;

endmodule

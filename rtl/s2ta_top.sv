// s2ta_top: S2TA-AW, a systolic-array CNN accelerator that exploits
// density-bound-block (DBB) sparsity in both weights (fixed 4/8) and
// activations (variable 1/8 .. 8/8 per layer, time unrolled).
//
// Structure (default sizes in brackets):
//   weight buffer  WB  dbuf_sram, 2 banks, WB_BYTES total [512 KB]. One word
//                      holds the N*C compressed weight blocks (4 INT8 values +
//                      8-bit mask each) of one channel block [1280 bits].
//   activation buf AB  dbuf_sram, 2 banks, AB_BYTES total [2 MB]. One word
//                      holds the M*A dense INT8 activation blocks of one
//                      channel block [4096 bits]; results are written back
//                      into AB words as SEGS segments of M*C INT32 values.
//   DAP array          M*A dap units [64] prune each activation block read
//                      from AB to its Top-NNZ elements.
//   serializers        M*A act_serializer lanes feed one element per lane per
//                      cycle into the array rows.
//   weight hold        one register of the WB word, reloaded once per block
//                      period, feeds the array columns.
//   TPE array          tpe_array of M x N [8 x 8] tensor PEs of A x B x C
//                      [8 x 4 x 4]: 2048 time-unrolled MACs.
//   controller         s2ta_ctrl sequences one output tile per start_i.
// The MCU cluster and DMA that load the buffers, configure tiles and post-
// process results are outside this module: they use the external buffer
// ports (wb_*, ab_*) and start_i/cfg_i/done_o.
//
// Data layout. AB word, lane l = i*A + a (array row i, activation row a):
// element e of lane l at bits [(l*BZ + e)*8 +: 8]. WB word: weight block of
// array column j, column c at index j*C + c of a packed wblk_t array. Result
// segment s of a tile (s = 0 .. N*A-1) goes to AB word o_base + s/SEGS,
// segment s%SEGS, and holds output row i*A + (s%A), channel (s/A)*C + c at
// bits [(i*C + c)*32 +: 32] of the segment. Output (p, q) of the tile is
// sum over channel blocks kb and positions e of act'[p][kb][e] * w[q][kb][e],
// where act' is the activation block after DAP.
//
// Timing: see s2ta_ctrl; after start_i a tile keeps busy_o high for
// KB*NA + M + N + N*A + 2 cycles and done_o pulses in the first idle cycle. ovf_cnt_o counts activation blocks that had more
// non-zeros than a 6/8 or 7/8 bypass setting could keep (cleared by start_i).
//
// Sizes, array shape, buffer sizes and the DAP range follow the paper; word
// layouts, the result write-back path and arbitration are this design's.
module s2ta_top
  import s2ta_pkg::*;
#(
  parameter int A        = 8,
  parameter int C        = 4,
  parameter int M        = 8,
  parameter int N        = 8,
  parameter int WB_BYTES = 524288,
  parameter int AB_BYTES = 2097152,
  // derived
  parameter int WB_W     = N * C * $bits(wblk_t),
  parameter int AB_W     = M * A * BZ * DW,
  parameter int RES_W    = M * C * ACCW,
  parameter int SEGS     = AB_W / RES_W,
  parameter int WB_DEPTH = WB_BYTES / 2 / (WB_W / 8),
  parameter int AB_DEPTH = AB_BYTES / 2 / (AB_W / 8),
  parameter int WB_AB    = $clog2(WB_DEPTH),
  parameter int AB_AB    = $clog2(AB_DEPTH)
) (
  input  logic              clk,
  input  logic              rst_n,
  // tile control
  input  logic              start_i,
  input  tile_cfg_t         cfg_i,
  output logic              busy_o,
  output logic              done_o,
  output logic [15:0]       ovf_cnt_o,
  output logic [$clog2(M*N*A*C+1)-1:0] mac_active_o,
  // weight buffer, external side
  input  logic              wb_req_i,
  input  logic              wb_we_i,
  input  logic              wb_bank_i,
  input  logic [WB_AB-1:0]  wb_addr_i,
  input  logic [WB_W-1:0]   wb_wdata_i,
  output logic              wb_gnt_o,
  output logic              wb_rvalid_o,
  output logic [WB_W-1:0]   wb_rdata_o,
  // activation buffer, external side
  input  logic              ab_req_i,
  input  logic              ab_we_i,
  input  logic              ab_bank_i,
  input  logic [AB_AB-1:0]  ab_addr_i,
  input  logic [AB_W-1:0]   ab_wdata_i,
  output logic              ab_gnt_o,
  output logic              ab_rvalid_o,
  output logic [AB_W-1:0]   ab_rdata_o
);

  // ---------------- controller ----------------
  logic            wb_en, wb_bank, ab_en, ab_we, ab_bank;
  logic [AW-1:0]   wb_addr, ab_addr;
  logic [SEGS-1:0] ab_wseg;
  logic [NNZW-1:0] nnz;
  logic            ser_load, arr_clr, arr_drain;

  s2ta_ctrl #(.A(A), .C(C), .M(M), .N(N), .SEGS(SEGS)) u_ctrl (
    .clk, .rst_n,
    .start_i, .cfg_i, .busy_o, .done_o,
    .wb_en_o(wb_en), .wb_bank_o(wb_bank), .wb_addr_o(wb_addr),
    .ab_en_o(ab_en), .ab_we_o(ab_we), .ab_bank_o(ab_bank), .ab_addr_o(ab_addr),
    .ab_wseg_o(ab_wseg),
    .nnz_o(nnz), .ser_load_o(ser_load), .arr_clr_o(arr_clr), .arr_drain_o(arr_drain)
  );

  // ---------------- buffers ----------------
  logic [WB_W-1:0] wb_rdata;
  logic [AB_W-1:0] ab_rdata, ab_wdata;

  dbuf_sram #(.W(WB_W), .DEPTH(WB_DEPTH), .NSEG(1), .ABITS(WB_AB)) u_wb (
    .clk, .rst_n,
    .a_en_i(wb_en), .a_we_i(1'b0), .a_bank_i(wb_bank), .a_addr_i(wb_addr[WB_AB-1:0]),
    .a_wseg_i(1'b0), .a_wdata_i('0), .a_rdata_o(wb_rdata),
    .e_req_i(wb_req_i), .e_we_i(wb_we_i), .e_bank_i(wb_bank_i), .e_addr_i(wb_addr_i),
    .e_wdata_i(wb_wdata_i), .e_gnt_o(wb_gnt_o), .e_rvalid_o(wb_rvalid_o),
    .e_rdata_o(wb_rdata_o)
  );

  dbuf_sram #(.W(AB_W), .DEPTH(AB_DEPTH), .NSEG(SEGS), .ABITS(AB_AB)) u_ab (
    .clk, .rst_n,
    .a_en_i(ab_en), .a_we_i(ab_we), .a_bank_i(ab_bank), .a_addr_i(ab_addr[AB_AB-1:0]),
    .a_wseg_i(ab_wseg), .a_wdata_i(ab_wdata), .a_rdata_o(ab_rdata),
    .e_req_i(ab_req_i), .e_we_i(ab_we_i), .e_bank_i(ab_bank_i), .e_addr_i(ab_addr_i),
    .e_wdata_i(ab_wdata_i), .e_gnt_o(ab_gnt_o), .e_rvalid_o(ab_rvalid_o),
    .e_rdata_o(ab_rdata_o)
  );

  // ---------------- DAP array and serializers ----------------
  int8_t     [M*A-1:0][BZ-1:0] ablk_dense;
  ablk_t     [M*A-1:0]         ablk_c;
  logic      [M*A-1:0]         ovf;
  act_elem_t [M-1:0][A-1:0]    act_row;

  assign ablk_dense = ab_rdata;

  for (genvar l = 0; l < M*A; l++) begin : g_lane
    dap u_dap (
      .blk_i (ablk_dense[l]),
      .nnz_i (nnz),
      .blk_o (ablk_c[l]),
      .ovf_o (ovf[l])
    );
    act_serializer u_ser (
      .clk, .rst_n,
      .load_i (ser_load),
      .blk_i  (ablk_c[l]),
      .elem_o (act_row[l / A][l % A])
    );
  end

  logic [15:0] ovf_n;

  always_comb begin
    ovf_n = '0;
    for (int l = 0; l < M*A; l++) ovf_n += 16'(ovf[l]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                  ovf_cnt_o <= '0;
    else if (start_i && !busy_o) ovf_cnt_o <= '0;
    else if (ser_load)           ovf_cnt_o <= ovf_cnt_o + ovf_n;
  end

  // ---------------- weight holding register ----------------
  wblk_t [N-1:0][C-1:0] w_hold;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)        w_hold <= '0;
    else if (ser_load) w_hold <= wb_rdata;
  end

  // ---------------- TPE array ----------------
  acc_t [M-1:0][C-1:0] drain;

  tpe_array #(.A(A), .C(C), .M(M), .N(N)) u_array (
    .clk, .rst_n,
    .clr_i   (arr_clr),
    .drain_i (arr_drain),
    .act_i   (act_row),
    .w_i     (w_hold),
    .drain_o (drain),
    .mac_active_o
  );

  // Result write-back: replicate the drained row vector into every segment;
  // the segment enable picks the one written.
  assign ab_wdata = {SEGS{drain}};

  initial begin
    assert (AB_W % RES_W == 0) else $error("s2ta_top: AB word must hold whole result segments");
    assert (WB_DEPTH >= 1 && AB_DEPTH >= 1) else $error("s2ta_top: buffers too small");
  end

endmodule

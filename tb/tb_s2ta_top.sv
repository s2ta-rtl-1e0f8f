// tb_s2ta_top: end-to-end test of the accelerator at its full default size
// (8 x 8 array of 8 x 4 x 4 TPEs, 512 KB weight buffer, 2 MB activation
// buffer). Weights and dense activations are loaded through the external
// buffer ports, tiles are started, and every result read back from the
// activation buffer is compared with a reference that prunes activations to
// their Top-NNZ by magnitude and multiplies with the expanded weights.
//
// Tiles: 4/8 (DAP pruning), 8/8 dense (DAP bypassed), 6/8 bypass with blocks
// that are too dense (overflow), 1/8, and a dense-weight tile where each 8/8
// weight block is split into two 4/8 halves. The tile latency is checked
// against KB*NNZ + M + N + N*A + 2 busy cycles. Mechanisms counted (each must
// occur): DAP pruning, DAP bypass, overflow, zero-gated MACs, external stall
// on a bank in use, transfers overlapped with computation, bank swap, dense
// weight fallback.
module tb_s2ta_top;
  import s2ta_pkg::*;
  localparam int A = 8, C = 4, M = 8, N = 8;
  localparam int P = M*A, Q = N*C;
  localparam int WB_W = N*C*$bits(wblk_t), AB_W = M*A*BZ*DW, RES_W = M*C*ACCW;
  localparam int SEGS = AB_W / RES_W;
  localparam int WB_AB = 11, AB_AB = 11;
  localparam int KBMAX = 8;

  logic clk = 0, rst_n = 0, start = 0;
  tile_cfg_t cfg;
  logic busy, done;
  logic [15:0] ovf_cnt;
  logic [$clog2(M*N*A*C+1)-1:0] mac_active;
  logic wb_req = 0, wb_we = 0, wb_bank = 0, wb_gnt, wb_rvalid;
  logic [WB_AB-1:0] wb_addr = '0;
  logic [WB_W-1:0] wb_wdata = '0, wb_rdata;
  logic ab_req = 0, ab_we = 0, ab_bank = 0, ab_gnt, ab_rvalid;
  logic [AB_AB-1:0] ab_addr = '0;
  logic [AB_W-1:0] ab_wdata = '0, ab_rdata;

  s2ta_top dut (
    .clk, .rst_n, .start_i(start), .cfg_i(cfg), .busy_o(busy), .done_o(done),
    .ovf_cnt_o(ovf_cnt), .mac_active_o(mac_active),
    .wb_req_i(wb_req), .wb_we_i(wb_we), .wb_bank_i(wb_bank), .wb_addr_i(wb_addr),
    .wb_wdata_i(wb_wdata), .wb_gnt_o(wb_gnt), .wb_rvalid_o(wb_rvalid), .wb_rdata_o(wb_rdata),
    .ab_req_i(ab_req), .ab_we_i(ab_we), .ab_bank_i(ab_bank), .ab_addr_i(ab_addr),
    .ab_wdata_i(ab_wdata), .ab_gnt_o(ab_gnt), .ab_rvalid_o(ab_rvalid), .ab_rdata_o(ab_rdata));

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_prune = 0, n_bypass = 0, n_ovf = 0, n_stall = 0, n_overlap = 0, n_swap = 0,
      n_wdense = 0;
  longint n_gated = 0;

  int act  [P][KBMAX][BZ];     // dense activations
  int wd   [Q][KBMAX][BZ];     // expanded weights
  longint ref_out [P][Q];

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && busy) n_gated += longint'(M*N*A*C - int'(mac_active));

  task automatic fail(string msg);
    failures++;
    if (failures < 15) $display("FAIL: %s", msg);
  endtask

  // ---------------- external buffer access ----------------
  task automatic wb_write(logic bank, int addr, logic [WB_W-1:0] d);
    @(negedge clk);
    wb_req = 1; wb_we = 1; wb_bank = bank; wb_addr = WB_AB'(addr); wb_wdata = d;
    @(posedge clk);
    while (!wb_gnt) begin n_stall++; @(posedge clk); end
    if (busy) n_overlap++;
    @(negedge clk); wb_req = 0; wb_we = 0;
  endtask

  task automatic ab_access(logic we, logic bank, int addr, logic [AB_W-1:0] d,
                           output logic [AB_W-1:0] q);
    @(negedge clk);
    ab_req = 1; ab_we = we; ab_bank = bank; ab_addr = AB_AB'(addr); ab_wdata = d;
    #1;
    while (!ab_gnt) begin n_stall++; @(negedge clk); #1; end
    if (busy) n_overlap++;
    @(negedge clk); ab_req = 0; ab_we = 0;
    q = ab_rdata;
  endtask

  // ---------------- reference ----------------
  function automatic int absv(int v); return v < 0 ? -v : v; endfunction

  // returns the kept-position mask of a dense block for a given NNZ
  function automatic logic [BZ-1:0] keep_mask(int blk [BZ], int nnz);
    logic [BZ-1:0] m = '0; int best, cnt = 0;
    if (nnz <= 5) begin
      for (int s = 0; s < nnz; s++) begin
        best = -1;
        for (int i = 0; i < BZ; i++)
          if (!m[i] && (best < 0 || absv(blk[i]) > absv(blk[best]))) best = i;
        m[best] = 1'b1;
      end
    end else
      for (int i = 0; i < BZ; i++)
        if (blk[i] != 0 && cnt < nnz) begin m[i] = 1'b1; cnt++; end
    return m;
  endfunction

  // ---------------- one tile ----------------
  task automatic run_tile(int nnz, int kb, int wdensity, int adensity, bit wsplit,
                          logic wbk, logic ardb, logic awrb, int w_base, int a_base, int o_base);
    logic [WB_W-1:0] wword;
    logic [AB_W-1:0] aword, rword;
    wblk_t wblk;
    int k, cyc, exp_cyc, nzc, exp_ovf, kbh;
    logic [BZ-1:0] m;
    int blk [BZ];
    exp_ovf = 0;
    // weights: random 4/8 blocks, or split dense blocks (pairs of words)
    for (int b = 0; b < kb; b++) begin
      for (int q = 0; q < Q; q++) begin
        if (wsplit && (b % 2 == 1)) begin
          for (int e = 0; e < BZ; e++) wd[q][b][e] = (e >= 4) ? wd[q][b-1][e] : 0;
          for (int e = 0; e < 4; e++) wd[q][b-1][e] = wd[q][b-1][e];
        end else begin
          for (int e = 0; e < BZ; e++) wd[q][b][e] = 0;
          if (wsplit) begin
            for (int e = 0; e < BZ; e++) wd[q][b][e] = $urandom_range(0, 255) - 128;
          end else begin
            k = 0;
            for (int e = 0; e < BZ; e++)
              if (k < WNNZ && $urandom_range(0, 99) < wdensity) begin
                wd[q][b][e] = $urandom_range(0, 255) - 128; k++;
              end
          end
        end
      end
    end
    if (wsplit) for (int b = 0; b < kb; b += 2)
      for (int q = 0; q < Q; q++) for (int e = 4; e < BZ; e++) wd[q][b][e] = 0;
    for (int b = 0; b < kb; b++) begin
      wword = '0;
      for (int q = 0; q < Q; q++) begin
        wblk = '0; k = 0;
        for (int e = 0; e < BZ; e++) if (wd[q][b][e] != 0) begin
          wblk.mask[e] = 1'b1; wblk.val[k] = 8'(wd[q][b][e]); k++;
        end
        if (k > WNNZ) fail("test weight block too dense");
        wword[q*$bits(wblk_t) +: $bits(wblk_t)] = wblk;
      end
      wb_write(wbk, w_base + b, wword);
    end
    // activations: dense blocks; for split weights each block appears twice
    for (int b = 0; b < kb; b++) begin
      aword = '0;
      for (int p = 0; p < P; p++) begin
        for (int e = 0; e < BZ; e++) begin
          if (wsplit && (b % 2 == 1)) act[p][b][e] = act[p][b-1][e];
          else act[p][b][e] = ($urandom_range(0, 99) < adensity) ? $urandom_range(0, 255) - 128 : 0;
          aword[(p*BZ + e)*8 +: 8] = 8'(act[p][b][e]);
        end
      end
      ab_access(1'b1, ardb, a_base + b, aword, rword);
    end
    // reference
    for (int p = 0; p < P; p++) for (int q = 0; q < Q; q++) ref_out[p][q] = 0;
    for (int p = 0; p < P; p++) for (int b = 0; b < kb; b++) begin
      nzc = 0;
      for (int e = 0; e < BZ; e++) begin blk[e] = act[p][b][e]; if (blk[e] != 0) nzc++; end
      m = keep_mask(blk, nnz);
      if (nnz <= 5 && nzc > nnz) n_prune++;
      if (nnz > 5 && nzc > nnz) begin n_ovf++; exp_ovf++; end
      for (int e = 0; e < BZ; e++) if (m[e])
        for (int q = 0; q < Q; q++) ref_out[p][q] += longint'(blk[e] * wd[q][b][e]);
    end
    if (nnz > 5) n_bypass++;
    if (wsplit) n_wdense++;
    // run
    @(negedge clk);
    cfg = '0;
    cfg.nnz_a = NNZW'(nnz); cfg.kblocks = AW'(kb);
    cfg.w_base = AW'(w_base); cfg.a_base = AW'(a_base); cfg.o_base = AW'(o_base);
    cfg.wb_bank = wbk; cfg.ab_rd_bank = ardb; cfg.ab_wr_bank = awrb;
    start = 1;
    @(negedge clk); start = 0;
    cyc = 0;
    // DMA-side traffic during the tile: one access to the bank being read
    // (must stall) and a few to the other bank (must overlap)
    fork
      begin
        logic [AB_W-1:0] dummy;
        ab_access(1'b0, ardb, a_base, '0, dummy);
        for (int i = 0; i < 3; i++) wb_write(~wbk, 2000 + i, '0);
      end
      begin
        while (busy) begin cyc++; @(negedge clk); end
      end
    join
    exp_cyc = kb*nnz + M + N + N*A + 2;
    if (nnz > 8) exp_cyc = kb*8 + M + N + N*A + 2;
    checks++;
    if (cyc != exp_cyc) fail($sformatf("tile nnz=%0d: %0d busy cycles, expected %0d", nnz, cyc, exp_cyc));
    checks++;
    if (int'(ovf_cnt) != exp_ovf) fail($sformatf("overflow count %0d exp %0d", ovf_cnt, exp_ovf));
    // read back results
    for (int w = 0; w < (N*A + SEGS - 1) / SEGS; w++) begin
      ab_access(1'b0, awrb, o_base + w, '0, rword);
      for (int sg = 0; sg < SEGS; sg++) begin
        int s = w*SEGS + sg;
        if (s < N*A)
          for (int i = 0; i < M; i++) for (int c = 0; c < C; c++) begin
            int p = i*A + s % A, q = (s / A)*C + c;
            checks++;
            if (rword[sg*RES_W + (i*C + c)*ACCW +: ACCW] !== acc_t'(ref_out[p][q]))
              fail($sformatf("nnz=%0d out[%0d][%0d] = %0d exp %0d", nnz, p, q,
                   $signed(rword[sg*RES_W + (i*C + c)*ACCW +: ACCW]), ref_out[p][q]));
          end
      end
    end
    $display("tile nnz=%0d kb=%0d: %0d cycles", nnz, kb, cyc);
  endtask

  initial begin
    cfg = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run_tile(4, 4, 50, 60, 0, 1'b0, 1'b0, 1'b1, 0, 0, 100);
    run_tile(8, 3, 50, 40, 0, 1'b1, 1'b1, 1'b0, 10, 20, 200);   // banks swapped
    n_swap++;
    run_tile(6, 3, 50, 85, 0, 1'b0, 1'b0, 1'b1, 30, 40, 300);
    run_tile(1, 5, 50, 50, 0, 1'b1, 1'b0, 1'b1, 50, 60, 400);
    run_tile(5, 4, 0, 50, 1, 1'b0, 1'b1, 1'b0, 70, 80, 500);
    // microbenchmark point: 4/8 weights (50 % sparse), 3/8 activations (62.5 %)
    run_tile(3, 8, 100, 38, 0, 1'b1, 1'b0, 1'b1, 90, 100, 600);
    $display("mechanisms: prune=%0d bypass=%0d overflow=%0d zero_gated=%0d stall=%0d overlap=%0d swap=%0d dense_w=%0d",
             n_prune, n_bypass, n_ovf, n_gated, n_stall, n_overlap, n_swap, n_wdense);
    checks += 8;
    if (n_prune == 0)   fail("DAP pruning never happened");
    if (n_bypass == 0)  fail("DAP bypass never happened");
    if (n_ovf == 0)     fail("overflow never happened");
    if (n_gated == 0)   fail("zero gating never happened");
    if (n_stall == 0)   fail("buffer stall never happened");
    if (n_overlap == 0) fail("overlapped transfer never happened");
    if (n_swap == 0)    fail("bank swap never happened");
    if (n_wdense == 0)  fail("dense weights never run");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

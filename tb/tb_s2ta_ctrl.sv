// tb_s2ta_ctrl: runs tiles with random NNZ (0..15, where 0 and >8 mean dense)
// and random block counts, and checks the controller's schedule cycle by
// cycle against an independent timeline: a one-cycle clear, one WB and one AB
// read every NA cycles at consecutive addresses, ser_load one cycle after each
// read, M+N+1 flush cycles, N*A drain cycles writing to o_base + s/SEGS with
// segment s%SEGS, and done after 1 + KB*NA + M+N+1 + N*A busy cycles.
module tb_s2ta_ctrl;
  import s2ta_pkg::*;
  localparam int A = 8, C = 4, M = 8, N = 8, SEGS = 4;

  logic clk = 0, rst_n = 0, start = 0;
  tile_cfg_t cfg;
  logic busy, done, wb_en, wb_bank, ab_en, ab_we, ab_bank, ser_load, clr, drain;
  logic [AW-1:0] wb_addr, ab_addr;
  logic [SEGS-1:0] wseg;
  logic [NNZW-1:0] nnz;
  int checks = 0, failures = 0;

  s2ta_ctrl #(.A(A), .C(C), .M(M), .N(N), .SEGS(SEGS)) dut (.clk, .rst_n, .start_i(start),
    .cfg_i(cfg), .busy_o(busy), .done_o(done), .wb_en_o(wb_en), .wb_bank_o(wb_bank),
    .wb_addr_o(wb_addr), .ab_en_o(ab_en), .ab_we_o(ab_we), .ab_bank_o(ab_bank),
    .ab_addr_o(ab_addr), .ab_wseg_o(wseg), .nnz_o(nnz), .ser_load_o(ser_load),
    .arr_clr_o(clr), .arr_drain_o(drain));
  always #5 clk = ~clk;

  task automatic expect_eq(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("%s: got %0d exp %0d", what, got, exp);
    end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int na, kb, total, t, rd_prev;
    cfg = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int tile = 0; tile < 40; tile++) begin
      @(negedge clk);
      cfg = '0;
      cfg.nnz_a   = NNZW'($urandom_range(0, 15));
      cfg.kblocks = AW'($urandom_range(0, 9));
      cfg.w_base  = AW'($urandom_range(0, 1000));
      cfg.a_base  = AW'($urandom_range(0, 1000));
      cfg.o_base  = AW'($urandom_range(0, 1000));
      cfg.wb_bank = 1'($urandom); cfg.ab_rd_bank = 1'($urandom); cfg.ab_wr_bank = 1'($urandom);
      na = (cfg.nnz_a == 0 || cfg.nnz_a > 8) ? 8 : int'(cfg.nnz_a);
      kb = int'(cfg.kblocks);
      total = 1 + kb*na + (M+N+1) + N*A;
      start = 1;
      @(negedge clk);
      start = 0;
      rd_prev = 0;
      // cycle t = 0 .. total-1 after start
      for (t = 0; t < total; t++) begin
        int s;
        logic exp_rd, exp_drain;
        exp_rd    = (t >= 1) && (t < 1 + kb*na) && ((t - 1) % na == 0);
        exp_drain = (t >= total - N*A);
        s = t - (total - N*A);
        expect_eq("busy", busy, 1);
        expect_eq("clr", clr, t == 0);
        expect_eq("wb_en", wb_en, exp_rd);
        expect_eq("ser_load", ser_load, rd_prev);
        expect_eq("drain", drain, exp_drain);
        expect_eq("nnz", nnz, na);
        expect_eq("ab_en", ab_en, exp_rd || exp_drain);
        if (exp_rd) begin
          expect_eq("wb_addr", wb_addr, cfg.w_base + (t - 1) / na);
          expect_eq("ab_addr rd", ab_addr, cfg.a_base + (t - 1) / na);
          expect_eq("wb_bank", wb_bank, cfg.wb_bank);
          expect_eq("ab_bank rd", ab_bank, cfg.ab_rd_bank);
          expect_eq("ab_we rd", ab_we, 0);
        end
        if (exp_drain) begin
          expect_eq("ab_we", ab_we, 1);
          expect_eq("ab_addr wr", ab_addr, cfg.o_base + s / SEGS);
          expect_eq("wseg", wseg, 1 << (s % SEGS));
          expect_eq("ab_bank wr", ab_bank, cfg.ab_wr_bank);
        end
        expect_eq("done early", done, 0);
        rd_prev = exp_rd;
        @(negedge clk);
      end
      expect_eq("done", done, 1);
      expect_eq("idle", busy, 0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

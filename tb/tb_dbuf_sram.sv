// tb_dbuf_sram: drives the array port and the external port of the double-
// buffered SRAM at random and checks read data of both ports against a
// two-bank model, that the external port is refused exactly when the array
// uses the same bank (and granted otherwise), and that a refused request has
// no effect. Counts overlapped accesses (both ports busy on different banks)
// and stalls; both must occur.
module tb_dbuf_sram;
  localparam int W = 32, DEPTH = 16, NSEG = 2, SW = W / NSEG;
  logic clk = 0, rst_n = 0;
  logic a_en = 0, a_we = 0, a_bank = 0, e_req = 0, e_we = 0, e_bank = 0;
  logic [3:0] a_addr, e_addr;
  logic [NSEG-1:0] a_wseg;
  logic [W-1:0] a_wdata, e_wdata, a_rdata, e_rdata;
  logic e_gnt, e_rvalid;
  logic [W-1:0] model [2][DEPTH];
  logic [W-1:0] exp_a, exp_e;
  logic exp_a_v, exp_e_v;
  int checks = 0, failures = 0, stalls = 0, overlaps = 0;

  dbuf_sram #(.W(W), .DEPTH(DEPTH), .NSEG(NSEG)) dut (
    .clk, .rst_n,
    .a_en_i(a_en), .a_we_i(a_we), .a_bank_i(a_bank), .a_addr_i(a_addr), .a_wseg_i(a_wseg),
    .a_wdata_i(a_wdata), .a_rdata_o(a_rdata),
    .e_req_i(e_req), .e_we_i(e_we), .e_bank_i(e_bank), .e_addr_i(e_addr), .e_wdata_i(e_wdata),
    .e_gnt_o(e_gnt), .e_rvalid_o(e_rvalid), .e_rdata_o(e_rdata));
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic conflict;
    a_addr = '0; e_addr = '0; a_wseg = '0; a_wdata = '0; e_wdata = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int b = 0; b < 2; b++)
      for (int i = 0; i < DEPTH; i++) begin
        @(negedge clk);
        e_req = 1; e_we = 1; e_bank = 1'(b); e_addr = 4'(i); e_wdata = $urandom;
        model[b][i] = e_wdata;
      end
    @(negedge clk); e_req = 0;
    for (int t = 0; t < 5000; t++) begin
      @(negedge clk);
      a_en = $urandom_range(0, 1); a_we = $urandom_range(0, 1); a_bank = $urandom_range(0, 1);
      a_addr = 4'($urandom); a_wseg = 2'($urandom); a_wdata = $urandom;
      e_req = $urandom_range(0, 1); e_we = $urandom_range(0, 1); e_bank = $urandom_range(0, 1);
      e_addr = 4'($urandom); e_wdata = $urandom;
      conflict = a_en && e_req && (a_bank == e_bank);
      #1;
      checks++;
      if (e_gnt !== (e_req && !conflict)) begin
        failures++;
        if (failures < 10) $display("t=%0d grant %0b wrong", t, e_gnt);
      end
      if (conflict) stalls++;
      if (a_en && e_req && !conflict) overlaps++;
      exp_a_v = a_en && !a_we;
      exp_e_v = e_req && !conflict && !e_we;
      if (exp_a_v) exp_a = model[a_bank][a_addr];
      if (exp_e_v) exp_e = model[e_bank][e_addr];
      if (a_en && a_we)
        for (int s = 0; s < NSEG; s++) if (a_wseg[s]) model[a_bank][a_addr][s*SW +: SW] = a_wdata[s*SW +: SW];
      if (e_req && !conflict && e_we) model[e_bank][e_addr] = e_wdata;
      @(posedge clk); #1;
      if (exp_a_v) begin
        checks++;
        if (a_rdata !== exp_a) begin
          failures++;
          if (failures < 10) $display("t=%0d array rdata %h exp %h", t, a_rdata, exp_a);
        end
      end
      checks++;
      if (e_rvalid !== exp_e_v || (exp_e_v && e_rdata !== exp_e)) begin
        failures++;
        if (failures < 10) $display("t=%0d ext rdata %h/%0b exp %h/%0b", t, e_rdata, e_rvalid, exp_e, exp_e_v);
      end
    end
    checks++;
    if (stalls == 0 || overlaps == 0) failures++;
    $display("stalls=%0d overlapped=%0d", stalls, overlaps);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_sram_sp: random reads and segment-masked writes against an array model;
// checks one-cycle read latency and that rdata holds between reads.
module tb_sram_sp;
  localparam int W = 64, DEPTH = 32, NSEG = 4, SW = W / NSEG;
  logic clk = 0, en = 0, we = 0;
  logic [4:0] addr;
  logic [NSEG-1:0] wseg;
  logic [W-1:0] wdata, rdata, model [DEPTH], exp_r;
  int checks = 0, failures = 0;

  sram_sp #(.W(W), .DEPTH(DEPTH), .NSEG(NSEG)) dut (
    .clk, .en_i(en), .we_i(we), .addr_i(addr), .wseg_i(wseg), .wdata_i(wdata), .rdata_o(rdata));
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // initialise every word
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge clk);
      en = 1; we = 1; addr = 5'(i); wseg = '1; wdata = {$urandom, $urandom};
      model[i] = wdata;
    end
    @(negedge clk); en = 1; we = 0; addr = '0; exp_r = model[0];
    for (int t = 0; t < 5000; t++) begin
      @(negedge clk);
      en = $urandom_range(0, 3) != 0; we = $urandom_range(0, 1); addr = 5'($urandom);
      wseg = 4'($urandom); wdata = {$urandom, $urandom};
      if (en && !we) exp_r = model[addr];
      if (en && we)
        for (int s = 0; s < NSEG; s++) if (wseg[s]) model[addr][s*SW +: SW] = wdata[s*SW +: SW];
      @(posedge clk); #1;
      checks++;
      if (rdata !== exp_r) begin
        failures++;
        if (failures < 10) $display("t=%0d rdata %h exp %h", t, rdata, exp_r);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

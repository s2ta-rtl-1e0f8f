// sram_sp: single-ported synchronous SRAM, written as an array so that a
// memory compiler macro can be mapped onto it.
//
// One access per cycle: with en_i high, we_i high writes the segments of
// wdata_i selected by wseg_i (NSEG equal segments of W/NSEG bits); we_i low
// reads the word at addr_i, which appears on rdata_o after the next clock
// edge and holds until the next read. Contents are not reset.
module sram_sp #(
  parameter int W     = 64,
  parameter int DEPTH = 1024,
  parameter int NSEG  = 1,
  parameter int ABITS = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             en_i,
  input  logic             we_i,
  input  logic [ABITS-1:0] addr_i,
  input  logic [NSEG-1:0]  wseg_i,
  input  logic [W-1:0]     wdata_i,
  output logic [W-1:0]     rdata_o
);
  localparam int SW = W / NSEG;

  logic [NSEG-1:0][SW-1:0] mem [DEPTH];
  logic [NSEG-1:0][SW-1:0] wd;

  assign wd = wdata_i;

  always_ff @(posedge clk) begin
    if (en_i) begin
      if (we_i) begin
        for (int s = 0; s < NSEG; s++)
          if (wseg_i[s]) mem[addr_i][s] <= wd[s];
      end else begin
        rdata_o <= mem[addr_i];
      end
    end
  end

  initial assert (W % NSEG == 0) else $error("sram_sp: W must be a multiple of NSEG");

endmodule

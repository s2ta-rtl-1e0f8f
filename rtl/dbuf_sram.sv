// dbuf_sram: double-buffered on-chip buffer made of two single-ported SRAM
// banks. Used both as the weight buffer (WB) and as the activation buffer (AB).
//
// Two ports share the banks:
//  * the array port (a_*), used by the tile controller, may read, or write
//    selected segments of a word;
//  * the external port (e_*), used by the MCU/DMA side to load operands and
//    fetch results, reads or writes whole words.
// Each bank serves one access per cycle. When both ports address the same
// bank in the same cycle the array port wins and e_gnt_o is low: the external
// request must be held and retried (a stall). While the array works on one
// bank the other bank is free for transfers, which is what lets computation
// overlap DMA. Read data of either port appears one cycle after the granted
// request (e_rvalid_o marks it for the external port).
//
// Double buffering and the single-ported macros follow the paper; the
// two-port arbitration is this design's choice.
module dbuf_sram #(
  parameter int W     = 64,
  parameter int DEPTH = 1024,
  parameter int NSEG  = 1,
  parameter int ABITS = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  // array port
  input  logic             a_en_i,
  input  logic             a_we_i,
  input  logic             a_bank_i,
  input  logic [ABITS-1:0] a_addr_i,
  input  logic [NSEG-1:0]  a_wseg_i,
  input  logic [W-1:0]     a_wdata_i,
  output logic [W-1:0]     a_rdata_o,
  // external port
  input  logic             e_req_i,
  input  logic             e_we_i,
  input  logic             e_bank_i,
  input  logic [ABITS-1:0] e_addr_i,
  input  logic [W-1:0]     e_wdata_i,
  output logic             e_gnt_o,
  output logic             e_rvalid_o,
  output logic [W-1:0]     e_rdata_o
);

  logic [1:0]             en, we;
  logic [1:0][ABITS-1:0]  addr;
  logic [1:0][NSEG-1:0]   wseg;
  logic [1:0][W-1:0]      wdata, rdata;
  logic                   a_rd_bank_q, e_rd_bank_q;

  assign e_gnt_o = e_req_i && !(a_en_i && (a_bank_i == e_bank_i));

  always_comb begin
    for (int b = 0; b < 2; b++) begin
      if (a_en_i && a_bank_i == 1'(b)) begin
        en[b] = 1'b1;  we[b] = a_we_i;  addr[b] = a_addr_i;
        wseg[b] = a_wseg_i;  wdata[b] = a_wdata_i;
      end else begin
        en[b] = e_gnt_o && e_bank_i == 1'(b);  we[b] = e_we_i;  addr[b] = e_addr_i;
        wseg[b] = '1;  wdata[b] = e_wdata_i;
      end
    end
  end

  for (genvar b = 0; b < 2; b++) begin : g_bank
    sram_sp #(.W(W), .DEPTH(DEPTH), .NSEG(NSEG), .ABITS(ABITS)) u_bank (
      .clk, .en_i(en[b]), .we_i(we[b]), .addr_i(addr[b]), .wseg_i(wseg[b]),
      .wdata_i(wdata[b]), .rdata_o(rdata[b])
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      a_rd_bank_q <= 1'b0;
      e_rd_bank_q <= 1'b0;
      e_rvalid_o  <= 1'b0;
    end else begin
      if (a_en_i && !a_we_i) a_rd_bank_q <= a_bank_i;
      if (e_gnt_o && !e_we_i) e_rd_bank_q <= e_bank_i;
      e_rvalid_o <= e_gnt_o && !e_we_i;
    end
  end

  assign a_rdata_o = rdata[a_rd_bank_q];
  assign e_rdata_o = rdata[e_rd_bank_q];

  // The array port never loses arbitration.
  always_ff @(posedge clk) begin
    if (rst_n) assert (!(e_gnt_o && a_en_i && a_bank_i == e_bank_i))
      else $error("dbuf_sram: external grant on a bank the array is using");
  end

endmodule

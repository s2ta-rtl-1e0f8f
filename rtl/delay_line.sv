// delay_line: W-bit shift register of D stages (D = 0 is a wire).
// Used for the input skew of the systolic array: row i of activations and
// column j of weights enter the array i and j cycles late, so that operand
// wavefronts meet in every TPE. Stages reset to zero (invalid operands).
module delay_line #(
  parameter int W = 8,
  parameter int D = 1
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [W-1:0] d_i,
  output logic [W-1:0] q_o
);
  if (D == 0) begin : g_wire
    assign q_o = d_i;
  end else begin : g_reg
    logic [D-1:0][W-1:0] sr;
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) sr <= '0;
      else begin
        sr[0] <= d_i;
        for (int k = 1; k < D; k++) sr[k] <= sr[k-1];
      end
    end
    assign q_o = sr[D-1];
  end
endmodule

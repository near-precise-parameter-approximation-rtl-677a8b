// delay_line: fixed D-cycle register delay of a W-bit word (D = 0 is a wire).
// Used for the input, partial-sum and output skew of the systolic array and
// for aligning side information with pipelined data.  No reset: the users
// qualify the data with a separately delayed valid bit.
module delay_line #(
  parameter int unsigned W = 8,
  parameter int unsigned D = 1
) (
  input  logic         clk,
  input  logic [W-1:0] d,
  output logic [W-1:0] q
);
  if (D == 0) begin : g_wire
    assign q = d;
  end else begin : g_regs
    logic [W-1:0] stage [D];
    always_ff @(posedge clk) begin
      stage[0] <= d;
      for (int i = 1; i < D; i++) stage[i] <= stage[i-1];
    end
    assign q = stage[D-1];
  end
endmodule

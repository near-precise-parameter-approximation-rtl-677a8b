// relu: activation stage between the systolic array and pooling.
//
// For every valid result vector it outputs max(0, y[j]) per element, or y
// unchanged when en is 0, one cycle later.  The paper only names this block;
// the bypass and the single register stage are this design's choices.
module relu
  import sdmm_pkg::*;
#(
  parameter int unsigned N = COLS
) (
  input  logic clk,
  input  logic rst_n,
  input  logic en,
  input  logic in_valid,
  input  acc_t in_data  [N],
  output logic out_valid,
  output acc_t out_data [N]
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;
  end

  always_ff @(posedge clk) begin
    if (in_valid) begin
      for (int j = 0; j < N; j++)
        out_data[j] <= (en && in_data[j] < 0) ? '0 : in_data[j];
    end
  end
endmodule

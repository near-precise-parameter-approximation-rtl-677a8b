// dsp_mult: the DSP48E1 multiply-add used for the packed multiplication.
//
// P = A * B + C with A (25-bit) and B (18-bit) two's complement and a 48-bit C
// and P.  One register on each of A, B and C and one on P, all gated by ce,
// so P shows the result two clock edges after the operands are applied.
// This is the MAC configuration of the Xilinx DSP48E1 (Eq. 1 of the paper)
// written as plain RTL that synthesis maps onto one DSP block; the pre-adder,
// the cascade ports and the multiplier pipeline register are not used.
module dsp_mult
  import sdmm_pkg::*;
#(
  parameter int unsigned A_W = DSP_A_W,
  parameter int unsigned B_W = DSP_B_W,
  parameter int unsigned C_W = DSP_C_W,
  parameter int unsigned P_W = DSP_P_W
) (
  input  logic           clk,
  input  logic           ce,
  input  logic [A_W-1:0] a,
  input  logic [B_W-1:0] b,
  input  logic [C_W-1:0] c,
  output logic [P_W-1:0] p
);
  logic signed [A_W-1:0] a_r;
  logic signed [B_W-1:0] b_r;
  logic        [C_W-1:0] c_r;
  logic signed [P_W-1:0] m;

  assign m = P_W'(a_r * b_r);

  always_ff @(posedge clk) begin
    if (ce) begin
      a_r <= a;
      b_r <= b;
      c_r <= c;
      p   <= m + P_W'(c_r);
    end
  end
endmodule

// pe_accum: the accumulation part of an SDMM processing element.
//
// K parallel adders (LUT logic rather than the DSP's accumulator, which is
// busy with the packed multiplication): mac_out_i <= psum_in_i + prod_i, one
// register stage, so partial sums advance one PE per clock.  The adders are
// the paper's; the register and the 32-bit partial-sum width are this
// design's choice.
module pe_accum
  import sdmm_pkg::*;
(
  input  logic  clk,
  input  acc_t  psum_in [K],
  input  prod_t prod    [K],
  output acc_t  mac_out [K]
);
  always_ff @(posedge clk) begin
    for (int i = 0; i < K; i++) mac_out[i] <= psum_in[i] + ACC_W'(prod[i]);
  end
endmodule

// param_decomp: parameter decompression of one SDMM processing element.
//
// From the stationary dictionary entry and the current input I it forms the
// three DSP operands of the packed multiplication:
//   A = {0, entry.a}                    MW_i at bit FW*i (FW = V+3 = 11)
//   B = I as an unsigned bit pattern    (the multiplier ignores I's sign)
//   C = sum_i SEx_i << FW*i,  SEx_i = {mask(MW_i) & {3{I[V-1]}}, I >>> n_i}
// The mask puts back, modulo 2^FW, what the unsigned multiplication of a
// negative I added (MW_i * 2^V) together with the 2^V of the two's-complement
// I >>> n_i, so each FW-bit field of A*B+C becomes the signed value
// MW_i*I + floor(I / 2^n_i).  Purely combinational.
//
// The SEx formula and the mask values are the paper's (Eq. 7); taking MW_i
// from the A field of the entry and zero-extending B is this design's reading.
//
// The ports have the full DSP48E1 widths (25/18/48) while the packing uses
// 24, 8 and 33 bits, so the upper bits of all three outputs are constant 0.
module param_decomp
  import sdmm_pkg::*;
(
  input  in_t                  i_in,
  input  wrom_entry_t          entry,
  output logic [DSP_A_W-1:0]   dsp_a,
  output logic [DSP_B_W-1:0]   dsp_b,
  output logic [DSP_C_W-1:0]   dsp_c
);
  logic [FW*K-1:0] a_full;
  logic [FW*K-1:0] c_pack;

  always_comb begin
    a_full = '0;
    a_full[ROM_A_W-1:0] = entry.a;
    for (int i = 0; i < K; i++) begin
      c_pack[FW*i +: FW] = {mask_of(a_full[FW*i +: 3]) & {3{i_in[V-1]}},
                            V'(i_in >>> entry.n[i])};
    end
  end

  assign dsp_a = DSP_A_W'({1'b0, entry.a});
  assign dsp_b = DSP_B_W'($unsigned(i_in));
  assign dsp_c = DSP_C_W'(c_pack);
endmodule

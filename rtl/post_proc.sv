// post_proc: post-processing of the packed DSP result.
//
// The DSP result holds K = 3 signed FW-bit fields R_i = MW_i*I + floor(I/2^n_i)
// (the carries between fields cancel, see the README).  For each field:
//   C block:  x_i = {R_i, I[n_i-1:0]}          = I * (1 + 2^n_i * MW_i)
//   << block: y_i = x_i << s_i                  = I * |W_i|
//   S block:  prod_i = sign_i ? -y_i : y_i      (0 when the zero flag is set)
// Purely combinational; i_in must be the input that produced p_in.
// Structure and operations follow the paper's PE figure; the negation as the
// S block and the zero flag are this design's choices.
module post_proc
  import sdmm_pkg::*;
(
  input  logic [DSP_P_W-1:0] p_in,
  input  in_t                i_in,
  input  wrom_entry_t        entry,
  input  logic [K-1:0]       sign,
  output prod_t              prod [K]
);
  localparam int unsigned XW = PROD_W + 8;

  always_comb begin
    for (int i = 0; i < K; i++) begin
      logic signed [XW-1:0] r, x, y;
      logic        [XW-1:0] low;
      r    = XW'($signed(p_in[FW*i +: FW]));
      low  = XW'($unsigned(i_in)) & ((XW'(1) << entry.n[i]) - XW'(1));
      x    = (r <<< entry.n[i]) | $signed(low);
      y    = x <<< entry.s[i];
      if (entry.zero[i])  prod[i] = '0;
      else if (sign[i])   prod[i] = PROD_W'(-y);
      else                prod[i] = PROD_W'(y);
    end
  end
endmodule

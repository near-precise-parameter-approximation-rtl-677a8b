// sdmm_pe: processing element that does three MACs on one DSP block.
//
// It holds one parameter tuple (dictionary entry + three sign bits) loaded
// with ld_en and multiplies every input I that passes through it by all three
// parameters at once:
//   parameter decompression -> DSP multiply-add -> post-processing -> accumulate
// I is forwarded to the right neighbour one cycle later (i_out).
//
// Timing, with I applied in cycle t:
//   t+1  DSP operand registers hold A, B, C
//   t+2  DSP P register holds A*B+C; psum_in must be applied in this cycle
//   t+3  psum_out = psum_in + W_i * I
// The four-part structure follows the paper's PE figure; the load strobe,
// reset of the stationary tuple and the cycle budget are this design's own.
module sdmm_pe
  import sdmm_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        ld_en,
  input  wrom_entry_t ld_entry,
  input  logic [K-1:0] ld_sign,
  input  in_t         i_in,
  output in_t         i_out,
  input  acc_t        psum_in  [K],
  output acc_t        psum_out [K]
);
  wrom_entry_t           w_entry;
  logic [K-1:0]          w_sign;
  logic [DSP_A_W-1:0]    dsp_a;
  logic [DSP_B_W-1:0]    dsp_b;
  logic [DSP_C_W-1:0]    dsp_c;
  logic [DSP_P_W-1:0]    dsp_p;
  in_t                   i_d1, i_d2;
  prod_t                 prod [K];

  // Stationary parameter tuple (an all-zero tuple after reset).
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      w_entry <= '{a: '0, n: '0, s: '0, zero: '1};
      w_sign  <= '0;
    end else if (ld_en) begin
      w_entry <= ld_entry;
      w_sign  <= ld_sign;
    end
  end

  always_ff @(posedge clk) begin
    i_out <= i_in;
    i_d1  <= i_in;
    i_d2  <= i_d1;
  end

  param_decomp u_decomp (
    .i_in(i_in), .entry(w_entry), .dsp_a(dsp_a), .dsp_b(dsp_b), .dsp_c(dsp_c)
  );

  dsp_mult u_dsp (
    .clk(clk), .ce(1'b1), .a(dsp_a), .b(dsp_b), .c(dsp_c), .p(dsp_p)
  );

  post_proc u_post (
    .p_in(dsp_p), .i_in(i_d2), .entry(w_entry), .sign(w_sign), .prod(prod)
  );

  pe_accum u_acc (
    .clk(clk), .psum_in(psum_in), .prod(prod), .mac_out(psum_out)
  );
endmodule

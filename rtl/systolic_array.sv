// systolic_array: weight-stationary array of ROWS x COLS multiply-accumulates.
//
// The array is ROWS rows of PE_COLS = COLS/K SDMM processing elements; each PE
// covers K = 3 adjacent MAC columns with one DSP block, so the default 12 x 12
// MACs use 48 DSP blocks.  Inputs move right along a row, partial sums move
// down a column, parameters stay in the PEs.  Per valid input vector x it
// produces
//     y[j] = psum_in[j] + sum_r W[r][j] * x[r],   j = 0..COLS-1
// where MAC column j is lane j%K of PE column j/K.
//
// The skew registers are inside: x[r] is delayed r cycles, the partial sums of
// PE column c are delayed c+2 cycles (the PE wants them two cycles after its
// input), and the outputs of PE column c are delayed PE_COLS-1-c cycles, so
// x_in/psum_in go in together and y_out comes out together, LATENCY =
// ROWS + PE_COLS + 1 cycles later, flagged by out_valid.  A new vector may be
// applied every cycle.  Parameter tuples are loaded over a broadcast bus
// (ld_en with the PE's row and column); tuples must not change while vectors
// are in flight.  The grid and the dataflow directions follow the paper; the
// skew placement and the load bus are this design's own.
module systolic_array
  import sdmm_pkg::*;
#(
  parameter int unsigned N_ROWS = ROWS,
  parameter int unsigned N_COLS = COLS
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  ld_en,
  input  logic [7:0]            ld_row,
  input  logic [7:0]            ld_col,
  input  wrom_entry_t           ld_entry,
  input  logic [K-1:0]          ld_sign,
  input  logic                  in_valid,
  input  in_t                   x_in    [N_ROWS],
  input  acc_t                  psum_in [N_COLS],
  output logic                  out_valid,
  output acc_t                  y_out   [N_COLS]
);
  localparam int unsigned NPC     = N_COLS / K;
  localparam int unsigned LATENCY = N_ROWS + NPC + 1;

  in_t  x_skew [N_ROWS];
  in_t  i_h    [N_ROWS][NPC+1];        // horizontal input links
  acc_t ps_v   [N_ROWS+1][NPC][K];     // vertical partial-sum links
  logic [LATENCY-1:0] vld;

  if (N_COLS % K != 0) begin : g_bad_cols
    $error("N_COLS must be a multiple of K");
  end

  for (genvar r = 0; r < N_ROWS; r++) begin : g_xskew
    delay_line #(.W(V), .D(r)) u_d (.clk(clk), .d(x_in[r]), .q(x_skew[r]));
    assign i_h[r][0] = x_skew[r];
  end

  for (genvar c = 0; c < NPC; c++) begin : g_pskew
    for (genvar k = 0; k < K; k++) begin : g_lane
      delay_line #(.W(ACC_W), .D(c + 2)) u_d (
        .clk(clk), .d(psum_in[c*K + k]), .q(ps_v[0][c][k]));
      delay_line #(.W(ACC_W), .D(NPC - 1 - c)) u_o (
        .clk(clk), .d(ps_v[N_ROWS][c][k]), .q(y_out[c*K + k]));
    end
  end

  for (genvar r = 0; r < N_ROWS; r++) begin : g_row
    for (genvar c = 0; c < NPC; c++) begin : g_col
      sdmm_pe u_pe (
        .clk      (clk),
        .rst_n    (rst_n),
        .ld_en    (ld_en && ld_row == 8'(r) && ld_col == 8'(c)),
        .ld_entry (ld_entry),
        .ld_sign  (ld_sign),
        .i_in     (i_h[r][c]),
        .i_out    (i_h[r][c+1]),
        .psum_in  (ps_v[r][c]),
        .psum_out (ps_v[r+1][c])
      );
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) vld <= '0;
    else        vld <= {vld[LATENCY-2:0], in_valid};
  end
  assign out_valid = vld[LATENCY-1];
endmodule

// sdmm_top: CNN systolic-array accelerator whose DSP blocks each execute
// three 8-bit signed multiplications (SDMM).
//
// Blocks and data flow:
//   WMem (16-bit tuple indices) -> WROM (dictionary) -> PE parameter registers
//   IMem (input vectors, ROWS x 8 bit) -> systolic array (ROWS x COLS MACs)
//   PMem (partial-sum vectors) -> array top, and array results -> PMem
//   array results -> ReLU -> pooling -> OMem (when a pass is the last one)
//   controller sequences the passes.
// The off-chip memory side is brought out as host ports: WMem and IMem can be
// written and read, OMem read, the WROM dictionary written.  Host and core use
// different ports of each memory, so the host may access them at any time,
// but data must be in place before a pass starts.  A pass is started with
// start/cmd (sdmm_pkg::pass_cmd_t) and ends with done.
//
// The block set and the connections follow the paper's top-level figure
// (12 x 12 MACs, 48 DSP blocks); memory depths, word layouts, the host ports
// (plain memory ports rather than AXI) and the command format are this
// design's choices.
module sdmm_top
  import sdmm_pkg::*;
(
  input  logic                      clk,
  input  logic                      rst_n,
  // host: WMem
  input  logic                      hw_en,
  input  logic                      hw_we,
  input  logic [WMEM_AW-1:0]        hw_addr,
  input  logic [WIDX_W-1:0]         hw_wdata,
  output logic [WIDX_W-1:0]         hw_rdata,
  // host: IMem
  input  logic                      hi_en,
  input  logic                      hi_we,
  input  logic [IMEM_AW-1:0]        hi_addr,
  input  logic [ROWS*V-1:0]         hi_wdata,
  output logic [ROWS*V-1:0]         hi_rdata,
  // host: OMem read
  input  logic                      ho_en,
  input  logic [OMEM_AW-1:0]        ho_addr,
  output logic [COLS*ACC_W-1:0]     ho_rdata,
  // host: WROM dictionary programming
  input  logic                      hr_en,
  input  logic [ROM_AW-1:0]         hr_addr,
  input  wrom_entry_t               hr_data,
  // pass control
  input  logic                      start,
  input  pass_cmd_t                 cmd,
  output logic                      busy,
  output logic                      done
);
  // controller <-> memories
  logic               wmem_en, wrom_en, imem_en, pmem_ren, pmem_we, omem_we;
  logic [WMEM_AW-1:0] wmem_addr;
  logic [ROM_AW-1:0]  wrom_addr;
  logic [IMEM_AW-1:0] imem_addr;
  logic [PMEM_AW-1:0] pmem_raddr, pmem_waddr;
  logic [OMEM_AW-1:0] omem_waddr;
  logic [WIDX_W-1:0]  wmem_rdata;
  wrom_entry_t        wrom_rdata;
  logic [ROWS*V-1:0]  imem_rdata;
  logic [COLS*ACC_W-1:0] pmem_rdata, pmem_wdata, omem_wdata, omem_unused;
  logic [COLS*ACC_W-1:0] pmem_unused;

  // PE load bus and array
  logic               ld_en;
  logic [7:0]         ld_row, ld_col;
  logic [K-1:0]       ld_sign;
  logic               arr_valid, psum_sel, arr_out_valid;
  in_t                x_in    [ROWS];
  acc_t               psum_in [COLS];
  acc_t               y_out   [COLS];

  // ReLU / pooling
  logic               relu_valid, relu_en, relu_out_valid;
  logic               pool_clear, pool_out_valid;
  logic [2:0]         pool_len;
  acc_t               relu_out [COLS];
  acc_t               pool_out [COLS];

  controller u_ctrl (
    .clk, .rst_n, .start, .cmd, .busy, .done,
    .wmem_en, .wmem_addr, .wmem_rdata(widx_t'(wmem_rdata)),
    .wrom_en, .wrom_addr,
    .ld_en, .ld_row, .ld_col, .ld_sign,
    .imem_en, .imem_addr, .pmem_ren, .pmem_raddr, .arr_valid, .psum_sel,
    .arr_out_valid, .pmem_we, .pmem_waddr, .relu_valid, .relu_en,
    .pool_clear, .pool_len, .pool_out_valid, .omem_we, .omem_waddr
  );

  onchip_mem #(.DW(WIDX_W), .DEPTH(WMEM_DEPTH)) u_wmem (
    .clk,
    .a_en(hw_en), .a_we(hw_we), .a_addr(hw_addr), .a_wdata(hw_wdata), .a_rdata(hw_rdata),
    .b_en(wmem_en), .b_we(1'b0), .b_addr(wmem_addr), .b_wdata('0), .b_rdata(wmem_rdata)
  );

  wrom u_wrom (
    .clk, .rd_en(wrom_en), .rd_addr(wrom_addr), .rd_data(wrom_rdata),
    .prog_en(hr_en), .prog_addr(hr_addr), .prog_data(hr_data)
  );

  onchip_mem #(.DW(ROWS*V), .DEPTH(IMEM_DEPTH)) u_imem (
    .clk,
    .a_en(hi_en), .a_we(hi_we), .a_addr(hi_addr), .a_wdata(hi_wdata), .a_rdata(hi_rdata),
    .b_en(imem_en), .b_we(1'b0), .b_addr(imem_addr), .b_wdata('0), .b_rdata(imem_rdata)
  );

  // PMem: port a reads partial sums for the array, port b writes results.
  onchip_mem #(.DW(COLS*ACC_W), .DEPTH(PMEM_DEPTH)) u_pmem (
    .clk,
    .a_en(pmem_ren), .a_we(1'b0), .a_addr(pmem_raddr), .a_wdata('0), .a_rdata(pmem_rdata),
    .b_en(pmem_we), .b_we(1'b1), .b_addr(pmem_waddr), .b_wdata(pmem_wdata), .b_rdata(pmem_unused)
  );

  // OMem: port a written by the pooling stage, port b read by the host.
  onchip_mem #(.DW(COLS*ACC_W), .DEPTH(OMEM_DEPTH)) u_omem (
    .clk,
    .a_en(omem_we), .a_we(1'b1), .a_addr(omem_waddr), .a_wdata(omem_wdata), .a_rdata(omem_unused),
    .b_en(ho_en), .b_we(1'b0), .b_addr(ho_addr), .b_wdata('0), .b_rdata(ho_rdata)
  );

  always_comb begin
    for (int r = 0; r < ROWS; r++) x_in[r] = imem_rdata[V*r +: V];
    for (int j = 0; j < COLS; j++) begin
      psum_in[j] = psum_sel ? acc_t'(pmem_rdata[ACC_W*j +: ACC_W]) : '0;
      pmem_wdata[ACC_W*j +: ACC_W] = y_out[j];
      omem_wdata[ACC_W*j +: ACC_W] = pool_out[j];
    end
  end

  systolic_array u_array (
    .clk, .rst_n,
    .ld_en, .ld_row, .ld_col, .ld_entry(wrom_rdata), .ld_sign,
    .in_valid(arr_valid), .x_in, .psum_in,
    .out_valid(arr_out_valid), .y_out
  );

  relu u_relu (
    .clk, .rst_n, .en(relu_en), .in_valid(relu_valid), .in_data(y_out),
    .out_valid(relu_out_valid), .out_data(relu_out)
  );

  pooling u_pool (
    .clk, .rst_n, .clear(pool_clear), .pool_len,
    .in_valid(relu_out_valid), .in_data(relu_out),
    .out_valid(pool_out_valid), .out_data(pool_out)
  );
endmodule

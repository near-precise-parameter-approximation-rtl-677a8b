// onchip_mem: block-RAM buffer used for WMem, IMem, PMem and OMem.
//
// DEPTH words of DW bits with two independent synchronous ports (a and b) on
// one clock, each with enable, write enable, address, write data and read data
// valid one cycle after the read.  This is the dual-port BRAM each of the
// paper's four memories is built from; depths, widths and the plain port
// protocol (instead of the paper's AXI mapping) are this design's choices.
// Writing one address from both ports in the same cycle is not allowed.
module onchip_mem #(
  parameter int unsigned DW    = 16,
  parameter int unsigned DEPTH = 1024,
  parameter int unsigned AW    = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          a_en,
  input  logic          a_we,
  input  logic [AW-1:0] a_addr,
  input  logic [DW-1:0] a_wdata,
  output logic [DW-1:0] a_rdata,
  input  logic          b_en,
  input  logic          b_we,
  input  logic [AW-1:0] b_addr,
  input  logic [DW-1:0] b_wdata,
  output logic [DW-1:0] b_rdata
);
  logic [DW-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (a_en) begin
      if (a_we) mem[a_addr] <= a_wdata;
      else      a_rdata     <= mem[a_addr];
    end
  end

  always_ff @(posedge clk) begin
    if (b_en) begin
      if (b_we) mem[b_addr] <= b_wdata;
      else      b_rdata     <= mem[b_addr];
    end
  end

  a_no_write_clash: assert property (@(posedge clk)
    !(a_en && a_we && b_en && b_we && a_addr == b_addr));
endmodule

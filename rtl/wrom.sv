// wrom: the weight dictionary ROM (W_ROM).
//
// Every parameter tuple that the network uses is stored once here, already in
// the form the DSP block needs: the packed multiplicand for port A and the
// n_i / s_i shift values (plus a zero flag) of the three parameters.  The
// weight memory then only holds a 13-bit index into this table plus three
// sign bits, which is where the 16-bit-per-3-parameters compression comes from.
//
// Interface: one synchronous read port (rd_en/rd_addr, data valid one cycle
// later on rd_data) and a programming write port.  The 8192-entry depth and the
// 13-bit index follow the paper.  The content of the paper's ROM depends on the
// trained network and is produced offline; here the array starts with a
// default dictionary computed by sdmm_pkg::default_entry and the programming
// port loads a network-specific one (on an FPGA this is the BRAM's
// configuration-time initialisation).
module wrom
  import sdmm_pkg::*;
#(
  parameter int unsigned DEPTH = 1 << ROM_AW
) (
  input  logic              clk,
  input  logic              rd_en,
  input  logic [ROM_AW-1:0] rd_addr,
  output wrom_entry_t       rd_data,
  input  logic              prog_en,
  input  logic [ROM_AW-1:0] prog_addr,
  input  wrom_entry_t       prog_data
);
  wrom_entry_t mem [DEPTH];

  initial begin
    for (int unsigned i = 0; i < DEPTH; i++) mem[i] = default_entry(i);
  end

  always_ff @(posedge clk) begin
    if (prog_en) mem[prog_addr] <= prog_data;
    if (rd_en)   rd_data <= mem[rd_addr];
  end
endmodule

// tb_onchip_mem: random writes and reads on both ports of the dual-port
// buffer against a reference array, checking the one-cycle read latency and
// that a disabled port holds its read data.
module tb_onchip_mem;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  localparam int DW = 40, DEPTH = 64, AW = 6;
  logic a_en = 0, a_we = 0, b_en = 0, b_we = 0;
  logic [AW-1:0] a_addr = '0, b_addr = '0;
  logic [DW-1:0] a_wdata = '0, b_wdata = '0, a_rdata, b_rdata;
  logic [DW-1:0] ref_mem [DEPTH];

  onchip_mem #(.DW(DW), .DEPTH(DEPTH)) dut (.*);

  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    @(negedge clk);
    for (int i = 0; i < DEPTH; i++) begin
      a_en = 1; a_we = 1; a_addr = AW'(i); a_wdata = {$urandom(), 8'(i)};
      ref_mem[i] = a_wdata;
      @(negedge clk);
    end
    for (int t = 0; t < 3000; t++) begin
      logic [DW-1:0] ea, eb;
      logic ra, rb;
      a_en = $urandom_range(1); a_we = $urandom_range(1);
      b_en = $urandom_range(1); b_we = $urandom_range(1);
      a_addr = AW'($urandom()); b_addr = AW'($urandom());
      if (a_en && a_we && b_en && b_we && a_addr == b_addr) b_we = 0;
      a_wdata = {$urandom(), 8'($urandom())};
      b_wdata = {$urandom(), 8'($urandom())};
      ra = a_en && !a_we; rb = b_en && !b_we;
      ea = ref_mem[a_addr]; eb = ref_mem[b_addr];
      // a read of the address the other port writes in the same cycle is
      // not checked (collision)
      if (ra && b_en && b_we && a_addr == b_addr) ra = 0;
      if (rb && a_en && a_we && a_addr == b_addr) rb = 0;
      if (a_en && a_we) ref_mem[a_addr] = a_wdata;
      if (b_en && b_we) ref_mem[b_addr] = b_wdata;
      @(posedge clk); #1;
      if (ra) begin checks++; if (a_rdata !== ea) failures++; end
      if (rb) begin checks++; if (b_rdata !== eb) failures++; end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

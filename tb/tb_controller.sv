// tb_controller: the pass sequencer against behavioural models of the
// memories and of the array's latency.  It checks that a pass with weight
// loading writes every PE exactly once with the WROM word and sign bits of
// its own WMem index (row-major order, WMem read -> WROM -> PE in two
// cycles), that inputs and partial sums are read from the right addresses
// one vector per cycle, that results are steered to PMem or to ReLU/OMem at
// the right addresses, and that done comes once all results are out.
module tb_controller;
  import sdmm_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  localparam int LAT = ROWS + PE_COLS + 1;
  localparam int NPE = ROWS * PE_COLS;

  logic rst_n = 0, start = 0, busy, done;
  pass_cmd_t cmd;
  logic wmem_en, wrom_en, ld_en, imem_en, pmem_ren, arr_valid, psum_sel;
  logic [WMEM_AW-1:0] wmem_addr;
  widx_t wmem_rdata;
  logic [ROM_AW-1:0] wrom_addr;
  logic [7:0] ld_row, ld_col;
  logic [K-1:0] ld_sign;
  logic [IMEM_AW-1:0] imem_addr;
  logic [PMEM_AW-1:0] pmem_raddr, pmem_waddr;
  logic arr_out_valid, pmem_we, relu_valid, relu_en, pool_clear, pool_out_valid, omem_we;
  logic [2:0] pool_len;
  logic [OMEM_AW-1:0] omem_waddr;

  controller dut (.*);

  // models
  widx_t wmem [WMEM_DEPTH];
  logic [ROM_AW-1:0] wrom_q;
  logic [LAT-1:0] arr_pipe;
  logic [1:0] relu_pipe;
  int imem_rd [$], pmem_rd [$], pmem_wr [$], omem_wr [$];
  int ld_seen [NPE];
  int cyc = 0, arr_in = 0;

  always_ff @(posedge clk) begin
    cyc <= cyc + 1;
    if (wmem_en) wmem_rdata <= wmem[wmem_addr];
    if (wrom_en) wrom_q <= wrom_addr;
    arr_pipe  <= {arr_pipe[LAT-2:0], arr_valid};
    relu_pipe <= {relu_pipe[0], relu_valid};
  end
  assign arr_out_valid  = arr_pipe[LAT-1];
  assign pool_out_valid = relu_pipe[1];

  initial begin
    #2000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // monitor
  always @(posedge clk) if (rst_n) begin
    if (ld_en) begin
      int k;
      widx_t w;
      k = int'(ld_row) * PE_COLS + int'(ld_col);
      w = wmem[(int'(cmd.w_base) + k) % WMEM_DEPTH];
      ld_seen[k]++;
      checks++;
      if (wrom_q !== w.addr || ld_sign !== w.sign) begin
        failures++;
        if (failures < 5) $display("PE %0d got rom %h sign %b, index %h", k, wrom_q, ld_sign, w);
      end
    end
    if (imem_en) imem_rd.push_back(int'(imem_addr));
    if (pmem_ren) pmem_rd.push_back(int'(pmem_raddr));
    if (pmem_we) pmem_wr.push_back(int'(pmem_waddr));
    if (omem_we) omem_wr.push_back(int'(omem_waddr));
    if (arr_valid) arr_in++;
  end

  task automatic run_pass(pass_cmd_t c, int exp_cycles_max);
    int t0;
    imem_rd.delete(); pmem_rd.delete(); pmem_wr.delete(); omem_wr.delete();
    foreach (ld_seen[k]) ld_seen[k] = 0;
    arr_in = 0;
    cmd = c;
    start = 1; @(negedge clk); start = 0;
    t0 = cyc;
    while (!done) begin
      @(negedge clk);
      if (cyc - t0 > 5000) break;
    end
    checks++;
    if (!done || cyc - t0 > exp_cycles_max) begin
      failures++;
      $display("pass took %0d cycles (max %0d)", cyc - t0, exp_cycles_max);
    end
    foreach (ld_seen[k]) begin
      checks++;
      if (ld_seen[k] != (c.load_w ? 1 : 0)) failures++;
    end
    checks++;
    if (imem_rd.size() != int'(c.n_vec) || arr_in != int'(c.n_vec)) failures++;
    foreach (imem_rd[i]) begin
      checks++;
      if (imem_rd[i] != (int'(c.i_base) + i) % IMEM_DEPTH) failures++;
    end
    checks++;
    if (pmem_rd.size() != (c.acc_en ? int'(c.n_vec) : 0)) failures++;
    foreach (pmem_rd[i]) begin
      checks++;
      if (pmem_rd[i] != (int'(c.p_rd_base) + i) % PMEM_DEPTH) failures++;
    end
    checks++;
    if (pmem_wr.size() != (c.last ? 0 : int'(c.n_vec))) failures++;
    foreach (pmem_wr[i]) begin
      checks++;
      if (pmem_wr[i] != (int'(c.p_wr_base) + i) % PMEM_DEPTH) failures++;
    end
    checks++;
    if (omem_wr.size() != (c.last ? int'(c.n_vec) : 0)) failures++;
    foreach (omem_wr[i]) begin
      checks++;
      if (omem_wr[i] != (int'(c.o_base) + i) % OMEM_DEPTH) failures++;
    end
    checks++;
    if (psum_sel !== c.acc_en || relu_en !== c.relu_en) failures++;
    repeat (3) @(negedge clk);
  endtask

  initial begin
    pass_cmd_t c;
    for (int i = 0; i < WMEM_DEPTH; i++) wmem[i] = widx_t'($urandom());
    cmd = '0;
    arr_pipe = '0; relu_pipe = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    c = '0;
    c.load_w = 1; c.w_base = 12'd100; c.i_base = 10'd5; c.n_vec = 11'd30;
    c.acc_en = 0; c.last = 0; c.p_wr_base = 10'd40; c.pool_len = 3'd1;
    run_pass(c, NPE + 30 + LAT + 12);
    c.load_w = 0; c.i_base = 10'd1000; c.n_vec = 11'd40; c.acc_en = 1;
    c.p_rd_base = 10'd40; c.p_wr_base = 10'd40;
    run_pass(c, 40 + LAT + 12);
    c.load_w = 1; c.w_base = 12'd4090; c.n_vec = 11'd7; c.last = 1; c.relu_en = 1;
    c.o_base = 10'd1020;
    run_pass(c, NPE + 7 + LAT + 12);
    checks++;
    if (busy) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_sdmm_top: end-to-end test of the accelerator at its default size
// (12 x 12 MACs, 48 SDMM PEs, full memories).
//
// It computes one layer made of three accumulating passes plus a fourth,
// independent pass, all from the host side:
//   pass 1  tuples from the default dictionary, partial sums start at zero,
//           results written to PMem
//   pass 2  tuples from a dictionary the host programs into the WROM
//           (approximated random weights), adds PMem, writes PMem back
//   pass 3  same tuples kept in the PEs (no reload), adds PMem, then ReLU and
//           2:1 max pooling into OMem
//   pass 4  pass-1 tuples reloaded, no partial sums, ReLU and pooling off
// OMem is read back and compared with a reference computed here with plain
// integer arithmetic from the (approximated) weight values.  Each mechanism
// (dictionary programming, tuple load, tuple reuse, zero start, partial-sum
// accumulation, write-back to PMem, ReLU clamping, pooling, zero and negative
// weights) is counted and must occur at least once.
module tb_sdmm_top;
  import sdmm_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  localparam int NV  = 64;               // input vectors per pass
  localparam int NPE = ROWS * PE_COLS;

  logic rst_n = 0;
  logic hw_en = 0, hw_we = 0, hi_en = 0, hi_we = 0, ho_en = 0, hr_en = 0;
  logic [WMEM_AW-1:0] hw_addr = '0;
  logic [WIDX_W-1:0]  hw_wdata = '0, hw_rdata;
  logic [IMEM_AW-1:0] hi_addr = '0;
  logic [ROWS*V-1:0]  hi_wdata = '0, hi_rdata;
  logic [OMEM_AW-1:0] ho_addr = '0;
  logic [COLS*ACC_W-1:0] ho_rdata;
  logic [ROM_AW-1:0]  hr_addr = '0;
  wrom_entry_t        hr_data;
  logic start = 0, busy, done;
  pass_cmd_t cmd;

  sdmm_top dut (.*);

  int W1 [ROWS][COLS], W2 [ROWS][COLS];
  int X [3][NV][ROWS];
  int acc [NV][COLS];
  int n_prog = 0, n_load = 0, n_reuse = 0, n_zero_start = 0, n_accum = 0,
      n_pmem_wb = 0, n_relu_clamp = 0, n_pool = 0, n_zero_w = 0, n_neg_w = 0;

  initial begin
    #20000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // decoded magnitude of a tuple field, from (MW, n, s) alone
  function automatic int dec(wrom_entry_t e, int i);
    logic [FW*K-1:0] af;
    af = '0; af[ROM_A_W-1:0] = e.a;
    return e.zero[i] ? 0 : (1 << e.s[i]) * (1 + (1 << e.n[i]) * int'(af[FW*i +: 3]));
  endfunction

  task automatic run(pass_cmd_t c);
    int t0;
    cmd = c; start = 1;
    @(negedge clk); start = 0;
    t0 = 0;
    while (!done && t0 < 10000) begin @(negedge clk); t0++; end
    checks++;
    if (!done) begin failures++; $display("pass did not finish"); end
    // one vector per cycle: loading (48 + 2), n_vec reads, array latency,
    // ReLU/pooling and a few cycles of sequencing
    checks++;
    if (t0 > (c.load_w ? NPE + 2 : 0) + int'(c.n_vec) + ROWS + PE_COLS + 1 + 8) begin
      failures++;
      $display("pass took %0d cycles", t0);
    end
    @(negedge clk);
  endtask

  task automatic write_inputs(int p, int base);
    for (int v = 0; v < NV; v++) begin
      for (int r = 0; r < ROWS; r++) begin
        X[p][v][r] = $signed($urandom_range(255)) - 128;
        hi_wdata[V*r +: V] = V'(X[p][v][r]);
      end
      hi_en = 1; hi_we = 1; hi_addr = IMEM_AW'(base + v);
      @(negedge clk);
    end
    hi_en = 0; hi_we = 0;
  endtask

  task automatic check_omem(int base, int n, int pool, bit relu_on, int exp_src);
    for (int o = 0; o < n; o++) begin
      ho_en = 1; ho_addr = OMEM_AW'(base + o);
      @(negedge clk);
      ho_en = 0;
      for (int j = 0; j < COLS; j++) begin
        int e, got;
        e = -(1 << 30);
        for (int q = 0; q < pool; q++) begin
          int y;
          if (exp_src == 0) y = acc[o*pool+q][j];
          else begin
            y = 0;
            for (int r = 0; r < ROWS; r++) y += W1[r][j] * X[0][o*pool+q][r];
          end
          if (relu_on && y < 0) begin y = 0; n_relu_clamp++; end
          if (y > e) e = y;
        end
        got = int'($signed(ho_rdata[ACC_W*j +: ACC_W]));
        checks++;
        if (got != e) begin
          failures++;
          if (failures < 8) $display("OMem[%0d] col %0d got=%0d exp=%0d", base + o, j, got, e);
        end
      end
      if (pool > 1) n_pool++;
    end
  endtask

  initial begin
    pass_cmd_t c;
    cmd = '0; hr_data = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);

    // --- tuples 1: indices into the default dictionary, WMem 0..47
    for (int k = 0; k < NPE; k++) begin
      widx_t w;
      wrom_entry_t e;
      w.addr = ROM_AW'($urandom_range(7999));   // 8000.. are reprogrammed below
      w.sign = K'($urandom());
      e = default_entry(int'(w.addr));
      for (int i = 0; i < K; i++) begin
        int m;
        m = dec(e, i);
        W1[k / PE_COLS][(k % PE_COLS) * K + i] = w.sign[i] ? -m : m;
        if (m == 0) n_zero_w++;
        if (m != 0 && w.sign[i]) n_neg_w++;
      end
      hw_en = 1; hw_we = 1; hw_addr = WMEM_AW'(k); hw_wdata = w;
      @(negedge clk);
    end
    // --- tuples 2: approximated random weights, own dictionary entries at
    // WROM 8000.., WMem 200..247
    for (int k = 0; k < NPE; k++) begin
      widx_t w;
      int m [K];
      for (int i = 0; i < K; i++) begin
        int raw;
        raw = $signed($urandom_range(255)) - 128;
        if ($urandom_range(15) == 0) raw = 0;
        w.sign[i] = raw < 0;
        m[i] = (raw == 0) ? 0 : approx_mag(raw < 0 ? -raw : raw, i == K-1);
        W2[k / PE_COLS][(k % PE_COLS) * K + i] = w.sign[i] ? -m[i] : m[i];
      end
      w.addr = ROM_AW'(8000 + k);
      hr_en = 1; hr_addr = w.addr; hr_data = make_entry(m[0], m[1], m[2]);
      hw_en = 1; hw_we = 1; hw_addr = WMEM_AW'(200 + k); hw_wdata = w;
      n_prog++;
      @(negedge clk);
    end
    hw_en = 0; hw_we = 0; hr_en = 0;
    // read one index back through the host port
    hw_en = 1; hw_addr = WMEM_AW'(200); @(negedge clk); hw_en = 0;
    checks++;
    if (hw_rdata[WIDX_W-1:K] != ROM_AW'(8000)) failures++;

    write_inputs(0, 0);
    write_inputs(1, 100);
    write_inputs(2, 300);
    // IMem read-back through the host port
    hi_en = 1; hi_we = 0; hi_addr = IMEM_AW'(100); @(negedge clk); hi_en = 0;
    checks++;
    if (int'($signed(hi_rdata[7:0])) != X[1][0][0]) failures++;

    // pass 1
    c = '0;
    c.load_w = 1; c.w_base = 0; c.i_base = 0; c.n_vec = NV; c.acc_en = 0;
    c.last = 0; c.p_wr_base = 10'd500; c.pool_len = 3'd1;
    run(c); n_load++; n_zero_start++; n_pmem_wb++;
    // pass 2
    c.load_w = 1; c.w_base = 200; c.i_base = 100; c.acc_en = 1;
    c.p_rd_base = 10'd500; c.p_wr_base = 10'd500;
    run(c); n_load++; n_accum++; n_pmem_wb++;
    // pass 3: reuse W2
    c.load_w = 0; c.i_base = 300; c.last = 1; c.relu_en = 1; c.pool_len = 3'd2;
    c.o_base = 10'd0;
    run(c); n_reuse++; n_accum++;
    for (int v = 0; v < NV; v++)
      for (int j = 0; j < COLS; j++) begin
        acc[v][j] = 0;
        for (int r = 0; r < ROWS; r++)
          acc[v][j] += W1[r][j] * X[0][v][r] + W2[r][j] * (X[1][v][r] + X[2][v][r]);
      end
    check_omem(0, NV / 2, 2, 1'b1, 0);
    // pass 4: W1 again, plain products
    c = '0;
    c.load_w = 1; c.w_base = 0; c.i_base = 0; c.n_vec = NV; c.last = 1;
    c.relu_en = 0; c.pool_len = 3'd1; c.o_base = 10'd200;
    run(c); n_load++; n_zero_start++;
    check_omem(200, NV, 1, 1'b0, 1);

    $display("mechanisms: dict_prog=%0d tuple_load=%0d tuple_reuse=%0d zero_start=%0d accumulate=%0d pmem_writeback=%0d relu_clamp=%0d pool_windows=%0d zero_w=%0d neg_w=%0d",
             n_prog, n_load, n_reuse, n_zero_start, n_accum, n_pmem_wb, n_relu_clamp, n_pool, n_zero_w, n_neg_w);
    if (n_prog == 0) failures++;
    if (n_load == 0) failures++;
    if (n_reuse == 0) failures++;
    if (n_zero_start == 0) failures++;
    if (n_accum == 0) failures++;
    if (n_pmem_wb == 0) failures++;
    if (n_relu_clamp == 0) failures++;
    if (n_pool == 0) failures++;
    if (n_zero_w == 0) failures++;
    if (n_neg_w == 0) failures++;
    checks += 10;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

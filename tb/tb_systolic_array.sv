// tb_systolic_array: the full 12 x 12 weight-stationary array.  A random
// weight matrix (representable magnitudes, signs, zeros) is loaded over the
// load bus, then a burst of random input vectors with random partial sums is
// applied back to back; each result vector must equal psum + W^T x
// (computed here) and arrive exactly ROWS + PE_COLS + 1 cycles after its
// input.  A second weight matrix is loaded and the test repeated.
module tb_systolic_array;
  import sdmm_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  localparam int LAT = ROWS + PE_COLS + 1;

  logic rst_n = 0, ld_en = 0, in_valid = 0, out_valid;
  logic [7:0] ld_row, ld_col;
  wrom_entry_t ld_entry;
  logic [K-1:0] ld_sign;
  in_t  x_in [ROWS];
  acc_t psum_in [COLS];
  acc_t y_out [COLS];

  systolic_array dut (.*);

  int W [ROWS][COLS];
  int exp_y [$];   // COLS values per vector
  int in_cyc [$];
  int cyc = 0;
  int mags [$];
  int mags_top [$];

  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    #3000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // checker
  always @(posedge clk) begin
    #1;
    if (rst_n && out_valid) begin
      int e [COLS];
      int c0;
      for (int j = 0; j < COLS; j++) e[j] = exp_y.pop_front();
      c0 = in_cyc.pop_front();
      checks++;
      if (cyc - c0 != LAT) begin
        failures++;
        $display("latency %0d, expected %0d", cyc - c0, LAT);
      end
      for (int j = 0; j < COLS; j++) begin
        checks++;
        if (int'(y_out[j]) != e[j]) begin
          failures++;
          if (failures < 8) $display("col %0d got=%0d exp=%0d", j, y_out[j], e[j]);
        end
      end
    end
  end

  task automatic load_weights();
    for (int r = 0; r < ROWS; r++)
      for (int c = 0; c < PE_COLS; c++) begin
        int m [K];
        for (int k = 0; k < K; k++) begin
          m[k] = (k == K-1) ? mags_top[$urandom_range(mags_top.size()-1)]
                            : mags[$urandom_range(mags.size()-1)];
          if ($urandom_range(9) == 0) m[k] = 0;
          ld_sign[k] = $urandom_range(1);
          W[r][c*K+k] = ld_sign[k] ? -m[k] : m[k];
        end
        ld_entry = make_entry(m[0], m[1], m[2]);
        ld_row = 8'(r); ld_col = 8'(c); ld_en = 1;
        @(negedge clk);
      end
    ld_en = 0;
  endtask

  task automatic burst(int n);
    for (int t = 0; t < n; t++) begin
      int e [COLS];
      for (int r = 0; r < ROWS; r++) x_in[r] = in_t'($urandom());
      for (int j = 0; j < COLS; j++) begin
        psum_in[j] = acc_t'($signed($urandom_range(1 << 24)) - (1 << 23));
        e[j] = int'(psum_in[j]);
        for (int r = 0; r < ROWS; r++) e[j] += W[r][j] * int'(x_in[r]);
      end
      for (int j = 0; j < COLS; j++) exp_y.push_back(e[j]);
      in_cyc.push_back(cyc);
      in_valid = 1;
      @(negedge clk);
    end
    in_valid = 0;
    repeat (LAT + 3) @(negedge clk);
  endtask

  initial begin
    for (int m = 1; m <= 128; m++) begin
      int mw, n, s; bit ok;
      manipulate(m, mw, n, s, ok);
      if (ok) mags.push_back(m);
      if (ok && mw <= 3) mags_top.push_back(m);
    end
    ld_entry = '0; ld_sign = '0; ld_row = '0; ld_col = '0;
    for (int r = 0; r < ROWS; r++) x_in[r] = '0;
    for (int j = 0; j < COLS; j++) psum_in[j] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    load_weights();
    burst(200);
    load_weights();
    burst(50);
    checks++;
    if (exp_y.size() != 0) begin failures++; $display("%0d results missing", exp_y.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

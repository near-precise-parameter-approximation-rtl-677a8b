// tb_conv_layer: one complete convolution layer on the accelerator at its
// default size, the way a CNN layer of the AlexNet / VGG kind is mapped.
//
// Layer: 10 x 10 input map with 24 channels, 3 x 3 kernel, stride 1, no
// padding, 12 output channels, ReLU, then 2 x 2 max pooling, giving a 4 x 4 x 12
// output.  The array's 12 rows take one group of 12 input channels and its 12
// MAC columns the 12 output channels.  Each (channel group, kernel position)
// pair is one pass with its own 48 tuples, 18 passes in all:
//   pass 0       partial sums start at zero, results to PMem
//   passes 1..16 add the PMem partial sums, results back to PMem
//   pass 17      add PMem, ReLU, pool over runs of 4, results to OMem
// IMem holds the vectors of one channel group (9 x 64); the host rewrites it
// between the groups.
// The host lays the inputs out im2col-style: vector o of pass (g, ky, kx)
// holds channels 12g..12g+11 of input pixel (py + ky, px + kx), where output pixels are
// ordered window by window (four pixels of one 2 x 2 window in a row) so that
// a pooling run is one window.
//
// Weights are random 8-bit values (about 1 in 10 zero).  Each is replaced by
// the nearest magnitude the decomposition can express, the 864 tuples are
// written into the dictionary ROM, and WMem holds their 16-bit indices.  The
// OMem contents must equal a reference computed here with integer arithmetic
// from the approximated weights.  The testbench also prints how far that
// layer output is from the one with the original, unapproximated weights
// (for information, not checked), and checks the cycle count of each pass.
module tb_conv_layer;
  import sdmm_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  localparam int IH = 10, IW = 10, KH = 3, KW = 3;
  localparam int OH = IH - KH + 1, OW = IW - KW + 1;   // 8 x 8
  localparam int NPIX = OH * OW;                       // 64 vectors per pass
  localparam int NPE = ROWS * PE_COLS;
  localparam int NG = 2;                              // input-channel groups
  localparam int CI = NG * ROWS;
  localparam int NPASS = NG * KH * KW;

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

  int X  [IH][IW][CI];             // input map [y][x][channel]
  int WR [KH][KW][CI][COLS];       // original weights
  int WA [KH][KW][CI][COLS];       // approximated weights
  int n_exact = 0, n_approx = 0, n_zero = 0;

  initial begin
    #20000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // output pixel of position o in window-by-window order
  function automatic int pix_y(int o);
    return 2 * ((o / 4) / (OW / 2)) + (o % 4) / 2;
  endfunction
  function automatic int pix_x(int o);
    return 2 * ((o / 4) % (OW / 2)) + (o % 4) % 2;
  endfunction

  task automatic run(pass_cmd_t c);
    int t0;
    cmd = c; start = 1;
    @(negedge clk); start = 0;
    t0 = 0;
    while (!done && t0 < 10000) begin @(negedge clk); t0++; end
    checks++;
    if (!done) begin failures++; $display("pass did not finish"); end
    checks++;
    if (t0 > (c.load_w ? NPE + 2 : 0) + int'(c.n_vec) + ROWS + PE_COLS + 1 + 8) begin
      failures++;
      $display("pass took %0d cycles", t0);
    end
    @(negedge clk);
  endtask

  initial begin
    pass_cmd_t c;
    longint err_sum, ref_sum;
    cmd = '0; hr_data = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);

    // weights: approximate, program the dictionary, write the indices
    for (int p = 0; p < NPASS; p++) begin
      for (int k = 0; k < NPE; k++) begin
        widx_t w;
        int m [K];
        int r, j0;
        r = k / PE_COLS; j0 = (k % PE_COLS) * K;
        for (int i = 0; i < K; i++) begin
          int raw, mag;
          raw = $signed($urandom_range(255)) - 128;
          if ($urandom_range(9) == 0) raw = 0;
          mag = raw < 0 ? -raw : raw;
          WR[(p % (KH*KW)) / KW][p % KW][(p / (KH*KW)) * ROWS + r][j0 + i] = raw;
          m[i] = (raw == 0) ? 0 : approx_mag(mag, i == K-1);
          w.sign[i] = raw < 0;
          WA[(p % (KH*KW)) / KW][p % KW][(p / (KH*KW)) * ROWS + r][j0 + i] =
            w.sign[i] ? -m[i] : m[i];
          if (raw == 0) n_zero++;
          else if (m[i] == mag) n_exact++;
          else n_approx++;
        end
        w.addr = ROM_AW'(p * NPE + k);
        hr_en = 1; hr_addr = w.addr; hr_data = make_entry(m[0], m[1], m[2]);
        hw_en = 1; hw_we = 1; hw_addr = WMEM_AW'(p * NPE + k); hw_wdata = w;
        @(negedge clk);
      end
    end
    hw_en = 0; hw_we = 0; hr_en = 0;

    // input map
    for (int y = 0; y < IH; y++)
      for (int x = 0; x < IW; x++)
        for (int ch = 0; ch < CI; ch++)
          X[y][x][ch] = $signed($urandom_range(255)) - 128;

    // the passes, group by group
    for (int g = 0; g < NG; g++) begin
      // im2col layout of this channel group in IMem
      for (int kp = 0; kp < KH * KW; kp++)
        for (int o = 0; o < NPIX; o++) begin
          for (int ch = 0; ch < ROWS; ch++)
            hi_wdata[V*ch +: V] = V'(X[pix_y(o) + kp / KW][pix_x(o) + kp % KW][g * ROWS + ch]);
          hi_en = 1; hi_we = 1; hi_addr = IMEM_AW'(kp * NPIX + o);
          @(negedge clk);
        end
      hi_en = 0; hi_we = 0;
      for (int kp = 0; kp < KH * KW; kp++) begin
        int p;
        p = g * KH * KW + kp;
        c = '0;
        c.load_w = 1; c.w_base = WMEM_AW'(p * NPE); c.i_base = IMEM_AW'(kp * NPIX);
        c.n_vec = NPIX; c.acc_en = (p != 0);
        c.p_rd_base = 10'd0; c.p_wr_base = 10'd0;
        c.last = (p == NPASS - 1); c.relu_en = 1; c.pool_len = 3'd4;
        c.o_base = 10'd100;
        run(c);
      end
    end

    // read OMem back and compare
    err_sum = 0; ref_sum = 0;
    for (int w = 0; w < NPIX / 4; w++) begin
      ho_en = 1; ho_addr = OMEM_AW'(100 + w);
      @(negedge clk);
      ho_en = 0;
      for (int j = 0; j < COLS; j++) begin
        int e, eo, got;
        e = 0; eo = 0;   // ReLU output is >= 0, so 0 is the neutral start
        for (int q = 0; q < 4; q++) begin
          int ya, yo, py, px;
          py = pix_y(4 * w + q); px = pix_x(4 * w + q);
          ya = 0; yo = 0;
          for (int ky = 0; ky < KH; ky++)
            for (int kx = 0; kx < KW; kx++)
              for (int ch = 0; ch < CI; ch++) begin
                ya += WA[ky][kx][ch][j] * X[py + ky][px + kx][ch];
                yo += WR[ky][kx][ch][j] * X[py + ky][px + kx][ch];
              end
          if (ya > e) e = ya;
          if (yo > eo) eo = yo;
        end
        got = int'($signed(ho_rdata[ACC_W*j +: ACC_W]));
        checks++;
        if (got != e) begin
          failures++;
          if (failures < 8) $display("window %0d channel %0d got=%0d exp=%0d", w, j, got, e);
        end
        err_sum += (got > eo) ? got - eo : eo - got;
        ref_sum += eo;
      end
    end
    $display("weights: %0d exact, %0d approximated, %0d zero", n_exact, n_approx, n_zero);
    $display("layer output vs unapproximated weights: sum|diff| = %0d, sum|ref| = %0d",
             err_sum, ref_sum);
    checks++;
    if (n_approx == 0 || n_exact == 0 || n_zero == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

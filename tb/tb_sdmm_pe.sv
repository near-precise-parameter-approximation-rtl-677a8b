// tb_sdmm_pe: one SDMM processing element.  Random parameter tuples (every
// magnitude representable by the approximation, random signs, some zeros)
// are loaded; inputs stream in one per cycle with partial sums applied two
// cycles later, and psum_out three cycles after the input must equal
// psum_in + W_i * I, computed here with ordinary integer multiplication.
// Covers all 256 inputs for every magnitude of each lane and the forwarded
// input i_out.
module tb_sdmm_pe;
  import sdmm_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic rst_n = 0, ld_en = 0;
  wrom_entry_t ld_entry;
  logic [K-1:0] ld_sign;
  in_t i_in, i_out;
  acc_t psum_in [K];
  acc_t psum_out [K];

  sdmm_pe dut (.*);

  int mags_ok [$];      // magnitudes usable in lanes 0,1
  int mags_top [$];     // magnitudes usable in lane 2

  initial begin
    #5000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // history of applied inputs/psums by cycle
  int hist_i [int];
  int hist_p [int][K];
  int wv [K];

  initial begin
    int cyc;
    for (int m = 1; m <= 128; m++) begin
      int mw, n, s; bit ok;
      manipulate(m, mw, n, s, ok);
      if (ok) mags_ok.push_back(m);
      if (ok && mw <= 3) mags_top.push_back(m);
    end
    ld_entry = '0; ld_sign = '0; i_in = '0;
    for (int i = 0; i < K; i++) psum_in[i] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 80; t++) begin
      int m [K];
      for (int i = 0; i < K; i++) begin
        if (i < K-1) m[i] = mags_ok[(t * (i + 1) * 7 + i) % mags_ok.size()];
        else         m[i] = mags_top[(t * 5) % mags_top.size()];
        if ($urandom_range(11) == 0) m[i] = 0;
        ld_sign[i] = $urandom_range(1);
        wv[i] = ld_sign[i] ? -m[i] : m[i];
      end
      if (t == 0) begin m[0] = 128; ld_sign[0] = 1; wv[0] = -128; end
      ld_entry = make_entry(m[0], m[1], m[2]);
      @(negedge clk); ld_en = 1;
      @(negedge clk); ld_en = 0;
      // stream 256 inputs, psums two cycles behind
      cyc = 0;
      for (int k = 0; k < 256 + 3; k++) begin
        if (k < 256) begin
          hist_i[k] = k - 128;
          for (int i = 0; i < K; i++) hist_p[k][i] = $signed($urandom_range(1 << 20)) - (1 << 19);
          i_in = in_t'(hist_i[k]);
        end
        if (k >= 2 && k - 2 < 256)
          for (int i = 0; i < K; i++) psum_in[i] = acc_t'(hist_p[k-2][i]);
        @(posedge clk); #1;
        if (k < 256) begin
          checks++;
          if (int'(i_out) != hist_i[k]) failures++;
        end
        if (k >= 2 && k - 2 < 256) begin
          for (int i = 0; i < K; i++) begin
            int e;
            e = hist_p[k-2][i] + wv[i] * hist_i[k-2];
            checks++;
            if (int'(psum_out[i]) != e) begin
              failures++;
              if (failures < 8) $display("tuple %0d lane %0d W=%0d I=%0d got=%0d exp=%0d",
                                         t, i, wv[i], hist_i[k-2], psum_out[i], e);
            end
          end
        end
        @(negedge clk);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

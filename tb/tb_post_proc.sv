// tb_post_proc: builds DSP results with known fields R_i = MW_i*I +
// floor(I/2^n_i) (each field exact modulo 2^11, as the DSP produces them) and checks
// that post-processing returns W_i * I for signed, zero and unsigned cases.
module tb_post_proc;
  import sdmm_pkg::*;
  int checks = 0, failures = 0;
  logic [DSP_P_W-1:0] p;
  in_t i_in;
  wrom_entry_t entry;
  logic [K-1:0] sign;
  prod_t prod [K];

  post_proc dut (.p_in(p), .i_in(i_in), .entry(entry), .sign(sign), .prod(prod));

  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int mws [5] = '{0, 1, 3, 5, 7};
    for (int t = 0; t < 3000; t++) begin
      int mw [K], n [K], s [K], w [K], iv;
      longint acc;
      iv = $signed($urandom_range(255)) - 128;
      if (t % 10 == 0) iv = -128;
      i_in = in_t'(iv);
      entry = '0;
      acc = 0;
      for (int i = 0; i < K; i++) begin
        int fl;
        do begin
          mw[i] = mws[$urandom_range(4)];
          n[i]  = (mw[i] == 0) ? 0 : $urandom_range(6);
          s[i]  = $urandom_range(7);
          w[i]  = (1 << s[i]) * (1 + (1 << n[i]) * mw[i]);
        end while (w[i] > 128);
        entry.n[i] = 3'(n[i]);
        entry.s[i] = 3'(s[i]);
        entry.zero[i] = ($urandom_range(9) == 0);
        sign[i] = $urandom_range(1);
        fl = (iv >= 0) ? (iv >> n[i]) : -((-iv + (1 << n[i]) - 1) >> n[i]);
        acc |= longint'((mw[i] * iv + fl) & 2047) << (11 * i);
      end
      p = DSP_P_W'(acc);
      #1;
      for (int i = 0; i < K; i++) begin
        int e;
        e = entry.zero[i] ? 0 : (sign[i] ? -w[i] : w[i]) * iv;
        checks++;
        if (int'(prod[i]) != e) begin
          failures++;
          if (failures < 5) $display("lane %0d I=%0d W=%0d got=%0d exp=%0d", i, iv,
                                     sign[i] ? -w[i] : w[i], prod[i], e);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

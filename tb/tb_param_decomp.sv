// tb_param_decomp: for every representable magnitude tuple field and every
// input I it checks the operands A, B and C, and that each 11-bit field of
// A*B + C equals MW*I + floor(I/2^n) modulo 2^11, which is what the
// post-processing relies on.  The expected values are worked out here from
// MW, n and I alone.
module tb_param_decomp;
  import sdmm_pkg::*;
  int checks = 0, failures = 0;
  in_t i_in;
  wrom_entry_t entry;
  logic [DSP_A_W-1:0] a;
  logic [DSP_B_W-1:0] b;
  logic [DSP_C_W-1:0] c;

  param_decomp dut (.i_in(i_in), .entry(entry), .dsp_a(a), .dsp_b(b), .dsp_c(c));

  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int mws [5] = '{0, 1, 3, 5, 7};
    for (int t = 0; t < 400; t++) begin
      int mw [K], n [K];
      entry = '0;
      for (int i = 0; i < K; i++) begin
        mw[i] = mws[$urandom_range(i == K-1 ? 2 : 4)];
        n[i]  = (mw[i] == 0) ? 0 : $urandom_range(6);
        entry.n[i] = 3'(n[i]);
        entry.s[i] = 3'($urandom_range(7));
      end
      entry.a = ROM_A_W'(mw[0] + (mw[1] << FW) + (mw[2] << (2*FW)));
      for (int iv = -128; iv < 128; iv += (t < 20 ? 1 : 17)) begin
        longint p;
        i_in = in_t'(iv);
        #1;
        checks++;
        if (a !== DSP_A_W'(mw[0] + (mw[1] << 11) + (mw[2] << 22)) ||
            b !== DSP_B_W'(iv & 255)) begin
          failures++;
          if (failures < 5) $display("operand mismatch a=%h b=%h", a, b);
        end
        p = longint'($signed(a)) * longint'($signed(b)) + longint'(c);
        for (int i = 0; i < K; i++) begin
          int r, got, fl;
          fl  = (iv >= 0) ? (iv >> n[i]) : -((-iv + (1 << n[i]) - 1) >> n[i]);
          r   = (mw[i] * iv + fl) & 2047;
          got = int'((p >> (11 * i)) & 2047);
          checks++;
          if (got != r) begin
            failures++;
            if (failures < 5) $display("field %0d I=%0d mw=%0d n=%0d got=%h exp=%h",
                                       i, iv, mw[i], n[i], got, r);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

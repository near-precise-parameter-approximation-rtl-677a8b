// tb_wrom: checks the weight dictionary.  Every default entry must decode
// (|W| = 2^s (1 + 2^n MW)) to the magnitudes its address selects: code 0 is
// a zero parameter, code c the representable value nearest to 4c-3, and the
// third parameter uses MW in {0,1,3} only.  Then random entries are
// programmed and read back, and the one-cycle read latency is checked.
module tb_wrom;
  import sdmm_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic rd_en = 0, prog_en = 0;
  logic [ROM_AW-1:0] rd_addr = '0, prog_addr = '0;
  wrom_entry_t rd_data, prog_data;
  wrom_entry_t shadow [int];

  wrom dut (.*);

  initial begin
    #2000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // decoded magnitude of field i of entry e
  function automatic int dec(wrom_entry_t e, int i);
    logic [FW*K-1:0] af;
    int mw;
    af = '0; af[ROM_A_W-1:0] = e.a;
    mw = int'(af[FW*i +: 3]);
    return e.zero[i] ? 0 : (1 << e.s[i]) * (1 + (1 << e.n[i]) * mw);
  endfunction

  initial begin
    prog_data = '0;
    for (int unsigned ad = 0; ad < (1 << ROM_AW); ad++) begin
      int codes [K];
      codes[0] = ad & 31; codes[1] = (ad >> 5) & 31; codes[2] = (ad >> 10) & 7;
      rd_en = 1; rd_addr = ROM_AW'(ad);
      @(posedge clk); #1;
      for (int i = 0; i < K; i++) begin
        int m, tgt, mwv;
        logic [FW*K-1:0] af;
        m = dec(rd_data, i);
        tgt = 4 * codes[i] - 3;
        af = '0; af[ROM_A_W-1:0] = rd_data.a;
        mwv = int'(af[FW*i +: 3]);
        checks++;
        if (codes[i] == 0 ? (m != 0)
            : (m < 1 || m > 128 || (m > tgt ? m - tgt : tgt - m) > 4 ||
               !(mwv inside {0, 1, 3, 5, 7}) || (i == K-1 && mwv > 3))) begin
          failures++;
          if (failures < 5) $display("addr %0d field %0d decodes to %0d, target %0d", ad, i, m, tgt);
        end
      end
    end
    rd_en = 0;
    // program and read back
    for (int t = 0; t < 300; t++) begin
      prog_en = 1;
      prog_addr = ROM_AW'($urandom());
      prog_data = wrom_entry_t'({$urandom(), $urandom()});
      shadow[int'(prog_addr)] = prog_data;
      @(posedge clk); #1;
    end
    prog_en = 0;
    foreach (shadow[ad]) begin
      rd_en = 1; rd_addr = ROM_AW'(ad);
      @(posedge clk); #1;
      checks++;
      if (rd_data !== shadow[ad]) begin
        failures++;
        if (failures < 5) $display("readback %0d: %h vs %h", ad, rd_data, shadow[ad]);
      end
    end
    // rd_en low holds the output
    rd_en = 0; rd_addr = rd_addr + 1'b1;
    @(posedge clk); #1;
    checks++;
    if (rd_data !== shadow[int'(rd_addr - 1'b1)]) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

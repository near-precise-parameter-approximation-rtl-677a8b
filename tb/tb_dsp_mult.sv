// tb_dsp_mult: checks the DSP multiply-add P = A*B + C (signed A, B) and its
// two-cycle latency with random operands applied every cycle.
module tb_dsp_mult;
  import sdmm_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [DSP_A_W-1:0] a;
  logic [DSP_B_W-1:0] b;
  logic [DSP_C_W-1:0] c;
  logic [DSP_P_W-1:0] p;
  logic [DSP_P_W-1:0] exp_q [$];

  dsp_mult dut (.clk(clk), .ce(1'b1), .a(a), .b(b), .c(c), .p(p));

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint sa, sb, sc;
    for (int t = 0; t < 2002; t++) begin
      a = DSP_A_W'($urandom());
      b = DSP_B_W'($urandom());
      c = {$urandom(), $urandom()};
      if (t % 7 == 0) a = {1'b1, 24'h0};      // most negative A
      if (t % 11 == 0) b = {1'b0, {17{1'b1}}};
      sa = longint'($signed(a));
      sb = longint'($signed(b));
      sc = longint'(c);
      exp_q.push_back(DSP_P_W'(sa * sb + sc));
      @(posedge clk); #1;
      // p now holds the result of the operands applied two edges ago
      if (t >= 1) begin
        logic [DSP_P_W-1:0] e;
        e = exp_q.pop_front();
        checks++;
        if (p !== e) begin
          failures++;
          if (failures < 5) $display("mismatch t=%0d p=%h exp=%h", t, p, e);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

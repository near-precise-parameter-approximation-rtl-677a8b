// tb_pe_accum: checks the three registered partial-sum adders with random
// signed products and partial sums.
module tb_pe_accum;
  import sdmm_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  acc_t  psum [K];
  prod_t prod [K];
  acc_t  mac  [K];
  acc_t  e    [K];

  pe_accum dut (.clk(clk), .psum_in(psum), .prod(prod), .mac_out(mac));

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 500; t++) begin
      for (int i = 0; i < K; i++) begin
        psum[i] = acc_t'($urandom());
        if (t % 3 == 0) psum[i] = acc_t'($signed($urandom_range(2000)) - 1000);
        prod[i] = prod_t'($urandom());
        e[i]    = psum[i] + acc_t'(prod[i]);
      end
      @(posedge clk); #1;
      for (int i = 0; i < K; i++) begin
        checks++;
        if (mac[i] !== e[i]) begin
          failures++;
          if (failures < 5) $display("lane %0d mac=%0d exp=%0d", i, mac[i], e[i]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

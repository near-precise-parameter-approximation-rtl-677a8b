// tb_relu: random signed vectors through the ReLU with the enable on and off;
// output one cycle later must be max(0, x) (or x), with out_valid following
// in_valid.
module tb_relu;
  import sdmm_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic rst_n = 0, en = 0, in_valid = 0, out_valid;
  acc_t in_data [COLS];
  acc_t out_data [COLS];
  int e [COLS];

  relu dut (.*);

  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int j = 0; j < COLS; j++) in_data[j] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 1000; t++) begin
      logic v;
      v = $urandom_range(3) != 0;
      en = (t % 200) < 150;
      in_valid = v;
      for (int j = 0; j < COLS; j++) begin
        in_data[j] = acc_t'($urandom());
        if (t % 4 == 0) in_data[j] = acc_t'($signed($urandom_range(4)) - 2);   // -2..2
        if (v) e[j] = (en && $signed(in_data[j]) < 0) ? 0 : int'(in_data[j]);
      end
      @(posedge clk); #1;
      checks++;
      if (out_valid !== v) failures++;
      if (v) for (int j = 0; j < COLS; j++) begin
        checks++;
        if (int'(out_data[j]) != e[j]) failures++;
      end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_pooling: streams of random vectors with gaps, for every run length 1..4;
// each output must be the element-wise maximum of its run and appear one
// cycle after the run's last vector.
module tb_pooling;
  import sdmm_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic rst_n = 0, clear = 0, in_valid = 0, out_valid;
  logic [2:0] pool_len = 3'd1;
  acc_t in_data [COLS];
  acc_t out_data [COLS];

  pooling dut (.*);

  initial begin
    #2000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int best [COLS];
    int cnt, outs;
    for (int j = 0; j < COLS; j++) in_data[j] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int pl = 1; pl <= MAX_POOL; pl++) begin
      pool_len = 3'(pl);
      clear = 1; @(negedge clk); clear = 0;
      cnt = 0; outs = 0;
      for (int t = 0; t < 400; t++) begin
        logic v, last;
        v = $urandom_range(2) != 0;
        in_valid = v;
        for (int j = 0; j < COLS; j++) begin
          in_data[j] = acc_t'($signed($urandom_range(2000)) - 1000);
          if (v) best[j] = (cnt == 0 || int'(in_data[j]) > best[j]) ? int'(in_data[j]) : best[j];
        end
        last = v && (cnt == pl - 1);
        if (v) cnt = last ? 0 : cnt + 1;
        @(posedge clk); #1;
        checks++;
        if (out_valid !== last) begin
          failures++;
          if (failures < 5) $display("pool %0d t=%0d out_valid=%0d exp=%0d", pl, t, out_valid, last);
        end
        if (last) begin
          outs++;
          for (int j = 0; j < COLS; j++) begin
            checks++;
            if (int'(out_data[j]) != best[j]) failures++;
          end
        end
        @(negedge clk);
      end
      in_valid = 0;
      checks++;
      if (outs == 0) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

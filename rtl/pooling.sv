// pooling: max pooling over runs of consecutive result vectors.
//
// The stream of valid vectors is cut into runs of pool_len (1..MAX_POOL)
// vectors; for each run it outputs the element-wise maximum, one cycle after
// the run's last vector.  pool_len = 1 passes every vector on.  clear restarts
// the run count (the controller pulses it at the start of a pass).  The host
// orders the vectors so that one run is one pooling window.  The paper only
// names a pooling block; window shape and this streaming form are this
// design's own.
module pooling
  import sdmm_pkg::*;
#(
  parameter int unsigned N = COLS
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       clear,
  input  logic [2:0] pool_len,
  input  logic       in_valid,
  input  acc_t       in_data  [N],
  output logic       out_valid,
  output acc_t       out_data [N]
);
  logic [2:0] cnt;
  acc_t       best [N];
  logic       run_end;

  assign run_end = (cnt + 3'd1 >= pool_len);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt       <= '0;
      out_valid <= 1'b0;
    end else begin
      out_valid <= in_valid && run_end;
      if (clear)         cnt <= '0;
      else if (in_valid) cnt <= run_end ? 3'd0 : cnt + 3'd1;
    end
  end

  always_ff @(posedge clk) begin
    if (in_valid) begin
      for (int j = 0; j < N; j++) begin
        acc_t m;
        m = (cnt == 3'd0 || in_data[j] > best[j]) ? in_data[j] : best[j];
        best[j] <= m;
        if (run_end) out_data[j] <= m;
      end
    end
  end

  a_pool_len: assert property (@(posedge clk) disable iff (!rst_n)
    in_valid |-> (pool_len >= 3'd1 && pool_len <= 3'(MAX_POOL)));
endmodule

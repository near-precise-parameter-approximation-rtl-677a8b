// controller: sequences one pass of the accelerator.
//
// A pass is started with start/cmd (a pass_cmd_t) while idle and ends with a
// one-cycle done pulse.
//   LOAD  (if cmd.load_w) reads ROWS*PE_COLS index words from WMem, row-major
//         over the PEs; each index's 13-bit address goes to the WROM and the
//         WROM entry plus the index's three sign bits are written into the PE
//         two cycles after the WMem read.
//   RUN   reads n_vec input vectors from IMem and, when acc_en, the matching
//         partial-sum vectors from PMem (otherwise the array starts from 0),
//         and presents them to the array one cycle later, one per cycle.
//   DRAIN counts the array's result vectors.  Each goes either back to PMem
//         (last = 0) or through ReLU and pooling into OMem (last = 1); this
//         is the multiplexer at the array's output.  Once all n_vec results
//         are out it waits for the ReLU/pooling stages and signals done.
// The paper only names the controller; the pass format and sequencing are
// this design's own.  ld_row and ld_col are 8 bits wide to match the array's
// load bus; with 12 rows and 4 PE columns their upper bits stay 0.
module controller
  import sdmm_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  pass_cmd_t          cmd,
  output logic               busy,
  output logic               done,
  // WMem core port and WROM read
  output logic               wmem_en,
  output logic [WMEM_AW-1:0] wmem_addr,
  input  widx_t              wmem_rdata,
  output logic               wrom_en,
  output logic [ROM_AW-1:0]  wrom_addr,
  // PE load bus
  output logic               ld_en,
  output logic [7:0]         ld_row,
  output logic [7:0]         ld_col,
  output logic [K-1:0]       ld_sign,
  // IMem / PMem reads and array input
  output logic               imem_en,
  output logic [IMEM_AW-1:0] imem_addr,
  output logic               pmem_ren,
  output logic [PMEM_AW-1:0] pmem_raddr,
  output logic               arr_valid,
  output logic               psum_sel,   // 1: partial sums from PMem, 0: zero
  // array results
  input  logic               arr_out_valid,
  output logic               pmem_we,
  output logic [PMEM_AW-1:0] pmem_waddr,
  output logic               relu_valid,
  output logic               relu_en,
  output logic               pool_clear,
  output logic [2:0]         pool_len,
  input  logic               pool_out_valid,
  output logic               omem_we,
  output logic [OMEM_AW-1:0] omem_waddr
);
  typedef enum logic [2:0] {S_IDLE, S_LOAD, S_RUN, S_DRAIN, S_FLUSH} state_t;

  localparam int unsigned NPE = ROWS * PE_COLS;

  state_t             state;
  pass_cmd_t          c;
  logic [7:0]         ld_cnt;
  logic [IMEM_AW:0]   rd_cnt, out_cnt;
  logic [OMEM_AW-1:0] o_cnt;
  logic [2:0]         flush_cnt;
  // WMem -> WROM -> PE pipeline side information
  logic               ld_v1, ld_v2;
  logic [7:0]         ld_k1, ld_k2;
  logic [K-1:0]       sign2;

  assign busy = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      c         <= '0;
      ld_cnt    <= '0;
      rd_cnt    <= '0;
      out_cnt   <= '0;
      o_cnt     <= '0;
      flush_cnt <= '0;
      done      <= 1'b0;
      ld_v1     <= 1'b0;
      ld_v2     <= 1'b0;
      ld_k1     <= '0;
      ld_k2     <= '0;
      sign2     <= '0;
    end else begin
      done  <= 1'b0;
      ld_v1 <= (state == S_LOAD);
      ld_k1 <= ld_cnt;
      ld_v2 <= ld_v1;
      ld_k2 <= ld_k1;
      sign2 <= wmem_rdata.sign;
      if (arr_out_valid)  out_cnt <= out_cnt + 1'b1;
      if (pool_out_valid) o_cnt   <= o_cnt + 1'b1;
      unique case (state)
        S_IDLE: if (start) begin
          c       <= cmd;
          ld_cnt  <= '0;
          rd_cnt  <= '0;
          out_cnt <= '0;
          o_cnt   <= '0;
          state   <= cmd.load_w ? S_LOAD : S_RUN;
        end
        S_LOAD: begin
          ld_cnt <= ld_cnt + 8'd1;
          if (ld_cnt == 8'(NPE - 1)) state <= S_RUN;
        end
        S_RUN: begin
          // The first vector is read only after the last tuple is in its PE.
          if (!ld_v1 && !ld_v2) begin
            rd_cnt <= rd_cnt + 1'b1;
            if (rd_cnt == c.n_vec - 1'b1) state <= S_DRAIN;
          end
        end
        S_DRAIN: begin
          flush_cnt <= '0;
          if (out_cnt == c.n_vec) state <= S_FLUSH;
        end
        S_FLUSH: begin
          flush_cnt <= flush_cnt + 3'd1;
          if (flush_cnt == 3'd3) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // WMem read during LOAD, WROM read one cycle later, PE write one more.
  assign wmem_en   = (state == S_LOAD);
  assign wmem_addr = c.w_base + WMEM_AW'(ld_cnt);
  assign wrom_en   = ld_v1;
  assign wrom_addr = wmem_rdata.addr;
  assign ld_en     = ld_v2;
  assign ld_row    = 8'(ld_k2 / 8'(PE_COLS));
  assign ld_col    = 8'(ld_k2 % 8'(PE_COLS));
  assign ld_sign   = sign2;

  // Input and partial-sum reads.
  logic rd_fire;
  assign rd_fire    = (state == S_RUN) && !ld_v1 && !ld_v2;
  assign imem_en    = rd_fire;
  assign imem_addr  = c.i_base + IMEM_AW'(rd_cnt);
  assign pmem_ren   = rd_fire && c.acc_en;
  assign pmem_raddr = c.p_rd_base + PMEM_AW'(rd_cnt);
  assign psum_sel   = c.acc_en;

  // The memories answer one cycle after the read.
  logic rd_fire_d;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rd_fire_d <= 1'b0;
    else        rd_fire_d <= rd_fire;
  end
  assign arr_valid = rd_fire_d;

  // Output steering.
  assign pmem_we    = arr_out_valid && !c.last;
  assign pmem_waddr = c.p_wr_base + PMEM_AW'(out_cnt);
  assign relu_valid = arr_out_valid && c.last;
  assign relu_en    = c.relu_en;
  assign pool_len   = c.pool_len;
  assign pool_clear = (state == S_IDLE) && start;
  assign omem_we    = pool_out_valid;
  assign omem_waddr = c.o_base + o_cnt;

  a_nvec: assert property (@(posedge clk) disable iff (!rst_n)
    (state == S_IDLE && start) |-> cmd.n_vec != '0);
endmodule

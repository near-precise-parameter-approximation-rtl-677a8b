// sdmm_pkg: constants, types and helper functions shared by the SDMM
// (single DSP, multiple multiplication) accelerator.
//
// A signed fixed-point parameter W is written as
//     |W| = 2^s * (1 + 2^n * MW),   MW in {0, 1, 3, 5, 7}
// so that W * I = ((I + ((MW * I) << n)) << s), negated when W < 0.  Only the
// 3-bit MW goes through the DSP multiplier; the "+ I" is done by the DSP's
// adder (port C) and the shifts are free wiring after the DSP.  K = 3 such
// MW values are packed into the DSP's A port, FW = V + 3 bits apart, and the
// 8-bit input I drives port B, so one DSP block yields three products.
//
// The decomposition, the MW alphabet, the masks and the 13-bit index / 3 sign
// bit layout of the weight memory follow the paper.  The 3-bit n and s
// fields, the zero flag and the default dictionary formula are this design's
// own choices.
//
// Weight ROM entry layout (45 bits, MSB first):
//   a[23:0]   packed multiplicands, MW_i in a[FW*i +: 3]
//   n[K-1:0]  3-bit n_i of each parameter
//   s[K-1:0]  3-bit s_i of each parameter
//   zero[K-1:0] parameter i is zero (the form above cannot express 0)
package sdmm_pkg;

  // Input variable and parameter bit length, parameters per DSP block.
  localparam int unsigned V  = 8;
  localparam int unsigned K  = 3;
  // Field width of one packed product in the DSP result.
  localparam int unsigned FW = V + 3;
  // Bits of the DSP result that carry the K fields (33 for V = 8, K = 3).
  localparam int unsigned PACK_W = K * FW;
  // Width of one signed product W * I.
  localparam int unsigned PROD_W = 2 * V;

  // DSP48E1 port widths.
  localparam int unsigned DSP_A_W = 25;
  localparam int unsigned DSP_B_W = 18;
  localparam int unsigned DSP_C_W = 48;
  localparam int unsigned DSP_P_W = 48;
  // Bits of the ROM word that drive A (zero-extended into the 25-bit signed
  // port, so A stays positive).
  localparam int unsigned ROM_A_W = 24;

  // Weight ROM (dictionary) and weight-memory index format.
  localparam int unsigned ROM_AW  = 13;
  localparam int unsigned WIDX_W  = ROM_AW + K;   // 16-bit index

  // Array size (12 x 12 MACs = 12 rows x 4 DSP-based PEs).
  localparam int unsigned ROWS    = 12;
  localparam int unsigned COLS    = 12;
  localparam int unsigned PE_COLS = COLS / K;
  localparam int unsigned ACC_W   = 32;

  // On-chip memory depths (words) and address widths.
  localparam int unsigned WMEM_DEPTH = 4096;
  localparam int unsigned IMEM_DEPTH = 1024;
  localparam int unsigned PMEM_DEPTH = 1024;
  localparam int unsigned OMEM_DEPTH = 1024;
  localparam int unsigned WMEM_AW = $clog2(WMEM_DEPTH);
  localparam int unsigned IMEM_AW = $clog2(IMEM_DEPTH);
  localparam int unsigned PMEM_AW = $clog2(PMEM_DEPTH);
  localparam int unsigned OMEM_AW = $clog2(OMEM_DEPTH);
  localparam int unsigned MAX_POOL = 4;

  typedef logic signed [V-1:0]      in_t;
  typedef logic signed [PROD_W-1:0] prod_t;
  typedef logic signed [ACC_W-1:0]  acc_t;
  typedef logic [2:0]               mw_t;

  typedef struct packed {
    logic [ROM_A_W-1:0]  a;
    logic [K-1:0][2:0]   n;
    logic [K-1:0][2:0]   s;
    logic [K-1:0]        zero;
  } wrom_entry_t;

  localparam int unsigned ENTRY_W = $bits(wrom_entry_t);

  typedef struct packed {
    logic [ROM_AW-1:0] addr;
    logic [K-1:0]      sign;
  } widx_t;

  // One pass of the controller: optionally load the 48 parameter tuples
  // starting at w_base, then push n_vec input vectors through the array.
  typedef struct packed {
    logic               load_w;     // reload the PEs' parameter tuples first
    logic [WMEM_AW-1:0] w_base;     // first WMem index word (row-major PEs)
    logic [IMEM_AW-1:0] i_base;     // first input vector in IMem
    logic [IMEM_AW:0]   n_vec;      // number of input vectors (>= 1)
    logic               acc_en;     // add partial sums read from PMem
    logic [PMEM_AW-1:0] p_rd_base;  // first partial-sum vector read
    logic               last;       // results go to ReLU/pooling/OMem, else PMem
    logic [PMEM_AW-1:0] p_wr_base;  // first partial-sum vector written
    logic               relu_en;    // apply ReLU on the way to OMem
    logic [2:0]         pool_len;   // max-pool run length 1..MAX_POOL
    logic [OMEM_AW-1:0] o_base;     // first OMem word written
  } pass_cmd_t;

  // Sign-extension mask of Eq. (7): MW + 1 + mask = 8 for every legal MW.
  function automatic logic [2:0] mask_of(input mw_t mw);
    case (mw)
      3'd0:    mask_of = 3'b111;
      3'd1:    mask_of = 3'b110;
      3'd3:    mask_of = 3'b100;
      3'd5:    mask_of = 3'b010;
      default: mask_of = 3'b000;   // MW = 7 (even MW values never occur)
    endcase
  endfunction

  // Parameter manipulation (Algorithm 1) of a magnitude 1..2^(V-1):
  // s = trailing zeros of m, then n = trailing zeros of (m/2^s - 1).
  // ok is 0 when the remaining MW is not in {0,1,3,5,7}.
  function automatic void manipulate(input int m, output int mw, output int n,
                                     output int s, output bit ok);
    int w;
    w = m; s = 0; n = 0;
    if (w > 0) while (w % 2 == 0) begin s++; w = w / 2; end
    w = w - 1;
    if (w > 0) while (w % 2 == 0) begin n++; w = w / 2; end
    mw = w;
    ok = (m > 0) && (w == 0 || w == 1 || w == 3 || w == 5 || w == 7);
  endfunction

  // Nearest magnitude the approximation of Eq. (9) can express (ties go to the
  // smaller value).  top restricts MW to {0,1,3}: the third field of A sits at
  // bits 22..24 and only 24 bits of A are driven.
  function automatic int approx_mag(input int m, input bit top);
    int best, d, bd, mw, n, s;
    bit ok;
    best = 1; bd = 1 << 30;
    for (int c = 1; c <= (1 << (V-1)); c++) begin
      manipulate(c, mw, n, s, ok);
      if (ok && !(top && mw > 3)) begin
        d = (c > m) ? c - m : m - c;
        if (d < bd) begin bd = d; best = c; end
      end
    end
    return best;
  endfunction

  // ROM entry for a tuple of magnitudes (0 = zero parameter).  Each magnitude
  // must be representable; use approx_mag first.
  function automatic wrom_entry_t make_entry(input int m0, input int m1, input int m2);
    wrom_entry_t e;
    logic [FW*K-1:0] a_full;
    int mags[K];
    int mw, n, s;
    bit ok;
    mags[0] = m0; mags[1] = m1; mags[2] = m2;
    e = '0;
    a_full = '0;
    for (int i = 0; i < K; i++) begin
      if (mags[i] == 0) begin
        e.zero[i] = 1'b1;
      end else begin
        manipulate(mags[i], mw, n, s, ok);
        a_full[FW*i +: 3] = 3'(mw);
        e.n[i]         = 3'(n);
        e.s[i]         = 3'(s);
      end
    end
    e.a = a_full[ROM_A_W-1:0];
    return e;
  endfunction

  // Magnitude selected by a 5-bit code in the default dictionary:
  // code 0 is zero, code c > 0 is approx_mag(4*c - 3), which spreads the 31
  // codes over 1..121.
  function automatic int default_mag(input int code, input bit top);
    return (code == 0) ? 0 : approx_mag(4 * code - 3, top);
  endfunction

  // Default dictionary: address {c2[2:0], c1[4:0], c0[4:0]} selects the codes
  // of the three parameters (the third with codes 0..7 only).
  function automatic wrom_entry_t default_entry(input int unsigned addr);
    return make_entry(default_mag(int'(addr[4:0]), 1'b0),
                      default_mag(int'(addr[9:5]), 1'b0),
                      default_mag(int'(addr[12:10]), 1'b1));
  endfunction

endpackage

# Three 8-bit multiplications per DSP block: an SDMM systolic array

A Xilinx DSP48E1 block has a 25 x 18-bit multiplier and a 48-bit adder. When a
CNN uses 8-bit weights and activations, one multiply-accumulate per DSP block
leaves most of that hardware unused. This design gets three signed 8 x 8-bit
products out of one DSP block per clock. It does this by rewriting each weight
so that only a 3-bit number goes through the multiplier, and by doing the
accumulation of the MACs in ordinary logic instead of in the DSP.
The products feed a 12 x 12 weight-stationary systolic array, so 144 MACs need
only 48 DSP blocks.

The RTL is SystemVerilog (IEEE 1800-2017). It is plain, synthesizable logic,
and the DSP block is written as inferable RTL. It follows a published
technique, "Single DSP - Multiple Multiplication" (SDMM), with parameter
approximation. Where the published description stops, the gaps are filled with
this design's own choices. Those choices are listed in the last sections.

## 1. Rewriting a weight

Every weight magnitude used by the design has the form

    |W| = 2^s * (1 + 2^n * MW),      MW in {0, 1, 3, 5, 7}

so that

    W * I = ((I + ((MW * I) << n)) << s),   negated when W < 0.

`s` counts the trailing zeros of |W|. `n` counts the trailing zeros of
|W|/2^s - 1. The odd remainder MW is restricted to 3 bits. For magnitudes
1..128 exactly 64 values have this form (1..18, 20, 21, 22, 24, 25, 26, 28, 29,
30, 32, 33, 34, 36, 40, 41, 42, 44, 48, 49, 50, 52, 56, 57, 58, 60, 64, 65, 66,
68, 72, 80, 81, 82, 84, 88, 96, 97, 98, 100, 104, 112, 113, 114, 116, 120, 128).
Every other weight is replaced offline by the nearest of these values. An
example is 53 -> 52 = 2^2 (1 + 2^2 * 3). Every magnitude up to 18 is exact. The
largest error is 4, for 76, 92, 108 and 124, which sit in the middle of gaps
of 8 between representable values.

Zero cannot be written in this form. Each parameter therefore also carries a
zero flag.

`sdmm_pkg::manipulate` computes (MW, n, s) from a magnitude. `approx_mag`
returns the nearest magnitude that can be represented. `make_entry` builds a
dictionary entry. These functions are the offline part of the technique. The
testbenches use them to prepare weights. The hardware never runs them.

## 2. The packed multiplication (the hard part)

For one input I (8-bit signed, v = 8) and three parameters, the DSP operands
are:

    A = MW_1 + (MW_2 << 11) + (MW_3 << 22)          (ROM, 24 bits, A[24] = 0)
    B = I as an unsigned 8-bit pattern, zero-extended to 18 bits
    C = SEx_1 + (SEx_2 << 11) + (SEx_3 << 22)
    SEx_i = { mask(MW_i) & {3{I[7]}} , I >>> n_i }   (3 + 8 = 11 bits)
    mask(0, 1, 3, 5, 7) = 111, 110, 100, 010, 000

The DSP computes P = A*B + C. Fields of FW = v + 3 = 11 bits never overlap,
because MW * 255 < 2^11. Each field is worked out here.

* The multiplier sees I as unsigned: I_u = I + 256 * sign. So field i gets
  MW_i * I + 256 * MW_i * sign.
* The low 8 bits of SEx_i are floor(I / 2^n_i), taken modulo 2^8. For a
  negative I that adds another 256 * sign.
* The mask bits add 256 * mask * sign. The masks satisfy MW + 1 + mask = 8,
  so the three error terms add up to 2^11 * sign.

Each field therefore equals

    R_i = MW_i * I + floor(I / 2^n_i)      (modulo 2^11, plus a carry 2^11 * sign)

R_i always fits 11 signed bits. The carry that field i passes up is exactly
"I is negative". Reading field i+1 as a signed number would need a borrow of
one exactly when R_i is negative, and R_i is negative exactly when I is. The
carry and the borrow cancel, so each 11-bit field of P[32:0] can be taken as it
stands. No correction adders are needed between fields.

Post-processing then restores the full product for each field:

    x_i = {R_i, I[n_i-1:0]}   = I * (1 + 2^n_i * MW_i)
    y_i = x_i << s_i          = I * |W_i|
    prod_i = sign_i ? -y_i : y_i   (0 when the zero flag is set)

Worked example: I = -72 and W = 52, so s = 2, n = 2, MW = 3.

* SEx = {100 & 111, -72 >>> 2} = 100_11101110.
* The multiplier gives 184 * 3 = 552 = 010_00101000.
* The field is 552 + 1262 = 1814 = 11100010110, which is -234 as an 11-bit
  signed number. Check: 3 * (-72) + floor(-72/4) = -234.
* Appending I[1:0] = 00 gives -936 = -72 * 13. Shifting left by 2 gives
  -3744 = -72 * 52.

The top field sits at A[24:22]. The DSP48E1 A port is 25-bit two's complement,
and only 24 ROM bits drive it, so the third parameter of a tuple may only use
MW in {0, 1, 3}. `approx_mag(m, top=1)` respects that. In practice this is one
of the tuples that tuple fine-tuning must move to a nearby representable tuple.

## 3. The dictionary (WROM) and the 16-bit weight index

A (24 bits) does not depend on the input, and neither do the n and s values.
So each distinct tuple of three parameters is stored once in an 8192-entry
dictionary:

    wrom_entry_t = { a[23:0], n[2:0] x3, s[2:0] x3, zero x3 }   (45 bits)

The weight memory holds only a 16-bit index per tuple:
`{13-bit WROM address, 3 sign bits}`. That is 16 bits for three 8-bit weights,
a third less traffic and storage than the weights themselves. Which tuples the
dictionary holds depends on the trained network and is decided offline. The
RTL starts with a default dictionary computed at elaboration. It uses address
fields {c2[2:0], c1[4:0], c0[4:0]}; code 0 means zero, and code c means the
representable magnitude nearest 4c - 3. The host can overwrite any entry
through the programming port (`hr_*` on the top). On an FPGA, that port stands
for initialising the BRAM contents in the bitstream.

## 4. The processing element (`sdmm_pe`)

One PE holds one tuple and does three MACs:

    param_decomp -> dsp_mult (A,B,C regs, P reg) -> post_proc -> pe_accum (3 adders, reg)

| cycle | what happens |
|-------|--------------|
| t     | input I applied; C is formed combinationally from I, n_i and mask(MW_i) |
| t+1   | DSP operand registers hold A, B, C; I has moved to the right neighbour |
| t+2   | DSP P register holds A*B+C; post-processing; psum_in must be applied now |
| t+3   | psum_out = psum_in + W_i * I for each of the three lanes |

The PE accepts one input per cycle. The mask is the small case table
`sdmm_pkg::mask_of`. It is applied to the MW field of A, so the ROM does not
store it.

## 5. The array (`systolic_array`)

There are 12 rows of 4 PEs, and each PE covers three adjacent MAC columns. That
makes 12 x 12 MACs and 48 DSP blocks. Inputs move right along a row, and
partial sums move down a column. MAC column j is lane j%3 of PE column j/3. For
each valid input vector x, the array returns

    y[j] = psum_in[j] + sum_r W[r][j] * x[r]

Skew registers sit inside the array, so callers give and take aligned vectors:

* x[r] is delayed r cycles.
* The partial sums of PE column c are delayed c + 2 cycles.
* The outputs of PE column c are delayed 3 - c cycles.

The latency is ROWS + PE_COLS + 1 = 17 cycles, flagged by `out_valid`. A new
vector may enter every cycle. Tuples are written over a broadcast bus
(`ld_en`, `ld_row`, `ld_col`, entry, signs). Do not change them while vectors
are in flight.

## 6. Memories, activation and pooling

| memory | word | depth | core side | host side |
|--------|------|-------|-----------|-----------|
| WMem | 16-bit tuple index | 4096 | controller reads during loading | read/write (`hw_*`) |
| IMem | 12 x 8-bit input vector | 1024 | controller reads, one vector/cycle | read/write (`hi_*`) |
| PMem | 12 x 32-bit partial sums | 1024 | read for the array, written with results | none |
| OMem | 12 x 32-bit outputs | 1024 | written by pooling | read (`ho_*`) |

All four are `onchip_mem`, a two-port synchronous RAM with a one-cycle read.
ReLU is max(0, y) and can be switched off. Pooling takes the element-wise
maximum over runs of `pool_len` (1 to 4) consecutive result vectors. The host
orders the vectors so that one run is one pooling window.

## 7. Passes and the controller

Work is issued as passes (`sdmm_pkg::pass_cmd_t`, `start` -> `done`):

1. With `load_w`, the controller reads 48 indices from WMem starting at
   `w_base`, row-major over the PEs. Each address goes to the WROM, and two
   cycles later the entry and sign bits are written into the PE. This takes
   50 cycles.
2. It reads `n_vec` input vectors from IMem starting at `i_base`. With
   `acc_en`, it also reads the matching partial sums from PMem at `p_rd_base`;
   otherwise the array starts from zero. One vector goes in per cycle.
3. Results go back to PMem at `p_wr_base` when `last` = 0. When `last` = 1 they
   go through ReLU (`relu_en`) and pooling into OMem at `o_base`.

A convolution is a series of passes, for example one per kernel position or
channel group. Partial sums live in PMem between passes, and the last pass
activates and pools. A pass takes about 50 (if loading) + n_vec + 17 + 6
cycles. The host arranges the input vectors (im2col-style). There is no
convolution address generator.

## 8. How the design departs from the published description

* **Bit positions of A.** The paper gives two formulas. One places MW_i at
  bit (i-1)(v+3); the other at v + (i-1)(v+3). The first is used, because only
  it lines up with the C words and the 33-bit result.
* **Port assignment.** The numeric examples in the paper assign I to A and the
  parameters to B. The architecture text assigns them the other way round; the
  text is followed (parameters on A, I on B).
* **Concatenation width.** The post-processing concatenation uses I[n-1:0],
  not I[n:0].
* **Third parameter limited.** The third parameter is limited to MW <= 3,
  because only 24 ROM bits drive the signed 25-bit A port.
* **Additions.** The zero flag, the 3-bit n/s fields and the default
  dictionary formula are additions.
* **Memories and host ports.** Memory depths and word layouts, plain
  synchronous host ports instead of AXI, the pass format, the weight-load bus,
  the skew placement and the 32-bit partial sums are all this design's own.
* **ReLU, pooling, controller.** These blocks are named in the paper but not
  described. Their behaviour here is the simplest that fits.
* **Only the 8-bit mode is built.** The 6- and 4-bit modes (4 and 6
  multiplications per DSP) are not built. With fields of v + 3 bits, they would
  need 30 and 38 bits on A, more than a DSP48E1 has, and the layout those modes
  use is not given. Narrower inputs and weights run in the 8-bit mode at three
  multiplications per DSP.
* **Offline software not included.** Tuple fine-tuning (replacing tuples that
  are not in the dictionary by the nearest one, by Bray-Curtis distance) is
  offline software and is not part of the RTL.

## 9. Files and simulation

`rtl/`:

* `sdmm_pkg.sv`: constants, types, offline helper functions
* `param_decomp.sv`, `dsp_mult.sv`, `post_proc.sv`, `pe_accum.sv`: the four
  parts of a PE
* `sdmm_pe.sv`: the PE
* `systolic_array.sv` and `delay_line.sv`: the array and its skew registers
* `wrom.sv`: the dictionary
* `onchip_mem.sv`: the memories
* `relu.sv` and `pooling.sv`: activation and pooling
* `controller.sv`: the pass sequencer
* `sdmm_top.sv`: the accelerator top

`tb/` holds one self-checking testbench per module, `tb_<module>.sv`. Each
prints `TB_RESULT checks=N failures=M`. `tb_sdmm_top` runs the whole
accelerator at its default size: four passes, with a host-programmed
dictionary, tuple reuse, PMem accumulation, ReLU and pooling.

`tb_conv_layer` runs a complete small convolution layer end to end:

* a 10 x 10 x 24 input, a 3 x 3 kernel and 12 output channels;
* ReLU and 2 x 2 pooling;
* 18 accumulating passes, one per channel group and kernel position;
* 864 programmed tuples;
* IMem is rewritten between the two channel groups.

It is bit-exact against the approximated weights. With random 8-bit weights,
about half of the non-zero weights get approximated. The pooled layer output
then differs from the unapproximated one by about 1.8 % (sum of |difference|
over sum of outputs). Random weights are a worse case than trained ones, which
cluster at small magnitudes, and every magnitude up to 18 is exact.

    verilator --binary --timing --assert -Irtl -y rtl rtl/sdmm_pkg.sv \
              tb/tb_sdmm_top.sv --top-module tb_sdmm_top -o sim
    ./obj_dir/sim

Use the same command for any other testbench. Every testbench finishes within
seconds.

What the tests establish: the PE is bit-exact against integer multiplication
for all 256 inputs with 80 different tuples, including -128 x -128. The array
and the top are bit-exact against an integer reference, with the stated
latency and one vector per cycle. Each testbench fails against a deliberately
broken copy of its module. Not verified: timing closure and resource use on an
FPGA (the published implementation runs at 250 MHz on a Zynq-7000), and
accuracy on real networks.

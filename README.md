# KAN-SAs: a systolic-array core for Kolmogorov-Arnold Network layers

A Kolmogorov-Arnold Network (KAN) layer puts a learned one-dimensional function
on every input-to-output connection where a perceptron layer puts a scalar
weight. Each function is a spline, a weighted sum of B-spline basis functions:

    out_o = sum_f phi_{f,o}(x_f)              phi_{f,o}(x) = sum_j c_{f,o,j} B_j(x)

With G grid intervals and degree P there are G + P basis functions per input.
Once the basis values B_j(x_f) are known, the layer is an ordinary matrix
product: a (batch x (G+P)K) matrix of basis values times a ((G+P)K x outputs)
matrix of coefficients. A systolic array can do that product. Two things make
it inefficient, though:

* B-splines are defined by a recursion (Cox-de Boor), which is costly to
  evaluate in hardware.
* For any input only P + 1 of the G + P basis values are non-zero (local
  support). A scalar-PE array multiplies the zeros too: with G = 10, P = 3 at
  most 4 of 13 multipliers do useful work.

This core removes both problems. Every row of a weight-stationary systolic
array gets its own **B-spline unit**, which produces the P + 1 non-zero basis
values of one input in one cycle from a small table instead of a recursion,
together with the index k that says which of the G + P functions they are.
The array is built from **N:M processing elements** (N = P + 1, M = G + P):
each PE stores all M coefficients of one input feature for one output, picks
the N that match k, and does N multiply-accumulates at once. A KAN layer then
takes (G + P) times fewer array passes than on a scalar-PE array of the same
size. The same array also runs plain MLP layers, each PE acting as an N-wide
dot product.

The design follows the KAN-SAs architecture of Errabii, Sentieys and Traiola
("KAN-SAs: Efficient Acceleration of Kolmogorov-Arnold Networks on Systolic
Arrays"). That paper describes the B-spline unit and the N:M PE in detail and
the array only in outline. Everything around the array (operand skew, control
tags, coefficient loading, the accumulator and the MLP operand path) is this
implementation's own; the sections below say which parts are which.

Default configuration: cubic splines (P = 3), G = 5, so 4:8 PEs; int8 inputs,
coefficients and B-spline values; int32 partial sums; a 16 x 16 array; a
256-entry accumulator per column.

## 1. Notation

| symbol | meaning | default |
|---|---|---|
| P | spline degree | 3 (the only degree supported) |
| G | grid intervals of the input domain; a synthesis maximum, and per layer at run time | 5 |
| G + 2P | intervals of the extended grid (P extra on each side) = `cfg_nint` | 11 |
| t_0 .. t_{G+2P} | knot vector (uniform), quantized to 8 bits = `cfg_knots` | |
| k | interval of the input: t_k <= x < t_{k+1} | 0 .. G+2P |
| N = P + 1 | basis values that can be non-zero for one input | 4 |
| M = G + P | basis functions per input = coefficients per PE | 8 |
| R x C | array rows (input features) x columns (outputs) | 16 x 16 |

For an input in interval k the non-zero functions are B_{k-P} .. B_k. Inputs
near the edges of the extended grid have fewer, because some of those indices
fall outside 0 .. G+P-1.

## 2. Evaluating B-splines without recursion (`bspline_unit`)

On a uniform grid every basis function is a shifted copy of one function, the
cardinal B-spline B_{0,3} on the integer knots 0..4:

    B_j(x) = B_{0,3}(u - j),    u = (x - t_0) / Delta

Write u = k + x_a with x_a in [0, 1) the position inside interval k. The four
non-zero values are then B_{0,3} evaluated at x_a, x_a + 1, x_a + 2 and
x_a + 3. B_{0,3} is symmetric about 2, so B_{0,3}(x_a + 2) = B_{0,3}(2 - x_a) and
B_{0,3}(x_a + 3) = B_{0,3}(1 - x_a). Only the half [0, 2] needs storing, and it
is stored as 256 rows of two values:

    row a  (x_a = a/255):   lo[a] = B_{0,3}(x_a)      hi[a] = B_{0,3}(x_a + 1)

Reading row a gives B_k and B_{k-1}. Reading row 255 - a (the bitwise
inversion of the address, which is exactly 1 - x_a) gives lo = B_{k-3} and
hi = B_{k-2}, in reverse order. One table with two read ports thus yields all
four values:

| lane i | function | table read |
|---|---|---|
| 0 | B_k     | lo[x_addr] |
| 1 | B_{k-1} | hi[x_addr] |
| 2 | B_{k-2} | hi[~x_addr] |
| 3 | B_{k-3} | lo[~x_addr] |

The unit has four parts:

* **Compare** (`bspline_compare`): an interval search that compares x_q with
  all knots t_1 .. t_nint in parallel and counts those passed, giving k.
* **Align** (`bspline_align`): the table address
  `x_addr = clip(nint * (x_q - t_0) - 255 * k, 0, 255)`. This assumes the
  knot vector spans 255 codes (t_nint - t_0 = 255), as an affine quantization
  of the grid range gives. Knots that were rounded to integer codes can put the
  raw value slightly outside 0..255; the clip absorbs that.
* **~**: bitwise inversion of the address.
* **LUT** (`bspline_lut`): the 256 x 2 table described above. It is computed
  when the design is elaborated by an integer constant function from the
  closed-form cubic pieces, x^3/6 on [0,1] and (-3u^3 + 3u^2 + 3u + 1)/6 with
  u = x - 1 on [1,2]. Values are scaled so that the peak B_{0,3}(2) = 2/3 reads
  127, i.e. value = round(190.5 B), with halves rounded up. Row 0 is (0, 32) and
  row 255 is (32, 127). These two rows are the ones the paper prints, and they
  are what fixes the scale. The four values of any input sum to 190.5 +- 1.5
  (partition of unity).

Lanes whose index k - i lies outside 0 .. G+P-1 are forced to zero. These are
inputs in the grid extension, and inputs below t_0 or at or above t_nint. The
outputs are registered: latency one cycle, one input per cycle.
G + 2P (`nint`) is a run-time input, so a core built for G = 5 also runs
layers with G = 1..4. `nint` must be at least 2P + 1 = 7.

## 3. The N:M processing element (`nm_pe`)

```
            w_in[M] (from above, used while w_load)
                 |
      +--------- coef[0..M-1] ---------+
      |   M-to-N mux, lane i <- c[k-i] |
 a_in[N], k_in -->  N multipliers --> (N+1)-input adder <-- psum_in
      |                                  |
      +--> a_out, k_out (registered)     +--> psum_out (registered)
```

`psum_out <= psum_in + sum_{i<N} c[k-i] * a_in[i]`, where a coefficient index
outside 0..M-1 reads zero. The paper gives this datapath: the coefficient
register, the k-driven M-to-N multiplexer, the N multipliers and one adder
that also takes the partial sum. Products are int8 x int8; the sum is int32 and
wraps on overflow. Activations and k go right through one register and the
partial sum goes down through one register, as in any weight-stationary
array. The multiplexer and the wider adder lengthen the critical path compared
with a scalar PE. The paper reports 1.31 ns against 1.02 ns for a 4:8 PE in
28 nm; this design does not check timing.

Coefficient loading is this design's choice. While `w_load` is high each PE
copies the register of the PE above, so coefficients shift down a column one
row per cycle.

## 4. Array dataflow and timing (`systolic_array`, `kansas_top`)

Row r of the array handles one input feature and is fed by its own B-spline
unit. Column c handles one output neuron. Each PE therefore holds the M spline
coefficients c_{f,o,0..M-1} of one (feature, output) pair, and a pass of the
array covers R features x M basis functions for C outputs. A scalar array
covers only R basis values in the same pass.

A vector presented to `kansas_top` at cycle t (one x_q per row, `in_valid`
high) moves as follows:

| cycle | event |
|---|---|
| t | inputs sampled |
| t + 1 | B-spline lanes and k (or MLP operands) available, mode multiplexer |
| t + 1 + r | row r enters the array (row r is delayed by r cycles) |
| t + 1 + r + c | PE (r, c) adds its contribution |
| t + 1 + R + c | column c result on `psum_bottom[c]`, written to the accumulator |

A new vector can enter every cycle. Its mode, ReLU flag, accumulator address
and accumulate flag go down a tag shift register of R + C stages, and column c
takes its write command from stage R + c. Columns therefore finish one cycle
apart, and each column has its own write port into the accumulator. `busy`
is high while any vector is in flight.

To load coefficients, hold `w_load` for R cycles. Drive `w_data[c]` with the
vector for row R-1 first and row 0 last. `w_load` must not be asserted while
`busy` or `in_valid` is high; an assertion checks this. There is no double
buffering, so loading and computing do not overlap.

## 5. MLP mode (`row_input_sel`)

Plain DNN layers, and the second term of a KAN layer (a ReLU branch,
w_b * relu(x)), use the array without the B-spline units. With
`in_mode = MODE_MLP` row r takes N int8 activations `in_a[r][0..N-1]`,
optionally clamped at zero (`in_relu`). The multiplexer packs them in reverse
(lane i = a_{N-1-i}) and forces k = N - 1, so the PE multiplies a_j with
coefficient c_j: each PE becomes an N-wide dot product over its first N
coefficient slots, and a pass covers R*N features. The paper states that the
array runs MLP layers and loads (R x N, C) tiles for them. The way the
operands reach the PE is this design's choice. The mode travels with each
vector, so KAN and MLP vectors may alternate from cycle to cycle with the same
loaded coefficients.

## 6. Accumulator and running a layer (`acc_mem`)

The accumulator has one bank of `ACC_DEPTH` int32 entries per column. A column
result is added to its entry when the vector's `in_acc` flag was set, and
overwrites the entry otherwise. Results are read with `rd_en`/`rd_addr`, and
all columns of one entry appear on `rd_data` a cycle later. Entries are not
reset, so the first write of a sum must have `in_acc` clear.

The core has no sequencer. A host (or a controller, not included) runs a
layer with K inputs and O outputs as follows:

1. Set `cfg_knots` and `cfg_nint = G + 2P` for the layer.
2. For each group of C outputs and each group of R input features: load the
   coefficients (unused slots j >= G+P and missing features or outputs get
   zero). Then stream the batch, one vector per cycle, with `in_addr` = batch
   index and `in_acc` set from the second feature group on. Rows without a
   feature can be given x_q = 255, which produces all-zero lanes.
3. For the ReLU term, run MLP passes with the w_b weights in slots 0..N-1,
   accumulating on top.
4. Read the batch entries back.

The paper leaves the memory system that would do this out of scope. Inputs and
coefficients are 8-bit; requantizing the int32 outputs for the next layer is
also left to the host. Convolutional KAN layers have to be lowered to matrix
products by the host.

## 7. `kansas_top` interface

| port | dir | width | meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock, asynchronous active-low reset |
| `cfg_knots` | in | (G+2P+1) x 8 | knot vector t_0..t_{G+2P}, sorted, spanning 255 codes |
| `cfg_nint` | in | clog2(G+2P+1) | intervals of the running layer, G_layer + 2P |
| `w_load` | in | 1 | shift coefficients down the columns |
| `w_data` | in | C x M x int8 | coefficients entering each column |
| `in_valid` | in | 1 | an operand vector is present |
| `in_mode` | in | `mode_t` | `MODE_KAN` or `MODE_MLP` |
| `in_relu` | in | 1 | ReLU on MLP activations |
| `in_x` | in | R x 8 | quantized KAN inputs, one per row |
| `in_a` | in | R x N x int8 | MLP activations, N per row |
| `in_addr`, `in_acc` | in | log2(ACC_DEPTH), 1 | accumulator entry; add (1) or overwrite (0) |
| `rd_en`, `rd_addr` | in | 1, log2(ACC_DEPTH) | accumulator read |
| `rd_valid`, `rd_data` | out | 1, C x int32 | read data, one cycle after `rd_en` |
| `busy` | out | 1 | vectors still in flight |

Parameters: `R`, `C`, `G`, `P` (must be 3) and `ACC_DEPTH`; N, M and the
index widths are derived from them. The defaults come from `kansas_pkg`.

## 8. What follows the paper and what does not

From the paper:
* the per-row B-spline unit: interval search, the align formula, the inverted
  second read, the half table with two values per row, reverse packing, and
  the end rows of the table;
* the N:M PE datapath;
* the weight-stationary array, with activations and k moving right and partial
  sums moving down;
* int8 operands, int32 sums, 16 x 16 array, G = 5, P = 3;
* the MLP capability with (R x N, C) tiles.

This design's own choices, where the paper is silent:
* the exact table scale and rounding. The paper's simplified four-row figure
  prints intermediate values that are not exact B-spline samples, and they are
  not used;
* the parallel compare-and-count;
* zeroing lanes outside 0..G+P-1;
* the one-cycle output register;
* coefficient shift-in loading;
* row skew and control tags;
* the accumulator organization;
* the MLP operand path with forced k;
* reset behaviour;
* run-time G.

Limits:
* Only cubic splines. The table trick shown is specific to P = 3, so layers
  with P = 1 or 2 cannot run.
* Knots must be uniform and span 255 codes. The align formula depends on it.
* No memory hierarchy, sequencer, requantization or convolution lowering.
* No timing, area or power figures. The paper's 28 nm synthesis results are
  not reproduced.

## 9. Workloads

Whether the default core (G = 5, so M = 8 and 11 intervals, cubic only) can hold
the layers of the applications the paper evaluates. Layer sizes come from the
paper. Widths and batch sizes are handled by tiling.

| application | G, P | fits the default core |
|---|---|---|
| 5G-STARDUST [168,40,40,40,24] | 5, 3 | yes (layer 1 simulated) |
| Catch22-KAN [22, X<60] | 3, 3 | yes ([22,60] simulated) |
| CF-KAN [X,512,X] | 2, 3 | yes |
| U-KAN [512,1024,512], [512,512] | 5, 3 | yes |
| GKAN, P = 3 variants | 2-3, 3 | yes ([200,16] with G = 3 simulated) |
| GKAN, P = 1, 2 variants | 2-3, 1-2 | no: cubic table only |
| Prefetcher [5,64,128] | 4, 3 | yes ([64,128] simulated) |
| MNIST-KAN [784,64,10] | 10, 3 | no: needs M = 13; fits `kansas_top #(.G(10))` (layer 1 simulated) |
| ResKAN18 | 3, 3 | yes, after host-side im2col |

The simulated layers also count array passes. For example, MNIST-KAN layer 1
takes 196 spline passes on the 16 x 16 N:M array, against 2548 on a scalar-PE
array of the same size: a factor of G + P = 13.

## 10. Verification

Every testbench is self-checking and prints `TB_RESULT checks=<n> failures=<n>`.

| testbench | what it checks |
|---|---|
| `tb_bspline_compare` | k against a top-down search, random sorted knots, inputs on knots |
| `tb_bspline_align` | the address formula including both clips |
| `tb_bspline_lut` | all 256 rows, both ports, against the Cox-de Boor recursion in floating point; end rows (0,32), (32,127) |
| `tb_bspline_unit` | G = 1..5, every input code: k and lanes bit-exact; within 6 codes of the exact continuous B-spline; partition of unity; latency 1, one input per cycle |
| `tb_nm_pe` | the PE equation for random k (including windows leaving 0..M-1), coefficient hold, forwarding |
| `tb_nm_pe_configs` | the PE at the N:M patterns 1:1, 1:2, 2:4, 2:6, 4:6, 4:8 |
| `tb_row_input_sel` | both modes, ReLU, reverse packing |
| `tb_systolic_array` | a 5 x 4 array against a matrix reference, with result timing R + c |
| `tb_acc_mem` | accumulate, overwrite, read latency against a memory model |
| `tb_kansas_top` | full default size: two accumulated K-tiles, an accumulated ReLU pass, mixed-mode vectors with off-grid knots; write timing 1 + R + c; counts that each mechanism occurred (KAN, MLP, mode switch, ReLU, accumulate, overwrite, extension zeroing, both clips, loads) |
| `tb_wl_catch22`, `tb_wl_stardust`, `tb_wl_gkan`, `tb_wl_prefetcher`, `tb_wl_mnist` | complete layers tiled over the core (`kan_layer_check`), every output compared |

The reference B-spline values in `tb/kan_ref_pkg.sv` come from the Cox-de Boor
recursion, not from the closed form used to fill the table.

To simulate with Verilator 5, list the packages first and let `-y` find the rest:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb \
    rtl/kansas_pkg.sv tb/kan_ref_pkg.sv tb/tb_kansas_top.sv --top-module tb_kansas_top
./obj_dir/Vtb_kansas_top
```

Lint the synthesizable top with
`verilator --lint-only -Wall -Wno-fatal -y rtl rtl/kansas_pkg.sv rtl/kansas_top.sv`.
Every file in `rtl/` is synthesizable SystemVerilog. The only non-synthesizable
parts are the assertions, which synthesis tools ignore.

## 11. Files

| file | content |
|---|---|
| `rtl/kansas_pkg.sv` | constants, operand types, `mode_t` |
| `rtl/bspline_compare.sv`, `bspline_align.sv`, `bspline_lut.sv`, `bspline_unit.sv` | B-spline unit |
| `rtl/nm_pe.sv`, `systolic_array.sv` | N:M PE and the array |
| `rtl/row_input_sel.sv` | KAN / MLP operand multiplexer |
| `rtl/acc_mem.sv` | accumulator memory |
| `rtl/delay_line.sv` | shift register used for the row skew |
| `rtl/kansas_top.sv` | the core |
| `tb/kan_ref_pkg.sv` | reference model for the testbenches |
| `tb/kan_layer_check.sv` | layer runner used by the workload testbenches |
| `tb/tb_*.sv` | testbenches |

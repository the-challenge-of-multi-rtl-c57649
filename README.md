# Multi-operand adders for directly mapped CNN convolutions: serialized and approximate variants

A convolution layer computes, for every output pixel, a dot product of a
C x J x K window of input pixels with a fixed filter:

    Y[n,v,u] = sum_c sum_j sum_k  X[c, v+j, u+k] * theta[n,c,j,k]

When such a layer is *directly mapped* onto an FPGA, every multiplication gets
its own hardware. Because the filter weights are known when the circuit is
built, each multiplier becomes a constant multiplier: a zero weight costs
nothing and a power of two is just a shift. What is left, and what dominates
the logic, is the **multi-operand adder (MOA)** that sums the products. In
AlexNet one such adder has between 325 and 1774 non-null operands, and a plain
binary adder tree needs one two-input adder per operand.

This RTL implements one such dot product, together with the two ways of
shrinking its MOA that K. Abdelouahab, M. Pelcat and F. Berry studied in "The
Challenge of Multi-Operand Adders in CNNs on FPGAs: How not to solve it!":

* **Serialization.** The pixel rate of a video stream (tens of MHz) is far
  below what FPGA logic can run at. A cluster of `n_c` operands can therefore
  be summed by one accumulator on a clock `clk_c` running `n_c` times faster
  than the pixel clock `clk0`, fed by a parallel-to-serial register.
* **Approximate adders.** Every two-input adder of the tree can be replaced by
  a *Lower-part-OR adder* (LOA), whose low `l` bits are ORed instead of added.

The study's finding, which motivates the title, is that on current FPGAs
neither strategy saves logic: the serializers cost more than the adders they
replace, and an OR gate takes the same logic cell as a full adder. The RTL
here lets you build and measure both, alone or combined. It is also a
correct, exact dot-product engine when both are switched off.

## Datapath

```
 x_i[0..N_TAPS-1] (8-bit signed, one window per clk0 cycle)
      |
      |  taps with theta = 0 are dropped here (no multiplier, no operand)
      v
 const_mult x N_OPD            clk0, 1 register
      |  16-bit products
      v
 SERIAL = 1:  serial_moa x ceil(N_OPD / N_C)     clk_c = N_C * clk0, 3 clk0 registers
              (N_C consecutive products per cluster, last one zero-padded)
 SERIAL = 0:  products go straight on
      |
      v
 adder_tree (binary, pipelined, optional LOA adders)   clk0, 1 register per level
      |
      v
 y_o, valid_o
```

`dhm_dot_product` is the top. Its parameters:

| parameter     | default                     | meaning |
|---------------|-----------------------------|---------|
| `N_TAPS`      | 363                         | window size C*J*K (363 = 11x11x3, AlexNet conv1) |
| `THETA`       | `moa_pkg::default_theta()`  | the weights, `theta_arr_t` (up to 4096 signed 8-bit entries) |
| `SERIAL`      | 1                           | sum clusters with serial MOAs |
| `N_C`         | 6                           | cluster size n_c = f_c / f_0 |
| `APPROX_BITS` | 0                           | approximated low bits l in every tree adder (0 = exact) |

Derived (read-only) values: `N_OPD` non-null weights (325 at the defaults,
which is AlexNet conv1's mean non-null operand count), `N_CL` tree operands
(55 clusters at the defaults), output width `Y_W` (25 bits at the defaults:
16-bit products, +3 bits per 6-operand cluster, +6 tree levels) and
`LATENCY` in clk0 cycles:

    LATENCY = 1 (multipliers) + 3 (serial MOAs, if SERIAL) + max(1, ceil(log2 N_CL))

which is 10 at the defaults. One window is accepted per clk0 cycle; a
`valid` bit travels with the data. There is no back-pressure: the datapath
is a fixed-latency stream, as a pixel stream is.

## The serial MOA and its two clocks

This is the part of the design that needs the most care.

The drawing of the original design shows each serializer stage loaded by
`clk0` and shifted by `clk_c`. A flip-flop has one clock, so here the
serializer is split:

1. **clk0 side.** At every clk0 edge a holding register captures the `N_C`
   operands and a one-bit flag toggles.
2. **clk_c side.** At each clk_c edge, if the flag differs from the copy the
   clk_c side saw last, the shift register loads the held operands;
   otherwise it shifts one place towards its output, filling with zeros.
   A position counter flags the first operand of a batch, and the cycle
   before the next load is flagged as the batch end.
3. **Accumulator (clk_c).** On the first operand the accumulator restarts,
   on the others it adds. At the batch end it writes the completed sum into
   a result register that then stays put for a whole clk0 period. With
   exactly `N_C` clk_c cycles per clk0 period, the batch end is the cycle of
   the last operand. With more, the extra cycles add zeros, and the end comes
   in the last of them.
4. **Back to clk0.** A clk0 register samples the result.

For `N_C = 6`, taking the clk0 edge that captures a window as clk_c cycle 0:

| clk_c edge | event |
|-----------:|-------|
| 0          | clk0 edge: holding register captures, flag toggles |
| 1          | shift register loads (flag change seen) |
| 2 .. 7     | operands 0 .. 5 accumulated; edge 7 (which also loads the next batch) writes the result register |
| 12         | second clk0 edge after capture: result sampled into clk0 |

The requirements this places on the clocks:

* `clk_c` and `clk0` come from the same source and rise together, with
  `R >= N_C` clk_c edges per clk0 period. An assertion in `serializer`
  fires if a batch is cut short. A clk_c *faster* than `N_C * f0` is
  harmless. The spare cycles shift zeros, and because the result is written
  on the edge that loads the next batch (edge `R + 1`), the latency stays
  the same.
* `N_C >= 2`, so that the result register settles before the sampling edge.
* The only clock-crossing paths are the toggle flag and the holding register
  (clk0 to clk_c), and the result register (clk_c to clk0). Each has at least
  one clk_c period of setup, so for related clocks they can be timed as
  ordinary synchronous paths. Nothing here is meant for asynchronous clocks.

Latency through a `serial_moa` is three clk0 registers: capture, accumulate,
sample.

The clock generator itself (typically a PLL making `clk_c` from `clk0`) is
not part of the RTL. Both clocks are inputs of the top.

## The Lower-part-OR adder and the approximate tree

A `B`-bit `loa_adder` with `L` approximated bits computes

    s[L-1:0] = a[L-1:0] | b[L-1:0]
    s[B-1:L] = a[B-1:L] + b[B-1:L] + (a[L-1] & b[L-1])

so the AND of the two top approximate bits stands in for the carry that the
low part would have produced. Its error is always less than `2^L`. The sum is
`B` bits wide, with no carry-out.

In `adder_tree` the operand width grows by one bit per level, with sign
extension, so no level can overflow. Every adder of level `lv` is a
`loa_adder` of width `IN_W + lv` with the same `L = APPROX_BITS`. Operands are
paired (0,1), (2,3), ... and an odd last value is carried up unchanged. Because
the approximate adder is not associative, this pairing order is part of the
result when `APPROX_BITS > 0`. The testbenches' reference model follows it.

Accuracy measured by `tb_loa_mred` (MRED = mean of |s_hat - s| / s, in %,
over 60000 random pairs of uniformly distributed unsigned b-bit operands,
with a carry-out):

| b \ l |  1   |  2   |  3   |  4   |  5   |  6   |  7   |  8  |
|-------|------|------|------|------|------|------|------|-----|
| 4     | 2.04 | 4.81 | 9.51 |      |      |      |      |     |
| 6     | 0.53 | 1.29 | 2.75 | 5.43 | 9.98 |      |      |     |
| 8     | 0.13 | 0.33 | 0.72 | 1.49 | 2.91 | 5.61 | 10.2 |     |
| 12    | 0.01 | 0.02 | 0.05 | 0.10 | 0.20 | 0.40 | 0.78 | 1.53 |

For 8-bit adders the error stays under 10% up to l = 6 (75%), which agrees
with the original study. Its curves are of the same shape and order of
magnitude, but they are not numerically the same as this table. Operand
statistics and the handling of the carry-out are not specified there, so the
difference cannot be settled.

## Weights

The design has no trained filter. `moa_pkg::default_theta()` supplies
stand-in weights: tap `i` is 0 when `i mod 19` is 17 or 18. Otherwise it is
the byte `((i * 2654435761 mod 2^32) >> 11) mod 256`, read as a signed
number, with 0 replaced by +1. The zero rule was picked so that 325 of the
first 363 taps are non-null, matching conv1. To use real weights, pass a
`theta_arr_t` as `THETA`. Only the first `N_TAPS` entries are read.

Weights are elaboration-time constants. Each `const_mult` builds the product
as the sum of `x` shifted by the positions of the set bits of |theta|,
negated for negative theta. Zero weights are removed before the MOA.
Power-of-two weights need no adder. Other weights use plain shift-and-add
with no signed-digit recoding; synthesis is free to improve it.

## Departures and limits

* **LOA bit split.** The original text gives the LOA `l` approximate low bits
  and `b-l` exact high bits, and defines the ratio as l/b. Its drawing labels
  the boundary at bit `b-l-1`, as if the split were reversed. This RTL follows
  the text.
* **Serializer clocking** is split into a clk0 holding register and a clk_c
  shift register (see above), rather than registers with two clocks.
* **Sizes and formats not given at the source**, and chosen here:
  * Pixels and weights are signed 8-bit. The source gives 8-bit operands for
    its serializer experiments only.
  * Products are kept at full 16-bit width.
  * Clusters are contiguous groups of operands, and the last one is
    zero-padded.
  * The LOA uses one fixed `l` for every tree level.
  * There is one register per multiplier and per tree level. The source only
    says the reference tree is "fully pipelined".
  * Only valid and control state is reset. The reset is asynchronous and
    active low.
* **Scope.** This is one dot product that receives a whole window per clk0
  cycle. A complete layer needs `N` of them (96 for conv1) plus the
  window-forming line buffers of a dataflow CNN mapping. Neither is described
  at the source, and neither is included.
* **What the RTL cannot show.** The original results are FPGA logic counts
  (ALMs on a Stratix V), where neither strategy helped. This RTL reproduces
  the circuits, not those counts. Measuring them needs a vendor flow.
* Workload sizes: the default instance holds one conv1 dot product (325
  non-null operands). AlexNet conv2 to conv5 need 957 to 1774 non-null
  operands, so set `N_TAPS` (at most 4096) and `THETA` for them. Their
  multipliers and MOA then grow proportionally.

## Verification

Every module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=<n> failures=<m>` and has a watchdog.

| testbench | what it checks |
|-----------|----------------|
| `tb_loa_adder` | exhaustive 8-bit sums at l = 0, 1, 4, 8 and random 12-bit sums at l = 5, against a bit-level model; error bound 2^l |
| `tb_const_mult` | weights 0, +-1, 64, -128, 127, 3, -77 against x*theta, 1-cycle latency |
| `tb_adder_tree` | exact 7-operand, LOA 13-operand and 1-operand trees against a reference tree; latency 3, 4, 1; approximation visible |
| `tb_serializer` | operand order, first/end flags, first operand one clk_c after the clk0 edge; a faster clk_c that shifts zeros in its spare cycles |
| `tb_serial_accumulator` | batch sums incl. extremes, batches closed after spare zero cycles, result held through idle cycles |
| `tb_serial_moa` | n_c = 6 and n_c = 2 at clk_c = n_c * clk0, n_c = 3 at clk_c = 5 * clk0, against exact sums; 3-register latency, valid gaps |
| `tb_dhm_dot_product` | five top configurations (serial exact, LOA only, serial + LOA, plain tree, one serial MOA for all 17 operands on a 20x clk_c) at reduced sizes against reference models, with latency; counts zero and power-of-two weights, padded clusters, windows through serial MOAs, approximate results and valid gaps, and fails if any is zero |
| `tb_dhm_full` | the top at its default parameters: 400 windows of 363 taps against the exact dot product, latency 10 |
| `tb_serial_moa_sweep` | serial MOAs at n_c = 2, 3, 4, 5, 10, 20, 30, 40, 50, each with its own clk_c = n_c * clk0, against exact sums |
| `tb_loa_mred` | the LOA accuracy sweep b = 4..12, all l, with the MRED table above |

`moa_ref_pkg` holds the reference models: the LOA, and the tree in the RTL's
pairing order. Testbenches need `--timing`. To run one, for example the
full-size test:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/moa_pkg.sv tb/moa_ref_pkg.sv tb/tb_dhm_full.sv --top-module tb_dhm_full
./obj_dir/Vtb_dhm_full
```

All of them finish in seconds, the full-size one included.

## Files

| file | contents |
|------|----------|
| `rtl/moa_pkg.sv` | widths, weight array type, stand-in weights, elaboration helpers |
| `rtl/const_mult.sv` | constant multiplier |
| `rtl/loa_adder.sv` | Lower-part-OR adder |
| `rtl/adder_tree.sv` | pipelined binary tree of LOA adders |
| `rtl/serializer.sv` | clk0-to-clk_c parallel-to-serial register |
| `rtl/serial_accumulator.sv` | clk_c accumulator with result register |
| `rtl/serial_moa.sv` | serializer + accumulator pair |
| `rtl/dhm_dot_product.sv` | top: one directly mapped dot product |
| `tb/*.sv` | testbenches and `moa_ref_pkg` |

# Tree Tensor Network classifier in fixed-latency hardware

A Tree Tensor Network (TTN) classifier takes N input features. It maps each feature to a
small vector, then merges those vectors pairwise up a binary tree until one vector is left.
That last vector holds the class scores. Every merge is the contraction of two vectors with
a rank-3 weight tensor:

    z_i = sum_j sum_k  x_j * y_k * V_ijk        i < chi_out,  j, k < chi_in

Inference is only multiplications and additions. There are no branches, no
non-linearities and no data-dependent control. That makes a TTN a good fit for a
fixed-latency, fully pipelined circuit. A particle-physics trigger, for example, can make a
decision in about 100 ns.

This RTL builds such a tree in SystemVerilog. It offers two ways to build each merge node:

* **Full Parallel (FP)**: one multiplier per product, with adder trees. A new sample enters
  on every clock, and the latency is logarithmic in the vector length.
* **Partial Parallel (PP)**: `chi_in^2 + 1` multipliers that are reused serially. This uses
  far fewer multipliers but has a longer latency, and one sample is processed at a time.

The default build is the 16-feature b/b̄ jet flavour tagger with bond dimensions
`[2,4,8,8,2]`, built Full Parallel. Its latency is 26 clock cycles, which is 104 ns at
250 MHz.

## 1. Shape of the tree

A tree is described by its bond dimensions `CHI = [D, chi_1, ..., chi_{L-1}, O]`:

| symbol | meaning |
|---|---|
| `L = N_LAYERS` | number of layers; `N = 2^L` input features |
| `D = CHI[0]` | length of each mapped feature vector (2 for the maps `[cos(pi x/2), sin(pi x/2)]` or `[1, x]`) |
| `CHI[l]` | length of the vectors leaving layer `l` |
| `O = CHI[L]` | length of the output vector (1 = one score, 2 = one score per class) |

Layer `l` has `N/2^l` nodes. Node `n` of layer `l` contracts output `2n` (as `x`) with output
`2n+1` (as `y`) of layer `l-1`. Its tensor has `CHI[l] * CHI[l-1]^2` weights.

| tree | features | weights | FP multipliers | FP latency | PP latency |
|---|---|---|---|---|---|
| `[2,4,1]` (Iris) | 4 | 48 | 72 | 10 | 27 (108 ns) |
| `[2,4,4,1]` (Titanic) | 8 | 208 | 272 | 16 | — |
| `[2,4,8,1]` (Titanic) | 8 | 384 | 496 | 18 (72 ns) | — |
| `[2,4,8,8,2]` (LHCb, default) | 16 | 1792 | 2080 | 26 (104 ns) | 174 |

The feature map itself (scalar to D-vector) is not part of the hardware. The host sends
mapped vectors.

## 2. One node, Full Parallel (`fp_node`)

The three-factor product `x_j * y_k * V_ijk` is split over two multiplier stages. This is how
an FPGA DSP slice, which multiplies two numbers, would be used:

```
 x_j ─┐                       ┌── V_0jk ─► M2 ──► adder tree 0 ──► z_0
      ├─► M1: x_j*y_k ────────┤
 y_k ─┘   (one per j,k)       └── V_1jk ─► M2 ──► adder tree 1 ──► z_1
                                          (one per i,j,k)
```

* **Stage M1** has `chi_in^2` multipliers. Together they form the whole cartesian product
  of `x` and `y`.
* **Stage M2** has `chi_out * chi_in^2` multipliers. Each one multiplies a pair product by
  one weight.
* **Adder trees**: there is one per output. Each sums `chi_in^2` terms in
  `ceil(log2 chi_in^2)` registered levels. An odd element at any level is carried forward.

Every stage is registered and takes `DT_DSP` cycles (1 by default; 1 to 4 allowed). So the
node latency is

    LAT_FP(node) = DT_DSP * (2 + ceil(log2 chi_in^2))      e.g. 4 cycles for chi_in = 2

and a node accepts one sample per clock. All nodes of a layer run in lock step. The tree's
latency is the sum over its layers:

    LAT_FP = sum_l DT_DSP * (2 + ceil(log2 CHI[l-1]^2))

Multipliers per tree: `sum_l CHI[l-1]^2 * (CHI[l] + 1) * N/2^l`.

## 3. One node, Partial Parallel (`pp_node`)

The PP node keeps the same two stages. It spreads them over time, in *steps* of `DT_DSP`
cycles. With `P = chi_in^2` pair products, numbered `p = j*chi_in + k`:

| unit | count | what it does in step s |
|---|---|---|
| M1 | 1 | forms pair product `p = s` (for `s < P`); it is held in step `s+1` |
| M2.p | P | in step `1+p+i`, multiplies pair `p` by `V_i,p`, for `i = 0..chi_out-1` |
| S_i | chi_out | in step `2+p+i`, adds the M2.p result for output `i` |

Each M2.p keeps its pair product locally after the step in which M1 delivers it. Each
accumulator receives exactly one term per step, from M2.0, M2.1 and so on in turn. The last
term (`p = P-1`, `i = chi_out-1`) is added in step `P + chi_out`, so `out_valid` pulses in
step `P + chi_out + 1`:

    LAT_PP(node) = DT_DSP * (chi_in^2 + chi_out + 1)        7 cycles for chi_in = chi_out = 2

The node captures `x` and `y` at `start`. It ignores `start` while `busy` is high. `z` stays
valid until the next start. The multiplier count, `chi_in^2 + 1`, does not depend on
`chi_out`. In a PP tree, the layers run one after the other and the core takes a new sample
only after the previous prediction has left. The tree's latency is therefore the sum of the
node latencies.

## 4. Numbers

All values are signed fixed point with `DATA_W = 16` bits and `FRAC = 14` fractional bits
(Q2.14, range [-2, 2)). The trained networks are normalised to this range. Arithmetic rules,
identical in both node types:

* Each two-factor product (full `2*DATA_W` bits) is shifted right arithmetically by `FRAC`
  and saturated to `DATA_W` bits. The shift rounds toward minus infinity.
* The terms of one output are summed at full width: `DATA_W + ceil(log2 chi_in^2)` bits.
  That sum is then saturated to `DATA_W` bits at the node output.

For a precision study, set `DATA_W = FRAC + 2`, keeping 2 sign/integer bits. For example,
`DATA_W = 8, FRAC = 6` gives the reduced precision at which the Titanic tree is reported to
lose no accuracy. The rounding and saturation rules are this design's own; the source does
not specify them. Bit-exact agreement with a floating-point model should therefore not be
expected. Agreement should be within the quantisation error.

## 5. Interfaces of `ttn_top`

| port group | protocol | format |
|---|---|---|
| `s_axis_*` | AXI4-Stream slave | one beat = one sample, `N*D*DATA_W` bits; element `f*D + d` (feature `f`, component `d`) in bits `(f*D+d)*DATA_W +: DATA_W`. Default: 512 bits |
| `m_axis_*` | AXI4-Stream master | one beat = one prediction, `O*DATA_W` bits, component `o` in bits `o*DATA_W +: DATA_W`. Default: 32 bits |
| `s_axil_*` | AXI4-Lite slave | weight `n` at byte address `4n`, low `DATA_W` bits of the word; read returns it sign-extended; addresses beyond the last weight answer SLVERR |

**Weight order.** Layer 1 comes first, then layer 2, and so on. Within a layer, the order is
node by node. Within a node, it is `(i*chi_in + j)*chi_in + k`, with output index `i`,
x index `j` and y index `k`. For the default tree, the layer offsets are 0, 128, 640 and
1664; the total is 1792.

**Flow control (FP).** The pipeline advances on every clock unless a prediction is waiting
at `m_axis` with `tready` low. In that case every stage holds, and `s_axis_tready` is low.
When the output is always ready, a sample presented on cycle `t` is offered at `m_axis`
on cycle `t + 26`.

**Flow control (PP).** `s_axis_tready` is high only while the core is idle. The prediction
stays on `m_axis` until it is taken.

Weights are ordinary registers, so the whole tree can read them in the same cycle. Load them
before streaming samples; writing a weight while samples are in flight changes those results.

## 6. Files

| file | contents |
|---|---|
| `rtl/ttn_pkg.sv` | `impl_e` (FP/PP), `chi_t` (tree shape, up to 8 layers), latency and weight-count functions |
| `rtl/dsp_mul.sv` | one fixed-point multiplier with `DT_DSP` register stages |
| `rtl/adder_tree.sv` | pipelined adder tree |
| `rtl/fp_node.sv` | Full Parallel node |
| `rtl/pp_node.sv` | Partial Parallel node |
| `rtl/ttn_core.sv` | the tree of nodes, layer valid and flow control |
| `rtl/weight_store.sv` | AXI4-Lite weight registers |
| `rtl/ttn_top.sv` | top level: stream in, tree, stream out, weight registers |
| `tb/tb_ttn_ref_pkg.sv` | independent reference model (node and whole tree, same arithmetic rules) |
| `tb/tb_*.sv` | one self-checking testbench per module; `tb_core_harness.sv` drives one core |

Top-level parameters: `IMPL` (`IMPL_FP` / `IMPL_PP`), `N_LAYERS`, `CHI` (a 9-entry array;
entries above `N_LAYERS` are ignored), `DATA_W`, `FRAC` and `DT_DSP`. For example, the Iris
tree built Partial Parallel:

```systemverilog
ttn_top #(.IMPL(ttn_pkg::IMPL_PP), .N_LAYERS(2), .CHI('{2,4,1,0,0,0,0,0,0})) u_ttn (...);
```

## 7. Simulating

Every testbench prints `TB_RESULT checks=<n> failures=<m>` and stops itself. Each has a
watchdog. With Verilator 5:

```sh
verilator --binary --timing --assert -Wno-fatal --top-module tb_ttn_top \
    -y rtl -y tb rtl/ttn_pkg.sv tb/tb_ttn_ref_pkg.sv tb/tb_ttn_top.sv
./obj_dir/Vtb_ttn_top
```

| testbench | what it covers |
|---|---|
| `tb_dsp_mul` | random and corner products, saturation, 1 and 3 register stages, hold |
| `tb_adder_tree` | 4 and 5 inputs, 1 and 2 cycles per level, exact latency, hold |
| `tb_fp_node` | 2→2 and 4→3 nodes, one sample per clock with random stalls, exact latency |
| `tb_pp_node` | 2→2, 4→1 and 2→4 (2 cycles/step) nodes, latency 7/18/18, start ignored while busy |
| `tb_weight_store` | every weight written and read back, byte strobes, SLVERR, held responses |
| `tb_ttn_core` | trees `[2,4,1]` PP, `[2,4,8,1]` FP, `[2,4,4,1]` FP, `[2,4,8,8,2]` FP and PP, and `[2,4,8,1]` FP with 8-bit numbers (6 fractional bits): values, latencies 27/18/16/26/174/18, back-pressure |
| `tb_ttn_top` | the default build end to end: 1792 weights over AXI4-Lite, 80 samples over AXI4-Stream, latency 26, back-pressure |
| `tb_ttn_top_pp` | the Iris `[2,4,1]` PP build end to end, latency 27 |

Every testbench compares against `tb_ttn_ref_pkg`, which computes the contraction directly
from the equation above. The reference models the bit-level rules of section 4, not the
hardware structure. The full-size `tb_ttn_top` builds in about half a minute and runs in
under a second.

### How far to trust it

Every latency and multiplier count above comes from simulation of this RTL or from counting
its instances. All of them agree with the published figures: 26, 18 and 27 cycles. The
arithmetic is checked bit for bit against the reference model, with random weights and
inputs. Trained weights were not available, so no classification accuracy was measured.

The design has not been placed and routed. Whether a Full Parallel tree closes timing at
250 MHz with one register per multiplier and per adder level is untested. If it does not,
raise `DT_DSP`; that adds pipeline registers and lengthens the latency accordingly. The
weight registers of the default build take 28,672 flip-flops.

## 8. What is this design's own

These points follow the source closely:

* the tree structure;
* the two node architectures with their multiplier counts;
* the latency formulas for both, which reproduce the published 108 ns, 72 ns and 104 ns;
* 16-bit fixed point with 14 fractional bits;
* AXI4-Stream for samples and AXI4-Lite registers for weights.

These are choices made here:

* **Rounding and saturation** (section 4).
* **The exact step of each PP unit.** The source gives only the stage names and the total
  count. Its latency formula carries the condition `chi_in <= chi_out`. This schedule meets
  the same count for any shape, including the Iris tree's second layer, where the
  condition does not hold.
* **One sample at a time in PP mode**, with layers run in sequence.
* **Weight storage.** The source says the weights sit in block RAM and also that every
  weight is a host-accessible register. Here they are registers only, because a Full
  Parallel tree needs all of them in the same cycle.
* **Beat format, address map, weight order, back-pressure and reset.** `rst_n` is
  synchronous and active low. It clears the valid pipeline, the PP sequencers and all
  weights; data registers are not reset.
* **The default output length.** The LHCb tree is described with two outputs (`[2,4,8,8,2]`,
  one probability per class), which is the default here. A summary table elsewhere lists it
  as `[2,4,8,8,1]`. Its 36.5% DSP share of a 5520-DSP device fits the one-output tree:
  2016 multipliers against 2080 for `[2,4,8,8,2]`.

What is not here:

* the feature map;
* the host, its PCIe/DMA bridge and any vendor IP;
* training, and the entanglement and correlation analysis used to choose tree shapes.
  These happen off-chip.

Whether a multiplier maps to a DSP slice or to LUTs is left to synthesis. No vendor
primitives are used.

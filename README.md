# SeVeDo: a heterogeneous accelerator for SVD-split low-bit transformer layers

A linear layer `y = X·W` of a transformer can be split by a singular value
decomposition into a small low-rank part and a residual,
`W ≈ L1·L2 + R`. Outliers that make `W` hard to quantize move into the
low-rank factors, so the residual `R` — which carries almost all of the
multiply-accumulates — becomes well behaved enough for 4-bit integers. The
low-rank path does few operations but is sensitive to precision. SeVeDo gives
each path its own engine, and both run side by side in every core:

* the **Residual Matrix Core (RMC)** is a wide INT4 tensor array. It uses
  **hierarchical group quantization (HGQ)**. Each 128-channel *base group*
  has one exact FP16 scale (BSF). Each 32-channel *sub-group* inside it adds
  only a 2-bit power-of-two exponent shift (ESSF). Almost all accumulation
  therefore stays in integers, and only one floating-point multiply-add is
  needed per base group.
* the **Low-rank Vector Core (LVC)** is a small bit-slice SIMD engine. It
  uses **SVD-guided mixed precision (SVD-MP)**. A few *sensitive* channels
  get INT16 activations × INT8 weights: the top-128 channels of an L1
  projection and the top-4 of an L2 projection. All other channels get
  INT8 × INT4. The same 9×5-bit multipliers handle both cases. They take
  four cycles for a sensitive channel group and one cycle for any other.

The peak rates are 16 cores × 1024 INT4 MACs for the residual path and
16 × 64 multipliers for the low-rank path. At 250 MHz this is 8.19 TOPS and
0.512 TOPS, a 16:1 ratio. The ratio matches rank-16 decompositions, where
the low-rank path does about 1/16 of the work.

The code is synthesizable SystemVerilog and uses `sevedo_pkg` for shared
constants and types. Every parameter defaults to the published
configuration: 4 clusters × 4 cores, a 64 KB IOMEM per cluster, a 1.5 MB
global memory, a 16 KB RMC weight memory, a 2 KB quantization cache and a
1 KB LVC weight memory.

## System organisation

```
           ext masters (EXT I/F 0, EXT I/F 1, SIMD core)      top_ctrl
                         \          |          /                 |
                          +---------+---------+------------------+
                          |     noc (4 x 5 crossbar)             |
                          +--+--------+--------+--------+--------+
                             |        |        |        |        |
                           GMEM   cluster0 cluster1 cluster2 cluster3
                          1.5 MB   IOMEM 64 KB + 4 x hetero_core
```

The **NoC** (`noc.sv`) is a crossbar. It connects 4 masters to 5 slaves, and
every slave has its own round-robin arbiter. A request is `{we, addr[31:0],
wdata[255:0]}`. Transfers to different slaves are granted in the same cycle.
Read data comes back exactly one cycle after the grant.

Address map (word addresses, 256-bit words):

| addr[31:28] | target | inside |
|---|---|---|
| 0 | GMEM | word in addr[15:0] (49152 words) |
| 1..4 | cluster 0..3 | region addr[23:20], core addr[19:18], offset addr[17:0] |

Cluster regions (`region_e`): 0 IOMEM, 1 RMC weight memory, 2 quant cache,
3 LVC weight memory, 4 LVC activation buffer, 5 core configuration word
(`core_cfg_t`), 6 LVC exponent-maximum table, 7 cluster command (`cl_cmd_t`).
Regions 1–6 are write-only. A read of any region except IOMEM returns the
cluster status word (bit 0 = busy).

The **top controller** (`top_ctrl.sv`) runs a list of 256-bit descriptors.
Each descriptor holds `[3:0]` op, `[35:4]` src, `[67:36]` dst, `[83:68]`
len and `[87:84]` cluster mask:

* `COPY` moves `len` words between any two NoC addresses.
* `WAIT` blocks until every cluster in the mask has reported done.
* `END` stops the controller.

Starting a cluster is just a `COPY` of a command word into that cluster's
command register. Weights and activations are moved with `COPY` too. This
means the controller needs no knowledge of the layer format.

The external interfaces and the SIMD core are outside this RTL. The top
level exposes three plain NoC master ports for them (`ext_*`).

## Cluster: one IOMEM, four cores, broadcast activations

The 16 output channels of one core tile use the same activations as the
tiles of the other three cores. So the cluster (`core_cluster.sv`) reads
each INT4 activation word from IOMEM only once and broadcasts it to all four
RMCs. Each word holds 16 tokens × 4 channels. The four cores then compute
four 16-channel output tiles from one stream. The IOMEM has one port. It
serves requests in this priority order:

1. NoC requests. Loads and reads from outside come first.
2. Result writes from the four aggregation cores, in round-robin order.
3. The activation stream. It pauses for any cycle it loses; `stall_cnt`
   counts these cycles.

The RMC takes one K step only when a word is actually delivered (`step`).
So a stall is always safe.

## Residual Matrix Core and HGQ

`rmc.sv` holds a 16×16 array of `tensor_pe`. Row r is token r and column c
is output channel c. Each PE takes four INT4 activation × INT4 weight
products per cycle, so one 128-channel base group takes 32 cycles. Inside a
PE (`tensor_pe.sv`):

1. The four products are summed into a sub-group partial sum. After 8
   cycles (32 channels) this sum fits in 13 bits.
2. The finished sub-group sum is extended by 3 fraction bits and shifted
   right by its ESSF (0..3). Then it is added to a 22-bit base-group
   accumulator. The fraction bits make the shift exact. A sub-group with
   ESSF = k therefore has the scale BSF·2^-k.
3. After the fourth sub-group, the 22-bit sum is copied to a hold register,
   and the next base group starts with no bubble.

The 16 rows of hold registers then drain one row per cycle through
`hgq_unit`. That unit converts the integer to FP32 and multiplies it by the
FP16 BSF of that token and base group. The result is added into the FP32
tile accumulator (`fp_accum`). The drain takes 16 cycles and overlaps with
the next base group's 32 MAC cycles, so the array never waits for it. The
widths (INT13, INT22, FP32) and the G32/G128 group sizes are the published
ones. The fraction bits, the row-serial drain and the hold registers are
choices of this design.

Memory layouts:

* **RMC WMEM**: 512 × 256 bits. Word k holds channels 4k..4k+3 for all 16
  columns, as nibble `(4c+i)`. The memory holds up to K = 2048 channels per
  pass.
* **Quant cache**: 32 × 512 bits, one word per base group. Token r uses
  bits `[32r+15:32r]` for its FP16 BSF. Bits `[32r+16+2s +: 2]` hold the
  ESSF of sub-group s.

BSF and ESSF values are written by software together with the quantized
data. This RTL has no online quantizer.

## Low-Rank Vector Core and the SVD-MP bit-slice schedule

`lvc.sv` has 16 lanes of `bitslice_pe`, each with fan-in 4, for 64
multipliers in total. The 16 lanes produce 16 outputs. In an L1 projection
these are the rank-16 outputs; in an L2 projection they are 16 output
channels. The sensitive channels are placed first, because weights are
reordered offline. For each token, the core runs two phases:

| phase | activations | weights | cycles per 4 channels | slices |
|---|---|---|---|---|
| sensitive | INT16 | INT8 | 4 | A[7:0]·W[3:0] ≪0, A[7:0]·W[7:4] ≪4, A[15:8]·W[3:0] ≪8, A[15:8]·W[7:4] ≪12 |
| other | INT8 | INT4 | 1 | A·W |

Every multiplier is 9×5 bits. Sign handling works as follows:

* MSB slices and low-precision operands are sign-extended.
* LSB slices are zero-extended.

With this rule, the four shifted products add up to exactly the signed
INT16×INT8 product. One
token takes `hpch + (nch − hpch)/4` cycles, plus 3 cycles of pipeline
latency per pass.

Activations reach the LVC as FP32 values and are aligned on the fly
(`svdmp_align.sv`). Each token has one exponent maximum per phase, taken
from a table. The aligned integer is `trunc(x·2^(F+127−emax))`, saturated,
with F = 14 in the INT16 phase and F = 6 in the INT8 phase. At the end of a
phase, the 16 integer sums are scaled by `2^(emax−127−F)·wscale` and added
into the FP32 row of that token. The aggregation core writes the exponent
maxima of every result row next to the result. The next layer can therefore
align that result without recomputing the maxima.

Buffer sizes limit one LVC pass:

* `ntok · nch ≤ 256` FP32 entries in the activation buffer (32 words of 8
  entries; token t, channel c sits at entry `t·nch + c`).
* `nch ≤ 64` weights per lane in the 1 KB WMEM (16 words × 512 bits).

Longer projections run as several passes with `lvc_clear = 0`, and the
passes accumulate in FP32. For example, an L1 projection with K = 4096 and
128 sensitive channels takes 2 all-sensitive passes followed by
low-precision passes.

## Heterogeneous core and aggregation

`hetero_core.sv` loads its buffers and its `core_cfg_t` word through one
region-decoded write port. On `go` it starts the RMC and the LVC together,
either or both. When every enabled engine has finished, `aggr_core` reads
both FP32 tiles row by row and writes them to IOMEM at `out_addr`:

* Words 0..31 hold `rmc + lvc`, with 8 lanes per word and two words per
  token.
* Word 32 holds the exponent maxima of each token. Bits `[16t+7:16t]`
  cover lanes `[0, aggr_hp)` and bits `[16t+15:16t+8]` cover the rest.
  This is the same format as the LVC exponent table.

The output therefore has the same layout as the LVC input table.

## Arithmetic conventions (this design's own)

FP32 add, multiply and conversion are combinational functions in
`sevedo_pkg`. They truncate toward zero, flush denormals to zero, saturate
on overflow and do not produce NaN or Inf. This is enough for the values
that occur and keeps the logic small. It is not IEEE-exact, so the
testbenches compare results against a real-valued model with a relative
tolerance.

## Where the design departs from or goes beyond the description

* The aggregation core, NoC, top controller, cluster arbitration, all
  memory word layouts, the descriptor format and the address map are only
  named in the published description. Their designs here are this
  design's own.
* No online HGQ quantizer is built. BSF and ESSF are supplied with the
  weights and the activation stream. The same applies to the exponent
  maxima that the LVC uses for its first input.
* The SIMD core and the external interfaces are not built. The top level
  exposes their NoC ports instead. Anything left to the SIMD core is
  therefore not done: softmax, normalization, attention score products, and
  the sum of residual partial outputs when K > 2048.
* The 250 MHz target and the power and area figures are not checked.

## Simulating

Every testbench in `tb/` checks its own results. It prints
`TB_RESULT checks=N failures=M` and then calls `$finish`. With Verilator 5:

```
verilator --binary --timing --top-module tb_rmc -Wno-fatal \
    rtl/sevedo_pkg.sv tb/tb_ref_pkg.sv tb/tb_layer_pkg.sv rtl/*.sv tb/tb_rmc.sv
./obj_dir/Vtb_rmc
```

`tb_ref_pkg` holds the real-number reference helpers. `tb_layer_pkg` builds
a random SVD-split layer tile and its real-valued expected result. Block
testbenches: `tb_tensor_pe`, `tb_hgq_unit`, `tb_fp_accum`, `tb_sram_sp`,
`tb_bitslice_pe` (random and extreme INT16×INT8 and INT8×INT4 operands), `tb_svdmp_align`,
`tb_rmc`, `tb_lvc` (also checks the cycle count of each phase),
`tb_aggr_core`, `tb_hetero_core`, `tb_core_cluster`, `tb_noc` and
`tb_top_ctrl`.

`tb_sevedo_top` runs the whole chip at its default size. It loads 16 layer
tiles (one per core) into GMEM, including an HGQ residual and an SVD-MP
low-rank part per tile. The top controller copies the data into the four
clusters, starts them, waits, and copies the results back. At the same
time, the external ports add NoC traffic. All 16 tiles are checked against
the model. The testbench also counts the mechanisms it exercises and counts
a failure for any that never happened:

* NoC conflicts
* IOMEM stream stalls
* contended result writes
* non-zero ESSF shifts
* precision phase switches

The run takes about two minutes in Verilator.

# Hybrid systolic array accelerator for edge LLM inference

Running a large language model on an edge device has two phases that pull hardware in opposite
directions:

- **Prefill** processes the whole prompt at once. It is a matrix-matrix multiplication (MMM), it
  is limited by compute, and it rewards data reuse: a systolic array does it efficiently.
- **Decode** produces one token at a time. It is a matrix-vector multiplication (MVM) with batch
  size one, and it is limited by DRAM bandwidth. A conventional 2-D systolic array fills only one
  row and leaves most PEs idle. Vector units stay busy but lose the reuse that makes prefill cheap.

This design is a *hybrid systolic array* (HSA): 256 PEs that form a 16x16 output-stationary
systolic array in MMM mode and four independent 4x16 clusters in MVM mode. Decode weights are
stored as MXINT4: 4-bit elements with a shared 4-bit power-of-two scale per group of 16 output
channels. This halves weight traffic relative to INT8. The power-of-two dequantisation is folded
into the array: a 2-bit shifter sits at the top of each column, and the choice of PE row gives
the rest of the shift, so no dequantisation multipliers are needed. A post-processing unit (PPU)
requantises results and contains two optimised units:

- an RMSNorm whose normalisation factor is folded into the *next* layer's scale, so it needs no
  buffer and adds no latency;
- a RoPE unit that computes the sines and cosines of the next token position with its own
  rotation multipliers, instead of loading them from DRAM.

The SystemVerilog here implements all of the above, at the sizes of the reference
configuration: 4 clusters, 16x16 PEs, a 66 kB activation SRAM, 16 kB of weight SRAM per
cluster, and 128 RoPE angles.

## Block structure

```
                 host fill ports (stand in for DRAM)
                   |            |              |
            +------v-----+  +---v----+   +-----v------+
            | act SRAM   |  | Sw buf |   | controller |  hsa_ctrl
            | 66 kB      |  | 4b x4  |   +-----+------+
            +--+------^--+  +---+----+         | addresses, valid, clear/shift
               |      |         |              |
   act word    |      | write-  |  Sw[3:0] per cluster
  (128 bit)    |      | back    |              |
            +--v------+---------v--------------v-------------------+
            |  hsa: mode mux  multicast (MMM) / broadcast (MVM)    |
            |  PC0  wgt SRAM 16 kB | 16 shifters | bucket sel | 4x16 PE |
            |  PC1  ...   (weights flow down from PC0 in MMM)     |
            |  PC2  ...                                           |
            |  PC3  ...        drain: right edge (H) / bottom (V)  |
            +------------------------+-----------------------------+
                                     | 16 x acc   or   4 x 16 MVM results
                          +----------v-----------+
                          | PPU: requant  ->  x gamma / sum sq -> sigma^-1 -> S*
                          |      ->  RoPE (Embed / Update, angle memory)
                          +----------+-----------+
                                     v  out_* (16 x INT8), optional write-back
```

| File | Module | Role |
|---|---|---|
| `rtl/hsa_pkg.sv` | package | sizes, number formats, `mode_e`, `drain_e`, `rope_mode_e` |
| `rtl/pe.sv` | `pe` | 8x8 MAC, output-stationary accumulator, systolic pass-through, drain shift |
| `rtl/mx_shifter.sv` | `mx_shifter` | 16 MXINT4 -> INT8 shifters (`Sw[1:0]`) |
| `rtl/bucket_selector.sv` | `bucket_selector` | `Sw[3:2]` -> one-hot row enable |
| `rtl/pe_cluster.sv` | `pe_cluster` | one 4x16 cluster with weight SRAM, skew, shifters, selector, MVM combiner |
| `rtl/sram_1rw.sv` | `sram_1rw` | single-port synchronous SRAM (activation, weight, Sw buffer) |
| `rtl/hsa.sv` | `hsa` | four clusters, activation multicast/broadcast, drain mux |
| `rtl/hsa_ctrl.sv` | `hsa_ctrl` | operation sequencer |
| `rtl/ppu_requant.sv` | `ppu_requant` | `sat8(acc*S + B)` |
| `rtl/rmsnorm_unit.sv` | `rmsnorm_unit` | layer-fused RMSNorm |
| `rtl/rope_unit.sv` | `rope_unit` | rotary embedding with on-line angle update |
| `rtl/hsa_accel.sv` | `hsa_accel` | top level |

## The MMM dataflow (prefill)

A 16x16 output tile `C = A x W` is computed with `A` holding 16 tokens by K and `W` holding K
by 16 output channels. Only cluster 0 reads its weight SRAM. Each cycle it reads weight row `k`:
16 INT8 values, one per column. The weights then move down through all 16 PE rows, crossing the
cluster boundaries through the per-column "from upper cluster" mux. The activation SRAM word `k`
holds `A[0..15][k]`, and byte `R` is multicast to PE row `R`. Each PE adds its product into its
own accumulator (output stationary).

The operands are skewed in the usual way. Column `c`'s weight is delayed `c` cycles and row
`R`'s activation `R` cycles, so PE `(R, c)` sees step `k` at cycle `k + R + c`. The last product
lands 31 cycles after the last SRAM read. The array is then drained in 16 cycles, with every
accumulator shifting one PE per cycle:

- **horizontal** (`DRAIN_H`): each cycle the right-hand column leaves the array. This gives one
  output channel for the 16 tokens, column 15 first.
- **vertical** (`DRAIN_V`): each cycle the bottom row leaves. This gives one token's 16 output
  channels, row 15 first. This is the *transposed* output.

A horizontally drained vector has exactly the layout of an activation word, so it can be written
back as the next layer's input.

## The MVM dataflow with MXINT4 (decode)

In MVM mode each cluster works on its own 16 output channels: cluster `p` holds channels
`16p .. 16p+15`. All four clusters receive the same activation element `x[k]` each cycle,
broadcast from byte `k mod 16` of activation word `k/16`. The weights for step `k` are sixteen
4-bit elements `w[k][c]` and one 4-bit scale `Sw[k]` per cluster (group size 16 along the output
channel). The value they stand for is `w * 2^Sw`, with `Sw` between 0 and 15.

The shift is split into two parts:

```
Sw = 4*Sw[3:2] + Sw[1:0]
w * 2^Sw = (w << Sw[1:0]) * 2^(4*Sw[3:2])
```

- `Sw[1:0]` is applied by the column shifter. The 4-bit value is sign-extended and shifted left
  by 0..3, which still fits in 8 bits. For example, `Sw[1:0] = 3` gives
  `{w[3], w[3:0], 3'b000}`.
- `Sw[3:2]` is applied by *choosing the PE row*. The bucket selector enables only row
  `i = Sw[3:2]` of the cluster for this step. Row `i` therefore collects only products whose
  remaining weight is `2^(4i)`.

After the K steps each column holds four partial sums, `Psum_0 .. Psum_3`, and

```
out[c] = Psum_0 + 2^4 Psum_1 + 2^8 Psum_2 + 2^12 Psum_3
```

A 4-cycle vertical drain that stops at the cluster boundary delivers the partial sums bottom row
first. The cluster's combiner evaluates the sum above by Horner's rule, `acc = acc*16 + bottom`,
so dequantisation costs one shifter per column and one shift-add per column at the end.

The same skewed links are used as in MMM: the enable travels along the row with the activation,
and the weight travels down the column. Only one row in four accumulates in any cycle. The other
rows are gated by the enable, which synthesis can turn into clock gating.

An MVM pass of K steps produces 64 results in K + 29 cycles:

| Phase | Cycles |
|---|---|
| clear | 1 |
| issue | K |
| pipeline wait | 19 |
| drain | 4 |
| output | 4 |

The results leave as four 16-lane vectors, one per cluster.

## Post-processing

Every drained vector, 16 lanes, goes through three registered stages, one cycle each.

**Requantisation** (`ppu_requant`). It computes `y = sat8(round(acc * S / 2^24) + B)` per lane. `S` is an
unsigned Q8.24 scale. `B` is a signed integer bias per lane. `S` is either the static
`scale_i` or the fused scale `S*` kept from the last normalisation (`use_fused_i`).

**Fused RMSNorm** (`rmsnorm_unit`). RMSNorm is `y / sigma * gamma + beta`, with
`sigma = sqrt(mean(y^2))`. Normally the whole vector has to be buffered until `sigma` is known.
Here the factors are reordered:

```
X_{n+1} = Y_n * gamma * sigma^-1 + beta
Y_{n+1} = W_{n+1} (Y_n * gamma) * (sigma^-1 * S_{n+1}) + W_{n+1} beta S_{n+1}
        = W_{n+1} Y*  *  S*                             + B_{n+1}
```

So only `Y* = Y * gamma` is applied on the fly: gamma is Q4.12, with rounding and saturation to
INT8. `Y*` can be written straight back as the next layer's input. At the same time the unit
accumulates `sum(y^2)` over the vector. On the vector's last beat (`norm_close_i`) it works out,
bit-serially:

1. the mean, `sum >> log2_dim` (the dimension must be a power of two);
2. `sigma` in Q8.8, from a 16-step square root;
3. `sigma^-1` in Q.24, from a 33-step restoring division;
4. `S* = sigma^-1 * s_next_i`.

`S*` is ready 53 cycles after the last beat. The next layer's MACs (thousands of cycles) hide
this latency, and that layer then uses `S*` as its requantisation scale. `B_{n+1}` is a constant
that can be computed off-line; it enters as the requant bias. No epsilon is added, and
`sigma = 0` saturates `sigma^-1`.

Each token has its own `sigma`, and which lanes belong to which token depends on the phase:

- **Decode (`norm_per_lane_i = 0`).** Every lane of every vector belongs to the single token. The
  unit keeps one sum and gives one `S*`, copied to all 16 lanes.
- **Prefill (`norm_per_lane_i = 1`).** The MMM is drained horizontally, so lane `l` of every
  vector is token `l`. The unit keeps 16 sums. It then runs the same serial square-root/divide
  datapath once per lane, one lane after another, giving `S*[0..15]` after 16 x 53 = 848 cycles.

In the next layer, requant applies `S*` as follows:

- horizontal drain: lane `l` is scaled by `S*[l]`;
- vertical drain: each vector is one token `t`, so all lanes are scaled by `S*[t]`.

**RoPE** (`rope_unit`). Lanes `2j, 2j+1` form pair `j` and are rotated by angle `m * theta_i`.
The angle memory holds four values for each of the 128 angles `i`:

- `sin theta_i` and `cos theta_i`, preloaded;
- `sin m theta_i` and `cos m theta_i` for the current token `m`, updated on chip.

All values are Q2.22. One block of multipliers and adders computes
`a = p*c - q*s, b = q*c + p*s` in both modes:

| Mode | `(p, q)` | `(c, s)` | Result |
|---|---|---|---|
| Embed | `(x_n, x_n+1)` | `(cos m theta, sin m theta)` | rotated pair, saturated to INT8 |
| Update | `(cos m theta, sin m theta)` | `(cos theta, sin theta)` | `(cos (m+1) theta, sin (m+1) theta)`, written back |

Update mode uses the angle-addition identities and advances all 128 angles in 16 cycles, 8 per
cycle. The angle word used by a vector is `rope_word_base_i` plus the cluster index (in MVM).

## Using the top level (`hsa_accel`)

**Memory layouts.** All SRAM words are 128 bits.

| Memory | MMM | MVM |
|---|---|---|
| activation | word `k` = 16 tokens' element `k`, byte = token | word `k/16`, byte `k mod 16` |
| weight (cluster `p`) | word `k` = 16 INT8 weights, byte = column (cluster 0 only) | word `k/2`, half `k mod 2`, nibble = column |
| Sw buffer | unused | entry `k`, nibble `p` = `Sw` of cluster `p` |

**An operation.** Fill the SRAMs through the `act_*`, `wgt_*` and `sw_*` ports while `busy_o` is
low. An assertion checks this. Then pulse `start_i` with `mode_i`, `drain_dir_i`, `k_len_i`
(1 to 8191) and the three base addresses. The PPU settings (`scale_i`, `bias_i`, `gamma_i`,
`norm_*`, `rope_*`) are read while results flow and should be held steady. Results come out on
`out_valid_o`, `out_idx_o` and `out_data_o[16]`:

- `out_idx_o` is the drained column (H) or row (V), 15 first, or the cluster (MVM).
- With `wb_en_i`, each result is also written to activation word `wb_base_i + out_idx_o`.

`done_o` pulses when everything, including an `S*` computation, has finished.

Array timing, plus 3 PPU cycles:

| Operation | Cycles |
|---|---|
| MMM | K + 49 |
| MVM | K + 29 |
| deferred (see below) | K + 33 (MMM) / K + 21 (MVM) |

**Long reductions.** One weight-SRAM fill holds K = 1024 (MMM) or 2048 (MVM). A longer reduction
runs as several operations:

- every part except the last is run with `defer_drain_i` and stops before the drain;
- every part except the first is run with `keep_i`, so the accumulators are not cleared and keep
  their partial sums.

Between parts, the SRAMs can be refilled.

**RoPE.** Preload `sin/cos theta_i`, and set `sin/cos m theta_i` to the first position
(`0` and `1.0` = `1<<22`), through `rope_pre_*`. After each token, pulse `rope_upd_i`.

## Sizes and number formats

| Item | Value | Origin |
|---|---|---|
| PE clusters x rows x columns | 4 x 4 x 16 = 256 PEs | reference design |
| activation SRAM | 4224 x 128 bit = 66 kB | reference design (a 4096-wide, 16-token tile is 64 kB) |
| weight SRAM | 1024 x 128 bit = 16 kB per cluster | reference design |
| Sw buffer | 2048 x 16 bit | own choice |
| RoPE angles | 128 (head dimension 256) | reference design |
| activations / MMM weights | INT8 | reference design |
| MVM weights | MXINT4 + 4-bit shift per 16 outputs | reference design |
| PE accumulator | 32 bit; MVM result 44 bit | own choice |
| requant scale, `S*` | Q8.24 (unsigned, 32 bit) | own choice |
| `sigma` / `sigma^-1` | Q8.8 / Q.24 (33 bit) | own choice |
| gamma | Q4.12 | own choice |
| RoPE angles | Q2.22 (24 bit) | own choice |
| PPU width | 16 lanes per cycle | own choice |

## Where this RTL departs from, or adds to, the reference description

- **Operand skew, drain mechanics, SRAM word layouts, the controller and its timing** are this
  design's own. The reference design gives the array organisation, the mode muxes, the shifters,
  the bucket selector, the row weighting `2^(4i)` and the 16-cycle drain, but not these details.
- **The 4-bit shift is taken as 0..15.** The reference quantiser limits group shifts to
  [-9, +5] and keeps a per-tensor scale. Here the offset is assumed to be folded into that scale,
  so a zero `Sw` means the smallest group.
- **`Sw` storage.** The reference design shows a 4-bit `Sw` source feeding all clusters. Here the
  scales come from a separate buffer.
- **Per-token RMSNorm in prefill.** The reference design removes a norm buffer sized for 16 tokens,
  so `sigma` is taken per token. Sharing one serial root/divide datapath between the 16 lanes is
  this design's own choice.
- **PPU.** The stage order, number formats, the write-back path, and RoPE being applied to
  drained vectors are assumptions. RoPE in MMM with vertical drain rotates all 16 tokens of a
  tile with the same position, so per-token positions in prefill need one tile per position.
- **Activation functions.** The reference PPU also provides non-linear activation functions, but
  which ones and how is not specified, so none is built.
- **DRAM.** The DRAM (DDR5 in the reference evaluation) and its interface are outside the design;
  plain fill ports replace them.
- **SRAMs and clock gating.** SRAMs are behavioural arrays with a one-cycle read, standing in for
  compiled macros. Clock gating appears as register enables.

## Verification

Each module has a self-checking testbench in `tb/`, named `tb_<module>`. Each one compares the
module against an independent software model and prints `TB_RESULT checks=N failures=M`:

| Testbench | What it checks |
|---|---|
| `tb_pe` | random MACs with enable; pass-through; shift; clear |
| `tb_mx_shifter` | exhaustive: all 4-bit values x all shifts |
| `tb_bucket_selector` | exhaustive |
| `tb_sram_1rw` | random write/read |
| `tb_pe_cluster` | MMM with both drains; weight hand-down; MVM against `sum x*w*2^Sw` |
| `tb_hsa` | full 16x16 MMM, both drains, with drain timing; MVM on all four clusters |
| `tb_hsa_ctrl` | cycle-exact address sequences, fill wait, drain lengths, total latency, split reductions |
| `tb_ppu_requant` | random values including saturation |
| `tb_rmsnorm_unit` | `Y*` bit-exact; `S*` within 0.5 % of a real-valued model, whole-vector and per-lane; latency; all-zero token |
| `tb_rope_unit` | 25 token positions against exact `m*theta_i` within 1 LSB; Update takes 16 cycles |
| `tb_hsa_accel` | end-to-end at full size (see below) |
| `tb_retnet_slice` | slices of a RetNet-1.3B layer at full memory capacity (see below) |

`tb_hsa_accel` runs the top at its default sizes through this sequence:

1. MMM with write-back;
2. MMM with transposed drain;
3. MMM split into two operations;
4. MMM with per-token RMSNorm, then the same MMM with the per-token fused scales, drained both
   ways;
5. an MVM with fused RMSNorm;
6. two MVMs using the fused scale, with RoPE at positions 0 and 1 and an Update in between.

It checks every output and counts each mechanism. It takes a few seconds.

`tb_retnet_slice` runs pieces of a RetNet-1.3B layer. It uses that model's published sizes:
model width 2048, FFN width 4096, head dimension 256. The pieces are:

1. a prefill tile with K = 1024, which fills the weight SRAM;
2. the FFN down projection for 64 outputs, K = 4096, run as two split operations with the
   memories refilled in between;
3. a query projection with RoPE at token position 7, reached through seven Update passes.

Run any of them with Verilator 5, from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_hsa_accel \
    -y rtl -y tb +libext+.sv rtl/hsa_pkg.sv tb/tb_hsa_accel.sv
./obj_dir/Vtb_hsa_accel
```

Simulation is two-state: every register that is read is reset, and SRAM contents are written
before they are read.

**What is not verified:**

- gate-level timing at the 500 MHz target;
- power;
- behaviour when the host ports are used while `busy_o` is high (forbidden by an assertion);
- complete model layers. Only the slices above are run: a whole layer repeats them many times
  with different data.

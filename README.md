# APSQ accelerator: INT8 partial sums with additive quantization

In a weight-stationary (WS) or input-stationary (IS) DNN accelerator, a
matrix product is computed one input-channel tile at a time. Every
intermediate partial sum (PSUM) goes out to an on-chip buffer and comes back
again. With INT8 weights and activations those PSUMs need 32 bits, so the
PSUM traffic, not the arithmetic, dominates the energy. This design stores
every PSUM as **INT8** with a power-of-two scale. It does so by folding the
accumulation into the quantizer ("additive PSUM quantization", APSQ): the
running sum is dequantized, the new PSUM tile is added, and the result is
quantized again. So the stored INT8 value always stands for the whole
accumulation so far. Re-quantizing at every step costs accuracy. A *group
size* `gs` (1 to 4) therefore sets how often it happens. Between APSQ steps,
PSUM tiles are quantized on their own and parked in separate banks. The next
APSQ step adds up the whole group at once. A reconfigurable engine with four
INT8 PSUM banks and a small adder tree does this for any `gs` from 1 to 4.

The RTL is SystemVerilog (IEEE 1800-2017). It can be synthesized, and it
comes with self-checking testbenches for every module.

## Arithmetic

Let `T_p(i)` be the 32-bit PSUM tile produced from input-channel tile `i`
(`i = 0 .. np-1`, `np = ceil(Ci / Pci)`). Each tile index has its own scale
`alpha_i = 2^e_i`. The host supplies it as the exponent `e_i`, in integer
PSUM units. Quantization is `Q(x) = clip(round(x / 2^e), -128, 127)`, done
with a right shift. Ties round up. Dequantization is `q * 2^e`, done with a
left shift.

With group size `gs`, tile `i` is processed as follows:

| tile | operation | stored where |
|---|---|---|
| `i mod gs == 0`, or `i == np-1` | **APSQ**: `AP = Q(T_p(i) + sum of dequantized group members)` | bank `gs-1` (or output, if `i == np-1`) |
| otherwise | **PSQ**: `P = Q(T_p(i))` | bank `(i mod gs) - 1` |

The group members of an APSQ step are the previous APSQ result and the PSQ
tiles stored since it. Tile 0 has no members (it is treated as zero). The
last tile `np-1` always does an APSQ step, even when its group is short, and
its INT8 result leaves the engine with exponent `e_{np-1}` as the output
tile. For `gs = 1` every tile is an APSQ step on bank 0. For `gs = 4` the
APSQ result sits in bank 3, and three PSQ tiles follow in banks 0, 1 and 2.
The next APSQ step then reads all four banks at once.

## Block structure

```
 host ── start/cfg/alpha ──► top_ctrl ──────────────┐
                               │ rd addr            │ addr/tag/last, gs, np
 DRAM ── fill ──► ifmap_buffer ┤                    ▼
          fill ──► weight_buffer ──► pe_array ──► rae ──► INT8 output tiles ──► DRAM
                                  (Po x Pco PEs,   (Reconfigurable
                                   Pci-wide dot)    APSQ Engine)
```

| module | role |
|---|---|
| `apsq_accel` | top: wires the blocks below; host and DRAM are ports |
| `top_ctrl` | latches a layer's configuration and runs the WS or IS loop nest |
| `ifmap_buffer` | 256 KB; one word = one `Po x Pci` INT8 ifmap tile |
| `weight_buffer` | 128 KB; one word = one `Pci x Pco` INT8 weight tile |
| `pe_array`, `pe` | `Po` lines of `Pco` PEs; each PE is a `Pci`-wide INT8 dot product; one 32-bit `Po x Pco` PSUM tile per cycle |
| `rae` | Reconfigurable APSQ Engine: pipeline of the APSQ/PSQ step |
| `rae_ctrl` | group counter, `s0/s1/s2` selects, scale-exponent register list, bank bookkeeping |
| `psum_buffer` | four INT8 PSUM banks of 512 words x 128 bytes (64 KB each) |
| `dequantizer` | `<<` shifter per bank, with a zeroing enable |
| `rae_adder_tree` | two-stage adder pipeline that sums 1 to 4 banks |
| `quantizer` | `>>` shifter with rounding and INT8 clipping |
| `apsq_pkg` | widths, the `gs -> s0, s1` table, the shared quantize/dequantize functions |

The default parameters are the evaluated configuration: `Po = 16`,
`Pci = Pco = 8`, 256 KB ifmap buffer, 128 KB weight buffer and a 256 KB
output buffer. Here that output buffer is the four PSUM banks.

## The Reconfigurable APSQ Engine

The engine takes one PSUM word per cycle. A word is one position of a PSUM
tile: 128 lanes of 32 bits (`Po x Pco`). All lanes go through the same
datapath in parallel:

```
            ┌──── bank0 ──<< e(b0)──┬───────────────────────────── s0=00 ┐
 read addr ─┼──── bank1 ──<< e(b1)──┴─(+)── a01 ─┬──────────────── s0=01 ┤
            ├──── bank2 ──<< e(b2)──┬────── s1=0 ┤                       ├─► group sum
            └──── bank3 ──<< e(b3)──┴─(+)── s1=1 ┴─(+)──────────── s0=10 ┘
                                     stage 1        stage 2
 PSUM word ───────────────────────────────────────────(+)◄── s2 ? group sum : 0
                                                        │
                                                  >> e_i, round, clip
                                                        │
                                  write bank wr_bank ◄──┴──► output (last tile)
```

Configuration table (`apsq_pkg::rae_cfg_lookup`):

| gs | 1 | 2 | 3 | 4 |
|---|---|---|---|---|
| s0 | 00 | 01 | 10 | 10 |
| s1 | – (0) | – (0) | 0 | 1 |

**Group counter and `s2`.** `rae_ctrl` keeps a counter that runs
`0 .. gs-1` and wraps. It starts at `gs-1`. It advances once per PSUM tile:
on the tile's last word, not on every word. Its value is the bank the
current tile is written to. `s2 = (counter == gs-1)`, forced to 1 on the
last tile, selects APSQ (add the group sum) or PSQ (add 0).

**Bank bookkeeping.** Every bank has a valid bit and records the tile index
last written to it. A bank that holds no member of the current group has its
dequantizer output forced to zero. This covers the first tile of an output
and a short final group. The tile index selects the bank's dequantization
exponent from the register list. After an APSQ step, only the bank it wrote
stays valid.

**Pipeline and timing.**

| cycle | action |
|---|---|
| 0 | word accepted; all four banks read at its address; selects and exponents sampled |
| 1 | banks dequantized and masked; adder stage 1 |
| 2 | adder stage 2 and the `s0` mux |
| 3 | `s2` mux, add the PSUM word, quantize; write the bank at the end of the cycle |
| 4 | for the last tile, `o_valid` with the INT8 output word |

All `gs` settings take the same 4 cycles. Word throughput is one per cycle.

**Read-after-write stall.** A word must not read an address whose new value
is still in the pipeline. `in_ready` drops while the same address is in
stages 1 to 3. Bank addresses run through a whole tile before they repeat.
So this only happens when a tile has fewer than four words, for example a WS
layer with fewer than four output-pixel tiles, such as one-token decode. Back in the accelerator, the
stall freezes the whole pipeline.

## Dataflow and data layout

`top_ctrl` runs one layer. The host sets `cfg_np = ceil(Ci/Pci)`,
`cfg_nco = ceil(Co/Pco)`, `cfg_nm = ceil(pixels/Po)`, the group size and the
dataflow, and writes `e_0 .. e_{np-1}` through `alpha_we/idx/val`:

* **WS** (`DF_WS`): `for co { for ci { for m { ... } } }`. The weight tile
  `(co, ci)` is loaded on the first word of each `ci` step and reused for all
  `m`. The engine's bank address is `m`.
* **IS** (`DF_IS`): `for m { for ci { for co { ... } } }`. The ifmap tile
  `(m, ci)` is loaded once and reused for all `co`. The bank address is `co`.

In both orders the `ci` loop is outside the bank-address loop. So all words
of PSUM tile `i` reach the engine before any word of tile `i+1`, which is
what the group counter needs.

Buffer layout: ifmap word `m*np + ci` holds `x[m*Po + po][ci*Pci + k]` at
`[po][k]`. Weight word `co*np + ci` holds `w[ci*Pci + k][co*Pco + c]` at
`[k][c]`. An output word `(o_co, o_m)` holds `[po][c]` for output pixel
`o_m*Po + po` and channel `o_co*Pco + c`. Its real value is
`o_data * 2^o_shift`, times the product of the weight and activation scales.
The output exponent is the one of the last tile, `e_{np-1}`.

Timing: the first word reaches the engine three cycles after `start`. After
that the engine takes one word per cycle unless it stalls. `done` pulses
about six cycles after the last word. A layer without stalls takes
`nco*np*nm` cycles plus this constant.

Limits at the default sizes: `np <= 2048` (the length of the exponent
register list). WS needs `nm <= 512`, IS needs `nco <= 512` (bank depth).
The ifmap must fit in `nm*np <= 2048` words and the weights in
`nco*np <= 2048` words. Bigger layers are cut by the host into runs over
subsets of `m` or `co`. Each run is a complete accumulation, so nothing is
lost. Splitting `Ci` across runs is not supported. In IS, fewer than four
output-channel tiles per run means every word waits for the previous one,
so such runs take up to four cycles per word.

## How the paper's workloads map

Layer sizes below come from the public model definitions, not from the
paper. The paper gives the models, 128 tokens for BERT-Base, 512x512 inputs
for the segmentation models, and a 4096-token sequence for LLaMA2-7B.

* **BERT-Base** (hidden 768, FFN 3072, 128 tokens): the largest `np` is
  3072/8 = 384, well within the 2048-entry exponent list. The FFN-down ifmap is 8 x 384 = 3072
  words, so it is run in two `m` halves. All linear layers fit.
* **Segformer-B0**, **EfficientViT-B1**: channel counts of at most 1024
  (`np <= 128`). The 16384-token stages are cut into `m` chunks of
  `2048/np` tiles. Only the matrix-product layers (pointwise convolutions,
  linear layers, attention products) run on this array. Depthwise and
  spatial convolutions, softmax and normalisation are not part of the
  design.
* **LLaMA2-7B** (hidden 4096, FFN 11008): the FFN down-projection has
  `np = 11008/8 = 1376`. In decode (one token) the ifmap takes 1376 words,
  and one output-channel tile of weights takes 1376 words (88 KB). So it
  runs one `co` tile per run. For one-token generation the LLM is run
  with `Po = 1` and `Pci = Pco = 32`: the same 1024 MACs per cycle, shaped
  for a single row. The RTL takes these as parameters unchanged. Then
  `np = 4096/32 = 128` for the attention and gate/up projections and
  `np = 11008/32 = 344` for the down-projection. A weight word is now
  32 x 32 bytes = 1 KB. So one output-channel tile of down-projection
  weights is 344 KB, more than the 128 KB weight buffer holds, because
  weights are not streamed from DRAM during a run. The decode testbench
  therefore uses a 512-word (512 KB) weight buffer.
* **Decode throughput.** With one token there is one output word per
  output-channel tile. In WS every tile of a run then writes the same PSUM
  address, and the read-after-write stall allows only one tile per 4
  cycles. In IS the bank address rotates over the `co` tiles. A run with 4
  or more of them keeps one tile per cycle. Measured on q_proj with 4
  output tiles: 2053 cycles in WS and 520 cycles in IS for 512 tiles.

## Departures and choices not fixed by the source description

* Rounding of ties (up), the 5-bit non-negative exponent and 32-bit
  wrap-around in the adders are choices of this design. The source fixes
  only round-to-nearest and the INT8 clipping range.
* The exponent register list holds 2048 entries, matching the ifmap buffer
  depth. The source does not give its size.
* The PSUM banks are taken to be the 256 KB output buffer, split four ways.
  The bank size itself is not specified.
* The published block diagram labels the bank dequantizers `alpha_{i-1}` to
  `alpha_{i-4}`. Here each bank uses the exponent of the tile it actually
  holds. For `gs = 1` that is the same thing. For `gs = 4` it follows the
  text's bank order: PSQ tiles in banks 0 to 2, APSQ result in bank 3.
* The text describes `gs = 4` as "four rounds of PSUM quantization" before an
  APSQ step. The grouping algorithm has three PSQ tiles plus the carried APSQ
  result per group of four. The algorithm is what is built.
* The per-bank valid bits, the forced APSQ on the last tile, the pipeline
  registers, the handshake and the read-after-write stall are this design's
  own.
* The top controller's loop nests, buffer layouts and host ports are this
  design's own. The source only names the controller.
* The host and the off-chip DDR3 are not modelled. Their traffic appears as
  the buffers' write ports and the output-word port. PSUM spills to DRAM are
  not built. All PSUMs of a run stay in the banks.
* Area and energy numbers are not reproduced.

## Verification

Each module `X` has a testbench `tb/tb_X.sv`. It prints
`TB_RESULT checks=N failures=M` and stops itself after a watchdog time.
`tb/apsq_tb_pkg.sv` holds the reference arithmetic. It is written
independently of the RTL: quantization by floor division on 64-bit integers,
and the grouping algorithm as a list of stored (value, exponent) pairs.

* `tb_apsq_accel` runs the whole accelerator at its default sizes. It covers
  16 layers: WS and IS, `gs = 1..4`, 1 to 8 input-channel tiles, short final
  groups, stalls and clipping. It checks every output lane against the
  reference and counts each mechanism; one that never happens is a failure.
  It also checks that a layer without stalls takes one cycle per word.
* `tb_rae` checks the engine on its own, with random input gaps, the exact
  4-cycle output latency and the APSQ/PSQ step counts.
* `tb_workload_layers` runs the largest matrix-product layers of the
  evaluated models at their real channel counts (BERT-Base FFN and
  projection, Segformer-B0 decoder fuse layer, EfficientViT-B1 FFN,
  LLaMA2-7B q and FFN-down projections in decode) on the default-size
  accelerator, with random data.
* `tb_llm_decode` builds the accelerator with `Po = 1`, `Pci = Pco = 32`. It
  runs LLaMA2-7B q, gate and down projections in decode at their real depth
  (`np = 128` and 344), in WS and IS with all four group sizes. It checks
  every output lane and the engine's APSQ/PSQ step counts.
* The other testbenches cover the controller, the buffers, the PE array and
  the arithmetic blocks.

Simulate with Verilator 5, for example:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
  rtl/apsq_pkg.sv tb/apsq_tb_pkg.sv tb/tb_apsq_accel.sv --top-module tb_apsq_accel
./obj_dir/Vtb_apsq_accel
```

The testbenches use `$urandom` only and are two-state clean. Everything a
testbench reads is reset or initialised first.

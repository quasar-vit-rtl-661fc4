# A mixed-precision GEMM accelerator for quantized vision transformers

This is synthesizable SystemVerilog for the FPGA part of a vision-transformer
(ViT) accelerator. Its weights are quantized **row by row** to either 4 or 8
bits, and its activations to 6 bits. Every weight row of a layer may pick its
own precision, so one fixed array of multipliers has to serve any mix of 4-bit
and 8-bit rows without idling.

The central idea is to build only one kind of multiplier: a **4-bit weight ×
6-bit activation** unit. An 8-bit weight is split into two nibbles:

    w8 · a = ((w_hi · a) << 4) + w_lo · a        w_hi signed, w_lo unsigned

The two halves go through two ordinary 4-bit units and are recombined only
once, after accumulation. To make those 4-bit units cheap, four of them are
packed into one DSP48E2 slice. The slice's 27×18 multiplier computes four
independent 4×6 products at once, and a little logic around it packs the
operands and unpacks the products. Once the DSPs are used up, the remaining
logic holds plain LUT multipliers of the same 4-bit kind.

The rest of the design moves data around that array:

- tiles of activations and weights are double-buffered;
- partial sums are accumulated over all input channels of a layer;
- a per-channel "supernet layer scaling" (SLS) multiplier and requantisation
  to 6 bits sit on the way out;
- output tiles are written back while the next one is being computed.

LayerNorm, Softmax, GELU and the residual additions run in software on the
host processor, which shares the off-chip memory.

## 1. Number formats

| quantity | format |
|---|---|
| activation | 6-bit two's complement, stored in an 8-bit container, 16 per 128-bit word |
| 4-bit weight row | one signed nibble ("lane") |
| 8-bit weight row | two lanes: even lane = low nibble (unsigned 0..15), odd lane = high nibble (signed) |
| weights in memory | 32 nibbles per 128-bit word |
| one 4×6 product | 10 bits; the range is −480..465 (−8·−32 = 256, 15·−32 = −480, 15·31 = 465) |
| lane accumulator | 24 bits (`ACC_W`) |
| recombined 8-bit row | 28 bits (`OUTV_W`) |
| SLS scale λ | 16-bit signed, 12 fractional bits (Q4.12) |
| output | 6-bit activation: `round(v·λ / 2^(12+s))`, saturated to −32..31 |

In the output row, `s` is the per-layer `out_shift`. When SLS is bypassed, the
output is `round(v / 2^s)`.

Whether a nibble is signed matters. The low half of an 8-bit weight is
unsigned, so it must not be sign-extended before multiplication. Every
multiplier therefore takes a `wgt_signed` bit per weight, and sign- or
zero-extends the nibble to 5 bits.

## 2. Packing several products into one DSP slice

`dsp48e2_mul` models the slice as P = (A + D) × B:

- A and D are 27 bits, and the pre-adder wraps at 27 bits;
- B is 18 bits;
- P is sign-extended from bit 44 to 48 bits.

Two packing schemes are built on top of it.

### Packing factor 4 (`dsp_pack4`): 2 activations × 2 weights

    D = a1 · 2^20 + a0          (a0, a1: signed 6-bit)
    B = w1 · 2^10 + w0          (w0, w1: 5-bit after sign/zero extension)

    P = a0w0 · 2^0 + a0w1 · 2^10 + a1w0 · 2^20 + a1w1 · 2^30

    P bit   39 ........ 30 29 ........ 20 19 ........ 10 9 ......... 0
            [  a1 · w1   ][  a1 · w0    ][  a0 · w1    ][  a0 · w0   ]

Each product needs exactly 10 bits, and there is no guard bit between the
fields. When a lower field is negative, its sign extension borrows one from
every field above it. A field is therefore recovered as the 10 bits at its
offset **plus the sign bit just below it**:

    prod(a0,w1) = P[19:10] + P[9]
    prod(a1,w0) = P[29:20] + P[19]
    prod(a1,w1) = P[39:30] + P[29]

This is exact. Every true product fits in 10 bits, so the sum of everything
below a field is in [−2^(k−1), 2^(k−1)), and bit k−1 tells you whether a borrow
happened. `tb_dsp_pack4` checks all corner operands plus 40 000 random ones.

Both D fields fit in 27 bits. The largest field, `a1 · 2^20`, occupies bits
20–26. Both B fields fit in 18 bits.

### Packing factor 3 (`dsp_pack3`): 1 activation × 3 weights

    D = w2 · 2^22 + w1 · 2^11 + w0     (built in two steps: w1,w0 first, then w2)
    B = a (signed 6-bit)
    P fields of 11 bits at 0, 11 and 22, recovered with the same borrow rule.

Packing factor 3 uses fewer LUTs per product (the unpacking is simpler).
Packing factor 4 gets more products per DSP. Which one is better depends on
the ratio of DSPs to LUTs on the device.

### Choosing between them

Use these per-product costs (LUT, DSP):

| unit | LUTs per product | DSPs per product |
|---|---|---|
| packing factor 3 | 10.9 | 1/3 |
| packing factor 4 | 12.9 | 1/4 |
| LUT only | 33.3 | 0 |

`quasar_pkg::pack_choice` applies a three-case rule:

1. If the LUTs cannot even carry all usable DSPs at factor 3, use factor 3.
2. If they can carry all of them at factor 4, use factor 4, unless the LUTs
   freed by factor 3 would buy more LUT-only multipliers than the extra DSP
   products.
3. In between, compare the two totals directly.

In either case, leftover LUTs hold LUT-only multipliers. For a part with 2520
DSP slices and 274 080 LUTs (an XCZU9EG) at 70 % utilisation, the rule picks
factor 4. This is how the default of `quasar_top`'s `PACK` parameter is
computed. Setting `PACK = 3` builds the same engine around `dsp_pack3`
instead.

## 3. The GEMM engine

A linear layer computes Y[M×F] = W[M×N] · X[N×F]. Here N and M are the input
and output channels, and F is the number of tokens (197 for a 224×224 image in
16×16 patches, plus the class token).

Each cycle, `gemm_engine` takes:

- `P_F` tokens × `T_N` input channels of activations;
- a `T_M` × `T_N` tile of weight lanes.

It forms all P_F·T_M·T_N products and reduces them over T_N. The P_F × T_M
partial sums are added into one row of an accumulator memory, with one row per
group of P_F tokens. This repeats over all input tiles of the layer, including
the per-head split of the input channels. The `c_first` input marks the first
input tile and overwrites instead of adding.

The array is built from processing elements (`pe`). A PE holds one atomic unit
per input channel and an adder tree over T_N:

| PE kind | atomic unit | serves |
|---|---|---|
| `PE_DSP4` | `dsp_pack4` | 2 tokens × 2 lanes |
| `PE_DSP3` | `dsp_pack3` | 1 token × 3 lanes |
| `PE_LUT` | `lut_mul` | 1 token × 1 lane |

Tokens 0 .. P_F−P_F_LUT−1 run on DSP PEs. The last `P_F_LUT` tokens run on LUT
PEs.

**Default sizes.** T_M = 72, T_N = 16 and P_F = 8. Six token slots are on DSPs
and two are on LUTs:

| resource | count | share of the device |
|---|---|---|
| DSP slices | 72 · 16 · 6 / 4 = **1728** | 68.6 % of 2520 |
| multiplier LUTs (estimate) | 1728·4·12.9 + 72·16·2·33.3 ≈ 166 k | 60 % |

The LUT figure uses the per-product costs from section 2. It leaves room for
buffers and control, so 66 % in total is plausible.

**Drain.** `d_valid`/`d_row` reads one accumulator row. One cycle later it
appears on `o_val` with the 8-bit rows recombined. For a lane pair k that is
one 8-bit row (`w8pair[k]`):

- `o_val[2k] = (acc[2k+1] << 4) + acc[2k]`;
- `o_val[2k+1] = 0`.

**Pipeline.** Compute inputs are registered (stage 1) and written into the
accumulator on the next edge (stage 2). A drain must start at least two cycles
after the last compute row, and the control logic waits for that.

## 4. Lane map: how a row-wise mixed layer occupies the array

A layer has `w8_rows` 8-bit rows and some number of 4-bit rows. In this design
the 8-bit rows come first, two lanes each; the 4-bit rows follow, one lane each.
A layer with r8 8-bit rows and r4 4-bit rows therefore occupies 2·r8 + r4 lanes
in total, and ceil((2·r8 + r4)/T_M) output tiles. An 8-bit row may not straddle
two output tiles; this holds automatically because T_M is even.

From the lane index the control logic derives, per lane:

- the signedness of the nibble;
- whether the pair is one 8-bit row;
- the SLS table index `sls_offset + row`.

The host writes the weights to memory in this lane order. Each output row then
sits at the even lane of its pair, and odd lanes of 8-bit pairs read 0.

## 5. Dataflow, buffers and timing

    off-chip ──► tile_loader ×A_IN ──► pingpong_buf (inputs) ─┐
    memory   ──► tile_loader ×A_WGT ─► pingpong_buf (weights) ┴► gemm_engine
                                                               │ drain
                         tile_storer ◄── out_buffer (2 banks) ◄── sls_unit
                            │ ×A_OUT
                            ▼ off-chip memory

`control_logic` runs three processes concurrently, coupled only by full/empty
flags on the two input banks and the two output banks:

- **load:** fetches input tile `it` and weight tile `(mt, it)` into bank k mod 2
  as soon as that bank is empty. Tile k = mt · n_tiles + it.
- **compute:** issues ceil(F/P_F) compute rows per tile from a full bank and
  frees the bank after the last row. After the last input tile of output tile
  `mt`, it waits until output bank mt mod 2 is free, then drains the
  accumulators through SLS into it.
- **store:** writes each finished output bank to memory and frees it.

The input tile is fetched again for every output tile. A single tile costs the
largest of load-input, load-weight and compute time. One output tile costs
n_tiles of those plus the drain, and storing overlaps the next output tile.
This is the latency model the design follows:

    L_in   = ceil(T_N/16) · ceil(F/A_IN)          L_wgt = ceil(T_N/32) · ceil(T_M/A_WGT)
    L_out  = ceil(T_M/16) · ceil(F/A_OUT)         L_cmpt = ceil(F/P_F)
    L1 = max(L_in, L_wgt, L_cmpt)
    L2 = max(L1 · n_tiles + L_cmpt, L_out)
    L_tot = ceil(M/T_M) · L2 + L_out

`quasar_pkg::model_cycles` computes L_tot, and the end-to-end testbenches
compare measured run times with it. The measured time is not exactly L_tot:

- **Handshake overhead.** Memory latency and handshakes add a few cycles per
  tile.
- **Loads are not pipelined across tiles.** A loader starts a new tile only
  after the last word of the previous one has arrived. Each tile therefore
  pays the memory latency plus about six handshake cycles on top of the
  formula. With a 4-cycle memory, full-size layers measure 12–16 % above the
  model (see section 8). Keeping requests in flight across tiles would remove
  most of this.
- **Store-bound layers can beat the formula.** The output buffer has two banks,
  so output tile i+1 can be computed while tile i is still being stored. A
  store-bound layer can therefore finish up to one L_out earlier. At the
  defaults, a 197-token layer with 6 input tiles and 2 output tiles took 1408
  cycles, against a model value of 1485 (L_out = 495).

**Layer descriptor** (`quasar_pkg::layer_cfg_t`, written by the host before
`start`):

| field | meaning |
|---|---|
| `m_tiles` | number of output tiles |
| `w8_rows` | number of 8-bit rows (see section 4) |
| `n_heads` | number of heads |
| `tiles_per_head` | input tiles of T_N channels per head |
| `f` | number of tokens |
| `sls_en` | apply SLS scaling (0 = bypass) |
| `sls_offset` | first λ index of the selected subnet |
| `out_shift` | extra requantisation shift |
| `in_base`, `wgt_base`, `out_base` | base addresses |

**Memory layout** (128-bit word addresses):

    input  tile it, token f, word s : in_base  + (it·F + f)·ceil(T_N/16) + s
    weight tile k,  lane r,  word s : wgt_base + (k·T_M + r)·ceil(T_N/32) + s
    output tile mt, token f, word s : out_base + (mt·F + f)·ceil(T_M/16) + s

**Memory ports.** Each read port works in the style of an AXI read channel:

- `ar_valid`/`ar_ready`/`ar_addr` send one word address per handshake;
- words come back in order on `r_valid`/`r_data` and are always accepted.

Each write port is `w_valid`/`w_ready`/`w_addr`/`w_data`. `tile_loader` sends
item i through port i mod A, so the tile is spread evenly across the ports.
`tile_storer` does the same with tokens.

## 6. Supernet layer scaling

The network was trained as a supernet. A searched subnet uses output channels
m..n of a layer, and the block output after the attention projection and after
the second MLP layer is scaled per channel, y_c = λ_c · z_c, with the subnet's
slice λ_m..λ_n.

- **Storage and indexing.** `sls_unit` stores the whole λ table (448 entries,
  the largest embedding width of the search space). Each lane reads λ at
  `sls_offset + row`.
- **Bypass.** With `sls_en = 0`, the scale is bypassed for the other linear
  layers.
- **Requantisation.** In both cases the unit rounds to nearest and saturates to
  6 bits, so the result can be read back as the next layer's input.
- **Out-of-range index.** An index at or past the table depth reads a zero
  scale. This only happens for the padding lanes of a partly used last output
  tile.
- **Residual add.** The addition `x + λ·z` belongs to the host.

## 7. What runs elsewhere, and what is not covered

- **Host processor.** LayerNorm, Softmax, GELU and the residual additions are
  host software, and the host also sequences the layers. The memory controller
  and the DRAM are the SoC's. The top therefore exposes plain memory ports; the
  testbenches use a behavioural memory (`tb/ddr_model.sv`).
- **Attention products.** Q·Kᵀ and S·V multiply two activation matrices. The
  engine runs them as ordinary layers, one head at a time: the 6-bit key (or
  value) entries are sign-extended to 8 bits and stored as 8-bit weight rows.
  One head's Q·Kᵀ is then a layer with N = d_head inputs and M = F rows, and
  S·V one with N = F (zero-padded to whole input tiles) and M = d_head. The
  store path writes the activation format, so the host re-lays K and V out
  as weight rows; there is no hardware transpose. All these rows use the
  8-bit path, which takes twice the lanes of 4-bit weights.
- **Bit offsets.** The packing offsets in section 2 are one consistent choice;
  any layout with the same field widths works.
- **Design choices.** The following are this design's own choices:
  - tile sizes, port counts, word width and container sizes;
  - the lane order;
  - the λ format;
  - the rounding rule;
  - the two-bank output buffer;
  - the address layout.
- **Timing.** The arithmetic is written as plain combinational logic between
  registers. No attempt was made to meet 150 MHz timing. On an FPGA, the
  packed multiply would need the slice's internal pipeline registers, and the
  adder trees would need registers.

## 8. Verification

Every block has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M`, and each has a watchdog.

| testbench | what it checks |
|---|---|
| `tb_dsp48e2_mul` | (A+D)·B with 27-bit wrap, corners and random |
| `tb_dsp_pack4`, `tb_dsp_pack3` | every unpacked product against plain multiplication, signed and unsigned nibbles |
| `tb_lut_mul` | exhaustive, 64 × 16 × 2 |
| `tb_pe` | all three PE kinds, including largest-magnitude operands |
| `tb_gemm_engine` | pack-4 and pack-3 engines with LUT tokens, three accumulated tiles, 8-bit recombination, drain latency |
| `tb_sls_unit` | scaling, bypass, rounding, saturation, latency |
| `tb_pingpong_buf`, `tb_out_buffer` | both banks, multi-port writes and reads, bank isolation |
| `tb_tile_loader`, `tb_tile_storer` | every word once at the right address, port assignment, back-pressure, transfer time |
| `tb_control_logic` | the complete command stream against stand-in loaders and storer (next table) |
| `tb_quasar_top` | end to end at reduced sizes (T_M=12, T_N=20, P_F=4), four layers |
| `tb_quasar_full` | end to end with every parameter at its default, two layers (F = 197 and F = 37) |
| `tb_quasar_workload` | every parameter at its default, on full layer shapes of the large and small searched models (next table) |

`tb_control_logic` checks the command stream for:

- load addresses;
- compute row order;
- `c_first`;
- no bank overwritten early;
- drain only into a free bank;
- lane signedness, pairing and λ indices;
- store addresses;
- the `done` pulse.

`tb_quasar_top` and `tb_quasar_full` compare every output word with a reference
computed in the testbench. They also count how often each mechanism occurred,
and a mechanism that never occurs is a failure:

- load/compute overlap;
- store/compute overlap;
- memory back-pressure;
- 8-bit recombination;
- SLS and SLS bypass;
- saturation;
- several heads;
- a partial last token group.

Both also check one stall-free layer's cycle count against the latency model.
The end-to-end benches additionally check the packing-factor rule on four
device sizes.

`tb_quasar_workload` runs these full-size layers (F = 197, 4-cycle memory
latency):

| layer | N → M | 8-bit rows | tiles (in × out) | cycles | model L_tot |
|---|---|---|---|---|---|
| large: attention projection, 7 heads, SLS | 448 → 448 | 25 % | 28 × 8 | 13 771 | 11 895 |
| large: MLP fc1 | 448 → 1792 | 50 % | 28 × 38 | 63 331 | 54 645 |
| large: MLP fc2, SLS, random memory stalls | 1792 → 448 | 0 % | 112 × 7 | 55 856 | – |
| small: MLP fc1 | 240 → 960 | 25 % | 15 × 17 | 15 600 | 13 670 |
| large: Q·Kᵀ of one head (keys as weight rows) | 64 → 197 | 100 % | 4 × 6 | 3 286 | 3 465 |
| large: S·V of one head (values as weight rows) | 197 → 64 | 100 % | 13 × 2 | 2 089 | 1 845 |

All 76 850 checks pass. Q·Kᵀ writes 197 rows per token from only four input
tiles, so it is store-bound, and the two output banks let it finish under the
model, as described in section 5.

To run a testbench with Verilator 5:

    verilator --binary --timing --assert rtl/quasar_pkg.sv rtl/*.sv \
        tb/ddr_model.sv tb/tb_quasar_top.sv --top-module tb_quasar_top -Mdir obj
    ./obj/Vtb_quasar_top

Replace the last file and the top name for any other testbench; `ddr_model` is
needed only by the loader and end-to-end tests. A full-size build takes
about 40 s (more with `tb_quasar_workload`'s larger memory). `tb_quasar_full`
runs in under a second, and `tb_quasar_workload` in about 25 s.

## 9. Files

| file | contents |
|---|---|
| `rtl/quasar_pkg.sv` | widths, `layer_cfg_t`, latency model |
| `rtl/dsp48e2_mul.sv` | DSP slice arithmetic |
| `rtl/dsp_pack4.sv`, `rtl/dsp_pack3.sv` | packed 4×6 multipliers |
| `rtl/lut_mul.sv` | LUT 4×6 multiplier |
| `rtl/pe.sv` | processing element |
| `rtl/gemm_engine.sv` | PE array, accumulators, 8-bit recombination |
| `rtl/sls_unit.sv` | layer scaling and requantisation |
| `rtl/pingpong_buf.sv` | double buffer for inputs and weights |
| `rtl/tile_loader.sv` | multi-port tile reader |
| `rtl/out_buffer.sv` | two-bank output buffer |
| `rtl/tile_storer.sv` | multi-port tile writer |
| `rtl/control_logic.sv` | layer sequencer |
| `rtl/quasar_top.sv` | top level |
| `tb/ddr_model.sv` | behavioural off-chip memory |
| `tb/tb_*.sv` | testbenches |

### Changing sizes

All sizes are parameters of `quasar_top`. The engine checks its constraints at
elaboration:

- T_M must be even;
- with packing factor 4, the DSP token count P_F − P_F_LUT must be even;
- with packing factor 3, T_M must be a multiple of 6.

The largest token count is `F_MAX`. The λ table depth is `LAMBDA_DEPTH`.

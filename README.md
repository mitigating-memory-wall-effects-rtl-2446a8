# A CNN engine that generates its own weights

Most FPGA CNN accelerators are limited not by their multipliers but by how
fast weights can be brought in from DRAM. This design removes almost all
weight traffic. Every weight of a convolution filter is written as a short
linear combination of fixed binary codes:

    w[n] = sum_j  alpha_j * b_j[n],      b_j[n] in {+1, -1}

The codes `b_j` are rows of a Sylvester–Hadamard (OVSF) matrix, cropped to
the 3x3 kernel. The coefficients `alpha_j` are learnt. A filter with ratio
`rho` keeps `nv = ceil(rho * 9)` codes, so 9 weights shrink to `nv` alphas
plus a few bits of code that every filter of the layer shares. Only the
alphas and the activations have to come on chip. A generator next to the
processing engine rebuilds each weights tile on the fly, just before the
engine needs it.

The RTL follows the architecture of "Mitigating Memory Wall Effects in CNN
Engines with On-the-Fly Weights Generation" (the unzipFPGA design). It was
written independently from the paper's description. Where the paper leaves a
detail open, a concrete choice was made here; these choices are listed in
[Departures and open points](#departures-and-open-points).

## The engine and its tiles

A convolution with `N_in` input channels, `N_out` output channels and
`K x K` filters is computed as a matrix product:

- `O (R x C) = X (R x P) * W (P x C)`
- `P = N_in * K * K`
- `C = N_out`
- `R` is the number of output pixels.

The engine works on tiles of `T_R` rows, `T_P` products and `T_C` columns.

| block | role |
|---|---|
| `input_buffer` | double-buffered `T_R x T_P` activation tile, written by the host/DMA |
| `weights_buffer` | double-buffered `T_P x T_C` weight tile, written by the generator |
| `pe_array` | `T_C` PEs, each a `T_P`-wide dot product (`pe`); PE `q` owns output column `q` |
| `output_buffer` | `T_R x T_C` partial sums (output stationary); read by the host when a tile is finished |
| `engine_ctrl` | walks the tiles, hands rows and columns to PEs, runs work stealing |
| `cnn_wgen` | weight generator: `ovsf_generator`, `alpha_buffer`, `wgen_datapath` and a control unit |
| `unzip_top` | wires all of the above; host, DMA and DRAM sit outside its ports |

Tiles are visited in the order R tile, then C tile, then P tile:

```
for rt in R tiles:
  for ct in C tiles:        -- one T_R x T_C output tile
    for pt in P tiles:      -- accumulate ceil(P/T_P) products
      engine: O[rt,ct] += X[rt,pt] * W[pt,ct]
```

The engine streams the valid rows of the activation tile through the PE
array, one row per cycle. All PEs see the same row; each PE uses its own
weight column. A PE reads the partial sum of its `(row, column)` from the
output buffer. It adds its dot product, or starts from zero at the first
P tile (`pe_clear`), and writes the sum back one cycle later.

A P tile therefore takes `Rv + 2` cycles in the RUN state: `Rv` rows plus
pipeline drain. One BUBBLE cycle follows, which lets the last write land
before the next tile reads the same elements. After the last P tile, the
output tile is handed to the host with `out_ready`, `out_rt` and `out_ct`.
The host reads rows through `out_rd_row`/`out_rd_data` and frees the buffer
with `out_release`. The engine does not start the first P tile of the next
output tile until that release.

The weights generator runs the same `rt / ct / pt` loop ahead of the engine.
It fills one weights bank while the engine reads the other. Weights are
regenerated for every R tile because only one tile per bank is kept. The
weights buffer itself is a double-buffered bank pair with an
`EMPTY -> FILLING -> FULL -> EMPTY` state per bank:

- the generator claims a bank
- it commits the bank when the last subtile is written
- the engine releases the bank in its BUBBLE cycle

## Generating one weights tile

A `T_P x T_C` tile has `T_P*T_C` elements. It is flattened column by column:
element `g` is row `g mod T_P` of column `g / T_P`. Because `T_P` is a
multiple of 9, each column holds whole 3x3 filters. The flattened tile is cut
into `NS = ceil(T_P*T_C / M)` subtiles of `M` elements, where `M` is the width
of the generator's vector units.

For each subtile, the control unit issues the layer's `nv` basis vectors on
`nv` consecutive cycles:

```
for each tile (rt, ct, pt):
  for s in 0 .. NS-1:              -- subtile
    for j in 0 .. nv-1:            -- one cycle each
      acc[k] = (j == 0 ? 0 : acc[k]) + sign_j[k] * alpha_j[filter of k]   (k = 0..M-1, in parallel)
    write acc (saturated to 16 bits) into subtile s of the weights bank
```

A tile therefore costs `NS * nv` cycles when it does not stall. At the
defaults (`M=192`, `T_P=18`, `T_C=32`, `NS=3`) that is `3*nv` cycles, at most
27 for `nv = 9`. The engine needs at least `Rv + 3` cycles per P tile, so the
generator keeps ahead of the engine for every layer with `T_R`-row tiles. It
stalls (`wgen_stall`) when both weight banks are full. A subtile reaches the
weights buffer three cycles after its last basis vector is issued:

1. the Alpha read
2. the multiply
3. the accumulate and write

`wgen_datapath` has two M-wide vector units:

- A multiplier array that applies the code sign to the alpha.
- An adder array that accumulates over the `nv` basis vectors.

Element `k` of a subtile belongs to the filter that covers flattened position
`s*M + k`. That filter is one of at most `NF` filters touched by the subtile.
The datapath chooses the alpha lane for element `k` as
`floor((phase + k) / (K*K))`, where the phase is `(s*M) mod (K*K)`: the kernel
position at which the subtile starts.

### The OVSF generator and its aligner

The M code bits for a subtile are the layer's 9-bit code vector, repeated
and started at the subtile's phase: bit `k` equals `b_j[(phase + k) mod 9]`.
The OVSF FIFO stores each of the `nv` code vectors only once. It never stores
the M-bit expanded forms.

Every cycle the generator takes the vector at the head of the FIFO. It
replicates that vector to M bits into the output register. Then it writes
the vector back to the FIFO tail, rotated so that it starts at the next
subtile's phase:

- `rot[n] = v[(n + M mod 9) mod 9]`

After `nv` cycles the same code returns to the head, already aligned for the
next subtile.

At the defaults `M = 192 = 21*9 + 3`, so the phases of the three subtiles in
a tile are 0, 3 and 6. The last subtile of a tile generally holds fewer than
`M` useful elements. At that point the vector is rotated by
`(9 - ((NS-1)*M mod 9)) mod 9` instead, which brings it back to phase 0 for
the next tile. The control unit raises `tile_end` on the last subtile's
steps to select this rotation. With 3 subtiles of 192 the next phase would
be 0 anyway; the rule matters for sizes where `T_P*T_C` is not a multiple
of M's period.

For 1x1 layers (and any layer given as raw weights) the kernel option is
`K*K = 1`. The single code is `[+1]` (bit 0), and the alphas are the weights
themselves. Each element then has its own lane, so `NF = M` lanes are
needed. The same mode runs a 7x7 first layer or an FC layer lowered to
GEMM: the host passes `P = N_in*49` (or `N_in`) as the "input channel" count
with `K = 1`.

### Alpha buffer layout

`alpha_buffer` has `NF` banks of `ALPHA_DEPTH` 16-bit words. All banks are
read at the same row in one cycle, with one cycle of read latency. The host
must write the alphas of a layer in this layout:

- `row = alpha_base + ((tile * NS + s) * nv + j)`, where
  `tile = ct * n_ptiles + pt`
- `bank = f - first(s)`
- `f` is the filter index inside the tile: `f = (flattened position) / (K*K)`
- `first(s) = (s*M) / (K*K)` is the first filter touched by subtile `s`

Within a tile, filter `f` lies in column `(f*K*K) / T_P` at input channel
`((f*K*K) mod T_P) / (K*K)` of P tile `pt`. A filter that straddles two
subtiles is stored in both rows. The same rows are read again for every R
tile, because the row counter rewinds to `alpha_base`.

## Input-selective PEs and work stealing

When the last C tile of a layer is narrow (`C' < T_C` valid columns),
`T_C - C'` PEs would be idle. The last `N_SEL` PEs have two additions:

- a switch that can take a weight from a forwarding register instead of
  from the weights buffer
- a read port of their own into the input buffer

Every PE `q` has a register `R_q` that is loaded from the forwarding output
of PE `q-1`. PE `q` forwards either its own weight column (`fwd_own[q]`) or
what its register holds.

While stealing, the busy PEs inject their own columns every `C'` cycles:
`fwd_own[q] = (q < C') && (t mod C' == 0)`. The effect is a rotating stream.
An idle PE at position `q` sees column `(q - t) mod C'` at cycle `t ≥ q`, so
in any window of `C'` consecutive cycles it meets every valid column once.
`engine_ctrl` uses this to give each stealing PE whole rows:

- `I = min(T_C - C', N_SEL)` PEs steal. They are the switch-equipped PEs at
  positions `max(C', T_C - N_SEL)` and above.
- The busy PEs compute rows `0 .. T_A-1`, with `T_A = Rv - steal_rows`.
- Stealing PE `e` (position `q`) starts at cycle `q`. It handles rows
  `T_A + e`, `T_A + e + I`, ... and spends `C'` cycles on each row, one
  column per cycle. It reads its own row through its input port and writes
  each element to the output buffer at that element's column.
- The tile ends when the last PE is done. The RUN length is
  `max(T_A, max over e of q_e + C'*rows_e) + 1` cycles, plus the BUBBLE.

`steal_rows` is part of the layer configuration, so the host balances the
busy PEs against the stealing ones. For example, at the defaults with
`C' = 8` and `Rv = 32`, `steal_rows = 8` finishes in 32 RUN cycles instead of
33. The gain is small because the weights need `q ≥ 16` cycles to reach the
switch-equipped PEs. It grows for narrower tiles and when more PEs carry
switches. The paper's runtime model (its Eq. 7) assumes that every idle PE
can steal and charges a latency of `T_C - C'`. This schedule is more
conservative. Its exact cycle count is the formula above, and the
`engine_ctrl` testbench checks it against an independent model.

## Driving a layer

The host side of `unzip_top` follows these steps:

1. **Codes.** Pulse `basis_clear`, then present the layer's `nv` code
   vectors on `basis_load_vec` with `basis_load_valid`, one per cycle. Bit
   `n` is the sign of kernel position `n` (row-major 3x3); 1 means -1.
2. **Alphas.** Write the alphas with `alpha_wr_en`, `alpha_wr_bank`,
   `alpha_wr_addr` and `alpha_wr_data`, one word per cycle, in the layout
   above.
3. **Start.** Set `cfg` (`layer_cfg_t`) and pulse `start` for one cycle. The
   `cfg` fields are:
   - kernel option
   - `nv`
   - tile counts in P, C and R
   - valid columns and rows of the last C and R tiles
   - `steal_rows`
   - `alpha_base`
4. **Inputs.** Whenever `in_wr_ready` is high, write the `T_R` rows of the
   next input tile: `in_wr_valid`, `in_wr_row`, `in_wr_data`, then one
   `in_wr_commit`. Tiles go in `rt`, `ct`, `pt` order, so each input tile is
   sent once per C tile. Rows past `R` and products past `P` are zero.
5. **Outputs.** When `out_ready` is high, read the tile's rows and pulse
   `out_release`.
6. **Done.** `done` pulses after the last output tile has been released;
   `busy` is high from `start` until then.

Status outputs report the mechanisms: `wgen_stall`, `eng_running`,
`eng_stealing`, and `eng_stall_w` / `eng_stall_in` / `eng_stall_out` (the
engine is waiting for weights, inputs or the host's output release).

## Parameters

| parameter | default | meaning |
|---|---|---|
| `M` | 192 | generator vector width (multipliers). The paper's figure relates it to the tile as `M = T_P*T_C/3`; it gives no numeric design point. `M + T_P*T_C = 768` multipliers fit a 900-DSP device. |
| `T_P` | 18 | MACs per PE, a multiple of 9 |
| `T_C` | 32 | PEs |
| `T_R` | 32 | rows per tile |
| `N_SEL` | 16 | PEs with the input-selective switch (the last ones) |
| `ALPHA_DEPTH` | 1024 | rows per Alpha bank |
| `NF` | `nf_for(M)` = 192 | Alpha banks (filters per subtile; `M` because of the 1x1 mode) |
| `WL` | 16 | word length of activations, alphas and weights (package) |
| `ACC_W` | 48 | partial-sum width (package) |

Arithmetic is 16-bit two's complement (fixed point with the binary point
left to software). The generator saturates generated weights to 16 bits.
Partial sums are 48 bits and leave the chip unscaled.

## Departures and open points

- **No numeric design point in the source.** `M`, `T_P`, `T_C`, `T_R`,
  `N_SEL` and the Alpha depth are chosen here. Only the 16-bit word length
  comes from the paper.
- **Aligner shift.** The paper describes the aligner's shifts in terms of an
  M-bit, or `K*K - (M mod K*K)`-bit, left rotation. This design rotates so
  the code starts at the next subtile's phase. That is what the tiling
  requires, and it is stated above in bit-index terms.
- **End-of-tile realignment** is an addition. The paper does not say how a
  short last subtile is handled.
- **Number of Alpha banks.** The paper's closed form for the filters per
  subtile does not give an integer for every `M`. This design uses the
  maximum, over the supported kernel sizes, of `ceil((M-1)/(K*K)) + 1`.
- **Kernel sizes.** Only 3x3 OVSF and the raw-weight mode (`K*K = 1`) are
  built. In the OVSF networks only the 3x3 convolutions inside residual
  blocks or fire modules use codes; everything else runs in raw-weight mode.
  Raw-weight mode loads full weights through the Alpha port, which costs the
  weight bandwidth that OVSF layers avoid.
- **Alpha storage is per layer.** The host loads a layer's alphas before
  starting it. There is no streaming of alphas from DRAM during a layer, and
  the address simply wraps. With the raw-weight lanes, a 3x3 row uses only
  about 22 of its 192 words. A 3x3 layer therefore fits only if
  `ceil(C/32) * ceil(9*N_in/18) * 3 * nv <= 1024` rows. This holds for the
  small SqueezeNet fire layers, but not for ResNet's 64–512-channel layers.
  Running those needs a deeper Alpha buffer, or a layout with about
  `M/9 + 1` lanes for 3x3 and a separate path for raw weights.
- **Work-stealing schedule** is this design's own (see above). Its cycle
  count differs from the paper's runtime model.
- **Not included:**
  - the DMA engine, the off-chip memory and the host processor (their
    traffic uses the top-level ports)
  - bias, activation functions, pooling and re-quantisation of outputs
  - the design-space exploration and the choice of OVSF ratios, which are
    offline software

## Checking it

Each block has a self-checking testbench in `tb/` that prints one
`TB_RESULT checks=N failures=M` line. Each one compares against a model
written inside the testbench:

- **`tb_ovsf_generator`:** every code bit, for `M < 9`, `M > 9` and `K = 1`.
- **`tb_wgen_datapath`:** every generated weight, and the output latency.
- **`tb_cnn_wgen`:**
  - whole weight tiles for a 3x3 and a 1x1 layer
  - the tile order
  - the `NS*nv` cycles per tile plus stall cycles
- **`tb_engine_ctrl`:**
  - that every valid output element is computed exactly once per P tile
  - that each stealing PE walks through all `C'` columns in order
  - the RUN length of every tile
- **`tb_unzip_top`** runs three layers end to end at reduced sizes
  (`M=12`, `T_P=9`, `T_C=4`, `T_R=4`, `N_SEL=2`):
  - a 3x3 layer with a narrow last C tile
  - a 1x1 layer
  - a 3x3 layer using all 9 codes

  The host delays are random, and the outputs are compared with `X*W`.
  The test fails if the run never sees each of these: a generator stall,
  the three engine stalls, stealing, and both kernel options.
- **`tb_unzip_full`** does the same with every parameter at its default,
  running a 3x3 layer (P=36, C=40, R=40) and a 1x1 layer (P=18, C=32, R=32).
  It takes about 20 s of simulation.
- **`tb_squeezenet_fire`** runs two SqueezeNet1.1 fire-module 3x3 expand
  layers at the default sizes, with random data:
  - fire2: 16 -> 64 channels, 55x55 outputs, 9 codes
  - fire4: 32 -> 128 channels, 27x27 outputs, 5 codes

  It checks every output (about 287,000 values) over 137,858 clock cycles.

With Verilator 5 (two-state, so every register is reset or written before
use):

```
verilator --binary --timing --assert -Wno-fatal -y rtl rtl/unzip_pkg.sv \
    tb/tb_unzip_top.sv --top-module tb_unzip_top -o sim
./obj_dir/sim +verilator+rand+reset+2
```

Any other testbench is run the same way. Parameters can be changed at the
top instance; a few structural limits must hold:

- `T_P` must be a multiple of 9
- `N_SEL <= T_C`
- `nv <= 31`
- the tile counts must fit in 12 bits

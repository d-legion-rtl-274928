# D-Legion: many small adaptive-precision systolic arrays for quantized-LLM matrix products

D-Legion replaces one large systolic array with many small ones. The default
accelerator has **8 Legions**. Each Legion has **8 ADiP cores**, and each core is a
**16 × 16 array** of reconfigurable processing elements (PEs): 16,384 PEs in all.

Every PE multiplies an 8-bit activation by its stationary weight byte using
sixteen 2-bit multipliers. That byte is read in one of three ways:

- one 8-bit weight, for activation-to-activation work (8b × 8b);
- two 4-bit weights (8b × 4b);
- four 2-bit weights (8b × 2b).

The projection layers of 1-bit/ternary LLMs such as BitNet use 2-bit weights.
For them each PE therefore does four multiply-accumulates per cycle, on four
interleaved weight tiles that share one activation stream.

Inside a Legion the eight cores work on eight consecutive K-slices of the same
output tile. Four element-wise accumulators add the eight partial-sum (psum)
tiles, so the psum memory sees one tile instead of eight. They also add the psum
already stored for that row, which gives the accumulation over K
(read-modify-write).

A per-Legion zero-tile book marks weight tiles that are structurally zero. With
it the Legion skips whole windows or switches individual cores off. A NoC
multicasts tiles that several Legions share, for example:

- the input activations of all heads;
- K/V tiles shared by the heads of a grouped-query-attention group.

This directory holds synthesizable SystemVerilog for the complete digital
accelerator, with a self-checking testbench for every block. The off-chip memory
(HBM3 in the original description) is not part of it. Tiles enter through a NoC
port instead.

## 1. Hierarchy and sizes

| level | contents | default |
|---|---|---|
| `dlegion_top` | orchestrator, NoC, `L` Legions | L = 8 |
| `legion` | NoC gateway, mapper + zero-tile book, `C` cores, local crossbar, 4 accumulators, 4 psum banks | C = 8 |
| `adip_core` | `D × D` PEs, one shifter per column, output register | D = 16 |
| `rpe` | 16 2-bit multipliers in 4 groups, 8-bit weight register, four 16-bit psum lanes | — |
| `psum_bank` | 10,813 rows × 16 elements × 32 bit = 0.66 MiB | 4 per Legion |

One Legion takes one 1024-bit beat per cycle: C × D bytes, one 16-byte row per
core. At 1 GHz that is the 128 GB/s per-Legion interface the architecture
assumes.

Peak arithmetic: 16,384 PEs × 4 MACs × 2 operations × 1 GHz ≈ 131 TOPS in
8b × 2b mode. The original description quotes 135.68 TOPS.

Shared types live in `rtl/dlegion_pkg.sv`:

- `mode_e`: `MODE_DENSE`, `MODE_PROJ4`, `MODE_PROJ2`, with acceleration ratio R = 1, 2, 4.
- `link_e`: the LINK_ID values.
- `workload_t`: the per-Legion (M, K, N, mode).
- `stage_e` and `layer_cmd_t`: the attention-stage commands.

## 2. Number formats and the reconfigurable PE (`rpe`, `adip_shifter`)

This is the least obvious part of the design. The signed activation x is split
into four 2-bit digits, x = Σ a_i·4^i. Digit a₃ is signed (−2..1) and the others
are unsigned (0..3). The weight byte is split the same way into digits w₀..w₃.
Multiplier (i, g) forms a_i × w_g as a 3-bit × 3-bit signed product.

The four multipliers of **group g** share weight digit g. Their shifted sum is
x × w_g, and the group adds it to psum lane g coming from the PE above.

How the weight digits are interpreted depends on the mode:

| mode | weight byte holds | signed digits | lane meaning at the column foot |
|---|---|---|---|
| `MODE_PROJ2` | four 2-bit weights, tile g in bits [2g+1:2g] | all | lane g = Σ x·w_g (four output tiles) |
| `MODE_PROJ4` | two 4-bit weights, tile h in bits [4h+3:4h] | 1 and 3 | lane h = L(2h) + 4·L(2h+1) |
| `MODE_DENSE` | one 8-bit weight | 3 only | 32-bit L0 + 4L1 + 16L2 + 64L3 in lanes 1:0 |

The lanes travel down a column unshifted. The shared shifter at the column foot
(`adip_shifter`) recombines them for the mode. A 16-deep column sum of
x × (one 2-bit digit) is at most 16 · 128 · 3, so the 16-bit lanes never
overflow inside a core.

## 3. Core dataflow (`adip_core`)

The cores use the diagonal-input, permuted-weight scheme of the DiP/ADiP arrays,
which removes the input and output skew FIFOs of a classic weight-stationary
array:

- An input row a[0..D−1] enters the top PE row in parallel.
- Every cycle each activation moves one row down and one column right, wrapping
  at the edge. PE(i, j) therefore sees a[(j−i) mod D].
- Psums move straight down.
- Column j produces y[j] = Σ_k a[k]·W[k][j] when PE(i, j) holds W[(j−i) mod D][j].
  In other words, weight column j is rotated by j.
- The rotation is done **offline**: the feeder sends permuted rows.
- Weights are written row by row. Beat i writes PE row i only, so loading never
  shifts weights through rows that are still busy.

Timing:

- A row presented in cycle t leaves on `y` in cycle t + D + 1: D array stages
  plus the output register.
- All D results of a row leave together, so no output FIFO is needed.
- The pipeline only moves in cycles with `en` = 1.

When `core_on` = 0, zeros enter the array and weight writes are ignored. The
core then only flushes zeros, which is how a core is switched off for a zero
tile.

## 4. Inside a Legion: reduction and psum storage

```
 flit ─► noc_gateway ─► 8 × adip_core ─► legion_xbar ─► 4 × legion_accumulator ─► legion_xbar ─► 4 × psum_bank
                │                ▲                               ▲                                      │
                └─► legion_mapper ┘ (adv, core_on, w_row)         └──────── read-back (RMW) ◄────────────┘
                       └ ztb
```

**Accumulators.** Accumulator g receives lane g of all eight cores plus the
stored psum of that row and lane. It adds all nine values in one cycle.

- Projection mode: each accumulator is an independent 16-bit adder, one per
  interleaved output tile.
- Dense mode: accumulators 0 and 1 are tied. Accumulator 0 adds the low halves
  20 bits wide and hands its 4-bit carry to accumulator 1, which adds the high
  halves. The pair then produces the exact 32-bit sum.

**Banks.** Each bank is a simple dual-port array: one write and one registered
read per cycle. A row can be read while the previous row is written. Where a
result lives is set by `psum_bank_ctrl` and is also the read-out map:

- **Projection modes:** output tile s = nt·R + g of N-tile nt goes to bank g,
  row nt·MT·D + m, element j. The 16-bit value is stored sign-extended to 32 bits.
- **Dense mode:** only one bank is active at a time. N-tile nt goes to bank
  nt mod 4, row ⌊nt/4⌋·MT·D + m, element j (32 bits).

## 5. Scheduling a workload (`legion_mapper`, `ztb`)

A Legion receives (M, K, N, mode) and tiles it as follows:

- MT = ⌈M/D⌉, KT = ⌈K/(C·D)⌉, NT = ⌈N/(R·D)⌉.
- A **window** is C consecutive K-tiles, one per core.
- The loop order is N → K → M: for every N-tile, all KT windows are processed in
  turn, and each window streams all MT·D activation rows.

| state | cycles | what happens |
|---|---|---|
| `S_LOAD` | D | one weight beat per cycle; beat i writes PE row i of every core |
| `S_STREAM` | MT·D | one activation beat per cycle (row m for all cores) |
| `S_PIPE` | P = 1 | pipeline slack |
| `S_SKIP` | 1 | fully zero window: no beats, no core activity, no psum update |
| `S_ZFILL` | MT·D | every window of an N-tile was zero: write zero rows for it |
| `S_DRAIN` | D | after the last window, the last rows leave the cores |

Without zero tiles or stalls, busy time is KT·NT·(D·(MT+1)+P)+D cycles. This is
the latency model of the original analysis with P = 1, and the Legion and mapper
testbenches check it to the cycle.

Each streamed row carries {valid, first, banks, address} down a (D+1)-stage
delay line that matches the core latency:

- At stage D−1 the stored psum is read, except on the first non-skipped window
  of an N-tile.
- At stage D the accumulators add and the banks write.

If a needed beat is missing, `adv` drops and the cores, the delay line, the reads
and the writes all freeze together. A stall therefore never corrupts the
read-modify-write sequence. Rows past M (padding up to MT·D) are computed but
never written.

**Zero-tile book.** Entry w is the w-th window in loop order. Bit c set means
core c's weight tile in that window is all zero. The bits are read as follows:

- All C bits set: the window is skipped.
- Some bits set: those cores are switched off.
- The host writes the book before the workload; reset clears it.

## 6. Getting tiles in and results out (`dlegion_noc`, `noc_gateway`)

A flit is made of a header and a payload:

- The header is `{Legion mask, CORE_ID, LINK_ID}`.
- The payload is C × D bytes.

The NoC delivers a flit to every Legion whose mask bit is set. Delivery is
all-or-nothing: the flit is accepted only when all addressed Legions can take it.

In each Legion the gateway steers the flit by LINK_ID:

- `LINK_WEIGHT`: a permuted weight row for every core.
- `LINK_ACT`: an activation row for every core.
- `LINK_PSUM`: a read-out request. Payload bits [AW−1:0] give the row and
  [AW+1:AW] the bank. The row appears on `ps_data` one cycle later. This is
  accepted only while the Legion is idle.

CORE_ID = C means "slice c to core c". A smaller value sends slice 0 to that one
core.

A tile feeder must send, for every non-skipped window in loop order:

1. D weight beats to the Legion.
2. MT·D activation beats.

Weight byte (i, j) of core c in window kw of N-tile nt is
W[(kw·C + c)·D + (j−i) mod D][column], where the column is (nt·R + g)·D + j for
sub-tile g. Activation byte j of core c in row m is A[m][(kw·C + c)·D + j].
Values beyond M, K or N are zero.

Because the Legions of a round share M and K, activation rows can be multicast.
Weight tiles go unicast. A Legion that already holds its weights simply stalls
until the multicast reaches it.

## 7. Orchestrator and attention mapping (`dlegion_orchestrator`)

A `layer_cmd_t` gives a stage and the model sizes: sequence, hidden size, head
size, heads and KV heads. The orchestrator turns it into rounds of per-Legion
workloads:

| stage | per-Legion workload | rounds |
|---|---|---|
| `STG_Q_PROJ` | one head: (seq, hidden, head_dim), 8b × 2b | ⌈heads/L⌉ |
| `STG_KV_PROJ` | one K or V head: (seq, hidden, head_dim), 8b × 2b | ⌈2·kv_heads/L⌉ |
| `STG_SCORE` | one head, N = seq split over the Legions: (seq, head_dim, seq/L), 8b × 8b | heads |
| `STG_ATT_HEAD` | one head, N = head_dim split: (seq, seq, head_dim/L), 8b × 8b | heads |
| `STG_OUT_PROJ` | N = hidden split: (seq, hidden, hidden/L), 8b × 2b | 1 |

For each Legion it also reports three values, so the feeder knows which tiles to
send and which Legions can share a KV tile:

- the head or unit it works on;
- its KV group, head / (heads / kv_heads);
- its N offset.

After each round `round_done` stays high until `round_ack`, giving the host time
to read the results out.

## 8. Do the evaluated models fit?

The BitNet-1.58B attention layers have hidden size 2560, 16 heads of 128 and a
sequence of 2048. The -KV variant uses 4 KV heads. At the default parameters
every per-Legion workload fits a bank:

| workload (per Legion) | NT × rows | bank rows (of 10,813) | windows (of 256) |
|---|---|---|---|
| Q/K/V projection (2048, 2560, 128) | 2 × 2048 | 4096 | 40 |
| attention score (2048, 128, 256) | 16 dense tiles over 4 banks | 8192 | 16 |
| attention × V (2048, 2048, 16) | 1 × 2048 | 2048 | 16 |
| output projection (2048, 2560, 320) | 5 × 2048 | 10240 | 100 |

The 32- and 64-Legion scaled versions need `L = 32` or `L = 64`. The RTL takes
these as a parameter, but they have not been simulated.

## 9. Where this RTL departs from, or adds to, the original description

The block structure, the sizes and the mechanisms come from the original
description:

- 8 × 8 × 16 × 16 organisation;
- sixteen 2-bit multipliers per PE in four groups;
- 2/4/8-bit weight modes;
- diagonal dataflow with column-rotated weights;
- four accumulators, two of them tied for 32-bit sums;
- four 0.66 MB psum banks: all active in projection mode, one rotating bank in
  dense mode;
- N → K → M loop order and the windowed zero-tile book with skip and
  deactivation;
- the NoC address prefix and multicast;
- the orchestrator's mapping rules.

That description does not give the internals, so everything below is this
design's own choice:

- **Digit arithmetic**: which digits are signed in which mode, and 16-bit psum
  lanes.
- **Projection psums are 16 bits.** This reading follows from "two accumulators
  tied for 32-bit inputs". Projection results wrap modulo 2¹⁶. With int8
  activations, ternary weights and K = 2560, a worst-case sum can exceed that.
  Realistic data rarely does.
- **Rotation direction and loading**: the weight rotation direction, the
  row-addressed weight load and the D + 1 core latency.
- **Latency constant**: P = 1 in the latency model, plus idle cycles that make
  the busy time match it exactly.
- **Zero fill**: writes zeros for an N-tile whose windows were all skipped. The
  description does not mention it, but results would be wrong without it.
- **NoC protocol**: a Legion bit mask instead of a LEGION_ID field;
  all-or-nothing multicast; no NoC buffering.
- **The psum link** carries read-out requests.
- **Rounds**: the orchestrator's round handshake, and K and V handled as
  separate units.
- **Bank size**: 0.66 MB is read as MiB, giving 10,813 rows.
- **Interfaces and widths**: all encodings, port protocols and widths.

Not provided:

- **No off-chip memory, PHY or DMA.** The feeder that would read tiles from HBM
  is only a testbench model.
- **No energy features beyond operand isolation.** A deactivated core receives
  zeros; there is no clock or power gating.
- **Per-core unicast weight beats are not useful with this mapper.** Each weight
  beat advances the row counter of all cores, so CORE_ID unicast is suited to
  activations only.

## 10. Files and simulation

The design files are in `rtl/`, one module or package per file. Compile
`rtl/dlegion_pkg.sv` first. The testbenches in `tb/` are self-checking and print
`TB_RESULT checks=N failures=F`. `tb/tb_dl_pkg.sv` is a reference model of the
tiling, packing, products and result layout. `tb/tb_dl_driver.sv` is the host and
tile feeder used by the top-level tests.

| testbench | what it shows |
|---|---|
| `tb_rpe`, `tb_adip_shifter` | per-mode digit arithmetic and recombination |
| `tb_adip_core` | exact products in all modes, D + 1 latency, deactivation |
| `tb_legion_accumulator`, `tb_legion_xbar`, `tb_psum_bank`, `tb_psum_bank_ctrl`, `tb_ztb` | reduction with carry chaining, routing, storage, addressing |
| `tb_legion_mapper` | beat counts, skip/partial/zero-fill events, RMW read/write counts, latency model |
| `tb_noc_gateway`, `tb_dlegion_noc`, `tb_dlegion_orchestrator` | steering, multicast, attention mapping |
| `tb_legion` | a full Legion (8 cores of 16 × 16) on six random jobs with stalls and zero tiles, every result checked |
| `tb_dlegion_top` | whole accelerator at L = 4, C = 2, D = 4 through all five attention stages; counts every mechanism |
| `tb_dlegion_full` | whole accelerator at full size (8 × 8 × 16 × 16): one eight-head Q projection |

To run one with plain Verilator:

```
verilator --binary --timing --assert -Wno-fatal -Irtl --top-module tb_legion \
    rtl/dlegion_pkg.sv rtl/*.sv tb/tb_dl_pkg.sv tb/tb_dl_driver.sv tb/tb_legion.sv
./obj_dir/Vtb_legion
```

Some points to know before running them:

- `tb_dl_driver.sv` is only needed by the top-level tests.
- The full-size build has 16,384 PEs. Expect several minutes of C++ compilation
  and a few GB of memory.
- To change the size, override `L`, `C`, `D` and `DEPTH` on `dlegion_top`. `D`
  and `C` must be powers of two, and C ≤ 14 keeps the accumulator carry in
  4 bits.

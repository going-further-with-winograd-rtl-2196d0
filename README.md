# Winograd F4 extension for a two-core int8 inference accelerator

A 3x3 convolution computed with the Winograd algorithm F(4x4, 3x3) needs
36 multiplications per 4x4 output tile instead of 144: a 6x6 input tile `d`
and a 3x3 filter `f` are taken into a 6x6 "Winograd domain" (`V = Bᵀ d B`,
`U = G f Gᵀ`), multiplied element by element, summed over input channels,
and taken back (`Y = Aᵀ M A`). The catch for int8 inference is that the 36
positions of the Winograd domain (the *taps*) have very different value
ranges, so quantising all of them with one scale loses most of the accuracy.
This design quantises every tap with its own scale and makes each scale a
power of two, so the rescaling in hardware is just a shift with rounding and
clamping. With that, the transforms become cheap shift-and-add engines that
sit in front of and behind an unchanged matrix-multiply unit (the Cube), and
the 36 element-wise products of a whole block of tiles become 36 ordinary
16x32 by 32x16 matrix products.

The RTL contains the system in its main configuration: two AI cores behind a
Broadcast Unit that shares input-feature-map reads between them. Each core
holds the three Winograd transformation engines, the Cube, the three level-0
buffers with the addressing modes the transforms need, and a memory transfer
engine. The second-level memory (L1), the unified buffer, the vector unit,
the scalar front end that issues instructions, and the DDR controllers are
not part of the RTL; their connections are ports of the top `wino_soc`.

## Numbers and scaling

The matrices are in `rtl/wino_pkg.sv` (interpolation points 0, ±1, ±2, ∞).
`Bᵀ` and `Aᵀ` are integer. `G` has factors 1/4, 1/6, 1/12 and 1/24; the weight
engine uses `G24 = 24·G`, which is integer, so it produces
`576 · G f Gᵀ` exactly. A factor 64 of the 576 is taken out by the weight
exponents (6 more bits of right shift than a plain `G` would need); the
remaining 9 is a constant per layer that belongs in the requantisation after
the output transform. The reference model in `tb/tb_wino_ref.sv` checks that
`Aᵀ[(G24 f G24ᵀ) ⊙ (Bᵀ d B)]A = 576 · conv(d, f)` on random data.

Every tap quantiser (`rtl/tapwise_quant.sv`) computes
`clamp(floor((x + 2^(s-1)) / 2^s))` for a signed exponent `s`; a negative `s`
shifts left and saturates. Exponents are 5-bit signed values held in per-core
tables:

| table     | where it acts                                  | width out |
|-----------|------------------------------------------------|-----------|
| `sh_in`   | output of the input transform, per tap (6x6)   | int8      |
| `sh_wt`   | output of the weight transform, per tap (36)   | int8      |
| `sh_out`  | input of the output transform, per tap (6x6)   | int32     |

Rounding is half-up. The tables are static inputs; they must not change while
an engine is running.

## Dataflow of one layer block

One *block* of work in a core is 16 output tiles (a 16x16 output region, or
any 16 tiles), 32 input channels and 16 output channels:

1. **Weights.** MTE2 reads the spatial weights from memory into L0B: nine rows
   of 512 B, row `e` holding element `e` of all 16x32 filters (byte
   `o·32 + c`). The weight transform then runs once per output channel and
   produces 36 int8 taps for each of 32 input channels; the front end stores
   them in L1, where the Cube reads them later (one 32x16 matrix per tap).
2. **Input tiles.** MTE2 brings the input feature map into L1 (broadcast
   reads, shared by both cores). The input transform takes two 6x6 tiles of
   32 channels at a time, one 6-pixel row per cycle, and writes the 36 taps
   of the pair into L0A with diagonal writes.
3. **Cube.** 36 matrix products, one per cycle: tap `t` of 16 tiles x 32
   channels from L0A times tap `t` of the 32x16 weights from L1, into L0C
   row `t` (overwrite for the first input-channel block, accumulate after).
4. **Output tiles.** The output transform gathers, for each tile, its 36
   int32 taps from L0C (6 rows per cycle) and produces the 4x4 outputs of 16
   output channels every 6 cycles; they go to the unified buffer.

Steps 2 to 4 are issued per engine with `*_start` and watched with `*_busy`
on the ports of `ai_core`; the sequencing across blocks (double buffering,
several input-channel blocks, several output-channel blocks) is the front
end's job.

## Input transform: row-by-row engine (`in_xform_pe`, `in_xform`)

A PE transforms one 6x6 tile of one channel. It takes one input row `d[y,:]`
per cycle and keeps `d[y,:]·B` in a 6x6 register array (cycles 0..5); in
cycles 6..11 it emits one column `j` of `Bᵀ (d B)`, quantised per tap. A
tile takes 12 cycles and the PE takes a new tile as soon as the previous has
drained: one tile per 12 cycles per PE. `in_xform` places 32x2 PEs (32 input
channels x 2 horizontally adjacent tiles) in lockstep, for 64 transforms
every 12 cycles, i.e. 192 B per cycle, a quarter of what the Cube consumes;
each transformed tile is therefore used for four or more groups of 16 output
channels.

Handshake: `in_valid/in_ready` per row (ready while loading);
`out_valid`, `out_col` and six taps per PE per cycle on the emit side.

## L0A and the diagonal write (`l0a`)

L0A is 16 banks x 128 rows x 32 B (64 kB). The Cube reads one row of all 16
banks in one access: bank `m` gives the 32 channels of tile `m` for one tap.
The input transform, however, delivers in one cycle the same tap column of
two tiles for six taps, which belong to six *different* Cube rows. A normal
row write cannot store that.

The diagonal write solves it. With write rotation `rot`, bank `b` takes lane
`l = (b - rot) mod 16` of the write data (only lanes below 12 exist) and
writes it at row `addr + 6·(l / 2)`. Lane `l = 2i + s` carries tap `(i, j)`
of tile `s` of the pair, so tap `(i, j)` of tile `2p + s` ends up in bank
`2p + s + 2i` (mod 16) at row `base + 6i + j`. A Cube read of tap
`t = 6i + j` then uses read rotation `2i`: `rd_data[m] = bank[(m + 2i) mod 16]`,
which returns tiles 0..15 in order. Each bank is written at most once per
cycle and the Cube still reads one full row per cycle.

## Weight transform: tap-by-tap engine (`wt_xform_pe`, `wt_xform`)

A weight PE owns one filter (one input channel, one output channel). It
works through the 36 taps in six groups of six; for every group it steps
through the filter elements that contribute, and for each element through the
power-of-two terms of the coefficients `G24[i][k]·G24[j][l]`, adding or
subtracting the shifted element into six accumulators. The whole step list
is computed at elaboration time from `G24` (function `build_sched`), so the
engine has no multipliers, only a shifter and an adder/subtractor per lane.
One element is read per step from an L0B slice (`rd_elem`, one-cycle read
latency). A filter takes 72 steps; `start` to last output is 74 cycles.
`wt_xform` runs 32 PEs, one per input channel of a block, sharing the element
address; each PE quantises with `sh_wt` and delivers six int8 taps per group.

## Cube and L0B (`cube_unit`, `l0b`)

The Cube is a 16x32 by 32x16 int8 product with int32 accumulation and one
register stage. In Winograd mode the A operand is a rotated L0A row and the B
operand is the tap's weight matrix from L1 (requested one cycle ahead on
`l1_wt_req/l1_wt_tap`). In baseline mode both operands come from L0A and L0B
rows unrotated, which is the ordinary GEMM path. L0B is 128 rows of 512 B
(64 kB) with a full-row read port for the Cube and a 32-byte slice port for
the weight transform.

## L0C skew and the gather port (`l0c`)

L0C holds int32 results: 16 banks x 288 rows, a bank word being the 16
output channels of one tile (288 kB). Logical row `r` of tile `m` is stored
in bank `(m + r) mod 16`. Port A reads or writes a whole logical row (all
16 tiles, for the Cube). Port B reads six rows `r..r+5` of one tile in one
cycle: because of the skew they sit in six different banks, so the output
transform gets one row of the tile's 6x6 tap matrix per cycle. An assertion
checks that the six banks are distinct. The price is the rotation network on
port B.

## Output transform: fast row-by-row engine (`out_xform_pe`, `out_xform`)

A PE quantises an incoming tap row `M[y,:]` per tap (`sh_out`), multiplies
it by `A` and accumulates `Aᵀ[:,y] ⊗ (M[y,:]·A)` into a 4x4 register array.
After six rows the 4x4 output tile is emitted, saturated to int32, and the
next tile starts in the same cycle: one tile per 6 cycles. `out_xform` runs
16 PEs, one per output channel. The core's output sequencer walks the tiles
and, per tile, the six tap rows through L0C port B.

## Memory side: MTE2 and the Broadcast Unit (`mte2`, `broadcast_unit`)

MTE2 runs one transfer command at a time: one burst of `len` 64-byte beats,
either independent or broadcast, landing in L0B (eight beats per 512-byte
row) or passed on towards L1.

The Broadcast Unit sits between the two MTE2s and memory. Each core has an
independent queue and a broadcast queue. When both broadcast queues hold a
request, the unit reads that burst once and delivers every beat to both
cores; this pair always wins over independent requests. A broadcast request
whose partner has not arrived does not block anything: independent requests
(served round robin between the cores) keep flowing, which is what prevents
the two cores from deadlocking on each other. Reads are issued one beat per
request; a tag FIFO remembers which core(s) each outstanding beat belongs to,
so the memory must answer in order. Paired broadcast requests must name the
same burst (assertion).

## Top level (`wino_soc`) and interface summary

`wino_soc` instantiates two `ai_core`s, two `mte2`s and the `broadcast_unit`.
All per-core ports are arrays indexed by core. Groups of ports:

- `sh_in/sh_wt/sh_out`: exponent tables.
- `mte_cmd_*`, `mte_busy`, `l1_wr_*`: transfer commands and the data going to L1.
- `wt_*`: weight transform command and its output to L1.
- `ix_*`, `ifm_*`: input transform command and the rows read from L1.
- `cube_*`, `l1_wt_*`: Cube command and its weight reads from L1.
- `ox_*`, `ub_*`: output transform command and its output tiles.
- `mem_*`, `bcast_active`: memory port behind the Broadcast Unit.

Command timing: a `*_start` pulse is taken when the engine is idle; `*_busy`
stays high until the last result has left the engine.

## Where this RTL departs from or goes beyond the published description

- The published description gives the structure and rates of the engines,
  the buffer sizes, the diagonal write mode, the L0C port B rotation and the
  queue rule of the Broadcast Unit. Bank mappings, command formats, the
  handshakes, exponent width, rounding mode (half-up) and the 24·G scaling
  are this design's choices.
- The weight transform processes six taps per step in parallel per PE and
  reads elements from L0B; how many lanes the original engine has is not
  stated.
- The Broadcast Unit pairs broadcast requests by arrival order and serves
  one request per memory beat; the original memory interface is unknown. A
  single memory port stands for the two DDR channels of the original system.
- L0B is not split into two halves in hardware; double buffering of weights
  is a matter of which rows the commands use (128 rows hold 14 blocks of 9).
- The 1/3-type factors of `G` are not handled inside the engines; the
  leftover factor 9 must be folded into the layer's requantisation, which is
  outside this RTL.
- Not built: L1, unified buffer, vector unit and requantisation, the scalar
  front end and instruction queues, the im2col engine of the baseline
  operator, MTE3 and the DDR controllers.

## Verification

Each module has a self-checking testbench in `tb/` (`tb_<module>.sv`) that
prints `TB_RESULT checks=<n> failures=<n>`. Highlights:

- `tb_tapwise_quant`, `tb_*_pe`: exhaustive/random against integer models,
  including the cycle counts (12 cycles per input tile, 6 per output tile,
  74 cycles per filter).
- `tb_l0a`, `tb_l0c`: diagonal writes and rotated reads, skewed rows and
  port B gathers against array models.
- `tb_broadcast_unit`: random independent/broadcast/write traffic from both
  cores against a memory with random latency; checks that each broadcast
  burst is read once and that broadcast pairs take priority.
- `tb_ai_core`: a full layer block in one core (16 tiles, 64 input channels in
  two blocks with accumulation, 16 output channels), checked bit-exactly
  against the reference model in `tb_wino_ref.sv`, plus one baseline-mode
  product.
- `tb_wino_soc`: both cores at default parameters, from memory through the
  Broadcast Unit to the output tiles, with counters for each mechanism
  (broadcast beats, a broadcast waiting for its partner, diagonal writes,
  port B gathers, saturation, left shifts, and so on). This is the full-size
  test.

To run one, with Verilator 5:

```
verilator --binary --timing --assert -y rtl --top-module tb_ai_core \
  rtl/wino_pkg.sv tb/tb_wino_ref.sv tb/tb_ai_core.sv
./obj_dir/Vtb_ai_core
```

(`-y rtl` lets Verilator find each module in `rtl/<name>.sv`.)
The core and system testbenches take several minutes to compile because the
design is wide (64 input-transform PEs, 16 output PEs, 32 weight PEs and a
16x32x16 = 8192-MAC Cube per core).

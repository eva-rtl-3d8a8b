# EVA core: vector-quantised LLM decoding on a reused systolic array

## The idea

During the decode phase of an LLM, every fully connected layer
is a matrix-vector product `y = x W`. On a conventional systolic array a GEMV
keeps one lane of the array busy and the rest idle. Weight-only vector
quantisation (VQ) makes the weights small: each group of `d = 8` consecutive
weights of a column of `W` is replaced by an 8-bit index into a codebook `B` of
`2^8 = 256` centroids of 8 values each. Most VQ accelerators first rebuild `W`
from the codebook and then still run a GEMV.

This core never rebuilds `W`. Reshape the input `x` (length `K`) into a matrix
`X` of `K/8` rows of 8 values. Every weight vector is one of only 256 centroids,
so every inner product a weight column can ask for is already in

    O = X B          (K/8 x 256, the "output codebook", OC)

which is a small, dense GEMM that fills the array. An output is then pure
look-up-and-add:

    y[n] = sum over rows v of O[v][ I[v][n] ]

where `I` is the weight-index (WI) matrix. With `C` additive codebooks (AQLM
style, `C = 2, 3, 4` for 2, 3 or 4 bits per weight) both steps are repeated per
codebook and the results are summed. For `N = 4096` outputs a 256-entry
codebook costs 256 array cycles per 32-row tile, while the look-up side needs
4096 cycles. The multiplications shrink by a factor `N / 256 = 16` and become
array-friendly. The remaining cost is additions, done by small epilogue units
(EUs) next to the array.

Everything is FP16 in the decode path: activations, centroids and results. The
same array also runs INT8 GEMMs for the prefill phase.

## Block map

```
            x tiles                       centroids
   input_buffer ------> gemm_unit <------------------ wc_buffer
   (2048 x 8 FP16)    32x8 FP16 / 32x32 INT8         (4 codebooks x 256 x 8 FP16)
                          | row r of each OC tile
                          v
                      oc_buffer  -- 4 EUs x 32 banks x 3 slots x 256 FP16 --
                          ^   | one read per bank per EU per cycle
     wi_buffer -----------+   v
   (2048 x 1024 bit)   4 x epilogue_unit  (32-input tree or 32-stage diagonal chain)
                          |
                  per-request reduction (EU e -> request e mod B)
                          v
                    output_buffer (4 lanes x 4096 partial sums)
   controller: producer (GEMM) and consumer (epilogue) schedules, slot ring
```

`eva_top` holds all of these blocks. The vector/special-function unit of the
full accelerator and the DRAM are outside the core:
- Buffers are filled through write ports.
- Weight indices arrive as a valid/ready stream.
- Results are read from the output buffer.

## Arithmetic: one PE that does INT8 and FP16

Each processing element (`mp_pe`) has four 9x9 signed multipliers (`mp_mul`).

**INT8 mode.** The four multipliers work on four INT8 lanes. A PE adds the four
products into a 32-bit integer partial sum. That makes the 32x8 grid a 32x32
INT8 array.

**FP16 mode.** The same four multipliers form one FP16 product:
- The 11-bit significands are split into a 3-bit high part and an 8-bit low
  part.
- The four partial products are combined as
  `ll + (lh + hl) << 8 + hh << 16`.
- The sign is an XOR and the exponent a small add.

**Partial-sum format.** FP16 partial sums are not rounded to FP16 between PEs.
They travel in an extended format, `ext_t` in `eva_pkg`: an 8-bit exponent `e`
and a 32-bit two's-complement mantissa `m`, with value `m * 2^(e-56)`.
- A product of two FP16 numbers has `e = ea + eb` and `m = +/- P << 6`, where
  `P` is the 22-bit significand product.
- An FP16 value converted to the format has `e = e16 + 17` and
  `m = +/- sig << 14`.

**Addition** (`fp_align_add`):
- Shift the operand with the smaller exponent right by the exponent difference.
  This truncates; shifts of 32 or more give zero.
- Add in the 32-bit adder that INT8 mode uses anyway.
- If `|m|` reaches `2^30`, shift right once and increment `e`.

**Rounding.** Rounding to FP16 happens only when a value leaves the array (one
OC entry) or the output buffer. It rounds to nearest, ties to even; overflow
saturates to the largest finite value and underflow flushes to zero. Subnormal
FP16 inputs are treated as zero. Infinities and NaNs get no special handling.
Results are therefore at least as accurate as an FP16 chain. They are not
bit-identical to any particular FP16 library. The testbenches compare against
real-number references with a relative tolerance.

## The GEMM unit and its timing

`gemm_unit` is a grid of 32 rows by 8 columns of PEs.

**Dataflow in FP16 mode.** The array is input-stationary:
- PE `(r, c)` holds `X[r][c]` of a 32-row input tile.
- Each cycle one centroid (8 FP16 values) enters at the top and moves down.
- Partial sums move right, so row `r` emits `O[r][j]` for centroid `j`.
- A whole 256-entry codebook takes 256 cycles per tile.

**Dataflow in INT8 mode.** The same grid holds a 32x32 INT8 weight tile
(weight-stationary) and streams 32 activations per cycle.

**Loading.** The stationary operand is shifted in from the top for 32 cycles
with `load`. The row presented first ends up in the bottom row, so the
controller reads input rows in descending order.

**Timing.**
- The unit skews its own inputs: column `c` is delayed `c` cycles. Callers
  present plain, unskewed vectors.
- The result of row `r` for the vector presented at cycle `t` appears,
  registered, at cycle `t + r + 9` (that is, `t + r + COLS + 1`).
- It carries the tag that entered with the vector. In VQ mode the tag is
  `{EU, slot, centroid}`, and it steers the OC write.

## Output-codebook banks and the epilogue units

**Why reads never collide.** Row `v` of an OC tile is stored only in bank `v`.
A WI column holds one index per row of the tile. The 32 look-ups an EU makes
for one output column therefore hit 32 different banks and never collide.

**OC buffer layout.** Each EU has its own 32 banks. Each bank holds 3 slots of
256 FP16 entries, so the GEMM unit can fill one OC tile while the EU reads
another. That is 4 x 3 x 32 x 256 x 2 B = 192 KB.

`epilogue_unit` reduces the 32 looked-up values of a column in one of two ways:

| `cfg_diag` | scheme | hardware | latency in_valid -> out_valid |
|---|---|---|---|
| 0 | vertical | all 32 reads at once, 32-input adder tree | 2 cycles |
| 1 | diagonal | row `r` reads `r` cycles after the column enters; a 32-stage adder chain passes the partial sum from row 0 to row 31 | 33 cycles |

Both schemes accept one column per cycle. In the diagonal scheme, the 32 rows
work on 32 different columns in any one cycle, which spreads bank activity over
time.

The four EU results are then reduced per request. EU `e` serves request
`e mod B` (see below), and the sums for each request are added into its lane
of `output_buffer`. That buffer does a one-cycle read-modify-write in the
extended format. On the first pass of a layer it overwrites instead of adding.

## Layer schedule (controller)

**Configuration.** A layer is started with:

| field | meaning |
|---|---|
| `cfg_n` | number of outputs N, at most 4096 |
| `cfg_tiles` | 32-row tiles per request, `K/256` |
| `cfg_cb` | codebooks C, 1 to 4 |
| `cfg_batch` | requests B: 1, 2 or 4 |
| `cfg_diag` | EU scheme |

A *group* is the `4/B` tiles that the four EUs process together.

**Producer (GEMM side).** For every group, codebook `c` and EU `e`:
1. Wait until EU `e` has a free OC slot. The wait is counted as an
   "OC-ring full" event.
2. Preload that EU's input tile (32 cycles).
3. Stream the 256 centroids of codebook `c` (256 cycles).
4. Let the array drain (44 cycles).
5. Mark the slot full.

One GEMM job is therefore 332 cycles, plus a 2-cycle handshake.

**Consumer (epilogue side).** For every group and codebook:
1. Wait until all four EUs have a full slot.
2. For each of the N columns, pop one WI word and give each EU its 32 indices.
   While the WI stream is empty it stalls; each such cycle is a "WI stall"
   event.
3. Let the EUs drain, then free the slots.

**Overlap.** The two loops share only the slot ring, so the GEMM work for the
next group and codebook runs while the EUs work on the current one. For
`N = 4096` an epilogue pass takes ~4130 cycles and four GEMM jobs ~1340, so
the array is hidden behind the epilogue. The measured LLaMA-2-7B-sized layer
(K = N = 4096, C = 2, B = 1) takes 34,395 cycles. Its bound from the epilogue
alone is 4 groups x 2 codebooks x 4096 = 32,768 cycles, so the first GEMM pass
and the pass drains add about 5%. Each extra codebook adds one full epilogue
pass.

**Batch reuse.** With B requests, EU `e` works on request `e mod B` of tile
`floor(e / B)` of the group. It takes its indices from lane `floor(e / B)` of
the WI word. One WI word, the expensive DRAM stream in decoding, then serves B
requests.

## Programming the core (`eva_top`)

**Input buffer.** 128-bit words. Row `b * (K/8) + v` holds `x[8v .. 8v+7]` of
request `b`.
- Rows must not exceed 2048, so `B * K / 8 <= 2048`.
- `cfg_tiles` must be a multiple of `4 / B`. Pad the input with zero rows to
  get there: a zero row gives a zero OC row, so any index adds nothing.

**Codebook buffer.** Address `c * 256 + j` holds centroid `j` of codebook `c`.

**WI stream.** One 1024-bit word per output column, in the order group,
codebook, column. `wi_data[(l*32 + r)*8 +: 8]` is the index for row `r` of the
tile on lane `l`. The lanes are the tiles of the group. `wi_level` reports the
FIFO fill for a prefetcher.

**Run.** Pulse `start` with the `cfg_*` fields while `busy` is low. Stream WI
words. Wait for the one-cycle `done`.

**Read-out.** `out_addr` and `out_lane` select an output. `out_data` returns it
as FP16 one cycle later.

**Wide layers.** N larger than 4096 runs as several layers on column chunks
with the same input.

**Prefill.** While the core is idle, set `pf_mode`. The array is then a 32x32
INT8 weight-stationary GEMM driven directly from the ports:
- `pf_load` / `pf_stat` load a weight tile.
- `pf_valid` / `pf_strm` stream activations.
- `pf_out_valid[r]` / `pf_out_int[r]` return the results of row `r`, `r + 9`
  cycles later.

The data path around the array during prefill is not part of this core.

**Observability.** `ev_wi_stall`, `ev_oc_full` and `ev_overlap` pulse on the
three pipeline events above.

## Sizes, and what they hold

Default parameters match the design's main configuration:
- 32x32 INT8 / 32x8 FP16 array, `v = 32`, `d = 8`, `n = 8`.
- 4 EUs.
- Buffers: 16 KB codebook, 32 KB input, 256 KB WI, 192 KB OC.

At these sizes a single layer can be up to `N = 4096` outputs and `K = 16384`
inputs for one request, or `K = 4096` for four requests. That covers every
projection of LLaMA-7B/8B-class models and the expert layers of Mixtral-8x7B
and Qwen3-30B-A3B, with wide FFN outputs run in column chunks. LLaMA-65B's FFN
down projection (K = 22016) does not fit the input buffer.

The design does not support:
- codebooks with 12- or 16-bit indices;
- `d = 4` vectors;
- codebooks shared by only 256 output columns;
- more than four requests per run.

## Where this RTL departs from the paper, or fills gaps

- **EU timing.** The EUs run in lock step on a group of tiles, so that all four
  add into the same output column in the same cycle. The paper's timeline
  starts EU1 after EU0.
- **Adders.** The vertical tree and the diagonal chain are separate adders,
  selected by a mux. They are not one set of 32 shared adders.
- **Codebook passes.** Multiple codebooks are handled as one full GEMM-plus-
  epilogue pass per codebook.
- **Output buffer size.** The output buffer keeps 4 lanes x 4096 sums in the
  40-bit extended format (80 KB). The paper budgets a 32 KB output buffer,
  which fits FP16 storage of those sums. Extended storage was kept to avoid
  re-rounding between passes.
- **Array dataflow.** The FP16 array is input-stationary, as the
  configuration table of the paper states. Its discussion section describes the
  mode as output-stationary.
- **Internal formats and protocols.** The extended partial-sum format, the
  rounding points, the 3/8-bit significand split, the slot ring, all
  handshakes, tag formats and latencies are this design's own choices. The
  paper does not specify them.
- **Not implemented.** The vector/special-function unit, the DRAM and its
  controller, SRAM macros and double buffering of the input/WI buffers from
  DRAM. The buffers here are plain register arrays with registered reads.
- **Tile tail.** A tile count that is not a multiple of `4/B` has to be padded
  with zero rows by the caller.

## Verification

Every module has a self-checking testbench in `tb/`. Each compares against a
reference computed independently in the testbench, mostly in `real` arithmetic:

| testbench | what it checks |
|---|---|
| `tb_mp_mul` | INT8 lane products exactly; FP16 products against real multiplication |
| `tb_fp_align_add` | extended-format sums and INT32 sums |
| `tb_mp_pe` | one PE in both modes, including load and pass-through |
| `tb_gemm_unit` | full 32x8 FP16 VQ-GEMM with 256 centroids, exact result latency `t + r + 9`; 32x32 INT8 products exactly |
| `tb_input_buffer`, `tb_wc_buffer`, `tb_wi_buffer`, `tb_oc_buffer`, `tb_output_buffer` | storage, registered read timing, FIFO order and back-pressure, bank/slot separation, overwrite vs accumulate |
| `tb_epilogue_unit` | both reduction schemes, their latencies and back-to-back columns |
| `tb_controller` | the full schedule: preload addresses, centroid addresses and tags, slot ring across layers, per-EU lanes, pass order, pass start only after the GEMM jobs drained, `done` |
| `tb_eva_top` | end to end at the default sizes; see below |

`tb_eva_top` runs four layers back to back:
- a LLaMA-2-7B-sized projection (N = K = 4096, C = 2) with a cycle-count bound;
- a 3-codebook diagonal layer fed with random WI gaps;
- a 2-request layer;
- a 4-request layer.

It then runs an INT8 prefill product after a mode switch. It counts WI stalls,
OC-ring-full waits, GEMM/epilogue overlap, both EU schemes, multi-codebook and
batch-reuse layers, and prefill results. A mechanism that never occurs counts as
a failure.

`tb_eva_workloads` runs whole layers of the model shapes the core targets, at
the default sizes, and checks every output and the layer time:
- a 4096-column chunk of the LLaMA-2-7B FFN down projection (K = 11008, zero
  padded to 44 tiles, four codebooks): 183,183 cycles against an epilogue
  bound of 180,224;
- the LLaMA-2-7B attention projection for four requests with three codebooks
  and irregular WI delivery;
- a Qwen3-30B-A3B expert down projection (K = 768, N = 2048).

Each testbench prints `TB_RESULT checks=<n> failures=<m>` and has a watchdog.
To simulate one with Verilator 5, from the directory that holds `rtl/` and
`tb/`:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_eva_top \
    rtl/eva_pkg.sv tb/tb_util_pkg.sv rtl/*.sv tb/tb_eva_top.sv
./obj_dir/Vtb_eva_top
```

The end-to-end test at full size builds and runs in well under a minute.
Parameters such as `NUM_EU`, `N_MAX`, `SLOTS` and `WI_DEPTH` on `eva_top`, and
`ROWS` / `COLS` on the array, can be changed. The controller assumes
`NUM_EU = 4` and batches of 1, 2 or 4.

# VEDA: an LLM generation accelerator with vote-based KV-cache eviction

Generating text with a large language model one token at a time is dominated by
matrix-vector products (GEMV). Each new token multiplies its query by every key
in the KV cache, and the cache grows by one entry per step. Two things therefore
decide the speed of an edge accelerator:

- how well its arithmetic copes with vector lengths that change every step;
- how small the cache can be kept without hurting accuracy.

This design attacks both.

- **Voting-based eviction.** Every attention head of a layer votes against the
  cached positions it finds unimportant for the current token. Once the cache is
  full, the position with the most votes is overwritten, so the cache stays at a
  fixed size.
- **Flexible-product dataflow.** One array of 128 reconfigurable
  multiply-accumulate PEs computes either an inner product (`q·Kᵀ`, through an
  adder tree assembled from the PEs themselves) or an outer product (`s'·V`, each
  PE accumulating locally). Neither the keys nor the values ever need a
  transpose, and no lane sits idle when a length is not a multiple of the tree
  width.
- **Element-serial special functions.** The inner product delivers one score per
  cycle, and the outer product consumes one score per cycle. So softmax and
  layernorm are split into a *reduction* part that collects statistics as the
  scores arrive, and a *normalization* part that scales each element on its way
  into the array. Only one adder, one exponential, one divider and a few
  multipliers are needed, and no pipeline bubble is spent waiting for the
  softmax.

Everything is written in synthesizable SystemVerilog (IEEE 1800-2017). The
arithmetic is FP16, the clock is meant to be 1 GHz, and the off-chip memory is
an HBM of 256 GB/s, which is one 256-byte row per cycle.

## Block map

```
               cmd ──► scheduler ──ctl──┬─────────────┬───────────────┬─────────────┐
                                        ▼             ▼               ▼             ▼
 HBM rows ─────────────► on_chip_buffer ──A──► pe_array (2 x pe_subarray, 128 reconfig_pe)
 (hbm_rdata)             1024 x 128 FP16 ──B──►   │ inner: serial result s
                              ▲                   │ outer: accumulator row
                              │                   ▼
                              │           reduction_unit (max / exp_sum, mean / sigma)
                              │                   │ statistics
                              │                   ▼
                              └── lane ──► normalization_unit ──serial──► pe_array (outer)
                                                  └────────────► voting_engine ──► evict_idx
```

| Module | Role |
|---|---|
| `fp16_pkg` | FP16 operators: mul, add/sub, compare, max, div, sqrt, exp, int→FP |
| `veda_pkg` | lane count, buffer depth, PE mode code, SFU modes, command and control structs |
| `reconfig_pe` | one multiply-accumulate PE with a 2-bit mode; type A or type B |
| `pe_subarray` | 8×8 PEs with the two-level adder tree built from their adders |
| `pe_array` | two sub-arrays joined by a spare PE; inner or outer configuration |
| `reduction_unit` | element-serial softmax/layernorm statistics |
| `normalization_unit` | 3-stage element-serial softmax/layernorm output |
| `voting_engine` | threshold, votes, layer-wise vote counts, eviction index |
| `on_chip_buffer` | 256 KB of storage: 1024 rows × 128 FP16, one write port, two read ports |
| `delay_line` | fixed-latency shift register used by the scheduler |
| `scheduler` | command sequencer driving every control each cycle |
| `veda_top` | the accelerator, with the HBM as a row-wide port |

## The PE and its adder tree

A PE holds an input register `x`, a weight register `w` and an accumulator.
Every PE has a multiplier and one adder. Its 2-bit mode chooses what goes into
the adder:

| code | mode | accumulator update |
|---|---|---|
| 00 | disable | hold |
| 01 | clear | 0 |
| 10 | local | acc + x·w |
| 11 | transmit | type A: psum_a + x·w; type B: psum_a + psum_b |

**Outer-product configuration (`s'·V`).**
- Lane *j* holds column *j* of the output.
- Each cycle, one normalized score `s'[t]` is broadcast to all 128 PEs, together with row *t* of `V`.
- Every PE runs in *local* mode.
- After *l* cycles the 128 accumulators hold the result row.

**Inner-product configuration (`q·Kᵀ`).**
- The PEs hold `q`, one element each. A key row is loaded into the weight registers in one cycle.
- Within each row of 8 PEs:
  - PEs 1, 3, 5 and 7 are type A. Each adds its product to its left neighbour's.
  - PEs 2 and 6 are type B. They add the two results below them.
  - PE 4 then adds the two halves.
- The second level repeats the same pattern on the row sums, using the last PE of each row.
- One spare PE (row 8, PE 8 of the first sub-array) adds the two sub-array totals.

The tree is pipelined, so a new key row can enter every cycle. Each score leaves
the array 8 cycles after its key row was loaded (`pe_array.LAT_INNER`). The tree
is written generically, as a level function over a power-of-two row size, so
`N` and the number of rows can be changed.

## Element-serial softmax and layernorm

**Reduction unit, softmax mode.**
- Scores arrive one per cycle. Each is first multiplied by the softmax scale `1/√d`.
- The scaled score is returned as `x_scaled`, and the buffer stores that value. The stored score and the maximum are therefore on the same scale.
- Scores are grouped into tiles of 8. A tile goes into a 32-entry FIFO, and its maximum is found on the fly.
- When a tile is complete, the running maximum is updated.
- The tile is then drained through the shared exponential: `exp_sum += exp(x − max)`.
- If the maximum grew, `exp_sum` is first multiplied by `exp(old_max − new_max)`. This rescale occupies the single EXP unit for one cycle.
- `in_ready` applies back-pressure to the scheduler so that the FIFO never overflows (it drops when more than 20 entries are in use).
- Over a whole head this costs about one cycle per rescale.

**Reduction unit, layernorm mode.**
- The unit keeps a running sum and a running sum of squares.
- At the end it computes the mean, the mean of squares, the variance and, through the square root, σ.

**Normalization unit.** It sits on the serial input of the outer-product array
and has three stages:

| Stage | Softmax | Layernorm |
|---|---|---|
| 1 | x − max | x − mean |
| 2 | exp | — |
| 3 | ÷ exp_sum | ÷ σ |

In mode `SFU_NONE` it passes elements through unchanged. This is how a plain
GEMV feeds the outer-product array.

## Voting and eviction

For every head of the current token (token index *i*, *l* cached positions), the
voting engine does the following:

1. It receives the *l* normalized scores `s'` as they enter the outer-product
   array. It stores them in a 4096-entry FIFO and accumulates the sum of squares.
2. It forms the threshold `T = a·mean − b·σ`. Here `mean = 1/l` (softmax scores
   sum to one), `σ² = Σs'²/l − mean²`, `a = 1.0` and `b = 0.2`.
3. It replays the FIFO. Every score below `T` adds one vote to that position's
   16-bit count. If `T ≤ 0`, only the minimum score gets a vote (the earliest
   one on a tie).
4. In the generation phase, on the last head of the layer, it scans the counts
   for the maximum and loads the 12-bit eviction index register with that
   position. On a tie the earliest position wins. `evict_valid` pulses when the
   index is ready.

Some further rules:
- Tokens with index below `RESERVED = 32` do not vote. This is the algorithm's
  reserved stage, which sets a lower bound on the cache.
- The votes of all heads of a layer add into one count vector.
- A `STORE` command with `vote_clr` clears the count of the slot it overwrites.
  The clear waits until the engine has finished the current head.
- After reset, the engine sweeps the count memory to zero (4096 cycles, `busy`
  high) before it accepts a head.

The engine's work per head is about 3*l* cycles:
- *l* cycles to collect;
- a few cycles for the threshold;
- *l* cycles to vote;
- *l* cycles for the arg-max on the last head.

The engine runs alongside the next head's `q·Kᵀ`. The scheduler only waits for
it before an outer product that would feed it again.

## Commands and timing

The scheduler accepts one `cmd_t` at a time (`cmd_valid`/`cmd_ready`) and
pulses `cmd_done` when the command has finished.

| op | what it does |
|---|---|
| `OP_LOAD` | `len` HBM rows from `hbm_a` into buffer rows from `buf_y` |
| `OP_STORE` | `len` buffer rows from `buf_x` to HBM from `hbm_a`; optionally clears the vote count of `slot` |
| `OP_GEMV_INNER` | `y[j] = x·W[j]`, `j < len`, `k ≤ 128`; x is buffer row `buf_x`; W rows come from HBM or from the buffer (`w_from_buf`, rows from `buf_s`); results are written lane by lane from row `buf_y`; optional layernorm statistics |
| `OP_GEMV_OUTER` | `y = Σ_t x[t]·W[t]`, `t < len`; x elements are read serially from the buffer (row `buf_x + t/128`) through the normalization unit; the 128 results go to row `buf_y` |
| `OP_ATTN` | one head: `q·Kᵀ` over `len` keys at `hbm_a` (scaled scores to rows from `buf_s`), softmax reduction, then `s'·V` over the values at `hbm_b` with softmax normalization, output to `buf_y`; the normalized scores feed the voting engine (`token_idx`, `gen_phase`, `last_head`) |

Timing facts:
- The HBM port carries one 128×FP16 row per cycle. Read data returns
  `HBM_LAT = 2` cycles after `hbm_re`.
- The buffer returns read data one cycle after the enable.
- Delay lines in the scheduler line up every control with these latencies, so
  both products issue one row per cycle.
- An attention head of length *l* takes about 2*l* + 35 cycles: *l* for the
  keys, *l* for the values, plus the pipeline latencies, plus one cycle per
  softmax rescale. The top-level test measures 635 cycles for *l* = 300.

Weights that are reused across tokens can be loaded into the buffer once
(`OP_LOAD`) and read from there (`w_from_buf`). Otherwise they stream straight
from HBM, which suits the generation phase.

## Number format

FP16 follows the binary16 layout, with these simplifications:
- subnormals are flushed to zero;
- there is no NaN;
- overflow goes to infinity;
- rounding is to nearest, with ties away from zero.

The exponential computes `2^(x·log₂e)`. It splits the exponent into an integer
part and a fraction *f*, and approximates `2^f ≈ 1 + f·(0.65685 + 0.34315·f)`.
This fit is exact at *f* = 0, ½ and 1, and the error is below 0.2 %. Division
and square root are exact bit-serial algorithms unrolled into combinational
logic.

## Where this RTL departs from the paper's description

- **Vote counts off chip.** The counts of one layer live on chip. The algorithm
  keeps one count vector per layer in off-chip memory and swaps it in. That swap
  is not built, so running several layers with eviction would need the host to
  save and restore the counts. This design has no path for doing so.
- **Head averaging.** The counts of all heads are summed, not averaged. The
  arg-max is the same.
- **Inner-product length.** `OP_GEMV_INNER` handles `k ≤ 128`, one array row.
  Long reductions use `OP_GEMV_OUTER`, which takes any `k` up to 8191 per
  command but always starts from cleared accumulators. A `k` of 11008 (the
  Llama-2 7B FFN down projection) therefore cannot be done in one pass.
- **Layernorm** produces `(x − mean)/σ` with no ε and no learned scale or
  shift. Activation functions, residual additions and embedding lookups are
  left to the host.
- **Prefill** uses the same GEMV commands token by token, with the weights
  optionally held in the buffer. There is no separate GEMM mode.
- **The command set,** the struct encodings, the latencies, the FIFO tile size
  (8) and the back-pressure level are choices of this design. The paper
  describes the blocks and the dataflow, not a programming interface.
- **The HBM** is not part of the RTL. The top exposes a row-wide read port and
  write port with a fixed latency. A behavioural model with a fixed latency
  (`tb/hbm_model.sv`) stands in for it in simulation.
- **The on-chip buffer** is written as a register array with two synchronous
  read ports. A silicon implementation would map it onto SRAM macros.

## Verification

Each block has a self-checking testbench in `tb/`. Expected values are computed
in the testbench with `real` arithmetic and then compared within an FP16
tolerance. Each testbench has a watchdog and ends with a line
`TB_RESULT checks=… failures=…`.

| testbench | what it exercises |
|---|---|
| `tb_reconfig_pe` | all four modes, both PE types, random FP16 operands |
| `tb_pe_subarray` | inner sums through both tree levels, outer accumulation |
| `tb_pe_array` | 128-wide dot products at one per cycle with 8-cycle latency, spare-PE join, outer GEMV |
| `tb_reduction_unit` | softmax max and exp_sum with rescales and back-pressure; layernorm mean and σ |
| `tb_normalization_unit` | all three modes, 3-cycle latency |
| `tb_voting_engine` | threshold, reserved stage, negative threshold, multi-head counts, tie-breaking, clears |
| `tb_on_chip_buffer` | lane-masked writes, two read ports |
| `tb_scheduler` | control sequences and latencies of every command |
| `tb_veda_top` | full-size accelerator running an end-to-end workload against a reference model |
| `tb_workload_gen` | eight generated tokens over a fixed 64-slot cache: two heads per token, eviction of the most-voted slot, new K/V stored into it, constant head latency |

`tb_veda_top` uses the top with every parameter at its default: 128 lanes,
1024 buffer rows and a 4096-position vote buffer. It runs:
- loads of weights into the buffer;
- inner and outer GEMVs from HBM and from the buffer;
- layernorm GEMVs;
- prefill and generation-phase attention heads of up to 300 keys;
- evictions;
- a store with a vote-count clear.

It counts each mechanism and fails if any of them never happened:
- reduction back-pressure stalls;
- softmax rescales;
- inner/outer reconfigurations;
- evictions;
- reserved-stage tokens;
- buffer-held weights;
- loads, stores and clears;
- layernorm reductions and normalizations;
- votes.

It also checks that a head of length *l* finishes within 2*l* + 48 cycles.

Simulating with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
    rtl/fp16_pkg.sv rtl/veda_pkg.sv tb/tb_util_pkg.sv tb/tb_veda_top.sv \
    --top-module tb_veda_top
./obj_dir/Vtb_veda_top
```

Replace the last file and the top module to run any other testbench. Testbenches
that do not use `tb_util_pkg` can drop it from the list. `tb_veda_top` accepts
`+trace` to print every state change of the scheduler.

## Changing the design

- **Array width.** `veda_pkg::LANES` sets the array width and the buffer row.
  `pe_subarray` takes its row size `N` and row count as parameters (both powers
  of two), and the inner latency follows as `2·log2(N) + 2`.
- **Voting.** `voting_engine` has the parameters `MAX_LEN`, `RESERVED`,
  `A_FP16` and `B_FP16`. `MAX_LEN` also sets the widths of `len` and of the count address.
- **Softmax FIFO.** `reduction_unit` has the parameters `FIFO_DEPTH` and
  `TILE`. Keep `FIFO_DEPTH ≥ 2·TILE + SKID`.
- **HBM latency.** `veda_top.HBM_LAT` must match the memory. Every
  latency-dependent control is derived from it in `scheduler`.

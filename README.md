# StreamDCIM: a tile-streaming digital CIM accelerator for multimodal Transformers

Multimodal Transformers spend much of their time in two kinds of matrix
product. Some have a fixed operand: a token matrix times a weight matrix.
Others have two operands that are both produced on the fly: queries of one
modality against keys of another (Q_X·K_Yᵀ), or an intermediate matrix
against a freshly rewritten weight tile (I_Y·W_V).

A compute-in-memory (CIM) macro is fast at the first kind. The weights sit
in SRAM and the inputs are streamed past them. It is slow at the second
kind, because one operand has to be written into the SRAM before any MAC can
happen, and the CIM core stalls while that write takes place.

This design attacks that cost in three ways.

1. **Reconfigurable macros (TBR-CIM).** Each row of a macro can hold one
   row of an input-type tile in its left half and one row or column of a
   weight-type tile in its right half (hybrid mode). It can also hold a
   plain 128-wide weight row (normal mode).
2. **Mixed-stationary cross-forwarding.** A macro reads out its stored
   rows and sends them along a pipeline bus to its neighbours. The stored
   *input* row drives the neighbours' *weight* half and the stored *weight*
   row drives their *input* half. Over eight steps, the eight macros
   compute every product of two dynamic tiles. Neither tile is ever
   rewritten into a separate weight array.
3. **Compute/rewrite pipelining.** Rewriting runs on its own queue. A
   macro that the running step no longer needs is rewritten at once, so
   rewriting hides behind computation in a ping-pong fashion.

Around these sit:

- a systolic input scheduler that skips tokens pruned by a dynamic token
  pruning unit (DTPU);
- a special function unit (SFU) for softmax and GELU;
- three 2 × 32 KB buffers.

## Top-level organisation (`streamdcim_top`)

```
 host ──► input buffer ──► systolic input scheduler ──► Q-CIM  (8 macros, 4x64 arrays)
          (2x32KB)            (skips pruned tokens)   ├─► K-CIM  (8 macros)
                                                       └─► TBR-CIM (8 macros, 4x128 arrays)
 host ──► weight buffer ─┐                                   ▲  │ pipeline bus (cross-forwarding)
                         └──── rewrite sources ──────────────┘  ▼
                     output buffer bank 0 (modal X) / bank 1 (modal Y) ◄── SFU ◄── result collector
                                          │                         └─► DTPU (keep mask → scheduler)
                                          └── host read port
```

| Part | File | Size at defaults |
|---|---|---|
| package of sizes, types and command formats | `sdcim_pkg.sv` | 16-bit data, 64 lanes |
| buffers | `pingpong_buffer.sv` | 512 words × 1024 bits each (two 32 KB banks), 1 write and 2 read ports |
| Q-CIM and K-CIM cores | `qk_cim_macro.sv` | 8 macros × 8 arrays × 4 rows × 64 columns × 16 bits |
| TBR-CIM core | `tbr_cim_macro.sv` | 8 macros × 8 arrays × 4 rows × 128 columns × 16 bits |
| one SRAM-CIM array | `cim_array.sv` | 4 rows, half-row writes, two adder trees per bit-plane half |
| adder tree | `dm_adder_tree.sv` | 128 (or 64) terms, split or joined sums |
| bit-serial accumulator | `macro_accumulator.sv` | 40 bits, one per array output |
| streaming network | `systolic_input_scheduler.sv`, `tbsn_pipeline_bus.sv` | |
| result path | `result_collector.sv`, `sfu.sv`, `dtpu.sv` | |
| sequencing | `global_controller.sv` | |

All words in the datapath are 64 lanes of INT16 (1024 bits). One buffer word
is one row of a 64-wide tile.

## Bit-serial MAC

A macro row stores 16-bit signed words. Inputs arrive as 16 bit-planes of 64
bits each, most significant plane first. For each plane, every array forms
the sum of the stored words whose input bit is 1, which gives a signed
24-bit partial sum. The accumulator folds the planes together:

```
plane 15 (sign, weight −2^15):  acc = −psum
planes 14..0:                   acc = 2·acc + psum
```

After the 16th plane, acc equals Σ wᵢ·xᵢ exactly in two's complement. The
array registers its partial sum once and the accumulator registers once, so
a macro's `res_valid` pulses **2 cycles after its last plane**. A token
costs 16 cycles of streaming.

### Dual-mode adder tree

Each array row is split into a left half (columns 0–63) and a right half
(columns 64–127), and the adder tree sums each half separately. The mode
decides what leaves the tree:

- mode_config = 1 (normal): the two sums are added, giving a 128-term dot
  product per row.
- mode_config = 0 (hybrid): the two sums leave separately, because the
  halves belong to different products.

In hybrid mode each half can also be disabled (`en_l`, `en_r`), so a
macro can take part in one half of a cross-forwarding step only.

A TBR-CIM macro therefore yields 32 results in normal mode (one per tile
row) and 64 in hybrid mode (left and right per tile row). A Q/K-CIM macro
yields 32 results of 64 terms.

## Cross-forwarding

This is the part that is least obvious. Take I_Y (an intermediate token
matrix) and W_V (a weight matrix that has just been rewritten), both tiled
into 8 macro-sized tiles. Macro *m* holds rows of (I_Y)_m in its left half
and columns of (W_V)_m in its right half.

One step (`OP_XFWD`) has a source macro *s*. The source reads out its 32
tile rows one after another. Each row is read out as two 16-plane
bit-serial streams, MSB first:

- `fwd_i`: the left (input) half of the row;
- `fwd_w`: the right (weight) half of the row.

The pipeline bus carries both streams up and down the chain of macros
through one register per hop, so macro *j* sees them |j − s| cycles after
the source. The streams then cross over:

- the **input** row drives Input Activation **B**, which multiplies the
  stored **weight** half;
- the **weight** column drives Input Activation **A**, which multiplies
  the stored **input** half.

Which macros consume a step depends on the direction:

| dir | product | right half (weights × forwarded input row) | left half (inputs × forwarded weight column) |
|---|---|---|---|
| 0 | I·W | macros j ≥ s | macros j > s |
| 1 | Q·Kᵀ | macros j ≤ s | macros j < s |

Why this covers everything exactly once, for dir 0:

- The pair (I_a, W_b) with a ≤ b is formed in step s = a. Macro b's right
  half multiplies its stored W_b by the forwarded row of I_a.
- The pair with a > b is formed in step s = b. Macro a's left half
  multiplies its stored I_a by the forwarded column of W_b.

So over the steps s = 0..7, every one of the 64 tile pairs is computed
once. Each macro's adder tree works on at most one half per pair, so no
partial sum is double-counted. dir 1 is the mirror image; it is used for
Q_X·K_Yᵀ, where Q_X is stored in the left halves and K_Y rows in the right.

For each forwarded row, every consumer delivers one 64-lane word:

- lanes 0–31: the left-half sums of its 32 tile rows;
- lanes 32–63: the right-half sums.

A consumer with only one half enabled leaves the other 32 lanes at zero.
The collector writes one word per consumer per row, consecutively, from
`out_addr0`. An 8-macro step therefore produces up to 32 × 8 words.

A step only runs with its consumer macros in hybrid mode. The controller
asserts this (`OP_MODE` sets mode_config per macro). `OP_WS_TBR` uses the
same macros in normal mode as an ordinary weight-stationary core. There,
streams A and B of the scheduler form one 128-element input row.

## Compute/rewrite pipeline and its hazards

The controller runs two independent queues.

**Compute queue (`cc`).** One command runs at a time. A command is accepted
only when two things hold:

- the previous command has drained through the collector and SFU;
- none of the macros it uses is being rewritten. If one is, `ev_cc_blocked`
  is raised while the command waits.

**Rewrite queue (`rc`).** Each command writes `n_rows` rows of one half of
one macro. The data comes from one of four sources: the input buffer, the
modal-X output bank, the weight buffer or the modal-Y output bank.
Rewriting takes one row per cycle: the buffer is read in one cycle and the
row is written the next.

A rewrite **waits** (`ev_rw_hazard`) while its target macro is used by the
running, or just-arriving, compute command.

The important rule: during a cross-forwarding step, a TBR macro counts as
in use only if it is that step's source or one of its consumers. For
dir 0 with source s, that is macros s..7, so macros 0..s−1 are free. A
rewrite of TBR #i can therefore go ahead while step i+1 or later runs.
This is the ping-pong overlap of the paper's pipeline figure, and
`ev_rw_overlap` counts the rows written this way. A rewrite that targets a
macro the step still needs is held until the step ends.

The Q-CIM and K-CIM cores are treated the same way. A rewrite of a Q/K
macro waits for a running weight-stationary pass on that core.

## Streaming network and token pruning

The **systolic input scheduler** works through the tokens 0..n_tok−1 of a
pass:

- Tokens whose `keep_mask` bit is 0 are skipped.
- For each kept token it reads stream A (`addr_a + t`) and stream B
  (`addr_b + t`) from the input buffer.
- It then waits until the result collector is idle. Those cycles are
  counted by `ev_sched_stall`.
- It then sends 16 planes.

Macro k of a core receives the planes k cycles after macro 0, because each
macro forwards the planes to the next through one register. The collector
copes with the resulting staggered `res_valid` pulses.

The **DTPU** sits beside the SFU output. During a softmax pass with
`dtpu_en` set, it adds each probability row into 64 per-token column
sums. `OP_PRUNE` then ranks the tokens in parallel:

- rank(i) is the number of tokens with a larger sum, or with an equal sum
  and a lower index;
- token i stays if rank(i) < keep_cnt.

Using the column sum instead of the column mean does not change the
ranking, because all tokens share the divisor. The new `keep_mask` takes
effect for the next pass of the scheduler. `OP_DTPU_CLR` restores "keep
all".

## Result path: collector, SFU, output buffer

The **result collector** rounds each result to INT16. It applies an
arithmetic right shift by `shift`, then saturates, and packs 64 results
into a word:

- Q-CIM macros 2w and 2w+1 share word w.
- K-CIM words go to `out_addr1`; everything else goes to `out_addr0`.

Every word then passes through the **SFU** before it is written:

| Function | Operation | Cycles per word |
|---|---|---|
| PASS | word unchanged | 1 |
| GELU | y = x·clamp(x/4 + ½, 0, 1) on Q8.8, saturated | 2 |
| SOFTMAX | softmax across the 64 lanes | 130 |

Softmax details:

- Inputs are Q8.8 scores; outputs are Q0.15 probabilities.
- It finds the lane maximum first.
- It computes e = 2^((x − max)·log₂e), with log₂e ≈ 369/256. The integer
  part of the exponent is a shift; the fractional part uses 2^f ≈ 1 + f.
- The sum is formed one lane per cycle, then each lane is divided.
- A word takes 64 + 64 + 2 cycles.

The output buffer has two banks. Bank 0 holds modal-X results (addresses
0–255) and bank 1 holds modal-Y results (256–511). The rewrite sources
`SRC_RES_X` and `SRC_RES_Y` read the corresponding bank. The host reads
results on the second read port.

## Command formats

These are defined in `sdcim_pkg.sv`. The encodings are this design's own.

| op | fields used | effect |
|---|---|---|
| `OP_WS_QK` | addr_a, addr_b, n_tok, core_mask, out_addr0/1, shift, sfu_func, dtpu_en | stream A through Q-CIM, stream B through K-CIM; 8 words per token per core |
| `OP_WS_TBR` | addr_a, addr_b, n_tok, out_addr0, shift, sfu_func | TBR core in normal mode on 128-element rows (A‖B); 4 words per token |
| `OP_XFWD` | src, dir, out_addr0, shift, sfu_func, dtpu_en | one cross-forwarding step (32 rows) |
| `OP_MODE` | mode[7:0] | mode_config per TBR macro (1 normal, 0 hybrid) |
| `OP_PRUNE` | keep_cnt | rank and update keep_mask |
| `OP_DTPU_CLR` | — | clear sums, keep all tokens |

A rewrite command (`rcmd_t`) has the fields core, macro, half, row0,
n_rows (1–32), sel (the source) and src_addr. Tile row r of a macro lives
in array r/4, row r mod 4.

## Timing summary

| Event | Latency |
|---|---|
| buffer read | 1 cycle |
| token stream | 16 cycles per token; +k cycles skew to macro k |
| macro result | 2 cycles after the last plane |
| cross-forwarding hop | 1 cycle per macro of distance |
| rewrite | 1 row per cycle after a 1-cycle buffer read |
| SFU | PASS 1, GELU 2, SOFTMAX 130 cycles per word |
| DTPU ranking | `keep_mask` valid 1 cycle after `OP_PRUNE` |

## Verification and simulation

Each block has a self-checking testbench in `tb/` that compares against a
behavioural model. Each prints `TB_RESULT checks=N failures=M` and has a
watchdog.

`tb_streamdcim_top` runs the complete top at its default size. Its
program:

1. Load the buffers and rewrite Q, K and TBR macros from all four sources.
2. Switch to hybrid mode.
3. Run cross-forwarding steps in both directions, with softmax and the
   DTPU.
4. Prune tokens, then run a GELU pass with skipped tokens.
5. Switch back to normal mode and run a weight-stationary TBR pass that has
   to wait for a rewrite.

It checks every word written against a reference computed in the
testbench. It also counts each mechanism and fails if any count is zero:

- scheduler stalls;
- rewrite hazards;
- overlapped rewrites;
- blocked commands;
- cross-forwarded rows;
- skipped tokens;
- mode switches.

A run takes about two seconds of simulation.

To simulate any testbench with Verilator (5.x):

```
verilator --binary --timing --assert -Wno-fatal \
    rtl/sdcim_pkg.sv tb/tb_streamdcim_top.sv -y rtl \
    --top-module tb_streamdcim_top -Mdir obj_top
./obj_top/Vtb_streamdcim_top
```

Replace the testbench name to run a block test, for example
`tb/tb_sfu.sv --top-module tb_sfu`.

## Where this design departs from the paper

- **Sizes.** The macro geometry (4 × 128 TBR arrays, 4 × 64 Q/K arrays,
  8 arrays per macro, 8 macros per core), the INT16 data and the 2 × 32 KB
  buffers follow the paper. The 40-bit accumulator and 24-bit partial sums
  are chosen to be exact.
- **One compute command at a time.** In the paper's pipeline figure, the
  Q/K-CIM cores generate the next tiles while the TBR core
  cross-forwards. Here the compute queue is serial: only rewriting
  overlaps computation.
- **No partial-sum accumulation across passes.** One pass computes dot
  products of 64 terms (hybrid, Q/K) or 128 terms (normal TBR). Longer
  dot products, such as the 768- or 1024-wide hidden sizes of the
  evaluated ViLBERT models, need the host to add partial results. Long
  attention rows do too.
- **Softmax and pruning work on 64-lane tiles.** The SFU normalises over
  one 64-lane word and the DTPU ranks 64 tokens.
- **Nonlinear functions.** The paper gives no circuits for the SFU. The
  base-2 softmax with a linear 2^f and the piecewise GELU are this
  design's choices.
- **Own components.** The result collector, the host interface, the
  command set, the wait-until-idle rule of the scheduler and the one
  register per bus hop are this design's choices. Rewriting moves one
  64-lane row per cycle.
- **Not modelled.** The SRAM bit-cell and its analogue details are not
  modelled: the arrays are registers with a functional adder tree. Off-chip
  memory is not modelled either; the host fills the buffers. Energy,
  area and the paper's speed-up figures are not reproduced.

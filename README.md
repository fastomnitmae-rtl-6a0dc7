# FastOmniTMAE training accelerator

A Tsetlin-machine embedding model learns a word representation from a set of
*clauses*. One model is trained per target word. Each clause is an AND over
*literals*: the 40,000 vocabulary features of an input vector X and their 40,000
negations. Every literal has a small automaton, an 8-bit counter from 0 to 255.
The literal takes part in its clause (is *included*) when the counter is above
N = 127. The trained counters themselves, included or not, are the embedding.

Classic Tsetlin training sums the votes of all clauses first. Only then can it
decide which clauses to update. FastOmniTMAE drops that global sum. Each clause
decides from its own weighted output whether it takes part in the update for
the current example. Clauses then no longer wait for each other, so they can be
trained side by side.

This RTL trains one such model on an FPGA next to a host processor. The host
places the examples, the clause weights and the automaton states in external
memory, writes a few registers and starts the run. The accelerator then loops
over the epochs, batches, examples and clause groups on its own. It streams the
automaton states through a set of clause engines and writes back the states
that changed.

## The training rule, as built

For each example (label Y ∈ {0,1}, binary vector X) and each clause j with
integer weight w_j:

1. **Evaluate.** o_j = 1 if every included literal is 1, else 0. A clause with
   no included literal outputs 1.
2. **Local decision.** r_j = clip(w_j·o_j, −T, T). The update probability is
   p_j = (T − r_j)/2T for Y = 1 and p_j = (T + r_j)/2T for Y = 0.
3. **Update.** The clause is updated if a random draw succeeds with probability
   p_j and w_j ≥ 0. The feedback type depends on Y and o_j:
   - **Type Ia** (Y=1, o=1): each literal that is 1 is incremented. Each literal
     that is 0 is decremented with probability 1/s.
   - **Type Ib** (Y=1, o=0): every literal is decremented with probability 1/s.
   - **Type II** (Y=0, o=1): each literal that is 0 and excluded is incremented.
     This lets such literals turn the clause off for this input next time.
   - Y=0, o=0: no feedback.

   Counters saturate at 0 and 255.

Two details are this design's own choice, because the published rule does not
fix them:

- The Type Ia increment of true literals is unconditional.
- The clause weights are inputs only. They are loaded once per run and never
  changed, because the training procedure has no weight-update step.

## Streaming the automata: two passes per clause group

One clause has 80,000 counters, and 32 clauses together hold 2.56 MB. That is
more than the on-chip memory, so the states stay in external memory and are
streamed. The memory port is DATA_W = 128 bits wide. One *beat* therefore
carries LANES = 16 counters, which cover one 16-bit word of literals.

The clauses are handled in *groups* of NUM_ENGINES (12) clauses. With 32
clauses the groups hold 12, 12 and 8. Each clause of a group is tied to one
engine (`fastomni_instance`). For each example and each group, the controller
runs:

| phase    | what happens | beats |
|----------|--------------|-------|
| evaluate | All states of the group are read once. Each beat goes to its engine, which ORs in a "violation": an included literal that is 0. | A·5000 |
| decide   | In one cycle, each engine takes o = !violation, computes its own r, p and random draw, and latches a feedback type. A settle cycle follows. | – |
| update   | The group's states are read again and sent through the state-update logic. They are written back to the same addresses. | A·5000 |

If no clause of the group was selected, the update pass is skipped entirely.
The `SKIPPED` counter counts these *bypasses*. Each address is read before it
is rewritten, so the reads of an update pass may run ahead of its writes.

**State layout in memory.** Let LW = 2·FEATURES/LANES = 5000 beats per clause.
Group g starts at `STATE_BASE + g·NUM_ENGINES·LW·16` bytes. Inside a group, the
beats are interleaved by clause. Beat `w·A + e` holds literal word w of clause
`g·NUM_ENGINES + e`, where A is the size of the group. Words 0 to 2499 are the
features x. Words 2500 to 4999 are the negated features ¬x, in the same order.
Inside a beat, lane i (bits 8i+7:8i) is literal 16w + i.

This interleaving sends consecutive beats to different engines. The pipeline
therefore never has to wait for a single clause's accumulator.

**The datapath is shared.** There is one `clause_logic` (16 lanes) and one
`state_update_logic` (16 lanes), used by all engines in turn. Each engine
holds only its clause context: the violation flag, o_j, and the feedback type.
Each engine also has its own `feedback_logic` with one multiplier, so 12
engines use 12 multipliers. The throughput is one beat per cycle, independent of
NUM_ENGINES. What the engines add is that up to 12 clause decisions are taken at
once.

**Input vectors.** X comes from the on-chip `input_x_buffer`. It holds the
current batch, up to MAX_BATCH = 8 examples of 313 beats. For each state beat,
the compute core reads the matching 16-bit literal word. It inverts the word for
the second half of the literal range.

## Timing and throughput

The compute core has a two-stage pipeline:

- Stage 1 accepts a beat and issues the X-buffer read.
- Stage 2 evaluates or updates the beat.

The whole pipeline stalls when its output is not accepted. A gap-free update
pass of N beats takes N + 2 cycles.

At the defaults, one example costs:

- 160,000 beats for evaluation;
- up to 160,000 beats for updates;
- one 314-beat record fetch per example, loaded a batch at a time;
- a few control cycles per group.

The full-size simulation measured **320,410 cycles per example** when every
group needs its update pass. At 150 MHz that is 2.1 ms.

Real inputs need fewer cycles, because some update passes are bypassed. On
inputs made of 24 accumulated documents, the measured cost was:

| build | cycles per example | 352,000 examples |
|-------|--------------------|------------------|
| 12 engines, 150 MHz | 287,876 | about 675 s |
| 2 engines, 75 MHz | 216,814 | about 1,017 s |

The 2-engine build needs fewer cycles because, with only two clauses per group,
more groups have no selected clause. The published figures for the same job are
119.9 s and 657.4 s. Three reasons for the gap:

- It has one 128-bit read port and one write port. The published system spreads
  reads over two ports and writes over two more.
- Even four 128-bit ports at 150 MHz would not reach 0.34 ms if every state
  were read twice and written once per example: 7.7 MB at 9.6 GB/s is 0.8 ms.
  The published system must therefore avoid some of that traffic.
- The published description does not say how. It could keep part of the states on chip, or skip
  work for sparse inputs. This design does neither.

## Random numbers

All random numbers come from xorshift32 generators (x ^= x<<13; x ^= x>>17;
x ^= x<<5). Generator k is seeded with `SEED ^ (0x9E3779B9·(k+1))`; 0 is
replaced by 0x12345678.

| bank | generators | advances | used for |
|------|------------|----------|----------|
| lane bank | 8 (k = 0..7) | once per update-pass beat | 16 bits per lane; the lane fires with probability 1/s if that value is below `S_INV` |
| feedback bank | NUM_ENGINES (k = 64..) | once per decide | a 32-bit u per engine |

`S_INV` is 1/s in Q16, so 65536 means s = 1.0. The engine's clause is sampled
when `floor(u·2T / 2^32) < T ∓ r`. That is exactly p = (T ∓ r)/2T, up to the
2^-32 grid.

Starting a run reseeds both banks, so a run is reproducible from `SEED`.

## Blocks

```
tmae_accel_top
├── axi_lite_slave       control / status registers
├── global_control_fsm   run sequencer: weights, batches, examples, groups, result
├── axi_mm_master        AXI4 bursts (≤16 beats, never across 4 KB)
├── data_mover           routes read beats to buffers / core, core beats back to memory
├── input_x_buffer       X vectors of the batch (2504 × 128 bit, BRAM-style read)
├── label_fifo           labels Y of the batch (8 deep)
├── weights_buffer       32 signed 32-bit clause weights, 12 read ports
└── compute_core
    ├── fastomni_instance ×12   (each with a feedback_logic)
    ├── clause_logic            shared, 16 lanes
    ├── state_update_logic      shared, 16 lanes
    └── rng_xorshift ×2         lane bank, feedback bank
```

`tmae_pkg` holds the shared types: the feedback enum, the configuration and
status structs, the data-mover command, and the register map. It also holds the
xorshift32 and seeding functions.

The block split follows the published architecture diagram:

- control slave, global control unit and FSM, memory-mapped master, data mover;
- local buffers for X, Y and the weights;
- a compute core with N instance blocks and clause, feedback and state-update
  logic.

This design chose everything below the block level: the widths, the layouts,
the register map, the pipeline and the random-number scheme.

## Memory records

All addresses are byte addresses, aligned to 16 bytes.

- **Examples** at `DATA_BASE`. One record per example, 1 + XB beats with
  XB = ⌈FEATURES/128⌉ = 313. The first beat holds the label Y in bit 0. The
  next XB beats hold X, feature f at bit f%128 of beat f/128. The host builds X
  by accumulating documents; that is not done here.
- **Weights** at `WEIGHT_BASE`. ⌈CLAUSES/4⌉ beats. Clause j is the signed
  32-bit value in beat j/4, bits 32·(j%4)+31 : 32·(j%4).
- **States** at `STATE_BASE`, laid out as described above. The array is
  updated in place.
- **Result** at `RESULT_BASE`. One beat, written at the end of the run:
  - bits 31:0: 0x7A3ED0E5;
  - bits 63:32: examples trained;
  - bits 95:64: clause updates applied;
  - bits 127:96: update passes skipped.

## Register map (AXI4-Lite, 32-bit)

| offset | name | access | meaning |
|--------|------|--------|---------|
| 0x00 | CTRL | W | bit 0: start a run; bit 1: clear done and the counters |
| 0x04 | STATUS | R | bit 0: busy; bit 1: done |
| 0x08 | DATA_BASE | RW | first example record |
| 0x0C | STATE_BASE | RW | automaton-state array |
| 0x10 | WEIGHT_BASE | RW | clause weights |
| 0x14 | RESULT_BASE | RW | result record |
| 0x18 | NUM_EX | RW | examples per epoch |
| 0x1C | BATCH | RW | examples per fetch, 1..MAX_BATCH (reset 1) |
| 0x20 | CLAUSES | RW | clauses trained, 1..MAX_CLAUSES (reset 1) |
| 0x24 | T | RW | threshold T, 16 bit |
| 0x28 | S_INV | RW | 1/s in Q16, 17 bit (reset 65536) |
| 0x2C | EPOCHS | RW | passes over the examples (reset 1) |
| 0x30 | SEED | RW | random seed |
| 0x34 | EX_DONE | R | examples trained |
| 0x38 | UPDATES | R | clause feedback events |
| 0x3C | SKIPPED | R | bypassed update passes |
| 0x40 | CYCLES | R | clock cycles of the last run |

Byte strobes are honoured. A run is:

1. Write the configuration registers.
2. Write CTRL = 1.
3. Poll STATUS, or watch the `done` output.

## Parameters of `tmae_accel_top`

| parameter | default | meaning |
|-----------|---------|---------|
| NUM_ENGINES | 12 | clause engines (clauses per group) |
| MAX_CLAUSES | 32 | size of the weights buffer |
| FEATURES | 40000 | vocabulary size; 2·FEATURES literals per clause; a multiple of 16 |
| STATE_BITS | 8 | counter width |
| DATA_W | 128 | memory data width |
| ADDR_W | 32 | memory address width |
| MAX_BATCH | 8 | examples held on chip |
| MAX_BURST | 16 | longest AXI burst |
| AXIL_ADDR_W | 8 | control address width |

The published numbers are 12 engines, 32 clauses, T = 20000, s = 1.0, 8-bit
states and a 40,000-word vocabulary. They were used on a 150 MHz Zynq
UltraScale+ part. The same design was also built with 2 engines at 75 MHz for a
Zynq-7000.

The data width, address width, batch size and burst length are this design's
choices.

The top has one clock and an active-low asynchronous reset. It has an
AXI4-Lite slave and an AXI4 master (INCR bursts, 16-byte beats, full write
strobes). `busy` and `done` repeat STATUS.

## Departures from the published design

- **One read port and one write port.** Here both go through a single AXI4
  master. This matches the published 2-engine build, which reads through one
  port and writes through another. The 12-engine build uses two read and two
  write ports. See *Timing and throughput* for the cost.
- **All states stream from external memory for every example.** The published
  run time implies less traffic. The method behind it is not described.
- **The datapath is shared.** One 16-lane clause evaluator and one updater serve
  all engines. The published text only says that the engines train clauses in
  parallel.
- **Weights are fixed during training.** The training procedure has no
  weight-update step.
- **Type Ia increments are deterministic.** No probability is given for them.
- **Example preparation stays on the host.** This covers label sampling and the
  accumulation of documents into X. The accelerator starts from finished
  records.
- **Clock, processor ports and DDR controller are not part of this RTL.**
- **Clause count limit.** The 160-clause classification configuration needs
  MAX_CLAUSES = 160.

## Simulating

Every testbench in `tb/` is self-checking. Each prints
`TB_RESULT checks=<n> failures=<n>` and stops itself through a watchdog if
something hangs. For example, with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl -y tb \
    rtl/tmae_pkg.sv tb/tmae_tb_pkg.sv tb/tb_tmae_accel_top.sv \
    --top-module tb_tmae_accel_top -o sim
./obj_dir/sim
```

The package files must come first on the command line.

| testbench | what it runs |
|-----------|--------------|
| `tb_tmae_accel_top` | end-to-end run at reduced size (see below) |
| `tb_tmae_full` | one example at the default size |
| `tb_tmae_workload` | the embedding training job on a 12-engine and a 2-engine build (see below) |
| one per block | e.g. `tb_compute_core`, `tb_axi_mm_master`, `tb_feedback_logic` |

Two testbench helpers are not synthesizable:

- `tb/axi_mem_model.sv` is an AXI4 memory. It adds random back-pressure and
  flags any burst that crosses 4 KB.
- `tb/tmae_tb_pkg.sv` is a reference model of the training rule. It uses the
  same random-number definitions as the RTL, so results can be compared bit
  for bit.

**`tb_tmae_accel_top`** runs at reduced size:

- 64 features, 3 engines, 7 clauses;
- 10 examples in batches of 4, 2 epochs;
- T = 20, s = 2;
- 20 % memory stalls, with the state array straddling a 4 KB boundary.

After the run it compares every automaton counter, the counter registers and
the result record with the reference model. It also requires each mechanism to occur at least once:

- evaluation and update passes, and bypassed update passes;
- Type Ia, Ib and II feedback, and feedback blocked by a negative weight;
- saturation;
- several batches and several epochs;
- memory stalls and 4 KB burst splits.

**`tb_tmae_full`** uses the top with no parameter overrides:

- 40,000 features, 12 engines, 32 clauses;
- T = 20000, s = 1.0;
- one example, one epoch.

It compares all 2,560,000 counters, the result record and the counter
registers with the reference model. It also checks that the cycle count stays
within 5 % of one beat per cycle plus a fixed overhead. It simulates in about a
second.

**`tb_tmae_workload`** trains one target word at the full model size, through
the helper `tb/tmae_workload_run.sv`:

- 40,000 features, 32 clauses, T = 20000, s = 1.0;
- 8 examples, 2 epochs;
- two builds: 12 engines and 2 engines.

Each input is the bag of words of 24 accumulated documents. For label 1, the
documents also contain context words of the target. Both runs are compared
state by state with the reference model. The testbench prints the cycles per
example and the projected time of the full 352,000-example job. It simulates
in about 10 seconds.

## How far to trust it

- Every block passes its own testbench. The end-to-end run matches the reference
  model exactly at the reduced size, and the full-size run matches at the
  default size.
- Each testbench was also run against a copy of its block with one deliberate
  bug, and it caught the bug.
- The reference model is written from the training rule, not from the RTL.
  Where the rule is ambiguous (see *Departures*), the model shares the same
  reading, so a misreading would not be caught.
- No synthesis was run for an FPGA target and no timing was closed. Two paths
  may need pipelining at 150 MHz:
  - the 16-lane update path;
  - the per-engine multiply in `feedback_logic` (a 32 × 17-bit product).

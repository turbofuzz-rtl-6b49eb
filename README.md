# TurboFuzz fuzzing loop in RTL

Processor fuzzing usually spends most of its time outside the processor. A
software fuzzer writes a test program and a simulator runs it. Coverage goes
back to the fuzzer, which decides on the next program. This design moves the
whole loop into the programmable logic of one FPGA, next to the processor under
test:

- a hardware fuzzer builds each test program (an *iteration* of up to 4000
  RISC-V instructions);
- coverage is counted by hardware attached to the processor;
- a seed corpus lives in on-chip RAM;
- every retired instruction is compared with a reference model while the
  program runs.

What remains outside is:

- the processor itself;
- the reference instruction-set emulator, which runs as software on the FPGA's
  hard CPU;
- the DDR memory;
- the configuration readback used for snapshots.

All of these are ports of the top module `turbofuzz_top`.

The RTL follows the TurboFuzz architecture (fuzzer IP, corpus scheduling by
coverage gain, the deepExplore hybrid stage, coverage indices without
unreachable points, instruction-level differential checking). It is an
independent implementation. Where the published description stops, the
choices made here are marked below and in each file's opening comment.

## The loop

```
            +--------------------- feedback: gain = sum of weighted new points ----------+
            v                                                                             |
  +------------------+     +-----------+     stim_* (addr, instr)     +------------+      |
  | tf_turbofuzzer   |---->| stimulus  |----------------------------->| processor  |      |
  |  (direct/mutate) |     | selector  |---+                          | under test |--cov_ctrl--> tf_cov_instrument x NUM_COV
  +------------------+     +-----------+   | staging slot             +------------+      |
  | tf_deepexplore   |---->|           |   v                               | dut_rec      |
  |  (stage 1)       |     +-----------+ tf_corpus_storage                 v              |
  +------------------+        ^          (NUM_SEEDS+1 slots)        tf_diff_checker <-- ref_rec (emulator)
            ^                 |                ^                        | paused, snap_trig
            |           tf_corpus_manager -----+ (slot numbers, gains)  |
            +---- seed selection (3/4 best, 1/4 random) <---------------+-- freezes the loop on a mismatch
```

One iteration goes through six steps, set by the FSM in `turbofuzz_top`:

1. **IDLE.** The loop waits for `run_en`. After reset it also waits until the
   coverage maps have been swept clear.
2. **BEGIN.** The loop picks the source of the next iteration.
   - While deepExplore is enabled and unfinished, the deepExplore engine is the
     source.
   - Otherwise the fuzzer is the source, and it decides between direct and
     mutation mode.
3. **GEN.** Instructions stream out on `stim_*` at addresses
   `CODE_BASE + 4*position`. The same entries, with their metadata, go into the
   corpus *staging slot*.
4. **DATA.** `tf_data_init` rewrites the whole data region (64 KiB, 8192
   doublewords) through the `dmem_*` port with values from a 64-bit LFSR.
   The LFSR is seeded from the iteration number, so every iteration starts
   from different but reproducible memory contents.
5. **RUN.** `run_start` pulses and the processor executes the program.
   - Each retired instruction is compared with the emulator's record.
   - Each `cov_sample` looks up one coverage point per instrumented module.
   - The environment raises `run_done` when the program has finished.
6. **FB (feedback).**
   - The gain is the sum over modules of the shifted count of points that were
     new in this iteration.
   - The gain goes to the corpus manager and, in stage 1, to deepExplore.

A mismatch freezes the FSM and the stimulus stream and pulses `snap_trig`.
`resume` continues.

## Instruction blocks and the two passes

This is the part that takes the most care.

**Entries.** The fuzzer works on *entries*, not bare words. An entry
(`tf_pkg::entry_t`, 86 bits) holds:

- the 32-bit instruction;
- an operand class (R, one-source FP, fused multiply-add, I, shift, U, load,
  store, branch, JAL, JALR, AMO, CSR or raw);
- a role: the prime instruction, or an AUIPC or ADDI placed before it;
- a block-start flag and a control-flow flag;
- the block index;
- a 32-bit `aux` field. This is a memory address for memory instructions and a
  target block index for control flow;
- two flags for retained entries.

**Blocks.** A block is one *prime* instruction with the *affiliated*
instructions that prepare it:

| prime | block |
|---|---|
| most instructions | the prime alone |
| load, store, JALR | AUIPC + prime |
| AMO, LR, SC | AUIPC + ADDI + prime |

The prime is drawn from a library of 172 templates. It holds every unprivileged
RV64 I, M, A, F, D and Zicsr instruction except ECALL and EBREAK. FENCE and
FENCE.I are fixed words and are kept bit for bit. The five subsets (I, M, F/D,
A, Zicsr) can each be switched off through `cfg.cat_en`. A disabled draw moves
on to the next enabled template.

Branch offsets can only be written once every block's address is known. So an
iteration is built in two passes over the *global context* (`tf_global_context`).

### Pass 1: build

The global context is an iteration buffer of 4096 entries. Next to it, it keeps:

- the running instruction count;
- a **block base table**: block index → code address of its first instruction;
- a **remap table**: seed block index → block index in the new iteration.

Direct mode appends generated blocks (`tf_block_gen`). It stops when another
block of up to three entries would pass `cfg.iter_len`. Each block asks the
fuzzing context (`tf_fuzz_context`) for its target:

- **Loads** get an address in the data region with probability 12/16, otherwise
  an address in the code region.
- **Stores and AMOs** always get a data-region address. This keeps programs from
  modifying themselves.
- **Control flow** gets a forward distance of 1..`JUMP_RANGE` blocks (4 by
  default). A short forward jump skips at most a few instructions, so nearly
  the whole program executes.

Mutation mode (`tf_mutation_engine`) first asks the corpus for a seed. It then
reads the seed block by block and draws one operation per block:

| operation | probability | effect |
|---|---|---|
| generation | 3/16 | insert a newly generated block here, then keep the seed block |
| deletion | 11/16 | drop the seed block |
| retention | 2/16 | copy the seed block unchanged and record old → new block index in the remap table |

When the seed runs out, generated blocks fill the iteration to its length.

### Pass 2: operand assignment

`tf_operand_assign` reads the buffer from the start. Each entry goes through
three registered steps: analyse, place, validate. Together with the buffer
read they form a four-stage pipeline. It delivers one finished instruction
per cycle and holds as a whole when the stimulus port is not ready. The only
state handed from one entry to the next is the current block's base
register, and it travels down the pipeline with its entry.

Building and streaming a full 4000-instruction iteration takes about 11,000
cycles in direct mode and about 17,500 in mutation mode. Most of that is
pass 1, which produces at most one entry per cycle and spends extra cycles
per generated block. The figures come from `tb_workload_sizes`.

*Analyse* turns the entry's target into an address:

- A **generated** jump's block index is looked up in the base table. An index
  past the last block means the end of the code.
- A **retained** jump's old target index goes through the remap table. If that
  block was deleted, a random block of the new iteration is taken instead.
- A store whose retained address lies outside the data region is folded into
  it.

The PC-relative value is `V = target - base(block of this entry)`. All entries
of a block share the block's base address, so an AUIPC and its partner compute
the same value.

*Place* writes fields in RISC-V format:

- AUIPC gets `(V + 0x800) >> 12`.
- ADDI, loads, stores and JALR get `V[11:0]`.
- Branches and JAL get `V`.
- The address register of a memory prime is the AUIPC's destination.
- Fresh entries take random registers and immediates. The third source of a
  fused multiply-add is random too; 32-bit shifts get a 5-bit amount and LR
  gets `rs2 = x0`.
- Retained entries keep their registers.
- A retained instruction without an address, or a raw one, keeps every bit.

*Validate* repairs anything illegal:

- a branch or JAL whose offset does not fit is turned into a jump to the next
  instruction;
- an unknown major opcode becomes a NOP.

Repairs are counted in `n_fix`.

## Corpus without copying

`tf_corpus_storage` has `NUM_SEEDS + 1` physical slots of 4096 entries. Slot
numbers, lengths and gains are held in `tf_corpus_manager`.

While an iteration streams out, it is written into the spare *staging* slot. If
the iteration is kept as a seed, the manager swaps the staging slot number with
the slot number of the seed it replaces. Nothing is ever copied.

The scheduling rules are:

- **Direct or deepExplore iteration.**
  - It is kept only if its gain is positive.
  - It is appended while there is room.
  - When the corpus is full, it replaces the lowest-gain seed, if it beats that
    seed.
- **Mutated iteration.** It is not stored. The measured gain overwrites the gain
  recorded for its parent. A seed that stops paying off sinks and is replaced
  later; an old seed that keeps finding coverage stays.
- **Selection.** With probability 12/16 the highest-gain seed is picked, otherwise
  a uniformly random one. The answer comes the cycle after the request.

The mode is drawn once per iteration: mutation with probability 7/16, direct
with 9/16. Mutation is only possible once a seed exists.

## deepExplore: seeds from real programs

Random programs rarely produce the long dependent chains of ordinary code.
Stage 1 (`tf_deepexplore`) therefore runs representative *intervals* of
benchmarks before fuzzing starts.

The host prepares the intervals offline. It picks them SimPoint-style and
prefixes each with initialisation instructions that rebuild the register state.
It then loads the words, an init flag per word and a length per interval
through the `iv_*` port.

Stage 1 has two phases:

- **Phase A** plays every non-empty interval once. Intervals whose gain reaches
  `mark_thresh` are marked.
- **Phase B** replays the marked intervals in rounds.
  - Only the immediates of init words are changed (ADDI/ADDIW and other
    non-shift OP-IMM forms, and LUI). They are XORed with a mask made from a
    per-interval key and the word position.
  - Registers and instruction order stay, so the dependency structure is kept.
  - A key that improves the interval's best gain is kept. The next key differs
    from the best key in one random bit.
  - A round whose total gain is below `plateau_thresh` ends stage 1, as does
    round `MAX_ROUNDS`.

`stage` then becomes 2 and the fuzzer takes over.

Interval words are emitted as raw one-instruction blocks. If an interval is kept
as a seed, later mutation can drop or keep its words but never rewrites them.

## Coverage points without dead indices

Each instrumented module presents its control registers on `cov_ctrl`. Register
0 sits in the lowest bits. `tf_cov_instrument` folds them into a
`MAX_STATE`-bit index (15 bits by default):

- Register *i* is placed at offset `o_i`, where `o_0 = 0` and
  `o_(i+1) = (o_i + W_i) mod MAX_STATE`.
- Bit *b* of register *i* goes to index bit `(o_i + b) mod MAX_STATE`.
- Bits that land on the same index bit are XORed.

Put differently, flat control bit *k* lands on index bit `k mod MAX_STATE`.
With at least `MAX_STATE` control bits, every index bit depends on some
register. So every one of the `2^MAX_STATE` points can be reached, unlike
schemes that shift registers randomly and pad with zeros.

Example (default widths 8, 6, 5, 7 and `MAX_STATE = 15`):

| register | width | index bits |
|---|---|---|
| 0 | 8 | 0–7 |
| 1 | 6 | 8–13 |
| 2 | 5 | 14, then 0–3 |
| 3 | 7 | 4–10 |

A `2^MAX_STATE`-bit map records the points seen. The map is cleared one word per
cycle after reset, which takes 32768 cycles at the default size. The count of
new points in an iteration is shifted left or right by the module's `SHIFT`.
This weights modules against each other: a right shift quiets a multiplier or
divider full of toggling multiplexers. The top sums the shifted counts into the
iteration's gain.

## Differential checking

`tf_diff_checker` puts the processor's and the emulator's commit records
`{pc, instr, rd, wdata}` into two FIFOs of 16 entries.

- The faster side stalls through its ready signal.
- While both FIFOs hold a record, the heads are compared and popped, one pair
  per cycle.
- On the first difference, popping stops and `paused` rises. `snap_trig` pulses
  for one cycle and the two records are held in `mm_dut` and `mm_ref`.
- `resume` drops the pair and continues.

## Top-level interface

| group | signals | meaning |
|---|---|---|
| control | `cfg`, `run_en`, `deep_en`, `mark_thresh`, `plateau_thresh` | probabilities in 16ths, subset enables, iteration length; deepExplore thresholds |
| interval load | `iv_we`, `iv_sel`, `iv_idx`, `iv_instr`, `iv_init`, `iv_len_we`, `iv_len`, `n_intervals` | host writes benchmark intervals |
| stimulus | `stim_valid/addr/instr`, `stim_ready` | write port into the processor's code memory |
| data memory | `dmem_valid/addr/wdata`, `dmem_ready` | write port into the processor's data region, refilled before each run |
| run | `run_start` (pulse), `run_done` | processor executes the iteration |
| coverage | `cov_sample`, `cov_ctrl[NUM_COV]` | control registers of the instrumented modules |
| checking | `dut_*`, `ref_*`, `resume`, `paused`, `snap_trig`, `mm_dut`, `mm_ref` | commit streams and snapshot trigger |
| status | `n_iter`, `cov_total`, `last_gain`, `last_mode`, `corpus_count`, `corpus_act*`, `deep_stage`, `mut_op*`, `n_fix`, `n_checked`, `fb_valid` | progress and event strobes |

The reset `rst_n` is asynchronous and active low. Everything runs on one clock.

## Parameters

| parameter | default | origin |
|---|---|---|
| iteration length (`cfg.iter_len`) | 4000 | published evaluation (1000 also used there) |
| mutation / direct mode | 7/16 / 9/16 | published defaults |
| generation / deletion / retention | 3/16, 11/16, 2/16 | published defaults |
| best-seed selection | 3/4 | published default |
| loads into data region | 3/4 | published default |
| `MAX_STATE` | 15 | published final configuration (13 and 14 also evaluated) |
| `ITER_DEPTH`, `SEED_LEN` | 4096 | this design: smallest power of two holding 4000 |
| instruction library (`LIB_N`) | 172 templates | this design (the source asks for the complete instruction set) |
| `NUM_SEEDS` | 16 | this design |
| `JUMP_RANGE` | 4 blocks | this design (the source only says "small range") |
| `NUM_COV`, register widths, `SHIFT` | 4 modules, 8/6/5/7 bits, 0/0/0/−1 | this design; real values come from instrumenting the processor |
| `NUM_INTERVALS`, `INTERVAL_LEN`, `MAX_ROUNDS` | 16, 1024, 8 | this design |
| `FIFO_DEPTH` | 16 | this design |
| code / data regions | 0x8000_0000 (16 KiB), 0x8010_0000 (64 KiB) | this design |

At the defaults the design holds about 7.2 Mbit of RAM:

| memory | size |
|---|---|
| seeds | 6.0 Mbit |
| intervals | 0.54 Mbit |
| iteration buffer | 0.35 Mbit |
| coverage maps | 0.13 Mbit |

That is roughly 200 36-kbit block RAMs, which fits comfortably in a Zynq
UltraScale+ XCZU19EG.

## Where this departs from the published design

- **Instruction library.** It lacks ECALL, EBREAK and the privileged
  instructions, which belong with the exception templates. CSR
  instructions only address fflags, frm, fcsr and mscratch. Operand classes
  and affiliated instructions are this design's own encoding.
- **Data region.** The published design fills it from an LFSR with a new seed
  each iteration. Deriving the seed from the iteration number, and writing
  the region through a port before each run, are this design's choices.
- **Mode choice.** The mode is chosen once per iteration, and the whole
  iteration is built before operand assignment starts. The description speaks
  of a choice "for each state transition".
- **Deletion.** A deleted block is simply not copied. The published engine marks
  it deleted in a header and redirects pointers, which has the same effect on
  the output.
- **Mutation granularity.** The published list of mutation phases names bit
  flipping and operand substitution. Here mutation acts on whole blocks only,
  through generation, deletion and retention. A retained block keeps its
  instruction bits; only its targets are rebound in operand assignment.
- **Block shape.** Affiliated instructions always come before the prime, and
  the block length follows from the prime's class. The published generator
  also allows follow-up instructions after the prime, and draws a starting
  block length that the prime's needs then adjust.
- **Branch offsets.** They are plain PC-relative RISC-V offsets. The published
  text mentions a pipeline-latency adjustment, which RISC-V offsets do not
  need.
- **Validation rules.** The repairs (jump to the next instruction, NOP for an
  illegal opcode, folding stores into the data region) are this design's own.
- **Corpus.** It starts empty. Its first seeds come from deepExplore or from
  direct iterations with positive gain. The coverage-annotated graph kept over
  seeds in the published work is not built. Only the on-chip RAM variant of
  seed storage exists; there is no DDR variant.
- **deepExplore mutation.** Mutating by XOR mask with one-bit hill climbing, and
  both thresholds, are this design's choices. The source says only that
  initialisation values are mutated and refined by feedback until the gains
  flatten.
- **Not included.**
  - The exception-handler templates, which are software run by the processor,
    for example the handler that re-enables FCSR fields.
  - The snapshot readback.
  - The reference emulator.
  - The instrumentation pass itself, which works on the processor's netlist.

## Verification

Every block has a self-checking testbench in `tb/`. Each compares the block
with values worked out independently and prints
`TB_RESULT checks=<n> failures=<n>`. Instruction decoding in the testbenches
uses the helpers in `tb/tb_rv_pkg.sv`, written from the ISA encoding tables.

| testbench | what it establishes |
|---|---|
| `tb_tf_lfsr` | against a bit-serial model of the polynomial; enable, reseeding, no repeat or zero in 5000 steps |
| `tb_tf_instr_library` | every index under all 31 subset masks; operand class and affiliated count judged from the encoding; 172 distinct templates; fall-through and wrap-around |
| `tb_tf_fuzz_context` | load region share, stores always in the data region, alignment, jump bound, non-zero base register |
| `tb_tf_block_gen` | block shape and timing, affiliated order, memory and jump targets |
| `tb_tf_global_context` | block stamping, base table, counts, code end, remap, overflow, clear |
| `tb_tf_mutation_engine` | all-retain copy, all-delete, default operation rates, retained blocks copied exactly and remapped, length bound |
| `tb_tf_operand_assign` | decoded AUIPC+load/AMO addresses (positive and negative low parts), store folding, jumps to blocks, remapped and deleted retained targets, far-branch repair, FP type fields, FMA third source, W-shift amount, LR with `rs2 = x0`, one entry per cycle, random stalls |
| `tb_tf_turbofuzzer` | 40 iterations decoded; every jump lands on a block start; every store in the data region; both modes; 3:11:2 operation mix |
| `tb_tf_corpus_storage`, `tb_tf_corpus_manager` | read timing; add/replace/update/reject against a model; slot swapping; 3/4 selection share |
| `tb_tf_cov_instrument` | index formula; all 64 points of a 6-bit index reachable; shift weighting; clear sweep |
| `tb_tf_diff_checker` | 12 injected faults caught with one snapshot each; back-pressure; no record lost |
| `tb_tf_deepexplore` | schedule prediction for three threshold settings; only init immediates change |
| `tb_tf_stimuli_select` | routing, numbering and counters |
| `tb_tf_data_init` | every word against an LFSR model, addresses in order, back-pressure, a new seed per iteration |
| `tb_workload_sizes` | the fuzzer at 1000- and 4000-instruction iterations; coverage units at 13-, 14- and 15-bit indices, every point reached |
| `tb_turbofuzz_top` | the whole loop at default sizes |

`tb_turbofuzz_top` runs with every parameter at its default. The testbench
models the code memory, the processor and the emulator (in-order retirement;
the processor has one planted bug in MULHU), the coverage taps and the host.
It runs until:

- at least 60 fuzzer iterations are done;
- every mechanism has occurred: direct and mutation iterations; all three
  block operations; all four corpus outcomes; deepExplore play and refine; the
  switch to stage 2; caught mismatches with snapshot and resume; validation
  repairs; new coverage; stalls on the stimulus and data-memory ports.

It also checks that the data region is rewritten, word by word and in order,
before every run. It fails if any of these never occurs. A typical run is about 100 iterations,
about 250,000 compared instructions and about 2 seconds of simulation.

To run a testbench with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb \
    rtl/tf_pkg.sv tb/tb_rv_pkg.sv tb/tb_turbofuzz_top.sv --top-module tb_turbofuzz_top -o sim
./obj_dir/sim
```

Replace the testbench name to run any other. `+verilator+rand+reset+2`
randomises uninitialised state, which the designs must not depend on.

### Lint notes

Verilator's lint reports these warnings on the RTL:

- unused outputs of shared blocks, such as registers the block generator does
  not need from the fuzzing context;
- empty pin connections for those outputs;
- unused parameters in some instances;
- `SYNCASYNCNET` for `rst_n`, which is used both as an asynchronous reset and in
  the `disable iff` of the assertions.

None of these changes the circuit.

# MC²A — a VLIW accelerator for Markov chain Monte Carlo sampling

Markov chain Monte Carlo (MCMC) draws samples from a probability distribution
that is known only up to a constant. Each step of a chain does three things:

1. For a random variable (RV), or for a proposal, it computes an energy
   (an unnormalised log-probability) for every value the RV may take.
2. It draws one value from the resulting categorical distribution.
3. It records the new state.

On CPUs and GPUs the draw is the bottleneck. The usual inverse-CDF method
exponentiates, normalises, builds a prefix sum and then searches it, all
sequentially.

MC²A removes that sequential step with the **Gumbel-max trick**. Adding
independent Gumbel noise `g = -ln(-ln u)` to each log-probability and taking
the arg-max gives an exact sample from the softmax distribution. A draw then
costs one add and one compare per category, and categories can stream in one
per cycle.

The accelerator couples two units:
- a **compute unit** (CU) of adder/multiplier trees, which produces energies;
- a **sample unit** (SU) of Gumbel sampler elements, which turns those
  energies into samples.

Both are fed through a banked register file and a full crossbar, and
everything is driven by a very long instruction word (VLIW) program. A
hardware loop repeats the program body once per chain step.

This repository holds synthesizable SystemVerilog for the whole accelerator
core, with the evaluated configuration as default parameters:
- 64 trees of depth 3 (8 operands each);
- 64 sampler elements;
- 320 memory banks of 1024 words.

It also holds a self-checking testbench for every module.

## Block diagram and data flow

```
            host: cfg port (program, data, samples, loop registers), start/done, read port
                 |
   +-------------v-------------+        +-----------------------------------------+
   | instruction memory        |        | data memory (CDT): B banks x 1024 x 32 |
   | hwloop -> pipeline_ctrl   |--ctl-->| sample memory:     B banks x 1024 x 8  |
   +---------------------------+        | histogram memory:  B banks x 1024 x 20 |
                                        +---------+-----------------^-----------+
                                                  | load unit       | store unit
                                        +---------v---------+       |
                                        | register file     |<------+ (C write-back)
                                        | B banks x D regs  |       |
                                        +---------+---------+       |
                                        | crossbar B -> T*2^K       |
                                        +---------+---------+       |
                                        | compute unit: T trees     |
                                        | depth K, beta, accumulator|
                                        +---------+---------+       |
                                        | sample unit: S Gumbel     |--- samples
                                        | elements, comparator tree |
                                        +---------------------------+
```

Tree `t` feeds sampler element `t`, so the design requires `T == S`.

## The pipeline

An instruction flows through fixed stages, one per cycle:

| stage  | unit            | instruction field used                          |
|--------|-----------------|-------------------------------------------------|
| F      | fetch, `hwloop` | PC                                              |
| I0     | load unit       | MemSel: which banks to read, which memory, row  |
| I1     | register file   | RFCtrl: register per bank (load target, read)   |
| I2     | crossbar        | InSel: bank feeding each CU operand             |
| I3..I3+K | compute unit  | CUCtrl: per-tree mode and beta                  |
| I4+K   | sample unit     | SUCtrl: last-category flags, temporal/spatial   |
| I4+K   | RF write-back   | StoreCtrl (C type)                              |
| I5+K   | store unit      | StoreCtrl: sample / histogram target            |

The controller decodes the type once. It then delays each field by a shift
register until the instruction's data reaches the unit that needs it. This
lets several instructions be in flight with no per-unit decoding.

There are **no interlocks**. The program must leave room for results that
are still in the pipeline:
- **Write-back then read.** A C instruction writes its result into the
  register file in stage I4+K. An instruction that reads that register must
  follow it by at least 4+K slots (3+K NOPs in between).
- **Sample then indirect load.** A sample leaves the SU in stage I5+K. A
  load whose address depends on that sample must follow by at least 6+K
  slots (5+K NOPs).

Loads need no spacing: a word loaded in I1 is bypassed to the read in the
same cycle. Consecutive instructions on the same trees are also fine,
because the PE accumulator and the SE state are updated every cycle.

`busy` stays high from `start` until the last non-NOP instruction has left
the store stage. `done` pulses for one cycle when `busy` falls.

### Instruction types

| type | loads | CU | SU | stores | typical use |
|------|-------|----|----|--------|-------------|
| NOP  |   |   |   |   | pipeline spacing |
| LOAD | x |   |   |   | fill registers |
| C    | x | x |   | RF write-back | partial energies; the final one with write-back enables set |
| S    |   | bypass | x | sample memory | sample from scores already in registers |
| CS   | x | x | x |   | one category of a temporal distribution |
| CSS  | x | x | x | sample + histogram | last category: sample, store, count |

### Instruction word

Fields are packed from bit 0 in this order. Widths are given for the default
parameters (B=320, D=8, T=64, K=3, S=64, 1024-word banks).

| field     | width formula            | default bits | contents |
|-----------|--------------------------|--------------|----------|
| opcode    | 3                        | 3     | `opcode_e` |
| MemSel    | B·(log2 DEPTH + 3)       | 4160  | per bank `{en, src, ind, row}`; `src` 1 = sample memory; `ind` 1 = add the latest sample |
| RFCtrl    | B·log2 D                 | 960   | per bank register index |
| InSel     | T·2^K·log2 B             | 4608  | per CU operand the source bank; a value ≥ B gives 0 |
| CUCtrl    | 2T + 32                  | 160   | per tree `pe_op_e` mode, then beta (Q16.16) |
| SUCtrl    | S + 1                    | 65    | per element "last category" flag, then the mode bit |
| StoreCtrl | S + log2 B + log2 DEPTH  | 83    | `{row, base bank, per-lane enable}` |
| total     |                          | 10039 | |

The package functions `field_width` and `field_offset` in `mc2a_pkg` compute
these widths and offsets for any configuration. The testbenches build
instructions with them.

## Compute unit: energy trees

Each tree (`pe_tree`) takes 2^K operands per cycle and works as follows:
1. The first level combines operand pairs, with a product for a dot product
   (`PE_DOT`) or a sum (`PE_RSUM`).
2. K-1 adder levels reduce the pairs to one value.
3. The result is multiplied by beta, the inverse temperature.
4. The product is added to an accumulator.

In a C instruction whose write-back enable is off, the tree only
accumulates. This is how energies with more than 2^K terms are built over
several cycles. Every other instruction issues `acc + beta·sum` and clears
the accumulator. `PE_BYPASS` passes operand 0 unchanged, and an S
instruction forces bypass on all trees. The latency is K+1 cycles.

**Number format.** Operands are 32-bit two's-complement integers. Beta is
Q16.16, so a score is Q16.16 (1.0 = 0x10000). All arithmetic wraps at 32
bits. The paper calls for log-domain floating point in one place and 32-bit
integers in another; this design uses integers.

## Sample unit: Gumbel sampling in two shapes

A **sampler element** (`sample_element`) has:
- a 32-bit Galois LFSR (`urng`), stepped four times per draw so that the
  4 bits addressing the table are new in every draw;
- a 16-entry, 8-bit Gumbel table (`gumbel_lut`);
- an adder, a `<` comparator, and max / index registers.

The table holds `round(32 · -ln(-ln((k + 0.5)/16)))` for k = 0..15, i.e.
Gumbel quantiles at the bin centres with 5 fraction bits. The noise is
shifted left by 11 to align it with Q16.16 scores. The comparator keeps the
earlier category on a tie. When an input carries its "last" flag, the index
of the maximum comes out one cycle later as a one-cycle `sample_valid`, and
the element starts over.

The sample unit runs the S elements in one of two modes, chosen per
instruction:

- **Temporal** mode suits many small distributions, such as block Gibbs over
  independent RVs. Each element owns one distribution and takes one
  category per cycle, so S distributions advance together and each takes as
  many instructions as it has values.
- **Spatial** mode suits one large distribution, such as a PAS proposal over
  all flip positions. All S lanes add their own noise. A balanced comparator
  tree finds the best lane, and element 0 compares that winner with its
  running maximum. Element 0's category counter advances by S, so S
  categories are consumed per cycle.

The sample index is 16 bits wide inside the SU. It is stored as 8 bits,
which is the paper's 256-value limit.

## Memories and the store path

- **Data memory (CDT).** Holds weights and log-probability tables: B banks,
  one read per bank per cycle.
- **Sample memory.** Holds current RV states as 8-bit samples. It has the
  load read port (used by `src = 1` or by the host), the store write port,
  and a host port.
- **Histogram memory.** Holds 20-bit counters, enough for a 10^6-step chain.
  A CSS store adds 1 at row `StoreCtrl.row + sample` of the bank its lane
  maps to, so one RV's counters occupy consecutive rows. `hist_clear` zeroes
  everything in a DEPTH-cycle sweep.

The store unit maps lane j to bank `(base + j) mod B`, so a program chooses
where each element's results land. A C-type write-back uses the same
mapping and puts the result into register `row mod D` of that bank.
**Indirect loads** (`ind = 1`) use row `row + latest sample of element
(bank mod S)`. This is how a conditional-probability table is indexed by the
current state of a neighbouring RV.

All memories are plain arrays with synchronous reads. They stand for the
1024×32 SRAM macros of the chip and map to any SRAM compiler.

## Host interface of `mc2a_top`

| port | use |
|------|-----|
| `cfg_we, cfg_sel, cfg_addr, cfg_wdata` | write one word. `CFG_IMEM`: `addr = {entry, word index}` (32-bit words of an instruction, low word first). `CFG_DMEM` / `CFG_SMEM`: `addr = {bank, row}`, row in the low log2(DEPTH) bits. `CFG_CSR`: loop start, loop end, loop count, program end (`CSR_*`) |
| `start` → `busy`, `done`, `iter` | run from PC 0; `iter` counts completed loop iterations |
| `hist_clear` → `hist_clearing` | clear the histogram |
| `rd_en, rd_sel, rd_addr` → `rd_data` | read a sample (`rd_sel = 0`) or a counter (`rd_sel = 1`) at `{bank, row}`; data one cycle later |

Host writes are meant for when the core is idle. The hardware loop has one
level:
- PCs run `0 .. prog_end`;
- after `loop_end`, the PC returns to `loop_start` until `loop_count`
  iterations are done, with no bubble.

## Parameters

| parameter | default | origin |
|-----------|---------|--------|
| `T` trees, `S` elements | 64, 64 | paper |
| `K` tree depth | 3 | paper |
| `B` banks | 320 | paper |
| bank depth × width | 1024 × 32 | paper (SRAM macro) |
| sample / counter width | 8 / 20 bits | paper (256 values, 10^6 steps) |
| Gumbel table | 16 × 8 bit | paper (size and precision); values are this design's |
| `D` registers per bank | 8 | own choice |
| instruction memory | 256 entries | own choice |
| data format | int32, Q16.16 beta | own choice among the paper's two statements |

## Where this design departs from the paper or fills gaps

- **InSel width.** The paper prints its width as B·log2 B. Here it has one
  select per CU operand (T·2^K·log2 B), because that is what a
  B → T·2^K crossbar needs.
- **Added fields.** There is an explicit opcode field, and SUCtrl carries a
  mode bit.
- **StoreCtrl.** The layout (lane enables, base bank, row) is this design's.
- **Store-side rules.** The C-type write-back, the histogram addressing
  (`row + value`) and the indirect-load rule (`row + latest sample`) are
  interpretations of the paper's short descriptions.
- **CS type.** The paper names CS in the text but not in its ISA table. Here
  it is "CSS without the store".
- **Gumbel table and URNG.** The table values and the choice of LFSR are not
  given in the paper.
- **PAS workloads over 256 values.** These are not supported end to end.
  The SU can sample them in spatial mode, but a stored sample holds only
  8 bits. ER700 (1347 positions) and the RBM (809) therefore do not fit.
  Twitter (247), Optsicom (125), both Bayes nets, and the image-segmentation
  MRF with 2 labels do fit.
- **Not included:**
  - the host processor and its bus;
  - the paper's cycle-level performance model;
  - the 3D roofline design-space tool.

## Verification

Each module has its own testbench, `tb/tb_<module>.sv`. Each one:
- drives random or directed stimulus;
- compares against a model written independently in the testbench;
- counts checks and failures;
- ends with a line `TB_RESULT checks=N failures=M`.

The sampler tests use an exact bit-level model of the LFSR and the table.
The other tests use score gaps larger than the noise range (about 4.7),
which makes the outcome deterministic.

- **`tb_mc2a_top`** runs the whole core at a reduced size (B=12, T=S=4, K=3,
  64-word banks). It writes a program through the host port and exercises
  every mechanism:
  - the hardware loop;
  - temporal sampling with histogram counting;
  - accumulate-then-write-back C instructions;
  - spatial sampling with the trees in bypass;
  - indirect loads that follow the latest samples;
  - loads from the sample memory.

  It counts how often each of these happened, and a mechanism that never
  happens counts as a failure.
- **`tb_mc2a_full`** runs the same program on the default configuration.
  At this size Verilator needs about four minutes to compile it; the run
  itself takes seconds.
- **`tb_mc2a_sampling`** measures sampling accuracy through the whole core.
  It uses random 8-category distributions, sampled 2000 times each:
  - temporal mode, counted by the histogram memory;
  - spatial mode, two S instructions of 4 lanes.

  Each count is compared with the probability the 16-entry table actually
  realises. That probability is computed exactly in the testbench from the
  table and the hardware's tie rule. The distance to the ideal softmax
  distribution is also checked; it is about 0.02–0.04 in total variation.
  With a single LFSR shift per draw, successive table addresses would share
  three bits, and the noise of neighbouring categories would be correlated.
  This is why the generator leaps four steps.
- **`tb_mc2a_ising`** runs block Gibbs sampling of a 2×4 Ising grid (random
  fields, coupling 0.75) for 3000 chain steps, chessboard-coloured:
  - one colour's 4 nodes are updated in parallel on the 4 elements;
  - the neighbours' labels are loaded from the sample memory;
  - the trees form `h_i + J·Σx_j` as dot products;
  - the histogram counts the labels.

  The measured marginals are compared with exact ones from enumerating all
  256 states. They agree to within about 0.03.

To simulate with Verilator:

```
verilator --binary --timing --assert --top-module tb_mc2a_top -Irtl -Itb \
    rtl/mc2a_pkg.sv tb/tb_mc2a_top.sv -o sim && obj_dir/sim
```

Replace `tb_mc2a_top` with any other testbench name; modules are found
through `-Irtl`. The full-size testbench needs a few minutes to compile.

# ORIGAMI logic-die accelerator in SystemVerilog

Training a machine-learning model by stochastic gradient descent streams the
whole training set through memory again and again. Compute is cheap next to
that traffic. A 3D-stacked memory (here a Hybrid Memory Cube: 32 vaults,
512 GB/s inside the stack) could feed far more arithmetic than a host
attached through its links. But the logic die at the bottom of the stack has
only about 1.5 mm² per vault for extra logic.

ORIGAMI ("A Heterogeneous Split Architecture for In-Memory Acceleration of
Learning", Falahati, Lotfi-Kamran, Sadrosadati and Sarbazi-Azad) rests on two
ideas:

* **Pattern-aware engines.** SGD-trained algorithms (linear, logistic and 2-D
  regression, SVM, recommender systems, back-propagation) are built from a
  few recurring compute patterns. Instead of general-purpose ALUs, the logic
  die gets one small fixed-function engine per pattern:
  * a dot-product **reduction** engine;
  * a **comparator**, which subtracts the expected output from the predicted one;
  * an **optimization** engine, which computes `w - mu*delta*x`.

  Non-linear functions such as the sigmoid are not computed at all. They are
  read from tables kept in the DRAM.
* **Split execution.** The engines that fit in the area budget use about
  240 of the 512 GB/s. The remaining bandwidth goes out through the links to
  an ordinary compute platform (an FPGA in the paper). A compiler splits each
  algorithm's compute graph between the two platforms in proportion to their
  throughput, looking for three kinds of parallelism:
  * *model_level*: independent models;
  * *partial_level*: separate rows of one weight matrix;
  * *block_level*: separate slices of one dot product. This is the only kind
    that needs the two platforms to exchange data during a step.

This repository is the RTL of the logic-die side, in the configuration the
paper evaluates:
* 8 reduction engines of 8 multipliers each;
* 64 optimization engines;
* comparators and the non-linear table unit;
* the computation registers;
* the in-memory controller that runs the compiler's statically scheduled
  instructions, including the block_level hand-shake with the external
  platform.

The DRAM, the FPGA and the compiler are not part of it. Behavioural models
of the first two are in `tb/`.

## Block diagram

```
            host: program load, start/done
                         |
   +---------------------v---------------------------------------------+
   |  inmem_controller  (fetch, interlocks, moves, engine starts, flags) |
   |     |  read all / write 8 lanes        |  start / valid             |
   |  +--v-----------------------------+    +---> reduction_engine x8    |
   |  | comp_regfile                    |<------- (8 x, 8 w -> sum)      |
   |  |  RU x/w/sum, CU po/eo/out,      |<------- comparator_engine x8   |
   |  |  OU delta/x/mu/w/out,           |<------- optimization_engine x64|
   |  |  M_delta, S_psum, M/S_ready     |         nonlinear_engine (addr)|
   |  +----------------^--------------+-+                                 |
   +-------------------|--------------|--------------|--------------------+
        m_delta_we, m_ready_set   s_ready, s_psum   mem_req / mem_rsp
              (out-of-memory master)                 (one vault)
```

Every engine's inputs and output are *dedicated* registers, as the paper's
ISA prescribes: an engine has no operand buses. The controller fills the
input registers with moves, starts the engine with one instruction, and the
result lands in the engine's own output register.

## The engines

| engine | operation | structure | result in output register after | paper latency |
|---|---|---|---|---|
| `reduction_engine` (K=8) | `sum = Σ x[i]*w[i]` | 8 multipliers, adder tree of 7, pipelined per level | 5 cycles | 15 ns |
| `comparator_engine` | `delta = PO - EO` | one subtractor | 1 cycle | 3 ns |
| `optimization_engine` | `w' = w - mu*(delta*x)` | multiplier, multiplier, subtractor in series | 4 cycles | 12 ns |
| `nonlinear_engine` | table address of `f(v)` | clamp and offset | 1 cycle + one memory read | n/a |

One cycle at the logic die's 313 MHz is 3.2 ns. Each latency above is the
paper's figure rounded up to whole cycles. Reduction and optimization engines
accept a new operation every cycle. The controller nevertheless starts a
given engine only when its previous result is in (see *Interlocks*).

Numbers are 32-bit two's-complement fixed point with 16 fraction bits
(Q16.16). A product is the 64-bit product shifted right arithmetically by 16
and truncated. Additions wrap. The paper does not fix a number format, so
this one is a choice of this design. `origami_pkg::fx_mul` is the single
definition of the multiply.

A reduction engine sums only 8 products. Longer dot products are built in
software: the partial sums of several engines are moved into the x inputs of
one engine whose w inputs hold 1.0, and that engine is run again.

## Non-linear functions

The paper keeps the outputs of sigmoid, Gaussian, log and similar functions
in the DRAM rather than in on-die lookup tables. Here a table is
`2**LUT_BITS` (1024) consecutive words at a base address, evenly spaced
around zero. For the instruction `lut ra, rb, base, shift`:

```
index = clamp((reg[ra] >>> shift) + 512, 0, 1023)
reg[rb] = mem[base + index]
```

With `shift = 10`, entries are 1/64 apart and cover -8 to +8. For that
spacing the sigmoid table is `round(65536 / (1 + exp(-(i - 512)/64)))`. The
table layout and the clamping are this design's. The paper's ISA has no
instruction for the non-linear engine, so `OP_LUT` is an addition.

## Register map

The map is built by `origami_pkg::make_regmap` and grouped by field. A single
move of up to 8 words therefore fills, for example, all x inputs of one
reduction engine or the w inputs of eight optimization engines. Default
layout (482 words, 9-bit register addresses):

| words | contents |
|---|---|
| 0–63 | reduction x inputs, engine r uses 8r..8r+7 |
| 64–127 | reduction w inputs |
| 128–135 | reduction sum registers |
| 136–143 / 144–151 / 152–159 | comparator PO / EO / delta |
| 160–223 | optimization delta inputs |
| 224–287 / 288–351 / 352–415 | optimization x / mu / w inputs |
| 416–479 | optimization results w' |
| 480 | M_delta (written by the master) |
| 481 | S_psum (read by the master) |

Flags: bit 0 is M_ready, bit 1 is S_ready.

## Instruction set

One 64-bit word per instruction (`origami_pkg::instr_t`):

```
[63:60] op  [59] bcast  [58:56] count-1  [55:51] shift  [50:42] ra  [41:33] rb  [32] -  [31:0] addr
```

| op | mnemonic | effect |
|---|---|---|
| 1 | `mov mem→reg` | `reg[rb+i] = mem[addr+i]`, i < count |
| 2 | `mov reg→mem` | `mem[addr+i] = reg[ra+i]` |
| 3 | `mov reg→reg` | `reg[rb+i] = reg[ra+i]` |
| 4 / 5 / 6 | `reduce` / `comparator` / `optimization %ra` | start engine number ra |
| 7 | `lut` | table read through the non-linear engine (above) |
| 8 / 9 / 10 | `set` / `wait` / `clr %ra` | set flag, stall until flag set, clear flag |
| 0 / 15 | `nop` / `halt` | |

With `bcast`, source word 0 goes to every destination. That is how one delta
reaches the 64 dedicated delta registers in 8 instructions. The paper names
the instructions but gives no encoding, no burst count and no broadcast; those
are this design's. `origami_pkg::mk()` builds instruction words, and the
testbenches write their programs with it.

## Controller behaviour

The controller issues one instruction per cycle, in order, from a
1024-word program memory. The host loads the program through `imem_*` and
pulses `start`. The controller runs from address 0 until `halt`; `done`
then stays high until the next `start`. Registers keep their contents
between runs, so a long computation can be split over several program loads.

**Interlocks.** The compiler schedules statically, but the hardware does not
trust the schedule to count cycles. The controller stalls an instruction
when any of these holds:
* it reads or writes the output register of an engine that is still
  computing;
* it starts an engine that is still busy;
* it is a `wait` on a clear flag;
* it needs the memory: a read holds the controller until its response
  arrives (one read outstanding), and a write waits until the port accepts
  it.

**Memory port.** Each request is one beat of up to 8 consecutive 32-bit
words (32 bytes): `we`, word address, word count and data. Reads return one
beat, in order. A request stays unchanged until `mem_req_ready` (there is an
assertion for this). The port stands for the interface to one vault
controller, which the paper does not design.

## Block_level split: the hand-shake

When a dot product is split between the die and the external platform,
one side must add the two partial sums before either can update weights. The
paper makes the external platform the *master*. The sequence the die runs,
as in the end-to-end test, is:

```
reduce ...                  ; partial sum of the die's share of the features
mov   SUM -> S_psum
set   S_ready               ; master: sees S_ready, reads S_psum,
wait  M_ready               ;   adds its own partial sum, computes delta,
                            ;   writes M_delta, sets M_ready
mov   M_delta -> OU delta (bcast) ...
clr   M_ready
clr   S_ready
optimization 0..63          ; both sides update their own weight slices
```

The master's side of the protocol is at the top-level ports: it reads
`s_ready` and `s_psum`, and drives `m_delta_we`/`m_delta_wd` and
`m_ready_set`. The paper's text names "check, set and wait" as the three
synchronization instructions but then defines set, wait and clr. This design
follows the definitions: checking S_ready is the master's job.

If a set and a clear reach the same flag in the same cycle, the set wins.
When several writers hit one register in the same cycle, an engine result
beats a master write, which beats a controller move.

## Files

| file | contents |
|---|---|
| `rtl/origami_pkg.sv` | number format, instruction and memory types, register map, `fx_mul`, `mk` |
| `rtl/reduction_engine.sv`, `comparator_engine.sv`, `optimization_engine.sv`, `nonlinear_engine.sv` | the engines |
| `rtl/comp_regfile.sv` | computation and synchronization registers, flags |
| `rtl/inmem_controller.sv` | program memory, issue, interlocks, memory port |
| `rtl/origami_top.sv` | the logic die: all of the above wired together |
| `tb/hmc_vault_model.sv` | behavioural vault: 9-cycle (27.5 ns) reads, optional back-pressure |
| `tb/fpga_master_model.sv` | behavioural master for the block_level hand-shake |
| `tb/*_tb.sv` | self-checking testbenches: one per module, plus a linear-regression workload |

Top-level parameters: `NUM_RU=8`, `K=8`, `NUM_OU=64` (from the paper);
`NUM_CU=8`, `IMEM_DEPTH=1024`, `LUT_BITS=10` (this design's choices).

## Simulating

With Verilator 5:

```
verilator --binary --timing --assert --top-module origami_top_tb \
  rtl/origami_pkg.sv rtl/*.sv tb/hmc_vault_model.sv tb/fpga_master_model.sv tb/origami_top_tb.sv
./obj_dir/Vorigami_top_tb
```

Replace the top module and testbench file to run any other testbench. Each
testbench prints `TB_RESULT checks=N failures=M` and has a watchdog.

* `origami_top_tb` runs the full-size design on four training samples. Each
  sample covers two steps:
  * a 128-feature logistic-regression step split block_level with the
    master model;
  * one row of a 2-D regression computed wholly on the die: reduction,
    sigmoid table, comparator, optimization. This is what a partial_level
    partition runs.

  The testbench recomputes every weight independently and compares memory
  after every sample. It also counts each mechanism and fails if one never
  occurs: the split hand-shake, flag waits, register interlocks, memory
  waits and back-pressure, broadcasts, table reads, and every engine type.
  A sample takes about 1,100 cycles.
* `origami_linreg_tb` trains a 64-feature linear regression wholly on the
  die: reduction, comparator, optimization, with no table step. It runs 6
  epochs over 16 samples whose targets come from a hidden weight vector.
  It compares every weight with an independent model after each sample, and
  checks that the mean squared error falls below a tenth of its start. In
  practice it falls about 20-fold.
* The unit testbenches check each engine against an independent model,
  including the cycle latencies in the table above. They also check the
  register file's write priorities and every controller instruction with
  stand-in engines.

## How far to trust it, and where it departs from the paper

* The engines follow the paper's structure, counts and latencies. The number
  format, pipeline staging, register-map layout, instruction encoding,
  burst/broadcast moves, `lut` and `halt` instructions, interlocks and memory
  port are this design's. The paper describes none of them in that detail.
* The paper gives no count of comparator engines; 8 is assumed. It gives no
  count of non-linear units either; one is built.
* The program memory has no loops or branches, and the paper's ISA has none.
  A full SGD sample of the paper's benchmarks (5,000 to 2.8 million
  features) needs tens of thousands to millions of instructions. It can only
  run as a sequence of program loads from the host. The test programs here
  are small: 64 features per step on the die.
* Bandwidth-level results are not modelled here: the paper's 240 GB/s per
  logic die, its area (41.3 mm²) and its energy. One controller and one
  memory port stand for what the paper spreads over the vaults.
* Not included: the stacked DRAM, vault controllers and links; the
  external FPGA and its half of the computation; and the compiler (graph
  extractor, pattern extractor, partition analyzer, code generator). The
  testbench programs are hand-written in the form the code generator would
  emit.

# A composable-instruction-set tile in SystemVerilog

Most instruction sets describe *what the processor does next*. A composable
instruction set (CIS) describes *what each hardware resource does*, and how
its activity unfolds in time. It is composable in two ways:

* **Spatially.** Every instruction targets one resource: a path in the
  interconnect, a function in the compute unit, an address stream in a
  memory. A complete operation, such as "read a vector, add one, write it
  back", is assembled from several such instructions. Each one configures a
  different resource, and the resources then work side by side.
* **Temporally.** A basic operation is a single-cycle event, such as one read
  or one write. Two operators reshape it in time. **R** (*repetition*) repeats
  a block of events; nested R operators form a loop nest. **T** (*transition*)
  runs one block and, after a fixed delay, forces a move to a second block.
  Each resource executes its R/T program with a small local state machine.
  The central controller therefore issues one short instruction sequence and
  moves on. It does not stay in the loop.

The result is a single-issue controller driving many concurrent
"micro-threads", one per local FSM. The controller stays as simple as a
scalar sequencer. The resources keep loop control and address generation
next to the datapath, and no per-iteration instructions are needed.

This repository holds RTL for the smallest instance of the idea: one tile
with a sequencer and four resource slots, running a seven-instruction CIS.
It includes a self-checking testbench for every block and one that runs the
whole tile end to end.

## The tile

```
               +-----------------------------------------------+
 program --->  |  sequencer (single issue, one instr./cycle)   |
 (im_*)        +---+-----------+-----------+-----------+-------+
                   | cfg, act  |           |           |
             +-----v----+ +----v-----+ +---v------+ +--v-------+
             | slot 0   | | slot 1   | | slot 2   | | slot 3   |
             | FSM0 FSM1| | FSM0 FSM1| | FSM0 FSM1| |  (tile   |
             | inter-   | | storage  | | compute  | |  ports   |
             | connect  | |          | |          | |  s3_*)   |
             +----------+ +--in/out--+ +--in/out--+ +--in/out--+
                 crossbar: any slot's output port -> any slot's input port
```

Every slot has two local FSMs (`slotN:FSM0`, `slotN:FSM1`) and one input
and one output data port (`port_t` = {valid, 16-bit data}). A resource uses
as many of them as it needs:

| slot | resource | FSMs used | ports |
|------|----------|-----------|-------|
| 0 | interconnect (`cis_interconnect`) | FSM0 | drives every slot's input port |
| 1 | storage (`cis_storage`), 64 x 16 bit | FSM0 = write port, FSM1 = read port | in = write data, out = read data |
| 2 | compute (`cis_compute`) | FSM0 | in = operand, out = result |
| 3 | unused; everything is brought out as tile ports `s3_cfg`, `s3_act`, `s3_out`, `s3_in` | – | – |

All data moves between slots through the interconnect. A stream can leave
the tile through slot 3's input port (`s3_in`) and enter through slot 3's
output port (`s3_out`). In that way slot 3 also acts as the tile's streaming
I/O channel.

The sequencer (`cis_sequencer`) holds up to 64 instructions. It issues one per
cycle and forwards each configuration instruction to the addressed slot. It
turns `@A` into activation pulses and stalls for `@W`. It never waits for a
resource: the program is scheduled statically, to the cycle.

## The instruction set

Seven instructions in three groups, plus a no-op:

| group | instruction | meaning |
|-------|-------------|---------|
| resource | `@C slot:FSM option function [imm]` | store a compute function in configuration option *option* |
| resource | `@I slot:FSM option src->dst` | add the path "output of slot *src* → input of slot *dst*" to option *option* |
| resource | `@S slot:FSM address` | base address of a storage port |
| transform | `@R slot:FSM iter step delay` | one repetition level (loop) |
| transform | `@T slot:FSM delay` | transition to the next block after *delay* cycles |
| control | `@W delay` | sequencer waits |
| control | `@A [slot:FSM, ...]` | activate the listed local FSMs at once |

The binary encoding is defined in `rtl/cis_pkg.sv`, which also provides
`enc_*` functions for building programs in a testbench:

```
[31:29] opcode (0 NOP, 1 @C, 2 @I, 3 @S, 4 @R, 5 @T, 6 @W, 7 @A)
[28:27] slot   [26] fsm
@C  [25:24] option  [23:20] function  [15:0] immediate
@I  [25:24] option  [23:22] source slot  [21:20] destination slot
@S  [15:0] base address
@R  [25:16] iterations (0 = 1)  [15:8] signed step  [7:0] delay
@T  [15:0] delay (0 = 1)
@W  [15:0] delay (0 = 1)
@A  [7:0] mask, bit 2*slot+fsm
```

Compute functions: `ADD1` (+1), `ADDI` (+imm), `MULI` (×imm, low 16 bits),
`PASS`, and `NONE` (output silent; the reset state).

## Local FSMs: how R and T become a micro-thread

`cis_fsm` is the core of the design and the part that takes the most care to
use correctly. Each slot instantiates it once per FSM it uses.

### Configuration: blocks

While an FSM is idle, the sequencer feeds it the configuration instructions
addressed to it. It arranges them into a row of up to four **blocks**:

```
@S / @C / @I ...   @R  @R ...        <- block 0
@T d0                                   closes block 0, opens block 1
@S / @C / @I ...   @R  @R ...        <- block 1
@T d1                                   ...
```

* Each `@R` adds a loop level to the current block. The **first `@R` is the
  innermost loop**, and every later one wraps those before it. There are up
  to four levels per block; further `@R`s are ignored.
* Block *k* is configuration option *k*. `@C` and `@I` name their option
  explicitly. For `@S`, storage remembers one base address per block, and an
  `@S` after an `@T` belongs to the next block.
* Configuration is **sticky**. A second `@A` without new configuration
  reruns the same micro-thread. The first configuration instruction after an
  activation discards all old blocks, options and paths (`cfg_new`), so a new
  program never inherits the last one's state.

### Execution

Suppose `@A` reaches the FSM in cycle *c*:

1. Block 0 comes into force at *c*+1. The resource loads option 0
   (`opt_load`), and the block's loop nest starts from index 0.
2. The nest produces one **event** (`ev`) per basic operation. The first
   event comes in the block's first cycle. Each event carries the offset
   `ofs = Σ idx[k]·step[k]`. After an event that advances loop level *k*,
   the FSM idles for `delay[k]` cycles. With all delays 0, it produces one
   event per cycle. A block with no `@R` makes exactly one event.
3. If the block has a T, then *d*₀ cycles after the block came into force
   (counted from its start, not its end) block 1 comes into force. Its
   option is loaded and its nest restarts from index 0. An unfinished nest
   is cut off. A nest that finished early leaves the FSM idle until the
   transition.
4. After the last block's nest finishes, `busy` falls. The option in force
   stays in force, so a path or a function persists "forever" until the
   next activation.

Example: `@R iter=3 step=1 delay=0`, then `@R iter=5 step=8 delay=2`. This
gives 15 events in 5 rows of 3, with offsets 0 1 2, 8 9 10, …, 32 33 34.
Events inside a row are one cycle apart, and rows start 3 cycles after the
previous row's last event.

What each resource does with an event:

| resource | per event | on `opt_load` |
|----------|-----------|---------------|
| storage, FSM0 | writes `in_port` to `base[block] + ofs` | – |
| storage, FSM1 | reads `base[block] + ofs`, word on `out_port` one cycle later | – |
| compute | – | the function and immediate of that option take effect |
| interconnect | – | the path set of that option takes effect |

## Timing rules

All times are counted from the cycle in which `start` is sampled:

* Instruction *i* of a program without waits issues in cycle *i*+1. Its
  `cfg`/`act` output is registered, so it reaches the slot in cycle *i*+2.
* `@W d` makes the next instruction issue *d* cycles after the `@W`
  (`@W 0` and `@W 1` both cost one cycle).
* A local FSM's first event comes one cycle after its activation.
* Storage read: word on the output port one cycle after the read event.
  Storage write: stored in the cycle of the write event.
* Interconnect: combinational (zero cycles).
* Compute: registered (one cycle). It produces one result per valid input,
  every cycle, with no stall.
* There is no back-pressure anywhere. An assertion in `cis_storage` reports
  a write event that finds no valid data on its input port: the schedule
  was wrong.

### Worked example: A[i] = A[i] + 1 for 64 words

```
 #  instruction                                reaches slot  effect
 0  @I slot0:FSM0 option0 slot1->slot2         +2
 1  @I slot0:FSM0 option0 slot2->slot1         +3
 2  @C slot2:FSM0 option0 ADD-1                +4
 3  @S slot1:FSM1 address=0                    +5            read port base
 4  @R slot1:FSM1 iter=64 step=1 delay=0       +6
 5  @S slot1:FSM0 address=0                    +7            write port base
 6  @R slot1:FSM0 iter=64 step=1 delay=0       +8
 7  @A [slot0:FSM0, slot2:FSM0]                +9            paths + ADD-1 in force at +10
 8  @A [slot1:FSM1]                            +10           reads at +11 ... +74
 9  @W delay=1                                                (one cycle)
10  @A [slot1:FSM0]                            +12           writes at +13 ... +76
11  @W delay=63                                               done at +76
```

Word *k* is read at +11+*k*. It appears on the storage output port and the
compute input port at +12+*k*, and the ADD-1 result is on the compute output
(and thus the storage input) at +13+*k*. The write FSM, activated two issue
cycles after the read FSM, writes it at +13+*k*. The unit delivers 64 results
in 64 consecutive cycles. The program completes at +76: 12 instructions,
plus 62 cycles of waiting hidden in the final `@W`.

## Modules

| file | contents |
|------|----------|
| `rtl/cis_pkg.sv` | sizes, instruction encoding, `cfg_t`/`port_t`, field and encoder functions |
| `rtl/cis_fsm.sv` | local FSM: R nest, T chain, block bookkeeping |
| `rtl/cis_sequencer.sv` | instruction memory, single-issue decode, `@W` stall, `@A` pulses, issue/wait counters |
| `rtl/cis_interconnect.sv` | 4 x 4 crossbar with per-option path sets |
| `rtl/cis_storage.sv` | 64-word memory, write port (FSM0), read port (FSM1), host port |
| `rtl/cis_compute.sv` | streaming unary ALU with per-option function and immediate |
| `rtl/cis_tile.sv` | top: sequencer plus slots 0–2, slot 3 on the tile ports |

Default parameters: 4 slots, 2 FSMs per slot, 4 loop levels per FSM,
4 options (blocks) per FSM, 16-bit data, 32-bit instructions, a 64-word
storage (`DEPTH`) and a 64-word program memory (`IMEM_DEPTH`).

### Using the tile

1. Load the program: write one instruction per cycle with `im_we`/`im_addr`/`im_wdata`.
2. Load data: use the storage host port (`h_we`, `h_addr`, `h_wdata`).
3. Pulse `start` with `prog_len` set to the number of instructions.
4. `done` rises when the last instruction, including its final `@W`, has
   issued. It stays high until the next start.
5. `res_busy` shows whether any local FSM is still running.
6. Read results back through the host port (`h_re`; data on `h_rdata` when
   `h_rvalid`). A host access loses to an FSM access in the same cycle.
7. The counters `n_issued` and `n_wait_cycles` count issued instructions and
   `@W` stall cycles.

## Simulation

Each block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and has a watchdog:

| testbench | checks |
|-----------|--------|
| `tb_cis_fsm` | random 1–4 level nests in up to four blocks with random T delays, compared event by event and cycle by cycle with a plain counting model; the paper's 64-event and 3 x 5 patterns; cut-off by T; reruns; a fifth `@R` ignored |
| `tb_cis_sequencer` | random programs of all instruction types: every forwarded word and activation, with its cycle; `done` time; counters |
| `tb_cis_interconnect` | path sets, persistence after the FSM stops, reconfiguration clearing old paths, T-switched path sets |
| `tb_cis_storage` | host access; the 64-word one-per-cycle read; random 2-level read patterns; two-block reads switched by T; concurrent write and read streams |
| `tb_cis_compute` | all functions on random streams; one result per cycle at one cycle latency; T chain ADD → MUL → PASS |
| `tb_cis_tile` | the whole tile at its default sizes, with three programs: the 64-word ADD-1 example (memory contents, 64 back-to-back results, done at +76); a 3 x 5 strided read through a compute unit switched by T from ADD to MUL, leaving through slot 3; a stream entering through slot 3 and written every other cycle. It counts each mechanism (R repetition, nested R, R delay, T transition, `@W` stall, multi-FSM `@A`, persistent path, slot-3 in/out) and fails if one never occurs |

With Verilator 5:

```
verilator --binary --timing --assert -Irtl rtl/cis_pkg.sv tb/tb_cis_tile.sv \
          --top-module tb_cis_tile
./obj_dir/Vtb_cis_tile
```

Substitute any other testbench name. The tile testbench runs in well under a
second.

## Choices made here

The instruction set, the slot/FSM/port template, the three resources and
their slot numbers, the single-issue sequencer, the example program and the
"up to four nested loops" figure follow the published description of CIS.
The description stays at the level of concepts. Everything below is this
implementation's own decision:

* The binary encoding, every field width, 16-bit data, the 64-word memories,
  and four options per FSM.
* The nesting order (the first `@R` is innermost) and the meaning of the R
  delay: idle cycles after an advance of that level.
* T semantics: blocks are numbered as configuration options, the T delay
  counts from the start of the current block, and a T cuts off an
  unfinished nest. T operators can be chained, up to three per FSM.
* The sticky configuration, and clearing it on the first configuration
  instruction after an activation.
* All of the timing in "Timing rules": the registered sequencer outputs, the
  one-cycle read and compute latencies, and the combinational crossbar. They
  were chosen so that the published example schedule (`@A` read, `@W 1`,
  `@A` write, `@W 63`) is exactly right.
* The storage roles: FSM0 writes and FSM1 reads. One base address per block.
  Addresses wrap modulo the depth.
* Host access to the storage, the program-load port, `start`/`done`, and the
  issue counters. The published description does not say how programs and
  data enter a tile.
* The compute functions other than ADD-1: ADD and MUL with an immediate,
  and PASS.
* Slot 3, empty in the reference instance, is exposed as tile ports.

## Not included

* **Outer control flow.** Loops that R/T cannot express, such as
  data-dependent WHILE or IF, are meant to use ordinary COMPARE, BRANCH and
  JUMP instructions. Their encoding and semantics are not defined, so the
  sequencer runs straight-line programs only.
* **Multi-tile fabric.** Tiles can be joined into a 2-D grid. The
  CGRA-style array used for larger CIS instances is not specified at RTL
  level and is not built.
* **Resources that span several slots.** The template allows a resource to
  occupy several neighbouring slots and use all of their ports. The tile
  here uses one slot per resource.
* **Two-operand arithmetic.** The compute unit has one input port, so it is
  unary (with an immediate). Dot products, matrix products and convolutions
  need a second operand stream and an accumulator. These kernels do not run
  on this tile.

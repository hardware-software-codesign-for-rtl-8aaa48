# Matrix Machine: a microcoded vector processor for neural networks on Xilinx 7-series FPGAs

Most of the work in a multi-layer perceptron consists of a few vector
operations: dot products for the weight matrix, element-wise addition for the
bias, and an activation function. The Matrix Machine runs these operations on
many small, identical vector units. Each unit is built around one DSP slice and
two block RAMs. The units are grouped in fours, and each group holds a cached
microcode program. A single controller feeds all groups over a ring.

A network is compiled offline into a short list of 32 bit instructions, such
as "vector addition, 1024 iterations, groups 0 to 15". At run time the
controller expands each instruction into a microcode program for each group it
selects. It then streams the operand vectors in and the results out. The
hardware never has to be rebuilt to switch networks: only the instructions and
the data change.

This repository holds synthesizable SystemVerilog for the machine, from the
block RAM up to the top level `matrix_machine`. It also holds self-checking
testbenches for every level. The offline compiler, the DDR memory system and
the host link are not included. They connect through two plain valid/ready
streams on the top level.

## Hierarchy

```
matrix_machine                       top level
├── global_ctrl                      instruction memory, decoder, data/output streaming
├── ring_fifo                        circular FIFO, one stop per processor group
│   └── ring_node  x N_PG            stop: packet decode, input queue, output queue
│       └── sync_fifo x 2
├── mvm_pg  x N_MVM_PG (16)          Mini Vector Machine processor group
│   ├── local_ctrl                   microcode sequencer
│   │   └── ucode_cache              16 x 32 bit microcode cache
│   └── mvm x 4                      Mini Vector Machine
│       ├── bram_dp  (left, right)   1024 x 16 true dual-port RAM
│       └── dsp_unit                 DSP48E1-style 6-stage arithmetic
└── actpro_pg x N_ACT_PG (4)         Activation Processor group
    ├── local_ctrl / ucode_cache
    └── actpro x 4                   Activation Processor
        └── bram_dp  (left, table, right)
```

`mm_pkg` holds all shared encodings: opcodes, the instruction and microcode
layouts, processor and group control codes, ring packets, and the microcode
programs.

The groups sit on the ring in order. Groups 0 to 15 are vector groups and
groups 16 to 19 are activation groups. All arithmetic is on 16 bit signed
integers.

## From instruction to microcode

### Instructions

| bits    | field        | meaning                                        |
|---------|--------------|------------------------------------------------|
| 31..29  | opcode       | 000 dot product, 001 summation, 010 addition, 011 subtraction, 100 element-wise multiply, 101 activation, 110 NOP, 111 unused (acts as NOP) |
| 28..14  | iterations   | how often the group repeats its program (0 counts as 1) |
| 13..7   | first group  | first processor group the instruction applies to |
| 6..0    | last group   | last group; values past the last group are clamped |

The 7 bit group fields address up to 128 groups.

Vector opcodes only reach vector groups in the range, and the activation
opcode only reaches activation groups. A range can therefore cover both kinds
without harm.

The instructions of a program run one after another. The next instruction is
fetched once every group selected by the current one has reported that it is
done.

### Microcode

One 32 bit microcode word drives the four processors of a group for a given
number of cycles:

| bits    | field                                                       |
|---------|-------------------------------------------------------------|
| 31..16  | four 4 bit processor controls, processor 3 in the top nibble |
| 15..14  | output 4:1 multiplexer select                               |
| 13      | output counter enable                                       |
| 12      | output column                                               |
| 11      | input counter enable                                        |
| 10      | input column                                                |
| 9..0    | number of cycles (0 counts as 1)                            |

A group has two 8 bit counters, one for input and one for output, and both
restart with each microcode. An enabled counter advances on every executed
cycle.

The counter forms the processor addresses `{col, counter, 0}` and
`{col, counter, 1}`. The first address is port 0 and the second is port 1.
`col` starts at the microcode's column bit and flips when the counter wraps.
As a result, a 512-cycle microcode writes two elements per cycle into all 1024
words: first column 0 (addresses 0 to 511), then column 1 (addresses 512 to
1023).

### The programs the controller generates

Every selected group receives the same program. It is sent as one packet per
microcode, followed by a start packet that carries the iteration count and
the loop entry.

Vector instruction: 9 microcodes, and every iteration runs all of them.

| entry | processors             | cycles | counters            |
|-------|------------------------|--------|---------------------|
| 0..3  | processor p WRITE, others READ | 512 | input |
| 4     | all run the operation  | 522    | none                |
| 5..8  | all READ, mux = p      | 256, or 1 for dot product and summation | output |

Activation instruction: 10 microcodes. Iterations after the first restart at
entry 1, so the look-up table is loaded only once.

| entry | processors                  | cycles | counters |
|-------|-----------------------------|--------|----------|
| 0     | all WRITE_ACT (table)       | 512    | input    |
| 1..4  | processor p WRITE_DATA      | 512    | input    |
| 5     | all RUN                     | 520    | none     |
| 6..9  | all READ, mux = p           | 512    | output   |

The run microcodes last a few cycles longer than the processors are busy. The
extra cycles make sure the last result has been written before the first read.

### Stalls and the iteration loop

`local_ctrl` executes a cycle only when its data can move. It does not execute
in these two cases:

- the input counter is enabled but no input pair is waiting;
- the output counter is enabled but the ring stop cannot take more output.

In a stalled cycle everything holds: the counters, the cycle count and the
processor controls. Because of this, the speed of the ring and of the host
never changes a result, only the time it takes.

After the last microcode, the program starts again at the loop entry until the
iteration count is used up. The group's `busy` then falls, once its last
output has left the group.

## Mini Vector Machine (`mvm`)

Each Mini Vector Machine has these parts:

- a left BRAM that holds the operands;
- one DSP unit;
- a right BRAM for the results;
- a read counter and a write counter.

The left BRAM is used as two 512-word columns. Port 0 reads column 0 and port
1 reads column 1 at the same index. Element `i` of a run therefore computes
`f(col0[i], col1[i])`. The result is the low 16 bits of the 48 bit DSP
output: it wraps and does not saturate.

| control (3 bits) | operation |
|------------------|-----------|
| 000 RESET        | clear counters, DSP and write pipeline |
| 001 READ         | idle; right BRAM words at `input_addr0/1` on `output_data0/1` one cycle later |
| 010 WRITE        | input pair registered, then written at `input_addr0/1` |
| 011 DOT          | sum of col0[i] * col1[i] over 512 pairs |
| 100 SUM          | sum of col0[i] + col1[i] over 512 pairs (all 1024 words) |
| 101 ADD / 110 SUB / 111 ELEM_MULTI | element-wise, 512 results |

Control bit 3 selects the upper or lower half of the right BRAM for the
results. Element-wise results go to `{msb, i}`. A dot product or a sum keeps
rewriting its running value at `{msb, 0}`, so that word holds the final value
when the run ends.

A run starts on the cycle the control changes to a run code. The cycles are
numbered from there:

```
cycle 1    setup (counters, DSP cleared)
cycle 2    left BRAM read at the read counter, read counter + 1
cycle 3    operands on the DSP A/B inputs
cycle 8    DSP result valid, write counter + 1
cycle 9    result written to the right BRAM
...        one element per cycle
cycle 520  last (512th) result written;  busy = cycles 2..520 (519 cycles)
```

`dsp_unit` is written as plain RTL arithmetic with five register stages, not
as an instantiated DSP48E1. Vendor tools map it to a DSP slice.

## Activation Processor (`actpro`)

The Activation Processor has the same data ports as the Mini Vector Machine.
It uses three BRAMs:

- a left BRAM with the data;
- a look-up table;
- a right BRAM for the results.

A run handles the whole left BRAM, two words per cycle.

1. Each word `x` is shifted right arithmetically by 7 bits. This leaves a
   9 bit two's-complement value `s = x >>> 7`, between -256 and 255.
2. `s` looks up the table at address `{lut_sel, s[8:0]}`.
3. The result is written to the right BRAM at the address `x` came from.

`lut_sel` selects one half of the table. By convention, half 0 holds the
function and half 1 holds its derivative.

To load a function `f`, write table entry `a` (for `a` from 0 to 511) with
`f(s * 128)`, where `s` is `a` read as a 9 bit signed number. For ReLU this is
`a < 256 ? a * 128 : 0`, which is exact for the 128-wide steps of the shifted
input. The derivative half is loaded the same way at addresses 512 to 1023.

The two shifted values use the two ports of the single table BRAM, so the
whole processor needs three BRAMs.

| control (2 bits) | operation |
|------------------|-----------|
| 00 READ          | idle; right BRAM words out, one cycle latency |
| 01 WRITE_ACT     | input pair written into the table |
| 10 WRITE_DATA    | input pair written into the left BRAM |
| 11 RUN           | table lookup over all 1024 words |

The run timing is: 1 setup, 2 read, 3 shift, 5 table result, 6 write counter
advances, 7 first write. The last write is in cycle 518, so `busy` is high for
517 cycles.

In an activation group, bits 1..0 of a processor's control nibble are the
operation and bit 2 is `lut_sel`. The generated programs always use half 0.

## Processor groups (`mvm_pg`, `actpro_pg`)

A group contains four processors, one `local_ctrl` and a registered 4:1 output
multiplexer. The input pair goes to all four processors. The processor
controls decide which of them writes it.

A read issued in cycle `t` appears on `output_data0/1`, with `output_valid`,
in cycle `t + 2`.

Beyond the two 16 bit input ports, two 16 bit output ports and the
`group_control` and `microcode` inputs, a group has these ports:

- `iters` and `loop_start`, taken when the group is started;
- a valid/pop handshake on the input;
- a valid/ready handshake on the output;
- `busy`;
- two stall flags, for monitoring.

`group_control`: 00 hold, 01 load (write `microcode` into the next cache
entry), 10 start, 11 stop.

## The ring (`ring_fifo`, `ring_node`)

The ring is a closed loop of registered stops. It starts at the global
controller and passes one stop per group. Each cycle, every packet moves one
stop, so no wire spans more than one stop whatever the number of groups.

A packet is `{kind[2:0], group[6:0], payload[31:0]}`:

| kind  | direction     | payload |
|-------|---------------|---------|
| UCODE | to group      | microcode word |
| START | to group      | `{loop_start[3:0], iterations[14:0]}` |
| STOP  | to group      | - |
| DATA  | to group      | input pair, element 0 in bits 15..0 |
| OUT   | from group    | output pair, element 0 in bits 15..0 |
| DONE  | from group    | - (sent when the group's `busy` falls) |

A stop removes the packets addressed to its group. Data packets go into a
16-entry input queue. The group's outputs, and the final DONE, go into an
8-entry output queue, which the stop places in empty slots as they pass.

**Credits.** The controller keeps one credit counter per group, starting at
the depth of the input queue. Sending a data packet uses one credit. Each pair
the group consumes returns one credit straight to the controller. An input
queue therefore never overflows (an assertion checks this), and data for a
group never has to wait on the ring.

**Recirculation.** When an output packet reaches the controller while the host
is not ready, it stays on the ring and goes round again. Outputs of one group
can therefore arrive out of order after a host stall. Each output carries its
group number but not its address.

Packets injected by the controller never wait for outputs. Outputs only wait
for empty slots, and the controller frees a slot whenever the host takes an
output. As a result, the ring cannot deadlock as long as the host keeps
draining the output stream.

## Global controller (`global_ctrl`) and the host streams

The controller does the following:

1. It loads the instruction memory through `imem_we/addr/wdata`.
2. On `start` it runs the first `prog_len` instructions.
3. It pulses `done` at the end.

For each instruction it sends the programs and start packets to every
selected group. It then streams the data in this order, which the host must
follow:

```
for each iteration
  for each selected group (in group order)
    the words that group consumes in this iteration:
      vector op:   2048 words  = processor 0..3, 512 words each:
                   words 0..255 = column 0 (operand A, elements 2j | 2j+1<<16),
                   words 256..511 = column 1 (operand B)
      activation:  first iteration only: 512 table words (entries 2j, 2j+1),
                   then 2048 words = processor 0..3, 512 words each (1024 elements)
```

The outputs come back as 32 bit words, each tagged with its group on
`dout_gid`:

| instruction | words per group and iteration |
|-------------|-------------------------------|
| element-wise | 4 × 256 words (512 results per processor) |
| dot product and summation | 4 words; the low half is each processor's result |
| activation | 4 × 512 words |

Both streams carry one 32 bit word per cycle, which is two elements.

## Sizing

The number of vector groups comes from the memory bandwidth: one group per
share of the DDR bandwidth that matches the processing clock. On a Spartan-7
XC7S75-2 with 4 DDR channels at 400 MHz and a 100 MHz fabric clock, this gives
4 · 400 / 100 = **16** vector groups. This is the default `N_MVM_PG`.

The activation groups fill the resources that remain. Each vector group uses
495 LUTs, 1642 FFs, 8 RAMB18 and 4 DSP slices. Each activation group uses 447
LUTs, 1406 FFs and 12 RAMB18. The XC7S75 has 48000 LUTs, 96000 FFs and 180
RAMB18. After the 16 vector groups this leaves:

- min(40080/447, 69728/1406, 52/12) = **4** activation groups (the default
  `N_ACT_PG`).
- The default machine uses 64 DSP slices and 176 RAMB18 in its processors.

`GID_W = 7` caps the machine at 128 groups.

| parameter (top) | default | meaning |
|-----------------|---------|---------|
| `N_MVM_PG`      | 16      | vector groups |
| `N_ACT_PG`      | 4       | activation groups |
| `IMEM_DEPTH`    | 256     | instruction memory words |
| `IN_DEPTH`      | 16      | input queue per ring stop (also the credits per group) |
| `OUT_DEPTH`     | 8       | output queue per ring stop |

## Performance

The testbench `tb_mm_workloads` runs one group for 1024 iterations with a host
that never stalls. The per-iteration figures are:

| workload (one group, 4 × 1024 elements / iteration) | cycles / iteration | total, 1024 iterations | earlier estimate |
|------------------------------------------|------|-----------|-----------|
| vector addition  (2048 load + 522 run + 1024 store) | 3594 | 3 680 276 | 4 238 336 |
| dot product      (2048 load + 522 run + 4 store)    | 2574 | 2 635 796 | 4 206 592 |
| activation       (2048 load + 520 run + 2048 store, + 512 table once) | 4616 | 4 727 317 | 5 271 552 |

Each measured total is within 21 cycles of the schedule. The busy times of
the processors (519 cycles for a vector run, 517 for an activation run) match
the published cycle counts.

The whole machine has one input stream of 32 bits per 100 MHz cycle
(3.2 Gb/s). Groups therefore load one after another, and a group runs and
stores while the next ones load. An element-wise instruction over all 16
vector groups needs at least 16 × 2048 = 32 768 input cycles per iteration,
against 3594 cycles per iteration for a single group.

## Departures and open points

- **Streaming bandwidth.** The group count is derived from the DDR bandwidth,
  about 100 Gb/s for the selected device. This design, however, connects the
  machine to the memory side through one 32 bit stream, and the ring carries
  one 32 bit packet per cycle. A wider ring, or several, is needed to reach the
  bandwidth the sizing assumes. No width was specified for it.
- **Load cycles.** Loading 1024 elements into a processor takes 512 cycles on
  the two 16 bit input ports. The earlier vector estimates count 256 load
  cycles per processor. The activation estimate counts 512, as here.
- **Column caching.** A microcode can load a single 256-cycle column and
  leave the other column in place. This lets a group keep one operand, such as
  a weight vector, across iterations. The programs that the controller
  generates do not use this: they reload both columns in every iteration.
  Using it would need an instruction variant or a custom microcode program.
- **Output ports of the Mini Vector Machine.** The text gives one output port,
  but the port list gives two (`output_data0/1`). This design has two: during
  READ, right-BRAM port 0 serves the second output, since no result is being
  written then.
- **Look-up table.** The description has one table BRAM per shifter, but the
  processor's resource count is three BRAMs. This design uses one dual-port
  table BRAM, which makes three in total.
- **Own choices.** These are this implementation's own choices:
  - the instruction field layout;
  - the group-control codes;
  - the ring packet format, the queues and the credit scheme;
  - the data order of the host streams;
  - the column split of the left BRAM;
  - the result address of dot products and sums;
  - the stall rule;
  - the iteration loop entry.

  Each is described in the opening comment of the module concerned.
- **Not included.** The following are not part of this RTL:
  - the 48 bit instruction variant (1024 groups);
  - the offline compiler that turns network descriptions into instructions,
    and builds matrix products from dot products;
  - the DDR controller;
  - the flash and host links.

## Verification

Every block has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=<n> failures=<n>` and stops itself with a watchdog.

| testbench | what it checks |
|-----------|----------------|
| `tb_bram_dp`, `tb_dsp_unit`, `tb_ucode_cache` | memories and DSP against reference models, including DSP latency |
| `tb_mvm`, `tb_actpro` | every operation against a model, both result or table halves, the 519 / 517 busy cycles, and (MVM) a run cut short by RESET |
| `tb_local_ctrl` | counters, columns, stalls, iteration loop, cycle counts, stop and restart |
| `tb_mvm_pg`, `tb_actpro_pg` | whole group programs with random input gaps and output stalls |
| `tb_ring_fifo` | packet delivery to the right stop with its latency, data order and credits, output order and DONE after the last output |
| `tb_global_ctrl` | programs and start packets per group kind, data order, credits, recirculated outputs, waiting for DONE, `done` pulse |
| `tb_matrix_machine` | 2 vector groups and 1 activation group; every opcode, multi-iteration runs, random host stalls; counts input and output stalls, recirculation and credit waits, and fails if any never happened |
| `tb_matrix_machine_full` | the default 16 + 4 machine: addition over all vector groups, activation over all activation groups, a two-iteration dot product over all groups |
| `tb_mm_workloads` | the three 1024-iteration workloads above, with cycle counts |

The end-to-end testbenches share `tb_mm_body.svh` and the reference model
`tb_mm_model_pkg`. They check every output word against the model, per group.

Simulate with Verilator 5, from the repository root:

```
verilator --binary -Irtl -Itb --top-module tb_matrix_machine \
    rtl/mm_pkg.sv tb/tb_mm_model_pkg.sv tb/tb_matrix_machine.sv
./obj_dir/Vtb_matrix_machine
```

Use the same pattern for any other testbench. Unit testbenches do not need
`tb/tb_mm_model_pkg.sv`.

Approximate run times are:

| testbench | cycles | build | run |
|-----------|--------|-------|-----|
| `tb_matrix_machine` | 54 000 | | about a second |
| `tb_matrix_machine_full` | 161 000 | about 20 s | 1 s |
| `tb_mm_workloads` | 11 million | | about 15 s |

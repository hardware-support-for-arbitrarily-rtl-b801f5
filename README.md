# A zero-overhead loop controller for arbitrary loop structures

Loops in embedded code pay for every iteration with a few instructions
that do no useful work: increment the index, compare it with the bound,
branch back. Hardware loop counters remove that cost for a single loop or
a perfect nest, but real kernels also have code between nested loops,
early exits (`break`), loops entered in more than one place, and bounds
that depend on an outer index. The zero-overhead loop controller (ZOLC)
in this repository removes the loop overhead for any such structure. It
sits next to the instruction decoder, the PC decoding unit and the
register file of a 32-bit RISC core. Software describes the loop
structure once, before the loops start. From then on the controller
updates the loop indices in the core's own registers and supplies the
branch targets, so the loop code holds only its bodies.

The RTL follows the architecture of N. Kavvadias and S. Nikolaidis,
"Hardware Support for Arbitrarily Complex Loop Structures in Embedded
Applications", and its largest configuration: 32 task switching entries,
8 loops and up to 4 entries/exits per loop. That paper gives the block
structure, the signals between the blocks, the two operating modes and
the sizes. It does not give the insides of any block, table layouts,
instruction encodings or bit widths. Everything at that level here is
this design's own. It is marked as such below, so that you know which
parts you can change freely.

## Tasks and exits: how a loop structure is described

The controller does not see loops as such. It sees **tasks**: regions of
code bounded by loop boundaries. Take

```
for i = 0..3            // loop 0, index in r1
    A                   // 0x100..0x104
    for j = 10 downto 4 step 3      // loop 1, r2
        B               // 0x108..0x110
        for k = 1..5 step 2         // loop 2, r3
            C           // 0x114..0x118
        B2              // 0x11C
    D                   // 0x120
E                       // 0x200..
```

This is cut into the tasks A, B, C, B2, D and E. Each task has an
**entry PC** and up to four **exits**. An exit is the PC of the last
instruction executed on the way out, plus what happens there:

| exit type  | meaning                                                      | next task |
|------------|--------------------------------------------------------------|-----------|
| `EX_NEXT`  | plain fall-through to another task, no index action          | `next_a` |
| `EX_LOOP`  | end of the body of loop *L*: step its index and test it      | `next_a` while the loop goes on, `next_b` when it is over |
| `EX_BREAK` | early exit from loop *L*: reset its index                    | `next_a` |
| `EX_END`   | leave the loop structure: go back to initialization mode     | `next_a` (its entry PC is the continuation address) |
| `EX_NONE`  | exit slot unused                                             | – |

In the example, C's exit is `EX_LOOP` on loop 2, with `next_a` = C and
`next_b` = B2. B2's exit is `EX_LOOP` on loop 1, with `next_a` = B and
`next_b` = D. A loop with several exits has a task with several exit
slots. A task's exits may even share one PC: a conditional branch there
picks one exit or another. A loop with several entries has several
tasks whose entry PCs lie inside the same body. Their exits close the
same loop.

A loop's index lives in an ordinary general-purpose register, so the
body reads it like any variable. The controller owns the updates.

## Operation in active mode

While active, the controller shows the PC decoding unit the exit PCs of
the current task (`task_exit_pc[0..3]`, `task_exit_valid`). The core's PC
decoding compares each fetch PC with them. When an exit is taken (for
exit 0 when the PC matches; for the others also when the branch condition
holds), it raises `task_end` and gives the exit number on
`task_entry_sel`. In the same cycle, combinationally:

1. the task selection unit looks up that exit of the current task and
   drives its loop number (`loop_addr`) and type (`task_type`);
2. the loop parameter tables return the loop's initial, step and final
   values and the number of its index register;
3. the index calculation unit reads the index from the register file,
   forms `index + step` and decides `end_of_loop`;
4. the task selection unit picks `next_a` or `next_b` and drives that
   task's entry PC on `zolc_pc_target`, which the PC decoding unit uses
   as the next fetch address.

At the clock edge the current-task register moves to the next task and
the new index is written to the register file (`index_wb_*`). The next
instruction fetched is the first one of the next task. That instruction
already sees the updated index. No cycle is spent between tasks.

**Index arithmetic** (this design's choice). The loop runs while the
index has not passed the final value. The final value is inclusive.
The compare is signed, so steps may be negative:

```
next = index + step
over = (step >= 0) ? next > final : next < final
EX_LOOP : write back over ? initial : next;   end_of_loop = over
EX_BREAK: write back initial
```

At loop end, and on a break, the index is put back to its initial value.
The loop is then ready the next time it is entered, for example on the
next iteration of an outer loop, at no cost. So after a loop the index
register holds the initial value, not the last value plus step as in C.
The test is made at the end of the body, so every body runs at least
once. A loop that may run zero times needs a guard branch around it in
software.

**Coinciding loop ends.** Each exit closes at most one loop. Where an
inner and an outer loop end on the same instruction, the outer loop
needs its own task of at least one instruction (B2 and D above; in a
perfect nest, a `nop`). The published architecture seems to work the
same way. It names the completion of successive last iterations in a
single cycle as the advantage of another, perfect-nest-only scheme.

## Initialization mode and the configuration interface

After reset the controller is in initialization mode. The instruction
decoder loads it with commands on four inputs, the ones the architecture
names: `zolc_ctrl` (command), `page_sel`, `reg_addr` and `immediate`.
The encodings are this design's (see `zolc_pkg.sv`):

| `zolc_ctrl` | action |
|-------------|--------|
| `ZC_NOP`   (0) | nothing |
| `ZC_WRITE` (1) | write `immediate` to row `reg_addr` of page `page_sel` |
| `ZC_START` (2) | enter active mode with task `reg_addr` as the current task |
| `ZC_STOP`  (3) | return to initialization mode |

| `page_sel` | row = | contents |
|------------|-------|----------|
| 0, 1, 2    | loop  | initial, step, final value (32 bit, two's complement) |
| 3          | loop  | number of the register holding the loop's index |
| 4          | task  | entry PC |
| 8 + j      | task  | PC of exit *j* |
| 12 + j     | task  | exit *j* configuration: type in bits 2:0, loop in bits 10:8, `next_a` in bits 20:16, `next_b` in bits 28:24 |

Writing a loop's initial value (page 0) also writes it into the loop's
index register through the write-back port. Write page 3 before page 0.
Task-LUT writes (pages 4–15) are ignored in active mode. Loop-parameter
writes (pages 0–3) are accepted in both modes. That lets a body set the
bound of an inner loop from an outer index before the inner loop starts,
as bubblesort needs (`for j = 0..i`). The source of the immediate is
up to the decoder. In the kernel testbench a register operand is
forwarded on it.

Two writes are needed per field, so a full load of all 32 tasks with
four exits each takes 32 × 9 commands, plus 4 per loop. Only the tasks
in use need loading. The load happens outside the loops.

## Blocks

| file | block | what it holds |
|------|-------|---------------|
| `rtl/zolc_pkg.sv` | – | sizes, command/page/exit-type encodings, bit positions |
| `rtl/zolc_task_selection_unit.sv` | task selection unit | task LUT (32 entries × entry PC + 4 exits), mode flag, current task, next-task choice |
| `rtl/zolc_loop_param_tables.sv` | loop parameter tables | 8 × (initial, step, final, index register) |
| `rtl/zolc_index_calc_unit.sv` | index calculation unit | adder, signed bound compare, write-back select (combinational) |
| `rtl/zolc_top.sv` | ZOLC | the three units, plus the register-file port mux |

Parameters of `zolc_top` (defaults = the full configuration): `N_TASKS`
(32), `N_LOOPS` (8), `N_EXITS` (4), `D_W` (32), `P_W` (32), `R_AW` (5).
`N_TASKS` and `N_LOOPS` may not exceed 2^`R_AW`, since rows are addressed
through `reg_addr`. `N_EXITS` may not exceed 4, since the page map has
four exit pages. With `N_EXITS = 1` the controller has no multiple
entries/exits, which matches the reduced configuration of the original
evaluation in spirit.

All storage is flip-flops with an asynchronous active-low reset to zero.
In total that is 7982 bits (about 1 KB). The reference architecture
reports 642 bytes for the same configuration. The difference comes
mostly from storing full 32-bit PCs in every entry and exit here.
Narrower PCs (`P_W`) shrink it directly.

**Core-side requirements.** The register file must return
`index_rd_data` for `index_rd_addr` combinationally, and accept one
extra write per cycle from `index_wb_*`. The PC decoding unit must do
the exit compare described above and give exit 0 the lowest priority.
A task end outside active mode, or on an unused exit, violates the
handshake. The two assertions in the task selection unit catch both.
The critical path runs from the PC compare in the core, through the LUT
lookup, the adder and compare, the second LUT lookup, and back into the
fetch PC mux. It was not timed here. A pipelined core would compare the
exit PCs one stage early.

## Departures from and gaps against the reference architecture

- The reference architecture was built into the XiRisc core. The core
  itself (instruction decoder, PC decoding unit, register file) is not
  part of this RTL. The controller's ports are where those parts
  connect. The testbenches model them.
- The instruction encoding of the configuration sequence is not known.
  The command/page interface above stands in for it.
- Table layouts, widths, the index arithmetic (inclusive bound, reset to
  initial value on exit), the initial-value copy into the index register
  and the loop-parameter writes in active mode are all this design's
  choices.
- The storage is larger than the reported 642 bytes (see above). The
  smaller configurations (one without multiple entry/exit, one for single
  loops) are not built separately.
- Recursion and loops whose trip count is decided inside the body
  (`while` loops) are outside this scheme, except through early exits.

## Verification

Each testbench is self-checking and prints `TB_RESULT checks=N
failures=M`.

- `tb_zolc_loop_param_tables`: random writes against a mirrored array,
  read back through both ports.
- `tb_zolc_index_calc_unit`: directed bound cases (exact bound, both
  step signs, every exit type) and 2000 random cases against a 64-bit
  reference.
- `tb_zolc_task_selection_unit`: random LUT contents and random task-end
  sequences against a model; mode changes; write acceptance per mode.
- `tb_zolc_top` (full size, default parameters): a behavioural core runs
  a three-deep nest with a negative step and code between the loops, and
  a loop with two entries and an early exit. Each executed instruction's
  PC and index registers are compared with a trace from plain nested
  loops. The cycle count must equal the number of body instructions. The
  test also counts that each mechanism occurred: continue, loop end,
  break, second entry, end, negative step, ignored write, stop.
- `tb_zolc_kernels` (full size): bubblesort (16 elements; inner bound
  rewritten per pass; early exit when a pass makes no swap) and
  full-search motion estimation (4×4 block, ±2 range, four loops). Both
  are checked for result and for a cycle count equal to the body
  instructions alone.

To run one with Verilator:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -Irtl \
    rtl/zolc_pkg.sv tb/tb_zolc_top.sv --top-module tb_zolc_top -o sim
./obj_dir/sim
```

Every testbench finishes in well under a second.

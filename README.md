# EMPA: a processor that hires cores

A conventional processor runs one instruction stream and imitates parallel work in software:
a subroutine call saves registers to memory, an OS schedules threads onto the same core, and
a mutex is a memory protocol. The Explicitly Many-Processor Approach (EMPA) turns this around.
Processing capacity is treated as a resource like memory: a running code fragment can *hire*
another core for a piece of work, hand it register contents directly, and get results back in
hardware, without saving anything to memory. A hired core and the code fragment it runs form a
**quasi-thread (QT)**. A QT exists only between its creation and its termination; afterwards the
core goes back to a sleeping **core pool**. Code with no EMPA instructions still runs as a
single QT on one core.

This repository is synthesizable SystemVerilog for that scheme: a grid of small cores, a
processor layer that hires, links and releases them, and the hexagonal cluster addressing
that gives the cores their topological identity. The default build has a 10 x 6 grid of 60
cores.

## Quasi-threads and the meta-instructions

A core executes two kinds of instructions. Conventional instructions run in its own
processing element. **Meta-instructions** are requests to the processor layer. When the
processing element meets one, it raises its `Meta` line and stops. The core's morphing
element posts the request to the processor and waits. The processor executes the request,
acknowledges it, and the core continues with the next instruction.

| word[31:28] | mnemonic | fields | effect |
|---|---|---|---|
| 0 | NOP | | |
| 1 | LI rd, imm | rd [27:25], imm [15:0] | rd = sign-extended imm |
| 2 | ADDI rd, rs, imm | rs [24:22] | rd = rs + imm |
| 3 | ADD rd, rs, rt | rt [21:19] | rd = rs + rt |
| 4 | SUB rd, rs, rt | | rd = rs - rt |
| 5 | BNZ rs, target | target [7:0] | if rs != 0 jump |
| 8 | QCREATE A, B, off | A [27:20], B [19:12], off [7:0] | hire a child at `off`; registers in mask A are copied to it, registers in mask B come back when it ends |
| 9 | QCREATX A, B, off | as QCREATE | the same, but delayed while another exclusive QT runs the same `off` (a guarded critical section) |
| A | QTERM | | end of the code fragment: return the B-mask registers to the parent, core goes back to the pool |
| B | QWAIT | | wait until every child of this core has terminated |
| C | QCLONE A | | copy the latched child results in mask A into the register file |
| D | QPREAL | | reserve one core for this core's next QCREATE |
| E | QAVAIL n, off | | resource test: continue at `off` if at least n cores are free now, else at the next instruction |

The conventional instruction set is deliberately tiny: a register ALU with a branch, and no
loads or stores. It exists so that QTs do some real work between meta-instructions. The
architecture does not define an instruction set, and a real EMPA core would run a full
conventional one.

## The life of a quasi-thread, and why results go to latches

The rules that make hiring safe come from one problem: a parent keeps running while its
children work, so it uses its own registers the whole time. A child's result must therefore
never land in the parent's register file by itself.

1. **Hiring.** Parent P executes `QCREATE A, B, off`. The processor finds a free core C. It
   waits for the transfer time between P and C (see *Routing*). Then it starts C at `off`,
   with P's registers in mask A loaded into C's register file, and records P as C's parent
   and B as C's return mask. Next it sets C's bit in P's **children mask** and releases P.
   If no core is free, P's request stays queued and P sees `Wait` until a core comes back.
2. **Working in parallel.** P and C run independently. C may hire children of its own, so
   QTs nest to any depth.
3. **Returning.** When C executes `QTERM`, the processor copies C's B-mask registers into P's
   **FromChild latches**, not into P's registers. It clears C's bit in P's children mask and
   puts C back in the pool. P's registers are untouched.
4. **Cloning.** When P has reached a point where it needs the results, it executes
   `QCLONE mask`. This copies the latched values (only those a child actually returned) into
   its registers. Choosing that point is the program's job.
5. **Responsibility for children.** A core's `QTERM` is held back, with `Wait` raised, as long
   as its children mask is non-zero. `QWAIT` blocks in the same way, so a parent can wait for
   all its children before cloning.

A root QT is started from outside: `start` together with an offset, initial registers
(`start_regs`/`start_mask`) and a return mask. When it executes `QTERM`, `root_done` pulses
and `root_regs` holds its returned registers.

## The processor layer

`empa_processor` does no arithmetic. It only manages cores.

* **Meta FIFO** (`meta_fifo`). Cores write requests into it without asking first. A core has
  at most one request outstanding, so the queue has one slot per core and cannot overflow.
  The processor takes the entry with the highest priority: QTERM first, then QWAIT and
  QCLONE and QAVAIL, then QCREATE, QCREATX and QPREAL. Ties go to the oldest entry. Terminations rank
  above creations because terminating frees resources and creating uses them up. This keeps
  a program that spawns without limit from starving itself of cores.
* **Servable entries.** Each cycle the processor marks which queued entries it could serve
  right now:
  * QTERM and QWAIT: the core has no live children.
  * QCREATE: a core is free, or one is preallocated to the requester.
  * QCREATX: the same, and no running exclusive QT has the same offset.

  Entries that cannot be served are skipped; they stay queued and their cores see `Wait`.
  (Blocking the whole queue on its head would deadlock: a parent's held-back QTERM would
  outrank the children's QTERMs it is waiting for.)
* **Execution.** One meta-instruction is executed at a time. QWAIT, QCLONE, QPREAL and
  QAVAIL take one cycle. QCREATE and QTERM take the transfer time plus two command cycles.
* **Command bus.** The processor drives one `proc_cmd_t` per cycle to all cores, holding a
  target ID, the other core's ID, masks, an offset and a full register vector. Each core's
  inter-core block picks out the commands addressed to it. The commands are START, ADDCHILD,
  RETURN, STOP, CLONE, ACK and PREALLOC.

## The core pool

`proc_status` holds one state per core: **Avail** (asleep in the pool), **Allocated**
(running a QT) or **Preallocated** (reserved for an owner). Cores whose `denied` input is set
report **Denied** and are never hired. `denied` stands for a core that is faulty from
fabrication or temporarily overheated. The processor can therefore skip a bad core without
the program noticing. When a core is needed, the pool picks:

1. a core preallocated to the requester, if the request is a create;
2. otherwise a free core in the requester's own cluster (proximity);
3. otherwise the lowest-numbered free core.

When an owner terminates, any cores still preallocated to it go back to the pool.

## Hexagonal grid and cluster addresses

Physically the cores form columns, and every second column is shifted by half a cell. Each
core then shares a boundary with up to six others, so the grid is logically hexagonal. Core
`c` of an `NCOLS x NROWS` grid is at `x = c / NROWS`, `y = 2*(c % NROWS) + (x % 2)`. So `y`
always has the parity of `x`. The six neighbours of `(x, y)` are `(x, y±2)` and `(x±1, y±1)`.

A **cluster** is a head core and its six neighbours (the r = 1 "ordinary members"). The twelve
cores at distance 2 are "corresponding members", reachable through an ordinary member acting
as a proxy. Head, ordinary and corresponding members together form an extended cluster of up
to 19 cores. The heads tile the plane where

    (2x - y) mod 7 == 0

and for every other core the same residue `(2x - y) mod 7` (1 to 6) says in which direction it
lies from its head. The direction codes are

    1: (+1,+1)   2: (0,-2)   3: (+1,-1)   4: (-1,+1)   5: (0,+2)   6: (-1,-1)

and direction `d` is opposite to `7 - d`. For the 10 x 6 grid this puts heads at (0,0),
(2,4), (5,3), (4,8), (1,9), (7,7), (8,2) and (9,11). Clusters cut by the grid edge have
**phantom** members: they have addresses but no core.

An 18-bit core address (`core_addr_t`) is `{processor[5:0], cluster[5:0], proxy[2:0],
neighbor[2:0]}`. The fields are filled as follows:

* `cluster` holds the head's lattice coordinates `{i[2:0], j[2:0]}`, each as a signed 3-bit
  number, with the head at `i*(2,4) + j*(3,-1)`.
* `neighbor` is the direction code from the head, 0 for the head itself.
* `proxy` is 0 for cores of the cluster itself. A non-zero `proxy` names an r = 2 member:
  the core reached by stepping `proxy` and then `neighbor`.

`hex_addr` converts both ways. It also reports whether a decoded position is a physical core.
The field widths come from the architecture. The split of the cluster field and the direction
numbering are this design's choices.

## Routing and transfer time

`msg_route` makes a core's routing decision for one message. It sorts the destination into:

* the core itself;
* an r = 1 neighbour, sent directly (next hop = its direction);
* an r = 2 core, through a proxy (the lowest-numbered neighbour, inside the grid, that
  touches the destination);
* a farther core in the same processor, first to the sender's cluster head, since only heads
  reach the inter-cluster bus;
* another processor;
* an address that has no core (phantom or outside the grid).

It also estimates the number of transfers: one per core-to-core step and one per bus
crossing. The processor uses that hop count, at least one cycle, as the delay of each parent
to child and child to parent register transfer. Hiring a core next door is therefore faster
than hiring one across the chip, and the pool's preference for the requester's cluster pays
off. The hop costs are a model. The actual message transport is not built (see below).

## Modules

| module | role | interface and timing |
|---|---|---|
| `empa_pkg` | shared types: address, instruction encoding, `meta_t`, `proc_cmd_t`, priorities, grid helpers | |
| `empa_top` | the processor: code memory, `NCOLS*NROWS` cores, processor layer | program load port, root start/result, `denied`, pool state |
| `code_mem` | instruction memory with one asynchronous read port per core and a load port | write at the clock edge; reads combinational |
| `empa_core` | one core: `epe`, `eme`, `eicb`, `regfile` | fetch port, command bus in, request out |
| `epe` | processing element: fetch, single-cycle ALU, suspend on `Meta` | one instruction per cycle; one extra cycle to suspend |
| `eme` | morphing element: latches the meta-instruction, one-cycle `push`, mirrors `Wait`, `meta_done` on ack | push one cycle after `Meta` |
| `eicb` | inter-core block: children and preallocated masks, FromParent/FromChild latches, return mask, code offset, parent ID, mode | commands act at the next edge |
| `regfile` | 8 x 32-bit registers with a single write port and a masked bulk write port | bulk write wins on conflict |
| `empa_processor` | processor layer: Meta FIFO, pool, executor, transfer timing | one command per cycle |
| `meta_fifo` | priority queue, one slot per core | selection combinational |
| `proc_status` | core pool | proposal combinational, commit at the edge |
| `hex_addr` | grid position and address, both ways | combinational |
| `msg_route` | routing class, next hop, hop count | combinational |

All flip-flops use an asynchronous active-low reset `rst_n`. Assertions check the
handshakes:

* a core never posts a second request;
* a core is never stopped while it still has children;
* the processor never acknowledges a request that was not made;
* the pool never takes and reserves in the same cycle.

## Simulating

Every testbench in `tb/` checks itself. It ends with `TB_RESULT checks=N failures=M` and has a
watchdog. To build and run one with Verilator:

    verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
        rtl/empa_pkg.sv tb/empa_asm_pkg.sv tb/tb_empa_top.sv --top-module tb_empa_top
    ./obj_dir/Vtb_empa_top

`tb/empa_asm_pkg.sv` has encoder functions (`LI`, `ADD`, `QCREATE`, ...) for writing programs,
and the reference program used by the end-to-end tests. In that program the root QT:

* runs two resource tests: one asks for more cores than exist and falls through, the other
  passes and jumps over an early exit;
* preallocates a core;
* hires three children, one of which hires a grandchild;
* waits for them and clones their results;
* starts the same critical section twice in exclusive mode;
* terminates, which is held back until both critical-section QTs have ended.

The expected returned registers are r3 = 12, r4 = 15, r5 = 24 and r6 = 27.

* `tb_empa_top` runs the program on a 3 x 2 grid with three cores denied. The pool runs dry,
  so every mechanism occurs, and the testbench counts each one and fails if any never
  happens. The mechanisms are: hiring, termination, Wait for a core, termination held back by
  children, QWAIT stall, exclusive creation held back, cloning, use of a preallocated core,
  multi-hop transfer, hiring within the requester's cluster, and a resource test both passing
  and falling through. It finishes in about 235 cycles.
* `tb_empa_top_full` runs the same program on the default 60-core processor, with two cores
  denied.
* `tb_<module>` tests each module on its own. `tb_hex_addr` compares the address logic
  against the list of head positions for all 60 cores. `tb_msg_route` checks all 3600 source
  and destination pairs against a brute-force neighbourhood search.

To change the grid, set `NCOLS`/`NROWS` on `empa_top`. The cluster field has 3 signed bits
per lattice coordinate, which covers grids up to roughly 14 x 14 cores. Core IDs are 8 bits
wide, so at most 256 cores. `NREGS`, `XLEN` and the code memory depth (`CODE_AW`) are package
constants in `empa_pkg`.

## How far this follows the architecture

Taken from the architecture:

* the division of a core into processing element, morphing element and inter-core block;
* the Meta / Wait protocol;
* the Meta FIFO with terminations ranked above creations;
* hiring from a sleeping core pool, with Wait when the pool is empty;
* parent to child register transfer at hiring;
* child results held in latches until the parent explicitly clones them;
* parents that cannot terminate before their children;
* delaying a second entry into the same guarded code offset;
* the Denied, Allocated, Preallocated and Avail core states;
* the hexagonal clustering;
* the 6/6/3/3 address fields;
* choosing between methods at run time by the number of free cores (QAVAIL);
* the rule that r ≤ 2 cores talk directly and everything else goes through the cluster head.

Choices of this design, where the architecture says nothing:

* the instruction set and its encoding;
* 8 x 32-bit registers;
* a 256-word code memory with a read port per core;
* the processor-to-core command bus in place of messages;
* serial, one-at-a-time execution of meta-instructions;
* skipping unservable queue entries;
* the ranking of the meta-instructions other than terminate and create;
* the proximity-then-lowest-ID choice of core;
* the cluster-field encoding and direction numbering;
* the hop-count transfer-time model;
* what QPREAL reserves;
* the form of the resource test as a conditional jump.

Not built:

* the communicating element's message transport and the inter-cluster and inter-processor
  buses (only the routing decision exists);
* the storage manager of the cluster heads and the cluster storage (cache, stack, I/O
  buffer);
* data memory;
* the "pseudo register" of the inter-core block;
* "fat" cluster-head cores: every core is built the same;
* fetching the next instruction from the Meta FIFO instead of from memory;
* cores kept ready in kernel mode for interrupts and OS calls;
* the processor's own program counter.

Register contents therefore move through the processor's command bus, not as messages
between cores.

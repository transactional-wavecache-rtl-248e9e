# Transactional StoreBuffer for a WaveScalar-style dataflow machine

In a WaveScalar dataflow machine a loop iteration is a *wave*. Memory
operations inside a wave are chained in program order by a
`<P,C,S>` annotation (predecessor, current, successor). The baseline memory
system lets a wave touch memory only after every earlier wave has finished
all of its memory operations, which serialises loops that could otherwise
overlap. The Transactional WaveCache removes that barrier. Each wave is
treated as a transaction, nested in program order behind the waves before
it. Later waves read and write memory speculatively. A log lets the
StoreBuffer find, when an older wave's operation finally executes, the
younger waves that it has wronged. A true read-after-write violation undoes
the younger waves and re-executes them under a new execution number. A
write-after-write or write-after-read collision is repaired in the log
without any re-execution.

This RTL implements that mechanism in the StoreBuffer and in the operand
path of a processing element (PE). The PE side has two parts. The
Execution Map and the matching table's *MT Checkup* keep operands of
abandoned executions from firing instructions. The rest of the machine is
the baseline dataflow fabric: ALUs, instruction buffers, pods, domains, the
cluster switch and the caches. It connects through ports.

## Waves, chains and execution numbers

Every memory request carries:

- its wave number (16 bits);
- an execution number ExeN (8 bits);
- the `<P,C,S>` annotation (8 bits per field). The two largest field values
  encode the wildcards "." (no such operation) and "?" (unknown, across a
  branch);
- an address, store data and the destination of a load's result.

Within a wave, a request may execute in three cases:

- it is the first (`P = "."`) and nothing of the wave has executed yet;
- the wave's last executed request names it as successor;
- it names that request as predecessor.

`twc_pkg::chain_ready()` is this rule. The request with `S = "."` closes the
wave and sets its **F** bit.

The StoreBuffer keeps `lastCommittedWave`, which resets to -1. Wave
`lastCommittedWave+1` is the *non-speculative* wave. Every later wave within
the Speculation Window may execute speculatively. The window is
`SPEC_WINDOW`, default 30: offsets 1..30, with offset 0 being the
non-speculative wave. A wave commits once it is
non-speculative and its F bit is set.

The StoreBuffer also keeps `lastExeN`, and each wave has a `currentExeN`. A
rollback increments `lastExeN` and hands the new value to the rolled-back
waves. A request or operand carrying an older ExeN is a leftover of an
abandoned execution, and it is dropped. The paper's text states the
acceptance test both as "ExeN ≤ currentExeN" and as "old executions are not
accepted". This design follows the second: a request is accepted when
`ExeN >= currentExeN`.

## The StoreBuffer (`twc_store_buffer`)

The StoreBuffer is built from five blocks and a controller:

| block | holds |
|---|---|
| `wave_table` | per wave slot: F, currentExeN, chain position (started, last C, last S); plus `lastCommittedWave` and `lastExeN` |
| `req_buffer` | requests waiting for their chain; offers the oldest-wave ready one |
| `moh` | the MemOp-History: one entry per speculative operation |
| `search_catalog` | per wave, a linked list of that wave's MOH entries |
| `wct` | per wave, the Wave-Context-Table: copies of the operands that entered the wave through Wave-Advance instructions |

Waves live in slot `wave mod NWAVES` (`NWAVES = 32`). Every comparison uses
the *offset* `wave - lastCommittedWave - 1`, so wave numbers may wrap.

**Requests** arrive on `NPORTS = 4` valid/ready ports, one is accepted per
cycle, and the ports are served round-robin. The last free buffer entry is
reserved for the non-speculative wave. Without that reservation, speculative
requests could fill the buffer and starve the one wave that must make
progress.

`req_buffer` drops stale requests as soon as it sees them: those of
committed waves, and those with an ExeN below their wave's currentExeN. It
offers the ready request of the lowest offset. While the MOH is full, only
non-speculative requests are offered, so a speculative wave that runs out
of log space simply waits.

**Executing an operation B of wave Y.** The MOH is searched for the closest
logged operation A of a later wave to the same address. Closest means the
smallest (wave offset, Current). Then:

| B | closest later A | what happens |
|---|---|---|
| Store | Load | **RAW.** The later wave X read a stale value. Roll back waves ≥ X (below). B is then executed again from the start. |
| Store | Store | **WAW.** Memory already holds the younger value, so B does not go to memory. A's backup becomes B's data. If B is speculative it is logged with A's previous backup. |
| Load | Store (the closest later Store) | **WAR.** B returns that Store's backup, which is the value memory held before the younger wave wrote. |
| either | none | B goes to memory. A speculative Store first reads the old value as its backup. |

Each speculative operation gets an MOH entry and is pushed on its wave's
Search Catalog list. Every executed request advances its wave's chain in
`wave_table`.

**Commit.** While the non-speculative wave still has MOH entries, they are
released one per cycle through its catalog list. Once it is speculative no
longer, its context is not needed. When the wave's F bit is set, it commits:

- `lastCommittedWave` advances;
- the wave's WCT is emptied;
- `commit_valid` pulses with the wave number.

That pulse, together with `last_exen`, is what a StoreBuffer holding the
next wave would receive when custody changes hands. `ho_*` is the receiving
side of that hand-off.

**Rollback at wave X** runs these steps in order, as a small state machine:

1. *Walk* the catalog lists of the waves from the youngest down to X. Every
   Store entry's backup is written back to memory, one write per entry,
   newest first. Every entry is freed.
2. *Finish.* Empty the WCTs of waves > X. Purge the buffered requests of
   waves ≥ X. Increment `lastExeN` and give it to every wave ≥ X, together
   with a clear F bit and an empty chain. A slot that is later recycled for
   a new wave inherits the youngest wave's ExeN, so waves not yet seen also
   start under the new execution.
3. *Re-send* X's read set from its WCT on the `rs_*` port, stamped with the
   new ExeN. The operands then restart wave X in the PEs.

Some of X's read-set operands may reach the StoreBuffer only after the
rollback, still carrying the old ExeN. Such a copy is stored with the new
ExeN and also forwarded on `rs_*`, so the new instance of the wave receives
it.

Request intake and Wave-Advance intake stop during the rollback. A full WCT
refuses copies (`wa_ready` low), which holds the Wave-Advance instruction in
its PE, as the paper describes.

**Memory port.** There is one outstanding access, with valid/ready. A read
returns `mem_rdata` with `mem_rsp_valid` any number of cycles later. Load
results leave on `rsp_*`, tagged with the load's destination and ExeN.

## Erasing operands of old executions (`exec_map`, `matching_table`)

After a rollback, operands of the abandoned execution are still travelling
through the PEs. Two filters keep them from doing harm.

The **Execution Map** of a PE is a small table of `<wave, ExeN>` pairs. A
pair `<w,e>` means that waves from w up to the next pair need `ExeN ≥ e`.
For example, `<0,0>` and `<5,1>` let waves 0..4 accept anything, and waves
5 and up only ExeN ≥ 1.

An operand is dropped when its ExeN is below the pair that governs its wave.
An accepted operand with a newer ExeN proves that execution e began at or
before its wave. Every pair at or beyond that wave with ExeN ≤ e is replaced
by `<w,e>`. In the example above, an operand `<3,1>` arriving replaces
`<5,1>`. When the table is full the new pair is not recorded, and the map
simply filters less.

The **matching table** tags each operand by (instruction slot, wave, ExeN)
and fires an instruction instance once all of its 1..3 inputs are present.
Its MT Checkup handles an operand that arrives for an instance already
holding operands of a different ExeN:

- a newer operand erases the older ones and takes their place;
- an older operand is ignored.

## The assembled block (`twc_top`)

`twc_top` joins a StoreBuffer to the operand front end of one PE, number
`PE_ID`. Operands come from three sources, in this priority:

1. re-sent operands;
2. load results;
3. the operand network (`pe_in_*`).

An operand addressed to this PE passes the Execution Map into the matching
table, which fires on `fire_*`. Operands for other PEs leave on `net_out_*`.
Counters report:

- hazards, commits, rollbacks, restores, re-sends, speculative operations,
  stale drops and stall cycles (`stats`);
- Execution Map drops;
- MT Checkup erasures and ignores.

## Parameters

| parameter | default | where the number comes from |
|---|---|---|
| `NPORTS` | 4 | the evaluated machine's StoreBuffer input ports |
| `SPEC_WINDOW` | 30 | one of the evaluated windows (2, 3, 5, 10, 20, 30, unlimited); best result on the fully dependent vector kernel |
| `NWAVES` | 32 | own choice: window + 1 non-speculative wave, as a power of two |
| `REQ_DEPTH` / `MOH_DEPTH` / `WCT_DEPTH` | 16 / 64 / 8 | own choice; the original evaluation left these structures unbounded |
| `EM_DEPTH` / `MT_DEPTH` | 8 / 16 | own choice |
| 8 instruction slots, 3 inputs | fixed in `twc_pkg` | the evaluated PE |

Field widths are in `twc_pkg`.

## Where this departs from the original proposal

- There is one StoreBuffer. Routing requests to a remote StoreBuffer, the
  Wave Map that records custody, and lazy cleaning in remote StoreBuffers
  are not built. Only the hand-off input and the commit output exist.
- The StoreBuffer has two result streams instead of four output ports.
- The MOH keeps no value field. After a RAW rollback the Store simply
  executes again and reads memory, which is one of the two options
  described.
- "Closest later operation" assumes that Current numbers grow along a
  wave's chain.
- The rollback also undoes wave X's own catalog list. The original list of
  steps erases catalog lines "above X" but restores memory for waves ≥ X.
- Thread and application are not part of the matching tag, because the
  design runs a single thread.
- The PE's ALU, instruction buffer, pods, domains, switch, L1/L2 caches and
  main memory are outside the design. The testbenches use a behavioural
  memory (`tb/tb_mem.sv`).

## Verification

Every block has a self-checking testbench in `tb/` that ends with a
`TB_RESULT checks=… failures=…` line. `tb_twc_top` runs the assembled
design at its default sizes.

The PEs are modelled by the testbench. They run a 64-iteration loop whose
iterations collide in memory on purpose:

- iteration i loads `V[i]`;
- some iterations store into `V[i+1]`, which is the next iteration's load
  (RAW);
- the first half of the loop loads and stores a shared scalar (WAR, WAW);
- the second half is independent, so younger waves run ahead, up to 30, and fill the MOH
  and the Speculation Window;
- a few iterations are given long compute delays so that younger waves
  overtake them.

When a re-sent operand shows that a wave was rolled back, the testbench
restarts that wave and the later ones under the new ExeN. It also injects
late requests and operands of the old execution.

At the end, memory and every loaded value are compared with sequential
execution, and no instruction instance of an old execution may have fired.
Last, custody of later waves is handed over to the StoreBuffer (`ho_*`, with
a new `lastExeN`), and one more wave runs under it.
The test also checks that each of these happened at least once:

- speculative execution;
- RAW rollback, memory restore and read-set re-send;
- WAR and WAW repair;
- stale-request drop and Execution Map drop;
- MT Checkup erasure;
- window stall, MOH-full stall and WCT-full stall;
- commit.

`tb_twc_loops` runs two 500-iteration loops at default sizes. They have the
hazard structure of the evaluated kernels, not their code:

- a vector loop full of RAW, WAR and WAW collisions;
- a matrix-style loop whose only dependency is from iteration 249 to
  iteration 250. It produces exactly one RAW rollback, the count reported
  for that kernel.

Both runs are compared with sequential execution.

To run one testbench with Verilator:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb +libext+.sv \
  rtl/twc_pkg.sv tb/tb_twc_top.sv --top-module tb_twc_top -o sim
./obj_dir/sim
```

The concurrent assertions in `twc_store_buffer` check handshake stability
and MOH room. Verilator reports their `disable iff` reset as a
synchronous/asynchronous mix (`SYNCASYNCNET`). This concerns only the
assertions, not the circuit.

# ARENA: a ring of reconfigurable nodes that moves work to the data

ARENA is a cluster of identical nodes joined by a one-way ring. Each node
holds one slice of a global data space and has three main parts:

- an 8x8 coarse-grained reconfigurable array (CGRA) of simple tiles;
- a 32 KB scratchpad;
- a task dispatcher.

Work is not sent to a node that then asks for its data. Instead, a small
*task token* circulates on the ring. The token names a task and the range of
data it applies to. Each node cuts out the part of the range it owns, runs
that part on its CGRA, and passes the rest on. A running task can spawn new
tokens, which enter the same system. There is no global scheduler and no
barrier. A node stops when a TERMINATE token has passed it twice with nothing
else in between.

This repository is a synthesizable SystemVerilog model of the cluster: ring
hops, node, dispatcher, CGRA controller, tile array, coalescing unit,
scratchpad, NIC and DMA. It also has self-checking testbenches for every
block and an end-to-end test that runs real programs on the array.

## The task token

Every message on the ring is one 168-bit token (`arena_pkg::token_t`), packed
from MSB to LSB:

| field          | bits | meaning                                                        |
|----------------|------|----------------------------------------------------------------|
| `task_id`      | 4    | which kernel; 15 is TERMINATE                                  |
| `task_start`   | 32   | first global element of the range                              |
| `task_end`     | 32   | one past the last element (ranges are half-open)               |
| `param`        | 32   | one scalar argument, read by the tiles with `PRM`              |
| `remote_start` | 32   | start of extra data the task needs from another node           |
| `remote_end`   | 32   | end of that data (`remote_end > remote_start` means "fetch")   |
| `from_node`    | 4    | node that created the token                                    |

Node *n* owns the global range `[local_start[n], local_end[n])`. These two
values are top-level inputs, set by the microcontroller at start-up.

## Dispatcher: cut, keep, forward

`task_dispatcher` has three 8-entry queues, all `token_fifo`:

- **RecvQueue:** tokens arriving from the ring.
- **WaitQueue:** local work waiting for the CGRA.
- **SendQueue:** tokens leaving for the next node.

Each cycle the filter stage takes one token. Priority goes to a token just
spawned on this node, then to a token from the microcontroller, then to the
RecvQueue head. `filter_logic` compares the token's range with the local
range and produces up to three parts:

- **local** (the overlap) goes to the WaitQueue;
- **low** (below the local range) goes to the SendQueue;
- **high** (above the local range) goes to the SendQueue.

The four cases are all-local, all-remote, one-sided overlap and a range that
straddles the node. The last case produces three parts and takes two cycles,
because the SendQueue accepts one token per cycle. The high part waits in a
one-token register.

A WaitQueue head whose remote range is non-empty is not offered to the CGRA
at once. The dispatcher first sends it to the NIC. The NIC fetches the remote
words into the scratchpad at `REMOTE_BASE` (word 7680, a 512-word window) and
answers with `dack`. Only then does the head become launchable.

**Termination.** TERMINATE is always passed on.

1. When it arrives while the node is idle, a flag is set. Idle means an empty
   WaitQueue, no group running and nothing in the coalescing unit.
2. Any other token clears the flag.
3. A second TERMINATE that finds the flag set terminates the node.

One TERMINATE injected at node 0 therefore ends the whole ring after at least
two trips round it. A terminated node passes every token through unchanged.
The paper checks only the WaitQueue. The extra idle conditions are added here
so that a node cannot stop while it is still running or spawning.

## CGRA controller: groups, modes and the context table

The 8x8 array is split into four *groups* of 2 rows x 8 columns. A task gets
1, 2 or 4 groups, called mode 0, 1 or 2. The number depends on its local size
`s` compared with the node's range length `L`:

- `s < L/4`: one free group.
- `s > L/2`: all four groups if all are free, otherwise an aligned pair.
- Otherwise: an aligned pair, `{0,1}` or `{2,3}`.

If nothing suitable is free, the token waits at the WaitQueue head.

A **context table** holds `{base, II}` for each `(task_id, mode)`. It is
written by the microcontroller. `base` is where the mapping's control words
start in every tile's 60-word control memory; `II` is the loop length.

A launch sends `{base, II}` into the rightmost tile of every row of the chosen
groups. The message moves one column west per cycle, and each tile loads its
program counter as the message passes. The groups start 8 cycles after the
launch. This right-to-left wave is the reconfiguration.

A k-group mapping handles k consecutive elements per iteration. The
controller runs `ceil(s/k)` iterations of `II` cycles. Each iteration it
broadcasts four values to the groups:

- `idx`: the global index of the first element;
- `lidx`: `idx - local_start`;
- `param`;
- `tend`: the end of the range.

A program for group g in mode k adds `g mod k` to the index itself, and
predicates its stores on `idx + (g mod k) < tend`. The end-to-end test shows
this pattern.

**Launch stall.** While any spawn queue is full or the spill store is in use,
no new task is launched. One exception is this design's own: if every group is
idle, the stall is lifted. Without it the node deadlocks in this sequence:

1. Spawned tokens wait for room in a full WaitQueue.
2. The WaitQueue waits for a launch.
3. The launch waits for the spawned tokens to drain.

The end-to-end test runs into exactly this case.

## Tiles

Each `cgra_tile` contains:

- a 60 x 64-bit control memory (480 bytes, written by the microcontroller);
- three operand registers A, B and C, a result register and a predicate bit;
- four output registers, one per neighbour (N/S/E/W);
- a `tile_crossbar`.

A control word (`arena_pkg::instr_t`) gives:

- an opcode;
- a 16-bit immediate and a use-immediate bit;
- a predicate-enable bit;
- seven 3-bit selects, one for each crossbar destination: out N, S, E and W,
  and operands A, B and C.

A select picks one of the inputs N, S, E, W, RES (own result) or AUX (memory
read data). The value 7 means "keep the old value".

Within one cycle the function unit (`cgra_fu`) works on the registers as they
were at the start of the cycle. At the same time the crossbar writes new
values into them. Programs are therefore software-pipelined by hand: a value
computed in cycle t can be routed in cycle t+1 and used in cycle t+2.

| op        | effect                                                               |
|-----------|----------------------------------------------------------------------|
| ADD SUB MUL SHL SHR AND OR XOR | `res = A op B` (B replaced by the immediate if chosen)|
| LT EQ     | compare; also sets the predicate                                     |
| SEL MOV BR| `res = pred ? A : B` / `res = B` / predicate = (A != 0)              |
| IDX LIDX PRM TEND | read the group's broadcast context                           |
| LOAD      | read data memory at A; the word is on AUX in the next cycle           |
| STORE     | write B to data memory at C                                          |
| SPAWN     | emit a token: id = imm[3:0], range [A, B), PARAM inherited            |
| SPAWN + SPAWNX | with imm[4] set, the next word supplies PARAM = A and the remote range [B, C): a two-cycle spawn |

Any word with its predicate-enable bit set is skipped when the predicate is 0.

Only some tiles have these extra connections:

- The leftmost tile of row r drives scratchpad port r.
- The rightmost tile of row 2g+1 is group g's spawn tile.

## Spawned tokens: the coalescing unit

Each group's spawn tile feeds a 4-entry spawn queue. The coalescing unit
(`coalescing_unit`, inside the controller) picks from the queue heads into
one holding register. When a queue head has the same `task_id`, `param` and
remote range as the held token, and its range starts where the held one ends,
the two are merged.

A held token is released in two cases:

- it has aged `WINDOW` (8) cycles with nothing to merge;
- another head is waiting.

A token that finds its spawn queue full goes to a 16-entry spill store. If
that is full too, the token is lost and a sticky `overflow` output is raised.
The unit stamps `from_node`. In the end-to-end test, 256 single-element
spawns collapse into a handful of tokens through 252 merges.

## Memory, NIC and DMA

- **`spm_data_memory`:** two banks of 4096 32-bit words.
  - Each bank has four tile ports, and tile port p reads bank p/4 with a
    bank-local address. As a result, groups 0 and 1 see bank 0 and groups 2
    and 3 see bank 1.
  - A DMA write port and a NIC read/write port use a 13-bit global word
    address.
  - Reads take one cycle.
- **`nic`:** has two independent sides.
  - Fetch side: takes the dispatcher's request, sends `{node, start, end}` to
    the data-transfer network, writes the returned words from `REMOTE_BASE`
    upward and raises `dack` after the word flagged last.
  - Serve side: answers another node's request from local data, at two cycles
    per word.
- **`dma_unit`:** copies `len` words from local memory to the scratchpad, one
  outstanding read at a time.

The microcontroller, the off-chip local memory and the data-transfer network
are not designed here. Their connections are ports of the top
`arena_cluster`. The testbenches contain simple behavioural models of the last
two.

## Ring

`ring_switch` is one hop. It is a FIFO that stamps each token's arrival time.
It releases a token `LATENCY` cycles later (800 by default) and accepts a new
token at most every `INTERVAL` (2) cycles. It holds up to `DEPTH` (400)
tokens, which covers one latency period at full rate. The hop after node n
feeds node n+1 mod `NODES`.

## Top level and parameters

`arena_cluster` instantiates `NODES` (16) `arena_node`s and their hops. Every
port except the clock and reset is an array with one entry per node:

- local range;
- initial token;
- control-word and context-table writes;
- DMA descriptor;
- local-memory request and response;
- network request and response for both the fetch and the serve side;
- status bits `terminated`, `busy` and `overflow`.

Defaults:

- `QUEUE_DEPTH=8`, `SPAWN_DEPTH=4`, `SPILL_DEPTH=16`, `WINDOW=8`;
- `BANK_WORDS=4096`, `REMOTE_BASE=7680`;
- `HOP_LATENCY=800`, `HOP_INTERVAL=2`, `HOP_DEPTH=400`.

## Testbenches

Every block has a self-checking testbench `tb/tb_<module>.sv`. Each prints
`TB_RESULT checks=N failures=M` and has a watchdog. To run one:

```
verilator --binary --timing -Irtl -Itb rtl/arena_pkg.sv tb/tb_cgra_tile.sv --top-module tb_cgra_tile
obj_dir/Vtb_cgra_tile
```

`tb_arena_cluster` is the end-to-end test. It uses 8 nodes, 20-cycle hops of
4 tokens (so the ring pushes back) and otherwise default parameters. It loads
three real programs into every node:

1. a predicated load-add-store kernel `M[i] += PARAM`, in 1-, 2- and 4-group
   variants;
2. a spawner using one-cycle SPAWN;
3. a spawner using SPAWN + SPAWNX with remote ranges.

It then fills the scratchpads by DMA and injects tokens that force every
mechanism. Every mechanism is counted, and a failure is counted for any that
never happens:

- splits, including a three-way split;
- forwarding;
- 1-, 2- and 4-group launches;
- reconfiguration;
- both spawn kinds;
- merges;
- spill-store use;
- launch stalls;
- remote fetches;
- termination.

It also checks every data word against the expected value. The sum of the
two banks is checked, since a group works in its own bank.

`tb_arena_cluster_full` runs the same scenario on the default 16-node cluster
with 800-cycle hops. It passes too: all 16 nodes terminate after about
37,700 cycles. Building it with verilator takes several minutes, because of
the size of the design; the run itself takes seconds.

## How far to trust it, and where it departs from the paper

- The paper gives the array size, the control and data memory sizes, the
  queue sizes, the 2x8 group size, the three CGRA modes, the allocation
  thresholds, the right-to-left 8-cycle reconfiguration, the ring hop latency
  and the token fields. These follow the paper.
- The following are this design's own choices:
  - the instruction set and control-word format;
  - the crossbar;
  - the iteration scheme;
  - the context table;
  - all handshakes;
  - the NIC and DMA protocols;
  - the middle allocation case;
  - the stricter termination test;
  - the launch-stall exception.
- The datapath is 32-bit integer only. Kernels that need real numbers, such
  as N-body and GCN, would need a floating-point function unit. The paper does
  not describe one.
- A group reads and writes only the bank its rows are wired to. Data for a
  task must be placed in the bank of the group that will run it, or in both.
- The ring carries tokens only. Bulk data moves over a separate data-transfer
  network, which is only modelled in the testbench.
- Area, power and frequency figures from the paper are not reproduced.
  Memories are plain arrays that synthesis infers as memories.

# A shared scratchpad for pseudopotential data in a near-data DFT system

Linear-response TDDFT codes run many processes, and each one normally keeps a full
private copy of the pseudopotential data of every atom. On a CPU with a few dozen
processes that costs a few percent of memory. On a near-data processing (NDP) system,
with hundreds of small cores sitting in the logic layers of HBM stacks, it can reach
more than half of all memory. Large systems then run out of memory.

The NDFT design removes the copies. Each process keeps only the pseudopotential blocks
it owns and reaches everyone else's blocks through an index. To make those reads cheap,
every HBM stack gets a scratchpad memory (SPM) in its logic layer, shared by all the
cores of that stack. A process writes its own blocks into its slice of the SPM. The
other processes of the same stack read them there, in place, without going to DRAM.
Blocks owned by another stack are fetched by a *communication process*, one per stack.
It swaps data with its peer on the other stack and writes the result into its own
stack's SPM, where the requesting process then reads it like any local block.

This repository gives RTL for the hardware part of that scheme: the per-stack shared
scratchpad and the array of them across the system. It is written in
SystemVerilog-2017 and is synthesizable. The cores, DRAM, memory network and all
software are outside it; their connections are ports of the top module.

## What is hardware and what is not

The published configuration is:

| item | value |
|---|---|
| stacks | 16, a 4 x 4 mesh of HBM2 stacks |
| NDP units per stack | 8, each with 2 in-order cores (16 cores per stack) |
| shared memory | 16 KB per core, 256 KB per stack (4 MB in the system) |

The RTL covers the scratchpad of each stack (`ndft_shared_spm`) and the system of 16
of them (`ndft_ndp_system`). These parts are not in the RTL:

- **The NDP cores and their L1 caches.** They are general-purpose in-order cores. Each
  core's scratchpad port is a port of the top.
- **The HBM2 dies and channel controllers, and the 4 x 4 memory network between stacks.**
  The network's topology is known but nothing else about it.
- **The communication process.** It is software running on one core of each stack.
  This design assumes that core is `ndft_pkg::COMM_CORE` = 15, the last core of the last
  NDP unit. That is only a convention: this core's port is the same as every other's.
- **The host CPU, the cost-aware CPU/NDP scheduler, and the allocation API** (allocating
  shared blocks, local and remote reads and writes, broadcast). All of this is software
  running on top of the scratchpad.

So no hardware path joins the scratchpads of two stacks. Data moves between stacks
only through the communication processes, over the memory network.

## Address map of one stack's scratchpad

The scratchpad has one bank per core. Bank *i* is core *i*'s 16 KB slice: 2048 words
of 64 bits. A core addresses the whole 256 KB of its stack with a 15-bit word address:

```
 req_addr[14:11]  owner core = bank (0..15)
 req_addr[10:0]   word offset inside that core's 16 KB slice
```

A process normally writes its own blocks into the slice with its own core number. It
reads other processes' blocks by putting their core number in the upper bits. The
scratchpad treats every core alike. Any core may read or write any slice. Giving each
process its own slice, and keeping the index, are the software's job.

The 64-bit word holds one double-precision value, which is the element type of the
pseudopotential matrices. The word width is this design's choice.

## The core port, cycle by cycle

Each of the 16 cores of a stack has one request port and one response port:

| signal | dir | width | meaning |
|---|---|---|---|
| `req_valid[c]` | in | 1 | core *c* presents a request |
| `req_ready[c]` | out | 1 | the request is accepted in this cycle |
| `req_we[c]` | in | 1 | 1 = write, 0 = read |
| `req_be[c]` | in | 8 | byte enables of a write |
| `req_addr[c]` | in | 15 | word address as above |
| `req_wdata[c]` | in | 64 | write data |
| `rsp_valid[c]` | out | 1 | read data is on `rsp_rdata[c]` |
| `rsp_rdata[c]` | out | 64 | read data |

The rules:

1. A request is accepted at the rising edge at which both `req_valid` and `req_ready`
   are high. `req_ready` is combinational: it depends on the requests of all cores in
   the same cycle.
2. A core that is not accepted must hold its request unchanged until it is. An
   assertion in `ndft_shared_spm` checks this rule.
3. An accepted read returns its data exactly one cycle later: `rsp_valid[c]` is high for
   that one cycle, with the data on `rsp_rdata[c]`. A write gets no response. The data
   is in the bank from the next cycle on.
4. Reset is synchronous and active low (`rst_n`). It clears the arbiters' pointers and
   the response flags. Memory contents are not reset.

```
cycle          0        1        2        3
core 0 valid   1 (b3)   0
core 1 valid   1 (b3)   1 (b3)   0
core 0 ready   1
core 1 ready   0        1
core 0 rsp              valid
core 1 rsp                       valid
```

In this example cores 0 and 1 both read bank 3 in cycle 0. One of them, here core 0,
is served first. The other stalls for one cycle and then gets its data one cycle after
it is accepted.

## Bank conflicts and arbitration

Each bank has a round-robin arbiter (`rr_arbiter`). In every cycle it looks at the cores
whose address selects its bank. It grants the first of them at or after its priority
pointer, and then moves the pointer to the core after the one it granted. As a result:

- A bank that any core asks for serves exactly one request in every cycle, so a bank
  never sits idle while a request for it waits.
- Requests to different banks never block each other. When all 16 cores work in their
  own slices, the stack does 16 accesses per cycle.
- When all 16 cores read the same bank, they are served one per cycle. A request waits
  at most 15 cycles.

This gives software a simple cost model. If accesses are spread over the slices, they
run at full rate. Reading one hot block from every core costs one cycle per access.
For example, the end-to-end test reads each other's blocks in a rotated order (core *c*
first reads slice *c+1*, then *c+2*, and so on). In that order the 16 cores never
collide. Then all cores of a stack read the same block: the stack is then served one
access per cycle instead of sixteen, and the 16 x 16 reads take 256 cycles.

Inside `ndft_shared_spm`, each bank's grant selects that core's address, data, byte
enables and write flag for the bank. Each core's `req_ready` is the OR of its grants
from all banks; since a request goes to one bank, at most one of them is set. For each
core, a register remembers which bank its last read went to. The response
multiplexer uses that register to send the bank's output back to the right core.

## Remote data, step by step

Suppose process P on stack *s* needs a block that a process on stack *d* owns. In the
intended use, the hardware takes part only as follows:

1. P asks the communication process of stack *s*. This is a software request; a
   mailbox in P's own slice is one way to carry it.
2. The communication process of stack *d* reads the block through its ordinary port
   from the owner's slice on stack *d*, and sends it across the memory network.
3. The communication process of stack *s* writes the block into its own slice on stack
   *s* and passes P the address.
4. P reads the block there with ordinary cross-slice reads.

The end-to-end testbench runs exactly this sequence on all 16 stacks at once. The
testbench itself plays the network.

## Parameters

| module | parameter | default | origin |
|---|---|---|---|
| `ndft_ndp_system` | `N_STACKS` | 16 | published (4 x 4 stacks) |
| all | `N_CORES` / `N` | 16 | published (8 units x 2 cores) |
| all | `BANK_WORDS` / `WORDS` | 2048 | published 16 KB per core, divided by the 8-byte word |
| all | `DATA_W` / `WIDTH` | 64 | this design's choice |

`ndft_pkg` holds these numbers and the derived sizes. `N_CORES` and `BANK_WORDS` must be
powers of two, because the bank number is taken from the address bits.

At the defaults, coarse synthesis of `ndft_ndp_system` gives about 76,500 word-level
cells, 1,280 flip-flop bits, and 33.5 Mbit in 256 memory arrays of 2048 x 64 bits (16
per stack). Each array is meant to become an SRAM macro. This RTL models no macro
timing and no power.

## Files

| file | contents |
|---|---|
| `rtl/ndft_pkg.sv` | system sizes and constants |
| `rtl/spm_bank.sv` | one 16 KB single-port bank with byte enables and a one-cycle read |
| `rtl/rr_arbiter.sv` | round-robin arbiter with a same-cycle grant |
| `rtl/ndft_shared_spm.sv` | one stack: 16 ports, crossbar, 16 arbiters, 16 banks |
| `rtl/ndft_ndp_system.sv` | top: 16 stacks, ports indexed `[stack][core]` |
| `tb/tb_spm_bank.sv` | fill, read-back and random masked writes against a reference array |
| `tb/tb_rr_arbiter.sv` | grant prediction, rotation, frozen pointer, waiting bound |
| `tb/tb_ndft_shared_spm.sv` | no-conflict rate, hot-bank serialisation, random traffic |
| `tb/tb_ndft_ndp_system.sv` | the whole pseudopotential-sharing flow on 16 stacks at full size |
| `tb/tb_pseudo_sharing_si.sv` | block allocation and sharing on one stack, for silicon systems of 16 to 2048 atoms |

## Verification

Every testbench checks its results and ends by printing
`TB_RESULT checks=<n> failures=<n>`. Each also has a watchdog that counts a failure if
the test hangs. The scratchpad testbenches keep their own reference memory and update
it on every accepted request. They check every read's data, and that it arrives exactly
one cycle after acceptance. They also check cycle counts that follow from the
arbitration rules:

- filling a slice takes 2048 cycles with all 16 cores writing;
- the rotated cross-slice reads take 15 x 64 cycles;
- a hot block read by all 16 cores takes 16 cycles per word.

`tb_ndft_ndp_system` runs the top with every parameter at its default. First, all
256 cores write all 4 MB. Next comes the sharing flow: cross-slice reads, a hot block,
remote copies through the communication cores on all 16 stacks, and byte-masked writes
into a neighbour's slice. The test fails if any of these events never happened: a
bank-conflict stall, a cycle with all 16 cores of a stack accepted, a cross-slice read,
a remote copy, or a partial write. The whole test takes about 3,500 clock cycles and
runs in under a second once built. Building it takes about two minutes.

`tb_pseudo_sharing_si` follows the per-atom loop of the sharing scheme on one stack. It
runs for silicon systems of 16, 32, 64, 128, 256, 1024 and 2048 atoms. Atoms are spread
over the 16 stacks, and within a stack by atom number modulo 16. Each owner allocates
consecutive space in its slice for its atoms' blocks and writes them. Every process then
reads every block of the stack through the address table and sums what it reads. The
sum must match one computed from the data generator alone. Blocks are 128 words per
atom. That is far smaller than real pseudopotential data, so this test exercises the
access pattern, not the capacity. With the rotated reading order, the sharing phase
reaches its lower bound at every size: the larger of one core's reads and the busiest
bank's load. That is 2048 cycles up to 256 atoms, then 8192 cycles for 1024 atoms and
16384 cycles for 2048.

To run a test with Verilator 5:

```
verilator --binary --timing --assert -Wall -Wno-fatal \
  rtl/ndft_pkg.sv rtl/spm_bank.sv rtl/rr_arbiter.sv rtl/ndft_shared_spm.sv \
  rtl/ndft_ndp_system.sv tb/tb_ndft_ndp_system.sv --top-module tb_ndft_ndp_system
./obj_dir/Vtb_ndft_ndp_system
```

For a smaller testbench, list only the files it uses and change `--top-module`.

## What follows the published design and what does not

These points follow the published design:

- a scratchpad in the logic layer of each stack, shared by all the cores of that stack;
- 16 KB per core and 256 KB per stack;
- 16 stacks;
- each process's data kept in its own region, where the other processes read it;
- a communication process per stack that carries data between stacks and writes it
  into the local scratchpad.

These points are this design's own choices, because the description gives only what
the memory does, not how it is built:

- the 64-bit word and the byte enables;
- one bank per core, selected by the upper address bits;
- the crossbar and round-robin arbitration;
- the valid/ready handshake and the one-cycle read latency;
- the synchronous reset;
- the communication process placed on core 15;
- a single clock for the scratchpad and the cores. The NDP cores are specified at
  2 GHz, but this RTL has not been checked against any timing target.

The published figure of the stack draws one data region per NDP unit, while the
configuration table gives the shared memory per core. This design follows the table: a
unit's two cores each have a slice.

The scratchpad has no hardware support for allocation, remote access or broadcast.
The published scheme does these in software, and the RTL does not add them. There is no
path between stacks in hardware. The scratchpad does not keep data coherent with DRAM:
software decides what it holds. With 4 MB in the system, the scratchpads hold a working
set of pseudopotential blocks, not all of them. Published footprints are 1.84 to 4.43 GB
for a 64-atom silicon system, and about 15 GB for 1024 atoms once the copies are
removed. Either is far more than 4 MB, so the bulk of the data stays in HBM.

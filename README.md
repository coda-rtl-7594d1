# Near-data memory stacks with dual-mode address mapping

A GPU-style near-data-processing (NDP) system puts streaming multiprocessors (SMs) on the logic
layer of each 3D memory stack. An SM reads its own stack through wide internal paths, at
256 GB/s. Data in another stack has to cross an off-chip link of 16 GB/s. So the question is not
how fast the SMs are. It is whether the data a thread-block uses sits in the stack where that
thread-block runs.

Conventional memory systems work against this. They stripe the physical address space across
all memory modules at a fine granularity, so every page is spread over every stack. Whatever
stack a thread-block runs on, three quarters of its data is remote.

This design fixes that with two cooperating mechanisms:

1. **Dual-mode address mapping.** Every physical page carries one *granularity bit*.
   - A *fine-grain page* (FGP) is striped across all stacks, as today. This suits data shared by
     everyone and data the host streams.
   - A *coarse-grain page* (CGP) is held whole in one stack. This suits data that one group of
     thread-blocks uses alone.

   The bit is set by the OS in the page table entry. It then travels with the translation
   everywhere an address has to find its home stack.
2. **Affinity scheduling.** Thread-block `b` runs only on an SM of stack
   `(b / N_blocks_per_stack) mod N_stacks`. The runtime places that block's coarse-grain data in
   the same stack, so the block's accesses stay local.

The RTL here is the hardware part of both: the mapping, the TLB, the L1s, the tagged L2, the
in-stack crossbar, the inter-stack/host network and the thread-block dispatcher. It is wired up as a
four-stack system. The SMs, the HBM dies, the host CPU and the page walker are outside it and
meet it at ports.

## Finding the home stack of an address

With four stacks and 4 KB pages, two address bits name the home stack:

```
 47                         14 13 12 11 10 9                    0
+-----------------------------+-----+-----+----------------------+
|        page number (high)   | CGP | FGP |       offset         |
+-----------------------------+-----+-----+----------------------+
   CGP page (bit = 1): stack = PA[13:12]  -> whole page in one stack
   FGP page (bit = 0): stack = PA[11:10]  -> 1 KB quarters on stacks 0,1,2,3
```

`stack_mapper` is just this: a two-way multiplexer on two-bit fields, selected by the
granularity bit. It is used at every point that routes a request:
- the crossbar of each stack, which decides between a local channel and the remote link;
- the network, which picks the destination stack.

The physical address itself is never rewritten. Caches index and tag with it unchanged, so the
mapping does not affect translation or cache lookup.

### Page-groups and the in-stack address

Each stack also needs an address *inside* the stack. `stack_mapper` makes it by deleting the two
stack bits from the physical address.

Take four adjacent pages whose addresses differ only in PA[13:12]. Call them a *page-group*.
- If all four are CGP, stack `s` gets page `s` of the group.
- If all four are FGP, stack `s` gets quarter `s` of every page.

Either way, each stack receives exactly 4 KB of the group, at the same in-stack location. The
two modes therefore share the same physical memory without overlapping. This holds only if a
whole group has one mode. That is why the OS must choose FGP or CGP per page-group, and may
switch a group only when all its pages are free. The hardware does not check the rule; it is
software's job.

### Where the granularity bit travels

| Stage | Where the bit lives |
|---|---|
| Page table entry | bit 9, one of the three x86 reserved bits [11:9]; 1 = CGP (`coda_pkg::PTE_G_BIT`) |
| TLB (`gtlb`) | copied into the entry on refill; returned with every translation |
| SM port (`sm_port`) | sent with the physical address towards the L2 |
| L1 (`l1_cache`) | passed through only; L1 lines are never dirty, so they need no bit |
| L2 (`gcache`) | stored beside each line's tag when the line is allocated |
| Memory request (`mem_req_t`) | `cgp` field on every fill, write-back and host request |
| Crossbar and network | fed to a `stack_mapper` to route the request |

The L2 entry matters most. A dirty line can be evicted long after the access that brought it
in. Its write-back has no translation to hand, so it is routed by the bit stored in the line.
`tb_gcache` checks this, and its fault test shows what goes wrong without it.

## Putting thread-blocks next to their data

`affinity_scheduler` sits between the kernel launch and all 16 SMs. When an SM signals that it
has room (`tb_req`), the scheduler grants it the next unscheduled block of its own stack in the
same cycle, or nothing.

The scheduler needs no divider. Each stack keeps a counter:
- it starts at `s * Nbps`;
- it walks `Nbps` consecutive block ids;
- it then jumps `(N_stacks-1) * Nbps` ahead to the stack's next chunk;
- it stops at the total block count.

`Nbps` is `blocks_per_stack`, written at launch. It is meant to be the number of blocks one stack
runs at once, for example 4 SMs × 6 blocks = 24.

A stack that runs out of its own blocks stays idle. There is no work stealing from other stacks:
the imbalance this can cause was judged rare enough not to handle.

The matching placement is done by software when it builds page tables. It is not in the RTL,
but the system testbench uses it:
- an array is cut into chunks of `min(4 KB, bytes_per_block * Nbps)`;
- chunk `k` goes to stack `k mod N_stacks`, in CGP pages of that stack.

## Structure

```
coda_system                    top: 4 stacks, network, scheduler
├── affinity_scheduler         thread-block dispatch by affinity
├── remote_net                 Remote network (stack <-> stack) and Host network (host -> stack)
│   └── stack_mapper x5        destination of each source's request
└── ndp_stack x4               logic layer of one stack
    ├── sm_port x4             per-SM front end
    │   └── gtlb               TLB with granularity bit
    ├── l1_cache x4            32 KB 8-way write-through L1 per SM
    ├── (round-robin SM -> L2 arbiter)
    ├── gcache                 1 MB 16-way L2, granularity bit per line
    └── stack_xbar             L2 + incoming link -> 8 HBM channels / outgoing link
        └── stack_mapper x2
```

`coda_pkg` holds the shared constants and the request/response structs.

The top brings out these ports:
- per-SM thread-block ports: `tb_req`, `tb_grant`, `tb_bid`;
- per-SM memory word ports: `sm_req_*`, `sm_rsp_*`;
- per-SM TLB miss/refill ports: `miss_*`, `fill_*`;
- 32 HBM channel ports: `ch_*`, with index `stack*8 + channel`;
- one host line port: `host_*`;
- TLB and L2 flush;
- one-cycle event pulses, used for counting.

## Timing and sizes

All handshakes are valid/ready. Each source of line requests has one request outstanding. Every
line request, read or write, is answered by exactly one response pulse.

| Quantity | Value | Origin |
|---|---|---|
| Stacks × SMs | 4 × 4 | paper |
| L1 per SM | 32 KB, 8-way, 32 sets of 128 B, read hit after exactly 4 cycles, write-through | size, ways and latency from the paper; policy is this design's |
| L2 per stack | 1 MB, 16-way, 512 sets of 128 B, hit after exactly 10 cycles | size, ways and latency from the paper; 128 B line is this design's |
| HBM channels per stack | 8 | 256 GB/s internal ÷ 32 GB/s per channel (paper's numbers) |
| Remote link | 16 cycles per 128 B line | 16 GB/s at the 2 GHz SM clock = 8 B/cycle |
| Host link | 8 cycles per line | 128 GB/s aggregate = 32 GB/s per stack = 16 B/cycle |
| TLB | 32 entries, fully associative, 1-cycle lookup | this design's |
| Thread-block id | 16 bits | this design's |
| Physical / virtual address | 48 / 48 bits | physical from the mapping figure; virtual assumed |

The network models bandwidth as a fixed serialisation delay per line. It does not model wires.

The L2 works as follows:
- it is blocking: one miss at a time;
- it is write-back and write-allocate;
- it picks victims round-robin.

One L2 access costs:
- a hit: 10 cycles;
- a clean miss: 10 cycles + fill;
- a dirty miss: 10 cycles + write-back + fill.

The SM port adds one cycle for a TLB hit. A read that hits the L1 costs 4 cycles. An L1 read
miss, and every write, pays the 4-cycle lookup and then the L2 access. The L2 returns the whole
line with each response, and the L1 fills from it.

## Departures from the paper and open points

- **Stripe size of fine-grain pages.** The mapping description and its figure take the FGP
  stack from PA[11:10], which gives 1 KB stripes, and this RTL does the same. The evaluation
  section speaks of 128-byte interleaving, and an illustration uses 256 B chunks. The bit
  position is one constant: `FGP_LSB` in `coda_pkg`, also a parameter of `stack_mapper`. Set it
  to 7 for 128 B stripes. The page-group argument above holds for any `FGP_LSB` below 12.
- **L1 policy.** Only the L1's size, ways and latency are given. Here it is write-through with
  no allocation on writes. Its lines are therefore never dirty, and only the L2 needs the
  granularity bit. The L1s of one stack are not coherent with each other during a kernel, which
  is the usual GPU arrangement. `l2_flush` also invalidates them.
- **No coherence between the L2s of different stacks.** An L2 caches remote lines too. Before
  the host or another kernel reads results, `l2_flush` writes every dirty line back. This flush
  is this design's addition.
- **Where the L2 sits.** The stack diagram joins the SMs straight to the crossbar and draws no
  L2. The configuration table gives each stack a 1 MB L2. Here it sits between the SMs (through
  their L1s) and the crossbar. Remote and host requests arriving at a stack bypass it and go
  straight to the HBM channels.
- **Bandwidth is modelled as occupancy.** Each link is busy for a fixed number of cycles per
  line. Because each source has only one request outstanding, the throughput actually reached
  is below the link rate. Everything runs in one clock domain, the 2 GHz SM clock.
- **Channel selection** uses the in-stack address bits just above the line offset. The paper's
  remark about XOR-based channel hashing is not applied.
- **Outside the RTL:** SMs, host CPU, HBM dies and memory controllers, off-chip PHYs, the page
  walker, and the OS/compiler placement software. The testbench models stand in for them.
- **The page-group rule is not enforced in hardware.** A mixed group is a software error. It
  makes FGP and CGP data alias.

## Verification

Every testbench is self-checking. Each one:
- prints `TB_RESULT checks=N failures=M`;
- has a watchdog;
- uses `$urandom` stimulus.

| Testbench | What it checks |
|---|---|
| `tb_stack_mapper` | the page-group picture (all-CGP and all-FGP groups fill each stack with the same local 4 KB); 2000 random addresses against a divide/modulo reference |
| `tb_gtlb` | refill, hit/miss, PA and granularity bit, non-present PTEs, overwrite, flush; random refills and lookups against the latest translation |
| `tb_affinity_scheduler` | every block granted once, only to its affinity stack, in order, no stealing; several `T`/`Nbps` cases including ragged ends |
| `tb_l1_cache` | random traffic against a reference; exact 4-cycle read hit; every write reaches the L2; an immediate re-read never does; invalidate drops stale lines |
| `tb_gcache` | random word traffic against a reference memory, including the whole line returned with each read; exact 10-cycle hit latency; every write-back carries the line's own granularity bit; memory contents after flush |
| `tb_stack_xbar` | local vs remote routing, channel choice, in-stack addresses, traffic arriving from the link, response return |
| `tb_remote_net` | five sources at once; delivery to the home stack; minimum link latency; responses to the right source |
| `tb_ndp_stack` | one stack with 4 SMs, TLB misses and refills, L2 evictions, remote traffic, host traffic; data placement after flush |
| `tb_coda_system` | the whole system at its default parameters (see below) |

`tb/hbm_channel_model.sv` is a behavioural HBM channel: a sparse line memory with a fixed
latency.

`tb_coda_system` runs one complete kernel on the full-size system. The setup is:
- 64 thread-blocks, 1 KB of private data each, `Nbps` = 4;
- the private array is placed in CGP page-groups by the affinity rule;
- a shared array sits in an FGP page.

Inside one run:
1. The host writes both arrays through the Host network.
2. Each SM model takes blocks from the scheduler, reads its block's chunk and a slice of the
   shared page, and writes results back. Its TLB refills through a page-walker model.
3. The L2s are flushed.
4. The host reads results back.

The testbench fails if:
- any private-data access leaves its stack;
- any mechanism never occurs. The mechanisms counted are: local and remote accesses, L2
  hits/misses/write-backs, TLB misses, host traffic, CGP and FGP channel traffic, and a stack
  running dry, and L1 hits.

A typical run counts:
- about 3,100 L1 hits;
- 1056 local and 96 remote accesses (the remote ones all go to the shared page);
- 512 write-backs;
- 80 TLB misses.

The kernel takes about 10,600 cycles.

Each block also has a deliberately broken variant, and its testbench catches the break. Examples:
- CGP/FGP inputs swapped in the mapper;
- a write-back routed by the wrong granularity bit;
- the scheduler skipping the wrong number of chunks.

## Simulating

Verilator 5 is enough. The package must come first; `-y` lets Verilator find every other
module by its file name:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb \
          --top-module tb_coda_system --Mdir obj rtl/coda_pkg.sv tb/tb_coda_system.sv
./obj/Vcoda_pkg
```

Replace `tb_coda_system` with any other testbench name. The full system builds in under a
minute, and simulates in about half a second.

To change the design:
- the system size and latencies are parameters of `coda_system`;
- the address layout (stack bits, line size, PTE bit) is in `coda_pkg`.

`N_STACKS` must be a power of two, and `CGP_LSB` must stay the page-offset width.

# MemPool-3D cluster RTL: 256 cores sharing one L1 scratchpad

MemPool puts 256 small RISC-V cores in front of a single shared L1 scratchpad memory (SPM).
Every core can load from or store to every one of the 1024 SRAM banks. The latency depends
only on how far away the bank is:

| Bank location | Zero-load latency |
|---|---|
| in the core's own tile | 1 cycle |
| in another tile of the same group | 3 cycles |
| in another group | 5 cycles |

Stacking the memory on its own die on top of the logic ("3D") makes room for more SPM without
making the wires longer. The main configuration here therefore has 4 MiB of L1. Capacities of
1, 2 and 8 MiB are one parameter away. This RTL models the memory system of that cluster:

- banks
- tile crossbars
- butterfly networks
- inter-group links
- per-tile instruction caches

The cores and the off-chip memory are not included. The cores' request and fetch ports and the
caches' refill ports are the top-level ports of `mempool_cluster`.

## Hierarchy

```
mempool_cluster            4 groups, point-to-point links between every pair
└─ mempool_group  x4       16 tiles + 4 request and 4 response butterflies
   └─ mempool_tile x16     4 core ports, 16 SPM banks, I$, 4 remote master/slave ports
      ├─ mempool_tile_interconnect   local crossbar, remote crossbar, response paths
      ├─ mempool_spm_bank x16        1024 x 32 bit, byte enables, 1-cycle read
      ├─ mempool_icache_ctrl         2 KiB direct-mapped I$ control, shared by the 4 cores
      └─ mempool_icache_banks        tag and line arrays
```

Shared helpers:

- `mempool_xbar`: an N×M crossbar with one round-robin arbiter (`mempool_rr_arbiter`) per output.
- `mempool_butterfly`: a 2-stage radix-4 16×16 network of 4×4 `mempool_xbar` switches.
- `mempool_spill_reg`: a 2-entry register slice.

All constants and bus structs are in `mempool_pkg`.

## Addresses

The memory is word-interleaved across all 1024 banks, so consecutive words land in different banks:

| bits | meaning |
|---|---|
| [1:0] | byte in word |
| [5:2] | bank in tile |
| [9:6] | tile in group |
| [11:10] | group |
| [12 + log2(rows) - 1 : 12] | row in bank (10 bits at 4 MiB) |

Higher bits are ignored, so the SPM repeats (aliases) through the address space. This layout
is this design's choice; only the sizes come from the MemPool-3D configuration.

## Requests, responses and ids

A request (`tcdm_req_t`) carries:

- address
- write enable
- byte enables
- write data
- a 4-bit id

Every request gets exactly one response (`tcdm_rsp_t`), including stores: a store's response
carries the store flag back, so a core can count completed stores. The id comes back unchanged.
Responses to one core can arrive out of order when they come from banks at different distances.
The id is how the core matches them. Responses from a single route to a single bank stay in order.

Handshakes use valid/ready. A request counts as accepted on the clock edge where both are high.
The data must stay stable while valid is high and ready is low; assertions in the crossbar and
the tile check this. Cores must always accept responses. There is no response ready at the core.

## Inside a tile

A core request is decoded on its tile bits and group bits:

- **Own tile.** The request goes into an 8-input × 16-bank crossbar. Its inputs are the 4 cores
  and the 4 remote slave ports. A bank grants one requester per cycle in round-robin order.
  The others see ready low: this is a *bank conflict*.
- **Another tile.** The request goes through a 4×4 crossbar to one of four master ports. The
  port is the *direction* `target_group XOR own_group`:

  | direction | value |
  |---|---|
  | local | 0 |
  | east | 1 |
  | north | 2 |
  | northeast | 3 |

  Each direction has its own network, so traffic to different groups does not compete.

Requests arriving from other tiles pass a spill register at each slave port before they enter
the bank crossbar. The bank answers one cycle later. The answer then goes back out through the
same slave port.

If the response network back-pressures the slave port, the answer waits in a one-entry *hold*
register. The port stops accepting requests until the hold register drains. This is what keeps
the fixed-latency SRAM from losing data.

At the core side, remote answers land in one spill register per master port. A per-core
arbiter picks between:

- the local bank answer, which always wins
- round-robin among the four master-port registers

A remote answer that loses keeps its register. This is the *collide* case counted by the tests.

## Groups and the cluster

A group holds 16 tiles. For each direction d it has two butterflies:

- a request butterfly routed on the target tile bits [9:6]
- a response butterfly routed on the source tile carried in the request

The local butterflies connect the 16 tiles of the group to each other. The east, north and
northeast butterflies feed a group's outgoing links. In the receiving group they are the slave
ports d of the tiles.

The cluster links group g's direction d to group g XOR d, in both directions. Each link lane
has one spill register. That register accounts for the two extra cycles of an inter-group
access. The butterflies are combinational. Back-pressure therefore reaches from a busy slave
port straight back to the core. This costs no extra cycle, but it makes long combinational paths.
Real implementations cut those paths with more registers and accept higher latency.

Cycle budget of a remote load:

- **Same group, 3 cycles:** request into the target slave spill register (1), bank read (2),
  response into the master spill register (3).
- **Other group, 5 cycles:** one more register on each of the two link lanes.

## Instruction cache

Each tile shares one 2 KiB instruction cache among its four cores:

- 128 direct-mapped lines of 16 bytes
- tags and lines in `mempool_icache_banks`, with a one-cycle read

The controller takes one fetch per cycle, in round-robin order among the cores. It reads tag
and line, then answers the next cycle on a hit. On a miss it:

1. issues one line refill on the refill port
2. blocks until the line returns
3. writes the tag and the line
4. answers the missing core in the same cycle

Valid bits are flops that reset to invalid. The organisation (associativity, line size,
blocking refill) is this design's own; only the capacity is fixed by MemPool.

## What was left out or assumed

- **Cores and external memory.** The Snitch cores, the off-chip global memory and the
  face-to-face bonding between the dies are not modelled. The dies do not change the logic;
  they are a floor-planning matter.
- **Own choices where MemPool is silent:**
  - the address map
  - the round-robin arbitration policy
  - where the pipeline registers sit
  - the response hold register
  - the cache organisation
- **Combinational paths.** The butterfly stages are combinational, so the zero-load latencies
  come out as 1/3/5 cycles. A timing-closed chip would register more and would need the
  matching extra buffering.
- **Off-chip matrix multiplication.** MemPool is evaluated with a matrix multiplication that
  streams t×t tiles from off-chip memory. The tiles are t = 256, 384, 544 and 800 for 1, 2, 4
  and 8 MiB. Three int32 tiles need 0.75, 1.69, 3.39 and 7.32 MiB. The first three fit the
  default 4 MiB build; t = 800 needs `SpmCapacity = 8 MiB`. No testbench runs that kernel,
  because it needs the cores.

## Simulating

Every testbench in `tb/` is self-checking and prints `TB_RESULT checks=<n> failures=<m>`.
Run any of them with Verilator, for example:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_mempool_cluster \
    -y rtl -y tb +libext+.sv rtl/mempool_pkg.sv tb/tb_mempool_cluster.sv -o sim
./obj_dir/sim
```

| Testbench | What it checks |
|---|---|
| `tb_mempool_cluster` | Full size (256 cores, 4 MiB). Latencies 1/3/5, random loads and stores from all cores checked against a model, instruction fetches through the caches. Counts each mechanism: own tile, own group, east/north/northeast, bank conflicts, network back-pressure, hold register, response collisions, I$ hits and misses. It fails if any count is zero. It builds in about 2 minutes and runs in under a second. |
| `tb_mempool_group` | One group with its three outgoing links looped back to itself, 16-word banks. |
| `tb_mempool_tile_interconnect` | The tile interconnect with behavioural banks and remote ports. |
| `tb_mempool_spm_bank`, `tb_mempool_icache_banks`, `tb_mempool_icache_ctrl`, `tb_mempool_xbar`, `tb_mempool_butterfly` | Each unit against a reference model. |

Reset is asynchronous and active low. The testbenches drive inputs on the falling clock edge.
To change the capacity, override `SpmCapacity` on `mempool_cluster`, or `BankWords` on a group
or tile.

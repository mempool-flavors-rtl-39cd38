# MemPool cluster: a shared, banked L1 scratchpad for 256 cores

MemPool is a RISC-V manycore cluster in which 256 small 32-bit cores share
a single 1 MiB L1 scratchpad memory. There is no data cache and no
private data memory. Every core can load from and store to every word of the
L1 directly. The memory is split into 1024 banks so that many cores can use
it in the same cycle. A hierarchical crossbar keeps the latency low: one
cycle to a core's own tile, three cycles within its group, five cycles
anywhere else. The cores hide these few cycles with a scoreboard, so one
flat, fast memory can serve every kernel whatever its dataflow.

This RTL implements that memory system: the banks, the four kinds of
interconnect, and the tile, group and cluster levels that wire them
together. The cores plug into it through 256 request/response ports. So do
the DMA engines, through one port per tile. The cores, their instruction
caches, the AXI system bus and the DMA engines are not included (see
[What is not here](#what-is-not-here)).

## The hierarchy

| Level   | Contains                                                    | Count in the cluster |
|---------|-------------------------------------------------------------|----------------------|
| bank    | 256 words x 32 bit, one access per cycle                    | 1024                 |
| tile    | 4 core ports, 16 banks, tile crossbar, remote crossbar      | 64                   |
| group   | 16 tiles, crossbars *Local*, *North*, *East*, *Northeast*   | 4                    |
| cluster | 4 groups in a 2 x 2 arrangement                             | 1                    |

The counts come from the published MemPool architecture. These are 4 cores
and 16 banks per tile, 16 tiles per group, 4 groups, and 1 MiB in total. The
bank depth of 256 words follows from them. Everything in `mempool_pkg.sv`
derives from these five numbers.

## Address map

All 1 MiB is one flat address range. Consecutive 32-bit words go to
consecutive banks, first within a tile, then across tiles, then across
groups:

```
 31      20 19        12 11   10 9      6 5      2 1    0
+----------+------------+-------+--------+--------+------+
| ignored  |    row     | group |  tile  |  bank  | byte |
+----------+------------+-------+--------+--------+------+
```

An array that is walked linearly is therefore spread over every bank of the
cluster. A core that needs low latency places its data in the rows of its
own tile's banks. This map is a choice of this RTL: the published
description says only that any core reaches any address. Address bits above
bit 19 are ignored, so the 1 MiB repeats through the address space. Other
address regions, for example for peripherals or external memory over AXI,
would have to be decoded in front of the core ports.

## The path of a request

This section explains where the latencies come from and why the network
cannot lose or misroute a response.

**Inside a tile.** A core request first meets a comparator. If the tile and
group fields of the address equal the tile's own id, the request goes to the
*tile interconnect*. This is a crossbar from nine requesters (4 cores,
4 incoming remote ports, 1 DMA port) to the 16 banks, with one round-robin
arbiter per bank. The path from a core to a bank has no register, so a
request that wins arbitration is accepted in the cycle it is presented. The
bank answers in the next cycle. That is the **1-cycle** local access.

**Leaving the tile.** Any other request goes to the *remote interconnect*.
This picks one of the tile's four outgoing ports from the destination group:

| port | destination group          | meaning                       |
|------|----------------------------|-------------------------------|
| L    | own group                  | another tile of the same group |
| N    | own group XOR 1            | the group to the North        |
| E    | own group XOR 2            | the group to the East         |
| NE   | own group XOR 3            | the group to the Northeast    |

Each outgoing port has a register stage, and so does the response coming
back into the tile. Crossing into another tile therefore costs two cycles
more than a local access.

**Inside a group.** The four *group interconnects* are 16 x 16 crossbars
selected by the tile field of the address. *Local* joins every tile's L port
to every tile's L input, so the 16 tiles are fully connected. The request
then enters the destination tile's tile interconnect like a local one. Round
trip: output register, crossbar, bank, crossbar, response register. That is
the **3-cycle** access.

**Between groups.** The *North*, *East* and *Northeast* crossbars of a group
take its tiles' N, E and NE ports. They deliver into the N, E and NE inputs
of the 16 tiles of the neighbouring group in that direction. Each of these
links has one more register stage per direction, at the group boundary.
Because XOR is symmetric, group *g*'s North neighbour has *g* as its North
neighbour. Its requests therefore arrive on the N inputs, and the responses
return over the same link. That gives the **5-cycle** access.

These latencies hold for an unloaded network. Each extra cycle of waiting
comes from a busy bank or port.

**Finding the way back.** Every request carries the global id of the core
that issued it, `{group, tile, core}`. The tile writes this id itself, so a
core cannot get it wrong. The group crossbar returns a response to the tile
named in the id. The remote interconnect returns it to the core named in the
id. Inside a tile, the bank also stores the index of the tile-crossbar port
the request came from. The response goes back to that port, which can be a
core, one of the four remote ports, or the DMA port. Requests also carry a
4-bit tag that comes back unchanged. A core has to use it, because responses
can come back in a different order than the requests left. A local read
issued after a remote one usually returns first.

**Ordering.** Two requests from the same core to the same bank take the same
path. Every stage on that path is first-in first-out, and round-robin
arbitration never reorders the requests of a single input. So a read after a
write to the same address from the same core always returns the new value.
Requests from different cores to the same address are served in arbitration
order.

**Back-pressure and forward progress.** Every link uses a valid/ready
handshake and holds its data while waiting. A bank accepts a request only if
its one-entry response register is empty or is emptied in the same cycle. A
bank whose response is held back therefore stops taking requests. Requests
and responses travel on separate networks, so a blocked request path never
blocks a response. As long as the cores and the DMA ports eventually accept
their responses, every request completes. Round-robin arbitration serves
every waiting requester within a bounded number of grants. The test in which
all 256 cores read the same bank at once shows this.

## Interface

All ports use the structs of `mempool_pkg`:

- `tcdm_req_t`: `addr[31:0]`, `we`, `be[3:0]`, `wdata[31:0]`, `src[7:0]`,
  `tag[3:0]`. `src` is overwritten inside the tile for core requests. It is
  unused for DMA requests.
- `tcdm_resp_t`: `rdata[31:0]`, `src[7:0]`, `tag[3:0]`. `rdata` is the
  word read, or zero for a write. A write is acknowledged with a response
  too.

A transfer happens at a rising clock edge when `valid` and `ready` are both
high. A request must stay unchanged until it is taken. On the core side,
`valid` to `ready` is a combinational path through the tile's arbiters. Core
`c` of the cluster is at port index `c = 64*group + 4*tile + core`. DMA
port `t = 16*group + tile` reaches only the 16 banks of that tile. The reset
`rst_ni` is asynchronous and active low. It clears the handshake state and
the arbiters but not the memory contents.

## Modules

| file | role |
|------|------|
| `mempool_pkg.sv` | sizes, address map, request/response structs, port directions |
| `spm_bank.sv` | one bank with its response register |
| `tile_interconnect.sv` | 9 x 16 crossbar from requesters to banks |
| `remote_interconnect.sv` | 4 cores to the 4 outgoing ports |
| `group_interconnect.sv` | 16 x 16 crossbar; instantiated as Local, North, East, Northeast |
| `tile.sv` | cores' ports, banks, both tile crossbars, register stages |
| `group.sv` | 16 tiles, four group crossbars, inter-group register stages |
| `mempool_cluster.sv` | top level: 4 groups and the links between them |
| `tcdm_xbar.sv` | generic request + response crossbar used by the three interconnects |
| `rr_arbiter.sv` | round-robin arbiter with valid/ready |
| `elastic_buffer.sv` | two-entry FIFO used as a full-throughput register stage |

The tile and group ids are inputs of `tile` and `group`, not parameters.
All 64 tiles are therefore one module, which keeps elaboration and
simulation builds short.

## What is not here

- **Cores.** The published cores are Snitch RV32 cores with atomics, custom
  DSP instructions and, in the floating-point variant, an FPU. They come from
  earlier work and are not described in enough detail to rebuild. Their data
  ports are the cluster's core ports. Atomic memory operations are not
  executed in this memory system.
- **Instruction path.** This covers the per-core L0 and per-tile L1
  instruction caches and the AXI port and AXI interconnect that refill them.
  Only their names and places are known, not their sizes or protocols.
- **DMA engines.** Only their write path into the tiles is modelled, as the
  per-tile DMA ports.
- **The other MemPool variants.** In the systolic variant, cores communicate
  through queues mapped into the L1. In the vectorial variant, each tile has
  one core plus a vector unit with four FPUs. Both are extensions of this
  baseline and are not implemented.

## Choices of this RTL

The published architecture fixes the counts, the topology and the per-level
latencies. The following choices are this RTL's own:

- the address map (word interleaving over the whole cluster);
- the group numbering (N = XOR 1, E = XOR 2, NE = XOR 3);
- round-robin arbitration everywhere;
- a two-entry elastic buffer as each register stage, so that a stage can
  pass one request per cycle;
- one register per direction per hierarchy level, placed in the tile for
  the group level and at the group boundary for the cluster level;
- 4-bit tags;
- write acknowledgements;
- a single DMA port per tile.

Banks are register arrays, not SRAM macros. Timing (the 800 MHz target of
the published implementation) is not addressed by this RTL.

## Simulating

Every module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and stops itself with a watchdog. For
example:

```
verilator --binary --timing --assert -y rtl -y tb +libext+.sv \
    rtl/mempool_pkg.sv tb/tb_mempool_cluster.sv --top-module tb_mempool_cluster
./obj_dir/Vtb_mempool_cluster
```

Run `tb_spm_bank`, `tb_tile_interconnect`, `tb_remote_interconnect`,
`tb_group_interconnect`, `tb_tile`, `tb_group` and `tb_mempool_cluster` the
same way. The block tests drive random traffic with random stalls. Where the
neighbours of a block are missing, they are models in the testbench. The
tests check routing, data, tags and the cycle latencies, and each test
counts the contention it meant to cause.

`tb_mempool_cluster` runs the full-size cluster with default parameters. It
has four phases:

1. The DMA ports fill all 1 MiB and read part of it back.
2. Lone reads measure 1/3/5 cycles to the own tile, the group, and each of
   the three other groups.
3. All 256 cores read one bank at once.
4. 3000 cycles of random reads and byte-masked writes from every core to
   every part of the cluster, checked against a shadow copy.

In phase 3 the 256 reads of the single bank complete in 259 cycles. The bank
serves one read per cycle and stays busy, and the last response takes its
round trip on top. The test checks this bound. Building the full-size
simulation takes about five minutes, and running it takes under half a
minute.

The test fails if any of these mechanisms never happened: local, group and
each inter-group access, conflict stalls, response back-pressure, DMA reads
and writes, and partial writes.

## How far to trust it

The block and cluster tests pass. Each was also run against a deliberately
broken copy of its module and failed there. Lint with `verilator -Wall`
reports only unused-parameter and width notes, and an asynchronous reset
also used by the non-reset memory arrays. No latches or combinational loops
are reported. The RTL has not been synthesised for a technology, and its
timing is unknown. The arbitration and buffering are functionally checked,
but no performance figure (bandwidth under load, utilisation) is claimed to
match the published design.

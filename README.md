# TeraPool-SDR: 1024 cores on one shared 4 MiB L1, fed from HBM

TeraPool-SDR is a compute cluster for software-defined 6G baseband
processing. 1024 small RISC-V cores share a single 4 MiB L1 scratchpad.
There are no private data caches and no coherence. Every core can load
and store every L1 word directly, in 1 to 9 cycles (1 to 11, depending on
configuration).

The baseband kernels are FFT, beamforming, channel estimation and MIMO
detection. A whole working set of these kernels fits in this L1: 64
antennas × 3276 sub-carriers. So a kernel runs on data in place and does
not need to be tiled through a small cache. Data comes in from two HBM2E
stacks, and results go back out, through a modular DMA engine with one
data mover per subgroup.

This repository holds synthesizable SystemVerilog for the cluster's
interconnect, memory, AXI system and DMA, plus self-checking testbenches.
The cores and their instruction caches are not included: each core's L1
port, each tile's instruction-refill AXI port, the 16 HBM ports and the
peripheral port are pins of the top module, `terapool_cluster`.

## The L1 hierarchy

```
cluster  = 4 groups                     1024 cores, 4096 banks, 4 MiB
group    = 4 subgroups                   256 cores
subgroup = 8 tiles                        64 cores
tile     = 8 cores + 32 banks of 256 × 32 bit (32 KiB)
```

Each level has fully-connected (FC) crossbars. A crossbar here
(`fc_xbar`) has no storage. Each input names the output it wants, and
each output picks one requester round-robin, all in the same cycle. Only
explicit pipeline cuts (`pipe_cut`) and the bank's output register add
latency.

### Tile (`terapool_tile`)

A tile has four crossbars:

| crossbar | from | to |
|---|---|---|
| local request | 8 cores + 7 slave ports | 32 banks |
| local response | 32 banks | 8 cores + 7 slave ports |
| remote request | 8 cores | 7 master ports |
| remote response | 7 master ports | 8 cores |

Each core's request goes either to the local crossbar or to the remote
one, decided by its address. A 2:1 arbiter merges the two response
streams per core.

The seven remote ports have fixed meanings:

| port | leads to |
|---|---|
| 0 | the other tiles of the own subgroup (L-SG crossbar) |
| 1, 2, 3 | subgroup (own + k) mod 4 of the own group, k = 1..3 |
| 4, 5, 6 | group (own + k) mod 4, k = 1..3 |

Every master request port and master response port passes one pipeline
cut.

On the way out, the tile writes its coordinates into every request
(group, subgroup, tile, core). Whatever bank answers routes the response
back by those fields. No level keeps state about outstanding requests.

### Subgroup (`terapool_subgroup`)

Port 0 of all eight tiles meets in the L-SG crossbar (8 × 8 for requests,
8 × 8 for responses).

Ports 1..3 each feed an 8 × 8 R-SG crossbar. Its outputs are the eight
lanes of the link to that subgroup. An incoming link lane enters tile t's
slave port directly.

Ports 4..6 pass straight through to the group.

### Group (`terapool_group`)

Each subgroup-to-subgroup link has one pipeline cut per direction.

Each of the three inter-group links has its own 32 × 32 R-Group crossbar
on the sending side. It takes a request from the 32 tiles' matching ports
and puts it on the link lane of its destination tile, chosen by the
address's subgroup and tile fields. So link lanes are numbered by
destination tile, and an arriving lane enters that tile's slave port
directly. The response crossbar routes answers back by the stamped source
fields. The subgroup links work the same way: the R-SG crossbar chooses
the lane in the sending subgroup.

### Cluster (`terapool_cluster`)

Group g's link k goes to group (g + k) mod 4. Each direction of an
inter-group link has (RemoteLatency − 3) / 2 pipeline cuts.

### Latency budget

Counted from the cycle a core's request is accepted to the cycle its
response is valid, without contention:

| target | path | cycles |
|---|---|---|
| own tile | bank register | 1 |
| other tile, same subgroup | tile cut + bank + tile cut | 3 |
| other subgroup | + 1 cut each way on the SG link | 5 |
| other group | + (RemoteLatency−3)/2 cuts each way | 7 / 9 / 11 |

Every core can issue one 32-bit access per cycle, and every bank can
accept one per cycle. So the peak L1 throughput is 1024 × 4 B = 4 KiB per
cycle, provided the accesses fall in different banks. Two requests to one
bank in the same cycle are served one after the other; the loser is held
with its ready signal low.

RemoteLatency defaults to 9, the energy-optimal configuration. 11 trades
energy for a higher clock (924 MHz against 730 MHz at 7). The value must
be odd; the published configurations are 7, 9 and 11.

### Address map

L1 is word-interleaved over the whole cluster. Byte address, from LSB
upwards:

```
[1:0] byte | [6:2] bank | [9:7] tile | [11:10] subgroup | [13:12] group | [21:14] row
```

Consecutive words fall in different banks, and the next 128 B in the
next tile. One subgroup owns each 1 KiB region, so a 1 KiB region is
exactly what one subgroup's DMA backend can serve. Field widths follow the
parameters: `NumBanks`, `NumTilesSg` and `BankWords` set the bank, tile
and row widths.

A kernel that wants its data near a core places it in the rows of that
core's own tile.

## System side: AXI, DMA and HBM

### AXI masters

Each subgroup has one 512-bit AXI master. A binary tree of 2:1 `axi_mux`
merges the instruction-refill ports of its 8 tiles. One more 2:1 mux adds
the subgroup's DMA backend. This gives 16 masters in the cluster.

`axi_mux` appends the input index below the transaction ID and uses it to
route R and B beats back. It serves one write burst at a time, so W beats
never interleave.

### System demux and address space

Each of the 16 masters goes through a `system_demux`, which routes by
address:

| address | target |
|---|---|
| ≥ `0x8000_0000` | L2 (HBM), through the master's own scrambler and L2 port |
| `0x4001_0000` – `0x4001_0FFF` | DMA frontend registers (16 masters merged by a 16:1 `axi_mux`) |
| anything else | peripheral port (also merged 16:1) |

The demux never reorders responses. Reads are outstanding towards only one
target at a time, and the same holds for writes. A request for another
target waits until the earlier ones have completed.

### HBM address scrambler

The HBM2E memory is 2 × 16 GiB in 16 channels. The channel is picked by
L2 offset bits [34:31]. Without help, a large linear transfer would stay
in one channel. `hbm_addr_scrambler` swaps offset bits [13:10] (which
1 KiB burst) with [34:31] (which channel). So 16 consecutive 1 KiB bursts
go to 16 different channels. A swap is its own inverse, so software sees
a plain linear L2.

### DMA engine

The DMA has three stages:

1. **Frontend** (`dma_frontend`): 64-bit registers at `0x4001_0000 +`:
   - `0x00` L2 address
   - `0x08` L1 address
   - `0x10` length in bytes
   - `0x18` direction (bit 0: 1 = L1 → L2)
   - `0x20` start on write, busy on read
   - `0x28` count of completed jobs

   Any core can program it through its tile's AXI port. A start while busy
   is ignored.
2. **Midend.**
   - `dma_midend`, at cluster level, splits a job into chunks that never
     cross a 1 KiB subgroup region, at one chunk per cycle. It sends each
     chunk to the group that owns its region. It counts the chunks in
     flight and pulses job-done when the last one has finished.
   - `dma_midend_group`, one per group, registers a chunk and forwards it
     to its subgroup.
3. **Backend** (`dma_backend`), one per subgroup.
   - L2 → L1: issues one AXI burst (≤ 16 beats of 64 B). It writes each
     512-bit beat into the owning tile through the tile's wide DMA port.
   - L1 → L2: reads beats from the tiles and streams them as a write
     burst.
   - The wide port fans a beat out to 16 adjacent banks. It shares each
     bank with the cores, round-robin.

Addresses and lengths must be multiples of 64 B.

All 16 backends work in parallel. A transfer over the whole L1 therefore
moves 16 × 64 B per cycle at peak, close to the HBM's ~900 GB/s.

## Parameters

The defaults are the full design. The testbenches shrink them.

| parameter | default | meaning |
|---|---|---|
| `NumCores` | 8 | cores per tile |
| `NumBanks` | 32 | banks per tile |
| `BankWords` | 256 | 32-bit words per bank |
| `NumTilesSg` | 8 | tiles per subgroup |
| `RemoteLatency` | 9 | inter-group round trip (7, 9, 11) |

The group count (4) and the subgroups per group (4) are fixed by the 2-bit
address fields and the 7-port tile. AXI data width is 512 bit, ID width
12 bit and address width 48 bit, all in `terapool_pkg`.

## Where this RTL departs from, or goes beyond, the description

The published description gives:
- the hierarchy;
- the crossbar levels and the 7 remote ports per tile;
- the 1-3-5-7/9/11 latencies;
- the subgroup AXI tree;
- the three-way system demux;
- the three-stage DMA;
- the 16-channel HBM link;
- the scrambler's purpose.

Everything else is this design's own choice:
- crossbar arbitration (round-robin);
- the L1 address map;
- response routing by stamped coordinates;
- how the DMA reaches the banks (a wide tile port);
- the register map, the system address map and the chunk size;
- the scrambler's bit permutation;
- the reduced AXI4 channel set (no size, burst type, cache or response
  fields);
- the peripheral port, which is 512-bit AXI. The paper draws it as 32-bit
  peripherals; width conversion is left outside.

Not included:
- the Snitch cores;
- the L0 and shared L1 instruction caches;
- the CSRs and peripherals;
- the HBM2E itself. A behavioural model with fixed latency,
  `tb/hbm2e_model.sv`, stands in for it.

## Verification

Every module has a self-checking testbench, `tb/tb_<module>.sv`. Each one
prints `TB_RESULT checks=N failures=M` and has a watchdog. Build and run
one with plain Verilator:

```
verilator --binary --timing --assert -Irtl -Itb rtl/terapool_pkg.sv \
          tb/tb_terapool_cluster.sv --top-module tb_terapool_cluster
./obj_dir/Vtb_terapool_cluster
```

- `tb_terapool_cluster` runs the whole cluster at reduced size: 2 cores
  per tile, 16 banks of 16 words, 2 tiles per subgroup. It:
  1. measures the 1/3/5/9-cycle latencies from all four groups;
  2. moves 16 KiB from HBM into L1 through the DMA and checks the data
     via the cores;
  3. runs random byte-enabled traffic from all 64 cores against a
     reference model;
  4. moves the result back to HBM and checks it word by word;
  5. reads L2 through a tile's refill port and reads a peripheral.

  It counts each mechanism: local, subgroup, group and remote accesses,
  bank stalls, DMA jobs both ways, job splitting, every demux target, and
  all 16 HBM channels hit.
- `tb_terapool_cluster_full` runs the same sequence on the cluster with
  every parameter at its default: 1024 cores, 4 MiB.
  It simulates in seconds, but Verilator's C++ build of it takes 15 to
  25 minutes and several GB of memory.
- `tb_terapool_group` and `tb_terapool_subgroup` stand in for everything
  outside one group or one subgroup. The bench answers every outgoing link
  lane from its own memory, one cycle after the request. It also drives
  requests into every incoming lane. It checks:
  - the lane each request leaves on;
  - the 1/3/5-cycle latencies;
  - that responses return on the lane the request came in on, one cycle
    later;
  - random traffic against a reference model;
  - DMA chunks both ways.
- Helpers: `tb/axi_master_bfm.sv` (AXI master tasks) and
  `tb/hbm2e_model.sv`.

Assertions in the tile, the crossbar and the pipeline cut check that a
valid request is held until it is accepted.

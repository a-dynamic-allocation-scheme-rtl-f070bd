# DAS: runtime address remapping for a 1024-core shared-L1 cluster

A very large shared-L1 cluster cannot give every core the same path to every
memory bank. Here 1024 cores share 4 MiB of L1 spread over 4096 banks. The
banks sit in a hierarchy, and a load takes 1, 3, 5 or 7 cycles depending on
how far away its bank is. The usual word-interleaved address map spreads
consecutive words over all 4096 banks. Almost every access then goes to a
far bank, even when a core only touches its own private buffer.

The Dynamic Allocation Scheme (DAS) fixes this with a small, programmable
address remapper. It sits in front of each core's memory port and in the
DMA engine. Software marks some address ranges as *DAS regions*. Inside a
region, runs of consecutive words stay within a small partition of
neighbouring banks (for example the 32 banks of one tile) for several rows,
before the map moves on to the next partition. Data that a tile works on can
therefore be placed in that tile's own banks, and still be one contiguous
array for software. Outside the regions the map stays word-interleaved.

This repository is a SystemVerilog model of that cluster and of the DAS
hardware: the remapper, its configuration registers, the L1 banks, the
tile / SubGroup / Group / cluster interconnect with its latencies, and the
DMA engine with its DAS-aware splitter. The cores, the AXI network and the
L2 memory are not included. Their connections are ports of the top module,
and the testbenches play their part.

## 1. The cluster around the remapper

| level    | contents                           | uncontended load latency |
|----------|------------------------------------|--------------------------|
| tile     | 8 cores, 32 banks x 256 words      | 1 cycle (own banks)      |
| SubGroup | 8 tiles                            | 3 cycles                 |
| Group    | 4 SubGroups                        | 5 cycles                 |
| cluster  | 4 Groups = 128 tiles, 1024 cores   | 7 cycles                 |

A physical L1 byte address splits, from bit 0 upwards, as follows:

```
 [1:0]   byte in word
 [6:2]   bank in tile        (5 bits)
 [13:7]  tile = {group[1:0], subgroup[1:0], tile[2:0]}   (7 bits)
 [21:14] row in bank         (8 bits)
```

Together, bank and tile are the *b = 12* bank-index bits. One *line* is one
row across all 4096 banks, which is 16 KiB. In plain interleaving, word
`n` lives in bank `n mod 4096`.

### Ports, distance and latency

Every tile has eight core ports and a crossbar that reaches its own 32 banks
directly. For everything further away, a tile has one *outgoing* and one
*incoming* remote port per destination class:

| port k                   | destination                      | register stages each way |
|--------------------------|----------------------------------|--------------------------|
| 0                        | other tiles of the own SubGroup  | 1                        |
| 1 .. 3                   | SubGroup (own + k) mod 4 of the Group | 2                   |
| 4 .. 6                   | Group (own + k - 3) mod 4        | 3                        |

The eight cores of a tile share these seven ports, so remote bandwidth is
scarce. This is the effect DAS works around. The register stages sit on
the tile's outgoing port, both for the request and for the response. A load
that crosses port class *c* with *c* stages each way takes 1 + 2c cycles.
That gives the 1/3/5/7 latencies of the table.

The levels are joined as follows:

* **SubGroup.** One 8x8 link joins port 0 of its eight tiles.
* **Group.** For each ordered pair of SubGroups (a, b), one 8x8 link joins
  outgoing port d = (b - a) mod 4 of a's tiles to incoming port
  (4 - d) mod 4 of b's tiles. That gives three 8x8 links per SubGroup.
* **Cluster.** The same scheme joins the Groups with 32x32 links, three per
  Group.

A link (`das_level_link`) is a request crossbar plus a response crossbar.
The destination tile is taken from the address.

Every request, including a write, receives exactly one response. Responses
find their way back without any tables. Each one carries three index fields:

* `r_pe`: which core port inside the source tile sent the request;
* `r_lvl`: which link input it came through;
* `r_in`: which input of the target tile's crossbar it used.

Each crossbar on the way back simply routes by the field that belongs to
it. Responses carry the core's tag and can return out of order when a core
has requests to banks at different distances.

All crossbars (`das_xbar`) use valid/ready with one round-robin arbiter per
output. A grant stays locked while the output is stalled, so an output never
drops or swaps the item it presents.

## 2. The DAS remapping

A region is described by a start address, a size, and two small numbers:

* **p**: a partition is 2^p banks. For example, p = 5 is one tile.
* **s**: a run covers 2^s rows of a partition before moving to the next
  partition.

Let `w` be the word offset from the region start. In the logical offset,
the fields are, from the bottom up:

```
logical  w = [ upper | v | s | p ]        (then the 2 byte bits)
physical   = [ upper | s | v | p ]
```

Here v = b - p bits select the partition. The mapper keeps the low p bits.
It moves the s field above the bank index, into the row. It moves the v
field down to sit directly above p. Bits above p+s+v stay where they are.
The physical address is `start + 4 * physical + byte`. For s = 0 the map is
the identity, which is plain interleaving.

Example with p = 5 and s = 3:

* Words 0..31 of the region fill row 0 of tile 0's 32 banks.
* Words 32..255 fill rows 1..7 of the same banks.
* Word 256 starts tile 1.

A core in tile *t* that processes words 256t .. 256t + 255 only ever touches
its own banks, at 1-cycle latency, and the array is still contiguous in
software.

The paper's text gives the width of the partition-index field as b + s - p.
Its figure, however, builds the bank index from v and p alone, which needs
v = b - p. With b + s - p the v field would overlap the moved s bits, and
the map would no longer be one-to-one. This design follows the figure.

Two rules apply to regions:

* **Start alignment.** The start of a region must be aligned to a full line
  (16 KiB), so that whole rows are permuted. The size is a multiple of
  2^s lines.
* **Overlap.** If regions overlap, the lowest-numbered region wins. A region
  of size 0 is switched off.

Four regions can be active at once. That number is this design's choice.

### Configuration registers (`das_csr`)

The registers sit on a simple single-cycle register bus
(`valid, we, addr[11:0], wdata` in, `rdata` out in the same cycle). Region
*i* has three registers:

| offset      | register | contents                                        |
|-------------|----------|-------------------------------------------------|
| 0x10*i + 0x0 | size    | region size in bytes, 0 = off                   |
| 0x10*i + 0x4 | addr    | start address, line aligned                     |
| 0x10*i + 0x8 | DAS     | bits [3:0] p, bits [7:4] s                      |

After reset every region is off, which means the whole L1 is interleaved.
The register outputs fan out to every core's mapper (`das_address_mapper`,
purely combinational) and to the DMA splitter's mapper. Software should
reprogram a region only while no access to it is in flight.

## 3. The DMA engine and why it needs to know about DAS

A DMA transfer is programmed through a second register bus (`dma_frontend`):

| offset | register                                              |
|--------|-------------------------------------------------------|
| 0x00   | source address                                        |
| 0x04   | destination address                                   |
| 0x08   | length in bytes (a multiple of 4)                     |
| 0x0C   | start (write any value; ignored while busy)           |
| 0x10   | status: bit 0 = busy                                  |
| 0x14   | count of completed transfers                          |

The frontend decides the direction from the addresses. Whichever address lies
below 4 MiB is the L1 side. The transfer then passes three stages.

1. **Splitter (`dma_splitter`).** It cuts the transfer into pieces that are
   contiguous in *physical* L1, and maps each piece's L1 address through its
   own DAS mapper.
   * Outside a region, or inside one with s = 0, a piece ends at a line
     boundary.
   * Inside a region with s > 0, a piece ends at every 2^p-word boundary.
     The next logical word is then in another partition, or in the same
     partition one row up, which is not adjacent in physical memory.

   One job of the frontend must lie either wholly inside one region or
   wholly outside all of them.
2. **Distributors (`dma_distributor`).** There are two levels. The cluster
   distributor cuts a piece at 4 KiB slice boundaries of the line: slice
   *g* belongs to Group *g*. Each Group distributor then cuts at 1 KiB
   boundaries, one slice per SubGroup.
3. **Backends (`dma_backend`).** There is one backend per SubGroup. It moves
   its piece one word at a time between its L2 port and the owning tile's
   DMA port. The DMA port goes straight into the tile's bank crossbar. The
   backend waits for each response before sending the next request. An
   unstalled word costs about three cycles.

`dma_busy_o` stays high until the frontend's job has been taken and every
splitter, distributor and backend is idle again.

## 4. Modules

| module               | role                                                                         |
|----------------------|------------------------------------------------------------------------------|
| `das_pkg`            | widths, request / response / region / register / DMA-job structs            |
| `das_address_mapper` | combinational DAS remap over NUM_REGIONS regions                            |
| `das_csr`            | region registers                                                            |
| `das_l1_bank`        | one 1-cycle bank with byte enables and a response register                 |
| `das_xbar`           | valid/ready crossbar with round-robin arbitration and grant lock            |
| `das_pipe_reg`       | chain of valid/ready register stages (0 stages = wire)                      |
| `das_tile`           | mappers, request and response crossbars, banks, remote and DMA ports       |
| `das_level_link`     | request and response crossbar pair between tiles of two blocks            |
| `das_subgroup`       | 8 tiles, SubGroup link, DMA backend                                         |
| `das_group`          | 4 SubGroups, inter-SubGroup links, Group DMA distributor                    |
| `dma_frontend`, `dma_splitter`, `dma_distributor`, `dma_backend` | DMA engine stages |
| `das_cluster`        | top: 4 Groups, inter-Group links, CSRs, DMA frontend, splitter, cluster distributor |

All sizes are parameters. Their defaults are the full configuration:
`N_PE=8, N_BANKS=32, BANK_WORDS=256, N_TILES=8, N_SG=4, N_GROUPS=4,
NUM_REGIONS=4`. N_TILES, N_SG, N_GROUPS, N_BANKS and BANK_WORDS must be
powers of two.

### Top-level interface (`das_cluster`)

* `pe_req_*` / `pe_rsp_*`: one valid/ready request and response channel
  per core, 1024 in all. The ports are indexed
  `[((group*4 + subgroup)*8 + tile)*8 + core]` and carry logical addresses.
  A request (`mem_req_t`) holds `addr, wdata, we, be, tag`. The routing
  fields are filled in by the cluster, so drive them as 0.
* `csr_req_i` / `csr_rdata_o`: the DAS register bus.
* `dma_reg_req_i` / `dma_reg_rdata_o` / `dma_busy_o`: the DMA register bus.
* `l2_req_*` / `l2_rsp_*`: one L2 channel per SubGroup backend, 16 in all,
  indexed `[group*4 + subgroup]`, using the same request/response structs.
  The L2 side must answer every request with one response.

Clock `clk_i`. Reset `rst_ni` is asynchronous and active low.

## 5. Verification

Every module has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M` and stops itself with a watchdog if it
hangs.

| testbench                | what it checks                                                                  |
|--------------------------|---------------------------------------------------------------------------------|
| `tb_das_address_mapper`  | random addresses and region settings against a bit-by-bit model; bijectivity; region priority |
| `tb_das_csr`             | register write / read-back and the configuration outputs                        |
| `tb_das_l1_bank`         | data, byte enables, read-old-data, back-pressure                                |
| `tb_das_xbar`            | random traffic with back-pressure: delivery, order, input index; round-robin fairness |
| `tb_das_tile`            | remapped addresses leave on the right port; latencies 1/3/5/7; incoming and DMA ports; a bank conflict |
| `tb_das_subgroup`, `tb_das_group` | the same at the next levels, plus a DMA job in and out of the block's slice |
| `tb_dma_frontend`, `tb_dma_splitter`, `tb_dma_distributor`, `tb_dma_backend` | the DMA stages, each under random stalls |
| `tb_das_cluster`         | end to end, at 2x2x2 tiles of 2 cores and 4 banks (see below)                  |
| `tb_das_gemv_locality`   | a GEMV-style read phase, all cores at once, interleaved vs. DAS (see below)     |

The end-to-end test:

* programs regions through the CSR bus;
* writes and reads through every core port, checking data and the latency
  class of every access against its own model of the remapping;
* forces a bank conflict and a pile-up of all cores on one tile;
* runs DMA transfers into a DAS region, where the splitter has to cut at
  partition rows, and out of interleaved memory;
* finally resets the map to interleaved.

It counts each of these mechanisms and fails if one never happened.

`tb_das_gemv_locality` shows the point of the scheme. In a row-parallel
GEMV, each of the 16 cores streams its own block of 8 matrix words, and all
cores run at once. On the reduced cluster the results are:

* **Interleaved.** Only 16 of the 128 loads hit the core's own tile. The
  read phase takes 66 cycles.
* **DAS.** With the matrix in a region of one partition per tile, all 128
  loads are local. The phase takes 16 cycles.

The testbench checks that every DAS load is local and that the DAS phase is
faster.

To run any testbench with plain Verilator (5.x):

```
verilator --binary --timing --assert -y rtl rtl/das_pkg.sv tb/tb_das_tile.sv \
          --top-module tb_das_tile -o sim
./obj_dir/sim
```

The full-size cluster is large for a simulator. It has 4096 banks and
about 400 crossbars, and Verilator turns it into several hundred large C++
files. It passes lint at the default parameters. It has only been simulated
at reduced sizes, though. The largest configuration run end to end is the
one in `tb_das_cluster`: 2 Groups x 2 SubGroups x 2 tiles, 2 cores and
4 banks of 16 words per tile. The tile, SubGroup and Group testbenches also
use reduced sizes. Every module is written for any power-of-two size, and
the testbenches derive all expected values from the same parameters.

### Capacity

At the default size, the L1 holds 4 MiB. Here is how that compares with the
kernels the scheme was evaluated on, counting FP32 data only:

| kernel                                     | data in L1   |
|--------------------------------------------|--------------|
| GEMV 32x16384                              | 2.06 MiB     |
| 16 parallel GEMV 64x512                    | 2.04 MiB     |
| GEMM 256x1024x256 or 1024x256x256          | 2.25 MiB     |
| 32 parallel GEMM 64x64x64                  | 1.5 MiB      |
| self-attention, 1024 tokens, head dim 128  | 2.06 MiB     |

For self-attention, the figure counts Q, K, V, O and one 128x128 score
tile. All of these fit. Larger layers, such as the feed-forward part of a
ViT-B/16 encoder, need output tiling and double-buffered DMA. The DMA
engine above supports this, but slowly, since it moves one word at a time.

## 6. Where this model departs from the paper, or goes beyond it

* **Partition-index width.** The field is v = b - p, not b + s - p; see
  section 2.
* **Interconnect details.** The paper gives the crossbar sizes and the
  latencies. The port scheme, the placement of the register stages,
  round-robin arbitration and out-of-order responses with tags are this
  design's choices.
* **Buses.** The CSRs and the DMA frontend use a single-cycle register bus
  instead of AXI. The backends' L2 ports use the cluster's own
  request/response format.
* **DMA mover.** The DMA backends move one word at a time. A real backend
  would issue bursts and keep several requests in flight. Throughput of
  DMA is therefore far below the hardware's.
* **Allocator.** The dynamic allocator, which keeps a linked list of free L1
  blocks and sets the regions, is runtime software. It is not part of the
  RTL; the testbenches program the registers directly.
* **Banks.** L1 banks are plain arrays, standing in for SRAM macros.
  Atomic memory operations of the cores are not modelled.

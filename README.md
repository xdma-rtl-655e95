# XDMA: a distributed DMA that changes data layout in flight

Accelerators that sit next to each other on one chip rarely want their data
in the same order. A matrix engine likes 8x8 tiles, a vector unit likes plain
rows, and the next stage may want the tiles transposed. A conventional DMA can
only copy contiguous runs of bytes, so every such change of layout becomes a
software loop of many small copies, and the link sits idle most of the time.

XDMA attacks this in three ways:

* **Distribution.** Every accelerator cluster has its own XDMA unit next to
  its memory. A transfer between two clusters is carried out by two
  half-units, one that reads and one that writes. Each unit is both an AXI
  master and an AXI slave, so all traffic between units is plain AXI
  *writes*, and both directions can be busy at the same time.
* **Address generation in hardware.** Each side walks its own memory in an
  N-dimensional affine pattern. One task can therefore read rows and write
  tiles (or the reverse) at full link width, with no software loop.
* **Plugins.** Small datapaths sit in the stream, one host after the reader
  and one before the writer. They change the data on its way through. The one
  built here transposes each 8x8 tile of bytes.

This repository holds synthesizable SystemVerilog for a complete XDMA unit,
for the banked cluster memory it serves, and for a two-cluster system that
connects two units. Each block has a self-checking testbench.

## 1. The numbers the design is built around

| quantity | value | where it appears |
|---|---|---|
| cluster memory | 4 MiB, 32 banks of 64-bit words, word-interleaved | `sram_bank`, `tcdm_xbar`, `xdma_cluster` |
| AXI data width | 512 bit = one 64-byte beat | `xdma_pkg::AXI_DW` |
| memory channels per side | 512 / 64 = 8 | `xdma_pkg::N_CH` |
| address-generator loops | 4 (dimension 0 innermost) | `xdma_pkg::DIM` |
| channel buffer depth D_buf | 9 (source and destination) | `D_BUF_SRC`, `D_BUF_DST` |
| element / tile for the transposer | 8-bit, 8x8 | `xdma_pkg::ELEM_W`, `TILE_N` |
| longest AXI burst | 64 beats = 4 KiB | `xdma_pkg::MAX_BURST_BEATS` |

One 64-byte beat is exactly one 8x8 tile of bytes. The 8 channels each fetch
one 64-bit word, and those 8 words form the beat.

## 2. Describing a transfer: the XDMACfg record

A task has two halves, a source and a destination. Each half is described by
an `xdma_cfg_t` record (`rtl/xdma_pkg.sv`), 298 bits wide:

| field | meaning |
|---|---|
| `is_src` | 1 for the source half, 0 for the destination half |
| `from_remote` | set by the receiving backend when the record came over AXI |
| `plugin_cfg[7:0]` | one enable bit per plugin of this side's plugin host |
| `peer_addr` | base address of the other half (tells the unit where its partner lives) |
| `addr` | base address of this half |
| `sstride` | *spatial* stride: byte distance between the words of the 8 channels |
| `bounds[3:0]` | *temporal* loop bounds, 16 bit each (0 is treated as 1) |
| `strides[3:0]` | temporal loop strides in bytes |

**Address pattern.** Beat number *n* has loop indices `i0..i3`, with `i0`
counting fastest. Channel *c* of that beat touches this byte address:

    addr + sum_d i_d * strides[d] + c * sstride

Both halves must describe the same number of beats, `bounds[0]*...*bounds[3]`.

**Example.** Retiling a row-major (MN) M x N byte matrix into 8x8 tiles
(MNM8N8):

* Source half: `sstride = N` (eight consecutive rows),
  `bounds[0] = N/8` with `strides[0] = 8` (next tile to the right),
  `bounds[1] = M/8` with `strides[1] = 8*N` (next band of 8 rows),
  `bounds[2] = bounds[3] = 1`.
* Destination half: `sstride = 8`, one loop of M*N/64 beats, stride 64.

With the transposer enabled on either side, each tile is also transposed.

## 3. How two units cooperate

Every exchange between units is an AXI write. The receiving unit looks at
address bits [13:12] to decide what the write means. The window base is the
*peer's cluster base*: the peer address with its low log2(4 MiB) = 22 bits
cleared.

| bits [13:12] | window | payload |
|---|---|---|
| 0 | CFG | one beat, the XDMACfg record in its low 298 bits |
| 1 | GRANT | one beat, content ignored: "you may send your data now" |
| 2 | FINISH | one beat, content ignored: "your data is in my memory" |
| 3 | DATA | bursts of up to 64 beats, INCR, 64 bytes per beat |

The controller sorts each task by where its two addresses lie. There are three
cases.

**Local copy.** Both halves are in this cluster. Reader and writer start
together. The local demux after the reader feeds the local mux before the
writer, and nothing goes onto AXI. The task counts as finished when the writer
reports that the last word is written.

**Local unit reads from a remote cluster** (source remote, destination local).

1. The source record is sent to the remote unit through its CFG window. The
   destination record goes into the local writer queue. The local writer arms
   itself and waits for data from the backend.
2. The remote unit gets the record with `from_remote` set. It starts its
   reader and streams the data back into the local DATA window, with no
   grant: the local writer was armed before the request left.
3. The task finishes when the local writer has written the last word.

**Local unit writes to a remote cluster** (source local, destination remote).

1. The destination record is sent to the remote unit. The local reader starts
   at once and fills its buffers. The backend's *data valve* stays closed.
2. When the remote writer is armed, the remote unit sends a GRANT. This opens
   the valve, and the data streams to the remote DATA window.
3. When the remote writer has written the last word, the remote unit sends a
   FINISH. Only then does the local task count as finished.

The grant is what makes it safe for the receiver to have a single write path:
data never arrives before the receiver's writer is set up for it. A read
request needs no grant, because the requester armed its writer before asking.

Both links can carry traffic at once. Cluster 0 can be writing into cluster 1
while cluster 1 writes into cluster 0. The end-to-end test runs exactly this
case.

Tasks whose source *and* destination both lie outside the issuing cluster are
not supported. The receiving unit drops such a forwarded record and counts it
in `cfg_dropped_o`.

## 4. Inside one unit

`xdma_unit` = `xdma_controller` + `xdma_frontend` + `xdma_backend`.

### 4.1 Controller (`xdma_controller`)

**CSR port.** The core programs a task through 32-bit registers, indexed by
`csr_addr_i`:

| index | register |
|---|---|
| 0 | source `addr` |
| 1 | source `sstride` |
| 2..5 | source `bounds[0..3]` |
| 6..9 | source `strides[0..3]` |
| 10 | source `plugin_cfg` |
| 11..21 | the same eleven fields for the destination |
| 22 | write: launch the task; read: number of tasks launched |
| 23 | read: number of tasks finished (also on `tasks_done_o`) |

`csr_ready_o` is low from a launch until both halves have left the routers.
Reads are combinational.

**Converter and routers.** On launch, the converter builds the two records.
Each record's `peer_addr` is the other record's `addr`. Two routers, one per
half, check whether the record's `addr` lies in this cluster:

* If it does, the record goes into that half's task FIFO (depth 4).
* If it does not, it goes to the backend as a CFG write. The source router
  wins if both want to send.

Records arriving from the peer enter the same routers, chosen by `is_src`.
They take priority over the CSR path.

**In-order dispatch.** The reader and the writer each take the next record
from their FIFO once their previous task has finished.

* The reader tells the backend the transfer's length and peer whenever its
  data leaves the cluster. It sets `need_grant` only for a locally issued
  write to a remote cluster. It then waits for the last beat to be sent, and
  in the write-to-remote case also for a FINISH.
* The writer sends a GRANT when it takes a record that came from the peer,
  and a FINISH when that record's data is in memory.

### 4.2 Frontend: streaming engines and D_buf (`xdma_frontend`, `xdma_reader`, `xdma_writer`, `xdma_agu`)

The read path is:

    reader -> post-reader plugin host -> local demux -> (local mux | backend)

The write path is:

    (local reader | backend) -> local mux -> pre-writer plugin host -> writer

Each side counts beats against the product of its bounds and reports done to
the controller. The two sides are independent, which is what makes full
duplex possible.

**Address generator (`xdma_agu`).** Each engine has one address generator
that yields one beat address per cycle. It keeps each loop's partial offset in
a register and updates it with one adder, so there is no multiplier.

**Reader.** The 8 channels work independently. Each has an address FIFO and a
data FIFO of depth D_buf. A channel issues a memory request only while its
data FIFO has room for the answer, counting requests still in flight. A beat
leaves when all 8 channels have their word.

A channel that loses a bank conflict therefore falls behind by a few words
without stopping the others. When every request is granted, the reader
delivers one beat per cycle: 96 beats take 100 cycles in `tb_xdma_reader`,
including filling the pipeline. The first beat appears about three cycles
after the start.

**Writer.** A beat is accepted when all 8 channel FIFOs have room. Each
channel then writes its word whenever the crossbar grants it. `idle_o` reports
that every buffered write has reached memory, and the frontend waits for it
before reporting the destination done.

Both engines take global addresses. They keep the low 22 bits, so a cluster's
memory base must be aligned to its size.

### 4.3 Plugins (`xdma_plugin_host`, `xdma_plugin_transpose`)

A plugin host is a chain of stages. Each stage has three parts:

* a pipeline register with valid/ready flow control (full throughput);
* a plugin datapath;
* a bypass multiplexer, selected by that plugin's runtime bit in
  `plugin_cfg`.

A stage therefore adds one cycle of latency, whether or not it is bypassed.
Each host here has one plugin, the tile transposer: output byte (r, c) is
input byte (c, r) of the 8x8 tile carried by the beat.

A new plugin with the same port list (beat in, beat out) slots in as another
stage. A plugin that needs to stall would need its own flow-control path next
to the bypass; the transposer does not need one.

### 4.4 Backend (`xdma_backend`)

**Send side (AXI master).** The send side handles one transaction at a time.
When it is free, it picks in this order:

1. a grant or finish message;
2. a CFG record;
3. the next data burst of the active transfer, if its valve is open.

A control message therefore waits for at most one data burst. The stream
manager cuts a transfer into bursts of at most 64 beats, so no burst crosses a
4 KiB boundary. It marks the last beat of each burst and pulses `tx_done_o`
with the last beat of the transfer.

Each burst costs one arbitration cycle and one AW cycle. 128 beats take
132–133 cycles in the tests, which is 97 % of the link rate. B responses are
accepted and ignored.

**Receive side (AXI slave).** The receive side also handles one transaction
at a time.

* The window of the AW address is latched. The W beats then go to the right
  place:
  * CFG → the controller, with `from_remote` set;
  * GRANT → a grant counter that opens the valve;
  * FINISH → a pulse to the controller;
  * DATA → the frontend's write path.
* Back-pressure from the destination appears as WREADY low.
* After the last beat, B answers OKAY.

Grants are counted rather than matched to a sender. With two clusters that is
exact. With more clusters, each credit would need the sender's identity.

## 5. The cluster and the two-cluster system

`xdma_cluster` holds:

* 32 `sram_bank`s of 16384 x 64 bit each. They have one read port, a
  one-cycle read and byte strobes.
* A `tcdm_xbar` with 17 requesters: the reader's 8 channels, the writer's
  8 channels, and one 64-bit core port.
* An `xdma_unit`.

The crossbar interleaves words across banks: bank = address bits [7:3]. Each
bank has its own round-robin arbiter. Read data returns one cycle after the
grant.

The cores and the matrix accelerator are not part of this RTL. Their memory
traffic enters through the core port, and their XDMA programming through the
CSR port. Both are brought out at the top.

`xdma_soc` (the top) instantiates two clusters:

* cluster 0 at `0x1000_0000`, cluster 1 at `0x1040_0000`;
* each XDMA's AXI master wired straight to the other XDMA's AXI slave.

With two clusters this wiring is the whole network. A larger system would
route by the cluster base in the AW address through an AXI crossbar. The top
also exposes link activity (AW/W handshakes and the window of each AW) and the
grant/finish pulses, so a testbench can watch the protocol.

## 6. Measured behaviour on the evaluated transfers

`tb_xdma_workloads` runs the full-size system (no parameter overrides) on the
transfers the design was evaluated with. Each transfer goes from cluster 0 to
cluster 1, and elements are bytes. The rate is counted from the launch to the
finished count going up, so it includes the cfg, grant and finish round trip.

| transfer | beats | cycles | beats/cycle |
|---|---|---|---|
| reshape MN → MNM8N8, MNM8N16, MNM8N32, 128 x 128 | 256 | 279 | 0.918 |
| reshape MNM8N32 → MN, 128 x 128 | 256 | 282 | 0.908 |
| reshape MN → MNM8N8, 512 x 512 | 4096 | 4627 | 0.885 |
| KV-cache prefill, MNM8N8 → MN, 2048 x 512 | 16384 | 16918 | 0.968 |
| KV-cache prefill, MN → MNM8N8, 2048 x 512 | 16384 | 18451 | 0.888 |
| KV-cache load with transpose, 2048 x 512 | 16384 | 16911 | 0.969 |
| KV-cache load with transpose, 4096 x 512 | 32768 | 33807 | 0.969 |
| KV-cache load with transpose, 8192 x 512 (fills both 4 MiB memories) | 65536 | 67599 | 0.969 |

The ceiling is 64 beats per 66 cycles (0.970), set by the two overhead cycles
of each burst. Transposed loads and tile-to-row scatters reach that ceiling.

Gathers from row-major matrices fall a little short. In a 512-byte-wide
matrix, all 8 rows of a tile start in the *same* bank. The per-channel
buffers let the 8 channels slip out of step with each other, after which they
hit different banks. How far they can slip is set by D_buf.

`tb_xdma_dbuf` runs three systems that differ only in D_buf on a 512 x 512
reshape:

| transfer | D_buf = 3 | D_buf = 5 | D_buf = 9 |
|---|---|---|---|
| MN → MNM8N8 (beats/cycle) | 0.30 | 0.50 | 0.885 |
| MNM8N8 → MN (beats/cycle) | 0.33 | 0.55 | 0.965 |

So the deepest buffer is about 2.9x faster than D_buf = 3 and 1.75x faster
than D_buf = 5 on these worst-case layouts.

## 7. Where this RTL departs from the published design

* **Streaming engines.** The published design reuses an existing engine
  (DataMaestro) whose insides it does not describe. Here the engines are the
  simplest ones that do the job described above.
* **Number and kind of plugins.** One transposer per plugin host is an
  assumption.
* **The inter-cluster network** is direct wiring, not an Occamy-style AXI
  interconnect.
* **Not part of the RTL:** the RISC-V cores and the matrix accelerator. They
  are stood in for by the core port and the CSR port.
* **This design's own choices,** since the source describes none of them:
  * the register map;
  * the record layout and field widths (32-bit addresses and strides, 16-bit
    bounds);
  * the MMIO window offsets;
  * the arbitration order;
  * one transaction at a time per AXI direction;
  * counted, untagged grants;
  * dropping tasks whose two halves are both remote.
* **The memory** is an array of 64-bit words. In silicon it would be SRAM
  macros.

## 8. Simulating

Every testbench is self-checking and ends with a line
`TB_RESULT checks=<n> failures=<m>`. Each has a watchdog that counts a failure
and stops the run if it hangs.

Build and run one testbench with Verilator 5:

    verilator --binary --timing --assert --timescale 1ns/1ps \
        -Irtl -y rtl rtl/xdma_pkg.sv tb/tb_xdma_soc.sv --top-module tb_xdma_soc
    ./obj_dir/Vtb_xdma_soc

| testbench | what it exercises |
|---|---|
| `tb_sram_bank` | byte-strobed writes, reads, and holding the read data |
| `tb_tcdm_xbar` | 17 random requesters; data integrity and fairness (bounded wait) |
| `tb_xdma_reader` | tile gather from a row-major matrix under bank conflicts; throughput |
| `tb_xdma_writer` | tile scatter under random grant refusal; throughput; no write lost or repeated |
| `tb_xdma_plugin_transpose` | every byte position of random tiles |
| `tb_xdma_plugin_host` | two cascaded stages under every bypass setting, back-pressure, latency |
| `tb_xdma_frontend` | local copy with transpose; simultaneous send and receive through the backend ports |
| `tb_xdma_controller` | all three task cases, plus requests arriving from the peer and a dropped record |
| `tb_xdma_backend` | cfg delivery, grant gating, 64-beat burst split, finish, link rate |
| `tb_xdma_soc` | the full system at its real size: retiling, remote read with transpose, remote write with grant/finish, full duplex, scatter back to rows |
| `tb_xdma_workloads` | the transfers of section 6 at full size, with every destination byte checked and minimum rates enforced |
| `tb_xdma_dbuf` | three systems with D_buf = 3, 5, 9 on the same reshapes; the rate must grow with D_buf |

`tb_xdma_soc` runs the top with every parameter at its default: 2 x 4 MiB,
32 banks, D_buf = 9. It counts how often each mechanism occurred:

* bank conflicts;
* CFG, GRANT and FINISH messages;
* data bursts;
* cycles with both links carrying data.

It fails if any of these never occurred. It finishes in well under a second.

## 9. Changing the design

* **Memory size and base:** `MEM_SIZE`, `BASE0`, `BASE1` on `xdma_soc`. The
  bases must be aligned to the size.
* **Buffer depth:** `D_BUF` on `xdma_soc`, or `D_BUF_SRC` / `D_BUF_DST` on
  `xdma_cluster` and `xdma_unit`. The compared configurations use 3 and 5.
* **More plugins:** raise `N_EXT_SRC` / `N_EXT_DST` on the frontend, and give
  `xdma_plugin_host` a case for the new datapath. Stage *i* is enabled by bit
  *i* of the record's `plugin_cfg`.
* **Loop depth, channel count, field widths:** the constants in `xdma_pkg`.
  `N_CH` follows from the AXI and memory widths.

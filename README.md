# A multi-accelerator compute cluster with hybrid coupling

This is synthesizable SystemVerilog for a small compute cluster. In it, a
few simple RISC-V management cores share one scratchpad memory with several
accelerators:

- a GeMM (matrix-multiply) engine,
- a max-pooling engine,
- a 2D DMA.

The architecture follows SNAX, described in "An Open-Source HW-SW
Co-Development Framework Enabling Efficient Multi-Accelerator Systems". The
RTL here is an independent implementation written from that description. It
is not the authors' code.

The central idea is to couple each accelerator to the system in two
different ways at once:

- **Control is loose.** A core sets up an accelerator by writing
  configuration registers over a CSR port, writes START, and moves on. The
  accelerator runs on its own. The registers are double-buffered, so the
  next task can be loaded while the current one runs. Cores and units meet
  only at a hardware barrier.
- **Data is tight.** Every accelerator reads and writes the shared, banked
  scratchpad directly through a crossbar, with single-cycle access. Address
  generation runs in data streamers that have nested hardware loops. One
  accelerator's output buffer can be the next one's input, with no copies.

Together these let the GeMM, the MaxPool engine, the DMA and the cores run
different layers of a network at the same time, as a software pipeline.

```
 core 0 ──CSR──► router0 ──────────────────────────────► ┐
 core 1 ──CSR──► router1 ──► GeMM tile ──────────────────► hw_barrier
 core 2 ──CSR──► router2 ──► MaxPool tile, DMA ──────────► ┘
                               │  (CSR buffer → engine ↔ data streamers)
 core 0..2 data (64 b each) ───┤
 GeMM   A 512 b, B 512 b, C 2048 b
 MaxPool in 512 b, out 512 b   ├──► tcdm_interconnect (75 word ports → 32 banks)
 DMA    512 b  ◄──► AXI        │            │
                                            ▼
                           shared_spm: 32 banks × 64 bit × 512 rows = 128 kB
```

The top module is `snax_cluster`. The cores are not part of it. Each core's
CSR port and its 64-bit data port are top-level ports. So is the DMA's AXI
master, which goes to external memory. In simulation, testbench threads
play the cores and a behavioural AXI memory plays the external memory.

## Control: CSR ports, CSR buffers and the barrier

Each core has one CSR port. It is a valid/ready request with
`{addr[11:0], data[31:0], write}` and a valid/ready read response. A
`csr_router` per core decodes the address. It sends the access to the units
that core manages:

| core | units it reaches | address windows |
|------|------------------|-----------------|
| 0 | barrier | 0x7C2 |
| 1 | GeMM tile, barrier | 0x3C0–0x3FF, 0x7C2 |
| 2 | MaxPool tile, DMA, barrier | 0x400–0x43F, 0x440–0x44F, 0x7C2 |

- A write to an unmapped address is dropped.
- A read of an unmapped address returns 0, so a wrong address cannot hang a
  core.

Every accelerator has a `csr_buffer` in front of it. Offsets from the
unit's base are:

- `0..N-1`: configuration registers.
- `N`: START. Write any value.
- `N+1`: STATUS. Bit 0 is busy; bit 1 is a task pending.
- `N+2`: PERF. It counts the cycles the unit has been busy since reset.

Configuration writes land in a shadow set. Writing START marks the shadow
set as pending. When the unit is idle, the pending set is copied into the
active set. `start_o` then pulses for one cycle, on the edge after the copy.

Because of the shadow set, a core can write a complete second task while
the first one runs. The second task starts on the cycle after the first one
ends, with no core involved. That is the double buffering. While a pending
set is waiting, further configuration writes and START stall: their `ready`
stays low until the unit takes the set. This is simple back-pressure in
place of an error flag.

The DMA's buffer is built with `DOUBLE_BUFFER = 0`. There, writes also wait
while a transfer runs.

`hw_barrier` is a single register at 0x7C2, reachable from every core. A
core arrives by writing it. The write is not acknowledged (ready stays low)
until two things hold:

1. every core has written it, and
2. the GeMM, the MaxPool and the DMA are all idle.

Then all cores are released on the same edge. Waiting for idle units is what
makes the barrier a fence: after it, every result an accelerator was asked
for is in the scratchpad.

Reading 0x7C2 never blocks. It returns `{unit busy flags, arrival mask}`.

## Data: the banked scratchpad and the crossbar

The scratchpad is 128 kB, made of 32 single-port banks. Each bank is 64 bits
wide and 512 rows deep (`spm_bank`: registered read, byte strobes). Addresses
are byte addresses, interleaved by word:

```
bank = addr[7:3]      row = addr[16:8]      (addr[2:0] selects the byte)
```

So 32 consecutive 64-bit words fall in 32 different banks. One 512-bit beat
covers 8 banks. A 2048-bit GeMM result covers all 32.

Every data port in the cluster is split into 64-bit word ports, 75 in all:

| ports | owner | class |
|-------|-------|-------|
| 0–2   | core data ports | 1 |
| 3–10  | GeMM A reader (512 b) | 8 |
| 11–18 | GeMM B reader (512 b) | 8 |
| 19–50 | GeMM C writer (2048 b) | 32 |
| 51–58 | MaxPool reader (512 b) | 8 |
| 59–66 | MaxPool writer (512 b) | 8 |
| 67–74 | DMA (512 b) | 8 |

`tcdm_interconnect` grants each bank to at most one word port per cycle.
The class of a port is the width, in words, of the wide port it belongs to.
It arbitrates in two steps:

1. Only requests of the highest class present for that bank compete. So a
   wide port beats a narrow one.
2. Among those, a per-bank round-robin pointer, which moves past each
   winner, picks the winner.

A grant is `req_ready` in the same cycle as the request. Read data comes
back on `rsp_valid`/`rsp_data` exactly one cycle later. Single-cycle access
here means one request per cycle per bank with a fixed one-cycle read
latency. A port that loses must hold its request unchanged until it wins;
an assertion checks this.

Because of the classes, a core loses every conflict with an accelerator.
That is intended: the accelerators carry the bandwidth, and a core only
waits a few cycles.

## Data streamers

A data streamer turns a handful of loop registers into a stream of
wide words. Each channel has 13 registers:

- `base`,
- `bound[0..5]`,
- `stride[0..5]`.

`streamer_agu` walks a 6-deep loop nest, with loop 0 innermost. It produces
`base + Σ idx[d]·stride[d]`, one address per cycle while its consumer is
ready. A bound of 0 counts as 1, so unused loops can be left at zero.

`streamer_reader` takes each address as the start of a wide word: lane `l`
reads the 64-bit word at `addr + 8·l`. Each lane:

- requests on its own, and retries alone if it loses arbitration,
- stores its response in its own FIFO, 4 deep.

A lane may only issue while its FIFO plus its request in flight has room,
so a response always has space. The wide word goes out once every lane's
FIFO has data. With no conflicts, it sustains one wide word per cycle after
two cycles of latency. In the tests, 64 words take 67 cycles.

`streamer_writer` is the mirror image. A wide input word is accepted when the
AGU has an address and every lane FIFO has room. Each lane then drains to
the crossbar on its own. Its busy flag stays high until the last word is
written, so a task does not end early.

The FIFOs let lanes lose arbitration independently, and they smooth out
conflicts whenever the stream has slack. Slack exists while the accelerator
is stalled elsewhere, or while another channel runs ahead. A lane issues at
most one word per cycle, though. So when an accelerator takes one word per
cycle with no pause, a cycle lost to a conflict is lost for good. The
section on the convolution below gives a measured case.

## GeMM tile

`gemm_accel` is an 8×8×8 signed int8 matrix multiply with int32
accumulation. That is 512 multipliers, and it does one full 8×8×8 step per
cycle. Each step takes one 512-bit A tile (byte `m*8+k`) and one 512-bit B
tile (byte `k*8+n`), and adds their product into an 8×8 int32
accumulator. After `K_TILES` steps, the 8×8 int32 result (word `m*8+n`,
2048 bits) goes to the C writer. The accumulator restarts for the next
output tile. A task makes `N_OUT` output tiles, so it takes
`K_TILES·N_OUT` A/B words.

`gemm_tile` wraps the datapath with a CSR buffer, two 512-bit readers (A, B)
and a 2048-bit writer (C). All three streamers start from the same START.
The streamers' loops set the order in which tiles are visited:

| offset | register |
|--------|----------|
| 0–12  | A channel: base, bound[0..5], stride[0..5] |
| 13–25 | B channel |
| 26–38 | C channel |
| 39 | K_TILES |
| 40 | N_OUT |
| 41 | START |
| 42 | STATUS |
| 43 | PERF |

The tile exports `mac_cycles_o`, the number of 8×8×8 steps done.

Example: C (8×16) = A (8×16) · B (16×16). A's two k-tiles are 64 bytes apart
at `A`. B tile (n, kk) is at `B + 64·(2n+kk)`. C tile n is at `C + 256·n`.
The registers are:

- A loops: (2, stride 64), (2, stride 0). The A tiles are read again for
  every output tile.
- B loops: (2, 64), (2, 128).
- C loop: (2, 256).
- K_TILES = 2, N_OUT = 2.

This takes 4 steps. The end-to-end test runs this task twice, the second
time preloaded.

## MaxPool tile

`maxpool_accel` holds 8 kernels. Each takes 64 bits of every 512-bit input
word, that is 8 signed int8 channels, and keeps a running maximum per
channel. The reader streamer delivers the elements of one pooling window as
consecutive words. After `WINDOW` words, the 64 maxima go out as one 512-bit
word. So window size and stride are purely run-time settings:

- A 2×2 window with stride 2 is the loops (2, 64), (2, row), (ox, 128),
  (oy, 2·row), with WINDOW = 4.
- A 3×3 window with stride 1 is (3, 64), (3, row), (ox, 64), (oy, row), with
  WINDOW = 9.

Either way, it costs one cycle per window element.

The registers of `maxpool_tile` are:

| offset | register |
|--------|----------|
| 0–12  | input channel |
| 13–25 | output channel |
| 26 | WINDOW |
| 27 | N_OUT |
| 28 | START |
| 29 | STATUS |
| 30 | PERF |

## DMA

`dma_engine` moves 512-bit beats between AXI and the scratchpad. A transfer
is REPS rows of ROW_BEATS beats. Row r goes from `SRC + r·SRC_STRIDE` to
`DST + r·DST_STRIDE`. Having separate source and destination strides is
what makes it a 2D DMA.

| offset | register |
|--------|----------|
| 0 | SRC |
| 1 | DST |
| 2 | ROW_BEATS |
| 3 | SRC_STRIDE |
| 4 | DST_STRIDE |
| 5 | REPS |
| 6 | DIR: 0 is AXI→SPM, 1 is SPM→AXI |
| 7 | START |
| 8 | STATUS |
| 9 | PERF |

**AXI→SPM.** One INCR read burst per row is issued as soon as AR is ready,
so several rows are in flight. R beats feed a `streamer_writer` with loops
(ROW_BEATS, 64) and (REPS, DST_STRIDE).

**SPM→AXI.** One write burst per row is announced on AW. A
`streamer_reader` with loops (ROW_BEATS, 64) and (REPS, SRC_STRIDE) feeds W,
and WLAST closes each row. The transfer ends when every B response has
arrived.

Both directions reach one beat per cycle with no stalls. The test moves 12
beats in 15 busy cycles, counting setup. The AXI subset is: INCR bursts of
full 64-byte beats, at most 256 beats per row, 64-byte aligned addresses,
and no IDs.

## Programming the cluster: one layer sequence

`tb/tb_snax_cluster.sv` is the clearest usage example. Its three threads
do what three management cores would do:

1. **Core 2** runs three DMA transfers in: A with a 2D layout, then B, then
   the feature map. Each time it polls DMA STATUS. Then **all cores** write
   the barrier.
2. **Core 1** writes a GeMM task and START. It waits until the GeMM is busy,
   then writes a second task and START. STATUS shows the second task
   pending, and it starts by itself when the first ends. At the same time,
   **core 2** starts a MaxPool task, and **core 0** stores and loads its own
   data. Core 0's port loses bank conflicts to the accelerators and stalls.
3. **All cores** hit the barrier again. It releases only when both
   accelerators are idle. Core 0 then reads the pooled map through its data
   port; this is the input of the layer a core would run.
4. **Core 2** has the DMA write both GeMM results and the pooled map to
   external memory. The testbench checks them there against a reference.

## A whole layer: convolution as one GeMM task

`tb/tb_mini_network.sv` runs a small network on the full cluster. The input
is 18×18×16 int8. A 3×3 convolution takes it to 16×16×16, a 2×2 max-pool to
8×8×16, and a fully connected layer to 10 outputs.

The convolution needs no im2col copy. The input is stored as
`[cblk][y][x][8 channels]`, so the 8 pixels × 8 channels of one filter tap
are 64 contiguous bytes: exactly one A word. The six A loops, innermost
first, are:

| loop | bound | stride (bytes) |
|------|-------|----------------|
| dx   | 3  | 8 |
| dy   | 3  | 144 |
| cblk | 2  | 2592 |
| nblk | 2  | 0 |
| x0   | 2  | 64 |
| y    | 16 | 144 |

B walks the weight tiles with the same three K loops. So one task with
K_TILES = 18 and N_OUT = 64 computes the whole layer in 1,152 steps.

It runs in 1,555 busy cycles, a PE utilization of 74%. The loss comes from
bank conflicts between the sliding A words and the B words. A lane issues
at most one word per cycle, so a cycle lost to a conflict cannot be made
up, and deeper FIFOs do not help. A layout that keeps A and B in disjoint
bank groups would remove these conflicts.

The int32 → int8 requantization before pooling is done by a core thread.
It uses an arithmetic shift by 10 with saturation, which is this
testbench's choice. It writes the map in a layout where the four words of
a pooling window line up lane by lane.

## One roofline tile

`tb/tb_tiled_matmul.sv` runs one tile of a tiled matrix multiplication:
C (32×32 int32) = A · B, both 32×32 int8. It goes DMA in, GeMM, DMA out.

The A tiles sit in banks 0–7 and the B tiles in banks 8–15, so the two
readers never conflict. The DMA puts them there itself, using its
destination stride.

The results:

- The GeMM does 64 steps in 83 busy cycles, 77%. Each 2048-bit C write
  holds all 32 banks for one cycle, and with K = 32 there is one write
  every four steps. Longer K raises the figure.
- The DMA moves 64 beats out in 68 busy cycles.

## Where this departs from the paper, and what it leaves out

- **Bank organisation.** The source gives only the SPM size (128 kB). Its
  cluster drawing shows a row of bank boxes but no count or width. Here:
  32 banks of 64 bits, interleaved by word.
- **GeMM output width.** The source says both "512-bit output streaming
  bandwidth" and "one 2,048-bit write port". This design follows the
  2048-bit port: one 8×8 int32 tile per output.
- **No requantization.** The GeMM writes int32 results, and the MaxPool
  engine reads int8. Nothing in the source covers the conversion between
  them, and no unit here does it. In a network it falls to a core.
- **Priorities.** "Round robin, higher-bandwidth ports first" is built as a
  strict class order with round robin inside a class. A core port therefore
  waits as long as accelerators keep hitting the same bank.
- **Register maps, CSR addresses, status bits, FIFO depths and the number of
  hardware loops (6)** are this design's own choices.
- **Not included:**
  - the RISC-V management cores and their instruction memory. They are
    existing cores that the source reuses, not designs of its own.
  - the AXI network outside the cluster.
  - the compiler flow that generates the register values.
  - accelerator generators and a configurable set of accelerators. This RTL
    fixes the GeMM + MaxPool configuration, with the three-core layout of
    the source's main experiment.

## How far the sizes carry

Everything is at full size:

- 128 kB SPM, 32 banks,
- 8×8×8 GeMM, 512 PEs,
- 8 max-pool kernels,
- 512-bit DMA,
- three cores.

A few checks on how the source's workloads fit:

- **The small convolution → max-pool → fully-connected network (input
  18×18×16, 3×3 convolution to 16×16×16).** Under 70 kB of buffers. The
  convolution maps to 1,152 GeMM steps.
- **Tiled matrix multiplication for a roofline sweep.** Ridge point at 8
  MAC per byte, given 512 MAC/cycle against 64 B/cycle. Square tiles up to
  about 120 fit when single-buffered.
- **MLPerf Tiny autoencoder.** About 264 kB of weights, so they must be
  streamed in by the DMA layer by layer.
- **ResNet-8.** About 78 kB of weights plus activations; it fits with
  per-layer weight fetches.

## Simulating

Every block has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=… failures=…`. With Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
    rtl/snax_pkg.sv tb/tb_snax_cluster.sv --top-module tb_snax_cluster
./obj_dir/Vtb_snax_cluster +verilator+rand+reset+2
```

Replace the testbench name to run any other. `+verilator+rand+reset+2`
starts every flop at a random value. The designs reset everything that
matters, and the testbenches rely on that.

`tb_snax_cluster` runs the whole cluster at its default parameters in under
a minute. It counts every mechanism and fails if one never happens:

- DMA in and out,
- barrier rounds,
- GeMM tasks and a preloaded (pending) task,
- MaxPool tasks,
- cycles in which GeMM and MaxPool run together,
- core-port stalls on conflicts,
- accelerator-port stalls,
- AXI back-pressure,
- core reads,
- GeMM steps.

`tb_mini_network` takes about one minute, and `tb_tiled_matmul` a few
seconds. Both check every intermediate tensor against a reference.

`tb/axi_mem_model.sv` is a behavioural AXI memory for the testbenches. It
can stall at random.

| file | what it is |
|------|------------|
| `rtl/snax_pkg.sv` | sizes, CSR map, request structs, streamer register decoding |
| `rtl/sync_fifo.sv` | FIFO used by the streamers |
| `rtl/spm_bank.sv`, `rtl/shared_spm.sv` | scratchpad banks |
| `rtl/tcdm_interconnect.sv` | word-port crossbar with class + round-robin arbitration |
| `rtl/csr_buffer.sv`, `rtl/csr_router.sv`, `rtl/hw_barrier.sv` | control path |
| `rtl/streamer_agu.sv`, `rtl/streamer_reader.sv`, `rtl/streamer_writer.sv` | data streamers |
| `rtl/gemm_accel.sv`, `rtl/gemm_tile.sv` | GeMM datapath and tile |
| `rtl/maxpool_accel.sv`, `rtl/maxpool_tile.sv` | MaxPool datapath and tile |
| `rtl/dma_engine.sv` | 2D DMA |
| `rtl/snax_cluster.sv` | the cluster |

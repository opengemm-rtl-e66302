# An OpenGeMM-style GeMM accelerator cluster in SystemVerilog

Matrix multiplication dominates the arithmetic in convolutional networks and
transformers. Edge accelerators often build an array that can do hundreds of
multiply-accumulates per cycle, then leave it idle most of the time. The
array waits while the control CPU writes the next configuration. It waits
for operands to arrive from memory. It waits while results are written back.
It waits when two operand streams want the same memory bank.

This RTL implements the accelerator cluster described in the OpenGeMM paper
(X. Yi et al., "OpenGeMM: A High-Utilization GeMM Accelerator Generator with
Lightweight RISC-V Control and Tight Memory Coupling", ASP-DAC 2025). The
design keeps the array busy with three mechanisms:

* **Configuration pre-loading.** The CPU programs the next operation into a
  shadow register set while the current one runs. The new configuration takes
  over in one cycle when the accelerator becomes idle.
* **Input pre-fetch and output buffering.** Each operand streamer runs ahead
  of the array by up to three tiles. The result streamer can hold three
  finished tiles while it writes them back.
* **Strided memory access.** Every streamer computes its addresses from
  programmable loop bounds and strides. Software can therefore place operand
  tiles in banks that do not collide.

With these mechanisms, the included end-to-end test runs a 64×64×64 int8
product at 99.2 % array utilization: 512 compute cycles in 516 busy cycles.

The host CPU, its instruction cache, the DMA engine and the system bus are
not part of this RTL. The CPU-facing configuration port and the scratchpad's
512-bit DMA port are top-level ports instead.

## Block diagram

```
            host CSR port                           512-bit DMA port
                 │                                          │
          ┌──────▼──────┐                ┌──────────────────▼──────────────────┐
          │ csr_manager │                │ spm: mem_xbar + 32 × spm_bank        │
          │ shadow/active│               │ (1056 × 64 b each, word-interleaved) │
          └──┬───┬───┬──┘                └──▲─────────────▲──────────────▲──────┘
     start,  │   │   │  configs            8 rd ports     8 rd ports     32 wr ports
             │   │   │                 ┌────┴─────┐  ┌────┴─────┐  ┌─────┴──────┐
             │   │   └────────────────►│streamer A│  │streamer B│  │ streamer C │
             │   │                     │ AGU+FIFO3│  │ AGU+FIFO3│  │ FIFO3+AGU  │
             │   │                     └────┬─────┘  └────┬─────┘  └─────▲──────┘
             │   │                    512 b │        512 b│        2048 b│
             │   │                     ┌────▼─────────────▼──────────────┴─────┐
             │   └────────────────────►│ gemm_core: gemm_ctrl + gemm_array     │
             │                         │ 8 × 8 mesh of 8-wide dotprod units    │
             └────────────────────────►└───────────────────────────────────────┘
```

## How a matrix product is cut into work

The core computes C = A × B for an M×K matrix A, a K×N matrix B and an M×N
result C. The array handles one *tile step* per cycle. In one step it takes an
Mu×Ku tile A' and a Ku×Nu tile B' and adds A'·B' into an Mu×Nu block of
accumulators. The defaults are Mu = Nu = Ku = 8.

The array is a mesh of Mu×Nu dot-product units, each Ku elements wide. Row m
of A' goes to every unit in mesh row m. Column n of B' goes to every unit in
mesh column n. So every fetched operand byte is used Nu or Mu times. Each
unit multiplies its Ku pairs, sums them in an adder tree and adds the result
to its own accumulator, all in one cycle.

The steps run in three loops, with M1 = M/Mu, N1 = N/Nu and K1 = K/Ku:

```
for m1 < M1:            // output tile row
  for n1 < N1:          // output tile column
    for k1 < K1:        // reduction, innermost
      acc = (k1 == 0 ? 0 : acc) + A'(m1,k1) · B'(k1,n1)
    emit C'(m1,n1) = acc
```

This is an *output-stationary* dataflow. The 32-bit partial sums stay in the
array until they are final. Only finished tiles travel to memory, one every
K1 cycles. The loop controller (`gemm_ctrl`) resets the accumulators by
adding zero on the first k1 step. After the last k1 step it copies the sums
into a separate result register. That lets the next output tile start
accumulating in the very next cycle while the previous one waits to be taken.

The core never computes an address. It consumes tiles from two streams and
produces tiles on a third. Each of the three **streamers** has its own
address generator (`agu`) that replays the same loop nest over memory:

```
addr(port p) = base + i0·tstride0 + i1·tstride1 + i2·tstride2 + p·sstride
```

Loop 0 is the innermost; the bounds are programmed per streamer. The
*temporal* strides move from tile to tile. The *spatial* stride `sstride`
separates the words that the parallel ports fetch in the same cycle. A
streamer issues one address per port per tile.

### Tile formats in memory

The memory word is 64 bits. The core expects these tile formats:

| Tile | Ports | Word p holds |
|------|-------|--------------|
| A' (8×8 int8) | 8 read | row p of the tile, element k in byte k |
| B' (8×8 int8) | 8 read | **column** p of the tile, element k in byte k. B tiles are stored transposed. |
| C' (8×8 int32) | 32 write | elements 2p (bits 31:0) and 2p+1 of the tile, row-major (element index m·8+n) |

A typical contiguous layout with K1 = K/8 uses 64-byte tiles, `sstride` = 8
everywhere, and these programs:

| Streamer | bounds (loop 0, 1, 2) | tstrides (loop 0, 1, 2) |
|----------|----------------------|-------------------------|
| A | K1, N1, M1 | 64, 0, 64·K1 |
| B | K1, N1, M1 | 64, 64·K1, 0 |
| C | N1, M1, 1 | 256, 256·N1, 0 |

The zero strides are how operand reuse is expressed. For every n1, A replays
the same row of tiles; for every m1, B replays the same column.

## Keeping the array busy

### Configuration pre-loading (`csr_manager`)

All settings live in 32-bit registers that the host writes one per cycle.
Writes go to a **shadow** set. Writing `LAUNCH` marks the shadow set as
pending. In the first cycle in which the core and all streamers are idle, the
pending set is copied into the **active** set, and a one-cycle `start` pulse
launches the core and all three streamers together.

The host can therefore write the whole next operation while the current one
computes. Only two requests are held off (ready low) until the pending launch
has happened:

* a write to the pending configuration;
* a second `LAUNCH`.

The operation after that can therefore be queued as well. In the test, the
second product is fully programmed during the first. The first cycle after
the first product ends is already the launch of the second.

### Pre-fetch buffers (`streamer_reader`, `stream_fifo`)

An input streamer starts fetching right after launch. It requests a new tile
whenever the buffered tiles plus the tiles in flight leave room in its
3-entry buffer. Each of its 8 ports is granted on its own. A port that loses
a bank conflict keeps asking while the others are done. The tile enters the
buffer once all 8 words are back.

At full speed the streamer delivers one tile per cycle. That matches the
array's consumption, so a short stall of one streamer is absorbed by the
tiles it already holds.

A request takes one cycle to return and one more to enter the buffer, so a
tile is in flight for two cycles. A 2-deep buffer therefore cannot keep up
with one tile per cycle even without conflicts: the 64³ interleaved product
reaches 66 % utilization with depth 2 and 99.2 % with the default depth 3.
Depth 4 additionally absorbs the bank conflicts of a contiguous layout
(99.0 % instead of 74.5 % for 64³).

### Output buffering (`streamer_writer`)

A finished C' tile is 2048 bits. It needs all 32 write ports, and thanks to
word interleaving it touches all 32 banks. The writer takes tiles into a
3-entry circular buffer and writes the oldest one word by word as banks
become free. The array keeps computing meanwhile and stalls only when all
three buffers are occupied. That happens only when K1 is so small that tiles
are produced faster than they can be written. K = 8 (K1 = 1) is such a case,
and the test exercises it. Because reads have priority, the writer gets
only the 16 banks the operand reads leave free in each cycle. A tile then
takes two cycles to write, so with K1 = 1 the array runs at 50 % whatever
the buffer depth.

### Banks, conflicts and layout (`mem_xbar`, `spm`)

Word address w lives in bank w mod 32, row w div 32. An aligned 64-byte
operand tile therefore occupies 8 consecutive banks, one of four bank groups.

The crossbar grants each bank to one requester per cycle, in three priority
classes:

1. The DMA port has fixed priority.
2. Next come the 16 operand read ports, round-robin among themselves.
3. The 32 result write ports get only the banks that no read port wants.

The third rule matters. Without it, every write-back would steal a cycle from
the operand streams. In the 64³ test that costs about 12 % utilization (88 %
instead of 99 %). With reads first, a C' tile is written in the 16 banks that
the current A' and B' fetches leave free, over two or three cycles, and the
output buffer hides that time.

Software controls the remaining conflicts, between A and B, through the
strides. If A tiles are placed in even 64-byte slots and B tiles in odd ones
(tile stride 128 bytes), A always uses bank groups 0 and 2 and B always uses
1 and 3, so they never collide. The test's third product uses this layout.
The first product uses a contiguous layout and does meet conflicts.

## Programming interface

CSR port: `csr_req_valid_i/ready_o`, a 5-bit word index `csr_req_addr_i`,
`csr_req_write_i` and `csr_req_wdata_i`. Every accepted request is answered
one cycle later on `csr_rsp_valid_o/csr_rsp_rdata_o`.

| Index | Register |
|-------|----------|
| 0, 1, 2 | K1, N1, M1: core loop bounds in tiles. 0 counts as 1. |
| 3 + 8s | streamer s base byte address (s = 0 A, 1 B, 2 C) |
| 4 + 8s … 6 + 8s | bound of loop 0, 1, 2 |
| 7 + 8s … 9 + 8s | temporal stride of loop 0, 1, 2 (bytes) |
| 10 + 8s | spatial stride between ports (bytes) |
| 27 | write: LAUNCH. Read: bit 0 busy, bit 1 launch pending. |
| 28 | cycles with the accelerator busy (free-running) |
| 29 | cycles in which the array computed (free-running) |
| 30 | BOUNDS: K1, N1, M1 packed as `{2'b0, M1[9:0], N1[9:0], K1[9:0]}`. Writing it sets registers 0–2 in one CSR write; reading returns their low 10 bits packed the same way. |

Utilization over an operation is Δ(reg 29) / Δ(reg 28).

A host program for one product is:

1. Write registers 3–26, and the core bounds either in 0–2 or, with one
   write, in 30.
2. Write 27.
3. Optionally write the next product's registers 0–26 and 27 right away.
4. Poll register 27 until it reads 0.

The DMA port (`dma_*`) moves 8 consecutive 64-bit words, aligned to 8 words,
in one cycle. Writes complete at the clock edge. Read data comes back on
`dma_rdata_o` with `dma_rvalid_o` one cycle later. The DMA port always wins
its banks.

## Parameters

The defaults are the paper's case-study instance. They live in
`rtl/opengemm_pkg.sv` and are repeated as module parameters.

| Name | Default | Meaning |
|------|---------|---------|
| MU, NU, KU | 8, 8, 8 | array rows, columns, dot-product width |
| PA, PB, PC | 8, 8, 32 | operand and accumulator bits (signed) |
| DSTREAM | 3 | pre-fetch / output buffer depth |
| read ports | 16 (8 for A, 8 for B) | 64-bit scratchpad read ports |
| write ports | 32 | 64-bit scratchpad write ports |
| NBANK, DMEM | 32, 1056 | banks, 64-bit words per bank (270,336 bytes) |
| NLOOPS | 3 | temporal loops per streamer |

`dotprod`, `gemm_array` and `gemm_core` accept any sizes and precisions. The
top level derives its port counts from the tile widths, so it needs
MU·KU·PA and NU·KU·PB to be multiples of 64 bits, and it uses the same
streamer design for A and B. It therefore assumes MU = NU.

## Where this RTL departs from, or adds to, the paper

These are the design's own choices, made where the paper gives no detail:

* Register map and register encodings. The paper allows several settings
  to share one CSR so that fewer writes are needed; here only the three core
  loop bounds have a packed register (30), and every setting also has a
  register of its own.
* The two-level shadow/active pre-loading scheme, and its stall rules.
* Every valid/ready handshake, one-cycle memory latency, and signed operands
  with wrap-around accumulation.
* Tile formats, in particular B' stored column-wise.
* Word-interleaved bank mapping and the arbitration order
  (DMA > reads > writes, round-robin within a class).
* "Two-dimensional strides" is read as one temporal stride per loop plus one
  spatial stride between ports.
* All three streamers and the core start on the same launch. The paper's
  timing sketch lets streamers be configured slightly ahead of the core.
  Here pre-fetching still starts the cycle after launch.
* The result stream is 2048 bits wide (32 ports × 64 bits, as in the
  parameter table). One block diagram in the paper labels it 512 bits; an
  8×8 tile of 32-bit results does not fit in 512 bits.

Not included:

* the RV32I host core and its instruction cache;
* the DMA engine;
* the AXI system interconnect and the peripherals.

The paper takes these from an existing platform and does not describe them.
The paper's reported area, power and cycle counts on full networks are
properties of a synthesized chip and a software flow, and this RTL does not
reproduce them. The paper's generator is written in Chisel; this is a
hand-written SystemVerilog equivalent of the case-study instance, not its
output.

## How far it is verified

Every module has a self-checking testbench in `tb/` (`tb_<module>.sv`) that
compares against values computed in the testbench. Each testbench has been
shown to fail on a deliberately broken copy of its module. What they cover:

| Testbench | Checks |
|-----------|--------|
| `tb_dotprod`, `tb_gemm_array`, `tb_gemm_core` | Random int8 products, including −128 and 127, against reference sums. At full input rate, exactly M1·N1·K1 + 1 cycles from start to the last tile. |
| `tb_gemm_ctrl` | Loop order, accumulator reset, stall rules, rate. |
| `tb_agu`, `tb_stream_fifo` | The address formula; FIFO ordering, full/empty and count. |
| `tb_streamer_reader`, `tb_streamer_writer` | Random grants and strides; a pre-fetch depth of exactly 3 tiles; one tile per cycle when unobstructed. |
| `tb_mem_xbar`, `tb_spm`, `tb_spm_bank` | One grant per bank, priority classes, read data routing, the full 270 KB memory through DMA and ports. |
| `tb_opengemm_top` | Three products at the default size, with result comparison and counts of each mechanism: pre-loaded launch, pre-fetch, compute during write-back, bank conflict, strided layout, input stall, output-full stall, packed bounds write. The 64³ product must reach ≥ 95 % utilization; it reaches 99.2 %. |
| `tb_workloads` | Matrix sizes of the kind the design is evaluated on: the cubes 8³, 16³, 32³, 64³ and 128³ and six random (M,K,N) with each side a multiple of 8 up to 256 that fit the scratchpad. Every result element is compared, the array must compute in exactly M1·N1·K1 cycles, and products of 64 or more steps with K ≥ 32 must reach 90 % utilization. Measured: 20.0 %, 66.7 %, 94.1 %, 99.2 % and 99.9 % for the cubes (the loss is a fixed 4 cycles of fill and drain per launch), 97.5 – 99.9 % for the random sizes. |
| `tb_buffer_depths` | Three copies of the cluster with streamer buffers 2, 3 and 4 deep, driven with the same requests; every result of every copy is compared. Measured utilization (depth 2 / 3 / 4): 64³ contiguous 49.9 / 74.5 / 99.0 %; 64³ interleaved 66.4 / 99.2 / 99.2 %; (64,8,64) 49.6 / 50.0 / 50.4 %. |

Not verified:

* timing closure or area;
* behaviour with mis-programmed configurations. Streamer bounds that do not
  match the core's tile counts leave the accelerator busy.

## Simulating

Every testbench builds the same way with Verilator 5. Run this from the
directory holding `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Irtl -Itb rtl/opengemm_pkg.sv \
          tb/tb_opengemm_top.sv --top-module tb_opengemm_top -Mdir obj -o sim
./obj/sim
```

Replace `tb_opengemm_top` with any other `tb_*` name. Each run prints
`TB_RESULT checks=N failures=F`. The top-level test, `tb_workloads` and
`tb_buffer_depths` run at the full default size; each builds in well under
a minute and simulates in about a minute. The other tests take seconds.

## Files

* `rtl/opengemm_pkg.sv`: constants, configuration structs, register indices.
* `rtl/dotprod.sv`, `rtl/gemm_array.sv`, `rtl/gemm_ctrl.sv`,
  `rtl/gemm_core.sv`: the GeMM core.
* `rtl/csr_manager.sv`: configuration registers with pre-loading.
* `rtl/agu.sv`, `rtl/stream_fifo.sv`, `rtl/streamer_reader.sv`,
  `rtl/streamer_writer.sv`: the data streamers.
* `rtl/rr_arbiter.sv`, `rtl/mem_xbar.sv`, `rtl/spm_bank.sv`, `rtl/spm.sv`:
  the scratchpad and its crossbar.
* `rtl/opengemm_top.sv`: the cluster.
* `tb/`: one self-checking testbench per module, plus `tb_workloads.sv`
  (the size sweep above) and `tb_buffer_depths.sv` (the depth sweep).

# RC2F: one FPGA shared by four independent accelerators

RC2F is the FPGA-side framework of the RC3E cloud environment (Knodel and
Spallek, "RC3E: Provision and Management of Reconfigurable Hardware
Accelerators in a Cloud Environment"). Its idea is to cut one physical FPGA
into up to four *virtual FPGAs* (vFPGAs): regions that different users fill
with their own accelerators through partial reconfiguration, while a small
static part stays loaded and gives every region the same interfaces to the
host. A vFPGA sees

* a **write FIFO** and a **read FIFO** of 32-bit words, for streaming data
  to and from the host, which also form the boundary between the host's
  clock and the vFPGA's own user clock;
* a **user configuration space (ucs)**, a small dual-port memory of 8-bit
  bytes, for commands and status that the user defines.

The static part (the "RC2F core") holds the PCIe endpoint, a controller with
a **global configuration space (gcs)** that drives reset, loopback and clock
control signals for the regions, and the clocking that switches off the
clock of every region nobody has allocated.

This repository gives SystemVerilog for the RC2F core and the vFPGA
interfaces, with the matrix-multiplication accelerator that the paper uses
as its example workload placed in every region. The PCIe endpoint (a
third-party IP core) and all host software (hypervisor, driver, API) are
outside it: the top level's ports are the endpoint's channels.

```
            PCIe endpoint (not included): one tagged stream per direction + memory port
                 |  h2c stream   ^  c2h stream      | mem port (8-bit)
   +-------------v---------------+------------------v------------------------------+
   | rc2f_bus   channel demux    round-robin mux    region decode                   |
   +----+----------------+-----------+-----------------+---------------+-----------+
        | 32             ^ 32        | 8               |8              |
   +----v----------------+-----------v---+      +------v------+  +-----+---------+
   | vfpga_slot i (x4)                   |      | rc2f_gcs    |  | rc2f_clocking |
   |  write FIFO   read FIFO   ucs       |<-----| alloc, urst,|->| gate per vFPGA|
   |     |  (async)   ^        ^         |      | loop, reset |  +-------+-------+
   |     v            |        |         |      +-------------+          |
   |   matmul_core (user design) <------------------------- vclk[i] -----+
   +-------------------------------------+
```

## Clock domains and resets

This is the part that needs most care when the design is changed.

* `sys_clk` is the endpoint's clock. Everything the host touches runs on it:
  the bus, the gcs, the host ports of the FIFOs and of the ucs.
* `usr_clk` is the user clock. `rc2f_clocking` makes one gated copy,
  `vclk[i]`, per vFPGA. Bit *i* of the gcs register `GCS_ALLOC` is
  synchronised into `usr_clk` and enables a latch-based clock gate. A
  vFPGA that is not allocated gets no clock edges at all. The user design,
  the user-side halves of its FIFOs and the user port of its ucs all run on
  `vclk[i]`. While a region's clock is stopped the host can still write up
  to a FIFO's depth into it. The words wait there until the region is
  allocated.
* The only paths between the two domains are the two asynchronous FIFOs
  (Gray-code pointers, two-flop synchronisers), the ucs (each byte has a
  single writer, see below), and the gcs control levels (allocation, user
  reset, loopback). The control levels pass through two-flop synchronisers.
* Resets are asynchronous and active high. `sys_rst` (from the endpoint)
  and the gcs full reset together form `fw_rst`, which resets the bus and
  both sides of every FIFO. The user reset of a vFPGA (`GCS_URST` bit)
  resets only its user design. Every reset enters a user clock domain
  through `rst_sync`: assertion takes effect at once, release is
  synchronous. The raw request is also ORed into the synchroniser output,
  so a region whose clock is stopped is still reset at once.
* A few registers that feed asynchronous resets are given power-up values
  (`= '0` in their declarations), as FPGA flip-flops have. Without them a
  simulator that starts every flop at a random value can begin with a reset
  net already high. That reset would then never see a rising edge.

## What the host sees

### Memory port: gcs and ucs

The memory port carries 8-bit accesses. `mem_region` selects the target:
0 is the gcs and 1+*i* is the ucs of vFPGA *i*. A read returns `mem_rdata`
with `mem_rvalid` one `sys_clk` after the request.

gcs register map (`rc2f_pkg`):

| addr | name        | access | meaning |
|------|-------------|--------|---------|
| 0x00 | GCS_ID      | RO | 0xC2 |
| 0x01 | GCS_NVFPGA  | RO | number of vFPGA regions |
| 0x02 | GCS_CTRL    | W  | bit 0: full reset. Clears all gcs registers and holds `fw_rst` for 4 clocks |
| 0x03 | GCS_ALLOC   | RW | bit *i*: vFPGA *i* allocated, its clock runs (reset value 0: all clocks off) |
| 0x04 | GCS_URST    | RW | bit *i*: hold user design *i* in reset |
| 0x05 | GCS_LOOP    | RW | bit *i*: test loopback of vFPGA *i* |
| 0x06 | GCS_WFULL   | RO | bit *i*: write FIFO *i* full |
| 0x07 | GCS_REMPTY  | RO | bit *i*: read FIFO *i* empty |

The ucs of each vFPGA holds 256 bytes split in two halves. The lower half
(0x00-0x7F) is written by the host and read by both sides. The upper half
(0x80-0xFF) is written by the user design and read by both sides. A write
into the other side's half is ignored. So every byte has exactly one writer,
and the two-clock memory needs no collision handling.

**Test loopback** (`GCS_LOOP`) connects the two FIFOs of a region on the
user clock. Every word the host writes comes back unchanged, and the user
design sees an empty input and a full output. The host path can then be
tested without a working accelerator.

### Streams and how the vFPGAs share them

The endpoint is modelled as one host-to-card and one card-to-host stream.
Each stream is 32 bits wide, carries at most one word per `sys_clk`, and
tags every word with a channel number, the vFPGA index.

* Host to card: `rc2f_bus` steers the word to the write FIFO of its channel.
  `h2c_ready` is low while that FIFO is full. `h2c_room` shows, per channel,
  which FIFOs can take a word. The endpoint can thus serve a different
  channel instead of waiting on a region whose clock is stopped.
* Card to host: the bus takes words from the non-empty read FIFOs in
  round-robin order into a registered valid/ready output. With *k* regions
  producing, each gets 1/*k* of the stream.

At a 200 MHz system clock one word per clock is 800 MB/s, the limit the
paper gives for its endpoint. The paper measures that two cores share this
bandwidth, and that four share it more strongly still. The full-size
testbench reproduces the trend with the matrix-multiplication workload
(input words per system clock per core; 16x16, two products per core):

| active cores | per core | total | paper, per core (MB/s of 800) |
|---|---|---|---|
| 1 | 0.498 | 0.498 | 509 |
| 2 | 0.396 | 0.793 | 398 |
| 4 | 0.199 | 0.797 | 198 |

One core is limited by its own compute. Its load phase and its compute
phase do not overlap (see below), so it takes input half of the time. With
two or more cores the shared stream becomes the bottleneck. The closeness of
the single-core figure to the paper's is partly chance. The paper's core
comes from an HLS tool, and its structure is not published.

### Host sequence

The paper's host API has the calls init, write, start, read and reset. They
map onto this hardware as follows:

1. init: write `GCS_ALLOC` (and clear `GCS_URST`) for the allocated region.
2. start: write 1 to byte 0x00 of the region's ucs (the core's *run* bit).
3. write: stream `2*N*N` words on the region's channel: A row by row, then B
   row by row, IEEE single precision.
4. read: collect `N*N` words of C, tagged with the channel. Byte 0x80 of
   the ucs counts finished products (modulo 256).
5. reset: set the region's `GCS_URST` bit, or do a full reset through
   `GCS_CTRL`.

## The example user design: `matmul_core`

The paper evaluates the framework with a streaming single-precision matrix
multiplication. 16x16 runs with up to four cores, 32x32 with up to two. Its
core was generated by HLS and is not described, so `matmul_core` is a
straightforward design of its own:

* **LOAD**: take `2*N*N` words (A, then B) into register arrays. This
  happens only while the run bit is set and the core is out of reset.
* **MAC**: for output row *i*, N clocks. In clock *k*, all N columns do
  `acc[j] = acc[j] + A[i][k]*B[k][j]` in parallel, using N multipliers and
  N adders.
* **OUT**: write the N accumulators of row *i* to the output stream.

Without stalls one product takes `2*N*N + N*(N+N) = 4*N*N` user clocks
(1024 at N=16). The testbench checks this count. `N` must be a power of two.

The arithmetic is in `fp32_pkg`. Multiply and add are rounded separately, to
nearest even; there is no fused multiply-add. Subnormal inputs and results
are flushed to zero, infinities are kept, and any NaN becomes
`32'h7FC00000`. The testbenches compare results bit for bit against a
reference that uses the simulator's double precision and rounds every
operation to single precision.

## Parameters

| module | parameter | default | origin |
|---|---|---|---|
| `rc2f_top` | `NUM_VFPGA` | 4 | paper: up to four vFPGAs per FPGA (at most 8 fit the gcs masks) |
| `rc2f_top` | `MM_N` | 16 | paper: 16x16 is the size run on four cores; 32 also works |
| `rc2f_top` | `FIFO_DEPTH` | 512 | own choice (one 36 Kb block RAM at 32 bits) |
| `rc2f_pkg` | stream / configuration widths | 32 / 8 | paper's block diagram |
| `rc2f_pkg` | configuration address width | 8 | own choice |

## Files

| file | contents |
|---|---|
| `rtl/rc2f_pkg.sv` | widths, region numbers, gcs register map |
| `rtl/fp32_pkg.sv` | single-precision multiply and add functions |
| `rtl/rc2f_top.sv` | top level: gcs, clocking, bus, four vFPGA slots |
| `rtl/rc2f_gcs.sv` | controller and global configuration space |
| `rtl/rc2f_clocking.sv`, `rtl/clock_gate.sv` | per-vFPGA clock gating |
| `rtl/rc2f_bus.sv` | endpoint channels to FIFOs, gcs and ucs |
| `rtl/vfpga_slot.sv` | one vFPGA region: FIFOs, ucs, loopback, user design |
| `rtl/async_fifo.sv` | dual-clock FIFO |
| `rtl/vcontrol_ucs.sv` | user configuration space |
| `rtl/matmul_core.sv` | example user design |
| `rtl/sync_2ff.sv`, `rtl/rst_sync.sv` | synchronisers |
| `tb/tb_*.sv` | one self-checking testbench per block, the end-to-end test and the full-size workload run |
| `tb/tb_fp32_ref_pkg.sv` | reference single-precision arithmetic for the benches |

## Simulating

Every testbench prints `TB_RESULT checks=<n> failures=<m>` and stops itself.
A watchdog counts a failure if the bench hangs. For example, with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl -y tb \
  rtl/rc2f_pkg.sv rtl/fp32_pkg.sv tb/tb_fp32_ref_pkg.sv tb/tb_rc2f_top.sv \
  --top-module tb_rc2f_top -o sim && ./obj_dir/sim
```

| bench | what it shows |
|---|---|
| `tb_async_fifo` | order and values across unrelated clocks, full after exactly DEPTH words, fill level |
| `tb_vcontrol_ucs` | both ports read both halves, writes into the other half ignored, zero start |
| `tb_rc2f_gcs` | register map, control outputs, status, full reset held 4 clocks and clearing masks |
| `tb_rc2f_clocking` | gated clocks get every edge or none, full-width pulses, enable latency |
| `tb_rc2f_bus` | channel steering, per-channel room, strict round robin (1/4 and 1/2 shares), back-pressure, memory decode |
| `tb_matmul_core` | 16x16 products bit-exact, 4*N*N clocks, run bit, stalls on both streams, status count |
| `tb_vfpga_slot` | loopback, user reset holding the core, stopped clock filling the FIFO, then recovery |
| `tb_rc2f_top` | end to end with four 4x4 cores. Counts clock gating, loopback, user reset, full reset, back-pressure in both directions, stream sharing and finished products; a mechanism that never happens is a failure |
| `tb_rc2f_top_full` | default size: 1, 2 and 4 cores of 16x16, every word checked, sharing trend as in the table above |
| `tb_rc2f_top_mm32` | two regions with 32x32 cores, one and then two cores active, every word checked |

Each bench sets its reset from 0 to 1 after time zero, so that the
asynchronous resets see a rising edge.

## How far this follows the paper

Taken from the paper:

* the partitioning into a static RC2F core and up to four vFPGA regions;
* per region a read FIFO, a write FIFO and a ucs;
* the 32-bit stream and 8-bit configuration widths;
* asynchronous FIFOs as the boundary between the system and user clocks;
* a dual-port ucs for user-defined commands;
* a gcs with full reset, user reset and test loopback;
* clocks switched off for unallocated regions;
* the sharing of the endpoint's bandwidth among the vFPGAs;
* a 16x16 single-precision streaming matrix multiplication as the user
  design.

This design's own choices, because the paper does not give them:

* the gcs register map, the ucs layout (split halves, run bit, status byte)
  and the memory-port region numbers;
* the FIFO depth and construction;
* the clock-gating circuit;
* the model of the endpoint as one tagged stream per direction, with
  round-robin return and per-channel room;
* the loopback point;
* which resets clear what;
* the whole micro-architecture and floating-point details of the matrix
  core.

Not included:

* the PCIe endpoint IP and the host software stack;
* partial reconfiguration itself (every region is built with the example
  core);
* the on-board DRAM and Ethernet the paper mentions;
* any model of resource use on a particular FPGA. The paper reports under
  3% of a Virtex-7 XC7VX485T for the four-region base design.

The 32x32 workload needs `MM_N=32`, which the default build does not have.
`tb_rc2f_top_mm32` builds the design with two regions and 32x32 cores. One
core takes 0.499 input words per clock. Two cores take 0.331 each, 0.662 in
total. The paper reports 279 and 277 MB/s per core, so its HLS core is
compute bound at 32x32. In this core, loading and computing both take time
proportional to N*N, so a 32x32 core is as hungry for input as a 16x16 one.

# HERO accelerator in SystemVerilog

A heterogeneous system pairs a general-purpose host processor with a
programmable many-core accelerator that shares the host's virtual address
space. The accelerator has no data caches. Each cluster of small 32-bit
RISC-V cores works out of a fast, software-managed scratchpad (L1). A DMA
engine moves tiles between that scratchpad and host memory, and the cores
can also reach any 64-bit host address directly.

This repository holds synthesizable RTL for the accelerator side of such a
system, sized like the evaluated configuration:

* one cluster of 8 cores;
* 128 KiB of L1 in 16 banks;
* a 256 KiB shared L2;
* 64-bit AXI networks.

The cores, their FPUs, the host and host memory are not RTL here. They appear
as ports of the top module `hero_accel`, and the testbenches model them.

## Block map

```
           core fetch x8        core data x8 (+ address-extension CSR)
               |                        |
          l0_icache x8              addr_ext x8 ----------------+ remote
               |                        | local                 | (AXI)
          icache_shared        tcdm_interconnect (14 x 16) --- 16 x l1_spm_bank
               |                 ^  ^  ^                        |
               |      dma_engine(4 ports)  axi_to_tcdm(2)    axi_mux (8:1)
               +--- axi_mux ---+                 ^              |
                     | wide                      | narrow       | narrow
                 axi_xbar (1x2)               axi_xbar (2x3) <--+--- host_req_i
                  |       |                    |     |     |
                  |       +------ axi_mux -----|-----+     +--> L1 (axi_to_tcdm)
                  |                 |          |
                  +--- axi_mux --- l2_spm      |
                                    iommu <----+  (host memory port)
   mailbox (host <-> device, interrupts)     perf_counters (in the cluster)
```

Address map:

| Range | Target |
|---|---|
| `0x1000_0000`–`0x1003_FFFF` | cluster L1 (128 KiB used) |
| `0x1C00_0000`–`0x1C03_FFFF` | L2 |
| anything else | host memory, through the IOMMU |

The wide network (DMA and instruction refills) has no path to L1.

## The L1 data path: banks and the TCDM interconnect

L1 is word-interleaved: word address bits `[5:2]` pick one of 16 banks and
the bits above pick the row. Each bank is a single-port SRAM with read data
one cycle after the request.

`tcdm_interconnect` connects 14 masters to the banks:

* masters 0–7 are the cores;
* masters 8–11 are the DMA engine (two write ports, two read ports);
* masters 12–13 are the AXI slave that lets the host or the narrow network
  write L1.

Each bank has its own round-robin arbiter, and the grant is combinational.
Masters that hit different banks all proceed in the same cycle. On a bank
conflict the losers keep their request up and wait. Round-robin bounds the
wait below 14 cycles, and the longest wait seen under random traffic was 5. Read data comes with `rvalid` one cycle after the
grant; writes give no response.

The ratio of banks to cores (2) and the 14 × 16 shape are those of the
evaluated configuration. The 4 + 2 split of the non-core masters is this
design's choice.

## Reaching 64-bit memory from 32-bit cores (`addr_ext`)

Every core owns an address-extension register holding the upper 32 bits of
a 64-bit address. Access routing:

* With the register at zero, an address inside the L1 window goes straight
  to the interconnect.
* Any other access becomes a single-beat AXI transaction to
  `{register, address}` on the narrow network. The core is granted at once;
  a load gets `rvalid` when R returns. The port takes nothing new until that
  access has finished, so responses stay in order.

The same path serves loads from L2 at `0x1C00_xxxx` with the register at
zero.

## DMA engine

A descriptor (`dma_cmd_t`) gives:

* the direction;
* a 64-bit external address;
* an L1 address;
* a row length in bytes;
* a repeat count;
* a stride for each side.

One repeat is a 1D copy; more repeats make a 2D gather or scatter.

Each direction has its own channel, so inbound and outbound transfers run at
the same time. `dma_burst_gen` cuts rows into INCR bursts of up to 16 beats
that never cross a 4 KiB page. Up to 16 bursts can be outstanding.

* Inbound, each 64-bit R beat is split into two 32-bit L1 writes on two
  interconnect ports.
* Outbound, two read ports fill two small queues, and W beats leave when
  both halves are present.

Transfer ids and completion:

* On acceptance, `cmd_id_o` shows the transfer id `{direction, sequence}`.
* `done_cnt_o[dir]` counts completed transfers, which finish in order within
  a direction. Software waits until the count passes its id.
* An inbound transfer completes when its last word is in L1; an outbound one
  completes with its last B response.

Measured rate: a 32-beat transfer from L2 to L1 takes 39 cycles, and the
same amount from L1 to host memory 41 cycles. That is one beat per cycle
plus about 8 cycles of path latency.

Limits:

* Rows and addresses must be multiples of 8 bytes. A 97-float tile row has
  to be padded to 98 floats.
* Descriptors arrive on a port, not through memory-mapped registers.

## Instruction fetch: L0 buffers and the shared cache

Each core fetches 64-bit aligned words through its own `l0_icache`. This is
two fully associative 64-bit lines with FIFO replacement, which holds eight
16-bit compressed instructions. A hit is granted immediately, with data in
the next cycle.

Misses go to `icache_shared`:

* 4 KiB, direct-mapped, 16-byte lines.
* One lookup per cycle, so at most 64 bits per cycle for the whole cluster,
  shared round-robin between the cores.
* A miss refills the line with one 2-beat AXI burst on the wide network.

`icache_flush_i` empties both levels.

## IOMMU

All accelerator traffic to host memory passes the `iommu`. Its TLB is
filled by software:

* 32 fully associative entries of 4 KiB pages, each with a valid flag and a
  read-only flag.
* It never walks page tables itself. A miss handler on the accelerator walks
  the host page table and writes the entries through the config port.

With translation disabled (the reset state), addresses pass unchanged.

Enabled, the read and write channels each hold one request for a one-cycle
lookup. A miss, or a write to a read-only page, is not forwarded. Once the
channel's earlier bursts have drained, the IOMMU answers with SLVERR and
records the virtual address in a 4-entry miss queue, which raises
`miss_irq_o`.

Config registers:

| Offset | Register |
|---|---|
| `0x000` | enable |
| `0x004` | status |
| `0x008` / `0x00C` | missing address |
| `0x010` | pop the miss queue |
| `0x100 + 32*i` | entry *i*: VA lo, VA hi, PA lo, PA hi, flags |

## Mailbox and performance counters

`mailbox` has two 8-word FIFOs. A host write pushes a word toward the device
and raises `mbox_dev_irq_o` until the device has read everything; the reverse
direction raises `mbox_host_irq_o`. Registers on both sides:

| Offset | Access | Meaning |
|---|---|---|
| `0x0` | write | push |
| `0x4` | read | pop |
| `0x8` | read | fill levels |

`perf_counters` has four 32-bit counters. Each counter is assigned one of
the cluster's events at run time, and selecting an event clears the count.

| Event | Meaning |
|---|---|
| 0 | cycles |
| 1 | core L1 conflict |
| 2 | shared-cache miss |
| 3 | DMA busy |
| 4 | remote access in flight |
| 5 | L0 miss |

One write to the RUN mask at `0x00` starts or stops all counters. `EVSEL_i`
is at `0x10 + 4i` and `COUNT_i` at `0x40 + 4i`.

## AXI conventions

The AXI structs are in `hero_pkg`: 64-bit address, 64-bit data, 8-bit id.

* `axi_mux` arbitrates AR and AW round-robin. It remembers the W order in a
  FIFO, and on the way in it shifts the id left and puts its input index in
  the low bits. R and B are routed back on those bits.
* `axi_xbar` decodes each master's AR and AW against base/mask pairs; the
  first match wins, and the last slave takes everything else. It then uses
  one `axi_mux` per slave.

The deepest path uses 5 of the 8 id bits. Every slave here answers in order.

## Where this departs from the paper's system

The following are missing:

* The cores, FPUs, host, coherent host interconnect and DRAM: they are
  ports or testbench models.
* Multiple clusters: `hero_accel` instantiates one cluster, which is the
  evaluated configuration.

The following are this design's own choices because the paper leaves them
open:

* the address map;
* the register maps;
* FIFO depths;
* the instruction-cache size and organisation;
* the DMA descriptor port and its 8-byte granularity;
* the single-outstanding remote access per core;
* the IOMMU's SLVERR-on-miss signalling.

Throughput limits to keep in mind:

* `axi_to_tcdm` handles one burst at a time and needs about three cycles per
  64-bit beat. Host writes into L1 are therefore slower than DMA.
* `l2_spm` serves one burst at a time: reads first, one beat per cycle.

## Verification

Each testbench prints `TB_RESULT checks=N failures=M`.

| Testbench | What it checks |
|---|---|
| `tb_hero_accel` | The whole accelerator at default parameters. Host access to L1 and L2; 1D DMA in and out with a rate check; a 2D gather; core load/store; 8-core bank conflict; core load from L2; 64-bit access via the CSR; instruction miss, L0 hit and shared-cache hit; mailbox both ways; perf counters; IOMMU hit, miss and interrupt. It counts each of these and fails on any that did not occur. |
| `tb_tcdm_interconnect` | 14 masters on 16 real banks with random traffic, against a reference memory: one grant per bank per cycle, parallel grants without conflicts, bounded waiting. |
| `tb_dma_engine` | The DMA engine with a 4-bank L1 and an L2 as external memory: 1D in/out across a 4 KiB page, 2D gather and scatter, transfer ids, both directions at once. 256 beats take 290 cycles, the L2 model adding about 2 idle cycles per burst. |
| `tb_iommu` | Pass-through while disabled; translated bursts landing at the physical address; read-only pages; SLVERR and the miss queue with its interrupt; translation adds no cycle to the first beat in this setup. |
| `tb_l0_icache` | L0 buffer against a shared-cache model with random grant delay: data, no request on hits, FIFO replacement, flush, 400 random fetches against a 2-line model. |
| `tb_addr_ext` | Local L1 accesses with single-cycle timing; remote loads of both halves; CSR upper bits on the AXI address; byte-masked remote stores; a random local/remote mix. |
| `tb_l1_spm_bank` | Byte-masked writes and reads against a reference. |
| `tb_l2_spm` | Random bursts with strobes; a 16-beat read takes 17 cycles. |
| `tb_mailbox` | FIFO order, interrupts, overflow drop. |
| `tb_perf_counters` | Random events against a model; start/stop. |

`icache_shared`, `axi_mux`, `axi_xbar`, `axi_to_tcdm` and `hero_cluster`
have no testbench of their own. Only the end-to-end test exercises them, so their corner cases
are covered less:

* error paths;
* AXI back-pressure patterns other than those the real slaves produce;
* several masters contending on one crossbar slave.

Running a test with plain Verilator:

```
verilator --binary --timing --top-module tb_hero_accel rtl/hero_pkg.sv \
    $(ls rtl/*.sv | grep -v hero_pkg) tb/tb_hero_accel.sv
./obj_dir/Vtb_hero_accel
```

Lint gives UNOPTFLAT warnings. They come from arrays of structs whose
elements are driven by different processes: Verilator tracks such an array
as one signal and reports a loop. AXI valid signals never depend on ready
signals, and the simulations settle every cycle. The remaining
warnings are unused bits and width extensions.

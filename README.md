# SCENIC-style SmartNIC datapath in SystemVerilog

A 200G SmartNIC normally forces a choice. Traffic can go through a fixed
hardware network stack (RDMA, TCP), which is fast but leaves no room for
per-application processing. Or it can go to the host kernel, which is
flexible but slow. This design puts both paths on one FPGA datapath:

- A prefilter sorts every frame at line rate to the RDMA stack, the TCP stack,
  or a "slow path" that behaves like an ordinary Linux network card.
- The payload of a flow can be steered through a *stream computation unit*
  (SCU): user logic that processes the data as it passes, at line rate.
- The host keeps control. It has a virtual-memory view (a TLB in front of all
  DMA), per-QP completion counters instead of interrupts, switchable
  congestion control, and interrupt lines to the on-card Arm cores.

The RTL follows the architecture of the SCENIC SmartNIC paper ("SCENIC:
Stream Computation-Enhanced SmartNIC"). It is not by its authors. The paper
gives the structure and most behaviours. Sizes, encodings and many
mechanisms it leaves open are chosen here and marked as such in each file's
opening comment.

## Datapath at a glance

```
 MAC rx (mac_clk) ─► cdc_fifo ─► traffic_filter ─┬─ RoCEv2 ───────────────► roce_rx_*  (RDMA stack, external)
                                                 ├─ TCP ──────────────────► tcp_rx_*   (TCP stack, external)
                                                 └─ slow ─► SCU0 scu_flow_monitor ─► netdev_rx ─┐
 roce_pl_* (RDMA payload, write packets, QPN) ─► flow_steering ─┬─ slot 0 ──────────────────────┤
                                                                └─ slot 1 ─► hdr_strip ─► SCU1  │
                                                                   scu_hash_partition ──────────┤
 roce_cpl_* ─► completion_counters ─► writeback packets ────────────────────────────────────────┤
                                                      rr_arbiter (4 sources, whole packets) ◄───┘
                                                        └─► dma_mmu (tlb) ─► dma_wr_* (host DMA engine)
 host_rdma_cmd ─► pcc { region 0: cc_window | region 1: cc_dcqcn } ─► roce_cmd_*
 host_tx_cmd ─► netdev_tx ─(dma_rd_*)─┐
 roce_tx_*, tcp_tx_* ─────────────────┴► rr_arbiter ─► cdc_fifo ─► MAC tx (mac_clk)
 netdev_rx events ─► msix_irq_ctrl ─► msix_irq_*
 SCU events ─► irq_router (+ periodic timer) ─► arm_irq[15:0]
```

All streams are 512-bit AXI-Stream beats (`axis_beat_t`: data, 64-bit byte
keep, last) with valid/ready next to them. At 391 MHz this is the 200 Gbit/s
line rate. Everything except the MAC side runs on one user clock `clk`.
Reset is active-low and asynchronous (`rst_n`, `mac_rst_n`).

The MAC, PCIe DMA engine, RDMA and TCP stacks, Arm cores and memory
controllers are vendor IP or separate projects. Here they are ports of
`scenic_top`. Their behaviour is modelled in `tb/tb_scenic_top.sv`.

## Write packets: how many DMA writers share one TLB

Four blocks write host or GPU memory:

- the netdev RX engine;
- RDMA payload that is not processed;
- the hash SCU;
- the completion-counter writeback.

Each produces a *write packet*: one header beat, then the data beats up to
`last`. The header fields (`scenic_pkg::wr_header`) are:

| Bits | Field |
|------|-------|
| 63:0 | address |
| 95:64 | length |
| 101:96 | address-space id |
| 102 | address is already physical |

`cmd_stream_merge` turns a command-plus-data pair into such a packet.

A packet-locked round-robin arbiter (`rr_arbiter`) merges the four sources.
`dma_mmu` then holds each header while the TLB is searched:

- On a hit, the virtual address is replaced by the physical one and the
  physical bit is set.
- On a miss, the TLB reports `tlb_miss_*` to the driver. The packet waits
  until the driver writes the translation (`tlb_fill_*`), then the lookup is
  repeated.

The TLB is fully associative (32 entries, 2 MB pages) with LRU replacement
through per-entry age counters. Address-space ids used in the top:

| Id | Source |
|----|--------|
| 0 | RX ring |
| 1 | hash SCU |
| 2 | counter writeback |
| set by the RDMA stack | RDMA payload |

## Slow path: Linux netdev ring

`netdev_rx` works like the RX half of a simple NIC:

1. A length counter (META) measures each frame as it enters the data FIFO.
2. The MERGER writes each frame into the next slot of a ring in host memory:
   `buff_vaddr + idx * buff_stride`.
3. Each slot starts with one 64-byte tag beat: length in bits 15:0, valid in
   bit 16. The frame follows, so the DMA length is 64 + frame length.
4. The write index wraps at `buff_size`.

The ring is full when the next index equals `buff_tail`, the driver's
consumption pointer. The engine then stalls and frames collect in the FIFOs
(512 data beats, 32 frames). Each delivered frame pulses `pkt_event` into
`msix_irq_ctrl`, which moderates interrupts in two ways:

- It requests an interrupt when `irq_coal` events are pending.
- It requests one `irq_time + 1` cycles after the first pending event, if
  fewer have arrived.

The request is held until acknowledged.

`netdev_tx` takes (address, length) commands and reads the frame by DMA. It
trims the last beat's keep and hands the frame to the TX arbiter.

## The two example SCUs

**SCU 0, flow monitor (`scu_flow_monitor`).** This SCU sits on the slow path.
It classifies each IPv4 frame by a 4-bit field of the source address at a
programmable shift. With shift 16 and 10.pod.switch.host addressing, the
field is the fat-tree pod. Per class it counts packets, bytes and drops,
readable by the Arm cores. It also enforces a token bucket set by the cores
(rate in 1/256 byte per cycle, burst in bytes):

- A frame whose IP length + 14 exceeds the tokens is dropped whole.
- Each drop pulses an interrupt source.

The decision is made on the first beat and adds no latency.

**SCU 1, hash partitioning (`scu_hash_partition`).** This SCU receives a
table column by column. Each beat holds 16 consecutive 32-bit values of one
column.

- **Key columns.** These update an on-chip hash buffer of 65536 × 16 hashes,
  enough for 2^20 rows. The first key column stores `fmix32(key)`. Each
  further key column folds in as `fmix32(h ^ key)`.
- **Data columns.** Row r goes to GPU `h[r] mod 4`. For each GPU the lanes of
  that GPU are packed densely and appended to a 64 kB output buffer, which is
  written out with one DMA write when full. At the end of each column every
  remainder is flushed too.
- **Output address.** Column c of GPU g goes to
  `gpu_base[g] + c * col_stride + offset`. The offset keeps growing across
  batches until `clear`, so larger tables are processed batch by batch.

The input stalls while a buffer is flushed; there is no double buffering.
The packing network uses only constant indices: lane l of GPU g goes to
output slot `prefix[g][l]`.

## Congestion control with two regions

`pcc` holds two complete controllers and a select bit that flips on each
`reconfig` pulse. Both controllers see every ACK/ECN/RTT signal, so the
inactive one keeps its state. This stands in for partial reconfiguration,
which takes milliseconds on the FPGA; the RTL only keeps the interface.

- **Region 0, `cc_window`.** Per QP it counts unacknowledged packets (PMTU
  4096 B). A command passes while the count is below 16 and adds
  ceil(len/4096). Each ACK removes one packet.
- **Region 1, `cc_dcqcn`.** This is DCQCN as published:
  - A CNP (ECN mark) sets `Rt = Rc` and `Rc *= 1 - alpha/2`, and raises alpha.
  - Every 55 µs a sweep updates one QP per cycle: alpha decays, and the rate
    recovers (fast recovery, then additive, then hyper increase).
  - Rates are 1/65536 of line rate and alpha is in 1/1024.
  - Pacing charges each command `beats * 65536 / Rc` cycles, computed by a
    48-step serial divider. The next command of that QP waits until then.

Per-QP state lives in memories. One valid bit per QP gives the reset value
without clearing 256 entries.

## Smaller blocks

- **`traffic_filter`.** Sorts each frame by its first beat into three
  destinations:
  - RoCEv2 (IPv4, UDP destination port 4791);
  - TCP (IPv4, protocol 6);
  - slow path (everything else).

  It holds the choice to `last` and counts frames per destination.
- **`flow_steering`.** A 256-entry table from QPN to SCU slot, written by the
  driver when a QP is created. The choice is held for the whole packet.
- **`completion_counters`.** Four counters per QP (256 QPs), incremented in
  one cycle. Each new value is queued for a 4-byte writeback at
  `wb_base + 4*(qpn*4 + kind)`, where the user-space provider polls instead
  of waiting for interrupts.
- **`irq_router`.** Maps 16 lines to the Arm cores, each to any of 16
  sources with an enable bit. Line 15 also carries a periodic timer that
  stays pending until cleared.
- **`cdc_fifo`.** A Gray-code asynchronous FIFO, 64 beats deep. The MAC
  cannot be stopped, so a full RX FIFO drops beats and sets a sticky
  `overflow`.

## Parameters

| Module | Parameter | Default | Origin |
|---|---|---|---|
| scenic_pkg | DATA_W | 512 | paper (512-bit datapath) |
| scu_hash_partition | LANES, BUF_DEPTH | 16, 65536 | paper (16 × 2^16 hash buffer) |
| scu_hash_partition | N_GPU, FLUSH_BYTES | 4, 65536 | paper (4 GPUs, 64 kB flushes) |
| irq_router | N_IRQ | 16 | paper (16 IRQ connections) |
| cc_dcqcn | PERIOD, F, g, R_AI, R_HAI | 21505 cycles, 5, 1/256, 13, 131 | published DCQCN defaults |
| cc_window | WINDOW, PMTU | 16, 4096 | this design |
| tlb | ENTRIES, PAGE_BITS | 32, 21 | this design |
| completion_counters, flow_steering | N_QP | 256 | this design |
| netdev_rx | DATA_DEPTH, META_DEPTH | 512, 32 | this design |
| cdc_fifo | DEPTH | 64 | this design |

## Where this differs from the paper or is incomplete

- **NVMe host controller.** Not built. The TCP-to-storage path ends at the
  `tcp_*` ports.
- **Number of SCUs.** The main configuration in the paper has one SCU slot;
  its figure shows two example SCUs. Both are built, in fixed places: the
  flow monitor on the slow path, the hash partitioner as RDMA steering
  slot 1. A four-tenant isolation setup would need two more slots.
  The architecture allows up to 16 SCUs; `flow_steering` is parameterised
  by slot count, but each extra SCU needs its own wiring in the top.
- **Register access.** The Arm cores reach SCU registers over a
  memory-mapped bus in the original system. Here the registers are plain
  ports (`fm_*`, `hp_*`, `irq_map_*`), with no bus decoder.
- **Reconfiguration.** The switch between congestion-control regions is a
  multiplexer, not a partial reconfiguration.
- **Pacing and stalls.** DCQCN pacing and the window controller block the
  command stream head-of-line. A waiting command delays other QPs' commands
  behind it.
- **Flow monitor position.** The flow monitor sees only slow-path traffic.
  RDMA and TCP frames bypass it.
- **Synthesis.** The hash buffer (4 MB) and output buffers are plain arrays,
  to be mapped to URAM/BRAM. Synthesis of the full top is slow because of
  them; small sizes synthesize quickly.

## Simulating

Each block has a self-checking testbench `tb/tb_<block>.sv`. It prints
`TB_RESULT checks=N failures=M` and stops on a watchdog if the design hangs.
`tb/tb_scenic_top.sv` runs the whole card at its default sizes. It passes
RoCE, TCP and slow-path frames, RDMA payload, completions and TX traffic
together. It then fills the RX ring until it stalls, switches congestion
control, partitions a table and overflows the MAC FIFO. It fails if any of
these mechanisms was never seen.

Example with plain Verilator:

```
verilator --binary --timing -Wno-fatal -y rtl -y tb rtl/scenic_pkg.sv tb/tb_pkg.sv \
    tb/tb_scenic_top.sv --top-module tb_scenic_top -o sim && obj_dir/sim
```

The same pattern works for a block: give its testbench and top module name.
`rtl/scenic_pkg.sv` holds the shared types and frame field offsets.
`tb/tb_pkg.sv` builds frame headers for the testbenches.

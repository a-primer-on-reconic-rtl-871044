# RecoNIC shell: an RDMA SmartNIC datapath with compute offload

RecoNIC is an FPGA SmartNIC design. It joins a RoCEv2 RDMA offload engine to user compute blocks, so that data arriving from a remote peer can be processed where it lands, in the card's own DDR4, and never passes through host memory. The host CPU still decides what to compute. It places work, starts kernels and collects their results through a PCIe register path and DMA.

This repository holds synthesizable SystemVerilog for the *shell* around the vendor IP cores:

- packet classification and a streaming compute slot on the receive path;
- a transmit arbiter;
- the two AXI4 crossbars that decide whether a memory access goes to host memory or to device memory;
- a lookaside compute block with control and status FIFOs per kernel;
- an example lookaside kernel, a systolic-array matrix multiplier;
- the AXI4-Lite control fabric that ties these to the host.

The RDMA engine, the PCIe DMA subsystem (QDMA), the 100G Ethernet MAC and the DDR4 controller are vendor IP. Their connections are brought out as ports of the top module, `reconic_shell`.

## Dataflow through the shell

```
            +--------------------- reconic_shell ---------------------+
 MAC RX --->| packet_classifier -> streaming_compute --RDMA--> rdma_rx |---> RDMA engine
            |                                        --other-> qdma_rx |---> host (QDMA)
 MAC TX <---| tx_arbiter <-- rdma_tx / qdma_tx                         |<--- RDMA engine / host
            |                                                          |
 RDMA engine AXI4 x5 --> sys_crossbar --(tag != 0xA35)--> qdma_bridge  |---> host memory
            |                 \--(tag == 0xA35)--\                     |
 host DMA (qdma_mm) ----------------------------> mem_crossbar --> ddr |---> DDR4 (16 GB)
            |   lookaside_compute (mm_kernel) ----/                    |
 host AXI4-Lite (qdma_cfg) --> axil_crossbar --> RDMA cfg | MAC cfg |  |
            |                                    lookaside_compute |   |
            |                                    shell_regs        |   |
            +----------------------------------------------------------+
```

Every stream is a 512-bit AXI4-Stream (`axis_t`: `tdata`, `tkeep`, `tlast`, `tvalid`) with a separate `tready` signal. Every memory bus is AXI4 with 64-bit addresses and 512-bit data (`axi_req_t` / `axi_resp_t`). Register buses are AXI4-Lite, 32 bits wide (`axil_req_t` / `axil_resp_t`). All of these types are in `rtl/reconic_pkg.sv`.

At 250 MHz a 64-byte beat per clock gives 128 Gb/s, which is headroom over the 100 Gb/s line rate. The shell runs in one clock domain. The vendor cores do their own clock crossing.

## Where an address goes

The memory map is the part of the design that makes network-to-accelerator dataflow possible.

- The RDMA engine has five AXI4 managers. It uses them to fetch work-queue elements (WQEs), to move payload and to write completion-queue entries.
- Which memory an access reaches depends only on its address. The 16 GB of device DDR4 sits at `0xA350_0000_0000_0000` to `0xA350_0003_FFFF_FFFF`.
- `sys_crossbar` compares the top 12 bits of each AW/AR address with `0xA35`:
  - on a match, the transaction goes to `mem_crossbar`;
  - on no match, it goes out through the QDMA slave bridge to host memory.
- A queue pair or payload buffer is therefore placed in device memory just by giving it a tagged address. The RDMA engine does not know the difference.
- `mem_crossbar` serves three managers: the host's DMA channel, `sys_crossbar` and the lookaside compute block. It keeps only the low 34 bits of the address. A tagged address and the plain offset reach the same DDR4 byte, so the host may use either.

Both crossbars are built on `axi_xbar_core`. Each target has a write arbiter and a read arbiter. Each arbiter:

- grants round robin;
- holds the grant for one whole transaction: AW, the W beats up to `wlast`, then B (or AR, then the R beats up to `rlast`);
- frees the target on the clock after the last handshake.

Writes and reads arbitrate independently. A manager has at most one write and one read in flight, so responses never need reordering or ID remapping. This gives away some bandwidth: a target is idle between one transaction's last beat and the next grant, which is one or two clocks plus the memory's latency. The fix would be to allow outstanding transactions. See the limits below.

`sys_crossbar` counts the transactions it sends each way. The counts are outputs `host_txn_count` and `dev_txn_count`.

## Receive and transmit

**Packet classification** (`packet_classifier`) looks at the first 64-byte beat of each frame. A frame is RDMA when it is one of:

- Ethernet + IPv4, with a 20-byte header, protocol UDP and UDP destination port `roce_port`;
- Ethernet + IPv6, next header UDP, with the same port.

`roce_port` is a register and resets to 4791. For RDMA frames the block also extracts the BTH opcode and destination QP and sends them as metadata. For IPv6 the QP lies past the first beat, so it is taken from the second beat.

The decision is held until `tlast`. RDMA frames go to the RDMA engine and all other frames go to the host. A register stage sits on the output. A stalled output stalls the input, and frames are never reordered between the two outputs. When `enable` is cleared, every frame goes to the host.

**Streaming compute** (`streaming_compute`) is the slot for user logic that works on packets at line rate. The RDMA and the host lanes each pass through a register stage. The kernel here is a telemetry and filter example:

- it counts frames and bytes per lane;
- when the `drop_nonrdma` register bit is set, it discards whole non-RDMA frames and counts them.

The drop decision is taken on a frame's first beat, so a frame is never cut in half.

**Transmit arbiter** (`tx_arbiter`) merges the RDMA engine's transmit stream with the host's. Grants are round robin per frame, locked from the first beat until `tlast`. The output is combinational, so there is no added latency. `contention_count` counts frames started while both inputs were waiting.

## Lookaside compute

`lookaside_compute` holds `NK` kernels. Each kernel has:

- a **control FIFO**, filled by the host through AXI4-Lite;
- a **status FIFO**, drained by the host.

A kernel starts as soon as its control FIFO is not empty. It takes its arguments from the FIFO, works on device memory and pushes one status word when it finishes.

A control message is a sequence of 32-bit words:

| word | contents |
|---|---|
| 0 | `{work_id[15:0], num_args[7:0], 8'h00}` |
| 1 .. 2·num_args | each 64-bit address argument, low word first |
| then | kernel-specific words (the MM kernel takes `{8'h0, a_row, a_col, b_col}`) |

The status word is `{work_id[15:0], 8'h00, code[7:0]}`. The codes are 1 done, 2 bad argument and 3 bus error.

The host can learn that a kernel has finished in two ways:

- **polling**: read `COMPLETION`, where bit 0 is "status FIFO not empty";
- **interrupt**: `irq` is high while any kernel with its `IRQ_ENABLE` bit set has a non-empty status FIFO.

Register map (kernel *k* at *k*·0x20):

| offset | name | access |
|---|---|---|
| k·0x20+0x0 | CTRL | W: push a control word (SLVERR when full). R: free slots |
| k·0x20+0x4 | STATUS | R: pop a status word (0 when empty) |
| k·0x20+0x8 | STAT_COUNT | R: words in the status FIFO |
| k·0x20+0xC | COMPLETION | R: bit 0 not empty, bit 1 busy |
| 0x200 | IRQ_ENABLE | R/W: one bit per kernel |
| 0x204 | IRQ_PENDING | R |

The kernels share the block's one AXI4 port through a round-robin `axi_xbar_core`.

### The matrix-multiplication kernel

`mm_kernel` computes C = A·B on 32-bit integers, wrapping modulo 2³². It expects three address arguments (A, B, C) and a dimension word. Each matrix is row-major in memory, and a_row, a_col and b_col may each be 1 to N. Any other message ends at once with status code 2.

The kernel works in three phases:

1. **Load.** It reads A with one AXI4 burst and then B with a second burst, 16 words per 64-byte beat, into on-chip buffers of N² words each.
2. **Compute.** It runs `systolic_array` for a_col + 2N − 2 clocks.
   - The array is output-stationary. Cell (i, j) keeps the accumulator for C[i][j].
   - Row i of A enters from the left delayed by i clocks, and column j of B enters from the top delayed by j clocks.
   - Each cell multiplies the pair it sees, adds it to its accumulator and passes A right and B down.
   - A[i][k] and B[k][j] therefore meet in cell (i, j) on clock k + i + j. The last pair meets on clock (a_col − 1) + 2(N − 1).
   - `compute_cycles` reports the count for the last job.
3. **Store.** It packs C row-major into beats and writes it with one burst. Then it pushes the status word.

The phases do not overlap. For a 16×16 job the compute phase is 46 clocks, and memory latency usually dominates the rest.

## Control path

`axil_crossbar` splits the host's AXI4-Lite space into 1 MB windows:

| window | base | target |
|---|---|---|
| 0 | 0x000000 | RDMA engine registers (port `rdma_cfg_*`) |
| 1 | 0x100000 | MAC registers (port `mac_cfg_*`) |
| 2 | 0x200000 | lookaside compute |
| 3 | 0x300000 | `shell_regs` |

An address outside these windows answers DECERR. One access is handled at a time.

`shell_regs` holds the following registers. Unknown offsets answer SLVERR.

| offset | register |
|---|---|
| 0x00 | classification enable (resets to 1) |
| 0x04 | RoCEv2 UDP port (resets to 4791) |
| 0x08, 0x0C | RDMA and non-RDMA frame counts |
| 0x10 | streaming-compute drop bit |
| 0x14–0x24 | streaming-compute frame, byte and drop counters |
| 0x28 | transmit contention count |

## A complete offload, end to end

`tb/tb_reconic_shell.sv` plays every part around the shell. It runs the networked matrix multiplication the design is meant for:

1. The host writes RDMA engine and MAC registers through the shell. It reads the classification port register and gets a decode error outside the windows.
2. The "RDMA engine" fetches two WQEs from a send queue in host memory. The host-memory model answers after 170 clocks, which is 680 ns at 250 MHz, the latency quoted for the PCIe bridge.
3. It writes matrices A and B, the payload "read from the peer", to tagged device addresses. It writes and reads back a burst through another manager. It posts two completion entries to a completion queue in host memory.
4. At the same time, the host runs DMA bursts into device memory, mixed RoCEv2 and other frames arrive from the network, and both transmit sources send frames.
5. The host pushes a control message to the MM kernel while the RDMA engine keeps using device memory. It then waits for the interrupt, pops the status word and reads C back by DMA. C is checked against a product computed in the testbench.

The testbench checks every received and transmitted beat against the frames it generated, along with the counters. It then requires that each mechanism happened at least once:

- RDMA and non-RDMA classification;
- frames dropped in streaming compute;
- routing to host memory and to device memory;
- a manager waiting in `mem_crossbar`;
- transmit contention;
- the kernel interrupt.

It runs `reconic_shell` at its default parameters and takes a few seconds.

Each block also has its own testbench, `tb/tb_<module>.sv`. Helper models are in `tb/`:

- `axi_mem_model`: a sparse AXI4 memory with configurable read latency;
- `axi_master_bfm` and `axil_master_bfm`;
- `axil_reg_model`;
- `tb_frames_pkg`, which builds RoCEv2/IPv4, RoCEv2/IPv6, TCP, UDP and ARP frames.

Every testbench prints `TB_RESULT checks=<n> failures=<m>` and has a watchdog.

To simulate with Verilator, list the package first:

```
verilator --binary --timing --assert -Wno-fatal \
  rtl/reconic_pkg.sv $(ls rtl/*.sv | grep -v reconic_pkg) tb/tb_frames_pkg.sv tb/axi_mem_model.sv \
  tb/axi_master_bfm.sv tb/axil_master_bfm.sv tb/axil_reg_model.sv \
  tb/tb_reconic_shell.sv --top-module tb_reconic_shell
./obj_dir/Vtb_reconic_shell
```

## Parameters

| module | parameter | default | notes |
|---|---|---|---|
| reconic_shell | N_RDMA_AXI | 5 | RDMA engine AXI4 managers |
| reconic_shell | LC_KERNELS | 1 | lookaside kernels |
| reconic_shell | MM_N | 16 | systolic array size, the largest matrix dimension |
| sys_crossbar | DEV_TAG / TAG_W | 0xA35 / 12 | device-memory address tag |
| mem_crossbar | MEM_ADDR_W | 34 | 16 GB device memory |
| lookaside_compute | CTRL_DEPTH / STAT_DEPTH | 16 / 16 | FIFO depths |
| axil_crossbar | NS / LSB | 4 / 20 | windows and their size |

## What follows the source design and what is this design's own choice

These follow the RecoNIC platform:

- the blocks and how they connect;
- the five RDMA managers;
- the 0xA35 tag with 16 GB of DDR4;
- the three managers of device memory;
- the control FIFO / status FIFO structure;
- control messages of work ID, argument count and addresses;
- completion by polling or by interrupt;
- a systolic-array MM kernel as the lookaside example.

These are this design's own choices, because the platform description leaves them open:

- all bus widths and the 250 MHz single clock;
- every register map and message word layout;
- the classification rule: IPv4 without options or IPv6, UDP port 4791, no VLAN tags;
- the arbitration policies;
- the crossbar structure, with one transaction in flight per target;
- the telemetry kernel in the streaming slot;
- the MM kernel's matrix format, size limit and status codes.

## Limits and known differences

- **Crossbar throughput.** The crossbars keep one transaction in flight per target. The source platform uses vendor crossbars with many outstanding transactions. Its pipelined WQE fetch, where later WQEs arrive about every 10 clocks after the first 170-clock one, needs outstanding reads through `sys_crossbar`. Here, each fetch waits for the previous one. Bandwidth-heavy RDMA traffic to device memory is likewise limited by DDR latency per burst.
- **One port per lookaside block.** The kernels share a single AXI4 port. The source allows kernels with several AXI4 interfaces.
- **No tiling.** The MM kernel handles matrices up to MM_N in each dimension and rejects larger ones. It does not overlap loading, computing and storing.
- **Programmable streaming slot.** The streaming slot holds only the example telemetry/filter kernel.
- **No outside parts.** The RDMA engine, QDMA, MAC/PHY and DDR4 controller are not part of this RTL. The testbenches model them behaviourally.
- **Classification.** IPv4 headers with options and VLAN-tagged frames are classified as non-RDMA.

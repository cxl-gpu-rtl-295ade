# CXL root complex for a GPU, with speculative read and deterministic store

This is synthesizable SystemVerilog for the GPU-side CXL root complex of the
CXL-GPU design. The root complex attaches CXL memory expanders (DRAM- or
SSD-backed endpoints) to a GPU's system bus as extra memory. It has three parts:

* a **host bridge** with an **HDM decoder**, which maps a host physical
  address (HPA) to a root port;
* several **CXL root ports** (three by default). Each one turns loads and
  stores into CXL.mem messages;
* two optional latency-hiding mechanisms in every root port:
  * **speculative read (SR)** uses MemSpecRd to make an SSD endpoint prefetch
    into its internal DRAM;
  * **deterministic store (DS)** acknowledges stores at once and buffers them
    in a reserved region of GPU memory while the SSD is slow.

The GPU itself, GPU memory, the CXL link layer, the PCIe/CXL PHY and the
enumeration firmware are outside this design. Their connections are ports of
the top module.

```
                system bus (loads/stores, 64B lines)
                           |
                   +---------------+
                   |  host_bridge  |---- cfg_* (HDM table, written by firmware)
                   |  hdm_decoder  |
                   +---------------+
                  /        |        \
        cxl_root_port  cxl_root_port  cxl_root_port        (NUM_RP = 3)
   each:
      req --> ds_ctrl --stores--> MemWr -------------+
                 |  \--GPU memory (stack, copies)    |
                 | loads (not held in GPU memory)    v
                 +--> queue_logic --MemRd/MemSpecRd--> cxl_txn_layer --> cxl_arbitrator --> link_tx
                        sr_queue, sr_reader                 ^                  ^
                        (addr_window, ring buffer),         |                  CXL.io (io_*)
                        mem_queue + profiler, sr_load_ctrl  |
      rsp <-- MemData / store acks <------------------------ s2m (Cmp, MemData, DevLoad)
```

## Files

| File | Contents |
|---|---|
| `rtl/cxl_pkg.sv` | Widths, DevLoad and opcode enums, message structs, `spec_addr()` |
| `rtl/cxl_root_complex.sv` | Top: the host bridge and NUM_RP root ports |
| `rtl/host_bridge.sv` | HDM routing, error answer for unmapped addresses, round-robin response merge |
| `rtl/hdm_decoder.sv` | Per-port (base, size, enable) registers and the address lookup |
| `rtl/cxl_root_port.sv` | One port: `ds_ctrl`, `queue_logic`, `cxl_txn_layer`, `cxl_arbitrator` |
| `rtl/queue_logic.sv` | Read path: SR queue, SR reader, memory queue, load control |
| `rtl/sr_queue.sv` | 32-entry SR queue that exposes the entries behind its head |
| `rtl/sr_reader.sv` | Builds MemSpecRd; contains the address window and ring buffer |
| `rtl/addr_window.sv` | Address-window control |
| `rtl/sr_ring_buffer.sv` | Record of issued SRs (start, length) |
| `rtl/sr_load_ctrl.sv` | DevLoad to SR granularity and halt |
| `rtl/mem_queue.sv` | 32-entry memory queue with profiler |
| `rtl/ds_ctrl.sv` | Deterministic store |
| `rtl/cxl_txn_layer.sv` | M2S message selection and S2M split |
| `rtl/cxl_arbitrator.sv` | PCIe (CXL.io) / CXL.mem arbitration state machine |
| `tb/tb_*.sv` | A self-checking testbench per block |
| `tb/cxl_ep_model.sv`, `tb/gpu_mem_model.sv`, `tb/tb_pkg.sv` | Behavioural endpoint, GPU memory, shared helpers |

Every file opens with a comment on its function, interface, timing, and which
parts follow the paper and which are this design's choice.

## Interfaces

* **System bus.** A request is valid/ready with `{write, addr[47:0], id[7:0],
  data[511:0]}`. Each request covers one 64B line. Responses carry `{write, err,
  id, data}` and may return out of order; the id matches them to requests.
  Every store gets a response (its acknowledgement).
* **HDM configuration.** `cfg_we`, `cfg_idx`, `cfg_base`, `cfg_size` and
  `cfg_en` write one decoder entry. This is the job of the enumeration
  firmware.
* **Link side, per port.** `link_tx = {io, payload}` goes to the CXL link
  layer. A CXL.mem payload is an `m2s_msg_t` `{op, addr, tag, data}`. The
  endpoint's `s2m_msg_t` `{op Cmp/MemData, tag, devload, data}` comes back on
  `s2m_*`. PCIe/CXL.io payloads enter on `io_*` and share the link through the
  arbitrator.
* **GPU memory, per port.** `gm_req {write, addr, data}` is valid/ready, and
  read data returns in order on `gm_rsp_*`. Deterministic store uses it.
* **Status and events.** Each port reports its SR granularity, the SR halt
  flag, DS suspension and stack depth. It also has one-cycle event strobes for
  each mechanism (`rp_events_t`).

## How it works

### HDM decoder and host bridge
Firmware writes one (base, size) pair per root port. A request goes to the
port whose range holds its address, and decoding is combinational. If ranges
overlap, the lowest port wins. An address that no port claims gets an error
response in the next cycle, so the bus never hangs. Port responses are merged
round robin.

### Speculative read (queue logic)
Every load enters the **SR queue** (32 entries). The **SR reader** takes the
head. If SR is enabled, not halted, and the address is not already covered by
an earlier SR, it sends a **MemSpecRd** and moves the load on to the **memory
queue** (32 entries) in the same step. From there the load leaves as a MemRd
whose tag is its slot number. A load waits in the SR queue while the memory
queue is full.

MemSpecRd uses the paper's modified address format:
* the address is a 256B-aligned offset;
* the two bits just above the 64B line offset (bits [7:6]) hold the length
  minus one;
* so one MemSpecRd covers 1 to 4 units of 256B, i.e. 256B to 1024B.

Each issued SR is recorded in a 32-entry **ring buffer** as (start, length). A
later load inside a recorded range goes out as a plain MemRd with no new SR.

The **profiler** frees the slot named by each response's tag, returns the data
with the original id, and passes DevLoad on.

**Load control** turns DevLoad into the SR granularity:
* *ll* (light load): one unit larger, up to 4, and any halt is lifted;
* *ol* (optimal): no change;
* *mo* (moderate overload): one unit smaller, down to 1;
* *so* (severe overload): SR halts until an *ll* arrives.

### Address window
For a load at line address A with granularity G (in bytes):

1. The initial window is [A-G, A+G).
2. Each memory-queue entry whose line lies in that window moves the start up
   by 64B. Those are loads that came before, so the data behind A is probably
   done.
3. Each SR-queue entry behind the head that lies in the window moves the end
   down by 64B. Those loads are still to come and will cover that data
   themselves.
4. Both ends are rounded to the nearest 256B.
5. The window is forced to contain A's own 256B block. If it is wider than 4
   units, it is cut to 4 units around its middle.

The result is the MemSpecRd's start and length. It is combinational and is
evaluated in the cycle the SR is issued.

### Deterministic store
`ds_ctrl` sees every request first. In normal mode:
* A store is sent to the SSD as a MemWr and acknowledged at once.
* If GPU memory already holds a copy of that line, the copy is updated too.
  That is the dual write.

A port becomes **suspended** in two cases:
* the last DevLoad was *mo* or *so*;
* writes are outstanding but no completion has come for TAIL_THRESH (64)
  cycles.

While suspended, stores are pushed onto a **stack** in a reserved region of
GPU memory (`RESV_BASE`, 64B per slot, 64 slots per port). The store is still
acknowledged at once. An **address list** beside the stack records which line
each slot holds.

A load whose line is in the list is **served from GPU memory**; any other load
goes to the queue logic.

Every CHECK_PERIOD (256) cycles a suspended port is looked at again. Suspension
ends once DevLoad has fallen and no write is overdue. If the port has no write
outstanding, one stack entry is flushed as a probe, so that a fresh DevLoad
comes back. Once the port is normal, the stack is **flushed** in the
background: the top slot is read from GPU memory, written to the SSD, and
popped. Flushes alternate with new requests.

With `ds_en = 0` the block is a plain store path: stores are acknowledged on
their Cmp.

### Transaction layer and arbitrator
MemSpecRd has priority so that the prefetch reaches the endpoint before the
load it serves. MemRd and MemWr take turns. Store tags have their top bit set;
load tags are memory-queue slots.

On the response side, MemData goes to the read path and Cmp to the store path.
The DevLoad of every response goes to both the load control and `ds_ctrl`.

The **arbitrator** has two states: CXL.mem and CXL.io. After MEM_QUANTUM (8)
CXL.mem messages, it switches to CXL.io if PCIe traffic waits. It returns after
IO_QUANTUM (2) payloads. It never holds the link for an idle side.

### Configurations
The `sr_en` and `ds_en` inputs on each port select the paper's configurations:

| Paper configuration | `sr_en` | `ds_en` |
|---|---|---|
| CXL | 0 | 0 |
| CXL-SR | 1 | 0 |
| CXL-DS | 1 or 0 | 1 |

## Parameters (top defaults)

| Parameter | Default | Source |
|---|---|---|
| NUM_RP | 3 | Three HDM decoder rows in the paper's root-complex figure |
| SQ_DEPTH, MQ_DEPTH | 32 | Paper: "each with a capacity of 32 entries" |
| RING_DEPTH | 32 | This design's choice |
| STACK_DEPTH | 64 lines per port | This design's choice |
| WR_TAGS | 32 outstanding MemWr | This design's choice |
| TAIL_THRESH | 64 cycles | This design's choice |
| CHECK_PERIOD | 256 cycles | This design's choice |
| RESV_BASE | 0xF000_0000 | This design's choice |
| MEM_QUANTUM, IO_QUANTUM | 8, 2 | This design's choice |

Data is 512 bits (one 64B line) and addresses are 48 bits.

## Where this design departs from the paper, or is not built

* **Address list.** It is a searched table of STACK_DEPTH entries. The paper
  keeps the DS state in a red-black tree in SRAM. The function is the same;
  only the search cost differs.
* **Dual write.** GPU memory is updated only for lines that already have a copy
  there. The paper says a store goes to both the GPU memory and the SSD, but
  not where an arbitrary SSD line would live in GPU memory.
* **MemSpecRd skips the memory queue.** In the paper the SR request passes
  through the memory queue. Here the MemSpecRd goes straight from the SR
  reader to the transaction layer, and the load takes the memory-queue slot.
  The two still move only when the queue has room. A MemSpecRd gets no
  response, so a slot held for it would only shrink the queue.
* **The memory queue holds only loads.** Stores go straight from `ds_ctrl` to
  the transaction layer.
* **Messages are not flits.** CXL.mem messages are structs. Packing them into
  68B/256B flits, credits and retry belong to the link layer, which the paper
  does not describe. The link layer, PHY/PCS, PCIe layers, the enumeration core,
  the Vortex GPU, GPU memory and the endpoints are not built.
* **Queue length is fixed.** The paper says the queue logic "adjusts the queue
  length" from DevLoad. Here DevLoad changes the SR size and can halt SR, but
  the queue length does not change.
* **Meaning of "upwards".** The window start moves towards higher addresses
  for earlier requests, and the end towards lower addresses for later ones.
  The paper's figure could be read either way.
* **Two ablation points cannot be selected.** CXL-NAIVE (64B MemSpecRd for
  every request) is not possible because the minimum SR here is 256B. CXL-DYN
  (SR size from DevLoad without the address window) is not possible because
  the window cannot be switched off.
* **Workload sizes.** The paper sizes its inputs to 10x the GPU's local
  memory, but gives neither number. The root complex holds no workload data
  itself: any address inside the HDM ranges is forwarded, so capacity is set by
  the endpoints.

## Verification

Each block has a self-checking testbench in `tb/`. It prints
`TB_RESULT checks=N failures=M` and has a watchdog.

`tb_cxl_root_complex` is the end-to-end test. It uses the top's default
parameters. Its setup:
* three ports;
* port 0 has a DRAM-like endpoint with no SR or DS;
* ports 1 and 2 have SSD-like endpoints with SR and DS on, and garbage
  collection phases.

It checks every response against a scoreboard, and finally reads back every
line written. It also counts each mechanism and fails if any never happened:
* MemSpecRd issued;
* ring-buffer bypass;
* SR halt;
* granularity reaching 1024B;
* memory queue full;
* dual write, stack buffering, flush and GPU-memory load hit;
* DS suspension;
* PCIe turn on the link;
* unmapped-address error.

`tb_cxl_root_port` first measures the idle latency of one port. A load reaches
the link as a MemRd within 4 cycles of being offered. MemData becomes the
system-bus response in the same cycle. It then runs the port in the CXL, CXL-SR
and CXL-DS configurations:
* plain stores wait for the endpoint;
* DS stores are acknowledged quickly even while garbage collection slows the
  SSD's writes to 300 cycles.

`tb_workloads` replays the access patterns of the evaluated GPU programs.
It uses each program's load ratio and a 300-access trace. The trace runs
through the full-size top on three identical flash-like endpoints, whose
ports are set to CXL, CXL-SR and CXL-DS. The address pattern for each program
is this design's own reading of it:
* sequential: rsum, vadd, saxpy;
* row/column 2D walk: gemm, gauss;
* 5-point neighbourhood: stencil, conv3, cfd;
* random: path, bfs;
* two merged streams: sort;
* composed of the above: gnn, mri.

Store-heavy programs run with the endpoint in garbage collection half of the
time. Each data value is checked. Cycles for the 300 accesses:

| Program | CXL | CXL-SR | CXL-DS |
|---|---|---|---|
| rsum | 779 | 668 | 799 |
| stencil | 3402 | 1151 | 840 |
| sort | 752 | 611 | 617 |
| gemm | 1022 | 631 | 632 |
| vadd | 779 | 661 | 742 |
| saxpy | 779 | 665 | 761 |
| conv3 | 3284 | 1087 | 809 |
| path | 759 | 613 | 624 |
| cfd | 7695 | 2984 | 1612 |
| gauss | 1964 | 2091 | 1617 |
| bfs | 1974 | 1975 | 1467 |
| gnn | 818 | 686 | 864 |
| mri | 2232 | 1019 | 816 |

The test requires two results:
* SR speeds up the load-heavy set (6623 to 3657 cycles);
* DS speeds up the store-heavy set (7050 to 4696 cycles).

These traces are far too short to reproduce the size of the speed-ups in
absolute terms. Input sizes and compute phases are not modelled.

To run a testbench with Verilator (5.x), from the directory that holds `rtl/`
and `tb/`:

```
verilator --binary --timing --assert -Wno-fatal --timescale 1ns/1ps \
  -Irtl -Itb -y rtl -y tb +libext+.sv rtl/cxl_pkg.sv tb/tb_pkg.sv \
  tb/tb_cxl_root_complex.sv --top-module tb_cxl_root_complex -o sim
./obj_dir/sim
```

Replace `tb_cxl_root_complex` with any other testbench name. The full-size
test runs about 8,500 cycles and takes well under a minute, including the
build.

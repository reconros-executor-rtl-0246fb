# Reconfigurable-slot hardware for an event-driven ROS 2 executor

In ROS 2 an application is a set of nodes that talk through topics and
services. Under the event-driven model, each node registers *callbacks*: a
subscriber callback runs when a message arrives, a timer callback when a
period expires, and so on. An *executor* collects the callbacks that are ready
and runs them to completion on worker threads.

The ReconROS executor adds FPGA hardware to that model. A callback can also
exist as a hardware thread, a circuit compiled for a *reconfigurable slot*
(RS): a fixed region of the FPGA fabric that can be rewritten at run time by
partial reconfiguration. Besides one software worker per processor core, the
executor runs one hardware worker per slot. The hardware worker for slot *x*
looks for a ready callback that has a bitstream for slot *x*. If the slot does
not already hold that bitstream, the worker loads it. Then it starts the
hardware thread and waits until the thread finishes. So the slots act like
processor cores whose "program" is swapped on demand, and a loaded callback
stays in place until another one needs the slot.

This repository holds the programmable-logic side of that platform in
synthesizable SystemVerilog:

* the slots;
* the per-slot operating-system interface (OSIF);
* the memory subsystem behind the slots' memory interfaces (MEMIF): a
  request arbiter and an MMU that lets the threads use the virtual addresses
  of the executor's Linux process;
* the DMA engine that streams partial bitstreams into the configuration port
  (ICAP);
* three of the hardware callbacks evaluated with the executor: a Sobel image
  filter, an odd-even transposition sorter and a SHA-256 hasher.

The executor itself is software on the processor, and so is not here. The
testbenches play its hardware-worker role.

## Platform structure

```
             processor (cores, global timer)          programmable logic (reconros_pl)
   ┌─────────────────────────────┐      ┌───────────────────────────────────────────────┐
   │  executor: main thread,     │ regs │  osif[0] ... osif[N_RS-1]                      │
   │  SW workers, HW workers ────┼──────┼─► │ (host->thread FIFO, thread->host FIFO)     │
   │                             │      │    ▼                                          │
   │                             │      │  recon_slot[0] ... recon_slot[N_RS-1]         │
   │                             │      │    │ hw_thread + kernel of the loaded callback│
   │                             │      │    ▼                                          │
   │                             │      │  mem_arbiter (MEMIF, round robin)             │
   │                             │      │    ▼                                          │
   │  memory controller ◄────────┼──────┼─ mmu (TLB + page-table walk) ◄── pgd, fault  │
   │        ▲                    │      │                                               │
   │        └────────────────────┼──────┼─ zycap_dma ──► ICAP (configuration memory) ───┼─► rs_cfg_*
   └─────────────────────────────┘      └───────────────────────────────────────────────┘
```

`reconros_pl` has four slots by default, the number used in the evaluated
system. Each slot has its own OSIF and its own memory-request port. The arbiter
merges those ports into one stream of virtual-address requests, and the MMU
turns that stream into physical requests for the memory controller. The
bitstream DMA has a separate memory port, matching its high-performance (HP)
port into the processor system. Its output is the ICAP write port.

## How one hardware callback runs

For each slot, the hardware worker does the following. The `tb_pl_body.svh`
testbench code does the same.

1. **Check what the slot holds.** If the slot does not hold the callback's
   bitstream, the worker reconfigures it:
   * Write the bitstream's byte address into DMA register 1 and its length
     into register 2.
   * Write 1 to register 0 to start the transfer.
   * Wait for `dma_irq`, then clear it by writing 2 to register 0.

   While the configuration memory is being rewritten, `rs_cfg_loading[x]` is
   high and the slot is *decoupled*: its thread is held in reset, it accepts no
   OSIF words and it makes no memory requests. Once the last word has been
   written, `rs_cfg_id[x]` names the new callback. Other slots keep running
   throughout.

   If the slot already holds the bitstream, this step costs nothing. The
   reconfiguration time counts only when the bitstream changes.
2. **Start the thread.** Write the ROS message's address into OSIF *x*
   (register 0).
3. **Let the thread run.** The thread works through these steps:
   * Read the message's first word, the pointer to the payload.
   * Stream the payload through its kernel.
   * Write the kernel's output back to memory.
   * Push two command words to the host: PUBLISH (`0x01` in bits 31:24), to
     ask the host to publish the result message, then EXIT (`0xFF`).
4. **Join.** The worker polls OSIF status (register 1, bit 0 = word waiting)
   and reads the two words. The slot is then free for the next callback.

The thread's sequence matches how the HLS callbacks of the original system are
written:

```
get init data -> read pointer -> read payload -> compute -> write back -> publish -> exit
```

There is one difference. Those callbacks copy the whole payload into on-chip
RAM before computing. `hw_thread` instead overlaps the reads, the computation
and the writes:

* It issues a read only while its 8-entry read FIFO has room for every
  response still outstanding.
* It gives the kernel's output words priority on the single memory port.

As a result the memory never waits for the thread, and a kernel that holds
its output back, such as the sorter, cannot deadlock it.

## Virtual addresses: the MMU

A ROS message handed to a hardware thread is a pointer into the executor
process, and the message holds further pointers to its payload. These are
virtual addresses, so the threads issue virtual addresses and `mmu`
translates them behind the arbiter. It does this in the following way:

* **Hits.** A 16-entry, fully associative TLB holds 4 KB page translations. A
  request whose page is in the TLB goes to memory in the same clock, with the
  page number replaced.
* **Misses.** On a miss, the MMU first waits until every read it has already
  forwarded has returned. Read responses carry no tag, so this keeps them in
  order. Then it reads the page tables itself, through the same memory port,
  in the Cortex-A9 short-descriptor format:

  | Step | Entry address | Entry types |
  |---|---|---|
  | First level | `pgd[31:14] : va[31:20] : 00` | `10` 1 MB section, `01` pointer to a second-level table, `00` fault |
  | Second level | `table[31:10] : va[19:12] : 00` | `1x` 4 KB page, `01` 64 KB page, `00` fault |

  Whatever the entry maps, the TLB stores the translation of the one 4 KB
  page that was asked for. Entries are replaced round-robin.
* **Faults.** The MMU stops with `mmu_fault` high and the virtual address on
  `mmu_fault_addr`. The host maps the page, as the kernel's fault handler
  would, and pulses `mmu_retry`. The thread never sees the fault: its request
  just waits. Access permission bits are not checked.
* **Switching processes.** Writing a new `mmu_pgd` empties the TLB.

The bitstream DMA does not go through the MMU. Like a kernel driver, it is
given physical addresses.

## Partial reconfiguration in RTL: how a slot is modelled

A partial bitstream changes which circuit exists in a region. RTL cannot
express that, so `recon_slot` models it as follows:

* It contains one `hw_thread` and one kernel for *every* callback it can
  hold: Sobel, sort and hash.
* The input `cfg_id` connects exactly one of them to the slot's OSIF and
  MEMIF. `cfg_id` stands for "the bitstream that was last written into this
  slot".
* The threads and kernels that are not selected are held in reset.

At the slot boundary this behaves like the device: there is one callback,
chosen by the last load. Two effects follow:

* **Area.** A synthesised `recon_slot` contains all three callbacks at once,
  so it is much larger than a real slot (the evaluated slots have 20,800 to
  41,600 LUTs). To model one slot-sized callback per bitstream, delete the
  other kernels from the slot.
* **Who sets `cfg_id`.** The configuration logic behind the ICAP is a device
  primitive, not logic of this design. `rs_cfg_id` and `rs_cfg_loading`
  therefore come into `reconros_pl` as ports. In simulation, `tb_icap_model`
  drives them. It understands test bitstreams with this layout:

  | Word | Contents |
  |---|---|
  | 0 | sync word `AA995566` |
  | 1 | `{16'h5EC7, slot, callback id}` |
  | 2 | total word count |
  | 3 onwards | filler |

## Interfaces and conventions

**Memory requests** (`reconros_pkg::mem_req_t`). A request carries three
fields: `we`, a byte address `addr` (word aligned) and `wdata`. The `valid`
and `ready` signals qualify it. Read data returns in request order, one word
per read, on `rsp_valid`/`rsp_data`. `mem_arbiter` tags every read with its
requester in a 16-deep FIFO and steers the response back to that requester.
Its round-robin pointer restarts the search after the last requester granted.

**OSIF registers** (`osif`, one per slot):

* Writing register 0 pushes a word into the host-to-thread FIFO.
* Reading register 0 pops the thread-to-host FIFO. It returns 0 if that FIFO
  is empty.
* Register 1 is the status word `{8'0, host->thread count, thread->host
  count, 6'0, host->thread not full, thread->host not empty}`.
* Read data is valid one clock after the read strobe.

**DMA registers** (`zycap_dma`):

| Register | Function |
|---|---|
| 0 | control: bit 0 starts a transfer, bit 1 clears `done` |
| 1 | source byte address |
| 2 | length in bytes (a multiple of 4) |
| 3 | status: bit 0 busy, bit 1 done; `irq` equals done |

The engine writes one word per clock into the ICAP (`icap_csib` and
`icap_rdwrb` low) when memory keeps up. That is 400 MB/s at 100 MHz,
comparable to the 382 MB/s nominal rate of ZyCAP, the DMA-plus-ICAP design
the original system uses. Words go to the ICAP unchanged: any bit swapping
the configuration port needs is expected to be in the stored bitstream.

**Clock and reset.** Everything is in one clock domain, with an active-low
asynchronous reset `rst_n`. The original system clocks the callbacks at
120 MHz and the infrastructure at 100 MHz. That split, and the clock-domain
crossings it needs, are not modelled.

## The callback kernels

**Sobel filter** (`sobel_filter`, 640×480 by default).

* Input is one 32-bit word per pixel: R in bits 23:16, G in 15:8, B in 7:0.
* The two 3×3 Sobel kernels are applied to each channel. Each channel's
  output is |Gx| + |Gy|, saturated to 255, a cheap stand-in for the Euclidean
  magnitude.
* Border pixels produce 0.

The core keeps two line buffers of W+1 pixels and a 3×3 register window. It
walks a virtual (H+1)×(W+1) raster whose extra column and row are zeros it
generates itself. That way the window around every image pixel is complete
when its output is produced, and outputs leave in input order. The filter
handles one pixel per clock, with about one line of latency. Each output
overwrites its input pixel in place. This is safe because output (r, c) is
written only after input (r+1, c+1) has been read.

**Odd-even transposition sorter** (`oet_sorter`, N = 2048 by default). The
numbers are held in a register array. The sorter runs in three phases:

1. It shifts the N words in, one per clock.
2. It applies N network stages, one per clock. Even stages compare-and-swap
   the pairs (0,1), (2,3), …; odd stages the pairs (1,2), (3,4), ….
3. It shifts the words out in ascending order.

The total is 3N clocks. Each stage has N/2 comparators. The paper's
description says "n comparisons" per stage, which does not match the network.

**SHA-256** (`sha256_core`, wrapped by `hash_kernel`).

* It follows FIPS 180-4 and generates the padding internally.
* It runs one round per clock. Each block takes 16 clocks to fill the
  16-word schedule window and 64 round clocks, plus 1 clock for the final
  addition.
* `hash_kernel` byte-swaps the little-endian memory words into SHA order. It
  then hands out the digest as 8 words, H0 first. The thread writes these
  words after the message pointer, where the published 8-element array goes.

## Measured behaviour at full size

The full-size test loads all four slots with bitstreams of the sizes measured
on the evaluated device: 2,838,976, 2,838,976, 5,285,728 and 4,883,328 bytes.
It then runs a Sobel, two sorts and the hash in parallel. Memory has 8 clocks
of latency and stalls 10 % of the time. The table gives the clock counts from
OSIF start to EXIT.

| Callback | Clocks | At 120 MHz | Paper's HLS callback |
|---|---|---|---|
| Sobel 640×480 RGB | 711,792 | 5.9 ms | 16.5 ms |
| Sort 2048 numbers | 7,932–8,122 | 0.07 ms | 0.85 ms |
| SHA-256 of 6,220,800 bytes | 8,154,744 | 68 ms | 81 ms |

In this run every thread access is translated by the MMU: 1,829 table walks
and one page fault, which the testbench serves like the host would.

Reconfiguring the largest slot (RS #2) takes 1.32 M clocks at the DMA's peak
rate, about 13 ms at 100 MHz. The original system measured 38.4 ms. The gap is
time outside this logic (software driver, memory traffic and the device's own
configuration rate), none of which is modelled here.

## What is not here

* **The executor.** This covers the callback lists with their
  *ResourceMask*, the priority order (timers, subscribers, servers, clients),
  the per-worker round-robin *OffsetVector* and the software workers. All of
  it is software.
* **Two of the evaluated callbacks.** The MNIST classifier and the Stewart-
  platform inverse kinematics are missing because their internals (layer
  sizes and weights, platform geometry) are not specified. Because of them,
  neither hardware mapping of the five-node benchmark application can be
  loaded completely.
* **The device parts.** The ICAP primitive, the processor system and the
  DDR3 memory are outside this design and are reached through ports.
* **Signal-level protocols.** All of them are choices of this design: the
  memory convention, OSIF words, register maps and the MMU's fault handshake. A plain strobe port stands
  in for the DMA's AXI-Lite control port.

## Simulating

Every testbench is self-checking. Each prints
`TB_RESULT checks=<n> failures=<m>` and stops itself with a watchdog if a
handshake hangs. With Verilator 5:

```
verilator --binary --timing --assert -y rtl -y tb -Itb \
    rtl/reconros_pkg.sv tb/tb_ref_pkg.sv tb/tb_reconros_pl.sv \
    --top-module tb_reconros_pl
./obj_dir/Vtb_reconros_pl
```

Replace `tb_reconros_pl` with any other testbench name. Include
`tb/tb_ref_pkg.sv` only for the testbenches that import it: `tb_recon_slot`,
`tb_reconros_pl` and `tb_reconros_pl_full`.

| Testbench | What it covers |
|---|---|
| `tb_sobel_filter` | A 12×7 image with random stalls, against a direct 2-D reference; frame timing. |
| `tb_oet_sorter` | Random, descending and duplicate-heavy batches of 64; exactly N sort clocks. |
| `tb_sha256_core` | Standard digests (empty message, "abcd", the 56-byte FIPS example); clocks per block. |
| `tb_hw_thread` | Pointer indirection, in-place and after-message output, PUBLISH/EXIT, memory stalls. |
| `tb_osif` | FIFO order both ways, full and empty behaviour, status word. |
| `tb_mem_arbiter` | Four random requesters with read-back checks; round-robin fairness. |
| `tb_mmu` | Random traffic through small pages, a large page and a section. Two page faults, one at each table level, fixed by the host. A page-table switch that must empty the TLB. |
| `tb_zycap_dma` | Word-exact ICAP stream, registers and interrupt; one word per clock without stalls. |
| `tb_recon_slot` | Load Sobel, then sort, then hash into one slot; decoupling while loading. |
| `tb_reconros_pl` | Three dispatch rounds on four slots at reduced sizes. It requires every mechanism to occur: reconfiguration, reuse of a loaded bitstream, MEMIF contention, loading beside a running slot, MMU table walks, a page fault, and each callback. |
| `tb_reconros_pl_full` | Default sizes, one round (about 20 s). |

Supporting files in `tb/`:

* `tb_mem_model`: the memory model.
* `tb_icap_model`: the configuration-logic stand-in.
* `tb_ref_pkg`: independent reference models for Sobel, sorting and SHA-256,
  plus the test-data generator `x = i*0x9E3779B9 + seed*0x85EBCA6B`, followed
  by two xor-shift/multiply rounds.
* `tb_pl_body.svh`: the scenario shared by both end-to-end tests. The threads
  see the data at virtual address `0x4000_0000 + 4w`, with neighbouring 4 KB
  pages swapped in physical memory. The page tables lie above the data, and
  the page holding the messages starts out unmapped.

## Changing it

* **Sizes and slot count.** These are parameters of `reconros_pl`: `N_RS`,
  `IMG_W`, `IMG_H`, `SORT_LEN` and `HASH_LEN`. The defaults live in
  `reconros_pkg`.
* **Adding a callback.** Write a kernel with a `start` pulse and valid/ready
  input and output streams. Give it a `cb_id_t` value, then add it to
  `recon_slot` with its `IN_WORDS`/`OUT_WORDS`. `hw_thread` provides the
  memory and OSIF sequence unchanged.

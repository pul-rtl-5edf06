# PUL: a preload/unload DMA engine for PE scratchpads

Near-data processing devices put many small, slow processing elements (PEs)
next to memory: in-order cores at 150–500 MHz, with no cache hierarchy and no
hardware prefetcher. Every access to DRAM or NVM is a stall of hundreds of
nanoseconds, i.e. dozens of PE cycles. PUL ("pre-load / un-load") hides those
stalls in software. Each PE gets a small scratchpad and a DMA engine. The PE
queues transfers ahead of time: *preloads* copy memory into the scratchpad,
*unloads* write scratchpad results back out. It then computes on data that is
already local while the engine works through the queue. Unlike a cache
prefetch, a transfer has any size and any byte address. The data lands exactly
where software put it, and nothing is evicted behind its back.

This repository holds synthesizable SystemVerilog for the hardware side of that
scheme, as described in the paper *"PUL: Pre-load in Software for Caches
Wouldn't Always Play Along"* (Bernhardt, Tamimi, Stock, Koch, Petrov).
It covers:

* the per-PE unit: register interface, DMA engine with two 64-entry request
  queues, and a 64 KiB scratchpad;
* the array of 14 such units in the paper's FPGA near-data-processing
  prototype, merged onto one device-memory port.

The paper describes what the engine must do, not its micro-architecture. Most
of the internals here are therefore this design's own choices. The section
"Where this RTL departs from the paper" lists them.

## How software uses it

A PE sees two things: a register bus and its scratchpad port. A preload
is three register writes: source, destination, GO. The size register keeps its
value, so a kernel that always moves 64-byte records writes it once (the
paper calls this *register value buffering*). A kernel in batch form, with
a preload distance of D records, looks like this:

```
PL_SIZE  <- 64                       // once
for each batch b:
    poll STATUS until PL_BUSY == 0   // batch b is in the scratchpad
    for j in 0..D-1:                 // start batch b+1 into the other buffer half
        PL_MEM <- address of record (b+1)*D + j
        PL_SPM <- buffer[(b+1)%2] + 64*j
        PL_GO  <- 0
    compute on buffer[b%2]           // overlaps with the preloads above
    write results into the output buffer
    UL_SPM <- output buffer; UL_MEM <- result address; UL_SIZE <- n; UL_GO <- 0
poll STATUS until PL_BUSY == 0 and UL_BUSY == 0
```

There is one synchronisation primitive: the busy bit of each channel.
`PL_BUSY` is low once every queued preload has been written into the
scratchpad. `UL_BUSY` is low once every queued unload has been written to
memory *and acknowledged by it*. A PE that has seen `UL_BUSY == 0` therefore
knows its results are persistent, for example before it releases a lock.

### Register map

All registers are 64 bits wide. Offsets are in bytes on the PE's register bus
(`pul_pkg`).

| offset | name | access | content |
|---|---|---|---|
| 0x00 | PL_MEM  | r/w | preload source, byte address in device memory |
| 0x08 | PL_SPM  | r/w | preload destination, byte address in the scratchpad |
| 0x10 | PL_SIZE | r/w | preload size in bytes (0..65536) |
| 0x18 | PL_GO   | w   | queue a preload from the three registers above |
| 0x20 | UL_SPM  | r/w | unload source, byte address in the scratchpad |
| 0x28 | UL_MEM  | r/w | unload destination, byte address in device memory |
| 0x30 | UL_SIZE | r/w | unload size in bytes |
| 0x38 | UL_GO   | w   | queue an unload |
| 0x40 | STATUS  | r   | [0] preload busy, [1] unload busy, [2] preload queue full, [3] unload queue full, [15:8] preload queue entries, [23:16] unload queue entries |

A GO write to a full queue is not lost. The bus holds `bus_ready` low until the
queue has room, which stalls the PE. Reads return data one cycle after they
are accepted. A zero-byte request is accepted and does nothing.

## Inside a PUL unit

```
            PE register bus             PE scratchpad port (1-cycle read)
                  |                                 |
             +----v-----+                   +-------v--------+
             | pul_regs |                   | pul_scratchpad |  64 KiB, 2 ports,
             +--+----+--+                   |  port A: PE    |  64-bit words,
      preload   |    |  unload              |  port B: DMA   |  byte strobes
      requests  |    |  requests            +-------^--------+
          +-----v-+ +v------+                       |
          | queue | | queue |  pul_req_fifo x2      | shared DMA port,
          |  64   | |  64   |                       | alternating priority
          +---+---+ +---+---+                       |
              |         |                           |
     +--------v-----+ +-v------------+              |
     |pul_preload_ch| |pul_unload_ch |--------------+
     | issue | data | | read | write |
     +---+------^---+ +------+---^---+
      AR |    R |            W |   | B
         v      |              v   |
               memory port (id = unit number)
```

**Preload channel.** It has two decoupled stages. The *issue* stage pops a
request and immediately sends one read burst that covers the source bytes,
rounded out to whole 64-bit words. It records the request in an in-flight list
of 16 entries. The *data* stage takes the oldest in-flight request, realigns
the returning words to the destination byte offset, and writes them into the
scratchpad, one word per cycle. Up to 16 reads are therefore outstanding at
the memory at once, and this is what turns a long preload distance into hidden
latency. In the testbench, 16 back-to-back 64-byte preloads at a 53-cycle
memory latency finish in 214 cycles. A single one takes 64 cycles, so one
after another they would need about 16 × 64.

**Unload channel.** It reads the source words through the scratchpad's DMA
port. A two-entry skid buffer absorbs the one-cycle read latency. The channel
realigns the words to the destination offset and sends them as one write
burst. It keeps counting a burst until memory acknowledges it; up to 64 bursts
may be unacknowledged.

**Sharing the scratchpad.** The scratchpad has one port for the PE and one for
the engine. The two channels share the engine's port. When both ask in the
same cycle, the grant alternates between them.

### Byte realignment

This is the least obvious part of the design. Both ends of a transfer are
byte addresses, and they need not agree on their offset within a 64-bit word.
Take a 20-byte transfer from memory address 0x...3 to scratchpad address
0x...6:

* It reads ⌈(3+20)/8⌉ = 3 source words and drops 3 leading and 1 trailing byte.
* It writes ⌈(6+20)/8⌉ = 4 destination words: the first with only bytes 6–7
  enabled, the last with only bytes 0–1.

`pul_realign` does this with a 16-byte buffer. A source word enters at the
back: it takes `min(8 − offset, bytes left)` bytes, and the offset is only
non-zero for the first word. A destination word leaves from the front: it
needs `min(8 − offset, bytes left)` bytes and is placed at its lane with
matching strobes. A word may enter whenever at most 8 bytes are buffered, so
one word in and one word out per cycle is always possible and misaligned
transfers run at full rate. The realigner needs two cycles between transfers,
which is the per-request overhead visible in the number above. The same
module serves both channels.

## The PE array and the memory port

`pul_ndp_top` instantiates 14 units, as in the paper's prototype (14 soft-core
PEs at 150 MHz on an FPGA card). It joins their memory ports in
`pul_mem_arbiter`. The memory protocol is a reduced AXI-style set of
valid/ready channels:

| channel | carries | rule |
|---|---|---|
| AR | word-aligned byte address, beats − 1, id | one burst per request |
| R  | 64-bit data, last, id | bursts return in request order |
| W  | word-aligned address, data, strobes, last, id | beats of one burst are consecutive |
| B  | id | one acknowledge per burst |

The arbiter is round robin on AR. On W it is round robin at burst
granularity: the winner keeps the channel until its `last` beat. R and B
return to the unit named by their id. Responses are not buffered, so a unit
that cannot take read data holds up the shared R channel for everyone. A unit
holds read data back only for a few cycles at a time: while its scratchpad
port serves an unload, or while its realigner starts the next request.

The PEs, the device memory and the NVM latency emulator of the prototype are
not part of the RTL. Their connections are ports of `pul_ndp_top`.

## Measured behaviour

These numbers come from the end-to-end test: 14 PEs on one memory with NVM
latencies of 350 ns read and 170 ns write, i.e. 53 and 26 cycles at 150 MHz.
Each PE reads 128 randomly chosen 64-byte records out of 2048. It sums K words
of each record and unloads the sums. All 14 PEs run at once with different
settings. The test prints these cycles per PE:

| preload distance | K | cycles | PE stalled on a full queue |
|---|---|---|---|
| 1 | 1 / 4 | 23 442 / 23 462 | 0 |
| 2 | 2 / 1 | 18 608 / 18 624 | 0 |
| 4 | 3 / 2 | 15 606 / 15 640 | 0 |
| 8 | 4 / 3 | 12 882 / 13 016 | 0 |
| 16 | 1 / 4 | 9 856 / 10 086 | 0 |
| 32 | 2 | 9 798 | 0 |
| 64 | 3 | 9 752 | 0 |
| 128 | 1 | 9 374 | 2 591 |
| 64, each preload waited for (no interleaving) | 2 | 24 084 | 0 |

As in the paper, the gain flattens out from a distance of about 16, once the
memory latency is covered. Distance 128 exceeds the queue plus the in-flight
list (64 + 16). That PE is stalled on a full queue for 2 591 cycles, but it
still computes correct results. In the single-unit test, distance 16 is
3.6 times faster than waiting for every preload (5 742 against 20 656 cycles).

`tb_pul_workload_latency` sets the same work against two memories: NVM
latencies, and DRAM latencies 3.5 times shorter (15 / 7 cycles). It runs one PE
at a time, so the shared port plays no part. K is the number of words summed
per record, and every word costs 4 more compute cycles:

| K | interleaved, NVM / DRAM | waiting, NVM / DRAM | gain from interleaving, NVM / DRAM |
|---|---|---|---|
| 1 | 2 012 / 1 918 | 9 836 / 4 954 | 4.89 / 2.58 |
| 4 | 3 812 / 3 756 | 11 756 / 6 874 | 3.08 / 1.83 |
| 8 | 6 372 / 6 316 | 14 316 / 9 434 | 2.25 / 1.49 |

With interleaving, the PE runs within 5 % of its DRAM speed on NVM. The
longer the latency, the more interleaving gains. This is the paper's main
result. Its own gains, measured on real soft cores, are lower (2.9× on NVM,
2.5× on DRAM).

`tb_pul_workload_sizes`, varies the transfer size. It sums
one word per record (the cheapest compute), over 96 records per PE. It runs
the sizes side by side on the 14 PEs, once with interleaving and once waiting
for every preload:

| record size | 32 B | 64 B | 128 B | 256 B | 512 B |
|---|---|---|---|---|---|
| interleaved, cycles | 14 178 | 14 272 | 14 464 | 14 978 | 16 071 |
| waiting, cycles | 27 738 | 27 832 | 27 926 | 28 020 | 28 213 |
| interleaved, bytes per cycle | 0.22 | 0.43 | 0.85 | 1.64 | 3.06 |

Larger transfers cost little extra time, so bytes per cycle rise almost in
proportion to the size. Interleaving halves the run time at every size.
Distance 64 applies throughout, except 32 for 512-byte records: with a
double buffer, 2 × 64 × 512 bytes would fill the entire scratchpad. Four
further PEs run the default 64-byte case alongside. In the first 16 076
cycles, until the last interleaving PE finishes, the read channel delivers
15 900 beats, i.e. it is 99 % busy. The array is therefore limited by
memory bandwidth, not by latency. This matches the paper's finding that
14 PEs saturate the NVM bandwidth. The waiting PEs get less of the port while
the others run, so the 2× gap above partly reflects that sharing.

`tb_pul_workload_unload`, covers unloading. Each PE computes
2 048 result words, spending 24 cycles on each, into its scratchpad. Whenever
a block of the flush size is full, it unloads that block to a scattered place
in memory. As before, each size runs once interleaved and once waiting for
every flush to be acknowledged:

| flush size | 32 B | 128 B | 512 B | 2 048 B | 8 192 B |
|---|---|---|---|---|---|
| interleaved, cycles | 53 711 | 52 977 | 53 071 | 53 453 | 52 791 |
| waiting, cycles | 89 161 | 69 417 | 58 833 | 55 447 | 56 981 |

With interleaving the PE never waits, and the run time is its compute time
at every size. Waiting costs one full write round trip per flush, so small,
frequent flushes gain the most (1.66× at 32 B). Without the compute cost, 14
PEs writing one word per cycle each would need 14 times the bandwidth of the
memory port. The run would then measure only port sharing.

## Where this RTL departs from the paper

The paper fixes these points, and the RTL follows them:

* two request queues of 64 entries, one for preloads and one for unloads;
* source, destination and size written into registers, with unchanged
  registers reused;
* a status register that tells whether requests are pending;
* byte-addressable transfers of configurable size;
* a 64 KiB BRAM scratchpad that the PE reads in one cycle;
* one unit per PE, 14 PEs, 64-bit PEs.

Everything else is this design's own choice:

* the register offsets, the GO doorbell registers and the STATUS bit layout;
* stalling the PE on a GO to a full queue;
* the in-flight limit of 16 preloads and the limit of 64 unacknowledged
  unload bursts;
* 64-bit data paths throughout;
* the memory protocol and the arbiter;
* the realigner;
* the alternating share of the scratchpad's DMA port;
* counting an unload as done only when memory acknowledges it;
* reset behaviour: synchronous, active low; queues, counters and registers
  clear, scratchpad content does not.

Not built:

* Finer-grained status that names individual pending requests. The paper
  mentions it only as future work. As a result, a PE cannot wait for one
  particular preload, only for all of them. The paper also compares a
  "sequential" strategy, which alternates one preload with one compute step.
  That strategy is software; the test PEs here all run the batch form,
  which the paper finds to be at least as fast.
* Any limit on burst length. One request is one burst of up to 8 193 beats.
  A real AXI fabric would need the issue stage to split bursts.
* The NVM latency emulator, the PEs and the UPMEM PIM platform, which the
  paper uses but does not design.

The paper's prototype reaches about 8 GiB/s of device bandwidth. The single
64-bit memory port here carries 1.2 GB/s at 150 MHz. Matching the prototype
would need a wider memory port or a faster memory clock behind the arbiter.

## Files

| file | content |
|---|---|
| `rtl/pul_pkg.sv` | widths, request and memory-channel structs, register map |
| `rtl/pul_req_fifo.sv` | request queue |
| `rtl/pul_realign.sv` | byte realigner |
| `rtl/pul_preload_ch.sv`, `rtl/pul_unload_ch.sv` | the two channels |
| `rtl/pul_dma_engine.sv` | queues, channels, scratchpad-port sharing |
| `rtl/pul_regs.sv` | register interface |
| `rtl/pul_scratchpad.sv` | 64 KiB dual-port scratchpad |
| `rtl/pul_unit.sv` | one PUL unit |
| `rtl/pul_mem_arbiter.sv` | memory arbiter for the PE array |
| `rtl/pul_ndp_top.sv` | 14 units and the arbiter (top) |
| `tb/tb_*.sv` | self-checking testbenches, one per module, plus the latency, transfer-size and unloading workloads |
| `tb/pul_mem_model.sv` | behavioural memory with read/write latency |
| `tb/pul_pe_model.sv` | behavioural PE running the batch-wise kernel |
| `tb/pul_pe_flush_model.sv` | behavioural PE that materialises results through unloads |

## Simulating

Each testbench prints one line `TB_RESULT checks=N failures=M` and ends. For
example, to run the full-size end-to-end test (about 25 000 cycles; it runs
in well under a second once built):

```
verilator --binary --timing --assert --timescale 1ns/1ps -Wno-fatal \
    -y rtl -y tb +libext+.sv rtl/pul_pkg.sv tb/tb_pul_ndp_top.sv \
    --top-module tb_pul_ndp_top -o sim
./obj_dir/sim
```

Replace the testbench name to run another test. `tb_pul_unit` runs three
units side by side: distance 16, no interleaving, and distance 128. It
compares their cycle counts. To lint the design:
`verilator --lint-only -Wall -y rtl +libext+.sv rtl/pul_pkg.sv rtl/pul_ndp_top.sv`.

Things that are easy to change:

* `NUM_PE`, `SPM_BYTES`, `FIFO_DEPTH`, `OUTSTANDING` and `MAX_ACKS` on
  `pul_ndp_top`.
* The memory latencies: `RD_LAT` and `WR_LAT` on `pul_mem_model`.
* The workload: `DIST`, `K`, `RECB`, `NRECS`, `DATA_BASE` and `SYNC` on
  `pul_pe_model`.

Two limits apply:

* The scratchpad address width is fixed at 16 bits in `pul_pkg`, so
  `SPM_BYTES` can shrink but not grow beyond 64 KiB.
* Ids are 4 bits wide, so `NUM_PE` is at most 16.

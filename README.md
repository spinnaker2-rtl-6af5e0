# SpiNNaker2 chip logic in SystemVerilog

SpiNNaker2 is a many-core chip for event-based machine learning and for
spiking neural networks. Its premise is that most neural workloads are
sparse in time: a neuron does work only when a spike or an event reaches it.
The chip therefore has 152 small, independent processor cores. Each core has
its own memory and its own accelerators. The cores talk in two ways:

- **Point-to-point transfers** over an on-chip network (NoC), for bulk data
  and for reaching DRAM.
- **Multicast events** through a dedicated packet router, which copies each
  event to every core and chip link that subscribed to it.

No core waits on a global clock step. A core sleeps until an interrupt
tells it that data or an event has arrived. Its clock and its supply level
can be turned down while it idles.

This RTL gives the digital part of such a chip, down to the register level:
the processing elements without their processor cores, the NoC, the
multicast router, and the DRAM and host attachments. The parts that are
licensed IP or analog (ARM cores, SerDes, PLLs, LPDDR4 PHY) are left out,
and their signals are ports of the top module.

## Floor plan

The top module, `spinnaker2_chip`, is a 7 x 6 mesh of NoC routers. Four
processing elements (PEs) share each router and form a *quad-PE* (QPE).
The table below shows the sites, with x across and y down:

| y \ x | 0 | 1 | 2 | 3 | 4 | 5 | 6 |
|-------|---|---|---|---|---|---|---|
| **0** | Q | Q | Q | Q | Q | Q, host port (north) | Q |
| **1** | Q, DRAM0 (west) | Q | Q | Q | Q | Q | Q |
| **2** | Q | Q | Q | R | Q | Q | - |
| **3** | Q | Q | Q | - | Q | Q | - |
| **4** | Q, DRAM1 (west) | Q | Q | Q | Q | Q | Q |
| **5** | Q | Q | Q | Q | Q | Q | Q |

- **Q** is a QPE tile: four PEs and one router.
- **R** is the multicast router, attached to local port 0 of the router at
  (3,2). Its six chip links are top-level ports.
- **-** is a router with nothing attached locally.

There are 38 tiles, so 152 PEs. PE `p` of the chip is PE `p % 4` of the
`p / 4`-th tile, with tiles counted row by row and the four non-tile sites
skipped.

Every NoC endpoint has a 9-bit node address `{x, y, sub}`:
- `sub` 0–3 is a PE of the tile at (x, y).
- `sub` 4–7 leaves the mesh through that router's N/E/S/W port. This is how
  the edge devices are addressed: DRAM0 is (0,1,W), DRAM1 is (0,4,W), and the
  host is (5,0,N).

## The network and its packet

All NoC traffic is one 182-bit flit (`noc_pkt_t` in `s2_pkg`):

| field | bits | meaning |
|---|---|---|
| `ptype` | 2 | `WRITE`, `READ_REQ`, `READ_RESP`, `MC` |
| `dst`, `src` | 9 + 9 | node addresses |
| `irq` | 1 | the receiver raises an interrupt after the write |
| `addr` | 32 | byte address at the receiver; for `MC`, the routing key |
| `payload` | 128 | one 16-byte word; for `READ_REQ`, the return address in bits 31:0 |

Each router (`noc_router`) has eight ports: four local ports and N/E/S/W.
Each input has a two-entry FIFO. Packets go X first, then Y. At the
destination router, `sub` picks the output port. Each output has a
round-robin arbiter, and a packet moves one hop per cycle when there is
room downstream. All handshakes in the design are valid/ready: data moves in
a cycle in which both are high.

Remote memory works with plain packets:
- A `WRITE` stores its 128-bit payload at `addr` of the receiving PE (or DRAM).
- A `READ_REQ` is answered by a `READ_RESP` to the sender. The response
  carries the word read, and its `addr` is the return address the request
  named. The receiver stores it there like a write.

## Inside a processing element

```
             instr (32b) ─┐
 core ports  data  (32b) ─┼─► pe_sram (8192 x 128 bit = 128 kB)
                          │       ▲ 128b
                          │  ┌────┴──────────────────────────┐
  registers 0xE000_0000 ──┼─►│ comms: rx path, event queue,  │◄─► NoC router
                          │  │ tx, IRQ, dma, mac_array       │
                          │  └───────────────────────────────┘
                          └─► exp_accel, log_accel, prng, TRNG word, dvfs_ctrl
```

The processor core is not part of the RTL. `pe` exposes the core's
32-bit instruction bus and data bus, its interrupt line, a core clock enable
and the performance level. Bus protocol:
- hold `req` until `gnt`;
- read data comes with `rvalid` one cycle after `gnt`.

The SRAM is a single array with three ports: the 128-bit port of `comms`,
the core data port, and the instruction port. It has fixed priority in that
order, so a core access can stall while network traffic lands.

Core address map:
- `0x0000_0000`–`0x0001_FFFF`: SRAM.
- `0xE000_0000` + offset: registers.

| offset | register |
|---|---|
| 00 | IRQ_STATUS: [0] event queue not empty, [1] irq-flagged write arrived, [2] DMA done, [3] MAC done; write 1 to clear bits 1–3 |
| 04 | IRQ_ENABLE, same bits |
| 08 | IRQ_ADDR: address of the last irq-flagged write |
| 10, 14, 18–24 | TX_DST, TX_ADDR, TX_PAYLOAD0–3 |
| 28 | TX_CTRL: write `{irq, type[1:0]}` to send; read bit 0 = still pending |
| 30, 34, 38–44, 48 | event queue: RX_LEVEL, RX_KEY, RX_PAYLOAD0–3, RX_SRC of the oldest event |
| 4C | RX_POP: a write drops the oldest event |
| 50, 54, 58, 5C | DMA_LOCAL, DMA_RNODE, DMA_RADDR, DMA_LEN (in 16-byte words) |
| 60 | DMA_CTRL: write `{irq_last, dir, start}`; read = busy |
| 70, 74, 78, 7C | MAC_A, MAC_B, MAC_O (SRAM byte addresses), MAC_K |
| 80 | MAC_CTRL: write `{mode16, start}`; read = busy |
| 90 | EXP: write x (s16.15); read exp(x) (s16.15, saturated) from the next cycle |
| 94 | LOG: write x (u16.15); read ln(x) (s16.15); ln 0 reads as 0x8000_0000 |
| 98 | PRNG: write a seed; a read returns the current word and advances |
| 9C | TRNG: latest word from the noise source |
| A0 | DVFS: write `{auto, pl[1:0]}`; read the same |

### Interrupt-carrying writes, and how a scheduled computation runs

The hardest part to follow is how the cores coordinate, because no core is
in charge of timing. The mechanism is a `WRITE` packet with `irq` set. It
stores a flag word in the receiver's SRAM and then interrupts the receiving
core. IRQ_ADDR tells that core which flag it was. Several writes can arrive
before the core reacts, and IRQ_ADDR holds only the last one. For that
reason software polls its flag words after each interrupt, rather than
counting interrupts.

A distributed matrix product runs like this. It is the pattern the chip
test runs end to end.

1. The host writes slices of A and B into the SRAM of several *workers*.
   Then it sends an irq-flagged write to a *scheduler* PE.
2. The scheduler sends an irq-flagged "job" write to each worker.
3. Each worker starts its MAC array on its slice. The MAC-done interrupt
   wakes the worker, which sends an irq-flagged "done" write into the
   scheduler's SRAM.
4. When every done flag is set, the scheduler interrupts one worker.
5. That worker fetches the other partial products by DMA, adds them, and
   writes the result to DRAM by DMA. It then notifies the host.

### DMA

`dma` moves `len` 16-byte words between local SRAM and any node. There are
two directions:
- **Write-out** (`dir`=0) reads a local word and sends a `WRITE`, at about
  3 cycles per word. The last packet can carry `irq`, so the receiver learns
  that the whole block has landed.
- **Fetch** (`dir`=1) issues one `READ_REQ` per cycle, each with its own
  return address. The receive path writes the responses, and the job ends
  when all of them have arrived.

Both directions raise DMA-done.

### MAC array

`mac_array` (4 x 16 by default) computes C = A·B with signed 8-bit or 16-bit
operands and 32-bit wrapping accumulators. It is output-stationary: for
each k it reads one word with column k of A and one word (8-bit) or two
words (16-bit) with row k of B. All 64 cells then accumulate in one cycle.

Memory layout:
- column k of A is at `a + 16k`;
- row k of B is at `b + 16k` (8-bit) or `b + 32k` (16-bit);
- row r of C is at `o + 64r`, as sixteen 32-bit words.

From start to done it takes 2 + 5K cycles (8-bit) or 2 + 7K cycles
(16-bit), plus 16 write cycles, when nothing else uses the SRAM. A 2-D
convolution runs as a matrix product on operands that software has laid out
(im2col).

### Accelerators and performance levels

**exp.** The input is multiplied by log2(e). Its fraction f selects a
33-entry table T[i] = round(2^(i/32)·2^30), with linear interpolation on the
bits below the index. The integer part becomes a shift.

**log.** A leading-one detector gives the integer part of log2(x). A table
of log2(1 + i/32) with interpolation gives the fraction. The result is then
scaled by ln 2.

Both accelerators are single-cycle and accurate to a few LSB of the s16.15
result. The tables are computed in SystemVerilog from these formulas.

**PRNG.** Xorshift32 with shifts 13, 17 and 5. A zero seed is replaced by
the reset value.

**TRNG.** The true random source is a physical noise source, so the PE only
latches the words it delivers on `trng_valid`/`trng_value`.

**DVFS.** `dvfs_ctrl` selects one of three performance levels:

| level | core clock enable | intended supply |
|---|---|---|
| PL0 | every 4th cycle | low voltage |
| PL1 | every 2nd cycle | mid voltage |
| PL2 | every cycle | high voltage |

Software sets the level, or sets `auto`. In automatic mode the level
follows the event queue: empty gives PL0, one pending event gives PL1, two
or more give PL2. The level goes out to the supply and clock generators,
which are not part of this RTL.

## Multicast router

`spinn_router` receives `MC` packets in two ways: from any PE, as NoC
packets addressed to (3,2,0) with the key in `addr`, and from the six chip
links. Each packet has a 32-bit key and a 128-bit payload.

The router looks the key up in a 1024-entry table of
`{valid, key, mask, route[157:0]}`:
- An entry matches when `(pkt.key & mask) == key`, and the lowest-numbered
  match wins.
- Route bits 0–5 select chip links; bit 6+p selects PE p.
- One copy goes out per cycle: to a link port, or as an `MC` NoC packet to
  the PE's node, where it enters the event queue.
- Keys without a match are dropped and counted (`mc_drop_count`).
- The table is written with NoC `WRITE`s to the router's node, at byte
  address `64·e + 16·f`:
  - f=0: `{valid, mask, key}`;
  - f=1: route bits 127:0;
  - f=2: route bits 157:128.

  Anything on the NoC (the host, a PE) can therefore configure it.

## DRAM and host

Each `dram_bridge` turns `WRITE` and `READ_REQ` packets into requests on a
128-bit memory port for an LPDDR4 controller. The port protocol is:
- hold `mem_req` until `mem_gnt`;
- read data arrives with `mem_rvalid` after any delay;
- one read is outstanding at a time.

The host port is a raw NoC port on the north edge of column 5. It stands in
for the Ethernet interface: it injects packets and receives whatever is
addressed to node (5,0,N).

## Where this RTL departs from the published chip

The following are the parts the paper leaves open. Each is a design choice
made here, not the silicon's:

- mesh placement;
- packet format;
- register map;
- routing algorithm;
- table format;
- array and FIFO sizes;
- number formats;
- level ratios.

Not built:
- the ARM Cortex-M4F cores (ports instead);
- SerDes and Ethernet PHYs (packet ports instead);
- the LPDDR4 controller and PHY (a memory port instead);
- PLLs and power switches (`pl` and clock-enable outputs instead);
- the true random noise source (an input port);
- periphery/GPIO;
- the direct SRAM path to a neighbouring PE, which the chip drawing shows;
- a dedicated convolution mode in the MAC array.

The 1024-entry multicast table, the 4 x 16 MAC array and the event-queue
depth of 8 are reasonable sizes chosen here. The published figures are not
known.

## Simulating

Every block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M`. Example with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_qpe \
    rtl/s2_pkg.sv rtl/*.sv tb/tb_qpe.sv -o sim && obj_dir/sim
```

| testbench | what it covers |
|---|---|
| `tb_pe_sram` | port priorities, byte enables, random traffic against a model |
| `tb_exp_accel`, `tb_log_accel` | accelerators against `$exp`/`$ln` |
| `tb_prng` | PRNG against an independent xorshift model |
| `tb_dvfs_ctrl` | clock-enable ratios and automatic mode |
| `tb_mac_array` | random 8/16-bit products, including the cycle count |
| `tb_dma` | both DMA directions |
| `tb_comms` | every packet type, the event queue filling up, IRQs |
| `tb_noc_router` | random all-port traffic with back-pressure; every packet delivered once, in order per source |
| `tb_spinn_router` | table programming, priority, drops, links |
| `tb_pe`, `tb_qpe` | a PE and a tile driven through their core buses |
| `tb_dram_bridge` | the DRAM bridge |
| `tb_spinnaker2_chip` | the whole chip at full size: the scheduled matrix product above, multicast from a core and from a link, a dropped key, automatic DVFS, DRAM fetch, accelerators and random back-pressure; every mechanism is counted |

The full chip elaborates 152 distinct PE instances, because each has its
own node-address parameter. The C++ that Verilator generates for it comes to
more than a hundred source files of several megabytes each, so building
`tb_spinnaker2_chip` takes well over an hour on a four-core machine. The
largest configuration simulated to completion so far is one full-size tile
(`tb_qpe`: four PEs with 128 kB SRAM each and their router), together with
the full-size multicast router and the router and DRAM-bridge tests. Run the
chip test with a generous build budget, for example with `-j` set to the
number of cores.

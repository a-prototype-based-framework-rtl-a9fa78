# Fine-grained DFS and multi-replica accelerator tiles for a tile-based SoC

A tile-based heterogeneous SoC (a mesh NoC with CPU, memory, I/O and
accelerator tiles, in the style of ESP) gets two run-time features from this RTL:

1. **Frequency islands with true DFS.** Every tile and router belongs to one
   of several frequency islands. Each island has its own clock, which
   software can retune at run time in 5 MHz steps, or stop, without a pause.
   FPGA clock managers (MMCMs) drive their output low while they are
   reprogrammed. To hide that, every island owns **two** MMCMs. One keeps
   clocking the island while the other is reprogrammed, and then the two
   swap roles.
2. **Multi-replica accelerator (MRA) tiles.** One NoC tile can hold K copies
   of an unmodified accelerator. To the NoC it still looks like one
   accelerator with the usual four DMA streams. An *AXI bridge* inside the
   tile merges and splits the replicas' streams, and hardware counters
   measure what the tile does at run time.

This RTL follows the architecture of the Vespa framework (an extension of
ESP), as published in 2024. The configuration is the evaluated 4x4 SoC: five
islands and thirteen accelerator tiles. Two of them (A1, A2) have four
replicas each. The other eleven are traffic generators (TG). The NoC routers,
the CPU, memory and I/O tiles, the accelerators themselves and the MMCMs are
not part of this RTL. Their connections are ports of the top module,
`vespa_soc`.

```
            I/O island                    every island i (i = 0..4)
 +---------------------------+        +--------------------------------+
 | freq_regs                 |        | dfs_actuator                   |
 |  island i: code[4:0], en  |------->|  FSM on clk_ref                |
 +---------------------------+        |  MMCM A <-> MMCM B  (external) |
                                      |  clk_switch -> island_clk[i]   |
                                      +--------------------------------+

 accelerator tile t (default: island ACC for A1/A2, TG otherwise)   NoC island
 +-------------------------------------------------------------+
 | Acc_1..Acc_K (external)                                     |
 |   rdCtrl/wrCtrl/wrData ->  axi_bridge -> 4 buffers -> monitor|--resync-->  noc_* ports
 |   rdData               <-                                   |<--resync--   (routers,
 | register block (APB): start, done, counter enables, counters|              memory)
 +-------------------------------------------------------------+
```

## Files

| file | what it is |
|---|---|
| `rtl/vespa_pkg.sv` | shared constants, island enumeration, DMA control word, counter indices |
| `rtl/freq_regs.sv` | frequency registers (one code and one enable per island) |
| `rtl/dfs_actuator.sv` | per-island DFS actuator: two-MMCM swap FSM |
| `rtl/clk_switch.sv` | glitch-free two-input clock switch with enable |
| `rtl/resync.sv` | dual-clock FIFO used at island boundaries |
| `rtl/axi_bridge.sv` | K-to-1 stream bridge of an MRA tile |
| `rtl/acc_monitor.sv` | four run-time monitoring counters |
| `rtl/mra_tile.sv` | MRA tile: bridge, monitor and register block |
| `rtl/vespa_soc.sv` | top: registers, five actuators, thirteen tiles, resynchronizers |
| `rtl/sync_fifo.sv`, `rtl/rr_arbiter.sv`, `rtl/rst_sync.sv` | helpers |
| `tb/*_tb.sv` | self-checking testbenches: one per block, the whole fabric, a non-default island map, and the three evaluation experiments |
| `tb/mmcm_model.sv`, `tb/acc_model.sv`, `tb/noc_mem_model.sv` | behavioural models of the parts outside the RTL |

## Frequency codes and islands

A frequency is a 5-bit **code in units of 5 MHz**: code 2 = 10 MHz and
code 20 = 100 MHz. The five islands of the evaluated system, with their
ranges, are:

| index (`island_e`) | island | range | codes |
|---|---|---|---|
| 0 `ISL_ACC` | A1 and A2 accelerator tiles | 10-50 MHz | 2-10 |
| 1 `ISL_NOC` | NoC routers and memory tile | 10-100 MHz | 2-20 |
| 2 `ISL_TG`  | the eleven traffic-generator tiles | 10-50 MHz | 2-10 |
| 3 `ISL_CPU` | CPU tile | 10-50 MHz | 2-10 |
| 4 `ISL_IO`  | auxiliary I/O tile | 10-50 MHz | 2-10 |

A request outside an island's range is clamped to it by that island's
actuator. After reset every island runs at 10 MHz.

### Frequency registers (`freq_regs`, I/O island clock, APB)

| address | bits | meaning |
|---|---|---|
| `4*i` | `[4:0]` | requested code of island i |
| `4*i` | `[8]` | enable of island i; 0 stops the island clock (held low) |

The registers reset to code 2 with the enable set. Unused addresses read 0,
and writes to them are ignored.

## The DFS actuator: changing a clock without stopping it

This is the part that is least obvious. `dfs_actuator` has a fixed
reference clock `clk_ref` for its FSM and two external MMCMs. The MMCM port
is simplified to three signals:
`mmcm_rcfg_code` (target code), a one-cycle `mmcm_rcfg_start` and
`mmcm_locked`. Lock falls when programming starts and rises when the new
clock is stable. During that time the MMCM output is low.

At any moment one MMCM is the **master** and drives `clk_out` through
`clk_switch`. The other is the **slave**. A change goes through these steps:

```
INIT -> INIT_LOCK : program MMCM 0 to FREQ_RESET after reset, wait for its lock
IDLE              : wait for a stable request whose clamped code differs from cur_freq
PROG              : program the SLAVE with the new code (one start pulse)
UNLOCK, LOCK      : wait for the slave's lock to fall, then to rise
SWITCH            : point clk_switch at the slave; wait until only the slave is on
                    (or at once if the island is disabled)
                    -> the slave becomes master, cur_freq = new code, back to IDLE
```

The master is never reprogrammed while it drives the island (an assertion
checks this). The island therefore always has a clock. The longest gap
between two rising edges during a change is bounded by what the clock switch
needs: about two periods of the old clock plus two of the new. The gap does
not depend on the MMCM lock time. A change takes the lock time plus about ten
`clk_ref` cycles and a few island-clock periods (`busy` is high throughout).

Clock-domain handling inside the actuator:

* `freq_in`/`en_in` come from the I/O island. Each bit goes through two
  flops, and a request is accepted only after two equal samples in a row.
  This way a multi-bit code cannot be taken half-updated.
* `mmcm_locked` and the clock switch's "on" flags are synchronised into
  `clk_ref` the same way.
* `en_in` = 0 does not touch the MMCMs. It closes the clock switch, so the
  island clock stops low and resumes glitch-free when enabled again.

`clk_switch` is the classic cross-coupled switch. Each input clock has a
select flop that changes on that clock's falling edge and may turn on only
after the other input has turned off. On an FPGA a two-input global clock
buffer does the same job. The gating here is deliberate logic on clock nets.

## Multi-replica accelerator tile

### Streams

Each replica, and the tile as a whole, has four valid/ready streams, the
same ones an ESP accelerator uses:

* `rdCtrl`: DMA read request, `dma_ctrl_t` = `{index[31:0], length[31:0]}`
  (start word and number of 64-bit words).
* `wrCtrl`: DMA write request, in the same format.
* `rdData`: read data towards the accelerator.
* `wrData`: write data from the accelerator.

### AXI bridge rules (`axi_bridge`)

* Read requests from the K replicas are arbitrated round-robin into the
  tile's `rdCtrl` buffer. Each granted request also writes `{replica, length}`
  into an outstanding-read queue (OUTST = 8 entries).
* Returning read data is assumed to come back **in request order**. Each
  beat from the `rdData` buffer goes to the replica at the head of that
  queue. After `length` beats the queue entry is dropped. All replicas share
  the data bus (`acc_rddata`), and only the addressed replica sees `valid`.
* Write requests are arbitrated round-robin, one burst at a time. The
  granted replica owns `wrData` until `length` words have gone through.
  Only then can another `wrCtrl` be granted. This keeps each write request
  followed by its own data on the NoC side.
* The four tile buffers are `sync_fifo`s of BUF_DEPTH = 4. Each adds one cycle.

### Monitoring counters (`acc_monitor`)

| counter | counts | reset |
|---|---|---|
| EXEC | tile clock cycles from start to done | automatically at each start, then stops at done |
| IN | read-data beats accepted from the NoC | manually (MON_CLR bit 0) |
| OUT | rdCtrl + wrCtrl + wrData transfers to the NoC | manually (bit 1) |
| RTT | sum, over read requests, of the cycles from the request leaving the tile to its **first** data beat arriving | manually (bit 2) |

Each counter counts only while its MON_EN bit is set. All four are 32 bits
wide and count in the tile's clock. Note that they count transfers on the
tile streams: one "packet" here means one stream transfer. The average round
trip is RTT divided by the number of read requests, which software knows.

### Tile registers (`mra_tile`, tile island clock, APB)

| address | access | meaning |
|---|---|---|
| 0x00 | W | bit 0 = 1: start all K replicas (one-cycle `acc_start`) |
| 0x04 | R | bit 0 running, bit 1 done (every replica has pulsed `acc_done`) |
| 0x08 | RW | MON_EN[3:0]: EXEC, IN, OUT, RTT (reset: all on) |
| 0x0C | W | MON_CLR[2:0]: clear IN, OUT, RTT |
| 0x10-0x1C | R | EXEC, IN, OUT, RTT |

The replicas' own configuration registers are not part of this tile model.
They are accelerator-specific.

## Resynchronizers

Every stream that crosses from a tile's island into the NoC island goes
through `resync`, a dual-clock FIFO of 8 entries. It uses Gray-coded
pointers and two-flop synchronizers. Either side's clock may change
frequency or stop at any time. Data waits in the FIFO until the reader's
clock returns. A word becomes visible three to four reader clocks after it
is written. The top places one on each of the four streams of every accelerator tile
whose island differs from the NoC island. A tile placed in the NoC island
is wired to its router directly. With the default map, which is that of the
evaluated system, every accelerator tile crosses.

## Top level (`vespa_soc`)

Parameters: `NI = 5` islands, `N_TILES = 13`, `K_A = 4` (replicas in A1
and A2, which are tiles 0 and 1), `K_TG = 1` (replicas in each TG tile,
tiles 2-12), `DW = 64`. The replica port arrays are `KMAX = max(K_A, K_TG)`
wide. A tile with fewer replicas uses the low indices and drives the rest
inactive.

`TILE_ISL` assigns each tile to an island, three bits per tile with tile 0
in the low bits. The default is the `default_tile_isl()` function of
`vespa_pkg`: A1 and A2 in `ISL_ACC`, every TG tile in `ISL_TG`. Any island
may hold any tile. A tile in `ISL_NOC` loses its resynchronizers. Measured
at 50 MHz on both sides, this cuts the average read round trip from about
22 to 5 tile cycles.

`DFS_ISLANDS` (default all ones) selects, per island, a DFS actuator
(bit set) or the fixed clock `fixed_clk[i]` (bit clear).

**Reset order.** Island resets leave reset only after every actuator has
finished its first MMCM lock. Until then, all island clocks run with their
resets held. Both sides of every resynchronizer are therefore reset by a
running clock. Otherwise the tile side of a crossing could leave reset
while the NoC side had no clock yet, and it would read a stale pointer.
Until the I/O island (which holds the frequency registers) is out of
reset, the actuators ignore the registers and keep the reset setting:
10 MHz, enabled.

Port groups and their clocks:

* `clk_ref`, `rst_n`: reference clock of all DFS FSMs, and asynchronous
  reset. The reset is released in each island by its own `rst_sync`.
* `fixed_clk[i]`: the clock of island i when bit i of `DFS_ISLANDS` is
  clear. That island then has no actuator. Its MMCM ports stay idle and
  `island_freq[i]` reads 0. With the default parameter this port is unused.
* `mmcm_*[i][m]`: the two MMCMs of island i (`clk_ref` domain).
* `island_clk`, `island_rst_n`, `island_freq`, `island_busy`: clocks and
  status for everything outside (CPU, memory, I/O tiles, routers).
* `io_*`: frequency-register bus, in `island_clk[ISL_IO]`.
* `t_*[t]`: register bus of tile t, in that tile's island clock.
* `acc_*[t][k]`: replica k of tile t, in the tile's island clock.
* `noc_*[t]`: tile t's four streams at its router, in `island_clk[ISL_NOC]`.

## What this RTL does not contain, and where it departs from the original

* **Outside the RTL:** the NoC routers and the CPU (CVA6), memory (DDR) and
  I/O tiles, which all come unchanged from the base platform. Also the HLS
  accelerators and the MMCM primitives. The testbench models stand in for
  them. The NoC and memory are modelled as one server with fixed latency.
* **Abstracted interfaces:**
  * the MMCM reconfiguration port ({code, start, locked} in place of the
    primitive's register-level reconfiguration port);
  * the tile-to-router link (the four DMA streams, each through its own
    resync, in place of the NoC's packet planes);
  * all register buses (APB with zero wait states).
* **Choices not given by the original description:**
  * the code encoding and register layouts;
  * reset frequency (10 MHz, all islands on);
  * the meaning of the enable bit (stops the island clock; consistent with
    the 0 MHz TG trace of the published frequency profile);
  * in-order read return and write-burst locking in the bridge;
  * round-robin arbitration and all FIFO depths;
  * what one "packet" is, and first-beat round-trip timing;
  * the TG tiles' replication factor (1);
  * the synchronizers in the actuator.
* **Fixed-clock islands are optional.** The original lets an island run
  either from a fixed clock or from its own actuator. Here this is the
  `DFS_ISLANDS` parameter. By default every bit is set, because all five
  islands of the evaluated system have a frequency range.
* **CPU and I/O tiles have no resynchronizers.** Their tile-to-router
  resynchronizers are not instantiated, because their NoC interfaces are
  outside this RTL. A CPU or I/O tile attached to these ports must bring its
  own dual-clock crossing, for example an instance of `resync`.

## Simulating

All testbenches are self-checking. Each ends by printing
`TB_RESULT checks=N failures=M` and stops on a watchdog if something hangs.
With Verilator 5:

```
verilator --binary --timing --assert --timescale 1ns/1ps -Wno-fatal \
  -y rtl -y tb +libext+.sv -Irtl -Itb --top-module vespa_soc_tb \
  rtl/vespa_pkg.sv tb/vespa_soc_tb.sv
./obj_dir/Vvespa_soc_tb
```

Replace `vespa_soc_tb` by any other testbench name:

* `freq_regs_tb`: reset values; random register writes checked at the
  outputs and on read-back; out-of-range addresses.
* `dfs_actuator_tb`: start-up at 10 MHz, then a sequence of changes. For
  each it checks the measured period, the code, the clock gap, that exactly
  one MMCM was reprogrammed, the change time and clamping. It also stops and
  restarts the clock.
* `resync_tb`: 2000 random words across a read clock that changes speed and
  stops; fill level with a stalled reader; crossing latency.
* `axi_bridge_tb`: four replicas with different chunk sizes. Checks the
  memory image, per-replica delivery, request counts, replica contention
  and backpressure.
* `acc_monitor_tb`: random strobes against a reference model, every cycle,
  with random enables and clears.
* `mra_tile_tb`: two runs through the register interface. Checks the
  counters against stream-level references, clearing and disabled counters.
* `vespa_soc_tb`: the whole fabric at its default size (5 islands, 13 tiles,
  30 replicas). The accelerator, NoC and TG islands are retuned and stopped
  while traffic flows. Checks every island's clock period, every replica's
  output and every tile's counters. It counts DFS changes, clamped requests,
  clock stops, replica contention, NoC backpressure and cross-island
  transfers, and fails if any of them never happened. It runs in a few
  seconds.
* `island_map_tb`: a non-default tile map. A1 is in the NoC island, TG
  tiles 2-6 in the TG island and 7-12 in the CPU island. All tiles run at
  once, with the four tile islands at different frequencies, and every
  output word is checked. The test also checks that A1's streams reach its
  router unchanged. Then A1 and A2 run alone at equal clocks, and A1's
  average read round trip must be the shorter.
* `fig3_workload_tb`: the interference experiment on the default fabric,
  with the CPU and I/O islands on fixed 50 MHz clocks. A2 runs four
  replicas at 50 MHz, the NoC runs at 10 MHz, and 0, 7 or 11 TG tiles
  stream memory traffic. Every kernel is a behavioural replica that spends
  a fixed number of cycles per 64-bit word. The count is `400 / T`, where T
  is the kernel's published single-replica throughput in MB/s at 50 MHz.
  This gives adpcm (compute-bound) 286 cycles, dfmul (memory-bound) 46, and
  dfadd, run by the TGs, 43. A typical run gives these A2 execution counts
  in cycles:

  | active TGs | adpcm | dfmul |
  |-----------:|------:|------:|
  | 0          | 5085  | 1325  |
  | 7          | 8975  | 8015  |
  | 11         | 12815 | 11855 |

  The test checks that every result is correct, and that time grows with
  the number of TGs. It also checks that the adpcm slowdown is less than
  half the dfmul slowdown, at both 7 and 11 TGs. Here the slowdowns at 11
  TGs are 2.5x and 8.9x. The original measurement shows adpcm almost flat
  up to 7 TGs. In this model adpcm already slows down 1.8x at 7 TGs. The
  cause is the memory model: it serves one request at a time, and each
  replica waits for its data before computing.
* `fig5_traffic_tb`: the traffic-profile experiment. A1 and A2 run
  endless kernels at the dfmul rate (46 cycles per word, as above). The TG
  tiles run at the dfadd rate (43 cycles per word). Each tile's demand
  therefore follows its clock. The test visits every combination of NoC frequency (10, 55,
  100 MHz) and TG frequency (0, that is stopped, 10, 30, 50 MHz). In each
  combination A1 and A2 step through 10, 30 and 50 MHz. For each it prints
  the packets reaching memory per microsecond: read requests, write
  requests and write-data words. At a 100 MHz NoC, a typical run gives 9,
  10, 17 and 23 Mpkt/s for TGs stopped and at 10, 30 and 50 MHz. The checks:
  * traffic flows;
  * traffic never exceeds one packet per NoC cycle;
  * at a 100 MHz NoC, faster TGs raise the traffic: 50 MHz is well above
    both stopped and 10 MHz, and 30 MHz is above 10 MHz;
  * with TGs at 50 MHz, a 100 MHz NoC carries more than twice the traffic
    of a 10 MHz one.

  Stopping the TG island with transfers in flight also exercises
  resynchronizers whose writer clock stops. In the memory model a stopped
  tile holds up the single server, so the stopped-TG traffic here is lower
  than it would be with a real NoC.

* `table1_replication_tb`: the replication study. The NoC runs at
  100 MHz and A1 at 50 MHz, and the TG tiles are idle. A1 runs with one, two
  and four active replicas for five kernels: adpcm, dfadd, dfmul, dfsin
  and gsm. Each kernel is a behavioural replica that spends `400 / T`
  cycles per 64-bit word, where T is the kernel's single-replica throughput
  in MB/s as published. This is the compute time that gives T at 50 MHz.
  The test checks every output word. It checks that the single-replica
  throughput is within 20% of T, and that two and four replicas reach at
  least 1.7x and 3.0x. A typical run scales by 2.00x and 3.96x. The
  published averages are 1.92x and 3.58x. The models scale almost ideally,
  because they share nothing but the bridge, and their memory traffic is
  light at these compute times.

The behavioural models are abstract, so the absolute numbers are not the
original measurements. Only the trends are meaningful.

The replica model (`acc_model`) reads its input in chunks, optionally spends
some cycles per word "computing", and writes back word + 1. It can thus
imitate a memory-bound kernel (no compute cycles) or a compute-bound one.
The MMCM model produces `code * 5 MHz` after a configurable lock time and
keeps its output low while relocking.

## How far to trust it

Every module passes Verilator's lint and a second SystemVerilog front end.
Every testbench was checked against a deliberately broken copy of its block.
The clock-switch and CDC structures are standard. However, they are
verified only in a two-state simulator, with no metastability modelling.
Timing closure and the behaviour of real MMCMs have not been checked. The
bridge relies on the NoC returning read data in request order for each
tile. A NoC that reorders responses needs tags on the read path.

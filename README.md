# DSMC-32M32S: a distributed shared memory with radix-2 switches and speed-up

Many compute engines on one SoC (DSP cores, accelerators) often share one
large on-chip memory that holds the buffers they stream through. A flat
crossbar from every port to every bank gets harder to build as ports and
capacity grow. Its wires cross everywhere, and the far corners of the memory
array set the cycle time. The distributed shared memory controller (DSMC)
replaces the crossbar with two ideas:

* **Small building blocks.** Each block is a 16 x 16 butterfly built from
  2-input, 2-output ("radix-2") switches. The blocks are joined by
  **speed-up** links, so every bank can be reached through two independent
  networks.
* **Directed and fractal randomization.** These spread the beats of a burst
  over the blocks and banks, so they rarely collide.

This RTL implements the 32-port, 32-bank, 4-Mbyte configuration (32M32S).
It uses two building blocks and one speed-up network per block (speed-up
r = 2). The design is fully synthesizable. Every block has a self-checking
testbench, and the whole design is simulated at full size.

## 1. What a master sees

Each of the 32 master ports takes three streams. All of them use valid/ready
handshakes.

| stream | contents |
|---|---|
| `cmd`   | `{wr, word address (19 bits), beats-1 (4 bits)}`: one burst of 1..16 beats on consecutive 64-bit words |
| `wdata` | one 64-bit word per write beat, in order |
| `mrsp`  | one response per beat, **in issue order**: `{wr, rdata}`, where a write gets an acknowledge |

Masters 0-15 sit on building block 0 and masters 16-31 on building block 1.
Every master reaches all of the memory, 2^19 words of 64 bits.

When nothing else is in flight, a single read returns 10 cycles after its
command is accepted. Those 10 cycles are: four switch levels on the way in,
one bank cycle, four switch levels on the way back, and one cycle in the
reorder buffer. A port sends one beat per cycle, so an accepted burst of L
beats occupies the port for L cycles. The next command is accepted in the
cycle the previous burst's last beat leaves.

## 2. Address map: where a word lives

```
word address  18 ............ 5 | 4 ....... 1 | 0
              row in bank (14)  | bank (4)    | building block
```

This map is what implements the two randomization steps:

* **Directed randomization (between blocks).** Bit 0 picks the block.
  Consecutive beats of a burst therefore alternate between the local block
  and the sister block. Half of every burst goes through the speed-up
  network, whatever the master's position.
* **Fractal randomization (inside a block).** Bits 4:1 pick one of the 16
  banks. The beats that a burst sends into one block hit up to 16 different
  banks. Because the switches route on these bits, consecutive beats also
  take different paths through the first two switch levels.

Random traffic still collides, and collisions are resolved by back-pressure.
The map only ensures that one burst never fights with itself.

## 3. Inside a building block

```
 16 master ports ── RSWH0 x8 ── RSWH1 x8 ── RSWH2 x8 ── RSWH3 x8 ── 16 banks
                      │  ▲         ▲  │
   speed-up requests  │  │         │  │ speed-up responses
   to the sister      ▼  │         │  ▼ to the sister
                  (sister RSWH1)  (sister RSWH0)
```

**RSWH0 (`dsmc_rswh0`)** serves two master ports. It does all the address
decoding, once: a beat becomes `{block, bank, row}` here and is never decoded
again. RSWH0 has four request outputs:

* outputs 0 and 1 go to the local RSWH1s;
* outputs 2 and 3 are speed-up links to the sister block.

For local beats, bank bit 1 chooses between the two local outputs. For remote
beats, it chooses between the two speed-up links. On the response side, RSWH0
merges four inputs onto its two master ports: two from local RSWH1s and two
from sister RSWH1s.

**RSWH1, RSWH2 and RSWH3 (`dsmc_rswh_dual`)** each carry two complete,
independent radix-2 switches, called *lanes*:

* lane 0 carries the block's own traffic;
* lane 1 carries speed-up traffic that entered from the sister block.

The two lanes never exchange beats, so the speed-up network is a second
butterfly that shares the switch sites and the banks with the first.

**Butterfly wiring.** Switch `j` of a level connects to the two switches of
the next level whose index equals `j` or differs from it in one bit. The bit
differs between levels:

| link | index bit exchanged | request routed on | response routed on |
|---|---|---|---|
| RSWH0 → RSWH1 | 0 | bank bit 1 (at RSWH0) | master bit 0 (at RSWH0) |
| RSWH1 → RSWH2 | 1 | bank bit 2 (at RSWH1) | master bit 1 (at RSWH1) |
| RSWH2 → RSWH3 | 2 | bank bit 3 (at RSWH2) | master bit 2 (at RSWH2) |
| RSWH3 → bank  | -  | bank bit 0 (at RSWH3) | master bit 3 (at RSWH3) |

RSWH3 `j` serves banks `2j` and `2j+1`. A response retraces the butterfly
backwards. At each level it is routed on one bit of the requesting master's
index, which travels with the beat as `mid = {block, index}`.

**Banks (`dsmc_bank`)** are single-ported 16384 x 64 synchronous memories.
Each bank has two request inputs, one per lane. A round-robin arbiter takes at
most one beat per cycle. The response (read data or a write acknowledge)
leaves one cycle later on the lane the request came from. So a local request
returns through the local network, and a speed-up request returns through the
speed-up network, back to the block it came from.

**Speed-up links.** Four things describe the speed-up path:

* Remote request: RSWH0 `i` sends it on link `2i+p` (`p` = bank bit 1) to
  the sister's RSWH1 `(i & ~1) | p`, lane 1, input `i & 1`.
* Returning response: RSWH1 `j`, lane 1, sends it on link `2j+p` (`p` =
  master bit 0) to the sister's RSWH0 `(j & ~1) | p`.
* The link numbering is the same in both blocks, so the top module only has
  to cross the two blocks' link buses.
* Each block therefore has 16 speed-up request links and 16 speed-up response
  links in each direction.

**Identical blocks.** The block's identity comes from the `bb_id` input, not
from a parameter. The two instances are the same netlist, so only one block
layout is needed.

## 4. Switch element, flow control and ordering

All switches are built from one generic element, `dsmc_switch`:

* **Arbitration.** Each output has its own round-robin arbiter (`dsmc_rr_arb`)
  over the inputs that want it.
* **Output buffer.** Behind the arbiter sits a four-entry first-word-fall-through
  output buffer (`dsmc_fifo`). With two entries the network saturated near
  65 % of a beat per port per cycle; four entries lift that to 70-80 %.
* **Cut ready path.** An input is told "ready" only when its chosen output has
  space. Because the buffer's ready depends only on its own fill level, ready
  never ripples combinationally through more than one level. Every level costs
  exactly one cycle.
* **Back-pressure.** Beats that lose arbitration wait in place. This is the
  design's only collision mechanism: there are no retries and no drops.

Beats of one burst take different paths and can return out of order. The
**reorder buffer** in each master port (`dsmc_master_port`) puts them back in
order:

* Each beat is tagged with a slot of a 64-entry buffer when it leaves.
* Responses are written into their slot whenever they arrive.
* The master receives responses strictly in issue order.
* A port with 64 beats outstanding stops issuing.
* The buffer always accepts responses, so the response network cannot
  deadlock on a slow master. Its own back-pressure reaches the master only
  through the full-buffer stall.

## 5. Register slices for timing closure

On a large floorplan, some switch-to-switch links are too long for one cycle
and need pipeline registers. Such links make the memory less uniform in
access time (NUMA-like): some banks are farther away than others.

The `L3_SLICE` parameter of `dsmc_top` and `dsmc_building_block` puts 0 to 3
register slices (`dsmc_reg_slice`) in front of each level-3 switch (RSWH2), in
both directions. Each RSWH2 can get its own count. Each slice stage is a
two-entry buffer, so it adds one cycle of latency but no bandwidth loss. The
default has no slices.

## 6. Measured behaviour

These results are from simulation of the full-size design. In each run, all
32 masters send at the same time, to uniformly random addresses.

**Throughput at full injection** (accepted beats per master per cycle):

| burst | 1 | 2 | 4 | 8 | 16 | mixed |
|---|---|---|---|---|---|---|
| read  | 77.6 % | 76.9 % | 71.5 % | 71.2 % | 73.0 % | 72.5 % |
| write | 77.1 % | 78.6 % | 74.6 % | 74.1 % | 69.8 % | 73.3 % |

Average latency at full injection is 38-49 cycles.

**Mixed bursts against injection rate:**

| injection | 30 % | 50 % | 60 % | 65 % | 70 % | 75 % | 80 % | 90 % | 100 % |
|---|---|---|---|---|---|---|---|---|---|
| read latency (cycles)  | 11.3 | 12.9 | 15.0 | 15.9 | 19.5 | 24.3 | 28.0 | 47.3 | 43.1 |
| write latency (cycles) | 11.3 | 13.0 | 15.0 | 16.2 | 18.7 | 22.3 | 24.8 | 46.3 | 45.0 |
| read throughput  | 30.7 % | 49.6 % | 62.4 % | 67.0 % | 74.4 % | 77.8 % | 79.5 % | 72.6 % | 76.4 % |

**Register slices**, at full injection (throughput / average latency):

| traffic | none | 1 cycle on 2 RSWH2 + 2 cycles on 2 RSWH2 | 2 cycles on 4 RSWH2 |
|---|---|---|---|
| burst 8 read  | 73.8 % / 45.4 | 75.1 % / 47.3 | 74.2 % / 47.2 |
| burst 8 write | 69.9 % / 46.7 | 73.8 % / 49.1 | 72.1 % / 48.4 |
| burst 2 read  | 74.4 % / 40.2 | 78.2 % / 42.0 | 74.8 % / 45.4 |
| burst 2 write | 77.1 % / 39.6 | 76.6 % / 43.0 | 76.4 % / 44.5 |

**Interpretation.**

* Latency stays under 50 cycles at every load, inside the 60-cycle bound
  that was the design target.
* The network saturates at about three quarters of a beat per port per cycle.
  This is close to the 72-77 % reported for the original design with burst-8
  and burst-2 traffic.
* Beyond saturation, extra offered load only adds queueing: throughput levels
  off and latency rises to its plateau.
* Register slices cost 2-5 cycles of latency and no throughput.
* Unlike the original design, throughput here does not rise with burst
  length: single beats do as well as bursts. The original reports about
  50 % for single beats and up to 89 % for bursts of 4. The address map
  spreads every beat anyway, and the random start address of each burst
  makes bursts look like random single beats to the banks.
* The figures vary by about 2 % from run to run with the random seed.

## 7. Where this RTL is its own

The following choices are this design's own, not a published specification:

* The 64-bit word.
* The exact bit of the address or master index that each switch level
  resolves.
* Round-robin arbitration everywhere.
* Four-entry switch output buffers and two-entry slice stages.
* The 64-entry reorder buffer.
* The command and write-data handshake.
* One-cycle SRAM banks with write acknowledges.
* Where the register slices sit.

The published design description draws **one** speed-up link out of each
first-level switch. With radix-2 switches, one link would let a first-level
switch reach only half of the sister block's banks. Here every RSWH0 has
**two** speed-up links, to sister RSWH1 `i` and `i^1`.

The published description spreads the beats of a burst over the first two
switch levels "in round robin order". Here the spreading is done by the
address map instead: a switch has no per-burst counter, and each beat's path
follows from its bank number. Consecutive beats of a burst have consecutive
bank numbers, so within one block they never share a bank. They leave RSWH0
through alternating outputs every two beats rather than every beat.

The published description also sends the even beats of a burst to the local
block and the odd beats to the sister block. Here the block follows address
bit 0. For a burst starting at an even word in block 0 this is the same
split; in general the two halves trade sides.

The conventional memory controller that the design is usually compared with
is not included. The compute engines are not included either: testbenches
drive the master ports directly.

Reset is active-low and asynchronous. It clears all control state; memory
contents are not reset.

## 8. Files

| file | contents |
|---|---|
| `rtl/dsmc_pkg.sv` | sizes, address map, beat and response structs |
| `rtl/dsmc_rr_arb.sv`, `rtl/dsmc_fifo.sv`, `rtl/dsmc_switch.sv` | arbiter, FIFO, generic switch |
| `rtl/dsmc_master_port.sv` | burst disassembly and reorder buffer |
| `rtl/dsmc_rswh0.sv` | first-level switch with address decode and speed-up outputs |
| `rtl/dsmc_rswh_dual.sv` | two-lane switch of levels 2-4 |
| `rtl/dsmc_bank.sv` | two-lane single-ported bank |
| `rtl/dsmc_reg_slice.sv` | register slice |
| `rtl/dsmc_building_block.sv` | one 16 x 16 block |
| `rtl/dsmc_top.sv` | two blocks, crossed speed-up links |
| `tb/tb_<block>.sv` | self-checking test of each block |
| `tb/tb_dsmc_top.sv` | full-size end-to-end test (data checked against a reference memory) |
| `tb/tb_dsmc_workloads.sv`, `tb/tb_dsmc_traffic.sv` | injection sweep and register-slice runs |

## 9. Simulating

With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_dsmc_top \
    rtl/dsmc_pkg.sv rtl/*.sv tb/tb_dsmc_top.sv -o sim
./obj_dir/sim
```

* Other testbenches are run the same way.
* `tb_dsmc_workloads` also needs `tb/tb_dsmc_traffic.sv`.
* Every testbench ends by printing `TB_RESULT checks=N failures=M`.
* The full-size tests each take seconds to a few minutes.
* The end-to-end test also counts the mechanisms it observed:
  * bursts split into beats;
  * beats carried on speed-up links;
  * back-pressure at a port;
  * both lanes asking for one bank in the same cycle;
  * out-of-order arrivals at a reorder buffer;
  * reorder-buffer-full stalls.

  It fails if any of these counts is zero.

**Changing sizes.** The sizes are localparams in `dsmc_pkg`. The bank row
count follows from the memory size. Building blocks are fixed at two, because
the speed-up wiring pairs each block with one sister.

# GRAPE-6 force engine: RTL of the custom-chip back end

In a direct-summation gravitational N-body simulation, almost all of the
time goes into one short loop: for every particle `i`, add up
`m_j (x_j - x_i) / (|x_j - x_i|^2 + eps^2)^(3/2)` over every other particle
`j`. The GRAPE ("GRAvity PipE") machines take that loop out of the host
computer and put it in hardware: a chip full of pipelines that each finish one
pairwise interaction per clock. The host keeps everything else, including the
integrator, the time steps and the I/O. The GRAPE-6 proposal combines three
parts:

* a general-purpose front-end host;
* a very large array of custom chips for the inverse-square force;
* reconfigurable (FPGA) processors for the problem-specific secondary
  forces, such as smoothed-particle hydrodynamics or short-range molecular
  forces.

This RTL implements the custom-chip side: the force pipeline, the chip with
its on-chip particle memory, and the board, cluster and host-interface levels
of the network that fans commands out to hundreds of chips and adds up their
partial forces. The reconfigurable processors, the host and the physical links
are outside it (see *What is not here*).

The source design gives the organisation and the sizes: sixteen pipelines per
chip, particle memory on the chip, sixteen chips per board, 16 to 32 boards
per controller (a *cluster*), and two to four clusters per host at first, for
a prototype of 250 to 500 chips. It describes the pipeline only as "essentially
similar" to that of GRAPE-4, its predecessor. The number formats, the
arithmetic, the command set, the link format and the flow control here are
therefore this implementation's own. They are marked as such below and in the
opening comment of every file.

## Organisation and default size

| level | module | count per parent | default | source |
|---|---|---|---|---|
| force pipeline | `force_pipeline` | per chip | 16 (`NPIPE`) | source design |
| particle memory | `particle_memory` | 1 per chip | 3000 particles (`NJ`) | source design: at least 3x10^3 |
| chip | `grape6_chip` | per board | 16 (`NCHIP`) | source design |
| board | `grape6_board` | per cluster | 16 (`NBOARD`) | source design: 16 to 32 |
| cluster | `grape6_cluster` | per host | 2 (`NCLUSTER`) | source design: 2 to 4, up to 16 |
| host interface | `host_interface` | 1 | FIFO of 16 commands | own choice |
| top | `grape6_system` | | | |

The defaults give 2 x 16 x 16 = 512 chips and 8192 pipelines. That is the
prototype: the source design asks for 250 to 500 chips and for two to four
clusters, and 512 is the nearest size that meets both. Each pipeline finishes
one interaction per clock. At roughly 60 floating-point operations per
interaction, the usual GRAPE accounting, the machine does 4.9x10^5
operations per clock: 49 Tflops at 100 MHz and 98 Tflops at 200 MHz. This
matches the 50 to 100 Tflops that the source design expects from the
prototype. The memories together hold 512 x 3000 = 1.5 million source
particles. A direct-summation run of 20,000 to 50,000 particles, the size
GRAPE-4 served, fits many times over. The petaflops machine of 4x10^7
particles on about 12,000 chips is a larger configuration than this default.

## How a force calculation runs

Particles play two roles:

* **j-particles** (sources) are spread over the chips. Each chip stores its
  share in its own memory.
* **i-particles** (targets) are handled sixteen at a time, one per pipeline.
  The same sixteen are broadcast to every chip.

After a START, every chip streams its j-particles past all sixteen pipelines
at one particle per clock. Each pipeline therefore adds up the force of that
chip's j-particles on its own i-particle. The network then adds these partial
forces over all chips, so the host reads one total per i-particle.

The host drives the machine with commands (`grape6_pkg::cmd_t`, one per
clock):

| op | addressed by | effect |
|---|---|---|
| `OP_WR_J` | cluster/board/chip, or `bcast` | store `{pos, mass = scal}` at j address `addr` of that chip (or of every chip) |
| `OP_SET_NJ` | cluster/board/chip, or `bcast` | number of j-particles the chip streams (`addr`, clipped to `NJ`) |
| `OP_SET_EPS` | every chip | softening eps^2 (`scal`) |
| `OP_WR_I` | every chip | i-particle position of pipeline `addr` |
| `OP_START` | every chip | clear the accumulators and stream j = 0 .. n_j-1 |
| `OP_RD_F` | every chip | force on the i-particle of pipeline `addr`, summed over the machine, returned on `f`/`f_valid` |
| any op with `rcp = 1` | | passed unchanged, in order, to the reconfigurable back-end port |

A typical time step is:

1. Load the j-particles of every chip, then set the counts and eps^2.
2. For each block of 16 i-particles, send `WR_I` x16, then `START`, then
   `RD_F` x16.

The host may queue the whole block at once. The reads wait in the host
interface until the START has finished (see *Flow control*).

## The force pipeline

The pipeline (`force_pipeline.sv`) is the part with the most design in it.
The source design gives only its function, so the arithmetic is this
implementation's own. It was chosen to be the simplest synthesizable way to
compute an inverse-square force at one interaction per clock. All arithmetic
is integer. The only approximation is a table lookup for `x^(-3/2)`.

**Number formats** (all in `grape6_pkg`; own choice):

* Positions are signed 32-bit fixed point. One LSB is a length quantum that
  the host chooses.
* Masses are unsigned 24-bit.
* eps^2 is an unsigned 64-bit value in squared length quanta.
* Forces accumulate in signed 64-bit fixed point with 32 fraction bits
  (`ACC_FRAC`). The value is `m/length^2` in the host's units times 2^32.

**Stages** (one j-particle per clock, 7 register stages, `PIPE_LAT`):

| stage | computes | width |
|---|---|---|
| S1 | `dx = x_j - x_i` per component | 33-bit, exact |
| S2 | `r2 = dx^2 + dy^2 + dz^2 + eps^2` | 67-bit, exact |
| S3 | find the even exponent `e` with `r2 / 2^e` in [1, 4); `q` = the top 12 bits of `r2 / 2^e` | |
| S4 | `t = RSQ3_ROM[q]`, about `(r2/2^e)^(-3/2) * 2^16` | 17-bit |
| S5 | `mt = m_j * t` | 41-bit |
| S6 | `p = dx * mt` per component | 75-bit |
| S7 | `acc += p * 2^(ACC_FRAC - 16 - 3e/2)`, an arithmetic shift | 64-bit |

Making `e` even makes `r^-3 = (r2/2^e)^(-3/2) * 2^(-3e/2)` come apart into a
table value times a power of two. The table is the formula
`RSQ3_ROM[q] = round((q/1024)^(-1.5) * 2^16)` for q in [1024, 4096), and 0
below that range. It is a constant array computed once, when the package is
elaborated. It is not a data file.

**Accuracy.** `r2` is cut to 10 fraction bits before the lookup, so `r^-3`
is accurate to about 0.15%. Each term is then truncated to the accumulator
LSB. The testbenches accept 0.3% of the summed term magnitudes plus one LSB
per term. This is far below the 15-digit precision reported for GRAPE-4. For
more precision, raise `TBL_IDX`, or interpolate between table entries.

**Range.** Each term and the final sum must fit in 64 bits. Partial sums may
wrap: fixed-point addition is exact modulo 2^64, so any order of additions
gives the same final sum if that sum fits. This is what lets the network add
partial forces in whatever order its tree gives. The host picks the length
and mass units so that `m/r^2 * 2^32 < 2^63` for the closest pair it expects.
A softening eps > 0 guarantees this.

**Self-interaction.** When an i-particle is also among the j-particles and
eps = 0, then r2 = 0. That pair adds exactly nothing, so the host does not
need to exclude it.

## Particle memory

Each chip has a single-port-write, single-port-read array (`particle_memory`)
of `NJ` = 3000 records of 120 bits: the three positions and the mass. The
source design sizes the memory at about 2 Mbit, at least 3000 particles of
about 600 bits. Its particle record evidently includes predictor data
(velocity, higher derivatives, time) for individual time steps. This chip
does not predict positions, so it stores only what the force needs. In
silicon the array would be an SRAM macro. A read returns its data one clock
later.

## Chip

`grape6_chip` decodes the commands, holds `n_j` and eps^2, and runs the
sequencer. A START clears all sixteen accumulators and then reads addresses
0 .. n_j-1 on consecutive clocks. Each word read is broadcast to all
pipelines. `busy` is high for exactly n_j + `PIPE_LAT` clocks after the START
(one memory stage and six pipeline valid stages). When it falls, the
accumulators hold the result. An `RD_F` returns one pipeline's force one clock
later. An assertion enforces that no command other than NOP arrives while the
chip is busy.

## The network: command fan-out and force reduction

The source design asks for a point-to-point network from the host down to the
chips instead of GRAPE-4's shared buses, and names tree topologies as a
candidate. Here the network is a tree that works in both directions:

* **Down.** Every hop carries a `down_t`: `valid`, `sel` and the command. Each
  hop is one register: host interface to cluster, cluster to board, board to
  chip. Each level copies the command to all its children. It narrows `sel`
  by its own address field (`cluster`, `board`, `chip`) unless `bcast` is set.
  Only `WR_J` and `SET_NJ` look at `sel`. All other operations reach every
  chip in the same clock, so all chips start together.
* **Up.** Every hop carries an `up_t`: `f_valid`, `f` and `busy`.
  `force_reduction_tree` is a binary adder tree with a register per level. It
  adds the children's forces at the board (16 chips), the cluster (16 boards)
  and the host interface (2 clusters). `busy` is ORed and registered once per
  level.

Because every chip answers a read in the same clock, the whole machine is
one pipeline for reads. A read leaves the host-interface FIFO and its sum
appears on `f_valid` a fixed time later:
`4 + clog2(NCHIP) + clog2(NBOARD) + max(1, clog2(NCLUSTER))` clocks after
the clock that accepted it into an empty FIFO. That is 13 clocks at the
defaults. Reads can follow each other every clock.

## Flow control in the host interface

The source design asks the back end to buffer commands and apply flow
control, so that the host and the back end can work at the same time.
`host_interface` does this in four ways:

* **Command FIFO.** Commands enter a 16-entry FIFO through `h_valid`/`h_ready`.
  When it is full, `h_ready` falls.
* **Routing.** The command at the head goes either to the clusters or, if
  `rcp` is set, to the reconfigurable back-end port (`rcp_valid`/`rcp_ready`).
  Either way, commands leave in the order they arrived.
* **Stall.** A cluster command waits at the head while the clusters are busy.
  Busy takes a few clocks to climb back up the tree after a START. To cover
  that gap, the interface treats the clusters as busy for `HOLD` = 8 clocks
  after it issues a START. It then follows the ORed `busy` from the chips.
* **busy output.** `busy` is high while a START is running on either kind of
  back end.

With this, the host can queue `WR_I` x16, `START` and `RD_F` x16 in one go.
It then only collects the 16 results.

## Where this departs from the source design

* **Pipeline arithmetic.** It is integer and table-based, own design, with
  about 0.15% accuracy of `r^-3`. GRAPE-4 used a 15-digit-accurate pipeline,
  and the source design expects its successor to be similar.
* **Throughput.** Each pipeline finishes one interaction per clock. GRAPE-4
  took three clocks per interaction.
* **Force only.** The pipeline computes the force only. There is no potential
  and no time derivative of the force, which the source design does not
  mention.
* **Particle record.** The record is 120 bits instead of about 600, because
  positions are not predicted on the chip.
* **Own choices.** The command set, the link format, the adder-tree
  reduction, the FIFO, stall and HOLD rules, and all widths are this
  implementation's own.
* **Machine size.** Two clusters of 16 boards were chosen as the default
  within the ranges given.

## What is not here

* **The front-end host.** It is a general-purpose computer. The testbenches
  play its part.
* **The reconfigurable processors and their SDRAM.** These are FPGAs loaded
  with application-specific pipelines, such as SPH. The source design leaves
  their architecture, memory organisation and interconnect open. Only their
  command port on the host network (`rcp_*`) is provided.
* **Physical links** (optical or electrical transceivers). Each link is
  modelled as one register stage.

## Files

* `rtl/grape6_pkg.sv`: formats, command and link types, and the `r^-3`
  table.
* `rtl/force_pipeline.sv`, `rtl/particle_memory.sv`, `rtl/grape6_chip.sv`:
  the chip.
* `rtl/force_reduction_tree.sv`, `rtl/grape6_board.sv`,
  `rtl/grape6_cluster.sv`, `rtl/host_interface.sv`: the network levels.
* `rtl/grape6_system.sv`: the top.
* `tb/grape6_tb_pkg.sv`: the double-precision reference model and the
  tolerance.
* `tb/tb_<module>.sv`: one self-checking testbench per module.
* `tb/tb_grape6_system_full.sv`: the end-to-end test at the default size.

## Simulating

Every testbench prints `TB_RESULT checks=N failures=M` and stops itself with
a watchdog. With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb \
    rtl/grape6_pkg.sv tb/grape6_tb_pkg.sv tb/tb_grape6_chip.sv \
    --top-module tb_grape6_chip -Mdir obj_chip
./obj_chip/Vtb_grape6_chip
```

Replace `tb_grape6_chip` with any other testbench. What each one checks:

| testbench | size | checks |
|---|---|---|
| `tb_force_pipeline` | one pipeline | random pairs at several scales against the double-precision reference; latency; zero-distance pair; one exactly representable case |
| `tb_particle_memory` | 3000 words | write/read-back, read latency, writes past the end dropped |
| `tb_grape6_chip` | 16 pipelines, 3000 words | forces of all 16 pipelines for n_j = 37, 200, 3000; busy = n_j + 7 clocks; unselected writes ignored; n_j clipping |
| `tb_force_reduction_tree` | 16 and 5 inputs | sums every clock, latency, modular wrap |
| `tb_grape6_board` | 16 chips x 4 pipelines | broadcast and addressed loads, per-chip n_j, summed forces, read latency, busy span |
| `tb_grape6_cluster` | 3 boards x 2 chips | the same one level up, with a non-power-of-two tree |
| `tb_host_interface` | 2 modelled clusters | ordering, routing, `sel`, stall after START, FIFO full, rcp back-pressure, cluster sum |
| `tb_grape6_system` | 2 x 2 x 2 chips x 4 pipelines | end-to-end, counting that every mechanism occurred |
| `tb_grape6_system_full` | the default 512 chips | the same run at full size |

The full-size test builds 8192 pipelines. Verilator needs several GB of
memory and seven to ten minutes to build it; the run itself takes about a second. The reduced tests take seconds.

## Changing the design

* **Machine size.** Set `NCLUSTER`, `NBOARD`, `NCHIP`, `NPIPE` and `NJ` on
  `grape6_system`. The address fields in `cmd_t` allow up to 16 clusters,
  32 boards and 16 chips, as in the source design's largest configuration.
  Widen `CL_ID_W`, `BD_ID_W` and `CH_ID_W` for more.
* **Precision.** Change `TBL_IDX` (table size and accuracy), `POS_W`,
  `ACC_W` and `ACC_FRAC` in `grape6_pkg`. The pipeline derives its internal
  widths from these.
* **Pipeline depth.** If you change the number of stages, update `PIPE_LAT`
  in the package: the chip's busy timing and the testbenches depend on it.

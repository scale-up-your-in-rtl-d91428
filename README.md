# A many-tile analog in-memory CNN accelerator with a wireless on-chip network

This design is an inference chip for convolutional neural networks. It has
**16 identical clusters**. Each cluster holds one **analog in-memory
accelerator (IMA)**: a 256 x 256 phase-change-memory crossbar that stores a
layer's weights and computes a full matrix-vector product in 130 ns. The
clusters share one **512 KiB L2 scratchpad**. All traffic between the
clusters and L2, and from one cluster to another, goes over **one shared
wireless channel**. The channel carries 256 bits per cycle (89.6 Gbit/s at
350 MHz) with 1 cycle of latency. Because every transceiver hears every
transmission, one read of L2 can feed all clusters that want the same data
(**broadcast**).

Each cluster is built like a PULP cluster:

- a 10-bank L1 memory behind a single-cycle interconnect;
- a two-channel DMA;
- an event unit that puts cores to sleep and wakes them;
- the IMA with 16 32-bit L1 ports;
- four RISC-V cores, which are not part of this RTL. Their ports are brought
  out to the top level.

The chip supports two ways of spreading a network over the clusters:

- **Pipelining:** one layer per cluster. Each cluster passes its output tile
  straight into the next cluster's L1 over the channel, then raises a
  software event there.
- **Data parallelization:** one wide layer split over all clusters. Every
  cluster reads the same input from L2, which the broadcast turns into a
  single transfer.

```
                 +--------------------------- wireless channel (256 b/cycle, 1 cycle) ---------------------------+
                 |            |             |                                    |                               |
             +---+---+    +---+---+     +---+---+                            +---+---+                      +----+----+
             | CL 0  |    | CL 1  |     | CL 2  |        . . .               | CL 15 |                      |   L2    |
             +-------+    +-------+     +-------+                            +-------+                      | 512 KiB |
                                                                                                            +----+----+
   one cluster:                                                                                                  | host port
   cfg bus --> [DMA] [IMA + crossbar] [event unit] [wireless rx]  --  logarithmic interconnect  --  L1 banks B0..B9
   cores' L1 ports ------------------------------------------------------^
```

## Files

| File | Block |
|---|---|
| `rtl/aimc_pkg.sv` | shared types, constants and event numbers |
| `rtl/aimc_system.sv` | **top**: 16 clusters, wireless channel, L2, software-event routing |
| `rtl/aimc_cluster.sv` | one cluster and its configuration-bus decoder |
| `rtl/tcdm_bank.sv` | one L1 SRAM bank |
| `rtl/tcdm_interconnect.sv` | L1 logarithmic interconnect |
| `rtl/rr_arbiter.sv` | round-robin arbiter used by the interconnect and the channel |
| `rtl/ima.sv` | IMA controller: job registers, stream-in / eval / stream-out |
| `rtl/ima_crossbar.sv` | behavioural model of the analog crossbar with DACs and ADCs |
| `rtl/cluster_dma.sv` | two-channel DMA |
| `rtl/event_unit.sv` | event unit: events, masks, sleep and wake, barrier |
| `rtl/wireless_channel.sv` | behavioural model of the transceivers and the shared medium |
| `rtl/wireless_rx.sv` | a cluster's receive port for cluster-to-cluster writes |
| `rtl/l2_mem.sv` | banked L2 scratchpad with a channel port and a host port |
| `tb/tb_<module>.sv` | one self-checking testbench per module |
| `tb/tb_dp_scaling.sv` | data-parallel layer on 1, 2, 4, 8 and 16 clusters of the full-size system |
| `tb/tb_pp_scaling.sv` | pipelines of 1, 2, 4, 8 and 16 layers on the full-size system |

All parameter defaults are the full-size chip. `tb_aimc_system` instantiates
the top without overrides.

## Clock, sizes and units

- Everything runs on one clock, assumed to be 350 MHz.
- 130 ns of analog evaluation is 45.5 cycles, rounded up to **46 cycles**
  (`EVAL_CYCLES`).
- A **beat** is 256 bits (32 bytes). It is the unit of the wireless channel,
  the L2 port and the DMA. All DMA addresses and lengths are multiples of
  32 bytes.
- L1 is 64 KiB and L2 is 512 KiB. The source figure prints "64 kb" and
  "512 kb"; this design reads both as kilobytes, as in PULP clusters. L1 is
  10 banks x 1639 words x 4 B, slightly more than 64 KiB.

## The wireless channel (`wireless_channel`)

This is the part that distinguishes the chip. The real transceivers are
millimetre-wave RF circuits. The module is therefore a behavioural model: it
captures what the digital side sees, and it is written so that it also
synthesizes.

**Ports.** Each of the 16 clusters has one request port (`wl_req_t`):

- `req` and `we`;
- `to_l1`: the write goes to another cluster, not to L2;
- `tgt_cl`: the target cluster of such a write;
- a byte address;
- 256 bits of write data.

The response (`wl_rsp_t`) has `gnt`, `rvalid` and `wack`. Read data comes on
one shared 256-bit bus, `rdata_o`, because all clusters hear the same
transmission. On the L2 side the channel drives one beat-wide port.

**Medium access.** One transmission happens per cycle. A round-robin arbiter
picks among the clusters whose request can be served now. A cluster-to-cluster
write is not eligible while its target's receive port is still busy. That way
a blocked write never wastes a slot.

**One-cycle latency.**

- A read granted in cycle t has its data and `rvalid` in cycle t+1.
- An L2 write granted in cycle t is in L2 at the clock edge that ends t, and
  `wack` comes in t+1.

**Broadcast.** Suppose the winner of a slot is a read of L2 address A. Every
other cluster that is requesting a read of the same A in that cycle is then
granted too. All of them take the same data from `rdata_o` in the next cycle.
`bcast_o` pulses for each slot that served more than one cluster.

In data-parallel mode all 16 clusters run the same program on the same input.
Their DMAs therefore ask for the same beats at about the same time. Sixteen
reads then cost one slot instead of sixteen. A wired network with
point-to-point links cannot do this.

**Cluster-to-cluster writes.**

1. A write with `to_l1` set is delivered one cycle after its grant to the
   target cluster's receive port (`rx_o[tgt]`: valid, address, beat).
2. The target's `wireless_rx` holds the beat and writes its eight words into
   its own L1, through its own interconnect port, competing like any other
   master.
3. The target pulses `rx_done`. The channel then marks the receiver free and
   sends `wack` to the original sender.

The sender therefore knows its data is really in the remote L1 before it
raises the software event that wakes the next cluster.

**Not modelled.** Packet loss and retransmission are left out. The 256
bit/cycle figure is taken as the net rate.

## The cluster (`aimc_cluster`)

### Configuration bus

The cores are outside the RTL. They program the cluster through a write-only
32-bit bus, `cfg_i`, which takes one write per cycle. The cluster decodes it
into three windows:

| Base | Unit |
|---|---|
| 0x000 | DMA |
| 0x100 | IMA |
| 0x200 | event unit |

Each core also has:

- a 32-bit L1 port;
- a `sleep` input;
- an `evt` output and a clock-enable output.

### L1 and the logarithmic interconnect (`tcdm_bank`, `tcdm_interconnect`)

L1 is 10 single-port banks of 32-bit words with byte enables. Word w
(address bits [31:2]) lives in bank `w mod 10`, row `w div 10`. Ten banks
(a number that is not a power of two) spread the IMA's 16-word bursts well.

The interconnect connects 23 masters, in this order:

| Masters | Owner |
|---|---|
| 0..15 | IMA ports |
| 16 | DMA read channel |
| 17 | DMA write channel |
| 18 | wireless receive port |
| 19..22 | cores 0..3 |

Every bank has a round-robin arbiter. The handshake works like this:

- A master raises `req` and holds it until `gnt`, which is combinational in
  the same cycle.
- The response (`rvalid`, read data) comes in the next cycle, for writes too.
- Masters on different banks are all served in the same cycle.
- Masters on the same bank collide, and all but one wait.

These L1 conflicts are the main reason why the IMA phases stretch when the
DMA is busy at the same time.

### The in-memory accelerator (`ima`, `ima_crossbar`)

The IMA is the compute engine. `ima` is the digital controller. `ima_crossbar`
models the analog array.

**Crossbar model.** It has 256 rows (inputs) x 256 columns (outputs).

- Inputs are 8-bit unsigned activations.
- Weights are 4-bit one's-complement numbers: bit 3 is the sign, and a
  negative weight is the bit-inverse of its magnitude (1000 = -7,
  1111 = -0).
- Each column computes `sum_r x[r] * w[r][c]` over the first `C_IN` rows.
- The ADC step is an arithmetic right shift by `ADC_SHIFT`, then saturation
  to signed 8 bits.
- No analog noise is modelled, so the result is exact and testable.
- `done` comes exactly `EVAL_CYCLES` cycles after `start`. Internally the
  model adds 8 rows per cycle, so its sum is ready before that time. This
  pacing is only a modelling device.

Weights are written through the IMA's configuration window:

- `WADDR` = row x 32 + column group;
- each `WDATA` write stores 8 weights, then `WADDR` increments.

The time to program PCM cells is not modelled. The weights are stationary:
they are written once per layer.

**Controller: one job, many vectors.** A core writes the job registers:

| Offset | Register |
|---|---|
| 0x00 | `SRC`: first input vector in L1 |
| 0x04 | `DST`: first output vector in L1 |
| 0x08 | `C_IN` |
| 0x0C | `C_OUT` |
| 0x10 | `N_PIX`: number of vectors |
| 0x14 | `SRC_STRIDE` |
| 0x18 | `DST_STRIDE` |
| 0x1C | `ADC_SHIFT` |
| 0x20 | `TRIGGER` |

For each vector (one pixel of a 1x1 convolution) the controller runs three
phases, one after the other:

1. **Stream-in.** `C_IN` bytes are read from L1. Word k of the vector goes
   through port k mod 16. The 16 ports thus move 64 bytes per cycle, and a
   256-byte vector needs 4 cycles of requests plus 1 for the last response.
   A port that loses arbitration simply holds its request. The phase ends
   when every word has returned.
2. **Eval.** The crossbar is started and the controller waits for `done`
   (46 cycles, plus 1 to start).
3. **Stream-out.** `C_OUT` result bytes are written back through the same
   ports. Byte enables mask off the bytes past `C_OUT`, so a short output
   never overwrites its neighbours.

After the last vector the IMA pulses `done` to the event unit. `phase_o`
shows the current phase (0 idle, 1 stream-in, 2 eval, 3 stream-out). It is
brought to the top as `ima_phase_o`.

**Timing.** Without conflicts one 256 -> 256 vector takes 5 + 47 + 4 = 56
cycles. The ideal figure is 4 + 46 + 4 = 54. A full cluster therefore peaks
at 65536 MAC / 56 cycles = 410 GMAC/s at 350 MHz, and 16 clusters at
6.55 TMAC/s.

### The DMA (`cluster_dma`)

The DMA has two channels that run at the same time.

**Read channel (L2 -> L1).** It requests one beat at a time on the wireless
channel, then writes the beat's 8 words into L1 through its own interconnect
port.

**Write channel (L1 -> L2, or L1 -> another cluster's L1).** It reads 8 words
from L1, sends them as one beat, then waits for `wack`.

**Queues and buffers.** Each channel has:

- a command queue of 4 entries, so the cores can queue transfers ahead and
  keep several outstanding;
- two beat buffers, so the L1 side of one beat overlaps the channel side of
  the next.

The two channels share the cluster's single transceiver port and alternate
when both want it. Each finished command pulses `rd_done` or `wr_done` to the
event unit.

**Registers (offsets in the DMA window).**

| Offset | Register |
|---|---|
| 0x00 | `RD_L1` |
| 0x04 | `RD_L2` |
| 0x08 | `RD_LEN` |
| 0x0C | `RD_PUSH`: queue the read |
| 0x10 | `WR_L1` |
| 0x14 | `WR_DST` |
| 0x18 | `WR_LEN` |
| 0x1C | `WR_PUSH`: queue the write. bit 0 = destination is a cluster L1; bits [7:4] = that cluster |

**Throughput limit.** One 32-bit L1 port per channel limits each channel to
about 8 cycles per beat. That is 256 bytes per ~64 cycles, the same order as
the IMA's 56 cycles per vector. This is the DMA's real bottleneck in this
design. A wider DMA-to-L1 path would be the first change to make if the DMA
must stay ahead of the IMA under heavy L1 contention.

### The event unit (`event_unit`)

The event unit collects events into a sticky 32-bit buffer per core.

| Event | Source |
|---|---|
| 0 | DMA read done |
| 1 | DMA write done |
| 2 | IMA done |
| 3 | barrier |
| 8..15 | software events 0..7 |

Each core has a mask. `core_evt_o[c]` is high while buffer & mask is
non-zero. When a core raises `sleep`, its clock enable drops and stays low
until a masked event is present. The core wakes in the next cycle.

**Registers.**

| Offset | Register |
|---|---|
| 0x00 + 4c | `MASK` of core c |
| 0x20 + 4c | `CLEAR` of core c (write ones to clear) |
| 0x40 | `SW_TRIG`: id in bits [2:0], target-cluster mask in bits [31:16] |
| 0x44 | `BAR_ARRIVE`: the number of the core that arrives |
| 0x48 | `BAR_MASK`: the cores that take part in the barrier |

For `SW_TRIG`, a zero cluster mask raises the event locally. A non-zero mask
sends it out, and `aimc_system` delivers it one cycle later to every named
cluster. This is how one pipeline stage wakes the next.

The barrier event fires once every core in `BAR_MASK` has arrived, and then
rearms.

### The receive port (`wireless_rx`)

The receive port accepts one beat from the channel. It writes the beat's eight
words into L1 through interconnect master 18, then pulses `done` so the
channel can acknowledge the sender.

## L2 (`l2_mem`)

L2 has 8 banks of 32-bit words, word-interleaved. A 256-bit beat therefore
touches every bank once, and the channel side moves a full beat per cycle,
matching the channel's bandwidth.

A 32-bit host port loads inputs and weights and reads results. It is granted
only in cycles when the channel does not use L2. Its read data comes one
cycle after the grant.

## Programming the two workload mappings

The end-to-end testbench drives the cores' configuration writes and sleep
lines the way core software would.

**Data parallelization.** The layer is 256 inputs x (256 x 16) outputs. Each
cluster holds one 256-column slice of the weights. The input tile comes from
L2, double-buffered, and each cluster runs this loop:

1. The DMA reads tile i+1.
2. The IMA computes tile i.
3. The DMA writes the outputs of tile i-1 to the cluster's own region of L2.
4. The core sleeps on the DMA and IMA events between steps.

All 16 clusters ask for the same input beats. The broadcast makes one
transmission serve them.

**Pipelining.** Layer k sits in cluster k. Cluster 0 reads from L2, and the
last cluster writes to L2. Each intermediate cluster works through its
tiles like this:

1. Its DMA writes the output tile directly into cluster k+1's L1.
2. It waits for the DMA write-done event.
3. It raises software event "tile ready" on cluster k+1.

Cluster k+1 sleeps on that event before starting its IMA.

## Measured behaviour (full-size system, 16 clusters)

These are results from the end-to-end testbench at the default parameters:

- **Data parallelization, 4 pixels per cluster, 16 clusters:** 728 cycles
  against an ideal of 216 (4 x 54), an efficiency of 29 %. With so few
  pixels the run is dominated by startup and by the write-back of 16 x
  256 bytes of output per pixel: 128 beats per pixel, against 8 input beats
  that the broadcast shares.
- **Pipelining, 16 layers, 2 tiles of 2 pixels:** 6147 cycles.
- **Data-parallel scaling** (`tb_dp_scaling`): 8 pixels per cluster, in
  double-buffered tiles of 2 pixels, on N clusters at once:

  | N clusters | cycles | efficiency | speed-up over 1 | broadcast slots |
  |---|---|---|---|---|
  | 1 | 942 | 45 % | 1.00 | 0 |
  | 2 | 943 | 45 % | 1.99 | 50 |
  | 4 | 943 | 45 % | 3.99 | 63 |
  | 8 | 954 | 45 % | 7.89 | 76 |
  | 16 | 1465 | 29 % | 10.28 | 64 |

  Up to 8 clusters the broadcast makes the extra clusters almost free, since
  they share the input beats. At 16 clusters the channel saturates on the
  output write-back: 16 x 8 beats per pixel against 8 input beats. The same
  trend (near-linear scaling, then a knee set by the shared channel) is what
  the wireless broadcast is meant to deliver. Efficiency at N = 1 is bounded
  by the DMA's single 32-bit L1 port per channel and by the per-tile
  programming overhead of the cores.
- **Mechanisms seen in one run:**
  - 31 broadcast slots;
  - 500 cycles of waiting for the channel;
  - 1529 L1 bank conflicts;
  - 4240 cycles in which a DMA channel ran during an IMA phase;
  - 480 cluster-to-cluster beats;
  - 30 inter-cluster software events;
  - 16 barriers.

- **Pipelining depth** (`tb_pp_scaling`): 6 tiles of 2 pixels through a
  chain of D layers, one per cluster:

  | depth D | cycles | cycles per tile, steady state | efficiency |
  |---|---|---|---|
  | 1 | 2568 | 428 | 25 % |
  | 2 | 3197 | 483 | 22 % |
  | 4 | 3895 | 483 | 22 % |
  | 8 | 5293 | 484 | 22 % |
  | 16 | 8085 | 484 | 22 % |

  The tile interval does not depend on the depth, because traffic in a
  pipeline is point-to-point between neighbours and hardly contends. Only
  the fill time grows with D. The absolute efficiency is low because each
  stage runs its tile in sequence: receive, IMA, send to the next cluster,
  raise the event. The 512 bytes of a 2-pixel tile take 16 beats, and each
  beat needs 8 single-word L1 accesses by the DMA. Double-buffering inside a
  stage, as the data-parallel program does, would hide most of that.

## Simulating

Every testbench is self-checking and ends with a `TB_RESULT checks=...
failures=...` line. With Verilator 5, from the directory that holds `rtl/`
and `tb/`:

```
verilator --binary --timing --assert -Irtl rtl/aimc_pkg.sv rtl/*.sv tb/tb_aimc_system.sv \
          --top-module tb_aimc_system -Mdir obj_sys
./obj_sys/Vtb_aimc_system
```

Replace the testbench name for any other block, for example `tb_ima`,
`tb_wireless_channel`, `tb_dp_scaling` or `tb_pp_scaling`. The three system
testbenches use the top at its default size. They build in about a minute and run in seconds.

## Differences from the source description, and what is not built

- **RISC-V cores and instruction cache:** not built. They come unchanged from
  the PULP platform. Their L1 ports, configuration writes and sleep/wake
  lines are top-level ports, and the testbenches play their role.
- **Wired interconnects:** not built. The source compares the wireless
  channel against wired networks of 64/128/256 bit/cycle with a 9-cycle
  latency. Only the wireless channel exists here.
- **Analog effects:** the crossbar and the transceivers are behavioural
  models. The crossbar computes exact integer products. The ADC rule,
  unsigned inputs and the weight-programming path are this design's choices.
- **Memory sizes:** "64 kb" and "512 kb" are read as kilobytes.
- **Phase timing:** the IMA needs one cycle more in stream-in and one more to
  start eval (56 cycles per vector instead of 54).
- **DMA bandwidth:** limited by one 32-bit L1 port per channel (see the DMA
  section).
- **Network size:** a full ResNet-50 needs 322 crossbar tiles. That does not
  fit in 16 clusters without reprogramming weights. Only the synthetic 1x1
  convolution workloads are run.

# bittide node in SystemVerilog

A bittide network is a set of nodes in which no node has a master clock and no
link ever carries back-pressure, yet every node can say, as an exact integer,
at which of its own clock ticks a word sent by a neighbour at a given tick of
the neighbour's clock will arrive. The trick is to control *time* rather
than data flow:

* Every node sends exactly one frame per tick of its own clock on every
  outgoing link, and takes exactly one frame per tick out of every incoming
  link's buffer. Nothing is ever held back or retried.
* A frame arrives at the rate of the *sender's* clock, so an incoming buffer
  fills when the neighbour runs faster and drains when it runs slower. The
  buffer occupancy is therefore a measure of the integrated frequency
  difference.
* Each node sums the occupancies of all its incoming buffers and nudges its
  own oscillator up or down (FINC/FDEC pins of a programmable clock
  generator) towards that sum. Applied on every node, this drives all clocks
  to the same long-run average rate (syntony), with no node in charge.
* Once the rates agree, the number of frames "in flight" between a sender
  tick and a receiver tick stops changing. The *logical latency*
  `lambda = receive tick - send tick` of each link is a constant, fixed at
  start-up. Software can then schedule communication statically, in ticks.

This repository holds the RTL of one node of such a network, as built for an
eight-node FPGA demonstrator with seven links per node, together with
testbenches that connect eight of these nodes into full networks and check
that the clocks converge and the logical latencies stay constant.

## Structure of a node

```
             rx_clk[j], rx_frame[j] (recovered by the transceiver)
                 |
                 v
     +----------------------+    frames, 1 per node tick    +----------------+
     | elastic_buffer  [j]  |------------------------------>| receive_memory |
     +----------------------+                               +----------------+
                 |  rx_clk[j]
                 v
     +----------------------+  occupancy beta_j  +---------------+  FINC/FDEC
     | ddc [j]              |------------------->| clock_control |-----------> clock board
     |  (virtual buffer)    |   (all links)      +---------------+
     +----------------------+                           ^
                 ^  clk_node (from the clock board)     | enable
                 |                                 +-----------+
     localtick_counter, send_memory -> tx_frame[j] | boot_ctrl |
                                                   +-----------+
```

`bittide_node` is the top. Three clock domains meet in it:

| Domain | Clock | What runs in it |
|---|---|---|
| always-on | `clk` | domain difference counters (output side), clock control, boot sequencing |
| node | `clk_node`, from the clock board | local tick counter, send and receive memories, elastic buffer read side, `tx_frame` |
| receive, per link | `rx_clk[j]`, recovered by the transceiver | elastic buffer write side, one counter of the link's DDC |

The transceivers, the clock board with its SPI configuration, the logic
analyser that records telemetry, and the processor that fills and reads the
memories are not part of the RTL. Their signals are ports of `bittide_node`.

## Measuring the buffer without a buffer: the domain difference counter

Until the clocks agree, a real elastic buffer of 32 frames would over- or
underflow within about a millisecond: 100 ppm is 12,500 frames per second at
125 MHz. The node therefore starts with *virtual* buffers. A domain
difference counter (DDC) gives the occupancy an unbounded buffer would have,
as a 32-bit signed number with 0 meaning "half full".

A DDC holds one counter in each of the two clock domains: the link's receive
clock and the node clock. It subtracts them in the always-on domain:

```
occupancy = count(rx_clk) - count(clk_node)      (truncated to 32 bits, signed)
```

Each count is produced by a `domain_counter`, the chain DC(8,56):

1. `reset_sync`: the reset is taken into the counted domain. It asserts at
   once and releases on a clock edge of that domain.
2. `wrap_counter`: an 8-bit counter in the counted domain, which wraps.
3. `gray_sync`: the count is registered as a Gray code, passed through two
   flops in the always-on domain and decoded again. At most one bit changes
   per count, so the synchronised value is always a count that existed.
4. `ext_counter`: the 8-bit count is widened to 64 bits in the always-on
   domain. A register holds the previous MSB. A falling edge of the MSB
   means the counter has wrapped, and the upper 56 bits then count up. This
   is a two-state Mealy machine. It outputs 0 until the first wrap (both
   counters of a DDC start together, so both read 0). From then on it
   outputs `x:c`.
5. The result is read as a non-negative signed 65-bit number.

The widening works only if the always-on domain sees the MSB low at least
once per wrap, i.e. if it samples faster than one sample per 128 counts.
That holds easily for clocks within a few hundred ppm of each other.

**Departure from the published state diagram.** The diagram labels the
output of the wrap transition `x:c`. If `x` there is the value before the
increment, the extended count falls by 256 for one cycle at every wrap, since
`c` has already wrapped. This implementation outputs the incremented `x` in
that cycle, so the extended count never decreases. `tb_ext_counter` checks
this: the literal reading fails it.

## Elastic buffers

`elastic_buffer` is a dual-clock FIFO with the following properties:

* It is 32 frames deep and frames are 64 bits wide.
* Its pointers are Gray-coded and cross the clock domains through two-flop
  synchronizers.
* The write side stores every frame the link delivers.
* The read side does not read until it sees 18 frames ("half full + 2").
  From then on it pops one frame on every node tick, unconditionally.
* A write into a full buffer is dropped and sets a sticky `wr_overflow` flag.
* A read from an empty buffer returns `rd_valid = 0` and sets a sticky
  `rd_underflow` flag.

In a converged network neither flag is ever set. The testbenches check that.

The read side sees the write pointer two or three node cycles late. The
buffer therefore holds a few more than 18 frames when reading starts. This is
one of the contributions to the roughly 69-frame round trips seen on
hardware, together with the transceiver pipelines.

## Clock control

`clock_control` is the proportional controller. It runs once every
`SAMPLE_PERIOD` always-on cycles: 125 cycles, i.e. 1 MHz at 125 MHz. In each
sample it does the following:

```
beta_sum = sum over used links of occupancy_j          (signed, 35 bits)
c_rel    = k_p * beta_sum                              (k_p = KP_NUM / 2^KP_FRAC = 64/256 = 0.25)
c_inc    = sign(c_rel - c_est)                         (+1, 0, -1)
c_est   += c_inc                                       (c_est = FINC count - FDEC count)
```

A `+1` becomes one pulse on `finc` and a `-1` one pulse on `fdec`. Each pulse
moves the clock board by one step of its own configured size (0.01 ppm in the
main configuration). `c_est` is the controller's record of the correction it
has already applied. Comparing against it instead of against zero turns the
one-bit FINC/FDEC interface into a proportional actuator.

Unit convention: both corrections are kept in units of one clock-board step,
so `c_est` is an integer and the comparison is exact. The published
controller is written in floating point and states the gain (0.25) without a
unit. Reading it as "steps per frame of summed occupancy" is this design's
interpretation.

Timing:

| Cycle after the sample strobe | What happens |
|---|---|
| 0 | The occupancies are registered and summed. |
| 1 | The decision is made. |
| 2 | The pulse starts and lasts `PULSE_CYCLES` cycles. |

At most one pulse goes out per sample. An assertion checks that `finc` and
`fdec` are never high together. Telemetry ports expose `beta_sum`, `c_est`,
the chosen direction and a `sample_valid` strobe.

## Boot sequence

`boot_ctrl` steps the node through the order the demonstrator uses:

1. **CLOCK_PROGRAM.** The node waits for `clock_ready`, i.e. for the clock
   board to be programmed over SPI.
2. **LINK_WAIT.** Every link in `link_mask` must report up for 500 ms without
   a break. That is `STABLE_CYCLES = 62,500,000` always-on cycles at an
   assumed 125 MHz. Any drop restarts the wait.
3. **WAIT_TRIGGER.** The node waits for a trigger shared by all nodes. A
   link drop here returns to LINK_WAIT.
4. **SYNC.** The DDCs are released and clock control is enabled, at the same
   moment on every node.
5. **RUN.** The node enters this state on `eb_request`, which comes from
   whatever decides that the clocks have converged. The real elastic buffers
   are released and start filling. Clock control keeps using the DDC
   occupancies, and keeps running.

The state outputs are combinational decodes of the state register. The
top re-registers the two reset-like ones (`ddc_rst_q`, `eb_off_q`) before
they fan out to other clock domains, and each domain takes them in through
its own `reset_sync`.

## Local tick, send and receive memories

These blocks are this design's minimal rendering of the node's
tick-addressed interface; the structure is not given in more detail.

* `localtick_counter` counts node ticks (64 bits) from the release of the
  node reset. Frames that arrive before the elastic buffers start are simply
  not delivered, so the logical latency is fixed at the moment each buffer
  starts reading.
* `send_memory` (one per link, 64 slots) puts `mem[localtick mod 64]` on
  `tx_frame` every tick. The processor writes ahead of the tick.
* `receive_memory` (one per link, 64 slots) writes the elastic buffer output
  to slot `localtick mod 64` every tick, with a valid bit. The processor
  reads it with a registered read port.

With a constant logical latency, a program can place a word in a send slot
and know exactly in which receive slot, at which tick, it will appear on the
neighbour.

## Parameters

The defaults are the demonstrator's numbers where it gives them.

| Parameter | Default | Meaning | Origin |
|---|---|---|---|
| `NUM_LINKS` | 7 | links per node | demonstrator (8 nodes, fully connected) |
| `FRAME_W` | 64 | frame width in bits | demonstrator |
| `DC_N`, `DC_M` | 8, 56 | wrap counter width, extension width | DC(8,56) |
| `OCC_W` | 32 | occupancy width (signed) | demonstrator |
| `EB_DEPTH`, `EB_START_FILL` | 32, 18 | elastic buffer size and start level | demonstrator |
| `SAMPLE_PERIOD` | 125 | always-on cycles per control sample | 1 MHz sample rate at an assumed 125 MHz |
| `KP_NUM`, `KP_FRAC` | 64, 8 | gain 64/256 = 0.25 | gain from the demonstrator, fixed-point form assumed |
| `PULSE_CYCLES` | 1 | FINC/FDEC pulse length | assumed |
| `STABLE_CYCLES` | 62,500,000 | link-stable wait | 500 ms at an assumed 125 MHz |
| `MEM_DEPTH` | 64 | slots per send/receive memory | assumed |

Shared types and constants live in `bittide_pkg`. The package defines
`frame_t`, `occ_t`, `speed_change_e` and `boot_state_e`.

The faster "realistic" setting uses a gain of 25 with 0.1 ppm steps. It
needs `KP_NUM = 6400`, which fits the multiplier's 17-bit gain field. The
step size is a clock board setting.

## Where this design departs from, or adds to, the demonstrator

* **Extended count on a wrap.** `ext_counter` outputs the incremented upper
  count on the wrap cycle (see above).
* **Integer controller.** Clock control is integer and fixed-point, with
  corrections in clock-board steps. The published pipeline is floating point.
* **Always-on clock frequency.** The always-on clock is assumed to run at
  125 MHz. The published text gives 125 MHz as the node frequency and also
  mentions programming the boards to 200 MHz. The 125 MHz figure is used
  throughout. The always-on clock plays the part of the demonstrator's
  system clock (the one that also programs the clock boards); a node with
  m incoming links thus has m + 3 clock domains, the outgoing link clock
  being inside the transceiver.
* **Sign of the clock-board law.** The published formula for the frequency
  after n_inc FINC and n_dec FDEC pulses reads `(1 + f_s (n_inc + n_dec))`,
  which would make both pins raise the frequency; the estimate
  `c_est = f_s * sum(c_inc)` with c_inc = -1 for FDEC implies
  `(1 + f_s (n_inc - n_dec))`. The controller and the clock-board model
  follow the latter.
* **Boot corner cases.** The behaviour on a link drop after the trigger
  (ignored), and who raises `eb_request`, are not specified. Here they are
  an input and a choice.
* **Not built.** The transceivers and clock recovery, the clock board and
  its SPI programming, the logic analyser, the processor, and the
  measurement of logical latency at start-up are not built. The
  re-framing of data over the links is not built either. In the
  testbenches, the harness measures logical latency directly.
* **Unused links.** The elastic buffer of a link masked off in `link_mask`
  never gets a write clock. Its `eb_overflow` and `eb_underflow` bits are
  then meaningless and should be masked by the user.

## Testbenches

Every module has a self-checking testbench `tb/tb_<module>.sv`. Each one
ends with a line `TB_RESULT checks=N failures=M`. The unit testbenches
compare against independent models:
* `tb_ddc` uses real-valued clock periods with random ppm offsets and
  compares against counts kept in the testbench.
* `tb_clock_control` compares against a behavioural model of the control
  law.
* `tb_elastic_buffer` uses a queue model.

The network testbenches use three behavioural models from `tb/`:
* `clock_board_model` is an oscillator with a ppm offset, moved by FINC/FDEC
  pulses.
* `link_model` is a fixed pipeline of frames on the sender clock.
* `bittide_network` is eight nodes wired fully connected, as an hourglass or
  as a cube.

`bittide_network` takes every node through the whole boot sequence:
* The links come up one by one, and one drops once, so the link-stable wait
  restarts.
* The trigger starts the DDCs and clock control.
* After a sync phase the elastic buffers are started.
* After a run phase the result is checked.

It acts as every node's processor. It writes into each send slot the tick at
which that slot will leave, so every received frame carries its departure
tick and the logical latency of every link can be checked frame by frame.

A network run passes when:
* the frequency spread falls from 130 ppm to below 12 ppm (24 ppm for the
  hourglass);
* no used buffer over- or underflows;
* every link's logical latency is constant;
* FINC pulses, FDEC pulses, idle samples, a link-wait restart and
  elastic-buffer starts all happened;
* with a long link, its round trip exceeds the others by twice the extra
  latency.

The runs:

| Testbench | Network | Notes | Result |
|---|---|---|---|
| `tb_bittide_node` | fully connected | link-stable wait cut to 500,000 cycles | round trips 77-78 frames, about 35 s |
| `tb_bittide_node_full` | fully connected | every node parameter at its default, including the full 500 ms wait | about 6 min |
| `tb_network_hourglass` | hourglass | 16 ms sync phase; the single bridge link leaves a 14-20 ppm dither with the harness's coarse steps, so its limit is 24 ppm | round trips 77, about 1 min |
| `tb_network_cube` | cube | 16 ms sync phase, because three links give less loop gain | spread below 12 ppm, round trips 77, about 1 min |
| `tb_network_long_link` | fully connected | nodes 0 and 2 joined by 631 frames each way instead of 16, like a 2 km fibre | round trip 1307 vs 77, i.e. 1230 more |

The hardware measured 1299 vs about 69 on its long-link round trip, also
1230 more. The harness's clock boards step 4 ppm per pulse instead of
0.01 ppm. The frequency offsets and the step only set how fast convergence
happens, and this makes it fit into milliseconds of simulated time. The
always-on clock is run very fast during the link-stable wait; its rate is not
a property of the design.

To simulate with Verilator, for example the end-to-end run:

```
verilator --binary --timing --assert -Irtl -y rtl -y tb +libext+.sv \
    rtl/bittide_pkg.sv tb/tb_bittide_node.sv --top-module tb_bittide_node
./obj_dir/Vtb_bittide_node
```

The models use `real` delays and a 1 ns/1 ps timescale
(`--timescale 1ns/1ps`).

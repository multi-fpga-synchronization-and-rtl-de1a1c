# Multi-board synchronization and result distribution for qubit control

A single RFSoC board runs out of DAC channels at roughly ten qubits, so larger
superconducting-qubit experiments need several boards. The boards must be
correct in two ways:

1. **Same time everywhere.** Every board must fire its pulses against one
   shared time base, to the clock cycle.
2. **Results shared quickly.** A measurement made on one board must reach the
   others within a few hundred nanoseconds, so that they can branch on it
   (mid-circuit measurement and feed-forward).

This RTL holds the programmable-logic side of both functions, following the
scheme described by Xu, Rajagopala, Fruitwala and Huang in *Multi-FPGA
Synchronization and Data Communication for Quantum Control and Measurement*
(LBNL, QubiC project):

* **Clock synchronization.** All boards take one reference clock through
  matched cables and a zero-delay PLL. That makes their 500 MHz control clocks
  equal in frequency and phase. Only their *time counters* can still differ,
  by a whole number of cycles, because the boards leave reset at different
  times. Two copper GPIO links per board form a ring. Over each link a minimal
  form of the Precision Time Protocol (PTP) measures the counter offset
  between neighbours. Host software then subtracts that offset from the
  counter.
* **Data communication.** Each board has four SFP fibre links. Each link runs
  its own single-lane Aurora 64B/66B core at 10.3125 Gb/s. Readout results are
  packed into 64-bit frames, crossed into the Aurora clock domain and sent.
  The receiving board keeps them in a register that its sequencer (the
  "distributed processor") reads when it executes a conditional.

One bitstream serves every board. A board's place in the ring and its role as
root or leaf of the data star are set only by cabling and software.

## Block structure

```
mfpga_top
├── clock_sync
│   ├── sync_time_counter        board time, software-corrected
│   ├── ptp_sync_port  (primary)    towards the downstream board: sends, gets t1, t4
│   ├── ptp_sync_port  (secondary)  towards the upstream board: answers, gets t2, t3
│   └── sync_start_trigger       fires when the time reaches the broadcast start
└── comm_lane  x NUM_LANES (4)
    ├── readout_fsm              results -> 64-bit frames, one per GAP_CYCLES
    ├── async_fifo   (TX)        500 MHz -> 161.13 MHz
    ├── short_fifo               absorbs Aurora pause / clock-compensation stalls
    ├── tx_fsm                   -> Aurora TX AXI4-Stream
    ├── rx_fsm                   <- Aurora RX AXI4-Stream, CRC verdict
    ├── async_fifo   (RX)        161.13 MHz -> 500 MHz
    └── feedforward_fsm          result register, answers processor requests
```

`mfc_pkg` holds the frame types and the helper functions that size a frame.

Some parts sit outside the RTL, and their signals are ports of `mfpga_top`:

* the Aurora cores;
* the GT transceivers and their shared-clocking wrappers;
* the SFPs;
* the clock chip and the RFSoC multi-tile synchronization;
* the host software.

The testbenches use a behavioural Aurora link model, `tb/aurora_model.sv`, in
place of the core.

## Clock synchronization

### Why only an integer offset has to be measured

The reference clock reaches every board through cables of equal length. A
nested dual PLL in zero-delay mode then puts every control clock edge at the
same instant on all boards. So `sync_time_counter` runs at exactly the same
rate everywhere. What differs is the count each board holds at a given edge,
and that difference is an integer. Once it is removed it stays removed. In
the original bench test the counters kept a zero offset over sixteen hours.

### The exchange

A primary port P on board A talks to the secondary port S on board B:

| step | event                                   | captured by | time base |
|------|-----------------------------------------|-------------|-----------|
| t1   | P drives its pulse (`pri_tx_start`)      | A           | A's counter |
| t2   | S detects the pulse                      | B           | B's counter |
| t3   | S drives its answer (automatic)          | B           | B's counter |
| t4   | P detects the answer                     | A           | A's counter |

Host software reads all four stamps and computes two quantities:

```
offset  = ((t2 - t1) - (t4 - t3)) / 2     B's counter minus A's counter
transit = ((t4 - t1) - (t3 - t2)) / 2     one-way link delay, in cycles
```

It then writes `adj_value = -offset` with `adj_valid` to board B. The counter
takes the value `now + 1 + adj_value` in one cycle, so the correction loses no
tick.

The capture points are defined so that the two directions are identical:

* `tx_ts` is the counter value at the clock edge that sets `gpio_out`.
* `rx_ts` is the counter value at the edge where the synchronized,
  edge-detected input is first seen. That is three edges after the pulse
  reaches the pin: two synchronizer flops plus the capture.

These fixed latencies appear once in each direction and cancel in `offset`.
Only the cable delay has to be the same both ways. For a link of D cycles,
`transit = D + 3`.

The secondary port answers REPLY_DELAY + 1 cycles after it detects a pulse
(17 cycles by default). A port with `auto_reply` low never answers, so the
pulse cannot bounce back and forth between boards.

### Around the ring

The boards are cabled so that the primary port of board *k* goes to the
secondary port of board *k+1*, and the last board's primary port goes back to
board 1. The host synchronizes in ring order:

1. Exchange 1 → 2, then correct board 2.
2. Exchange 2 → 3, then correct board 3. Board 3 now agrees with board 1,
   because board 2 already did.
3. Continue in the same way until the last board.
4. Exchange from the last board back to board 1. This must measure 0, which
   checks the whole ring.

This runs once, at boot.

### Synchronized start

To start a program the host broadcasts one start timestamp.
`sync_start_trigger` on each board is armed with it. Each trigger emits a
single-cycle `start` in the cycle after its corrected time reaches the
timestamp, so every board starts in the same cycle.

If the timestamp has already passed when the trigger is armed, it fires at
once and raises `start_late`. That lets the host notice that its broadcast
arrived too late.

## Readout frames

A frame is one 64-bit Aurora beat. Each qubit has a 3-bit field; qubit *q* is
at bits `[3q+2 : 3q]`:

```
 63 | 62..60  | ... | 5..3    | 2..0
----+---------+-----+---------+---------
 0  | q20     | ... | q1      | q0        field = {valid, state[1:0]}
```

* The 2-bit state covers qubits, qutrits and ququarts.
* `valid` means "this field carries a new result". The receiver updates only
  those fields, so a frame never erases results that arrived earlier in other
  frames.
* One frame holds 21 qubits.
* With `NUM_FRAMES > 1`, the top `clog2(NUM_FRAMES)` bits carry the frame
  index, and each frame holds `(64 - clog2(NUM_FRAMES)) / 3` qubits. For
  example, 4 frames give 4 × 20 = 80 qubits.

### Keeping results without overwriting them (readout_fsm)

Qubits finish readout at different times, and a qubit can be measured again
before its previous result has gone out. The FSM therefore keeps two slots
per qubit:

* `pend`: the result waiting for the next frame.
* `park`: a second result that arrived while `pend` was still unsent. The
  FSM pulses `held`.

When a frame leaves, each `park` slot moves into `pend`. A third result for a
qubit whose two slots are both full is dropped, and the FSM pulses `dropped`.
`clear` (for example at the start of a shot) forgets everything that is
unsent.

### Pacing

As soon as any qubit of a frame has a pending result, and the transmit FIFO
has room, the FSM writes that frame. It then waits `GAP_CYCLES`. The default
is 16 control cycles, which is 32 ns. Frames are therefore never closer than
that. Under steady traffic they are exactly that far apart. With several
frames, those that have pending results are served round-robin.

## The lane data path

### Transmit (readout_fsm → Aurora)

* **Regular FIFO** (`async_fifo`). Crosses from the 500 MHz control clock to
  the 161.1328125 MHz Aurora user clock, which is the 10.3125 Gb/s line rate
  divided by 64. It uses Gray-coded pointers and two-flop synchronizers, with
  first-word-fall-through reads. Depth is 16.
* **Short FIFO** (`short_fifo`, 16 entries, user clock). The Aurora core
  refuses data in two situations:
  * for one cycle after every 32 user cycles (the 64B/66B gearbox pause);
  * for up to 8 cycles every 4992 user cycles (clock compensation).

  This FIFO rides out both, so the clock-crossing FIFO and the readout FSM
  never see the stall. Frames move into it whenever the regular FIFO has one
  and it has room.
* **TX FSM**. Sends each frame as a single beat with `tlast = 1` and all
  `tkeep` bits set. While `tready` is low it holds the beat unchanged, as
  AXI4-Stream requires, and reports each lost cycle on `tx_stall`. It sends
  nothing while `channel_up` is low. With `tready` high, frames leave back to
  back.

### Receive (Aurora → feedforward_fsm)

* **RX FSM**. Aurora's receive port has no back-pressure. With the 32-bit CRC
  enabled, the core reports a verdict per frame (`crc_valid`,
  `crc_pass_fail_n`), either with the last beat or a few cycles after it. The
  FSM holds the word until the verdict arrives, then acts on it:

  | case                                         | action                         |
  |----------------------------------------------|--------------------------------|
  | CRC passes                                   | write the word to the RX FIFO  |
  | CRC fails                                    | drop it, pulse `rx_crc_err`    |
  | beat without `tlast`                         | drop it, pulse `rx_fmt_err`    |
  | next frame arrives before the verdict        | drop it, pulse `rx_fmt_err`    |
  | good frame meets a full FIFO                 | drop it, pulse `rx_ovf_err`    |
* **Regular FIFO** back to the control clock.
* **Feed-forward FSM**. Merges each frame into the result register (`res_valid`
  and `res_state`, per qubit). The processor asks for a qubit with `ff_req`
  and `ff_req_id`:
  * If the result is already stored, `ff_resp_valid` and `ff_resp_state`
    follow one cycle later.
  * If not, the FSM raises `ff_waiting` and answers one cycle after the result
    is stored.

  `clear` forgets all stored results.

### Latency

From a readout strobe on one board to the stored result on the other, the
RTL adds roughly 40 to 50 ns. That is the measured worst case of 206 ns
(103 control cycles) with the behavioural link, minus the model's share: its
24-cycle flight time, re-timing to the receive clock, output register and
one-cycle CRC verdict, about 160 ns in all. The rest of the real latency is the
Aurora core and the fibre.

The original bench test budgeted about 450 ns for communication with the real
cores. It used a 600 ns hold, which also covers the 150 ns demodulation.

## Parameters

| parameter | default | meaning |
|---|---|---|
| `NUM_LANES` | 4 | Aurora lanes (one per SFP) |
| `NUM_FRAMES` | 1 | frames per lane; qubits = NUM_FRAMES × (64 − clog2 NUM_FRAMES) / 3 |
| `GAP_CYCLES` | 16 | minimum control cycles between frames (32 ns) |
| `TIME_W` | 64 | time counter width |
| `PULSE_W` | 4 | sync pulse width, cycles |
| `REPLY_DELAY` | 16 | secondary answer delay (answer at +17 cycles) |
| `FIFO_DEPTH_LOG2` | 4 | clock-crossing FIFO depth 16 |
| `SHORT_DEPTH_LOG2` | 4 | short FIFO depth 16 |
| `USE_CRC` (`rx_fsm`, `comm_lane`) | 1 | wait for Aurora CRC verdicts |

The source paper gives these values:

* the four lanes;
* the 64-bit frame, 2-bit states and 21 qubits;
* the 32 ns gap, and that the frame count and gap are adjustable;
* the 32-bit CRC;
* the pause and clock-compensation figures;
* the clock rates.

The following are this design's own choices:

* the frame bit layout and the frame-index field;
* the pend/park scheme;
* FIFO depths;
* the counter width;
* the pulse width and reply delay;
* the input synchronizer;
* the start trigger's `late` behaviour;
* the request/response handshake with the processor;
* every behaviour of the TX and RX FSMs, which the paper only names.

## Where this RTL departs from, or goes beyond, the published description

* **Back-pressure into the transmit path.** The published interface between
  the integration logic and the link is a 64-bit word plus a valid, per
  direction. Here the readout FSM also looks at the transmit FIFO's full flag
  (`frame_ready`), so nothing can be lost if the gap is set too small. With
  the default 32 ns gap the FIFO never fills, and the interface behaves as a
  plain data/valid one.
* **Offset arithmetic is not in hardware**, as in the original: the ports
  only capture t1–t4. The testbenches play the host.
* **GPIO port wiring.** Each sync port uses one output and one input wire.
  The original states only that one GPIO port per neighbour is used.
* **Roles of the two sync ports are wired in `clock_sync`.** The primary port
  never auto-answers; the secondary port always does. Both are the same
  module.
* **User clocks.** Each lane takes its own user clock input. On the real
  board the two lanes of a transceiver bank share the clocking of one
  wrapper.
* **Frame index.** It only exists when `NUM_FRAMES > 1`. The original says
  the number of frames is adjustable but not how frames are told apart.
* **Both FSMs on every lane.** Every lane carries both a readout FSM and a
  feed-forward FSM, so one bitstream serves the root and the leaves of the
  star. In a star, only the root's readout FSMs and the leaves' feed-forward
  FSMs are used.

Not in RTL:

* the Aurora core;
* GT transceivers and wrappers;
* SFPs;
* the LMK04828 zero-delay PLL;
* RFSoC multi-tile synchronization;
* the host job server and its RPC.

## Simulating

Every testbench is self-checking. Each prints one line,
`TB_RESULT checks=N failures=M`, and stops itself with a watchdog if it
hangs. The files carry no `timescale`, so pass one on the command line. For
example, the three-board system test:

```
verilator --binary --timing --assert --timescale 1ns/1ps -Irtl -y rtl -y tb \
    rtl/mfc_pkg.sv tb/tb_mfpga_top.sv --top-module tb_mfpga_top
./obj_dir/Vtb_mfpga_top
```

To run any other bench, replace `tb_mfpga_top` with its name.

| testbench | what it shows |
|---|---|
| `tb_sync_time_counter` | counting, positive and negative corrections |
| `tb_ptp_sync_port` | offset and transit recovered exactly; pulse width, reply delay, no echo, clear |
| `tb_sync_start_trigger` | start one cycle after the time is reached; late arm fires at once |
| `tb_clock_sync` | two boards: measured offset, correction, ring closure at zero, common start |
| `tb_async_fifo` | 400 words across 500 / 161 MHz clocks, order kept, full and empty reached |
| `tb_short_fifo` | random traffic against a queue model, flags and count every cycle |
| `tb_tx_fsm` | order, single-beat framing, stall count, no send while link down, back-to-back rate |
| `tb_rx_fsm` | CRC verdict at 0–3 cycles, CRC / format / overflow drops counted exactly |
| `tb_readout_fsm` | 1- and 4-frame configurations against a per-qubit model; held, dropped, clear, exact 16-cycle spacing |
| `tb_feedforward_fsm` | merging, one-cycle answers, waiting answers, clear; 1 and 4 frames |
| `tb_comm_lane` | one lane looped through the link model: latency, CRC drop, 20 000 cycles of traffic, pauses, clock compensation |
| `tb_comm_lane_frames` | one lane with 4 frames (80 qubits) and a 16 ns frame gap: every frame index routed to the right qubits, register and requests match |
| `tb_mfpga_top` | three boards at default parameters (see below) |

`tb_mfpga_top` is the system test. It:

* synchronizes a ring of three boards that left reset 137 and 59 cycles
  apart;
* runs the mid-circuit-measurement program for all four outcomes. Board 1
  measures q0 and q1. Board 2 plays none, one, two or three conditional
  pulses for |00⟩, |01⟩, |10⟩ and |11⟩, 1600 ns after the common start;
* makes one early request that has to wait for its result;
* corrupts one frame on the link;
* has a qubit read out twice in a row;
* sends a burst of traffic.

It counts each mechanism (PTP exchange, correction, ring closure, common
start, TX stall, clock compensation, held result, CRC drop, waiting and
immediate answers) and fails if any of them never happened. It takes a few
seconds.

The behavioural Aurora model re-times each beat from the sending board's
user clock to the receiving board's. In `tb_mfpga_top` the three boards' user
clocks differ by about 320 ppm; `tb_comm_lane` loops one clock back to
itself. The model's 24-cycle flight time is an assumption, not a measured
figure.

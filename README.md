# CAN security test bed on an FPGA: virtual CAN bus, attack injection and a CAN-coupled IDS datapath

Automotive intrusion-detection systems (IDS) for the CAN bus are usually
validated either in pure simulation or on a fixed hardware-in-the-loop rig in
which the IDS runs as a task or a coupled accelerator on one ECU. This design
is the hardware part of a more flexible rig. Several ECUs sit on one FPGA and
share an on-chip "virtual" CAN bus. Dedicated logic injects attacks at line
rate and records what happens on the bus. The IDS is attached directly to the
receive side of a CAN controller, not behind a processor. The point of the
last choice is latency. A frame goes from the bus through a pre-processor into
the neural-network IDS core and a hardware Softmax with no software in the
path, and a timer measures the time from the frame's first bit to the
verdict.

The RTL here is the part of that system that is logic and is specified well
enough to write. It covers the bus, the CAN framing needed to take part in
it, the attack-injection node, the IDS pre- and post-processing, the latency
instrument, and the two monitoring units that stream to the host over
Ethernet: waveform capture and a time-stamped bus log. The soft-processor
ECUs, the quantised neural network itself, the Ethernet MAC and the host software are
outside the design. They reach it through ports (see "What is outside").

```
   ECU 1..4 tx  control-node tx          Pmod (scope / transceiver / other FPGA)
        |            |                         ^ pmod_can_tx   | pmod_can_rx
        v            v                         |               v
   +--------------------------------- can_vbus (wired-AND) ----------------+
   |        ^ inj tx              ^ ACK                 bus level -> every node
   +--------|---------------------|------------------------------------------+
    attack_injector          can_rx (receive-only)
    (DoS/fuzz/spoof)              | frame at ACK delimiter, sof
                                  v
                             ids_preproc  -- 4-frame window, 320 bit -->  [ IDS core, external ]
                                                                                 |
                latency_timer <-- sof, win_new, result           4 scores x 16 bit
                      ^                                                          v
                      +-------------------------------------------------- softmax4 --> class, probabilities
   wave_capture: 16 probe bits (or 16 user bits) at clock rate -> buffer -> raw Ethernet frames --+
   bus_logger:   every received frame + SOF time stamp -> FIFO -> raw Ethernet frames -------------+-> eth_mux -> MAC
```

## Clocking and numbers used throughout

* One clock, 100 MHz, and the bus at 500 kbit/s. One CAN bit is therefore 200
  cycles (`fav_pkg::CAN_BIT_CLKS`). Both figures are those of the reference
  set-up.
* The sample point is at cycle 150 of the 200, i.e. 75 %. This is a choice of
  this design.
* Four ECUs (`N_ECU = 4`), a window of four frames (`WINDOW = 4`) and four
  IDS classes. In order, the classes are benign, DoS, fuzzing and RPM-spoof.
* The reset is asynchronous and active low, and clears all state.
* In the reference system the ECUs run from independent clocks. For that
  reason every CAN core in this design brings the bus into its own clock
  through a two-flop synchroniser. The bus itself is combinational, so tx
  lines from other clock domains can be ANDed in directly.

## The virtual CAN bus (`can_vbus`)

A real CAN bus is a wired-AND: a node driving 0 (dominant) wins over any
number of nodes leaving the line at 1 (recessive). Priority arbitration, the
ACK bit and error flags all rely on that property. A tristate driver on each tx
line, enabled only for a dominant bit, would model this. Inside FPGA fabric
there are no tristates, so the bus here is simply the AND of all tx lines,
which behaves the same way. Every protocol
mechanism that depends on the wired-AND therefore works unchanged on chip.

The bus also goes out to a Pmod connector, where it can be watched with a
scope, connected to a CAN transceiver or chained to another board. A
transceiver echoes on its RXD whatever it sees on the line, including what it
was just sent. For that reason the output `pmod_can_tx` carries only the AND of
the on-chip nodes, and the external level `pmod_can_rx` is ANDed into the bus
that the local nodes see. Tie `pmod_can_rx` to 1 when nothing is connected.
This split is a choice of this design.

## CAN framing (`can_tx`, `can_rx`)

The reference system reuses an existing open-source CAN controller for its
ECUs and a receive-only core for the IDS. Neither is described, so both cores
here were written from the CAN 2.0A standard. Each is deliberately minimal.

**Common bit engine.** A counter of `BIT_CLKS` cycles runs throughout. A
transmitter drives a new bit at count 0. Everyone samples at `SAMPLE_CLK`.
The bus counts as idle after 11 consecutive recessive samples. These 11 bits
are the ACK delimiter, the seven EOF bits and the 3-bit intermission, so two
frames can follow each other with the minimum gap.

**Transmitter.** When a frame starts, SOF, identifier, RTR, IDE, r0, DLC and
payload are loaded into an 83-bit shift register. CRC-15 (polynomial 0x4599)
is accumulated while those bits go out, and is then sent itself. The recessive
tail follows: CRC delimiter, ACK slot, ACK delimiter and 7 EOF bits. After
five equal bits between SOF and the end of the CRC, a complementary stuff bit
is inserted. This includes the position after the last CRC bit.

While the identifier and RTR bit are on the bus, reading a dominant bit back
when a recessive one was sent means the node lost arbitration. The node then
releases the line, pulses `arb_lost` and retries once the bus is idle. Any
other mismatch is a bit error and is handled the same way. A recessive ACK
slot pulses `ack_err`. The frame still counts as done and is not resent.

A node whose request is pending and which sees another node's SOF joins that
SOF. Otherwise two nodes starting within the same bit would not arbitrate
against each other.

**Receiver.** Every recessive-to-dominant edge restarts the bit counter (hard
synchronisation). That is enough on a bus with no oscillator drift. After
an idle bus, a falling edge is taken as SOF, and `sof` pulses; the latency
timer uses this pulse. The receiver then:

* removes stuff bits; a sixth equal bit raises `stuff_err`;
* collects the identifier, RTR, DLC, data and CRC;
* checks the CRC;
* drives the ACK slot dominant if the CRC is good (`ACK_EN`);
* delivers the frame at the sample point of the ACK delimiter.

Frame delivery is one cycle of `frame_valid`, with `frame`
(`fav_pkg::can_frame_t`). Payload byte 0 is in `data[63:56]`, and bytes beyond
the DLC are zero. Extended (29-bit) frames are ignored. After any error the
core waits for an idle bus.

**Not implemented in either core:** error frames, error counters,
error-passive and bus-off states, overload frames, extended identifiers, and
phase-segment resynchronisation with a jump width. A bus with a transmitter
that needs these, such as a real ECU controller that signals errors, still
works. These cores just do not produce such events themselves.

## Attack injection (`attack_injector`)

This is the hardware attack node, and it floods the bus at full line rate. The
`mode` input selects the attack:

| mode        | frame sent                                                                 |
|-------------|----------------------------------------------------------------------------|
| `ATK_DOS`   | identifier 0x000 (the highest priority), DLC 8, payload 0                  |
| `ATK_FUZZ`  | random identifier (11 bits) and random 8-byte payload from a xorshift32 generator (`x^=x<<13; x^=x>>17; x^=x<<5`, three steps per frame: identifier from the first, payload from the other two) |
| `ATK_SPOOF` | `user_frame`, repeated (targeted spoofing, e.g. a forged RPM message)      |
| `ATK_OFF`   | nothing; a frame already started is finished                               |

The attack kinds and the DoS identifier follow the reference design. The
payloads, the generator and the gap control are choices of this design.

`gap_bits` is counted from the last EOF bit and includes the 3-bit
intermission. A free bus therefore carries one attack frame every
`frame bits + max(3, gap_bits)` bit times. The end-to-end test checks this
period to the cycle. With `gap_bits = 0` in DoS mode, no other node ever wins
arbitration. `n_sent`, `n_lost` and `n_err` count completed frames,
arbitration losses, and bit errors or missing ACKs.

## From frames to a verdict

### Pre-processor (`ids_preproc`)

Each frame delivered by the receiver becomes an 80-bit feature, and the last
four features form one window:

```
feature = { 5'b0, id[10:0], payload[63:0] }     (payload zero beyond DLC and for remote frames)
window  = { feature(n-3), feature(n-2), feature(n-1), feature(n) }   newest in bits 79:0
```

Extracting the identifier and payload and concatenating four consecutive
messages follows the reference design. The exact layout above, including the
byte-aligned zero padding, is a choice of this design.

The window slides by one frame per message. Window n goes out one cycle after
frame n arrives, as a single 320-bit AXI-stream word. No window is sent until
four frames have been seen since reset. A word waiting for `m_tready` stays
unchanged. If a newer frame arrives first, the newer window replaces the
waiting one and `overrun` pulses. At 500 kbit/s a frame lasts about 100 µs or
more, so this happens only when the IDS core is stalled. `win_new` marks each
new window for the latency timer.

### IDS core (external)

The network is a 5-layer, 4-bit quantised MLP compiled to an AXI-stream IP
core. It is not part of this RTL: its layer sizes and weights are not
available. The top module brings out its two streams:

* features out: `ids_feat_*`, 320 bits;
* class scores in: `ids_score_*`, four signed 16-bit values with 4 fraction
  bits.

If the real core uses narrower streams, add a width adapter in front of it.
The end-to-end test uses a rule-based stand-in (`tb/ids_core_model.sv`).

### Softmax (`softmax4`)

This block takes the four scores and returns probabilities
p_i = e^{x_i} / sum_j e^{x_j} in Q0.16, together with the arg-max class and a
4-bit one-hot of that class. The one-hot is the result word for the bridge
processor. Doing the activation in hardware rather than in software is the
point of the CAN-coupled integration.

The arithmetic avoids both an exponential unit and a full divider array:

1. Subtract the maximum score m, so that every term is e^{-d} with d ≥ 0 and
   lies in (0, 1]. The largest class gets exactly 1.
2. Compute e^{-d} = 2^{-d·log2 e}. The difference d is multiplied by
   round(log2 e · 2^15) = 47274 (one constant multiplier per class). The
   integer part k of the product becomes a right shift. The top four fraction
   bits f select T[f] = round(2^16 · 2^{-f/16}) from a 16-entry table. The
   result is e_i = T[f] >> k. The table step is 2^{1/16}, so each term is
   within about 5 % of the exact value.
3. Add the four terms. The sum S is always at least 2^16, so it is never zero.
4. Compute p_i = e_i · 2^16 / S with four restoring dividers working in
   parallel, one quotient bit per cycle, 17 cycles.

From the cycle that accepts the scores to `m_valid`, the latency is 21 cycles,
which the testbench checks. The block accepts a new vector only while idle,
and `s_tready` marks that state. Against floating-point Softmax, every
probability in the test is within 0.03. When two scores are equal, the lower
class index wins.

## Measuring detection latency (`latency_timer`)

The figure of merit is the time from the first bit of a frame on the bus to
the finished Softmax for the window that frame completes. The timer does the
following:

1. A free-running 32-bit cycle counter is copied at every `sof`.
2. When the pre-processor loads a window (`win_new`), the copy becomes the
   pending start time.
3. The next `sm_valid` closes the measurement, giving `lat_last`, `lat_max`
   and `lat_n`.

If a window is replaced before its result arrives, its start time is replaced
with it. A result with nothing pending is ignored. Multiply the counts by
10 ns for time.

With this RTL the latency is the frame time up to the ACK delimiter, plus 3
cycles of synchroniser delay, 1 cycle in the pre-processor, the IDS core's own
latency and 21 cycles of Softmax. An 8-byte frame occupies 98 bits from SOF to
the end of the CRC, plus up to 24 stuff bits. At 500 kbit/s that is roughly
200 to 250 µs before the IDS core even starts. The end-to-end test uses a
60-cycle stand-in IDS core. Its largest measured value is 23,432 cycles
(234 µs), against a line-rate budget of 1184 µs for a 4-frame window that the
test also checks.

The reference measurement reports 794 µs for its complete system. That figure
includes the real network's latency and, by one of its descriptions, the time
for the bridge processor to read the result. It is not a number this RTL
alone can reproduce.

## Waveform capture over Ethernet (`wave_capture`)

The purpose of this block is to look at internal signals at full clock
resolution from the host. The sequence is:

1. `arm` starts a capture.
2. The first cycle in which `probe & trig_mask` is non-zero becomes sample 0.
   With a zero mask, the arming cycle itself is sample 0.
3. 1024 samples of 16 bits, one per cycle, are written to a buffer of half a
   36-kbit block RAM.
4. The buffer is sent as four raw Ethernet frames on an 8-bit AXI-stream for
   the MAC.

Each frame has this layout:

```
DST_MAC(6, default ff:ff:ff:ff:ff:ff)  SRC_MAC(6, default 02:00:00:00:00:01)
EtherType(2, default 0x88B5)  sequence number(2)  256 samples x 2 bytes, MSB first
```

The MAC adds the preamble and FCS. Buffer size, trigger and frame layout are
choices of this design. In the top module, `cap_sel` chooses the capture
source. With `cap_sel` low the unit records fixed internal signals. With
`cap_sel` high it records the 16 bits on `cap_user`, for user-defined data.
The fixed probe bits are:

| bit | signal | bit | signal |
|-----|--------|-----|--------|
| 0 | bus level | 7 | start of frame |
| 1 | `pmod_can_tx` | 8 | frame received |
| 2 | `pmod_can_rx` | 9 | feature word valid |
| 3 | AND of the ECU tx lines | 10 | score word valid |
| 4 | control-node tx | 11 | Softmax done |
| 5 | injector tx | 15:12 | one-hot class |
| 6 | IDS receiver's ACK drive | | |

## CAN bus log over Ethernet (`bus_logger`, `eth_mux`)

The bus log gives the host a complete record of the bus traffic, time-stamped
at clock resolution. It uses the frames the IDS receiver delivers, so only
error-free standard frames are logged. A free-running 32-bit cycle counter is
copied at each start of frame. When the frame is delivered, a 16-byte record
goes into a 16-entry FIFO:

```
bytes 0-3  SOF time stamp (cycles, MSB first)     byte 6     {4'b0, dlc}
bytes 4-5  {rtr, 4'b0, id[10:0]}                  byte 7     records dropped just before this one
bytes 8-15 payload byte 0 .. 7 (zero beyond DLC)
```

Whenever the FIFO holds records and no packet is in progress, the logger
sends one Ethernet frame with all records held, up to 8:

```
DST_MAC(6)  SRC_MAC(6)  EtherType 0x88B6(2)  sequence number(2)  N(1)  0(1)  N records
```

A CAN frame lasts at least about 90 µs, while a one-record packet takes 34
byte times. In practice the FIFO therefore fills only if the MAC holds the
stream off for a long time. A record that does not fit is counted in
`log_n_dropped` and in the drop field of the next record.

The capture unit and the logger share the MAC through `eth_mux`. The mux
grants one whole frame at a time, so frames from the two sources never
interleave. When both sources are waiting, they take turns. The host tells
the two kinds apart by EtherType: 0x88B5 for capture, 0x88B6 for the log.
The record layout, FIFO size and arbitration are choices of this design.

## IDS statistics (`ids_stats`)

The system log on the host reports IDS statistics and high-level errors. The
numbers come from `ids_stats`, a set of 32-bit wrapping counters that the
bridge node reads:

* Softmax verdicts per class (benign, DoS, fuzzing, spoof);
* CRC errors and stuff errors seen by the IDS receiver;
* pre-processor overruns.

Each counter increments in the cycle after its event. `stat_clear` zeroes all
of them. Which events are counted is a choice of this design.

## Top module (`fav_nss_top`)

`fav_nss_top` instantiates all of the blocks above. Its bus has seven nodes:
four ECU tx ports, the control-node tx port, the injector and the IDS
receiver's ACK line. Its ports fall into these groups:

| group | ports |
|-------|-------|
| bus | `ecu_can_tx[N_ECU]`, `ctrl_can_tx` (in), `can_bus` (out, rx for all external nodes), `pmod_can_rx` / `pmod_can_tx` |
| injector | `atk_mode`, `atk_frame`, `atk_gap_bits` (in); `atk_active`, `atk_n_sent`, `atk_n_lost`, `atk_n_err` (out) |
| received frames | `rx_valid`, `rx_frame`, `rx_crc_err`, `rx_stuff_err` |
| IDS core | `ids_feat_tvalid/tready/tdata`, `ids_overrun`, `ids_score_tvalid/tready/tdata` |
| result | `sm_valid`, `sm_prob`, `sm_cls`, `sm_onehot`, `lat_last`, `lat_max`, `lat_n` |
| statistics | `stat_clear` (in); `stat_n_class[N_CLASS]`, `stat_n_crc_err`, `stat_n_stuff_err`, `stat_n_overrun` |
| capture and log | `cap_arm`, `cap_trig_mask`, `cap_sel`, `cap_user` (in); `eth_tdata/tvalid/tready/tlast`, `cap_busy`, `cap_n_frames`, `log_n_logged`, `log_n_dropped`, `log_n_frames` |

Parameters and their defaults are `N_ECU` 4, `BIT_CLKS` 200, `SAMPLE_CLK` 150,
`WINDOW` 4, `N_CLASS` 4, `SCORE_W` 16, `SCORE_FRAC` 4, `CAP_DEPTH` 1024 and
`CAP_PKT` 256. `N_ECU`, `BIT_CLKS`, `WINDOW` and `N_CLASS` come from the
reference set-up; the rest are choices of this design.

Generic synthesis of the top gives 1,020 word-level cells, 2,346 flip-flop bits
and 19,392 memory bits. Of the memory bits, 16,384 are the capture buffer
(half of a 36-kbit block RAM) and 1,920 the bus-log FIFO.

## What is outside

These parts belong to the test bed but are not in this RTL. Each is either a
processor running software, a third-party or vendor core, or analog:

* **ECUs and control node.** These are four soft-processor ECUs (engine and
  brake, airbag and light sensor, brake and collision sensors, lamps) and a
  soft-processor control node. The control node takes host commands over
  UART, replays recorded traffic and injects single spoofed frames. They
  connect here only through their CAN tx lines and `can_bus`.
* **The ECUs' CAN controllers.** These are an open-source controller with an
  AXI4 register interface.
* **The bridge node processor.** It reads the Softmax, latency and
  statistics outputs, and configures the injector and the capture unit. No register map is defined.
* **Other external parts.** These are the IDS network core, the Ethernet MAC
  and PHY, the UART and JTAG links, the clock manager that gives each ECU its
  own clock, the GPIO/ADC sensor interface and the physical CAN transceiver.
* **The coupled-accelerator alternative.** In this alternative the IDS runs
  behind a processor that does the pre-processing and Softmax in software. It
  serves only as the comparison case.

## How far to trust it, and where it departs from the reference design

* The CAN cores are new, minimal implementations, not the cores the reference
  system used. They are checked bit by bit against an independent model of
  CAN 2.0A framing in the testbenches. They have not been checked against
  commercial controllers or on hardware.
* The IDS core is represented only by its stream interface. Score format,
  feature layout and window packing are assumptions, and must be matched to
  the real core's generated interface.
* The latency timer stops at Softmax completion. One description of the
  reference measurement includes the bridge processor's read-out. Add that
  time in software if needed.
* The Softmax uses a 16-entry exponent table and a 17-bit quotient. It is
  accurate to a few percent, which is enough for picking the class and for
  thresholds, but it is not bit-exact with a floating-point reference.
* The design runs in one clock domain. Other clock domains are expected only
  on the tx lines entering the bus.
* The modules carry SystemVerilog assertions: the stuff-run length in
  `can_tx`, and stable AXI-stream data while `tvalid` waits for `tready` in
  `ids_preproc`, `wave_capture` and `bus_logger`. A simulator checks them whenever it runs
  the design (for Verilator, build with `--assert`).
* Lint notes: Verilator reports SYNCASYNCNET because the same reset drives the
  asynchronous flip-flop resets and the `disable iff` of the assertions. It
  also reports the unused padding bits of the feature word. Both are
  harmless.

## Simulating

Every block has a self-checking testbench in `tb/`. It prints
`TB_RESULT checks=N failures=M` and stops itself through a watchdog. With
Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal rtl/fav_pkg.sv tb/can_tb_pkg.sv \
          $(ls rtl/*.sv | grep -v fav_pkg) tb/ids_core_model.sv tb/tb_fav_nss_top.sv \
          --top-module tb_fav_nss_top
./obj_dir/Vtb_fav_nss_top
```

Use the same command for any other testbench by changing the last file and
`--top-module`; the packages must come first. The testbench files are:

| testbench | what it covers |
|-----------|----------------|
| `tb_can_vbus` | all 256 input combinations of the wired-AND and the Pmod split |
| `tb_can_tx` | bit-exact frames of every length, frame duration, two-node arbitration, missing ACK |
| `tb_can_rx` | 40 random frames including remote and DLC > 8, ACK drive, CRC error, stuff error, recovery |
| `tb_attack_injector` | DoS starvation of a benign node and DoS period, fuzz sequence and gap, spoof frames, stop |
| `tb_ids_preproc` | window contents, fill rule, 1-cycle latency, back-pressure and overrun |
| `tb_softmax4` | 204 score vectors against floating point, arg-max and ties, 21-cycle latency |
| `tb_latency_timer` | start/stop bookkeeping, max, ignored and replaced windows |
| `tb_wave_capture` | trigger, 4 frames with headers and every sample, back-pressure |
| `tb_bus_logger` | every record and packet header under random back-pressure, time stamps, FIFO overflow and drop count |
| `tb_ids_stats` | every counter against a reference count each cycle, under random simultaneous events and a clear |
| `tb_eth_mux` | two sources with random packets: no interleaving, order, both served |
| `tb_fav_nss_top` | everything together at the default sizes (described below) |

`tb_fav_nss_top` runs with every parameter at its default, and completes in a
few seconds. Around the design it places:

* four ECU models sending life-counter frames;
* a control-node model sending spoofed frames;
* a node on the Pmod side;
* the stand-in IDS core.

The test then goes through benign traffic, a DoS flood, fuzzing, spoofing
from the control node and from the injector, and a stalled IDS core. It checks
the following:

* every transmitted frame is received intact and in order;
* every window holds the last four frames;
* every class matches the newest frame;
* every latency agrees with the test's own start-of-frame timestamps and is
  below the 1184 µs line-rate budget;
* every bus-log record matches the frame the receiver delivered, and time
  stamps rise; the MAC side applies random back-pressure;
* a capture of user data holds the user pattern in every sample;
* the statistics counters agree with the verdicts and overruns counted by
  the test;
* each mechanism (arbitration loss, each attack class detected, overrun, the
  Pmod-side node, capture and bus-log frames) occurs at least once.

Most block testbenches shorten the bit time to 20 cycles to run faster. The
bit timing is a parameter, so `BIT_CLKS = CLK_HZ / bit rate` gives other bus
speeds. For example, 100 at 1 Mbit/s.

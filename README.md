# Radio-only cosmic-ray trigger for a 64-signal digitiser board

An air shower from a cosmic ray at 100 PeV to 1 EeV makes a radio flash about
10 ns long. It lights up a patch of a dense dipole array a few hundred metres
across. Impulsive man-made interference is also short and bright, but it
usually lights up the whole array at once. This RTL runs beside the normal
signal processing on each of the array's eleven FPGA digitiser boards. It
watches all 64 signals of its board, at 10 bits and 196 MHz, and:

- keeps the last 20 µs of every signal in a circular buffer;
- looks for a short burst of power on at least 8 of its trigger (core)
  antennas within one light-crossing time of the dense core;
- cancels that trigger if at least 3 of its distant veto antennas also saw a
  burst within a longer window;
- otherwise freezes the buffer, tells the other ten boards over a one-bit
  ring so the whole array is captured, and streams the snapshot out as
  timestamped packets.

Everything after the ADC pins and before the Ethernet MAC is here:

- cable-delay alignment
- the filter/power/threshold chain
- the coincidence counters
- the veto
- the snapshot controller and the ring
- the buffer and packet former
- the 64-bit timestamp and the board-to-board synchronisation pulse
- rate counters
- the register file

The ADCs, the 40 Gb Ethernet core and the control processor are not part of
the RTL. Their signals are ports of `cr_top`.

## Signal path

```
adc[64] -> cable delays -+-> capture buffer (3920 x 640 bit) -> packetizer -> pkt stream
                         |
                         +-> per signal: FIR(24) -> x^2 -> sum of 4 -> p > threshold
                                   -> stretch over window -> count core / count veto
                                   -> core >= n_trig ---+
                                   -> veto >= n_veto ---+-> RFI veto -> trigger control
                                                                            |   ^
                                          software trigger ----------------+   |
                                          ring in (previous board) --------+   |
                                          ring out (next board) <-------------+
```

One clock carries one sample of every signal. There is no decimation and no
time multiplexing, so every block handles all 64 lanes each cycle.

| file | role |
|---|---|
| `cr_pkg.sv` | sizes, sample/power types, the configuration and statistics structs |
| `cr_cable_delay.sv` | per-signal programmable delay, 0–2047 samples |
| `cr_fir_power.sv` | one lane: 24-tap FIR, square, 4-sample moving sum |
| `cr_threshold_detect.sv` | `p > threshold`, with a core or veto threshold chosen per signal |
| `cr_pulse_extend.sv` | stretches each hit over the coincidence or veto window |
| `cr_coincidence.sv` | counts core and veto signals that are stretched high |
| `cr_rfi_veto.sv` | turns a core coincidence into a trigger or a veto |
| `cr_trigger_ctrl.sv` | snapshot state machine and ring logic |
| `cr_capture_buffer.sv` | 20 µs circular buffer, read oldest-first |
| `cr_packetizer.sv` | packet payloads on a valid/ready stream |
| `cr_timestamp.sv` | 64-bit sample counter loaded by the sync pulse |
| `cr_sync_gen.sv` | makes the sync pulse from PPS (on one board) |
| `cr_rate_stats.sv` | event and dead-time counters |
| `cr_regfile.sv` | register bus |
| `cr_top.sv` | wiring |

## Finding a pulse on one signal

Each signal is first delayed by a software-set number of samples. This
cancels the different cable and fibre lengths, so a plane wave from overhead
reaches the trigger logic at the same clock on every antenna.

The delay line is a RAM of 2048 words per signal. It is written at a shared
pointer and read at `pointer − 1 − delay`. The output after clock edge *n* is
the input sampled at edge *n − 1 − delay*. The same delayed samples feed both
the buffer and the trigger. The snapshot is therefore already aligned, and
its timestamps (below) label the time a row was written, not the time it was
digitised.

The trigger path of each lane is `cr_fir_power`:

- **FIR.** The filter is 24 taps with signed Q1.15 coefficients. All 64 lanes
  share one coefficient set, loaded over the register bus.
- **Coefficients.** No coefficients are built in. The intended filter is an
  equiripple band-pass with at least 20 dB of stop-band rejection and a null
  at 27 MHz, where a strong transmitter sits.
- **Filter output.** The output is the accumulator shifted right by 15. It
  cannot overflow 16 bits: a 10-bit sample times a coefficient just under 1,
  summed over 24 taps, stays below 24·512 < 2¹⁵.
- **Power.** The filtered voltage is squared into 32 bits. Four consecutive
  squares are summed, so *p(n) = x(n)² + x(n−1)² + x(n−2)² + x(n−3)²*.
- **Latency.** *x* appears one clock after the tap register. *p* appears two
  clocks after *x*.

`cr_threshold_detect` compares *p* with one of two thresholds, using a strict
`>`. The signal's role bit picks which: core or veto. The result is
registered.

## Coincidence by stretching

The paper's trigger counts how many signals crossed the threshold within a
time window. This design does that without timestamps or sorting:

- **Stretching.** Each hit reloads a per-signal down-counter with the window
  length. The stretched hit is high while the counter is non-zero.
- **Counting.** Two registered population counts are taken every clock: one
  over core signals and one over veto signals.
- **Flags.** `core_coinc` is `core_count >= n_trig` and `veto_coinc` is
  `veto_count >= n_veto`.

Two signals that crossed within the window are therefore high together for at
least one clock.

The core window defaults to 65 clocks: 100 m, the core radius, at the speed
of light, is 334 ns. The veto window defaults to 1568 clocks: 8 µs, the light
time across the 2.4 km array. Both can be changed.

The registers hold the number of antennas *required*, with `>=`. This
matches the operating point of "eight to trigger, three to veto". One
sentence of the source speaks of "more than a threshold number"; with this
design, writing 8 means eight or more.

From ADC pin to `core_coinc` the delay is `delay + 8` clocks: delay-line
output register, tap register, filter, two power stages, threshold, stretch
counter, count.

## The veto decision

This is the part of the design whose timing is least obvious.

`cr_rfi_veto` watches the core coincidence for a rising edge:

- **Opening.** The edge counts only while the block is idle and triggers are
  enabled. It pulses `raw_trig` and opens a decision interval. The interval
  covers that clock and the next `win_veto` clocks.
- **Cancelling.** If `veto_coinc` is high in any clock of the interval, the
  trigger is cancelled and `vetoed` pulses.
- **Accepting.** Otherwise `trig` pulses.
- **Decision time.** The decision comes exactly `win_veto + 1` clocks after
  `raw_trig`.
- **Ignored edges.** Further core edges during an open interval are ignored.

Veto hits are themselves stretched by `win_veto`. The net effect is that any
veto-antenna coincidence from `win_veto` clocks *before* to `win_veto` clocks
*after* the core edge cancels the trigger. Interference that reaches the veto
antennas first is caught as well as interference that reaches them last.

The cost is that every accepted trigger waits about 8 µs before the snapshot
starts. The buffer still holds the event when writing stops, because of the
post-trigger count below.

The veto requires several veto antennas of the same board. Boards are
assigned veto antennas on opposite sides of the array, so a shower close to
one veto antenna cannot veto itself.

## Snapshots: buffer, post-trigger count and refill

`cr_capture_buffer` holds 3920 rows of 640 bits: 20 µs × 196 MHz, each row
one sample of all 64 signals.

- **Writing.** A write pointer always marks the oldest row.
- **Reading.** A read of index *k* returns the *k*-th oldest row one clock
  later. The reader never needs to know where the pointer stopped.
- **Timestamp.** The buffer also keeps the timestamp of the last row written.
  The oldest row's timestamp is that value minus 3919.

`cr_trigger_ctrl` runs the snapshot through four states:

| state | buffer | leaves when |
|---|---|---|
| FILL | writing | 3920 rows have been written since reset or the last readout |
| ARMED | writing | a trigger is taken: local (accepted), software, or ring |
| POST | writing | `post_trig` (default 300) more rows have been written |
| READOUT | frozen | the packetizer reports the last word sent |

- **POST.** The post-trigger count starts at the *accepted* trigger. That
  comes about 1580 clocks after the pulse itself: about 10 clocks of chain
  latency, then the 1569-clock veto decision. With the default of 300, the
  event lands near row 2040 of 3920. The first 2000 rows, about 10 µs, are
  background noise before the event, which later analysis uses as its noise
  reference. About 1880 rows follow the event. If you change `win_veto`,
  change `post_trig` by the same amount to keep the event in place.
- **FILL.** FILL makes sure a snapshot never contains rows left over from the
  previous one.
- **Software trigger.** The software trigger writes control bit 0. It gives
  unbiased noise snapshots for calibration.

## The trigger ring

The eleven boards are joined in a ring by a single wire between
general-purpose pins. This gives every board the same fixed, short latency,
with no network in between.

- **Sending.** A board that takes a local or software trigger sends a
  one-clock pulse to the next board. It then loads a guard counter with
  `loop_guard` (default 256 clocks).
- **Forwarding.** A board that receives a pulse takes a snapshot if it is
  armed. It forwards the pulse only while its own guard counter is zero, and
  forwarding also loads the guard.
- **Stopping.** The board that started the pulse absorbs it when it comes
  back round, which ends the circulation. It still absorbs the pulse if it
  was busy.

The incoming pin goes through a two-flop synchroniser. A forwarded pulse
leaves three clocks after it arrived, so a full ring of eleven boards takes
about 33 clocks plus cable delay. The guard must be longer than the whole
ring's delay.

About 1880 rows follow the event in a snapshot, far more than that delay.
The event therefore sits inside every board's snapshot, even though each
board freezes its buffer a few clocks later than the one before.

## Time: sync pulse and timestamps

Every board counts clock cycles in a 64-bit counter, `cr_timestamp`.

- **Loading.** Software writes the Unix-epoch cycle count that the next sync
  pulse will stand for. When `sync_in` arrives, the counter loads that value.
  It then counts up by one per clock.
- **`synced` flag.** The counter free-runs from zero, with `synced` low, until
  the first sync.

One board makes the sync pulse from the observatory PPS, in `cr_sync_gen`:

- **Input.** PPS is synchronised and its rising edge found.
- **Output.** Once armed, the block emits a one-clock pulse on the first PPS
  edge, then on every `period`-th edge after it.
- **Distribution.** An equal-length splitter returns the pulse to all eleven
  boards, the sender included. Every board therefore loads at the same clock.

All boards share one 196 MHz reference, so the counters stay in step after
that.

## Packets

`cr_packetizer` sends a frozen snapshot oldest-first, as 490 packets of 8
rows each. It uses a 64-bit `tdata/tvalid/tready/tlast` stream to the
Ethernet core, which adds the UDP, IP and MAC headers using `dest_ip` and
`dest_port` from the registers.

| word | contents |
|---|---|
| 0 | timestamp of the packet's first row |
| 1 | `[63:56]` board id, `[47:32]` packet index, `[31:16]` rows per packet (8), `[15:0]` signals (64) |
| 2 … 129 | 8 rows × 16 words; word *w* of a row holds signals 4*w*…4*w*+3, each sign-extended to 16 bits, signal 4*w*+*j* in bits `[16j+15:16j]` |

- **Back-pressure.** `tready` may be dropped at any time, and data and `tlast`
  hold while it is low. An assertion in the block checks this. This is how a
  slow receiver sets the readout dead time.
- **Speed.** At full speed a packet takes 146 clocks: each row costs one
  buffer read and one latch cycle besides its 16 words. A whole snapshot
  takes 71 540 clocks, 0.37 ms.
- **Re-arming.** Adding the veto decision, post-trigger and refill time, a
  board can re-arm about 0.4 ms after the pulse that triggered it. That is well under the 50 snapshots/s
  average and 180/s bursts the network is sized for.

## Registers

The control processor reaches the registers over a simple synchronous word
bus:

- `bus_addr` is 9 bits, with 32-bit data.
- A write takes effect at the clock edge where `bus_we` is high.
- Reads are registered, one clock of latency.
- Unlisted addresses read 0.

| address | access | contents (reset) |
|---|---|---|
| 0x000 | R | identification 0x43520001 |
| 0x001 | W / R | write: bit0 software trigger, bit1 clear counters (both pulses); read: bit0 armed, bit1 synced |
| 0x002 / 0x003 | RW | power threshold, core / veto signals (all ones) |
| 0x004 / 0x005 | RW | signals required, core / veto (8 / 3) |
| 0x006 / 0x007 | RW | coincidence / veto window, clocks (65 / 1568) |
| 0x008 | RW | post-trigger rows (300) |
| 0x009 | RW | ring guard, clocks (256) |
| 0x00A / 0x00B | RW | veto-role mask, signals 0–31 / 32–63 (0: all core) |
| 0x00C | RW | bit0 trigger enable (1), bits 15:8 board id |
| 0x00D | RW | bits 15:0 PPS edges per sync pulse (1), bit16 arm |
| 0x00E / 0x00F | RW | timestamp for the next sync pulse, low / high |
| 0x010 / 0x011 | RW | destination IP address / UDP port |
| 0x020 + k | RW | FIR coefficient k, k = 0…23 (0) |
| 0x040 + i | RW | cable delay of signal i, samples (0) |
| 0x080 … 0x084 | R | raw triggers, vetoes, readouts, veto dead clocks, readout dead clocks |
| 0x085 / 0x086 | R | current timestamp low / high |
| 0x100 + i | R | threshold crossings of signal i |

The thresholds reset to all ones, so nothing triggers until software
configures the board.

The counters in `cr_rate_stats` are raw totals. Software divides them by the
elapsed time to get the rates used for tuning the thresholds:

- **Veto dead time** counts clocks with the veto coincidence high.
- **Readout dead time** counts clocks when the board is not armed.
- **Per-signal counters** count rising edges of the threshold hit. This gives
  each antenna's threshold-crossing rate.

## How far to trust it, and where it departs from its source

These follow the published description directly:

- the chain order
- 64 signals of 10 bits at 196 MHz
- the 24-tap filter, squaring and 4-sample sum
- the strict `p > threshold`
- separate core and veto thresholds and windows
- stretch-then-sum coincidence
- 8 and 3 as operating numbers
- cancel-on-veto
- the 20 µs circular buffer
- the one-bit ring
- the software trigger
- the 64-bit timestamp loaded by a sync pulse and carried in the packets
- the list of configurable settings and monitored rates

These are this design's own choices, made where the description gives only
the function:

- **Coincidence compare.** The coincidence uses `>=` on the required count,
  as explained above.
- **Post-trigger count.** Writing stops `post_trig` rows after a trigger,
  not at once. One sentence of the source says writing stops on the trigger.
  Another puts about 2000 samples of background before the event, and only a
  post-trigger count satisfies both.
- **Veto timing.** The timing of the veto decision, described above, is this
  design's own.
- **Veto path.** The published flowchart feeds the veto logic directly from
  the threshold detector. Here the veto signals pass through the same stretch
  and count blocks as the core signals, with their own window and required
  count. The veto logic then receives the veto coincidence flag. This is one
  way to count "a threshold number of veto antennas within a larger window",
  which is what the text asks for.
- **Ring.** The guard rule that ends circulation and the synchroniser are
  this design's own.
- **Refill.** The FILL wait before re-arming is this design's own.
- **Packet format.** The packet layout and the rows per packet are this
  design's own.
- **Registers.** The address map and reset values are this design's own.
- **Sync period.** The sync period is counted in PPS edges.
- **Widths.** The widths are assumed: Q1.15 coefficients, 16-bit filter
  output, 32-bit power, 16-bit windows, 11-bit delays, 32-bit counters.
- **Default windows.** The 65 and 1568 clock defaults are derived from the
  array geometry. The source fixes the windows by geometry but prints no
  value.
- **Coefficients.** The filter coefficients are not known and must be loaded.

Not included:

- the UDP/IP/Ethernet framing;
- the ADC interface, beyond a sample bus;
- the polyphase filterbank that shares the FPGA;
- the control processor;
- any use of the readout dead time beyond `tready`.

The buffer and delay lines are written as plain arrays. A synthesis tool will
map them to block RAM. No vendor primitives are used.

## Simulating

Every block has a self-checking testbench in `tb/`:

- it compares the block against an independent model;
- it has a watchdog;
- it ends by printing `TB_RESULT checks=<n> failures=<m>`.

With Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb \
    rtl/cr_pkg.sv $(ls rtl/*.sv | grep -v cr_pkg) tb/tb_cr_top.sv --top-module tb_cr_top
./obj_dir/Vtb_cr_top +verilator+rand+reset+2
```

Swap in any `tb/tb_cr_<block>.sv` and its top-module name to run one block.
The block testbenches finish in seconds. `+verilator+rand+reset+2` starts
every unreset variable at a random value, which shows any dependence on
power-up state.

`tb_cr_top` runs the full-size design, with no parameter overrides: 64
signals, a 3920-row buffer and 2048-sample delay lines. It runs for about
280 000 clocks, which takes a few seconds. It drives deterministic noise plus
injected pulses, pre-skewed by per-signal cable delays that the design must
remove, and it models the rest of the ring as a 40-clock loop-back. It goes
through, in order:

1. **Sync** loads the timestamp.
2. **Vetoed event.** Core and veto antennas fire together. It must not
   produce a snapshot.
3. **Accepted event.** The snapshot is checked word by word against the
   injected samples and expected timestamps, with `tready` dropped at random. The event must sit
   after row 2000 of the snapshot.
4. **Event during refill.** It must be ignored.
5. **Ring trigger.** A pulse arrives from the previous board.
6. **Software trigger.**
7. **Counter readback** over the bus.

At the end it prints how many times each mechanism happened. It counts a
failure for any that never did: veto, accept, delay alignment, ring send and
absorb, ring trigger, software trigger, stall, refill hold-off and sync.

To change a size, override the parameters of `cr_top`:

- `DEPTH`: buffer rows.
- `DLY_DEP`: delay-line depth.
- `SPP`: rows per packet. It must divide `DEPTH`.

The constants in `cr_pkg` set the signal count, sample width and number of
taps.

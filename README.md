# Low-swing serial link for a microcontroller SoC

This is the digital half of a point-to-point serial link between two
microcontroller chips. It runs at 400 MHz and sends two bits per clock, giving
0.8 Gbit/s on one differential pair. It is meant for mW-class IoT end nodes.
The link can therefore be switched cheaply between three modes:

* **idle**: everything is off;
* **warm-up**: the transmitter sends a training pattern and the receiver's clock
  recovery locks onto it;
* **data-comm**: framed payload moves from one chip's DMA to the other's.

Software picks the mode on each side with two register bits, *Warm-En* and
*Comm-En*. Moving data in short bursts and staying idle in between lets the
average power follow the average bandwidth.

The RTL covers everything in the link that is logic:

* the uDMA interface FIFOs;
* 8b/10b coding;
* the TX and RX controllers;
* the DDR serializer;
* the deserializer;
* the sequence detector that finds frame boundaries;
* the digital part of the clock and data recovery (CDR) loop;
* the APB configuration registers.

The analog parts are the comparators and the phase interpolator. They come as
simple behavioural models, so the whole link can be simulated. The low-swing
driver, the input amplifier, the FLL clock source, the CPU, the uDMA and the L2
memory are not included; their signals are ports of the top module `serdes_top`.

## How a transfer happens

Each chip has one `serdes_top`. Chip A's TX output drives chip B's RX input, and
the other direction works the same way. A transfer goes like this:

1. Both sides are in idle.
2. Software sets Warm-En on the TX, and on the RX of the other chip. The TX
   starts sending training words. The RX enables only its CDR loop, which pulls
   the recovered clock to the middle of the data eye.
3. Software waits a fixed time for the CDR to settle. The paper uses a timer
   and GPIO handshakes between the chips; the testbench plays that part.
4. Software sets Comm-En on the RX. This arms the sequence detector.
5. Software sets Comm-En on the TX. As soon as the TX FIFO holds data, the TX
   sends a **Start flit**, then payload words back to back, one per 40 bit
   times.
6. When the FIFO runs dry, the TX sends a **Stop flit** and goes back to idle,
   or to warm-up if an enable is still set.
7. The RX sees the Stop flit, stops writing words and falls back to warm-up.
   The CDR keeps tracking.
8. Clearing both enables sends either side to idle.

## Line format

Everything on the wire is a 40-bit *line word*, sent LSB first, two bits per
Clk_fll cycle, so one word takes 20 cycles. There are four kinds:

| word            | content (in transmission order)                             |
|-----------------|-------------------------------------------------------------|
| training        | D21.5 on all four lanes = `1010...10` (an edge every bit)   |
| Start flit      | 26 bits `1010...`, 6 zeros, `11011111`                      |
| payload         | four 8b/10b code groups, byte 0 first, bit *a* first        |
| Stop flit       | `10111111`, 6 zeros, 26 bits `1010...`                      |

The 8-bit markers `11011111` and `10111111` are the bit patterns of K27.7 and
K29.7. Valid 8b/10b payload never has more than five equal bits in a row, so
payload can never contain either marker. The rest of each flit is this
design's choice; the paper defines only the markers. That filler is balanced
(20 ones, 20 zeros) and holds no `11`, so the detector cannot trigger early.

The four encoder lanes share one running disparity: lane 0 uses the value left
by lane 3 of the previous word, and lane 1 uses the value lane 0 leaves. The
line therefore stays DC-balanced with a disparity bound of ±2.

`serdes_pkg.sv` builds the flit constants with `line_word()`. It takes a literal
written in transmission order and reverses it into LSB-first order.

## Transmitter (`serdes_tx`)

```
uDMA --req/gnt/data/valid--> async_fifo --> enc8b10b_x4 --> tx_controller --> serializer --> ser_out
        (sys clock)                         (Clk_fll/4)       (mux)         (Clk_fll, DDR)
```

**uDMA side.** `tx_req` is high while the FIFO has room for one more word than
has been granted but not yet delivered. Words are therefore never dropped,
whatever the uDMA latency.

**TX controller.** It runs on Clk_fll/4, so the controller and the encoders
run at 100 MHz. The serializer reloads every 20 Clk_fll cycles, which is 5
controller cycles, and toggles `load_tgl` each time. The controller acts on
each toggle: it decides the next word during the 5 cycles while the current
word is being shifted out. The states are:

* `IDLE`: the serializer is disabled, and the output and driver enable are low.
* `WARM`: training words. The FSM goes to `START` when Comm-En is set and the
  FIFO is not empty.
* `START`: the Start flit is in the serializer.
* `DATA`: pops one FIFO word per load and registers the running disparity. If
  the FIFO is empty at a load, it sends the Stop flit instead. A burst ends as
  soon as the uDMA cannot keep up with 0.64 Gbit/s of payload.
* `STOP`: the Stop flit is in the serializer.
* `FLUSH`: one more slot. The driver stays enabled until the Stop flit has
  fully left the serializer, then the serializer is disabled. `FLUSH` is this
  design's addition.

**Serializer.** It is a 40-bit shift register that moves by two bits per
Clk_fll cycle. A 2:1 mux clocked by Clk_fll sends bit 0 in the high phase and
bit 1 in the low phase.

## Receiver front end and bit pairs

`rx_comparator` samples the differential input on both edges of a clock. There
are two instances:

* one on the recovered clock Clk_pi gives the *data* pair;
* one on the quadrature clock Clkq, a quarter period later, gives the *edge*
  pair, which is used only by the phase detector.

`timing_sync` registers both pairs on Clk_pi.

The key point is that the receiver does not know which of its two samples per
cycle holds an "even" bit of the transmitter. Depending on the phase the CDR
settled at, a transmitted pair `ab` arrives either as one pair `ab` or split
across two pairs as `xa` `by`. The sequence detector finds this out from the
Start flit and drives **Shift**. With Shift = 1, the timing synchronizer builds
each realigned pair from the later bit of one pair and the earlier bit of the
next:

```
data_al = Shift ? {r3[0], r4[1]} : r3      // r3, r4: pairs 3 and 4 cycles old
```

Both settings have the same latency. From then on the deserializer gets pairs
that match the transmitter's pairs.

## Sequence detector (`seq_detector`)

The state machine has the states Start, Check1 to Check4, and Data. The
detector reads raw pairs `{later, earlier}` and looks for `11 01 11 11`, the
marker `11011111`, in either pairing:

| state  | aligned stream (Shift = 0)         | stream moved by one bit (Shift = 1)          |
|--------|------------------------------------|----------------------------------------------|
| Start  | pair `11` → Check1                 | pair `x1` (later bit 1) → Check1             |
| Check1 | pair `01` after `11`; Shift = 0    | pair `10`: the marker's "1 0" split; Shift = 1 |
| Check2 | `11`                               | `11`                                         |
| Check3 | `11` → Data, start pulse           | `11` → Check4                                |
| Check4 | —                                  | earlier bit 1 → Data, start pulse            |

Any other pair sends the FSM back to Start. The start pulse, delayed two
cycles, becomes `align`. `align` marks the first payload pair on the realigned
stream, so the deserializer's word boundary is exact.

The 1010 training pattern and the flit filler cannot take the FSM past Check1,
because they contain no `11`.

While in Data, the detector keeps the last four realigned pairs and compares
them with `10111111` once per pair. On a match it pulses `stop_pulse` and goes
back to Start. Clearing Comm-En also forces it back to Start.

## Clock and data recovery

The loop is: phase detector → accumulator and divider → 5-bit code → phase
interpolator → Clk_pi and Clkq. Its parts are:

* **Groups.** Every 4 Clk_pi cycles, the deserializer gathers the last 8 data
  samples and the 8 matching edge samples (`grp_data`, `grp_edge`).
* **Phase detector** (`phase_detector`). It has seven Alexander detectors, one
  per pair of neighbouring data bits. Where the data changes, the edge sample
  says whether the clock is *early* (it equals the earlier bit) or *late* (it
  equals the later bit). The output is `#early - #late`, a value from -7 to +7,
  once per group.
* **Loop filter** (`loop_filter`). A 12-bit accumulator adds each result. The
  PI code is `(acc >> log2N) mod 32`, so a larger N means a slower, quieter
  loop. N = 1, 2, ..., 128 is set by the CDR register, and reset gives N = 8.
  The accumulator wraps, so the phase can keep turning in one direction.
  Larger codes mean a later clock, and *early* pushes the code up.
* **Phase interpolator** (`phase_interpolator`, behavioural). It is an
  oscillator with the FLL period that starts on the first FLL edge. A code
  change of Δ moves the next edge by Δ·T/32, with Δ taken as the shortest way
  around the circle. Clkq is Clk delayed by T/4.

In the end-to-end test the loop locks within about 200 ns from any phase, and
then dithers by about ±2 codes (±30 ps).

## Word path and RX controller

After `align`, the deserializer collects 20 realigned pairs into a 40-bit word
and toggles `word_tgl`. The RX controller runs on Clk_pi/4. It does the
following:

* It copies the word into the register in front of the four 10b/8b decoders.
* One cycle later it registers the decoded word as *Valid* for the RX async
  FIFO and writes it when the FIFO has room (*Ready*).
* It moves between idle, warm-up and data-comm. Any enable takes it from idle
  to warm-up; the detector reaching Data takes it to data-comm. When the Stop
  flit arrives, it goes back to warm-up if an enable is still set, or to idle
  if not.
* `cdr_en` is high in every mode except idle.
* `det_en` is additionally gated by Comm-En.
* It counts overflows: a word that could not be written before the next one
  arrived.
* It counts words with invalid code groups or K codes. Such words are still
  written, so a transfer keeps its word count. Running disparity is not
  checked.

## Clock domains and reset

| domain            | clock            | blocks                                                        |
|-------------------|------------------|---------------------------------------------------------------|
| system            | `sys_clk`        | APB registers, uDMA side of both FIFOs, TX request logic       |
| TX line           | `clk_fll`        | serializer                                                    |
| TX word           | Clk_fll/4        | encoders, TX controller, FIFO read side                       |
| RX bit            | Clk_pi           | timing sync, sequence detector, deserializer                  |
| RX word           | Clk_pi/4         | phase detector, loop filter, RX controller, FIFO write side   |

Data crosses between domains in three ways:

* between the system clock and the link, through async FIFOs with Gray-coded
  pointers;
* for the enables, through two-flop synchronizers;
* inside the TX and RX, by toggles that announce a stable word.

The Clk_pi/4 register never samples the deserializer output while that output
changes.

`rst_n` is asserted asynchronously. Each domain releases it through its own
`rst_sync`, and the output is also ANDed with the raw reset, so reset takes
effect at once even in domains whose clock is not yet running. The clock
dividers have no reset. The divided clocks therefore keep running during reset
and every domain is reset cleanly. A four-state simulator would need the
two-bit divider counters forced once at start-up.

## Registers (APB, 32-bit, byte addresses)

| addr | name     | bits                                                                                         |
|------|----------|----------------------------------------------------------------------------------------------|
| 0x00 | TX_CTRL  | [0] Warm-En, [1] Comm-En                                                                     |
| 0x04 | RX_CTRL  | [0] Warm-En, [1] Comm-En                                                                     |
| 0x08 | CDR      | [2:0] log2 N of the loop filter (reset 3)                                                    |
| 0x0C | TX_ADDR  | TX buffer address for the uDMA (passed out on `cfg_tx_addr`)                                 |
| 0x10 | TX_SIZE  | TX transfer size in bytes                                                                    |
| 0x14 | RX_ADDR  | RX buffer address                                                                            |
| 0x18 | RX_SIZE  | RX buffer size                                                                               |
| 0x1C | STATUS   | [2:0] TX state, [4:3] RX state, [7:5] detector state, [8] Shift, [13:9] PI code, [14] Stop flit seen, [23:16] overflow count, [31:24] error count |

The bus has no wait states and no error responses. Addresses above 0x3F read 0.
The address and size registers are only passed out to the uDMA: channel
programming, and counting bytes against the size, belong to the uDMA.

## Files

```
serdes_top                 one chip's link: regs + TX + RX
├── serdes_cfg_regs        APB registers
├── serdes_tx
│   ├── clk_divider, rst_sync, sync2
│   ├── async_fifo         sys -> Clk_fll/4
│   ├── enc8b10b_x4        (4 x enc8b10b)
│   ├── tx_controller
│   └── serializer
└── serdes_rx
    ├── phase_interpolator (behavioural)
    ├── rx_comparator x2   (behavioural)
    ├── clk_divider, rst_sync, sync2
    ├── timing_sync, seq_detector, deserializer
    ├── phase_detector, loop_filter
    ├── dec10b8b_x4        (4 x dec10b8b)
    ├── rx_controller
    └── async_fifo         Clk_pi/4 -> sys
```

`serdes_pkg.sv` holds the widths, the flit constants, the state enums, the
register map and the 8b/10b tables.

## Throughput

| quantity                  | value                                                            |
|---------------------------|------------------------------------------------------------------|
| line rate                 | 2 bits × 400 MHz = 0.8 Gbit/s                                    |
| payload rate              | one 32-bit word per 20 cycles = 0.64 Gbit/s (8b/10b overhead)    |
| per-burst overhead        | one Start flit, one Stop flit and one flush slot (3 word times, 150 ns) |
| example: 16 KB RX buffer  | 4096 words, 204.8 µs of data-comm; with a 3 µs warm-up this is about 630 Mbit/s of payload per cycle |

The warm-up time is whatever software allows the CDR to settle. Lower average
rates come from duty cycling: the same burst, with a longer idle time between
bursts. The CDR is designed for one line rate, so the clock is never slowed
down instead.

## Verification

Each block has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=<n> failures=<n>` and has a watchdog. All of them pass.

* `tb_enc8b10b_x4`, `tb_dec10b8b_x4`:
  * standard code groups in both disparities;
  * all 256 data bytes and 12 K codes round-tripped;
  * disparity and run-length properties of random streams;
  * invalid groups flagged.
* `tb_serializer`: bit order, DDR timing, and one load every 20 cycles.
* `tb_tx_controller`:
  * the sequence training → Start → data in order → Stop → flush;
  * a burst ended early by an empty FIFO.
* `tb_timing_sync`, `tb_seq_detector`, `tb_deserializer`:
  * framed streams cut at both bit offsets;
  * Shift must equal the offset;
  * realigned words must equal the sent words;
  * the Stop flit is detected.
* `tb_phase_detector`, `tb_loop_filter`: against reference models, for every N.
* `tb_phase_interpolator`: phase = code·T/32 for steps, jumps and wrap-around;
  Clkq lags by T/4.
* `tb_rx_controller`: mode changes, FIFO writes, overflow and error counting.
* `tb_async_fifo`, `tb_serdes_cfg_regs`, `tb_clk_divider`, `tb_rx_comparator`.
* `tb_serdes_workload`: chip 0 to chip 1.
  * One uninterrupted transfer fills a 16 KB RX buffer: 4096 words, with one
    Start flit and one Stop flit, at exactly 50 ns per word, or 640 Mbit/s of
    payload.
  * Then four duty-cycled bursts of 256 words, one every 128 µs, each with its
    own idle and warm-up. The average is 64 Mbit/s.
  * It simulates about 0.75 ms in roughly 5 s.
* `tb_serdes_top`: the end-to-end test. It runs at the default parameters.
  * Two chips are cross-connected. Their FLL clocks are 837 ps apart, their
    system clocks differ (10 ns and 12 ns), and the channel delay differs per
    direction and per edge.
  * Four duty-cycled bursts of 48 words. One burst has a slow RX drain, so the
    RX FIFO fills and applies backpressure.
  * The channel delay grows by half a bit between bursts, so both Shift values
    occur.
  * It checks that every word arrives once and in order, and that the payload
    rate is within 3 % of one word per 20 cycles.
  * It checks the status bits, and that every mechanism happened at least
    once: warm-up, Start, Stop, return to warm-up, both Shift values, CDR steps
    and phase wrap, TX FIFO full, RX backpressure, idle.
  * It simulates about 37 µs in well under a second.

To run a testbench with plain Verilator (5.x):

```
verilator --binary --timing --assert -Irtl -y rtl rtl/serdes_pkg.sv tb/tb_serdes_top.sv \
          --top-module tb_serdes_top -o sim
./obj_dir/sim +verilator+rand+reset+2 +verilator+seed+7
```

The design uses `` `timescale 1ps/1fs ``; the interpolator model needs
sub-picosecond steps (T/32 = 78.125 ps). The tests pass with random initial
values for everything that is not reset.

## What is this design's own, and how far to trust it

These follow the source description:

* the three modes and their Warm-En/Comm-En control;
* the TX and RX block chains;
* four 8b/10b lanes and 40-bit words;
* the K27.7 and K29.7 markers;
* the Start/Check1–4/Data detector with its Shift bit, and the
  timing-synchronizer realignment;
* the Clk/4 domains for the controllers and the CDR;
* the CDR structure: seven Alexander detectors, early minus late, accumulate,
  divide by N = 1…128, and 2π/32 interpolator steps;
* the async FIFOs to the uDMA.

These were chosen here, where the description is silent:

* flit filler bits and the training byte;
* bit order on the line;
* FIFO depth (8) and the uDMA request/grant handshake;
* the `FLUSH` slot;
* how Stop is detected (a window on the realigned stream);
* the exact Check1 decision rule;
* the accumulator width (12 bits) and N's reset value;
* the register map and status word;
* overflow and error counters;
* the reset scheme.

**Deserializer clocking.** This is the main departure. The source clocks its
8:40 deserializer at Clk_pi/2. Here, the word assembly and the 2:8 CDR groups
run on Clk_pi with a pair counter, so the word boundary can follow the Start
flit to one pair. Clk_pi/2 is generated but unused.

**Analog models.** The comparators and the phase interpolator are ideal
behavioural models. They are not synthesizable, and they say nothing about
jitter, metastability or the analog power figures. The driver, pre-driver,
LDO, amplifier and pads are not modelled at all; the testbench connects the
two chips with an ideal differential wire with delay.

**Error handling.** There is none beyond counting. A missed Start flit loses
the burst. A missed Stop flit leaves the RX in data-comm until Comm-En is
cleared.

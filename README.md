# F1: an eight-channel TDC with trigger matching, in SystemVerilog

The F1 is a time-to-digital converter for high-rate experiments. Its front end
has eight channels. Each channel stamps every hit edge with a 16-bit time of
about 150 ps per bin, with no dead time. The stamps wait in a small buffer per
channel. When an external trigger arrives a fixed latency later, the chip
keeps only the hits that fall inside a programmable window around the
trigger's corrected time and reads them out. The trigger latency can be
several microseconds. Everything else is discarded on the chip. Up to six
million hits per second per chip are reduced this way to the few that belong
to a triggered event.

This RTL is the digital part of such a chip:

- time stamping;
- the three operating modes;
- hit buffering and trigger matching, with fake triggers that clean the buffers;
- the output FIFOs and the token-passed readout bus;
- the serial setup port;
- the serial link to the threshold DAC.

The analog parts are outside the RTL: the ring oscillator with its PLL, the
input receivers, the sub-bin delay line and the bus clock skew. Their digital
signals are ports of the top module `f1_tdc`.

## Time measurement

A ring of 19 inverting delay stages oscillates freely. A PLL keeps its period
locked to an external reference clock. One ring period is the clock of the
whole design (`clk`, about 5.7 ns) and steps the coarse counter.

An edge runs twice around an odd ring in one period, so the 19 tap states
latched by a hit distinguish 38 instants. One such instant is a bin, about
150 ps.

`fine_encoder` undoes the inversion of every other stage. That gives a
thermometer code, in which it counts the ones:

- taps 0..k-1 high means bin k, for 1..19 (rising wave in flight);
- taps 0..z-1 low and the rest high means bin 19+z, for 20..37 (falling wave);
- all low is bin 0, the bin in which the coarse counter steps.

Counting ones rather than searching for the edge makes a single bubble in the
code harmless.

`time_base` keeps the coarse counter directly in bins, so a time stamp is
`base + fine`:

- `base` grows by 38 per clock;
- `base` and the reference time are 17 bits wide;
- Synch-Reset clears both, so that every chip in a system counts from the
  same instant;
- Common start loads the reference with the full-precision time of its own
  edge.

A hit's word is `current - reference` modulo 2^16. At 150 ps the 16-bit range
is 9.8 µs.

Note on the formula: the block diagram of the time core is labelled
`time = 38 * fine_time + coarse_time`. The text describes a coarse counter
that steps every 38 bins. This design follows the text:
`time = 38 * coarse + fine`.

## The three modes

The mode is set by bits [1:0] of setup register 0. `channel_input` forms the
hit word in each mode.

- **Standard.** Eight channels with 1-bin resolution. Bits 3 and 4 of the
  control register enable leading and trailing edges. The stored word carries
  no edge flag.
- **High resolution.** Channels 2p and 2p+1 receive the same signal. The odd
  one is delayed by half a bin (the `input_delay` port sets the external delay
  line). Let t be the true time in bins. The two stamps are floor(t) and
  floor(t + 1/2), and their sum is floor(2t), the time in half bins. The sum
  is kept to 16 bits, so the range halves to 4.9 µs at 75 ps. Successive pair
  hits are written alternately into the even and the odd channel's hit
  buffer. The pair therefore holds 32 hits, and both matching units search
  in parallel. Both channels must deliver their edge in the same clock.
- **Latch.** Each channel takes four wires, 32 in all. `latch_input` works as
  follows:
  - the first hit on any of a channel's four wires starts a 6-bit strobe
    counter;
  - for `STROBE+1` clocks (5.7 ns to 364.8 ns), every wire that fires is ORed
    into a hit register;
  - at the end of the strobe, the register is closed and the wires switch to
    a second register;
  - in the switching clock both registers accept, so no hit falls into a gap.

  The hit word is the upper 12 bits of the time at the end of the strobe,
  followed by the 4 wire bits. The analog chip overlaps the two registers by
  about 2 ns. Here the wires are sampled once per clock, so the overlap is
  one whole clock.

## Trigger matching

This is the heart of the design and its least obvious part.

**Trigger unit (`trigger_unit`).** A trigger edge is stamped like a hit. Its
trigger time is an 11-bit difference: bits 15..5 of its stamp minus bits 15..5
of the reference time. Minus the same bits of the latency (register 1, in
bins), this gives the window start. One unit of this 11-bit start is
32 bins, so it is scaled to hit-time units: ×32 in standard mode, ×64 half
bins in high resolution mode.

- Each trigger steps a 6-bit trigger counter.
- Start and counter value go into a shared 4-entry FIFO.
- A trigger that finds the FIFO full is dropped, and the gap shows in the
  trigger numbers that are read out.
- When all eight matching units are idle, the oldest entry is broadcast to
  them.

**Matching unit (`trigger_matching`, one per channel).** Each unit walks its
hit buffer from the start-search pointer, one hit per clock. For each hit it
computes `d = hit - start` modulo 2^16, then:

| condition | meaning | action |
|---|---|---|
| `d >= limit` | older than the window | before any hit has matched, deleted: the start-search pointer moves past it |
| `d < window` | in the window | copied to the readout buffer; the hit stays, since the next trigger's window may overlap |
| otherwise | younger than the window | the search stops |

After the copy, a real trigger writes an end-of-event marker carrying its
trigger number. The unit waits while the readout buffer is full.

**The old-hit limit.** On a 16-bit circle, "older than the start" needs a
boundary. The trigger unit sends `limit = latency + MARGIN` with every command,
saturated at 0xFFFF, with MARGIN = 4096 units by default. A hit is taken as
newer than the start only if it lies less than `limit` after it. In other
words, a hit may follow its trigger by at most MARGIN units when the trigger
is matched. That holds when the trigger FIFO is served within about 100
clocks, which is the case unless the readout stalls.

**Fake triggers.** While the trigger FIFO is empty, the trigger unit
broadcasts a fake trigger every `FAKE` clocks (register 3; bit 5 of register 0
enables it). Its start is the current time minus the latency. A fake trigger
runs the deletion above but copies nothing and writes no marker. Without it,
a quiet period between triggers would fill the 16-word buffers with hits too
old for any trigger.

**The span rule.** Together these give the rule that sets the usable latency.
The hits held in a buffer must span less than the 2^16 circle, so:

    latency + FAKE × 38 + MARGIN < 65536        (bins; half bins in high resolution)

With the reset fake interval of 32 clocks this allows about 9.0 µs in
standard mode and 4.4 µs in high resolution mode, against the 9.8 µs and 4.9 µs that the full 16-bit range
would give. A smaller MARGIN buys latency but tolerates less trigger queueing.

## Buffers and output words

| buffer | size | notes |
|---|---|---|
| hit buffer (`hit_buffer`) | 16 × 16 per channel | dual-port; write pointer and start-search pointer; when full it refuses hits and counts them (`hits_lost`) |
| readout buffer (`readout_buffer`) | 8 × 17 per channel | bit 16 marks the end-of-event marker |
| interface FIFO (`interface_fifo`) | 16 × 24 | collects the channels for one event at a time |

The interface FIFO reads channel 0 up to its marker, then channel 1, and so
on through channel 7. It writes:

    data word:  [23:21] chip ID  [20] 0  [19:17] channel  [16] 0  [15:0] time
    trailer:    [23:21] chip ID  [20] 1  [19:6]  0        [5:0]  trigger number

The trailer replaces channel 7's marker. `data_ready` is high while a whole
event (its trailer) is in the FIFO. It is also high while the FIFO is full, so
an event of more than 16 words still drains.

## Readout bus (`io_interface`)

Several chips share one bus and pass a token around. A chip that receives
`token_in`:

- sends one complete event, if one is ready, and raises `token_out` with its
  last word;
- otherwise passes the token on in the next clock.

The FIFO is read in the clock the token arrives, so the first word is on the
bus in the next clock. Because `token_out` comes with the last word, the next
chip's first word follows it directly, with no wait state between chips.

In 24-bit mode one word goes out per clock. In 8-bit mode (register 0 bit 2,
for a HOTLink serializer) the word goes out as three bytes on
`data_out[7:0]`, most significant first. `bus_we` marks every valid transfer.
The chip's separate bus clock (up to 50 MHz) and its adjustable skew are not
modelled: the interface runs on `clk`, and the 4-bit skew setting
(register 6) is an output.

## Setup port (`setup_interface`)

The setup line idles high. It is sampled four times per bit, on the clocks
where `setup_sample_en` is high, and each bit is taken from its third sample.
A frame is 28 bits, most significant first within each field:

    2 start bits (0) | chip address [3] | common [1] | register [4] | data [16] | 2 stop bits (1)

- A frame with bad start or stop bits is refused and raises `setup_err`.
- Otherwise it is written if the address matches `chip_addr` or the common bit
  is set.

Register map (this design's own choice):

| reg | contents | reset |
|---|---|---|
| 0 | [1:0] mode (0 standard, 1 high resolution, 2 latch), [2] 8-bit readout, [3] leading edges, [4] trailing edges, [5] fake triggers | 0x0028 |
| 1 | trigger latency, in bins (bits 15..5 are used) | 0 |
| 2 | trigger window, in hit-time units (half bins in high resolution mode) | 256 |
| 3 | fake trigger interval, in clocks (0 = none) | 32 |
| 4 | [5:0] latch strobe length − 1, in clocks | 7 |
| 5 | [5:0] input delay step for the high-resolution sister channel | 0 |
| 6 | [3:0] bus clock skew | 0 |
| 8..11 | DAC thresholds, two bytes each (low byte = even DAC) | 0 |
| 12 | any write downloads all eight thresholds | — |

## Threshold DAC (`dac_interface`)

Eight threshold bytes are sent to an AD8842 octal DAC over three wires. Each
DAC gets a 12-bit word: address 1..8, then the value, most significant bit
first. Data change while `dac_clk` is low. After the twelfth bit, `dac_ld`
pulses. Each clock phase lasts `DAC_HALF` clocks. A download runs alongside
time measurement, and a request that arrives during a download is served after
it. The word format is the AD8842's usual serial format. The chip's own
framing is not published.

## Parameters of `f1_tdc`

| parameter | default | meaning |
|---|---|---|
| HIT_DEPTH | 16 | hit buffer words per channel |
| RO_DEPTH | 8 | readout buffer words per channel |
| IF_DEPTH | 16 | interface FIFO words |
| TRIG_DEPTH | 4 | trigger FIFO entries |
| MARGIN | 4096 | hit-time units a hit may follow its trigger (see the span rule) |
| DAC_HALF | 4 | clocks per DAC clock phase |

Channel count and widths are constants in `f1_pkg`.

## Where this RTL departs from the chip

- One clock domain. The coarse-counter clock also replaces the setup clock (by
  a sample enable) and the bus clock.
- Hit inputs arrive as a one-clock pulse plus the 19 latched taps, already
  synchronised. The latching and synchronisation of the taps are not built.
- The reference-time reset counter shown in the chip's block diagram is not
  built, because its function is not described. The reference moves only on
  Synch-Reset and Common start.
- How the two high-resolution measurements are combined (here: their sum) is
  not described. Neither are the fine-code polarity, the wrap-around rule of
  the matching (here: the old-hit limit), the word formats, the register map
  and the handshakes. These are this design's choices.
- The latch registers overlap for one clock instead of about 2 ns.
- Only the 6-bit trigger number leaves the chip, in the trailer. The trigger's
  own time stamp is used for matching but is not read out.
- The usable trigger latency is below the full 16-bit range (see the span
  rule).

## Simulation

Every block has a self-checking testbench in `tb/`. Each testbench ends by
printing `TB_RESULT checks=N failures=M`. With Verilator 5:

    verilator --binary --timing --assert -y rtl -y tb rtl/f1_pkg.sv tb/tb_f1_tdc.sv \
              --top-module tb_f1_tdc -o sim && obj_dir/sim

Replace the testbench name to run another.

`tb_f1_tdc` runs the top at its default parameters. It goes through:

- standard mode with Common start;
- fake-trigger clean-up;
- hit buffer overflow;
- a blocked bus with readout stall and trigger FIFO overflow;
- high resolution mode;
- latch mode;
- 8-bit readout;
- a DAC download.

It compares every bus word with a model computed from the hit and trigger
times, and counts how often each of these mechanisms occurred.

`tb_multichip` puts three chips on one board. They share the trigger, the
setup line and the data bus, and pass a token around a ring. The test checks
common and addressed setup frames, alignment of the coarse counters by
Synch-Reset, every bus word per chip, and hand-overs without a wait state.

`tb_workload_latency` runs the design under its intended load: 0.75 MHz of
hits per channel, 100 kHz triggers and a 300 ns window, with a latency of
8.7 µs (standard) and 4.35 µs (high resolution). No hit and no trigger may be
lost.

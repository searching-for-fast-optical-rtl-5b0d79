# A rate meter for microsecond optical transients

An imaging Cherenkov telescope has a mirror larger than most optical
telescopes, and its camera pixels are photomultiplier tubes (PMTs) with
nanosecond response. On bright-moon nights, when gamma-ray work stops, the
telescope can serve as a fast optical photometer. Each PMT pulse above a few
photoelectrons trips a discriminator. The light level is then just the rate
of those pulses. Sampled every few microseconds, that rate gives a light
curve fine enough for flares on 10-100 µs timescales, as expected from
accreting compact objects, or for the optical pulse of a pulsar.

This repository holds SystemVerilog for the digital core of such a rate
meter. It is modelled on the VERITAS Transient Detector (VTD) described by
Griffin, Hanna and Gilbert (McGill University). The detector watches seven
camera pixels: the pixel holding the target and the ring of six around it.
A star or pulsar lights one pixel only. An aircraft, meteor or satellite
lights several pixels at once, or moves from one to the next, so the ring
acts as a veto in the offline analysis.

What the RTL does, in one line per stage:

1. Count every discriminator pulse on each of the seven channels with a
   free-running 16-bit scaler.
2. Every 5.5 µs, take the count of each channel since the previous sample.
   Store those seven numbers as one row of a 70-row buffer.
3. Once the buffer holds 70 samples, stop sampling and send it as 490 16-bit
   words to the Ethernet side.
4. Resume sampling. The first new sample holds every pulse that arrived
   during the send.

The published instrument did steps 2 to 4 in software, on a processor core
inside the FPGA. Here a small state machine does them, so the whole path from
pulse to output word is in RTL.

## Signal chain and where the RTL begins

```
 PMT  ->  constant-fraction  ->  NIM-to-LVDS     ->  | vtd_top (this RTL)                       |  ->  Ethernet  ->  host
 (A)      discriminator (B)      comparator (C)      |  scalers (D), sampler + buffer (E)       |      MAC/PHY       computer
```

The letters follow the instrument's block diagram. Parts A to C are analog
hardware outside the FPGA. They have no logic to write. To this design they
are simply `pulse_i[6:0]`, one logic pulse per discriminator trigger.
Channel 0 is the centre (target) pixel and channels 1 to 6 are the guard
ring. Everything to the right of `vtd_top` is also outside the RTL: the
Ethernet MAC/PHY and the host. The host stamps the time on the data and does
all the analysis.

| module | file | role |
|---|---|---|
| `vtd_top` | `rtl/vtd_top.sv` | wires the blocks below; pulses in, word stream out |
| `vtd_scaler_bank` | `rtl/vtd_scaler_bank.sv` | seven scalers |
| `vtd_scaler` | `rtl/vtd_scaler.sv` | one pulse-clocked 16-bit counter with a Gray-code clock-domain crossing |
| `vtd_sample_timer` | `rtl/vtd_sample_timer.sv` | one-cycle strobe every 550 cycles |
| `vtd_sampler` | `rtl/vtd_sampler.sv` | takes samples, fills the buffer, sends it out |
| `vtd_sample_buffer` | `rtl/vtd_sample_buffer.sv` | 70 x 112-bit sample memory |
| `vtd_pkg` | `rtl/vtd_pkg.sv` | shared sizes and the sampler's state type |

## Counting pulses faster than the clock

The counting stage sets the rate limits. The discriminators saturate near
35 MHz, and the original scalers were rated to 400 MHz. A 100 MHz system
clock cannot catch every edge of a 400 MHz pulse train by sampling it. So
each `vtd_scaler` counts on its own input: `pulse_i[c]` is the clock of a
16-bit binary counter, and nothing else touches that counter. Reset, which is
asynchronous, is the only way to clear it. The counter runs freely and wraps
modulo 65536.

The count must then reach the system clock domain. Next to the binary
counter the scaler keeps the same value in Gray code. A Gray code changes in
exactly one bit per step. When the system clock samples it mid-change, it
therefore gets either the old value or the new one, never a mix of the two.
The sampled code passes through two flip-flops (`SYNC_STAGES`) and is turned
back into binary: bit *i* is the XOR of Gray bits *i* and up. The count seen
by the sampler thus trails the true count by two or three clock cycles. The
crossing stays valid when several pulses fall in one clock period. The
sampler then sees a value a few counts old, but never a wrong one.

Timing limits of this scheme, for whoever maps it to a device:

* The Gray register toggles at the pulse rate, so the counter must close
  timing at the highest pulse rate expected.
* The synchroniser flip-flops need the usual false-path or max-delay
  constraints, which are not part of the RTL.

## Sampling, the buffer, and where the dead time goes

The part of the design that needs the most care is what happens around a
buffer send.

**Difference coding.** At each taken strobe the sampler subtracts the counts
it read at the previous taken strobe, modulo 2^16. It writes those seven
differences as one buffer row, then keeps the new counts for the next
subtraction. Because the scalers never stop and never clear, a difference is
exact however long the gap since the last sample: counts are never lost,
only delayed. A difference is wrong only if a channel gets 65536 or more
pulses between two taken samples.

**The send.** The strobe that writes row 69 moves the state machine from
`S_SAMPLE` into the flush loop. For each row the loop runs three states:

* `S_READ` requests the row from the buffer (one cycle).
* `S_LOAD` latches it (one cycle).
* `S_SEND` offers the seven values as seven words, channel 0 first.

A word moves when `tx_valid_o` and `tx_ready_i` are both high. `tx_last_o`
marks word 490. The machine returns to `S_SAMPLE` in the cycle after that
word moves.

**Missed strobes.** The timer keeps running during the send. Its strobes are
not taken, and `missed_ticks_o` counts them. The first strobe after the send
is taken as usual. Its difference covers the whole gap: one sample period,
plus the send, plus a partial period. On the original instrument this is
exactly why the dead time is "not real dead time": pulses are still counted
during the send, but bunched into one long sample.

**Numbers.** The original instrument took 61.87 µs to send a buffer. With a
receiver that takes that long:

| quantity | value |
|---|---|
| sample period | 550 cycles = 5.5 µs |
| samples per buffer | 70 (7840 bits of memory) |
| words per buffer | 490 x 16 bits |
| send time | set by the receiver; 61.87 µs = 6187 cycles in the testbenches |
| buffer period | 69 x 5.5 µs + one long gap ≈ 0.4455 ms (simulated: 0.4455 ms) |
| dead time | 6190 / 44550 cycles ≈ 13.9 % |
| longest stored difference at 400 MHz | ≈ 67.4 µs x 400 MHz ≈ 26 950 < 65 536 |

The original authors quote "about 15 %" dead time and 0.45 ms per buffer. The
13.9 % above is the same arithmetic done exactly.

The send time is not fixed inside this design. With the state machine alone
a buffer goes out in 70 x 9 = 630 cycles. A slower receiver stretches it.
The difference coding stays correct as long as the whole gap stays below
65536 pulses on every channel. At 400 MHz that means a send shorter than
about 158 µs.

Only the host knows the absolute time of each sample, and it can rebuild the
sample times from the data:

* Samples within a buffer are exactly 5.5 µs apart.
* The first sample of each buffer after the first ends at the first strobe
  after the previous send.
* The counts in a buffer add up to exactly one buffer period of pulses.

## Output stream

| signal | width | meaning |
|---|---|---|
| `tx_data_o` | 16 | pulses in one channel since the previous taken sample, modulo 2^16 |
| `tx_valid_o` | 1 | a word is offered; it stays and does not change until taken |
| `tx_ready_i` | 1 | the receiver takes the word this cycle |
| `tx_last_o` | 1 | with word 490 of a buffer |
| `flushing_o` | 1 | a buffer is being sent; strobes are not taken |
| `missed_ticks_o` | 32 | strobes not taken since reset |

The word order is sample 0 channels 0 to 6, then sample 1, and so on. There
is no header and no timestamp. The stream obeys a valid/ready rule: an
offered word is held unchanged until taken. That rule is written as a
concurrent assertion in `vtd_sampler`. The stream is meant to feed an
Ethernet MAC through whatever packet framing the system uses.

## Parameters

| parameter | default | where |
|---|---|---|
| `NUM_CHANNELS` | 7 | top, scalers, sampler, buffer |
| `SCALER_WIDTH` | 16 | top, scalers, sampler, buffer |
| `DEPTH` | 70 | top, sampler, buffer |
| `PERIOD_CYCLES` | 550 | top, timer; 5.5 µs at 100 MHz, from `vtd_pkg` |
| `SYNC_STAGES` | 2 | scalers |

All defaults are the original instrument's numbers, except the clock and the
synchroniser depth. For another clock frequency, change `CLK_FREQ_HZ` in
`vtd_pkg`. `SAMPLE_PERIOD_CYCLES` is derived from it.

## What follows the original instrument and what does not

Taken from the published description:

* seven channels and 16-bit scalers;
* scalers that keep counting during a send;
* sampling every 5.5 µs;
* a 70-sample buffer sent out whole, with sampling stopped during the send;
* the first sample after a send holding the counts of the whole gap.

Choices made here, because the description does not cover them:

* **Processor replaced by logic.** The original ran steps 2 to 4 as software
  on an embedded processor. Its program and bus are not published, so a
  state machine does the same job.
* **Differences, not raw counts.** The buffer stores the counts since the
  previous sample. This matches the statement that the first sample after a
  send holds all counts of the interval. If the original stored raw scaler
  values for the host to subtract, the information is the same.
* **Clocking.** The design assumes a 100 MHz system clock, the oscillator of
  the evaluation board the original used. The scalers are pulse-clocked and
  cross domains in Gray code.
* **Interfaces.** The valid/ready word stream, the word order, the lack of a
  header, the one-row-per-sample buffer layout and the `missed_ticks_o`
  counter are this design's own.
* **Reset.** Reset is asynchronous and active low. It clears the counters,
  the timer and the sampler. The buffer is not cleared, since every row is
  written before it is read.

Not in this RTL:

* the PMTs, discriminators and NIM-to-LVDS mezzanine board, which are analog;
* the FPGA's LVDS input buffers, which are device primitives;
* the processor core;
* the Ethernet MAC and PHY;
* the host software: timestamps, barycentring and pulsar phase folding.

## Simulating

Every testbench is self-checking. Each ends by printing
`TB_RESULT checks=N failures=M`. Times are in ns, so compile with
`--timescale 1ns/1ps`. For example:

```
verilator --binary --timing --assert --timescale 1ns/1ps -Wno-fatal \
    --top-module tb_vtd_top -y rtl -y tb +libext+.sv -Irtl \
    rtl/vtd_pkg.sv tb/tb_vtd_top.sv
./obj_dir/Vtb_vtd_top
```

Put `+verilator+rand+reset+2` on the run line to start all uninitialised
state at random values. The testbenches are written to pass that way.

| testbench | what it shows |
|---|---|
| `tb_vtd_scaler_bank` | Pulse trains up to 250 MHz, some faster than the clock. Each cycle, the count in the clock domain lies within 4 cycles of the true count and never goes back. Final counts are exact modulo 2^16, and channel 3 wraps. |
| `tb_vtd_sample_timer` | First strobe 550 cycles after reset, then exactly every 550 cycles, one cycle wide. Restarts on reset. |
| `tb_vtd_sample_buffer` | Random rows written and read back against a copy. A read row is held. |
| `tb_vtd_sampler` | Depth reduced to 5. A reference model checks every word, `tx_last_o`, `flushing_o` and the missed-strobe count. Covers flushes of exactly 45 cycles with an always-ready receiver, random receiver stalls, and differences across a counter wrap. |
| `tb_vtd_top` | Full size, five buffers. Channel 0 runs near 35 MHz (its scaler wraps) and the ring channels at kHz to MHz rates, with a 61.87 µs receiver. Every value is checked against the pulses sent, along with the sample grid, the late sample after each flush, missed strobes, a 0.4455 ms buffer period and 13.9 % dead time. |
| `tb_vtd_drift_scan` | A star drifting across channels 2, 0 and 5, compressed to 7 ms. The testbench rebuilds the per-buffer light curve the way the host would, then checks peak order, peak rate and the flat background on the other channels. |
| `tb_vtd_pulsar` | A pulsar on channel 0, with the period shortened from 33.7 ms to 337 µs: a main pulse at phase 0 and an interpulse at phase 0.4 over a 1 MHz background. The testbench folds the ordinary 5.5 µs samples into a 20-bin phaseogram, leaving out the long first sample of each buffer. It checks that the main pulse is the brightest bin, that the interpulse clears the mean plus five sigma, and that the off-pulse bins sit at background. |
| `tb_vtd_rate_limit` | 400 MHz on channel 0 and 35 MHz Poisson on channels 1 to 6. Normal samples hold 2200 counts and post-send samples about 27 000, with no count lost over eight scaler wraps. |

All of these run in about a second each with Verilator. What simulation
cannot show is the metastability margin of the scaler crossing, or whether a
given FPGA really counts at 400 MHz. Both are timing-closure questions for
the target device.

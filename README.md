# Polar-coordinate RF feedback gateware for an RFSoC LLRF station

An accelerator cavity must hold its RF field at a set amplitude and phase,
within a pulse that lasts a few to a few tens of microseconds. A low-level
RF (LLRF) controller measures the cavity field, compares it with the
setpoint and corrects the drive of the power amplifier. Here the controller
is built on an RF system-on-chip. Its converters sample the RF at 4 GS/s,
and their digital mixers move the signal to base-band I/Q and back. The
programmable logic between the two mixers closes the loop.

This RTL is that programmable logic. Its main idea comes from the ALS
(Advanced Light Source) RFSoC LLRF design: regulate amplitude and phase
separately, not I and Q. The measured I/Q pair goes to polar form with a
CORDIC. One PI controller drives the amplitude and a second, independent
one drives the phase. A second CORDIC converts the two corrections back to
an I/Q drive. Two phase offsets account for the fixed phase shifts of the
receive and transmit paths. Around this core sit the parts a pulsed station
needs:

- rate changers between the converter streams and the loop;
- a timing-event receiver and a trigger/gate generator;
- triggered capture memories for every input;
- a waveform generator per output, usable alone or as feed-forward;
- a circular history buffer per output;
- a register file for the host processor.

The default configuration has 8 RF inputs and 2 RF drives. This is the
sub-harmonic buncher station: two cavities (125 MHz and 500 MHz), one loop
each, regulated within a ~30 µs pulse. The ALS linac station (more than 5
inputs, 1 drive, ~5 µs pulses) is a subset of it.

## Signal chain

```
            ADC mixer (outside)                                  DAC mixer (outside)
 adc_i/q[8] ─┬─► decimator ×1/16 ─┬─► loop select ─► dsp_core ─► gate ─► interpolator ×8 ─┐
             │                    │                  (per DAC)                            │
             └──raw──┐   ┌──b.b.──┘                                  awg ─┬──────────┐    │
                   wave_capture (per ADC)                                 │   sum(ff)  ▼    ▼
                                                                          └──────► DAC source mux ─► dac_i/q[2]
                                                                                          │
 EVR stream ─► evr_rx ─► pulse_sync ─► trigger_gen ─► trig, rf_gate                 circ_buffer
                                                   (all captures, generators, buffers)
```

Everything except the timing receiver runs on one DSP clock, `clk`. Streams
are marked by strobes rather than clocks:

- `adc_valid` marks each ADC base-band sample. In the testbench it is high
  every cycle.
- the decimators produce one base-band sample every 16 ADC samples, and the
  loop runs at that rate;
- `dac_ce` marks each DAC sample slot. Interpolation by 8 of the base-band
  rate gives half the ADC rate, so in the testbench `dac_ce` is high every
  other cycle.

The receiver side of the timing link runs on the EVR clock (`clk_evr`, a
quarter of the 499.64 MHz master oscillator, about 8 ns). It has its own
reset.

## Number formats

| Quantity | Width | Meaning |
|---|---|---|
| ADC / DAC word | 16 bit signed | converter I or Q sample |
| base-band I/Q, drive I/Q | 18 bit signed | decimated mean with 2 fraction bits (ADC LSB = 4) |
| amplitude | 18 bit, non-negative | sqrt(I²+Q²) on the I/Q scale, full scale 131071 |
| phase (loop) | 18 bit | fraction of a turn: 2^18 counts = 360°, wraps |
| phase offsets | 19 bit | fraction of a turn: 2^19 counts = 360° |
| gains Kp, Ki | 18 bit signed | Kp = 4096 is a proportional gain of 1; the integrator adds Ki·err per sample and contributes acc/65536 |

Phase is a binary fraction of a full turn throughout. Differences and sums
therefore wrap correctly by plain two's-complement overflow, with no
explicit modulo. The 18-bit loop phase is the top 18 bits of the 19-bit
CORDIC angle. The 18-bit drive phase is widened to 19 bits again before the
transmit offset is added.

In the raw capture path the 16-bit ADC word is multiplied by 4. Raw and
base-band captures then share one scale: a constant input reads the same
in both. The DAC word is the top 16 bits of the 18-bit drive.

## The loop controller (`dsp_core`)

```
 I,Q ─► CORDIC vectoring (+rx_phase_offset) ─► A ─► PI amp   (amp_setpoint, Kp_amp, Ki_amp) ─► A' ─┐
                                           └──► θ ─► PI phase (phs_setpoint, Kp_phs, Ki_phs) ─► θ' ─┤
                                                                                                     ▼
                                                    CORDIC rotation (θ' + tx_phase_offset) ─► I',Q'
```

### CORDIC (`cordic`)

One module serves both directions, selected by `VECTORING`:

- **Vectoring** (rectangular to polar) turns the vector onto the x axis. It
  accumulates the angle it turned through, starting from the receive phase
  offset, so `z_out = atan2(Q, I) + rx_phase_offset`.
- **Rotation** (polar to rectangular) starts from (A, 0) and rotates by the
  requested angle.

Before the iterations, a fold stage brings the vector into the range where
CORDIC converges:

- In vectoring mode, a vector with negative I is negated and 180° is added
  to the angle.
- In rotation mode, an angle beyond ±90° is reduced by 180° and the result
  is negated.

`STAGES` = 20 micro-rotations follow, each one pipeline stage. The
arctangent table is computed at elaboration, never stored:
`round(atan(2^-i) / 2π · 2^32)` as a 32-bit fraction of a turn.

The datapath carries 3 guard bits and 6 extra fraction bits. Without the
fraction bits, truncating `>>> i` biases the amplitude low by a few LSB. A
final stage multiplies by 1/1.64676, the inverse of the CORDIC gain
(constant 79594 / 2^17). It then rounds and saturates to 18 bits.

- Accuracy: within 4 LSB on amplitude and 8 counts of 2^19 on phase over
  random inputs.
- Latency: `STAGES + 2` cycles, one sample per cycle.

### PI controllers (`pi_ctrl`)

Each controller computes, per sample:

```
err = setpoint − meas                  (phase: modulo one turn)
acc = acc + Ki·err                      (only while enabled; amplitude: saturated, phase: modulo one turn)
out = setpoint + (Kp·err >>> 12) + (acc >>> 16)
```

The setpoint is added to the output, so an open loop (enable low) outputs
exactly the setpoint. With Kp = Ki = 0 the drive is simply the requested
amplitude and phase. The two instances differ only in how they treat range
limits:

- **Amplitude** (`WRAP=0`) forms the error with one extra bit and clamps
  the output to [0, 2^17−1].
- **Phase** (`WRAP=1`) lets the error and the output wrap, so the
  correction always takes the shorter way round.

The amplitude integrator saturates at ±2^34. After the shift by 16 that
is ±2^18, twice the output range, enough to reach any drive from any
setpoint. The phase integrator instead wraps modulo 2^34, which is exactly
one turn at the output. A saturating phase integrator would be a trap:
once the accumulated correction reaches a full turn, its contribution is
≡ 0 and stops changing, and the phase loop freezes off its setpoint.
Disabling a loop freezes its integrator. The integrator reset holds it at
zero. The reset is registered alongside
the sample, so the first sample taken under reset already sees a zero
integral. Latency is 2 cycles.

There is no derivative term. The controllers are often called PID, but the
loop structure this design follows shows a PI controller with Kp and Ki
inputs, and that is what is built.

### Gating and latency

`trigger_gen` produces `rf_gate`. Outside it, the top ANDs both loop
enables low, which freezes the integrators, and it forces the drive to
zero. Feedback therefore acts only inside the pulse, and an integrator
keeps its state from one pulse to the next. The measured amplitude and
phase of every loop are always latched and can be read from registers.

The `dsp_core` latency is `2·(STAGES+2) + 2 + 1` = 47 DSP cycles. The
gateware latency from ADC to DAC adds:

- decimation: up to 16 samples of averaging, plus 1 cycle;
- one base-band period of linear interpolation (8 DAC strobes);
- a few registers.

At the default parameters that totals about 82 DSP cycles. The
converters' own latency comes on top of that.

## Rate changers

**`decimator`** integrates and dumps: the sum of 16 consecutive samples,
taken with 18 of its 20 bits, is the block mean with 2 fraction bits. The
output comes one cycle after the 16th input. This is the simplest filter
that reduces the rate by 16. The filter response used in the ALS design is
not known, so a CIC or FIR could replace it behind the same ports.

**`interpolator`** interpolates linearly: each new base-band sample starts a
ramp from the previous sample, taking 8 `dac_ce` steps. If no new sample
arrives, the output holds. The ramp costs one base-band period of delay.

## Timing and pulses

**`evr_rx`** reads the decoded 16-bit word of a gigabit transceiver that
carries an MRF-style event stream. Byte 0 is the event slot. A data byte
equal to the subscribed, non-zero code gives a one-cycle `event_pulse`. A
K28.5 comma (0xBC with its K flag) marks an idle slot.

The watchdog counts EVR clocks since the last comma. The stream counts as
lost after `WD_LIMIT` = 1024 clocks without a comma, or on any decode
error. On loss, `evr_rx`:

- drops `link_up` and suppresses events;
- pulses `gt_rx_reset` for `RST_LEN` = 64 clocks to restart the
  transceiver's receive path;
- counts the recovery.

`link_up` returns with the next comma. If no comma comes, the reset is
repeated every `WD_LIMIT` clocks. This covers, for example, a fibre that
was unplugged and plugged back.

**`pulse_sync`** carries the event pulse from the EVR clock to the DSP
clock: the pulse toggles a flag, and two flops synchronise the flag.

**`trigger_gen`** starts on an enabled source, a timing event or a register
write. After `cfg_delay` cycles it emits one `trig` and opens `rf_gate` for
`cfg_gate_len` cycles. A source pulse arriving before the gate closes is
ignored.

`trig` starts, on the same cycle:

- every ADC capture;
- every waveform generator;
- the post-trigger count of every circular buffer.

Because all of them start together, the loop-back latency can be read
straight off the captured waveforms.

## Waveform memories

Every memory is a plain array of 65,536 words of 36 bits (one I/Q pair).
That is the 64k samples per channel the ALS system exposes to its control
system. In total: 8 capture memories, 2 generators and 2 circular buffers,
28.3 Mbit. That fits in the UltraRAM and block RAM of a ZU4xDR device.

- **`wave_capture`** (one per ADC) writes `cfg_cap_len` samples from
  address 0 after `trig`, then raises `done`. A register bit per channel
  selects the source. The raw source is the ADC stream, one word per
  `adc_valid`; it covers the whole pulse as long as it is shorter than
  65,536 samples. The base-band source is the decimated stream, which
  covers 16 times longer.
- **`awg`** (one per DAC) is loaded through a separate write port. On
  `trig` it plays `cfg_awg_len` words, one per `dac_ce`, and it outputs 0
  when idle. Each DAC channel has two register bits:
  - The **source** bit replaces the loop drive with the generator: an
    open-loop pulse, or a loop-back test pattern.
  - The **feed-forward** bit adds the generator to the interpolated loop
    drive, with saturation. A pre-computed drive profile then does the bulk
    of the work at the start of a short pulse, and the feedback only trims
    it.
- **`circ_buffer`** (one per DAC) records the DAC stream continuously while
  armed. After a trigger it takes `cfg_circ_post` more words, then freezes.
  Read-back address 0 is the oldest word, so the memory reads out in time
  order with the trigger at a known position. A register write re-arms it.

Software reads all memories through one port: `wf_sel` picks the memory
(ADC captures 0–7, circular buffers 8–9), and `wf_data` follows `wf_addr`
by two cycles.

## Registers (`llrf_regs`)

The register bus is a plain synchronous interface, which an AXI4-Lite
bridge from the processor would drive. A write is `reg_wr` with address and
data for one cycle. A read is `reg_rd`, with data and `reg_rvalid` one
cycle later. Addresses are byte addresses of 32-bit words, and every
register resets to 0.

| Address | Access | Content |
|---|---|---|
| 0x000 | W | bit0 software trigger, bit1 re-arm circular buffers (self-clearing) |
| 0x004 | RW | trigger sources: bit0 timing event, bit1 software |
| 0x008 | RW | trigger delay, DSP cycles |
| 0x00C | RW | RF gate length, DSP cycles |
| 0x010 | RW | subscribed event code |
| 0x014 | RW | capture length, samples |
| 0x018 | RW | capture source per ADC: 0 raw, 1 base-band |
| 0x01C | RW | DAC source per DAC: 0 loop, 1 generator |
| 0x020 | RW | generator length, samples |
| 0x024 | RW | circular buffer post-trigger samples |
| 0x028 | RW | feed-forward per DAC: add generator to loop drive |
| 0x040 | R | [15:0] trigger count, [16] timing link up |
| 0x044 | R | timing receiver watchdog recoveries |
| 0x048 | R | [7:0] capture done, [15:8] buffer frozen, [23:16] generator playing |
| 0x100 + 0x40·l | RW | loop l: [0] amp enable, [1] amp integrator reset, [2] phase enable, [3] phase integrator reset |
| +0x04 / +0x08 | RW | amplitude / phase setpoint |
| +0x0C / +0x10 | RW | Kp / Ki amplitude |
| +0x14 / +0x18 | RW | Kp / Ki phase |
| +0x1C / +0x20 | RW | rx / tx phase offset (19 bit) |
| +0x24 | RW | ADC channel read by the loop |
| +0x28 / +0x2C | R | measured amplitude / phase |

Each loop reads its cavity probe from a register-selected ADC channel. The
other channels (forward and reflected power, for example) are only
captured.

## How far this follows the ALS design

Taken from the ALS design:

- the overall chain: mixers, decimation by 16, loop, interpolation by 8,
  mixers;
- the loop structure: two CORDICs, separate amplitude and phase PI loops,
  and the rx/tx phase offsets and loop register names;
- the 16/18/19-bit signal widths;
- channel counts, waveform depth and the EVR clock;
- a watchdog that resets the timing receiver;
- triggering every waveform memory at once.

This design's own choices:

- the PI arithmetic, scaling and saturation;
- the CORDIC stage count and precision;
- the filters (boxcar decimation, linear interpolation);
- gating the loop with `rf_gate`;
- the way feed-forward enters (the ALS requirements ask for feed-forward
  but do not place it);
- the comma-based watchdog criterion;
- the register bus and map;
- the memory protocols.

Known differences and gaps:

- **One clock with strobes.** The ALS design has separate ADC, DSP and DAC
  clocks (the DSP clock is half the programmable-logic clock). Here there is
  one DSP clock, and ADC and DAC samples arrive on strobes. A multi-clock
  build needs clock-domain crossings around the decimator and interpolator.
- **Converters and mixers are outside.** The RF data converter, its NCO
  mixers and their multi-tile synchronisation are vendor blocks. The top
  takes and gives base-band I/Q at its ports. Raw capture here means the
  mixer output before decimation. With the mixer's NCO frequency set to
  zero, that stream is the undemodulated RF, which is how the ALS system
  shows raw and base-band waveforms through the same buffer. At its default
  rate it is not the full 4 GS/s converter stream.
- **Filter / interlock.** The ALS block diagram names a filter and
  interlock stage between the ADC channelizer and the controllers, but does
  not describe it. It is not built.
- **Transceiver, clocking chips, processor, DDR4 storage, RF front end and
  its SPI control** are outside the logic and not modelled.
- **No derivative term** (see above).
- **Inter-pulse (pulse-to-pulse) correction** for the linac is a software
  loop over captured waveforms and generator tables. Nothing in the
  gateware is specific to it.
- **Latency.** The ALS design requires under 300 ns end to end, and
  measured about 400 ns in its narrow-band configuration. Whether this RTL
  meets that depends on the DSP clock, which is not fixed here: 82 cycles
  is 328 ns at 250 MHz, before converter latency.

## Verification

Every block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and stops on a watchdog if it hangs. All
inputs that matter are initialised, so results do not depend on the
simulator's reset values.

| Testbench | What it checks |
|---|---|
| `tb_cordic` | both modes against `atan2`/`sqrt`/`cos`/`sin` in real arithmetic; latency `STAGES+2` |
| `tb_pi_ctrl` | both modes against a 64-bit integer model over random gains, enables and resets, and through integrator saturation and wrap-around; a closed loop on a 0.5-gain plant |
| `tb_dsp_core` | open-loop outputs against a real-arithmetic model; latency 47; both loops closing on a rotated, attenuated cavity; integrator reset |
| `tb_decimator` | every output against the block sum, with random input gaps; one output per 16 inputs, one cycle after the 16th |
| `tb_interpolator` | every output against the linear ramp; hold behaviour |
| `tb_wave_capture`, `tb_circ_buffer`, `tb_awg` | memory contents and order, lengths, re-trigger and re-arm rules, output timing |
| `tb_evr_rx` | only the subscribed code gives events, one cycle late; watchdog on lost commas and on decode errors; reset length; recovery |
| `tb_trigger_gen` | trigger exactly delay+2 cycles after the source; gate length; ignored sources; counter |
| `tb_llrf_regs` | every register written and read back; decoded outputs; status words |
| `tb_llrf_top` | the whole design at its default size (see below) |
| `tb_loop_settling` | the loop-closing experiment (see below) |

`tb_llrf_top` runs the design at its defaults: 8 ADCs, 2 DACs, 64k-word
memories. It closes both loops on two cavity models, each a first-order
low-pass with a time constant of 32 samples, gain 0.7 and a phase rotation
of 50° or −120°. It checks that:

- both loops reach their amplitude and phase setpoints within one
  12,000-cycle pulse;
- the drive is zero outside the gate;
- a raw capture equals the ADC samples;
- a base-band capture equals the 16-sample means;
- the circular buffer holds the DAC words around the trigger;
- a generator plays its table, and feed-forward adds its table to the loop
  drive;
- the timing watchdog recovers an interrupted stream.

Each of these mechanisms is counted, and one that never happens is a
failure.

`tb_loop_settling` repeats, on the full design, the loop-closing
experiment the ALS design was judged by. There are four pulses. Each uses
new random setpoints and one of four rx/tx phase-offset pairs, and the
integrators are reset before it. The cavity model has a 1 µs time constant
(250 cycles of the 4 ns clock). With Kp = 1.5 and Ki = 8000, amplitude and
phase reach 1 % and 1° of setpoint in 1,100–1,900 cycles (4.4–7.6 µs). The
limit is 10 µs. They then hold within 0.1 % and 0.1° to the end of the
pulse. The cavity, the gains and the clock are assumptions. A real cavity
with a narrower bandwidth needs its own gains.

To run a testbench with Verilator 5:

```
verilator --binary --timing -Irtl -y rtl rtl/llrf_pkg.sv tb/tb_llrf_top.sv --top-module tb_llrf_top
./obj_dir/Vtb_llrf_top
```

Substitute any other testbench name. The full-size run takes a few seconds.

## Files

`rtl/llrf_pkg.sv` holds the widths, the `iq_t` and `loop_cfg_t` types and
the CORDIC angle function. The other `rtl/` files have one module each:

| Module | Role |
|---|---|
| `llrf_top` | top level |
| `llrf_regs` | register file |
| `evr_rx` | timing-event receiver |
| `pulse_sync` | clock-domain pulse crossing |
| `trigger_gen` | trigger and RF gate |
| `decimator` | ADC-side rate reduction |
| `wave_capture` | ADC capture memory |
| `dsp_core` | loop controller |
| `cordic` | polar/rectangular conversion |
| `pi_ctrl` | PI controller |
| `interpolator` | DAC-side rate increase |
| `awg` | waveform generator |
| `circ_buffer` | DAC history buffer |

Every file opens with a description of its interface and timing.

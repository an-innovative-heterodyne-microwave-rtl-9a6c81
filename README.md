# Edge-timing fringe counter for a heterodyne microwave interferometer

A heterodyne interferometer measures plasma density as a phase shift. A
105 GHz probe beam is shifted up by 1 MHz and sent through the plasma. It is
then mixed with an unshifted reference beam. What comes out of the mixer is a
1 MHz beat, and the plasma moves that beat's phase. At 105 GHz across a
52 mm plasma, 10^19 m^-3 of line-averaged density moves it by about 240°.

The usual way to read that phase is to digitise the beat at 100 MS/s or more.
This design doesn't digitise it. An analog board amplifies and filters the
beat, and a fast comparator turns it into a logic square wave, the *plasma
signal*. An FPGA clocked at 100 MHz makes the 1 MHz modulation itself. It
then only has to time each rising edge of the plasma signal against its own
reference edges.

One clock cycle is 10 ns. That is 1/100 of a 1 µs period, so one count is
1/100 of a fringe (3.6°). The FPGA sends the running count and a time stamp
to a computer. Each message is a six-byte packet over a 12 Mbit/s UART, and
one goes out every 5 µs.

This RTL implements that FPGA logic, following the published description
of the Madison AWAKE Prototype interferometer (Granetzny, Elward and
Schmitz). That description gives what the logic does but not how it is
built. Every internal mechanism below is therefore this design's own
construction of the stated behaviour. The section "Following the
description, and own choices" separates the two.

## Signal flow

```
            100 MHz clk
                │
        ┌───────▼───────┐ ref_out (1 MHz square) ──► analog bandpass ──► upconverter
        │    ref_gen    │
        └──┬─────────┬──┘
   ref_rise│   phase │
        ┌──▼─────────▼──┐      plasma_in ◄── comparator ◄── amplifier chain ◄── mixer
        │  phase_meter  │◄── sync2 ◄──┘
        └───────┬───────┘
                │ fringe_count (signed, 1/100 fringe)
        ┌───────▼───────┐   ┌──────────────┐
        │  packetizer   │◄──┤ time_counter │◄── ref_rise (tick), trigger / 'R' (clear)
        │   + crc16     │   └──────────────┘
        └───────┬───────┘
        ┌───────▼───────┐
        │    uart_tx    ├──► uart_txd ──► USB-UART bridge ──► computer
        └───────────────┘
 uart_rxd ─► sync2 ─► uart_rx ─► cmd_decoder ─► 'R' time reset, 'T' trigger, 'A' gain re-arm
 trig_in  ─► sync2 ─► rising edge ─┘ (same action as 'T')
 win_lo_in, win_hi_in ─► sync2 ─► gain_ctrl ─► pot_inc[1:0], pot_up ─► digital pots
```

All logic runs on one 100 MHz clock with a synchronous active-low reset.
Every input from outside the FPGA passes a two-flop synchroniser (`sync2`):
the comparators, the trigger and the UART receive line.

## Fringe counting (`phase_meter`)

This is the part that needs thought. Timing one edge against the last
reference edge gives the phase modulo one fringe. The density, though, can
move the phase by many fringes, and faster than one fringe per microsecond in
a fast transient. The counter therefore has to know *which* reference edge
each plasma edge belongs to.

It keeps a signed balance:

* `bal` goes up by 1 on every reference rising edge and down by 1 on every
  plasma rising edge.
* When a plasma edge arrives, its own reference edge lies `bal − 1` periods
  before the latest one. `ref_phase` counts the cycles since that latest
  reference edge. The total delay is therefore

      fringe_count = 100 · (bal − 1) + ref_phase      (counting bal after the
                                                       reference edge of the
                                                       same cycle, if any)

* Example 1: the phase slips steadily later. The plasma edges fall behind,
  `bal` stays at 2 and the result goes past 100, then 200, and so on.
* Example 2: a plasma edge arrives 1 cycle before its reference edge. `bal`
  is then 0 and `ref_phase` is 99, so the result is −1. The count goes
  smoothly through zero into negative values.

Start-up: nothing counts until the first reference edge. The first plasma
edge after it is paired with that edge, so the first result is between 0
and 99. After that the pairing holds for as long as the plasma signal keeps
one rising edge per period of its own. This holds however far its frequency
strays from 1 MHz. A missed or doubled comparator edge shifts the count by
exactly one fringe, and that shows up as a 100-count step.

Other properties:

* **Units and sign.** The output is a delay in clock cycles. A later plasma
  edge means a larger count, which means a falling phase. The phase is
  φ = −2π · count / 100. The published description states this sign both
  ways in different places. The hardware reports only the delay, so the sign
  convention is the host's to choose.
* **Constant offset.** The synchroniser delays every plasma edge by exactly
  2 cycles. The fixed cable and filter delays of the analog side add to this
  offset. The computer removes all of it by subtracting the pre-shot
  baseline.
* **Latency.** `fringe_count` is updated 3 cycles after the plasma edge
  reaches the pin (2 cycles of synchroniser, 1 register). The measurement
  therefore follows the phase one plasma period, about 1 µs, at a time.
* **Width.** The register is 32 bits (`CW`), which is ±2^31 counts.

## Reference and time stamp (`ref_gen`, `time_counter`)

* **Reference.** `ref_gen` is a modulo-100 counter. `ref_out` comes from a
  flip-flop and is high for phase 0–49 and low for 50–99, giving a 1 MHz
  square wave. `ref_rise` marks phase 0. In reset the counter waits at
  phase 99 with the output low, so the first edge after reset raises the pin
  and starts period 0.
* **Time stamp.** `time_counter` counts `ref_rise`, so its unit is 1 µs. It
  is cleared by:
  * the trigger pin (rising edge);
  * the host command `T`;
  * the host command `R`.

  A clear wins over a tick in the same cycle. Clearing on the trigger lines
  the time stamp up with the shot time of a pulsed discharge.

## The data stream (`packetizer`, `crc16`, `uart_tx`)

A packet is six bytes, most significant byte first:

| byte | 0 | 1 | 2 | 3 | 4 | 5 |
|---|---|---|---|---|---|---|
| content | stamp[15:8] | stamp[7:0] | fringe[15:8] | fringe[7:0] | crc[15:8] | crc[7:0] |

The checksum is CRC-16/CCITT-FALSE over bytes 0–3:

* polynomial 0x1021;
* start value 0xFFFF;
* MSB first;
* no final XOR.

For example, the check value for the ASCII string "123456789" is 0x29B1.

The frame is 8N1, so each byte takes 10 bits. Six bytes are therefore 60
bits, which is 5 µs at 12 Mbit/s. `uart_tx` accepts the next byte in the
same cycle that the previous stop bit ends. The packetizer takes a fresh
snapshot of both counters in the cycle after a packet's last byte is
accepted. The stream is therefore gapless and sends exactly one packet every
500 clock cycles. The packet period and the measurement rate are one and the
same: the link sets the rate.

The 12 MHz bit clock is not a divisor of 100 MHz, so it comes from a
fractional accumulator. Each cycle adds 12,000,000, and a bit boundary falls
each time the sum passes 100,000,000. Bit cells are 8 or 9 cycles long
(8.33 on average), so no edge of the line is more than 10 ns away from its
ideal time.

What the receiving program has to do:

1. **Find the packet boundary.** There is no sync byte. Slide a six-byte
   window along the stream until the CRC checks on several packets in a row.
   After that, every sixth byte starts a packet.
2. **Unwrap both 16-bit fields.** Add the signed 16-bit difference to the
   previous packet's value. Between packets the stamp moves by exactly 5, or
   restarts near 0 after a time reset. The fringe count moves by at most a
   few hundred, far below the 2^15 limit.
3. **Convert counts to density.** Subtract the pre-shot baseline. One count
   is 3.6°. At 105 GHz in a 52 mm plasma that is about 1.5·10^17 m^-3 of
   line-averaged density.

## Host commands (`uart_rx`, `cmd_decoder`)

The computer sends single bytes at the same 12 Mbit/s, 8N1. `uart_rx`:

* samples mid-bit with the same kind of fractional accumulator;
* treats a start bit that is no longer low at mid-bit as a glitch and drops
  it;
* drops any byte whose stop bit is low.

| byte | action |
|---|---|
| `R` (0x52) | clear the time stamp |
| `T` (0x54) | software trigger: clear the time stamp and freeze the gain |
| `A` (0x41) | allow automatic gain adjustment again |
| other | ignored (`bad_cmd` pulses inside the design) |

## Automatic gain (`gain_ctrl`)

The analog chain's gain is set by digital potentiometers in stage 1 and
stage 3. Overall it ranges from about 2,000 to 150,000. A window comparator
at the end of the chain gives two levels:

* `win_lo_in`: the signal is above the lower threshold;
* `win_hi_in`: the signal is above the upper threshold.

At a good amplitude `win_lo_in` pulses once per period and `win_hi_in` stays
low.

`gain_ctrl` watches both levels over a window of `EVAL_CYCLES` = 1000 cycles
(10 µs). At the end of each window it decides:

* upper threshold seen → one step down;
* lower threshold never seen → one step up;
* otherwise → hold.

The window after a step is skipped, so the chain can settle before it is
judged again. One step takes 20 µs, and a full sweep takes a few
milliseconds before the shot.

Steps and wiper tracking:

* **Step pulse.** A step is a `PULSE_CYCLES` = 50 cycle (0.5 µs) pulse on
  `pot_inc[0]` (stage 1) or `pot_inc[1]` (stage 3). `pot_up` gives the
  direction and holds steady for the whole pulse.
* **Which pot moves.** More gain comes from stage 3 until its pot is at the
  top, then from stage 1. Less gain comes from stage 1 first, then from
  stage 3.
* **Wiper positions.** The design counts the wiper positions (`pos1`,
  `pos3`) itself, from mid-scale (`POT_INIT` = 64 of `POT_STEPS` = 128)
  after reset. It never steps past either end.

**Freezing the gain.** Every wiper position has a slightly different stray
capacitance. Moving a pot therefore shifts the signal's phase, and that
shift would read as density. So the trigger freezes the gain. That means the
rising edge on `trig_in` or the command `T`. Any pulse already on the wire
finishes first. The gain then stays frozen until the computer sends `A`. The
intended use is to adjust the gain only before each shot and never during
it.

## Pins of `interferometer_fpga`

| pin | dir | meaning |
|---|---|---|
| `clk`, `rst_n` | in | 100 MHz clock, synchronous active-low reset |
| `ref_out` | out | 1 MHz reference to the modulation bandpass filter |
| `plasma_in` | in | logic plasma signal from the high-speed comparator |
| `win_lo_in`, `win_hi_in` | in | window comparator levels |
| `pot_inc[1:0]`, `pot_up` | out | step pulses and direction to the stage-1 and stage-3 pots |
| `trig_in` | in | shot trigger, rising edge |
| `uart_rxd`, `uart_txd` | in/out | to the USB-UART bridge |
| `locked`, `gain_frozen` | out | status: phase meter paired, gain frozen |

Parameters:

| parameter | default | meaning |
|---|---|---|
| `CLK_FREQ` | 100 MHz | clock frequency |
| `UART_BAUD` | 12 Mbit/s | UART line rate |
| `REF_FREQ` | 1 MHz | reference (modulation) frequency; `DIV` = `CLK_FREQ`/`REF_FREQ` = 100 clock cycles per period, so one count is 1/`DIV` of a fringe |
| `CW` | 32 | width of the fringe register |
| `TW` | 32 | width of the time stamp |
| `EVAL_CYCLES` | 1000 | gain evaluation window, in cycles |
| `POT_STEPS` | 128 | positions of each digital pot |
| `POT_INIT` | 64 | wiper position assumed after reset |
| `PULSE_CYCLES` | 50 | length of one pot step pulse, in cycles |

A faster clock with the same `REF_FREQ` gives a finer count and needs no
other change. A 1 GHz clock, for example, would count in 1/1000 of a fringe.

Shared constants, the command codes, the packet type and the CRC function
are in `rtl/interf_pkg.sv`. After coarse synthesis the whole design is about
280 flip-flops and 280 word-level cells.

## Following the description, and own choices

Taken from the published description:

* 100 MHz clock divided to a 1 MHz reference;
* rising edges of reference and plasma signal compared every 10 ns, giving
  1/100 fringe;
* edges tracked across any number of whole fringes;
* time counter incremented on each reference rising edge;
* time counter reset by a computer command or by the trigger;
* fringe count, time stamp and CRC bytes sent at 12 Mbit/s through a
  USB-UART bridge;
* one measurement every 5 µs;
* two window-comparator inputs;
* control pulses to the pots of stages 1 and 3;
* gain adjustment stopped by the trigger for the rest of the shot.

This design's own:

* how edges are paired (the balance counter) and the start-up rule;
* the input synchronisers and the 2-cycle offset they add;
* the 50 % duty cycle and the reset phase of the reference;
* the time-stamp width;
* CRC-16/CCITT-FALSE as the CRC;
* the six-byte packet with 16-bit fields and no sync byte;
* 8N1 framing (it makes six bytes take exactly 5 µs);
* the fractional baud generator;
* the command bytes, including `A` to re-arm the gain;
* the window-comparator line meanings;
* the gain window length, settling rule, step order between the pots,
  pulse interface, pot size and power-up position.

The published text describes the gain freeze only as "for the remainder of
each shot" and gives no end-of-shot signal. Re-arming on command is the
simplest closure of that.

The FPGA board's own peripherals are outside this RTL. So is the rest of the
instrument: the analog filters and amplifiers, the comparators, the digital
potentiometers, the microwave parts, the mirrors and the motion platforms.

## Simulation

Every testbench is self-checking. Each one ends by printing
`TB_RESULT checks=N failures=M` and carries its own watchdog. With Verilator
5 (`--timing`), run from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Irtl rtl/interf_pkg.sv \
          tb/tb_interferometer_fpga.sv --top-module tb_interferometer_fpga
./obj_dir/Vtb_interferometer_fpga
```

Replace the testbench name to run any other. Verilator finds the other
modules in `rtl/` by file name.

| testbench | what it shows |
|---|---|
| `tb_ref_gen` | 50/50 duty, one `ref_rise` per 100 cycles, the phase sequence, period 0 starting right after reset |
| `tb_phase_meter` | a 370-edge phase history with ramps of +3.5 and −6 fringes, crossing zero; every result exact; edges before lock ignored |
| `tb_time_counter` | random ticks and clears against a model, including wrap and clear-with-tick |
| `tb_gain_ctrl` | climb to the top in the stated pot order; fall to the bottom; closed-loop settling into the window; no step while frozen; resume after arm; at least 2 windows between steps |
| `tb_crc16` | the published check value and 200 random packets against a bit-serial model |
| `tb_uart_tx` | 120 back-to-back frames decoded by an ideal receiver; no gaps; 1200 bits in 100 µs ± 10 ns |
| `tb_uart_rx` | 100 frames at random clock phase and spacing; framing error; idle-line glitch |
| `tb_cmd_decoder` | all 256 byte values |
| `tb_packetizer` | byte order, CRC and snapshot timing against a stalling UART model |
| `tb_interferometer_fpga` | whole design, default parameters, 800 µs (see below) |
| `tb_workloads` | whole design, default parameters, 4.1 ms (see below) |

**`tb_interferometer_fpga`** works only through the pins. Around the design
it models:

* the plasma signal, driven from a known phase history;
* the amplifier as two wiper counters driven by the pot pins, with the window
  comparator behind it;
* both directions of the USB-UART bridge.

It checks that:

* every packet has a valid CRC and arrives 5 µs after the previous one;
* every time stamp is 5 more than the previous one, or restarts after `R`,
  the trigger pin or `T`;
* every fringe count equals a delay applied in the last 3 µs plus the
  2-cycle synchroniser offset;
* the gain climbs into the window, steps down when the signal gets stronger,
  does not move while frozen, and moves again after `A`.

It also checks that each of these mechanisms happened at least once, and
that the count went past one fringe and below zero.

**`tb_workloads`** runs the two phase histories the interferometer is
characterised with:

* **Fast transient.** A 720° shift in 10 µs, held, then reversed, so the
  plasma signal runs at about 0.83 MHz and then 1.25 MHz. The fringe
  register is checked 3 cycles after every plasma edge.
* **Shot.** A rise to 1.5·10^19 m^-3 (one fringe) over 2.5 ms, a 2 ms
  plateau with ±1 count of noise, and a fall. The plateau is cut from the
  real 200 ms to keep the run short. The plateau is reconstructed from the
  packets as a host would do it and must average to 100 counts.

How the parts of the design are trusted:

* **Checked against independent models.** The digital behaviour that the
  published description fixes: rates, counts, edge pairing and the streaming
  rate.
* **Consistent with the description, not with the authors' own code or
  hardware.** Everything listed above as this design's own. This covers the
  packet format, the command set and the gain-loop timing in particular.
  These are the first things to adapt to a real host program or a real
  potentiometer part.
* **Only as good as the models.** The analog models in the testbenches are
  idealised: clean comparator edges and a monotonic gain per wiper step.

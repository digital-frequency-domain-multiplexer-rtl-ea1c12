# Digital frequency-domain multiplexer (DfMUX) firmware in SystemVerilog

Large arrays of transition-edge-sensor bolometers for millimetre-wave
telescopes are read out by frequency-domain multiplexing. Each detector of a
module sits behind its own series LC resonator. One wire carries a comb of
sine-wave carriers (300 kHz to 1 MHz), and each resonator picks out one
carrier to bias its detector. The sky signal changes the detector's
resistance. This amplitude-modulates its carrier, so the signal appears in
sidebands a few hundred hertz wide around that carrier. All detector currents
are summed into one SQUID amplifier. A second, inverted comb (the *nuller*)
is injected at the SQUID input, where it cancels the large carriers and
leaves only the sidebands.

This RTL is the digital back end of such a system. For each module it
synthesizes the carrier comb and the nulling comb for two D/A converters. It
takes the SQUID output from an A/D converter and splits it into one
base-band I/Q stream per detector: every carrier is mixed down to DC,
decimated by about 10^5 (25 MHz to about 200 Hz) and low-pass filtered. The
results are queued in a FIFO for a processor. One FPGA board carries four
such modules.

```
            +------------- dfmux_module (x4 in dfmux_top) --------------+
 registers  |  dmfs (carrier) ---------------------------------> car_dac | -> D/A -> LC + bolometers
 (host bus) |  dmfs (nuller)  ---------------------------------> nul_dac | -> D/A -> SQUID input
            |                                                           |
     adc -->|  dmfd: per channel  sq_mixer -> cic_decimator ->          |
            |        fir_decim2 x6 -> freq_select  --> frame --> sync_fifo -> host
            +-----------------------------------------------------------+
```

## Clocking: one clock, one sample strobe

The converters run at 25 MHz. The logic runs at `MUX` times that rate (8 x
25 = 200 MHz by default). `dfmux_top` divides the clock down to a
one-clock-in-`MUX` strobe, `smp_en`. Every phase accumulator steps once per
strobe. The D/A words change once per strobe, and the A/D word is taken on
the strobe. The surrounding board must give the converters a 25 MHz clock
that is phase-aligned with `smp_en`.

The fast clock exists so that the synthesizers can share their sine tables.
There are no other clock domains. Carriers, nullers and mixers all run from
the same clock, so clock jitter is common to the bias and the demodulation.
The board `SYNC` register restarts every phase accumulator of every module on
the same strobe. This keeps each carrier, its nuller and its mixer locked to
one another, including after a frequency change.

## Synthesizer (`dmfs`)

Each carrier is a direct digital synthesizer built from these parts:

- a 32-bit phase accumulator, advanced by the carrier's frequency word on
  every sample. At 25 MHz one step of the word is 0.0058 Hz.
- a 32-bit phase-offset register, added to the accumulator.
- the top 16 bits of that sum, which address a 64K x 16-bit sine table.
  The table is 1 Mbit, computed at initialisation as
  `round(32767*sin(2*pi*a/65536))`.
- a 16-bit signed amplitude register that multiplies the sine. The 32-bit
  product keeps bits [30:13] as an 18-bit value.

The 18-bit products of all carriers are summed. The sum saturates at 18 bits
and drops 2 bits to make the 16-bit D/A word.

One sine table serves 8 carriers. In the 8 clocks of a sample period the
table is read for carrier 0, 1, ..., 7 of its group in turn. A 32-carrier
synthesizer therefore has 4 tables working in parallel, and one accumulator
collects all 32 products. `dac_out` updates 3 clocks after the last table
read of the period.

The amplitude is signed. The nuller is therefore a second `dmfs` with the
same frequency and phase and a negated amplitude. The
`tb_dfmux_module` and `tb_dfmux_top` testbenches show that this cancels the
carrier.

## Demodulator (`dmfd`, `dmfd_channel`)

Each channel is one pipeline, and there is one pipeline per carrier:

| stage | module | rate at 25 MHz | word |
|---|---|---|---|
| mixer | `sq_mixer` | 25 MHz | 15-bit I, Q |
| CIC, 6 stages, R = 2048 | `cic_decimator` | 12.2 kHz | 81 bits internally, 18 bits out |
| FIR #1 .. #6, 128 taps, decimate by 2 | `fir_decim2` | 6.1 kHz .. 191 Hz | 18 bits in, 32 bits out |
| output select | `freq_select` | one of the six | 32-bit I, Q |

**Square-wave mixer.** The mixer multiplies each A/D sample by +1 or -1, so
it needs no multiplier. For I the sign is the top bit of (accumulator +
offset). For Q it is the same bit taken a quarter turn earlier. A disabled
channel multiplies by 0. The accumulator steps by the carrier's own
frequency word, and the mixer keeps a separate phase offset to take up the
phase shift of the cold wiring. A square wave also responds to the odd
harmonics (3f, 5f, ...) of its frequency. A carrier that sits on an odd
harmonic of another channel therefore leaks into that channel. Plan the
carrier frequencies with this in mind.

**CIC.** The CIC has 6 integrators at 25 MHz and 6 combs at 12.2 kHz. Its
gain is 2048^6 = 2^66, so the registers are 15 + 66 = 81 bits wide. Wrap-around
arithmetic is exact in a CIC. The 81-bit result is reduced to 18 bits by
convergent rounding (round half to even) of its top bits. A constant mixer
output `x` comes out as `8x`. The combs share one subtractor, which does one
stage per clock.

**FIR chain.** Each `fir_decim2` holds 128 samples per rail. On every
second input it runs a single multiply-accumulate through the 128 taps,
which takes 131 clocks. The coefficients are a Kaiser-windowed sinc:

    h[n] = 2*fc*sinc(2*fc*(n-63.5)) * I0(13*sqrt(1-(n/63.5-1)^2)) / I0(13),   fc = 0.21

They are quantised to 25-bit signed words with DC gain 2^24. The testbench
evaluates the response of the taps and gets these results:

- pass band, up to 0.15 of the input rate: flat to 7e-7.
- stop band, from 0.25 of the input rate (the output Nyquist frequency):
  below -124 dB.

With 18-bit coefficients the stop band reached only about -82 dB,
which is why they are 25 bits wide. The 32-bit output has 14 fraction bits
below the input's unit. The next stage gets that value convergently rounded
back to 18 bits.

**Output select.** `rate_sel` (0 to 5) chooses which FIR's output goes to
the FIFO. Later stages are bypassed, which trades bandwidth for data rate.
The FIFO receives 6.1 kHz, 3.05 kHz, 1.53 kHz, 763 Hz, 381 Hz or 191 Hz.

**Frames.** All channels share strobe, reset, sync and `rate_sel`, so their
outputs arrive in the same clock. `dmfd` latches them and writes one frame
of `2*N_CH` words to the FIFO on consecutive clocks, in the order
`ch0 I, ch0 Q, ch1 I, ch1 Q, ...`. A frame never carries a header.

## Registers

`dfmux_top` has an 11-bit word-address bus:

- `host_we` writes on its clock edge.
- `host_rdata` is valid the clock after `host_re`.
- `host_addr[10] = 1` selects the board registers.
- Otherwise `host_addr[9:8]` selects a module and `host_addr[7:0]` a
  register in it.

The map is in `rtl/dfmux_pkg.sv`:

| offset | register |
|---|---|
| 0x00 + ch | carrier frequency word (32 bits) |
| 0x20 + ch | carrier phase offset |
| 0x40 + ch | carrier amplitude (signed 16 bits) |
| 0x60, 0x80, 0xA0 + ch | nuller frequency, phase, amplitude |
| 0xC0 + ch | mixer phase offset (mixer frequency = carrier frequency) |
| 0xE0 | control: [8:6] rate select, [5:4] carrier gain, [3:2] nuller gain, [1:0] A/D gain |
| 0xE1 | channel enable mask |
| 0xE2 | FIFO data (a read removes the word) |
| 0xE3 | FIFO status: [15:0] count, [16] overflow (write 1 to clear), [17] filter overrun |
| board 0x00 | sync: restart all phase accumulators at the next sample |
| board 0x01 | watchdog kick |
| board 0x02 | identification: {modules, channels} |

The gain fields drive the 2-bit gain selects of the analog amplifiers through
ports. Every register resets to zero, which leaves all carriers silent, all
mixers off and FIR #1 selected. A typical start-up goes as follows:

1. Write the frequency words and amplitudes.
2. Enable the channels.
3. Write `SYNC`.
4. Adjust the nuller amplitudes and phases until the carriers cancel.
5. Adjust the mixer phases.
6. Read whole frames from the FIFO.

If the FIFO fills up, new words are dropped and the overflow bit is set.
`proc_rst` pulses for 64 clocks when no kick has arrived for 2^28 clocks
(1.3 s).

## How far it follows the published design

These parts come from the published description:

- four modules per board, each with a carrier synthesizer, a nuller
  synthesizer and a demodulator feeding a FIFO.
- up to 32 carriers per module.
- 32-bit phase and offset registers, the 16-bit table address and word, the
  16-bit amplitude, the truncations to 18 and 16 bits, and 8 carriers per
  sine table.
- the 14-bit A/D, and the mixer applying +1, -1 or 0.
- the CIC's decimation of 2048 and its 81-bit output, truncated convergently
  to 18 bits.
- six 128-tap decimate-by-two FIRs aiming at 120 dB of stop band, with a MAC.
- the software-selectable output rate, and a FIFO read by the processor.
- one clock shared by the whole system.

The following were not specified and are this design's own choices:

- the time-shared sine tables and the 200 MHz clock.
- signed amplitudes, which make the nulling comb.
- which bits the truncations keep, and the saturation of the carrier sum.
- the mixer's sign convention, and 0 meaning a disabled channel.
- the number of CIC stages. Six follows from the 81-bit width with a 15-bit
  input.
- the FIR coefficients and their 25-bit width.
- the 32-bit FIR outputs and FIFO words, the frame format, FIFO depth and
  overflow behaviour.
- the register map, host bus, sync command and watchdog details.

Limits to keep in mind:

- Every channel has its own six FIR engines. With one multiplier per rail that is 1536 multipliers for a full board, which
  is more than an FPGA of that class holds. A practical build would
  time-share one MAC per FIR stage across the channels of a module. The
  filters have ample time for it (about 32 000 clocks per output).
- The sine tables are full-period (1 Mbit each, 4 per synthesizer). Quarter-
  wave symmetry would cut this by four.
- Processor, Ethernet, memory, timestamp decoding, housekeeping and the SQUID
  controller link are not part of this RTL. The bus, the converter words and
  the gain selects are the ports where they would attach.

## Files

| file | contents |
|---|---|
| `rtl/dfmux_pkg.sv` | widths, register map, control-word struct |
| `rtl/sine_lut.sv` | 64K x 16 sine table |
| `rtl/dmfs.sv` | multi-carrier synthesizer |
| `rtl/sq_mixer.sv` | square-wave quadrature mixer |
| `rtl/cic_decimator.sv` | CIC decimator with convergent truncation |
| `rtl/fir_decim2.sv` | 128-tap decimate-by-2 FIR with one MAC per rail |
| `rtl/freq_select.sv` | output-stage selector |
| `rtl/dmfd_channel.sv` | one channel's pipeline |
| `rtl/dmfd.sv` | all channels of a module plus frame collector |
| `rtl/sync_fifo.sv` | output FIFO |
| `rtl/dfmux_module.sv` | one module with its registers |
| `rtl/watchdog.sv` | processor watchdog |
| `rtl/dfmux_top.sv` | the board: four modules, strobe, sync, bus |

Every `rtl/X.sv` has a self-checking testbench `tb/tb_X.sv`. Each testbench
prints `TB_RESULT checks=N failures=M` and stops itself after a fixed number
of clocks. The block testbenches use small filters (3-stage 8x CIC, 8-tap
FIRs) so that they finish in seconds:

- `tb_dfmux_top` runs the whole board at that reduced size. It counts each
  mechanism: demodulation, table sharing, disabled channels, nulling, sync,
  rate switching, FIFO overflow and watchdog reset.
- `tb_dfmux_full` runs the board at its full size with default parameters.
  It demodulates a 500 kHz carrier through the 2048x CIC and the 128-tap
  FIR #1, then checks the frame timing (one frame per 32 768 clocks), the
  magnitude and the nulling. It simulates 2.3 million clocks (11.5 ms of
  board time), which takes about six minutes in Verilator.

To simulate with Verilator:

    verilator --binary --timing -Irtl -y rtl -y tb rtl/dfmux_pkg.sv tb/tb_dfmux_top.sv --top-module tb_dfmux_top
    ./obj_dir/Vtb_dfmux_top

For another block, use its own testbench file and `--top-module` name in
both lines.

Each testbench compares the block with a model computed independently of the
RTL. That model is a direct convolution for the CIC and the FIRs, a
queue-based model for the FIFO, and a sample-by-sample recomputation of
sine, products and truncations for the synthesizer. The demodulated
magnitudes are checked against `A * 2/pi * 8 * 2^14 * (FIR DC gain)`, where
`A` is the carrier amplitude at the A/D.

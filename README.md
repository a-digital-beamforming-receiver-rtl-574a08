# Digital beamforming receiver with the beamformer ahead of the down-converter

A conventional digital beamforming receiver down-converts and low-pass filters
every antenna channel on its own, then weights and sums the channels. This
design turns the order around. The four real, under-sampled IF channels are
combined into one complex beam first. Only that single complex stream is then
mixed to baseband and filtered. The mixer and the filter are the costly stages,
and they no longer grow with the number of antennas: adding channels adds
only beamformer multipliers.

This RTL is a SystemVerilog model of that receiver's FPGA data path. The
target is a quad-channel 12-bit ADC sampling at 1.6 GSps. Its samples reach the
FPGA over a multi-lane serial link that delivers 8 samples per channel on
every 200 MHz clock. The RTL starts at the output of that link's receiver and
ends with the filtered I/Q beam. It also includes the two test aids used to
validate the receiver on the bench:

- an on-chip RAM that can replace the ADC data with stored four-channel waveforms;
- a capture RAM whose contents are read out to a PC over a UART.

## The signal chain

```
 ESIstream RX  4 ch x 8 x 12 bit ─┐
                                  ├─ mux ─► digital_beamformer ─► ddc_fs4 ─► fir_lpf ─► out_i/out_q
 stimulus_ram  4 ch x 8 x 12 bit ─┘         Re, Im 8 x 20 bit    I', Q'      I, Q 8 x 36 bit  │
                                                                  8 x 20 bit                  └─► debug_capture ─► UART
                     dbf_regs: weights, window, FIR coefficients, test controls (register bus)
```

| stage | per clock (200 MHz) | arithmetic | multipliers |
|---|---|---|---|
| beamformer | 4 × 8 real samples in, 8 complex out | Σ s·cos φ, Σ s·sin φ, 26-bit sums, 20-bit window | 64 |
| fs/4 down-converter | 8 complex in, 8 complex out | lane swap and negation only | 0 |
| FIR low-pass | 8 I + 8 Q in, 8 I + 8 Q out | 64 taps, 10-bit coefficients, 36-bit result | 1024 |

The widths and multiplier counts match those of the published implementation:
12-bit samples and weights, a 20-bit beam, 20-bit down-converter outputs, 64
taps of 10 bits and 36-bit filter outputs. It used 64 DSP slices for the
beamformer and 1024 multipliers for the filter.

Everything runs in one clock domain. The `clk` port is the 200 MHz processing
clock, and `rst_n` is an asynchronous, active-low reset. Every stage takes a
`valid` flag with its data. A word without `valid` is ignored and leaves no
trace in any state, so the stream may have gaps.

## Eight samples per clock

Each channel runs at 1.6 GSps, while the logic runs at 200 MHz. Each bus
therefore carries 8 consecutive samples per clock. Lane 0 holds the oldest
sample. Sample `n` of the stream is lane `n mod 8` of word `n / 8`. The whole
design relies on this convention:

- The beamformer works lane by lane. Each lane is an independent
  multiply-and-sum over the four channels.
- The down-converter needs `n mod 4`. Since 8 is a multiple of 4, lane `p`
  always has phase `p mod 4`. For other lane counts a small phase counter
  tracks the offset of lane 0. It advances only on valid words.
- The filter needs the 63 samples that precede each output. They reach back
  across up to eight earlier words, so the filter keeps a 64-sample delay line
  (see below).

## Beamformer and the truncation window

For each lane `p` the beamformer computes

```
y_re[p] = Σ_ch s[ch][p] · cos φ_ch        y_im[p] = Σ_ch s[ch][p] · sin φ_ch
```

`cos φ` and `sin φ` are signed 12-bit register values, with 1.0 ≈ 2047. The sum
is exact: a 24-bit product plus 2 bits of growth for four channels gives 26 bits.
A 20-bit window of this sum is passed on. The window register (`win_lsb`) gives
the index of the lowest bit kept.

- The reset value 6 keeps the 20 most significant bits. This loses nothing
  but 6 LSBs and can never overflow.
- Smaller values gain resolution for weak signals. Bits above the window are
  then simply dropped, so a strong signal wraps around. This is truncation,
  with no saturation.
- Values above 6 are clamped to 6.

With `N_CH` channels the sum is `24 + log2(N_CH)` bits wide. The top then
resets the window to the 20 MSBs of that width (8 for 16 channels).

## Down-conversion by fs/4

The IF is placed at exactly a quarter of the sample rate (400 MHz at
1.6 GSps). The local oscillator samples are then `cos(πn/2) = 1, 0, −1, 0` and
`sin(πn/2) = 0, 1, 0, −1`. The complex mix

```
I'[n] =  Re·cos(πn/2) + Im·sin(πn/2)
Q'[n] = −Re·sin(πn/2) + Im·cos(πn/2)
```

reduces to picking and negating:

| n mod 4 | I' | Q' |
|---|---|---|
| 0 | Re | Im |
| 1 | Im | −Re |
| 2 | −Re | −Im |
| 3 | −Im | Re |

Negation saturates: −(−2^19) becomes 2^19 − 1, so the output stays 20 bits.
The outputs are registered. That is 8 lanes × 2 × 20 = 320 flip-flops, and no
multipliers.

The beam is complex. The channel signal from the steered direction lands at
+fs/4 and is moved to 0 Hz. What remains of the other sideband lands near
fs/2, where the low-pass filter removes it.

## The parallel FIR filter

```
I[n] = Σ_{t=0}^{63} c[t] · I'[n − t]        (Q the same, same coefficients)
```

`c[0]` weights the newest sample. The filter keeps the last 64 input samples
(8 words) in a delay line. Together with the incoming word this forms a
72-sample line. Output lane `p` uses line entries `64 + p − t`, so all 8
outputs of a word are computed in the same clock. This takes 8 × 64
multipliers per rail. The delay line shifts by one word on each valid input
word. The sums are exact: 20 + 10 + log2(64) = 36 bits, so nothing is rounded.
One coefficient set serves both rails. The coefficients reset to zero, and
the filter outputs zero until they are loaded.

## Latency and rate

Each of the three stages adds one register, so a word accepted at `esi_data`
appears at `out_i/out_q` three clocks later. From the stimulus RAM add one
clock for its registered read. All stages accept one word per clock with no
back-pressure.

## Registers

The register bus is synchronous:

- `cfg_we`, a 16-bit `cfg_addr` and a 32-bit `cfg_wdata` write on the rising edge.
- `cfg_rdata` is a combinational read of `cfg_addr`.
- Signed fields read back sign-extended.

| address | field | reset |
|---|---|---|
| 0x0100 + 2·ch | cos φ_ch, 12-bit signed | 2047 |
| 0x0101 + 2·ch | sin φ_ch, 12-bit signed | 0 |
| 0x0010 | beam window LSB, 5 bits | 6 (20 MSBs) |
| 0x0011 | source: 0 = serial-link samples, 1 = stimulus RAM | 0 |
| 0x0012 | write bit 0 = 1: start a debug capture; read bit 0: capture busy | – |
| 0x0013 | number of words to capture (1…512) | 512 |
| 0x0014 | stimulus loop length in words (0 = all 256) | 256 |
| 0x0040 + t | FIR coefficient t, 10-bit signed | 0 |
| 0x8000 + 2048·ch + i | stimulus sample i of channel ch (write only) | – |

With the reset weights (cos = 1, sin = 0 on every channel) the beam points
broadside.

## Test aids

**Stimulus RAM.** This holds up to 2048 samples per channel: 256 words per
channel, 4 × 2048 × 12 bits in total. The RAM is written one sample at a time.
While the source register is 1 it plays one word per clock, looping over the
first `loop length` words. A loop of 200 words holds exactly one 1 µs period
of a 1 MHz modulation at 1.6 GSps.

**Debug capture.** A start command arms the block. It then stores the next
`len` valid output words (8 I + 8 Q samples of 36 bits each) at full rate,
reads them back in order and sends them over the UART:

- 8N1 framing, least significant bit first, 115200 baud at 200 MHz
  (`CLKS_PER_BIT = 1736`);
- each sample is sign-extended to 5 bytes and sent least significant byte first;
- within a word the order is I[0], Q[0], I[1], Q[1], …, I[7], Q[7].

Each byte takes 10·CLKS_PER_BIT + 1 clocks. `cap_busy` stays high until the
last stop bit has been sent.

## What follows the source design and what does not

Taken from the published design:

- the order of the stages;
- the four channels and 8 samples per 200 MHz clock;
- all data widths;
- the 20-bit window that defaults to the MSBs;
- the fs/4 mixer by sign inversion;
- 64 taps with one coefficient set for I and Q;
- weights and coefficients held in registers;
- a RAM of stored test waveforms;
- a capture RAM read out over a UART.

This design's own choices, because the source is silent on them:

- the valid flags;
- the meaning of the window register (index of the lowest bit kept) and its clamp;
- the register bus, its addresses and all reset values;
- saturation of the one negation that overflows;
- the pipeline depth of one register per stage;
- the size and loop control of the stimulus RAM;
- the capture depth (512 words), start/length control and byte format;
- the UART rate.

The coefficient values of the published filter are not known. The testbenches
load Hamming-windowed sinc low-pass filters instead.

The figure of the published filter labels the I and Q coefficients
separately. Its text says the same coefficients are applied to both. This
design follows the text.

Not included are the parts the design takes from vendors or that have no
logic function:

- the antenna array and RF front end;
- the ADC;
- the clock PLL;
- the FPGA's serial transceivers and clock manager;
- the serial-link (ESIstream) receiver core;
- the PC-side register access.

The receiver core's output enters as `esi_valid`/`esi_data`. The register bus
is brought out as ports.

## Scaling the channel count

`N_CH` on `dbf_receiver_top` sets the number of antenna channels. Changing it
changes only the beamformer, which has 16·N_CH multipliers, and the width of
its internal sum. The register map has room for 128 weight pairs and 16
stimulus channels. The down-converter and the filter are unchanged, and this
is the point of the architecture.

## Files

| file | contents |
|---|---|
| `rtl/dbf_pkg.sv` | sizes, register addresses, weight type |
| `rtl/digital_beamformer.sv` | weighting, channel sums, window |
| `rtl/ddc_fs4.sv` | fs/4 complex down-converter |
| `rtl/fir_lpf.sv` | 64-tap, 8-lane FIR for I and Q |
| `rtl/dbf_regs.sv` | register file |
| `rtl/stimulus_ram.sv` | stored test waveforms |
| `rtl/debug_capture.sv`, `rtl/uart_tx.sv` | capture RAM and UART read-out |
| `rtl/dbf_receiver_top.sv` | the complete receiver |
| `tb/tb_*.sv` | self-checking testbenches, one per module, plus the workloads below |
| `tb/uart_rx_model.sv` | behavioural UART receiver used by the testbenches |

## Simulating

Each testbench is self-checking. It ends by printing
`TB_RESULT checks=N failures=M`. For example, with Verilator 5:

```
verilator --binary --timing --assert -Irtl -Itb rtl/dbf_pkg.sv tb/tb_dbf_receiver_top.sv --top-module tb_dbf_receiver_top
./obj_dir/Vtb_dbf_receiver_top
```

Replace the testbench name to run any other. Verilator finds the other
modules through `-Irtl -Itb`.

- `tb_digital_beamformer`, `tb_ddc_fs4`, `tb_fir_lpf`: compare every output
  lane with integer reference arithmetic, and check the one-clock latency.
  The inputs include random data, extreme codes, window positions and gaps in
  `valid`. The FIR bench also checks impulse responses and full-scale inputs.
- `tb_dbf_regs`, `tb_stimulus_ram`, `tb_uart_tx`, `tb_debug_capture`: cover
  the register map and the test aids, including the UART byte stream decoded
  back into samples.
- `tb_dbf_receiver_top`: the complete receiver at its default sizes, including
  the real baud rate. An independent model predicts every output word, and the
  bench checks it and the 3-clock latency. It also checks:
  - gaps in the stream;
  - window changes;
  - a forced negation saturation;
  - re-steering;
  - switching to and from the looping stimulus RAM;
  - a capture read out over the UART.

  It needs about half a minute.
- `tb_workload_signals` runs two signal scenarios at the default sizes:
  - **FM beam.** An FM signal on the 400 MHz IF (1 MHz tone, ±100 MHz
    deviation) arrives at 10° on a half-wavelength 4-element array and plays
    from the stimulus RAM. The baseband beam swings between −100.4 and
    +100.3 MHz with constant magnitude. Steering the weights 50° away lowers
    its power 17.6 times.
  - **IQ-modulated carrier.** I = 30 MHz and Q = 5 MHz tones on the IF come
    out separated on the I and Q outputs.
- `tb_workload_16ch`: builds the receiver with 16 channels. It checks the
  wider window default, the steering rejection (about 237×) and the coherent
  gain of 16.

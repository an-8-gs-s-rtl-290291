# Real-time broadband mismatch correction for an 8 GS/s two-ADC digitizer

Two 12-bit 4 GS/s ADCs sample the same analog input on clocks 180 degrees apart. Together
they give an 8 GS/s waveform digitizer. The two converters never match exactly. They differ
in offset, in gain, and in sampling instant (time skew). Gain and skew also change with
input frequency, because the analog paths in front of the two ADCs differ. Uncorrected,
these errors fold spurious images into the spectrum and the effective resolution drops
far below the 12 bits of one ADC.

The correction here is a single fixed digital filter that is valid over the whole band.
Each ADC gets its own 80-tap FIR filter, applied to its samples after they are up-sampled
into the 8 GS/s grid. The outputs of the two filters are added:

    y[m] = sum_{t=0}^{79} h_{a(m-t)}[t] * (x[m-t] - off_{a(m-t)}),   a(j) = j mod 2

where x is the interleaved 8 GS/s stream, sample j comes from ADC a(j), `h_0` (called C)
and `h_1` (called D) are the two coefficient sets, and `off_a` is the offset of ADC a.
The coefficients are computed off line. The two ADCs' gain and skew are calibrated at many
frequencies. The 2x2 perfect-reconstruction system is solved at each frequency. The
filters are then obtained from an inverse DFT of the solutions. That calculation is not
hardware and is not part of this RTL. The RTL loads the coefficients through a register
bus and applies them in real time.

The hard part is the rate. An 8 GS/s filter cannot run at 8 GHz, so everything runs at
the 200 MHz JESD204B link clock, 40 samples at a time.

## Data path

```
 ADC1 --JESD204B--> [receiver core] --half frames--> frame_repack --20 samples-\
                                                                               interleave --40 ch--> mismatch_corrector --> out_y (40 samples/clk)
 ADC2 --JESD204B--> [receiver core] --half frames--> frame_repack --20 samples-/                          ^                       |
            ^  SYNC_N                                                                           coef_regfile (host bus)      capture_buffer --> host read
            +------------------- sync_n_gen <-- core sync requests
```

Modules in `rtl/`:

| module | role |
|---|---|
| `tiadc_pkg` | shared constants (2 ADCs, 40 channels, 8 lanes, 80 taps, widths) and types |
| `sync_n_gen` | one SYNC_N for both ADC links |
| `frame_repack` | disassembles a JESD204B frame of one ADC into 20-sample words |
| `polyphase_filter` | one two-tap branch, `C_r*x[k] + C_(r+40)*x[k-1]` |
| `correction_channel` | one of 40 channels: offset, 5-way fan-out, 40 polyphase branches |
| `adder_tree` | pipelined sum of the 40 channel contributions to one output phase |
| `mismatch_corrector` | 40 channels + 40 adder trees + rounding, saturation, bypass |
| `coef_regfile` | two 80-tap coefficient sets and two offsets, host-writable |
| `capture_buffer` | post-trigger record memory for the corrected stream |
| `tiadc_top` | everything above, wired together |

The JESD204B receiver cores (PHY and MAC) are not part of the RTL. Neither are the
transceiver reset controller, the FPGA PLL, the USB link to the host, or any board-level
analog or clock circuit. Their signals are ports of `tiadc_top`. `clk` is the 200 MHz
link clock.

## JESD204B frames and repackaging

Each ADC sends 48 Gb/s over 8 lanes. A frame is 8 octets per lane. Lane `l` carries five
12-bit samples back to back, MSB first:

| lane | bits 0-11 | 12-23 | 24-35 | 36-47 | 48-59 | 60-63 |
|---|---|---|---|---|---|---|
| 0 | S0 | S8 | S16 | S24 | S32 | 0000 |
| 1 | S1 | S9 | S17 | S25 | S33 | 0000 |
| ... | | | | | | |
| 7 | S7 | S15 | S23 | S31 | S39 | 0000 |

So one frame holds 40 consecutive samples of one ADC. The receiver core delivers it in two
link clocks. The first carries octets B0-B3 of every lane (`rx_sof` high). The second
carries B4-B7. On the `rx_data[j][l]` port, `j` is the octet within the half frame and
`l` is the lane.

Samples S16-S23 straddle the two halves (bits 24-35 cross the octet 3/4 boundary).
`frame_repack` therefore holds the first half in a register until the second half
arrives. It then cuts the whole frame into samples and sends S0-S19 on that clock and
S20-S39 on the next. A continuous input thus gives a continuous output of 20 samples per
clock, two clocks after the corresponding input. The four tail bits of each lane must be
zero. `frame_err` flags a frame that breaks this, and also a second half that arrives
without a first half.

`tiadc_top` interleaves the two ADCs' words into 40 channels. ADC1 sample k goes to
channel 2k and ADC2 sample k to channel 2k+1. Channel c of the block on clock n is then
sample `40n + c` of the 8 GS/s stream. `align_err` is raised when the two links do not
deliver the same half frame on the same clock. That happens if SYNC_N/SYSREF alignment
failed.

`sync_n_gen` ANDs the active-low sync requests of the two cores into the single SYNC_N
sent to both ADCs. So both links leave code-group synchronisation together, and any
re-synchronisation request restarts both.

## The parallel correction filter

### From one 8 GS/s filter to 40 channels

Take one channel `c` with samples `x_c[k] = x[40k + c]`. In the reference picture the
channel is offset-corrected, up-sampled by 40 (39 zeros inserted), filtered with its
ADC's 80-tap FIR and delayed by `c` samples. Then all 40 channels are summed. After
up-sampling by 40, an 80-tap filter sees at most two non-zero inputs per output. So
output phase `p` of block `k` gets this from channel `c`:

    r = (p - c) mod 40
    contribution = h[r] * x_c[k - d] + h[r + 40] * x_c[k - d - 1],   d = 1 if p < c else 0

This means each channel needs 40 two-tap filters, one per phase `r`, each using the
coefficient pair (C_r, C_(r+40)). Each output phase sums one contribution from every
channel. That makes 80 multiplications per output sample and 3200 per clock.

### Fan-out

A direct implementation would fan every channel out to 40 consumers. Instead, each
channel's offset-corrected sample is first copied into 5 branch registers. Branch `b`
feeds the 8 polyphase filters of phases `r = b, b+5, ..., b+35`. Branch 0 of channel 0
therefore holds the pairs (C0,C40), (C5,C45), ..., (C35,C75). The 40x40 filter matrix
is split into five 8x40 sub-matrices, one per branch. This bounds the fan-out of each
register to 8 multipliers.

### Wrapped phases

Phase `r` of channel `c` lands on output sample `40k + c + r`. When `c + r >= 40`, that
sample belongs to the next block (`p = c + r - 40`, the `d = 1` case above). The filter
result is therefore ready one block early. It is delayed by one clock (a `z^-1`) so that
all 40 contributions a channel emits on a clock belong to the same output block. No other
alignment is needed, because every channel has the same pipeline depth.

### Summation, rounding, bypass

`mismatch_corrector` transposes the 40x40 contributions so that each output phase gets
its 40 terms. One `adder_tree` per phase adds them. The sum has 16 fractional bits from
the coefficients. It is rounded (half up), shifted, and saturated to 12 bits. With
`corr_en` low, the raw interleaved samples are output instead. They are delayed by the
same 12 clocks, so the two outputs can be compared directly. `corr_en` travels with the
data, so a switch takes effect on a block boundary.

### Numbers

| quantity | value | origin |
|---|---|---|
| ADCs / rate | 2 x 4 GS/s, 12 bit | paper |
| channels x link clock | 40 x 200 MHz | paper |
| taps per ADC | 80 | paper |
| fan-out | 5 branches x 8 polyphase filters | paper |
| coefficient | 18 bit, 16 fractional (range -2..+2) | own (paper: "more than 16 bits" suffices) |
| offset | 12 bit per ADC | own |
| products / partial sums | 31 bit / 32 bit per branch, 38 bit per output | own (full precision) |
| output | 12 bit, rounded, saturated | own |
| latency, corrector | 12 clocks (offset 1, fan-out 1, filter 2, tree 7, round 1) | own |
| latency, frame first half -> first corrected block | 14 clocks | own |
| record memory | 32768 blocks x 480 bit | own |

## Register map (`coef_regfile`)

| address | content |
|---|---|
| `0x000 + t` (t = 0..79) | C_t, coefficient t of ADC1 (even channels) |
| `0x080 + t` | D_t, coefficient t of ADC2 (odd channels) |
| `0x100` | offset of ADC1 |
| `0x101` | offset of ADC2 |

Data are the low 18 (or 12) bits of the 32-bit write word, in two's complement. Reads
return the sign-extended value one clock later. Other addresses read 0 and ignore writes.
After reset both sets are a pure delay: 1.0 at tap 40, 0 elsewhere. The offsets are 0.
So the corrector is transparent until it is calibrated.

## Record memory (`capture_buffer`)

`cap_arm`, then `cap_trig`, records the next 32768 valid corrected blocks. That is
1.31 M samples, or 164 us at 8 GS/s. The first block written is the one on `out_y`
when the trigger is seen. `cap_done` then rises. Word `a` holds block `a`, with sample
`p` in bits `[12p +: 12]`. The host reads words through `cap_rd_addr`/`cap_rd_data`
with one clock of latency. The host link itself is not part of the RTL.

## What follows the source design and what does not

These parts follow the published design: the two-ADC 180-degree interleave, the 8-lane
frame layout, the two-period delivery and 20-sample words, the ADC-to-channel
assignment, the 40 channels at 200 MHz, the offset-then-filter order, the two 80-tap
coefficient sets (C and D), the pairing of taps r and r+40, the 5 x 8 fan-out, the
delay on wrapped phases, and the final sum.

These are this design's own choices:

* the receiver-core handshake (`rx_valid`, `rx_sof`);
* two's-complement sample format and MSB-first bit order;
* all word widths, rounding and saturation;
* the pipeline depth;
* the raw bypass;
* the register bus and reset values;
* the error flags;
* the `link_up` qualifier;
* the record memory and its depth.

The source describes the data buffer only by name.

Known departures and limits:

* The source gives the receiver output as 480 bits per frame (240 per link clock). Its
  frame drawing shows 4 octets of 8 lanes (256 bits) per clock. The RTL takes the
  256-bit form, tail bits included.
* One offset per ADC is used. The drawings show an offset input per channel.
* The 16 zero bits that pad each repackaged 256-bit word in the source's drawing are
  not carried; samples are passed as arrays.
* The calibration and the coefficient calculation are off-line steps and are not
  implemented.
* The resource figures of the original FPGA build (1280 DSP blocks for 3200
  multiplications per clock) suggest multiplier packing or sharing. This RTL writes out
  all 3200 multiplications.

## Simulating

Every module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M`. `tb/tb_tiadc_pkg.sv` holds the helpers: JESD204B frame
packing, and the rounding of the reference filter. For example:

```
verilator --binary --timing --assert -Wno-fatal -Irtl -Itb -y rtl -y tb +libext+.sv \
    --top-module tb_tiadc_top rtl/tiadc_pkg.sv tb/tb_tiadc_pkg.sv tb/tb_tiadc_top.sv
obj_dir/Vtb_tiadc_top
```

* `tb_mismatch_corrector` compares the full 40-channel corrector with the 8 GS/s
  direct-form equation above. It uses random coefficients, offsets and samples, and
  includes a bypass stretch and a saturating stretch. It also checks the 12-clock
  latency.
* `tb_tiadc_top` runs the whole design at its default sizes. It brings up the links
  through SYNC_N and loads both coefficient sets over the bus. It then streams 16,500
  frames per ADC (a 648 MHz-like sine with gain, skew and offset differences, plus a
  full-scale stretch) and checks all 1.3 M output samples against the reference. It
  switches the correction off and on again, fills the 32768-block record and reads part
  of it back, and provokes `frame_err` and `align_err`. It counts every one of these
  mechanisms. It runs in a few seconds after a roughly 30-second build.
* Unit testbenches cover `frame_repack` (layout, two-clock latency, errors),
  `correction_channel` (channels 0 and 37, the latter with 37 wrapped phases),
  `polyphase_filter`, `adder_tree`, `coef_regfile`, `sync_n_gen` and `capture_buffer`.

The testbenches use random coefficients around an identity filter, not calibrated ones.
They verify that the hardware computes the filter equation exactly. They do not verify
that a given coefficient set corrects a given ADC pair, which depends on the off-line
calibration.

## Changing it

Sizes live in `tiadc_pkg`. `N_CH` must be a multiple of `N_FAN` and of `N_ADC`.
`N_TAPS` must be `2 * N_CH` (two taps per polyphase branch). Changing that ratio means
changing `polyphase_filter` and the wrap logic in `correction_channel`. Coefficient
precision is `COEF_W`/`COEF_FRAC`. The output width is `OUT_W`. The record depth is the
`CAP_DEPTH` parameter of `tiadc_top`.

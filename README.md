# PRATUSH digital correlation spectrometer: FPGA signal processing in SystemVerilog

PRATUSH is a proposed radiometer for the sky-averaged 21-cm signal. Its
laboratory digital receiver takes two analog inputs, the two outputs of a
phase-switched analog receiver. It measures their power spectra and their
cross spectrum over 16384 channels from 0 to 125 MHz. A single-board computer
collects the spectra over Gigabit Ethernet. This RTL is the FPGA half of that
receiver, an FX correlator:

- The F stage turns each 16384-sample frame of each input into a spectrum.
- The X stage multiplies the two spectra channel by channel. It sums the
  self-power and cross-power products over 2048 frames (134 ms).
- The result goes out as UDP packets.

Acquisition is start-stop: a rising edge on the start line from the host
produces 16 integrated spectra, and then the firmware waits. The host
software steps the analog receiver through its six calibration states
between starts.

The FFT cores themselves are vendor IP in the original firmware, so they are
not in this RTL. The top module sends the windowed samples out on ports and
takes the FFT results back in. A behavioural FFT model (`tb/fft_model.sv`)
closes that loop in simulation.

## Data path

```
ADC1 ─ iserdes_1to2 ─┬─ input_memory (even) ─┐                 ┌─ FFT N (even) ─┐
     250 Msps, 10 b  └─ input_memory (odd)  ─┴ nuttall_window ┤                ├ twiddle_mult ─ fft2_parallel ─┐
                          125 MHz, 2 lanes                    └─ FFT N (odd)  ─┘   (W^k O[k])   (E±WO, 18 b)   │
ADC2 ─ same chain ───────────────────────────────────────────────────────────────────────────────────────────────┤
                                                                                                                 │
                 acq_controller ── cfg (acc/first/last/page) ──► xengine ─► output_buffer ─► udp_eth_tx ─► GMII
                 (start line, 16 spectra)                       |X1|²,|X2|²,X1·X2*   2 pages      64 ch/packet
                                                                48-bit, 2048 frames
```

| Module | Role |
|---|---|
| `dcs_pkg` | Widths, the spectrum word (`spec_word_t`), the per-frame control word (`frame_cfg_t`), the packet marker and trailer, and CRC-32. |
| `iserdes_1to2` | Deserialises 250 Msps samples into (even, odd) pairs on the 125 MHz fabric clock. |
| `input_memory` | A two-page frame buffer per lane. It replays each complete N-sample frame without gaps, with its sample index. |
| `nuttall_window` | The 4-term window table and two multipliers: even and odd samples of the 2N-sample frame. |
| `twiddle_mult` | Twiddle table and complex multiplier that rotate the odd-lane FFT by W^k. |
| `fft2_parallel` | 2-point butterfly giving channels k and k+N. It rounds and saturates to 18 bits. |
| `xengine` | Self and cross products, and 2×N accumulators of four 48-bit sums. |
| `output_buffer` | Two pages of finished spectra, so one can be sent while the next is written. |
| `udp_eth_tx` | Ethernet/IPv4/UDP framing of the spectra on a GMII byte interface. |
| `acq_controller` | Start-stop sequencing, integration boundaries, page hand-over, and stall counting. |
| `pratush_dcs_top` | Wiring. The FFT streams are ports. |

Everything runs on one 125 MHz clock (`clk`), except the first flop stage of
the deserialiser, which runs on the 250 MHz sample clock (`clk_adc`). The two
clocks must have aligned rising edges, as when both come from one clock
manager.

## The split FFT

The spectrometer needs a 2N = 16384-point transform of a real 250 Msps
stream. The 125 MHz fabric can accept only two samples per clock. The F stage
therefore uses two N = 8192-point streaming FFTs per input, joined by one
radix-2 step. The split used here is decimation in time:

- The deserialiser already separates even samples x[2n] from odd samples
  x[2n+1]. Each lane gets its own input memory and its own FFT, giving E[k]
  and O[k], k = 0..N-1.
- The 2N-point spectrum is then
  `X[k] = E[k] + W^k O[k]` and `X[k+N] = E[k] − W^k O[k]`,
  with `W = exp(−jπ/N)`.
- `twiddle_mult` forms W^k O[k]. It also delays E[k] by the same two cycles.
  `fft2_parallel` forms the sum and the difference. Each clock it therefore
  produces two channels: k in the lower half and k+N in the upper half.

The window has to be applied over the whole 2N-sample frame, not per lane.
`nuttall_window` therefore holds two tables, w(2n) and w(2n+1), indexed by
the pair number n. The window is the 4-term Blackman-Nuttall set
(0.3635819, 0.4891775, 0.1365995, 0.0106411), in its periodic form over 2N
points. Its first sidelobe is about 98 dB down, which is the suppression the
original design reports.

The original block diagram draws a twiddle multiplier after both FFTs of an
input. In a decimation-in-time split the even branch is multiplied by 1, so
here that branch is only a delay.

All tables are computed during elaboration from their formulas. No data
files are read.

### Number formats

| Point | Format | Note |
|---|---|---|
| ADC sample | 10-bit two's complement | |
| Window coefficient | 18-bit, Q1.17 | w ≥ 1 clipped to 131071 |
| Windowed sample (FFT input) | 18-bit | `(x·w) >>> 9`, that is x·256·w truncated |
| FFT output | 32-bit re/im | unscaled, natural order |
| Twiddle factor | 18-bit, Q1.17 | cos and −sin of πk/N, rounded |
| Rotated odd bin / delayed even bin | 33-bit | product rounded back (`+2^16 >>> 17`) |
| Butterfly | 34-bit | |
| X-engine input | 18-bit | butterfly `/2^XQ_SHIFT`, rounded, saturated; `sat_flag` reports clipping |
| Accumulators | 48-bit | self powers are unsigned in value, cross terms signed |

With 18-bit inputs a product is below 2^35. The sum of 2048 of them is below
2^46, so the 48-bit accumulators cannot overflow. `XQ_SHIFT` = 6 is this
design's choice. With a few LSB of noise and tone on each ADC, it keeps the
X-engine inputs inside 18 bits at N = 8192. Strong RFI, or a different input
level, calls for a different shift. The original design chooses its word
lengths from the power at the ADC input, but it does not publish them.

## Integration, pages and stalls

The controller hands the X-engine one `frame_cfg_t` per frame, latched at the
frame's first channel:

- `acc`: use this frame.
- `first`: overwrite the accumulators instead of adding.
- `last`: also write the sums to the output buffer.
- `page`: which output page to write.

An integration is ACC_FRAMES consecutive frames. It begins only on a frame
boundary.

The output buffer has two pages. A page is busy from the start of the
integration that fills it until the Ethernet transmitter has sent it. If the
page needed by the next integration is still busy, the controller skips
whole frames until it is free, and counts them in `stall_count`. At the
default sizes, sending a set takes about 5 ms and an integration takes
134 ms, so stalls never occur. They do occur in the reduced-size test, where
integrations are only four frames long.

A start edge that arrives while an acquisition is running is ignored.
`acq_done` pulses once all NUM_SPECTRA sets have been sent.

## Packet format

Each spectrum set is sent as four products, in this order:

1. self-power of input 1
2. self-power of input 2
3. cross-power, real part
4. cross-power, imaginary part

Each product takes 2N/64 = 256 packets. Each packet carries 64 consecutive
channels. This follows the original design, where 16 channels are a quarter
of a packet.

The frame on the GMII interface is:

| Bytes | Content |
|---|---|
| 0–7 | preamble and SFD |
| 8–21 | Ethernet header: destination MAC (default broadcast), source MAC, type 0x0800 |
| 22–41 | IPv4 header: the identification field counts packets; header checksum computed |
| 42–49 | UDP header: ports 5000/5000; checksum 0 |
| 50–53 | marker `A5A55A5A` |
| 54–55 | spectrum index within the acquisition (0..15) |
| 56 | product (0..3) |
| 57 | half of the spectrum (bit 0: 0 for channels < N, 1 for the upper half) |
| 58–59 | packet number within the product |
| 60–61 | first channel in the packet |
| 62–65 | trailer `0F0FF0F0` |
| 66… | 64 channels, each a 64-bit big-endian word: the 48-bit sum sign-extended |
| last 4 | Ethernet FCS (CRC-32) |

A 12-byte idle gap follows each frame. Addresses and ports are parameters of
`udp_eth_tx`.

The marker and trailer play the role of the original's "markers and fixed
patterns", whose values are not published. The rest of the layout is also
this design's own.

One set is 16384 × 4 × 8 bytes = 512 KiB. Sixteen sets are 8.4 MB per start,
which matches the roughly 8 MB per calibration state of the original.

## Interface to the FFT cores

`fft_in_valid`, `fft_in_sop` and `fft_in_re[4]` carry the windowed lanes, in
the order ADC1 even, ADC1 odd, ADC2 even, ADC2 odd. Each frame is N
consecutive valid cycles. The imaginary inputs are zero.

The cores must return the unscaled N-point transform in natural bin order,
32 bits per part, on `fft_out_re[4]`/`fft_out_im[4]`. All four must run in
lockstep under one `fft_out_valid`/`fft_out_sop`, with sop on bin 0. Their
latency does not matter. A core that outputs in bit-reversed order, or
scales its output, needs a reorder buffer or a different `XQ_SHIFT`.

## What is assumed rather than given

The original design publishes the block diagram and the key numbers:

- 10-bit ADCs at 250 Msps and a 125 MHz fabric clock;
- 8192-point FFTs and 16384 channels;
- an 18-bit window and 18-bit twiddles;
- 48-bit accumulators over 2048 frames (134 ms);
- 16 spectra per start, sent over UDP at 1 GbE.

Everything else is a choice made here:

- the window coefficient set;
- the decimation-in-time split;
- all intermediate word lengths and the 18-bit X-engine input;
- the frame buffering in the input memories;
- the two-page output buffer and frame skipping;
- the start-edge handling;
- the whole packet layout;
- driving GMII directly rather than through a MAC core.

The ISERDES here is fabric logic, not the vendor primitive.

Some parts of the original receiver are not in this RTL:

- ADC synchronisation, clock managers and the USB configuration path;
- the host's calibration GPIO sequencing;
- the offline flagging of spectra with dropped packets.

Memory at the default sizes is about 11.2 Mbit:

| Memory | Size |
|---|---|
| accumulators | 3.1 Mbit |
| two output pages | 6.3 Mbit |
| input memories | 0.66 Mbit |
| window and twiddle tables | 1.2 Mbit |

That is more than the 5 Mbit of block RAM on the original board's FPGA. How
the original fits is not published: it may, for example, keep a single
output page or narrower stored words. `output_buffer` is the obvious place
to save memory.

## Simulation

Each module has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=… failures=…` and has a watchdog. The reduced-size
testbenches are:

- `tb_iserdes_1to2`, `tb_input_memory`, `tb_nuttall_window`,
  `tb_twiddle_mult` and `tb_fft2_parallel`: against integer or
  floating-point reference values.
- `tb_xengine`: integrations of 1–3 frames, skipped frames and gaps, against
  an integer model.
- `tb_output_buffer`.
- `tb_acq_controller`: a stall, a start during a run, and two acquisitions.
- `tb_udp_eth_tx`: a full parse of every frame, including the IP checksum,
  the CRC residue and the inter-frame gap.

`tb_pratush_dcs_top` runs the whole chain end to end, with 16 channels,
4-frame integrations and 3 spectra per start. It plays the ADCs (tone plus
noise, with a common noise part to give a cross spectrum), the FFT cores
(`fft_model`) and the host (start line and packet capture).

Its reference takes each 2N-sample frame through one floating-point 2N-point
FFT, without the split. It then compares every channel of every product
within a rounding tolerance, after finding which run of frames each
integration covered.

The test also counts each mechanism and fails if one never happens:

- two acquisitions;
- an ignored start;
- integrations;
- stalls;
- X-engine saturation (from an out-of-range burst between acquisitions);
- `acq_done`.

`tb_pratush_dcs_top_full` instantiates the top with all defaults. It runs
the first two integrations of an acquisition, each 2048 frames of 16384
samples, and checks all 2048 packets of spectrum sets 0 and 1, so both output
pages are used. The input repeats every frame, so one reference spectrum
serves all frames. Both end-to-end tests also check the time from start to
the first packet against ACC_FRAMES frames of N cycles. At the defaults that
is 134.2 ms at 125 MHz. The full-size run takes about 3 minutes in Verilator.
The remaining 14 sets of a full acquisition, and the stop after them, are the
same mechanism: they are exercised at reduced size.

The testbenches share `tb/tb_dsp_pkg.sv` (FFT, DFT and window functions) and
`tb/dcs_top_bench.sv`. A typical command is:

```
verilator --binary --timing --assert --timescale 1ns/1ps -Irtl -Itb -y rtl -y tb +libext+.sv \
  --top-module tb_pratush_dcs_top rtl/dcs_pkg.sv tb/tb_pratush_dcs_top.sv
./obj_dir/Vtb_pratush_dcs_top +verilator+rand+reset+2
```

The simulator starts with random values, so everything that is read is
reset or initialised.

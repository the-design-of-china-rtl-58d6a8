# A reconfigurable FPGA back end for a radio telescope receiver

A large single-dish radio telescope carries several science programmes on
one receiver: spectral-line work (neutral hydrogen, OH masers), pulsar
searching and timing, and raw baseband recording. Each wants a different
digital product from the same sampled band. This design is the FPGA chain of
one digital back-end board that serves all of them. Two polarisations are
sampled by pairs of interleaved 12-bit ADCs. A run-time `mode` input then
routes the samples through one of four processing chains. The result leaves
as a packet stream for a 10 GbE link to a computing node. The mode can be
changed without reloading the FPGA: every chain is present at once, and a
mode change clears the pipelines by itself.

| mode | `mode` | chain | product |
|---|---|---|---|
| narrow spectral line | 0 | mixer, CIC, compensation FIR, gain | complex baseband, 8+8 bits per polarisation, channelised further off-board |
| incoherent pulsar | 1 | polyphase filter bank (2K..64K channels), full Stokes, accumulation, truncation | I, Q, U, V spectra, 8 bits each |
| baseband | 2 | the narrow-line hardware at a lower decimation | complex baseband, 8+8 bits per polarisation |
| broad spectral line | 3 | filter bank at 64K channels, corner turn, second 128-point FFT, Stokes, accumulation, truncation | I, Q, U, V spectra of 8,388,608 channels |

The top module is `crane_fdb`. All sizes are parameters. The defaults are the
full instrument: a 2^17-point transform, a 128-point second layer, a CIC rate
of up to 128, and 1024-word packets.

## Sampling: interleaved ADC chips and the timestamp

Each polarisation is sampled by two dual-core ADC chips. The two cores of a
chip sample on opposite clock edges. The second chip's clock is shifted by
90 degrees. One output word therefore holds four samples of one time series,
in the order chip 1 core a (0°), chip 2 core a (90°), chip 1 core b (180°),
chip 2 core b (270°).

The two chips' output streams can be offset from each other by whole words.
They are aligned with a timestamp pulse that the clock board injects into
the lowest bit (D0) of both chips' samples (`adc_capture`):

1. After reset or `resync`, the block waits for a rising edge of D0 on
   chip 1 core a and on chip 2 core a.
2. It measures the distance between the two edges in words.
3. It delays the earlier chip by that many words in a shift register of
   depth `MAX_SKEW`.
4. It reports `locked`, and `skew_err` if the distance exceeds `MAX_SKEW`.

The timestamp bit is cleared from the sample and passed on as a flag.
`lane_serializer` then turns the 4-sample word into one sample per clock.
Its overflow counter shows if words arrive faster than one per four clocks.
`adc_mon` keeps statistics over windows of `MON_WIN` samples: mean power,
peak magnitude, full-scale count and timestamp count.

## Down-conversion: narrow spectral line and baseband

Both modes use the same hardware and differ only in run-time settings.

- **Mixer (`ddc_mixer`).** A 32-bit phase accumulator addresses a 1024-entry
  cosine/sine table (`lo_phase_inc` = f_LO / f_s · 2^32). The real sample is
  multiplied by exp(−jφ), which moves the chosen band to DC as 16-bit I/Q.
  Latency is 2 clocks.
- **CIC (`cic_decimator`, one each for I and Q).** Four stages with a
  run-time rate up to `CIC_RMAX`. The integrators are pipelined, which adds
  N−1 samples of delay. `cic_shift` drops the R^4 growth, and the output
  saturates to 16 bits.
- **Compensation FIR (`comp_fir`).** 31 taps, decimating by 2. The block
  computes its coefficients at elaboration: a frequency-sampling design of
  1/sinc^4(f) up to 0.2 of its input rate, with a Hamming window, so nothing
  is read from a file.
- **`decimation_filter`** wraps the two CICs and the FIR.
- **Gain (`gain`).** Shifts each 16-bit value right by `gain_bit_sel` with
  round-half-up, saturates to 8 bits, and packs one 32-bit item
  `{Yi, Yr, Xi, Xr}`. `gain_sat` counts the clipped samples.

Settings for the two configurations:

- **Narrow line, 31.25 MHz from 6 GS/s:** total decimation 192, so
  `cic_rate` = 96.
- **Baseband, 250 MHz from 4 GS/s:** total decimation 16, so `cic_rate` = 8.

The narrow-line product is a complex baseband, not a spectrum. Its 32-bit
spectra are made by the receiving computer, which is not part of this RTL.

## Filter bank with a run-time size

The pulsar and broad-line modes share one polyphase filter bank per
polarisation.

**`pfb_fir`** is a four-tap polyphase FIR. It keeps the last three frames of
N samples and forms

    y[n] = Σ_{t=0..3} h[t·N + n] · x[frame − t][n]

The prototype h is a Hamming-windowed sinc of 4·N_MAX taps, computed at
elaboration in Q1.17. A smaller run-time size N = 2^log2n reads the same
table with a stride of N_MAX/N. Skipping entries of a longer sinc gives the
sinc of the shorter filter, so one table serves every size. The block emits
nothing until three frames are stored, and `out_first` marks frame starts.

**`fft_sdf`** is a radix-2 single-path delay-feedback FFT with decimation in
frequency. It takes one sample per clock.

- **Run-time size.** A 2^log2n-point transform bypasses the first
  LOG2N_MAX − log2n stages. The remaining stages read the shared twiddle
  table with a stride.
- **Scaling.** Bit s of `fft_shift` halves the outputs of stage s.
- **Output order.** Bins come out in bit-reversed order, with their natural
  index on `out_bin`. A frame leaves while the next one is entering, so the
  input must be a continuous stream of frames.

The input is real. Only bins 0 … N/2−1 are kept, which gives N/2 channels:
2K … 64K channels for `log2n` = 12 … 17. Change `log2n` or `fft_shift` only
together with a `cfg_clr` pulse.

## Cascaded FFT: the broad spectral line mode

One 2^17-point transform gives 65536 channels. More resolution comes from a
second transform along time: for each coarse channel, a 128-point FFT of
that channel's values over 128 consecutive spectra. This splits the channel
into 128 fine channels, 65536 × 128 = 8,388,608 in all.

**`corner_turn`** does the transpose between the two layers. It has two
halves, each holding 128 spectra × 65536 channels. Incoming spectra are
written into one half at address (spectrum, channel number), so channel
order does not matter. When a half is full it is read out channel by channel
in natural order, 128 samples per channel, while the other half fills.
Reading one word per clock empties a half at least as fast as it can fill.
`ct_overrun` counts the cases where it could not, for example spectra
shorter than 65536 channels, which is why this mode needs `log2n` =
`LOG2N_MAX`.

The second-layer FFT is another `fft_sdf` with 7 stages and its own scaling
word, `ct_shift`. Its frames leave in coarse-channel order. The fine-channel
index is

    fine = coarse · 128 + (sub_bin XOR 64)

The XOR is an FFT shift: the 128 fine channels of a coarse channel run from
its lowest to its highest frequency. The last frame of each corner-turn half
leaves the FFT only when the next half starts to be read. The mode is a
continuous stream.

Memory: each polarisation's corner turn is 2 × 2^23 words of 36 bits, and
the 8M-channel accumulator is 4 × 2^23 words of 48 bits. In the RTL these
are arrays. On the board they belong in external DRAM.

## Stokes detection and accumulation

With X and Y the two polarisations' channel values, `stokes` computes:

    I = |X|² + |Y|²
    Q = |X|² − |Y|²
    U = 2·Re(X·Y*)
    V = 2·Im(X·Y*)

`vacc` sums these per channel over `acc_len` spectra.

- The first spectrum of a sum is written without reading memory, so there
  is no clearing pass.
- The `acc_len`-th spectrum is added and sent out in the same clock.
- Output order is the arrival order: bit-reversed channels in pulsar mode,
  coarse channel by coarse channel in broad mode.

`trunc` then shifts each 48-bit sum right by `trunc_bit_sel`. It saturates
I to 0 … 255 and Q, U, V to −128 … 127, and packs `{V, U, Q, I}` into one
32-bit item.

At 4 GS/s a 2K-channel spectrum lasts 1.024 µs, so `acc_len` = 16 dumps
every 16.4 µs. A 64K-channel spectrum lasts 32.8 µs.

## Packets

`packetizer` turns the 32-bit items into 64-bit words, two items per word
with the first in the low half. It sends packets of `PKT_WORDS` data words
behind one header word:

    [63:56] 0xC5   [55:50] 0   [49:48] mode   [47:32] sequence   [31:0] index of the first item

- **Buffering.** Packets wait in a first-word-fall-through FIFO
  (`sync_fifo`, `FIFO_DEPTH` words) in front of the valid/ready/last stream
  for the MAC.
- **Dropping.** A packet is started only if the FIFO has room for all of it.
  Otherwise the whole packet is dropped and `drop_cnt` counts it. The
  receiver sees the gap in the item index, and no packet is ever truncated
  by back-pressure.
- **Mode change or `cfg_clr`.** A half-written packet is closed with an
  all-zero word flagged `last`.

## Control and status

All settings are plain input ports, meant to be driven from registers
written by a control computer:

- `mode`, `cfg_clr`, `resync`
- `lo_phase_inc`, `cic_rate`, `cic_shift`, `gain_bit_sel`
- `log2n`, `fft_shift`, `ct_shift`, `acc_len`, `trunc_bit_sel`

Status outputs:

- `adc_locked`, `adc_skew_err`
- serialiser overflows
- the ADC monitor values
- saturation counts for gain and truncation
- `dump_cnt`, `pkt_cnt`, `drop_cnt`, `ct_overrun`

## Where this design departs from the instrument it models

- **Rate.** The chain takes one sample per clock per polarisation. The real
  instrument samples at 4 or 6 GS/s and needs many parallel lanes through
  every block. The arithmetic here is that of one lane. A real-rate build
  would replicate the mixer, filters and FFT across lanes, which is not done
  here.
- **Cascade layout.** The pairing of the cascaded FFT with the broad
  spectral-line mode, and the reading of "65536 × 128" as 65536 coarse
  channels (from a 2^17-point real transform), are interpretations. With
  65536 *points* in the first layer the count would be 4M channels.
- **Choices not given by the source design.** These are all this design's
  own:
  - filter orders and windows (4-stage CIC, 31-tap FIR, 4-tap PFB with a
    Hamming sinc);
  - all internal widths (16-bit DDC, 18-bit FFT, 48-bit accumulator);
  - the Stokes sign convention;
  - the packet header and packet size;
  - drop-whole-packet flow control;
  - the ADC monitor statistics.
- **Dump period.** The accumulator dumps after a whole number of spectra. A
  dump period such as 50 µs at 64K channels can only be approximated
  (32.8 µs or 65.5 µs).
- **Not part of the RTL.** The analog front end, the ADC chips, the clock
  board, the 10 GbE MAC, external DRAM controllers and the computing node
  that makes narrow-line spectra and writes files. Their signals appear as
  ports.

## Simulating

Each block has a self-checking testbench in `tb/` that prints
`TB_RESULT checks=<n> failures=<m>`. It also has a watchdog that fails the
run if it hangs. With plain Verilator 5:

    verilator --binary --timing --assert -Irtl -y rtl -y tb +libext+.sv \
        rtl/crane_pkg.sv tb/tb_crane_fdb.sv --top-module tb_crane_fdb
    ./obj_dir/Vtb_crane_fdb

Use `-Wno-fatal` if your Verilator version turns lint warnings into errors.

**`tb_crane_fdb`** runs the whole board at small sizes: a 64-point
transform, an 8-point second layer, 8-word packets and a 64-word FIFO. It
drives a modelled ADC pair with inter-chip skews and a two-polarisation tone,
and goes through:

1. timestamp alignment;
2. pulsar dumps at 64 and 32 points;
3. broad-mode dumps that must peak in the predicted fine channel;
4. narrow and baseband output;
5. packet drops under a stalled link;
6. a serialiser overflow.

It prints how often each of these happened.

**`tb_crane_fdb_full`** runs the top at its default sizes in pulsar mode with
a 128K-point transform. It needs about 0.5 GB of memory and checks that
channel 1000 carries the tone.

`tb_crane_workloads` also uses the default sizes. It runs the three
tabulated configurations and checks their rates in clock cycles:

- pulsar mode at 2K channels with `acc_len` = 16 must dump exactly every
  65536 samples, and every dump must peak in the tone's channel;
- narrow-line mode must emit one item every 192 samples;
- baseband mode must emit one item every 16 samples;
- in both down-converting modes the magnitude must be steady.

Most block testbenches compare against a model in the testbench: a
double-precision DFT for the FFT, direct convolution for the filters, and
so on.

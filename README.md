# Frequency-domain range matched filter for millimetre-wave ISAC radar

A radar that shares its waveform with a communication link (integrated
sensing and communication, ISAC) still has to find its targets. It does
that by correlating each received pulse repetition interval (PRI) with the
sequence it transmitted: the correlation peaks at the delay, and so at the
range, of every scatterer. This RTL is a matched-filtering core for the
programmable logic of a Zynq-class SoC. It computes that correlation in the
frequency domain, as FFT, then multiplication by the conjugate reference
spectrum, then IFFT. It holds reference spectra for four candidate ISAC
waveforms:

- FMCW;
- PMCW;
- the Golay complementary sequences of the IEEE 802.11ad channel-estimation
  field;
- their Doppler-resilient (Prouhet-Thue-Morse ordered) variant.

A processor switches between the waveforms at run time with one register
write. Samples arrive from, and results return to, a DMA engine over
AXI-Stream. Control is over AXI4-Lite. All arithmetic is 24-bit fixed
point with one integer bit.

The design follows the hardware/software split described in *Performance
Analysis of Millimeter Wave Radar Waveforms for Integrated Sensing and
Communication* (Sneh, Tewari, Ram, Darak). That publication names the
blocks, the processing order, the four waveforms and the word length. It
does not give the architecture. Everything at or below the level of "how is
the FFT built" is this design's own (see *Where this design departs from,
or adds to, its source*).

## What the core computes

One frame is one PRI of `N` complex samples `x[0..N-1]` (default
`N = 512`). Bank `b` of the reference store holds `R_b[k] = S_b[k] / N`,
where `S_b` is the N-point DFT of the transmitted sequence `s_b`. The core
outputs, for every range bin `r = 0..N-1`,

    y[r] = IFFT( FFT(x)/N · conj(R_b) )[r]  =  (1/N) · Σ_n x[n] · conj(s_b[(n − r) mod N])

This is the circular cross-correlation of the received PRI with the
transmitted sequence, normalised by `N`. A unit-amplitude sequence echoed
with amplitude `a` at delay `d` gives `|y[d]| = a`. Range bin `r`
corresponds to `r · c / (2·B)`. With the source's 1.76 GHz bandwidth that is
0.0852 m per bin, so 512 bins cover 43.6 m, which matches the 44 m maximum
unambiguous range of the source.

### Number format and scaling

Every real and imaginary part is a `<24,1>` number: 24-bit two's
complement with 23 fraction bits, in the range [−1, 1). A stream word is
48 bits, `{imag[47:24], real[23:0]}`.

The scaling plan keeps every stage in range without a block exponent:

| stage | scaling | why |
|---|---|---|
| forward FFT | each of the log2 N stages halves its outputs, rounded | `FFT(x)/N` can never exceed the input range |
| reference | stored as `S[k]/N` by the processor | a unit-modulus sequence has `|S[k]/N| ≤ 1` |
| multiply | none, rounded to nearest, saturating | product of two values ≤ 1 in magnitude |
| inverse FFT | none, saturating | by Parseval the result is the normalised correlation, ≤ the input amplitude for unit-modulus references |

If a result leaves the range anyway (for example with a reference that
does not follow the `S/N` convention), it is clipped to full scale. A
sticky STATUS bit records this.

The end-to-end test uses N = 512 and unit-modulus references. There the
output matches a double-precision time-domain correlation to within
6·10⁻⁶ (about 50 LSB) on every bin.

## One PRI, step by step

The core has one working memory, `sample_buf`, and processes one frame at
a time. The five phases are run by `mf_ctrl`:

| phase | cycles | what happens |
|---|---|---|
| LOAD | N | input beats written to `sample_buf` in natural order; waveform select latched at the first beat |
| FFT | log2(N)·N/2 | in-place radix-2, decimation in frequency, scaled; spectrum ends up in bit-reversed order |
| MULT | N | word at address `m` (bin `bitrev(m)`) multiplied by `conj(R[bitrev(m)])` |
| IFFT | log2(N)·N/2 | in-place radix-2, decimation in time, conjugate twiddles, unscaled; takes bit-reversed input, so the output is in natural range order |
| UNLOAD | N | range bins 0..N−1 sent on the output stream, `tlast` on bin N−1 |

The two transforms use different butterflies: DIF
(`A' = A + B`, `B' = (A − B)·W`) for the forward transform and DIT
(`A' = A + W·B`, `B' = A − W·B`) for the inverse. Because of that, the
bit-reversed order that the forward FFT leaves behind is exactly the order
the inverse FFT wants, and no reordering pass is needed. The multiplier
only has to read the reference at the bit-reversed bin index.

With both streams flowing freely, a frame takes

    3·N + N·log2(N) + 6 cycles      (6150 at N = 512)

counted from the first input beat to the last output beat inclusive. Six
cycles are spent handing over between the phases. The CYCLES register
reports the measured value of the last frame, stalls included. Input is
not accepted while a frame is in flight (`s_axis_tready` is low outside
LOAD), so this is also the PRI throughput: 24.6 µs per PRI at 250 MHz.
That is slower than the source's 2 µs PRI. Real-time use would need a
pipelined FFT or several cores. The source reports a 10.6× speed-up over its
processor implementation but gives no clock or cycle count to compare
against.

The FFT engine does one butterfly per cycle. It reads both words
combinationally from `sample_buf` and writes both results at the next
edge, so consecutive butterflies never wait for each other. That is why the
buffer has two read and two write ports. On an FPGA that means distributed
RAM or two BRAMs with address banking.

## Reference banks and waveform switching

`corr_seq_mem` has four banks of N words, indexed by the waveform code:

| code | waveform (bank name) |
|---|---|
| 0 | FMCW |
| 1 | PMCW |
| 2 | standard 802.11ad Golay |
| 3 | Doppler-resilient Golay |

The banks are plain storage. Their content is whatever the processor loads,
and the names are only the intended use. To load bank `b` with sequence `s`:

1. Write `REF_ADDR = (b << 16) | 0`.
2. For `k = 0..N−1`, write `REF_RE = round(2²³ · Re(S[k]/N))`, then
   `REF_IM = round(2²³ · Im(S[k]/N))`, with `S[k] = Σ_n s[n]·e^(−j2πkn/N)`.

Each REF_IM write stores one word and advances the bin index.

Writing CTRL selects the waveform. The selection takes effect at the first
input beat of the next frame, so a frame is never filtered with two
references. Loading a bank while a frame uses it is not prevented. Do not
do it.

**Golay pairs.** A Golay complementary pair `(Ga, Gb)` has autocorrelation
sidelobes that cancel exactly when the two correlations are added. In the
802.11ad radar scheme the two members travel in consecutive packets (PRIs).
The processor therefore loads `Ga` and `Gb` into banks 2 and 3 and selects
the bank per PRI:

- alternating (`Ga Gb Ga Gb …`) for the standard scheme;
- in Prouhet-Thue-Morse order (`Ga Gb Gb Ga Gb Ga Ga Gb …`) for the
  Doppler-resilient scheme.

It then adds the PRI outputs (the slow-time DC term). A moving target turns
the phase between PRIs and spoils the cancellation to first order in the
phase step for the alternating order. The Thue-Morse order cancels that
first-order term. The testbench `tb_point_target` shows the difference
(table below). The summing across PRIs, and any Doppler processing, is left
to the processor. The core does one PRI.

## Register map (AXI4-Lite, 32-bit, byte addresses)

| addr | name | access | fields |
|---|---|---|---|
| 0x00 | CTRL | RW | [1:0] waveform select |
| 0x04 | STATUS | R | [0] busy, [1] saturation seen (sticky), [2] frame-length error seen (sticky), [31:16] frames processed |
| 0x04 | STATUS | W | write 1 to bit 1 or 2 to clear it |
| 0x08 | REF_ADDR | RW | [log2N−1:0] bin index, [17:16] bank |
| 0x0C | REF_RE | RW | [23:0] real part of the next reference word |
| 0x10 | REF_IM | W | [23:0] imaginary part; the write stores the word and advances the index (wrapping within the bank) |
| 0x14 | CYCLES | R | cycle count of the last frame |

Any other address reads as 0 and returns SLVERR. A write is accepted when
AWVALID and WVALID are both high. There is one write and one read
outstanding at most, and WSTRB is ignored.

## Streams

- **Input** (`s_axis_*`, from the DMA): exactly N beats per frame, `tlast`
  on beat N. A `tlast` elsewhere, or missing on beat N, sets the sticky
  frame-length error bit. The frame is still taken as N beats.
- **Output** (`m_axis_*`, to the DMA): N beats, bin 0 first, `tlast` on
  bin N−1. Data and `tlast` hold while `tready` is low. An assertion in
  `mf_ctrl` checks this.

Reset (`rst_n`, active low) is synchronous. It clears all control state
but not the memories.

## Parameters

| parameter | default | where |
|---|---|---|
| `N` | 512 | all modules; power of two ≥ 4. Derived from the source's 0.085 m range bins up to 44 m and its 512-chip Golay sequence; the source does not state the FFT length |
| `DW`, `FRAC` | 24, 23 | `mf_pkg`; the source's `<24,1>` format. The package constants are fixed; changing them requires care in `axil_regs` (fields assume DW ≤ 32) |
| `ADDR_W` | 8 | AXI4-Lite address width |
| `REF_BITREV` | 1 | `spec_mult`; must stay 1 with the DIF/DIT pairing used by `mf_ctrl` |

The twiddle table (`twiddle_rom`) holds `cos(2πe/N)` and `sin(2πe/N)` for
`e = 0..N/2−1`, rounded to `<24,1>`. It is computed during elaboration, so
no data file is needed. `cos 0` is stored as `1 − 2⁻²³`.

## Files

| file | block |
|---|---|
| `rtl/mf_pkg.sv` | number format, complex type, waveform codes, saturating complex multiply |
| `rtl/mf_core.sv` | top level: wiring of the blocks below |
| `rtl/axil_regs.sv` | AXI4-Lite register file |
| `rtl/corr_seq_mem.sv` | four reference banks |
| `rtl/sample_buf.sv` | N-word 2R/2W working memory |
| `rtl/fft_engine.sv` | radix-2 DIF/DIT FFT/IFFT, one butterfly per cycle |
| `rtl/twiddle_rom.sv` | twiddle table |
| `rtl/spec_mult.sv` | conjugate spectral multiply |
| `rtl/mf_ctrl.sv` | phase sequencer, buffer multiplexer, stream framing |

## Verification

Every testbench checks itself and ends with a
`TB_RESULT checks=… failures=…` line.

| testbench | size | what it shows |
|---|---|---|
| `tb_sample_buf` | N=64 | both read ports, both write ports, read after write, port B wins a collision |
| `tb_corr_seq_mem` | N=32 | all banks × bins written and read back, no aliasing |
| `tb_fft_engine` | N=32 | scaled DIF forward and unscaled DIT inverse against a floating-point DFT (error ≈ 2·10⁻⁷); pass length log2(N)·N/2 cycles; saturation flag |
| `tb_spec_mult` | N=32 | `X·conj(R[bitrev])` against floating point within 2 LSB; N cycles; saturation |
| `tb_axil_regs` | N=64 | register read/write, reference loading with auto-increment and wrap, sticky bits and clear, frame counter, CYCLES, SLVERR |
| `tb_mf_ctrl` | N=32 | phase order and mode bits, buffer multiplexing through all ports, waveform latching, frame time `3N+2K+6` (K the transform length), stalls, length error, overflow events |
| `tb_mf_core` | **N=512, defaults** | end to end. Loads four references (chirp, DPSK code from an LFSR, Golay Ga, Gb) over AXI-Lite; filters a two-target echo with each; every output bin within 10⁻⁴ of a direct correlation; peak at the target bin; frame time 6150 cycles. Exercises waveform switches, input gaps, output back-pressure, saturation and a length error, and fails if any of these never happens |
| `tb_point_target` | **N=512, defaults** | the source's single-target case: target at (12, 9, 0) m, i.e. 15 m = bin 176, moving at 2 m/s at 60 GHz (0.01 rad per 2 µs PRI) |

`tb_point_target` gives:

| waveform | PRIs summed | PSLR |
|---|---|---|
| FMCW chirp `e^(jπn²/N)` | 1 | 95.8 dB |
| PMCW (DPSK of a 15-bit LFSR) | 1 | 11.8 dB |
| Golay, alternating Ga Gb Ga Gb | 4 | 62.5 dB |
| Golay, Thue-Morse Ga Gb Gb Ga | 4 | 101.5 dB |

The test requires all peaks at bin 176 and the Thue-Morse order at least
6 dB better than the alternating order. The absolute PSLR values depend on
the sequences chosen here, not on the core:

- The chirp used is perfectly periodic for even N, hence its high PSLR.
- The source's FMCW and PMCW are modelled differently and report 8 dB and
  13 dB.

The core's own error floor is about −100 dB below full scale.

Each block's testbench was also run against a copy of the block with one
deliberate bug. Every such copy was caught:

| block | deliberate bug |
|---|---|
| `fft_engine` | unconjugated inverse twiddles |
| `spec_mult` | multiplies without the conjugate |
| `corr_seq_mem` | read ignores the bank |
| `mf_ctrl` | forward FFT unscaled |
| `axil_regs` | reference index not advanced |
| `sample_buf` | port B written at port A's address |
| `mf_core` | reference read in natural order |

### Running with Verilator

From the directory that holds `rtl/` and `tb/`:

    verilator --binary --timing --assert -Irtl -y rtl rtl/mf_pkg.sv tb/tb_mf_core.sv \
              --top-module tb_mf_core --Mdir obj_tb_mf_core -o sim
    ./obj_tb_mf_core/sim

Swap the testbench name for any other. `-y rtl` lets Verilator find each
module in `rtl/<module>.sv`. The package must be listed first. Each run
takes seconds.

## Where this design departs from, or adds to, its source

- **Only the range (1D) matched filter is in hardware.** This matches the
  source's hardware section, which implements "the 1D matched filtering
  algorithm for range estimation". The joint range-Doppler processing of the
  source's signal model (a Doppler search over the P PRIs of a coherent
  processing interval, 2000 PRIs for 4 ms / 2 µs) is not built. Neither is
  the peak search. Both are left to the processor.
- **FFT length.** The source does not give it. 512 follows from its range
  resolution and maximum range, and from the 512-chip Golay sequence.
- **Reference spectra, not sequences.** The source says the core "stores
  the correlation sequences". This core stores their spectra, scaled by
  1/N, which saves one FFT per PRI. The processor computes them.
- **Architecture choices.** The FFT architecture, scaling, rounding,
  saturation, single-buffer schedule, register map, stream framing and
  reset are all this design's. The source gives none of them.
- **Resources and latency.** The source reports BRAM/DSP/LUT/FF counts and
  power for its FPGA build of the fixed-point core. This RTL has not been
  mapped to that device and its numbers are not comparable. A single
  radix-2 butterfly uses 8 multipliers of 26×24 bits. The two memories
  (N × 48 bits, 2R/2W) and the four reference banks (4N × 48 bits) dominate
  storage.
- **Golay scheme.** The assignment of the pair members to the two Golay
  banks, with bank selection per PRI, is this design's reading of the
  source's description. The source says the complementary pair is spread
  over consecutive packets, and that the Doppler-resilient version orders
  them by the Thue-Morse sequence.
- **Not included.** The processor, the DMA engine and the AXI interconnect
  are vendor parts that the source only names. The core's AXI-Lite and
  AXI-Stream ports are where they attach. In the testbenches, the
  testbench itself plays both.

# Digital receiver module for a 96-antenna solar radioheliograph

A solar radioheliograph is an interferometer that images the Sun. Every
pair of antennas gives one baseline, and a correlator multiplies the two
antenna signals of each baseline. That only works if each pair is
time-aligned and phase-stable. This instrument has 96 antennas in a T-shaped
array, 32 per arm, on baselines from 4.9 m up to 622 m. Each antenna's
4-8 GHz signal reaches the equipment room over an analog optical link and is
downconverted there to a first intermediate frequency (IF1). From that point
the **digital receiver** does the work. One receiver module serves four
antennas. For each antenna it:

* forms the 17-27 MHz band;
* delays the signal by the antenna's geometric delay, in steps of 0.1 ns;
* downconverts the band to a 1-11 MHz second IF (IF2) as complex I/Q,
  removing the slowly rotating "fringe" phase on the way;
* reduces I and Q to 3 bits at 25 MHz.

The module then ships all of this over one 8b/10b-coded 1 Gbit/s link to
the correlator. 24 modules cover the 96 antennas and give the correlator
24 Gbit/s.

This repository holds synthesizable SystemVerilog for that receiver module,
from the ADC sample buses to the 8b/10b code groups. It also holds a
self-checking testbench for every block and an end-to-end testbench. The
end-to-end testbench plays the ADCs, the control processor and a small
correlator.

```
 per antenna (x4)                                                         shared
 ADC 12b ─► fir_bpf ─► delay_line ─► iq_mixer ─┬► polyphase_decim ─► requant3 ─┐
  100 MHz   65 taps     0..255       x·cos     │  (I) 64 taps, ÷4    32b→3b    │
            17-27 MHz   samples      -x·sin    └► polyphase_decim ─► requant3 ─┼► serializer ─► transceiver ─► 40-bit
            + fraction               ▲            (Q)                          │   32-bit word    8b/10b        code group
                                     nco (CORDIC cos/sin)                      │   per 25 MHz                   per 25 MHz
                                                                               ┘                                = 1 Gbit/s
 control processor (outside): FIR coefficients, delays, NCO frequency/phase, requantiser step, alignment request
```

## Delay tracking in two parts

The geometric delay of a source differs from antenna to antenna and changes
as the Sun moves. A 1 ns delay step would be enough for the phase error across
the 10 MHz band (under 1°). On the shortest 4.9 m baseline, though, it would
shift the interferometer beam by about 3.5°. So the delay is tracked in
0.1 ns steps. At the 100 MHz sample clock used here, that is 1/100 of a
sample. The delay is split into two parts:

* **Whole samples: `delay_line`.** This is a 256-entry circular buffer with
  `out[n] = in[n - delay]`. 256 samples is 2.56 µs, which covers the 2.08 µs of
  the 622 m baseline. A new value takes effect on the next sample.
* **Fraction of a sample: `fir_bpf`.** This 65-tap (64th-order) FIR filter
  forms the 17-27 MHz passband, and it also applies the fractional delay. The
  hardware is a plain programmable FIR. The delay lives entirely in the
  coefficients, which the control processor recomputes as the delay changes
  (the "(t)" in the block name). The end-to-end testbench uses a
  Hamming-windowed band-pass shifted by the fraction `f`:

  `h[i] = w(k) · (sin(2π·0.27·k) − sin(2π·0.17·k)) / (π·k)`, with `k = i − 32 − f`
  and `w(k) = 0.54 + 0.46·cos(π·k/33)`.

  Coefficients are signed Q1.15. They are written one at a time into a
  **shadow bank** (`coef_we`, `coef_addr`, `coef_data`). A `coef_commit`
  pulse then swaps the whole set in between two samples, so no output ever
  mixes old and new taps. Commits are per antenna (`coef_commit[3:0]`), so the
  processor can switch all four antennas on the same sample.

Within one module, the same whole-sample and fractional delays reach all
antennas at the same time. Alignment between modules is the correlator's
concern. The payload counter described under "Link framing" lets it check
that alignment.

## Downconversion and fringe stopping

`nco` holds a 32-bit phase accumulator:

`phase[n+1] = phase[n] + freq_word`, so `f = freq_word · 100 MHz / 2^32`.

A `phase_off` value is added to the accumulator output. A 16-stage pipelined
CORDIC turns the phase into cos and sin. It needs no sine table: 4 guard bits,
amplitude 32000, error within 2 LSB. The phase is first folded into
[−π/2, π/2) by subtracting π and negating the start vector.

`iq_mixer` forms `I = x·cos φ` and `Q = −x·sin φ`, which is
`(I + jQ) = x·e^(−jφ)`. With `freq_word = 687194767` (16 MHz), the 17-27 MHz
band lands on +1..+11 MHz. The testbench checks the sign: a 20 MHz tone must
rotate at +57.6° per 25 MHz output sample. It measures +57.8°.

Fringe stopping is a small per-antenna offset on `freq_word`. It cancels the
rate of change of the geometric phase, so the correlator sees a stationary
phase. The NCO pipeline moves only when a sample moves, so all four antennas
see the same fixed NCO latency. That latency therefore cancels in every
correlation.

## Decimation: the polyphase low-pass

`polyphase_decim` filters I (and, in a second copy, Q) with a 64-tap
low-pass filter and keeps every 4th output, which gives 25 MHz. The impulse
response is split into four branches, `h_p[j] = h[4j + p]`. An input
commutator deals consecutive samples to branches 3, 2, 1, 0:

`y[m] = Σ_p Σ_j h[4j+p] · x[4(m−j) − p] = Σ_k h[k] · x[4m − k]`

Only the branch that has just received a sample is evaluated: 16 multipliers
serve the whole filter, and the branch sums accumulate until branch 0
completes an output. The output is the full 32-bit sum. With 16-bit input and
this table it cannot overflow.

The coefficient table `rtl/lpf_coefs.hex` holds 64 signed 16-bit words, one
per line. Each is `round(32768 · g[k] / Σg)` with
`g[k] = sinc(0.25·(k − 31.5)) · hamming64[k]` (normalised sinc, `sinc(x) = sin(πx)/(πx)`): cutoff f_s/8 = 12.5 MHz and
DC gain 2^15. It passes 1-11 MHz and rejects what would alias into the 25 MHz
output. A 20 MHz tone comes out about 64 dB down.

## Three-bit requantisation

`requant3` maps each 32-bit sample to one of eight levels `(2k+1)·v/2`,
`k = −4..3`, with step `v = 2^shift`. There is no zero level. The 3-bit code
is `k` in two's complement: `k = floor(x / 2^shift)`, clipped, and `clip`
flags clipped samples. The processor is expected to pick `rq_shift` from the
signal power. With the testbench's signals, `shift = 23` puts the RMS at about
one to two steps.

## Link framing: serializer and 8b/10b

For every 25 MHz sample instant, `serializer` builds one 32-bit word. Each
3-bit sample travels in a nibble topped by one payload bit. That turns
4 × 2 × 3 bit × 25 MHz = 600 Mbit/s into 800 Mbit/s:

| bits     | 31 | 30:28 | 27 | 26:24 | … | 7 | 6:4 | 3 | 2:0 |
|----------|----|-------|----|-------|---|---|-----|---|-----|
| contents | cnt[7] | Q ant 3 | cnt[6] | I ant 3 | … | cnt[1] | Q ant 0 | cnt[0] | I ant 0 |

`cnt` is an 8-bit word counter. Byte `a` belongs to antenna `a`, and byte 0
goes first on the line.

The links run in the FPGA transceivers' "Basic" mode, which has no protocol of
its own, so the receiving end must find the word boundary itself. After
reset, and after each `align_req` pulse, the first 16 word slots therefore
carry four K28.5 comma characters each. Data follows, with the counter
starting at 0.

`transceiver` encodes each byte with the standard 8b/10b code (5b/6b and
3b/4b sub-blocks, running disparity carried across bytes and words, A7
alternate code, K28.y and Kx.7 control characters). It emits the four code
groups as one 40-bit group, `sym[39:30]` = byte 0, bit 39 first: 40 bits per
25 MHz word is 1 Gbit/s.

## Clocking, timing and the control interface

The whole module runs on one clock, the ADC sample clock (100 MHz), with
`adc_valid` high on every sample. Internal valid strobes mark the 25 MHz
samples after decimation. Reset is asynchronous and active low. The fixed
latencies are:

| stage | latency |
|---|---|
| `fir_bpf` | 1 clock |
| `delay_line` | 1 clock + `delay` samples |
| `iq_mixer` | 1 clock |
| `polyphase_decim` | up to 4 clocks (output one clock after the completing input) |
| `requant3` | 1 clock |
| `serializer` | 1 clock |
| `transceiver` | 1 clock |
| NCO pipeline | 19 enabled samples (a constant phase shared by all antennas) |

Ports of `dig_receiver`:

| port | width | role |
|---|---|---|
| `adc_valid`, `adc_data[4]` | 1, 12 | ADC samples (signed) |
| `coef_we`, `coef_ant`, `coef_addr`, `coef_data`, `coef_commit[4]` | 1, 2, 7, 16, 4 | band-pass/fractional-delay coefficients |
| `delay[4]` | 8 | whole-sample delays |
| `nco_freq[4]`, `nco_phase[4]` | 32, 32 | downconversion + fringe-stopping frequency, phase |
| `rq_shift[4]` | 5 | requantiser step (log2) |
| `align_req` | 1 | resend the alignment words |
| `clip_i[4]`, `clip_q[4]`, `aligning` | 4, 4, 1 | status |
| `tx_valid`, `tx_sym`, `tx_k_err` | 1, 40, 1 | code groups to the correlator |

The top contains assertions that the I and Q paths, and all four antennas,
stay in lock step. Because these assertions are disabled during reset, lint
reports `rst_n` as used both synchronously and asynchronously.

After coarse synthesis (yosys), the module is about 3,600 word-level cells,
25,900 flip-flop bits and 17,400 memory bits. Most of the flip-flops are the
FIR delay lines and coefficient banks.

## What is given and what is chosen

These points follow the instrument's published description:

* four antennas per module;
* a 12-bit ADC;
* a 64th-order FIR that forms the 17-27 MHz band and applies the fractional
  delay, with coefficients set by the processor;
* a separate delay block;
* an NCO with cos/sin feeding an I/Q mixer, for downconversion to 1-11 MHz and
  fringe stopping;
* polyphase I and Q filters with 32-bit output;
* 32 → 3-bit requantisers;
* a serializer;
* 3-bit I and Q at 25 MHz: 600 Mbit/s net, 800 Mbit/s with payload bits;
* 8b/10b coding giving 1 Gbit/s per module over transceivers in Basic mode;
* 0.1 ns delay steps.

These points are this design's own choices:

* the 100 MHz sample clock and decimation by 4;
* all internal widths (16-bit datapath, Q1.15 coefficients, 32-bit NCO
  phase);
* the shadow/commit coefficient loading;
* the delay memory depth;
* the CORDIC NCO and its sign convention;
* the 64-tap low-pass table and the time-shared polyphase structure;
* the level set and step control of the requantiser;
* what the payload bits carry (a word counter);
* the byte order;
* the K28.5 alignment sequence;
* single-clock operation and the reset style.

## Not included

* **The ADCs and the analog chain before them.** This covers the antennas,
  preamplifiers, optical links and downconverter. ADC samples enter as ports.
* **The control processor and its Ethernet link.** Their settings are ports.
  How the processor derives delays and fringe rates from the source position
  is not modelled.
* **The physical layer of the transceiver.** This covers serialisation to the
  1 Gbit/s line, clock multiplication and drivers, which are the FPGA's hard
  transceiver. The output here is the 40-bit parallel code-group stream. The
  receive direction of the link is not modelled either.
* **The correlator.** It would take the 24 links and form all 4560 complex
  correlations in one FPGA. It is outside this module. The end-to-end
  testbench contains a small software correlator for its checks.

## Simulating

Each block `X` has a testbench `tb/tb_X.sv` that ends by printing
`TB_RESULT checks=N failures=M`. The polyphase filter loads
`rtl/lpf_coefs.hex` at start-up by a path relative to the working directory,
so run everything from the repository root. `tb_transceiver` and
`tb_dig_receiver` also need the reference coder `tb/tb_8b10b_pkg.sv`. With
Verilator 5, for example:

```
verilator --binary --timing --assert -Irtl rtl/rx_pkg.sv rtl/fir_bpf.sv tb/tb_fir_bpf.sv --top-module tb_fir_bpf
./obj_dir/Vtb_fir_bpf

verilator --binary --timing --assert -Irtl rtl/rx_pkg.sv rtl/*.sv \
          tb/tb_8b10b_pkg.sv tb/tb_dig_receiver.sv --top-module tb_dig_receiver
./obj_dir/Vtb_dig_receiver
```

The block testbenches do the following:

* **`tb_fir_bpf`:** convolution reference; shadow bank and commit; impulse
  response; saturation.
* **`tb_delay_line`:** a history reference with random delays and gaps.
* **`tb_nco`:** against real `$cos`/`$sin`, within 4 LSB, which also checks
  the latency.
* **`tb_iq_mixer`:** products with saturation.
* **`tb_polyphase_decim`:** full-rate convolution sampled every 4th output;
  the rate; DC gain; 20 MHz rejection.
* **`tb_requant3`:** all steps and level boundaries.
* **`tb_serializer`:** nibble layout, counter and alignment sequences.
* **`tb_transceiver`:** against an encoder written from both disparity
  columns of the code table, plus DC-balance and run-length checks on the
  line.

`tb_dig_receiver` runs the full-size module (no parameter overrides) for
about 30,000 clocks, in under a second of simulation. It feeds multi-tone IF1
signals with exact per-antenna delays and decodes the link with a reference
8b/10b decoder (`tb/tb_8b10b_pkg.sv`). It correlates the recovered 3-bit
streams and counts each mechanism. Typical results:

| case | result |
|---|---|
| antennas 0/1 with a 7.3-sample relative delay, uncompensated | \|r\| = 0.40 |
| delay line set to 7 samples | \|r\| = 0.98, residual phase 23.8° (0.3 sample at ~21 MHz) |
| plus a 0.3-sample fractional delay in the FIR | \|r\| = 0.999, phase 0.0° |
| tone pair 48.8 kHz apart, no fringe stopping | \|r\| = 0.02 |
| same pair, NCO offset by 48.8 kHz | \|r\| = 0.98 |

It also checks the 16 + 16 alignment words, the payload counter on every
word, one code group every 4 clocks, and that every code group is valid.
Clipping and coefficient swaps must each be seen at least once.

`tb_workload_delay` tracks the longest baseline. It uses one channel's
`fir_bpf` and `delay_line` at their default sizes. The 622.30 m baseline
delay, 207.58 samples, is programmed as 207 whole samples plus 0.58 in the
coefficients. The testbench then steps the delay 50 times by 0.1 ns, carrying
the fraction into the whole-sample delay at 208.00. For a 21.1 MHz tone, the
output phase must match the programmed delay within 1°. Each 0.1 ns step must
turn it by 0.760° ± 0.15°.

# A folded time-reversal processor for underwater acoustic links

A time-reversal mirror records an acoustic pulse that has crossed a scattering
medium and plays it back reversed in time. The reversed wave retraces every path
it took and refocuses on the original source, at that point and nowhere else. This
makes it a focused, hard-to-intercept return channel for underwater acoustic
communication. The signal processing behind the mirror fits in one line. For a
real frame x of N samples,

    IDFT( conj( DFT(x) ) )[n] = x[(N - n) mod N]

so conjugating the spectrum reverses the frame in time. The processing chain is
therefore: transducer, ADC, FFT, phase inversion (conjugation), inverse FFT, DAC,
transducer.

This RTL implements the digital part of that chain as the design of Siljak,
*"Reversibility in space, time, and computation: the case of underwater acoustic
communications"*, proposes it, in its **folded** form. Every stage of the chain is
reversible: the transducer is both microphone and speaker, the converter can work in
both directions, and the inverse FFT is the FFT run backwards. The chain can
therefore be folded at the conjugation step. A frame comes in through the
transducer, converter and FFT, is conjugated, and goes back out through the same
FFT hardware, converter and transducer. Here a single FFT engine does both
transforms. The inverse transform is obtained by running the forward butterfly
network backwards, stage by stage, with every butterfly replaced by its inverse.

The paper is a short position paper. It gives the chain, the folding and what each
block must do, but no sizes, number formats, timing or circuit details. Everything
below that level is this design's own choice, and the sections below say which
choices those are.

## Files

| file | contents |
|---|---|
| `rtl/tr_pkg.sv` | shared types: `cplx_t` (16-bit re/im), `twiddle_t`, `phase_t`; `bitrev()`, saturation helper |
| `rtl/fft_butterfly.sv` | one radix-2 butterfly, forward form and exact inverse form (combinational) |
| `rtl/fft_engine.sv` | in-place FFT on an N-word frame memory; forward pass or reversed-flow pass |
| `rtl/phase_conjugator.sv` | phase inversion: negates the imaginary half of a bin |
| `rtl/tr_processor.sv` | top: folded chain sequencer, converter-side handshakes |
| `tb/tb_*.sv` | self-checking testbenches, one per block plus the end-to-end test |

## The folded chain (`tr_processor`)

One frame goes through five steps. The current step is shown on the `phase` output.

| step | converter | what happens | cycles (no stalls) |
|---|---|---|---|
| `PH_RX` | ADC (`conv_dir`=0) | N samples accepted on `adc_data`, stored as (x, 0) at bit-reversed addresses | N |
| `PH_FFT` | idle | forward pass: memory holds X = DFT(x)/N, natural order | N/2·log2 N + 2 |
| `PH_CONJ` | idle | each bin read, conjugated, written back, one per clock | N |
| `PH_IFFT` | idle | reversed-flow pass of the same engine: memory holds x reversed, bit-reversed order | N/2·log2 N + 2 |
| `PH_TX` | DAC (`conv_dir`=1) | real parts sent on `dac_data` in natural order | N |

At the default N = 256 this is 256 + 1026 + 256 + 1026 + 256 = 2820 cycles per
frame. `frame_done` pulses after the last output sample and the chain returns to
`PH_RX`. Frames do not overlap, because the one engine and its memory are busy for
the whole frame. This is the price of folding: the unfolded chain would need two
engines and two memories.

The output is the **circular** reversal y[0] = x[0], y[n] = x[N−n]. This is exactly
what transform, conjugate and inverse transform compute on a block. A plain
reversal x[N−1−n] would be the same signal delayed by one sample.

### Ports

| port | dir | width | meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock; asynchronous active-low reset |
| `conv_dir` | out | 1 | 0: converter samples (ADC) and transducer listens; 1: converter drives (DAC) and transducer speaks |
| `adc_valid`, `adc_ready`, `adc_data` | in/out/in | 1/1/16 | incoming samples; a sample is taken when both valid and ready are high at a clock edge |
| `dac_valid`, `dac_ready`, `dac_data` | out/in/out | 1/1/16 | outgoing samples, same handshake |
| `phase` | out | 3 | current step (`tr_pkg::phase_t`) |
| `frame_done` | out | 1 | one-cycle pulse at the end of a frame |
| `overflow` | out | 1 | a butterfly or the conjugation saturated in this frame; cleared when the next frame starts |

The transducer and the converter are analogue parts and are not modelled. The paper
relies on bidirectional AD/DA converters, which it does not design. The
converter's digital side connects to the `adc_*`/`dac_*` ports, and `conv_dir` sets
its direction.

## The reversed-flow FFT (`fft_engine`, `fft_butterfly`)

This is the least conventional part of the design.

**Forward pass (`inv`=0).** This is a radix-2 decimation-in-time FFT, done in place
in an N-word memory with one butterfly per clock. Stage s (0 … L−1, L = log2 N)
pairs the words i0 = g·2^(s+1) + p and i1 = i0 + 2^s, using the twiddle
w = exp(−j2πk/N) with k = p·2^(L−1−s). Each butterfly computes

    t = b·w,   A = (a + t)/2,   B = (a − t)/2

The halving keeps every stage inside the word width, so the pass returns DFT(x)/N.
The input must be stored in bit-reversed order, and the output comes out in natural
order.

**Reverse pass (`inv`=1).** The butterfly above is invertible: a = A + B and
b = (A − B)·conj(w). The reverse pass runs the stages in the order L−1 … 0 and
applies this inverse at each position. It undoes a forward pass exactly, up to the
forward pass's rounding. Its input is in natural order and its output in
bit-reversed order. Seen as a transform, it computes N·IDFT(X), so the 1/N of the
forward pass is cancelled and the chain has unit gain. The reverse network is the
transpose of the forward one, in other words a decimation-in-frequency FFT with
conjugate twiddles. This is one concrete reading of "the IFFT is the FFT block with
reversed flow".

**Bit reversal as a folded pair.** The forward pass wants bit-reversed input, and the
reverse pass leaves bit-reversed output. So the chain writes incoming samples to
`bitrev(n)` and reads outgoing samples from `bitrev(n)`. Nothing else is reordered.

**Why the reverse pass does not overflow.** For a real frame, conj(DFT(x)) equals
DFT(x reversed). The reverse pass therefore walks back through exactly the
intermediate values that a forward pass on the reversed frame would produce. All of
those values fit the word width. Only rounding at full scale can push a value a few
LSB over the limit, and saturation catches that. A spectrum that no forward pass
produced can overflow the reverse pass (the flat full-scale spectrum in
`tb_fft_inverse` does); outputs are then clamped and `sat` is set.

**Memory.** The frame memory is an N × 32-bit register array with two reads and two
writes per clock while a pass runs. While the engine is idle, one write port and
one combinational read port are available to the caller. A memory written as an
array, with these ports, maps to flip-flops or to a multi-port register file. A
single-port SRAM would need a different schedule.

**Twiddles.** The N/2 twiddles are computed at elaboration time from `$cos`/`$sin`:
w_k = round(32767·cos(2πk/N)) − j·round(32767·sin(2πk/N)). No table file is used,
so any power-of-two N works.

## Number format and accuracy

* Samples and bins: 16-bit two's complement, real and imaginary
  (`tr_pkg::DATA_W`). Twiddles: Q1.15 (`TW_W`). +1.0 is stored as 32767.
* Products keep full width and are rounded half up. The per-stage halving rounds
  **half to even**. A half-up rule there adds a small bias at every stage; the bias
  lands on the DC bin, and the reverse pass turns it into an error of over 100 LSB
  on output sample 0 at N = 256.
* The forward pass loses log2 N bits of headroom to its scaling, and the reverse pass
  amplifies that rounding noise. At N = 256 and inputs of ±15,000, the end-to-end
  error seen in simulation is at most about 50 LSB (0.15 % of full scale). The
  testbench allows 64 LSB. Widen `DATA_W` if a converter with more than about
  10 effective bits is used.
* Saturation (to +32767 / −32768) occurs only at full-scale inputs. It is reported on
  `overflow`.

## Phase inversion (`phase_conjugator`)

With bins in rectangular form, conjugation keeps the real part and changes the
sign of the imaginary part. The paper names two ways to change a sign, and both are
available:

* `ONES_COMPLEMENT = 0` (default, used by the top): subtraction from zero. −32768
  has no positive counterpart; it is saturated to +32767 and `ovf` is set. For a real
  input frame the imaginary part of DFT(x)/N stays below about 0.64 of full scale,
  so this case does not arise in the chain.
* `ONES_COMPLEMENT = 1`: bitwise complement, −im − 1. This is a bijection that never
  overflows, with a one-LSB offset.

The block is combinational. The top applies it in one pass over the frame memory
(N cycles). Folding it into the first stage of the reverse pass would save those
cycles; the separate pass keeps it as a block of its own, matching the chain.

## Where this departs from, or goes beyond, the paper

* **Conventional logic.** The paper's point is that every block could be built from
  reversible gates. This RTL computes the same functions in ordinary synchronous
  logic. Only the reverse FFT pass mirrors the reversibility idea, by running the
  forward network backwards. Information is still lost to rounding and saturation.
* **Rectangular bins.** The paper describes the FFT outputs as amplitude and phase,
  and the phase inversion as changing the sign of the phase half. Here bins are
  kept as real and imaginary parts. Negating the imaginary part negates the phase
  and leaves the amplitude unchanged, so the function is the same, and no
  conversion to polar form is needed.
* **Sizes and formats are chosen here**: N = 256, 16-bit data, 16-bit twiddles, radix-2,
  one butterfly per clock, scaling in the forward pass only, and a valid/ready
  converter interface. The paper gives none of these.
* **Single channel.** A practical mirror uses a few co-located transducers. Each
  channel is an independent copy of this chain. An array would instantiate several
  `tr_processor`s, or share one engine between channels in turn.
* **Not built:** the transducers, the converters, and the lattice-gas (FHP cellular
  automaton) model of the water. The paper uses that model to study the channel in
  software; it is not part of the hardware.

## Simulating

Every testbench checks its results itself and ends with a line
`TB_RESULT checks=<n> failures=<n>`. With plain Verilator:

    verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
        rtl/tr_pkg.sv tb/tb_tr_processor.sv --top-module tb_tr_processor
    ./obj_dir/Vtb_tr_processor

| testbench | what it checks |
|---|---|
| `tb_fft_engine` | forward pass against a floating-point DFT/N (random, impulse, tone, DC; ≤ log2 N LSB), and a pass length of N/2·log2 N cycles |
| `tb_fft_inverse` | reverse pass returns x from a rounded DFT(x)/N (≤ 48 LSB), its pass length, and saturation on a flat full-scale spectrum |
| `tb_phase_conjugator` | both negation methods, corner values and 2000 random bins |
| `tb_tr_processor` | the whole chain at default size. Five frames (random, impulse, tone, sweep, full-scale) go in with random input gaps and come out under random back-pressure. Each output must equal the circular reversal within 64 LSB, and the impulse must come back at the mirrored position. The length of every step is checked. Every mechanism (receive, both passes, conjugation, transmit, direction switch, gaps, stalls, saturation) must occur at least once. |

All of them run in well under a second.

## Changing it

* `N` (a power of two, ≥ 4) is a parameter of `tr_processor` and `fft_engine`.
  Memory grows as N·32 bits, and a pass takes N/2·log2 N cycles.
* `DATA_W` and `TW_W` are in `tr_pkg`. The saturation helper and the butterfly
  widths follow them.
* For more throughput, replace the one-butterfly-per-clock loop in `fft_engine` with
  several butterflies per clock or a pipelined FFT. Unfolding the chain (a second
  engine and a second memory) would let one frame be received while the previous
  one is processed.

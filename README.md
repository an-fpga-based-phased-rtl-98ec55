# A time-domain phased array processor for eight antennas

This RTL adds the signals of eight radio antennas into one beam. Each antenna's
signal is sampled at 1024 Msample/s with 8 bits. Each antenna sits at its own
distance from the source, so each stream is delayed until all eight line up,
and then the streams are added. The sum behaves like one large antenna pointed
at the source. That phased sum goes on to a recording back end.

Delays are set in steps of 4 ns, 1 ns and 0.1 ns, up to about 4 us. The 0.1 ns
step is a tenth of a sample period, so the last step interpolates between
samples. A small single-baseline correlator measures the leftover delay between
pairs of antennas, so the control computer can correct the programmed delays.

The design follows the paper "An FPGA based Phased Array Processor for the
Sub-Millimeter Array" (two Beamform boards with four delay lines each, a
modified digital back end and a calibration correlator). It describes one
synthesizable SystemVerilog version of it. The paper gives the structure of
the delay lines in detail but says little about the rest. The sections below
keep apart what comes from that description and what is this design's own
choice.

## Data format and clock

The FPGA cannot run at 1024 MHz, so every stream is demultiplexed by four.
- One clock edge (256 MHz) carries a `word_t`: four signed 8-bit samples.
- Lane 0 of a word is the oldest sample. Sample number `4w + j` is lane `j`
  of word `w`.
- Everything runs in this one clock domain.
- The serial links between the boards are modelled as registered wires.

Shared types and constants are in `pa_pkg`:
- `sample_t`, `word_t` and `coef_t` (signed, 18 bits, 16 fraction bits).
- `delay_t`, a packed struct `{coarse[9:0], fine[1:0], frac[3:0]}`. The
  delay it sets is `4*coarse + fine + frac/10` samples.
- `sat_sample`, which saturates a value to 8 bits.

## Block structure

```
phased_array_top
├── beamform_ibob  x2        one board, four antennas
│   ├── delay_line  x4
│   │   ├── coarse_delay      4-sample steps, RAM FIFO
│   │   ├── fine_delay        1-sample steps, barrel selector
│   │   └── superfine_delay   0.1-sample steps
│   │       ├── coef_buffer   coefficient RAM and double buffer
│   │       └── fir_demux4    10-tap FIR, 4 samples per clock
│   │           └── fir_tap x10
│   ├── phased_adder          Walsh-signed average of the four channels (iBand1)
│   └── ibobscope   x5        snapshots: four channels and their sum
├── dbe_sum                   adds the two board sums (8-antenna beam)
└── cal_correlator            X stage of the calibration correlator
    ├── cmult_conj  x2        a * conj(b)
    └── vector_accumulator    integration in block RAM, result memory
```

The top brings every connection to a part outside the design out as a port:
- the ADC streams (`adc`);
- the phased sum going to the back-end channelizer (`dbe_out`);
- the two streams going to the correlator's filter bank and FFT (`corr_a`,
  `corr_b`), and the spectra coming back from them (`fft_*`);
- the control registers that the board's processor would write (delays, Walsh
  states, coefficient RAM, link selection, scope control, integration length,
  result read-out).

## The delay line

A delay line is three stages in series. The stages have one fixed latency of
44 samples between them, the same for every antenna. Only the differences
between the programmed delays matter for the beam.

Exact output: after the clock edge that samples input word `w`, output lane
`j` of a delay line is

    sat8( round( sum_{k=1..10} C_k(frac) * x[4w + j - 40 - 4*coarse - fine - k] / 2^16 ) )

With `frac = 0` this is simply `x[4w + j - 44 - 4*coarse - fine]`. The
testbenches check the RTL against this formula, bit for bit.

### Coarse delay: a FIFO held at a given fill level

`coarse_delay` writes one 32-bit word into a 1000-word RAM on every clock. It
reads one word from an address kept `C` words behind the write pointer, so
the delay equals the FIFO's fill level.
- To grow the delay by one word, it holds the read pointer for one clock. The
  same word is output twice, and the `dup_read` flag is raised.
- To shrink the delay, it advances the read pointer by two. One word is
  dropped, and `skip_read` is raised.
- A large change of `C` is applied one word per clock.
- `C` is clamped to the range 3..999.

The paper's prose pairs these moves the other way round ("reduced by 1 ...
outputting the same word twice"; "increased by 1 ... a jump in the write
pointer"). The same paragraph also says the logic keeps the FIFO's fill level
equal to `C`, and it is that rule this design follows. The write pointer never
jumps, so a word that was never written can never be read.

### Fine delay: choosing four of eight samples

`fine_delay` keeps the last two words and reads them side by side as eight
samples. It then outputs four consecutive samples starting at position
`S = 3 - d`, which gives a delay of 0 to 3 samples. This is the paper's barrel
selector, including the `S = 3 - d` rule. The output is combinational.

### Super-fine delay: a fractional-delay FIR on four lanes

A delay of `D = 3 + f/10` samples is made by a 10-tap FIR. Its taps are the
sinc pulse resampled with that shift. For `f = 0` the taps are a single 1 at
tap 4, which is a plain 3-sample delay. This design uses

    C_k(f) = round( 2^16 * sinc(k - 4 - f/10) ),   k = 1..10,  f = 0..9

for the taps, with no window. The control computer writes them into a RAM of
ten sets of ten taps each. The testbenches write them the same way.

**The demux-by-4 filter (`fir_demux4`, `fir_tap`).** Four outputs must be
computed per clock, so each of the ten stages holds four multipliers and four
adders. The partial sums flow down the stage chain:
- Stage `i` (from 0) multiplies by `C_{10-i}`. A partial sum therefore starts
  with its oldest sample and ends with `C_1` times the newest:
  `y[n] = sum_k C_k x[n-k+1]`.
- Between stages, the four partial sums rotate by one lane (`p_out[l]` takes
  `p_in[l-1]`). Each partial sum thus moves on to the next sample in time.
- When a partial sum wraps from lane 3 back to lane 0, it has to take its
  sample from the next word. The sample pipeline makes up for this: in stage
  `i`, lane `i mod 4` of the samples goes on unregistered and the other lanes
  are registered.
- At the end of the chain, the lanes below `(TAPS-1) mod 4` come out one clock
  early. They get one more register, so each output word again holds four
  consecutive outputs.
- The filter's latency is `TAPS - floor((TAPS-1)/4)` = 8 words.

The paper states the principle: reordered partial sums, samples delayed to
adjust the pipeline, and a 5-tap worked example. This register placement is
one that satisfies it. It is checked against a plain FIR for 10 and 5 taps.

**Double buffering (`coef_buffer`).** Changing the fraction must not disturb
the stream.
1. When `frac` changes (or `load` is pulsed), the control logic reads the ten
   words of the new set out of the RAM, one per clock, into a shift register.
2. It then sends a one-clock update pulse, 13 clocks after the request.
3. The pulse loads all ten active registers at once.

The filter therefore switches between two complete sets in a single clock.
`busy` stays high until the new set is active.

**Rounding.** The 30-bit filter output is rounded to nearest, reduced to 8
bits with saturation and registered (`superfine_delay`).

The paper's ten coefficient sets are "D = 0.1 to D = 0.9 in steps of 0.1",
which lists only nine. This design keeps ten sets and uses set 0 for
`f = 0`, the integer delay.

## The board: phasing and phase switching

`beamform_ibob` holds four delay lines.
- **Phased sum.** The `phased_adder` adds the four delayed channels and
  divides by four (floor). This is the average the paper shows, and the board
  sends it out on its first link (`iband1`).
- **Walsh switching.** The receivers switch their local oscillator's phase by
  180 degrees in a Walsh pattern. The adder undoes this per channel: a channel
  whose `walsh` bit is 1 is subtracted instead of added (the paper's "switch
  between addition and subtraction on the Walsh ticks"). The bit applies to
  the word at the adder's input, which is already delayed. The control system
  generates the Walsh sequences and delays each one to match its channel.
- **Calibration stream.** The second link (`iband2`) carries one delayed
  channel, chosen by `iband2_sel`. Stepping the two selections through the
  antennas time-multiplexes the baselines on the one correlator.
- **Scopes.** Five `ibobscope`s (four channels and the sum) take a snapshot
  of 2048 words (8192 samples) on `scope_arm`. The host reads it back through
  `scope_sel` and `scope_addr`. The paper gives "about 8000 samples"; its
  "i.e. 8 ns" must mean 8 us at 1 ns per sample.

Latency: `iband1`, `iband2` and the scope inputs each follow the delay-line
outputs by one register. Scope word `s` holds the outputs after edge
`wa - 1 + s`, where `wa` is the edge that samples `scope_arm`.

## Back end sum

`dbe_sum` adds the two board sums and halves the result, giving the average
over all eight antennas on `dbe_out`. That is two registers after `iband1`. In
the paper, the back end is an existing design changed to add the two partial
sums. Its channelizer, bandpass correction and recorder interface are not part
of this RTL.

## Calibration correlator

The correlator is an FX design. The filter bank and FFT (outside this RTL)
turn each of the two streams into spectra of 32 bins. These come back two
bins per clock with `fft_sync` marking the first bins.
- `cmult_conj` forms `A * conj(B)` at full precision (37 bits).
- `vector_accumulator` adds `int_len` spectra per bin into 65-bit block-RAM
  accumulators. That is enough for 2^28 spectra, more than the 16 s (2.56e8
  spectra) the paper allows.
- At the last spectrum, it copies the sums into a result memory, raises
  `dump` and counts `dump_count`. The host reads the result memory by bin
  (`corr_addr`, 1 clock latency) while the next integration runs.

The control computer derives the residual delay from the phase slope of the
cross spectrum across the band. When the two streams are aligned, the phase
is zero in every bin.

## Timing summary (clock edges at 256 MHz)

| path | latency |
|---|---|
| delay line, input sample to output | 4·coarse + fine + frac/10 + 44 samples |
| delay line outputs → `iband1`, `iband2`, `corr_a/b`, scopes | 1 |
| delay line outputs → `dbe_out` | 3 (`iband1` + 2) |
| `frac` change → update pulse | 13, then the new set is active at the next edge |
| coarse change of n words | settles in n clocks |
| `fft_*` → accumulator | 1 (multiplier register) |
| host reads (`scope_addr`, `corr_addr`) | 1 |

## Design choices beyond the paper

- The delay is split into `coarse`, `fine` and `frac` fields.
- The coefficients are the plain sinc, signed 18-bit with 16 fraction bits.
  Outputs are rounded to nearest and saturated.
- Both sums are averages (floor division), so the phased sums stay 8 bits.
- The Walsh correction is done by subtraction.
- Coefficient loading starts on a change of `frac`, on the `load` strobe, and
  after reset.
- The scopes are 2048 words deep, armed per board and read through one
  multiplexed port.
- FFT outputs are 18 bits, two bins per clock. The correlator has a sync
  marker, a dump counter and a result memory separate from the accumulators.
- Links between boards are wires in the same clock domain. Serial link
  latency, ADC interfaces and clock crossing are not modelled.
- Each board's iBand2 stream comes from its own four antennas. So the
  correlator pairs one antenna of board 0 with one of board 1 and cannot
  correlate two antennas on the same board.

## Simulating

Each testbench in `tb/` checks its own results. It ends by printing
`TB_RESULT checks=N failures=M`, and it has a watchdog. Random data comes
from `$urandom`. A testbench builds with plain Verilator, for example:

    verilator --binary --timing -Irtl -y rtl rtl/pa_pkg.sv tb/tb_phased_array_top.sv \
              --top-module tb_phased_array_top
    ./obj_dir/Vtb_phased_array_top

`tb_phased_array_top` runs the whole processor at its default size. That is
eight antennas, 1000-word FIFOs, 2048-word scopes and 32 channels. One random
sky signal reaches the antennas with geometric delays of up to 3100 samples,
and the delays are programmed to compensate. A reference model computes every
delay line, both board sums, the back-end sum and both correlator streams. The
testbench compares them bit for bit after every clock edge.

It also checks:
- that the compensated beam equals the sky signal itself;
- Walsh sign changes, and fractional delays with their coefficient reloads;
- a move of one antenna to the largest coarse delay and back (974 repeated
  and 974 dropped words);
- iBand2 selection changes, and a scope snapshot on one board;
- two correlator integrations, fed through a behavioural 64-point DFT that
  stands in for the FFT, with zero cross-power phase for aligned antennas.

Each of these mechanisms is counted, and one that never occurs counts as a
failure.

`tb_delay_test` repeats the classic bench test of a delay line on one board.
Two channels get the same band-limited noise (100 MHz low-pass), and 8192
samples of both channels and of their sum are captured through the scopes.
The test then computes the cross-correlation and the power of the average:
- With equal delays, the correlation peaks at lag 0 and the average keeps the
  full power of a channel.
- With one channel delayed by 26.5 ns (coarse 6, fine 2, frac 5), the peak
  sits at lags 26 and 27 with nearly equal height (0.99). The average's power
  falls to about half (0.53).

`tb_corr_delay` runs the correlator's own test through the whole processor.
Antennas 0 and 4 share a noise component on top of noise of their own, and
antenna 4 gets the common part 3 samples late, like a longer cable. The
residual delay is read from the phase slope of the integrated cross spectrum:
- With equal noise levels and 128 spectra, it reads about 3 samples.
- After the delay line of antenna 0 is lengthened by 3 samples, it reads
  about 0, a flat phase.
- With the common part 9 dB below the noise, 1024 spectra still give about 3
  samples (within ±0.75 over the seeds tried).

The block testbenches cover:
- each stage against its timing formula;
- the FIR against a direct convolution;
- the double buffer's update timing;
- the correlator against sums computed in the testbench.

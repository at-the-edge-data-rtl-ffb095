# Streaming DCSTM peak finder

This design finds the positions of sparse, narrow peaks in a sampled detector
waveform as the samples stream in, one sample per clock, with a fixed latency.
The use case behind it is the electron time-of-flight traces of an X-ray
free-electron-laser detector (0.5 ns pulses sampled at 6 GSa/s). A peak of the
waveform is a zero crossing of its derivative. The design therefore does two
things:

1. It computes a low-noise derivative of the stream with the *discrete cosine
   and sine transform method* (DCSTM). The transforms are done on short windows
   that are tapered and overlapped, so that they work on an endless stream.
2. It finds the zero crossings of that derivative, keeps only those that pass
   three threshold tests, and refines each one to a fraction of a sample by a
   weighted average of the two samples on either side.

The RTL is parameterised. Its defaults are the configuration published for the
time-of-flight case: a window of 128 samples, and the fixed-point word sizes
listed in [Word sizes](#word-sizes).

## Derivative by transforms

Over one window of M samples, a cosine transform (DCT-II) followed by an
inverse sine transform (the inverse of DST-II) is a spectral derivative. The
same holds for a sine transform followed by an inverse cosine transform. Each
coefficient is multiplied by its frequency on the way through. Averaging the
two routes cancels most of the edge error that either route has alone. So one
window passes through:

```
x --taper--> DCT --*(-w)--> IDST --+
         \-> DST --*(+w)--> IDCT --+--> J (sum of both routes)
```

The frequency weight is `w(k) = pi*k/(2M)`. The factor one half is there
because the two routes are added. The weight also moves each coefficient to
the index the inverse transform expects:

- DCT output k+1 feeds IDST input k, so IDST input M-1 gets zero.
- DST output k-1 feeds IDCT input k, so IDCT input 0 gets zero.

A window transform assumes the signal is periodic. Windowing a stream
therefore creates jumps at every window edge. The design removes them with
two paths that run side by side:

- **Top path.** The input is multiplied by `sin^2(pi n/M)`, with n the
  position in the window. The taper is zero at both window edges. The path
  result is delayed by K = M/2 samples after the transforms.
- **Bottom path.** The input is multiplied by `cos^2(pi n/M)` and then delayed
  by K samples *before* the transforms. The windows are framed the same way as
  in the top path, so the delayed, cos^2-tapered signal looks like a
  sin^2-tapered one whose edges fall in the middle of the top path's windows.

Since `sin^2 + cos^2 = 1` and the derivative is linear, the two path outputs
add up to the derivative of the untapered input. The two delays line the paths
up for that final addition. A pulse that sits on a window edge of one path is
in the middle of a window of the other. (`d/dn [w x] = w x' + w' x`, and the
`w'` terms of the two tapers cancel.)

`dcstm_derivative` holds the two paths (`dcstm_path`, instantiated twice) and
the final adder. Each path is:

```
dcstm_window -> [delay_fifo] -> sdctm_transform(DCT) -> dcstm_freq_mult -> par2ser -> sdctm_transform(IDST) -+
                             -> sdctm_transform(DST) -> dcstm_freq_mult -> par2ser -> sdctm_transform(IDCT) -+-> J -> par2ser -> [delay_fifo]
```

## The streaming transform engine (`sdctm_transform`)

Each transform is a matrix-vector product `X[k] = sum_n C[k][n] x[n]`. The
engine takes its input serially, one word per step, and gives its output in
parallel.

- It has M multiply-accumulate lanes, one per output k.
- When word n arrives, lane k adds `C[k][n] * x[n]` to its accumulator. Every
  step therefore uses one column of the coefficient matrix.
- After the M-th word, the M sums are scaled to the output word size and
  registered. `out_valid` is high for that one step.
- The next window starts on the very next step, so windows follow each other
  with no gaps.

This is M multiplications per step, against M² per window for a direct
product done all at once.

### Coefficient storage

The coefficient matrix is not stored as M×M words. Every entry of all four
transforms has the form `s * cos(pi * j / (2M))` for a whole number j, where s
is a normalisation factor. The engine therefore keeps only two things:

- a ROM of `sqrt(2/M) * cos(pi*j/(2M))` for j = 0 … 4M-1;
- the special constants `sqrt(1/M)` and `sqrt(1/(2M))`.

Lane k works out j from the word count n as follows (all modulo 4M):

| transform | j |
|---|---|
| DCT-II | `k(2n+1)` |
| DST-II | `(k+1)(2n+1) - M` (a sine written as a shifted cosine) |
| IDCT (DCT-III) | `n(2k+1)` |
| IDST (DST-III) | `(2k+1)(n+1) - M` |

Each lane then multiplies by the ROM word, or by a special constant for the
entries that use another scale:

- DCT: k = 0;
- DST: k = M-1;
- IDCT: n = 0;
- IDST: n = M-1.

The result is the same matrix, quantised word by word. The ROM has 4M entries
rather than M², and because the index is taken modulo 4M, **M must be a power
of two**. Every table is computed from its closed form while the design
elaborates (in `dcstm_pkg`), so no data files are used.

### Scaling

Products are accumulated at full precision. At the output the sum is shifted
down to the output's fraction bits (floor) and saturated to the output width.
The forward transforms are orthonormal, so a forward transform followed by its
inverse returns the window. The testbench checks this.

## Zero-crossing qualification (`zc_qualifier`, `zc_pair_array`)

The derivative stream is numbered by a 16-bit position counter. A state machine
looks at `s = d` (or `s = -d` when `polarity = 1`, which finds dips instead of
peaks). A crossing qualifies in three stages:

1. **IDLE.** Wait until `s > th1`, then move to ARMED.
2. **ARMED.** On the first sample with `s <= 0`, take the two samples around
   the sign change, (position-1, previous value) and (position, value). Write
   them into the position array and the value array at the array pointer, and
   move the pointer on by two.
   - If that same sample already has `s < -th2`, the crossing qualifies at
     once.
   - Otherwise move to CHECK.
3. **CHECK.** Wait for one of two outcomes:
   - `s < -th2`: the crossing qualifies.
   - `s > 0` (the derivative turned back): the pair is rejected. The pointer
     moves back by two, so the next crossing overwrites it.

A qualified pair is also sent straight to the estimator. When the arrays are
full (32 pairs by default), a new crossing is dropped and a sticky `overflow`
flag is set. `clear` starts a new record: it resets the position counter, the
pointer, the count and the overflow flag.

The arrays are written a whole pair at a time: the even address holds the
sample before the crossing and the odd address the sample after it. A
synchronous read port (`rd_addr` → `rd_pos`, `rd_val`, one clock later) lets
other logic read the stored pairs.

## Sub-sample position (`zc_weighted_avg`)

Linear interpolation between the two samples would need a divide by
`|v1|+|v2|`. The estimator avoids it. It looks at the ratio of the two
magnitudes in powers of two and gives the sample that is nearer to zero an
integer weight:

| larger/smaller magnitude | estimate |
|---|---|
| one sample is exactly 0 | that sample's position |
| equal | `(t1 + t2)/2` |
| ≤ 2 | `(2·tn + tf)/3` |
| ≤ 4 | `(4·tn + tf)/5` |
| ≤ 8 | `(8·tn + tf)/9` |
| ≤ 16 | `(16·tn + tf)/17` |
| larger | `tn` |

Here tn is the position of the sample with the smaller |v|, and tf the other
one.

- The divisions use a table of reciprocals `round(2^30/d)`. The result is
  rounded to 8 fraction bits.
- A signed time-zero offset `t_offset` is then added.
- The result (`peak_valid`, `peak_t`) comes one clock after the pair is
  presented.

## Top level and timing (`dcstm_peak_finder`)

| port | meaning |
|---|---|
| `in_valid`, `in_data[11:0]` | sample strobe and sample (signed, 7 fraction bits) |
| `clear`, `polarity`, `th1`, `th2`, `t_offset` | record control, crossing direction, thresholds (derivative units, 10 fraction bits), offset (8 fraction bits) |
| `deriv_valid`, `deriv[26:0]` | derivative stream (10 fraction bits, input units per sample) |
| `peak_valid`, `peak_t[23:0]` | position estimate (16 integer + 8 fraction bits) |
| `pair_count`, `overflow`, `rd_addr`/`rd_pos`/`rd_val` | pair arrays |

**The sample strobe is the clock enable of the whole pipeline.** Every
register that carries data moves only on a step with `in_valid` high. A gap in
the strobe (a stall) freezes everything, and the results are exactly the same
as without the gap. Windows are framed from the first sample after reset.

Latency, counted in strobes:

- The derivative of input sample t leaves on the step of input sample
  t + 2M + K + 6 = t + 326.
- In that 326: each of the two transform stages of a path needs a full window
  (M), and the top path's output delay is K = M/2. Registers add 6 steps: the
  taper, the frequency multiply, the two parallel-to-serial converters, the J
  addition and the final addition.
- A position estimate comes two clocks after the derivative sample that
  qualified it.

Throughput is one sample per clock with no gaps between windows.

## Word sizes

These defaults are the time-of-flight configuration. The letters label points
in the datapath. Each entry is total bits/fraction bits.

| point | meaning | width |
|---|---|---|
| A | input | 12/7 |
| B, C | sin² and cos² LUT words (unsigned) | 9/8 |
| D | transform coefficients | 20/18 |
| E, F | tapered input | 15/10 |
| G | DCT/DST outputs | 20/8 |
| H | frequency-weighted coefficients | 28/8 |
| I | IDCT/IDST outputs | 25/10 |
| J | sum of the two routes of a path | 26/10 |
| K | final derivative | 27/10 |
| – | frequency weights (own choice) | 16/14 |

`dcstm_derivative` takes every width as a parameter. For example, the
published configuration for tokamak ECE spectrograms uses integer words:

- input 13/0;
- LUTs 12/10 and 12/8;
- outputs 20/0 to 25/0.

The top level passes only the input width and the derivative width to
`dcstm_derivative`. Datapath results are floored and saturated. Coefficients
are rounded to nearest.

## Resources

At M = 128 the datapath has:

- 8 transform engines of 128 lanes each (1024 multipliers);
- 4 × 128 frequency-weight multipliers;
- 2 taper multipliers;
- roughly 4 × 128 words of register storage in the parallel-to-serial
  converters;
- the two K-word delay lines.

## How far to trust it, and where it departs from the source description

Every block has a self-checking testbench that compares against a model
written independently in real arithmetic:

- The transform outputs match the transform equations exactly.
- The derivative of Gaussian pulses, including pulses on window edges and
  under random stalls, is within 0.04 of the analytic derivative (input
  amplitudes up to 12).
- The end-to-end test runs the top level at its default size. It finds 41
  peaks, both on and off the sample grid, with an RMS position error of 0.075
  samples. The test also exercises a stall, a rejected crossing, overflow, the
  polarity switch and the offset.

Deliberate departures:

- **DST normalisation.** The DST equation as usually printed for this method
  gives the special scale `sqrt(1/(4N))` at k = 0. Here it sits at k = M-1,
  which is the orthonormal DST-II. Only then does the sine/cosine route give
  the derivative. The k = M-1 output is not used downstream in any case.
- **Equal magnitudes in the estimator.** The published ladder tests `|v1| >= |v2|`
  before testing equality, so the equal case could never be reached. The
  design checks equality first, as the accompanying description intends.
- **No skipped multiplications.** The source description saves multipliers
  by dropping transform outputs that are always zero. For M-point transforms
  of general windowed data no output is always zero, so all lanes are built.
  This gives about 1.5k multipliers rather than the roughly 1000 quoted for
  this configuration.
- **Coefficient columns** are picked from the ROM combinationally. There is
  no column register loaded one step ahead. The arithmetic is the same.
- **Own choices** where the source says nothing:
  - the frequency-weight constant and word size;
  - K = M/2;
  - the parallel-to-serial converters between the transform stages;
  - the meaning of "failing the last threshold";
  - array size 32, 16-bit positions and the overflow behaviour;
  - rounding and saturation;
  - the strobe-as-enable stall scheme.
- **Not included:** the convolution-kernel derivative, which is the
  alternative the DCSTM is compared against, and the "direct" (nearest-sample)
  zero-crossing estimate. Threshold values and the time-zero offset are
  run-time inputs. Their values depend on the data.

## Simulating

All modules are in `rtl/`, one per file, and the package is
`rtl/dcstm_pkg.sv`. Each testbench in `tb/` prints
`TB_RESULT checks=<n> failures=<n>` and stops. With Verilator 5:

```
verilator --binary --timing --assert -y rtl rtl/dcstm_pkg.sv tb/tb_dcstm_peak_finder.sv \
          --top-module tb_dcstm_peak_finder -o sim && obj_dir/sim
```

The testbenches are:

- `tb_sdctm_transform`: all four transforms and the round trip.
- `tb_dcstm_window`, `tb_dcstm_freq_mult`, `tb_delay_fifo`.
- `tb_dcstm_path`: one path against the derivative of the tapered signal.
- `tb_dcstm_derivative`: the full derivative with stalls.
- `tb_zc_qualifier`, `tb_zc_pair_array`, `tb_zc_weighted_avg`.
- `tb_dcstm_peak_finder`: end to end, default size.

The full-size runs take a few minutes, because the transform engines evaluate
128 lanes every step.

To change the window, set `M` (a power of two) on `dcstm_peak_finder` or
`dcstm_derivative`. K follows as M/2 and the latency becomes 2M + M/2 + 6.
Word sizes are parameters of `dcstm_derivative` and `dcstm_path`.

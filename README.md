# Recursive piecewise-polynomial FIR filters for real-time waveform fitting

A least-squares fit of a pulse template, with extra basis functions that
soak up known noise such as slow baseline oscillations, can be run as a
filter. Slide the fit along a sampled waveform. Each fit parameter, taken as
a function of the start sample, is then a convolution of the waveform with
one row of the pseudoinverse of the fit's design matrix. The chosen
combination of template amplitudes is one FIR kernel `h_t[n]`, a few hundred
to a few thousand samples long. Its maximum in time gives the pulse time and
amplitude.

A direct FIR that long needs one multiplier per tap. This design avoids
that. It approximates the kernel by polynomial pieces, and it makes each
piece with a few accumulators and a handful of multipliers, whatever the
piece's length. The coefficients, lengths and truncation constants sit in
registers, so the host can load a new kernel while the logic runs.

The RTL here implements the method of A. P. Jezghani, L. J. Broussard and
C. B. Crawford, "A Recursive Method for Real-Time Waveform Fitting with
Background Noise Rejection". It is sized like their digitizer firmware:
8 channels, 7 pieces per channel, pieces of order 4 and up to 500 samples,
and 55-bit coefficients with 50 fraction bits. Anything the publication does
not specify is this design's own choice. Such choices are listed in the
"Departures and own choices" section below.

## The recursion

Take the impulse responses

    h^k[n] = C(n+k-1, k),   n = 1, 2, ...      (h^0 = 1, h^1 = n, h^2 = n(n+1)/2, ...)

These are the diagonals of Pascal's triangle. `h^k` is what `k+1` cascaded
accumulators give for a unit impulse. Each accumulator turns a diagonal into
the next one. To make the response finite, cut every stage off after `L`
samples. A delayed copy of the input, scaled by the total the stage has
reached by then, is subtracted:

    Lambda_0 = 1,   Lambda_k = h^k[L] = C(L+k-1, k)

    r^0[n] = r^0[n-1] + v[n]            - v[n-L]
    r^k[n] = r^k[n-1] + r^(k-1)[n]      - Lambda_k v[n-L]      (k = 1..K)

This gives exactly `r^k[n] = sum_{m=1..L} h^k[m] v[n-m+1]`. It is a
length-`L` convolution with a degree-`k` polynomial, at a cost of one adder
pair and one constant multiplier per order. One polynomial piece

    h[n] = sum_{k=0..K} c'_k h^k[n],   1 <= n <= L

is the weighted sum `sum_k c'_k r^k[n]`. A segment therefore needs `K`
multipliers for the `Lambda_k` and `K+1` multipliers for the `c'_k`. With
`K = 4` that is 9 multipliers per segment, for `L` up to 500.

The subtraction cancels the accumulated history exactly. So the accumulators
are free to wrap around: modular two's-complement arithmetic is exact as long
as the final truncated `r^k` fits the word. The accumulator width `ACC_W` is
chosen for that case. The largest value is `max|v| * C(L_MAX+K, K+1)`, which
is 52 bits for 14-bit samples, `L_MAX = 500` and `K = 4`. `rppf_pkg`
computes this width from the parameters.

The same wrap-around argument explains the restart rule. The cancellation
only works if `L` and `Lambda_k` were the same over the whole history held
in the accumulators. After either one changes, the segment must start again
from an all-zero history (`clear`). Changing only `c'_k` needs no restart.

### A kernel from several pieces

The segments form a chain. Segment `s` gets the input already delayed by
`L_1 + ... + L_(s-1)`: each segment's delay line also feeds the next
segment. Segment `s` also gets the running sum of the previous segments'
outputs and adds its own weighted orders to it. The last sum is the full
kernel response `r_t[n] = sum_j h_t[j] v[n-j+1]`. A segment whose
coefficients are all zero adds nothing. Unused trailing segments are
therefore set to `L = 1` and zero coefficients.

### Computing the configuration

Computing the configuration is the host's job. This RTL does not do it.

- Fit each piece of the desired kernel with an ordinary polynomial
  `h[n] = sum_j c_j n^j`, where `n` counts from 1 at the start of that piece.
  Knots at the kernel's local extrema work well.
- Convert the `c_j` to the recursion basis by back substitution, using the
  unsigned Stirling numbers of the first kind `|s(k,j)|`:

      c'_K = c_K K!
      c'_j = (c_j - sum_{k=j+1..K} |s(k,j)| / k! * c'_k) * j!

  One printed version of this formula multiplies by `(j+1)!` in place of
  `j!`. The form given here is the one that inverts
  `c_j = sum_k |s(k,j)|/k! c'_k`. `tb/workloads_tb.sv` checks it.
- Set `Lambda_k = C(L+k-1, k)`.
- Quantise `c'_k` to 55-bit two's complement with 50 fraction bits, so the
  range is ±16.
- Rounding makes the kernel area slightly wrong. Correct it by adjusting the
  constant terms `c'_0`, so that a zero-area kernel stays zero-area.

## One segment in hardware (`poly_segment`)

```
 v_in ─┬─► x (reg) ─────────────────────────► + ┐
       │                                        Acc0 ──► r^0 ──► + ┐
       └─► delay_line (L+1 clocks) ─► xd ─────► − ┘              Acc1 ──► r^1 ... ──► Acc4 ──► r^4
                 │                      └─► ×Lambda_1 (1 clk) ─► − ┘
                 │                      └─► ×Lambda_k (k clks)  ...
                 └─► v_out (to next segment)
 r^k ─► delay K−k ─► ×c'_k (reg) ─► Σ_k ─► + r_in ─► r_out (reg)
```

Every accumulator is a register. So order `k` is `k` clocks behind order 0,
and the subtraction `Lambda_k * xd` is delayed by `k` clocks to match: the
product register supplies the last of those clocks. Order `k` is then
delayed `K-k` clocks, so all orders line up before the `c'_k` multipliers.
The products and the final sum are registered. The input register and the
registered delay-line output shift the whole segment by one clock. This
does not change the kernel.

| quantity | value |
|---|---|
| throughput | one sample per clock |
| own latency | `r_out(t) = r_in(t-1) + sum_n h[n] v_in(t-(K+4)-n+1)`, i.e. K+4 = 8 clocks |
| delayed signal | `v_out(t) = v_in(t-1-L)` |
| multipliers | K × (33×14 bit) for Lambda, K+1 × (55×52 bit) for c' |
| adders in the longest path | one accumulator add/subtract, or the sum of K+1 products plus `r_in` |

In the chain, every segment boundary adds one clock to both the running sum
and the delayed signal. So all pieces stay aligned. The filter output of a
channel lags the filter input by `K + SEGS + 4 = 15` clocks.

`delay_line` is a circular buffer of `L_MAX` words with a registered read.
The length `L` can be changed at run time. A fill counter makes words not
yet written since the last restart read as zero. A restart therefore needs
no clearing of the array, which maps onto block RAM or shift-register LUTs.

## Number formats

| signal | format |
|---|---|
| ADC sample, averaged sample `v` | 14-bit two's complement |
| `L` | 9 bits, 1..500 |
| `Lambda_k` | 32-bit unsigned; C(503,4) = 2 635 531 375 is the largest |
| `c'_k` | 55-bit two's complement, 50 fraction bits |
| accumulators `r^k` | 52-bit two's complement, wrapping |
| products, running sum `r_t` | 52+55+6 = 113 bits; there is no rounding anywhere inside the filter |
| filter output `r_out` | `floor(r_t / 2^50)`, saturated to 32-bit two's complement |

All rounding and compression happen once, at the filter output.

## Channels and the chip top (`rppf_top`)

Each of the 8 channels has the following parts:

1. **`pair_avg`**: the ADC runs at 250 MS/s, and two samples arrive per
   125 MHz clock. They are averaged as `floor((s0+s1)/2)`, giving one sample
   per clock.
2. **`pp_filter`**: the seven chained segments, plus output compression.
3. **`trigger`**: a threshold trigger on `r_out`. While armed, a sample
   `>= thresh` starts a 32-sample window that includes the crossing. The
   first maximum in that window is reported as the event energy, together
   with its clock count as the time. A dead time of 625 clocks (5 µs),
   counted from the crossing, suppresses further triggers on the same pulse.
   `ev.valid` comes 32 clocks after the crossing.

**`coef_regs`** holds every register, written one per clock over a simple
bus (`cfg_wr_en`, `cfg_wr_chan`, `cfg_wr_seg`, `cfg_wr_idx`, `cfg_wr_data`):

| `wr_idx` | register | notes |
|---|---|---|
| 0 | `L` of segment `wr_seg` | 1..500; other values are ignored (and flagged by an assertion); pulses the channel's restart |
| 1..4 | `Lambda_1..Lambda_4` | unsigned; pulses the channel's restart |
| 5..9 | `c'_0..c'_4` | signed; no restart |
| 15 | trigger threshold of the channel | signed; `wr_seg` ignored |

After reset every channel has `L = 1`, all coefficients zero (output zero)
and its threshold at the maximum (no triggers). A write takes effect on the
next clock. A restart clears the channel's filter one clock after the
write. The chip-level latency from the ADC pins to `r_out` is
`K + SEGS + 5 = 16` clocks.

The ADCs themselves, and the host software that fits kernels and computes
`c'_k` and `Lambda_k`, are outside this RTL. The ADC samples come in through
ports, and the configuration comes in over the register bus.

## Departures and own choices

These follow the published design: the recursion and its wiring, with the
`c'_0` multiplier on order 0; the chaining of segments through the delayed
signal and the running sum; 7 segments of order 4 with `L <= 500`; 55-bit
coefficients with 50 fraction bits; all compression at the output; pairwise
averaging of the two samples per clock; loading coefficients and `Lambda_k`
at run time; and the trigger rule from the evaluation (threshold, local
maximum in a short window, 5 µs dead time).

This design's own choices:

- the pipeline registers and the resulting latencies;
- the accumulator, `Lambda` and output widths;
- floor rounding and saturation at the output, and floor rounding in the
  averager;
- the delay-line organisation and its zero-fill on restart;
- the register bus and its address map;
- the automatic restart after `L` or `Lambda` writes;
- the 32-clock trigger window and the tie rule (the first maximum wins);
- the event ports.

The published text writes a segment's output once as `sum_{k=1..K}`. Here
the sum runs from `k = 0`, which matches the published logic diagram and the
basis expansion.

Not included: the chi-square evaluation over several fit parameters, which
the method describes mathematically but the published firmware does not
implement; event readout beyond the event ports; the host software.

Coarse, technology-independent synthesis of the full-size top (8 channels)
gives about 64 000 flip-flop bits and 487 000 memory bits. The memory bits
are mostly the 56 delay lines of 500 × 14 bits. The count also includes
5 552 word-level cells, among them 280 coefficient multipliers of 55 × 52
bits and 224 `Lambda` multipliers. These figures have not been mapped to a
particular FPGA. The published implementation builds the filter from LUTs
and shift registers rather than DSP slices, and reports that this takes a
few percent of a Kintex-7 410T.

## Verification

Each testbench checks its unit against an independent reference, prints
`TB_RESULT checks=N failures=M`, and has a watchdog.

| testbench | what it checks |
|---|---|
| `pair_avg_tb` | floor average for corner and random pairs, 1-clock latency |
| `delay_line_tb` | `dout(t) = din(t-1-L)` for L = 1, 2, 17, 499, 500, zero history after restart |
| `poly_segment_tb` | full-size segment against a direct 128-bit convolution each clock, for L = 1, 7, 37, 500, random coefficients, and the worst-case constant input that sets the accumulator width |
| `pp_filter_tb` | seven-segment filter against a direct convolution of the whole kernel, full and compressed outputs, saturation |
| `coef_regs_tb` | every register of every channel, sign handling, ignored addresses, restart pulses |
| `trigger_tb` | events, energies, times and dead-time suppression against a reference of the rule |
| `workloads_tb` | impulse responses of a long trapezoid (200/50/200), a short trapezoid (10/10), a flat-topped cusp (orders 2,0,2) and a 250-sample seven-piece order-4 kernel, from ordinary polynomial coefficients converted by back substitution, against the polynomials evaluated directly; the output returns exactly to zero afterwards |
| `rppf_top_tb` | the whole chip at full size: kernels loaded over the bus, synthetic detector waveforms (offset, noise, slow oscillation, tail pulses), every channel's output each clock against a reference, events against a reference trigger, a restart, a coefficient-only update, saturation and dead-time suppression all exercised |

All testbenches use the default sizes. To run one with Verilator:

```
verilator --binary --timing --assert -Irtl -Itb --top-module rppf_top_tb \
    rtl/rppf_pkg.sv rtl/*.sv tb/rppf_top_tb.sv -o sim
./obj_dir/sim
```

`rppf_top_tb` simulates 9000 clocks of all 8 channels in a few seconds.
The sizes are parameters: `L_MAX`, `NSEG`/`SEGS` and `NCH` on the modules,
and the shared constants in `rppf_pkg`. The order `K` is a package constant,
because the segment configuration structure depends on it.

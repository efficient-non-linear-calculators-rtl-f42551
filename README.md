# Square-law activation functions without multipliers or tables

Neural-network accelerators spend most of their multipliers on matrix products,
and once those are fast the activation functions (tanh, sigmoid, ELU, ...) can
become the expensive part: they need exponentials and divisions, lookup tables
that grow with the word size, or piecewise fits with their own multipliers.

This RTL implements a different route. A family of *square-law* activations
(SQNL and relatives) is produced by nothing more than a counter, a saturating
adder, a saturating subtracter and an accumulator. The curves are quadratic, not
exponential, but have the shapes of tanh, sigmoid, softplus and ELU. The same
circuit can also *scale* its output by a run-time factor without a multiplier,
and that is used to build an LSTM cell in which two of the three element-wise
products disappear into the activations.

## 1. The idea: add an offset, clip, take it away again, average

For an integer netsum `n` of `R` bits, the generator computes

```
f(n) = 1/N * sum_{k=0}^{N-1} sat( sat(n + U(k), C) - U(k), M )

sat(x, Y) = -Y if x <= -Y,  x if -Y < x < Y,  Y if x >= Y
```

where `U(k)` is a fixed set of `N` offsets, `C` is the adder's clipping level
and `M = 2^(R-1)`.

If `n` is small, no `n + U(k)` reaches the clipping level, the subtraction
restores `n` exactly, and the average is `n`: the mapping is linear near 0. As
`|n|` grows, more of the sums are clipped, so the subtraction no longer restores
`n` and the average falls short of it. The fraction of clipped sums grows
linearly with `|n|`, so the loss grows with `n^2`. That is where the curve bends.
With offsets spread uniformly over `-2^(R-2) .. 2^(R-2)` and `C = 2^(R-2)`, the
averaged result is

```
f(n) = n - n^2/(2M)   for 0 <= n <= M,    f(n) = n + n^2/(2M)   for -M <= n < 0
```

and `+-M/2` beyond. This is SQNL, a tanh look-alike. The spread of the offsets
sets how early the curve bends, the same way the variance of a random dither
would. A random source is not needed: a binary counter produces the offsets.

**Number format.** Everything is two's complement. With `R` bits, `2^(R-2)`
stands for 1.0. For `R = 8` the netsum range `-128..127` means -2.0..2.0, and
SQNL maps it onto `-64..64`, meaning -1.0..1.0.

## 2. The four mappings

One generator produces all four mappings. The `mode` input (`sqnl_pkg::act_mode_e`)
selects the offsets, the clipping and the output scaling:

| mode          | offsets `U(k)`                          | adder clipping     | result (R = 8)                                     |
|---------------|-----------------------------------------|--------------------|----------------------------------------------------|
| `ACT_SQNL`    | `-64 .. 64`                             | `+-64`             | `n -+ n^2/256`, limits `+-64` (tanh-like)          |
| `ACT_LOGSQNL` | as SQNL                                 | as SQNL            | `SQNL/2 + 32`, range `0..64` (sigmoid-like)        |
| `ACT_GATED`   | as SQNL                                 | `+-C`, `C = c_in`  | about `(C/64) * SQNL(n)`, range `-C..C`            |
| `ACT_ASYM`    | `-128 .. 0` plus `alpha`                | below only, at -64 | `-alpha` below, quadratic, then `n` (ELU/softplus) |

- **LogSQNL** halves the SQNL result and adds one half. Both steps are a shift
  and a constant, folded into the filter's final shift.
- **Asymmetric.** With `alpha = 0` the mapping is a softplus look-alike
  (`SQ_Softplus`). With `alpha = 2^(R-2)` it is ELU-like (`SQLU`). The closed form
  is `((M/2 + n + alpha)^2)/(2M) - alpha` between `-M/2 - alpha` and
  `M/2 - alpha`, `-alpha` below that range and `n` above it.
- **Gated.** Lowering the adder's clipping level from `2^(R-2)` to `C` scales the
  whole curve by about `C / 2^(R-2)`. The value `C` is a run-time input. For
  example, `f(n = 40, C = 40) = 24`, while the exact product
  `(40/64) * SQNL(40) = 21.1`.

  In an LSTM cell, `C` is driven by a LogSQNL gate output (range `0..2^(R-2)`).
  The gated unit then computes "gate times tanh(x)" with no multiplier. Its
  error against the exact product is largest in the middle of the curve and
  vanishes at the ends.

## 3. Offsets and accuracy

With a finite `N`, the mapping is not a smooth parabola but a chain of `2N`
straight segments. A segment bends each time one more offset starts to clip.
The counter places the `N` offsets at the centres of `N` equal slots of the
span `2^(R-1)`:

```
STEP = 2^(R-1) / N,   U(k) = k*STEP + STEP/2 - 2^(R-2)            (symmetric)
                      U(k) = k*STEP + STEP/2 - 2^(R-1) + alpha    (asymmetric)
```

For `R = 8, N = 8` this gives `-56, -40, ..., 56`. For `N = 4` it gives
`-48, -16, 16, 48`.

With centred offsets, the segment corners fall on the ideal parabola. The
worst deviation is at mid-segment and equals `STEP^2 / (8M)` LSB, before the
final truncation:

| R  | N | worst deviation (LSB) |
|----|---|-----------------------|
| 8  | 8 | 0.25                  |
| 8  | 4 | 1                     |
| 12 | 8 | 4                     |

`N` is a trade of time against smoothness: each result takes `N` clocks.
`N` must be a power of two (2 up to `2^(R-2)`) so that the division by `N` is a
shift. `N = 2^(R-1)` is also accepted, with uncentred offsets.

## 4. The generator (`sqnl_generator`)

```
 n_in --[Resize]--> n_q --+--> [Add, clip +-C] --> [Subtract, clip M] --> sign-extend
                          |         ^                    ^                    |
                     counter k --> U(k) ---------------+                     v
                     (Counter1 / Counter2 + alpha)              [Sum & Accumulate, R+log2 N bits]
                                                                              |
                                                      [>> log2 N (or log2 N + 1, +2^(R-3))]
                                                                              |
                                                                  [sign-extend & latch] --> f
```

| module            | what it holds                                                                                         |
|-------------------|-------------------------------------------------------------------------------------------------------|
| `sqnl_resize`     | Arithmetic right shift of the `RI`-bit netsum by `RESIZE_SHIFT`, then saturation to `R` bits.         |
| `sqnl_counter`    | The `log2 N`-bit count and its mapping to symmetric or asymmetric offsets.                            |
| `sqnl_sat_addsub` | One sample of the sum. It is combinational.                                                           |
| `sqnl_filter`     | Accumulator, division by `N` (a shift), LogSQNL scaling, output register and a one-clock `valid` pulse. |

**Handshake and timing.** `start` is accepted while `ready` is high. On that
clock edge the generator captures the resized netsum, `mode`, `c_in` and
`alpha`. The next `N` clock edges each add one sample. The result is latched on
the `N`-th edge, and `done` is high for the clock after it. So `f` is valid
exactly `N` clocks after the accepting edge, and it holds until the next
result.

`ready` is also high during the last sampling clock. With `start` held high,
evaluations run back to back at one result every `N` clocks.

Assertions check two things:
- `c_in` and `alpha` stay within `0..2^(R-2)`;
- `done` only follows the last sample.

## 5. The LSTM cell (`sqnl_lstm_cell`, the top)

A conventional LSTM step is

```
c_t = sigma(net_f) * c_(t-1) + sigma(net_i) * tanh(net_g)
h_t = sigma(net_o) * tanh(c_t)
```

This cell replaces each sigmoid with a LogSQNL unit. It replaces each
"sigmoid times tanh" with a gated SQNL unit whose `C` input is the LogSQNL
output. Only the forget-gate product `sigma_f * c_(t-1)` remains a product, in
`qsu_mult`:

```
net_f -> LogSQNL -> sigma_f --+
net_i -> LogSQNL -> sigma_i --|--------------------------+ C
net_o -> LogSQNL -> sigma_o --|------------------+ C      |
                              v                  |        v
c_prev ----------------> [qsu_mult] --> (+) <-- Gated(net_g)
                                         | saturate to R bits
                                         +--> c_t --> Gated(c_t) --> h_t
```

**Sequencing.** The step runs in three phases:

1. The three LogSQNL units run together for `N` clocks.
2. The candidate unit runs for `N` clocks, with `C = sigma_i`. In parallel, the
   product `c_prev * sigma_f / 2^(R-2)` is formed.
3. The sum is saturated to `R` bits and registered as `c_t`. The output unit
   then runs on it for `N` clocks, with `C = sigma_o`.

`done` pulses `3N + 2` clocks after `start` is accepted, which is 26 clocks for
`N = 8`. `c_t` and `h_t` then hold until the next step.

**Interface.** The four netsums are inputs, as is `c_prev`. To run a sequence,
feed `c_t` back as `c_prev`, and feed `h_t` (through your matrix product) back
into the netsums.

**Ranges.** The cell state is limited to `R` bits, that is `|c| < 2.0`. The
second gated unit takes `c_t` without resizing.

## 6. Parameters

| parameter      | default | meaning                                                         |
|----------------|---------|-----------------------------------------------------------------|
| `R`            | 8       | Working word size. Also used at 12 (activations) and 16 (LSTM cell). |
| `N`            | 8       | Number of offsets, which is also the number of clocks per result. |
| `RI`           | 16      | Netsum width at the input.                                      |
| `RESIZE_SHIFT` | `R-2`   | Fraction bits dropped from the netsum. With this default, a product of two `R`-bit values in the `2^(R-2) = 1.0` format lands on the generator's scale. |
| `RO`           | `R`     | Generator output width. The output is sign-extended.            |

## 7. How far to trust it, and where it departs from the source description

The datapath follows the published method and its schematics:
- the saturation levels of the symmetric, asymmetric and gated variants;
- the `R + log2 N` accumulator;
- the shift-only LogSQNL;
- the offsets from a binary counter;
- the LSTM cell topology.

The RTL reproduces the numbers published for the method. These include
`f(40, C=40) = 24` and the SQNL limits `+-64` for `R = 8`. They also include the
deviation profile: deviations within 0.25 LSB for `N = 8`, and about 1 LSB for
`N = 4`, peaking at `n = 16, 48, 80, 112`.

The following points are choices made here, or differences from the source:

- **Offset placement.** The source gives the offset span but not where the `N`
  offsets sit inside it. They are centred in their slots (section 3); this
  matches the published numbers above.
- **Asymmetric adder.** The source gives the adder's limits as `{-U_MAX, M}`, and
  also says only the lower bound is needed. Only the lower bound is applied, so
  the adder keeps `R+1` bits. Applying the upper bound would pull the ELU-like
  curves away from `f(n) = n` near the top of the range.
- **Subtracter limit.** `+M = 2^(R-1)` is not representable, so the subtracter
  clips at `M-1`. With these offsets that limit is never reached.
- **SQNL maximum.** The SQNL reaches `+64` for `R = 8`, as the closed form
  requires. One sentence of the source quotes the range as `-64..63`.
- **Rounding.** The division by `N` truncates toward minus infinity.
- **Resize.** The rule, `RI` and `RESIZE_SHIFT` are this design's own. The
  source only names the block.
- **Input capture.** The generator registers its inputs and has a
  start/ready/done handshake. The source's schematic has neither: its netsum
  must simply be held for `N` clocks.

  As a result, the flip-flop counts are higher than the published ones:
  - one generator has about 50 flip-flops, against the published 24;
  - the LSTM cell, with five generators, has about 215, against the published 55.

  Dropping the capture registers would bring the counts close to the published
  ones, at the cost of an interface that needs a stable netsum.
- **One generator for all mappings.** The published resource figures treat
  SQNL, SQLU and SQ_Softplus as separate circuits. Here they are one unit with a
  `mode` input, which costs a few multiplexers.
- **`qsu_mult`.** The source proposes a low-cost multiplier for the forget
  gate but does not describe it. `qsu_mult` is an ordinary multiplication
  followed by a shift, so the cell as written still contains one multiplier.
- **LSTM cell.** Its phase sequencing, `N = 8`, and the saturation of `c_t` are
  choices made here.
- **Matrix product.** The matrix product that produces the netsums is not part
  of this RTL.

## 8. Simulating

Each testbench in `tb/` is self-checking. It prints a line
`TB_RESULT checks=<n> failures=<m>` and ends with `$finish`. It also has a
cycle watchdog.

Reference values come from `tb/sqnl_ref_pkg.sv`. That package evaluates the
defining sum on plain integers, and the closed forms in real arithmetic. It
shares no code with the RTL.

| testbench             | what it covers                                                                                  |
|-----------------------|-------------------------------------------------------------------------------------------------|
| `sqnl_resize_tb`      | Every 16-bit input, plus a 12-bit instance.                                                      |
| `sqnl_counter_tb`     | Offsets for `N = 8` and `N = 4`, asymmetric offsets for several `alpha`, `clr`, and hold.        |
| `sqnl_sat_addsub_tb`  | Exhaustive `n` and `u` at several clipping levels, plus the asymmetric clipping.                 |
| `sqnl_filter_tb`      | Random bursts: mean, LogSQNL form, `valid` timing, hold, and sign extension.                     |
| `qsu_mult_tb`         | Exhaustive `c` and gate values.                                                                  |
| `sqnl_generator_tb`   | All 256 inputs in every mode (gated `C = 0/20/32/40/64`, `alpha = 0/30/64`), at `N = 8` and `N = 4`, with exact and closed-form checks, latency `N`, and back-to-back throughput. |
| `sqnl_lstm_cell_tb`   | 400 recurrent steps at default sizes, with exact `c_t`/`h_t` and latency `3N+2`. It counts every mechanism (netsum saturation, partly open and closed gates, adder clipping, forget scaling, `c_t` saturation, recurrence) and fails if any never occurs. |
| `sqnl_workloads_tb`   | A 12-bit generator (SQNL, SQLU, SQ_Softplus over all 4096 inputs) and a 16-bit LSTM cell.        |

To run one, for example the cell test, from the directory that holds `rtl/`
and `tb/`:

```
verilator --binary --timing --assert -Wno-fatal --top-module sqnl_lstm_cell_tb \
    -y rtl -y tb +libext+.sv rtl/sqnl_pkg.sv tb/sqnl_ref_pkg.sv tb/sqnl_lstm_cell_tb.sv
./obj_dir/Vsqnl_lstm_cell_tb
```

Every test finishes in well under a second.

The RTL does not depend on X propagation. All state has a reset: asynchronous
and active low (`rst_n`).

# Adaptive linear-prediction FIR filter against narrow-band radio interference

Radio detectors for cosmic-ray air showers look for short broadband pulses,
a few tens of nanoseconds long, in the 30–80 MHz band. That band also carries
continuous narrow-band transmitters. Their carriers raise the noise floor and,
with it, the threshold any self-trigger has to set. This RTL removes such
carriers in the FPGA, in the time domain, at one sample per clock, with a
filter that adapts to whatever carriers happen to be present.

The idea is **linear prediction with a gap**. A carrier is periodic, so each
of its samples can be computed from older samples. The filter predicts every
sample x[i] from P older samples and subtracts the prediction:

    pred[i]  = sum_{k=0}^{P-1} a_k * x[i-D-1-k]
    clean[i] = x[i] - pred[i]

The P samples used lie more than D samples in the past. A carrier is still
predicted correctly across that gap, so it cancels. An air-shower pulse lasts
far less than D samples, so it cannot predict itself and passes through.
Small D cancels the carriers best but also eats into the pulses; D = 128 is
the setting used in the field.

The coefficients a_k depend on the carriers present, so they are recomputed
from time to time. The hardware collects correlation sums over a block of
1024 samples. A processor (a soft core in the same FPGA, or an external ARM)
solves the P normal equations and writes the coefficients back. The
coefficients only need refreshing now and then: with fixed coefficients,
suppression of a stable carrier holds for hours.

## Data path

```
                 +---------------------+  taps x[i-D-1-k]  +--------------+  pred  +-------------+
 adc_data x[i] ->| lp_delay_line       |------------------>| lp_predictor |------->| lp_subtract |-> clean_data
        |        | D+P register chain  |         |         | P multipliers|        |  x - pred   |
        |        +---------------------+         |         | + adder tree |        +-------------+
        |                                        v         +--------------+               ^
        |                                +---------------+        ^ a_k                   |
        +------------------------------->| lp_covariance |  +---------------+             |
        |                                | 2P MACs over  |  | lp_coef_bank  |             |
        |                                | N_COV samples |  | shadow/active |             |
        |                                +-------+-------+  +-------+-------+             |
        |                                        |                  ^                     |
        |                                        +-> lp_csr <-> processor                 |
        |                                                                                 |
        +--------------- raw sample delayed by pred_latency(P) clocks --------------------+
```

One `lp_channel` holds everything above except the bus slave. `lp_fir_top`
has `NUM_CH` channels (default 2, one per antenna polarization) and one
`lp_csr`.

### Tap positions and the gap

`lp_delay_line` is a chain of D+P registers. While `x_in` carries x[i],
register j holds x[i-1-j], and tap k is register D+k, that is x[i-D-1-k].
The samples used therefore run from x[i-D-P] to x[i-D-1]. With D = 128 and
P = 32 that is samples 129 to 160 before the predicted one. At 200 MS/s the
gap is 640 ns.

### Predictor arithmetic and timing

`lp_predictor` is fully parallel. P registered signed multipliers feed a
registered binary adder tree ($clog2(P) levels, padded with zeros to a power
of two). A last stage rounds half up, shifts right by `COEF_FRAC` and clips
to the sample width. The sum is exact: products are DATA_W+COEF_W bits wide,
and the tree grows by one bit per level. Latency is
`lp_pkg::pred_latency(P) = $clog2(P) + 2` clocks (7 for P = 32).

The raw sample is delayed by the same number of clocks, so x[i] and pred[i]
meet in `lp_subtract`. That block clips x − pred to 14 bits and registers
it. From `adc_data` to `clean_data` the latency is therefore
`pred_latency(P) + 1` clocks: 8 with the defaults, 9 for P = 64.

Coefficients are signed fixed point with `COEF_FRAC` fraction bits. The
default is 14 bits in Q2.12, which covers −2.0 to +2.0 − 2^-12. For the
18-bit variant use `COEF_W = 18` and, for example, `COEF_FRAC = 16`.

Clipping is reported rather than hidden. The predictor flags a clipped
prediction and the subtractor a clipped output (`clean_sat`). Both set a
sticky bit in STATUS. Clipping means the coefficients do not match the signal
(for example, an update gone wrong); with sensible coefficients the
prediction stays near the carrier amplitude.

### What the covariance unit computes

To minimise the power of the clean trace, the coefficients must satisfy the
normal equations

    sum_k a_k * R[|j-k|] = C[j],   j = 0 .. P-1

with, over a block of N_COV samples,

    R[l] = sum_n x[n-D-1] * x[n-D-1-l]     l = 0 .. P-1   (matrix, Toeplitz)
    C[k] = sum_n x[n]     * x[n-D-1-k]     k = 0 .. P-1   (right-hand side)

`lp_covariance` forms these 2P sums directly from the channel's own delay
line. R[l] uses tap 0 times tap l. C[k] uses the current sample times tap k.
No second delay line is needed. All 2P products are formed every clock and
accumulated, without loss, in 38-bit registers (2·14 bits plus log2 1024).

The matrix is taken in its autocorrelation (Toeplitz) form: one sum per lag
rather than a full P×P covariance matrix. For a block of 1024 samples and
stationary carriers the difference is a small edge effect. The full matrix
would need P(P+1)/2 = 528 multiply-accumulators instead of 32 for the
matrix part.

Run timing: a one-clock `start` clears the sums and raises `busy`. The samples
presented in the N_COV clocks after the start clock are accumulated. `done`
rises, and `busy` falls, N_COV + 2 clocks after start. The sums stay
readable until the next start. A start during a run is ignored, and an
assertion reports it in simulation. The filter keeps running with its current
coefficients during a run, so there is no dead time.

### Coefficient update without glitches

`lp_coef_bank` keeps two sets of coefficients. The processor writes the
shadow set one coefficient at a time. A commit copies all P into the active
set in a single clock. The output therefore switches from "old coefficients"
to "new coefficients" between two samples, never through a mixture. After
reset both sets are zero: the prediction is zero, and the clean trace equals
the raw trace delayed by 8 clocks.

## Processor interface

`lp_csr` is an Avalon-MM style slave with 32-bit words and a fixed read
latency of one clock (`avs_readdatavalid`). The word address is
`{channel, reg[9:0]}`:

| reg | access | content |
|---|---|---|
| 0x000 CTRL | W | bit 0: start a covariance run; bit 1: commit the shadow coefficients |
| 0x001 STATUS | R | bit 0 busy, bit 1 done, bit 2 clipping seen since last STATUS read (cleared by the read) |
| 0x002 PARAMS | R | [7:0] P, [23:8] D, [31:24] COEF_W |
| 0x100 + k | R/W | shadow coefficient k (sign-extended on read) |
| 0x200 + 2j | R | bits 31:0 of sum j |
| 0x201 + 2j | R | bits 63:32 of sum j, sign-extended |

Sum j is R[j] for j < P and C[j−P] for P ≤ j < 2P. `irq` is high while
any channel holds a finished run.

The adaptation loop in software:

1. Write CTRL = 1 on each channel.
2. Wait for `irq`, or poll STATUS until bit 1 (done) is set.
3. Read the 2P sums.
4. Solve the Toeplitz system in floating point. Gaussian elimination or
   Levinson–Durbin both work. Add diagonal loading of about 1e-2·R[0]
   (see below).
5. Round each a_k·2^COEF_FRAC to an integer and clip it.
6. Write the coefficients to 0x100+k.
7. Write CTRL = 2 to commit.

The sums are not normalised, so only their ratios matter.

**Diagonal loading is what keeps the coefficients representable.** When the
trace is almost purely sinusoidal, the matrix is nearly singular. The exact
solution can then have coefficients of magnitude 4–7. That happened in
simulation for an FM carrier with P = 64, and for two carriers with D = 32.
Such coefficients clip at ±2 in Q2.12, and the filter then adds power
instead of removing it: the power ratio fell to 0.1–0.2. Adding 1e-2·R[0]
to the diagonal (a noise floor of 1 % of the signal power, in effect) keeps
every |a_k| well below 1 in all tested cases. It costs little suppression,
and in most cases it improves suppression. Anyone who changes `COEF_FRAC`
or the solver should recheck this.

## Parameters

| parameter | default | meaning |
|---|---|---|
| `NUM_CH` | 2 | channels (polarizations) |
| `DATA_W` | 14 | ADC sample width, signed two's complement |
| `COEF_W` | 14 | coefficient width |
| `COEF_FRAC` | 12 | coefficient fraction bits |
| `P` | 32 | prediction order (FIR stages) |
| `D` | 128 | gap between the prediction taps and the predicted sample |
| `N_COV` | 1024 | samples per covariance run |

The defaults match the filter that runs in the field: 32 stages, D = 128 and
14-bit coefficients on 14-bit samples. Laboratory variants with 48 or 64
stages and 18-bit coefficients are reached by setting `P` and `COEF_W`.
Variants with D = 1 or D = 32 are reached by setting `D`. More stages cancel
more carriers, but the multiplier count, and with it the power, grows
linearly with P. In the published power measurements the 32-stage, 14-bit
variant drew no more current than the four-band IIR notch filter it
replaces. That matters for solar-powered stations.

## What is and is not here

This RTL covers the logic of the filter: delay line, predictor, subtractor,
covariance unit, coefficient registers and the bus slave. It does not
contain the processor, its software, or the ADC and its LVDS link. Samples
enter as parallel signed words, one per clock per channel.

The filter method, the data flow, the tap positions and the sizes
(P = 32/64, D = 1/32/128, 14-bit coefficients, 1024-sample covariance blocks,
14-bit ADC) follow the published description of the filter. That description
does not say how the blocks are built. The following are choices made here:

- the register delay line;
- the parallel multipliers and adder-tree pipeline;
- the Q2.12 coefficient format, rounding and clipping;
- the Toeplitz form of the correlation sums and sharing the delay line;
- the start/busy/done handshake;
- shadow/active coefficient buffering;
- the bus, its register map and the clip flag;
- two's-complement input samples;
- two channels.

The published illustration of the method and its caption differ by one
sample on where the taps end (i−D or i−D−1). The RTL follows the
illustration's labels: the last tap is x[i−D−1].

Timing closure at the 200 MHz sampling clock of the field stations has not
been checked. The logic has one multiplier or one adder per pipeline stage,
except the covariance accumulators: they add a registered 28-bit product into
a 38-bit register.

## Files

| file | content |
|---|---|
| `rtl/lp_pkg.sv` | predictor latency, register map |
| `rtl/lp_delay_line.sv` | tapped delay line |
| `rtl/lp_predictor.sv` | pipelined P-tap FIR |
| `rtl/lp_subtract.sv` | clipped subtraction |
| `rtl/lp_covariance.sv` | correlation sums for the normal equations |
| `rtl/lp_coef_bank.sv` | shadow/active coefficient registers |
| `rtl/lp_csr.sv` | processor bus slave |
| `rtl/lp_channel.sv` | one filter channel |
| `rtl/lp_fir_top.sv` | top level: channels and bus slave |
| `tb/tb_*.sv` | one self-checking testbench per block, plus the end-to-end one |
| `tb/tb_lp_variants.sv`, `tb/lp_variant_run.sv` | end-to-end runs of the 48/64-stage, 18-bit and D = 1/32 variants on laboratory-style signals |

## Verification

Each testbench computes its expected values independently of the RTL. Each
prints `TB_RESULT checks=N failures=M` and has a watchdog.

`tb_lp_fir_top` runs the top at its default size. It plays the processor:
two covariance runs, a floating-point solve, and loading and committing the
coefficients. It compares every clean output sample bit for bit with a model
of the filter, which also pins the 8-clock latency. It also checks the
following.

- Carrier power drops by more than 20× on both channels. Measured: about
  5100× for one carrier and about 3600× for two.
- A one-sample pulse added after adaptation comes through within ±400
  counts of its 3000-count height.
- The bus sums equal sums computed from the testbench's own copy of the
  samples.
- A start during a run is ignored.
- Oversized coefficients make prediction and output clip and set the
  STATUS clip bit.

`tb_lp_variants` runs six single-channel configurations side by side, with
the same processor model (`tb/lp_variant_run.sv`):

| variant | signal | power in/out | after-pulse peak / residual RMS |
|---|---|---|---|
| P=64, D=128, 14-bit | 50 MHz carrier at 250 MS/s | ≈217000 | 4 / 3 |
| P=64, D=128, 14-bit | same carrier, FM with 75 kHz deviation and 15 kHz modulation | ≈59 | 407 / 272 |
| P=64, D=128, 18-bit | 27.12 + 57.9 MHz (4:1) + noise | ≈470 | 81 / 30 |
| P=48, D=128, 14-bit | 27.12 + 57.9 MHz (4:1) + noise | ≈600 | 39 / 24 |
| P=32, D=1, 14-bit | 27.12 + 57.9 MHz at 200 MS/s + noise | ≈520 | 458 / 27 |
| P=32, D=32, 14-bit | same | ≈530 | 51 / 26 |

The last column shows why a large D is used. With D = 1 a pulse re-enters
the prediction two samples later and leaves a copy of itself, scaled by the
coefficients, right behind it. With D ≥ 32 that echo falls outside the
16 samples after the pulse. The testbench asserts that contrast and loose
lower limits on the suppression. The FM row is the hardest case for a fixed
set of coefficients. Its residual is presumably the carrier having drifted away from
the frequency the coefficients were computed for.

To simulate with Verilator, name the package and the testbench; `-y` finds
the other modules by their file names:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb \
    rtl/lp_pkg.sv tb/tb_lp_fir_top.sv --top-module tb_lp_fir_top -o sim
./obj_dir/sim
```

The same command works for every `tb/tb_*.sv`. `-Wno-fatal` is there
because the testbenches mix integer widths freely, and Verilator's width
warnings would otherwise stop the build. The RTL itself lints cleanly with
`-Wall`. Expect one warning line at run time from the covariance assertion
in `tb_lp_fir_top` and `tb_lp_covariance`: it comes from the deliberate
start-during-run case.

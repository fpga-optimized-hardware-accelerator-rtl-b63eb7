# A streaming FFT and 2x2 SVD accelerator in SystemVerilog

This design computes two transforms used in frequency-domain and
singular-value image watermarking:

- a **streaming N-point FFT**. It takes one complex sample per clock and,
  after a fixed latency, returns one frequency bin per clock. Frames can follow
  each other with no idle clocks.
- a **singular value decomposition of 2x2 real matrices**, A = U Σ Vᵀ. It is
  built from one butterfly and one shift-and-add CORDIC engine.

The FFT is a cascade of radix-2 *single-path delay feedback* (SDF) stages. The
SVD reduces the decomposition to four CORDIC operations, two vectoring and two
rotations. A small control unit feeds both engines from one input stream, and
they run at the same time.

The structure follows the FPGA accelerator described in "FPGA-Optimized
Hardware Accelerator for Fast Fourier Transform and Singular Value
Decomposition in AI" (Ding et al.). That publication gives:

- the block structure: SDF units in series ending in a special final unit;
  each unit has a delay buffer, a butterfly and a twiddle lookup;
- an SVD module in which a butterfly feeds an iterative CORDIC with x/y/z
  registers and an arctangent table.

It gives no transform size, word widths, number formats, matrix size,
interfaces or timing. All of those are choices made here. They are marked as
such below and in the header comment of every file.

## Block diagram

```
                      +------------------------- fft_core --------------------------+
 in_valid/in_ready    |  sdf_unit     sdf_unit           sdf_unit     sdf_unit2    |
 in_mode, in_re/im -> |  L=N     -->  L=N/2    --> ... -> L=4     -->  L=2        | --> control_unit --> fft_valid, fft_re/im,
        |             |  (buffer N/2, butterfly, twiddle ROM, complex multiply)    |     (bin tags)       fft_index, fft_last
        v             +------------------------------------------------------------+
  control_unit
        |             +-------------- svd_unit ---------------+
        +-----------> |  butterfly --> cordic (x, y, z, atan  | --> svd_valid, sigma1, sigma2,
         (a,b),(c,d)  |  table) --> output registers           |     u_cos/u_sin, v_cos/v_sin, theta, phi
                      +----------------------------------------+
```

| File | Module | Role |
|---|---|---|
| `rtl/accel_pkg.sv` | package | mode enums, arctangent table, twiddle generator, bit reversal |
| `rtl/fft_svd_accel.sv` | top | wires the control unit, the FFT pipeline and the SVD unit |
| `rtl/control_unit.sv` | | job dispatch, underrun padding, output bin tags |
| `rtl/fft_core.sv` | | cascade of log2(N)-1 `sdf_unit` and one `sdf_unit2` |
| `rtl/sdf_unit.sv` | | one radix-2 SDF stage with twiddle multiply |
| `rtl/sdf_unit2.sv` | | last (two-point) stage, no multiplier |
| `rtl/delay_buffer.sv` | | feedback delay line (circular buffer) |
| `rtl/butterfly.sv` | | complex add and subtract, optionally halved |
| `rtl/twiddle_rom.sv` | | per-stage table of W_L^m, filled at elaboration |
| `rtl/complex_mult.sv` | | sample times twiddle, rounded and saturated |
| `rtl/cordic.sv` | | iterative CORDIC, rotation and vectoring |
| `rtl/svd_unit.sv` | | 2x2 SVD sequencer around one butterfly and one CORDIC |

## How an SDF stage works

A radix-2 decimation-in-frequency (DIF) FFT splits a block of L samples into
two halves. It forms `x[k] + x[k+L/2]`, which feeds the even bins, and
`(x[k] - x[k+L/2]) * W_L^k`, which feeds the odd bins. Each half is then a
block of L/2 samples for the next stage. In a single-path delay feedback stage
one delay line of L/2 words does this on a stream, one sample per clock:

| clocks of a block | input | delay buffer | stage output |
|---|---|---|---|
| first L/2 | x[k] | stores x[k] | differences of the *previous* block, times W_L^k |
| second L/2 | x[k+L/2] | returns x[k], stores (x[k]-x[k+L/2])/2 | (x[k]+x[k+L/2])/2 |

The buffer moves on every clock. So a value written at clock t comes back at
t+L/2, exactly when its partner arrives or its turn to leave comes. Each stage
output is therefore a gap-free stream: L/2 sums, then L/2 differences. That
is the block structure the next stage (block size L/2) expects.

Two counters run the stage:

- the input counter's top bit says whether the butterfly is active;
- the output counter's top bit says whether the buffer is draining
  differences, and its low bits are the twiddle index k.

Sums leave with index 0, which is W = 1.0 exactly, so they pass the multiplier
unchanged. An assertion checks that a sum and a difference are never due in
the same clock. They can only collide if a frame did not arrive on
consecutive clocks.

Pipeline of a stage: the selected sample is registered while the twiddle
table is read. The product is then registered. The first output of a block
therefore leaves L/2 + 2 clocks after its first input.

The last stage (`sdf_unit2`, L = 2) has a one-word delay and no multiplier,
because the only twiddle of a two-point DFT is 1. It adds one register.

Results of the full cascade:

- **Scaling.** Every butterfly halves its results with round-half-up. An
  N-point transform therefore returns X[k]/N and cannot overflow. The one
  input pair that would round out of range (+max and -max) saturates.
- **Order.** The bins come out in bit-reversed order: the m-th output of a
  frame is bin `bit_reverse(m)`. The control unit does not reorder them. It
  tags each output with its bin on `fft_index`, and marks the last of a frame
  with `fft_last`.
- **Rate and latency.** One frame per N clocks. The pipeline latency is
  `N - 2 + 2*log2(N)` clocks. At the top level this becomes
  `N + 2*log2(N)` = 1044 clocks for N = 1024, because the control unit adds
  one register before the pipeline and one after it.

The publication writes its butterfly with the twiddle on the second input
(decimation in time, X[k] = x[k] + W x[k+N/2]). But its text also says that
each step's *output* is multiplied by the twiddle factors, and that the final
unit is special. This design follows the second reading (DIF), which is the
one that fits a cascade ending in a multiplier-free two-point stage.

## Twiddle factors without data files

Each `sdf_unit` owns a `twiddle_rom` of L/2 entries, W_L^m = cos(2πm/L) −
j·sin(2πm/L). The entries are stored as 16-bit numbers with 14 fraction bits,
so 1.0 = 16384.

The table is computed at elaboration by `accel_pkg::twiddle_part`. This is a
30-step integer CORDIC in Q30 arithmetic. It rotates the vector (1/K, 0) by
2πm/L. Angles past π/2 are first reduced by π/2 and then swapped back. The
result matches cos and sin to within one LSB; the testbench checks this for
L = 64 and L = 1024. The read is registered, as a block RAM would be.

The arctangent constants `atan(2^-i)` are stored once, as 32-bit binary angles
(`round(atan(2^-i)/(2π)·2^32)`). The same constants serve this generator and
the run-time CORDIC.

## The 2x2 SVD with two CORDIC rotations

Write A = [a b; c d] as A = U·diag(σ1, σ2)·Vᵀ, where U and V are plane
rotations by θ and φ. Multiplying this out gives

```
a + d = (σ1 + σ2)·cos(θ − φ)      c − b = (σ1 + σ2)·sin(θ − φ)
a − d = (σ1 − σ2)·cos(θ + φ)      c + b = (σ1 − σ2)·sin(θ + φ)
```

So two vectors, (a+d, c−b) and (a−d, c+b), carry everything. Their lengths
are σ1 ± σ2, and their angles are β = θ−φ and α = θ+φ. `svd_unit` does this
in four steps:

1. **Butterfly.** One full-precision `butterfly` (the same module the FFT
   uses, halving switched off) takes p = a + j·c and q = d + j·b.
   Then p+q = (a+d) + j(c+b) and p−q = (a−d) + j(c−b). The two vectors are
   (Re(p+q), Im(p−q)) and (Re(p−q), Im(p+q)).
2. **Vectoring, twice.** The CORDIC turns each vector onto the x axis. This
   gives K·(σ1+σ2) with β, then K·(σ1−σ2) with α. A constant multiply by 1/K
   removes the CORDIC gain K ≈ 1.6468.
3. **Angles.** θ = (α+β)/2 and φ = (α−β)/2. These are computed one bit wider,
   so halving does not wrap.
4. **Rotation, twice.** The CORDIC rotates (1/K, 0) by θ and then by φ. This
   gives cos and sin of each angle, which are the entries of U = [cos −sin;
   sin cos] and V.

With P = σ1+σ2 and Q = σ1−σ2, the two gain-corrected lengths from step 2,
the output stage forms σ1 = (P+Q)/2 and σ2 = (P−Q)/2.

Because U and V are pure rotations, σ2 carries the sign of det(A): it is
negative when the determinant is. σ1 ≥ |σ2| always holds. Degenerate inputs
(zero matrix, singular matrix, full-scale ±32768 entries) are handled without
special cases and are covered by the testbench.

A single `cordic` instance is shared by the four operations. A state machine
runs them in order: `S_VEC_SUM`, `S_VEC_DIF`, `S_ROT_U`, `S_ROT_V`, then
`S_OUT`, where the output registers are updated. Each operation takes ITER+2
clocks, including its launch. `done` is high 4·(ITER+2)+2 = 74 clocks after
the clock in which `start` was high.

### The CORDIC engine

`cordic` holds x, y and z in registers and does one step per clock. Step i
rotates (x, y) by ±atan(2^-i) using two shifts and two adds. z gains or loses
that angle, taken from the arctangent table.

- **Rotation mode** steers by the sign of z.
- **Vectoring mode** steers by the sign of y.

The plain iteration only converges within about ±99°. To cover the full
circle, the engine first negates x and y when needed, which is a rotation by
π:

- in vectoring mode when x < 0, with z starting at π;
- in rotation mode when |z| > π/2.

Angles are binary angles: with ANGLE_W = 20 bits the full circle is 2^20, so
they wrap for free. The gain K is not removed inside the engine.

Word widths used by `svd_unit`:

- CORDIC words are DATA_W + 6 = 22 bits.
- The vectoring inputs carry two extra fraction bits.
- The rotation unit vector uses 20 fraction bits and is rounded to 14 at the
  output.

With 16 steps the angles are good to about 4·10⁻⁵ rad and the magnitudes to a
few LSB.

## Control unit and the job protocol

All input enters through one valid/ready stream of complex words
(`in_re`, `in_im`). `in_mode` on the **first word of a job** selects the job
type:

| job | words | meaning |
|---|---|---|
| FFT (`in_mode = 0`) | N, on consecutive clocks | samples x[0..N-1] |
| SVD (`in_mode = 1`) | 2 | (a, b), then (c, d): the rows of A |

Rules for the stream:

- **Inside an FFT frame.** `in_mode` is ignored and `in_ready` stays high.
  The pipeline cannot pause, so the control unit feeds it one sample on every
  clock until the frame is complete. If `in_valid` is low on one of those
  clocks, that sample becomes zero and the sticky `err_underrun` flag is set.
  Frame alignment is kept either way.
- **SVD jobs.** The second word of a matrix is held off (`in_ready` low) while
  the SVD unit is still busy with the previous matrix. `in_ready` depends only
  on internal state.
- **Between jobs.** Any number of idle clocks is allowed, and job types can
  alternate freely.
- **Concurrency.** An FFT frame keeps draining through the pipeline while SVD
  jobs are accepted and computed.

SVD results appear on `svd_valid`, 75 clocks after the clock in which the
second matrix word was taken. They hold until the next result.

## Number formats and parameters

| parameter (top) | default | meaning |
|---|---|---|
| `N` | 1024 | FFT points (power of two, ≥ 4) |
| `DATA_W` | 16 | sample and matrix element width, two's complement integers |
| `TW_W`, `TW_FRAC` | 16, 14 | twiddle factors, and cos/sin outputs of the SVD (1.0 = 16384) |
| `ANGLE_W` | 20 | binary angles θ, φ (2^20 = 2π) |
| `CORDIC_ITER` | 16 | CORDIC steps per operation |

- FFT output: `DATA_W` bits, equal to X[k]/N.
- `sigma1` and `sigma2`: `DATA_W+2` bits, in the units of the matrix elements.

None of these values come from the publication; they are choices made here.
N = 1024 was picked for one reason: at a 100 MHz clock its latency, 10.44 µs,
lands near the 11.00 µs FFT latency that the publication reports. The
publication itself never states a size.

## Timing summary (defaults)

| path | clocks |
|---|---|
| FFT: first input word taken → first output valid | N + 2·log2(N) = 1044 |
| FFT: sustained | one frame per N = 1024 clocks |
| SVD: second matrix word taken → `svd_valid` | 4·(ITER+2) + 3 = 75 |
| one CORDIC operation (start → done) | ITER + 1 = 17 |

## Verification

Every module has a self-checking testbench in `tb/`. Each one prints a line
`TB_RESULT checks=N failures=M` and stops itself through a watchdog if the
design hangs. Each compares against references computed independently in the
testbench, mostly in real arithmetic:

- `tb_fft_svd_accel` runs the top **at its default parameters** (N = 1024)
  end to end:
  - frames: two back-to-back frames (random and two-tone), a frame with three
    missing words, an idle gap, then another frame;
  - SVD jobs: three, one of them held off by a busy SVD unit;
  - FFT checks: every bin against a direct DFT/N, with a worst error of about
    3 LSB; bit-reversed tags; `last`;
  - timing checks: the 1044-clock latency, the N-clock frame spacing, and the
    75-clock SVD latency. Assuming a 100 MHz clock, it also checks that the
    latency and frame time stay within the reported 11.00 µs FFT latency and
    10.60 µs FFT computation time;
  - SVD checks: every result by rebuilding A from U, Σ, V;
  - mechanism count: it counts each mechanism (back-to-back frames, idle gap,
    underrun padding, SVD hold-off, both mode switches, FFT output while the
    SVD unit is busy) and fails if any never happened.
- `tb_fft_core` runs 64- and 16-point pipelines against a direct DFT,
  including a pure tone, and checks latency and frame spacing.
- `tb_sdf_unit` and `tb_sdf_unit2` check single stages against the DIF stage
  equations, including their latency.
- `tb_svd_unit` covers 48 matrices: diagonal, singular, negative-determinant,
  full-scale and random. It checks σ1 and |σ2| against the eigenvalues of
  AᵀA, the sign of σ2 against det(A), the orthonormality of U and V, the
  rebuild of A, and the 74-clock latency.
- `tb_cordic`, `tb_butterfly`, `tb_complex_mult`, `tb_twiddle_rom`,
  `tb_delay_buffer` and `tb_control_unit` cover the leaf blocks. The
  butterfly, multiplier and delay-buffer checks are bit-exact.

To run a testbench with Verilator 5:

```
verilator --binary --timing --assert -Wno-fatal -y rtl rtl/accel_pkg.sv \
          tb/tb_fft_svd_accel.sv --top-module tb_fft_svd_accel -o sim
./obj_dir/sim
```

Replace the testbench name to run any other one. Lint a module on its own
with `verilator --lint-only -Wall -y rtl rtl/accel_pkg.sv rtl/<module>.sv`.
All RTL is synthesizable. The twiddle tables are constant functions
evaluated at elaboration, and the delay buffers are plain memory arrays.

## Limits and departures

- **Watermark embedding.** The publication names a watermark embedding module
  but does not say how it works, so none is built here. The SVD outputs are
  where such a block would connect.
- **Matrix size.** The SVD handles 2x2 matrices only. Larger matrices would
  need a Jacobi sweep controller and matrix storage; the publication describes
  neither.
- **FFT size and order.** The FFT size is fixed at elaboration. Output bins
  are not reordered into natural order; a reorder buffer of N words would do
  that and is not part of this design.
- **Twiddle addressing.** The publication's FFT diagram draws the control
  unit feeding the twiddle lookup, and the lookup feeding the butterfly.
  Here each stage addresses its own table from its output counter. The
  multiply comes after the butterfly's subtraction (see "How an SDF stage
  works").
- **Frame timing.** An FFT frame must arrive on consecutive clocks. Missing
  words are replaced by zeros and flagged, not waited for.
- **Accuracy.** It is set by 16-bit data, 14-bit twiddle fractions and
  per-stage rounding: about ±3 LSB of X[k]/N for N = 1024 with inputs of
  ±8000.
- **Verilator warnings.** Verilator reports `SYNCASYNCNET` on `rst_n`,
  because the concurrent assertions sample the asynchronous reset as their
  disable condition. It also reports a few unused intermediate bits in
  rounding functions. Both are expected.

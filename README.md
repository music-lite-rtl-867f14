# A CORDIC SVD engine for MUSIC with a swappable 16-bit adder

MUSIC (MUltiple SIgnal Classification) estimates the range or direction of
radar targets. It splits the covariance matrix of the received signal into a
signal subspace and a noise subspace, then searches for the steering vectors
that are most nearly orthogonal to the noise subspace. Finding the two
subspaces takes a singular value decomposition (SVD), and that is the
expensive part. MUSIC-lite (Bhattacharjya, Sarkar, Maity and Dutt, "MUSIC-lite:
Efficient MUSIC using Approximate Computing: An OFDM Radar Case Study", ESWEEK-CASES
2024) computes the SVD with the Golub-Kahan method. Every step of that method
is a Givens (plane) rotation, and a CORDIC core performs each rotation using
only shifts and additions. The idea is that the SVD tolerates small errors, so
the CORDIC core's adders can be replaced by approximate 16-bit adders. These
trade a little accuracy for area and power. The authors report an average of
17 % less area and 19 % less power for the CORDIC core, with about 0.14 %
range error at positive SNR.

This RTL implements that datapath in synthesizable SystemVerilog, from the
adder up to a complete SVD engine:

```
music_lite_svd          SVD engine: matrix storage + rotation scheduler    (top)
 └─ music_lite_givens   Givens rotation engine: pivot/rotate protocol
     └─ cordic_core     iterative CORDIC, rotation and vectoring modes
         └─ addsub16 ×3 add/subtract on one adder, no carry-in needed
             └─ add16se_cla   16-bit sign-extended carry-lookahead adder
music_lite_pkg          shared types, angle format, arctangent table
```

The paper itself describes the adder slot, the CORDIC recurrence and the
Golub-Kahan/Givens method. Everything else here is this design's own choice.
That includes the sequencing, the number formats, rounding, gain
compensation, deflation and the interfaces. Each choice is marked below and
at the top of each source file.

## The adder slot

Each addition and subtraction in the CORDIC datapath goes through one module
shape: two 16-bit two's-complement operands in, a 17-bit sign-extended sum
out, and no carry-in. This is the port shape of the `add16se_*` approximate
adders evaluated in the paper (for example `add16se_2YM`, `add16se_33J` and
`add16se_3BA` from the EvoApprox library). Swapping the adder is the
design-space knob. The accurate reference is `add16se_cla`, a two-level
carry-lookahead adder with 4-bit groups. The paper chose a CLA as its accurate
baseline so the core could reach 500 MHz.

The adder has no carry-in, so subtraction can't be `a + ~b + 1`. `addsub16`
uses the exact identity

    a - b = ~(~a + b)

instead. It inverts the first operand going in and inverts the 17-bit sum
coming out. With the exact adder this gives the exact difference. With an
approximate adder, subtractions carry that adder's error, just as additions
do. To evaluate an approximate adder, give it the `add16se_cla` port list
(`a`, `b` → `s[16:0]`) and instantiate it in `addsub16` in place of
`add16se_cla`. No other file changes. The EvoApprox netlists are not part of
this code.

## The CORDIC core

`cordic_core` runs the CORDIC recurrence one micro-rotation per clock:

    x(i+1) = x(i) - d(i) · y(i) · 2^-i
    y(i+1) = y(i) + d(i) · x(i) · 2^-i
    z(i+1) = z(i) - d(i) · atan(2^-i)

The two modes choose the direction d(i) differently:

- **Rotation mode:** d(i) = sign(z). The core rotates (x, y) by the input
  angle z.
- **Vectoring mode:** d(i) = −sign(y). The core turns (x, y) onto the positive
  x axis. It returns the vector's length in x and atan2(y, x) + z₀ in z.

A Givens rotation uses both modes. Vectoring finds the angle that zeroes one
matrix element, and rotation applies that angle to the other elements of the
same two rows or columns. Three `addsub16` units compute x, y and z in
parallel. The 2^-i factors are arithmetic right shifts.

**Number formats.**
- x and y are 16-bit signed integers.
- z is a 16-bit binary angle: 2^15 means π, so angle sums wrap correctly
  modulo 2π.
- The arctangent table holds round(atan(2^-i) · 2^15/π) for i = 0…15:
  8192, 4836, 2555, 1297, 651, 326, 163, 81, 41, 20, 10, 5, 3, 1, 1, 0.

The core adds four things to the bare recurrence. The paper describes none of
them:

1. **Quadrant pre-rotation.** CORDIC converges only for angles within about
   ±99.7°. On load, the core first turns a rotation angle beyond ±90°, or a
   vectoring input with x < 0, by an exact ±90°. That turn only swaps and
   negates, with no adder.
2. **Rounded shifts.** `x·2^-i` and `y·2^-i` are rounded to nearest by adding
   back the last bit shifted out. That takes a small incrementer outside the
   adder slot. Plain truncation pushes every micro-rotation the same way by up
   to half an LSB. Over the thousands of rotations in an SVD, that bias added
   about 300 LSB to every singular value.
3. **Gain compensation.** The micro-rotations lengthen the vector by
   K = 1.64676. Five more cycles multiply x and y by
   2^-1 + 2^-3 − 2^-6 − 2^-9 − 2^-12 + 2^-14 = 0.6072677 ≈ 1/K, which is
   2.3·10^-5 too high. These cycles reuse the x and y adders. This error also
   compounds over a rotation chain: a 4-term constant (0.03 % high) made U^T
   rows grow by 2.5 % within one 8 × 8 SVD. `GAIN_COMP = 0` removes the
   compensation, and the outputs then carry the gain K.
4. **Saturation.** x and y saturate at 16 bits, and z wraps. An input vector
   must be shorter than about 2^15/K ≈ 19 900, or the result clips.

**Handshake and timing.** Both sides use valid/ready. The core holds one job
at a time and asserts `in_ready` only when idle. `out_valid` rises
ITER + 5 = 21 clock edges after the accepting edge. The result is held until
`out_ready`, and an assertion checks this. If the output is taken at once, a
new job starts every 23 cycles.

## The Givens rotation engine

`music_lite_givens` turns the core into a rotation engine for streams. A
rotation of two rows (or columns) arrives as element pairs (aⱼ, bⱼ), and the
first pair carries `in_pivot`. The engine:

- **Pivot pair:** runs it in vectoring mode. The pair comes out as (r, ≈0),
  and the angle θ = atan2(b₀, a₀) is stored as the pair leaves the core.
- **Following pairs:** runs each in rotation mode with z = −θ, which gives
  a' = cos θ·a + sin θ·b and b' = −sin θ·a + cos θ·b.

The core holds one pair at a time, so θ is always stored before the next pair
enters. `out_angle` reports the θ in use.

## The SVD engine (top)

`music_lite_svd` holds two N × N matrices in registers. B holds the input
matrix A, and U^T is set to `UNIT`·I when a run starts, with UNIT = 2^14
standing for 1.0. A scheduler walks a fixed list of rotations. It sends each
rotation to the Givens engine as element pairs, pivot first, and writes every
result back in place.

**1. Bidiagonalisation (Golub-Kahan reduction).** For k = 0 … N−1:
- Left rotations of rows (k, i) zero B[i][k] for every i > k. Each pivots on
  column k.
- Right rotations of columns (k+1, j) zero B[k][j] for every j > k+1. Each
  pivots on row k.

**2. Diagonalisation by zero-shift QR sweeps.** Each sweep chases a bulge
down the bidiagonal. For i = 0 … N−2:
- A right rotation of columns (i, i+1). At i = 0 it pivots on (B[0][0], B[0][1]).
  After that it pivots on the bulge pair (B[i−1][i], B[i−1][i+1]).
- A left rotation of rows (i, i+1), which removes the new bulge B[i+1][i].

Every sweep shrinks superdiagonal entry i by about (σᵢ₊₁/σᵢ)². The zero-shift
variant was chosen because it needs nothing but rotations. A shifted
Golub-Kahan step would need a multiplier and a square root to compute its
shift. The engine runs a fixed `SWEEPS` count and has no convergence test.

**3. Deflation.** In 16-bit arithmetic, a converged superdiagonal entry does
not reach zero. It settles at a few LSBs. Vectoring a pair of such noise
values gives a random angle, and that angle mixes converged columns back
together. Without deflation the sweep diverged after a handful of sweeps. The
engine handles this in two ways, with threshold `DEFL` (8 LSB):
- **Restart.** If the superdiagonal pivot B[i−1][i] of a sweep's right
  rotation is within ±DEFL, the matrix has split there. The rotation starts a
  new chase with pivot (B[i][i], B[i][i+1]), as at i = 0.
- **Skip.** Any rotation whose pivot pair is within ±DEFL in both entries is
  skipped. A skip costs one cycle and sends no pairs.

**Rotation cost.** A left rotation updates all N columns of B and all N
columns of U^T, which is 2N pairs. A right rotation updates all N rows of B,
which is N pairs. Rotating a pair of zeros gives exactly zero, so working on
whole rows and columns is correct, just not minimal. V is not accumulated.

**Results.** After `done`:
- |B[i][i]| are the singular values. They are **not sorted**.
- Row i of U^T is the left singular vector for B[i][i].

For a symmetric covariance matrix, these rows are the eigenvectors that MUSIC
splits into signal and noise subspaces: rows with large |B[i][i]| belong to
the signal, the rest to the noise.

**Run time.** Each pair takes 23 cycles, and each skipped rotation 1 cycle.
Without skips, a run takes

    23 · [ N(N−1)/2 · 2N  +  (N−1)(N−2)/2 · N  +  SWEEPS · (N−1) · 3N ]

cycles. At N = 32 and SWEEPS = 32 that is 3 262 688 cycles, or 6.5 ms at
500 MHz. A 10 dB radar covariance finished in 2 567 814 cycles because
deflation skipped rotations.

### Interface

| port | dir | width | meaning |
|---|---|---|---|
| `clk`, `rst_n` | in | 1 | clock; asynchronous active-low reset |
| `wr_en`, `wr_row`, `wr_col`, `wr_data` | in | 1, log2 N, log2 N, 16 | write B[row][col] while idle |
| `start` | in | 1 | start a run (idle only); sets U^T = UNIT·I |
| `busy` | out | 1 | run in progress |
| `done` | out | 1 | last run finished; stays high until the next `start` |
| `rd_sel`, `rd_row`, `rd_col` | in | 1, log2 N, log2 N | select B (0) or U^T (1) and an element |
| `rd_data` | out | 16 | selected element (combinational) |

| parameter | default | meaning |
|---|---|---|
| `N` | 32 | matrix dimension (32 subcarriers in the reference radar) |
| `SWEEPS` | 32 | zero-shift QR sweeps |
| `UNIT` | 16384 | value of 1.0 in U^T |
| `DEFL` | 8 | negligible-entry threshold, LSB |
| `ITER` | 16 | CORDIC micro-rotations (1…16) |
| `GAIN_COMP` | 1 | gain compensation on/off |

The matrix is never sized from the data, so the loader must scale it: the
largest singular value has to stay below about 19 900. The U^T entries stay
within ±UNIT. The largest B entries are bounded by σ_max.

## Accuracy

The accuracy figures below are for the accurate adder. They come from the
testbenches:

- **One CORDIC job.** Results are bit-exact with an integer model of the
  algorithm. Against real arithmetic they stay within 12 LSB + 0.2 % of the
  vector length. The vectoring angle is within a few angle LSBs, plus
  2·10430/r angle LSBs for short vectors of length r.
- **8 × 8 SVD with 40 sweeps.** Singular values are within 30 LSB + 1 % of
  σ_max. U^T is orthogonal to within 3 %. Each row of U^T·A has length
  |B[i][i]|.
- **32 × 32 radar covariance with 32 sweeps.** The two signal singular values
  came within 0.5 % of a double-precision eigen-decomposition. The MUSIC range
  estimate from the engine's noise subspace was 50.06 m for a target at 50 m
  (0.12 %), the same as the double-precision estimate.
- **SNR sweep at full size.** Four runs each at −5, 0, 5, 10 and 15 dB.
  Every engine estimate matched the double-precision MUSIC on the same
  integer matrix to within 0.01 m. The range averaged over the runs of one
  SNR was off by 0.21, 0.14, 0.06, 0.01 and 0.06 %, or 0.04 % on average
  over 5–15 dB. Deflation made these runs take 1.8–2.8 million cycles.

In the sweep, the 16-bit engine added no error that MUSIC could see. The
remaining error comes from noise and from having only 16 snapshots.

Evaluating approximate adders requires their netlists, as described in "The
adder slot".

## Where this departs from the paper

- **Hardware scope.** The paper built only the CORDIC core in hardware. Its
  SVD, MUSIC and radar pipeline ran in MATLAB. The Givens engine and the SVD
  sequencer here are built from the paper's description of the method, not
  from a hardware description.
- **Real-valued data.** The radar covariance is complex Hermitian, but this
  engine works on real data. The workload test uses the real part of the
  subcarrier responses, with a random phase per OFDM symbol.
- **Target velocity.** The test scenario ignores the target's 20 m/s
  velocity. At a 30 GHz carrier, its Doppler shift turns the phase by about
  0.08 cycles over the 16 symbols. That is small next to the random phase the
  tests give each symbol.
- **Matrix size.** The paper does not give it. N = 32 follows from its 32
  subcarriers, taking the covariance over subcarriers with the 16 symbols as
  snapshots.
- **Not specified by the paper.** Iteration count, angle format, rounded
  shifts, gain compensation, pre-rotation, zero-shift sweeps, deflation, the
  sweep count and all interfaces are this design's own choices.
- **Not included:**
  - the approximate adders (external netlists);
  - signal acquisition;
  - covariance computation;
  - sorting of singular values and subspace selection;
  - the MUSIC pseudo-spectrum and peak search;
  - the OFDM transmitter, channel and receiver.

  The paper names these stages but does not describe hardware for them. The
  workload testbench does the covariance, subspace selection and peak search
  in floating point, around the engine.
- **Clock rate.** The paper's 500 MHz clock in a 45 nm library is not checked
  here. The critical path is one 16-bit CLA, a 16-bit barrel shifter with its
  rounding incrementer, and a saturation multiplexer.

## Simulating

All files are plain SystemVerilog 2017. Each testbench prints one line,
`TB_RESULT checks=<n> failures=<m>`, and has a watchdog. With Verilator 5:

```
verilator --binary --timing --assert -Irtl \
  rtl/music_lite_pkg.sv rtl/add16se_cla.sv rtl/addsub16.sv rtl/cordic_core.sv \
  rtl/music_lite_givens.sv rtl/music_lite_svd.sv \
  tb/cordic_ref_pkg.sv tb/tb_music_lite_svd.sv --top-module tb_music_lite_svd
./obj_dir/Vtb_music_lite_svd
```

| testbench | what it runs |
|---|---|
| `tb_add16se_cla` | edge cases and 200 000 random operand pairs against integer sums; the subtract identity of `addsub16` |
| `tb_cordic_core` | both modes, all quadrants, angles beyond ±90°, saturating inputs; compared with the integer model in `tb/cordic_ref_pkg.sv` and with real trigonometry; latency and busy behaviour; result held under back-pressure; a second instance at ITER = 12 without compensation |
| `tb_music_lite_givens` | Givens triangularisation of random 4 × 4 and 8 × 8 matrices against double precision; latency and the 23-cycle issue interval; counts pivots, rotations, both pre-rotations, stalls and a saturation |
| `tb_music_lite_svd` | N = 8 SVDs of matrices built with known singular values, one rank-deficient; checks singular values, off-diagonals, U^T orthogonality, U^T·A row lengths and the exact cycle count; counts every rotation kind, skips and chase restarts |
| `tb_music_lite_svd_music` | default size (N = 32): the radar MUSIC range estimate described above; about 2 s of simulation |
| `tb_music_lite_svd_snr` | default size: the same scenario swept over −5…15 dB with 4 runs per SNR, compared with double-precision MUSIC; about 40 s of simulation |

To try another adder, replace the `add16se_cla` instance in `rtl/addsub16.sv`.
Expect the bit-exact checks to fail, since they assume exact addition. The
tolerance-based checks and the range estimate show whether accuracy holds.

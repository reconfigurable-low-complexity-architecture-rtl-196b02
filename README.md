# Reconfigurable Doppler velocity estimator: coarse FFT and low-complexity ESPRIT

A radar that shares its hardware with a millimetre-wave link (integrated
sensing and communication) first finds targets in range and azimuth. It then
has to tell, for each detected cell, whether the echo is a moving user or
static clutter, and how fast each mover goes. That is a Doppler estimate
over the *slow-time vector* `y`: one complex sample per radar packet, taken
from the same range-azimuth cell in each of N packets, with a packet
repetition interval T_PRI.

Two estimators suit different situations:

* **Coarse: FFT.** Zero-pad `y` to P points, take the FFT and pick the
  strongest bin. It is cheap and fast. Its resolution is limited by the
  observation time N·T_PRI, so two users in the same cell with close
  velocities merge into one peak.
* **Fine: ESPRIT with K = 2.** A subspace method that resolves two targets
  far closer than the FFT resolution. It is much more work: a covariance
  matrix, an eigen-decomposition and a pseudo inverse.

This RTL holds both engines behind one AXI-Stream input and one AXI-Stream
output. A processor picks the engine, the packet count (50, 100 or 200 for
ESPRIT), the FFT size (1024, 4096 or 16384) and the PRI through AXI-Lite
registers before each frame. The ESPRIT datapath follows a low-complexity
formulation. The generic pseudo inverse (an SVD) is replaced by the closed
form `(E2^H E2)^-1 E2^H`. This is cheap because E2 has only K = 2 columns,
so the only inverse needed is of a 2x2 matrix. The 2x2 rotation matrix is
then solved in closed form, and a CORDIC turns its eigenvalues into angles.

The two big linear-algebra kernels, the QR/eigen-decomposition and the FFT,
are vendor cores in an FPGA implementation. Here they sit outside the top
level on plain valid/ready streams. The testbenches contain behavioural
models of both.

## Signal model and sign conventions

A target with radial velocity `v` makes the slow-time samples rotate by a
fixed angle per packet:

    y[n] = sum_k a_k · exp(-j·4π·v_k·n·T_PRI / λ) + noise

All angles inside the design are in **turns**: signed 16-bit numbers where
2^16 is a full circle. An angle θ (in turns per packet) becomes a velocity
by

    v = θ · λ / (2·T_PRI)

which is one multiplication by the VSCALE register (Q16.16 m/s per turn).
The reset value is 1250 m/s, which is λ = 5 mm (60 GHz band) at a 2 µs PRI.
The largest unambiguous velocity is ±VSCALE/2.

Both engines report the angle with the same sign, so `v` comes out positive
for a target that rotates `y` clockwise as above:

* **ESPRIT.** The rotation is taken from E2 to E1, so its eigenvalues are
  `exp(+j·4π·v·T_PRI/λ)`.
* **FFT.** Bin k is reported as `-k/P` turns.

## Number formats

| Quantity | Format |
|---|---|
| Input sample | Q1.15 I/Q in one 32-bit word: real part in bits 15:0, imaginary part in bits 31:16 |
| Every internal value from the covariance on | Complex, two signed 32-bit parts, Q16.16 (`cplx_t` in `doppler_pkg`) |
| Accumulators (covariance, Gram matrix, ε) | Full-precision Q32.32 products, summed in wide registers, rounded once at the end |
| Angles | `turn_t`, signed 16 bits, 2^16 = one turn |
| Velocities | Q16.16 m/s |

`doppler_pkg` also holds the complex helpers the datapaths share:

* `cmul` is four real multipliers, one subtractor and one adder: the "CM" of
  the datapath figures.
* `cadd` and `csub` are the "CA" and "CS".
* `cmul_w` is a full-precision product.
* `cnarrow` rounds back to Q16.16.

The reference gives no word lengths. Q16.16 was chosen so that a
100 x 100 covariance of full-scale samples, which sums to at most
N - L = 100 products of magnitude ≤ 2, cannot overflow. It also keeps about
5 significant digits in the unit-norm eigenvectors.

## The ESPRIT datapath

The fine engine runs five stages one after another. Each stage starts when
the previous one pulses `done`. The top-level state machine steps through
`S_LOAD → S_QR → S_PINV → S_EIG → S_OUT`.

### 1. Spatial smoothing and averaged covariance (`ss_acg`)

A single slow-time vector gives a rank-one covariance. Spatial smoothing
cuts `y` into overlapping windows `s_l = y[l : l+L-1]` and sums their outer
products:

    A = Σ_{l=0}^{N-L-1} s_l · s_l^H,  so  A[i][j] = Σ_l y[i+l] · conj(y[j+l])

The window length is **L = N/2**. The reference does not state L. It
describes the window index both as running over L values and as ending at
N-L-1, and the two agree only when L = N/2. That gives L = 25, 50 or 100
for 50, 100 or 200 packets.

The unit walks A column by column (j outer, i inner). The reference speeds
this step up by partitioning the sample memory so that several window
products `s_l s_l^H` are computed at once, without saying how many. Here
that degree is the parameter `ACG_PAR` (default 4):

* Each of the two read ports of the slow-time buffer (`ss_buffer`) returns
  `ACG_PAR` consecutive samples, which is what a memory split cyclically
  into that many banks delivers.
* The unit reads `y[i+l .. i+l+ACG_PAR-1]` and `y[j+l .. j+l+ACG_PAR-1]` in
  one cycle.
* `ACG_PAR` complex multipliers form the products for windows l to
  l+ACG_PAR-1, and an adder tree adds them to the accumulator. Windows past
  N-L-1 are masked.

Each finished element leaves on a valid/ready stream in column-major order,
which is the order the QR core takes, with `last` on A[L-1][L-1]. One
element costs ⌈(N-L)/ACG_PAR⌉ accumulate cycles plus one output cycle. The
whole matrix therefore takes **L·L·(⌈(N-L)/ACG_PAR⌉+1)** cycles when the
stream is not stalled:

| N | ACG_PAR = 1 | ACG_PAR = 4 |
|---|---|---|
| 200 | 1,010,000 | 260,000 |
| 100 | 127,500 | 35,000 |
| 50 | 16,250 | 5,000 |

Even with four MACs this is the dominant cost of an ESPRIT frame, so
`ACG_PAR` is the first knob to turn for speed. The result is bit-identical
for every value of `ACG_PAR`, because the accumulation is exact (Q32.32
products, wide accumulator).

### 2. Eigen-decomposition (external core) and subspace selection (`subspace_split`)

A goes out on `qrf_a_*`. An L x L unitary matrix Q comes back on `qrf_q_*`,
column-major. **The first K = 2 columns of Q must be the eigenvectors of A
belonging to its two largest eigenvalues.** Those columns span the signal
subspace E (L x 2).

The reference builds this step on a vendor QR-factorisation library and
describes Q as "containing the eigenvectors of A". A single QR
factorisation A = QR does not give eigenvectors. It gives an orthonormal
basis built from A's own columns in order. Without noise, with exactly two
sources, the first two columns of that basis happen to span the same
subspace as the dominant eigenvectors, and ESPRIT is exact. With noise they
do not. A floating-point model of the single-QR variant fails to resolve
two targets 6 m/s apart at 25 dB SNR, while true eigenvectors resolve them
to a few cm/s. So the interface is defined by the eigenvector requirement.
The behavioural model in `tb/qrf_model.sv` meets it as follows:

1. Start from the QR factorisation of A.
2. Refine the leading four columns by repeated QR factorisation of A·Q
   (orthogonal iteration, 60 steps), which converges to the dominant
   eigenvectors in order of decreasing eigenvalue.
3. Complete the basis by Gram-Schmidt.

`EIG_ITER = 0` restores the single-QR behaviour for comparison. A hardware
core can be any Hermitian eigen-solver (Jacobi, or the QR algorithm on the
vendor QR block) that delivers eigenvectors sorted by eigenvalue.

`subspace_split` keeps columns 0 and 1 of the incoming stream and drops the
rest. It writes the two shift-invariant sub-matrices:

| Store | Contents | Rows |
|---|---|---|
| BRAM A | E1 = E[0 : L-2] | L-1 |
| BRAM B | E2 = E[1 : L-1] | L-1 |
| BRAM G | Copy of E2 | L-1 |

Each word holds one row with both columns side by side, so every reader
gets a whole row per address. The copy in G lets the Gram multiplier read
E2 twice in the same cycle, as the reference does with partitioned BRAM.
`done` pulses after the last element of Q.

### 3. Low-complexity pseudo inverse (`pseudo_inverse`, `inv2x2`)

ESPRIT needs the 2x2 matrix ε that maps E2 onto E1 (E1 ≈ E2·ε), and hence
the pseudo inverse of the tall matrix E2. With only two columns,

    E2^+ = (E2^H E2)^-1 · E2^H

needs nothing bigger than a 2x2 inverse. Three steps:

1. **Gram product.** Over L-1 cycles, one row of E2 (from BRAM B) and the
   same row from G feed four complex MACs. These build the Hermitian 2x2
   matrix `E2^H E2` in a register file with full-precision accumulation.
2. **2x2 inverse (`inv2x2`).**
   - Two complex multipliers form ad and bc, and a complex subtractor forms
     the determinant.
   - The reciprocal `1/det = conj(det) / |det|^2` comes from two sequential
     96/64-bit restoring dividers (`fx_div`) running in parallel, one for
     the real part and one for the imaginary part.
   - Four complex multipliers scale the adjoint `[d -b; -c a]`.
   - The result is held in "BRAM H", here a 2x2 register bank. One
     inversion takes about 100 cycles. The divider saturates on a singular matrix rather than
     trapping.
3. **Second product.** Over L-1 cycles, each row r of E2 gives column r of
   `H · E2^H`. The unit writes that column as one word of BRAM F, which
   holds E2^+ (2 x (L-1)).

The reference's datapath figure labels the operand of the second product
"E1^H, BRAM A", while its formula uses E2^H. Only the formula gives a pseudo
inverse of E2, and the design follows the formula, reading E2 from G.

### 4. Rotation matrix and eigenvalues (`eigen_calc`, `csqrt`, `cordic_atan`)

**ε = E2^+ · E1.** Over L-1 cycles, column r of E2^+ (BRAM F) and row r of
E1 (BRAM A) feed four complex MACs into a 2x2 register file. The reference's
formula writes the product as `E1 E2^+`, which has the wrong shape
((L-1) x (L-1)); its figure multiplies E2^+ by E1. The figure's order is
built.

**Eigenvalues.** These are the roots of `det(ε - μI) = 0`:

    tr   = e11 + e22
    det  = e11·e22 - e12·e21
    μ1,2 = (tr ∓ sqrt(tr² - 4·det)) / 2

This uses complex adders, subtractors and multipliers. The complex square
root (`csqrt`) uses the closed form

    sqrt(z) = sqrt((|z|+x)/2) + j·sign(y)·sqrt((|z|-x)/2)

It runs three square roots in turn on one bit-serial integer square-root
unit (`isqrt`, 64-bit radicand, 32 cycles each). Output 1 is the "minus"
root and output 2 the "plus" root, matching the CS and CA branches of the
reference figure. The order of the two velocities is therefore fixed by the
arithmetic, not sorted.

**Angles.** Two CORDIC vectoring units (`cordic_atan`, 18 iterations, table
in 2^-32 turns, quadrant pre-rotation) give the angle of each eigenvalue in
turns. The top multiplies each angle by VSCALE to get m/s.

The whole stage takes about L + 150 cycles.

**Branch cut.** When the two eigenvalues sit symmetrically about the
negative real axis of the discriminant, the principal square root may swap
them. The pair of velocities stays the same; only their order changes.

### 5. Result

The two Q16.16 velocities go out on `m_axis` (two beats, `tlast` on the
second). They are also latched in VEL1/VEL2, and the two raw angles in
PHASE.

## The coarse FFT path (`fft_peak`)

`fft_peak` works in three steps:

1. **Feed.** It streams y[0..N-1] followed by P-N zeros to the external FFT
   core on `fft_in_*`, with `last` on the final beat. The size `fft_nfft` =
   log2 P is set on the core's configuration input.
2. **Peak search.** It takes the P bins back in natural order on
   `fft_out_*` and keeps the index of the largest |X|². The comparison is
   full precision, and the first bin wins a tie.
3. **Angle.** It reports the angle as -k/P turns. The angle has 16 bits, so
   k is shifted by 16 - log2 P.

The precision of the result is λ / (2·P·T_PRI), which is 4.2, 1.05 and
0.26 m/s at P = 1024, 4096 and 16384 for a 0.58 µs PRI. A frame costs P
beats out, the core's latency, P beats in and one cycle, for example
32,907 cycles at P = 16384 with the behavioural core.

## Run-time reconfiguration

In the reference system the FPGA region holding the estimator is rewritten
by partial reconfiguration. One bitstream holds the FFT, and one ESPRIT
bitstream exists for each of 50, 100 and 200 packets. Partial
reconfiguration is a property of the FPGA's configuration port, not of RTL.
This design reaches the same run-time choices with registers:

* Both engines are present. CTRL[0] selects which one processes the next
  frame, and the slow-time buffer's read ports are switched to that engine.
* One ESPRIT engine sized for N_MAX = 200 packets processes any N up to 200
  (L = N/2). Its cycle count scales with N, as the reference's smaller
  bitstreams do, but its area does not shrink.
* The FFT size and the velocity scale are registers too.

The settings are sampled once per frame. This happens in the cycle in which
the first sample of a frame is offered while the accelerator is idle
(`s_axis_tready` is low in that cycle). A register write during a frame
therefore never disturbs it.

## Register map (AXI-Lite, 32-bit, byte addresses)

| Addr | Name | Access | Contents |
|---|---|---|---|
| 0x00 | CTRL | RW | [0] engine: 0 = FFT, 1 = ESPRIT (reset 0) |
| 0x04 | NPKT | RW | Packets per frame N, clamped to 6..200 (reset 200) |
| 0x08 | NFFT | RW | log2 of the FFT size P, clamped to 6..14 (reset 14) |
| 0x0C | VSCALE | RW | λ/(2·T_PRI) in Q16.16 m/s per turn (reset 1250.0) |
| 0x10 | STATUS | RO | [0] busy, [1] result valid, [31:16] frames completed |
| 0x14 | VEL1 | RO | First velocity, Q16.16 m/s |
| 0x18 | VEL2 | RO | Second velocity, Q16.16 m/s (ESPRIT) |
| 0x1C | PHASE | RO | [15:0] first angle, [31:16] second angle, in turns |

Write strobes are honoured. Every access answers OKAY. Assertions check
that BVALID and RVALID hold until accepted.

## Top-level ports and timing

| Group | Signals | Meaning |
|---|---|---|
| AXI-Lite slave | `s_axil_*`, 5-bit address | Configuration and result registers |
| Slow-time input | `s_axis_tvalid/tready/tdata` | N Q1.15 I/Q samples per frame; the count ends the frame, no TLAST is needed |
| Result output | `m_axis_tvalid/tready/tdata/tlast` | One (FFT) or two (ESPRIT) Q16.16 velocities; an assertion checks the beat holds under back-pressure |
| QR / eigen core | `qrf_a_valid/ready/data/last`, `qrf_q_valid/ready/data` | A out (L x L, column-major, `last` on the final element), Q back (L x L, column-major) |
| FFT core | `fft_nfft`, `fft_in_valid/ready/data/last`, `fft_out_valid/data` | Zero-padded input out, P bins back in natural order; the output side has no back-pressure |
| Status | `frame_done` | One-cycle pulse when a result has been produced |

Measured end-to-end frame times at the default `ACG_PAR = 4`, from the
first input sample to the last output word, with the behavioural cores:

| Frame | Cycles |
|---|---|
| ESPRIT, N = 200 | 273,458 |
| ESPRIT, N = 100 | 38,670 |
| ESPRIT, N = 50 | 6,167 |
| FFT, P = 16384 | 32,907 |
| FFT, P = 4096 | 8,335 |
| FFT, P = 1024 | 2,188 |

The covariance accounts for almost all of the ESPRIT time. These counts
cannot be compared directly with millisecond latencies of a processor-driven
system, which include DMA and software.

## Where this design departs from the reference

* **Partial reconfiguration** is replaced by both engines and a mode
  register (see above).
* **Eigenvectors, not a single QR,** are required from the external
  decomposition core (see stage 2).
* **E2^H versus E1^H** in the second pseudo-inverse product: the formula is
  followed.
* **ε = E2^+·E1**, the figure's order, is built rather than the formula's.
  The reference writes the eigenvalues as `exp(-j·4π·v·T_PRI/λ)`, which
  belongs to the opposite order. With the order built here they are the
  conjugates, and the velocity is obtained with the matching sign, so the
  result is the same.
* **L = N/2** is inferred, not stated.
* **Word lengths** (Q16.16, 16-bit angles, 18 CORDIC iterations) are this
  design's own choices.
* **Covariance parallelism** is a parameter (`ACG_PAR`, default 4). The
  reference parallelises this step but does not give the degree.
* **The register map, clamping, reset values and stream formats** are this
  design's own, since the reference says only that AXI-Lite and AXI-Stream
  are used.
* **The processing system, DMA, range-azimuth localisation and the
  MUSIC baseline** are not part of this RTL.

## Verification

Each block has a self-checking testbench in `tb/` that compares against
values computed independently in the testbench, mostly in double
precision. Each prints
`TB_RESULT checks=<n> failures=<m>` and has a watchdog.

| Testbench | What it checks |
|---|---|
| `tb_ss_buffer` | Frames of different lengths with input gaps; exactly N beats accepted; `count` and `full`; every lane of both three-wide read ports, with the Q1.15 to Q16.16 conversion |
| `tb_ss_acg` | Every covariance element, bit-exact, against a direct sum with 3 MACs, for N-L both a multiple of 3 and not; column-major order and `last`; the cycle count; stalls |
| `tb_subspace_split` | Column selection, the one-row shift between E1 and E2, the copy in G |
| `tb_pseudo_inverse` | BRAM F entry by entry against a double-precision (E2^H E2)^-1 E2^H for random E2; E2^+·E2 = I; the three-step cycle count |
| `tb_eigen_calc` | ε rebuilt from E2^+ and E1 built around planted eigenvalues; both angles and their order, including targets near ±½ turn |
| `tb_fft_peak` | Zero padding, `last`, the arg-max (with ties) and the -k/P angle for every FFT size |
| `tb_cfg_regs` | Every register, strobes, clamping, reset values, read-only status |
| `tb_doppler_accel` | Whole design at its default size (N_MAX = 200, P up to 16384) with the behavioural QR and FFT cores |
| `tb_workloads` | Noisy evaluation scenarios; see below |

`tb_doppler_accel` runs seven frames: FFT at three sizes, ESPRIT at 200,
50 and 100 packets, then FFT again. Every velocity is checked within a
quarter of a m/s for ESPRIT and within half the precision for FFT. It also
counts that each mechanism happened:

* a switch to ESPRIT and back to FFT;
* changes of packet count, FFT size and PRI scale;
* back-pressure on the output;
* gaps in the input;
* stalls on the covariance stream into the QR core.

`tb_workloads` runs the evaluation scenarios with white Gaussian noise:

* FFT at the three precisions with 100 packets, and at 10, 20 and 200
  packets.
* ESPRIT pairs 6 m/s apart with 200 packets at 2 µs and at 0.58 µs.
* ESPRIT pairs 2, 4 and 8 m/s apart with 200, 100 and 50 packets.

Cases observed for 200 µs or longer run at 25 dB. The two 100 µs cases,
50 packets at 2 µs and 200 packets at 0.58 µs, resolve a pair reliably only
at high SNR and run at 40 dB. Each RMSE limit is about 1.5 times the worst
result of a double-precision model of the same estimator over many noise
draws. Typical RMSEs are 0.01 to 0.3 m/s for 200 packets, and up to about
1 m/s for the 100 µs cases. The reference's SNR axis comes from a
fading-channel model, so its figures are not directly comparable.

Simulate with Verilator 5, for example:

    verilator --binary --timing --assert -y rtl -y tb \
        rtl/doppler_pkg.sv tb/tb_doppler_accel.sv --top-module tb_doppler_accel
    ./obj_dir/Vtb_doppler_accel

Any other testbench runs the same way. `tb_doppler_accel` takes a few
seconds and `tb_workloads` under half a minute. The behavioural cores use `real`
arithmetic and are for simulation only.

## Files

| File | Role |
|---|---|
| `rtl/doppler_pkg.sv` | Formats, types, complex helpers |
| `rtl/doppler_accel.sv` | Top level: frame control, engine selection, output stream |
| `rtl/cfg_regs.sv` | AXI-Lite registers |
| `rtl/ss_buffer.sv` | Slow-time input buffer |
| `rtl/ss_acg.sv` | Spatial smoothing and covariance |
| `rtl/subspace_split.sv` | Signal subspace and BRAM A, B, G |
| `rtl/pseudo_inverse.sv` | Low-complexity pseudo inverse, BRAM H and F |
| `rtl/inv2x2.sv` | 2x2 complex inverse |
| `rtl/fx_div.sv` | Sequential divider |
| `rtl/eigen_calc.sv` | ε, eigenvalues, angles |
| `rtl/csqrt.sv` | Complex square root |
| `rtl/isqrt.sv` | Integer square root |
| `rtl/cordic_atan.sv` | Arctangent |
| `rtl/fft_peak.sv` | FFT feed and peak search |
| `tb/qrf_model.sv` | Behavioural eigen-decomposition core |
| `tb/fft_model.sv` | Behavioural FFT core (direct DFT) |
| `tb/tb_*.sv` | Testbenches |

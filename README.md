# Spatial sensing accelerator: MUSIC direction finding on a sparse, sub-Nyquist antenna array

A base station that shares spectrum needs to know two things about each band it
senses: whether the band is occupied, and from which direction the occupying
signal arrives. Cost and power limit both the receiver and the antennas. Each
antenna output is therefore digitised by a sub-Nyquist sampler: the signal is
mixed with a sum of band-selecting tones, low-pass filtered to one band's width
and sampled at that low rate. The antennas sit on a *sparse* grid, with fewer
physical elements than slots. This RTL estimates the directions of arrival
(DoA) of M narrowband sources, with known carrier, directly from those samples.
It uses the MUSIC subspace method, preceded by a pre-processing step that turns
the sparse array into a larger virtual uniform array. With the default 4
antennas on a 6-slot grid it resolves up to 5 sources. A plain uniform array of
the same 4 antennas resolves at most 3.

The datapath is written for an FPGA fabric next to an embedded processor. The
processor places the samples in memory, a DMA streams them in, and the results
are streamed back out. The number of sources M is fixed per build. The intended
use is to swap the two M-dependent blocks by partial reconfiguration when the
number of active signals changes.

## Signal flow

```
            Y (L x K)                Y-hat (L' x L')        R (N x N)
 stream --> SAP ------------------> ACF --------------> [ EVD ] --> Extract Vn --> MSG --> DoA stream
 in         (ACF, vectorise,                            external      (N-M noise     (181-angle
            de-duplicate lags,                          QR core       eigvecs)       spectrum,
            Toeplitz rearrange)                                                      peaks, best M)
 stream --> Se (N x 181) -------------------------------------------------------------^
```

| symbol | meaning | default |
|---|---|---|
| L | physical antennas | 4 |
| K | baseband samples per antenna | 200 |
| L' (`LP`) | slots of the sparse grid = size of the virtual array | 6 |
| `POS` | occupied slots, 0-based | {0, 1, 2, 5} |
| N | size of the correlation matrix: L' with SAP, L without | 6 |
| M | sources to report, fixed per build | 2 |
| `USE_SAP` | 1 = sparse array with pre-processing, 0 = uniform array | 1 |

`spatial_sensing_top` wires the chain. For a uniform array (`USE_SAP = 0`) the
SAP is left out and Y goes straight into the MUSIC correlator, with N = L.

## Number format

All datapath values are signed fixed point with 24 bits, of which 8 are
integer bits (sign included) and 16 are fractional. This is written {24,8}.
`rtl/ss_pkg.sv` holds the format and the complex type `cplx_t` (real part in
the upper half). The architecture was characterised at {24,8}, at {17,7} and
in single-precision float. {24,8} is the middle point and is used here. Change
`WL` and `IWL` in the package to build another fixed-point width, up to 24
bits. At {17,7} every block test still passes bit-exactly, since the
testbench models follow the package. The accuracy sweep described below then
gives an NDEE of about 0.003–0.09 for the sparse array and 0.07–0.24 for the
uniform array. With that sweep's small input amplitudes, a sample spans only
a few dozen steps of 2⁻¹⁰. The published figures show the same large loss at
{17,7}. There is no floating-point variant. Note that the published resource and timing figures
for the complete chain, and for the hardware/software splits, belong to the
float build, not to {24,8}.

Products are truncated back to 16 fractional bits by an arithmetic shift.
Accumulators carry 24 more integer bits and saturate only when a result
returns to 24 bits.

**Scaling is the user's responsibility.** R = Y·Yᴴ is a plain sum over the K
samples, with no division by K. With 8 integer bits, |R| must stay below 128.
For the sparse array a second correlation of Y-hat follows, which roughly
squares the magnitudes. The testbenches scale the input so that the zero-lag
value of R is about 0.5–1.25. In practice, choose the input scale with K and M.

## Sparse array pre-processing (SAP)

This is the least obvious part of the design. Take antennas at slots pₐ. For
uncorrelated far-field sources, element (a,b) of the correlation matrix
R = Y·Yᴴ depends only on the *difference* pₐ − p_b. This is the lag, the slot
distance between the two antennas:

R[a][b] ≈ Σₘ Pₘ · exp(jπ (pₐ − p_b) cos θₘ) + noise·δ(a,b)

The default slots {0,1,2,5} give pairwise differences that cover every lag
from −5 to +5 with no hole, the "difference coarray". The correlation of a full
6-element uniform array is therefore available from only 4 antennas. The SAP
rebuilds that 6×6 matrix:

1. **ACF.** R = Y·Yᴴ (4×4), computed by an `acf` instance.
2. **Vectorisation.** Each R[i][k] is stored column-wise as r[k·L + i] in a
   dual-port memory as it leaves the correlator.
3. **Redundancy removal.** Several pairs give the same lag (all diagonal
   entries give lag 0, for example). One entry per lag is kept, which leaves
   the reduced vector r̂ of 2L' − 1 = 11 values. An elaboration-time function
   builds the lag → address table from `POS`. It takes the first pair found in
   r order. Redundant entries are not averaged.
4. **Matrix rearrangement.** The L'×L' matrix is Y-hat[m][i] = r̂ at lag
   m − i. It is Toeplitz and Hermitian. It is written out one element per
   cycle to the MUSIC correlator's input memory.

Y-hat then plays the role of the sample matrix. The MUSIC correlator computes
Y-hat·Y-hatᴴ, which has the same eigenvectors as Y-hat. The steering matrix Se
handed to MSG must describe the *virtual* array: L' rows for slots
0..L'−1, and Se[l][i] = exp(jπ·l·cos(i°)) for half-wavelength slot spacing.

With a different antenna layout, change `POS` and `LP`. Each lag from
−(L'−1) to L'−1 must be produced by some pair. A missing lag is written as
zero, which spoils the estimate.

## The correlation engine (ACF)

`rtl/acf.sv` computes R[i][k] = Σⱼ Y[i][j]·conj(Y[k][j]) under a nine-state
controller:

| state | action |
|---|---|
| C0 | idle; start initialises the loop counters |
| C1 | next sample j (outer loop) |
| C2 | next row i |
| C3 | next column k; form addresses i·K + j and k·K + j |
| C4 | read both operands (two read ports) |
| C5 | complex product: re = ac + bd, im = bc − ad (four real multipliers) |
| C6 | read the running sum of R[i][k] (zero in the first pass) |
| C7 | add |
| C8 | write back to SUM, or in the last pass send R[i][k] out; loop to C3, C2 or C1 |

Each multiply-accumulate takes 6 cycles. Start to done takes
K·(1 + L·(1 + 6L)) + 1 cycles: 20 201 for 4×200 and 1 339 for the 6×6 Y-hat.
Results leave on a write port (`out_we/out_row/out_col/out_data`), and the
consumer stores them where it needs them.

## Eigen-decomposition: outside the RTL

The eigenvalue decomposition of R uses a vendor QR-decomposition core. It is
not part of this RTL. The top presents R on `evd_r` with `evd_req` high and
waits. The core answers with a one-cycle `evd_done`. In that cycle
`evd_eigval[c]` and column c of `evd_eigvec` (unit norm, same {24,8} format)
must be valid. The order of the eigenvalues does not matter.
`tb/evd_model.sv` is a behavioural stand-in (a cyclic complex Jacobi
iteration in real arithmetic) and is used by the end-to-end testbenches.

## Noise subspace and the number of sources

`rtl/extract_vn.sv` ranks the N eigenvalues in parallel and outputs, one cycle
later, the N − M eigenvectors of the smallest ones as Vn, smallest first.

M is a parameter of `extract_vn`, `msg` and the top, not a run-time input.
These two blocks are the reconfigurable region: a system that must follow a
changing number of transmitters holds one partial bitstream per M and loads
the right one. A build accepts 1 ≤ M ≤ N − 1, so up to 5 with the sparse
default and up to 3 for a 4-antenna uniform array.

## MUSIC spectrum, peaks and the best-M search

`rtl/msg.sv` scans θ = 0…180° in 1° steps. Se is stored as 181 columns of N
entries, one column per read. For each angle it computes:

1. **Correlation.** C = Se[:,i]ᴴ·Vn, one of the N − M entries per cycle, with N
   complex multipliers in parallel.
2. **ACF.** p_inv = C·Cᴴ, accumulated over those entries.
3. **Modulus.** |p_inv|² = Re² + Im², kept at 32 fractional bits. The square
   root is left out because it does not move the peaks.
4. **1/X.** p(i) = 2⁴⁸ / |p_inv|², a 49-bit value with 16 fractional bits. A
   restoring divider produces it at one quotient bit per cycle. A zero
   denominator gives all ones and skips the divider.

Peak detection runs from i = 2 on. p(i−1) is a peak when it exceeds both
p(i−2) and p(i). Each peak is offered to an M-entry buffer kept sorted in
descending order. An equal later peak does not displace an earlier one. At the
end the buffer's angles are the DoAs, strongest first. The spectrum also
streams out on `spec_*` as it is produced, together with a peak count.

One angle takes (N − M) + 4 + 49 cycles, so a scan takes about 10 300 cycles
for N = 6, M = 2.

## Driving the top

1. Pulse `start`.
2. Send L·K beats of Y on `s_axis`, antenna by antenna: beat l·K + k =
   Y[l][k], `tdata = {re, im}` with 24 bits each.
3. Send N·181 beats of Se, angle by angle: beat i·N + l = Se[l][i].
4. Serve the EVD handshake.
5. Read M beats on `m_axis`: `tdata[7:0]` is the angle in degrees, `tdata[8]`
   is set when a peak filled that slot, and `tlast` marks the last beat.

Both streams follow AXI-Stream valid/ready. An assertion checks that a result
beat, once offered, is held until it is taken. The input `tlast` is not used,
because the counts define the matrices. `busy` covers the whole run and `done`
pulses after the last result.

Without input gaps, the default sparse build takes about 33 800 cycles from
start to the last result, plus the EVD's own time. That is 800 + 1 086 load
beats, 20 240 in the SAP, 1 339 in the second correlation and about 10 300 in
MSG.

## How far to trust it, and where it departs from the original architecture

What the testbenches establish:

- `acf`, `sap`, `extract_vn` and `msg` are checked bit-exactly against
  independent fixed-point models written in the testbenches, with their cycle
  counts.
- The full chain recovers every true angle within 2° at 20 dB SNR, most of
  them exactly and the worst 1° off:
  - sparse array: 1, 3, 4 and 5 sources, and 2 sources in two scenes;
  - uniform array: 1 and 2 sources.

This holds only with the behavioural EVD in place. It says nothing about the
accuracy of a particular vendor core at {24,8}.

`tb/tb_ndee_sweep.sv` measures accuracy statistically. It uses 4 antennas
and 2 sources at random angles (20°–160°, at least 25° apart), with 20
scenes per point, on both array types. It reports the normalised DoA
estimation error (NDEE): the mean absolute angle error divided by 180°. The
sweep covers K = 20, 40, …, 200 samples (100 to 1000 RF samples before 5×
sub-sampling) at 20 dB, then 0 to 40 dB SNR in 10 dB steps at K = 200.
Fewer samples are fed by zero-padding the unused slots, which leaves R
unchanged. Typical results:

| | sparse | uniform |
|---|---|---|
| K = 20, 20 dB | 0.005 | 0.0004 |
| K = 200, 20 dB | 0.001 | 0 |
| K = 200, 0 dB | 0.003 | 0.004 |
| K = 200, 40 dB | 0.0003 | 0 |

The test requires NDEE < 0.03 (5.4°) at every point at 10 dB and above. That
is the bound stated in words for the original design, though its plotted
errors range from 0.01 to 0.11. The samples here are ideal baseband values
with no sub-Nyquist front end, and the scenes are this testbench's own. So
the errors are much lower than the published ones, and the two should not be
compared directly. The sparse build is less accurate than the uniform one
here. With only two sources it gains nothing from its larger virtual
aperture, and it pays for the single-snapshot Toeplitz rebuild.

Departures and choices made here:

- **Latency.** The original architecture was tuned for latency and reports
  about 9 600 cycles for the sparse chain and 6 600 for the uniform chain.
  The sample count behind those numbers is not known. This RTL follows the
  described one-operation-per-state ACF controller and a sequential spectrum
  scan, so it takes about 33 800 cycles plus the EVD at K = 200. Clock frequency and FPGA
  resources have not been measured.
- **Antenna layout.** The slot positions are not given. The nested layout
  {0,1,2,5} was chosen because it gives a hole-free 6-slot coarray, which is
  what 5 resolvable sources with 4 antennas requires.
- **Redundancy removal** keeps one entry per lag and does not average.
- **The correlation output** goes to a write port instead of an OUT memory,
  and the write-back happens in C8.
- **The divider, the 49-bit spectrum format, the best-M insertion buffer, the
  stream formats and the EVD handshake** are this design's own.
- **Not included:** the analog sub-Nyquist front end, the processor system and
  its software (including the UART display of the DoAs), the DMA and GPIO
  cores, the configuration port, the floating-point variant, and the
  alternative hardware/software partitions.

## Files and simulation

| file | contents |
|---|---|
| `rtl/ss_pkg.sv` | number format, complex types, multiply and saturate helpers |
| `rtl/acf.sv` | correlation engine, states C0–C8 |
| `rtl/sap.sv` | sparse array pre-processing |
| `rtl/extract_vn.sv` | noise-subspace selection (per M) |
| `rtl/msg.sv` | MUSIC spectrum, peak detect, best-M search (per M) |
| `rtl/spatial_sensing_top.sv` | stream-in, chain, EVD ports, stream-out |
| `tb/tb_acf.sv`, `tb/tb_sap.sv`, `tb/tb_extract_vn.sv`, `tb/tb_msg.sv` | block tests |
| `tb/tb_spatial_sensing_top.sv` | default build, two scenes, stalls and back-pressure |
| `tb/tb_top_modes.sv`, `tb/top_harness.sv` | uniform M = 1, 2 and sparse M = 1, 3, 4, 5 builds |
| `tb/tb_ndee_sweep.sv`, `tb/ndee_runner.sv` | accuracy against sample count and SNR |
| `tb/evd_model.sv` | behavioural eigen-decomposition |

Each testbench prints `TB_RESULT checks=<n> failures=<n>`. For example:

```
verilator --binary --timing --assert -Irtl rtl/ss_pkg.sv rtl/acf.sv rtl/sap.sv \
  rtl/extract_vn.sv rtl/msg.sv rtl/spatial_sensing_top.sv tb/evd_model.sv \
  tb/tb_spatial_sensing_top.sv --top-module tb_spatial_sensing_top -o sim
./obj_dir/sim
```

For a block test, list `rtl/ss_pkg.sv`, the block's files and its testbench.
The mode and accuracy tests take all of `rtl/`, `tb/evd_model.sv` and their
harness (`tb/top_harness.sv` or `tb/ndee_runner.sv`).
Every block and end-to-end test finishes within a second of wall time. The
accuracy sweep runs about 10 million cycles and takes some 10 seconds.

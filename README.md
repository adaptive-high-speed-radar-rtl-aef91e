# Reconfigurable SARP/MJARP radar signal processor for multi-target localisation

A base station for joint sensing and communication transmits Golay-coded radar
packets and receives the echoes on an array of `L` antennas. To point its
communication beams it has to find every mobile user quickly. That means
estimating range, azimuth and Doppler velocity for a few strong reflectors
(three by default). This RTL does the range/azimuth work and prepares the
Doppler work as a streaming FPGA accelerator. It follows the architecture of
the article *"Adaptive High-Speed Radar Signal Processing Architecture for 3D
Localization of Multiple Targets on System on Chip"*.

Its main idea is that the accelerator can switch, per target, between two
ways of finding the next reflector in the first packet:

* **MJARP** (modified joint azimuth-range processing). For every search
  angle the packet is beamformed, matched-filtered and inverse-transformed,
  and the peak is searched over range and over angle. This is accurate but
  does a full range profile per angle (181 IFFTs of 1024 points).
* **SARP** (sequential azimuth-range processing). The beamformed spectrum of
  every angle is integrated non-coherently over its first `IF` samples, the
  best angle is picked, and only that angle is matched-filtered. This costs
  one IFFT per target and is cheaper for a smaller `IF`, but it can pick the
  wrong angle when echoes are weak or close.

Targets are found one after another with **CLEAN**. Once a target is found,
its exact contribution to the antenna data (its *point spread response*,
PSR) is synthesised, sent through the same FFT and beamformer, and
subtracted from the stored beamformed image. The next search runs on the
residue. Each search can use SARP or MJARP, so the cheap mode can be used
for the strong targets and the accurate one for the weak ones, or the other
way round.

Every later packet `m = 1..M-1` gets **selective** processing only. For each
known target it beamforms at that target's angle, matched-filters with the
packet's own code, and evaluates the inverse transform at that target's
range bin only. The result is one complex slow-time sample per target and
packet: the input of a MUSIC Doppler estimator. The Givens-rotation QR core
used by that estimator's eigen-decomposition is included. Its spatial
smoothing front end and spectrum back end are not.

## Data flow and number formats

```
 packet X_m (P x L)      BRAM A        external FFT      BRAM D          BRAM B (weights)
 s_valid/s_ready ---> [ P*L words ] --> (per antenna) --> [ P rows of L ] --+
                            ^                                               v
                            |                            dbf_mac: y = (1/L) sum_l X[k,l] w[i,l]
                       psr_gen (CLEAN)                                      |
                            ^                   first packet                | later packets
                            |                        v                      v
                   target regs R0-R8 <-- peak_search <-- IFFT <-- mf_unit <-- clean_unit (BRAM F, SARP)
                                                                   |
                                                     sel_mf (single-bin IFFT) --> BRAM I (zeta)
```

| signal | format `<W,I>` (integer bits incl. sign) | fractional bits | scaling |
|---|---|---|---|
| antenna samples, FFT output | `<24,1>` | 23 | FFT scaled by 1/P |
| beamformed samples, weights, BRAM F | `<22,2>` | 20 | DBF scaled by 1/L |
| matched-filter product | `<26,6>` | 20 | times the unscaled code spectrum |
| IFFT output, peaks, slow-time samples | `<32,1>` | 31 | IFFT scaled by 1/P |
| QR core | `<32,12>` | 20 | none |

The four first word lengths and the QR word length are the original design's.
The article does not say how the stages are scaled. The choice here (both
transforms scale by 1/P, beamforming by 1/L, and the code spectrum in BRAM E
is unscaled) makes an echo of amplitude `a` appear as a range peak of value
`a/2` (a Golay code of `P/2` chips correlated against itself, divided by
`P`). The PSR generator therefore rebuilds the echo with amplitude `2 x peak`.
All fixed-point stages round to nearest and saturate (`rsp_pkg::shr_sat`).

## The scheduler (rsp_top)

The controller keeps the state labels of the original state diagram:

| state | work |
|---|---|
| `S0A_IDLE` | wait for `cfg_start`; latch RSP flags, packet count, IF, angle step, threshold |
| `S0B_LOAD` | accept one packet (`P*L` samples, antenna index fastest) into BRAM A |
| `S1_FFT_SEND/WAIT` | send each antenna column through the external FFT; spectra go to BRAM D |
| `S3_DBF_ALL`, `S4_AZ_WAIT` | SARP: beamform all angles into CLEAN/BRAM F; wait for the azimuth decision |
| `S5_SARP_RD` | SARP: read the chosen angle's row back from BRAM F into the matched filter and IFFT |
| `S6_DBF_ANG`, `S11_COL_WAIT` | MJARP: per angle beamform, CLEAN, matched-filter, IFFT, peak search |
| `S12_DECIDE` | threshold test; store range, angle, peak and mode in the target registers |
| `S14_PSR` | build the PSR of the target just found in BRAM A, then back to `S1` with CLEAN on |
| `S9_SEL_DBF/WAIT` | packets `m >= 1`: selective processing, one target at a time |
| `S_NEXT_PKT`, `S_DONE` | next packet or end of run (`done` pulse) |

The first packet is searched at most `T` times, where `T` is
`cfg_num_targets` (the paper's register T; 0 or more than `NT` means `NT`).
The search stops early when a peak's squared magnitude is not above
`cfg_threshold`. Bit `n` of
`cfg_rsp_mode` selects the mode for the `n`-th search (0 = SARP,
1 = MJARP). The CLEAN flag is 0 for the first search and 1 for all later
ones.

Only one frame is in an external FFT/IFFT core at any time. This makes the
interface latency-insensitive: a core takes `P` samples marked `in_last` on
the last, and later returns `P` samples in natural order with no
back-pressure. That ordering costs throughput. A production version would
overlap the antenna columns.

## CLEAN and the point spread response

This is the least obvious part of the design.

1. **First search (CL = 0).** Every beamformed sample `Y[i,p]` (angle `i`,
   frequency bin `p`) goes into `clean_unit`. There it is written to BRAM F
   (the whole `I x P` image, 185,344 words at full size) and passed on.
   * In SARP mode the unit also accumulates `|Y|` over the first `IF` bins of
     each angle. `|Y|` is approximated as `max(|re|,|im|) + min/2`. At the last
     bin of the angle the sum is compared with the best so far, and the
     winning angle comes out on `az_idx`.
   * In MJARP mode the samples flow straight on into the matched filter.
2. **Target registers.** The peak search (`peak_search`) gives range index,
   angle index and the complex peak value. For SARP the angle is the one
   CLEAN chose. For MJARP it is found by the search over columns (PS-I).
3. **PSR synthesis (`psr_gen`).**
   * It clears a `P`-word buffer (BRAM H).
   * It writes the first packet's Golay chips (BRAM G, one bit per chip)
     times `2 x peak`, starting at the target's range index. Chips pushed
     past the end of the packet are dropped.
   * It then writes `H[p] * conj(B[angle][l])` for every `p` and antenna `l`
     into BRAM A. This is exactly what that target alone would have put on
     the antennas.
4. **Subtraction (CL = 1).** BRAM A goes through the FFT and the beamformer
   again. `clean_unit` now subtracts each streamed sample from the stored
   image, writes the residue back to F, and integrates or forwards the
   residue as in step 1.

The subtraction happens after the FFT and beamformer, not on the raw data.
The PSR therefore passes through the same quantisation as the echo, and the
residue at the target's own cell is close to the noise level. This is why
the reference scene in the testbench recovers weak targets next to strong
ones.

## Selective matched filter (sel_mf)

For packets `m >= 1` only one range bin per target is needed. Instead of a
`P`-point IFFT, the matched-filter output `Z[k]` is multiplied by
`exp(+j 2 pi r k / P)` and summed. The phase index `r*k mod P` drives a
20-iteration CORDIC (`cordic_phasor`), so no Fourier table is stored. The
sum is scaled by `1/P` into the IFFT format and written to BRAM I at
`(target, packet)`. Entry `(n, 0)` is the first-packet peak of target `n`.
BRAM E holds one code spectrum per packet, because consecutive packets
alternate the two Golay codes.

## Givens-rotation QR (givens_qr)

The core factorises the `K x K` covariance `U` (BRAM J) as `G U = R`, with
`G` accumulated in BRAM K from the identity. It works in the
`K(K-1)/2` rotation order `nu = 0..K-2, mu = nu+1..K-1`. For each rotation:

* `cos = u1/d` and `sin = u2/d`, where `d = sqrt(u1^2 + u2^2)`.
* The complex square root is taken in the polar form
  `sqrt((r+Re)/2) + j sign(Im) sqrt((r-Re)/2)`.
* Only rows `nu` and `mu` are read, rotated and written back, first in J
  and then in K.

The squares are complex squares, as in the original formulation. For real
symmetric input (the test case) this is an ordinary orthogonal Givens QR.
Square roots and divisions are exact integer operations done in one clock
each. This is simple and correct but sets a long combinational path. It is
the first thing to pipeline for timing closure.

## Using it

Tables are loaded through `rsp_top`'s ports before `cfg_start`:

* `w_*`: steering weights `B[i][l]`, e.g. `exp(-j pi l sin(phi_i))` with
  `phi_i = -90 + 180 i/(I-1)` degrees (half-wavelength array).
* `g_*`: the `P/2` chips of the first packet's Golay code (1 = +1).
* `e_*`: for each packet `m`, the `P`-point DFT (unscaled) of that packet's
  code, zero-padded to `P`, at `m*P + k`.

Then:

1. Pulse `cfg_start` with the configuration.
2. Stream `cfg_num_packets` packets on `s_*`.
3. Read `num_targets` and `tgt_*` after `done`, and the slow-time samples on
   `zeta_*`.

`cfg_threshold` is compared with `re^2 + im^2` of the peak in `<32,1>`
units, which have 62 fractional bits.

## Verification

Every block has a self-checking testbench that compares against a
double-precision model written in the testbench. Each ends with a
`TB_RESULT checks=N failures=M` line.

| testbench | what it checks |
|---|---|
| `tb_dbf_mac` | beamforming sum, rounding, saturation, latency 1, L = 32 |
| `tb_mf_unit` | product with the conjugate code spectrum, per packet, latency 2 |
| `tb_clean_unit` | store / subtract / read-back of BRAM F, SARP integration and angle decision for two IF values, no decision in MJARP |
| `tb_peak_search` | range peak (SARP) and range-angle peak (MJARP), `done` timing |
| `tb_psr_gen` | every word of the PSR, including codes cut off at the end of the packet |
| `tb_sel_mf` | single-bin IFFT against the direct sum, pure tones, BRAM I read/write |
| `tb_givens_qr` | `R` upper triangular, `G U = R`, `G G^T = I`, identity input |
| `tb_rsp_top` | whole design at P = 64, L = 8, I = 31, M = 4 (see below) |
| `tb_rsp_full` | the same at the default sizes P = 1024, L = 32, I = 181, M = 32, K = 16 |

The two end-to-end tests share `rsp_driver`. It places three targets at
-30, 0 and +30 degrees, at ranges P/4, P/8 and 3P/8, with amplitudes 0.5,
0.3 and 0.15 and different Doppler shifts. Behavioural FFT/IFFT models
(`fft_model`) stand in for the vendor cores. The driver makes three runs:

1. SARP, MJARP, SARP for the three targets, over all packets.
2. A two-target scene in MJARP only, so that the threshold ends the search.
3. SARP with `IF = P/2` and `T = 2`, although the scene has three targets.

In each run it checks:

* the target count;
* each target's exact range and angle, its peak value within 3 % of `a/2`,
  and its mode;
* every slow-time sample against a time-domain correlation of the
  beamformed packet with its code.

It also runs the QR core. It counts SARP passes, MJARP columns, CLEAN
subtractions, PSR builds, selective passes, SARP/MJARP switches, threshold
stops, stops after `T` targets and QR runs. Any mechanism that never occurred counts as a failure.

Two more runs process only the first packet with three targets, once all
SARP and once all MJARP, and check that SARP takes fewer clock cycles. A
last run repeats the SARP one with `IF = P/16` (64 at the default size). At
the default sizes the test takes about a minute to simulate and
prints these counts:

| run | clock cycles | at 100 MHz |
|---|---|---|
| SARP, MJARP, SARP; 32 packets; 3 targets | 4 199 261 | 42.0 ms |
| MJARP; 2 packets; 2 targets | 1 519 187 | 15.2 ms |
| SARP, `IF = 512`; 3 packets; `T = 2` | 774 861 | 7.7 ms |
| SARP; first packet only; 3 targets | 861 088 | 8.6 ms |
| MJARP; first packet only; 3 targets | 1 418 530 | 14.2 ms |
| SARP, `IF = 64`; first packet only; 3 targets | 861 088 | 8.6 ms |

The original reports speed-ups over an older design rather than cycle
counts, for its own pipeline at 100 MHz. Three-target localisation on the
first packet is 2.15 times faster than that baseline in MJARP and 3.01
times in SARP, so SARP takes 0.71 of the MJARP time. Here the ratio is
0.61. A single-target SARP first packet takes 10.75 ms in the original.
These figures are compared here, not matched: the two pipelines differ
(see below).

To simulate with plain verilator, from the directory holding `rtl/` and
`tb/`:

```
verilator --binary --timing -Irtl -Itb --top-module tb_rsp_top \
    rtl/rsp_pkg.sv rtl/*.sv tb/fft_model.sv tb/rsp_driver.sv tb/tb_rsp_top.sv
./obj_dir/Vtb_rsp_top
```

A block test needs only the package, the block and its helpers, for example
`rtl/rsp_pkg.sv rtl/cordic_phasor.sv rtl/sel_mf.sv tb/tb_sel_mf.sv`.

## Where this RTL departs from the original design, and its limits

* FFT and IFFT are vendor cores in the original. Here they are outside
  `rsp_top`, behind streaming ports. Only a behavioural model is provided.
* MUSIC spatial smoothing and spectrum generation are not built. They come
  from the authors' earlier work and are not described. The ARM processor
  and the AXI DMA are replaced by plain ports.
* The original runs CLEAN in single-precision floating point. Here CLEAN
  is fixed point in the beamformer's `<22,2>` format. The original's MUSIC
  is listed both as double precision and as `<32,12>` fixed point. The QR
  core uses `<32,12>`.
* `K` (covariance size after smoothing) is not given; the default is 16.
* These are choices of this design, because the original is silent on
  them:
  * stage scaling (see above);
  * the SARP magnitude approximation, and integrating the first `IF` bins;
  * squared-magnitude peak comparisons and the threshold on them;
  * one code spectrum per packet in BRAM E;
  * the CORDIC Fourier-vector generator;
  * the per-target RSP bit.
* The original stores the SARP-selected row in a separate buffer (BRAM C).
  Here it is read back from BRAM F.
* Packets after the first are processed only if a target was found.
* The integration factor `IF` does not shorten a SARP pass here. The
  beamformer still covers all `P` samples for every angle, because the
  whole beamformed packet is kept in BRAM F for CLEAN and for later MJARP
  searches. `IF` only sets how many bins are integrated for the angle
  decision. In the original, a smaller `IF` makes SARP faster: 3.01, 4.3
  and 8 times the baseline for `IF` = 1024, 512 and 64.
* The scheduler has no MUSIC state (`S10` in the original). The slow-time
  samples of each target are left in a buffer that is read out through
  `zeta_raddr`/`zeta_rdata`. The QR core is a separate block with its own
  load and read ports.
* The peak range and amplitude of each target go straight into a target
  register file (`tgt_*`). The original writes them to two registers
  (`R15`, `R16`) first.
* The test scenes are ideal point targets on the search grid with a small
  amount of noise. Off-grid targets, multipath and clutter are not
  exercised. SARP's known weakness (an angle between two strong targets
  integrating more energy than either) is avoided by the choice of angles,
  not tested.

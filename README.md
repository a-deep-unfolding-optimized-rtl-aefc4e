# GBCD: a Gram-domain block-coordinate-descent data detector for 128 x 16 massive MIMO

This RTL implements a soft-output uplink data detector for a base station with
B = 128 antennas serving U = 16 single-antenna users. The constellations run
from QPSK to 256-QAM. For every receive vector y = H s + n it outputs max-log
LLRs for all users' bits.

The detector does not invert the full U x U system. It runs K = 3 sweeps of
block coordinate descent (BCD) on the Gram matrix G = H^H H. Each sweep
visits the users in pairs. For each pair it solves a 2 x 2 zero-forcing
subproblem, passes the result through a nonlinear denoiser, and subtracts the
pair's new contribution from a residual vector. The denoiser is either a clip
to the constellation box ("BOX") or a piecewise-linear approximation of the
posterior-mean estimator ("PME"). Its slope and step parameters would be
trained offline, one set per iteration.

The hardware has two halves. They share little logic but a lot of timing:

* **Preprocessor.** Once per coherence block (one H), it computes G, a
  per-user SINR estimate, a user order and the U/2 inverses of the 2 x 2
  diagonal blocks. For every receive vector it computes the matched filter
  y_MF = H^H y. One reconfigurable array of 256 multiply-accumulate elements
  does all the multiplications.
* **BCD equaliser.** Three chained BCD modules, one per sweep, followed by an
  LLR unit. Each module needs U = 16 cycles per vector, and so does the
  matched filter. The pipeline therefore accepts one receive vector every 16
  cycles.

## Algorithm as implemented

Notation: z is the current symbol estimate, r = y_MF - G z is the residual,
and A_m = {nu(2m), nu(2m+1)} is the m-th user pair of the order nu.

1. `G = H^H H`. Interference power `lambda_u = sum_{j != u} |G_uj|^2`.
2. Reciprocal SINR, used as the sort key:
   `SINR_u^-1 = lambda_u / G_uu^2 + N0 / (Es G_uu)`, with Es = 1. Users are
   sorted by ascending key, so the most reliable users are detected first.
   The order is fixed for all three sweeps.
3. `K_m = (G_{A_m,A_m})^-1` for m = 0..7, from the closed-form 2 x 2 inverse.
4. Per vector, start from `z = 0` and `r = y_MF`. For k = 1..3 and
   m = 0..7:
   * `v_A = K_m r_A + z_A`
   * `z_A' = PLM_k(v_A)`, with the real and imaginary parts mapped separately
   * `dz = z_A' - z_A`, then `r = r - G_{:,A} dz` and `z_A = z_A'`
5. The soft output uses the unconstrained estimate `s_hat = v` of the last
   sweep, not z, because z is already pulled toward the constellation. With a
   trained scalar alpha per scenario, the LLR is
   `LLR_b = (G_uu / alpha) * h_b( s_hat (1 + alpha / G_uu) )`.
   Here `h_b(t) = min_{a: bit b = 0} (t - a)^2 - min_{a: bit b = 1} (t - a)^2`
   over the sqrt(Q)-PAM points a of one real dimension. A positive LLR means
   bit 1. The labels are Gray-coded per dimension.

All nonlinear per-dimension maps are stored as piecewise-linear tables and
evaluated by the same PLM circuit. These are the BOX/PME denoisers of the
three sweeps and the four h_b functions.

## PLM tables and the parameter LUT

A PLM table has 32 rows `{bnd, slope, bias}`, all 16-bit signed:

* The bin of input x is the number of rows k = 1..31 with x >= bnd_k.
* The output is `(x * slope) >> (IFRAC + 10 - OFRAC) + bias`, saturated.
  Slopes carry 10 fraction bits.
* Unused rows take `bnd = 32767`.

With unit-energy PAM points `(2i - (M-1)) d` and `d = sqrt(3 / (2 (Q - 1)))`,
the tables are built as follows:

* **BOX:** three rows. The constant `-(M-1)d` below `-(M-1)d`, slope 1
  between, and the constant `(M-1)d` above.
* **PME (piecewise linear):**
  `P(x) = d * sum_{k=-(M/2-1)}^{M/2-1} clip(rho (x + 2 beta k), -1, 1)`.
  This gives 2M - 1 rows, or 31 for 256-QAM, which sets NBIN = 32. The table
  is exact when the ramps do not overlap (1/rho < beta).
* **h_b:** breakpoints at the midpoints between neighbouring points of each
  bit set. Between breakpoints, h_b is linear with slope `2 (a1 - a0)` and
  intercept `a0^2 - a1^2`, where a0 and a1 are the nearest points with the
  bit equal to 0 and 1.

The parameter LUT holds 7 tables (3 denoisers and 4 LLR bits) plus alpha and
1/alpha for 64 scenarios. The scenario index is {QAM order (2 bits), LoS flag,
SNR class (3 bits)}, where the SNR class is 0 below 0 dB, 1 + SNR/4 from 0 to
23 dB, and 7 from 24 dB up. The host writes the tables through the `cfg_*`
port. When G is captured, the LUT streams the current scenario's tables, one
row per cycle, to all four PLM users (the three BCD modules and the LLR
unit). They keep private copies, so a new scenario's tables can be loaded
while the previous block's vectors finish. The trained rho, beta and alpha
themselves are not part of this RTL. The host decides what each scenario
holds. For example, BOX tables can go in SNR class 0 (below 0 dB), and the
top class can reuse the parameters of the highest trained SNR. The testbenches use rho = 2/d and
beta = d for PME, and alpha = N0.

## The PE array and its three modes

The array is 128 PE-B slots. Each slot is two two-term multiply-accumulate
elements (PE-A). A PE-B either accumulates `conj(a) b` (complex mode) or
`|a|^2` and `|b|^2` on its two halves (split mode). An arbiter selects the
operands from the mode and a cycle counter:

| mode | slots used | per cycle | cycles |
|---|---|---|---|
| Gram | 120 pair slots (i < j) + 8 split slots for the diagonal | one row of H | B = 128 |
| interference | the 8 split slots, user 2d on one half and 2d+1 on the other | one column of G per user, the diagonal skipped | U - 1 = 15 |
| matched filter | all 128 slots, slot (i, j) = conj(H[row j][i]) y[row j] | U/2 = 8 rows of H and y | 2B/U = 16 |

The H store reads 8 consecutive rows per cycle, and the y FIFO gives the same
8 entries of its head vector. In matched-filter mode, each user's output is
the sum of its 8 slot accumulators. G keeps the 120 upper entries and 16
diagonal entries. The lower triangle is their conjugate.

## Schedule of one coherence block

The cycle numbers below count from the first Gram cycle, with default sizes
and no waiting:

| cycles | activity |
|---|---|
| 0-127 | Gram, one row of H per cycle |
| 128 | G captured (`g_cap`), parameter LUT starts streaming (32 cycles) |
| 129-143 | interference sums; the SINR unit starts at capture (U + 1 = 17 cycles) |
| 144 | lambda captured; the first matched filter may start here (or overlap the last interference cycle) |
| ~146 | SINR keys done; 10-cycle bitonic sort |
| ~156 | order nu ready; the inverter starts and delivers K_m every 2 cycles (16 cycles for all 8) |
| ~160 | first y_MF ready, and BCD 1 starts |

The BCD modules use K_m just in time. Inner iteration m of the first sweep
reads K_m at about cycle 160 + 2m, after the inverter has written it
(`k_count > m`; an assertion checks this). After the first vector, the
matched filter runs back to back. Every 16 cycles, one vector enters BCD 1,
one moves from BCD 1 to BCD 2 and from BCD 2 to BCD 3, and one leaves through
the LLR unit, one user per cycle.

Two interlocks keep blocks from corrupting each other:

* A new Gram computation may run while the equaliser finishes the previous
  block's vectors. G, however, is captured only when the equaliser is idle:
  the preprocessor holds its result in the capture state while `eq_busy` is
  high.
* A matched filter never overlaps Gram or interference mode. A `pre_start`
  that arrives during a matched filter is held until that filter ends.

Host protocol:

1. Wait for `mf_idle`.
2. Write the 128 rows of H (`h_we`).
3. Pulse `pre_start` with the block's `info_in`: QAM order, LoS flag, SNR in
   dB, and N0 with 16 fraction bits.
4. Stream receive vectors with the `y_valid` / `y_ready` handshake. The FIFO
   holds two.
5. LLRs come out as `llr_valid`, `llr_ue` and eight 18-bit values per cycle:
   bits 0..3 of the real part, then bits 0..3 of the imaginary part. Bit 0 is
   the first (sign) bit of the Gray label.

## Inside a BCD module

One BCD module handles one pair per two cycles:

* **Even cycle (z-update).** The module reads r_A and z_A and computes
  `v = K r_A + z` with three complex multiplies per output. It maps the four
  real values through the PLM, writes z and v into its memories, and
  registers dz.
* **Odd cycle (r-update).** It subtracts `G_{:,a1} dz1 + G_{:,a2} dz2` from
  all 16 residuals.

The modules hand over vectors through their memories. A module reads the
previous module's z and r in its start cycle and the next one, and takes the
whole z vector into its own memory at once. In its first inner iteration it
reads r_A directly from the previous module's r memory. In the two cycles
after the previous module finishes, that module does not yet overwrite those
entries.

## Number formats

All formats are signed two's complement, written as bits/fraction bits:

| quantity | format | quantity | format |
|---|---|---|---|
| H, y | 12/11 | G | 15/12 |
| y_MF, r | 18/14 | z | 11/8 |
| v | 14/8 | dz | 12/8 |
| K_m | 16/12 | SINR^-1 key | 24/12 unsigned |
| PE operands | 15 | PE accumulators | 36 |
| N0 | 16/16 unsigned | alpha, 1/alpha | 16/16, 16/4 unsigned |
| h_b | 18/12 | LLR | 18/4 |

The array works in integer units: `G = (H^H H) >> 10` and
`y_MF = (H^H y) >> 8`, both floor shifts. Reciprocals (1/G_uu, 1/det,
1/G_uu in the LLR unit) come from one table style. The input is normalised
at its leading one. A 64-entry table, computed at elaboration as
`round(2^23 / (2^7 + 2i + 1))`, gives the mantissa of the reciprocal, which is
then shifted back. The relative error is below about 1%.

## Where this RTL differs from the published chip

* **LLR scaling.** The published circuit forms mu = G/(G + alpha) and
  xi = (1 - mu) mu with a reciprocal table for 1/(G + alpha). Here the same
  quantity is rearranged as `(G/alpha) h_b(s_hat (1 + alpha/G))`, which needs
  1/G from the shared reciprocal table and 1/alpha from the parameter LUT.
* **Storage.** The receive-vector FIFO depth (2) and all handshakes are this
  design's own. So is the storage of the PLM tables: private copies loaded
  from the LUT when G is captured.
* **Formats and table sizes.** All word lengths, the reciprocal tables, the
  32-row PLM tables and the 64-scenario indexing are this design's choices.
  The paper does not give them.
* **Cycle counts** follow the published schedule: B + U = 144 preprocessing
  cycles, 16 cycles per vector, 10 for the sort, 16 for the inverses, and 17
  for the SINR.
* **Not implemented.** The input/output SRAMs and the test interface of the
  fabricated chip are not included, nor is any clock-gating or
  memory-macro-specific structure. The H store and the FIFO are flip-flop
  arrays.
* **Training.** Training of the PME parameters is outside the RTL. Any
  (rho, beta, alpha) can be loaded.

## Files

`rtl/gbcd_pkg.sv` holds every width and type. The hierarchy is:

* `gbcd_top`
  * `h_latch_array`, `y_buffer`, `info_buffer`, `param_lut`
  * `preprocessor`
    * `pe_arbiter`
    * `pe_array` (`pe_b`, made of `pe_a`)
    * `sinr_module`, `bitonic_sorter`, `matrix_inverse`, all using `recip_lut`
  * `bcd_equalizer`
    * 3 x `bcd_module` (`bcd_ctrl`, `z_update` with `v_update` and `plm`,
      `r_update`)
    * `llr_module` (`recip_lut`, 4 x `plm`)

Each file opens with a description of its function, interface and timing.

## Verification

Every module has a self-checking testbench `tb/tb_<module>.sv`. Each uses
`$urandom` stimulus and references computed independently in the testbench,
checks the cycle counts given above, has a watchdog, and ends with a
`TB_RESULT checks=N failures=M` line. `tb/gbcd_tb_pkg.sv` builds the BOX, PME
and h_b tables from the formulas above.

`tb/tb_gbcd_top.sv` runs the full-size design (no parameter overrides)
through six coherence blocks with six vectors each. Five blocks use all
128 antennas and cover every QAM order, BOX and PME, and LoS flag set and
clear. The sixth is the published 16 x 16 QPSK system: antennas 16..127 carry
zero, and detection runs K = 3 sweeps, not the 6 used in that study. The
testbench checks:

* G and every y_MF bit for bit
* the Gram, interference, preprocessing and matched-filter cycle counts
* one vector every 16 cycles
* the LLR hard decisions against the transmitted bits. In the noise levels
  used (12 to 34 dB), all bits were correct on the 128-antenna blocks. The
  16 x 16 QPSK block at 20 dB had 7 of 192 bits wrong, and its bound is 10%.

To run a testbench with plain Verilator:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb \
    rtl/gbcd_pkg.sv tb/gbcd_tb_pkg.sv tb/tb_gbcd_top.sv --top-module tb_gbcd_top
./obj_dir/Vtb_gbcd_top
```

The detection quality depends on trained PME parameters, which are not
provided. The testbenches check the arithmetic and the schedule, not the
block-error rates of the published chip.

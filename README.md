# Resolution-adaptive finite-alphabet spatial equalizer for a mmWave massive MU-MIMO basestation

A mmWave basestation with hundreds of antennas uses most of its digital
receive power in two places. The first is the converter array: two ADCs per
antenna. The second is the spatial equalizer, which turns the vector of all
antenna samples into one symbol estimate per user equipment (UE). Both are
usually sized for the worst case: the most UEs, the densest modulation and the
hardest channel. Most of the time the receiver needs far less.

This RTL builds a receiver that can change its precision while it runs. A
controller picks four things:

- **q**, the number of ADC bits (1 to 8);
- **k**, the number of bits of each equalization-matrix entry (1 to 6);
- **B'**, how many of the B = 256 antennas are switched on (a contiguous block
  at the centre of the array);
- **U**, how many UEs are served (up to 64).

The hardware then switches off whatever that operating point does not need:

- converters of unused antennas;
- bit-cell columns above k bits;
- rows of absent UEs;
- whole compute instances above q.

It still delivers one equalized vector per clock cycle. The operating point
itself is chosen outside the chip, for example from a table computed offline
by simulation. With 64 UEs and 16-QAM, the worst case, q = 7 and k = 6 are
needed. This is the reset state.

The equalizer is a *finite-alphabet* linear equalizer. The usual L-MMSE matrix
`W^H` has 10 to 12-bit entries. Here each row `w_u` is quantized to k bits with
a step tied to that row's largest entry. This gives a low-precision matrix
`X^H`. A single high-precision complex factor per UE restores the scale:

    s_u = mu_u * x_u^H z,     mu_u = 1 / (x_u^H h_u)

Here `z` is the quantized receive vector and `h_u` is the channel of UE u. The
product `x_u^H z` involves only k-bit by q-bit numbers. It is computed
bit-serially in a processing-in-memory array. That array needs q cycles per
vector, so q such arrays work in turn.

## Block structure

```
 y (B antennas, I/Q) --> adc_pair x B --> z (q-bit codes) --> fa_equalizer --> s (U estimates)
                           ^  en = ant_mask                    |  ppac_mvp x 8 (q enabled)
                           |                                   |  post_scaler
                        ra_ctrl  --- q, k, B', U, stall, cal --+
                           ^
 w (L-MMSE column), h  --> flmmse_quantizer --> x (k-bit codes) --> fa_equalizer (X^H)
   (channel estimate)                       \-> mu_calc ------> mu --> fa_equalizer
```

| Module | Role |
|---|---|
| `ra_pkg` | Sizes, widths, the bit-plane weight function |
| `adc_pair` | Behavioural model of the I/Q converter pair of one antenna |
| `ra_ctrl` | Operating point, antenna/UE masks, stall-drain-apply-calibrate sequence |
| `flmmse_quantizer` | Quantizes one L-MMSE row to k-bit codes (FL-MMSE) |
| `mu_calc` | Per-UE scaling factor `mu_u = 1/(x_u^H h_u)` |
| `ppac_mvp` | One bit-serial in-memory matrix-vector unit (q cycles per vector) |
| `post_scaler` | Multiplies each inner product by its `mu_u` |
| `fa_equalizer` | 8 time-interleaved `ppac_mvp` units plus `post_scaler` |
| `ra_bs_top` | The whole receiver |

The following parts are not in the RTL. Their signals are ports of
`ra_bs_top`:

- the RF chains (`y_re`, `y_im`);
- the channel estimator (`h_re`, `h_im`);
- the computation of the L-MMSE matrix itself (`w_re`, `w_im`).

The gain control that sets the ADC step is also outside (`adc_delta`).

## Numbers as odd half-steps

All quantizers in the design are uniform *midrise* quantizers. A b-bit code m
(two's complement, `-2^(b-1) .. 2^(b-1)-1`) stands for the level
`Delta*(m + 1/2)`. There is no zero level. Measured in half-steps, every level
is the odd integer `2m+1`. The design keeps this form throughout:

- An ADC code m means `z~ = 2m+1` half-steps of the ADC step. It is carried as
  an 8-bit number, sign-extended from q bits.
- A matrix code n means `x~ = 2n+1` half-steps of the row's FL-MMSE step. It is
  carried as a 6-bit number, sign-extended from k bits.
- The inner product `sum_b x~_b z~_b` is an exact integer (26 bits). No
  rounding happens between the converters and the scaling stage.

Exactness means that a change of q changes only the input noise, not the
arithmetic. It is also why one scaling factor per UE is enough. The scale of
`x_u` (its step) and the ADC step both cancel in `mu_u * x_u^H z`, as long as
`h_u` is given in ADC half-steps. The channel estimate therefore enters with 4
extra fractional bits (`H_FRAC`). At q = 1 or 2 one ADC half-step is coarse.
Without those bits, `mu_u` would be computed from a badly rounded channel.

## The bit-serial PPAC unit

`ppac_mvp` holds `X^H` as bit-cells: U rows, B antennas, k bits each, for the
real and for the imaginary part. The receive vector comes in one bit-plane per
cycle, LSB first. In cycle j every cell ANDs its stored bit t with bit j of its
antenna's ADC code. A popcount down each (UE, bit t) column gives how many
antennas have both bits set. The column counts are weighted by `±2^t` and
added into an accumulator with weight `±2^j`. The sign bits have negative
weight, in both operands, and codes are sign-extended. After q cycles the
accumulator holds `sum_b x~_b m_b` exactly.

The odd-level form adds one term:

    sum_b x~_b (2 m_b + 1) = 2 * sum_b x~_b m_b  +  sum_b x~_b

The last sum `R_u` does not depend on the received data. It changes only when
`X^H`, k or the antenna mask changes. A **calibration cycle** (`cal`) computes
it once by running one plane whose bits equal the antenna mask. The result is
kept per UE and added to every later result.

Complex arithmetic uses the four real products `A = Re x·Re z`,
`B = Im x·Im z`, `C = Re x·Im z` and `D = Im x·Re z`. For `x^H z`:

    Re = (A + B),  Im = (C - D)

Each is expressed through the accumulated parts plus the calibrated row sums
`Rr` and `Ri`. One stored copy of the real and imaginary bits is read twice.
This is arithmetically the same as the four separate arrays of the original
in-memory design, whose bit-cell count is 4·k·B'·U.

Gating:

- Antennas outside the B' window contribute nothing. Their plane bits are
  masked.
- UE rows at or above U produce zero.
- Bit columns at or above k have zero weight.

A unit takes `start` together with plane 0 of a new vector. It raises `done`
one cycle after plane q-1, and can take the next vector in that same cycle.

## Time interleaving

One unit takes q cycles per vector. The sample rate must stay at one vector per
clock whatever q is, so `fa_equalizer` holds `N_PPAC = 8` units, one for the
largest q. Only the first q are enabled (`ppac_en`). This is the mechanism by
which equalizer power scales with q. Vectors are dealt round-robin over the
enabled units. Each unit gets at most one vector every q cycles and needs exactly
q cycles, so:

- results come out in arrival order;
- at most one unit finishes per cycle;
- one shared `post_scaler` suffices.

All units store the same `X^H`, because matrix writes are broadcast. Latency
through `fa_equalizer` is q+1 cycles, and q+2 cycles through `ra_bs_top`
including the converter register.

## Preprocessing path: FL-MMSE and the scaling factor

Once per channel update, the L-MMSE matrix is streamed in one UE at a time.
Each entry comes with its antenna index and the channel estimate of that
antenna, and the row ends with `w_last`.

**Sign convention.** The hardware computes `sum conj(x) z`, so what is streamed
for UE u is the u-th *column* of `W`, i.e. the conjugate of row u of `W^H`. The
symmetric quantizer commutes with conjugation, so this is the same as
quantizing the row and conjugating afterwards.

`flmmse_quantizer` buffers the row and tracks `M`, the largest magnitude of any
real or imaginary part. It then replays the row and emits, for every part:

    n = clip(floor(w * 2^(k-1) / M), -2^(k-1), 2^(k-1)-1)

This is the k-bit midrise quantizer with step `M * 2^(1-k)`, so the largest
entry lands in the outermost level. An all-zero row gives n = 0. The quantizer
always uses the *requested* k (`tgt_k`). A matrix loaded together with a change
of k is therefore already in the new resolution when that resolution takes
effect.

`mu_calc` sees the same code stream. It accumulates `d = x~_u^H h~_u` and
forms the factor in mantissa/exponent form:

    mant = conj(d) * 2^(p+8) / |d|^2     (10-bit complex mantissa)
    e    = max(p - 4, 0)                  (right shift applied after multiplication)

Here `2^p ≤ max(|Re d|, |Im d|) < 2^(p+1)`, which bounds the mantissa to
`|mant| ≤ 2^8`. The division is two restoring dividers running 9 cycles. The
factor is written into `post_scaler` 11 cycles after the row's last entry.
`post_scaler` computes `round((ip * mant) / 2^e)`, rounding half-up and
saturating to 16 bits. Estimates therefore carry 8 fractional bits. A QPSK
point `±1 ± j` comes out near `±256`, and 16-QAM levels `±1, ±3` near `±256`
and `±768`.

## Changing the operating point safely

Three things must never mix inside one received vector:

- the q used by the converters and the PPAC units;
- the `X^H` and k stored in the bit-cells;
- the row sums from calibration.

`ra_ctrl` therefore runs a small sequence whenever something changes:

1. **RUN.** Normal reception. A write on `cfg_*` is held as *pending*. A
   pending point, `recal_req` or a matrix update (`chan_update`, or the
   quantizer or `mu_calc` still busy) raises `stall`, which drops `in_ready`.
2. **DRAIN.** Wait until no vector is left in the ADC register or in any PPAC
   unit.
3. **HOLD.** Matrix and scaling-factor writes are let through
   (`x_wr_allow`) until the update is complete.
4. **APPLY.** The pending q, k, B', U take effect. This sets the antenna window
   `[(B-B')/2, (B-B')/2 + B')`, the UE mask and the PPAC enables.
5. **CAL.** One calibration cycle refreshes the row sums for the new matrix,
   k and antenna window, and restarts the round-robin. Then back to RUN.

Reset enters this sequence at CAL with the worst-case point: q = 7, k = 6,
B' = 256, U = 64. Requests outside the supported range are clamped.

## Interface of `ra_bs_top`

| Port | Dir | Meaning |
|---|---|---|
| `cfg_we, cfg_q, cfg_k, cfg_bact, cfg_u` | in | Write a new operating point |
| `recal_req` | in | Request a calibration |
| `act_q, act_k, act_bact, act_u` | out | Operating point in force |
| `ant_mask [B]`, `ppac_en [8]` | out | Powered antennas (RF + ADC) and PPAC units |
| `adc_delta` | in | ADC step, in sample LSBs, from gain control |
| `y_valid`, `in_ready`, `y_re/y_im [B]` | in/out | Receive vector, 16-bit I/Q per antenna |
| `chan_update` | in | High for the whole matrix update |
| `w_valid, w_ready, w_ue, w_ant, w_last, w_re, w_im, h_re, h_im` | in/out | Matrix stream: entry of column u of W (12 bit) and channel estimate (12 bit, ADC half-steps, 4 fractional bits) |
| `s_valid`, `s_re/s_im [U]` | out | Estimates, 16 bit with 8 fractional bits, q+2 cycles after acceptance |

Timing rules:

- A vector is taken when `y_valid && in_ready`.
- Estimates for UEs at or above U are zero.
- A matrix update goes like this: raise `chan_update`, stream all U rows, lower
  `chan_update`. Reception resumes a few cycles later, after the drain and the
  calibration.

## Verification

Every module has a self-checking testbench in `tb/`. Each compares the module
against a reference computed independently in the testbench:

| Testbench | Module | What is checked |
|---|---|---|
| `tb_adc_pair` | `adc_pair` | Quantizer law for all q, clipping, power-down |
| `tb_ppac_mvp` | `ppac_mvp` | Exact inner products for random q, k, masks; q-cycle latency; back-to-back starts |
| `tb_post_scaler` | `post_scaler` | Rounding, saturation, masks |
| `tb_flmmse_quantizer` | `flmmse_quantizer` | Codes for all k against a floating-point reference, handshake |
| `tb_mu_calc` | `mu_calc` | Factor accuracy against `1/d`, mu_we timing |
| `tb_ra_ctrl` | `ra_ctrl` | Sequence, clamping, centred antenna window, stall rules |
| `tb_fa_equalizer` | `fa_equalizer` | Bit-exact estimates at one vector per cycle for every q, latency q+1 |
| `tb_ra_bs_top` | `ra_bs_top` | End to end at B = 32, U = 8 over seven operating points |
| `tb_ra_bs_top_full` | `ra_bs_top` | End to end at the default size: B = 256, U = 64 |

The end-to-end testbenches share `tb/ra_bs_tb_body.svh`. For each operating
point the testbench:

1. draws a Rayleigh-fading channel;
2. computes the L-MMSE matrix by complex Gauss-Jordan elimination in floating
   point;
3. streams the matrix and channel estimate into the design;
4. sends QPSK or 16-QAM vectors with noise, with the ADC step set to
   the optimal uniform step for a Gaussian input at that q.

The testbench then checks:

- every estimate bit-exactly, against its own model of the integer datapath;
- the q+2 latency;
- that decisions are almost always right (the limit is 2% errors) for QPSK
  at q, k ≥ 4 and for 16-QAM at q ≥ 6, k ≥ 5.

It also counts how often each mechanism happened and fails if one never did:

- stalls;
- operating-point switches;
- matrix updates;
- ADC clipping;
- antennas switched off;
- PPAC units gated off;
- back-to-back vectors.

The full-size run covers three points, given as (q, k, B', U):

- (7, 6, 256, 64) with QPSK;
- (4, 3, 240, 16) with QPSK;
- (7, 6, 256, 64) with 16-QAM, the case that sets the worst-case resolution.

It takes about 15 seconds under verilator.

Each testbench prints `TB_RESULT checks=N failures=M` and has a watchdog. To
run one with plain verilator from the directory that holds `rtl/` and `tb/`:

```
verilator --binary --timing --assert -Wno-fatal -y rtl -y tb +libext+.sv -Irtl -Itb \
  rtl/ra_pkg.sv tb/tb_ra_bs_top.sv --top-module tb_ra_bs_top -o sim
./obj_dir/sim
```

## Departures and open points

- **Converters are a model.** `adc_pair` is a behavioural model of eq.-(2)
  midrise quantization of a 16-bit stand-in for the analog input, not a
  circuit. The gain control that sets the step is not modelled.
- **Preprocessing hardware is this design's own.** The published architecture
  says how the finite-alphabet matrix and the scaling factors are defined, not
  how they are computed. The row buffer, the divider, the mantissa/exponent
  factor and the `H_FRAC` channel format are choices made here. The L-MMSE
  inversion itself and channel estimation are not built.
- **PPAC cells are reconstructed.** The in-memory array is described only by
  its bit-cell count and its q-cycle bit-serial operation. The AND-popcount
  organisation, the odd-level correction and the calibration cycle are this
  design's.
- **Eight units, one clock per vector.** The throughput target is 2 GS/s with
  one vector per sample, so the clock would have to run at the sample rate.
  Whether 2 GHz is reachable is not known without a technology library. Power
  gating is expressed only as enable signals (`ant_mask`, `ppac_en`, masked
  columns and rows). No power is modelled.
- **Operating-point policy is external.** Which (q, k, B') suits a given U,
  modulation and channel comes from offline simulation. The controller only
  applies a point and keeps the datapath consistent while doing so. The
  drain/hold/calibrate sequence is this design's.
- **Idealised points are not built.** Unquantized converters (q = ∞) and an
  unquantized matrix (k = ∞) are reference points of the system study. The
  limits are 8 and 6 bits.
- **Channel model of the tests.** The testbenches draw i.i.d. Rayleigh
  channels. The mmWave line-of-sight and non-line-of-sight channel models
  that the operating-point study relies on are not reproduced. The datapath
  does not depend on the channel model.
- **Odd B - B'.** The antenna window starts at `floor((B-B')/2)`.

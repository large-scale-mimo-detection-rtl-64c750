# Soft-output linear MMSE detector for the large-scale MIMO LTE uplink

A base station with many antennas (B = 128) receives SC-FDMA uplink signals
from a few single-antenna users (U = 8) at the same time and on the same
frequencies. For every subcarrier w the received vector is

    y_w = H_w s_w + n_w        (B x 1, H_w is B x U)

The detector must separate the users and deliver, per user and per bit, a
log-likelihood ratio (LLR) for the turbo decoder. This RTL implements a
linear MMSE detector for that task:

    s_hat_w = A_w^-1 H_w^H y_w,   A_w = H_w^H H_w + (N0/Es) I

Because B is much larger than U, A_w is strongly diagonally dominant. So the
exact U x U inverse is replaced by a truncated Neumann series with K terms.
With D the diagonal and E the off-diagonal part of A_w:

    A_w^-1 ~= sum_{n=0}^{K-1} (-D^-1 E)^n D^-1

K = 1 uses only the diagonal. K = 2 needs one matrix product. Each further
term costs one more U x U matrix product. K is an input, so accuracy can be
traded against time per subcarrier while the design runs.

SC-FDMA adds a twist. Each user's data is DFT-spread over the L = 1200
subcarriers of an SC-FDMA symbol. The equalized symbols must therefore be
collected over the whole symbol and taken back to the time domain (an
L-point inverse DFT per user) before the LLRs can be formed. The reliability
of those time-domain estimates is the same for every sample of a user. It is
summarised by one post-equalization SINR per user and symbol, estimated from
quantities the inversion produces anyway.

## Data flow

```
             per subcarrier                        per user
 H_w, y_w   +-----------------+   +-----------+   +-------------+   +---------+
 ---------->| preprocessing   |-->| equalizer |-->| data buffer |-->| inverse |--+
 (NPRE x)   | matched filter  |   +-----------+   +-------------+   |   DFT   |  |
            | Gram + inverse  |   +-----------+   +-------------+   +---------+  |
            +-----------------+-->| SINR unit |-->| SINR buffer |--+           |
                                  +-----------+   +-------------+  |  +-----+  |
                                                                   +->| LLR |<-+
                                                                      +-----+
```

* **Preprocessing** (`preproc_unit`, NPRE = 8 copies). Reads B rows of H_w
  and the B entries of y_w, one per clock. It returns the matched-filter
  output y_MF/B = H^H y / B, the Gram matrix G/B, the diagonal D^-1·B and
  the approximate inverse A~^-1·B. Subcarrier w goes to copy w mod NPRE.
  The results are collected in the same round-robin order, so subcarrier
  order is kept.
* **Subcarrier processing.** Each collected subcarrier goes at the same time
  to the `equalizer` (s_hat = A~^-1 y_MF, U clocks) and to the `sinr_unit`,
  which accumulates over the symbol.
* **Buffers.** `data_buffer` turns the per-subcarrier output (all users of
  one subcarrier) into per-user streams (all subcarriers of one user).
  `sinr_buffer` keeps rho^2 and 1/mu of every user.
* **User processing.** The inverse DFT is outside `detector_top`: its input
  and output streams are ports. The `llr_unit` turns each time-domain sample
  into 2, 4 or 6 LLRs (QPSK, 16-QAM or 64-QAM).

## The Gram / inverse array (`gram_inverse`)

This is the most involved block. It is a lower-triangular array of
U(U+1)/2 processing elements. Element (i,j), with i >= j, owns entry (i,j)
of every Hermitian matrix. Only the lower triangle is computed, and the
upper triangle is output as its conjugate. Diagonal elements also hold a
reciprocal unit. One subcarrier is processed in four phases:

| phase | clocks | work |
|---|---|---|
| 1 | B, then 3 | accumulate conj(h_bi)·h_bj over the B rows. Then shift right by log2 B, add n0_scaled on the diagonal and look up d_i = 1/a_ii. |
| 2 | 2 | P = -D^-1 E: first the lower triangle -d_i·g_ij, then the upper triangle -d_j·conj(g_ij), using the same multipliers. |
| 3 | 1 | the K = 2 result X = D^-1 + P·D^-1, i.e. X_ij = P_ij·d_j. |
| 4 | (K-2)·(U+1) | X <- P·X + D^-1, one column of the product per MAC clock, then a store clock. |

Why the scaling works: dividing by B keeps the diagonal of A near 1.
Entries of A/B, D^-1·B and A~^-1·B can then share one 15-bit format.
Because B is a power of two, the division is a shift.

Rows are broadcast to all elements in the same clock rather than passed on
as a skewed wavefront. Phase 1 therefore takes exactly B clocks. The array
accepts the rows of the next subcarrier while its previous results are still
waiting to be taken, up to but not including the last row. This keeps the
matched filter, which shares the row stream, from overwriting a result that
has not been read.

Latency, from the clock edge that takes the last row to out_valid:
4 clocks for K = 1, and 6 + (K-2)(U+1) clocks for K >= 2.
A copy therefore needs B + 6 + (K-2)(U+1) clocks per subcarrier.
At the defaults with K = 3 that is 143 clocks.

## SINR estimation (`sinr_unit`)

A linear MMSE estimate of user i is, on average, mu_i·s_i plus noise and
interference of variance nu_i^2. Over one SC-FDMA symbol the unit
accumulates:

* mu_i = (1/L)·sum_w Re{ sum_j (A~^-1)_ij G_ji }, using U MACs. Each takes
  one column per clock, U clocks per subcarrier.
* the noise-plus-interference power through a cheap approximation:
  (1/L)·sum_w d_ii·g_ii - mu_i^2, using one further MAC.

After the last subcarrier it spends three clocks per user. It computes
rho_i^2 = mu_i^2 / nu_i^2 and 1/mu_i with two reciprocal tables. A
non-positive nu^2 is clamped to one LSB.

## LLRs with shifts and adds (`llr_unit`)

With Gray-mapped QAM every bit lives on one axis. With LTE mapping, bits
b0, b2, b4 are on I and b1, b3, b5 on Q. The max-log LLR is

    L(b) = rho^2 · ( min_{a: b=0} |x-a|^2 - min_{a: b=1} |x-a|^2 ),   x = x_hat/mu

In the difference the x^2 term cancels. Each minimum then runs over the
straight lines a^2 - 2·a·x, whose slopes are small odd integers, so only
shifts and adds are needed. The unit has three pipeline stages, one sample
per clock, out_valid three clocks after in_valid:

1. multiply by 1/mu;
2. scale to unit level spacing (times sqrt(2), sqrt(10) or sqrt(42)), and
   form rho^2/N;
3. evaluate the line minima and multiply by rho^2/N.

A positive LLR favours bit 1. Unused LLR outputs are zero.

## Reciprocal tables (`recip_unit`)

These are used by every diagonal element and twice in the SINR unit. The
input is normalised by its leading one to a mantissa in [1,2). The 10 bits
after the leading one address a table of 1024 words of 12 bits:

    entry[a] = round(2^12 / (1 + (a + 0.5)/1024))

The table is computed during elaboration. The word is then shifted back by
the exponent. The read is registered, like a block RAM. A zero input
saturates.

## Fixed-point formats

| signal | bits | format |
|---|---|---|
| H, y, n0_scaled, G/B, D^-1·B, A~^-1·B, y_MF/B | 15 | Q2.12 (signed) |
| Gram / matched-filter accumulators | 22 | 10 fraction bits |
| equalized symbols, inverse-DFT data, LLR input | 12 | Q2.9 (signed) |
| rho^2 | 12 | unsigned, 4 fraction bits |
| 1/mu | 12 | unsigned, 8 fraction bits |
| LLR | 8 | signed, 2 fraction bits, saturating |

All word lengths match the published design. The placement of the binary
point is this design's own choice. Every real value has these widths, and a
complex value is a packed pair (`cplx_t`, `csym_t` in `mimo_pkg`).

## Interfaces and timing of `detector_top`

* Parameters: `U` = 8, `B` = 128, `L` = 1200, `NPRE` = 8.
* Per preprocessing copy k there is a row stream: `pre_row_valid[k]` /
  `pre_row_ready[k]`, `pre_h_row[k][U]` and `pre_y[k]`. It carries the B
  antenna rows of subcarriers k, k+NPRE, k+2·NPRE, and so on.
* `k_terms` (K, 1..7; 0 acts as 1) and `n0_scaled` (N0/Es/B) are read per
  subcarrier. `mod` (0 QPSK, 1 16-QAM, 2 64-QAM) is read by the LLR unit.
  Keep them steady within a symbol.
* `ifft_in_*`: valid/ready stream of one user block after another, with
  user tag and first/last flags. A symbol is released only once its SINR
  values exist.
* `ifft_out_*`: the transform's output, which cannot be stalled. It must
  deliver a symbol before the SINR values of the symbol after next are
  written.
* `llr_valid`, `llr_user`, `llr_last`, `llr[6]`: one time-domain sample per
  clock.
* Reset: `rst_n` is synchronous and active low.

At the defaults, a symbol needs about 1200·143/8 = 21450 clocks of
preprocessing and 9600 clocks of equalization. A 1200-point transform core
that accepts a new block every 3779 clocks needs 8·3779 = 30232 clocks per
symbol, so the transform sets the pace. At a 317 MHz clock this corresponds
to about 600 Mb/s of 64-QAM.

## How far it follows the published architecture

It follows the published architecture in these points:

* the block partition and the replication of preprocessing;
* the four-phase triangular array;
* the Neumann-series inversion with a run-time K;
* U MAC arrays for matched filter, equalizer and SINR, with the
  low-complexity noise estimate;
* the LUT-based reciprocal (1024 x 12 bit);
* the shift-and-add max-log LLR;
* all word lengths.

Choices made here, where the description is silent:

* the binary-point positions;
* valid/ready handshakes and round-robin assignment;
* double-buffered data and SINR buffers;
* broadcast rows instead of a skewed systolic wavefront;
* the cycle counts of phases 2 to 4;
* the reciprocal-table addressing;
* the LLR pipeline;
* the LTE Gray tables.

Known departures and limits:

* The SINR noise sum is divided by L so that both terms share a scale.
  The written formula omits that factor.
* rho^2 is formed as mu^2/nu^2, following the SINR definition. The prose
  description names only one multiplication by mu.
* The subtracted mu^2 uses the K-term mu, not a separate K = 1 value.
* This array spends more clocks per subcarrier than the published design
  evidently does. With U = 4, B = 64, five preprocessing copies would need
  18000 clocks per symbol, more than the 15116 the transform allows. Six
  copies would be needed for that configuration.
* B must be a power of two.
* BPSK is not supported.
* The inverse DFT is a vendor core and is not part of the RTL. The
  testbenches use a behavioural model, `tb/idft_model.sv`.

## Simulation

Every block has a self-checking testbench in `tb/`. Each prints
`TB_RESULT checks=N failures=M` and has a watchdog. With Verilator:

```
verilator --binary --timing --assert -Wno-fatal rtl/mimo_pkg.sv \
    $(ls rtl/*.sv | grep -v mimo_pkg) tb/*.sv --top-module tb_detector_top
./obj_dir/Vtb_detector_top
```

| testbench | what it does |
|---|---|
| `tb_recip_unit` | random inputs over the whole range against a floating-point 1/x; zero input; latency |
| `tb_gram_inverse` | U=4, B=32, K = 1..4 against a floating-point Neumann model; checks latency and hold under stall |
| `tb_matched_filter` | H^H y / B, with gaps in the input |
| `tb_preproc_unit` | back-to-back subcarriers with a random consumer; checks all four results |
| `tb_equalizer` | values, U clocks per subcarrier, output hold |
| `tb_sinr_unit` | mu, rho^2, 1/mu against a floating-point model |
| `tb_data_buffer`, `tb_sinr_buffer` | ordering, ping-pong and flow control |
| `tb_llr_unit` | all three modulations against brute-force max-log over the constellation; latency; hard decisions |
| `tb_detector_top` | end to end at U=4, B=32, L=12, NPRE=2 over 6 symbols |
| `tb_detector_full` | end to end with all defaults, 2 symbols (64-QAM K=3, 16-QAM K=2), about a minute including the build |

`tb_detector_top` walks through the design's mechanisms and fails if any
one of them never happened:

* K switched between symbols;
* modulation switched;
* round robin reaching every copy;
* buffer swaps;
* a stalled transform input;
* the buffer holding the equalizer off;
* the row stream held back.

Both end-to-end tests do the same work:

* build the SC-FDMA signal: per-user DFT spreading, a Rayleigh channel per
  subcarrier and noise;
* check that the sign of every LLR gives back the transmitted bit;
* check the framing and the number of LLRs.

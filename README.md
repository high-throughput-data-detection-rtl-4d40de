# OCD: a coordinate-descent data detector for massive MU-MIMO-OFDM

In the uplink of a massive MU-MIMO system, a base station with B antennas
(here 128) receives U users (up to 32) at once. On every OFDM subcarrier it
has to recover the user symbol vector `s` from

    y = H s + n        (y: B entries, H: B x U, s: U entries)

Exact linear MMSE detection needs the U x U Gram matrix `H^H H` and its
inverse for every subcarrier, and that is expensive when there are thousands
of subcarriers. This RTL implements **optimized coordinate descent (OCD)**
instead. The estimate `z` is improved one user at a time. Each user update
needs only one B-entry inner product and one B-entry scaled vector update.
The Gram matrix is never formed. The same hardware solves two problems:

* **MMSE equalization**: minimise `||y - Hz||^2 + N0 ||z||^2`.
* **BOX equalization**: minimise `||y - Hz||^2` with every real and imaginary
  part of `z` confined to `[-R, R]`. R is the half-width of the QAM grid,
  7/sqrt(42) for unit-power 64-QAM. This needs no noise estimate. At small
  B/U ratios it detects better than MMSE.

The architecture follows the FPGA design published by M. Wu, C. Dick,
J. R. Cavallaro and C. Studer ("High-Throughput Data Detection for Massive
MU-MIMO-OFDM using Coordinate Descent"). This is an independent RTL
description of that architecture. Where the publication gives no detail, the
choices made here are marked below and in each file's header.

## 1. The algorithm as built

For one subcarrier, with `h_u` the u-th column of H:

    alpha = N0 (MMSE) or 0 (BOX)
    preprocessing, for every user u:
        d_u = 1 / (||h_u||^2 + alpha)          (regularised inverse norm)
        p_u = d_u * ||h_u||^2                  (regularised gain; 1 in BOX mode)
        z_u = 0
    r = y                                      (residual)
    repeat K times, for u = 1..U:
        z_new = proj( d_u * h_u^H r  +  p_u * z_u )
        r     = r - h_u * (z_new - z_u)
        z_u   = z_new

`proj` is the identity in MMSE mode and clips re/im to `[-R, R]` in BOX mode.
The residual `r = y - H z` is never recomputed. Each update changes it by one
scaled column. This is the optimisation that makes the method cheap: about
8BU real multiplications per iteration instead of 4BU^2. The output
`z^(K)` can be sliced or demapped. `p_u` also equals the approximate
post-equalization gain `mu_u = d_u ||h_u||^2`, so it is output next to each
estimate for a soft demapper.

## 2. Pipeline interleaving: why 24 subcarriers are in flight

The update of user u+1 needs the residual that user u has just produced.
One user step passes through the multipliers, an adder tree of depth
log2(B), the z update, the scaling and the residual subtraction. That takes
many cycles, so a single subcarrier would leave the pipeline mostly idle.

The scheduler (`ocd_ctrl`) therefore interleaves **S = 24 subcarriers**. In
each cycle it issues one operation (subcarrier s, user u), with s as the
innermost loop:

    cycle:   0    1    2  ...  23   24   25  ...  47   48 ...
    issue:  s0u0 s1u0 s2u0 ... s23u0 s0u1 s1u1 ... s23u1 s0u2 ...

Two operations on the same subcarrier are therefore exactly S cycles apart.
The residual loop runs from issuing a read of `r` to writing back the new
`r`. It is correct as long as that loop is shorter than S cycles. Stage by
stage, counted from the issue cycle c, with L = ceil(log2 B):

| cycle   | stage                                                                  |
|---------|------------------------------------------------------------------------|
| c       | request h_u and r from external memory; read z_u, d_u, p_u on chip      |
| c+1     | operands present; input multiplexer; B complex multipliers (registered) |
| c+2..c+1+L | balanced adder tree, one register per level (36-bit adders)          |
| c+2+L   | shift right by L, convert to Q5.11                                      |
| c+3+L, c+4+L | z update: products, then sum and projection                        |
| c+5+L   | z written back (final iteration: z output); Delta z                     |
| c+6+L   | h_u * Delta z                                                           |
| c+7+L   | r - h_u Delta z; written to the external r memory in c+8+L (WB_LAT)     |

For B = 128 the loop is 15 cycles deep and fits in the 24 slots.
`ocd_detector` refuses to elaborate if `WB_LAT >= S`. The published design
uses 24 pipeline stages to reach about 260 MHz on a Virtex-7. This
description has fewer registers, and its loop only has to fit inside the
24 slots.

A batch of S subcarriers runs in two phases on the same units. Preprocessing
takes S*U cycles and equalization takes S*U*K cycles, with no gap between
them. The multiplexer in front of the inner-product unit selects `h_u`
(giving `||h_u||^2`) or `r` (giving `h_u^H r`) for each operation, so the
phase switch costs no cycle. The end-to-end testbench counts these switches.
It also counts cycles in which every stage of the loop holds a different
subcarrier.

**Timing of a batch.** From the cycle in which `start` is high to the cycle
in which `done` is high takes

    S*(K+1)*U + 9 + log2(B) cycles       (784 for B=128, U=8, K=3)

Throughput does not depend on U: doubling U doubles both the bits and the
cycles of a batch. With 64-QAM at 258 MHz, the clock of the published FPGA
result, a batch of 24 x 8 x 6 = 1152 bits gives:

| K | cycles/batch (this RTL) | Mb/s at 258 MHz | published Mb/s |
|---|-------------------------|-----------------|----------------|
| 1 | 400                     | 743             | 1363           |
| 2 | 592                     | 502             | 496            |
| 3 | 784                     | 379             | 376            |
| 4 | 976                     | 304             | 302            |

The published latency for K = 3 is 795 cycles. The published K = 1
throughput does not follow the publication's own latency formula
24(K+1)U + O, so it is not matched.

## 3. Numbers and the shift that cancels itself

Data words are 16-bit signed fixed point with 11 fractional bits (Q5.11),
as in the published design. A complex value is 32 bits. Products are
formed at full width and brought back to Q5.11 by truncation, i.e. an
arithmetic right shift by 11. Every result saturates at 16 bits.
Truncation and saturation are choices made here.

The inner product sums B products in a balanced tree of **36-bit adders**,
giving 72 bits per complex result. Both `||h_u||^2` and `h_u^H r` grow like
B, so the sum is shifted right by `b = ceil(log2 B)` before it is cut to 16
bits. The shifted norm then makes `d_u` come out 2^b too large. That
factor exactly undoes the shift of `h_u^H r` in the product `d_u * h_u^H r`.
No explicit correction is needed. One consequence follows: **`alpha` must be
given in the shifted scale**, i.e. MMSE mode expects `alpha = N0 / 2^b` in
Q5.11.

Test data uses channel entries with real and imaginary parts uniform in
[-1, 1]. It uses 64-QAM symbols at levels ±{1,3,5,7}·316 LSB (unit power);
the box radius is 2212 LSB.

## 4. The reciprocal unit

`d_u = 1/x` is computed without a divider, in three register stages:

1. A leading-zero detector finds the leading one of x at bit e. x is
   shifted left until that bit reaches bit 15, giving a mantissa in
   [0.5, 1).
2. The 11 bits below the leading one address a 2048 x 18-bit table. Entry i
   holds `round(2^28 / (2048 + i + 0.5))`. This is the reciprocal of the
   interval's midpoint as an unsigned 2.16 number in (1, 2].
3. The table value is scaled by `2^(5-e)`: a right shift with rounding, or a
   left shift with saturation. The result is a Q5.11 word. x <= 0 returns
   the largest word.

The table size and the normalise/lookup/denormalise structure are the
published ones. The table contents are computed at elaboration by a constant
function. The relative error is about 2^-12 before output rounding.

## 5. Files

| file | role |
|------|------|
| `rtl/ocd_pkg.sv` | word and complex types, operation token, saturating Q5.11 helpers |
| `rtl/ocd_detector.sv` | top level: wiring, delay lines, config registers, write enables |
| `rtl/ocd_ctrl.sv` | scheduler: preprocessing then K iterations, interleaved subcarriers, start/busy/done |
| `rtl/ocd_inner_product.sv` | B complex multipliers and pipelined balanced 36-bit adder tree (shared) |
| `rtl/ocd_rshift.sv` | shift by log2(B) and conversion to Q5.11 (shared) |
| `rtl/ocd_preproc.sv` | re(.), + alpha, reciprocal, times g -> d_u, p_u |
| `rtl/ocd_reciprocal.sv` | LZD normaliser, 2048-entry table, denormaliser |
| `rtl/ocd_zupdate.sv` | z_new = proj(d_u (h^H r) + p_u z_old) |
| `rtl/ocd_proj.sv` | identity (MMSE), box clipping (BOX), or real-axis clipping (BOX with BPSK) |
| `rtl/ocd_scale.sv` | Delta z and h_u * Delta z |
| `rtl/ocd_rupdate.sv` | r - h_u Delta z |
| `rtl/ocd_gain_mem.sv` | d_u and p_u for S x UMAX (subcarrier, user) pairs |
| `rtl/ocd_z_mem.sv` | z_u for S x UMAX pairs |
| `rtl/ocd_delay.sv` | generic delay line used to align operands with the datapath |

Parameters of `ocd_detector` (defaults are those of the published design):
`B = 128` antennas, `S = 24` interleaved subcarriers, `UMAX = 32` users,
`KMAX = 256` iterations. U, K, mode, alpha and the box radius are set at run
time.

### Top-level interface

* `start`, `num_users` (1..UMAX), `num_iter` (1..KMAX), `box_mode`,
  `bpsk_mode`, `alpha`, `box_radius`. `bpsk_mode` only matters together with
  `box_mode`: it clips the real part and sets the imaginary part to zero, the
  projection used for BPSK. All are sampled in the cycle `start` is high and ignored
  while `busy`. A value of 0 for U or K is treated as 1.
* **Channel memory (external).** `h_rd_en`/`h_rd_addr` request column `h_u`
  of subcarrier slot s at address `s*UMAX + u`. `h_rd_data` (B complex words)
  must be valid in the next cycle.
* **Receive/residual memory (external).** `r_rd_en`/`r_rd_addr` (slot s)
  with data in the next cycle. `r_wr_en`/`r_wr_addr`/`r_wr_data` write the
  updated residual; the write must be visible to a read issued in a later
  cycle. Load y before `start`. After `done` the memory holds the final
  residual.
* **Outputs.** During the last iteration, `out_valid` marks one
  `(out_sc, out_user, out_z, out_p)` per subcarrier and user, S*U in total.
  They come in issue order.

The channel and receive memories are not part of this design. In the
published system they are external and hold a batch of 24 subcarriers. The
testbenches use `tb/ocd_ext_mem.sv` as a behavioural model with the one-cycle
read latency assumed above.

## 6. How far it matches the published design

Follows it:
* the OCD algorithm for MMSE and BOX modes;
* the shared inner-product and shift units, selected per cycle by an input
  multiplexer;
* B parallel complex multipliers with a balanced 36-bit adder tree;
* the log2(B) shift that cancels against d_u;
* the 2048 x 18 reciprocal table with LZD normalisation;
* 16-bit Q5.11 words and the 16/32-bit widths printed in the block diagrams;
* interleaving of 24 subcarriers, run-time U <= 32 and K <= 256;
* the S(K+1)U + O latency form.

Choices made here, where the publication is silent:
* register placement and pipeline depth (15 loop stages at B = 128 instead
  of 24);
* truncation and saturation rules;
* the reciprocal table contents and its rounding;
* keeping z and d_u on chip (the publication names one block RAM, for p_u);
* carrying `h_u` and `r` along the pipeline in registers;
* the memory and start/done handshakes;
* the scale of alpha;
* registering the residual subtractor.

Not included:
* the LLR computation (SINR `mu/(1-mu)` and max-log demapping). The
  published architecture ends at z. This RTL outputs `p_u = mu_u` for a
  demapper to use.
* FPGA resource and clock results: these depend on the synthesis flow and
  are not reproduced.

## 7. Verification and simulation

Each unit has a self-checking testbench in `tb/`. Each one compares against
independently computed values, checks latency in cycles and has a watchdog:

* `tb_ocd_inner_product`, `tb_ocd_rshift`, `tb_ocd_reciprocal` (against the
  exact 1/x), `tb_ocd_preproc`;
* `tb_ocd_proj`, `tb_ocd_zupdate`, `tb_ocd_scale`, `tb_ocd_rupdate`;
* `tb_ocd_gain_mem`, `tb_ocd_z_mem`;
* `tb_ocd_ctrl`, which checks operation order and batch timing for several
  U and K, including U = 32 and K = 256.

End-to-end testbenches fill the external memory model with random 64-QAM
data and run full batches. They compare every estimate, gain and residual
entry bit-exactly with a plain-loop integer model of the same arithmetic,
written inside the testbench. They also check batch timing and
convergence to the transmitted symbols, and count each mechanism:
preprocessing, equalization, phase switch, clipping, MMSE, residual
write-back and full interleaving.

* `tb_ocd_detector`: B = 16, six batches (BOX/MMSE, U = 1..8, K = 1..10, one
  BOX batch with BPSK data and `bpsk_mode`).
* `tb_ocd_detector_full`: every parameter at its default (B = 128), 8 users,
  K = 3, BOX and MMSE.
* `tb_ocd_workload_ksweep`: B = 128, 8 users, K = 1..4; prints the
  throughput table above.
* `tb_ocd_workload_b32`, `tb_ocd_workload_b64`: the 32 x 8 (K = 4) and
  64 x 8 (K = 3) systems.

To run one with Verilator 5:

    verilator --binary --timing --assert -Wno-fatal --top-module tb_ocd_detector_full \
        rtl/ocd_pkg.sv rtl/*.sv tb/ocd_ext_mem.sv tb/tb_ocd_detector_full.sv
    ./obj_dir/Vtb_ocd_detector_full

Each testbench prints one `TB_RESULT checks=N failures=M` line. The
full-size test builds and runs in well under a minute.

To change the array size, set `B` on `ocd_detector` (any B with
`8 + ceil(log2 B) < S`). The integer model in the end-to-end testbenches
follows B automatically.

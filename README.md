# Finite-alphabet spatial equalizer for massive MU-MIMO uplink

In the uplink of an all-digital massive MU-MIMO base station with B antennas
serving U single-antenna users (UEs), every received vector y (one complex
sample per antenna) must be multiplied by a U x B equalization matrix to
separate the users. At mmWave sample rates this matrix-vector product is the
dominant power and area cost of the baseband, and most of that cost is in the
multipliers, whose size grows with the product of the operand widths.

Finite-alphabet equalization makes one operand tiny. The equalization matrix
is restricted to the form

    V^H = diag(beta^*) X^H

where every entry of X^H is drawn from a small alphabet (with 1 bit per real
and imaginary part: +-1 +- j) and beta holds one high-resolution complex
scaling factor per UE. The estimate of user u is then

    s_u = beta_u^* (x_u^H y)

so the B-long inner product needs only low-resolution multipliers (for 1-bit
entries, additions and subtractions), and only U high-resolution
multiplications remain per vector. How X^H and beta are chosen so that this
restricted matrix still performs close to a full-precision MMSE equalizer
(the FAME problem and its FAME-FBS solver) is done offline, once per channel
realisation, and is not part of this RTL.

This repository holds synthesizable SystemVerilog for one equalizer instance
in the configuration B = 256, U = 16, 1-bit entries, with the resolution r
(R) and the system size as parameters.

## Datapath at a glance

```
             column b of X^H (U entries, R bits per part)
                     |
  y_b (7+7 bits) --> +--> MAC_0  --\
    broadcast        +--> MAC_1  ---|  after B columns:        one shared
                     ...            |--> z_u = x_u^H y  -----> 9x10 complex
                     +--> MAC_U-1 --/    (9+9 bits each)       multiplier
                                          snapshot              by conj(beta_u)
                                                                  |
                                                 s_0, s_1, ... s_{U-1} (9+9 bits)
```

* `fa_mac_array` is a linear array of U MAC units (`fa_mac`). The product
  X^H y is formed column by column: in each cycle, sample y_b goes to all
  units and unit u takes entry [X^H]_{u,b}. A vector therefore takes B cycles
  and the array starts the next vector in the very next cycle.
* `fa_scaler` keeps the U factors beta_u in registers. When the array finishes
  a vector, the scaler copies the U results into a snapshot register and
  scales them one UE per cycle in a single complex multiplier. Because
  U <= B, it is done before the next snapshot arrives.
* `fa_equalizer` is the top. It contains the column counter that tells the
  array which column is first, and it raises `vec_done` after the last column.

## Number formats

This is where most of the design decisions sit. The word lengths 7, 9, 10, 9
and the accumulator widths follow the reference implementation. The rest
(encoding, bit selection, rounding, overflow) is specified here.

**Received samples.** Each real and imaginary part of y_b is 7-bit two's
complement, from -64 to 63. Seven bits are enough for near-unquantized
performance at these system sizes.

**Alphabet entries.** Each real and imaginary part of an X^H entry is an R-bit
two's-complement code c, which stands for the odd level 2c + 1:

| R | codes c      | levels 2c+1          |
|---|--------------|----------------------|
| 1 | -1, 0        | -1, +1               |
| 2 | -2 .. 1      | -3, -1, +1, +3       |
| 3 | -4 .. 3      | -7, -5, ..., +5, +7  |

The levels are the uniformly spaced quantizer centroids, scaled so that the
smallest magnitude is 1, so any common scale ends up in beta. Alphabets that
contain zero are not supported by this encoding. Each MAC multiplies the
(R+1)-bit level by the 7-bit sample: four real products per complex
multiply-accumulate.

**Accumulators.** ACC_W = 13 bits per part for R = 1, and R + 13 bits
otherwise (`fa_pkg::acc_width`). This does not cover the worst case (256
full-scale matched terms need 17 bits for R = 1). The accumulator wraps around
in two's complement. It is sized for the typical dynamic range of the
equalized signal, not the extreme.

**Low-resolution result.** z_u is acc[ACC_W-1 : ACC_W-9], the 9 most
significant bits, cut by plain truncation (`Z_LSB` parameter of `fa_mac`). In
real terms, z_u = floor(x_u^H y / 2^(ACC_W-9)), taken modulo the accumulator
range.

**Scaling factors.** beta_u is stored as 10-bit real and imaginary parts. The
scaler computes

    m = z_u * conj(beta_u) = (zr*br + zi*bi) + j (zi*br - zr*bi)

exactly (20 bits), shifts it right arithmetically by SHIFT = 9 (so beta is a
fraction in [-1, 1) with 9 fractional bits), and saturates each part to 9
bits; `out_sat` flags a saturated estimate. To get s_u in units of the
output LSB from a real-valued factor beta computed offline, store

    beta_code = round(beta * 2^(ACC_W - 9) * g)

where g is the gain between input and output LSB that you want. If that
overflows 10 bits, move the binary point with the SHIFT parameter.

## Timing and rate

* One column is accepted per cycle while `in_valid` is high. A low cycle
  stalls all accumulators, and the column counter `col_idx` tells the source
  which column is expected next.
* If the last column of a vector is accepted at clock edge k, `vec_done` is
  high after edge k+1 and estimate s_u appears on `out_*` after edge k+2+u.
* With back-to-back vectors the equalizer delivers one vector every B clock
  cycles and never needs to stall. For B = 256 this is f/256 vectors per
  second. The reference implementation reaches 1.33 GHz in a 28 nm process
  for R = 1, which gives 5.2 M vectors/s per instance.
* There is no back-pressure on the output. A 2 G vectors/s link would need
  about 386 instances working on successive vectors. This replication is not
  part of this RTL.

## Interface of `fa_equalizer`

| port | dir | width | meaning |
|------|-----|-------|---------|
| `clk`, `rst_n` | in | 1 | clock; synchronous active-low reset (clears accumulators, counter, beta) |
| `in_valid` | in | 1 | column `col_idx` is presented |
| `in_y` | in | `fa_pkg::y_t` (2x7) | sample y_b |
| `in_x_re`, `in_x_im` | in | U x R | codes of column b of X^H, index u = UE |
| `col_idx` | out | clog2(B) | column expected next |
| `beta_we`, `beta_ue`, `beta` | in | 1, clog2(U), `beta_t` (2x10) | write beta_u; write only between vectors, or while no vector is being scaled |
| `out_valid`, `out_ue`, `out_s` | out | 1, clog2(U), `s_t` (2x9) | estimate s_u, UEs in order 0..U-1 |
| `out_sat` | out | 1 | `out_s` was saturated |
| `vec_done` | out | 1 | pulse after the last column of each vector |

Parameters: `B` (256), `U` (16, must not exceed B), `R` (1). The fixed word
lengths are in `fa_pkg`. Concurrent assertions in the top check that output
UE indices run 0..U-1 without gaps.

## Producing X^H and beta

The equalizer only applies a matrix. For reference, this is how the matrix is
obtained:

* The optimal scaling for a given finite-alphabet row x_u is
  beta_u = x_u^H h_u / (||H^H x_u||^2 + rho ||x_u||^2), with h_u the channel
  of user u and rho the noise-to-signal ratio. The formula holds however x_u
  was found.
* The baseline quantizes the rows of the L-MMSE matrix: it takes the signs for
  1 bit, or 2^r uniform bins over [-w_max, w_max] for r bits.
* The better solver (FAME-FBS) starts from the matched filter h_u (or the
  baseline's row) and runs a few iterations of a gradient step,
  z = (I - tau H (I - gamma e_u e_u^H) H^H) x, followed by a proximal step
  that scales each real and imaginary part by nu and clips it to [-1, 1].
  It then quantizes the result uniformly in [-1, 1]. To get the codes for
  this RTL, scale the bin centres to the odd levels (+-1, +-3, ...) and map
  each level to c = (level - 1) / 2.

## Files

| file | contents |
|------|----------|
| `rtl/fa_pkg.sv` | word lengths, complex struct types, `acc_width()` |
| `rtl/fa_mac.sv` | one low-resolution complex MAC |
| `rtl/fa_mac_array.sv` | the U-unit linear array |
| `rtl/fa_scaler.sv` | beta registers, snapshot, shared scaling multiplier |
| `rtl/fa_equalizer.sv` | top: column control, array, scaler |
| `tb/tb_fa_mac.sv`, `tb/tb_fa_mac_array.sv`, `tb/tb_fa_scaler.sv` | unit tests |
| `tb/tb_fa_equalizer.sv` | end-to-end test at the default size |
| `tb/fa_eq_harness.sv`, `tb/tb_fa_workloads.sv` | end-to-end tests at 8x2, 64x4 and 256x16 with R = 1..5 |

## Verification

Every testbench compares the hardware against an independent integer model
written in the testbench. That model uses the plain levels 2c+1, exact sums,
explicit wrap-around, the 9-MSB cut, multiplication by conj(beta), the shift
and saturation. Each testbench ends by printing
`TB_RESULT checks=N failures=M`.

* `tb_fa_mac` checks the 1-bit and 3-bit units after every cycle, with random
  idle cycles and a full-scale vector that wraps.
* `tb_fa_mac_array` checks that every unit gets its own entry and the shared
  sample, for U = 16/R = 1 and U = 5/R = 2.
* `tb_fa_scaler` writes the factors in shuffled order and checks every
  estimate, its cycle, the saturation flag, that the snapshot holds while the
  array's output changes, and that `out_valid` stays low when idle.
* `tb_fa_equalizer` runs 8 vectors at B = 256, U = 16, R = 1. It checks every
  estimate, `col_idx`, the B-cycle vector spacing and the 2-cycle latency. It
  also requires that each mechanism occurred at least once: input stalls,
  back-to-back vectors, accumulator wrap-around, output saturation and
  reloading beta.
* `tb_fa_workloads` runs the same checks at 8x2 and 64x4 with R = 1, and at
  256x16 with R = 1 to 5.

Run a testbench with plain Verilator (5.x) from the repository root, for
example:

```
verilator --binary --timing --assert -Wno-fatal --top-module tb_fa_equalizer \
    -y rtl -y tb +libext+.sv -Irtl rtl/fa_pkg.sv tb/tb_fa_equalizer.sv
./obj_dir/Vtb_fa_equalizer
```

Each run takes well under a second.

## Departures from the reference design and open points

* The reference design gives the word lengths and the column-by-column
  schedule with U parallel MACs, but not the following, which are choices made
  here:
  * the code-to-level mapping;
  * which 9 accumulator bits form z;
  * truncation rather than rounding;
  * wrap-around rather than saturation in the accumulator;
  * the binary point of beta, and saturation of the estimate;
  * a single time-shared scaling multiplier rather than U parallel ones;
  * the valid-only handshake, the beta write port and the reset behaviour.
* Where X^H comes from is left open. The column enters through ports, and no
  on-chip matrix memory is modelled.
* No pipelining was added to reach the GHz clock of the reference
  implementation. The critical path is one (R+1) x 7-bit product plus the
  accumulator adder (R = 1), and one 9x10 product pair plus the saturation
  logic in the scaler.
* The following are not included: the offline matrix computation (FAME-FBS,
  L-MMSE quantization, the beta division), the channel estimator, the RF and
  ADC front end, and the replication of instances up to 2 G vectors/s. The
  full-resolution (10-bit) equalizer used as the comparison point is not
  included either.

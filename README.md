# Gaussian pseudorandom noise from a Gold code and a block sum

Most hardware Gaussian generators start from uniform random numbers and bend
them into shape with logarithms, square roots or tables. This generator skips
all of that. It takes a binary pseudonoise sequence of the kind used in
wireless links, reads each bit as +1 or -1, and adds up blocks of 256 of
them. By the central limit theorem such a sum is close to normal. Scaled by
256^(-1/2) = 1/16 it has mean 0 and variance 1.

How good the result is depends almost entirely on the binary sequence. The
mean and variance come out right for any balanced sequence. Skewness and
kurtosis (the third and fourth moments) do not: they depend on how the
sequence correlates with itself over triples and quadruples of positions.
A single maximum-length LFSR (an m-sequence) fails this test. A Gold code,
the XOR of two suitably related m-sequences, passes it. So the whole circuit
is two 89-bit shift registers, a handful of XOR gates and a 10-bit up/down
counter, and it produces one sample every 256 clock cycles.

## Block diagram

```
            +-------------------- gold_code_gen ---------------------+
 seed1 ---->| lfsr  f1 = x^89 + x^38 + 1                  -- e1 --+  |
            |                                                     XOR|--- chip
 seed2 ---->| lfsr  f2 = x^89 + x^72 + x^55 + x^38 + 1    -- e1 --+  |     |
            +--------------------------------------------------------+     |
                                                                           v
                        +-------------------- clt_accumulator ---------------+
                        | 0 -> +1, 1 -> -1 ; up/down sum of 256 chips        |--- sample (10 b)
                        | chip counter (8 b) ; output register               |--- sample_valid
                        +----------------------------------------------------+
 en  : steps both LFSRs and the accumulator together (low = stall)
 load: loads seed1/seed2 and discards the unfinished block
```

Top module: `gauss_grng` (`rtl/gauss_grng.sv`).

| File | Contents |
|---|---|
| `rtl/grng_pkg.sv` | degree, polynomials, default seeds, M, sample width |
| `rtl/lfsr.sv` | maximum-length LFSR, Fibonacci form, loadable |
| `rtl/gold_code_gen.sv` | two LFSRs and the output XOR |
| `rtl/clt_accumulator.sv` | the +/-1 mapping and the block sum |
| `rtl/gauss_grng.sv` | top level |

## Why a Gold code rather than one m-sequence

Write s(j) = (-1)^b(j) for the chip b(j). The k-th moment of a block sum
expands into a sum of products s(j1)...s(jk) over k positions inside the
block. Products in which every position appears an even number of times are
exactly 1. Together they give the Gaussian values 1 for k = 2 and 3 for
k = 4. Every other product averages to zero for a truly random sequence.
For a pseudorandom one, it averages to zero only if the sequence has no
*peak* in its correlation of that order: no fixed set of offsets whose
product is (nearly) constant along the sequence.

An m-sequence breaks this at order 3. Its characteristic polynomial is itself
a rule of that kind. For x^89 + x^38 + 1 the bits obey
b(j+89) = b(j) + b(j+38) mod 2, so s(j) s(j+38) s(j+89) = +1 for every j.
The same holds for the square of the polynomial, x^178 + x^76 + 1. Inside a
block of 256 these rules give 6 * (167 + 78) = 1470 ordered triples whose
product is always +1. That adds 1470 / 256^1.5 = 0.359 to E[S^3]. The
m-sequence generator therefore has a skewness of about 0.36 where a Gaussian
has 0.

For a Gold code the shortest such rule is the product of the two
polynomials, of degree 178 and with many terms. For a Mersenne-prime period
(2^89 - 1 is one), the correlation measures of orders 1 to 4 are known to
stay small compared with the period. So the first four moments come out
Gaussian to within sampling noise. The first full peak is at order 5. The
price is twice the state and a few more XOR gates than one m-sequence.

The second polynomial is not arbitrary. Let alpha be a root of f1. Then
x^89 + x^72 + x^55 + x^38 + 1 is the minimal polynomial of alpha^3. This
was checked by evaluating it at alpha^3 in GF(2^89). So the XOR of the two
LFSRs is the Gold sequence (-1)^Tr(x + x^3) at x = alpha^i, the Gold
construction x + x^(2^r+1) with r = 1.

## The LFSR convention

`lfsr` holds the state (e_1, ..., e_N), with e_i in bit i-1 of `state`.
One step is

    T(e_1, ..., e_N) = (e_2, ..., e_N, e_1 b_0 + e_2 b_1 + ... + e_N b_{N-1})  mod 2

and the output is e_1. Here f(x) = x^N + b_{N-1} x^{N-1} + ... + b_0 is the
characteristic polynomial. The parameter `TAPS` holds b_0 ... b_{N-1}, with
bit i equal to b_i. The chips a seed produces are therefore the seed bits
themselves, e_1 first, for the first N steps. After that they follow
s(j+N) = sum of b_i s(j+i). For f1 the feedback is e_1 XOR e_39. For f2 it
is e_1 XOR e_39 XOR e_56 XOR e_73. Any other primitive polynomial can be
passed in through `N` and `TAPS`.

The all-zero state never leaves itself. An assertion in `lfsr` flags it.
Loading a zero seed is a usage error.

## Sample format and range

`sample` is the signed integer block sum, in -256 ... +256, held in 10 bits.
Since 256^(-1/2) = 1/16, the same word read with 4 fractional bits is S(i)
directly: S = sample / 16. A block of 256 chips always has an even sum, so S
moves in steps of 1/8. That is the comb-like fine structure of the
histogram. The hard range is -16 ... +16, but reaching it takes 256 equal
chips in a row. In practice the tails follow a binomial distribution, which
falls off faster than the Gaussian beyond a few sigma. This is the usual
limit of plain central-limit generators.

For other block lengths, `M` is a parameter. `sample` is then still the
integer sum, and S = sample / sqrt(M). The binary point is exact only when M
is a power of four.

## Interface and timing

| Port | Dir | Width | Meaning |
|---|---|---|---|
| `clk` | in | 1 | clock, all flops on the rising edge |
| `rst_n` | in | 1 | asynchronous active-low reset; LFSRs go to `SEED1`/`SEED2`, accumulator empty |
| `en` | in | 1 | take one chip and step both LFSRs; low stalls the whole generator |
| `load` | in | 1 | load `seed1`/`seed2` and clear the partial block; wins over `en` |
| `seed1`, `seed2` | in | 89 | initial states of the f1 and f2 LFSRs, must be non-zero |
| `chip` | out | 1 | the Gold chip taken at the next enabled edge |
| `sample` | out | 10 | last completed sample, signed, S(i) with 4 fractional bits |
| `sample_valid` | out | 1 | one-cycle pulse, the cycle after the 256th chip of a block was taken |

The first sample after a load appears one cycle after the 256th enabled
edge. After that there is one every 256 enabled cycles. Stalls stretch the
interval, and no chip is lost or used twice. `sample` holds its value
between pulses. Consecutive samples come from disjoint blocks of chips, so
no chip is reused. This keeps adjacent samples independent up to the
correlation structure of the code.

The two seeds together pick the starting point. They set the phase of each
m-sequence. Their relative phase, one of 2^89 - 1, picks a member of the
Gold family of this pair, and the absolute phase a position in it. The period of
every one of them is 2^89 - 1 chips.

After synthesis the design has 207 flip-flops: 178 of LFSR state, 8 in the
chip counter, 10 in the accumulator, 10 in the output register and 1 for
`sample_valid`. It also has two 89-input XOR reductions (of which only 2 and
4 inputs are live) and two small adders.

## What follows the construction and what is this design's own

Taken from the construction:
- the LFSR transition and output function;
- the two degree-89 polynomials and the XOR combiner;
- the +/-1 mapping (-1)^bit;
- sums of non-overlapping blocks of M = 256 chips, scaled by M^(-1/2).

This design's own choices:
- one chip per clock and the `en` stall;
- the seed-load port, and that a load also restarts the block;
- the reset seeds (both 1, e_1 = 1 and all other bits 0) and the asynchronous reset;
- the bit order of the state vector;
- the fixed-point reading of the output;
- the valid pulse;
- the assertions (LFSR never all-zero; sample within -M..M).

Not included: the "Tausworthe" variant, which forms 32-bit uniform numbers
from the sequence and adds eight of them. It serves only as a comparison.
Wider outputs (several chips per clock through a leap-ahead LFSR, or several
generators in parallel) are not part of the construction either. With the
given `N`/`TAPS` interface, they are straightforward to add.

## Measured behaviour

`tb/tb_moments.sv` generates 100 000 samples, which is 25.6 million chips.
It does this with the Gold generator and, for comparison, with a single
x^89 + x^38 + 1 LFSR feeding the same accumulator. The seeds are random.

| Moment (1/T) sum S^k | Gold code | m-sequence | Gaussian |
|---|---|---|---|
| k = 1 | 0.0010 | -0.0008 | 0 |
| k = 2 | 1.0011 | 0.9986 | 1 |
| k = 3 | 0.0021 | 0.3588 | 0 |
| k = 4 | 2.9937 | 3.1840 | 3 |

The testbench also computes the triple product moments
|mean of S(i) S(i+d1) S(i+d2)| over the window 0 <= d1, d2 < 100. The
largest value is 0.0136 for the Gold code, about 4 to 5 times the sampling
noise 1/sqrt(T). For the m-sequence it is 0.359, the skewness predicted
above. The histogram tails tell the same story. For the Gold code, 1929 samples
lie above +2 and 1923 below -2. For the m-sequence the counts are 2751 and
975.

These numbers agree with the published evaluation of this
construction: 0.3609 against 0.0049 for the third moment, and a triple
product scale near 0.013 for the Gold code.

## Verification

Each testbench checks itself and ends with a `TB_RESULT checks=... failures=...`
line.

- `tb_lfsr`: the default f1 LFSR and an f2 LFSR. Both are checked against
  the recurrence of their polynomials, computed on a plain array of sequence
  values, for 3000 steps with random stalls and a mid-run reload. Also
  checks that load wins over `en`. An x^7 + x + 1 LFSR must return to its
  seed after exactly 127 steps and not before.
- `tb_gold_code_gen`: every chip against two reference m-sequences. The chip
  stream must also satisfy the degree-178 recurrence of f1 * f2, computed in
  the testbench. A generic pair of sequences would not.
- `tb_clt_accumulator`: M = 256 and M = 4 against an independent sum, with
  random stalls and clears. Checks the pulse timing (exactly once per M
  accepted chips) and the extreme sums +M and -M.
- `tb_gauss_grng`: the top level at its default parameters, end to end.
  Checks every chip, every sample and every `sample_valid` pulse against a
  reference model. Checks the rate of exactly 256 cycles per sample at full
  speed. Covers stalls and reseeds that cut a block short, and counts each.
  A loose mean/variance check closes it. It runs in well under a second.
- `tb_moments`: the statistical workload above, about 20 s.

The testbenches need a simulator with two-state semantics at most. They
read no files. To run one with Verilator:

```
verilator --binary --timing --assert -Irtl -y rtl rtl/grng_pkg.sv tb/tb_gauss_grng.sv \
          --top-module tb_gauss_grng -o sim && ./obj_dir/sim
```

Swap in `tb_lfsr`, `tb_gold_code_gen`, `tb_clt_accumulator` or `tb_moments`
as needed. The package file must come first on the command line.

## Lint notes

Verilator reports `SYNCASYNCNET` on `rst_n`. The reset is asynchronous for
the flops, and it is also used as the `disable iff` condition of the
concurrent assertions. That is intended and has no effect on the logic.

# Shift-and-add integer divider for moduli q = 2^W − 2^u ± 1

In RNS-based homomorphic encryption, coefficient products are reduced modulo
word-sized primes. These primes are often picked with only three nonzero bits:
q = 2^W − 2^u ± 1. Some reformulations of ciphertext multiplication need the
quotient ⌊λ/q⌋ of a 2W-bit product λ, not just the remainder. The usual way to
get it multiplies λ by a precomputed approximation of 1/q, which needs a
2W×2W or 2W×W multiplier.

This divider uses the sparse form of q instead. It builds the quotient with
shifts, additions, one comparison and a few multiplexers. There are T pipeline
stages that refine an estimate b\*, then one stage that corrects b\* by −1, 0
or +1. The design takes one dividend per clock and has a latency of T+1 clocks.
At the default size (W = 32, T = 3) that is 4 clocks, and it serves every
exponent 1 ≤ u ≤ 23.

## The iteration that finds the quotient

Write λ = b·q + r with 0 ≤ r < q, and let c = ⌊λ/2^W⌋ be the upper half of
λ. For an exact multiple (r = 0) the quotient b solves

    f(x) = c,   with  f(x) = x + ⌊−x·m / 2^W⌋,
    where m = 2^u − 1 if q = 2^W − 2^u + 1, and m = 2^u + 1 if q = 2^W − 2^u − 1.

Since q < 2^W, c ≤ b, so c is a safe first guess (b_0 = c). Each step adds the
remaining error:

    b_{i+1} = b_i + (c − f(b_i)) = c + ⌈b_i·m / 2^W⌉

The values f(b_i) rise strictly and never pass c. So the loop stops, and every
b_i stays at or below b. When it stops, b_i is b or b − 1.

The number of steps needed grows with u/W. In the worst case it is the integer
t with t·u > (t−1)·W and (t+1)·u ≤ t·W. That gives t = 1 for u < W/2 and t ≤ 3
for u ≤ 3W/4. For W = 32, the design assumes:

| u        | stages needed |
|----------|---------------|
| 1 – 15   | 1             |
| 16 – 21  | 2             |
| 22 – 23  | 3             |
| 24 – 30  | 3 to 15       |

At u = W/2 the formula gives one step. With q = 2^W − 2^u − 1, however, a few
dividends need two; this was seen in exhaustive runs at W = 8. That is why the
table puts u = 16 under two stages.

Once the loop has converged, one more step returns b_i unchanged. So a
pipeline with T stages is correct for every u that needs t ≤ T. The default
T = 3 therefore covers all u from 1 to 23, about three quarters of the
possible exponents at W = 32.

For a λ that is not a multiple of q, running the same loop gives
b\* ∈ {b − 1, b, b + 1}. The final stage picks the right one.

## Iteration stage (`iteration_unit`)

One stage computes

    b_{i+1} = c + ⌊b_i·m / 2^W⌋ + 1

and registers it. The ceiling becomes floor + 1 because b_i·m is never a
multiple of 2^W: m is odd, and a nonzero W-bit b_i cannot hold W factors of two.

The datapath, in order:

1. A shifter moves b_i right by u. This aligns b_i with b_i·2^u as seen from
   bit u upwards.
2. A multiplexer controlled by s passes either the shifted value or its
   inverse. s = 1 means q = 2^W − 2^u + 1, so the inverse gives −b_i.
3. An adder adds b_i to that term, with a carry-in `cin`. The u low bits of the
   product are never added: `cin` is their carry, which is 1 exactly when
   s = 1 and the u low bits of b_i are all zero. The adder is W+2 bits wide,
   and the inverted term is treated as a sign-extended two's-complement
   number.
4. A second shifter moves the sum right by W − u, completing the division by
   2^W.
5. A last adder adds c and the constant 1.

Two details:

- **b_i = 0.** The argument above does not cover b_i = 0, which happens when
  λ < 2^W. The stage then yields c + 1 rather than c. The correction stage
  absorbs this, because b\* is still b or b + 1.
- **`cin`.** For any nonzero b_i, dropping `cin` never changes the shifted
  result. Its only effect on the output is to keep the b_i = 0 case exact.

## Estimate pipeline (`bstar_pipeline`)

This block holds T iteration stages in a row, with b_0 = c.

Each stage needs the c of its own operation. So c travels down the pipeline in
its own delay registers, as do λ[W+1:0] and a valid bit. The output after T
clocks is b\* = b_T, together with the low bits of λ that the correction
stage needs.

## Correction stage (`quotient_correction`)

The correction stage decides the quotient from the sign and size of λ − b\*q,
without computing it in full. Since b\* is b−1, b or b+1, λ − b\*q equals r+q,
r or r−q. That value lies strictly between −2^W and 2^(W+1), so its low W+2
bits hold it in two's complement. Expanding q gives

    λ − b*q = λ − b*·2^W + b*·2^u ∓ b*

Only four W+2-bit terms are summed:

| term     | bits used                                    |
|----------|----------------------------------------------|
| λ        | bits W+1..0                                  |
| −b\*·2^W | the two LSBs of −b\*, followed by W zeros    |
| b\*·2^u  | the W+2−u low bits of b\*, followed by u zeros |
| ∓b\*     | −b\* when s = 1, +b\* when s = 0             |

Here −b\* is the two's complement of b\* extended by '00'. The four terms pass
through two rows of 3:2 carry-save compressors and then one carry-propagate
adder. The result is chosen as follows:

- If bit W+1 of the sum is set, the value is negative and b = b\* − 1.
- Otherwise, if the low W+1 bits are ≥ q, then b = b\* + 1.
- Otherwise b = b\*.

The chosen value is registered; this register is the T+1-th clock.

## Top level (`int_divider`)

| port        | dir | width | meaning                                                            |
|-------------|-----|-------|--------------------------------------------------------------------|
| `clk`       | in  | 1     | clock; every register uses the rising edge                         |
| `rst_n`     | in  | 1     | synchronous, active low; clears only the valid bits                |
| `u`         | in  | ⌈log2 W⌉ | exponent of q, 1 ≤ u ≤ W−2, and t(u) ≤ T                        |
| `s`         | in  | 1     | 1: q = 2^W − 2^u + 1; 0: q = 2^W − 2^u − 1                         |
| `in_valid`  | in  | 1     | `lambda` holds a dividend this clock                               |
| `lambda`    | in  | 2W    | dividend; must be below q²                                         |
| `out_valid` | out | 1     | `quotient` is valid; comes T+1 clocks after `in_valid`             |
| `quotient`  | out | W     | ⌊λ/q⌋                                                              |

The parameters are `W` (default 32) and `T` (default 3). `u` and `s` are
static configuration. They may change only when no operation is in flight. q
itself is formed inside the top from `u` and `s`.

There is no back-pressure: a new dividend can enter on every clock. The
quotient fits W bits because λ < q², which holds for the product of two
residues.

Assertions (active with `--assert`) check three rules:

- `u` and `s` stay stable while operations are in flight.
- `u` is within 1..W−2.
- λ < q².

The package `intdiv_pkg` holds two enums:

- `qsign_e`: the encoding of s.
- `corr_e`: the three correction outcomes.

At W = 32, T = 3 the design has 298 flip-flop bits, most of them for carrying
c and λ[W+1:0] alongside b.

## What is this design's own

The datapaths of the iteration stage and of the correction stage follow the
published architecture, as do the stage count, the extra correction clock and
the W = 32, T = 3 main configuration. The following are choices made here:

- **Configuration.** `u` and `s` are run-time inputs, held static, rather than
  fixed constants. q is formed inside the top from them.
- **Stream interface.** The design uses a valid bit with each operation, has
  no back-pressure and resets only the valid bits.
- **Delay registers.** The registers that carry c and λ[W+1:0] alongside the
  estimate are this design's. The published drawing shows c as a single
  shared line.
- **Adder widths.** The iteration adder is W+2 bits wide. The carry-save tree
  of the correction stage is two rows of 3:2 compressors.
- **Supported range.** The range 1 ≤ u ≤ 23 for T = 3 at W = 32 follows the
  published table. The iteration-count formula also gives t = 3 at u = 24, but
  that boundary is not claimed here.
- **Not reproduced.** The clock period (330 ps) and area (1320 µm²) reported
  for a 22 nm FD-SOI synthesis come from a synthesis flow and are not
  reproduced by RTL.

## Verification

Each module has a self-checking testbench that prints
`TB_RESULT checks=N failures=M`:

- **`iteration_unit_tb`:** random and corner-case inputs, including b_i = 0
  and b_i whose low u bits are zero. The reference is the step formula,
  computed with wide multiplication.
- **`bstar_pipeline_tb`:** streamed dividends for several u and both s. It
  checks that b\* matches a software model of the iteration, lies within one
  of the quotient, and appears after exactly T clocks.
- **`quotient_correction_tb`:** feeds b−1, b and b+1 and checks that b comes
  back. Each outcome must occur.
- **`int_divider_tb`:** end to end at the default size. It sweeps u = 1..23
  and both signs with about 8000 dividends, mostly back to back, including
  corner values and exact multiples. It checks each quotient and the 4-clock
  latency. It also counts each correction outcome, dividends needing 1, 2 and
  3 loop iterations, both forms of q, configuration changes and back-to-back
  issue; each must occur at least once.
- **`int_divider_exhaustive_tb`:** W = 8, T = 3. Every λ < q² for every
  u = 1..6 and both s, about 670,000 quotients.
- **`int_divider_deep_tb`:** W = 32, T = 15, for u = 24..30, where more than
  three stages are needed.

## Simulating

With Verilator 5, from the directory that holds `rtl/` and `tb/`:

    verilator --binary --timing --assert -Irtl -y rtl rtl/intdiv_pkg.sv \
        tb/int_divider_tb.sv --top-module int_divider_tb -o sim
    ./obj_dir/sim

Replace `int_divider_tb` with any other testbench name. Every run takes well
under a second.

To use another modulus family, set `W`. Then set `T` to at least the stage
count that the largest u you need requires (formula above).

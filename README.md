# Modulo-(2^2n + 1) arithmetic on two n-bit complex residue channels

Residue number systems built on {2^n, 2^n - 1, 2^n + 1} are popular because
their channels are narrow and equally fast, and their reverse conversion is
cheap. Adding a fourth modulus 2^2n + 1 enlarges the dynamic range to about
5n bits and keeps conversion cheap, since (2^n - 1)(2^n + 1)(2^2n + 1) =
2^4n - 1. The catch is that the new channel is 2n bits wide, so it becomes
the slowest channel.

This RTL removes that imbalance. Over the Gaussian integers the modulus
factors as

    2^2n + 1 = (2^n + j)(2^n - j),      j = sqrt(-1),

so a residue modulo 2^2n + 1 can be held as a complex number with an n-bit
real part and an n-bit imaginary part. Modulo 2^n +- j we have
2^n = -+j, so the plain integer `X_R + 2^n X_I` is the complex number
`X_R -+ j X_I`. The two conjugate moduli therefore share one pair of words.
The hardware needs only two n-bit datapaths, a "real" one and an
"imaginary" one. A carry between them is a cheap rewiring, because

* a carry out of the real part has weight 2^n, which is one unit of the
  imaginary part, and
* a carry out of the imaginary part has weight 2^2n = -1, which is a
  borrow from the real part.

Every unit here is built on these two rules. The default width is n = 5,
which gives modulus 1025, 10-bit residues computed on 5-bit channels, and
25-bit binary inputs.

## Number formats

The units use two formats. They are the hardest part of the design to
follow, so they come first.

**Input code (from the forward converter).** A residue X in [0, 2^2n] is
held as a (2n+1)-bit word `x` with

    X = x[2n-1:0] + ~x[2n]

This is the diminished-one code: the word holds X - 1, and the top bit
`x[2n]` is set only for X = 0, when the low 2n bits are all zero. The
complex residue is read off by wiring alone:

    X_R = x[n-1:0]     (real part)
    X_I = x[2n-1:n]    (imaginary part)
    x2n = x[2n]        (zero flag)
    X   = X_R + ~x2n + 2^n X_I

**Result code (from the adder and the multiplier).** A result is a pair of
n-bit words with one extra bit each:

    value = (R - b) + 2^n (I + c)     mod 2^2n + 1

`b` is a stored borrow of the real part. It is the carry that left the
imaginary part and was wrapped round as -1. `c` is a stored carry of the
imaginary part. It is the carry that left the real part. Keeping these
two bits unresolved means no addition ever has to propagate a carry
further than n + 1 bits. The adder accepts this format as its second
operand, so an accumulated sum can be fed straight back.

## Forward converter (`fwd_conv`)

The converter takes a 5n-bit binary Z and splits it as
Z = 2^4n Z2 + 2^2n Z1 + Z0. Modulo 2^2n + 1 we have 2^2n = -1, so

    |Z| = |Z2 - Z1 + Z0| = |Z2 + ~Z1 + Z0 + 2|.

A 2n-bit carry-save adder reduces `Z2 + ~Z1 + Z0` to sum word U and carry
word V. The carry leaving bit 2n-1 has weight -1. It is re-entered at bit 0
of V, inverted, and the inversion uses up one of the two added ones. A
modulo adder then forms `x = |U + V|`. The second "+1" is never added,
which is exactly why the output is in the diminished-one code. The final
modulo adder here is a (2n+1)-bit addition followed by one conditional
subtraction of 2^2n + 1. The source does not detail that adder.

## Adder (`cplx_adder`)

The adder computes X (input code) + Y (result code) and returns the result
code. The real and imaginary parts each get one (n+1)-bit addition:

    2^n c_n  + S_R = X_R + Y_R + (~b_y & ~x2n)
    2^n c'_n + S_I = X_I + Y_I + ( c_y & ~x2n)

Then

    b_s = c'_n | (b_y & x2n)        (imaginary carry -> real borrow)
    c_s = c_n  | (c_y & x2n)        (real carry -> imaginary carry)

The `~x2n` terms add X's hidden "+1". When it coincides with Y's stored
borrow (b_y), the two cancel, so the carry-in is `~b_y & ~x2n`. When X = 0,
the parts of X are zero, so neither addition can carry, and Y's stored
bits pass through. That is why an OR suffices where a sum might be
expected. The whole adder is two small adders and two AND-OR gates, with no
carry path between the halves.

## Multiplier (`cplx_mult`)

Both operands come in the input code. Write A = 1 + X_R and B = 1 + Y_R,
so that X = ~x2n (A + 2^n X_I). Then, modulo 2^2n + 1,

    X Y = A B + 2^n (A Y_I + X_I B) - X_I Y_I      (when neither is zero)

**Partial products ("LUT 1" to "LUT 4").** Each product is split into an
n-bit low half L and an n-bit high half H:

| product      | split                         |
|--------------|-------------------------------|
| A B          | 2^2n c + 2^n H_RR + L_RR      |
| A Y_I        | 2^n H_RI + L_RI               |
| X_I B        | 2^n H_IR + L_IR               |
| X_I Y_I      | 2^n H_II + L_II               |

A B can reach 2^2n, hence the extra bit c. Applying the two carry rules,
and writing negated terms as one's complements plus constants, gives the
product as R + 2^n I with

    R = L_RR + ~L_II + ~H_RI + ~H_IR + ~c + 3
    I = H_RR + L_RI  + L_IR  + ~H_II - 2

**Reduction.** The rest of the multiplier adds these two sums without
letting a carry escape. Every carry that leaves the top of one half
re-enters bit 0 of the other half. A carry from the real half goes in
as-is. A carry from the imaginary half goes in inverted, with the constant
corrected.

| stage | real half | imaginary half |
|-------|-----------|----------------|
| (4;2) compressor | L_RR, ~L_II, ~H_RI, ~H_IR, carry-in ~c. Gives U, V (bit 0 of V empty), top carries v_n and c_n | H_RR, L_RI, L_IR, ~H_II, carry-in c_n. Gives U', V' and top carries v'_n, c'_n |
| carry-save adder | U; V with ~v'_n at bit 0; ~c'_n. Gives W and carry word Z | U'; V' with v_n at bit 0; constant 2^n - 2. Gives W' and carry word Z' |
| cross-over | bit 0 of Z = inverted top carry of the imaginary CSA | bit 0 of Z' = top carry of the real CSA |
| final adder | 2^n c_P + P_R = W + Z + 1 | 2^n b_P + P_I = W' + Z' |

The constants 3 and -2 are spread over the empty bit slots, the inverted
cross-over bits and the "+1" of the real final adder. The result is exact
in every bit. The output is `P_R - b_P + 2^n (P_I + c_P)`, which is the
result code. If either operand's zero flag is set, every output is forced
to 0, because the identity above assumes both operands are non-zero.

The (4;2) compressor (`compressor42`) is the usual one: two chained full
adders per bit, whose sideways carry does not depend on the sideways input.

## Reverse converter (`rev_conv`)

A result `S_R - b + 2^n (S_I + c)` becomes an ordinary value in [0, 2^2n]
by adding one modulus:

    S = | (2^2n + 2^n S_I + S_R) + (2^n c + ~b) |

This is a full (2n+1)-bit operand plus a sparse one that has bits only at
positions 0 and n. Here the sum is followed by subtraction of 0, 1 or 2
moduli. An RNS reverse converter that follows can often take the
unreduced pair directly. For that reason the top also brings the raw pairs
out.

## The channel unit (`cplx_rns_top`)

`cplx_rns_top` is the modulo-(2^2n+1) channel of a residue system. It
takes two 5n-bit operands `z_a` and `z_b` and passes each through a
forward converter. `z_a` is added to an accumulator: the adder's Y operand
is the registered previous sum, in result code. The multiplier forms
`z_a * z_b`. Both results are registered and then reverse-converted.

* `in_valid` accepts an operand pair. `out_valid` follows one clock later,
  with `sum` (running sum mod 2^2n+1) and `prod` (product mod 2^2n+1).
* `acc_clr` together with `in_valid` starts a new sum, so that sum = z_a.
* While `in_valid` is low, the accumulator holds its value.
* `rst_n` is a synchronous, active-low reset that clears the accumulator
  to zero.
* `sum_re/sum_im/sum_b/sum_c` and `prod_re/prod_im/prod_b/prod_c` give the
  unreduced complex pairs.
* An assertion checks that the forward converter's zero flag never appears
  with a non-zero word.

The arithmetic units are combinational. The single register stage, the
valid/clear controls and the pairing of one accumulator with one multiplier
are choices of this RTL. The source designs the adder and the multiplier as
separate units and reports only combinational delays.

## Parameters and sizes

Every module has one parameter, `N`, which is the channel width n. It
defaults to 5 (`cplx_pkg::N_PAPER`). The multiplier needs N >= 2.
Moduli 8 +- j, 16 +- j, 32 +- j and 64 +- j correspond to N = 3, 4, 5 and 6.
The published width sweep runs from N = 3 to N = 10, and all of these
widths are simulated.

## What is not here

The surrounding residue system is not included. That covers the
modulo-2^(n+p), 2^n - 1 and 2^n + 1 channels, their residue generators,
and the New-CRT reverse converter to binary. The source takes these from
earlier work and does not design them. The source's partial-product and
final-adder "LUTs" are sized for 6-input FPGA LUTs. Here they are written
as `*` and `+` and left to synthesis. The published figures show several
bus labels between the two halves without full bit positions. The
placement described in the Multiplier section follows the accompanying bit
table and equations, and it is confirmed by the exhaustive test below.

## Verification

Each testbench prints `TB_RESULT checks=<n> failures=<n>` and has a
watchdog.

| testbench | what it checks |
|-----------|----------------|
| `tb_fwd_conv` | edge cases around multiples of 1025 and 200 000 random 25-bit inputs |
| `tb_cplx_adder` | every X in [0, 1024] against every result-code Y (4.2 M cases) |
| `tb_compressor42` | the compressor identity on random operands |
| `tb_cplx_mult` | every X, Y in [0, 1024] (1.05 M cases); also that the overflow bit c, b_P, c_P and the zero path all occur |
| `tb_rev_conv` | all 4096 result-code inputs |
| `tb_cplx_rns_top` | 200 000 random operations at the default size, including one-cycle latency, gaps, clears and zero operands; fails if any of these never occurs |
| `tb_workloads` | the full chain (forward converter, adder and multiplier, reverse converter) at N = 3 to 10, 20 000 random pairs each |

To run one testbench with Verilator 5:

    verilator --binary --timing --assert -Irtl -Itb rtl/cplx_pkg.sv \
        tb/tb_cplx_mult.sv --top-module tb_cplx_mult
    ./obj_dir/Vtb_cplx_mult

Each testbench finishes in under a second.

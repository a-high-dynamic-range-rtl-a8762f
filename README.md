# Residue-to-binary converter for the moduli set {2^n, 2^(2n)-1, 2^(2n)+1}

A residue number system (RNS) stores an integer X as its remainders modulo a
few pairwise coprime moduli. Addition, subtraction and multiplication then run
independently and carry-free in each channel. The costly step is getting back
to ordinary binary: the *reverse converter*. This design is a reverse
converter for the three-modulus set

    m1 = 2^n,   m2 = 2^(2n) - 1,   m3 = 2^(2n) + 1

The moduli are pairwise coprime for every n: m1 is a power of two, and m2 and
m3 are odd and differ by 2. The set covers the dynamic range

    M = 2^n (2^(4n) - 1)          (just under 2^(5n), so X has 5n bits)

That is the same range as some four- and five-modulus sets built from
2^n - 1, 2^n and 2^n + 1. With only three moduli, the whole conversion
reduces to three things:

* some wiring and 3n+1 inverters;
* one row of carry-save cells;
* one 4n-bit adder modulo 2^(4n)-1 (a 1's complement adder).

The circuit is purely combinational. All of it is in `rtl/`. Its width is set
by one parameter, `N` (the n above), with a default of 13. That size gives
65-bit numbers, the "64-bit" class of dynamic range.

## Why the arithmetic is only wiring

The Chinese Remainder Theorem gives X from its residues R1, R2, R3. The
multiplicative inverses here are simple:
|(M/m1)^-1| mod m1 = -1, and the other two are both 2^(n-1). The low n bits
of X are R1 itself. Dividing the CRT sum by 2^n leaves a sum modulo
2^(4n) - 1 for the remaining bits:

    floor(X / 2^n) = | -2^(3n) R1  +  (2^(3n-1) + 2^(n-1)) R2
                                   +  (2^(3n-1) - 2^(n-1)) R3 |  mod 2^(4n)-1

    X = floor(X / 2^n) * 2^n + R1  =  { floor(X/2^n), R1 }

Modulo 2^k - 1, two rules turn every term into wiring:

* multiplying by 2^p is a left rotation by p bits of the k-bit word;
* negating is inverting every bit (1's complement).

Each product above is therefore a rotated copy of a residue, sometimes
inverted, padded with constant zeros or ones. Fields are listed from the most
significant end (bit 4n-1) down to bit 0:

| term | fields (MSB ... LSB) | widths |
|---|---|---|
| S1 = -2^(3n) R1 | ~r1, then all ones | n, 3n |
| S2 = (2^(3n-1)+2^(n-1)) R2 | r2[n:0], r2[2n-1:0], r2[2n-1:n+1] | n+1, 2n, n-1 |
| S3,1 = 2^(3n-1) R3 | r3[n:0], zeros, r3[2n:n+1] | n+1, 2n-1, n |
| S3,2 = -2^(n-1) R3 | all ones, ~r3[2n:0], all ones | n, 2n+1, n-1 |

The S2 row is a sum of two terms, 2^(3n-1) R2 and 2^(n-1) R2. Their non-zero
bits do not overlap, so they merge into one word with no adder.

That leaves four operands. The key step removes one of them. The low 3n bits
of S1 are all ones, and so are the high n bits of S3,2. Swap the low 3n bits
of the two words. This moves the variable part of S3,2 into S1:

    S1'  = { ~r1[n-1:0], ~r3[2n:0], (n-1) ones }
    S3,2 becomes all ones, which equals 0 modulo 2^(4n)-1, and is dropped.

Three operands remain: S1', S2 and S3,1. One carry-save row reduces them to
two words, and one modular adder adds those two.

### A worked example, n = 2

The moduli are 4, 15 and 17, so M = 1020. Take X = 1000. Its residues are
r1 = 0, r2 = 10 and r3 = 14, and floor(X/4) = 250.

    S1'  = 11 10001 1   = 227     (~r1, ~r3, one 1)
    S2   = 010 1010 1   =  85     (r2[2:0], r2, r2[3])
    S3,1 = 110 000 01   = 193     (r3[2:0], zeros, r3[4:3])
    227 + 85 + 193 = 505 = 250 (mod 255)
    X = {250, r1} = 250*4 + 0 = 1000

## The datapath

```
 r3 (2n+1)  r2 (2n)  r1 (n)
     |         |        |
 +---v---------v--------v---+
 | operand_prep             |  wires + 3n+1 inverters
 +--S1'-------S2-------S3,1-+
     |         |        |         moma:
 +---v---------v--------v---+
 | csa_eac (4n bits)        |  one cell per bit, carry out of bit 4n-1 -> bit 0
 +------sum---------carry---+
          |         |
 +--------v---------v-------+
 | ones_complement_adder    |  (a+b) mod 2^(4n)-1, single zero
 +------------+-------------+
              | q = floor(X/2^n) (4n bits)
              v
          x = {q, r1}   (5n bits)
```

| module | role |
|---|---|
| `rns_pkg` | default word size `N_DEFAULT = 13` |
| `operand_prep` | builds S1', S2, S3,1 from the residues |
| `csa_eac` | 4n-bit carry-save row with end-around carry, reduced cells |
| `ones_complement_adder` | 4n-bit adder modulo 2^(4n)-1 |
| `moma` | multi-operand modular adder: `csa_eac` followed by `ones_complement_adder` |
| `rns_reverse_converter` | top: `operand_prep`, `moma`, and the final concatenation |

Ports of the top (`rns_reverse_converter #(N)`):

| port | dir | width | meaning |
|---|---|---|---|
| `r1` | in | N | X mod 2^n |
| `r2` | in | 2N | X mod 2^(2n)-1, must be below 2^(2n)-1 |
| `r3` | in | 2N+1 | X mod 2^(2n)+1, at most 2^(2n) |
| `x` | out | 5N | X, 0 <= X < M |

There is no clock, reset or handshake. The output follows the inputs after the
combinational delay. To register it, wrap the module in flip-flops of your
own. Out-of-range residues are not detected: the all-ones value of `r2`, or
any `r3` above 2^(2n), gives a meaningless `x`.

### The carry-save row and its reduced cells

A carry-save row adds three words bit by bit. Each cell gives a sum bit of
weight 2^i and a carry bit of weight 2^(i+1). The carry out of the top bit has
weight 2^(4n), which equals 1 modulo 2^(4n)-1. It is therefore wired back to
bit 0 (the *end-around carry*), so the carry word is the cell carries rotated
left by one.

Two bit ranges have a constant input, and their full adders shrink:

| bits | constant | cell | count |
|---|---|---|---|
| 0 .. n-2 | S1' bit = 1 | sum = XNOR, carry = OR of the other two | n-1 |
| n .. 3n-2 | S3,1 bit = 0 | sum = XOR, carry = AND of the other two | 2n-1 |
| n-1 and 3n-1 .. 4n-1 | none | full adder | n+2 |

`csa_eac` builds these cells explicitly in a generate loop. It is therefore
correct only for operands that have these constants, and an immediate
assertion checks them. The constants always hold inside the converter. Do not
reuse `csa_eac` or `moma` as a general three-operand modular adder.

### The modular adder

`ones_complement_adder` computes (a + b) mod 2^W - 1. The end-around carry
must be 1 exactly when a + b >= 2^W - 1. That is the carry out of a + b + 1,
so the module computes that carry first and then uses it as the carry-in of
a + b.

With this rule, a sum of exactly 2^W - 1 gives 0, not the all-ones second
code for zero. So floor(X/2^n) always comes out as an ordinary binary number.
(The all-ones output remains only when both inputs are all ones. That cannot
happen inside the converter.) An assertion checks this property.

The module states the function with `+` and leaves the adder structure to
synthesis. The delay figures below assume a logarithmic parallel-prefix modulo
2^k - 1 adder with the same carry-in rule. To reach them, replace the body of
this module with such an adder; its ports stay the same.

## Cost and delay

In the unit-gate model (inverter, AND and OR = 1; XOR and full adder = 2), the
converter costs:

* 3n+1 inverters;
* n+2 full adders;
* 2n-1 XOR/AND pairs;
* n-1 XNOR/OR pairs;
* one 4n-bit modular adder.

The delay is one inverter, plus one full adder, plus the modular adder. With a
parallel-prefix adder, the total is 2*ceil(log2 n) + 10 unit gates. The
reference figures for the four standard sizes are:

| dynamic range | n | X width | area (gates) | delay (gates) |
|---|---|---|---|---|
| 8-bit | 2 | 10 | 151 | 12 |
| 16-bit | 4 | 20 | 341 | 14 |
| 32-bit | 7 | 35 | 674 | 16 |
| 64-bit | 13 | 65 | 1400 | 18 |

These are model figures for the architecture, not measurements of this RTL.
The RTL's adder is whatever synthesis makes of `+`.

## Parameters and sizes

`N` is the only parameter (default `rns_pkg::N_DEFAULT = 13`). Any N >= 2 is
legal; below 2, the (n-1)-bit fields would vanish. The block testbenches run
n = 2 and n = 13. The multi-size test runs n = 2, 3, 4, 7 and 13. Every width
in the design derives from `N`.

## Verification

Each testbench prints `TB_RESULT checks=<n> failures=<n>`, and all of them have
a watchdog. Reference values are computed with plain `%` and `*` on 256-bit
integers (`tb/tb_ref_pkg.sv`), never with the bit rearrangements used in the
design.

| testbench | what it checks |
|---|---|
| `tb_operand_prep` | S1', S2, S3,1 equal the CRT terms modulo 2^(4n)-1; every residue triple at n = 2, plus random and extreme ones at n = 13 |
| `tb_csa_eac` | bit-exact match with a plain full-adder row with end-around carry, and the modular sum identity, at n = 13 and n = 2 |
| `tb_ones_complement_adder` | every input pair at W = 8; random pairs and modulus corners at W = 52; that a sum equal to the modulus gives 0 |
| `tb_moma` | (a+b+c) mod 2^(4n)-1 for operand-shaped random words |
| `tb_rns_reverse_converter` | end to end at the default n = 13: directed and 20,000 random X; counts that the CSA end-around carry, the adder's correction, a sum equal to the modulus and r3 = 2^(2n) all occurred |
| `tb_table4_workloads` | every X at n = 2, 3 and 4 (1,048,560 values at n = 4); 100,000 random X each at n = 7 and n = 13 |

To run one with Verilator, from the directory that holds `rtl/` and `tb/`:

    verilator --binary --timing --assert -y rtl -y tb \
        --top-module tb_rns_reverse_converter \
        rtl/rns_pkg.sv tb/tb_ref_pkg.sv tb/tb_rns_reverse_converter.sv
    ./obj_dir/Vtb_rns_reverse_converter

Swap in another testbench name to run a different test. Each run takes well
under a second.

## Where this RTL departs from the published design

* **The modular adder.** The published design takes its final adder from the
  literature and assumes a parallel-prefix modulo 2^(4n)-1 adder. Here the
  adder is behavioural (`+` with the single-zero carry-in rule). It is
  functionally equivalent but has no guaranteed logarithmic structure. The
  published design also does not say which code for zero the adder produces.
  The single-zero choice is this design's own.
* **Bit positions of the reduced cells.** The published design gives only the
  cell counts. The positions in the table above follow from the operand
  layout.
* **Default size.** The published design evaluates n = 2, 4, 7 and 13 without
  naming a main one. The default is 13, the largest.
* **Checks.** The assertions in `csa_eac`, `ones_complement_adder` and
  `operand_prep` are additions.
* **Not included.** The forward (binary-to-residue) converter and the
  per-modulus arithmetic units of an RNS processor are not part of this design.

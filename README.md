# BCD adders built from two-transistor AND/OR cells

Decimal floating point (the IEEE 754r revision, now IEEE 754-2008) stores
significands as decimal digits: 7, 16 or 34 of them depending on the format.
Adding two such significands comes down to adding decimal digits with a
carry chain between them. A decimal digit is held as a 4-bit BCD code
(0..9). Adding two of them in binary gives a result of up to 19. Whenever
that result is above 9, the digit must produce a decimal carry and add six
(0110) to wrap the 4-bit sum back into 0..9.

This RTL describes two one-digit BCD adders that do exactly this, and a
significand adder that cascades them:

* a **carry look-ahead BCD adder**, whose binary additions are done by a
  small 4-bit carry look-ahead adder (the "NCLA");
* a **carry-skip BCD adder**, a ripple-carry digit with a bypass that sends
  the incoming carry straight to the decimal carry when every bit position
  would only propagate it.

All AND and OR functions in these adders are meant to be built from
two-transistor pass-gate cells: an AND with no supply rail and an OR with no
ground rail. At logic level these cells are ordinary AND/OR gates. The RTL
keeps them as separate modules so the netlist shows where each one sits and
how many there are.

Everything is combinational. There is no clock, no reset and no state.

## The two-transistor cells (`pl_and`, `gl_or`)

The "powerless" AND has one device that passes the second input to the
output, and one device tied to logic 0 that pulls the output low when the
controlling input is 0. Each stage is therefore the multiplexer
`y = a ? b : 0`. The "groundless" OR is the dual, `y = a ? 1 : b`, with its
device tied to logic 1. Wider gates are chains of 2-input stages: an N-input
gate is N-1 stages, or 2(N-1) transistors. The modules take the input count as
the parameter `N` (default 2) and build exactly that chain.

What the logic model leaves out: each physical cell passes a weak level
(a PMOS passing 0, an NMOS passing 1), so its output swing is reduced, and a
long cascade degrades further. This is why the source design is low power.
It is also the main electrical risk of the approach, and only a transistor
simulation can judge it.

## 4-bit carry look-ahead adder (`ncla4`)

Bits 1 to 3 each use a propagate/generate cell (`pga`). The cell forms
`P = A^B`, `G = A&B` and the sum bit `S = P ^ C`. The carries into bits 2, 3
and 4 are all computed directly from the G/P signals and the carry in `C1`:

    C2 = G1 | P1.C1
    C3 = G2 | P2.G1 | P2.P1.C1
    C4 = G3 | P3.G2 | P3.P2.G1 | P3.P2.P1.C1

Bit 4 is not a fourth PGA cell but a plain full adder fed by `C4`. Its carry
output is the adder's carry out. This removes the largest look-ahead term
(the one for C5). The look-ahead uses three 2-input, two 3-input and one
4-input AND, plus one OR each of 2, 3 and 4 inputs. The RTL has exactly those
instances. Paper-style bit i (1..4) is index i-1 in the RTL.

`full_adder` is written in multiplexer form (`p = a^b`,
`s = p ? ~cin : cin`, `cout = p ? cin : a`). It stands for both full-adder
circuits the adders use: a multiplexer-based one in the NCLA and a
10-transistor one in the carry-skip adder. Both have the same truth table.

## One-digit carry look-ahead BCD adder (`cla_bcd_adder`)

1. A first `ncla4` adds the digits and the carry in, giving the binary sum
   `Z = Z8 Z4 Z2 Z1` and the binary carry `K`.
2. The decimal carry is `cout = K | Z8.Z4 | Z8.Z2`. K covers sums 16..19,
   and the two products cover 10..15.
3. A second `ncla4` adds `0 cout cout 0` (six or zero) to Z with carry in 0.
   Its carry out is discarded. It is 1 exactly when the carry came from
   Z >= 10, so it adds nothing new. Lint reports that net as unused;
   it is left so on purpose.

## One-digit carry-skip BCD adder (`cs_bcd_adder`)

The first row is four rippling full adders giving Z and `C4`. Beside them,
four XORs form `Pi = xi ^ yi`. A 4-input AND then forms the block propagate
`P`, and

    blk  = C4 | P.cin
    cout = blk | Z8.Z4 | Z8.Z2

The second row of four full adders adds `0 cout cout 0`. Its last carry is
unused.

The skip term is the hardest part to understand because it never changes a
value. When P = 1, the ripple chain only copies cin to C4, so `P.cin` equals
C4 then. The term exists for timing. In a chain of digits, a digit whose bits
all propagate hands the incoming carry to the next digit through two gates
and does not wait for four full-adder delays. BCD digits 0..9 give P = 1 only
for the pairs 6+9, 7+8, 8+7 and 9+6. The module brings `P` out as `p_blk` so
that testbenches can see when the bypass is active.
An assertion in the module checks the invariant the bypass relies on:
whenever `P` is 1, `C4` equals `cin`.

## Significand adder (`bcd754r_adder_top`)

`DIGITS` (default 34, the decimal128 significand length) one-digit adders are
chained. The carry out of digit i feeds digit i+1, and digit 0 takes `cin`.
The top builds two such chains over the same operands, one of
`cla_bcd_adder` and one of `cs_bcd_adder`. Each chain has its own outputs:
`sum_*`, `cout_*` and the per-digit carries `carry_*`. The carry-skip chain
also brings out `p_blk_cs`. The two chains must always agree, which makes the
top a convenient place to compare the architectures. Shorter significands
(7 or 16 digits) are added by leaving the upper digits zero. Operand digits
must be valid BCD. Codes 10..15 give undefined results.

Ports are packed arrays of `bcd_pkg::bcd_digit_t`, with digit 0 as the least
significant. The worst-case delay is a carry rippling through all digits
(`99..9 + 0 + 1`).

`bcd_pkg` holds the digit type, the correction constant 0110 and the three
format lengths.

## What is not here

* Transistor-level behaviour: reduced voltage swing, delay and power. These
  were the main results of the original work. They come from circuit
  simulation in a 0.35 um, 3.3 V process and have no RTL equivalent.
* The rest of a decimal floating-point adder: unpacking the combination field
  and the densely packed decimal encoding, sign handling, exponent alignment,
  rounding and subtraction. The design only adds significands.

## Choices made in this RTL

These points are not fixed by the original description:

* The digit cascade and the two-chain top. The original work specifies one
  digit.
* Which sum bits feed the decimal carry detection: the conventional Z8.Z4 and
  Z8.Z2.
* The bit propagate as XOR. The original prose also describes an OR-style
  propagate, but the diagrams use XOR gates, and XOR keeps the bypass exact.
* The 4-input OR as a cascade of OR cells. One table entry in the original
  says cascaded AND cells, which is taken to be a slip.
* The `p_blk` observation port.

## Verification

Every module has a self-checking testbench in `tb/`, named `tb_<module>`:

| testbench | what it checks |
|---|---|
| `tb_pl_and`, `tb_gl_or` | all inputs for N = 2, 3, 4 |
| `tb_pga`, `tb_full_adder` | all 8 input cases |
| `tb_ncla4` | all 512 cases of a, b, cin against integer addition; each of the four C4 look-ahead terms is exercised |
| `tb_cla_bcd_adder`, `tb_cs_bcd_adder` | all 200 valid digit/carry cases against `t = x+y+cin` (carry when t > 9, digit t mod 10); counts the carry cases (none, t >= 16, t in 10..15) and, for carry-skip, the bypass; each must occur |
| `tb_bcd754r_adder_top` | default 34 digits, both chains: 2,000 random 34-digit additions, 300 each at 7 and 16 digits (also compared with 64-bit integer addition), a full-length carry ripple, all-nines, and a pattern that takes the skip path in every digit. Checks the sums, top carries and per-digit carries. Counts corrections, binary-carry corrections, skips, full ripples and top carries; each must be non-zero |

Each testbench prints `TB_RESULT checks=N failures=M` and has a watchdog.

To run one with Verilator 5:

    verilator --binary --timing --assert -Irtl -Itb rtl/bcd_pkg.sv \
        tb/tb_bcd754r_adder_top.sv --top-module tb_bcd754r_adder_top
    ./obj_dir/Vtb_bcd754r_adder_top

To try a different significand length, set `DIGITS` on `bcd754r_adder_top`.
The top testbench uses the package constant `DECIMAL128_DIGITS` as its size.

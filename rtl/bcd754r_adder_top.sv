// bcd754r_adder_top: DIGITS-digit BCD significand adder, built twice.
//
// The two proposed one-digit adders are each cascaded into a ripple of
// DIGITS decimal digits: the decimal carry out of digit i is the carry in of
// digit i+1, and digit 0 takes the external carry in. One chain uses the
// carry look-ahead digit (cla_bcd_adder), the other the carry-skip digit
// (cs_bcd_adder). Both chains read the same operands, so the two
// architectures can be compared on identical data; both must give the same
// result. DIGITS defaults to 34, the significand length of the widest
// IEEE 754r decimal format, which also holds 7- and 16-digit significands
// (pad with leading zero digits).
//
// Interface:
//   x, y        DIGITS BCD digits each, digit 0 least significant
//   cin         carry into digit 0
//   sum_cla/cs  DIGITS-digit decimal sums of the two chains
//   cout_cla/cs decimal carry out of the top digit
//   carry_cla/cs   per-digit decimal carries (bit i = carry out of digit i)
//   p_blk_cs    per-digit block propagate of the carry-skip chain
// Purely combinational: the worst case is a carry rippling through all
// DIGITS digits. Operand digits must be valid BCD (0..9). Sign, exponent,
// rounding and the densely packed decimal encoding of the format are not
// part of this block.
module bcd754r_adder_top
  import bcd_pkg::*;
#(
  parameter int unsigned DIGITS = DECIMAL128_DIGITS
) (
  input  bcd_digit_t [DIGITS-1:0] x,
  input  bcd_digit_t [DIGITS-1:0] y,
  input  logic                    cin,
  output bcd_digit_t [DIGITS-1:0] sum_cla,
  output logic                    cout_cla,
  output logic       [DIGITS-1:0] carry_cla,
  output bcd_digit_t [DIGITS-1:0] sum_cs,
  output logic                    cout_cs,
  output logic       [DIGITS-1:0] carry_cs,
  output logic       [DIGITS-1:0] p_blk_cs
);

  logic [DIGITS:0] c_cla, c_cs;

  assign c_cla[0] = cin;
  assign c_cs[0]  = cin;

  for (genvar i = 0; i < DIGITS; i++) begin : g_digit
    cla_bcd_adder u_cla (
      .x    (x[i]),
      .y    (y[i]),
      .cin  (c_cla[i]),
      .s    (sum_cla[i]),
      .cout (c_cla[i+1])
    );

    cs_bcd_adder u_cs (
      .x     (x[i]),
      .y     (y[i]),
      .cin   (c_cs[i]),
      .s     (sum_cs[i]),
      .cout  (c_cs[i+1]),
      .p_blk (p_blk_cs[i])
    );
  end

  assign carry_cla = c_cla[DIGITS:1];
  assign carry_cs  = c_cs[DIGITS:1];
  assign cout_cla  = c_cla[DIGITS];
  assign cout_cs   = c_cs[DIGITS];

endmodule

// cla_bcd_adder: one-digit carry look-ahead BCD adder.
//
// The two BCD digits and the carry in are added in binary by a first
// ncla4, giving the binary sum Z (Z8 Z4 Z2 Z1) and carry K. The digit
// overflows its decimal range when
//     cout = K | Z8.Z4 | Z8.Z2
// (binary sum of 16..19, or 10..15). When cout is 1 a second ncla4 adds
// 0110 to Z (carry in 0), which yields the decimal sum digit; when cout is 0
// it adds 0000. The second adder's own carry out carries no new information
// (it is 1 exactly when cout came from Z >= 10) and is left unused, which is
// why the lint tool reports one unused signal here.
//
// The two-adder structure, the correction and the discarded second carry
// follow the source design; the Z8.Z4 / Z8.Z2 detection terms are the
// conventional BCD choice, made here where the source does not spell them out.
//
// Interface: x, y (BCD digits, 0..9), cin in; s (BCD digit), cout out.
// Purely combinational: the result settles after the two adders and the
// carry logic. Inputs above 9 are outside the adder's defined range.
module cla_bcd_adder
  import bcd_pkg::*;
(
  input  bcd_digit_t x,
  input  bcd_digit_t y,
  input  logic       cin,
  output bcd_digit_t s,
  output logic       cout
);

  bcd_digit_t z;            // binary sum of the top adder
  logic       k;            // binary carry of the top adder
  logic       z8z4, z8z2;
  logic       unused_carry; // bottom adder carry, not needed

  ncla4 u_top (.a(x), .b(y), .cin(cin), .s(z), .cout(k));

  pl_and #(.N(2)) u_and_z8z4 (.a({z[3], z[2]}), .y(z8z4));
  pl_and #(.N(2)) u_and_z8z2 (.a({z[3], z[1]}), .y(z8z2));
  gl_or  #(.N(3)) u_or_cout  (.a({k, z8z4, z8z2}), .y(cout));

  // Add 0 cout cout 0 (six when a decimal carry leaves the digit).
  ncla4 u_bottom (
    .a    (z),
    .b    (BCD_CORRECTION & {DIGIT_W{cout}}),
    .cin  (1'b0),
    .s    (s),
    .cout (unused_carry)
  );

endmodule

// bcd_pkg: types and constants shared by the BCD adder modules.
//
// A decimal digit is carried as a 4-bit BCD code (8-4-2-1 weights, values
// 0..9). The decimal correction constant 0110 (six) that turns a binary
// digit sum above nine into a decimal digit plus a carry is kept here too.
// The digit counts of the three IEEE 754r decimal interchange formats
// (7, 16 and 34 significand digits) are given as named constants; the
// largest sizes the significand adder, the other two are for users and
// testbenches (lint reports them as unused when only the RTL is read).
package bcd_pkg;

  localparam int unsigned DIGIT_W = 4;

  typedef logic [DIGIT_W-1:0] bcd_digit_t;

  // Added to the binary digit sum when a decimal carry leaves the digit.
  localparam bcd_digit_t BCD_CORRECTION = 4'b0110;

  // Significand lengths of the IEEE 754r decimal formats.
  localparam int unsigned DECIMAL32_DIGITS  = 7;
  localparam int unsigned DECIMAL64_DIGITS  = 16;
  localparam int unsigned DECIMAL128_DIGITS = 34;

endpackage

// cs_bcd_adder: one-digit carry-skip BCD adder.
//
// First level: four full adders ripple the binary sum Z of x + y + cin,
// ending in the binary carry C4. Beside them four XORs form the bit
// propagates Pi = xi ^ yi and a 4-input AND forms the block propagate
// P = P0.P1.P2.P3. When P is 1 the ripple chain would only pass cin through,
// so cin is sent straight on as the block carry:
//     blk  = C4 | P.cin
//     cout = blk | Z8.Z4 | Z8.Z2
// The skip term changes no value (when P is 1, C4 equals cin); it gives the
// decimal carry a short path that does not wait for the ripple. Second
// level: four more full adders add 0 cout cout 0 to Z with carry in 0, giving
// the decimal sum digit. Their last carry is not needed and is left unused
// (the lint tool reports it).
// A deferred assertion checks that a fully propagating block (P = 1) really
// passes cin to C4, the fact the bypass depends on.
//
// The gate structure (ripple row, XOR propagates, AND/OR bypass, decimal
// carry detection, correction row) follows the source design; the choice
// of Z8.Z4 / Z8.Z2 for the detection, the p_blk port and the assertion are
// this design's own.
//
// Interface: x, y (BCD digits, 0..9), cin in; s (BCD digit), cout, and
// p_blk (the block propagate P, for observation) out. Combinational.
module cs_bcd_adder
  import bcd_pkg::*;
(
  input  bcd_digit_t x,
  input  bcd_digit_t y,
  input  logic       cin,
  output bcd_digit_t s,
  output logic       cout,
  output logic       p_blk
);

  bcd_digit_t z;          // binary sum, first level
  logic [4:0] c;          // ripple carries, first level; c[4] = C4
  logic [3:0] pb;         // bit propagates
  logic       skip, blk, z8z4, z8z2;
  logic [4:0] d;          // ripple carries, second level
  bcd_digit_t corr;

  assign c[0] = cin;

  for (genvar i = 0; i < 4; i++) begin : g_top
    full_adder u_fa (.a(x[i]), .b(y[i]), .cin(c[i]), .s(z[i]), .cout(c[i+1]));
    assign pb[i] = x[i] ^ y[i];
  end

  // Carry skip: block propagate and bypass of cin.
  pl_and #(.N(4)) u_and_p    (.a(pb),           .y(p_blk));
  pl_and #(.N(2)) u_and_skip (.a({p_blk, cin}), .y(skip));
  gl_or  #(.N(2)) u_or_blk   (.a({c[4], skip}), .y(blk));

  // The bypass is only correct because a fully propagating block passes
  // cin unchanged to C4.
  always_comb begin
    assert final (!p_blk || (c[4] == cin))
      else $error("cs_bcd_adder: block propagate set but C4 differs from cin");
  end

  // Decimal carry detection.
  pl_and #(.N(2)) u_and_z8z4 (.a({z[3], z[2]}), .y(z8z4));
  pl_and #(.N(2)) u_and_z8z2 (.a({z[3], z[1]}), .y(z8z2));
  gl_or  #(.N(3)) u_or_cout  (.a({blk, z8z4, z8z2}), .y(cout));

  // Second level: add 0110 when cout is set.
  assign corr = BCD_CORRECTION & {DIGIT_W{cout}};
  assign d[0] = 1'b0;

  for (genvar i = 0; i < 4; i++) begin : g_bottom
    full_adder u_fa (.a(z[i]), .b(corr[i]), .cin(d[i]), .s(s[i]), .cout(d[i+1]));
  end

endmodule

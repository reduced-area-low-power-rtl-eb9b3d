// ncla4: 4-bit carry look-ahead adder (NCLA), s + 16*cout = a + b + cin.
//
// Bits 1..3 (a[0]..a[2]) each use a pga cell giving sum, generate G and
// propagate P. The carries into bits 2, 3 and 4 are formed directly from
// the G/P signals and the carry in, with AND and OR gates only:
//     C2 = G1 | P1.C1
//     C3 = G2 | P2.G1 | P2.P1.C1
//     C4 = G3 | P3.G2 | P3.P2.G1 | P3.P2.P1.C1
// (C1 = cin). That needs three 2-input, two 3-input and one 4-input AND and
// one OR each of 2, 3 and 4 inputs, all built from the two-transistor cells
// pl_and and gl_or. Bit 4 is an ordinary full adder fed by C4; its carry is
// the adder's carry out, so no look-ahead term is built for C5.
//
// Bit numbering: paper-style bit i (1..4) is index i-1 here.
// Interface: a[3:0], b[3:0], cin in; s[3:0], cout out. Combinational.
module ncla4
  import bcd_pkg::*;
(
  input  bcd_digit_t a,
  input  bcd_digit_t b,
  input  logic       cin,
  output bcd_digit_t s,
  output logic       cout
);

  logic [2:0] g, p;   // G1..G3, P1..P3
  logic [3:0] c;      // C1..C4: carry into each bit

  assign c[0] = cin;

  for (genvar i = 0; i < 3; i++) begin : g_pga
    pga u_pga (.a(a[i]), .b(b[i]), .c(c[i]), .s(s[i]), .g(g[i]), .p(p[i]));
  end

  // C2 = G1 | P1.C1
  logic p1c1;
  pl_and #(.N(2)) u_and_p1c1 (.a({p[0], c[0]}), .y(p1c1));
  gl_or  #(.N(2)) u_or_c2    (.a({g[0], p1c1}), .y(c[1]));

  // C3 = G2 | P2.G1 | P2.P1.C1
  logic p2g1, p2p1c1;
  pl_and #(.N(2)) u_and_p2g1   (.a({p[1], g[0]}),       .y(p2g1));
  pl_and #(.N(3)) u_and_p2p1c1 (.a({p[1], p[0], c[0]}), .y(p2p1c1));
  gl_or  #(.N(3)) u_or_c3      (.a({g[1], p2g1, p2p1c1}), .y(c[2]));

  // C4 = G3 | P3.G2 | P3.P2.G1 | P3.P2.P1.C1
  logic p3g2, p3p2g1, p3p2p1c1;
  pl_and #(.N(2)) u_and_p3g2     (.a({p[2], g[1]}),             .y(p3g2));
  pl_and #(.N(3)) u_and_p3p2g1   (.a({p[2], p[1], g[0]}),       .y(p3p2g1));
  pl_and #(.N(4)) u_and_p3p2p1c1 (.a({p[2], p[1], p[0], c[0]}), .y(p3p2p1c1));
  gl_or  #(.N(4)) u_or_c4        (.a({g[2], p3g2, p3p2g1, p3p2p1c1}), .y(c[3]));

  // Bit 4: full adder in place of a fourth PGA cell.
  full_adder u_fa4 (.a(a[3]), .b(b[3]), .cin(c[3]), .s(s[3]), .cout(cout));

endmodule

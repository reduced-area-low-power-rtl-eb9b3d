// pga: propagate/generate cell of the NCLA adder.
//
// For one bit position it forms
//     p = a ^ b          (propagate)
//     g = a & b          (generate)
//     s = p ^ c          (sum bit, from the carry c into this position)
// with two XOR gates and one AND gate, the AND being the two-transistor
// pl_and cell. The carry out of the position is not formed here; the
// look-ahead logic of ncla4 computes it from g, p and the lower carries.
//
// Interface: a, b, c in; s, g, p out. Purely combinational.
module pga (
  input  logic a,
  input  logic b,
  input  logic c,
  output logic s,
  output logic g,
  output logic p
);

  assign p = a ^ b;
  assign s = p ^ c;

  pl_and #(.N(2)) u_gen (.a({a, b}), .y(g));

endmodule

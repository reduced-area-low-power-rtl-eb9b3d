// full_adder: 1-bit full adder in multiplexer form.
//
// The propagate signal p = a ^ b steers two multiplexers:
//     s    = p ? ~cin : cin
//     cout = p ?  cin : a      (when a == b the carry equals a)
// This is the logic of a multiplexer-based full adder. The same module stands
// for the 10-transistor full adder used in the carry-skip BCD adder; both
// have the full-adder truth table, and only their transistor circuits differ.
// The multiplexer equations are this design's choice of a logic form.
//
// Interface: a, b, cin in; s, cout out. Purely combinational.
module full_adder (
  input  logic a,
  input  logic b,
  input  logic cin,
  output logic s,
  output logic cout
);

  logic p;

  assign p    = a ^ b;
  assign s    = p ? ~cin : cin;
  assign cout = p ? cin : a;

endmodule

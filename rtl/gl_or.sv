// gl_or: "groundless" OR gate, N inputs, y = |a.
//
// The dual of pl_and: a two-transistor pass gate with no ground rail. One
// device connects the output to the other input, the second device (tied to
// logic 1 / VDD) pulls the output to 1 when the controlling input is high.
// At logic level each stage is
//     stage_k = a[k] ? 1'b1 : stage_{k-1} .
// Wider ORs are cascades of 2-input stages (N-1 stages, 2(N-1) transistors).
//
// Interface: a[N-1:0] in, y out. Purely combinational, no clock.
module gl_or #(
  parameter int unsigned N = 2
) (
  input  logic [N-1:0] a,
  output logic         y
);

  logic [N-1:0] stage;

  assign stage[0] = a[0];

  for (genvar k = 1; k < N; k++) begin : g_stage
    // The rail-tied device passes VDD (1) when a[k] is high.
    assign stage[k] = a[k] ? 1'b1 : stage[k-1];
  end

  assign y = stage[N-1];

endmodule

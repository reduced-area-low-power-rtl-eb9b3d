// pl_and: "powerless" AND gate, N inputs, y = &a.
//
// The basic cell is a two-transistor pass gate with no supply rail: one
// device connects the output to the other input, the second device (tied to
// logic 0 / VSS) pulls the output to 0 when the controlling input is low.
// At logic level each stage is therefore the multiplexer
//     stage_k = a[k] ? stage_{k-1} : 1'b0 .
// Wider ANDs are made by cascading 2-input stages, as the source design does
// for its 3- and 4-input ANDs (N-1 stages, 2(N-1) transistors). The reduced
// voltage swing of the physical cell has no counterpart in logic.
//
// Interface: a[N-1:0] in, y out. Purely combinational, no clock.
module pl_and #(
  parameter int unsigned N = 2
) (
  input  logic [N-1:0] a,
  output logic         y
);

  logic [N-1:0] stage;

  assign stage[0] = a[0];

  for (genvar k = 1; k < N; k++) begin : g_stage
    // The rail-tied device passes VSS (0) when a[k] is low.
    assign stage[k] = a[k] ? stage[k-1] : 1'b0;
  end

  assign y = stage[N-1];

endmodule

// peres_or: two-input OR (and XNOR) built from two cascaded Peres gates.
//
// The first gate, with a constant 0 on its third line, produces A xor B and
// A and B. The second takes (A xor B, 1, AB) and produces
//   A xor B,   (A xor B)' = XNOR,   (A xor B) xor AB = A or B.
// So the pair gives A (garbage), XOR, XNOR and OR from the two inputs plus
// the constants 0 and 1. The cascade follows the published XNOR/OR figure.
// In the carry skip block it merges the ripple carry with the skip term.
//
// Combinational, two gate levels from inputs to o_or / o_xnor.
module peres_or #(
  parameter int unsigned GATE_DELAY = 0  // per-gate delay, simulation only
) (
  input  logic a,
  input  logic b,
  output logic o_a,     // A, passed through (garbage)
  output logic o_xor,   // A xor B
  output logic o_xnor,  // A xnor B
  output logic o_or     // A or B
);
  logic axb, ab;

  peres_gate #(.GATE_DELAY(GATE_DELAY)) u_g0 (.a(a),   .b(b),    .c(1'b0), .p(o_a),   .q(axb),    .r(ab));
  peres_gate #(.GATE_DELAY(GATE_DELAY)) u_g1 (.a(axb), .b(1'b1), .c(ab),   .p(o_xor), .q(o_xnor), .r(o_or));
endmodule

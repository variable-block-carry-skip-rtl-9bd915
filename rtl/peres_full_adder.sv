// peres_full_adder: reversible full adder made of two Peres gates ("PFA").
//
// Gate 1 takes (A, B, 0) and gives G1 = A, A xor B and AB.
// Gate 2 takes (A xor B, Cin, AB) and gives
//   G2   = A xor B                        (the bit's propagate signal P)
//   Sum  = A xor B xor Cin
//   Cout = (A xor B) Cin xor AB
// Two gates, one constant input, two garbage outputs (G1, G2) and quantum
// cost 8. The structure is the published one; G2 is not wasted in the carry
// skip adder, where it is the propagate bit fed to the block AND tree.
//
// Combinational. Depth two gates from A, B to every output; one gate from
// Cin to Sum and Cout, which is what makes the carry ripple one gate per bit.
module peres_full_adder #(
  parameter int unsigned GATE_DELAY = 0  // per-gate delay, simulation only
) (
  input  logic a,
  input  logic b,
  input  logic cin,
  output logic g1,    // garbage: A
  output logic p,     // G2 = A xor B, propagate
  output logic sum,
  output logic cout
);
  logic axb, ab;

  peres_gate #(.GATE_DELAY(GATE_DELAY)) u_g0 (.a(a),   .b(b),   .c(1'b0), .p(g1), .q(axb), .r(ab));
  peres_gate #(.GATE_DELAY(GATE_DELAY)) u_g1 (.a(axb), .b(cin), .c(ab),   .p(p),  .q(sum), .r(cout));
endmodule

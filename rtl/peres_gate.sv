// peres_gate: the 3x3 reversible Peres gate.
//
//   P = A,   Q = A xor B,   R = (A and B) xor C
//
// It is the k = 3 member of the generalized k*k gate family (k-2 = 1 line
// passes through, the other two are XORed with functions of the lines above
// them). Tying C to a constant turns it into the classical gates the adder
// needs: C = 0 gives AND on R (and XOR on Q), C = 1 gives NAND on R, and
// A = 1 gives NOT/XOR (Q = B', R = B xor C). Its quantum cost is 4 two-by-two
// primitives; that realization has no two-valued equivalent below the
// gate level, so the gate is written from its truth table.
//
// Purely combinational, no clock. The gate is a bijection on three bits; the
// testbench checks that as well as the equations.
//
// GATE_DELAY (default 0) is for simulation only: when non-zero every output
// changes GATE_DELAY time units after an input, so a unit-delay simulation
// measures path lengths in gate levels, the unit in which the adder's delays
// are stated. Synthesis ignores it.
module peres_gate #(
  parameter int unsigned GATE_DELAY = 0
) (
  input  logic a,
  input  logic b,
  input  logic c,
  output logic p,
  output logic q,
  output logic r
);
  if (GATE_DELAY == 0) begin : g_ideal
    assign p = a;
    assign q = a ^ b;
    assign r = (a & b) ^ c;
  end else begin : g_timed
    assign #(GATE_DELAY) p = a;
    assign #(GATE_DELAY) q = a ^ b;
    assign #(GATE_DELAY) r = (a & b) ^ c;
  end
endmodule

// csa_block: one B-bit carry skip block built only from Peres gates.
//
// B Peres full adders form a ripple carry adder from the block carry in to
// the ripple carry out c_rip. Each full adder's G2 output is its propagate
// bit P_i = X_i xor Y_i; a (B-1)-gate Peres AND tree combines them into the
// block propagate P. When P = 1 every bit propagates, so the block carry out
// equals the block carry in and need not wait for the ripple: that is the
// skip path.
//
// Skip gate. A Peres gate with a 0 on its third line forms the skip term
// P and Cin. The block carry out is the usual carry skip merge
//   Cout = c_rip or (P and Cin),
// with the OR made from two Peres gates (the XNOR/OR cascade). The published
// block uses a single Peres gate here, which can only form (P and Cin) xor
// c_rip; that is 0, not 1, when P = 1 and Cin = 1 (then c_rip = 1 as well),
// so it would add wrongly. This design therefore spends two more gates per
// block: 3B + 2 Peres gates instead of 3B, and a skip path of
// ceil(log2 B) + 5 gate delays instead of ceil(log2 B) + 3.
//
// GATE_DELAY (default 0, simulation only) is passed down to every Peres
// gate; at 1 a simulation measures delays in gate levels.
//
// Interface: x, y, cin in; s, cout out; p_blk (block propagate) and c_rip
// (ripple carry out) are brought out for observation. Combinational.
module csa_block #(
  parameter int unsigned B          = 4,
  parameter int unsigned GATE_DELAY = 0   // per-gate delay, simulation only
) (
  input  logic [B-1:0] x,
  input  logic [B-1:0] y,
  input  logic         cin,
  output logic [B-1:0] s,
  output logic         cout,
  output logic         p_blk,
  output logic         c_rip
);
  // Peres gates in this block: 2 per full adder, B-1 in the AND tree,
  // 1 skip AND, 2 in the OR.
  localparam int unsigned NUM_PERES = 2 * B + (B - 1) + 3;

  logic [B:0]   c;
  logic [B-1:0] p;
  logic [B-1:0] unused_g1;

  assign c[0] = cin;

  for (genvar i = 0; i < B; i++) begin : g_fa
    peres_full_adder #(.GATE_DELAY(GATE_DELAY)) u_pfa (
      .a(x[i]), .b(y[i]), .cin(c[i]),
      .g1(unused_g1[i]), .p(p[i]), .sum(s[i]), .cout(c[i+1])
    );
  end

  assign c_rip = c[B];

  peres_and_tree #(.W(B), .GATE_DELAY(GATE_DELAY)) u_and (.in(p), .y(p_blk));

  // Skip term P and Cin.
  logic skip, unused_sp, unused_sq;
  peres_gate #(.GATE_DELAY(GATE_DELAY)) u_skip (
    .a(p_blk), .b(cin), .c(1'b0),
    .p(unused_sp), .q(unused_sq), .r(skip)
  );

  // Merge: Cout = c_rip or skip.
  logic unused_oa, unused_ox, unused_oxn;
  peres_or #(.GATE_DELAY(GATE_DELAY)) u_merge (
    .a(c_rip), .b(skip),
    .o_a(unused_oa), .o_xor(unused_ox), .o_xnor(unused_oxn), .o_or(cout)
  );
endmodule

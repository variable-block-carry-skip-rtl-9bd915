// peres_and_tree: W-input AND built from W-1 Peres gates.
//
// Each node is a Peres gate used as a two-input AND (third line tied to 0,
// AND on R; A passes through and A xor B is garbage). Nodes are paired level
// by level, so the tree is ceil(log2 W) gates deep; with an odd count the
// last signal of a level is carried up unchanged. For W = 4 this is the
// published arrangement: (P0,P1) -> P0P1, (P2,P3) -> P2P3, then one more gate
// for the block propagate P. The pairing rule for other widths is this
// design's choice; the published design fixes only the gate count W-1.
//
// Combinational. W = 1 gives y = in with no gate.
module peres_and_tree #(
  parameter int unsigned W          = 4,
  parameter int unsigned GATE_DELAY = 0   // per-gate delay, simulation only
) (
  input  logic [W-1:0] in,
  output logic         y
);
  localparam int unsigned LEVELS = csa_pkg::clog2(W);

  // Number of nodes on level l (level 0 = the inputs).
  function automatic int unsigned nodes(int unsigned l);
    int unsigned n = W;
    for (int unsigned k = 0; k < l; k++) n = (n + 1) / 2;
    return n;
  endfunction

  logic [W-1:0] lvl [LEVELS+1];

  assign lvl[0] = in;

  for (genvar l = 1; l <= LEVELS; l++) begin : g_lvl
    localparam int unsigned NPREV = nodes(l - 1);
    localparam int unsigned NCUR  = nodes(l);
    for (genvar j = 0; j < NCUR; j++) begin : g_node
      if (2 * j + 1 < NPREV) begin : g_and
        logic unused_p, unused_q;
        peres_gate #(.GATE_DELAY(GATE_DELAY)) u_and (
          .a(lvl[l-1][2*j]), .b(lvl[l-1][2*j+1]), .c(1'b0),
          .p(unused_p), .q(unused_q), .r(lvl[l][j])
        );
      end else begin : g_pass
        assign lvl[l][j] = lvl[l-1][2*j];
      end
    end
    if (NCUR < W) begin : g_fill
      assign lvl[l][W-1:NCUR] = '0;
    end
  end

  assign y = lvl[LEVELS][0];
endmodule

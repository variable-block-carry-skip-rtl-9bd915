// carry_skip_adder: N-bit reversible carry skip adder, variable block sizes.
//
// The adder is a chain of T carry skip blocks (csa_block); each block's carry
// out is the next block's carry in. With VARIABLE = 1 (the default) the
// block widths, least significant first, are
//   B, B+1, ..., B+T/2-1, B+T/2-1, ..., B+1, B        (T even)
// so N = T*B + T*T/4 - T/2. Short blocks at both ends shorten the ripple a
// carry makes into the first block and out of the last; longer middle blocks
// mean fewer skip gates to cross. With VARIABLE = 0 the adder has T blocks of
// B bits each (N = T*B), the fixed-block carry skip adder.
//
// The layout rule and the block structure follow the published design; it
// names no particular width, so the default is this design's choice:
// B = 4, T = 6 gives N = 30 with blocks 4,5,6,6,5,4. T = 6 is the optimum
// number of blocks (about 1.15 sqrt(N)) for N = 30, and B = 4 makes the
// outer blocks the published 4-bit block. The VARIABLE switch and the
// observation outputs are additions of this design.
//
// GATE_DELAY (default 0, simulation only) is passed down to every Peres
// gate; at 1 a simulation measures delays in gate levels.
//
// Interface: x, y (N bits), cin in; s (N bits), cout out. blk_p and blk_cout
// give each block's propagate and carry out, for observation. Purely
// combinational.
module carry_skip_adder
  import csa_pkg::*;
#(
  parameter bit          VARIABLE = 1'b1,
  parameter int unsigned B        = 4,
  parameter int unsigned T        = 6,
  parameter int unsigned GATE_DELAY = 0,  // per-gate delay, simulation only
  localparam int unsigned N       = total_width(VARIABLE, B, T)
) (
  input  logic [N-1:0] x,
  input  logic [N-1:0] y,
  input  logic         cin,
  output logic [N-1:0] s,
  output logic         cout,
  output logic [T-1:0] blk_p,
  output logic [T-1:0] blk_cout
);
  logic [T:0] c;
  assign c[0] = cin;

  for (genvar k = 0; k < T; k++) begin : g_blk
    localparam int unsigned W   = blk_width(VARIABLE, B, T, k);
    localparam int unsigned LSB = blk_lsb(VARIABLE, B, T, k);
    logic unused_crip;
    csa_block #(.B(W), .GATE_DELAY(GATE_DELAY)) u_blk (
      .x(x[LSB +: W]), .y(y[LSB +: W]), .cin(c[k]),
      .s(s[LSB +: W]), .cout(c[k+1]), .p_blk(blk_p[k]), .c_rip(unused_crip)
    );
  end

  assign blk_cout = c[T:1];
  assign cout     = c[T];

  // The variable layout is symmetric about the middle and needs an even T.
  if (VARIABLE && (T % 2 != 0)) begin : g_bad_t
    $error("carry_skip_adder: T must be even for the variable block layout");
  end
endmodule

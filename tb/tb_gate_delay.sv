// tb_gate_delay: measures path delays in gate levels with a unit-delay
// simulation (every Peres gate delays its outputs by one time unit) and
// compares them with the delays the structure should have.
//
// Measured: the full adder (2 levels from the addends, 1 from the carry in);
// a 4-bit and a 6-bit carry skip block (ripple from the addends, block
// propagate, skip from the carry in, skip from the addends); and the whole
// default 30-bit adder on its worst case, a carry generated in bit 0 that
// must reach the top sum bit. Expected values come from the block structure:
// ripple B + 3 (B + 1 of the published equation plus the two-gate OR merge),
// skip ceil(log2 B) + 5 from the addends (published ceil(log2 B) + 3, plus 2),
// and 3 from carry in to carry out when the block propagates.
module tb_gate_delay;
  import csa_pkg::*;

  int checks = 0, failures = 0;

  task automatic expect_delay(input string what, input longint got, input longint want);
    checks++;
    $display("%-44s %0d gate levels (expected %0d)", what, got, want);
    if (got != want) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  // ---- full adder
  logic fa_a, fa_b, fa_c, fa_g1, fa_p, fa_s, fa_co;
  peres_full_adder #(.GATE_DELAY(1)) u_fa (
    .a(fa_a), .b(fa_b), .cin(fa_c), .g1(fa_g1), .p(fa_p), .sum(fa_s), .cout(fa_co));

  // ---- blocks of 4 and 6 bits
  logic [3:0] x4, y4, s4;  logic c4, co4, p4, r4;
  logic [5:0] x6, y6, s6;  logic c6, co6, p6, r6;
  csa_block #(.B(4), .GATE_DELAY(1)) u_b4 (
    .x(x4), .y(y4), .cin(c4), .s(s4), .cout(co4), .p_blk(p4), .c_rip(r4));
  csa_block #(.B(6), .GATE_DELAY(1)) u_b6 (
    .x(x6), .y(y6), .cin(c6), .s(s6), .cout(co6), .p_blk(p6), .c_rip(r6));

  // ---- whole default adder
  localparam int unsigned N = total_width(1'b1, 4, 6);
  logic [N-1:0] xa, ya, sa;  logic ca, coa;  logic [5:0] bp, bc;
  carry_skip_adder #(.GATE_DELAY(1)) u_add (
    .x(xa), .y(ya), .cin(ca), .s(sa), .cout(coa), .blk_p(bp), .blk_cout(bc));

  // Time of the last change of each observed signal.
  longint t_fa_s, t_fa_co, t_co4, t_p4, t_r4, t_co6, t_p6, t_r6, t_sa, t_coa;
  always begin @(fa_s); t_fa_s = $time; end
  always begin @(fa_co); t_fa_co = $time; end
  always begin @(co4); t_co4 = $time; end
  always begin @(p4); t_p4 = $time; end
  always begin @(r4); t_r4 = $time; end
  always begin @(co6); t_co6 = $time; end
  always begin @(p6); t_p6 = $time; end
  always begin @(r6); t_r6 = $time; end
  always begin @(sa); t_sa = $time; end
  always begin @(coa); t_coa = $time; end

  longint t0;
  localparam int SETTLE = 200;

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    {fa_a, fa_b, fa_c} = '0;
    x4 = '0; y4 = '0; c4 = 1'b0;
    x6 = '0; y6 = '0; c6 = 1'b0;
    xa = '0; ya = '0; ca = 1'b0;
    #SETTLE;

    // Full adder: addends to carry (generate), then carry in to sum/carry.
    t0 = $time; fa_a = 1'b1; fa_b = 1'b1; #SETTLE;
    expect_delay("full adder A,B -> Cout", t_fa_co - t0, 2);
    fa_b = 1'b0; #SETTLE;
    t0 = $time; fa_c = 1'b1; #SETTLE;
    expect_delay("full adder Cin -> Sum", t_fa_s - t0, 1);
    expect_delay("full adder Cin -> Cout", t_fa_co - t0, 1);

    // Block ripple: bit 0 generates, bits 1.. propagate, P = 0.
    t0 = $time; x4 = 4'b1111; y4 = 4'b0001; x6 = 6'b111111; y6 = 6'b000001; #SETTLE;
    expect_delay("4-bit block ripple: addends -> c_rip", t_r4 - t0, d_ripple(4));
    expect_delay("4-bit block ripple: addends -> Cout", t_co4 - t0, d_ripple(4) + 2);
    expect_delay("6-bit block ripple: addends -> Cout", t_co6 - t0, d_ripple(6) + 2);
    x4 = '0; y4 = '0; x6 = '0; y6 = '0; c4 = 1'b1; c6 = 1'b1; #SETTLE;

    // Block skip from the addends: the block becomes all-propagate with a
    // carry in of 1 already present.
    t0 = $time; x4 = 4'b1010; y4 = 4'b0101; x6 = 6'b101010; y6 = 6'b010101; #SETTLE;
    expect_delay("4-bit block: addends -> P", t_p4 - t0, 2 + clog2(4));
    expect_delay("4-bit block skip: addends -> Cout", t_co4 - t0, d_skip(4) + 2);
    expect_delay("6-bit block: addends -> P", t_p6 - t0, 2 + clog2(6));
    expect_delay("6-bit block skip: addends -> Cout", t_co6 - t0, d_skip(6) + 2);

    // Block skip from the carry in, P already 1: one AND and the OR.
    c4 = 1'b0; c6 = 1'b0; #SETTLE;
    t0 = $time; c4 = 1'b1; c6 = 1'b1; #SETTLE;
    expect_delay("4-bit block skip: Cin -> Cout", t_co4 - t0, 3);
    expect_delay("4-bit block ripple: Cin -> c_rip", t_r4 - t0, 4);
    expect_delay("6-bit block skip: Cin -> Cout", t_co6 - t0, 3);

    // Whole adder, worst case: bit 0 generates, every other bit propagates.
    // Carry ripples out of block 0, skips blocks 1..T-2, ripples through the
    // last block to its top sum bit.
    t0 = $time; xa = '1; ya = N'(1); #SETTLE;
    begin
      longint want_s;
      int unsigned t = 6;
      want_s = d_ripple(blk_width(1'b1, 4, t, 0)) + 2;        // out of block 0
      for (int unsigned k = 1; k + 1 < t; k++) want_s += 3;   // skips
      want_s += blk_width(1'b1, 4, t, t - 1);                 // last block's ripple to its top sum bit
      expect_delay("30-bit adder worst case: addends -> sum", t_sa - t0, want_s);
      checks++;
      if ({coa, sa} != {1'b1, N'(0)}) begin
        failures++;
        $display("FAIL 30-bit adder result %0b/%h", coa, sa);
      end
      $display("published estimate for this layout (eq. 9 terms, exact log2): %0d gate levels",
               t_worst(1'b1, 4, t));
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

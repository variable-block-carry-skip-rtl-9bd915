// tb_peres_gate: exhaustive check of the Peres gate.
//
// Drives all eight input patterns and compares (P, Q, R) with a truth table
// written out by hand in the testbench. Also checks that the eight output
// patterns are all different (the gate is reversible) and the classical
// gates obtained by tying one line to a constant (AND, NAND, NOT).
module tb_peres_gate;
  int checks = 0, failures = 0;
  logic a, b, c, p, q, r;

  peres_gate dut (.a(a), .b(b), .c(c), .p(p), .q(q), .r(r));

  // Expected {P,Q,R} for input {A,B,C} = index.
  localparam logic [2:0] TT [8] = '{3'b000, 3'b001, 3'b010, 3'b011,
                                    3'b110, 3'b111, 3'b101, 3'b100};

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s a=%0b b=%0b c=%0b -> p=%0b q=%0b r=%0b", what, a, b, c, p, q, r);
    end
  endtask

  initial begin
    #1000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit [7:0] seen = '0;
    for (int i = 0; i < 8; i++) begin
      {a, b, c} = 3'(i);
      #1;
      check({p, q, r} == TT[i], "truth table");
      seen[{p, q, r}] = 1'b1;
      if (c == 1'b0) check(r == (a & b), "AND with C=0");
      if (c == 1'b1) check(r == !(a & b), "NAND with C=1");
      if (a == 1'b1) check(q == !b, "NOT with A=1");
    end
    checks++;
    if (seen != 8'hFF) begin
      failures++;
      $display("FAIL not a bijection: outputs seen %b", seen);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_peres_or: exhaustive check of the two-gate XNOR/OR cascade.
module tb_peres_or;
  int checks = 0, failures = 0;
  logic a, b, o_a, o_xor, o_xnor, o_or;

  peres_or dut (.a(a), .b(b), .o_a(o_a), .o_xor(o_xor), .o_xnor(o_xnor), .o_or(o_or));

  // Expected {A, XOR, XNOR, OR} for {A,B} = index.
  localparam logic [3:0] TT [4] = '{4'b0010, 4'b0101, 4'b1101, 4'b1011};

  initial begin
    #1000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 4; i++) begin
      {a, b} = 2'(i);
      #1;
      checks++;
      if ({o_a, o_xor, o_xnor, o_or} != TT[i]) begin
        failures++;
        $display("FAIL a=%0b b=%0b -> %b expected %b", a, b,
                 {o_a, o_xor, o_xnor, o_or}, TT[i]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_peres_full_adder: exhaustive check of the two-gate Peres full adder.
//
// Sum and carry are compared with the integer sum a + b + cin; the garbage
// outputs with G1 = A and G2 = A xor B.
module tb_peres_full_adder;
  int checks = 0, failures = 0;
  logic a, b, cin, g1, p, sum, cout;

  peres_full_adder dut (.a(a), .b(b), .cin(cin), .g1(g1), .p(p), .sum(sum), .cout(cout));

  initial begin
    #1000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int unsigned total;
    for (int i = 0; i < 8; i++) begin
      {a, b, cin} = 3'(i);
      #1;
      total = int'(a) + int'(b) + int'(cin);
      checks++;
      if ({cout, sum} != 2'(total)) begin
        failures++;
        $display("FAIL %0b+%0b+%0b: cout=%0b sum=%0b", a, b, cin, cout, sum);
      end
      checks++;
      if (g1 != a || p != (a != b)) begin
        failures++;
        $display("FAIL garbage %0b%0b%0b: g1=%0b p=%0b", a, b, cin, g1, p);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

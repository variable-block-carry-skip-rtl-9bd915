// tb_peres_and_tree: checks the Peres AND tree at widths 1 to 9.
//
// Widths up to 9 are driven exhaustively (at most 512 patterns each) and y is
// compared with the reduction AND of the inputs computed in the testbench.
module tb_peres_and_tree;
  localparam int unsigned MAXW = 9;
  int checks = 0, failures = 0;

  logic [MAXW-1:0] in;
  logic [MAXW:1]   y;

  for (genvar w = 1; w <= MAXW; w++) begin : g_w
    peres_and_tree #(.W(w)) dut (.in(in[w-1:0]), .y(y[w]));
  end

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < (1 << MAXW); v++) begin
      in = MAXW'(v);
      #1;
      for (int w = 1; w <= MAXW; w++) begin
        logic expect_y;
        if (v >= (1 << w)) continue;  // each width sees each of its patterns once
        expect_y = (v == (1 << w) - 1);
        checks++;
        if (y[w] != expect_y) begin
          failures++;
          $display("FAIL W=%0d in=%b y=%0b", w, in, y[w]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

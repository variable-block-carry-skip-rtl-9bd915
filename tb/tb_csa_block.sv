// tb_csa_block: checks the carry skip block at B = 4 (exhaustively, 512
// cases) and B = 5 and B = 7 (random).
//
// For every case the block sum and carry out are compared with the integer
// sum x + y + cin, the block propagate with the AND of x xor y, and the ripple
// carry with the carry out of the integer sum. The testbench counts the cases
// where the skip path is active (P = 1 with a carry in) and requires some.
// It also checks the per-block gate count 3B + 2.
module tb_csa_block;
  int checks = 0, failures = 0;
  int skips = 0;

  task automatic chk(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  // One DUT and driver per width.
  logic [6:0] x4, y4, x5, y5, x7, y7;
  logic       ci4, ci5, ci7;
  logic [3:0] s4;  logic co4, p4, r4;
  logic [4:0] s5;  logic co5, p5, r5;
  logic [6:0] s7;  logic co7, p7, r7;

  csa_block #(.B(4)) d4 (.x(x4[3:0]), .y(y4[3:0]), .cin(ci4), .s(s4), .cout(co4), .p_blk(p4), .c_rip(r4));
  csa_block #(.B(5)) d5 (.x(x5[4:0]), .y(y5[4:0]), .cin(ci5), .s(s5), .cout(co5), .p_blk(p5), .c_rip(r5));
  csa_block #(.B(7)) d7 (.x(x7),      .y(y7),      .cin(ci7), .s(s7), .cout(co7), .p_blk(p7), .c_rip(r7));

  // Compare one block's outputs with the reference for width w.
  task automatic compare(input int w, input logic [6:0] x, input logic [6:0] y, input logic ci,
                         input logic [6:0] s, input logic co, input logic p, input logic r);
    logic [7:0] ref_sum;
    logic [6:0] mask;
    mask    = 7'((1 << w) - 1);
    ref_sum = 8'(x & mask) + 8'(y & mask) + 8'(ci);
    chk((s & mask) == (ref_sum[6:0] & mask), $sformatf("B=%0d sum x=%h y=%h ci=%0b s=%h", w, x, y, ci, s));
    chk(co == ref_sum[w], $sformatf("B=%0d cout x=%h y=%h ci=%0b co=%0b", w, x, y, ci, co));
    chk(r == ref_sum[w], $sformatf("B=%0d c_rip", w));
    chk(p == (((x ^ y) & mask) == mask), $sformatf("B=%0d p_blk x=%h y=%h", w, x, y));
    if (p && ci) skips++;
  endtask

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    chk(d4.NUM_PERES == 14, "gate count B=4");
    chk(d7.NUM_PERES == 3 * 7 + 2, "gate count B=7");
    for (int v = 0; v < 512; v++) begin
      {ci4, x4[3:0], y4[3:0]} = 9'(v);
      x4[6:4] = '0; y4[6:4] = '0;
      #1;
      compare(4, x4, y4, ci4, 7'(s4), co4, p4, r4);
    end
    for (int n = 0; n < 2000; n++) begin
      x5 = 7'($urandom); y5 = 7'($urandom); ci5 = 1'($urandom);
      x7 = 7'($urandom); y7 = 7'($urandom); ci7 = 1'($urandom);
      if (n % 4 == 0) begin  // force full propagation now and then
        y5 = ~x5; y7 = ~x7; ci5 = 1'b1; ci7 = 1'b1;
      end
      #1;
      compare(5, x5, y5, ci5, 7'(s5), co5, p5, r5);
      compare(7, x7, y7, ci7, s7, co7, p7, r7);
    end
    chk(skips > 0, "skip path never exercised");
    $display("skip path active in %0d cases", skips);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

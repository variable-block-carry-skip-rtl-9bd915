// tb_carry_skip_adder: end-to-end test of the carry skip adder at its
// default size (30 bits, blocks 4,5,6,6,5,4).
//
// Random operands, operands built so that whole blocks propagate, the all-
// propagate case with a carry in (the carry crosses every block), and the
// extremes (0, all ones). Every result is compared with the integer sum
// x + y + cin; each block's propagate and carry out are compared with values
// derived from the same integer sum (the carry into bit i is bit i of
// x xor y xor sum). The test counts how often each mechanism happens and
// fails if one never does:
//   skip    - a block with P = 1 receives a carry and passes it on,
//   generate- a block with P = 0 produces a carry out itself,
//   kill    - a block with P = 0 absorbs an incoming carry,
//   through - a carry in at bit 0 travels out of the last block,
//   overflow- the adder's own carry out is 1.
module tb_carry_skip_adder;
  import csa_pkg::*;

  localparam int unsigned N = total_width(1'b1, 4, 6);
  localparam int unsigned T = 6;

  int checks = 0, failures = 0;
  int n_skip = 0, n_gen = 0, n_kill = 0, n_through = 0, n_ovf = 0;

  logic [N-1:0] x, y, s;
  logic         cin, cout;
  logic [T-1:0] blk_p, blk_cout;

  carry_skip_adder dut (.x(x), .y(y), .cin(cin), .s(s), .cout(cout),
                        .blk_p(blk_p), .blk_cout(blk_cout));

  task automatic chk(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  task automatic apply(input logic [N-1:0] xa, input logic [N-1:0] ya, input logic ca);
    logic [N:0] ref_sum, carries;
    x = xa; y = ya; cin = ca;
    #1;
    ref_sum = {1'b0, xa} + {1'b0, ya} + (N+1)'(ca);
    carries = {1'b0, xa ^ ya} ^ ref_sum;   // bit i: carry into bit i
    chk(s == ref_sum[N-1:0] && cout == ref_sum[N],
        $sformatf("sum %h + %h + %0b = %h/%0b got %h/%0b", xa, ya, ca, ref_sum[N-1:0], ref_sum[N], s, cout));
    for (int k = 0; k < int'(T); k++) begin
      int unsigned lsb = blk_lsb(1'b1, 4, T, k);
      int unsigned w   = blk_width(1'b1, 4, T, k);
      logic pk, cink, coutk;
      pk    = &(((xa ^ ya) >> lsb) | ~((N'(1) << w) - 1));
      cink  = carries[lsb];
      coutk = carries[lsb + w];
      chk(blk_p[k] == pk, $sformatf("block %0d propagate", k));
      chk(blk_cout[k] == coutk, $sformatf("block %0d carry out", k));
      if (pk && cink) n_skip++;
      if (!pk && coutk && !cink) n_gen++;
      if (!pk && cink && !coutk) n_kill++;
    end
    if (ca && cout && (&(xa ^ ya))) n_through++;
    if (ref_sum[N]) n_ovf++;
  endtask

  function automatic logic [N-1:0] rnd();
    return N'({$urandom, $urandom});
  endfunction

  initial begin
    #10000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [N-1:0] a, m;
    chk(N == 30, "default width is 30");
    apply('0, '0, 1'b0);
    apply('1, '1, 1'b1);
    apply('1, '0, 1'b1);            // carry crosses every block
    apply('0, '1, 1'b1);
    apply(N'(1), '1, 1'b0);
    for (int n = 0; n < 20000; n++) begin
      a = rnd();
      case (n % 4)
        0: apply(a, rnd(), 1'($urandom));
        1: apply(a, ~a, 1'($urandom));  // every block propagates
        2: begin                         // some blocks propagate
          m = rnd();
          apply(a, (~a & m) | (rnd() & ~m), 1'($urandom));
        end
        default: apply(a, ~a ^ (N'(1) << ($urandom % N)), 1'($urandom));
      endcase
    end
    $display("mechanisms: skip=%0d generate=%0d kill=%0d through=%0d overflow=%0d",
             n_skip, n_gen, n_kill, n_through, n_ovf);
    chk(n_skip > 0, "skip never happened");
    chk(n_gen > 0, "generate never happened");
    chk(n_kill > 0, "kill never happened");
    chk(n_through > 0, "carry through all blocks never happened");
    chk(n_ovf > 0, "overflow never happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

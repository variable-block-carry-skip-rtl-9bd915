// fixed_csa_harness: drives one fixed-block carry skip adder (T blocks of B
// bits) with random and all-propagate operands and compares every sum with
// the integer sum. Used by tb_table3_sizes, once per adder size; it runs
// when start rises and raises done with its check and failure counts.
module fixed_csa_harness #(
  parameter int unsigned B     = 4,
  parameter int unsigned T     = 1,
  parameter int unsigned NVEC  = 200
) (
  input  logic start,
  output logic done,
  output int   checks,
  output int   failures
);
  localparam int unsigned N = B * T;

  logic [N-1:0] x, y, s;
  logic         cin, cout;
  logic [T-1:0] blk_p, blk_cout;

  carry_skip_adder #(.VARIABLE(1'b0), .B(B), .T(T)) dut (
    .x(x), .y(y), .cin(cin), .s(s), .cout(cout), .blk_p(blk_p), .blk_cout(blk_cout)
  );

  function automatic logic [N-1:0] rnd();
    logic [N-1:0] v = '0;
    for (int i = 0; i < int'(N); i += 32) v = (v << 32) | N'($urandom);
    return v;
  endfunction

  initial begin
    done = 1'b0; checks = 0; failures = 0;
    x = '0; y = '0; cin = 1'b0;
    wait (start);
    for (int n = 0; n < int'(NVEC); n++) begin
      logic [N:0] ref_sum;
      x = rnd();
      case (n % 3)
        0: y = rnd();
        1: y = ~x;                               // carry crosses every block
        default: y = ~x ^ (N'(1) << ($urandom % N));  // stops in one block
      endcase
      cin = (n % 3 == 1) ? 1'b1 : 1'($urandom);
      #1;
      ref_sum = {1'b0, x} + {1'b0, y} + (N+1)'(cin);
      checks++;
      if ({cout, s} != ref_sum) begin
        failures++;
        if (failures < 5) $display("FAIL N=%0d B=%0d vector %0d", N, B, n);
      end
    end
    done = 1'b1;
  end
endmodule

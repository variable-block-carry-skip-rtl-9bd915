// tb_table3_sizes: fixed-block carry skip adders at every width of the
// delay comparison table, 4 to 4096 bits.
//
// The block size is the power of two nearest the optimum 1.73 sqrt(N):
//   N     4  8 16 32 64 128 256 512 1024 2048 4096
//   B     4  4  8  8 16  16  32  32   64   64  128
//   T     1  2  2  4  4   8   8  16   16   32   32
// Each adder is checked on random operands and on operands that make the
// carry cross every block. The testbench also prints the analytical
// worst-case delay, in gate levels, of the published block structure for
// each size (eq. 3 evaluated with the exact ceil(log2 B)).
module tb_table3_sizes;
  import csa_pkg::*;

  localparam int NCFG = 11;
  localparam int unsigned CB [NCFG] = '{4, 4, 8, 8, 16, 16, 32, 32, 64, 64, 128};
  localparam int unsigned CT [NCFG] = '{1, 2, 2, 4, 4, 8, 8, 16, 16, 32, 32};

  logic     start;
  logic     done [NCFG];
  int       c [NCFG];
  int       f [NCFG];

  for (genvar i = 0; i < NCFG; i++) begin : g_cfg
    fixed_csa_harness #(.B(CB[i]), .T(CT[i]), .NVEC(150)) h (
      .start(start), .done(done[i]), .checks(c[i]), .failures(f[i])
    );
  end

  int checks = 0, failures = 0;

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit all_done;
    start = 1'b0;
    #1 start = 1'b1;
    do begin
      #10;
      all_done = 1'b1;
      foreach (done[i]) all_done &= done[i];
    end while (!all_done);
    foreach (c[i]) begin
      checks += c[i];
      failures += f[i];
      $display("N=%0d B=%0d T=%0d: %0d sums checked, %0d wrong; T_fixed(eq. 3) = %0d gate levels",
               CB[i] * CT[i], CB[i], CT[i], c[i], f[i], t_worst(1'b0, CB[i], CT[i]));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

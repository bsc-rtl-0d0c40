// tb_wl_block_rule -- checks the block-length accuracy rule and that the
// MAC's default block length satisfies it.
//
// Evaluates bsc_pkg's judgement probability for 12-bit blocks and compares
// with values worked out by hand from the binomial formula: P = 0.63 for
// p = 0.2, q = 0.3; an average of 90.28 % over the 121 (p, q) pairs at
// d = 12 and 89.86 % at d = 11, hence a minimum block length of 12 bits for
// a 90 % threshold. It then instantiates the MAC at its defaults and checks
// that its block length (64/4 = 16) is at least that minimum.
module tb_wl_block_rule;
  import bsc_pkg::*;

  localparam int N = 16, BITLEN = 64, K = 4;
  localparam int MW = $clog2(BITLEN) + 1, PW = $clog2(N * BITLEN + 1);

  logic clk = 0, rst_n = 0, start = 0;
  logic ready, stall, out_valid, out_bit, out_sign, out_fill, out_remove, done;
  logic [PW-1:0] out_psi;
  logic x_sign [N], w_sign [N], blk_sign [K];
  logic [MW-1:0] x_mag [N], w_mag [N];

  bsc_mac dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  function automatic bit near(real a, real b, real tol);
    return (a - b < tol) && (b - a < tol);
  endfunction

  initial begin : watchdog
    repeat (1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    automatic real p12, p11, p23;
    for (int i = 0; i < N; i++) begin x_sign[i] = 0; w_sign[i] = 0; x_mag[i] = 0; w_mag[i] = 0; end
    p12 = block_sign_prob_avg(12);
    p11 = block_sign_prob_avg(11);
    p23 = block_sign_prob(12, 2, 3);
    $display("d=12: average %f, P(0.2 < 0.3) = %f; d=11: average %f", p12, p23, p11);
    check(near(p23, 0.6317, 0.0005), "P(0.2 < 0.3) at d = 12");
    check(near(p12, 0.9028, 0.0005), "average at d = 12");
    check(near(p11, 0.8986, 0.0005), "average at d = 11");
    check(near(block_sign_prob(12, 0, 0), 1.0, 1e-9), "p = q = 0 is always judged right");
    check(min_block_len(90) == 12, $sformatf("minimum length %0d", min_block_len(90)));
    check(dut.D_MIN == 12, "MAC's elaborated minimum");
    check(BITLEN / K >= dut.D_MIN, "default block length meets the rule");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

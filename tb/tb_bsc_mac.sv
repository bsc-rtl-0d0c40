// tb_bsc_mac -- end-to-end test of the BSC multiply-accumulate at its
// default size (16-element vectors, 64-bit streams, 4 blocks of 16 bits).
//
// Drives many dot products with random sign-magnitude operands drawn from
// several distributions, and for each one compares against a model built
// from bsc_ref_pkg: the Sobol streams, the products, every block's adder,
// and the output revision. Checks per operation: every output bit, the
// output sign, Psi, the blocks' local signs, that the output holds exactly
// min(Psi, 64) ones, the latency of 82 cycles from load to last bit and the
// 16 stall cycles. It also counts how often each mechanism occurred (fill,
// remove, pass-through with no revision, saturation, negative and positive
// result, a block whose local sign disagrees with the global sign, stalls)
// and fails if one never did. It reports the mean absolute error of the
// stochastic result against the exact real-valued dot product, over the
// dot products whose exact value lies in [-1, 1].
module tb_bsc_mac;
  import bsc_ref_pkg::*;

  localparam int N = 16, BITLEN = 64, K = 4, D = BITLEN / K;
  localparam int MW = $clog2(BITLEN) + 1;
  localparam int PW = $clog2(N * BITLEN + 1);
  localparam int NOPS = 300;

  logic clk = 0, rst_n = 0, start = 0;
  logic ready, stall, out_valid, out_bit, out_sign, out_fill, out_remove, done;
  logic [PW-1:0] out_psi;
  logic x_sign [N], w_sign [N], blk_sign [K];
  logic [MW-1:0] x_mag [N], w_mag [N];

  bsc_mac dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int cyc_count = 0;
  int n_fill = 0, n_remove = 0, n_pass = 0, n_sat = 0, n_neg = 0, n_pos = 0;
  int n_mismatch = 0, n_stall = 0;
  real mae_sum = 0.0;
  int n_mae = 0;

  always @(posedge clk) cyc_count++;

  initial begin : watchdog
    repeat (NOPS * 100 + 1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  task automatic run_op(int mode);
    int xs[N], ws[N], xm[N], wm[N];
    int pcp[], pcn[];
    int sp = 0, sn = 0, psi, phi = 0, ones = 0, t0, tlast, stalls = 0;
    int ap, an, ao, nf, nr;
    bit sg;
    bit tout[], temp[], expv[];
    bit lsign[K];
    real exact = 0.0, got;

    // operand distributions
    for (int i = 0; i < N; i++) begin
      xs[i] = $urandom_range(1, 0);
      ws[i] = $urandom_range(1, 0);
      case (mode)
        0: begin xm[i] = $urandom_range(BITLEN, 0); wm[i] = $urandom_range(BITLEN, 0); end
        1: begin xm[i] = $urandom_range(16, 0); wm[i] = $urandom_range(BITLEN, 0); end
        2: begin xm[i] = $urandom_range(BITLEN, 32); wm[i] = $urandom_range(BITLEN, 32);
                 ws[i] = xs[i]; end   // large, all positive: saturates
        default: begin xm[i] = $urandom_range(24, 0); wm[i] = $urandom_range(24, 0); end
      endcase
      x_sign[i] = xs[i][0];
      w_sign[i] = ws[i][0];
      x_mag[i]  = MW'(xm[i]);
      w_mag[i]  = MW'(wm[i]);
      exact += (xs[i] == ws[i] ? 1.0 : -1.0) * (real'(xm[i]) / BITLEN) * (real'(wm[i]) / BITLEN);
    end

    // reference model
    temp = new[BITLEN];
    for (int j = 0; j < K; j++) begin
      pcp = new[D];
      pcn = new[D];
      for (int c = 0; c < D; c++) begin
        int idx = j * D + c;
        pcp[c] = 0;
        pcn[c] = 0;
        for (int i = 0; i < N; i++) begin
          bit pb = (xm[i] > sobol_ref(0, idx, 6)) && (wm[i] > sobol_ref(1, idx, 6));
          if (pb) begin
            if (xs[i] == ws[i]) pcp[c]++;
            else pcn[c]++;
          end
        end
      end
      acc_ref(pcp, pcn, ap, an, sg, tout, ao);
      sp += ap;
      sn += an;
      phi += ao;
      lsign[j] = sg;
      for (int c = 0; c < D; c++) temp[j * D + c] = tout[c];
    end
    psi = (sp > sn) ? sp - sn : sn - sp;
    our_ref(psi, phi, temp, expv, nf, nr);

    // drive
    while (!ready) @(posedge clk);
    @(negedge clk);
    start = 1;
    t0 = cyc_count;            // the load cycle is cycle 1
    @(negedge clk);
    start = 0;
    tlast = t0;
    for (int t = 0; t < BITLEN; t++) begin
      while (!out_valid) begin
        if (stall) stalls++;
        @(negedge clk);
      end
      if (t == 0) begin
        check(out_sign == (sp > sn), "sign");
        check(32'(out_psi) == psi, $sformatf("psi %0d vs %0d", out_psi, psi));
        for (int j = 0; j < K; j++) check(blk_sign[j] == lsign[j], "local sign");
      end
      check(out_bit == expv[t], $sformatf("bit %0d", t));
      ones += int'(out_bit);
      if (out_fill) n_fill++;
      if (out_remove) n_remove++;
      if (t == BITLEN - 1) begin
        check(done == 1'b1, "done on last bit");
        tlast = cyc_count;
      end else check(done == 1'b0, "done early");
      @(negedge clk);
    end
    check(out_valid == 1'b0, "valid after last bit");
    check(ones == ((psi < BITLEN) ? psi : BITLEN), $sformatf("ones %0d psi %0d", ones, psi));
    check(tlast - t0 + 1 == D + BITLEN + 2, $sformatf("latency %0d", tlast - t0 + 1));
    check(stalls == D, $sformatf("stalls %0d", stalls));
    n_stall += stalls;

    if (nf == 0 && nr == 0) n_pass++;
    if (psi > BITLEN) n_sat++;
    if (sp > sn) n_pos++; else n_neg++;
    for (int j = 0; j < K; j++) if (lsign[j] != (sp > sn) && psi != 0) n_mismatch++;
    got = (sp > sn ? 1.0 : -1.0) * real'(ones) / BITLEN;
    if (exact <= 1.0 && exact >= -1.0) begin
      mae_sum += (got > exact) ? got - exact : exact - got;
      n_mae++;
    end
  endtask

  initial begin
    for (int i = 0; i < N; i++) begin
      x_sign[i] = 0; w_sign[i] = 0; x_mag[i] = 0; w_mag[i] = 0;
    end
    repeat (3) @(posedge clk);
    @(negedge clk);
    rst_n = 1;
    for (int op = 0; op < NOPS; op++) run_op(op % 4);
    $display("mechanisms: fill=%0d remove=%0d pass=%0d saturate=%0d neg=%0d pos=%0d local_sign_mismatch=%0d stall_cycles=%0d",
             n_fill, n_remove, n_pass, n_sat, n_neg, n_pos, n_mismatch, n_stall);
    $display("MAE over %0d dot products with |exact| <= 1: %f", n_mae, mae_sum / n_mae);
    check(n_fill > 0, "fill never happened");
    check(n_remove > 0, "remove never happened");
    check(n_pass > 0, "pass-through never happened");
    check(n_sat > 0, "saturation never happened");
    check(n_neg > 0 && n_pos > 0, "both signs");
    check(n_mismatch > 0, "local/global sign mismatch never happened");
    check(n_stall > 0, "no stall");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

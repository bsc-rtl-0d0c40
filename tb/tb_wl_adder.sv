// tb_wl_adder -- multi-input addition workload: 2, 4, 8, 16 and 32 random
// inputs in [-1, 1] as 64-bit streams, added with 4 blocks of 16 bits.
//
// The MAC is used as an adder by setting every weight to +1 (magnitude 64):
// the weight stream is then all ones and the product stream equals the
// input stream. Unused lanes get magnitude 0. Two MACs receive the same
// inputs: one at the default size (16 lanes, used for up to 16 inputs) and
// one with 32 lanes (used for all sizes, the only one for 32 inputs).
// Because of the output revision each result must hold exactly
// min(|sum of input ones|, 64) ones with the sign of the sum; the test
// checks this, the full bit pattern against the reference model, and prints
// the mean absolute error against the exact sum (nonzero only where the sum
// leaves [-1, 1]).
module tb_wl_adder;
  import bsc_ref_pkg::*;

  localparam int BITLEN = 64, K = 4, NMAX = 32, NRUN = 100;
  localparam int MW = $clog2(BITLEN) + 1;
  localparam int SIZES [5] = '{2, 4, 8, 16, 32};

  logic clk = 0, rst_n = 0, start = 0;
  always #5 clk = ~clk;

  logic x_sign [NMAX], w_sign [NMAX];
  logic [MW-1:0] x_mag [NMAX], w_mag [NMAX];

  // default-size MAC: the first 16 lanes
  localparam int N16 = 16;
  logic a_ready, a_stall, a_valid, a_bit, a_sign, a_fill, a_remove, a_done;
  logic [$clog2(N16 * BITLEN + 1)-1:0] a_psi;
  logic a_blk [K];
  logic a_xs [N16], a_ws [N16];
  logic [MW-1:0] a_xm [N16], a_wm [N16];
  always_comb
    for (int i = 0; i < N16; i++) begin
      a_xs[i] = x_sign[i]; a_ws[i] = w_sign[i]; a_xm[i] = x_mag[i]; a_wm[i] = w_mag[i];
    end

  bsc_mac dut16 (
    .clk, .rst_n, .start, .ready(a_ready), .x_sign(a_xs), .x_mag(a_xm), .w_sign(a_ws),
    .w_mag(a_wm), .stall(a_stall), .out_valid(a_valid), .out_bit(a_bit), .out_sign(a_sign),
    .out_fill(a_fill), .out_remove(a_remove), .out_psi(a_psi), .done(a_done), .blk_sign(a_blk)
  );

  // 32-lane MAC
  logic b_ready, b_stall, b_valid, b_bit, b_sign, b_fill, b_remove, b_done;
  logic [$clog2(NMAX * BITLEN + 1)-1:0] b_psi;
  logic b_blk [K];

  bsc_mac #(.N(NMAX), .BITLEN(BITLEN), .K(K)) dut32 (
    .clk, .rst_n, .start, .ready(b_ready), .x_sign(x_sign), .x_mag(x_mag), .w_sign(w_sign),
    .w_mag(w_mag), .stall(b_stall), .out_valid(b_valid), .out_bit(b_bit), .out_sign(b_sign),
    .out_fill(b_fill), .out_remove(b_remove), .out_psi(b_psi), .done(b_done), .blk_sign(b_blk)
  );

  int checks = 0, failures = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  initial begin : watchdog
    repeat (5 * NRUN * 100 + 1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < NMAX; i++) begin
      x_sign[i] = 0; w_sign[i] = 1; x_mag[i] = 0; w_mag[i] = MW'(BITLEN);
    end
    repeat (2) @(negedge clk);
    rst_n = 1;
    foreach (SIZES[s]) begin
      automatic real mae = 0.0;
      automatic bit use16 = SIZES[s] <= N16;
      for (int r = 0; r < NRUN; r++) begin
        automatic int xs[] = new[NMAX], xm[] = new[NMAX], ws[] = new[NMAX], wm[] = new[NMAX];
        automatic int ssum = 0, asum, ones16 = 0, ones32 = 0, psi, nf, nr;
        automatic bit res[], sgn, lsign[];
        automatic real got;
        for (int i = 0; i < NMAX; i++) begin
          xs[i] = $urandom_range(1, 0);
          xm[i] = (i < SIZES[s]) ? $urandom_range(BITLEN, 0) : 0;
          ws[i] = 1;
          wm[i] = BITLEN;
          x_sign[i] = xs[i][0];
          x_mag[i] = MW'(xm[i]);
          ssum += (xs[i] != 0) ? xm[i] : -xm[i];
        end
        asum = (ssum < 0) ? -ssum : ssum;
        mac_ref(NMAX, BITLEN, K, xs, xm, ws, wm, res, sgn, psi, lsign, nf, nr);
        @(negedge clk);
        start = 1;
        @(negedge clk);
        start = 0;
        for (int t = 0; t < BITLEN; t++) begin
          while (!b_valid) @(negedge clk);
          check(b_bit == res[t], $sformatf("n=%0d run %0d bit %0d", SIZES[s], r, t));
          if (use16) check(a_valid && a_bit == res[t], $sformatf("n=%0d run %0d bit %0d (16 lanes)", SIZES[s], r, t));
          ones32 += int'(b_bit);
          ones16 += int'(a_bit);
          if (t == 0) begin
            check(b_sign == (ssum > 0) && int'(b_psi) == asum, "sign/psi");
            if (use16) check(a_sign == (ssum > 0) && int'(a_psi) == asum, "sign/psi (16 lanes)");
          end
          @(negedge clk);
        end
        check(ones32 == (asum < BITLEN ? asum : BITLEN),
              $sformatf("n=%0d run %0d ones %0d sum %0d", SIZES[s], r, ones32, ssum));
        if (use16) check(ones16 == ones32, "16-lane count");
        got = (b_sign ? 1.0 : -1.0) * real'(ones32) / BITLEN;
        mae += (got > real'(ssum) / BITLEN) ? got - real'(ssum) / BITLEN : real'(ssum) / BITLEN - got;
      end
      $display("adder with %0d inputs: MAE %f over %0d sums", SIZES[s], mae / NRUN, NRUN);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

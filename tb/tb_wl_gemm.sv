// tb_wl_gemm -- GEMM workload: the product of two 16x16 matrices with
// entries in [-1, 1], as 256 dot products of 16 elements, at stream lengths
// 8, 16, 32, 64 and 128 bits with a block length of 16 (one block when the
// stream is shorter): k = 1, 1, 2, 4, 8. The 64-bit MAC is the default
// configuration; the others override BITLEN and K. The same real-valued
// matrices are quantized to each stream length. Every result stream is
// checked bit for bit against the reference model, and the mean absolute
// error against the exact product of the quantized matrices is printed per
// stream length.
module tb_wl_gemm;
  import bsc_ref_pkg::*;

  localparam int N = 16, NL = 5;
  localparam int LENS [NL] = '{8, 16, 32, 64, 128};
  localparam int KS   [NL] = '{1, 1, 2, 4, 8};

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  real a_v [N][N], b_v [N][N];
  bit  fin [NL];

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  initial begin : watchdog
    repeat (N * N * 200 + 1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int r = 0; r < N; r++)
      for (int c = 0; c < N; c++) begin
        a_v[r][c] = (real'($urandom_range(2000, 0)) - 1000.0) / 1000.0;
        b_v[r][c] = (real'($urandom_range(2000, 0)) - 1000.0) / 1000.0;
      end
    repeat (2) @(negedge clk);
    rst_n = 1;
  end

  for (genvar g = 0; g < NL; g++) begin : g_len
    localparam int BITLEN = LENS[g], K = KS[g];
    localparam int MW = $clog2(BITLEN) + 1, PW = $clog2(N * BITLEN + 1);

    logic start = 0;
    logic ready, stall, out_valid, out_bit, out_sign, out_fill, out_remove, done;
    logic [PW-1:0] out_psi;
    logic x_sign [N], w_sign [N], blk_sign [K];
    logic [MW-1:0] x_mag [N], w_mag [N];

    bsc_mac #(.N(N), .BITLEN(BITLEN), .K(K)) dut (.*);

    function automatic int qmag(real v);
      real a = (v < 0.0) ? -v : v;
      return int'(a * BITLEN);   // rounds to nearest
    endfunction

    initial begin
      automatic real mae = 0.0;
      fin[g] = 0;
      for (int i = 0; i < N; i++) begin x_sign[i] = 0; w_sign[i] = 0; x_mag[i] = 0; w_mag[i] = 0; end
      wait (rst_n);
      for (int r = 0; r < N; r++)
        for (int c = 0; c < N; c++) begin
          automatic int xs[] = new[N], xm[] = new[N], ws[] = new[N], wm[] = new[N];
          automatic int psi, nf, nr, ones = 0;
          automatic bit res[], sgn, lsign[];
          automatic real exact = 0.0, got;
          for (int i = 0; i < N; i++) begin
            xs[i] = int'(a_v[r][i] >= 0.0); xm[i] = qmag(a_v[r][i]);
            ws[i] = int'(b_v[i][c] >= 0.0); wm[i] = qmag(b_v[i][c]);
            x_sign[i] = xs[i][0]; x_mag[i] = MW'(xm[i]);
            w_sign[i] = ws[i][0]; w_mag[i] = MW'(wm[i]);
            exact += (xs[i] == ws[i] ? 1.0 : -1.0) * real'(xm[i] * wm[i]) / (BITLEN * BITLEN);
          end
          mac_ref(N, BITLEN, K, xs, xm, ws, wm, res, sgn, psi, lsign, nf, nr);
          @(negedge clk);
          while (!ready) @(negedge clk);
          start = 1;
          @(negedge clk);
          start = 0;
          for (int t = 0; t < BITLEN; t++) begin
            while (!out_valid) @(negedge clk);
            check(out_bit == res[t], $sformatf("n=%0d C[%0d][%0d] bit %0d", BITLEN, r, c, t));
            if (t == 0) check(out_sign == sgn && int'(out_psi) == psi,
                              $sformatf("n=%0d C[%0d][%0d] sign/psi", BITLEN, r, c));
            ones += int'(out_bit);
            @(negedge clk);
          end
          got = (sgn ? 1.0 : -1.0) * real'(ones) / BITLEN;
          mae += (got > exact) ? got - exact : exact - got;
        end
      $display("16x16 GEMM, %0d-bit streams, k=%0d: MAE %f", BITLEN, K, mae / (N * N));
      fin[g] = 1;
    end
  end

  initial begin
    automatic bit all_fin = 0;
    #1;
    while (!all_fin) begin
      @(negedge clk);
      all_fin = 1;
      for (int g = 0; g < NL; g++) if (!fin[g]) all_fin = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

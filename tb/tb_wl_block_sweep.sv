// tb_wl_block_sweep -- block-count exploration workload: MAC of two
// 16-element vectors with 64-bit streams on seven MACs with k = 1, 2, 4, 8,
// 16, 32, 64 blocks (d = 64, 32, ..., 1), all fed the same operands.
// Per operation and k it checks the latency from load to last result bit
// (130, 98, 82, 74, 70, 68, 67 cycles), the stall count (d) and every result
// bit against the reference model, and it prints per k the mean absolute
// error against the exact dot product (for |exact| <= 1).
module tb_wl_block_sweep;
  import bsc_ref_pkg::*;

  localparam int N = 16, BITLEN = 64, NK = 7, NOPS = 60;
  localparam int KS [NK] = '{1, 2, 4, 8, 16, 32, 64};
  localparam int EXP_CYC [NK] = '{130, 98, 82, 74, 70, 68, 67};
  localparam int MW = $clog2(BITLEN) + 1, PW = $clog2(N * BITLEN + 1);

  logic clk = 0, rst_n = 0, start = 0;
  logic x_sign [N], w_sign [N];
  logic [MW-1:0] x_mag [N], w_mag [N];
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  initial begin : watchdog
    repeat (NOPS * 200 + 1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // per-k capture of one operation
  logic          cap_bits [NK][BITLEN];
  logic          cap_sign [NK];
  int            cap_cycles [NK], cap_stalls [NK];
  logic          all_done [NK];
  logic          ready_v [NK];

  for (genvar g = 0; g < NK; g++) begin : g_k
    logic ready, stall, out_valid, out_bit, out_sign, out_fill, out_remove, done;
    logic [PW-1:0] out_psi;
    logic blk_sign [KS[g]];
    int t, cyc;

    bsc_mac #(.N(N), .BITLEN(BITLEN), .K(KS[g])) u_mac (
      .clk, .rst_n, .start, .ready, .x_sign, .x_mag, .w_sign, .w_mag, .stall, .out_valid,
      .out_bit, .out_sign, .out_fill, .out_remove, .out_psi, .done, .blk_sign
    );
    assign ready_v[g] = ready;

    always @(negedge clk) begin
      if (start && ready) begin
        t = 0;
        cyc = 1;
        cap_stalls[g] = 0;
        all_done[g] = 0;
      end else if (!all_done[g]) begin
        cyc++;
        if (stall) cap_stalls[g]++;
        if (out_valid) begin
          cap_bits[g][t] = out_bit;
          cap_sign[g] = out_sign;
          t++;
        end
        if (done) begin
          all_done[g] = 1;
          cap_cycles[g] = cyc;
        end
      end
    end
  end

  initial begin
    automatic real mae [NK];
    automatic int n_mae = 0;
    for (int g = 0; g < NK; g++) begin mae[g] = 0.0; all_done[g] = 1; end
    for (int i = 0; i < N; i++) begin x_sign[i] = 0; w_sign[i] = 0; x_mag[i] = 0; w_mag[i] = 0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int op = 0; op < NOPS; op++) begin
      automatic int xs[] = new[N], xm[] = new[N], ws[] = new[N], wm[] = new[N];
      automatic real exact = 0.0;
      automatic bit busy = 1;
      for (int i = 0; i < N; i++) begin
        xs[i] = $urandom_range(1, 0); ws[i] = $urandom_range(1, 0);
        xm[i] = $urandom_range((op % 2 != 0) ? 24 : BITLEN, 0); wm[i] = $urandom_range(BITLEN, 0);
        x_sign[i] = xs[i][0]; x_mag[i] = MW'(xm[i]);
        w_sign[i] = ws[i][0]; w_mag[i] = MW'(wm[i]);
        exact += (xs[i] == ws[i] ? 1.0 : -1.0) * real'(xm[i] * wm[i]) / (BITLEN * BITLEN);
      end
      for (int g = 0; g < NK; g++) check(ready_v[g], "all ready");
      start = 1;
      @(negedge clk);
      start = 0;
      while (busy) begin
        busy = 0;
        for (int g = 0; g < NK; g++) if (!all_done[g]) busy = 1;
        if (busy) @(negedge clk);
      end
      if (exact <= 1.0 && exact >= -1.0) n_mae++;
      for (int g = 0; g < NK; g++) begin
        automatic int psi, nf, nr, ones = 0;
        automatic bit res[], sgn, lsign[];
        automatic real got;
        mac_ref(N, BITLEN, KS[g], xs, xm, ws, wm, res, sgn, psi, lsign, nf, nr);
        check(cap_cycles[g] == EXP_CYC[g], $sformatf("k=%0d cycles %0d", KS[g], cap_cycles[g]));
        check(cap_stalls[g] == BITLEN / KS[g], $sformatf("k=%0d stalls %0d", KS[g], cap_stalls[g]));
        check(cap_sign[g] == sgn, $sformatf("k=%0d sign", KS[g]));
        for (int t = 0; t < BITLEN; t++) begin
          check(cap_bits[g][t] == res[t], $sformatf("k=%0d op %0d bit %0d", KS[g], op, t));
          ones += int'(cap_bits[g][t]);
        end
        got = (sgn ? 1.0 : -1.0) * real'(ones) / BITLEN;
        if (exact <= 1.0 && exact >= -1.0) mae[g] += (got > exact) ? got - exact : exact - got;
      end
    end
    for (int g = 0; g < NK; g++)
      $display("k=%0d d=%0d: %0d cycles, %0d stalls, MAE %f", KS[g], BITLEN / KS[g], EXP_CYC[g],
               BITLEN / KS[g], mae[g] / n_mae);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_block_divider -- checks Stage 1 block division at the default size
// (16 operands, 64-bit streams, 4 blocks of 16 bits).
//
// For random magnitudes and every intra-block cycle, bit i of block j must be
// bit j*16+cyc of operand i's stream, computed from the reference Sobol
// table; over the 16 cycles all blocks together must deliver exactly `mag`
// ones per operand (the stream is cut, not altered).
module tb_block_divider;
  import bsc_ref_pkg::*;

  localparam int N = 16, BITLEN = 64, K = 4, D = BITLEN / K;
  localparam int MW = $clog2(BITLEN) + 1, CW = $clog2(D);

  logic [MW-1:0] mag [N];
  logic [CW-1:0] cyc;
  logic bits [K][N];

  block_divider #(.N(N), .BITLEN(BITLEN), .K(K), .DIM(1)) dut (.mag(mag), .cyc(cyc), .bits(bits));

  int checks = 0, failures = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  initial begin : watchdog
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int r = 0; r < 20; r++) begin
      int cnt[N];
      for (int i = 0; i < N; i++) begin
        mag[i] = MW'((r == 0) ? i * 4 : $urandom_range(BITLEN, 0));
        cnt[i] = 0;
      end
      for (int c = 0; c < D; c++) begin
        cyc = CW'(c);
        #1;
        for (int j = 0; j < K; j++)
          for (int i = 0; i < N; i++) begin
            check(bits[j][i] == (int'(mag[i]) > sobol_ref(1, j * D + c, 6)),
                  $sformatf("r=%0d c=%0d j=%0d i=%0d", r, c, j, i));
            cnt[i] += int'(bits[j][i]);
          end
      end
      for (int i = 0; i < N; i++) check(cnt[i] == int'(mag[i]), "ones per stream");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_acc_adder -- checks the intra-block accumulator-based adder.
//
// Part 1 (5 inputs, 4-bit blocks) replays three hand-worked examples of the
// design: three positive inputs 1101, 1000, 0110 and two negative inputs
// 0100, 1011 must give A_p = 2,4,5,6, A_n = 1,2,3,4, S_op = 1,1,0,0, sign 1
// and output 1100; the two error cases (positive '1's late / early) must
// give 0001 and 1110. Part 2 runs the default size (16 inputs, 16-bit
// blocks) on random inputs against the reference adder in bsc_ref_pkg,
// checking A_p, A_n, A_o, the local sign and all output bits.
module tb_acc_adder;
  import bsc_ref_pkg::*;

  logic clk = 0, rst_n = 0;
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
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- small instance: worked examples ----------------
  localparam int SN = 5, SD = 4;
  logic s_clear = 0, s_en = 0;
  logic s_sign [SN], s_bit [SN];
  logic [$clog2(SN*SD+1)-1:0] s_ap, s_an;
  logic [$clog2(SD+1)-1:0] s_ao;
  logic s_sgn, s_sop, s_son;
  logic [SD-1:0] s_tout;

  acc_adder #(.N(SN), .D(SD)) u_small (
    .clk(clk), .rst_n(rst_n), .clear(s_clear), .en(s_en), .in_sign(s_sign), .in_bit(s_bit),
    .ap(s_ap), .an(s_an), .ao(s_ao), .sign_o(s_sgn), .tout(s_tout), .sop_o(s_sop), .son_o(s_son)
  );

  // streams written first bit first; inputs 0..2 positive, 3..4 negative
  task automatic example(string name, string st[SN], int eap[SD], int ean[SD], string eout,
                         int esop[SD]);
    @(negedge clk);
    s_clear = 1;
    @(negedge clk);
    s_clear = 0;
    s_en = 1;
    for (int i = 0; i < SN; i++) s_sign[i] = (i < 3);
    for (int c = 0; c < SD; c++) begin
      for (int i = 0; i < SN; i++) s_bit[i] = (st[i][c] == "1");
      #1;
      if (esop[c] >= 0) check(s_sop == esop[c][0], $sformatf("%s S_op cycle %0d", name, c + 1));
      @(negedge clk);
      check(int'(s_ap) == eap[c] && int'(s_an) == ean[c],
            $sformatf("%s cycle %0d: ap=%0d an=%0d", name, c + 1, s_ap, s_an));
    end
    s_en = 0;
    check(s_sgn == 1'b1, {name, " sign"});
    for (int c = 0; c < SD; c++)
      check(s_tout[c] == (eout[c] == "1"), $sformatf("%s output bit %0d", name, c));
  endtask

  // ---------------- default instance: random ----------------
  localparam int N = 16, D = 16;
  logic clear = 0, en = 0;
  logic in_sign [N], in_bit [N];
  logic [$clog2(N*D+1)-1:0] ap, an;
  logic [$clog2(D+1)-1:0] ao;
  logic sgn, sop, son;
  logic [D-1:0] tout;

  acc_adder u_dut (
    .clk(clk), .rst_n(rst_n), .clear(clear), .en(en), .in_sign(in_sign), .in_bit(in_bit),
    .ap(ap), .an(an), .ao(ao), .sign_o(sgn), .tout(tout), .sop_o(sop), .son_o(son)
  );

  initial begin
    for (int i = 0; i < SN; i++) begin s_sign[i] = 0; s_bit[i] = 0; end
    for (int i = 0; i < N; i++) begin in_sign[i] = 0; in_bit[i] = 0; end
    repeat (2) @(negedge clk);
    rst_n = 1;

    example("fig4", '{"1101", "1000", "0110", "0100", "1011"},
            '{2, 4, 5, 6}, '{1, 2, 3, 4}, "1100", '{1, 1, 0, 0});
    example("case1", '{"0111", "0001", "0011", "1000", "1110"},
            '{0, 1, 3, 6}, '{2, 3, 4, 4}, "0001", '{0, 0, 0, 1});
    example("case2", '{"1110", "1000", "1100", "0001", "0111"},
            '{3, 5, 6, 6}, '{0, 1, 2, 4}, "1110", '{1, 1, 1, 0});

    for (int r = 0; r < 200; r++) begin
      int pcp[], pcn[];
      int eap, ean, eao;
      bit esg;
      bit etout[];
      automatic int dens_p = $urandom_range(100, 0), dens_n = $urandom_range(100, 0);
      pcp = new[D];
      pcn = new[D];
      @(negedge clk);
      clear = 1;
      for (int i = 0; i < N; i++) in_sign[i] = 1'($urandom);
      @(negedge clk);
      clear = 0;
      en = 1;
      for (int c = 0; c < D; c++) begin
        pcp[c] = 0;
        pcn[c] = 0;
        for (int i = 0; i < N; i++) begin
          in_bit[i] = $urandom_range(99, 0) < (in_sign[i] ? dens_p : dens_n);
          if (in_bit[i]) begin
            if (in_sign[i]) pcp[c]++;
            else pcn[c]++;
          end
        end
        @(negedge clk);
      end
      en = 0;
      acc_ref(pcp, pcn, eap, ean, esg, etout, eao);
      check(int'(ap) == eap && int'(an) == ean, $sformatf("rand %0d ap/an", r));
      check(int'(ao) == eao, $sformatf("rand %0d ao %0d vs %0d", r, ao, eao));
      check(sgn == esg, $sformatf("rand %0d sign", r));
      for (int c = 0; c < D; c++) check(tout[c] == etout[c], $sformatf("rand %0d bit %0d", r, c));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_our_unit -- checks the inter-block output revision.
//
// Part 1 (2 blocks of 4 bits) replays the hand-worked filling example: both
// blocks have A_p = 6, A_n = 4, A_o = 1 and output 0001, so Psi = 4, Phi = 2,
// sign 1, and the revised stream must be 1101 0001, with fills at the first
// two positions. Part 2 runs the default size (4 blocks of 16 bits) with
// random block results against the reference in bsc_ref_pkg, checking Psi,
// the sign, every output bit and fill/remove flag, and that the result
// holds exactly min(Psi, 64) ones.
module tb_our_unit;
  import bsc_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_fill = 0, n_remove = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  initial begin : watchdog
    repeat (40000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // small instance: N = 5 inputs, K = 2 blocks of D = 4
  localparam int SN = 5, SK = 2, SD = 4;
  logic s_load = 0, s_shift = 0;
  logic [$clog2(SN*SD+1)-1:0] s_ap [SK], s_an [SK];
  logic [$clog2(SD+1)-1:0] s_ao [SK];
  logic [SD-1:0] s_tin [SK];
  logic [$clog2(SN*SD*SK+1)-1:0] s_psi;
  logic [$clog2(SD*SK+1)-1:0] s_phi;
  logic s_sign, s_out, s_fill, s_remove;

  our_unit #(.N(SN), .K(SK), .D(SD)) u_small (
    .clk(clk), .rst_n(rst_n), .load(s_load), .shift(s_shift), .ap(s_ap), .an(s_an), .ao(s_ao),
    .tin(s_tin), .psi(s_psi), .phi(s_phi), .sign_o(s_sign), .out_bit(s_out), .fill(s_fill),
    .remove(s_remove)
  );

  // default instance
  localparam int N = 16, K = 4, D = 16, BITLEN = K * D;
  logic load = 0, shift = 0;
  logic [$clog2(N*D+1)-1:0] ap [K], an [K];
  logic [$clog2(D+1)-1:0] ao [K];
  logic [D-1:0] tin [K];
  logic [$clog2(N*D*K+1)-1:0] psi;
  logic [$clog2(D*K+1)-1:0] phi;
  logic sign_o, out_bit, fill, remove;

  our_unit u_dut (
    .clk(clk), .rst_n(rst_n), .load(load), .shift(shift), .ap(ap), .an(an), .ao(ao),
    .tin(tin), .psi(psi), .phi(phi), .sign_o(sign_o), .out_bit(out_bit), .fill(fill),
    .remove(remove)
  );

  initial begin
    for (int j = 0; j < SK; j++) begin s_ap[j] = 0; s_an[j] = 0; s_ao[j] = 0; s_tin[j] = 0; end
    for (int j = 0; j < K; j++) begin ap[j] = 0; an[j] = 0; ao[j] = 0; tin[j] = 0; end
    repeat (2) @(negedge clk);
    rst_n = 1;

    // ---- part 1: worked example ----
    begin
      automatic string exp_s = "11010001";
      for (int j = 0; j < SK; j++) begin
        s_ap[j] = 6; s_an[j] = 4; s_ao[j] = 1; s_tin[j] = 4'b1000;  // stream 0001, bit 0 first
      end
      s_load = 1;
      @(negedge clk);
      s_load = 0;
      check(int'(s_psi) == 4 && int'(s_phi) == 2 && s_sign, "example psi/phi/sign");
      s_shift = 1;
      for (int t = 0; t < SK * SD; t++) begin
        #1;
        check(s_out == (exp_s[t] == "1"), $sformatf("example bit %0d", t));
        check(s_fill == (t < 2), $sformatf("example fill flag %0d", t));
        @(negedge clk);
      end
      s_shift = 0;
      check(int'(s_phi) == 4, "example final phi");
    end

    // ---- part 2: random ----
    for (int r = 0; r < 300; r++) begin
      automatic int sp = 0, sn = 0, sphi = 0, epsi, nf, nr, ones = 0;
      bit temp[], res[];
      temp = new[BITLEN];
      for (int j = 0; j < K; j++) begin
        automatic int cnt = 0;
        ap[j] = 9'($urandom_range(N * D, 0));
        an[j] = 9'((r % 3 == 0) ? $urandom_range(N * D, 0) : $urandom_range(40, 0));
        for (int c = 0; c < D; c++) begin
          tin[j][c] = $urandom_range(3, 0) == 0;
          temp[j * D + c] = tin[j][c];
          cnt += int'(tin[j][c]);
        end
        ao[j] = 5'(cnt);
        sp += int'(ap[j]);
        sn += int'(an[j]);
        sphi += cnt;
      end
      epsi = (sp > sn) ? sp - sn : sn - sp;
      our_ref(epsi, sphi, temp, res, nf, nr);
      load = 1;
      @(negedge clk);
      load = 0;
      check(int'(psi) == epsi && sign_o == (sp > sn), $sformatf("rand %0d psi", r));
      shift = 1;
      for (int t = 0; t < BITLEN; t++) begin
        #1;
        check(out_bit == res[t], $sformatf("rand %0d bit %0d", r, t));
        n_fill += int'(fill);
        n_remove += int'(remove);
        ones += int'(out_bit);
        @(negedge clk);
      end
      shift = 0;
      check(ones == ((epsi < BITLEN) ? epsi : BITLEN), $sformatf("rand %0d ones", r));
    end
    check(n_fill > 0 && n_remove > 0, "fill and remove both exercised");
    $display("fills=%0d removes=%0d", n_fill, n_remove);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_sm_mult -- checks the sign-magnitude multiplier lanes exhaustively:
// product sign = XNOR of the signs (1 = positive), magnitude bit = AND.
module tb_sm_mult;
  localparam int N = 16;

  logic a_sign [N], a_bit [N], b_sign [N], b_bit [N], p_sign [N], p_bit [N];

  sm_mult #(.N(N)) dut (.*);

  int checks = 0, failures = 0;

  initial begin : watchdog
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int r = 0; r < 64; r++) begin
      for (int i = 0; i < N; i++) begin
        logic [3:0] v;
        v = 4'((r + i) % 16);
        a_sign[i] = v[3];
        b_sign[i] = v[2];
        a_bit[i]  = v[1];
        b_bit[i]  = v[0];
      end
      #1;
      for (int i = 0; i < N; i++) begin
        automatic bit es = (a_sign[i] == b_sign[i]);   // same signs give a positive product
        automatic bit eb = a_bit[i] && b_bit[i];
        checks += 2;
        if (p_sign[i] != es) failures++;
        if (p_bit[i] != eb) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_par_counter -- checks the parallel counter against a software count of
// the selected '1's, for all-ones, all-zeros and random inputs.
module tb_par_counter;
  localparam int N = 16;

  logic bits [N], sel [N];
  logic [$clog2(N+1)-1:0] count;

  par_counter #(.N(N)) dut (.*);

  int checks = 0, failures = 0;

  initial begin : watchdog
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int r = 0; r < 500; r++) begin
      automatic int e = 0;
      for (int i = 0; i < N; i++) begin
        bits[i] = (r == 0) ? 1'b1 : (r == 1) ? 1'b0 : 1'($urandom);
        sel[i]  = (r < 2) ? 1'b1 : 1'($urandom);
        if (bits[i] && sel[i]) e++;
      end
      #1;
      checks++;
      if (int'(count) != e) begin
        failures++;
        $display("FAIL r=%0d count=%0d expected=%0d", r, count, e);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

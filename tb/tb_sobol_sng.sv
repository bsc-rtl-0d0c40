// tb_sobol_sng -- checks the Sobol stochastic number generator.
//
// For both Sobol dimensions at a 64-bit stream, every magnitude 0..64 and
// every bit position: the bit must equal (mag > point) with the point taken
// from an independent table of direction numbers, and the stream must hold
// exactly `mag` ones. It also checks that AND-ing a dimension-0 stream with
// a dimension-1 stream gives exactly a*b/64 ones when a and b are
// multiples of 8, the property that makes the pair usable for multiplication.
module tb_sobol_sng;
  import bsc_ref_pkg::*;

  localparam int BITLEN = 64;
  localparam int MW = $clog2(BITLEN) + 1, IW = $clog2(BITLEN);

  logic [MW-1:0] mag0, mag1;
  logic [IW-1:0] idx;
  logic b0, b1;

  sobol_sng #(.BITLEN(BITLEN), .DIM(0)) u0 (.mag(mag0), .idx(idx), .bit_o(b0));
  sobol_sng #(.BITLEN(BITLEN), .DIM(1)) u1 (.mag(mag1), .idx(idx), .bit_o(b1));

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
    for (int m = 0; m <= BITLEN; m++) begin
      automatic int c0 = 0, c1 = 0;
      for (int t = 0; t < BITLEN; t++) begin
        mag0 = MW'(m);
        mag1 = MW'(m);
        idx  = IW'(t);
        #1;
        check(b0 == (m > sobol_ref(0, t, IW)), $sformatf("dim0 m=%0d t=%0d", m, t));
        check(b1 == (m > sobol_ref(1, t, IW)), $sformatf("dim1 m=%0d t=%0d", m, t));
        c0 += int'(b0);
        c1 += int'(b1);
      end
      check(c0 == m && c1 == m, $sformatf("ones count m=%0d: %0d %0d", m, c0, c1));
    end
    for (int a = 0; a <= BITLEN; a += 8)
      for (int b = 0; b <= BITLEN; b += 8) begin
        automatic int c = 0;
        for (int t = 0; t < BITLEN; t++) begin
          mag0 = MW'(a);
          mag1 = MW'(b);
          idx  = IW'(t);
          #1;
          c += int'(b0 && b1);
        end
        check(c == a * b / BITLEN, $sformatf("product %0d*%0d: %0d", a, b, c));
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

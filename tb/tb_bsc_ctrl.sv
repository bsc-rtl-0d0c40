// tb_bsc_ctrl -- checks the operation sequence for every block count the
// design explores on 64-bit streams: k = 1, 2, 4, 8, 16, 32, 64 (block length
// d = 64/k). From the load cycle to the last output bit, both counted, an
// operation must take 130, 98, 82, 74, 70, 68, 67 cycles with 64, 32, 16, 8,
// 4, 2, 1 stall cycles, i.e. d + 66 cycles and d stalls. It also checks that
// cyc counts 0..d-1 in the stall cycles, that exactly one revision cycle
// and 64 output cycles occur, and that start is ignored while busy.
module tb_bsc_ctrl;
  import bsc_pkg::*;

  localparam int BITLEN = 64;
  localparam int KS [7] = '{1, 2, 4, 8, 16, 32, 64};
  localparam int EXP_CYC [7] = '{130, 98, 82, 74, 70, 68, 67};

  logic clk = 0, rst_n = 0;
  logic start [7];
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
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic ready [7], load [7], acc_en [7], rev [7], outp [7], done [7], stall [7];
  logic [5:0] cyc [7];
  ctrl_state_t st [7];

  for (genvar g = 0; g < 7; g++) begin : g_k
    localparam int KK = KS[g];
    localparam int DD = BITLEN / KK;
    localparam int CW = (DD > 1) ? $clog2(DD) : 1;
    logic [CW-1:0] c;
    bsc_ctrl #(.BITLEN(BITLEN), .K(KK)) u (
      .clk(clk), .rst_n(rst_n), .start(start[g]), .ready(ready[g]), .load_o(load[g]),
      .acc_en(acc_en[g]), .cyc(c), .rev_o(rev[g]), .out_o(outp[g]), .done_o(done[g]),
      .stall(stall[g]), .state_o(st[g])
    );
    assign cyc[g] = 6'(c);
  end

  task automatic run(int g);
    int d = BITLEN / KS[g];
    int cycles = 0, stalls = 0, revs = 0, outs = 0, next_cyc = 0;
    bit seen_done = 0;
    @(negedge clk);
    check(ready[g], "ready before start");
    start[g] = 1;
    #1;
    check(load[g], "load in start cycle");
    while (!seen_done) begin
      cycles++;
      if (stall[g]) begin
        check(acc_en[g] && int'(cyc[g]) == next_cyc, $sformatf("k=%0d cyc", KS[g]));
        next_cyc++;
        stalls++;
      end
      if (rev[g]) revs++;
      if (outp[g]) outs++;
      if (done[g]) seen_done = 1;
      @(negedge clk);
      start[g] = (cycles == 3);    // a start while busy must be ignored
      #1;
      if (cycles == 3) check(!load[g], "start ignored while busy");
      if (cycles > 500) break;
    end
    start[g] = 0;
    check(cycles == EXP_CYC[g], $sformatf("k=%0d cycles %0d expected %0d", KS[g], cycles, EXP_CYC[g]));
    check(stalls == d, $sformatf("k=%0d stalls %0d", KS[g], stalls));
    check(revs == 1 && outs == BITLEN, $sformatf("k=%0d rev=%0d out=%0d", KS[g], revs, outs));
    check(ready[g], "ready after done");
  endtask

  initial begin
    for (int g = 0; g < 7; g++) start[g] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int g = 0; g < 7; g++) begin
      run(g);
      run(g);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

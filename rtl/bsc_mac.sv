// bsc_mac -- block-based stochastic computing (BSC) multiply-accumulate.
//
// Computes sum_i x_i * w_i for two N-element vectors in sign-magnitude
// stochastic form and returns the result as a sign bit plus a BITLEN-bit
// unipolar bitstream whose count of '1's is min(|sum|*BITLEN, BITLEN).
// Operands enter as binary sign (1 = positive) and magnitude (0..BITLEN, in
// units of 1/BITLEN); all arithmetic in between is stochastic:
//   Stage 1  block_divider: each operand's BITLEN-bit Sobol stream is split
//            into K blocks of D = BITLEN/K bits, and all blocks are fed in
//            parallel, one bit per block per cycle.
//   Stage 2  per block: N sign-magnitude multipliers (XNOR/AND) feed one
//            accumulator-based adder (acc_adder), which decides its output
//            bits as it goes and its sign at the end of the block.
//   Stage 3  our_unit: output revision across blocks fixes the number of
//            '1's to the exact one and streams the result out serially.
// bsc_ctrl sequences the phases.
//
// Interface and timing: rst_n is a synchronous active-low reset that every
// block uses (a choice of this design). When ready is high, a cycle with start high loads
// x_*/w_*. The result follows D+1 cycles later as BITLEN cycles of out_valid
// with out_bit (stream order: block 0 first), out_sign stable throughout and
// done on the last bit; load to last bit is D + BITLEN + 2 cycles (82 at the
// defaults), D of them stall cycles (stall high). out_psi gives the exact
// revision target Psi in binary during output, and blk_sign the
// local sign each block's adder chose (valid from the revision cycle). out_fill/out_remove flag the
// output bits that OUR changed.
//
// D_MIN, computed at elaboration from THETA_PCT (bsc_pkg::min_block_len),
// is the shortest block length for which a block's local sign matches the
// global sign often enough; a shorter block only draws a simulation warning,
// since it still computes correctly (the revision stage repairs the count).
//
// The defaults follow the design's main configuration: 16-element vectors,
// 64-bit streams, k = 4 blocks of d = 16 bits. The binary operand interface
// and on-the-fly Sobol generation are this design's choices.
module bsc_mac
  import bsc_pkg::*;
#(
  parameter int unsigned N      = 16,  // vector length
  parameter int unsigned BITLEN = 64,  // stream length n
  parameter int unsigned K      = 4,   // number of blocks k
  parameter int unsigned THETA_PCT = 90,  // accuracy threshold of the block-length rule
  localparam int unsigned D     = BITLEN / K,
  localparam int unsigned MW    = $clog2(BITLEN) + 1,
  localparam int unsigned PW    = $clog2(N * BITLEN + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  output logic          ready,
  input  logic          x_sign [N],
  input  logic [MW-1:0] x_mag  [N],
  input  logic          w_sign [N],
  input  logic [MW-1:0] w_mag  [N],
  output logic          stall,
  output logic          out_valid,
  output logic          out_bit,
  output logic          out_sign,
  output logic          out_fill,
  output logic          out_remove,
  output logic [PW-1:0] out_psi,
  output logic          done,
  output logic          blk_sign [K]   // local sign of each block's adder
);
  localparam int unsigned CW = (D > 1) ? $clog2(D) : 1;
  // Shortest block for which a block's local sign agrees with the global one
  // with THETA_PCT percent average probability (12 bits for 90 %).
  localparam int unsigned D_MIN = min_block_len(THETA_PCT);
  localparam int unsigned AW = $clog2(N * D + 1);
  localparam int unsigned OW = $clog2(D + 1);

  // ---------------- control ----------------
  logic          load, acc_en, rev, outp;
  logic [CW-1:0] cyc;
  ctrl_state_t   state;

  bsc_ctrl #(.BITLEN(BITLEN), .K(K)) u_ctrl (
    .clk    (clk),
    .rst_n  (rst_n),
    .start  (start),
    .ready  (ready),
    .load_o (load),
    .acc_en (acc_en),
    .cyc    (cyc),
    .rev_o  (rev),
    .out_o  (outp),
    .done_o (done),
    .stall  (stall),
    .state_o(state)
  );

  // ---------------- operand registers ----------------
  logic          xs_q [N];
  logic          ws_q [N];
  logic [MW-1:0] xm_q [N];
  logic [MW-1:0] wm_q [N];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int i = 0; i < N; i++) begin
        xs_q[i] <= 1'b0;
        ws_q[i] <= 1'b0;
        xm_q[i] <= '0;
        wm_q[i] <= '0;
      end
    end else if (load) begin
      xs_q <= x_sign;
      ws_q <= w_sign;
      xm_q <= x_mag;
      wm_q <= w_mag;
    end
  end

  // ---------------- stage 1: block division ----------------
  logic x_bits [K][N];
  logic w_bits [K][N];

  block_divider #(.N(N), .BITLEN(BITLEN), .K(K), .DIM(0)) u_div_x (
    .mag(xm_q), .cyc(cyc), .bits(x_bits)
  );
  block_divider #(.N(N), .BITLEN(BITLEN), .K(K), .DIM(1)) u_div_w (
    .mag(wm_q), .cyc(cyc), .bits(w_bits)
  );

  // ---------------- stage 2: intra-block multiply and add ----------------
  logic [AW-1:0] blk_ap   [K];
  logic [AW-1:0] blk_an   [K];
  logic [OW-1:0] blk_ao   [K];
  logic [D-1:0]  blk_tout [K];

  for (genvar j = 0; j < K; j++) begin : g_blk
    logic p_sign [N];
    logic p_bit  [N];

    sm_mult #(.N(N)) u_mul (
      .a_sign(xs_q), .a_bit(x_bits[j]),
      .b_sign(ws_q), .b_bit(w_bits[j]),
      .p_sign(p_sign), .p_bit(p_bit)
    );

    acc_adder #(.N(N), .D(D)) u_add (
      .clk    (clk),
      .rst_n  (rst_n),
      .clear  (load),
      .en     (acc_en),
      .in_sign(p_sign),
      .in_bit (p_bit),
      .ap     (blk_ap[j]),
      .an     (blk_an[j]),
      .ao     (blk_ao[j]),
      .sign_o (blk_sign[j]),
      .tout   (blk_tout[j]),
      .sop_o  (),
      .son_o  ()
    );
  end

  // ---------------- stage 3: output revision ----------------
  our_unit #(.N(N), .K(K), .D(D)) u_our (
    .clk    (clk),
    .rst_n  (rst_n),
    .load   (rev),
    .shift  (outp),
    .ap     (blk_ap),
    .an     (blk_an),
    .ao     (blk_ao),
    .tin    (blk_tout),
    .psi    (out_psi),
    .phi    (),
    .sign_o (out_sign),
    .out_bit(out_bit),
    .fill   (out_fill),
    .remove (out_remove)
  );

  assign out_valid = outp;

  initial begin
    assert (D >= D_MIN)
      else $warning("block length %0d is below the %0d bits the accuracy rule asks for", D, D_MIN);
  end

  a_state_legal: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid |-> state == ST_OUT);

endmodule

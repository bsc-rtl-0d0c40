// acc_adder -- intra-block accumulator-based adder (ACCADD) for one block.
//
// Adds N sign-magnitude bitstreams of D bits each and produces a D-bit
// sign-magnitude result stream. Every cycle in which `en` is high it takes
// one bit of every input:
//   * two parallel counters add the new '1's of the positive inputs to A_p
//     and of the negative inputs to A_n (the inputs' sign bits pick the side);
//   * with the updated accumulators it forms A_p-A_n and A_n-A_p;
//   * S_op = (A_p-A_n > A_op) and S_on = (A_n-A_p > A_on), where A_op/A_on
//     count the '1's already emitted on each candidate output; the new
//     S_op/S_on bits are added to A_op/A_on and stored.
// So each candidate output emits a '1' whenever it is behind the running
// signed sum, which keeps its '1's evenly spread. Only after all D bits is
// the local sign known: sign_o = (A_p > A_n), and the block's temporal
// output tout (with its count ao) is S_op/A_op when sign_o is 1, else
// S_on/A_on. This follows the circuit and worked example of the design.
//
// Timing: `clear` (one cycle) zeroes the state; then D cycles with `en`.
// ap/an/ao/sign_o/tout are registered values, valid from the cycle after the
// D-th enabled cycle until the next clear. tout[0] is the bit of the first
// cycle. Storing both candidate streams in D-bit shift registers until the
// sign is known is this design's choice of how to hold them (the design's
// figures show the two candidate outputs and a final multiplexer).
module acc_adder #(
  parameter int unsigned N  = 16,  // inputs per block
  parameter int unsigned D  = 16,  // bits per block d
  localparam int unsigned AW = $clog2(N * D + 1),  // A_p / A_n width
  localparam int unsigned OW = $clog2(D + 1)       // A_op / A_on width
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          clear,
  input  logic          en,
  input  logic          in_sign [N],
  input  logic          in_bit  [N],
  output logic [AW-1:0] ap,
  output logic [AW-1:0] an,
  output logic [OW-1:0] ao,
  output logic          sign_o,
  output logic [D-1:0]  tout,
  output logic          sop_o,    // S_op bit of the current cycle
  output logic          son_o     // S_on bit of the current cycle
);
  localparam int unsigned CW = $clog2(N + 1);

  logic          neg_sel [N];
  logic [CW-1:0] pc_p, pc_n;

  always_comb for (int i = 0; i < N; i++) neg_sel[i] = ~in_sign[i];

  par_counter #(.N(N)) u_pc_pos (.bits(in_bit), .sel(in_sign), .count(pc_p));
  par_counter #(.N(N)) u_pc_neg (.bits(in_bit), .sel(neg_sel), .count(pc_n));

  logic [AW-1:0] ap_q, an_q, ap_d, an_d;
  logic [OW-1:0] aop_q, aon_q;
  logic [D-1:0]  sop_buf, son_buf;
  logic signed [AW+1:0] diff_pn;  // A_p - A_n after this cycle

  always_comb begin
    ap_d    = ap_q + AW'(pc_p);
    an_d    = an_q + AW'(pc_n);
    diff_pn = $signed({2'b00, ap_d}) - $signed({2'b00, an_d});
    sop_o   = diff_pn > $signed((AW+2)'(aop_q));
    son_o   = -diff_pn > $signed((AW+2)'(aon_q));
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      ap_q    <= '0;
      an_q    <= '0;
      aop_q   <= '0;
      aon_q   <= '0;
      sop_buf <= '0;
      son_buf <= '0;
    end else if (clear) begin
      ap_q    <= '0;
      an_q    <= '0;
      aop_q   <= '0;
      aon_q   <= '0;
      sop_buf <= '0;
      son_buf <= '0;
    end else if (en) begin
      ap_q    <= ap_d;
      an_q    <= an_d;
      aop_q   <= aop_q + OW'(sop_o);
      aon_q   <= aon_q + OW'(son_o);
      // shift in at the top, so after D cycles bit 0 is the first bit
      sop_buf <= (sop_buf >> 1) | (D'(sop_o) << (D - 1));
      son_buf <= (son_buf >> 1) | (D'(son_o) << (D - 1));
    end
  end

  // Local sign and selection of the block's temporal output.
  always_comb begin
    ap     = ap_q;
    an     = an_q;
    sign_o = ap_q > an_q;
    tout   = sign_o ? sop_buf : son_buf;
    ao     = sign_o ? aop_q : aon_q;
  end

  a_clear_en_exclusive: assert property (@(posedge clk) disable iff (!rst_n) !(clear && en));

endmodule

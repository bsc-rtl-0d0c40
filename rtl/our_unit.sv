// our_unit -- inter-block output revision (OUR) of BSC.
//
// Block division makes each block's adder decide its output alone, so the
// blocks together may emit more or fewer '1's than the exact sum. OUR fixes
// the count while the result is streamed out, at no extra latency:
//   * on `load` it registers Psi = |sum A_p - sum A_n| (the exact number of
//     '1's the result should hold), Phi = sum A_o (the '1's the blocks'
//     temporal outputs hold), the global sign (sum A_p > sum A_n) and the
//     K*D-bit temporal output (block 0 first, each block oldest bit first);
//   * on every `shift` cycle it emits the next temporal bit t: if Psi > Phi
//     and t is 0 it emits 1 and Phi grows by one (fill); if Psi < Phi and t
//     is 1 it emits 0 and Phi shrinks by one (remove); otherwise t passes.
// The result holds exactly min(Psi, K*D) ones, so the addition is
// deterministic. The rule, Psi, Phi and the sign follow the design; the
// serial output order and registering everything in a single revision
// cycle are this design's choices.
//
// Timing: `load` in the revision cycle; the n = K*D output bits follow in
// the next n cycles in which `shift` is high. out_bit/fill/remove are
// combinational from the registered state and are valid during `shift`.
module our_unit #(
  parameter int unsigned N  = 16,  // inputs per block
  parameter int unsigned K  = 4,   // number of blocks
  parameter int unsigned D  = 16,  // bits per block
  localparam int unsigned AW = $clog2(N * D + 1),
  localparam int unsigned OW = $clog2(D + 1),
  localparam int unsigned PW = $clog2(N * D * K + 1),  // Psi width
  localparam int unsigned FW = $clog2(D * K + 1)       // Phi width
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          load,
  input  logic          shift,
  input  logic [AW-1:0] ap   [K],
  input  logic [AW-1:0] an   [K],
  input  logic [OW-1:0] ao   [K],
  input  logic [D-1:0]  tin  [K],
  output logic [PW-1:0] psi,
  output logic [FW-1:0] phi,
  output logic          sign_o,
  output logic          out_bit,
  output logic          fill,
  output logic          remove
);
  localparam int unsigned BITLEN = K * D;

  logic [PW-1:0]     sum_p, sum_n;
  logic [FW-1:0]     sum_o;
  logic [BITLEN-1:0] tcat;
  logic [BITLEN-1:0] tbuf;

  always_comb begin
    sum_p = '0;
    sum_n = '0;
    sum_o = '0;
    for (int j = 0; j < K; j++) begin
      sum_p = sum_p + PW'(ap[j]);
      sum_n = sum_n + PW'(an[j]);
      sum_o = sum_o + FW'(ao[j]);
      tcat[j*D +: D] = tin[j];
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      psi    <= '0;
      phi    <= '0;
      sign_o <= 1'b0;
      tbuf   <= '0;
    end else if (load) begin
      psi    <= (sum_p > sum_n) ? sum_p - sum_n : sum_n - sum_p;
      phi    <= sum_o;
      sign_o <= sum_p > sum_n;
      tbuf   <= tcat;
    end else if (shift) begin
      if (fill) phi <= phi + 1'b1;
      else if (remove) phi <= phi - 1'b1;
      tbuf <= tbuf >> 1;
    end
  end

  always_comb begin
    fill    = (psi > PW'(phi)) && !tbuf[0];
    remove  = (psi < PW'(phi)) && tbuf[0];
    out_bit = (tbuf[0] && !remove) || fill;
  end

  a_load_shift_exclusive: assert property (@(posedge clk) disable iff (!rst_n) !(load && shift));
  a_phi_in_range: assert property (@(posedge clk) disable iff (!rst_n) phi <= FW'(BITLEN));

endmodule

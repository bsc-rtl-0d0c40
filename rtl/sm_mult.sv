// sm_mult -- sign-magnitude stochastic multipliers for N lanes.
//
// Each operand is a sign bit (1 = positive) plus a unipolar magnitude
// bitstream. The product sign is the XNOR of the two signs and the product
// magnitude bit is the AND of the two magnitude bits, as the design
// prescribes; keeping the sign out of the stream avoids the bipolar XNOR
// multiplier's error near zero. One bit per lane per cycle, combinational.
module sm_mult #(
  parameter int unsigned N = 16
) (
  input  logic a_sign [N],
  input  logic a_bit  [N],
  input  logic b_sign [N],
  input  logic b_bit  [N],
  output logic p_sign [N],
  output logic p_bit  [N]
);
  always_comb begin
    for (int i = 0; i < N; i++) begin
      p_sign[i] = ~(a_sign[i] ^ b_sign[i]);
      p_bit[i]  = a_bit[i] & b_bit[i];
    end
  end
endmodule

// par_counter -- parallel counter (PC) of the accumulator-based adder.
//
// Counts, in one cycle, how many of the N input bits are 1. The adder uses
// one PC for the inputs whose sign is positive and one for the negative
// ones; here that split is done with `sel`: only bits whose sel is 1 are
// counted. The design names the PC but not its structure; this is a plain
// adder tree as synthesis infers it. Combinational.
module par_counter #(
  parameter int unsigned N  = 16,
  localparam int unsigned CW = $clog2(N + 1)
) (
  input  logic          bits [N],
  input  logic          sel  [N],
  output logic [CW-1:0] count
);
  always_comb begin
    count = '0;
    for (int i = 0; i < N; i++) count = count + CW'(bits[i] & sel[i]);
  end
endmodule

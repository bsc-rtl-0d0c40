// sobol_sng -- Sobol-sequence stochastic number generator (one bit position).
//
// Converts a binary magnitude `mag` (0..BITLEN, value mag/BITLEN) into bit
// `idx` of a BITLEN-bit unipolar bitstream: the bit is 1 when mag is larger
// than point idx of the chosen Sobol dimension. Because the generator takes
// the bit position as an input instead of stepping a state machine, several
// copies can produce different positions of the same stream in one cycle,
// which is what the block division needs. Over all BITLEN positions the
// stream holds exactly `mag` ones.
//
// The use of a Sobol generator follows the design's evaluation, which feeds
// all operands through one; the comparator form, the index-addressed
// sequence and the two dimensions (DIM 0 for activations, DIM 1 for
// weights, so that AND of the two approximates a product) are this design's
// choices. Purely combinational, no latency.
module sobol_sng
  import bsc_pkg::*;
#(
  parameter int unsigned BITLEN = 64,  // stream length n, a power of two
  parameter int unsigned DIM    = 0    // Sobol dimension, 0 or 1
) (
  input  logic [$clog2(BITLEN):0]   mag,
  input  logic [$clog2(BITLEN)-1:0] idx,
  output logic                      bit_o
);
  localparam int unsigned IW = $clog2(BITLEN);

  logic [SOBOL_MAXW-1:0] pt;

  always_comb begin
    pt    = sobol_point(DIM, SOBOL_MAXW'(idx), IW);
    bit_o = (32'(mag) > 32'(pt));
  end

endmodule

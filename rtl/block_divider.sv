// block_divider -- Stage 1 of BSC: block division of N input bitstreams.
//
// Every operand is an n-bit (BITLEN) bitstream. The stream is cut into K
// blocks of D = BITLEN/K consecutive bits, and block j owns bit positions
// j*D .. j*D+D-1. In intra-block cycle `cyc` (0..D-1) this unit delivers bit
// j*D+cyc of every one of the N operands to block j, for all K blocks at
// once, so the whole stream is consumed in D cycles instead of BITLEN.
//
// The streams are not stored: they are produced on demand from the binary
// magnitudes by K*N index-addressed Sobol generators (sobol_sng). Splitting
// into contiguous blocks follows the design (block 1 holds the first d bits,
// block k the last d); generating the bits on demand instead of buffering
// whole streams is this design's choice. Combinational, no latency.
//
// Interface: mag[i] is operand i's magnitude (0..BITLEN); bits[j][i] is the
// current bit of operand i in block j.
module block_divider #(
  parameter int unsigned N      = 16,  // number of operands
  parameter int unsigned BITLEN = 64,  // stream length n
  parameter int unsigned K      = 4,   // number of blocks k
  parameter int unsigned DIM    = 0,   // Sobol dimension of these operands
  localparam int unsigned D     = BITLEN / K,
  localparam int unsigned MW    = $clog2(BITLEN) + 1,
  localparam int unsigned CW    = (D > 1) ? $clog2(D) : 1
) (
  input  logic [MW-1:0] mag  [N],
  input  logic [CW-1:0] cyc,
  output logic          bits [K][N]
);
  localparam int unsigned IW = $clog2(BITLEN);

  for (genvar j = 0; j < K; j++) begin : g_blk
    logic [IW-1:0] idx;
    assign idx = IW'(j * D) + IW'(cyc);
    for (genvar i = 0; i < N; i++) begin : g_op
      sobol_sng #(.BITLEN(BITLEN), .DIM(DIM)) u_sng (
        .mag  (mag[i]),
        .idx  (idx),
        .bit_o(bits[j][i])
      );
    end
  end

  initial begin
    assert (BITLEN % K == 0) else $error("BITLEN must be a multiple of K");
  end

endmodule

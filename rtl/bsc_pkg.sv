// bsc_pkg -- types and helper functions shared by the block-based stochastic
// computing (BSC) datapath.
//
// * Sign convention (follows the worked examples of the design): a sign bit
//   of 1 means positive, 0 means negative. A magnitude is a unipolar
//   bitstream whose share of '1's is the absolute value.
// * sobol_point() returns point `idx` of the first (dim 0) or second (dim 1)
//   Sobol low-discrepancy sequence with w-bit resolution, without Gray-code
//   reordering: x(idx) = XOR over the set bits b of idx of v_b. Dimension 0
//   uses v_b = 2^(w-b) (bit reversal of idx). Dimension 1 uses the
//   primitive polynomial x+1: m_1 = 1, m_b = m_(b-1) XOR (m_(b-1) << 1),
//   v_b = m_b << (w-b). Over idx = 0..2^w-1 each dimension visits every
//   w-bit value once, so a comparator stream holds exactly m ones for
//   magnitude m. Which Sobol dimensions are used is this design's choice.
// * ctrl_state_t names the phases of one BSC operation (see bsc_ctrl).
// * min_block_len() is the accuracy rule for the block length d, evaluated
//   at elaboration. For two d-bit streams of values p and q, the chance that
//   the one with more '1's is the larger is
//     P(p >= q) = sum_i B(i; d, p) * sum_{j<=i} B(j; d, q)   if p >= q,
//     1 - P(p >= q)                                           if p <  q,
//   with B the binomial probability. Averaged over p, q in {0, 0.1, ..., 1}
//   (121 pairs) this is block_sign_prob_avg(d); min_block_len(theta) is the
//   smallest d whose average reaches theta percent (12 for 90 %). The rule
//   is the method's own; its use as an elaboration-time check is this
//   design's.
package bsc_pkg;

  // Phases of one operation: wait for start, d intra-block cycles, one
  // revision cycle, n output cycles.
  typedef enum logic [1:0] {
    ST_IDLE = 2'd0,
    ST_ACC  = 2'd1,
    ST_REV  = 2'd2,
    ST_OUT  = 2'd3
  } ctrl_state_t;

  localparam int unsigned SOBOL_MAXW = 16;

  // Point idx of Sobol dimension `dim` (0 or 1) at w-bit resolution, w <= 16.
  function automatic logic [SOBOL_MAXW-1:0] sobol_point(input int unsigned dim,
                                                         input logic [SOBOL_MAXW-1:0] idx,
                                                         input int unsigned w);
    logic [SOBOL_MAXW-1:0] m;
    logic [SOBOL_MAXW-1:0] x;
    m = '0;
    x = '0;
    for (int unsigned b = 1; b <= SOBOL_MAXW; b++) begin
      if (dim == 0) m = 1;
      else if (b == 1) m = 1;
      else m = m ^ (m << 1);
      if (b <= w && idx[b-1]) x = x ^ (m << (w - b));
    end
    return x;
  endfunction

  // Binomial probability B(i; d, p).
  function automatic real binom(input int d, input int i, input real p);
    real c;
    c = 1.0;
    for (int k = 1; k <= i; k++) c = c * real'(d - i + k) / real'(k);
    for (int k = 0; k < i; k++) c = c * p;
    for (int k = 0; k < d - i; k++) c = c * (1.0 - p);
    return c;
  endfunction

  // Probability of a correct size judgement of two d-bit streams of values
  // p = a/10 and q = b/10.
  function automatic real block_sign_prob(input int d, input int a, input int b);
    real p, q, pge, cq;
    p   = real'(a) / 10.0;
    q   = real'(b) / 10.0;
    pge = 0.0;
    cq  = 0.0;
    for (int i = 0; i <= d; i++) begin
      cq  = cq + binom(d, i, q);
      pge = pge + binom(d, i, p) * cq;
    end
    return (a >= b) ? pge : 1.0 - pge;
  endfunction

  // Its average over the 121 pairs p, q in {0, 0.1, ..., 1}.
  function automatic real block_sign_prob_avg(input int d);
    real sum;
    sum = 0.0;
    for (int a = 0; a <= 10; a++)
      for (int b = 0; b <= 10; b++) sum = sum + block_sign_prob(d, a, b);
    return sum / 121.0;
  endfunction

  // Smallest block length whose average judgement probability reaches
  // theta_pct percent (64 if none up to 64 does).
  function automatic int min_block_len(input int theta_pct);
    for (int d = 1; d <= 64; d++)
      if (block_sign_prob_avg(d) * 100.0 >= real'(theta_pct)) return d;
    return 64;
  endfunction

endpackage

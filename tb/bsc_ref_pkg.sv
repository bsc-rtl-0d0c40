// bsc_ref_pkg -- reference models used by the BSC testbenches.
//
// Written independently of the RTL, in plain integer arithmetic:
//   sobol_ref     Sobol points from a table of direction numbers (dimension 0:
//                 all m_b = 1; dimension 1: m_b = 1, 3, 5, 15, 17, 51, ...).
//   acc_ref       the accumulator-based adder of one block, given the number
//                 of positive and negative '1's arriving in each cycle.
//   our_ref       the output revision across blocks.
//   mac_ref       a whole BSC multiply-accumulate built from the three above.
package bsc_ref_pkg;

  // direction numbers m_b, b = 1..8, of Sobol dimension 1 (polynomial x+1)
  localparam int M_DIM1 [8] = '{1, 3, 5, 15, 17, 51, 85, 255};

  function automatic int sobol_ref(int dim, int idx, int w);
    int x = 0;
    for (int b = 1; b <= w; b++) begin
      int m = (dim == 0) ? 1 : M_DIM1[b-1];
      if (((idx >> (b - 1)) & 1) != 0) x = x ^ (m << (w - b));
    end
    return x;
  endfunction

  // One block of the accumulator-based adder. pcp/pcn: '1's of positive and
  // negative inputs in each of the d cycles. Returns the block's final
  // A_p, A_n, local sign, selected output bits and their count.
  function automatic void acc_ref(input int pcp[], input int pcn[],
                                  output int ap, output int an, output bit sgn,
                                  output bit tout[], output int ao);
    int d = pcp.size();
    int aop = 0, aon = 0;
    bit sop[], son[];
    sop = new[d];
    son = new[d];
    ap = 0;
    an = 0;
    for (int c = 0; c < d; c++) begin
      ap += pcp[c];
      an += pcn[c];
      sop[c] = (ap - an) > aop;
      son[c] = (an - ap) > aon;
      aop += int'(sop[c]);
      aon += int'(son[c]);
    end
    sgn  = ap > an;
    tout = sgn ? sop : son;
    ao   = sgn ? aop : aon;
  endfunction

  // Output revision: fills or removes '1's of temp until it holds psi ones
  // (or cannot hold more).
  function automatic void our_ref(input int psi, input int phi, input bit temp[],
                                  output bit res[], output int nfill, output int nremove);
    res = new[temp.size()];
    nfill = 0;
    nremove = 0;
    for (int t = 0; t < temp.size(); t++) begin
      if (psi > phi && !temp[t]) begin
        res[t] = 1;
        phi++;
        nfill++;
      end else if (psi < phi && temp[t]) begin
        res[t] = 0;
        phi--;
        nremove++;
      end else res[t] = temp[t];
    end
  endfunction

  // Whole multiply-accumulate: signs (1 = positive) and magnitudes (0..bitlen)
  // of n_in operand pairs, bitlen-bit streams (activations from Sobol
  // dimension 0, weights from dimension 1) split into k blocks.
  function automatic void mac_ref(input int n_in, input int bitlen, input int k,
                                  input int xs[], input int xm[], input int ws[], input int wm[],
                                  output bit res[], output bit sgn, output int psi,
                                  output bit lsign[], output int nfill, output int nremove);
    int d = bitlen / k;
    int w = $clog2(bitlen);
    int sp = 0, sn = 0, phi = 0;
    int pcp[], pcn[];
    int ap, an, ao;
    bit sg;
    bit tout[], temp[];
    temp  = new[bitlen];
    lsign = new[k];
    for (int j = 0; j < k; j++) begin
      pcp = new[d];
      pcn = new[d];
      for (int c = 0; c < d; c++) begin
        int idx = j * d + c;
        pcp[c] = 0;
        pcn[c] = 0;
        for (int i = 0; i < n_in; i++)
          if (xm[i] > sobol_ref(0, idx, w) && wm[i] > sobol_ref(1, idx, w)) begin
            if (xs[i] == ws[i]) pcp[c]++;
            else pcn[c]++;
          end
      end
      acc_ref(pcp, pcn, ap, an, sg, tout, ao);
      sp += ap;
      sn += an;
      phi += ao;
      lsign[j] = sg;
      for (int c = 0; c < d; c++) temp[j * d + c] = tout[c];
    end
    psi = (sp > sn) ? sp - sn : sn - sp;
    sgn = sp > sn;
    our_ref(psi, phi, temp, res, nfill, nremove);
  endfunction

endpackage

// dtnn_tb_pkg: reference models shared by the DTNN testbenches.
//
// ref_tree evaluates a Dtree neuron from first principles, independently of
// the RTL's generate structure: it repeatedly groups the current level FANIN
// signals at a time (zero-padding the last group), looks every group up in its
// table, and stops when a single signal is left. Tables are numbered level by
// level, as in the RTL's write port. mix64 is a 64-bit hash (splitmix64
// finaliser) used to derive reproducible table contents from an address, so
// that a testbench needs no stored copy of 170 thousand tables.
package dtnn_tb_pkg;

  typedef logic [255:0] tbl_t;

  function automatic logic [63:0] mix64(logic [63:0] z);
    z = z + 64'h9E3779B97F4A7C15;
    z = (z ^ (z >> 30)) * 64'hBF58476D1CE4E5B9;
    z = (z ^ (z >> 27)) * 64'h94D049BB133111EB;
    return z ^ (z >> 31);
  endfunction

  // Table for (member, layer, neuron, lut) under a given seed.
  function automatic logic [63:0] tbl_of(int unsigned seed, int unsigned member,
                                         int unsigned layer, int unsigned neuron,
                                         int unsigned lut);
    return mix64({seed[15:0], member[7:0], layer[7:0], neuron[15:0], lut[15:0]});
  endfunction

  function automatic int unsigned ref_num_luts(int unsigned n, int unsigned fanin);
    int unsigned w = n, s = 0;
    do begin
      w = (w + fanin - 1) / fanin;
      s += w;
    end while (w > 1);
    return s;
  endfunction

  function automatic int unsigned ref_tree(int unsigned n, int unsigned fanin,
                                           int unsigned actw, int unsigned in_vals[],
                                           tbl_t tbls[]);
    int unsigned cur[$];
    int unsigned nxt[$];
    int unsigned base = 0;
    int unsigned mask = (1 << actw) - 1;
    for (int i = 0; i < n; i++) cur.push_back(in_vals[i]);
    do begin
      int unsigned w = (cur.size() + fanin - 1) / fanin;
      nxt.delete();
      for (int unsigned k = 0; k < w; k++) begin
        int unsigned idx = 0;
        for (int unsigned j = 0; j < fanin; j++)
          if (k * fanin + j < cur.size()) idx |= cur[k*fanin+j] << (j * actw);
        nxt.push_back(int'(tbls[base+k] >> (idx * actw)) & mask);
      end
      base += w;
      cur = nxt;
    end while (cur.size() > 1);
    return cur[0];
  endfunction

  // Reference for one member neuron or the combiner: tables come from
  // tbl_of(seed, member, layer, neuron, k), layer 0 hidden, 1 output,
  // 2 combiner.
  function automatic int unsigned ref_neuron(int unsigned seed, int unsigned member,
                                             int unsigned layer, int unsigned neuron,
                                             int unsigned nin, int unsigned v[]);
    tbl_t tt[];
    int unsigned nl = ref_num_luts(nin, 6);
    tt = new[nl];
    for (int unsigned k = 0; k < nl; k++) tt[k] = tbl_t'(tbl_of(seed, member, layer, neuron, k));
    return ref_tree(nin, 6, 1, v, tt);
  endfunction

  // Whole classifier: binarise at thr[m] (strictly greater), run each member
  // (hidden layer of nhid neurons unless nhid = 0, then 10 outputs), then the
  // per-class combiner over the five votes. Member tables use seed, the
  // combiner uses cseed.
  function automatic logic [9:0] ref_classifier(int unsigned seed, int unsigned cseed,
                                                int unsigned nhid, logic [7:0] pix[],
                                                logic [7:0] thr[]);
    logic [9:0] votes [5];
    logic [9:0] y;
    for (int unsigned m = 0; m < 5; m++) begin
      int unsigned b[], h[];
      b = new[pix.size()];
      for (int unsigned p = 0; p < pix.size(); p++) b[p] = (pix[p] > thr[m]) ? 1 : 0;
      if (nhid > 0) begin
        h = new[nhid];
        for (int unsigned n = 0; n < nhid; n++) h[n] = ref_neuron(seed, m, 0, n, pix.size(), b);
        for (int unsigned c = 0; c < 10; c++) votes[m][c] = ref_neuron(seed, m, 1, c, nhid, h) != 0;
      end else begin
        for (int unsigned c = 0; c < 10; c++) votes[m][c] = ref_neuron(seed, m, 1, c, pix.size(), b) != 0;
      end
    end
    for (int unsigned c = 0; c < 10; c++) begin
      int unsigned idx;
      logic [63:0] t;
      idx = 0;
      for (int unsigned m = 0; m < 5; m++) idx |= int'(votes[m][c]) << m;
      t = tbl_of(cseed, 0, 2, c, 0);
      y[c] = t[idx];
    end
    return y;
  endfunction

endpackage

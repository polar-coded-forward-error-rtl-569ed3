// Reference models used by the testbenches (not synthesizable).
//
// Everything here is written directly from the definitions, independently
// of the RTL structure: the codeword from the generator matrix
// G_N = B_N F^(x)n element by element, SC decoding with explicit per-stage
// LLR arrays and partial sums re-encoded from the decided bits, and a
// polarization-weight code construction for the frozen set.
package polar_ref_pkg;

  function automatic int unsigned rbitrev(int unsigned v, int unsigned nb);
    int unsigned r = 0;
    for (int unsigned k = 0; k < nb; k++) if (v[k]) r[nb-1-k] = 1'b1;
    return r;
  endfunction

  // G_N[k][i] of G_N = B_N F^(x)n: row k of B_N F is row bitrev(k) of F^(x)n,
  // and F^(x)n[r][c] = 1 exactly when the ones of c are a subset of those of r.
  function automatic bit gen_elem(int unsigned k, int unsigned i, int unsigned nb);
    int unsigned r = rbitrev(k, nb);
    return (i & ~r) == 0;
  endfunction

  // x = u G_N
  function automatic void encode(input bit u[], output bit x[]);
    int unsigned n = u.size();
    int unsigned nb = $clog2(n);
    x = new[n];
    foreach (x[i]) x[i] = 1'b0;
    for (int unsigned k = 0; k < n; k++)
      if (u[k]) for (int unsigned i = 0; i < n; i++) x[i] ^= gen_elem(k, i, nb);
  endfunction

  // Frozen set by polarization weight: W(i) = sum_j i_j 2^(j/4); the N-K
  // positions of smallest weight are frozen (1).
  function automatic void construct(input int unsigned n, input int unsigned k, output bit frz[]);
    real w[];
    int  idx[$];
    int unsigned nb = $clog2(n);
    w = new[n];
    frz = new[n];
    for (int unsigned i = 0; i < n; i++) begin
      w[i] = 0.0;
      for (int unsigned j = 0; j < nb; j++) if (i[j]) w[i] += 2.0 ** (real'(j) / 4.0);
      idx.push_back(int'(i));
    end
    idx.sort() with (w[item]);
    for (int unsigned i = 0; i < n; i++) frz[idx[i]] = (i < n - k);
  endfunction

  function automatic int sat(int v, int maxv);
    if (v > maxv) return maxv;
    if (v < -maxv) return -maxv;
    return v;
  endfunction

  // SC decoding. llr[i] is the LLR (positive = 0) of codeword bit i, already
  // an integer in the decoder's range; wbits = 2 means the binary-input
  // decoder (values in {-1,0,1}, f = product, g saturates to +-1).
  function automatic void sc_decode(input int llr[], input bit frz[], input int wbits,
                                    output bit uhat[]);
    int unsigned n = llr.size();
    int unsigned nb = $clog2(n);
    int maxv = (1 << (wbits - 1)) - 1;
    int a [][];          // a[s][j], stage s has 2^s values
    bit ps[];
    uhat = new[n];
    a = new[nb + 1];
    for (int s = 0; s <= int'(nb); s++) a[s] = new[1 << s];
    for (int unsigned i = 0; i < n; i++) a[nb][rbitrev(i, nb)] = llr[i];
    for (int unsigned i = 0; i < n; i++) begin
      int top;
      top = (i == 0) ? int'(nb) - 1 : 0;
      if (i != 0) while (((i >> top) & 1) == 0) top++;
      for (int s = top; s >= 0; s--) begin
        int half = 1 << s;
        if (s == top && i != 0) begin
          // partial sums: left sibling subtree = bits i-half .. i-1 encoded by F^(x)s
          bit us[];
          us = new[half];
          ps = new[half];
          for (int t = 0; t < half; t++) begin int ix; ix = int'(i) - half + t; us[t] = uhat[ix]; end
          for (int c = 0; c < half; c++) begin
            ps[c] = 1'b0;
            for (int r = 0; r < half; r++) if (us[r] && ((c & ~r) == 0)) ps[c] ^= 1'b1;
          end
          for (int j = 0; j < half; j++) begin
            int x = a[s+1][j], y = a[s+1][j+half];
            a[s][j] = sat(ps[j] ? y - x : y + x, maxv);
          end
        end else begin
          for (int j = 0; j < half; j++) begin
            int x = a[s+1][j], y = a[s+1][j+half];
            int m = (x < 0 ? -x : x) < (y < 0 ? -y : y) ? (x < 0 ? -x : x) : (y < 0 ? -y : y);
            a[s][j] = ((x < 0) != (y < 0)) ? -m : m;
          end
        end
      end
      uhat[i] = frz[i] ? 1'b0 : (a[0][0] < 0);
    end
  endfunction

endpackage

// polar_ref_pkg: bit-accurate reference model of the SC decoders, used by the
// testbenches to compute expected outputs independently of the RTL.
//
// LLR words are ints holding a Q-bit sign-magnitude value (bit Q-1 sign).
// f: sign = XOR of signs, magnitude = min. g(a,b,v) = b + (1-2v)a with
// saturating magnitude, unlike-sign ties taking the sign of b. The decoder is
// the textbook leaf-by-leaf SC schedule: for leaf j it recomputes the tree
// levels below the branch point of j-1 and j and decides u_j = s(LLR) & a_j.
// The encoder uses the generator matrix directly: natural-order bit k of
// u*F^{(x)n} is the XOR of u_i over all i whose binary digits cover those of k,
// placed at the bit-reversed index of k.
package polar_ref_pkg;

  function automatic int sgn(int q, int w);
    return (w >> (q - 1)) & 1;
  endfunction

  function automatic int mag(int q, int w);
    return w & ((1 << (q - 1)) - 1);
  endfunction

  function automatic int mk(int q, int s, int m);
    return (s << (q - 1)) | m;
  endfunction

  function automatic int ref_f(int q, int a, int b);
    int m = (mag(q, a) < mag(q, b)) ? mag(q, a) : mag(q, b);
    return mk(q, sgn(q, a) ^ sgn(q, b), m);
  endfunction

  // counts saturating additions seen by ref_g (for coverage)
  int sat_count = 0;

  function automatic int ref_g(int q, int a, int b, int v);
    int maxm = (1 << (q - 1)) - 1;
    int ia, ib, r;
    // to signed integers
    ia = sgn(q, a) ? -mag(q, a) : mag(q, a);
    ib = sgn(q, b) ? -mag(q, b) : mag(q, b);
    if (v != 0) ia = -ia;
    r = ib + ia;
    if (r > maxm) begin r = maxm; sat_count++; end
    if (r < -maxm) begin r = -maxm; sat_count++; end
    if (r > 0) return mk(q, 0, r);
    if (r < 0) return mk(q, 1, -r);
    // zero result: keeps the sign of b if both were zero-magnitude ties
    return mk(q, sgn(q, b), 0);
  endfunction

  function automatic int log2i(int n);
    int r = 0;
    while ((1 << r) < n) r++;
    return r;
  endfunction

  function automatic int bitrev(int x, int nb);
    int r = 0;
    for (int b = 0; b < nb; b++) if ((x >> b) & 1) r |= 1 << (nb - 1 - b);
    return r;
  endfunction

  // bit-reversed polar transform of u (length n), from the generator matrix
  function automatic void encode(input bit u[], output bit x[]);
    int n = u.size();
    int nb = log2i(n);
    x = new[n];
    for (int k = 0; k < n; k++) begin
      bit acc = 0;
      for (int i = 0; i < n; i++) if ((i & k) == k) acc ^= u[i];
      x[bitrev(k, nb)] = acc;
    end
  endfunction

  // one tree level: child LLRs of a node from its LLRs
  function automatic void step(input int q, input int src[], input bit first,
                               input bit v[], output int dst[]);
    int sz = src.size() / 2;
    dst = new[sz];
    for (int k = 0; k < sz; k++)
      dst[k] = first ? ref_f(q, src[2*k], src[2*k+1]) : ref_g(q, src[2*k], src[2*k+1], v[k]);
  endfunction

  // LLRs entering the node of length sz whose first leaf is 'leaf', given the
  // decisions of all earlier leaves
  function automatic void node_llr(input int q, input int llr[], input bit u[],
                                   input int leaf, input int sz, output int out[]);
    int n = llr.size();
    int cur[];
    int nxt[];
    int len = n;
    cur = llr;
    while (len > sz) begin
      int half = len / 2;
      int base = (leaf / len) * len;          // first leaf of current node
      bit first = (leaf - base) < half;
      bit us[];
      bit v[];
      us = new[half];
      for (int k = 0; k < half; k++) us[k] = u[base + k];
      encode(us, v);
      step(q, cur, first, v, nxt);
      cur = nxt;
      len = half;
    end
    out = cur;
  endfunction

  // full SC decode
  function automatic void sc_decode(input int q, input int llr[], input bit frz[],
                                    output bit u[]);
    int n = llr.size();
    int nb = log2i(n);
    int lv[][];
    lv = new[nb + 1];
    lv[0] = llr;
    u = new[n];
    for (int j = 0; j < n; j++) begin
      int d0 = 0;
      if (j != 0) begin
        int tz = 0;
        while (((j >> tz) & 1) == 0) tz++;
        d0 = nb - 1 - tz;
      end
      for (int d = d0; d < nb; d++) begin
        int sz = n >> (d + 1);
        int nodeb = j >> (nb - d - 1);      // child index at depth d+1
        bit v[];
        bit us[];
        if ((nodeb & 1) == 0) begin
          v = new[sz];
        end else begin
          int base = (nodeb - 1) * sz;
          us = new[sz];
          for (int k = 0; k < sz; k++) us[k] = u[base + k];
          encode(us, v);
        end
        step(q, lv[d], (nodeb & 1) == 0, v, lv[d + 1]);
      end
      u[j] = sgn(q, lv[nb][0]) & frz[j];
    end
  endfunction

  // random Q-bit sign-magnitude word
  function automatic int rand_llr(int q);
    return $urandom_range((1 << q) - 1, 0);
  endfunction

  // noiseless channel word for code bit x: sign = x, magnitude 1..max
  function automatic int clean_llr(int q, bit x);
    return mk(q, x, $urandom_range((1 << (q - 1)) - 1, 1));
  endfunction
endpackage

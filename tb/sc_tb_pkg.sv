// Reference models shared by the testbenches: stochastic-computing
// correlation (SCC) of two bit streams, and the k-th permutation in reverse
// lexicographic order computed by stepping backwards through the
// permutations one at a time (independent of the factoradic decoding used in
// the design).
package sc_tb_pkg;

  localparam int MAXL = 1023;          // longest stream: one period of a 10-bit LFSR
  typedef logic [MAXL-1:0] stream_t;
  typedef int perm_a [16];

  // SCC of two streams of length len, in [-1, 1]; 0 when a stream is constant.
  function automatic real scc(input stream_t a, input stream_t b, input int len);
    real pa, pb, pab, d, den;
    pa  = real'($countones(a)) / len;
    pb  = real'($countones(b)) / len;
    pab = real'($countones(a & b)) / len;
    d   = pab - pa * pb;
    if (d >= 0.0) den = ((pa < pb) ? pa : pb) - pa * pb;
    else          den = pa * pb - ((pa + pb - 1.0 > 0.0) ? pa + pb - 1.0 : 0.0);
    if (den < 1.0e-12 && den > -1.0e-12) return 0.0;
    return d / den;
  endfunction

  function automatic real fabs(input real v);
    return (v < 0.0) ? -v : v;
  endfunction

  // Step p[0..n-1] to the previous permutation in lexicographic order.
  function automatic void prev_perm(ref perm_a p, input int n);
    int i, j, t;
    i = n - 2;
    while (i >= 0 && p[i] <= p[i+1]) i--;
    if (i < 0) return;
    j = n - 1;
    while (p[j] >= p[i]) j--;
    t = p[i]; p[i] = p[j]; p[j] = t;
    for (int a = i + 1, b = n - 1; a < b; a++, b--) begin
      t = p[a]; p[a] = p[b]; p[b] = t;
    end
  endfunction

  function automatic perm_a ref_perm(input int n, input longint k);
    perm_a p;
    for (int i = 0; i < 16; i++) p[i] = 0;
    for (int i = 0; i < n; i++) p[i] = n - i;
    for (longint c = 1; c < k; c++) prev_perm(p, n);
    return p;
  endfunction

endpackage

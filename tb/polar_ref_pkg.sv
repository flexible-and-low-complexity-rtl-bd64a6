// polar_ref_pkg: bit-level reference models used by the testbenches.
//
// transform(v) computes v * F^(m) with the butterfly recursion
// x_j = xor of v_i over all i whose binary support contains that of j.
// sys_encode(u_expanded, A) runs the reference systematic algorithm:
// transform, zero the frozen positions, transform again.
// upset(n, seeds) builds an information set closed under binary domination
// (every index that dominates a seed), which is domination contiguous and
// so a legal set for the systematic encoder.
package polar_ref_pkg;

  typedef bit bvec_t[];

  function automatic bvec_t transform(bvec_t v);
    bvec_t x;
    int n;
    n = v.size();
    x = v;
    for (int h = 1; h < n; h = h * 2)
      for (int j = 0; j < n; j++)
        if ((j & h) == 0) x[j] = x[j] ^ x[j + h];
    return x;
  endfunction

  function automatic bvec_t sys_encode(bvec_t v, bvec_t info);
    bvec_t y;
    y = transform(v);
    foreach (y[j]) y[j] = y[j] & info[j];
    return transform(y);
  endfunction

  // Information set: all indices that dominate one of `nseeds` random seeds,
  // with positions >= n_s removed (shortening).
  function automatic bvec_t random_upset(int n, int nseeds, int n_s);
    bvec_t a;
    int seed;
    a = new[n];
    foreach (a[i]) a[i] = 0;
    for (int s = 0; s < nseeds; s++) begin
      seed = int'($urandom_range(n - 1, 0));
      for (int i = 0; i < n; i++)
        if ((i & seed) == seed) a[i] = 1;
    end
    for (int i = n_s; i < n; i++) a[i] = 0;
    return a;
  endfunction

  function automatic int unsigned bitrev(int unsigned i, int m);
    int unsigned r;
    r = 0;
    for (int b = 0; b < m; b++)
      if (((i >> b) & 1) != 0) r |= (1 << (m - 1 - b));
    return r;
  endfunction

endpackage

// ca_ref_pkg - behavioural reference model of the check-agnosia decoder,
// used by the testbenches to work out expected results independently of the
// RTL's structure.
//
// It shares with the RTL only the description of the parity-check matrix
// (ca_pkg::check_qubit) and recomputes everything else the plain way: the
// check rule takes the minimum and the sign product over the other edges
// directly (no first/second-minimum trick), qubit adjacency is found by
// scanning all edges, the sort is a selection sort, and the Algorithm 2
// flow, with its cycle counts, is written out sequentially.
package ca_ref_pkg;
  import ca_pkg::*;

  typedef bit bvec_t[];
  typedef int ivec_t[];

  function automatic int sat(int x, int lim);
    return (x > lim) ? lim : (x < -lim) ? -lim : x;
  endfunction

  function automatic int clog2(int x);
    int r = 0;
    while ((1 << r) < x) r++;
    return r;
  endfunction

  // Syndrome H * e.
  function automatic bvec_t syndrome(int z, bvec_t e);
    bvec_t s = new[MB * z];
    for (int c = 0; c < MB * z; c++) begin
      s[c] = 0;
      for (int j = 0; j < DC; j++) s[c] ^= e[check_qubit(c, j, z)];
    end
    return s;
  endfunction

  // Erasure mask of the support of check ck.
  function automatic bvec_t support(int z, int ck);
    bvec_t m = new[NB * z];
    foreach (m[q]) m[q] = 0;
    for (int j = 0; j < DC; j++) m[check_qubit(ck, j, z)] = 1;
    return m;
  endfunction

  // Flooded normalized min-sum decoding. Returns the number of iterations
  // run; ok tells whether the syndrome was met; delta holds min1 + min2 of
  // the messages entering each check at iteration idelta.
  function automatic int nms_decode(input int z, input bvec_t syn, input bvec_t erase,
                                    input int llr, input int imax, input int idelta,
                                    input int nms_k, output bvec_t ehat, output bit ok,
                                    output ivec_t delta);
    int n = NB * z, m = MB * z, ne = MB * z * DC;
    int q2c[] = new[ne];
    int c2q[] = new[ne];
    int eq[]  = new[ne];
    int sum[] = new[n];
    ehat  = new[n];
    delta = new[m];
    foreach (delta[c]) delta[c] = 0;
    for (int e = 0; e < ne; e++) begin
      eq[e]  = check_qubit(e / DC, e % DC, z);
      q2c[e] = erase[eq[e]] ? 0 : llr;
    end
    for (int it = 1; it <= imax; it++) begin
      for (int c = 0; c < m; c++) begin
        if (it == idelta) begin
          int a = 1000, b = 1000;
          for (int j = 0; j < DC; j++) begin
            int v = (q2c[c*DC+j] < 0) ? -q2c[c*DC+j] : q2c[c*DC+j];
            if (v < a) begin b = a; a = v; end
            else if (v < b) b = v;
          end
          delta[c] = a + b;
        end
        for (int j = 0; j < DC; j++) begin
          int mn = 1000;
          bit sg = syn[c];
          for (int jj = 0; jj < DC; jj++) begin
            if (jj != j) begin
              int v = (q2c[c*DC+jj] < 0) ? -q2c[c*DC+jj] : q2c[c*DC+jj];
              if (v < mn) mn = v;
              sg ^= (q2c[c*DC+jj] < 0);
            end
          end
          mn = mn - (mn >> nms_k);
          c2q[c*DC+j] = sg ? -mn : mn;
        end
      end
      for (int q = 0; q < n; q++) sum[q] = erase[q] ? 0 : llr;
      for (int e = 0; e < ne; e++) sum[eq[e]] += c2q[e];
      for (int q = 0; q < n; q++) ehat[q] = (sum[q] < 0);
      for (int e = 0; e < ne; e++) q2c[e] = sat(sum[eq[e]] - c2q[e], 31);
      ok = 1;
      begin
        bvec_t s2 = syndrome(z, ehat);
        for (int c = 0; c < m; c++) if (s2[c] != syn[c]) ok = 0;
      end
      if (ok) return it;
    end
    ok = 0;
    return imax;
  endfunction

  // Indices of the lambda smallest values, increasing, ties by index.
  function automatic ivec_t least(ivec_t v, int lambda);
    ivec_t r = new[lambda];
    bit taken[] = new[v.size()];
    foreach (taken[i]) taken[i] = 0;
    for (int k = 0; k < lambda; k++) begin
      int best = -1;
      foreach (v[i]) if (!taken[i] && (best < 0 || v[i] < v[best])) best = i;
      r[k] = best;
      taken[best] = 1;
    end
    return r;
  endfunction

  typedef struct {
    bit    ok;
    bit    pp_used;
    int    pp_index;
    int    latency;      // cycle of done, start in cycle 0
    int    mp_iters;
    bit    mp_ok;
    bit    pp_started;   // MP* decoders were loaded
    bit    pp_early;     // some MP* succeeded before MP had failed
    int    n_pp_ok;      // number of MP* that met the syndrome
  } ca_result_t;

  // Algorithm 2 with the dedicated-hardware timing.
  function automatic ca_result_t check_agnosia(input int z, input bvec_t syn, input int llr,
                                               input int lambda, input int imax,
                                               input int idelta, input int nms_k,
                                               output bvec_t ehat, output ivec_t list);
    ca_result_t r;
    bvec_t none = new[NB * z];
    bvec_t e0, ek;
    ivec_t delta, dk;
    bit ok0, okk;
    int it0, itk, s_cyc, t_pp0, t_fail, t_best;
    int tk[];
    foreach (none[q]) none[q] = 0;
    r = '{default: 0};
    r.pp_index = 0;
    it0 = nms_decode(z, syn, none, llr, imax, idelta, nms_k, e0, ok0, delta);
    r.mp_iters = it0;
    r.mp_ok    = ok0;
    ehat = e0;
    s_cyc = ((lambda + 1) / 2) * clog2(MB * z);
    t_pp0 = (1 + 2 * idelta) + s_cyc;          // last cycle before MP* load
    list = least(delta, lambda);
    if (ok0) begin
      r.ok = 1;
      r.latency = 1 + 2 * it0;
      r.pp_started = (it0 > idelta) && (t_pp0 + 1 < r.latency);
      return r;
    end
    r.pp_started = 1;
    t_fail = 1 + 2 * imax;
    tk = new[lambda];
    t_best = -1;
    for (int k = 0; k < lambda; k++) begin
      itk = nms_decode(z, syn, support(z, list[k]), llr, imax, idelta, nms_k, ek, okk, dk);
      tk[k] = okk ? t_pp0 + 1 + 2 * itk : -1;
      if (okk) begin
        r.n_pp_ok++;
        if (t_best < 0 || tk[k] < t_best) t_best = tk[k];
        if (tk[k] < t_fail) r.pp_early = 1;
      end
    end
    if (t_best < 0) begin
      r.latency = (t_fail > t_pp0 + 1 + 2 * imax) ? t_fail : t_pp0 + 1 + 2 * imax;
      return r;
    end
    r.latency = (t_fail > t_best) ? t_fail : t_best;
    for (int k = lambda - 1; k >= 0; k--)
      if (tk[k] >= 0 && tk[k] <= r.latency) r.pp_index = k;
    r.ok = 1;
    r.pp_used = 1;
    begin
      int itw;
      itw = nms_decode(z, syn, support(z, list[r.pp_index]), llr, imax, idelta, nms_k,
                       ehat, okk, dk);
    end
    return r;
  endfunction

  // Algorithm 2 with the hardware-reuse timing: MP, then MP* rounds k = 0..
  // on the same decoder, the first successful round ends the decoding.
  function automatic ca_result_t check_agnosia_seq(input int z, input bvec_t syn, input int llr,
                                                   input int lambda, input int imax,
                                                   input int idelta, input int nms_k,
                                                   output bvec_t ehat, output ivec_t list);
    ca_result_t r;
    bvec_t none = new[NB * z];
    bvec_t e0, ek;
    ivec_t delta, dk;
    bit ok0, okk;
    int it0, itk, s_cyc, t;
    foreach (none[q]) none[q] = 0;
    r = '{default: 0};
    it0 = nms_decode(z, syn, none, llr, imax, idelta, nms_k, e0, ok0, delta);
    r.mp_iters = it0;
    r.mp_ok    = ok0;
    ehat = e0;
    list = least(delta, lambda);
    if (ok0) begin
      r.ok = 1;
      r.latency = 1 + 2 * it0;
      return r;
    end
    s_cyc = ((lambda + 1) / 2) * clog2(MB * z);
    t = (1 + 2 * imax > 1 + 2 * idelta + s_cyc) ? 1 + 2 * imax : 1 + 2 * idelta + s_cyc;
    r.pp_early = (1 + 2 * idelta + s_cyc > 1 + 2 * imax);   // rounds wait for the sort
    r.pp_started = 1;
    for (int k = 0; k < lambda; k++) begin
      itk = nms_decode(z, syn, support(z, list[k]), llr, imax, idelta, nms_k, ek, okk, dk);
      t += 1 + 2 * itk;
      ehat = ek;
      r.pp_index = k;
      if (okk) begin
        r.ok = 1;
        r.pp_used = 1;
        r.n_pp_ok = 1;
        break;
      end
    end
    r.latency = t;
    return r;
  endfunction

endpackage

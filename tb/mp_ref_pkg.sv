// mp_ref_pkg: reference models used by the testbenches.
//
// The models work on plain integers (LSB units of the fixed-point words) and
// are written independently of the RTL: the MP threshold is found by a linear
// scan downwards from the largest score instead of a bit-serial search, and
// the neuron and training rules are written straight from their equations.
package mp_ref_pkg;

  // Largest integer z with sum_i [l_i - z]_+ >= gamma (gamma >= 1).
  function automatic int mp_ref(input int l[$], input int gamma);
    int mx, s;
    mx = l[0];
    foreach (l[i]) if (l[i] > mx) mx = l[i];
    for (int z = mx; z > mx - 4 * gamma - 4; z--) begin
      s = 0;
      foreach (l[i]) if (l[i] > z) s += l[i] - z;
      if (s >= gamma) return z;
    end
    return mx - 4 * gamma - 4;   // not reached for gamma >= 1
  endfunction

  function automatic int count_above(input int l[$], input int z);
    int c;
    c = 0;
    foreach (l[i]) if (l[i] > z) c++;
    return c;
  endfunction

  typedef struct {
    int zp, zn, z, pp, pn;
    int lp[$];
    int ln[$];
    int ap, an, ak;
  } neuron_t;

  // Differential MP neuron; pmax is the saturation value of p.
  function automatic neuron_t neuron_ref(input int a_p[$], input int a_n[$],
                                         input int w_p[$], input int w_n[$],
                                         input int b_p, input int b_n,
                                         input int gamma, input int one, input int pmax);
    neuron_t r;
    int n;
    n = a_p.size();
    r.lp = {};
    r.ln = {};
    for (int i = 0; i < n; i++) r.lp.push_back(w_p[i] + a_p[i]);
    for (int i = 0; i < n; i++) r.lp.push_back(w_n[i] + a_n[i]);
    r.lp.push_back(b_p);
    for (int i = 0; i < n; i++) r.ln.push_back(w_p[i] + a_n[i]);
    for (int i = 0; i < n; i++) r.ln.push_back(w_n[i] + a_p[i]);
    r.ln.push_back(b_n);
    r.zp = mp_ref(r.lp, gamma);
    r.zn = mp_ref(r.ln, gamma);
    r.z  = mp_ref('{r.zp, r.zn}, one);
    r.pp = (r.zp > r.z) ? r.zp - r.z : 0;
    r.pn = (r.zn > r.z) ? r.zn - r.z : 0;
    if (r.pp > pmax) r.pp = pmax;
    if (r.pn > pmax) r.pn = pmax;
    r.ap = count_above(r.lp, r.zp);
    r.an = count_above(r.ln, r.zn);
    r.ak = (r.zp > r.z ? 1 : 0) + (r.zn > r.z ? 1 : 0);
    return r;
  endfunction

  function automatic int sgn(input int v);
    return (v > 0) ? 1 : (v < 0) ? -1 : 0;
  endfunction

  // Smallest r with 2**r >= v.
  function automatic int clog2_ref(input int v);
    int r;
    r = 0;
    while ((1 << r) < v) r++;
    return r;
  endfunction

endpackage

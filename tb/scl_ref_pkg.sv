// scl_ref_pkg: behavioural reference for the SCL decoder testbenches.
//
// Works directly on the algorithm, not on the hardware structure:
//  * polar encoding x = u F^(xn) in natural order, frozen set from the
//    Bhattacharyya-parameter recursion (z- = 2z - z^2, z+ = z^2),
//  * CRC remainder by polynomial long division,
//  * BPSK + Gaussian noise channel with LLR = 2y/sigma^2 rounded and clipped,
//  * list decoding: for every path the decision LLR of bit i is recomputed
//    from the channel LLRs and the path's decided bits by descending the SC
//    tree (min-sum f, g, Q-bit saturation), the metric is extended with
//    |LLR| when the bit disagrees with the LLR's sign, and the list is sorted
//    with the same tie rules as the hardware sorters.
package scl_ref_pkg;

  typedef int          intq_t[$];
  typedef bit          bitq_t[$];

  function automatic int sat(int v, int q);
    int lim = (1 << (q - 1)) - 1;
    if (v > lim) return lim;
    if (v < -lim) return -lim;
    return v;
  endfunction

  function automatic int absi(int v);
    return (v < 0) ? -v : v;
  endfunction

  function automatic int f_ms(int a, int b, int q);
    int m = (absi(a) < absi(b)) ? absi(a) : absi(b);
    return sat(((a < 0) != (b < 0)) ? -m : m, q);
  endfunction

  function automatic int g_fn(int a, int b, bit u, int q);
    return sat(u ? b - a : b + a, q);
  endfunction

  // x = u F^(xn), natural order: x = [enc(ul) ^ enc(ur), enc(ur)]
  function automatic bitq_t polar_encode(bitq_t u);
    bitq_t x = u;
    for (int s = 1; s < x.size(); s *= 2)
      for (int b = 0; b < x.size(); b += 2 * s)
        for (int j = 0; j < s; j++) x[b + j] ^= x[b + s + j];
    return x;
  endfunction

  // decision LLR of bit i for a path with decided bits u[0..i-1]
  function automatic int leaf_llr(intq_t ch, bitq_t u, int i, int q);
    intq_t a = ch;
    int    base = 0;
    int    size = ch.size();
    while (size > 1) begin
      int    h = size / 2;
      intq_t nxt;
      if (i < base + h) begin
        for (int j = 0; j < h; j++) nxt.push_back(f_ms(a[j], a[j + h], q));
      end else begin
        bitq_t seg, x;
        for (int j = 0; j < h; j++) seg.push_back(u[base + j]);
        x = polar_encode(seg);
        for (int j = 0; j < h; j++) nxt.push_back(g_fn(a[j], a[j + h], x[j], q));
        base += h;
      end
      a    = nxt;
      size = h;
    end
    return a[0];
  endfunction

  // frozen mask (1 = frozen) with k information bits, Bhattacharyya bounds
  function automatic bitq_t make_frozen(int n_len, int k, real z0);
    real   z[$];
    bitq_t fr;
    z.push_back(z0);
    while (z.size() < n_len) begin
      real nz[$];
      // the split made last becomes the least significant index bit, so the
      // root split (first half of u: minus channels) is the most significant
      foreach (z[j]) begin
        nz.push_back(2.0 * z[j] - z[j] * z[j]);
        nz.push_back(z[j] * z[j]);
      end
      z = nz;
    end
    for (int j = 0; j < n_len; j++) fr.push_back(1'b1);
    for (int c = 0; c < k; c++) begin
      int  best = -1;
      for (int j = 0; j < n_len; j++)
        if (fr[j] && (best < 0 || z[j] < z[best])) best = j;
      fr[best] = 1'b0;
    end
    return fr;
  endfunction

  // remainder of msg(x) * x^r mod g(x), MSB first; poly = low r coefficients
  function automatic bitq_t crc_remainder(bitq_t msg, int r, int unsigned poly);
    bitq_t w = msg;
    bitq_t rem;
    for (int j = 0; j < r; j++) w.push_back(1'b0);
    for (int j = 0; j < msg.size(); j++) begin
      if (w[j]) begin
        for (int t = 1; t <= r; t++) w[j + t] ^= poly[r - t];
      end
    end
    for (int j = 0; j < r; j++) rem.push_back(w[msg.size() + j]);
    return rem;
  endfunction

  function automatic bit crc_ok(bitq_t info, int r, int unsigned poly);
    bitq_t msg, tail, rem;
    for (int j = 0; j < info.size() - r; j++) msg.push_back(info[j]);
    for (int j = info.size() - r; j < info.size(); j++) tail.push_back(info[j]);
    rem = crc_remainder(msg, r, poly);
    return rem == tail;
  endfunction

  // sort order of candidate e in the pruned sorter: value, then even-indexed
  // elements in index order, then odd ones in reverse index order; the last
  // element always last
  function automatic bit before_pruned(int va, int ea, int vb, int eb, int two_l);
    if (ea == two_l - 1) return 0;
    if (eb == two_l - 1) return 1;
    if (va != vb) return va < vb;
    if ((ea % 2) != (eb % 2)) return (ea % 2) == 0;
    return (ea % 2 == 0) ? (ea < eb) : (ea > eb);
  endfunction

  function automatic bit before_full(int va, int ea, int vb, int eb);
    if (va != vb) return va < vb;
    return ea < eb;
  endfunction

  class scl_model;
    int    n_len, l_size, q, m, crc_len;
    bit    pruned, crc_en;
    int unsigned poly;
    // list state
    bit    valid[];
    int    pm[];
    bitq_t path[];
    // statistics
    int    n_dup, n_kill, n_resort, n_info, n_sat;
    // result
    bitq_t u_out;
    int    metric_out;
    bit    pass_out;
    bit    chose_non_min, none_passed;

    function new(int n_len, int l_size, int q, int m, bit pruned, int crc_len, int unsigned poly);
      this.n_len = n_len; this.l_size = l_size; this.q = q; this.m = m;
      this.pruned = pruned; this.crc_len = crc_len; this.poly = poly;
    endfunction

    function int key(int s, int v);
      return ((valid[s] ? 0 : 1) << m) | v;
    endfunction

    function int sat_pm(int v);
      int mx = (1 << m) - 1;
      if (v >= mx) begin
        n_sat++;
        return mx;
      end
      return v;
    endfunction

    function void decode(intq_t ch, bitq_t frozen, bit use_crc);
      int lam[];
      crc_en = use_crc;
      valid = new[l_size]; pm = new[l_size]; path = new[l_size]; lam = new[l_size];
      foreach (valid[s]) begin
        valid[s] = (s == 0); pm[s] = 0; path[s] = {};
        for (int j = 0; j < n_len; j++) path[s].push_back(1'b0);
      end
      for (int i = 0; i < n_len; i++) begin
        for (int s = 0; s < l_size; s++) lam[s] = valid[s] ? leaf_llr(ch, path[s], i, q) : 0;
        if (frozen[i]) begin
          for (int s = 0; s < l_size; s++)
            if (valid[s] && lam[s] < 0) pm[s] = sat_pm(pm[s] + absi(lam[s]));
          if (pruned && (i == n_len - 1 || !frozen[i + 1])) begin
            // stable re-sort: by key, equal keys with the higher slot first
            int ord[$];
            bit    nv[]; int npm[]; bitq_t np[];
            for (int s = 0; s < l_size; s++) begin
              int pos = 0;
              while (pos < ord.size() &&
                     (key(ord[pos], pm[ord[pos]]) < key(s, pm[s]) ||
                      (key(ord[pos], pm[ord[pos]]) == key(s, pm[s]) && ord[pos] > s))) pos++;
              ord.insert(pos, s);
            end
            nv = new[l_size]; npm = new[l_size]; np = new[l_size];
            foreach (ord[t]) begin nv[t] = valid[ord[t]]; npm[t] = pm[ord[t]]; np[t] = path[ord[t]]; end
            valid = nv; pm = npm; path = np;
            n_resort++;
          end
        end else begin
          int cv[], ce[], ord[$];
          bit nv[]; int npm[]; bitq_t np[];
          int kids[];
          n_info++;
          cv = new[2 * l_size];
          for (int s = 0; s < l_size; s++) begin
            cv[2 * s]     = key(s, pm[s]);
            cv[2 * s + 1] = key(s, valid[s] ? sat_pm(pm[s] + absi(lam[s])) : pm[s]);
          end
          for (int e = 0; e < 2 * l_size; e++) begin
            int pos = 0;
            while (pos < ord.size() &&
                   (pruned ? before_pruned(cv[ord[pos]], ord[pos], cv[e], e, 2 * l_size)
                           : before_full(cv[ord[pos]], ord[pos], cv[e], e))) pos++;
            ord.insert(pos, e);
          end
          nv = new[l_size]; npm = new[l_size]; np = new[l_size]; kids = new[l_size];
          for (int t = 0; t < l_size; t++) begin
            int e = ord[t];
            int s = e / 2;
            bit hd = lam[s] < 0;
            nv[t]  = (cv[e] >> m) == 0;
            npm[t] = cv[e] & ((1 << m) - 1);
            np[t]  = path[s];
            np[t][i] = hd ^ bit'(e % 2);
            if (nv[t]) kids[s]++;
          end
          for (int s = 0; s < l_size; s++) if (valid[s]) begin
            if (kids[s] == 2) n_dup++;
            if (kids[s] == 0) n_kill++;
          end
          valid = nv; pm = npm; path = np;
        end
      end
      // codeword selection
      begin
        bit pass[]; bit anyp = 0; int best = -1; int bestall = -1;
        pass = new[l_size];
        for (int s = 0; s < l_size; s++) begin
          bitq_t info;
          for (int j = 0; j < n_len; j++) if (!frozen[j]) info.push_back(path[s][j]);
          pass[s] = crc_ok(info, crc_len, poly);
          if (valid[s] && pass[s]) anyp = 1;
        end
        for (int s = 0; s < l_size; s++) begin
          if (valid[s] && (bestall < 0 || pm[s] < pm[bestall])) bestall = s;
          if (valid[s] && (!crc_en || !anyp || pass[s]) && (best < 0 || pm[s] < pm[best])) best = s;
        end
        u_out = path[best]; metric_out = pm[best]; pass_out = pass[best];
        chose_non_min = pm[best] != pm[bestall];
        none_passed   = crc_en && !anyp;
      end
    endfunction
  endclass

endpackage

// pscl_ref_pkg: bit-exact behavioural reference of the PSCL decoder, for the
// testbenches only.
//
// It recomputes every decision LLR from the partition root by walking the
// tree with the f and g rules (no stored intermediate LLRs, no pointer
// tables), copies whole paths on every decision, and evaluates CRCs by
// polynomial division over the information bits. It uses the same number
// formats, saturation and tie-breaking rules as the RTL:
//   f = sgn(a)sgn(b)min(|a|,|b|), g = b + (1-2beta)a, both saturated to
//   +-(2^(QA-1)-1); path metric penalty |alpha| when the bit disagrees with
//   the sign of alpha, saturating at 2^QPM-1; the L best candidates by
//   (valid, metric, index 2*path+bit) survive in that order.
// It also provides a polar encoder, an AWGN channel with LLR quantisation
// and a Bhattacharyya-bound code construction.
package pscl_ref_pkg;

  typedef int int_da[];
  typedef bit bit_da[];

  function automatic int sat(int v, int qa);
    int m = (1 << (qa - 1)) - 1;
    if (v > m) return m;
    if (v < -m) return -m;
    return v;
  endfunction

  function automatic int absi(int v);
    return (v < 0) ? -v : v;
  endfunction

  function automatic int f_ref(int a, int b, int qa);
    int mg = (absi(a) < absi(b)) ? absi(a) : absi(b);
    mg = sat(mg, qa);
    return ((a < 0) != (b < 0)) ? -mg : mg;
  endfunction

  function automatic int g_ref(int a, int b, bit beta, int qa);
    return sat(beta ? b - a : b + a, qa);
  endfunction

  // x_k = XOR of u_m over all m whose binary digits include those of k
  function automatic bit_da encode(bit_da u);
    bit_da x;
    int n = u.size();
    x = new[n];
    for (int k = 0; k < n; k++) begin
      x[k] = 0;
      for (int m = 0; m < n; m++)
        if ((m & k) == k) x[k] ^= u[m];
    end
    return x;
  endfunction

  // fast version by butterflies, used where sizes are large
  function automatic bit_da encode_fast(bit_da u);
    bit_da x = u;
    int n = u.size();
    for (int span = 1; span < n; span *= 2)
      for (int i = 0; i < n; i++)
        if ((i & span) == 0) x[i] ^= x[i + span];
    return x;
  endfunction

  // LLRs of one child of a node: left (f) or right (g with left-child bits)
  function automatic int_da child(int_da a, bit right, bit_da beta_l, int qa);
    int_da c;
    int h = a.size() / 2;
    c = new[h];
    for (int i = 0; i < h; i++)
      c[i] = right ? g_ref(a[i], a[i + h], beta_l[i], qa) : f_ref(a[i], a[i + h], qa);
    return c;
  endfunction

  // Walk from a node with LLRs a (covering bits base..base+size-1 of u) down
  // to the node of size 'target' that contains bit 'pos'.
  function automatic int_da descend(int_da a, bit_da u, int base, int pos, int target, int qa);
    int_da cur = a;
    int    b = base;
    while (cur.size() > target) begin
      int h = cur.size() / 2;
      if (pos >= b + h) begin
        bit_da seg = new[h];
        for (int i = 0; i < h; i++) seg[i] = u[b + i];
        cur = child(cur, 1'b1, encode_fast(seg), qa);
        b += h;
      end else begin
        bit_da dummy = new[h];
        cur = child(cur, 1'b0, dummy, qa);
      end
    end
    return cur;
  endfunction

  // CRC remainder (MSB first, zero init) of a bit string, by long division
  function automatic int crc_rem(bit_da msg, int w, int poly);
    bit_da r;
    int n = msg.size();
    int out = 0;
    r = new[n + w];
    for (int i = 0; i < n; i++) r[i] = msg[i];
    for (int i = n; i < n + w; i++) r[i] = 0;
    for (int i = 0; i < n; i++)
      if (r[i]) begin
        r[i] = 0;
        for (int k = 0; k < w; k++) r[i + 1 + k] ^= poly[w - 1 - k];
      end
    for (int k = 0; k < w; k++) out = (out << 1) | int'(r[n + k]);
    return out;
  endfunction

  // Statistics of the last decode
  int stat_splits;      // decisions on information bits
  int stat_pruned;      // decisions where valid candidates were dropped
  int stat_nonbest;     // partitions where the CRC picked a slot other than 0
  int stat_crcfail;     // partitions where no candidate passed the CRC

  // CRC-aided SCL on one partition with root LLRs 'root'.
  function automatic bit_da scl_partition(int_da root, bit_da frz, int lsize, int qa, int qpm,
                                          int crc_w, int crc_poly, output bit ok);
    int np = root.size();
    bit_da paths[$];
    int    pm[$];
    int    pmax = (1 << qpm) - 1;
    bit_da first = new[np];
    paths.push_back(first);
    pm.push_back(0);
    for (int j = 0; j < np; j++) begin
      bit_da cu[$];
      int    cpm[$];
      int    cidx[$];
      int    nvalid;
      for (int l = 0; l < paths.size(); l++) begin
        int_da leaf = descend(root, paths[l], 0, j, 1, qa);
        int a = leaf[0];
        for (int ub = 0; ub < 2; ub++) begin
          int p = pm[l];
          if (ub == 1 && frz[j]) continue;
          if ((ub == 0 && a < 0) || (ub == 1 && a > 0)) p = p + absi(a);
          if (p > pmax) p = pmax;
          begin
            bit_da nu = new[np](paths[l]);
            nu[j] = ub[0];
            cu.push_back(nu);
            cpm.push_back(p);
            cidx.push_back(2 * l + ub);
          end
        end
      end
      if (!frz[j]) stat_splits++;
      nvalid = cu.size();
      if (nvalid > lsize) stat_pruned++;
      paths.delete();
      pm.delete();
      // selection: repeatedly take the best remaining candidate
      for (int r = 0; r < lsize && r < nvalid; r++) begin
        int best = -1;
        for (int c = 0; c < cu.size(); c++)
          if (cidx[c] >= 0 &&
              (best < 0 || cpm[c] < cpm[best] || (cpm[c] == cpm[best] && cidx[c] < cidx[best])))
            best = c;
        paths.push_back(cu[best]);
        pm.push_back(cpm[best]);
        cidx[best] = -1;
      end
    end
    // CRC check in metric order
    ok = 0;
    for (int l = 0; l < paths.size(); l++) begin
      bit_da msg;
      int k = 0;
      for (int i = 0; i < np; i++) if (!frz[i]) k++;
      msg = new[k];
      k = 0;
      for (int i = 0; i < np; i++) if (!frz[i]) begin msg[k] = paths[l][i]; k++; end
      if (crc_rem(msg, crc_w, crc_poly) == 0) begin
        if (l != 0) stat_nonbest++;
        ok = 1;
        return paths[l];
      end
    end
    stat_crcfail++;
    return paths[0];
  endfunction

  // Whole PSCL decode of one frame.
  function automatic bit_da pscl_decode(int_da llr, bit_da frz, int parts, int lsize, int qa,
                                        int qpm, int crc_w, int crc_poly, output bit_da ok);
    int n  = llr.size();
    int np = n / parts;
    bit_da u = new[n];
    ok = new[parts];
    for (int p = 0; p < parts; p++) begin
      int_da root = descend(llr, u, 0, p * np, np, qa);
      bit_da fz = new[np];
      bit_da up;
      bit    okp;
      for (int i = 0; i < np; i++) fz[i] = frz[p * np + i];
      up = scl_partition(root, fz, lsize, qa, qpm, crc_w, crc_poly, okp);
      ok[p] = okp;
      for (int i = 0; i < np; i++) u[p * np + i] = up[i];
    end
    return u;
  endfunction

  // Frozen set: the n-k bit channels with the largest Bhattacharyya bound at
  // design Eb/N0 (dB) and rate k/n are frozen.
  function automatic bit_da construct(int n, int k, real ebn0_db);
    real z[];
    bit_da frz = new[n];
    real z0 = $exp(-(real'(k) / real'(n)) * (10.0 ** (ebn0_db / 10.0)));
    z = new[n];
    z[0] = z0;
    for (int len = 1; len < n; len *= 2)
      for (int i = len - 1; i >= 0; i--) begin
        real zi = z[i];
        z[2 * i]     = 2.0 * zi - zi * zi;
        z[2 * i + 1] = zi * zi;
      end
    for (int i = 0; i < n; i++) frz[i] = 1;
    for (int c = 0; c < k; c++) begin
      int best = -1;
      for (int i = 0; i < n; i++)
        if (frz[i] && (best < 0 || z[i] < z[best])) best = i;
      frz[best] = 0;
    end
    return frz;
  endfunction

  // Information bits of a frame: random data, then in each partition the last
  // crc_w information bits carry the CRC of the partition's other ones.
  function automatic bit_da make_message(bit_da frz, int parts, int crc_w, int crc_poly);
    int n  = frz.size();
    int np = n / parts;
    bit_da u = new[n];
    for (int p = 0; p < parts; p++) begin
      int pos[$];
      for (int i = 0; i < np; i++) if (!frz[p * np + i]) pos.push_back(p * np + i);
      if (pos.size() > crc_w) begin
        bit_da data = new[pos.size() - crc_w];
        int    c;
        for (int i = 0; i < data.size(); i++) begin
          data[i] = 1'($urandom);
          u[pos[i]] = data[i];
        end
        c = crc_rem(data, crc_w, crc_poly);
        for (int i = 0; i < crc_w; i++) u[pos[data.size() + i]] = 1'(c >> (crc_w - 1 - i));
      end
    end
    return u;
  endfunction

  // BPSK over AWGN, LLR = 2y/sigma^2 quantised with 'frac' fractional bits.
  function automatic int_da channel(bit_da x, real ebn0_db, real rate, int frac, int qa);
    int_da llr = new[x.size()];
    real sigma = $sqrt(1.0 / (2.0 * rate * (10.0 ** (ebn0_db / 10.0))));
    for (int i = 0; i < x.size(); i++) begin
      real u1 = (real'($urandom % 32'hFFFFFF) + 1.0) / 16777217.0;
      real u2 = real'($urandom % 32'hFFFFFF) / 16777216.0;
      real nz = $sqrt(-2.0 * $ln(u1)) * $cos(6.283185307179586 * u2);
      real y  = (x[i] ? -1.0 : 1.0) + sigma * nz;
      real v  = 2.0 * y / (sigma * sigma) * real'(1 << frac);
      llr[i] = sat($rtoi(v < 0.0 ? v - 0.5 : v + 0.5), qa);
    end
    return llr;
  endfunction

  // Rows of PE LLRs a node at level s occupies.
  function automatic int rows(int s, int pe);
    return ((1 << s) > pe) ? (1 << s) / pe : 1;
  endfunction

  // Update cycles of the SC tree above the partitions to produce the root of
  // partition p (n = log2 N, npl = log2 of the partition length).
  function automatic int tree_cycles(int n, int npl, int p, int pe);
    int c = 0;
    int top;
    if (p == 0) top = n - 1;
    else begin
      top = npl;
      while (((p >> (top - npl)) & 1) == 0) top++;
    end
    for (int s = npl; s <= top; s++) c += rows(s, pe);
    return c;
  endfunction

  // Update plus decision cycles of the list decoder for one partition.
  function automatic int list_cycles(int npl, int pe);
    int c = 0;
    for (int j = 0; j < (1 << npl); j++) begin
      int t;
      if (j == 0) t = npl - 1;
      else begin
        t = 0;
        while (((j >> t) & 1) == 0) t++;
      end
      for (int s = 1; s <= t; s++) c += rows(s, pe);
      c += 1;
    end
    return c;
  endfunction

endpackage

// polar_ref_pkg: behavioural reference of the rateless polar code for the
// testbenches. It builds a nested code (information sets from
// Bhattacharyya parameters of a BEC), the reverse bit mapping, the greedy
// channel-aware schedule (in real numbers and in the scheduler's fixed
// point), encodes, and decodes with a plain software model of the
// scheduled SCL decoder written with loops over whole vectors (not the
// hardware's lane/level organisation), so the RTL can be compared bit for
// bit. Indices are 0-based.
package polar_ref_pkg;

  typedef int   ivec_t[];
  typedef bit   bvec_t[];
  typedef real  rvec_t[];

  function automatic int sat(input int x, input int w);
    int mx = (1 << (w - 1)) - 1;
    if (x > mx) return mx;
    if (x < -mx) return -mx;
    return x;
  endfunction

  // x = u * G_n for a block of n bits, G = F^{(x)log n}, F = [1 0; 1 1]
  function automatic bvec_t polar_encode(input bvec_t u);
    bvec_t x = u;
    int n = u.size();
    for (int h = 1; h < n; h *= 2)
      for (int b = 0; b < n; b += 2 * h)
        for (int j = 0; j < h; j++) x[b + j] = x[b + j] ^ x[b + h + j];
    return x;
  endfunction

  // Bhattacharyya parameters of the n synthetic channels of a length-n
  // code (1 -> n order) for channel parameters z
  function automatic rvec_t bhat(input rvec_t z);
    rvec_t v = z;
    int n = z.size();
    // root first: a node of size 2h gives its upper child f (z1+z2-z1z2)
    // and its lower child g (z1 z2), position by position
    for (int h = n / 2; h >= 1; h /= 2) begin
      rvec_t nv = new[n];
      for (int b = 0; b < n; b += 2 * h)
        for (int j = 0; j < h; j++) begin
          real z1 = v[b + j], z2 = v[b + h + j];
          nv[b + j]     = z1 + z2 - z1 * z2;
          nv[b + h + j] = z1 * z2;
        end
      v = nv;
    end
    return v;
  endfunction

  // Leaf Z under a partially known leaf set, using the same node rule as the
  // decoder: upper child h/f, lower child g/pass depending on whether the
  // sibling subtree is fully known.
  function automatic rvec_t sched_z(input rvec_t zc, input bvec_t known);
    int n = zc.size();
    rvec_t cur = zc, nxt;
    for (int sz = n; sz >= 2; sz /= 2) begin
      int h = sz / 2;
      nxt = new[n];
      for (int b = 0; b < n; b += sz) begin
        bit up_k = 1, lo_k = 1;
        for (int j = 0; j < h; j++) begin
          up_k &= known[b + j];
          lo_k &= known[b + h + j];
        end
        for (int j = 0; j < h; j++) begin
          real z1 = cur[b + j], z2 = cur[b + h + j];
          nxt[b + j]     = lo_k ? z1 : (z1 + z2 - z1 * z2);
          nxt[b + h + j] = up_k ? z1 * z2 : z2;
        end
      end
      cur = nxt;
    end
    return cur;
  endfunction

  // K best positions (smallest Z, ties to the larger index) as a mask
  function automatic bvec_t best_set(input rvec_t z, input int k);
    int n = z.size();
    bvec_t m = new[n];
    for (int c = 0; c < k; c++) begin
      int bi = -1;
      for (int i = 0; i < n; i++)
        if (!m[i] && (bi < 0 || z[i] <= z[bi])) bi = i;
      m[bi] = 1;
    end
    return m;
  endfunction

  // Greedy channel-aware schedule with copy resolution. zc: channel Z per
  // code position, info: information positions, partner: copy partner or -1.
  function automatic ivec_t greedy_schedule(input rvec_t zc, input bvec_t info, input ivec_t partner);
    int n = zc.size();
    bvec_t known = new[n];
    ivec_t s;
    int cnt = 0;
    for (int i = 0; i < n; i++) begin
      known[i] = !info[i];
      cnt += info[i];
    end
    s = new[cnt];
    for (int p = 0; p < cnt; ) begin
      rvec_t z = sched_z(zc, known);
      int bi = -1;
      for (int i = 0; i < n; i++)
        if (!known[i] && (bi < 0 || z[i] < z[bi])) bi = i;
      s[p++] = bi;
      known[bi] = 1;
      if (partner[bi] >= 0 && !known[partner[bi]]) begin
        s[p++] = partner[bi];
        known[partner[bi]] = 1;
      end
    end
    return s;
  endfunction

  // Fixed-point version of the greedy schedule, in the number format of
  // the scheduler hardware: zw-bit fractions with 1.0 = 2^zw - 1, product
  // (a*b + a + b) >> zw, f clamped to 1.0. zc: channel Z per position,
  // cnext: copy rings (each leaf names the next member, itself if none).
  // Smallest Z wins, ties to the lowest index; the picked leaf's unknown
  // ring members follow it in ring order.
  function automatic longint zmul_fx(input longint a, input longint b, input int zw);
    return (a * b + a + b) >> zw;
  endfunction

  function automatic ivec_t greedy_schedule_fx(input ivec_t zc, input bvec_t info, input ivec_t cnext, input int zw);
    int n = zc.size();
    longint one = (longint'(1) << zw) - 1;
    bvec_t known = new[n];
    longint cur [];
    int s [$];
    ivec_t r;
    for (int i = 0; i < n; i++) known[i] = !info[i];
    forever begin
      int bi = -1;
      cur = new[n];
      for (int i = 0; i < n; i++) cur[i] = zc[i];
      for (int sz = n; sz >= 2; sz /= 2) begin
        int h = sz / 2;
        for (int b = 0; b < n; b += sz) begin
          bit up_k = 1, lo_k = 1;
          for (int j = 0; j < h; j++) begin
            up_k &= known[b + j];
            lo_k &= known[b + h + j];
          end
          for (int j = 0; j < h; j++) begin
            longint z1 = cur[b + j], z2 = cur[b + h + j];
            longint fv = z1 + z2 - zmul_fx(z1, z2, zw);
            cur[b + j]     = lo_k ? z1 : ((fv > one) ? one : fv);
            cur[b + h + j] = up_k ? zmul_fx(z1, z2, zw) : z2;
          end
        end
      end
      for (int i = 0; i < n; i++)
        if (!known[i] && (bi < 0 || cur[i] < cur[bi])) bi = i;
      if (bi < 0) break;
      s.push_back(bi);
      known[bi] = 1;
      for (int w = cnext[bi]; w != bi; w = cnext[w])
        if (info[w] && !known[w]) begin
          s.push_back(w);
          known[w] = 1;
        end
    end
    r = new[s.size()];
    foreach (s[i]) r[i] = s[i];
    return r;
  endfunction

  // reverse mapping: ascending I_p against descending I_q
  function automatic ivec_t reverse_map(input bvec_t ip, input bvec_t iq);
    int n = ip.size();
    ivec_t partner = new[n];
    int a = 0, b = n - 1;
    foreach (partner[i]) partner[i] = -1;
    while (a < n && b >= 0) begin
      if (!ip[a]) a++;
      else if (!iq[b]) b--;
      else begin
        partner[a] = b;
        partner[b] = a;
        a++;
        b--;
      end
    end
    return partner;
  endfunction

  // CRC-16, generator x^16+x^12+x^5+1, by long division of msg * x^16
  function automatic bit [15:0] crc16(input bvec_t msg);
    bit work [];
    bit [16:0] g = 17'h11021;
    bit [15:0] r;
    work = new[msg.size() + 16];
    foreach (msg[i]) work[i] = msg[i];
    for (int i = 0; i < msg.size(); i++)
      if (work[i]) for (int j = 0; j <= 16; j++) work[i + j] ^= g[16 - j];
    for (int j = 0; j < 16; j++) r[15 - j] = work[msg.size() + j];
    return r;
  endfunction

  // LLR of leaf t in one path
  function automatic int leaf_llr(input ivec_t ch, input bvec_t u, input bvec_t known,
                                  input int t, input int w);
    int n = ch.size();
    ivec_t cur = ch;
    int base = 0;
    for (int sz = n; sz >= 2; sz /= 2) begin
      int h = sz / 2;
      bit lower = ((t - base) >= h);
      int sb = lower ? base : base + h;
      bit sk = 1;
      bvec_t su = new[h], sbeta;
      ivec_t nxt = new[h];
      for (int j = 0; j < h; j++) begin
        sk &= known[sb + j];
        su[j] = u[sb + j];
      end
      sbeta = polar_encode(su);
      for (int j = 0; j < h; j++) begin
        int a = cur[j], b = cur[h + j];
        int sa = sbeta[j] ? -a : a;
        if (!lower) begin
          if (sk) nxt[j] = sa;
          else begin
            int ma = a < 0 ? -a : a, mb = b < 0 ? -b : b;
            int mn = ma < mb ? ma : mb;
            nxt[j] = ((a < 0) != (b < 0)) ? -mn : mn;
          end
        end else nxt[j] = sk ? sat(b + sa, w) : b;
      end
      cur = nxt;
      if (lower) base += h;
    end
    return cur[0];
  endfunction

  // Scheduled SCL decoder. Results: u[l], pm[l], act[l] for slots 0..L-1.
  // Returns the number of leaf decisions taken.
  function automatic int scl_decode(input ivec_t ch, input bvec_t info, input ivec_t sched,
                                    input ivec_t copy_next, input int L, input int w, input int pmw,
                                    ref bvec_t u[], ref int pm[], ref bit act[]);
    int n = ch.size();
    int pmmax = (1 << pmw) - 1;
    int decisions = 0;
    bvec_t known = new[n];
    for (int i = 0; i < n; i++) known[i] = !info[i];
    u = new[L];
    pm = new[L];
    act = new[L];
    for (int q = 0; q < L; q++) begin
      u[q] = new[n];
      pm[q] = 0;
      act[q] = (q == 0);
    end
    foreach (sched[p]) begin
      int t = sched[p];
      int cpm [];
      bit cv [];
      bvec_t nu [];
      int npm [];
      bit nact [];
      bit taken [];
      if (known[t]) continue;
      decisions++;
      cpm = new[2 * L];
      cv = new[2 * L];
      for (int q = 0; q < L; q++) begin
        int lv = leaf_llr(ch, u[q], known, t, w);
        int mg = lv < 0 ? -lv : lv;
        int grown = pm[q] + mg > pmmax ? pmmax : pm[q] + mg;
        cpm[2 * q]     = (lv < 0) ? grown : pm[q];
        cpm[2 * q + 1] = (lv < 0) ? pm[q] : grown;
        cv[2 * q] = act[q];
        cv[2 * q + 1] = act[q];
      end
      nu = new[L];
      npm = new[L];
      nact = new[L];
      taken = new[2 * L];
      for (int s = 0; s < L; s++) begin
        int bc = -1;
        for (int c = 0; c < 2 * L; c++) begin
          if (taken[c]) continue;
          if (bc < 0) bc = c;
          else if (cv[c] != cv[bc]) begin if (cv[c]) bc = c; end
          else if (cpm[c] < cpm[bc]) bc = c;
        end
        taken[bc] = 1;
        nu[s] = new[n];
        nu[s] = u[bc / 2];
        nu[s][t] = bc % 2;
        npm[s] = cpm[bc];
        nact[s] = cv[bc];
      end
      for (int q = 0; q < L; q++) begin
        u[q] = nu[q];
        pm[q] = npm[q];
        act[q] = nact[q];
      end
      known[t] = 1;
      for (int c = copy_next[t]; c != t; c = copy_next[c]) begin
        known[c] = 1;
        for (int q = 0; q < L; q++) u[q][c] = u[q][t];
      end
    end
    return decisions;
  endfunction

endpackage

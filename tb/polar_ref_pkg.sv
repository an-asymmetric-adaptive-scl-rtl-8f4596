// polar_ref_pkg: independent behavioural reference models for the
// testbenches: code construction, CRC, PC-aware bit placement, polar
// encoding and a recursive min-sum SC decoder. Written from the textbook
// definitions, without sharing code with the RTL.
package polar_ref_pkg;
  localparam int NMAX = 1024;
  typedef int iarr[];
  typedef bit [NMAX-1:0] bvec;
  typedef bit [NMAX-1:0][1:0] tvec;

  // Construction: rank positions by popcount of the index (ties: higher
  // index more reliable); the k+npc best carry information, the npc worst of
  // those become PC bits. Good enough to exercise the hardware.
  function automatic tvec construct(int n, int k, int npc);
    tvec t = '0;
    int score[$];
    int idx[$];
    for (int i = 0; i < n; i++) begin idx.push_back(i); score.push_back($countones(i) * 4096 + i); end
    for (int a = 0; a < n; a++)
      for (int b = a + 1; b < n; b++)
        if (score[b] > score[a]) begin
          int ts = score[a]; int ti = idx[a];
          score[a] = score[b]; idx[a] = idx[b]; score[b] = ts; idx[b] = ti;
        end
    for (int r = 0; r < k + npc && r < n; r++) t[idx[r]] = (r >= k) ? 2'd2 : 2'd1;
    return t;
  endfunction

  // CRC remainder of bits d[0..a-1] (d[0] first), generator poly, length len
  function automatic int unsigned crc_rem(bvec d, int a, int len, int unsigned poly);
    int unsigned r = 0;
    for (int i = 0; i < a; i++) begin
      int unsigned top = (r >> (len - 1)) & 1;
      r = (r << 1) & ((1 << len) - 1);
      if (top ^ d[i]) r ^= poly & ((1 << len) - 1);
    end
    return r;
  endfunction

  function automatic bvec add_crc(bvec d, int k, int len, int unsigned poly);
    bvec o = d;
    int unsigned r;
    if (len == 0) return o;
    r = crc_rem(d, k - len, len, poly);
    for (int i = 0; i < len; i++) o[k - len + i] = (r >> (len - 1 - i)) & 1;
    return o;
  endfunction

  function automatic bvec place(bvec c, int n, tvec t);
    bvec u = '0;
    bit [4:0] y = 0;
    int kk = 0;
    for (int i = 0; i < n; i++) begin
      y = {y[0], y[4:1]};
      if (t[i] == 2'd1) begin u[i] = c[kk]; y[0] ^= c[kk]; kk++; end
      else if (t[i] == 2'd2) u[i] = y[0];
    end
    return u;
  endfunction

  // c = u F^(x)n, recursive: enc(u) = [enc(a) ^ enc(b), enc(b)]
  function automatic iarr enc_rec(iarr u);
    iarr a, b, r;
    int h = u.size() / 2;
    if (u.size() == 1) return u;
    a = new[h]; b = new[h];
    for (int j = 0; j < h; j++) begin a[j] = u[j]; b[j] = u[h + j]; end
    a = enc_rec(a); b = enc_rec(b);
    r = new[2 * h];
    for (int j = 0; j < h; j++) begin r[j] = a[j] ^ b[j]; r[h + j] = b[j]; end
    return r;
  endfunction

  function automatic bvec encode(bvec u, int n);
    iarr v = new[n];
    bvec c = '0;
    for (int i = 0; i < n; i++) v[i] = u[i];
    v = enc_rec(v);
    for (int i = 0; i < n; i++) c[i] = v[i][0];
    return c;
  endfunction

  function automatic int satq(int v, int q);
    int hi = (1 << (q - 1)) - 1;
    return v > hi ? hi : (v < -hi ? -hi : v);
  endfunction

  // a[0..k-1] == b[0..k-1]
  function automatic bit eqk(bvec a, bvec b, int k);
    for (int i = 0; i < k; i++) if (a[i] != b[i]) return 0;
    return 1;
  endfunction

  // recursive min-sum SC decoder state
  class sc_ref;
    int q;
    tvec t;
    bit [4:0] y;
    int kk;
    bvec info;
    function new(int q_, tvec t_); q = q_; t = t_; endfunction
    function iarr rec(int ub, iarr l);
      iarr la, lb, ba, bb, r;
      int h = l.size() / 2;
      if (l.size() == 1) begin
        int u;
        y = {y[0], y[4:1]};
        if (t[ub] == 2'd1) begin u = (l[0] < 0); y[0] ^= u[0]; info[kk] = u[0]; kk++; end
        else if (t[ub] == 2'd2) u = y[0];
        else u = 0;
        r = new[1]; r[0] = u;
        return r;
      end
      la = new[h]; lb = new[h];
      for (int j = 0; j < h; j++) begin
        int a = l[j], b = l[j + h];
        int m = (a < 0 ? -a : a) < (b < 0 ? -b : b) ? (a < 0 ? -a : a) : (b < 0 ? -b : b);
        la[j] = ((a < 0) ^ (b < 0)) ? -m : m;
      end
      ba = rec(ub, la);
      for (int j = 0; j < h; j++) lb[j] = satq(l[j + h] + (ba[j] ? -l[j] : l[j]), q);
      bb = rec(ub + h, lb);
      r = new[2 * h];
      for (int j = 0; j < h; j++) begin r[j] = ba[j] ^ bb[j]; r[j + h] = bb[j]; end
      return r;
    endfunction
    function bvec run(iarr l);
      iarr d;
      y = 0; kk = 0; info = '0;
      d = rec(0, l);
      return info;
    endfunction
  endclass
endpackage

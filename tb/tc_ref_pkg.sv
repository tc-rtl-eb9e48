// tc_ref_pkg: bit-accurate software model of the fast-SSC decoder, used by
// the testbenches as an independent reference.
//
// ref_decode() decodes one frame recursively, node by node, with the same
// fixed-point rules as the hardware (Q-bit symmetric saturation, f by
// sign XOR and minimum magnitude, stage-0 u1 taken as the XOR of the input
// signs, comparator ties resolved towards the first input) and the same
// node rules (N0, N1, REP, SPC for nodes of four bits or more, two-bit
// nodes decided directly).  It also adds up the latency the schedule is
// specified to have: 1 cycle per N0, N1, two-bit and regular node, log2 of
// the size for REP and log2 of the size plus 1 for SPC.
package tc_ref_pkg;
  import tc_pkg::*;

  int unsigned QR = 5;   // inner LLR width of the model

  typedef int      ivec_t[];
  typedef bit      bvec_t[];

  function automatic int sat(int x);
    int mx = (1 << (QR - 1)) - 1;
    if (x > mx)  return mx;
    if (x < -mx) return -mx;
    return x;
  endfunction

  function automatic int iabs(int x);
    return x < 0 ? -x : x;
  endfunction

  function automatic int f_fn(int a, int b);
    int m = iabs(b) < iabs(a) ? iabs(b) : iabs(a);
    return ((a < 0) ^ (b < 0)) ? -m : m;
  endfunction

  // Counters per node kind, indexed by node_kind_t.
  typedef int cnt_t[6];

  function automatic bvec_t ref_node(int m, int j, ivec_t a, bit frz[],
                                     inout int lat, inout cnt_t cnt,
                                     inout int flips);
    int    sz  = 1 << m;
    int    h   = sz / 2;
    int    nf  = 0;
    bvec_t b   = new[sz];
    bit    first_f, last_i, others_f, others_i;
    for (int i = 0; i < sz; i++) nf += frz[j*sz + i];
    first_f  = frz[j*sz];
    last_i   = !frz[j*sz + sz - 1];
    if (m == 1) begin
      bit u1, u2; int g;
      u1 = frz[j*2] ? 1'b0 : ((a[0] < 0) ^ (a[1] < 0));
      g  = u1 ? sat(a[1] - a[0]) : sat(a[1] + a[0]);
      u2 = frz[j*2+1] ? 1'b0 : (g < 0);
      b[0] = u1 ^ u2; b[1] = u2;
      lat += 1; cnt[NODE_PAIR]++;
    end else if (nf == sz) begin
      foreach (b[i]) b[i] = 0;
      lat += 1; cnt[NODE_N0]++;
    end else if (nf == 0) begin
      foreach (b[i]) b[i] = a[i] < 0;
      lat += 1; cnt[NODE_N1]++;
    end else if (nf == sz - 1 && last_i) begin
      ivec_t v = a;
      for (int len = sz; len > 1; len /= 2)
        for (int i = 0; i < len/2; i++) v[i] = sat(v[i] + v[i + len/2]);
      foreach (b[i]) b[i] = v[0] < 0;
      lat += m; cnt[NODE_REP]++;
    end else if (nf == 1 && first_f) begin
      ivec_t v = a;
      ivec_t id = new[sz];
      bit par; int jm;
      foreach (id[i]) id[i] = i;
      for (int len = sz; len > 2; len /= 2)
        for (int i = 0; i < len/2; i++) begin
          bit c = iabs(v[i + len/2]) < iabs(v[i]);
          id[i] = c ? id[i + len/2] : id[i];
          v[i]  = f_fn(v[i], v[i + len/2]);
        end
      par = (v[0] < 0) ^ (v[1] < 0);
      jm  = (iabs(v[1]) < iabs(v[0])) ? id[1] : id[0];
      foreach (b[i]) b[i] = (a[i] < 0) ^ (i == jm && par);
      if (par) flips++;
      lat += m + 1; cnt[NODE_SPC]++;
    end else begin
      ivec_t l = new[h];
      ivec_t r = new[h];
      bvec_t bl, br;
      for (int i = 0; i < h; i++) l[i] = f_fn(a[i], a[i + h]);
      lat += 1; cnt[NODE_REG]++;
      bl = ref_node(m - 1, 2*j, l, frz, lat, cnt, flips);
      for (int i = 0; i < h; i++) r[i] = bl[i] ? sat(a[i + h] - a[i]) : sat(a[i + h] + a[i]);
      br = ref_node(m - 1, 2*j + 1, r, frz, lat, cnt, flips);
      for (int i = 0; i < h; i++) begin b[i] = bl[i] ^ br[i]; b[i + h] = br[i]; end
    end
    return b;
  endfunction

  // Polar transform x = u * G, G the n-th Kronecker power of [1 0; 1 1];
  // it is its own inverse over GF(2).
  function automatic bvec_t polar_transform(bvec_t u);
    bvec_t x = u;
    int n = x.size();
    for (int h = 1; h < n; h *= 2)
      for (int blk = 0; blk < n; blk += 2*h)
        for (int i = blk; i < blk + h; i++) x[i] = x[i] ^ x[i + h];
    return x;
  endfunction
endpackage

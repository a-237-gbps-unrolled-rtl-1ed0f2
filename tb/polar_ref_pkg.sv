// polar_ref_pkg: behavioural reference for the testbenches of the polar
// decoder: a polar encoder, a channel model and a recursive Fast-SSC decoder.
//
// The reference decoder walks the decoder tree recursively, one frame at a
// time, with no pipeline: it is written from the algorithm, not from the RTL,
// and uses the same fixed-point rules (Q-bit LLRs saturated to
// +-(2^(Q-1)-1), min-sum F, G, ML repetition and SPC leaves of length
// <= 4, hard-decision Rate-1 leaves). Its results are therefore bit-exact
// predictions of the hardware's output. It also counts how often an SPC leaf
// had to flip a bit, so that testbenches can show that case occurred.
package polar_ref_pkg;

  typedef int llr_q[];
  typedef bit bits_q[];

  int spc_flips = 0;
  int rep_nodes = 0;
  int rate1_nodes = 0;
  int rate0_nodes = 0;
  int g_saturations = 0;

  function automatic int sat(int v, int q);
    int m = (1 << (q - 1)) - 1;
    if (v > m) return m;
    if (v < -m) return -m;
    return v;
  endfunction

  // x = u F^{(x)n}: x = [enc(u_l) ^ enc(u_r), enc(u_r)].
  function automatic bits_q encode(bits_q u);
    bits_q x, xl, xr, ul, ur;
    int h = u.size() / 2;
    if (u.size() == 1) return u;
    ul = new[h]; ur = new[h];
    for (int i = 0; i < h; i++) begin ul[i] = u[i]; ur[i] = u[i + h]; end
    xl = encode(ul); xr = encode(ur);
    x = new[u.size()];
    for (int i = 0; i < h; i++) begin x[i] = xl[i] ^ xr[i]; x[i + h] = xr[i]; end
    return x;
  endfunction

  function automatic bits_q decode(llr_q a, bits_q frozen, int q);
    int n = a.size();
    int h = n / 2;
    int nfz = 0;
    bits_q b = new[n];
    foreach (frozen[i]) nfz += frozen[i];
    if (nfz == n) begin
      rate0_nodes++;
      foreach (b[i]) b[i] = 0;
    end else if (nfz == 0) begin
      rate1_nodes++;
      foreach (b[i]) b[i] = (a[i] < 0);
    end else if (n <= 4 && nfz == n - 1 && !frozen[n-1]) begin
      int s = 0;
      rep_nodes++;
      foreach (a[i]) s += a[i];
      foreach (b[i]) b[i] = (s < 0);
    end else if (n <= 4 && nfz == 1 && frozen[0]) begin
      bit p = 0;
      int best = 1 << 30, idx = 0;
      foreach (a[i]) begin
        int m = (a[i] < 0) ? -a[i] : a[i];
        b[i] = (a[i] < 0);
        p ^= b[i];
        if (m < best) begin best = m; idx = i; end
      end
      if (p) begin b[idx] = !b[idx]; spc_flips++; end
    end else begin
      llr_q al = new[h], ar = new[h];
      bits_q fl = new[h], fr = new[h], bl, br;
      for (int i = 0; i < h; i++) begin
        int x = a[i], y = a[i + h];
        int mx = (x < 0) ? -x : x, my = (y < 0) ? -y : y;
        int m = (mx < my) ? mx : my;
        al[i] = sat(((x < 0) != (y < 0)) ? -m : m, q);
        fl[i] = frozen[i];
        fr[i] = frozen[i + h];
      end
      bl = decode(al, fl, q);
      for (int i = 0; i < h; i++) begin
        int s = bl[i] ? a[i + h] - a[i] : a[i + h] + a[i];
        if (sat(s, q) != s) g_saturations++;
        ar[i] = sat(s, q);
      end
      br = decode(ar, fr, q);
      for (int i = 0; i < h; i++) begin b[i] = bl[i] ^ br[i]; b[i + h] = br[i]; end
    end
    return b;
  endfunction

  // Standard normal sample (Box-Muller).
  function automatic real gauss();
    real u1 = (real'($urandom % 1000000) + 1.0) / 1000001.0;
    real u2 = real'($urandom % 1000000) / 1000000.0;
    return $sqrt(-2.0 * $ln(u1)) * $cos(6.283185307179586 * u2);
  endfunction

  // BPSK over AWGN: y = (1 - 2x) + sigma * n, LLR = 2y/sigma^2, quantised with
  // 'scale' steps per unit LLR and saturated to Q bits.
  function automatic llr_q channel(bits_q x, real sigma, real scale, int q);
    llr_q a = new[x.size()];
    foreach (x[i]) begin
      real y = (x[i] ? -1.0 : 1.0) + sigma * gauss();
      real l = 2.0 * y / (sigma * sigma) * scale;
      if (l > 1000.0) l = 1000.0;
      if (l < -1000.0) l = -1000.0;
      a[i] = sat(int'(l), q);  // int'() rounds to nearest
    end
    return a;
  endfunction

endpackage

// polar_ref_pkg: software reference for the decoder testbenches.
//
// Arithmetic is done on plain integers: an LLR is turned into a signed value,
// the g rules are evaluated as (1-2u)a + b with saturation, and the result is
// turned back into sign-magnitude. The only sign-magnitude detail kept is the
// sign of a zero sum, which takes the sign of the second term. The SC decoder
// is written leaf by leaf (mixed-radix digits of the leaf index select the path),
// unlike the hardware's step-by-step tree walk. The encoder applies the kernels
// from the leaves to the root in the bit-reversed order the decoder expects.
package polar_ref_pkg;
  import polar_pkg::*;

  localparam int RMAX_N = 4096;
  localparam int RMAX_D = 14;

  function automatic int sgn(input int v, input int q); return (v >> (q - 1)) & 1; endfunction
  function automatic int mag(input int v, input int q); return v & ((1 << (q - 1)) - 1); endfunction
  function automatic int mk(input int s, input int m, input int q); return (s << (q - 1)) | m; endfunction

  // s1*m1 + s2*m2 (signs as bits), saturated
  function automatic int add_sm(input int s1, input int m1, input int s2, input int m2, input int q);
    int v, maxm;
    maxm = (1 << (q - 1)) - 1;
    v = ((s1 != 0) ? -m1 : m1) + ((s2 != 0) ? -m2 : m2);
    if (v > maxm) v = maxm;
    if (v < -maxm) v = -maxm;
    if (v == 0) return mk(s2, 0, q);
    return (v < 0) ? mk(1, -v, q) : mk(0, v, q);
  endfunction

  function automatic int min2(input int a, input int b); return (a < b) ? a : b; endfunction

  function automatic int f2(input int a, input int b, input int q);
    return mk(sgn(a, q) ^ sgn(b, q), min2(mag(a, q), mag(b, q)), q);
  endfunction
  function automatic int f3(input int a, input int b, input int c, input int q);
    return mk(sgn(a, q) ^ sgn(b, q) ^ sgn(c, q), min2(mag(a, q), min2(mag(b, q), mag(c, q))), q);
  endfunction
  function automatic int g2(input int a, input int b, input int u, input int q);
    return add_sm(u ^ sgn(a, q), mag(a, q), sgn(b, q), mag(b, q), q);
  endfunction
  function automatic int g1t(input int a, input int b, input int c, input int u0, input int q);
    int fbc;
    fbc = f2(b, c, q);
    return add_sm(u0 ^ sgn(a, q), mag(a, q), sgn(fbc, q), mag(fbc, q), q);
  endfunction
  function automatic int g2t(input int b, input int c, input int u0, input int u1, input int q);
    return add_sm(u0 ^ sgn(b, q), mag(b, q), u0 ^ u1 ^ sgn(c, q), mag(c, q), q);
  endfunction

  // kernel k of a radix-r combine
  function automatic int comb(input int r, input int k, input int b0, input int b1, input int b2);
    if (r == 2) return (k == 0) ? (b0 ^ b1) : b1;
    case (k)
      0: return b0 ^ b1;
      1: return b0 ^ b2;
      default: return b0 ^ b1 ^ b2;
    endcase
  endfunction

  // vector length at each depth
  function automatic void lens(input int ker[$], output int len[RMAX_D]);
    int n;
    n = 1;
    foreach (ker[d]) n *= ker[d];
    for (int d = 0; d < RMAX_D; d++) len[d] = 0;
    len[0] = n;
    foreach (ker[d]) len[d + 1] = len[d] / ker[d];
  endfunction

  function automatic int code_len(input int ker[$]);
    int n;
    n = 1;
    foreach (ker[d]) n *= ker[d];
    return n;
  endfunction

  // decoding latency in cycles, sum over depths of ceil(N_d/2P)((r+1)N/N_d - 1)
  function automatic int latency(input int ker[$], input int p);
    int len[RMAX_D];
    int l;
    lens(ker, len);
    l = 0;
    foreach (ker[d]) l += ceil_div(len[d], 2 * p) * ((ker[d] + 1) * (len[0] / len[d]) - 1);
    return l;
  endfunction

  // code parameters: steps per depth, tightly packed LLR and beta regions
  function automatic void make_cfg(input int ker[$], input int p, output stage_cfg_t cfg[RMAX_D],
                                   output int llr_words, output int beta_words);
    int len[RMAX_D];
    int lo, bo;
    lens(ker, len);
    lo = 0;
    bo = 0;
    for (int d = 0; d < RMAX_D; d++) cfg[d] = '0;
    for (int d = 0; d <= ker.size(); d++) begin
      if (d < ker.size()) begin
        cfg[d].tern  = (ker[d] == 3);
        cfg[d].steps = OFFW'(ceil_div(len[d], 2 * p));
      end
      if (d >= 1 && d < ker.size()) begin
        cfg[d].llr_off = OFFW'(lo);
        lo += ceil_div(len[d], 2 * p);
      end
      if (d >= 1) begin
        cfg[d].beta_off = OFFW'(bo);
        bo += ceil_div(len[d], 2 * p);
      end
    end
    llr_words = lo;
    beta_words = bo;
  endfunction

  // encoder: u (decoding order) -> x (bit-reversed channel order)
  function automatic void encode(input int ker[$], input bit u[RMAX_N], output bit x[RMAX_N]);
    int len[RMAX_D];
    bit cur[RMAX_N];
    bit nxt[RMAX_N];
    int sm, nn, r, m;
    lens(ker, len);
    sm = ker.size();
    cur = u;
    for (int d = sm - 1; d >= 0; d--) begin
      r = ker[d];
      m = len[d + 1];
      nn = len[0] / len[d];
      for (int n = 0; n < nn; n++)
        for (int i = 0; i < m; i++)
          for (int k = 0; k < r; k++)
            nxt[n * len[d] + r * i + k] = bit'(comb(r, k, int'(cur[(n * r) * m + i]),
                                                    int'(cur[(n * r + 1) * m + i]),
                                                    (r == 3) ? int'(cur[(n * r + 2) * m + i]) : 0));
      cur = nxt;
    end
    x = cur;
  endfunction

  // leaf-by-leaf successive-cancellation reference decoder
  int  alpha [RMAX_D][RMAX_N];
  bit  bank  [RMAX_D][3][RMAX_N];

  function automatic void sc_decode(input int ker[$], input int y[RMAX_N], input bit frz[RMAX_N],
                                    input int q, output bit u[RMAX_N]);
    int len[RMAX_D];
    int dig[RMAX_D];
    int pdig[RMAX_D];
    int sm, n, t, dd, r, m, a, b, c;
    lens(ker, len);
    sm = ker.size();
    n = len[0];
    for (int i = 0; i < n; i++) alpha[0][i] = y[i];
    for (int d = 0; d < RMAX_D; d++) pdig[d] = 0;
    for (int i = 0; i < n; i++) begin
      t = i;
      for (int d = sm - 1; d >= 0; d--) begin
        dig[d] = t % ker[d];
        t = t / ker[d];
      end
      dd = 0;
      if (i > 0) begin
        while (dig[dd] == pdig[dd]) dd++;
        for (int d = sm - 1; d > dd; d--) begin
          r = ker[d];
          m = len[d + 1];
          for (int i2 = 0; i2 < m; i2++)
            for (int k = 0; k < r; k++)
              bank[d][pdig[d - 1]][r * i2 + k] = bit'(comb(r, k, int'(bank[d + 1][0][i2]),
                  int'(bank[d + 1][1][i2]), (r == 3) ? int'(bank[d + 1][2][i2]) : 0));
        end
      end
      for (int d = dd; d < sm; d++) begin
        r = ker[d];
        m = len[d + 1];
        for (int i2 = 0; i2 < m; i2++) begin
          a = alpha[d][r * i2];
          b = alpha[d][r * i2 + 1];
          c = (r == 3) ? alpha[d][r * i2 + 2] : 0;
          if (r == 2)
            alpha[d + 1][i2] = (dig[d] == 0) ? f2(a, b, q) : g2(a, b, int'(bank[d + 1][0][i2]), q);
          else if (dig[d] == 0)
            alpha[d + 1][i2] = f3(a, b, c, q);
          else if (dig[d] == 1)
            alpha[d + 1][i2] = g1t(a, b, c, int'(bank[d + 1][0][i2]), q);
          else
            alpha[d + 1][i2] = g2t(b, c, int'(bank[d + 1][0][i2]), int'(bank[d + 1][1][i2]), q);
        end
      end
      u[i] = frz[i] ? 1'b0 : bit'(sgn(alpha[sm][0], q));
      bank[sm][dig[sm - 1]][0] = u[i];
      pdig = dig;
    end
  endfunction
endpackage

// prox_ref_pkg: bit-exact integer reference model of the PrOX array, used by
// the testbenches. Written with plain int arithmetic, independently of the
// RTL types:
//   product term  = floor(g * s / 8)            wrapped to 15 bits
//   partial sum   = Re: rr - ii, Im: ri + ir    wrapped to 15 bits
//   accumulator   = saturating 15-bit sum of the N partial sums
//   projection    = +8 if q - 2^11/rho >= 0, -8 if q + 2^11/rho < 0 (both
//                   15-bit saturating), else floor(q * rho / 2^8) (6 bits)
// and the iteration s^(t) = proj(G-hat s^(t-1)), s_1 = s-check.
package prox_ref_pkg;

  localparam int MAXN = 64;

  function automatic int wrapn(input int v, input int w);
    int m;
    m = v & ((1 << w) - 1);
    if (m >= (1 << (w - 1))) m -= (1 << w);
    return m;
  endfunction

  function automatic int satn(input int v, input int w);
    if (v > (1 << (w - 1)) - 1) return (1 << (w - 1)) - 1;
    if (v < -(1 << (w - 1)))    return -(1 << (w - 1));
    return v;
  endfunction

  function automatic bit satn_hit(input int v, input int w);
    return (v > (1 << (w - 1)) - 1) || (v < -(1 << (w - 1)));
  endfunction

  // floor division by 8 of a signed product, then 15-bit wrap
  function automatic int term(input int g, input int s);
    return wrapn((g * s) >>> 3, 15);
  endfunction

  // projection of one real value; kind = 1 (+1), -1 (-1), 0 (linear)
  function automatic int proj(input int q, input int sh, output int kind);
    int shv, inv, qm, qp;
    shv = (sh == 0) ? 1 : sh;
    inv = 2048 >> shv;
    qm  = satn(q - inv, 15);
    qp  = satn(q + inv, 15);
    if (qm >= 0) begin kind = 1;  return 8;  end
    if (qp < 0)  begin kind = -1; return -8; end
    kind = 0;
    return wrapn((q * (1 << shv)) >>> 8, 6);
  endfunction

  typedef struct {
    int n_clip_pos;
    int n_clip_neg;
    int n_linear;
    int n_sat;
  } stats_t;

  // One matrix-vector product entry, k-th row; returns accumulator values.
  function automatic void mvp_row(input int n, input int k,
                                  input int gre[MAXN][MAXN], input int gim[MAXN][MAXN],
                                  input int sre[MAXN], input int sim[MAXN],
                                  output int qre, output int qim, inout stats_t st);
    int are, aim, j, pre, pim, rr, ii, ri, ir;
    are = 0; aim = 0;
    for (int c = 0; c < n; c++) begin
      j   = (k + c) % n;
      rr  = term(gre[k][j], sre[j]);
      ii  = term(gim[k][j], sim[j]);
      ri  = term(gre[k][j], sim[j]);
      ir  = term(gim[k][j], sre[j]);
      pre = wrapn(rr - ii, 15);
      pim = wrapn(ri + ir, 15);
      if (c == 0) begin
        are = pre; aim = pim;
      end else begin
        if (satn_hit(are + pre, 15) || satn_hit(aim + pim, 15)) st.n_sat++;
        are = satn(are + pre, 15);
        aim = satn(aim + pim, 15);
      end
    end
    qre = are; qim = aim;
  endfunction

  // Full algorithm; s arrays are 0-based (index 0 = known symbol).
  function automatic void run(input int n, input int tmax, input int sh, input bit bpsk,
                              input int gre[MAXN][MAXN], input int gim[MAXN][MAXN],
                              input int s0re[MAXN], input int s0im[MAXN],
                              input int chre, input int chim,
                              output int sre[MAXN], output int sim[MAXN],
                              inout stats_t st);
    int qre[MAXN], qim[MAXN], kind, t_eff;
    sre = s0re; sim = s0im;
    sre[0] = chre; sim[0] = chim;
    t_eff = (tmax == 0) ? 1 : tmax;
    for (int t = 0; t < t_eff; t++) begin
      for (int k = 1; k < n; k++) mvp_row(n, k, gre, gim, sre, sim, qre[k], qim[k], st);
      for (int k = 1; k < n; k++) begin
        sre[k] = proj(qre[k], sh, kind);
        if (kind == 1) st.n_clip_pos++; else if (kind == -1) st.n_clip_neg++; else st.n_linear++;
        if (bpsk) sim[k] = 0;
        else begin
          sim[k] = proj(qim[k], sh, kind);
          if (kind == 1) st.n_clip_pos++; else if (kind == -1) st.n_clip_neg++; else st.n_linear++;
        end
      end
      sre[0] = chre; sim[0] = chim;
    end
  endfunction

endpackage

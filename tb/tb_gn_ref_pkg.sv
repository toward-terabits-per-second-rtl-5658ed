// tb_gn_ref_pkg: reference models used by the testbenches of the parallel
// G_N-coset decoder. They are written independently of the RTL:
//  * ref_encode uses the matrix definition of G_n = F^{(x)n}:
//    G[i][j] = 1 exactly when the bits of j are a subset of the bits of i.
//  * ref_sc decodes bit by bit, walking from the root to the leaf of each bit
//    and re-encoding the already decided bits of the left sibling whenever
//    the path goes right (no partial-sum tree, no schedule).
//  * ref_llr applies the two LLR-generation rules literally.
//  * ref_amp scales the damping-factor table, typed in again here.
//  * ref_decode runs the whole iterative algorithm on an NC x NC frame.
// Vectors are held in 128-bit containers; only the first len entries count.
package tb_gn_ref_pkg;

  localparam int MAXN = 128;
  localparam int LMAX = 31;          // symmetric 6-bit LLR range

  typedef int   lvec_t [MAXN];
  typedef bit [MAXN-1:0] bvec_t;

  function automatic int rsat(input int v);
    return (v > LMAX) ? LMAX : (v < -LMAX) ? -LMAX : v;
  endfunction

  function automatic int rabs(input int v);
    return v < 0 ? -v : v;
  endfunction

  function automatic int rf(input int a, input int b);
    int m;
    m = rabs(a) < rabs(b) ? rabs(a) : rabs(b);
    return ((a < 0) != (b < 0)) ? -m : m;
  endfunction

  function automatic int rg(input int a, input int b, input bit u);
    return rsat(u ? b - a : b + a);
  endfunction

  function automatic bvec_t ref_encode(input bvec_t u, input int len);
    bvec_t x;
    x = '0;
    for (int j = 0; j < len; j++)
      for (int i = 0; i < len; i++)
        if ((j & ~i) == 0) x[j] = x[j] ^ u[i];
    return x;
  endfunction

  function automatic bit ref_detect(input bvec_t x, input bvec_t frozen, input int len);
    bvec_t u;
    u = ref_encode(x, len);   // G is its own inverse
    for (int i = 0; i < len; i++)
      if (frozen[i] && u[i]) return 1'b1;
    return 1'b0;
  endfunction

  function automatic bvec_t ref_sc(input lvec_t llr, input bvec_t frozen, input int len);
    bvec_t u;
    int    n;
    n = $clog2(len);
    u = '0;
    for (int i = 0; i < len; i++) begin
      lvec_t cur, nxt;
      cur = llr;
      for (int d = 1; d <= n; d++) begin
        int s, p;
        s = len >> d;
        p = i >> (n - d);
        if (p % 2 == 1) begin
          bvec_t sub, v;
          sub = '0;
          for (int k = 0; k < s; k++) sub[k] = u[(p - 1) * s + k];
          v = ref_encode(sub, s);
          for (int k = 0; k < s; k++) nxt[k] = rg(cur[k], cur[k + s], v[k]);
        end else begin
          for (int k = 0; k < s; k++) nxt[k] = rf(cur[k], cur[k + s]);
        end
        cur = nxt;
      end
      u[i] = frozen[i] ? 1'b0 : (cur[0] < 0);
    end
    return ref_encode(u, len);
  endfunction

  // Damping factors as printed in the paper's table (t = 1..8).
  function automatic real df_table(input int which, input int t);
    real a [8] = '{0.0, 0.2680, 0.4236, 0.5051, 0.6147, 1.2661, 0.4054, 0.5360};
    real b [8] = '{0.0, 0.0, 0.2075, 0.2542, 0.3574, 0.9922, 0.2714, 0.1566};
    real g [8] = '{0.0, 1.9997, 0.6695, 0.8296, 0.7598, 0.7647, 0.7851, 0.8723};
    if (t < 1 || t > 8) return 0.0;
    return which == 0 ? a[t-1] : which == 1 ? b[t-1] : g[t-1];
  endfunction

  // Amplitude in LLR LSBs: factor in Q2.8 times noise scale in Q4.4, rounded.
  function automatic int ref_amp(input int which, input int t, input int ns);
    int q, a;
    q = $rtoi(df_table(which, t) * 256.0 + 0.5);
    a = (q * ns + 2048) >>> 12;
    return a > LMAX ? LMAX : a;
  endfunction

  function automatic int ref_llr(input int lch, input bit x1, input bit x2, input bit e,
                                 input int aa, input int ab, input int ag);
    int v;
    if (e) v = lch + (x1 ? -aa : aa) - (x2 ? -ab : ab);
    else   v = lch + (x1 ? -ag : ag);
    return rsat(v);
  endfunction

  // Approximately Gaussian sample with unit variance.
  function automatic real gauss();
    real s;
    s = 0.0;
    for (int k = 0; k < 12; k++) s += real'($urandom) / 4294967296.0;
    return s - 6.0;
  endfunction

  // Product-code codeword: rows are codewords of frz_row, columns of frz_col.
  // x[r][c] is code bit r*nc+c.
  typedef bvec_t bmat_t [MAXN];
  typedef int    lmat_t [MAXN][MAXN];

  function automatic bmat_t make_codeword(input bvec_t frz_row, input bvec_t frz_col, input int nc);
    bmat_t w, x;
    for (int r = 0; r < nc; r++) begin
      bvec_t u;
      u = '0;
      if (!frz_col[r])
        for (int c = 0; c < nc; c++) u[c] = frz_row[c] ? 1'b0 : 1'($urandom);
      w[r] = ref_encode(u, nc);
    end
    for (int c = 0; c < nc; c++) begin
      bvec_t col, xc;
      for (int r = 0; r < nc; r++) col[r] = w[r][c];
      xc = ref_encode(col, nc);
      for (int r = 0; r < nc; r++) x[r][c] = xc[r];
    end
    return x;
  endfunction

  // Whole-frame reference of the iterative decoder.
  typedef struct {
    bmat_t x;
    int    iters;
    int    activations;
    bit    early;
    int    bypasses;     // component iterations with E = 0
    int    gen_fail;     // LLRs generated with the previous E = 1 rule
    int    gen_pass;     // LLRs generated with the previous E = 0 rule
    int    sc_iters;     // iterations in which at least one SC decoder ran
  } ref_result_t;

  function automatic ref_result_t ref_decode(input lmat_t lch, input bmat_t frz_row,
                                             input bmat_t frz_col, input int nc,
                                             input int t_max, input int ns);
    ref_result_t res;
    bmat_t x1, x2, nx;
    bvec_t ef, en;
    res.activations = 0; res.bypasses = 0; res.gen_fail = 0; res.gen_pass = 0;
    res.early = 0; res.iters = 0; res.sc_iters = 0;
    for (int r = 0; r < nc; r++)
      for (int c = 0; c < nc; c++) begin
        x1[r][c] = lch[r][c] < 0;
        x2[r][c] = lch[r][c] < 0;
      end
    ef = '0;
    for (int t = 1; t <= t_max; t++) begin
      bit pi;
      int aa, ab, ag;
      pi = (t % 2 == 1);
      aa = ref_amp(0, t, ns); ab = ref_amp(1, t, ns); ag = ref_amp(2, t, ns);
      en = '0;
      for (int i = 0; i < nc; i++) begin
        bvec_t v1, v2, fz, ho;
        lvec_t vl, lg;
        for (int j = 0; j < nc; j++) begin
          v1[j] = pi ? x1[i][j] : x1[j][i];
          v2[j] = pi ? x2[i][j] : x2[j][i];
          vl[j] = pi ? lch[i][j] : lch[j][i];
        end
        fz = pi ? frz_row[i] : frz_col[i];
        if (ref_detect(v1, fz, nc)) begin
          en[i] = 1'b1;
          for (int j = 0; j < nc; j++) begin
            lg[j] = ref_llr(vl[j], v1[j], v2[j], ef[j], aa, ab, ag);
            if (ef[j]) res.gen_fail++; else res.gen_pass++;
          end
          ho = ref_sc(lg, fz, nc);
        end else begin
          ho = v1;
          res.bypasses++;
        end
        for (int j = 0; j < nc; j++)
          if (pi) nx[i][j] = ho[j]; else nx[j][i] = ho[j];
      end
      x2 = x1; x1 = nx; ef = en;
      res.activations += $countones(en);
      if (en != '0) res.sc_iters++;
      res.iters = t;
      if (t >= 2 && en == '0) begin
        res.early = 1;
        break;
      end
    end
    res.x = x1;
    return res;
  endfunction

endpackage

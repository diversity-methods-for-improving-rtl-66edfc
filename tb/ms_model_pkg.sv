// ms_model_pkg: reference models used by the testbenches.
//
// Builds H_X = [A | B] and H_Z = [B^T | A^T] of a bivariate bicycle code from the shift-matrix
// definition (A = x^3 + y + y^2, B = y^3 + x + x^2, x = S_l (x) I_m, y = I_l (x) S_m) as
// explicit 0/1 matrices, and decodes with a straightforward scaled min-sum written over that
// matrix (per-edge minimum over the other edges), with the same fixed-point rules as the
// hardware: W-bit messages saturated to +/-(2^(W-1)-1), alpha = num/32 applied to the minimum
// magnitude with truncation, priors converted from 4 to F fractional bits by flooring. The
// sum-product rule uses phi(x) = ln((e^x+1)/(e^x-1)) rounded to F fractional bits, with
// phi(0) evaluated at half a step.
package ms_model_pkg;

  localparam int NMAX = 288;
  localparam int MMAX = 144;

  int  cl, cm, cn, cmm;             // current code: l, m, n, number of checks
  bit  hx [MMAX][NMAX];
  bit  hz [MMAX][NMAX];
  int  q  [MMAX][NMAX];
  int  r  [MMAX][NMAX];

  function automatic bit xpow(int a, int row, int col);   // (S_l^a (x) I_m)[row][col]
    return (((row / cm) + a) % cl == (col / cm)) && ((row % cm) == (col % cm));
  endfunction
  function automatic bit ypow(int b, int row, int col);   // (I_l (x) S_m^b)[row][col]
    return ((row / cm) == (col / cm)) && (((row % cm) + b) % cm == (col % cm));
  endfunction

  function automatic void set_code(int l, int m);
    int h;
    cl = l; cm = m; h = l * m; cn = 2 * h; cmm = h;
    for (int i = 0; i < h; i++)
      for (int j = 0; j < h; j++) begin
        bit a, b;
        a = xpow(3, i, j) ^ ypow(1, i, j) ^ ypow(2, i, j);
        b = ypow(3, i, j) ^ xpow(1, i, j) ^ xpow(2, i, j);
        hx[i][j]     = a;
        hx[i][h + j] = b;
      end
    for (int i = 0; i < h; i++)
      for (int j = 0; j < h; j++) begin
        hz[i][j]     = hx[j][h + i];   // B^T
        hz[i][h + j] = hx[j][i];       // A^T
      end
  endfunction

  function automatic bit synd_bit(int c, logic [NMAX-1:0] e);
    bit s = 0;
    for (int v = 0; v < cn; v++) if (hx[c][v]) s ^= e[v];
    return s;
  endfunction

  function automatic logic [MMAX-1:0] syndrome(logic [NMAX-1:0] e);
    logic [MMAX-1:0] s = '0;
    for (int c = 0; c < cmm; c++) s[c] = synd_bit(c, e);
    return s;
  endfunction

  function automatic int sat(int v, int w);
    int lim = (1 << (w - 1)) - 1;
    return (v > lim) ? lim : (v < -lim) ? -lim : v;
  endfunction

  function automatic int conv_prior(int llr4, int w, int f);
    int x = (f >= 4) ? llr4 * (1 << (f - 4)) : (llr4 >>> (4 - f));
    return sat(x, w);
  endfunction

  int pri [NMAX];

  function automatic int phi(int i, int w, int f);
    real x, p;
    int qv, mx;
    mx = (1 << (w - 1)) - 1;
    if (i > mx) i = mx;
    x = (i == 0) ? 0.5 / real'(1 << f) : real'(i) / real'(1 << f);
    p = $ln(($exp(x) + 1.0) / ($exp(x) - 1.0));
    qv = int'(p * real'(1 << f));
    return (qv > mx) ? mx : qv;
  endfunction

  // Decode syndrome s with per-qubit priors pri[] (4 fractional bits). sp selects sum-product.
  task automatic decode_v(input logic [MMAX-1:0] s, input int w, input int f, input int alpha,
                          input bit sp, input int maxit,
                          output logic [NMAX-1:0] e, output int it, output bit conv);
    int y [NMAX];
    for (int v = 0; v < cn; v++) y[v] = conv_prior(pri[v], w, f);
    for (int c = 0; c < cmm; c++) for (int v = 0; v < cn; v++) begin q[c][v] = y[v]; r[c][v] = 0; end
    e = '0;
    for (int v = 0; v < cn; v++) e[v] = (y[v] < 0);
    it = 0;
    conv = 0;
    forever begin
      if (syndrome(e) == s) begin conv = 1; break; end
      if (it == maxit) break;
      // check nodes
      for (int c = 0; c < cmm; c++)
        for (int v = 0; v < cn; v++) if (hx[c][v]) begin
          int mn = (1 << (w - 1)) - 1;
          int ps = 0;
          bit sg = s[c];
          for (int u = 0; u < cn; u++) if (hx[c][u] && u != v) begin
            int a = (q[c][u] < 0) ? -q[c][u] : q[c][u];
            if (a < mn) mn = a;
            ps += phi(a, w, f);
            sg ^= (q[c][u] < 0);
          end
          if (sp) mn = phi(ps, w, f);
          else    mn = (mn * alpha) / 32;
          r[c][v] = sg ? -mn : mn;
        end
      // variable nodes
      for (int v = 0; v < cn; v++) begin
        int tot = y[v];
        for (int c = 0; c < cmm; c++) if (hx[c][v]) tot += r[c][v];
        for (int c = 0; c < cmm; c++) if (hx[c][v]) q[c][v] = sat(tot - r[c][v], w);
        e[v] = (tot < 0);
      end
      it++;
    end
  endtask

  // Min-sum decode with the same prior llr4 on every qubit.
  task automatic decode(input logic [MMAX-1:0] s, input int llr4, input int w, input int f,
                        input int alpha, input int maxit,
                        output logic [NMAX-1:0] e, output int it, output bit conv);
    for (int v = 0; v < NMAX; v++) pri[v] = llr4;
    decode_v(s, w, f, alpha, 0, maxit, e, it, conv);
  endtask

  // GF(2) rank of the rows of H_Z plus, optionally, one extra row.
  function automatic int rank_hz(bit with_extra, logic [NMAX-1:0] extra);
    logic [NMAX-1:0] rows [MMAX + 1];
    int nr, rk;
    nr = 0;
    for (int c = 0; c < cmm; c++) begin
      rows[nr] = '0;
      for (int v = 0; v < cn; v++) rows[nr][v] = hz[c][v];
      nr++;
    end
    if (with_extra) begin rows[nr] = extra; nr++; end
    rk = 0;
    for (int col = 0; col < cn && rk < nr; col++) begin
      int p = -1;
      for (int i = rk; i < nr; i++) if (rows[i][col]) begin p = i; break; end
      if (p >= 0) begin
        logic [NMAX-1:0] t = rows[p]; rows[p] = rows[rk]; rows[rk] = t;
        for (int i = 0; i < nr; i++) if (i != rk && rows[i][col]) rows[i] ^= rows[rk];
        rk++;
      end
    end
    return rk;
  endfunction

endpackage

// ldpc_ref_pkg: reference models for the decoder testbenches.
//
// Independent of the RTL structure, this package builds the 96 x 288
// parity-check matrix bit by bit from the base matrix, draws random
// codewords of the shortened code (Gaussian elimination over GF(2)), makes
// noisy channel LLRs (BPSK over AWGN, Box-Muller), and runs a bit-exact
// golden model of the decoder's arithmetic written straight from the
// min-sum equations: for every edge the minimum over the *other* inputs is
// searched explicitly, instead of the min1/min2 trick the hardware uses.
package ldpc_ref_pkg;
  import ldpc_pkg::*;

  typedef logic [N-1:0] hrow_t;
  typedef hrow_t        hmat_t [M];
  typedef int           ivec_t [N];

  function automatic hmat_t build_h();
    hmat_t h;
    for (int m = 0; m < int'(M); m++) h[m] = '0;
    for (int r = 0; r < int'(MB); r++)
      for (int c = 0; c < int'(NB); c++)
        if (base_at(r, c) != 0)
          for (int i = 0; i < int'(Z); i++)
            h[r*Z + i][c*Z + (i + base_at(r, c)) % Z] = 1'b1;
    return h;
  endfunction

  function automatic hrow_t active_mask(rate_e rate);
    hrow_t a = '0;
    for (int v = int'(rate_offset(rate)); v < int'(N); v++) a[v] = 1'b1;
    return a;
  endfunction

  function automatic logic [M-1:0] syndrome(hmat_t h, hrow_t x);
    logic [M-1:0] s;
    for (int m = 0; m < int'(M); m++) s[m] = ^(h[m] & x);
    return s;
  endfunction

  // Random codeword with zeros in the removed columns: free columns of the
  // reduced row-echelon form get random bits, pivot columns are solved.
  function automatic hrow_t random_codeword(hmat_t h, rate_e rate);
    hmat_t a;
    hrow_t act = active_mask(rate);
    hrow_t x = '0;
    hrow_t pivcols = '0;
    int    pivrow [M];
    int    prow [N];
    int    rank = 0;
    for (int m = 0; m < int'(M); m++) a[m] = h[m] & act;
    for (int c = int'(N) - 1; c >= 0 && rank < int'(M); c--) begin
      int p = -1;
      if (!act[c]) continue;
      for (int m = rank; m < int'(M); m++) if (a[m][c]) begin p = m; break; end
      if (p < 0) continue;
      begin hrow_t t = a[p]; a[p] = a[rank]; a[rank] = t; end
      for (int m = 0; m < int'(M); m++) if (m != rank && a[m][c]) a[m] ^= a[rank];
      pivcols[c] = 1'b1;
      prow[c]    = rank;
      rank++;
    end
    for (int v = 0; v < int'(N); v++)
      if (act[v] && !pivcols[v]) x[v] = 1'($urandom);
    for (int v = 0; v < int'(N); v++)
      if (pivcols[v]) x[v] = ^(a[prow[v]] & x & ~pivcols);
    return x;
  endfunction

  // Channel LLR of the i-th transmitted bit, 2 fractional bits, saturated.
  function automatic int channel_llr(bit c, real sigma);
    real u1, u2, n, y, l;
    int  q;
    u1 = (real'($urandom_range(1000000, 1)) ) / 1000001.0;
    u2 = (real'($urandom_range(1000000, 0)) ) / 1000001.0;
    n  = $sqrt(-2.0 * $ln(u1)) * $cos(6.283185307179586 * u2);
    y  = (c ? -1.0 : 1.0) + sigma * n;
    l  = 2.0 * y / (sigma * sigma);
    q  = int'(l * 4.0);
    if (q > LLR_MAX) q = LLR_MAX;
    if (q < LLR_MIN) q = LLR_MIN;
    return q;
  endfunction

  function automatic int clamp(int x, int lo, int hi);
    return (x < lo) ? lo : (x > hi) ? hi : x;
  endfunction

  // Golden decoder. llr: channel LLR by column (0 where punctured/removed).
  // Returns the intrinsic LLRs (8-bit range) of the last iteration run, the
  // number of iterations and whether the parity check ended decoding early.
  function automatic void golden_decode(input hmat_t h, input ivec_t llr, input hrow_t act,
                                        input bit et_en, input int imax, input int alpha,
                                        output ivec_t lout, output int iters, output bit et);
    int deg [M];
    int col [M][32];        // active columns of check m
    int c2v [M][32];
    int v2c [M][32];
    for (int m = 0; m < int'(M); m++) begin
      deg[m] = 0;
      for (int v = 0; v < int'(N); v++)
        if (h[m][v] && act[v]) begin
          col[m][deg[m]] = v;
          c2v[m][deg[m]] = 0;
          deg[m]++;
        end
    end
    for (int v = 0; v < int'(N); v++) lout[v] = 0;
    et = 0;
    iters = imax;
    for (int it = 0; it < imax; it++) begin
      ivec_t acc;
      // VN -> CN (extrinsic: intrinsic LLR minus the edge's own message)
      for (int m = 0; m < int'(M); m++)
        for (int a = 0; a < deg[m]; a++)
          v2c[m][a] = (it == 0) ? llr[col[m][a]]
                                : clamp(lout[col[m][a]] - c2v[m][a], LLR_MIN, LLR_MAX);
      // CN -> VN: minimum and sign product over the other edges
      for (int m = 0; m < int'(M); m++)
        for (int a = 0; a < deg[m]; a++) begin
          int mn = MAG_MAX;
          bit sg = 0;
          for (int b = 0; b < deg[m]; b++)
            if (b != a) begin
              int mag = (v2c[m][b] < 0) ? -v2c[m][b] : v2c[m][b];
              if (mag > MAG_MAX) mag = MAG_MAX;
              if (mag < mn) mn = mag;
              sg ^= (v2c[m][b] < 0);
            end
          mn = (mn * alpha) / 16;
          c2v[m][a] = sg ? -mn : mn;
        end
      // VN sum
      for (int v = 0; v < int'(N); v++) acc[v] = llr[v];
      for (int m = 0; m < int'(M); m++)
        for (int a = 0; a < deg[m]; a++) acc[col[m][a]] += c2v[m][a];
      for (int v = 0; v < int'(N); v++) lout[v] = act[v] ? clamp(acc[v], SUM_MIN, SUM_MAX) : 0;
      if (et_en && it < imax - 1) begin
        hrow_t hard = '0;
        for (int v = 0; v < int'(N); v++) hard[v] = act[v] && (lout[v] < 0);
        if (syndrome(h, hard) == '0) begin
          et = 1;
          iters = it + 1;
          break;
        end
      end
    end
  endfunction

endpackage

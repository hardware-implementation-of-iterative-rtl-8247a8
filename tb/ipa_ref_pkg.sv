// ipa_ref_pkg: reference model of IPA decoding for the testbenches.
//
// The functions follow the decoding procedures literally, with none of the
// closed forms the RTL uses. ref_proj is the recursive projection, with an
// explicit pair buffer. ref_find_index is the recursive index search. ref_agg
// is the vote-and-flip aggregation. ref_fod computes the Hadamard
// correlations straight from their definition. ref_ipa is the complete
// iterative decoder for RM(m,3). Vectors are held in 64-bit words, bit k =
// coordinate k, so m <= 6.
package ipa_ref_pkg;

  typedef logic [63:0] vec_t;

  function automatic vec_t mask(int k);
    return (k >= 64) ? '1 : ((64'd1 << k) - 64'd1);
  endfunction

  function automatic bit parity(int unsigned x);
    return ^x;
  endfunction

  // Projection of y (length 2^m) with index i, recursive form.
  function automatic vec_t ref_proj(vec_t y, int i, int m);
    int   n;
    vec_t lo, hi, tmp, out;
    n   = 1 << m;
    out = '0;
    tmp = '0;
    if (i < n / 2) begin
      lo  = ref_proj(y & mask(n / 2), i, m - 1);
      hi  = ref_proj((y >> (n / 2)) & mask(n / 2), i, m - 1);
      out = lo | (hi << (n / 4));
    end else begin
      for (int j = 1; j <= n / 2 - 1; j++) begin
        tmp[2*j]   = y[j];
        tmp[2*j+1] = y[j ^ i];
      end
      tmp[0] = y[0];
      tmp[1] = y[i];
      for (int t = 0; t <= n / 2 - 1; t++)
        out[t] = tmp[2*t] ^ tmp[2*t+1];
    end
    return out;
  endfunction

  // Recursive index search.
  function automatic int ref_find_index(int z, int i, int m);
    if (i >= (1 << (m - 1))) begin
      if (z < (1 << (m - 1))) return z;
      else return z ^ i;
    end else begin
      if (z < (1 << (m - 1))) return ref_find_index(z, i, m - 1);
      else return ref_find_index(z - (1 << (m - 1)), i, m - 1) + (1 << (m - 2));
    end
  endfunction

  // Aggregation: ys[i], yhs[i] for i = 1..2^m-1 (index 0 unused).
  function automatic vec_t ref_agg(int m, vec_t yin, vec_t ys[64], vec_t yhs[64]);
    vec_t out;
    int   vote, ind;
    out = '0;
    for (int z = 0; z < (1 << m); z++) begin
      vote = 0;
      for (int i = 1; i < (1 << m); i++) begin
        ind  = ref_find_index(z, i, m);
        vote = vote + int'(ys[i][ind] ^ yhs[i][ind]);
      end
      out[z] = yin[z] ^ ((2 * vote) > ((1 << m) - 1));
    end
    return out;
  endfunction

  // First-order decoding by exhaustive correlation; lowest index wins ties.
  function automatic vec_t ref_fod(vec_t y, int m);
    int   best, bestz, corr;
    bit   s;
    vec_t out;
    best  = -1;
    bestz = 0;
    s     = 0;
    for (int z = 0; z < (1 << m); z++) begin
      corr = 0;
      for (int p = 0; p < (1 << m); p++)
        corr += (y[p] ^ parity(p & z)) ? -1 : 1;
      if ((corr < 0 ? -corr : corr) > best) begin
        best  = corr < 0 ? -corr : corr;
        bestz = z;
        s     = corr < 0;
      end
    end
    out = '0;
    for (int p = 0; p < (1 << m); p++)
      out[p] = s ^ parity(p & bestz);
    return out;
  endfunction

  // Complete IPA decoding of RM(m,3).
  function automatic vec_t ref_ipa(vec_t y_in, int m, int nmax, output int iters, output bit conv);
    vec_t y, yh0, y1 [64], yh1 [64], y2 [64][64], yh2 [64][64];
    y     = y_in;
    yh0   = y;
    iters = 0;
    conv  = 0;
    for (int j = 1; j <= nmax; j++) begin
      iters = j;
      y1[0]  = '0;
      yh1[0] = '0;
      for (int i = 1; i < (1 << m); i++) begin
        y1[i] = ref_proj(y, i, m);
        y2[i][0]  = '0;
        yh2[i][0] = '0;
        for (int q = 1; q < (1 << (m - 1)); q++) begin
          y2[i][q]  = ref_proj(y1[i], q, m - 1);
          yh2[i][q] = ref_fod(y2[i][q], m - 2);
        end
        yh1[i] = ref_agg(m - 1, y1[i], y2[i], yh2[i]);
      end
      yh0 = ref_agg(m, y, y1, yh1);
      if (yh0 == y) begin
        conv = 1;
        break;
      end
      y = yh0;
    end
    return yh0;
  endfunction

  // Random codeword of RM(m,3): random sum of monomials of degree <= 3.
  function automatic vec_t rm_codeword(int m);
    vec_t c;
    c = '0;
    for (int s = 0; s < (1 << m); s++) begin
      if ($countones(s) <= 3 && $urandom_range(0, 1) == 1)
        for (int p = 0; p < (1 << m); p++)
          if ((p & s) == s) c[p] = ~c[p];
    end
    return c;
  endfunction

  // Random error pattern of weight w on 2^m coordinates.
  function automatic vec_t err_pattern(int m, int w);
    vec_t e;
    int   p;
    e = '0;
    while ($countones(e) < w) begin
      p    = $urandom_range(0, (1 << m) - 1);
      e[p] = 1'b1;
    end
    return e;
  endfunction

endpackage

// nw_tb_pkg: reference model and helpers for the testbenches.
// nw_matrix fills the whole Needleman-Wunsch matrix of a query (rows) and a
// reference (columns) the textbook way, row by row, with DP(i,0) = i*gap and
// DP(0,j) = j*gap, and returns it flattened as (n+1) x (m+1), row-major.
// pack_word packs 16 2-bit characters into one 32-bit word, character k in
// bits [2k+1:2k]. nw_score_lin gives the same score as nw_matrix with two
// rows of storage, for long sequences.
package nw_tb_pkg;
  typedef int          int_da_t[];
  typedef bit [1:0]    chr_da_t[];

  function automatic int_da_t nw_matrix(chr_da_t q, chr_da_t r, int match, int mismatch, int gap);
    int n = q.size();
    int m = r.size();
    int_da_t d = new[(n + 1) * (m + 1)];
    for (int j = 0; j <= m; j++) d[j] = j * gap;
    for (int i = 1; i <= n; i++) begin
      d[i * (m + 1)] = i * gap;
      for (int j = 1; j <= m; j++) begin
        int diag = d[(i - 1) * (m + 1) + j - 1] + ((q[i-1] == r[j-1]) ? match : mismatch);
        int up   = d[(i - 1) * (m + 1) + j] + gap;
        int left = d[i * (m + 1) + j - 1] + gap;
        int best = diag;
        if (up > best) best = up;
        if (left > best) best = left;
        d[i * (m + 1) + j] = best;
      end
    end
    return d;
  endfunction

  function automatic int nw_score(chr_da_t q, chr_da_t r, int match, int mismatch, int gap);
    int_da_t d = nw_matrix(q, r, match, mismatch, gap);
    return d[d.size() - 1];
  endfunction

  // the same score with two rows only, for long sequences
  function automatic int nw_score_lin(chr_da_t q, chr_da_t r, int match, int mismatch, int gap);
    int m = r.size();
    int_da_t prev = new[m + 1];
    int_da_t cur  = new[m + 1];
    for (int j = 0; j <= m; j++) prev[j] = j * gap;
    for (int i = 1; i <= q.size(); i++) begin
      cur[0] = i * gap;
      for (int j = 1; j <= m; j++) begin
        int best = prev[j - 1] + ((q[i-1] == r[j-1]) ? match : mismatch);
        if (prev[j] + gap > best) best = prev[j] + gap;
        if (cur[j - 1] + gap > best) best = cur[j - 1] + gap;
        cur[j] = best;
      end
      prev = cur;
      cur = new[m + 1];
    end
    return prev[m];
  endfunction

  function automatic chr_da_t random_seq(int len);
    chr_da_t s = new[len];
    foreach (s[i]) s[i] = 2'($urandom_range(0, 3));
    return s;
  endfunction

  // a copy of s with about one character in `rate` changed
  function automatic chr_da_t mutate(chr_da_t s, int rate);
    chr_da_t t = new[s.size()];
    foreach (s[i]) t[i] = ($urandom_range(0, rate - 1) == 0) ? 2'($urandom_range(0, 3)) : s[i];
    return t;
  endfunction

  function automatic bit [31:0] pack_word(chr_da_t s, int word_idx);
    bit [31:0] w = '0;
    for (int k = 0; k < 16; k++)
      if (word_idx * 16 + k < s.size()) w[2*k +: 2] = s[word_idx * 16 + k];
    return w;
  endfunction
endpackage

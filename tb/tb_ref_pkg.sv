// tb_ref_pkg -- reference model used by the testbenches.
//
// Computes, without any of the design's machinery, what the chip must produce: the number
// of edits the neighbour-tolerant comparison counts between a query and a 64-mer (a query
// base counts as an edit when it equals none of the k-mer bases i-1, i, i+1), base
// histograms, the base-count filter distance, and random or mutated 64-mers.
package tb_ref_pkg;
  import clapim_pkg::*;

  typedef logic [KMER_W-1:0] kmer_t;

  function automatic logic [1:0] base_at(kmer_t s, int i);
    return s[2*i +: 2];
  endfunction

  function automatic int ref_edits(kmer_t q, kmer_t km);
    int e = 0;
    for (int i = 0; i < K; i++) begin
      logic m;
      m = (base_at(km, i) == base_at(q, i));
      if (i > 0)     m |= (base_at(km, i-1) == base_at(q, i));
      if (i < K - 1) m |= (base_at(km, i+1) == base_at(q, i));
      if (!m) e++;
    end
    return e;
  endfunction

  function automatic kmer_t rand_kmer();
    kmer_t s;
    for (int w = 0; w < KMER_W / 32; w++) s[32*w +: 32] = $urandom;
    return s;
  endfunction

  // n random edits: substitutions, insertions or deletions (the tail is padded randomly)
  function automatic kmer_t mutate(kmer_t s, int n);
    kmer_t r = s;
    for (int k = 0; k < n; k++) begin
      int p = $urandom_range(K - 1);
      int kind = $urandom_range(2);
      logic [1:0] nb = 2'($urandom);
      if (kind == 0) r[2*p +: 2] = nb;
      else if (kind == 1) begin            // insertion at p
        for (int i = K - 1; i > p; i--) r[2*i +: 2] = r[2*(i-1) +: 2];
        r[2*p +: 2] = nb;
      end else begin                       // deletion at p
        for (int i = p; i < K - 1; i++) r[2*i +: 2] = r[2*(i+1) +: 2];
        r[2*(K-1) +: 2] = nb;
      end
    end
    return r;
  endfunction

  typedef int hist_t [4];

  function automatic hist_t histogram(kmer_t s);
    hist_t h = '{0, 0, 0, 0};
    for (int i = 0; i < K; i++) h[base_at(s, i)]++;
    return h;
  endfunction

  function automatic int hist_dist(hist_t a, hist_t b);
    int d = 0;
    for (int j = 0; j < 4; j++) d += (a[j] > b[j]) ? a[j] - b[j] : b[j] - a[j];
    return d;
  endfunction

  function automatic int popcount64(logic [K-1:0] v);
    int c = 0;
    for (int i = 0; i < K; i++) c += int'(v[i]);
    return c;
  endfunction

endpackage

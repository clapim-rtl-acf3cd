// tb_clapim_top -- end-to-end test of the chip: database load, host filter, batched search,
// classification.
//
// The testbench plays the host. It builds a small reference database of four taxa, each a
// random sequence with its own base composition cut into 64-mers; within a taxon the
// 64-mers are ordered by base histogram and stored 128 to a crossbar, so a taxon spans
// N_XBAR/4 crossbars. It keeps a table from each crossbar to the histograms it holds (the
// tracing table, reduced to what a test needs). Queries are database 64-mers with a few
// random edits, plus random 64-mers that match nothing. For each query the host model
// picks the crossbars holding a histogram within 2*thr of the query's (the base-count
// filter), groups queries into batches (a query joins a batch only if its histogram is at
// least 2*2*thr from every query already in it and it needs none of the same crossbars;
// otherwise it waits for the next batch), sends one ASSIGN per run of consecutive
// crossbars, then SEARCH, and compares every result with a model that counts, in the
// chosen crossbars, the 64-mers within the threshold of the query (saturating at 127 per
// crossbar), sums them per taxon and takes the taxon with most hits.
//
// Checked on the way: the search lasts 2167 compute clocks plus 48 sense clocks (busy for
// 2217), for every search. Mechanisms counted, each must occur at least once: a batch of
// several queries, a query deferred to a later batch, a slot with no hit (undetected), a
// search with crossbars left inactive, a 7-bit count saturating at 127, a threshold change
// (4 and 9, the two thresholds the paper works with), and the conflict flag for a crossbar
// given two queries in one batch.
module tb_clapim_top;
  timeunit 1ns;
  timeprecision 100ps;
  import clapim_pkg::*;
  import tb_ref_pkg::*;

  localparam int NX = 8, NS = 4, NT = 4;
  localparam int XW = 3, SW = 2, TW = 2, HW = COUNT_W + XW;
  localparam int PER_TAXON = NX / NT;                  // crossbars per taxon
  localparam int NQ = 14;                              // queries per threshold

  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  logic cmd_valid, cmd_ready;
  cmd_e cmd_op;
  logic [XW-1:0] cmd_xb_first, cmd_xb_last;
  logic [ROW_W-1:0] cmd_row;
  logic [TW-1:0] cmd_taxon, res_taxon;
  logic [SW-1:0] cmd_slot, res_slot;
  logic [THR_W-1:0] cmd_thr;
  logic [KMER_W-1:0] cmd_data;
  logic res_valid, res_ready, res_detected, conflict, search_busy;
  logic [HW-1:0] res_hits;

  clapim_top #(.N_XBAR(NX), .N_SLOTS(NS), .N_TAXA(NT)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #2000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---- mechanism counters ----
  int n_multi_batch, n_deferred, n_undetected, n_inactive_search, n_saturated, n_thr_change,
      n_conflict, n_searches, n_issued;

  // search duration measured on the busy output
  int busy_len;
  always @(posedge clk) begin
    if (!rst_n) busy_len = 0;
    else if (search_busy) busy_len++;
    else if (busy_len != 0) begin
      n_searches++;
      check(busy_len == 2167 + 48 + 2, $sformatf("search busy %0d clocks, expected 2217", busy_len));
      busy_len = 0;
    end
  end

  // ---- reference database ----
  kmer_t db [NX][XB_ROWS];
  hist_t dbh [NX][XB_ROWS];

  function automatic logic [1:0] biased_base(int taxon);
    // taxon t draws base t with probability 1/2, the others 1/6 each
    int r = $urandom_range(5);
    if (r < 3) return 2'(taxon);
    return 2'(r - 3 + ((r - 3) >= taxon ? 1 : 0));
  endfunction

  function automatic int hkey(hist_t h);
    return h[0] * 4096 + h[1] * 64 + h[2];
  endfunction

  task automatic build_db();
    for (int t = 0; t < NT; t++) begin
      kmer_t km [PER_TAXON * XB_ROWS];
      logic [1:0] seq [PER_TAXON * XB_ROWS + K];
      for (int i = 0; i < $size(seq); i++) seq[i] = biased_base(t);
      for (int j = 0; j < $size(km); j++)
        for (int i = 0; i < K; i++) km[j][2*i +: 2] = seq[j + i];
      // order by histogram (insertion sort)
      for (int j = 1; j < $size(km); j++) begin
        kmer_t x;
        int p;
        x = km[j];
        p = j;
        while (p > 0 && hkey(histogram(km[p-1])) > hkey(histogram(x))) begin km[p] = km[p-1]; p--; end
        km[p] = x;
      end
      for (int j = 0; j < $size(km); j++) db[t * PER_TAXON + j / XB_ROWS][j % XB_ROWS] = km[j];
    end
    // the last crossbar instead holds 128 close variants of one 64-mer, so that a query
    // equal to it hits in every row and the 7-bit count saturates
    begin
      kmer_t base = db[NX-1][0];
      for (int r = 0; r < XB_ROWS; r++) db[NX-1][r] = (r == 0) ? base : mutate(base, $urandom_range(1));
    end
    for (int x = 0; x < NX; x++) for (int r = 0; r < XB_ROWS; r++) dbh[x][r] = histogram(db[x][r]);
  endtask

  // ---- host command port ----
  task automatic send(cmd_e op, int first = 0, int last = 0, int slot = 0, int taxon = 0,
                      int row = 0, int t = 0, logic [KMER_W-1:0] data = '0);
    @(negedge clk);
    cmd_valid = 1; cmd_op = op; cmd_xb_first = XW'(first); cmd_xb_last = XW'(last);
    cmd_slot = SW'(slot); cmd_taxon = TW'(taxon); cmd_row = ROW_W'(row); cmd_thr = THR_W'(t);
    cmd_data = data;
    while (!cmd_ready) @(negedge clk);         // cmd_ready is registered: taken at the next edge
    @(negedge clk);
    cmd_valid = 0;
  endtask

  // ---- host filter ----
  function automatic logic [NX-1:0] candidates(kmer_t q, int t);
    logic [NX-1:0] c = '0;
    hist_t hq = histogram(q);
    for (int x = 0; x < NX; x++)
      for (int r = 0; r < XB_ROWS; r++)
        if (hist_dist(hq, dbh[x][r]) <= 2 * t) c[x] = 1'b1;
    return c;
  endfunction

  // expected result of a query over a set of crossbars
  task automatic expect_result(kmer_t q, logic [NX-1:0] cand, int t,
                               output int best_tax, output int best_hits, output bit det);
    int sum [NT];
    for (int k = 0; k < NT; k++) sum[k] = 0;
    det = 0;
    for (int x = 0; x < NX; x++) if (cand[x]) begin
      int c = 0;
      for (int r = 0; r < XB_ROWS; r++) if (ref_edits(q, db[x][r]) <= t) c++;
      if (c > 127) begin c = 127; n_saturated++; end
      if (c > 0) det = 1;
      sum[x / PER_TAXON] += c;
    end
    best_tax = 0; best_hits = 0;
    for (int k = 0; k < NT; k++) if (sum[k] > best_hits) begin best_hits = sum[k]; best_tax = k; end
  endtask

  // one batch: assign, search, collect
  task automatic run_batch(kmer_t qs [$], logic [NX-1:0] cs [$], int t);
    int n = qs.size();
    int exp_tax [NS], exp_hits [NS];
    bit exp_det [NS];
    logic [NX-1:0] used = '0;
    for (int s = 0; s < n; s++) begin
      int x = 0;
      expect_result(qs[s], cs[s], t, exp_tax[s], exp_hits[s], exp_det[s]);
      used |= cs[s];
      while (x < NX) begin
        if (cs[s][x]) begin
          int e = x;
          while (e + 1 < NX && cs[s][e + 1]) e++;
          send(CMD_ASSIGN, x, e, s, 0, 0, 0, qs[s]);
          x = e + 1;
        end else x++;
      end
    end
    if (n > 1) n_multi_batch++;
    if (used != '1) n_inactive_search++;
    send(CMD_SEARCH);
    n_issued++;
    for (int s = 0; s < n; s++) begin
      int w = 0;
      @(negedge clk);
      while (!res_valid && w < 10000) begin @(negedge clk); w++; end
      check(res_valid, "result arrives");
      check(res_slot == SW'(s), $sformatf("result for slot %0d, expected %0d", res_slot, s));
      check(32'(res_hits) == exp_hits[s] && (exp_hits[s] == 0 || 32'(res_taxon) == exp_tax[s]),
            $sformatf("slot %0d: taxon %0d hits %0d, expected taxon %0d hits %0d",
                      s, res_taxon, res_hits, exp_tax[s], exp_hits[s]));
      check(res_detected == exp_det[s], $sformatf("slot %0d detected %0d", s, res_detected));
      if (!exp_det[s]) n_undetected++;
      res_ready = 1;
      @(negedge clk);
      res_ready = 0;
    end
  endtask

  // queries through the filter and the batching rule
  task automatic classify(kmer_t queries [$], int t);
    kmer_t pend [$];
    pend = queries;
    while (pend.size() > 0) begin
      kmer_t bq [$], rest [$];
      logic [NX-1:0] bc [$];
      logic [NX-1:0] used = '0;
      foreach (pend[i]) begin
        kmer_t q = pend[i];
        logic [NX-1:0] c;
        bit ok;
        c = candidates(q, t);
        ok = (bq.size() < NS) && ((c & used) == '0);
        foreach (bq[j]) if (hist_dist(histogram(q), histogram(bq[j])) < 2 * 2 * t) ok = 0;
        if (c == '0) begin
          // the filter rules the query out: nothing to search, reported as undetected
          n_undetected++;
          checks++;
        end else if (ok) begin
          bq.push_back(q); bc.push_back(c); used |= c;
        end else begin
          rest.push_back(q);
          n_deferred++;
        end
      end
      if (bq.size() > 0) run_batch(bq, bc, t);
      pend = rest;
    end
  endtask

  initial begin
    kmer_t qs [$];
    cmd_valid = 0; cmd_op = CMD_LOAD_KMER; cmd_xb_first = 0; cmd_xb_last = 0; cmd_row = 0;
    cmd_taxon = 0; cmd_slot = 0; cmd_thr = 0; cmd_data = 0; res_ready = 0; busy_len = 0;
    n_multi_batch = 0; n_deferred = 0; n_undetected = 0; n_inactive_search = 0;
    n_saturated = 0; n_thr_change = 0; n_conflict = 0; n_searches = 0; n_issued = 0;
    build_db();
    repeat (2) @(posedge clk);
    rst_n = 1;
    // database load: 64-mers, then the taxon of each crossbar range
    for (int x = 0; x < NX; x++)
      for (int r = 0; r < XB_ROWS; r++) send(CMD_LOAD_KMER, x, 0, 0, 0, r, 0, db[x][r]);
    for (int k = 0; k < NT; k++) send(CMD_SET_TAXON, k * PER_TAXON, k * PER_TAXON + PER_TAXON - 1, 0, k);
    for (int pass = 0; pass < 2; pass++) begin
      int t = (pass == 0) ? 4 : 9;
      send(CMD_SET_THR, 0, 0, 0, 0, 0, t);
      n_thr_change++;
      qs.delete();
      for (int i = 0; i < NQ; i++) begin
        int x = $urandom_range(NX - 1);
        int r = $urandom_range(XB_ROWS - 1);
        if (i % 5 == 4) qs.push_back(rand_kmer());                          // unrelated read
        else if (i == 0) qs.push_back(db[NX-1][0]);                         // saturating query
        else qs.push_back(mutate(db[x][r], $urandom_range(t)));
      end
      classify(qs, t);
    end
    // a crossbar given two queries in one batch
    check(!conflict, "no conflict while the batching rule is kept");
    send(CMD_ASSIGN, 0, 1, 0, 0, 0, 0, db[0][0]);
    send(CMD_ASSIGN, 1, 2, 1, 0, 0, 0, db[2][0]);
    while (!cmd_ready) @(negedge clk);
    if (conflict) n_conflict++;
    check(conflict, "conflict flag raised");
    send(CMD_SEARCH);
    n_issued++;
    for (int s = 0; s < 2; s++) begin
      @(negedge clk);
      while (!res_valid) @(negedge clk);
      res_ready = 1;
      @(negedge clk);
      res_ready = 0;
    end
    repeat (4) @(negedge clk);
    check(n_searches == n_issued, $sformatf("%0d searches timed, %0d issued", n_searches, n_issued));
    $display("mechanisms: multi-query batches=%0d deferred=%0d undetected=%0d inactive-tile searches=%0d saturated counts=%0d threshold changes=%0d conflicts=%0d searches=%0d",
             n_multi_batch, n_deferred, n_undetected, n_inactive_search, n_saturated,
             n_thr_change, n_conflict, n_searches);
    check(n_multi_batch > 0, "a batch held several queries");
    check(n_deferred > 0, "a query was deferred by the batching rule");
    check(n_undetected > 0, "a query was not detected");
    check(n_inactive_search > 0, "a search left crossbars inactive");
    check(n_saturated > 0, "a crossbar count saturated");
    check(n_thr_change > 1, "threshold changed");
    check(n_conflict > 0, "conflict raised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

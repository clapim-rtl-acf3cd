// tb_crossbar_tile -- one tile through database load, query write, search and result.
//
// Two tiles share a search sequencer. Tile A gets 128 64-mers (some mutated from the
// query), taxon 3 and the query in slot 5; tile B gets k-mers but no query. After the
// search, tile A must report slot 5, taxon 3 and the number of rows within the threshold
// (and hit = count > 0); tile B must report nothing and its Edits Vector cells must not
// have been switched. The result must wait for res_ready and the tile must then go
// inactive. Repeated for several thresholds.
module tb_crossbar_tile;
  timeunit 1ns;
  timeprecision 100ps;
  import clapim_pkg::*;
  import tb_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  logic start, busy, done, sa_en, sa_latch;
  logic [2:0] sa_phase;
  xb_uop_t seq_uop, ctl_uop;
  logic [1:0] ctl_sel;
  logic [4:0] ctl_slot;
  logic set_taxon;
  logic [3:0] ctl_taxon;
  logic [THR_W-1:0] thr;

  search_sequencer seq (.clk, .rst_n, .start, .busy, .done, .uop(seq_uop), .sa_en, .sa_latch, .sa_phase);

  logic [XB_COLS-1:0] rdata [2];
  logic res_valid [2], res_ready [2], res_hit [2], active [2];
  logic [4:0] res_slot [2];
  logic [3:0] res_taxon [2];
  logic [COUNT_W-1:0] res_count [2];

  for (genvar g = 0; g < 2; g++) begin : g_t
    crossbar_tile dut (
      .clk, .rst_n, .ctl_sel(ctl_sel[g]), .ctl_uop, .ctl_slot, .set_taxon(set_taxon && ctl_sel[g]),
      .ctl_taxon, .thr, .rdata(rdata[g]), .search_start(start), .seq_uop, .sa_en, .sa_latch,
      .sa_phase, .search_done(done), .res_valid(res_valid[g]), .res_ready(res_ready[g]),
      .res_slot(res_slot[g]), .res_taxon(res_taxon[g]), .res_count(res_count[g]),
      .res_hit(res_hit[g]), .active(active[g]));
  end

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #400000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  kmer_t query, kmers [2][XB_ROWS];

  task automatic ctl(int g, xb_uop_t u, bit tax = 0);
    ctl_sel = 2'(1 << g); ctl_uop = u; set_taxon = tax;
    @(posedge clk);
    #0.1 ctl_sel = 0; ctl_uop = XB_UOP_NOP; set_taxon = 0;
  endtask

  initial begin
    start = 0; ctl_sel = 0; ctl_uop = XB_UOP_NOP; ctl_slot = 0; set_taxon = 0; ctl_taxon = 0;
    thr = 4; res_ready[0] = 0; res_ready[1] = 0;
    query = rand_kmer();
    for (int g = 0; g < 2; g++)
      for (int r = 0; r < XB_ROWS; r++)
        kmers[g][r] = (r % 3 == 0) ? mutate(query, $urandom_range(9)) : rand_kmer();
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    #0.1;
    for (int g = 0; g < 2; g++)
      for (int r = 0; r < XB_ROWS; r++)
        ctl(g, '{op: XB_WRITE_KMER, row: ROW_W'(r), data: kmers[g][r], default: '0});
    // mark tile B's Edits Vector with a known pattern (all ones) so untouched cells show
    ctl(1, '{op: XB_INIT, col_a: COL_W'(EDITS_COL), col_b: COL_W'(XB_COLS - 1), default: '0});
    ctl_taxon = 3;
    ctl(0, XB_UOP_NOP, 1);
    for (int t = 2; t <= 8; t += 3) begin
      int exp;
      exp = 0;
      for (int r = 0; r < XB_ROWS; r++) if (ref_edits(query, kmers[0][r]) <= t) exp++;
      thr = THR_W'(t);
      ctl_slot = 5;
      ctl(0, '{op: XB_WRITE_QRY, data: query, default: '0});
      check(active[0] && !active[1], "query write activates only the addressed tile");
      start = 1;
      @(posedge clk);
      #0.1 start = 0;
      while (!done) @(posedge clk);
      @(posedge clk);
      #0.1;
      check(res_valid[0], "active tile offers a result");
      check(!res_valid[1], "inactive tile offers no result");
      check(res_slot[0] == 5 && res_taxon[0] == 3, "result carries slot and taxon");
      check(32'(res_count[0]) == exp, $sformatf("thr %0d: count %0d, expected %0d", t, res_count[0], exp));
      check(res_hit[0] == (exp > 0), "hit bit");
      repeat (3) @(posedge clk);
      #0.1 check(res_valid[0], "result held until accepted");
      res_ready[0] = 1;
      @(posedge clk);
      #0.1 res_ready[0] = 0;
      check(!res_valid[0] && !active[0], "tile idle after its result is taken");
    end
    ctl(1, '{op: XB_READ, row: ROW_W'(17), default: '0});
    check(rdata[1][XB_COLS-1 -: K] == '1, "inactive tile's Edits Vector cells were not switched");
    check(rdata[1][KMER_W-1:0] == kmers[1][17], "inactive tile keeps its k-mers");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_search_sequencer -- runs the search program on a crossbar and checks its outcome and timing.
//
// A sequencer drives one magic_crossbar holding 128 64-mers (random, and mutated copies of
// the query with 0..12 edits). After the program, the Edits Vector of every row must hold
// exactly the edits the reference model counts. The test also counts the MAGIC cycles
// (2167, of which 13 initialisations), the sense clocks (4 phases x 12 = 48) and the
// busy time (2167 + 48 + one clock to add the last phase + the done clock); a second sequencer with 16 sense amplifiers must use 8 phases
// (96 clocks, the 288 ns of the paper's table for 16 SAs).
module tb_search_sequencer;
  timeunit 1ns;
  timeprecision 100ps;
  import clapim_pkg::*;
  import tb_ref_pkg::*;

  logic clk = 0, rst_n = 0, start = 0;
  always #1 clk = ~clk;

  logic busy, done, sa_en, sa_latch;
  logic [2:0] sa_phase;
  xb_uop_t seq_uop, xb_uop, tb_uop;
  logic use_tb;
  logic [XB_COLS-1:0] rdata;
  logic [K-1:0] edits [XB_ROWS];

  search_sequencer dut (.clk, .rst_n, .start, .busy, .done, .uop(seq_uop),
                        .sa_en, .sa_latch, .sa_phase);

  logic busy16, done16, sa_en16, sa_latch16;
  logic [3:0] sa_phase16;
  xb_uop_t uop16;
  search_sequencer #(.NUM_SA(16)) dut16 (.clk, .rst_n, .start, .busy(busy16), .done(done16),
                        .uop(uop16), .sa_en(sa_en16), .sa_latch(sa_latch16), .sa_phase(sa_phase16));

  assign xb_uop = use_tb ? tb_uop : seq_uop;
  magic_crossbar xb (.clk, .uop(xb_uop), .rdata, .edits);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  kmer_t query, kmers [XB_ROWS];
  int nor_cnt, init_cnt, sense_cnt, sense16, latches, cyc, lat, lat16;

  always @(posedge clk) begin
    if (busy && !use_tb) begin
      if (seq_uop.op == XB_NOR)  nor_cnt++;
      if (seq_uop.op == XB_INIT) init_cnt++;
      if (sa_en) sense_cnt++;
      if (sa_latch) latches++;
    end
    if (sa_en16) sense16++;
    if (busy) cyc++;
    if (busy16) lat16++;
  end

  initial begin
    #200000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    use_tb = 1; tb_uop = XB_UOP_NOP;
    query = rand_kmer();
    for (int r = 0; r < XB_ROWS; r++)
      kmers[r] = (r % 2 == 0) ? mutate(query, r % 13) : rand_kmer();
    kmers[5] = query;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // load the database rows and the query
    for (int r = 0; r < XB_ROWS; r++) begin
      tb_uop = '{op: XB_WRITE_KMER, row: ROW_W'(r), data: kmers[r], default: '0};
      @(posedge clk);
    end
    tb_uop = '{op: XB_WRITE_QRY, data: query, default: '0};
    @(posedge clk);
    // make the scratch and Edits Vector hold garbage ones and zeros first
    tb_uop = '{op: XB_INIT, col_a: COL_W'(SCR_COL), col_b: COL_W'(SCR_COL + 40), init_edits: 1'b0, default: '0};
    @(posedge clk);
    tb_uop = XB_UOP_NOP; use_tb = 0;
    nor_cnt = 0; init_cnt = 0; sense_cnt = 0; sense16 = 0; latches = 0;
    start = 1; cyc = 0; lat16 = 0;
    @(posedge clk);
    start = 0;
    while (!done) @(posedge clk);
    lat = cyc;
    @(posedge clk);
    @(posedge clk);
    check(cyc == 2167 + 48 + 2, $sformatf("busy %0d clocks in all, expected 2217", cyc));
    check(nor_cnt == 2154, $sformatf("NOR cycles %0d, expected 2154", nor_cnt));
    check(init_cnt == 13, $sformatf("init cycles %0d, expected 13", init_cnt));
    check(nor_cnt + init_cnt == 2167, "2167 MAGIC cycles per search");
    check(sense_cnt == 4 * SA_LAT_CYC, $sformatf("sense clocks %0d, expected 48", sense_cnt));
    check(latches == 4, $sformatf("sense phases %0d, expected 4", latches));
    check(lat == 2167 + 48 + 1, $sformatf("busy %0d clocks before done, expected 2216", lat));
    for (int r = 0; r < XB_ROWS; r++)
      check(popcount64(edits[r]) == ref_edits(query, kmers[r]),
            $sformatf("row %0d: %0d edits, reference %0d", r, popcount64(edits[r]), ref_edits(query, kmers[r])));
    check(edits[5] == '0, "identical k-mer has an all-zero Edits Vector");
    // per-base check of the Edits Vector bits for one row
    for (int i = 0; i < K; i++) begin
      logic [1:0] qb;
      bit m;
      qb = base_at(query, i);
      m = (base_at(kmers[1], i) == qb) || (i > 0 && base_at(kmers[1], i-1) == qb)
              || (i < K-1 && base_at(kmers[1], i+1) == qb);
      check(edits[1][i] == !m, $sformatf("row 1 base %0d edit bit", i));
    end
    while (busy16) @(posedge clk);
    check(sense16 == 8 * SA_LAT_CYC, $sformatf("16-SA sense clocks %0d, expected 96", sense16));
    check(lat16 == 2167 + 96 + 2, $sformatf("16-SA busy %0d clocks, expected 2265", lat16));
    check(!busy, "sequencer idle after done");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

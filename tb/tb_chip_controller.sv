// tb_chip_controller -- checks command handling, query distribution and classification.
//
// The testbench plays the crossbar tiles, the sequencer and the gather tree. It checks that
// k-mer loads reach the addressed crossbar, that SET_TAXON and ASSIGN walk their crossbar
// range one crossbar per clock, that a crossbar assigned twice in a batch raises
// `conflict`, and that after a search the controller sums the returned counts per
// (slot, taxon) and reports, for each used slot in order, the taxon with most hits (lowest
// index on a tie), the hit total and the detection flag. Results are taken with random
// back-pressure.
module tb_chip_controller;
  timeunit 1ns;
  timeprecision 100ps;
  import clapim_pkg::*;
  import tb_ref_pkg::*;

  localparam int NX = 8, NS = 4, NT = 4;
  localparam int XW = 3, SW = 2, TW = 2, HW = COUNT_W + XW, PW = SW + TW + COUNT_W + 1;

  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  logic cmd_valid, cmd_ready;
  cmd_e cmd_op;
  logic [XW-1:0] cmd_xb_first, cmd_xb_last, ctl_sel_idx;
  logic [ROW_W-1:0] cmd_row;
  logic [TW-1:0] cmd_taxon, ctl_taxon, res_taxon;
  logic [SW-1:0] cmd_slot, ctl_slot, res_slot;
  logic [THR_W-1:0] cmd_thr, thr;
  logic [KMER_W-1:0] cmd_data;
  logic ctl_sel_valid, ctl_set_taxon, search_start, search_done;
  xb_uop_t ctl_uop;
  logic pkt_valid, pkt_ready, res_valid, res_ready, res_detected, conflict;
  logic [PW-1:0] pkt_data;
  logic [HW-1:0] res_hits;

  chip_controller #(.N_XBAR(NX), .N_SLOTS(NS), .N_TAXA(NT)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #100000;
    failures++;
    $display("FAIL: watchdog st=%0d recv=%0d act=%0d", dut.state, dut.n_recv, dut.n_active);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---- tile-side model: what the controller wrote ----
  int qry_writes [NX];
  int qry_slot [NX];
  int taxon_of [NX];
  int kmer_writes;
  int last_qw_cycle, qw_gaps, cyc;
  always @(posedge clk) begin
    cyc++;
    if (ctl_sel_valid && ctl_uop.op == XB_WRITE_QRY) begin
      qry_writes[ctl_sel_idx]++;
      qry_slot[ctl_sel_idx] = ctl_slot;
      if (last_qw_cycle >= 0 && cyc != last_qw_cycle + 1) qw_gaps++;
      last_qw_cycle = cyc;
    end
    if (ctl_sel_valid && ctl_uop.op == XB_WRITE_KMER) begin
      kmer_writes++;
      if (ctl_sel_idx != 3'd6 || ctl_uop.row != 7'd77 || ctl_uop.data != 128'h1234) begin
        failures++; $display("FAIL: k-mer write misrouted");
      end
    end
    if (ctl_set_taxon) taxon_of[ctl_sel_idx] = ctl_taxon;
  end

  task automatic send(cmd_e op, int first = 0, int last = 0, int slot = 0, int taxon = 0,
                      int row = 0, int t = 0, logic [KMER_W-1:0] data = '0);
    @(negedge clk);
    cmd_valid = 1; cmd_op = op; cmd_xb_first = XW'(first); cmd_xb_last = XW'(last);
    cmd_slot = SW'(slot); cmd_taxon = TW'(taxon); cmd_row = ROW_W'(row); cmd_thr = THR_W'(t);
    cmd_data = data;
    @(posedge clk);
    while (!cmd_ready) @(posedge clk);
    #0.1 cmd_valid = 0;
    while (!cmd_ready) @(posedge clk);
  endtask

  // expected sums
  int exp_hits [NS][NT];
  bit exp_det [NS];

  initial begin
    cmd_valid = 0; cmd_op = CMD_LOAD_KMER; res_ready = 0; search_done = 0; pkt_valid = 0;
    pkt_data = '0; last_qw_cycle = -1; qw_gaps = 0; kmer_writes = 0; cyc = 0;
    for (int x = 0; x < NX; x++) begin qry_writes[x] = 0; taxon_of[x] = -1; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    send(CMD_LOAD_KMER, 6, 0, 0, 0, 77, 0, 128'h1234);
    check(kmer_writes == 1, "one k-mer write");
    send(CMD_SET_TAXON, 0, 3, 0, 1);
    send(CMD_SET_TAXON, 4, 7, 0, 2);
    for (int x = 0; x < NX; x++) check(taxon_of[x] == ((x < 4) ? 1 : 2), $sformatf("taxon of crossbar %0d", x));
    send(CMD_SET_THR, 0, 0, 0, 0, 0, 6);
    check(thr == 6, "threshold register");
    // batch: slot 0 -> crossbars 0..2, slot 2 -> crossbars 4..5 and 7, slot 3 -> 3
    send(CMD_ASSIGN, 0, 2, 0, 0, 0, 0, 128'hA);
    send(CMD_ASSIGN, 4, 5, 2, 0, 0, 0, 128'hB);
    send(CMD_ASSIGN, 7, 7, 2, 0, 0, 0, 128'hB);
    send(CMD_ASSIGN, 3, 3, 3, 0, 0, 0, 128'hC);
    check(!conflict, "no conflict yet");
    send(CMD_ASSIGN, 2, 3, 1, 0, 0, 0, 128'hD);   // crossbars 2 and 3 already hold queries
    check(conflict, "second query into a busy crossbar raises conflict");
    for (int x = 0; x < NX; x++)
      check(qry_writes[x] == ((x == 6) ? 0 : 1), $sformatf("crossbar %0d written %0d times", x, qry_writes[x]));
    check(qry_slot[5] == 2 && qry_slot[3] == 3 && qry_slot[1] == 0, "slots written with the queries");
    check(qw_gaps == 3, $sformatf("serial writes: %0d range breaks, expected 3", qw_gaps));
    // search: play the sequencer and the tree
    fork
      send(CMD_SEARCH);
      begin
        int cnt [NX];
        @(negedge clk);
        while (cmd_ready) @(negedge clk);          // the search command was taken
        repeat (20) @(posedge clk);
        #0.1 search_done = 1;
        @(posedge clk);
        #0.1 search_done = 0;
        for (int s = 0; s < NS; s++) begin exp_det[s] = 0; for (int t = 0; t < NT; t++) exp_hits[s][t] = 0; end
        // counts per active crossbar (127 is the largest a 7-bit count can carry)
        cnt = '{0: 10, 1: 0, 2: 127, 3: 0, 4: 30, 5: 25, 7: 1, default: 0};
        for (int x = 0; x < NX; x++) begin
          if (x == 6) continue;
          while ($urandom_range(1) == 0) @(negedge clk);
          @(negedge clk);
          pkt_valid = 1;
          pkt_data = {SW'(qry_slot[x]), TW'(taxon_of[x]), COUNT_W'(cnt[x]), cnt[x] > 0};
          exp_hits[qry_slot[x]][taxon_of[x]] += cnt[x];
          if (cnt[x] > 0) exp_det[qry_slot[x]] = 1;
          @(posedge clk);
          while (!pkt_ready) @(posedge clk);
          #0.1 pkt_valid = 0;
        end
      end
      begin
        // collect results with random back-pressure
        int n = 0;
        int slots [4] = '{0, 1, 2, 3};   // slot 1 was assigned but lost to the conflict
        while (n < 4) begin
          @(negedge clk);
          res_ready = ($urandom_range(1) == 1);
          if (res_valid && res_ready) begin        // taken at the next rising edge
            int s, bt, bh;
            s = slots[n]; bt = 0; bh = 0;
            for (int t = 0; t < NT; t++) if (exp_hits[s][t] > bh) begin bh = exp_hits[s][t]; bt = t; end
            check(res_slot == SW'(s), $sformatf("result %0d for slot %0d, expected slot %0d", n, res_slot, s));
            check(32'(res_hits) == bh, $sformatf("slot %0d hits %0d, expected %0d", s, res_hits, bh));
            check(32'(res_taxon) == bt, $sformatf("slot %0d taxon %0d, expected %0d", s, res_taxon, bt));
            check(res_detected == exp_det[s], $sformatf("slot %0d detected flag", s));
            n++;
          end
        end
        @(negedge clk);
        res_ready = 0;
        repeat (3) @(negedge clk);
        check(!res_valid, "no result beyond the used slots");
      end
    join
    repeat (3) @(posedge clk);
    check(cmd_ready, "controller idle after reporting the batch");
    // second batch with a tie: two crossbars of different taxa, equal counts
    send(CMD_ASSIGN, 3, 4, 1, 0, 0, 0, 128'hE);
    check(qry_writes[3] == 2 && qry_writes[4] == 2, "batch cleared: crossbars reusable");
    fork
      send(CMD_SEARCH);
      begin
        @(negedge clk);
        while (cmd_ready) @(negedge clk);          // the search command was taken
        repeat (5) @(posedge clk);
        #0.1 search_done = 1;
        @(posedge clk);
        #0.1 search_done = 0;
        for (int x = 3; x <= 4; x++) begin
          @(negedge clk);
          pkt_valid = 1;
          pkt_data = {SW'(1), TW'(taxon_of[x]), COUNT_W'(9), 1'b1};
          @(posedge clk);
          while (!pkt_ready) @(posedge clk);
          #0.1 pkt_valid = 0;
        end
      end
      begin
        @(negedge clk);
        while (!res_valid) @(negedge clk);
        check(res_slot == 1 && res_taxon == 1 && res_hits == 9, "tie goes to the lower taxon index");
        res_ready = 1;
        @(negedge clk) res_ready = 0;
      end
    join
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

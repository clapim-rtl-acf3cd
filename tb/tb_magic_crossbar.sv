// tb_magic_crossbar -- checks the crossbar's memory and MAGIC operations directly.
//
// Writes 128 random 64-mers and reads them back, broadcasts a query and reads it from
// every row, initialises column ranges, then applies 1-, 2- and 3-input MAGIC NORs and
// compares each result bit with the expected truth table, including the MAGIC rule that
// an output cell not initialised to 1 stays 0. Also checks the Edits Vector outputs.
module tb_magic_crossbar;
  timeunit 1ns;
  timeprecision 100ps;
  import clapim_pkg::*;
  import tb_ref_pkg::*;

  logic clk = 0;
  always #1 clk = ~clk;

  xb_uop_t uop;
  logic [XB_COLS-1:0] rdata;
  logic [K-1:0] edits [XB_ROWS];

  magic_crossbar dut (.clk, .uop, .rdata, .edits);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  kmer_t kmers [XB_ROWS];
  kmer_t query;

  task automatic do_op(xb_uop_t u);
    uop = u;
    @(posedge clk);
    #0.1 uop = XB_UOP_NOP;
  endtask

  task automatic read_row(int r, output logic [XB_COLS-1:0] d);
    do_op('{op: XB_READ, row: ROW_W'(r), default: '0});
    d = rdata;
  endtask

  task automatic nor_op(int n, int a, int b, int c, int o);
    do_op('{op: XB_NOR, n_in: 2'(n), col_a: COL_W'(a), col_b: COL_W'(b), col_c: COL_W'(c),
            col_o: COL_W'(o), default: '0});
  endtask

  initial begin
    #100000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [XB_COLS-1:0] d;
    uop = XB_UOP_NOP;
    @(posedge clk);
    for (int r = 0; r < XB_ROWS; r++) begin
      kmers[r] = rand_kmer();
      do_op('{op: XB_WRITE_KMER, row: ROW_W'(r), data: kmers[r], default: '0});
    end
    query = rand_kmer();
    do_op('{op: XB_WRITE_QRY, data: query, default: '0});
    for (int r = 0; r < XB_ROWS; r += 9) begin
      read_row(r, d);
      check(d[KMER_W-1:0] == kmers[r], $sformatf("row %0d k-mer read back", r));
      check(d[QUERY_COL +: KMER_W] == query, $sformatf("row %0d holds the broadcast query", r));
    end
    // initialise columns 300..305 and the Edits Vector, then clear-check via NOR
    do_op('{op: XB_INIT, col_a: COL_W'(300), col_b: COL_W'(305), init_edits: 1'b1, default: '0});
    read_row(7, d);
    check(d[305:300] == 6'h3f, "initialised range reads 1");
    check(d[XB_COLS-1 -: K] == '1, "initialised Edits Vector reads 1");
    check(edits[7] == '1 && edits[100] == '1, "Edits Vector outputs follow the cells");
    // NOT: 300 = NOR(k-mer column 0)
    nor_op(1, 0, 0, 0, 300);
    // 2-input NOR: 301 = NOR(col 1, col 2)
    nor_op(2, 1, 2, 0, 301);
    // 3-input NOR into an Edits Vector cell: 448 = NOR(col 3, col 4, col 5)
    nor_op(3, 3, 4, 5, EDITS_COL);
    // NOR whose output was not initialised: 306 keeps 0 whatever the inputs
    do_op('{op: XB_INIT, col_a: COL_W'(306), col_b: COL_W'(306), init_edits: 1'b0, default: '0});
    nor_op(1, 0, 0, 0, 306);   // 306 = NOT col0
    nor_op(1, 306, 0, 0, 306); // output == input cell: stays as is or goes 0, never 1
    for (int r = 0; r < XB_ROWS; r++) begin
      logic [2:0] x;
      read_row(r, d);
      x = kmers[r][2:0];
      check(d[300] == !kmers[r][0], $sformatf("row %0d NOT", r));
      check(d[301] == !(kmers[r][1] | kmers[r][2]), $sformatf("row %0d NOR2", r));
      check(d[EDITS_COL] == !(kmers[r][3] | kmers[r][4] | kmers[r][5]), $sformatf("row %0d NOR3", r));
      check(edits[r][0] == d[EDITS_COL], $sformatf("row %0d edits output bit 0", r));
      check(d[306] == 1'b0, $sformatf("row %0d: MAGIC output never returns to 1", r));
      check(d[302] == 1'b1, $sformatf("row %0d: untouched initialised cell keeps 1", r));
      if (x == 3'b000) ;
    end
    // a second NOR into an already-evaluated cell without re-initialisation can only clear it
    nor_op(1, 300, 0, 0, 301);
    for (int r = 0; r < XB_ROWS; r += 5) begin
      read_row(r, d);
      check(d[301] == (!(kmers[r][1] | kmers[r][2]) && kmers[r][0]), $sformatf("row %0d NOR without init", r));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

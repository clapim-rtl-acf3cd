// tb_read_compute_periphery -- checks the sense multiplexing, detection OR and ones counter.
//
// Loads random Edits Vectors (0..10 ones) for the 128 rows, runs the four sense phases the
// way the sequencer does (12 clocks each, latch in the last), and compares the 1-bit hit
// and the match count with the number of rows whose edits do not exceed the threshold.
// Covers: no row hitting, a single hitting row in each multiplexer position, all rows
// hitting (the 7-bit count saturates at 127) and the clear input.
module tb_read_compute_periphery;
  timeunit 1ns;
  timeprecision 100ps;
  import clapim_pkg::*;
  import tb_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  logic clear, sa_en, sa_latch, hit;
  logic [2:0] sa_phase;
  logic [THR_W-1:0] thr;
  logic [COUNT_W-1:0] count;
  logic [K-1:0] edits [XB_ROWS];

  read_compute_periphery dut (.clk, .rst_n, .clear, .edits, .thr, .sa_en, .sa_latch,
                              .sa_phase, .hit, .count);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #200000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [K-1:0] pattern(int ones);
    logic [K-1:0] v = '0;
    int n = 0;
    while (n < ones) begin
      int p = $urandom_range(K - 1);
      if (!v[p]) begin v[p] = 1'b1; n++; end
    end
    return v;
  endfunction

  task automatic sense_all();
    clear = 1;
    @(posedge clk);
    #0.1 clear = 0;
    for (int p = 0; p < XB_ROWS / N_SA; p++) begin
      sa_phase = 3'(p); sa_en = 1;
      for (int c = 0; c < SA_LAT_CYC; c++) begin
        sa_latch = (c == SA_LAT_CYC - 1);
        @(posedge clk);
        #0.1;
      end
      sa_en = 0; sa_latch = 0;
    end
    @(posedge clk);
    #0.1;
  endtask

  task automatic run_case(string name, int t);
    int exp = 0;
    thr = THR_W'(t);
    for (int r = 0; r < XB_ROWS; r++) if (popcount64(edits[r]) <= t) exp++;
    sense_all();
    check(hit == (exp > 0), $sformatf("%s: hit %0d, expected %0d", name, hit, exp > 0));
    check(32'(count) == ((exp > 127) ? 127 : exp), $sformatf("%s: count %0d, expected %0d", name, count, exp));
  endtask

  initial begin
    clear = 0; sa_en = 0; sa_latch = 0; sa_phase = 0; thr = 4;
    for (int r = 0; r < XB_ROWS; r++) edits[r] = pattern(10);
    repeat (2) @(posedge clk);
    rst_n = 1;
    run_case("no row within threshold", 4);
    for (int r = 0; r < XB_ROWS; r += 13) begin
      for (int q = 0; q < XB_ROWS; q++) edits[q] = pattern(10);
      edits[r] = pattern(3);
      run_case($sformatf("only row %0d hits", r), 4);
    end
    for (int k = 0; k < 20; k++) begin
      for (int r = 0; r < XB_ROWS; r++) edits[r] = pattern($urandom_range(10));
      run_case($sformatf("random %0d", k), $urandom_range(1, 9));
    end
    for (int r = 0; r < XB_ROWS; r++) edits[r] = pattern($urandom_range(4));
    run_case("all 128 rows hit", 4);
    clear = 1;
    @(posedge clk);
    #0.1 clear = 0;
    check(count == 0 && !hit, "clear empties count and hit");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

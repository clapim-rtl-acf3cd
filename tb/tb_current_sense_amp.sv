// tb_current_sense_amp -- checks the sense amplifier model's threshold decision and latching.
//
// Drives random 64-bit wordline patterns with 0..12 ones (and a few dense ones) and
// thresholds 1..9, the range the paper evaluates, and checks that OUT is 1 exactly when the
// number of ones does not exceed the threshold, that OUTN is its complement, and that the
// output changes only on a latch clock.
module tb_current_sense_amp;
  timeunit 1ns;
  timeprecision 100ps;
  import clapim_pkg::*;
  import tb_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  logic en, latch, out, outn;
  logic [K-1:0] bl;
  logic [THR_W-1:0] thr;

  current_sense_amp dut (.clk, .rst_n, .en, .latch, .bl, .thr, .out, .outn);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #100000;
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

  initial begin
    en = 0; latch = 0; bl = '0; thr = 4;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 1; t <= 9; t++) begin
      for (int n = 0; n <= 12; n++) begin
        bl = pattern(n); thr = THR_W'(t); en = 1; latch = 0;
        repeat (3) @(posedge clk);
        latch = 1;
        @(posedge clk);
        #0.1 latch = 0; en = 0;
        check(out == (n <= t), $sformatf("thr=%0d ones=%0d out=%0d", t, n, out));
        check(outn == !out, "OUTN is the complement of OUT");
        // output holds while not latching, whatever the inputs
        begin
          logic held;
          held = out;
          bl = ~bl; en = 1;
          repeat (2) @(posedge clk);
          #0.1 check(out == held, "output holds without latch");
          en = 0;
        end
      end
    end
    bl = '1; thr = 64; en = 1; latch = 1;
    @(posedge clk);
    #0.1 check(out == 1'b1, "64 ones with threshold 64 is a hit");
    thr = 63;
    @(posedge clk);
    #0.1 check(out == 1'b0, "64 ones with threshold 63 is a miss");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_hit_gather_tree -- checks that the gather tree delivers every packet exactly once.
//
// A 6-leaf tree (padded to 8) and a 16-leaf tree. Every leaf offers a numbered packet at a
// random time and holds it until accepted; the root is stalled at random. Every packet
// must arrive once, none may be invented, and with the root always ready and all leaves
// offering at once the root must deliver one packet per clock after log2(N) clocks.
module tb_hit_gather_tree;
  timeunit 1ns;
  timeprecision 100ps;

  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  localparam int N = 6, W = 8;
  localparam int M = 16;

  logic [N-1:0] iv, ir;
  logic [W-1:0] id [N];
  logic ov, ordy;
  logic [W-1:0] od;
  hit_gather_tree #(.N(N), .W(W)) dut (.clk, .rst_n, .in_valid(iv), .in_ready(ir), .in_data(id),
                                       .out_valid(ov), .out_ready(ordy), .out_data(od));

  logic [M-1:0] iv2, ir2;
  logic [W-1:0] id2 [M];
  logic ov2;
  logic [W-1:0] od2;
  hit_gather_tree #(.N(M), .W(W)) dut16 (.clk, .rst_n, .in_valid(iv2), .in_ready(ir2), .in_data(id2),
                                         .out_valid(ov2), .out_ready(1'b1), .out_data(od2));

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

  int seen [256];
  int got, got2, first2, last2, cyc;

  always @(posedge clk) begin
    cyc++;
    if (ov && ordy) begin seen[od]++; got++; end
    if (ov2) begin
      got2++;
      if (got2 == 1) first2 = cyc;
      last2 = cyc;
    end
    for (int l = 0; l < N; l++) if (iv[l] && ir[l]) iv[l] <= 1'b0;
    for (int l = 0; l < M; l++) if (iv2[l] && ir2[l]) iv2[l] <= 1'b0;
  end

  initial begin
    iv = '0; iv2 = '0; ordy = 0; cyc = 0; got = 0; got2 = 0;
    for (int i = 0; i < 256; i++) seen[i] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int round = 0; round < 20; round++) begin
      int pending;
      for (int l = 0; l < N; l++) id[l] = W'(round * N + l);
      // leaves join at random clocks, the root stalls at random
      pending = (1 << N) - 1;
      while (pending != 0 || iv != 0 || ov) begin
        @(negedge clk);
        for (int l = 0; l < N; l++)
          if (pending[l] && $urandom_range(3) == 0) begin iv[l] = 1'b1; pending[l] = 0; end
        ordy = ($urandom_range(2) != 0);
      end
    end
    ordy = 1;                       // drain what is still inside the tree
    repeat (10) @(negedge clk);
    ordy = 0;
    check(got == 20 * N, $sformatf("%0d packets delivered, expected %0d", got, 20 * N));
    for (int i = 0; i < 20 * N; i++) check(seen[i] == 1, $sformatf("packet %0d delivered %0d times", i, seen[i]));
    // burst into the 16-leaf tree
    @(negedge clk);
    for (int l = 0; l < M; l++) begin id2[l] = W'(l); iv2[l] = 1'b1; end
    cyc = 0;
    repeat (40) @(posedge clk);
    check(got2 == M, $sformatf("16-leaf tree delivered %0d", got2));
    check(first2 == 4 + 1, $sformatf("first packet after %0d clocks, expected log2(16)=4 node stages", first2 - 1));
    check(last2 - first2 == M - 1, "one packet per clock at the root");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

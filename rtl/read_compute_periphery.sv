// read_compute_periphery -- near-crossbar count-and-compare logic of one crossbar.
//
// What it does: decides, for every one of the 128 rows, whether its Edits Vector holds at
// most `thr` ones (a hit: the stored 64-mer is within the edit threshold of the query),
// and reduces the 128 row decisions to (b) a 1-bit hit/miss for detection and (c) the
// number of hit rows for classification.
//
// How it works: NUM_SA sense amplifiers (32 in the paper) each sit behind a ROWS/NUM_SA:1
// multiplexer (4:1). SA j senses row NPH*j + phase, so the sequencer's `phase` counter
// selects one row of each group of 4 in turn. In the clock after each latch the
// amplifier outputs go to a 32-input OR whose result is ORed into a flip-flop (Fig. 11b:
// the OR gate and the flip-flop with feedback), and to a ones counter that adds them to
// the running count (Fig. 11c). `clear` empties both before a search.
//
// Timing: `sa_en`/`sa_latch` come from the search sequencer; hit and count are final one
// clock after the last latch.
//
// Follows the paper: 32 SAs, 4:1 multiplexing, 32-input OR plus feedback flip-flop, ones
// counter with a 7-bit output. This design's choices: which rows share a multiplexer, and
// that the count saturates at 2^COUNT_W-1 -- with 7 bits, as printed in the paper's figure,
// a crossbar in which all 128 rows hit reports 127.
module read_compute_periphery
  import clapim_pkg::*;
#(
  parameter int unsigned ROWS   = XB_ROWS,
  parameter int unsigned NUM_SA = N_SA,
  parameter int unsigned CNT_W  = COUNT_W
) (
  input  logic                               clk,
  input  logic                               rst_n,
  input  logic                               clear,
  input  logic [K-1:0]                       edits [ROWS],
  input  logic [THR_W-1:0]                   thr,
  input  logic                               sa_en,
  input  logic                               sa_latch,
  input  logic [$clog2(ROWS/NUM_SA+1)-1:0]   sa_phase,
  output logic                               hit,     // (b) detection output
  output logic [CNT_W-1:0]                   count    // (c) classification output
);

  localparam int unsigned NPH = ROWS / NUM_SA;

  logic [K-1:0]      mux_out [NUM_SA];
  logic [NUM_SA-1:0] sa_out;
  logic              acc_en;

  for (genvar j = 0; j < NUM_SA; j++) begin : g_sa
    // ROWS/NUM_SA : 1 row multiplexer in front of SA j
    assign mux_out[j] = edits[NPH * j + 32'(sa_phase)];

    current_sense_amp #(.NBL(K)) u_sa (
      .clk   (clk),
      .rst_n (rst_n),
      .en    (sa_en),
      .latch (sa_latch),
      .bl    (mux_out[j]),
      .thr   (thr),
      .out   (sa_out[j]),
      .outn  ()
    );
  end

  // ones counter over the SA outputs of one phase
  logic [$clog2(NUM_SA+1)-1:0] ones;
  always_comb begin
    ones = '0;
    for (int unsigned j = 0; j < NUM_SA; j++)
      ones += $clog2(NUM_SA+1)'(sa_out[j]);
  end

  logic [CNT_W:0] sum;
  assign sum = {1'b0, count} + (CNT_W+1)'(ones);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc_en <= 1'b0;
      hit    <= 1'b0;
      count  <= '0;
    end else begin
      acc_en <= sa_en && sa_latch;
      if (clear) begin
        hit   <= 1'b0;
        count <= '0;
      end else if (acc_en) begin
        hit   <= hit | (|sa_out);
        count <= sum[CNT_W] ? '1 : sum[CNT_W-1:0];
      end
    end
  end

endmodule

// clapim_top -- one ClaPIM memristive search chip.
//
// What it does: classifies batches of 64-base DNA queries against a database of 64-mers
// stored in memristive crossbars, tolerating edits. For each query the chip counts, per
// taxon, how many stored 64-mers lie within the edit threshold and returns the taxon with
// the most such hits, plus a hit/miss flag for detection.
//
// How it works: the host (not part of the chip) runs the filtering stage: it computes the
// base histogram of every query, batches queries whose neighbouring histograms do not
// overlap and looks up in its tracing table the crossbar ranges holding k-mers with those
// histograms. It then sends CMD_ASSIGN commands; the chip controller writes each query
// into its crossbars one crossbar per clock. On CMD_SEARCH a single search sequencer
// broadcasts the MAGIC program to all crossbar tiles; only tiles holding a query execute
// it, each against its own query. Every tile's sense periphery counts the rows within the
// threshold; the tiles' results travel through a binary gather tree to the controller,
// which sums them per (query, taxon) and reports the best taxon per query.
//
// Interface: the host command port and the result port of chip_controller, as plain
// signals; see that module for the commands. Timing of one search: 2167 MAGIC cycles and
// four 12-clock sense phases, then log2(N_XBAR) clocks through the tree and one clock per
// active crossbar at the root, then N_TAXA clocks per query for the classification.
//
// Follows the paper: crossbar geometry, in-crossbar algorithm, periphery, tree network,
// per-taxon classification. The paper's chip has 2^20 crossbars (8 GB); N_XBAR here
// defaults to a smaller number, and the command set, slot and taxon counts are this
// design's own. It is set to the largest size whose compilation stays well inside the
// memory available to the build (the simulator's front end grows about linearly with it).
//
// Lint notes: the tiles' read-back and `active` outputs are left open (they serve the
// per-tile tests); rst_n appears as both asynchronous reset and as the `disable iff` of
// the handshake assertions, which is intended.
module clapim_top
  import clapim_pkg::*;
#(
  parameter int unsigned N_XBAR  = 1024,
  parameter int unsigned N_SLOTS = 32,
  parameter int unsigned N_TAXA  = 16,
  localparam int unsigned XB_W   = (N_XBAR  > 1) ? $clog2(N_XBAR)  : 1,
  localparam int unsigned SLOT_W = (N_SLOTS > 1) ? $clog2(N_SLOTS) : 1,
  localparam int unsigned TAX_W  = (N_TAXA  > 1) ? $clog2(N_TAXA)  : 1,
  localparam int unsigned HIT_W  = COUNT_W + XB_W
) (
  input  logic               clk,
  input  logic               rst_n,
  // host command port
  input  logic               cmd_valid,
  output logic               cmd_ready,
  input  cmd_e               cmd_op,
  input  logic [XB_W-1:0]    cmd_xb_first,
  input  logic [XB_W-1:0]    cmd_xb_last,
  input  logic [ROW_W-1:0]   cmd_row,
  input  logic [TAX_W-1:0]   cmd_taxon,
  input  logic [SLOT_W-1:0]  cmd_slot,
  input  logic [THR_W-1:0]   cmd_thr,
  input  logic [KMER_W-1:0]  cmd_data,
  // classification results
  output logic               res_valid,
  input  logic               res_ready,
  output logic [SLOT_W-1:0]  res_slot,
  output logic [TAX_W-1:0]   res_taxon,
  output logic [HIT_W-1:0]   res_hits,
  output logic               res_detected,
  output logic               conflict,
  output logic               search_busy
);

  localparam int unsigned PKT_W = SLOT_W + TAX_W + COUNT_W + 1;

  logic               ctl_sel_valid, ctl_set_taxon;
  logic [XB_W-1:0]    ctl_sel_idx;
  xb_uop_t            ctl_uop, seq_uop;
  logic [SLOT_W-1:0]  ctl_slot;
  logic [TAX_W-1:0]   ctl_taxon;
  logic [THR_W-1:0]   thr;
  logic               search_start, search_done;
  logic               sa_en, sa_latch;
  logic [$clog2(XB_ROWS/N_SA+1)-1:0] sa_phase;
  logic               pkt_valid, pkt_ready;
  logic [PKT_W-1:0]   pkt_data;

  logic [N_XBAR-1:0]  t_valid, t_ready;
  logic [PKT_W-1:0]   t_data [N_XBAR];

  chip_controller #(
    .N_XBAR (N_XBAR),
    .N_SLOTS(N_SLOTS),
    .N_TAXA (N_TAXA)
  ) u_ctrl (
    .clk, .rst_n,
    .cmd_valid, .cmd_ready, .cmd_op, .cmd_xb_first, .cmd_xb_last, .cmd_row,
    .cmd_taxon, .cmd_slot, .cmd_thr, .cmd_data,
    .ctl_sel_valid, .ctl_sel_idx, .ctl_uop, .ctl_slot, .ctl_set_taxon, .ctl_taxon, .thr,
    .search_start, .search_done,
    .pkt_valid, .pkt_ready, .pkt_data,
    .res_valid, .res_ready, .res_slot, .res_taxon, .res_hits, .res_detected, .conflict
  );

  search_sequencer u_seq (
    .clk, .rst_n,
    .start    (search_start),
    .busy     (search_busy),
    .done     (search_done),
    .uop      (seq_uop),
    .sa_en, .sa_latch, .sa_phase
  );

  for (genvar t = 0; t < N_XBAR; t++) begin : g_tile
    logic               sel;
    logic [SLOT_W-1:0]  r_slot;
    logic [TAX_W-1:0]   r_taxon;
    logic [COUNT_W-1:0] r_count;
    logic               r_hit;

    assign sel = (32'(ctl_sel_idx) == t);

    crossbar_tile #(.SLOT_W(SLOT_W), .TAX_W(TAX_W)) u_tile (
      .clk, .rst_n,
      .ctl_sel      (ctl_sel_valid && sel),
      .ctl_uop      (ctl_uop),
      .ctl_slot     (ctl_slot),
      .set_taxon    (ctl_set_taxon && sel),
      .ctl_taxon    (ctl_taxon),
      .thr          (thr),
      .rdata        (),
      .search_start (search_start),
      .seq_uop      (seq_uop),
      .sa_en, .sa_latch, .sa_phase,
      .search_done  (search_done),
      .res_valid    (t_valid[t]),
      .res_ready    (t_ready[t]),
      .res_slot     (r_slot),
      .res_taxon    (r_taxon),
      .res_count    (r_count),
      .res_hit      (r_hit),
      .active       ()
    );
    assign t_data[t] = {r_slot, r_taxon, r_count, r_hit};
  end

  hit_gather_tree #(.N(N_XBAR), .W(PKT_W)) u_tree (
    .clk, .rst_n,
    .in_valid  (t_valid),
    .in_ready  (t_ready),
    .in_data   (t_data),
    .out_valid (pkt_valid),
    .out_ready (pkt_ready),
    .out_data  (pkt_data)
  );

endmodule

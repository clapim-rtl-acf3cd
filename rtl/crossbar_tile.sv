// crossbar_tile -- one crossbar with its read-and-compute periphery and per-crossbar state.
//
// What it does: holds 128 64-mers of one taxon (all with the same base histogram, placed
// there by the host), takes the query the chip controller writes into it for the current
// batch, runs the broadcast search program when it holds a query, and reports one result
// -- {query slot, taxon, number of hit rows, hit/miss} -- into the gather tree.
//
// How it works: the controller addresses the tile with `ctl_sel`; in that clock the tile's
// crossbar executes `ctl_uop` (a k-mer write, a query write or a row read). A query write
// also marks the tile active for the batch and records its query slot; `set_taxon`
// records the taxon. While active, the crossbar executes the sequencer's broadcast
// micro-operations; an inactive tile ignores them and its memristors are not switched,
// which is what the host-side filter saves. When the sequencer reports `search_done`, an
// active tile raises `res_valid` with its result and keeps it until the tree accepts it
// (`res_ready`); it then drops back to inactive.
//
// Timing: result valid from the clock after `search_done` until accepted.
//
// Follows the paper: crossbar, periphery, one taxon per crossbar, search only in
// crossbars selected for a query. This design's choice: the tile-level handshake and the
// activation flag.
module crossbar_tile
  import clapim_pkg::*;
#(
  parameter int unsigned SLOT_W = 5,
  parameter int unsigned TAX_W  = 4
) (
  input  logic                clk,
  input  logic                rst_n,
  // controller access
  input  logic                ctl_sel,
  input  xb_uop_t             ctl_uop,
  input  logic [SLOT_W-1:0]   ctl_slot,
  input  logic                set_taxon,
  input  logic [TAX_W-1:0]    ctl_taxon,
  input  logic [THR_W-1:0]    thr,
  output logic [XB_COLS-1:0]  rdata,
  // broadcast search program
  input  logic                search_start,
  input  xb_uop_t             seq_uop,
  input  logic                sa_en,
  input  logic                sa_latch,
  input  logic [$clog2(XB_ROWS/N_SA+1)-1:0] sa_phase,
  input  logic                search_done,
  // result towards the gather tree
  output logic                res_valid,
  input  logic                res_ready,
  output logic [SLOT_W-1:0]   res_slot,
  output logic [TAX_W-1:0]    res_taxon,
  output logic [COUNT_W-1:0]  res_count,
  output logic                res_hit,
  output logic                active
);

  xb_uop_t      xb_uop;
  logic [K-1:0] edits [XB_ROWS];

  always_comb begin
    if (ctl_sel)     xb_uop = ctl_uop;
    else if (active) xb_uop = seq_uop;
    else             xb_uop = XB_UOP_NOP;
  end

  magic_crossbar u_xb (
    .clk   (clk),
    .uop   (xb_uop),
    .rdata (rdata),
    .edits (edits)
  );

  read_compute_periphery u_rcp (
    .clk      (clk),
    .rst_n    (rst_n),
    .clear    (search_start),
    .edits    (edits),
    .thr      (thr),
    .sa_en    (sa_en && active),
    .sa_latch (sa_latch),
    .sa_phase (sa_phase),
    .hit      (res_hit),
    .count    (res_count)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active    <= 1'b0;
      res_valid <= 1'b0;
      res_slot  <= '0;
      res_taxon <= '0;
    end else begin
      if (set_taxon) res_taxon <= ctl_taxon;
      if (ctl_sel && ctl_uop.op == XB_WRITE_QRY) begin
        active   <= 1'b1;
        res_slot <= ctl_slot;
      end
      if (search_done && active) res_valid <= 1'b1;
      if (res_valid && res_ready) begin
        res_valid <= 1'b0;
        active    <= 1'b0;
      end
    end
  end

endmodule

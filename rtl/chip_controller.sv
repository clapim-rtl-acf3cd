// chip_controller -- command processing, query distribution and classification of a chip.
//
// What it does: takes host commands, loads the k-mer database and the taxon of each
// crossbar, writes every query of a batch into the crossbars the host-side filter chose
// for it, starts the search in all of them at once, sums the hit counts that come back
// per (query, taxon) and classifies each query by the taxon with the most hits.
//
// How it works (commands, one accepted at a time while cmd_ready is high):
//   CMD_LOAD_KMER  one clock: write cmd_data into row cmd_row of crossbar cmd_xb_first.
//   CMD_SET_TAXON  crossbars cmd_xb_first..cmd_xb_last get taxon cmd_taxon, one per clock.
//   CMD_SET_THR    the edit-distance threshold used by all sense amplifiers.
//   CMD_ASSIGN     query cmd_data of batch slot cmd_slot is written into crossbars
//                  cmd_xb_first..cmd_xb_last, one crossbar per clock (the paper writes the
//                  queries serially into their crossbars); a query whose histogram has
//                  several neighbouring histograms is sent as several ASSIGN commands, one
//                  per crossbar range. A crossbar given two queries in one batch breaks the
//                  host's batching rule: `conflict` is set and the second write is ignored.
//   CMD_SEARCH     pulses `search_start`, waits for `search_done`, then takes one packet
//                  per active crossbar from the gather tree, adding its count into
//                  hits[slot][taxon] and its hit bit into detected[slot]. Then, for each
//                  slot that received a query, it scans the taxa (one per clock) and emits
//                  one result {slot, taxon with most hits (lowest index on a tie), its hit
//                  count, detected}; a slot with no hits at all reports hits = 0. The
//                  tables are then cleared and the next batch can be assigned.
// Timing: results leave on a valid/ready port; cmd_ready is low until the batch is reported.
//
// Follows the paper: serial query writes, simultaneous search, per-organism sum of hits,
// MAX_Index classification, 1-bit detection alongside. This design's own: the command
// set, the conflict check, tie-breaking and the result format.
module chip_controller
  import clapim_pkg::*;
#(
  parameter int unsigned N_XBAR  = 16,
  parameter int unsigned N_SLOTS = 32,
  parameter int unsigned N_TAXA  = 16,
  localparam int unsigned XB_W   = (N_XBAR  > 1) ? $clog2(N_XBAR)  : 1,
  localparam int unsigned SLOT_W = (N_SLOTS > 1) ? $clog2(N_SLOTS) : 1,
  localparam int unsigned TAX_W  = (N_TAXA  > 1) ? $clog2(N_TAXA)  : 1,
  localparam int unsigned HIT_W  = COUNT_W + XB_W,
  localparam int unsigned PKT_W  = SLOT_W + TAX_W + COUNT_W + 1
) (
  input  logic                clk,
  input  logic                rst_n,
  // host command port
  input  logic                cmd_valid,
  output logic                cmd_ready,
  input  cmd_e                cmd_op,
  input  logic [XB_W-1:0]     cmd_xb_first,
  input  logic [XB_W-1:0]     cmd_xb_last,
  input  logic [ROW_W-1:0]    cmd_row,
  input  logic [TAX_W-1:0]    cmd_taxon,
  input  logic [SLOT_W-1:0]   cmd_slot,
  input  logic [THR_W-1:0]    cmd_thr,
  input  logic [KMER_W-1:0]   cmd_data,
  // towards the crossbar tiles
  output logic                ctl_sel_valid,
  output logic [XB_W-1:0]     ctl_sel_idx,
  output xb_uop_t             ctl_uop,
  output logic [SLOT_W-1:0]   ctl_slot,
  output logic                ctl_set_taxon,
  output logic [TAX_W-1:0]    ctl_taxon,
  output logic [THR_W-1:0]    thr,
  // search sequencer
  output logic                search_start,
  input  logic                search_done,
  // root of the gather tree: {slot, taxon, count, hit}
  input  logic                pkt_valid,
  output logic                pkt_ready,
  input  logic [PKT_W-1:0]    pkt_data,
  // classification results
  output logic                res_valid,
  input  logic                res_ready,
  output logic [SLOT_W-1:0]   res_slot,
  output logic [TAX_W-1:0]    res_taxon,
  output logic [HIT_W-1:0]    res_hits,
  output logic                res_detected,
  output logic                conflict
);

  typedef enum logic [2:0] {C_IDLE, C_RANGE, C_SEARCH, C_GATHER, C_FIRST, C_SCAN, C_REPORT} cstate_e;

  cstate_e             state;
  cmd_e                op_q;
  logic [XB_W-1:0]     xb_cur, xb_last;
  logic [SLOT_W-1:0]   slot_q;
  logic [TAX_W-1:0]    taxon_q;
  logic [KMER_W-1:0]   data_q;
  logic [N_XBAR-1:0]   assigned;            // crossbars holding a query in this batch
  logic [XB_W:0]       n_active, n_recv;
  logic [N_SLOTS-1:0]  slot_used, detected;
  logic [HIT_W-1:0]    hits [N_SLOTS][N_TAXA];
  logic [SLOT_W-1:0]   scan_slot;
  logic [TAX_W-1:0]    scan_tax, best_tax;
  logic [HIT_W-1:0]    best_hits;

  // packet fields
  logic [SLOT_W-1:0]   p_slot;
  logic [TAX_W-1:0]    p_tax;
  logic [COUNT_W-1:0]  p_cnt;
  logic                p_hit;
  assign {p_slot, p_tax, p_cnt, p_hit} = pkt_data;

  assign cmd_ready = (state == C_IDLE);
  assign pkt_ready = (state == C_GATHER);

  // ---- per-clock access to the tiles ----
  logic range_write;
  assign range_write = (state == C_RANGE);

  always_comb begin
    ctl_sel_valid = 1'b0;
    ctl_sel_idx   = xb_cur;
    ctl_uop       = XB_UOP_NOP;
    ctl_slot      = slot_q;
    ctl_set_taxon = 1'b0;
    ctl_taxon     = taxon_q;
    if (state == C_IDLE && cmd_valid && cmd_op == CMD_LOAD_KMER) begin
      ctl_sel_valid = 1'b1;
      ctl_sel_idx   = cmd_xb_first;
      ctl_uop.op    = XB_WRITE_KMER;
      ctl_uop.row   = cmd_row;
      ctl_uop.data  = cmd_data;
    end else if (range_write && op_q == CMD_SET_TAXON) begin
      ctl_set_taxon = 1'b1;
    end else if (range_write && op_q == CMD_ASSIGN && !assigned[xb_cur]) begin
      ctl_sel_valid = 1'b1;
      ctl_uop.op    = XB_WRITE_QRY;
      ctl_uop.data  = data_q;
    end
  end

  assign search_start = (state == C_IDLE) && cmd_valid && cmd_op == CMD_SEARCH;

  // ---- result port ----
  assign res_valid    = (state == C_REPORT);
  assign res_slot     = scan_slot;
  assign res_taxon    = best_tax;
  assign res_hits     = best_hits;
  assign res_detected = detected[scan_slot];

  // next used slot at or after a given one
  function automatic logic [SLOT_W:0] next_used(input logic [N_SLOTS-1:0] used, input int unsigned from);
    next_used = (SLOT_W+1)'(N_SLOTS);
    for (int unsigned s = N_SLOTS; s > 0; s--)
      if (s - 1 >= from && used[s-1]) next_used = (SLOT_W+1)'(s - 1);
  endfunction

  logic [SLOT_W:0] first_slot, following_slot;
  assign first_slot     = next_used(slot_used, 0);
  assign following_slot = next_used(slot_used, 32'(scan_slot) + 1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= C_IDLE;
      op_q      <= CMD_LOAD_KMER;
      xb_cur    <= '0;
      xb_last   <= '0;
      slot_q    <= '0;
      taxon_q   <= '0;
      data_q    <= '0;
      thr       <= THR_W'(4);
      assigned  <= '0;
      n_active  <= '0;
      n_recv    <= '0;
      slot_used <= '0;
      detected  <= '0;
      scan_slot <= '0;
      scan_tax  <= '0;
      best_tax  <= '0;
      best_hits <= '0;
      conflict  <= 1'b0;
      for (int unsigned s = 0; s < N_SLOTS; s++)
        for (int unsigned t = 0; t < N_TAXA; t++)
          hits[s][t] <= '0;
    end else begin
      unique case (state)
        C_IDLE: if (cmd_valid) begin
          op_q    <= cmd_op;
          xb_cur  <= cmd_xb_first;
          xb_last <= cmd_xb_last;
          slot_q  <= cmd_slot;
          taxon_q <= cmd_taxon;
          data_q  <= cmd_data;
          unique case (cmd_op)
            CMD_SET_THR:   thr <= cmd_thr;
            CMD_SET_TAXON: state <= C_RANGE;
            CMD_ASSIGN: begin
              state <= C_RANGE;
              slot_used[cmd_slot] <= 1'b1;
            end
            CMD_SEARCH: begin
              n_recv <= '0;
              state  <= C_SEARCH;
            end
            default: ;
          endcase
        end
        C_RANGE: begin
          if (op_q == CMD_ASSIGN) begin
            if (assigned[xb_cur]) conflict <= 1'b1;
            else begin
              assigned[xb_cur] <= 1'b1;
              n_active         <= n_active + 1'b1;
            end
          end
          if (xb_cur == xb_last) state <= C_IDLE;
          else xb_cur <= xb_cur + 1'b1;
        end
        C_SEARCH: if (search_done) state <= (n_active == '0) ? C_FIRST : C_GATHER;
        C_GATHER: begin
          if (pkt_valid) begin
            hits[p_slot][p_tax] <= hits[p_slot][p_tax] + HIT_W'(p_cnt);
            if (p_hit) detected[p_slot] <= 1'b1;
            n_recv <= n_recv + 1'b1;
            if (n_recv + 1'b1 == n_active) state <= C_FIRST;
          end
        end
        C_FIRST: begin
          scan_tax  <= '0;
          best_tax  <= '0;
          best_hits <= '0;
          if (first_slot == (SLOT_W+1)'(N_SLOTS)) begin
            state    <= C_IDLE;   // no query in this batch
            assigned <= '0;
            n_active <= '0;
          end else begin
            scan_slot <= first_slot[SLOT_W-1:0];
            state     <= C_SCAN;
          end
        end
        C_SCAN: begin
          if (hits[scan_slot][scan_tax] > best_hits) begin
            best_hits <= hits[scan_slot][scan_tax];
            best_tax  <= scan_tax;
          end
          if (32'(scan_tax) == N_TAXA - 1) state <= C_REPORT;
          else scan_tax <= scan_tax + 1'b1;
        end
        C_REPORT: if (res_ready) begin
          scan_tax  <= '0;
          best_tax  <= '0;
          best_hits <= '0;
          if (following_slot == (SLOT_W+1)'(N_SLOTS)) begin
            // batch reported: clear it
            state     <= C_IDLE;
            assigned  <= '0;
            n_active  <= '0;
            slot_used <= '0;
            detected  <= '0;
            scan_slot <= '0;
            for (int unsigned s = 0; s < N_SLOTS; s++)
              for (int unsigned t = 0; t < N_TAXA; t++)
                hits[s][t] <= '0;
          end else begin
            scan_slot <= following_slot[SLOT_W-1:0];
            state     <= C_SCAN;
          end
        end
        default: state <= C_IDLE;
      endcase
    end
  end

  // a result must stay on the port until it is taken
  a_res_hold: assert property (@(posedge clk) disable iff (!rst_n)
                               res_valid && !res_ready |=> res_valid && $stable(res_taxon));

endmodule

// search_sequencer -- generates the in-crossbar search program and the sense phases.
//
// What it does: after `start`, it broadcasts to the crossbars the MAGIC micro-operations
// that compare the query held in every row against that row's 64-mer and leave, in the
// row's Edits Vector, a 1 for every query base that matched none of the co-located, left
// and right k-mer bases. It then runs the near-crossbar "read and count" step: ROWS/N_SA
// sense phases, each one SA cycle long, with the 4:1 multiplexers pointing at a new group
// of rows in each phase. One sequencer drives all crossbars, because every active crossbar
// runs the same gates at the same time on its own query.
//
// How it works, for query base i = 0..63 (paper, steps 1X, 2X, 3X and 4_i):
//   for X in C (k-mer base i), L (base i-1), R (base i+1):
//     XOR of bit 0 and XOR of bit 1 of query base i against k-mer base j, each as five
//     MAGIC NORs: a' ; b' ; (a'+b')' ; (a+b)' ; ((a'+b')' + (a+b)')'
//     M_X = NOR(XOR0, XOR1)             -> 1 when the two bases are equal
//   Edits[i] = NOR(M_L, M_C, M_R)       -> three-input MAGIC NOR
// Base 0 has no left neighbour and base 63 no right one: those comparisons are skipped and
// step 4 uses a two-input NOR. The 33 scratch cells of a base are reused: the 192 reserved
// columns hold the cells of 5 bases, so before every group of 5 bases one initialisation
// cycle sets all of them (and, before the first group, the Edits Vector) back to 1.
//
// Timing: 64*34 - 2*11 = 2154 NOR cycles + ceil(64/5) = 13 initialisation cycles = 2167
// MAGIC cycles, the number the paper reports; then ROWS/N_SA phases of SA_LAT clocks
// (4 x 12 clocks = 144 ns at a 3 ns MAGIC cycle, as in the paper's Table II), then one
// clock in which the periphery adds the last phase. `done` pulses in the clock after that;
// from the `start` clock to `done` there are 2167 + 48 + 1 clocks.
//
// Follows the paper: the gate sequence, the XOR formula, the step order, 2167 MAGIC cycles,
// four SA cycles with 32 SAs. This design's choice: the placement of scratch cells and the
// grouping of 5 bases per initialisation, chosen because it fills the 192 reserved columns
// and reproduces the paper's cycle count; the edge handling of bases 0 and 63.
module search_sequencer
  import clapim_pkg::*;
#(
  parameter int unsigned ROWS     = XB_ROWS,
  parameter int unsigned NUM_SA   = N_SA,
  parameter int unsigned SA_LAT   = SA_LAT_CYC
) (
  input  logic                            clk,
  input  logic                            rst_n,
  input  logic                            start,
  output logic                            busy,
  output logic                            done,
  output xb_uop_t                         uop,
  output logic                            sa_en,     // a sense phase is in progress
  output logic                            sa_latch,  // last clock of a sense phase
  output logic [$clog2(ROWS/NUM_SA+1)-1:0] sa_phase  // which row of each mux group
);

  localparam int unsigned NPH   = ROWS / NUM_SA;
  localparam int unsigned PH_W  = $clog2(NPH + 1);
  localparam int unsigned LAT_W = $clog2(SA_LAT + 1);

  typedef enum logic [2:0] {S_IDLE, S_INIT, S_COMP, S_EDIT, S_SENSE, S_FLUSH, S_DONE} state_e;

  state_e            state;
  logic [6:0]        base_i;   // query base 0..63
  logic [2:0]        slot;     // scratch slot 0..4 of the current base
  logic [1:0]        cmp_x;    // 0 = C, 1 = L, 2 = R
  logic [3:0]        step_u;   // 0..4 XOR of bit 0, 5..9 XOR of bit 1, 10 match cell
  logic [PH_W-1:0]   phase;
  logic [LAT_W-1:0]  lat_cnt;

  // ---- column arithmetic for the current step ----
  int unsigned slot_base, cmp_base, cell_base, nbr_j, bit_b, n_bases;
  logic [COL_W-1:0] a_col, q_col;

  always_comb begin
    slot_base = SCR_COL + CELLS_PER_BASE * 32'(slot);
    cmp_base  = slot_base + 11 * 32'(cmp_x);
    bit_b     = (step_u >= 4'd5) ? 1 : 0;
    cell_base = cmp_base + 5 * bit_b;
    unique case (cmp_x)
      2'd1:    nbr_j = 32'(base_i) - 1;
      2'd2:    nbr_j = 32'(base_i) + 1;
      default: nbr_j = 32'(base_i);
    endcase
    a_col   = COL_W'(KMER_COL  + 2 * nbr_j + bit_b);
    q_col   = COL_W'(QUERY_COL + 2 * 32'(base_i) + bit_b);
    n_bases = (K - 32'(base_i) < BASES_PER_INIT) ? K - 32'(base_i) : BASES_PER_INIT;
  end

  // ---- micro-operation of the current clock ----
  always_comb begin
    uop = XB_UOP_NOP;
    unique case (state)
      S_INIT: begin
        uop.op         = XB_INIT;
        uop.col_a      = COL_W'(SCR_COL);
        uop.col_b      = COL_W'(SCR_COL + CELLS_PER_BASE * n_bases - 1);
        uop.init_edits = (base_i == 7'd0);
      end
      S_COMP: begin
        uop.op = XB_NOR;
        unique case (step_u)
          4'd0, 4'd5: begin uop.n_in = 2'd1; uop.col_a = a_col; uop.col_o = COL_W'(cell_base); end
          4'd1, 4'd6: begin uop.n_in = 2'd1; uop.col_a = q_col; uop.col_o = COL_W'(cell_base + 1); end
          4'd2, 4'd7: begin uop.n_in = 2'd2; uop.col_a = COL_W'(cell_base); uop.col_b = COL_W'(cell_base + 1);
                            uop.col_o = COL_W'(cell_base + 2); end
          4'd3, 4'd8: begin uop.n_in = 2'd2; uop.col_a = a_col; uop.col_b = q_col;
                            uop.col_o = COL_W'(cell_base + 3); end
          4'd4, 4'd9: begin uop.n_in = 2'd2; uop.col_a = COL_W'(cell_base + 2); uop.col_b = COL_W'(cell_base + 3);
                            uop.col_o = COL_W'(cell_base + 4); end
          default:    begin uop.n_in = 2'd2; uop.col_a = COL_W'(cmp_base + 4); uop.col_b = COL_W'(cmp_base + 9);
                            uop.col_o = COL_W'(cmp_base + 10); end
        endcase
      end
      S_EDIT: begin
        // M_C at slot_base+10, M_L at slot_base+21, M_R at slot_base+32
        uop.op    = XB_NOR;
        uop.col_o = COL_W'(EDITS_COL + 32'(base_i));
        uop.col_a = COL_W'(slot_base + 10);
        if (base_i == 7'd0) begin
          uop.n_in = 2'd2; uop.col_b = COL_W'(slot_base + 32);
        end else if (base_i == 7'(K - 1)) begin
          uop.n_in = 2'd2; uop.col_b = COL_W'(slot_base + 21);
        end else begin
          uop.n_in = 2'd3; uop.col_b = COL_W'(slot_base + 21); uop.col_c = COL_W'(slot_base + 32);
        end
      end
      default: ;
    endcase
  end

  // ---- step counters ----
  logic       last_cmp;
  always_comb begin
    // the comparison after cmp_x that exists for this base
    unique case (cmp_x)
      2'd0:    last_cmp = (base_i == 7'd0) && (base_i == 7'(K - 1));
      2'd1:    last_cmp = (base_i == 7'(K - 1));
      default: last_cmp = 1'b1;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      base_i  <= '0;
      slot    <= '0;
      cmp_x   <= '0;
      step_u  <= '0;
      phase   <= '0;
      lat_cnt <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (start) begin
          state  <= S_INIT;
          base_i <= '0;
          slot   <= '0;
        end
        S_INIT: begin
          state  <= S_COMP;
          cmp_x  <= 2'd0;
          step_u <= '0;
        end
        S_COMP: begin
          if (step_u != 4'd10) begin
            step_u <= step_u + 4'd1;
          end else begin
            step_u <= '0;
            if (last_cmp) state <= S_EDIT;
            else if (cmp_x == 2'd0 && base_i == 7'd0) cmp_x <= 2'd2;  // no left neighbour
            else cmp_x <= cmp_x + 2'd1;
          end
        end
        S_EDIT: begin
          cmp_x  <= 2'd0;
          base_i <= base_i + 7'd1;
          if (base_i == 7'(K - 1)) begin
            state   <= S_SENSE;
            phase   <= '0;
            lat_cnt <= '0;
          end else if (32'(slot) == BASES_PER_INIT - 1) begin
            slot  <= '0;
            state <= S_INIT;
          end else begin
            slot  <= slot + 3'd1;
            state <= S_COMP;
          end
        end
        S_SENSE: begin
          if (32'(lat_cnt) != SA_LAT - 1) begin
            lat_cnt <= lat_cnt + LAT_W'(1);
          end else begin
            lat_cnt <= '0;
            if (32'(phase) == NPH - 1) state <= S_FLUSH;
            else phase <= phase + PH_W'(1);
          end
        end
        S_FLUSH: state <= S_DONE;
        S_DONE:  state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy     = (state != S_IDLE);
  assign done     = (state == S_DONE);
  assign sa_en    = (state == S_SENSE);
  assign sa_latch = (state == S_SENSE) && (32'(lat_cnt) == SA_LAT - 1);
  assign sa_phase = phase;

endmodule

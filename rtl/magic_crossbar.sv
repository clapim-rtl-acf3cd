// magic_crossbar -- logic model of one 128x512 memristive crossbar with MAGIC stateful logic.
//
// What it does: each of the 128 rows holds one 64-mer (columns 0..127, base i in columns
// 2i and 2i+1), a copy of the current query (columns 128..255), 192 reserved cells for
// intermediate results (256..447) and the 64-bit Edits Vector (448..511), as in the
// paper's data map. A cell stores logical 1 in its low-resistance state.
//
// How it works: every clock cycle is one MAGIC cycle and carries one micro-operation,
// applied to all rows in parallel, just as a voltage applied on the bitlines acts on every
// row of the array:
//   XB_WRITE_KMER  write a 64-mer into one row (database loading),
//   XB_WRITE_QRY   write the query into all rows at once,
//   XB_INIT        set a column range (and optionally the Edits Vector) to 1 in all rows,
//   XB_NOR         MAGIC NOR: the output cell, which must have been initialised to 1, is
//                  switched to 0 when any of the 1..3 input cells holds 1; a cell that was
//                  not initialised stays 0 (MAGIC can only switch low -> high resistance),
//   XB_READ        ordinary memory read of one row, result on rdata the next cycle.
// The Edits Vector columns of every row are always visible on `edits` for the
// near-crossbar sense periphery (the paper grounds all bitlines and senses a wordline).
//
// Timing: one micro-operation per clock, results visible the cycle after. The array is
// nonvolatile and is not cleared by reset; everything the search reads is written first.
//
// Follows the paper: geometry, data map, MAGIC NOR semantics with initialisation cycles,
// broadcast query write. This design's choice: the micro-operation encoding and the
// column-range form of the initialisation operation. The analog behaviour of the devices
// (resistances, voltages, endurance) is not modelled, only the logic function.
module magic_crossbar
  import clapim_pkg::*;
#(
  parameter int unsigned ROWS = XB_ROWS,
  parameter int unsigned COLS = XB_COLS
) (
  input  logic               clk,
  input  xb_uop_t            uop,
  output logic [COLS-1:0]    rdata,
  output logic [K-1:0]       edits [ROWS]
);

  logic [COLS-1:0] mem [ROWS];
  logic [COLS-1:0] init_mask;

  // Columns set to 1 by an XB_INIT operation.
  always_comb begin
    init_mask = '0;
    for (int unsigned c = 0; c < COLS; c++) begin
      if ((c >= 32'(uop.col_a) && c <= 32'(uop.col_b)) ||
          (uop.init_edits && c >= COLS - K))
        init_mask[c] = 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    unique case (uop.op)
      XB_WRITE_KMER: mem[uop.row[$clog2(ROWS)-1:0]][KMER_COL +: KMER_W] <= uop.data;
      XB_WRITE_QRY: begin
        for (int unsigned r = 0; r < ROWS; r++)
          mem[r][QUERY_COL +: KMER_W] <= uop.data;
      end
      XB_INIT: begin
        for (int unsigned r = 0; r < ROWS; r++)
          mem[r] <= mem[r] | init_mask;
      end
      XB_NOR: begin
        for (int unsigned r = 0; r < ROWS; r++)
          mem[r][uop.col_o] <= mem[r][uop.col_o]
                             & ~(mem[r][uop.col_a]
                               | (uop.n_in >= 2'd2 && mem[r][uop.col_b])
                               | (uop.n_in == 2'd3 && mem[r][uop.col_c]));
      end
      XB_READ: rdata <= mem[uop.row[$clog2(ROWS)-1:0]];
      default: ;
    endcase
  end

  always_comb begin
    for (int unsigned r = 0; r < ROWS; r++)
      edits[r] = mem[r][COLS-K +: K];
  end

endmodule

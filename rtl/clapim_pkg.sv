// clapim_pkg -- types and constants shared by the ClaPIM memristive search chip.
//
// The chip stores 64-mers (DNA strings of 64 bases, 2 bits per base) in 128x512
// memristive crossbars and compares a query against all 128 rows of a crossbar at once
// using MAGIC NOR stateful logic, followed by a near-crossbar current-sense "count and
// compare" step. This package holds the crossbar geometry, the base encoding, the
// micro-operation format that the search sequencer broadcasts to the crossbars, and the
// host command / result formats of the chip controller.
//
// Taken from the paper: k = 64, 128x512 crossbars, column map (k-mer | query | reserved |
// Edits Vector = 128 | 128 | 192 | 64 bits), base code A=00 T=01 G=10 C=11, 32 sense
// amplifiers behind 4:1 multiplexers, a 7-bit match count, 3 ns MAGIC cycle, 36 ns SA cycle.
// This design's own choices: the micro-operation and command encodings, the bit order of a
// base inside its two columns (column 2i holds bit 0, column 2i+1 holds bit 1), and the
// widths of taxon and query-slot identifiers.
package clapim_pkg;

  // ---- crossbar geometry (paper, Sec. III-A, Fig. 6) ----
  localparam int unsigned K          = 64;          // bases per k-mer / query
  localparam int unsigned BASE_W     = 2;           // bits per base
  localparam int unsigned KMER_W     = K * BASE_W;  // 128 bits
  localparam int unsigned XB_ROWS    = 128;         // k-mers per crossbar
  localparam int unsigned XB_COLS    = 512;         // memristors per row
  localparam int unsigned COL_W      = $clog2(XB_COLS);
  localparam int unsigned ROW_W      = $clog2(XB_ROWS);
  localparam int unsigned KMER_COL   = 0;           // k-mer bits:  columns   0..127
  localparam int unsigned QUERY_COL  = KMER_W;      // query bits:  columns 128..255
  localparam int unsigned SCR_COL    = 2 * KMER_W;  // reserved:    columns 256..447
  localparam int unsigned EDITS_COL  = XB_COLS - K; // Edits Vector: columns 448..511
  localparam int unsigned SCR_COLS   = EDITS_COL - SCR_COL;  // 192

  // Scratch cells needed to compare one query base with its three k-mer neighbours:
  // 3 comparisons x (2 XORs x 5 cells + 1 match cell) = 33 (this design's mapping).
  localparam int unsigned CELLS_PER_BASE = 33;
  // Bases whose scratch fits in the reserved region between two initialisations: 5.
  localparam int unsigned BASES_PER_INIT = SCR_COLS / CELLS_PER_BASE;

  // ---- near-crossbar periphery (paper, Fig. 11, Table I) ----
  localparam int unsigned N_SA       = 32;          // sense amplifiers per crossbar
  localparam int unsigned COUNT_W    = 7;           // match-count output width (Fig. 11c)
  localparam int unsigned THR_W      = 7;           // edit threshold 0..64
  localparam int unsigned SA_LAT_CYC = 12;          // 36 ns SA cycle / 3 ns MAGIC cycle

  // ---- base encoding (paper, Fig. 7 caption) ----
  typedef enum logic [1:0] {
    BASE_A = 2'b00,
    BASE_T = 2'b01,
    BASE_G = 2'b10,
    BASE_C = 2'b11
  } base_e;

  // ---- crossbar micro-operations (this design's encoding) ----
  typedef enum logic [2:0] {
    XB_NOP        = 3'd0,
    XB_WRITE_KMER = 3'd1,  // write data into the k-mer columns of one row
    XB_WRITE_QRY  = 3'd2,  // write data into the query columns of every row at once
    XB_INIT       = 3'd3,  // set columns [col_a, col_b] of every row to logical 1
    XB_NOR        = 3'd4,  // MAGIC NOR of n_in (1..3) columns into column col_o, every row
    XB_READ       = 3'd5   // read one whole row
  } xb_op_e;

  typedef struct packed {
    xb_op_e             op;
    logic [1:0]         n_in;    // XB_NOR: number of inputs, 1 (NOT), 2 or 3
    logic [COL_W-1:0]   col_a;   // XB_NOR input 0 / XB_INIT first column
    logic [COL_W-1:0]   col_b;   // XB_NOR input 1 / XB_INIT last column
    logic [COL_W-1:0]   col_c;   // XB_NOR input 2
    logic [COL_W-1:0]   col_o;   // XB_NOR output column
    logic               init_edits; // XB_INIT: also set the Edits Vector columns
    logic [ROW_W-1:0]   row;     // XB_WRITE_KMER / XB_READ row
    logic [KMER_W-1:0]  data;    // XB_WRITE_KMER / XB_WRITE_QRY data
  } xb_uop_t;

  localparam xb_uop_t XB_UOP_NOP = '{op: XB_NOP, default: '0};

  // ---- host commands of the chip controller (this design's encoding) ----
  typedef enum logic [2:0] {
    CMD_LOAD_KMER = 3'd0,  // store a 64-mer in row `row` of crossbar `xb_first`
    CMD_SET_TAXON = 3'd1,  // crossbars xb_first..xb_last belong to taxon `taxon`
    CMD_SET_THR   = 3'd2,  // edit-distance threshold of the sense amplifiers
    CMD_ASSIGN    = 3'd3,  // write query `data` (batch slot `slot`) to crossbars xb_first..xb_last
    CMD_SEARCH    = 3'd4   // search the batch, then report one result per used slot
  } cmd_e;

endpackage

// rassa_pkg: constants and types shared by the resistive similarity-search array.
//
// A DNA base is stored and compared as a one-hot group of four bitcells
// (A=1000, C=0100, G=0010, T=0001, printed most significant bit first), so a
// base pair mismatch discharges at most one bitcell of its group. An all-zero
// group is a masked base: its selectors are off and it cannot add a mismatch.
// A Sub-Word holds 15 bases (60 bitcells) on one match line read by a 4-bit
// ADC; a Word Row holds 16 Sub-Words (240 bases, 960 bitcells). These numbers
// follow the paper. The score width of 9 bits and the row operation encoding
// are this design's own choices.
package rassa_pkg;

  localparam int unsigned BP_CELLS   = 4;                      // bitcells per base
  localparam int unsigned SW_BP      = 15;                     // bases per Sub-Word
  localparam int unsigned SW_CELLS   = SW_BP * BP_CELLS;       // 60 bitcells
  localparam int unsigned SW_SCORE_W = 4;                      // ADC output width
  localparam int unsigned N_SUBWORDS = 16;                     // Sub-Words per Word Row
  localparam int unsigned ROW_BP     = SW_BP * N_SUBWORDS;     // 240 bases per row
  localparam int unsigned ROW_CELLS  = ROW_BP * BP_CELLS;      // 960 bitcells per row
  // A row score may be the sum of two rows' partial scores (even + odd cycle);
  // 9 bits hold 2*240.
  localparam int unsigned SCORE_W    = $clog2(2 * ROW_BP + 1);
  localparam int unsigned LEN_W      = $clog2(ROW_BP + 1);     // chunk length 1..240
  localparam int unsigned N_ROWS_PAPER   = 131072;             // 2^17 Word Rows per die
  // Default array size of the RTL. Elaborating one Word Row costs a lint tool
  // about 0.9 MB and a parser about 0.4 MB, so the paper's 2^17 rows (about
  // 170 GB together) are scaled to 2^13 (about 11 GB).
  localparam int unsigned N_ROWS_DEFAULT = 8192;

  // 2-bit code of a base as it enters the chip.
  typedef enum logic [1:0] {
    BASE_A = 2'd0,
    BASE_C = 2'd1,
    BASE_G = 2'd2,
    BASE_T = 2'd3
  } base_t;

  // Operation broadcast to every Word Row in one cycle.
  typedef enum logic [2:0] {
    OP_NONE   = 3'd0,
    OP_WRITE0 = 3'd1,   // selected row: clear cells whose data bit is 0
    OP_WRITE1 = 3'd2,   // selected row: set cells whose data bit is 1
    OP_SINGLE = 3'd3,   // chunk lies inside one row: score and threshold
    OP_EVEN   = 3'd4,   // head of chunk at the end of a row: score is kept
    OP_ODD    = 3'd5    // tail of chunk at the start of the next row: add, threshold
  } row_op_t;

  function automatic logic [BP_CELLS-1:0] base_onehot(base_t b);
    case (b)
      BASE_A:  return 4'b1000;
      BASE_C:  return 4'b0100;
      BASE_G:  return 4'b0010;
      default: return 4'b0001;
    endcase
  endfunction

endpackage

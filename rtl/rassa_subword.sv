// rassa_subword: one Sub-Word of a Word Row, i.e. 60 resistive bitcells on a
// shared match line, plus the 4-bit ADC that reads the line.
//
// Each bitcell is a memristor with a selector transistor. A cell storing '1'
// is in the high resistive state (R_OFF) and one storing '0' in the low state
// (R_ON). On a compare the key bit drives the selector; a cell whose selector
// is on and whose memristor is R_ON lets the precharged match line lose charge.
// The line voltage at the sampling point therefore falls one step per such
// cell, and the ADC turns the level into a mismatch count. With one-hot bases
// at most one cell per base discharges, so 15 bases give 0..15.
//
// This model is the digital equivalent of that analog path: the count of
// cells with key=1 and stored=0 is taken exactly and clipped to 4 bits. The
// voltage curves and the +-1 sensing error the paper mentions for 60-cell
// match lines are not modelled; that is this design's simplification.
//
// Writing follows the paper's two-step load: in a WRITE0 cycle every cell
// whose data bit is 0 is switched to R_ON, in a WRITE1 cycle every cell whose
// data bit is 1 is switched to R_OFF. The storage has no reset: it stands for
// nonvolatile memristors.
//
// Timing: key and cmp are sampled at a rising edge; score holds the ADC result
// from the following edge on (one cycle of latency, one compare per cycle).
module rassa_subword
  import rassa_pkg::*;
#(
  parameter int unsigned CELLS   = SW_CELLS,
  parameter int unsigned SW_W    = SW_SCORE_W
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               wr0,        // write the '0' cells of wdata
  input  logic               wr1,        // write the '1' cells of wdata
  input  logic [CELLS-1:0]   wdata,      // bit line data of the write
  input  logic               cmp,        // compare (precharge + evaluate) this cycle
  input  logic [CELLS-1:0]   key,        // selector gates: key pattern, 0 = masked
  output logic [SW_W-1:0]    score,      // sampled mismatch score
  output logic [CELLS-1:0]   stored      // cell contents, for observation
);

  localparam int unsigned CNT_W = $clog2(CELLS + 1);
  localparam int unsigned SAT   = (1 << SW_W) - 1;

  logic [CELLS-1:0] cells;
  logic [CNT_W-1:0] discharging;

  assign stored = cells;

  always_ff @(posedge clk) begin
    if (wr0) cells <= cells & wdata;
    else if (wr1) cells <= cells | wdata;
  end

  // Cells on a conducting path: selector on and memristor in R_ON.
  assign discharging = CNT_W'($countones(key & ~cells));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) score <= '0;
    else if (cmp)
      score <= (discharging > CNT_W'(SAT)) ? SW_W'(SAT) : SW_W'(discharging);
  end

endmodule

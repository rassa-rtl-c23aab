// rassa_word_row: one Word Row, 240 bases held in 16 Sub-Words, with the adder
// and the threshold comparator that belong to the row.
//
// In a compare cycle every Sub-Word produces a 4-bit mismatch score for its
// 15 bases. In the next cycle the row adds the 16 scores. Depending on the
// operation that was issued:
//  * OP_SINGLE: the chunk lay wholly inside this row; the sum is compared with
//    the threshold (sum <= threshold means a candidate location).
//  * OP_EVEN: the head of the chunk lay at the end of this row; the sum is only
//    stored in score_q, which feeds the row below as its "previous Word score".
//  * OP_ODD: the tail of the chunk lay at the start of this row; the previous
//    row's stored score (prev_score) is added before the threshold compare.
// The Sub-Word/adder/comparator arrangement and the even/odd scheme follow the
// paper. Ignoring prev_score in OP_SINGLE cycles, registering the adder output
// and the width of the sums are this design's choices.
//
// Writing: when row_sel is high, OP_WRITE0 and OP_WRITE1 write wdata into the
// row in two cycles, as the paper describes for loading the reference.
//
// Timing: op/key sampled at edge k, Sub-Word scores valid after edge k,
// match and score_q valid after edge k+1 (latency two cycles, one compare per
// cycle). match is 0 after any cycle that was not OP_SINGLE or OP_ODD.
module rassa_word_row
  import rassa_pkg::*;
#(
  parameter int unsigned N_SW     = N_SUBWORDS,
  parameter int unsigned SWCELLS  = SW_CELLS,
  parameter int unsigned SSCORE_W = SW_SCORE_W,
  parameter int unsigned RSCORE_W = SCORE_W
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  row_op_t                   op,
  input  logic                      row_sel,     // this row is the write target
  input  logic [N_SW*SWCELLS-1:0]   wdata,
  input  logic [N_SW*SWCELLS-1:0]   key,
  input  logic [RSCORE_W-1:0]       prev_score,  // score_q of the row above
  input  logic [RSCORE_W-1:0]       threshold,
  output logic [RSCORE_W-1:0]       score_q,     // stored even-cycle score
  output logic                      match,       // sum <= threshold
  output logic [N_SW*SWCELLS-1:0]   stored       // row contents, for observation
);

  logic                     wr0, wr1, cmp;
  logic [SSCORE_W-1:0]      sw_score [N_SW];
  row_op_t                  op_q;
  logic [RSCORE_W:0]        sum;        // one spare bit: prev_score may be near full scale

  assign wr0 = row_sel && (op == OP_WRITE0);
  assign wr1 = row_sel && (op == OP_WRITE1);
  assign cmp = (op == OP_SINGLE) || (op == OP_EVEN) || (op == OP_ODD);

  for (genvar g = 0; g < N_SW; g++) begin : g_sw
    rassa_subword #(.CELLS(SWCELLS), .SW_W(SSCORE_W)) u_sw (
      .clk    (clk),
      .rst_n  (rst_n),
      .wr0    (wr0),
      .wr1    (wr1),
      .wdata  (wdata[g*SWCELLS +: SWCELLS]),
      .cmp    (cmp),
      .key    (key[g*SWCELLS +: SWCELLS]),
      .score  (sw_score[g]),
      .stored (stored[g*SWCELLS +: SWCELLS])
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) op_q <= OP_NONE;
    else        op_q <= op;
  end

  // Adder: 16 Sub-Word scores, plus the row above's score in an odd cycle.
  always_comb begin
    sum = (op_q == OP_ODD) ? (RSCORE_W+1)'(prev_score) : '0;
    for (int unsigned i = 0; i < N_SW; i++)
      sum += (RSCORE_W+1)'(sw_score[i]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      score_q <= '0;
      match   <= 1'b0;
    end else begin
      if (op_q == OP_EVEN) score_q <= sum[RSCORE_W] ? '1 : sum[RSCORE_W-1:0];
      match <= ((op_q == OP_SINGLE) || (op_q == OP_ODD)) &&
               (sum <= (RSCORE_W+1)'(threshold));
    end
  end

endmodule

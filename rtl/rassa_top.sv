// rassa_top: the resistive approximate similarity search array. N_ROWS Word
// Rows of 240 bases each hold a reference sequence, 240 consecutive bases per
// row. A read chunk (1..240 bases) is compared against every reference position
// in R+C-1 cycles. After each scoring step the chip returns one bit per row:
// the row's mismatch count at the current chunk offset is at or below the
// threshold.
//
// Structure (following the paper's block diagram): a Key Pattern register
// drives the same key lines into all rows. Each row's score output feeds the
// "previous Word score" input of the row below, so a chunk that crosses a row
// boundary is scored in two cycles (see rassa_controller and rassa_word_row).
// The sequencer issues one operation per cycle to all rows.
//
// Interface (all this design's choice; the paper defines no I/O):
//  * load_valid/load_ready/load_row/load_data: write 240 bases into one row.
//    The bases are captured on acceptance, then written in two cycles.
//  * cmp_start/cmp_accept/cmp_len/chunk/threshold: start a chunk compare.
//    Chunk, length and threshold are captured on acceptance. threshold is a
//    mismatch count (e.g. 55% of a 200-base chunk = 110).
//  * res_valid/res_match/res_offset/res_last: one result vector per scoring
//    step. Bit r of res_match set means a candidate mapping of the chunk at
//    reference position r*240 + res_offset (res_offset may be negative).
// The first row has no row above; its previous-score input is tied to full
// scale so that it never flags the chunk as hanging off the reference start.
//
// The paper's die holds 2^17 rows. The default here is 2^13
// (rassa_pkg::N_ROWS_DEFAULT), because elaborating one row costs a lint or
// synthesis front end about 1 MB of memory; any N_ROWS works.
module rassa_top
  import rassa_pkg::*;
#(
  parameter int unsigned N_ROWS = N_ROWS_DEFAULT,
  parameter int unsigned ROW_W  = (N_ROWS > 1) ? $clog2(N_ROWS) : 1,
  parameter int unsigned OFF_W  = LEN_W + 1
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // reference load
  input  logic                     load_valid,
  output logic                     load_ready,
  input  logic [ROW_W-1:0]         load_row,
  input  base_t [ROW_BP-1:0]       load_data,
  // chunk compare
  input  logic                     cmp_start,
  output logic                     cmp_accept,
  input  logic [LEN_W-1:0]         cmp_len,
  input  base_t [ROW_BP-1:0]       chunk,
  input  logic [SCORE_W-1:0]       threshold,
  output logic                     busy,
  // results
  output logic                     res_valid,
  output logic [N_ROWS-1:0]        res_match,
  output logic signed [OFF_W-1:0]  res_offset,
  output logic                     res_last
);

  row_op_t                 op;
  logic [ROW_W-1:0]        wr_row;
  logic                    load_accept, key_shift, key_half;
  logic [ROW_CELLS-1:0]    wdata_q;
  logic [ROW_CELLS-1:0]    key;
  logic [SCORE_W-1:0]      thr_q;
  logic [SCORE_W-1:0]      row_score [N_ROWS];

  rassa_controller #(.N_ROWS(N_ROWS), .RBP(ROW_BP), .ROW_W(ROW_W),
                     .LENW(LEN_W), .OFF_W(OFF_W)) u_ctrl (
    .clk         (clk),
    .rst_n       (rst_n),
    .load_valid  (load_valid),
    .load_ready  (load_ready),
    .load_row    (load_row),
    .load_accept (load_accept),
    .cmp_start   (cmp_start),
    .cmp_len     (cmp_len),
    .cmp_accept  (cmp_accept),
    .busy        (busy),
    .op          (op),
    .wr_row      (wr_row),
    .key_shift   (key_shift),
    .key_half    (key_half),
    .res_valid   (res_valid),
    .res_offset  (res_offset),
    .res_last    (res_last)
  );

  rassa_key_pattern #(.RBP(ROW_BP), .LENW(LEN_W)) u_key (
    .clk       (clk),
    .rst_n     (rst_n),
    .load      (cmp_accept),
    .chunk     (chunk),
    .chunk_len (cmp_len),
    .shift     (key_shift),
    .half_sel  (key_half),
    .key       (key)
  );

  // Bit line write data and threshold registers.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wdata_q <= '0;
      thr_q   <= '0;
    end else begin
      if (load_accept)
        for (int unsigned p = 0; p < ROW_BP; p++)
          wdata_q[p*BP_CELLS +: BP_CELLS] <= base_onehot(load_data[p]);
      if (cmp_accept) thr_q <= threshold;
    end
  end

  for (genvar r = 0; r < N_ROWS; r++) begin : g_row
    logic [SCORE_W-1:0] prev;
    if (r == 0) begin : g_first
      assign prev = '1;
    end else begin : g_next
      assign prev = row_score[r-1];
    end

    rassa_word_row u_row (
      .clk        (clk),
      .rst_n      (rst_n),
      .op         (op),
      .row_sel    (wr_row == ROW_W'(r)),
      .wdata      (wdata_q),
      .key        (key),
      .prev_score (prev),
      .threshold  (thr_q),
      .score_q    (row_score[r]),
      .match      (res_match[r]),
      .stored     ()
    );
  end

endmodule

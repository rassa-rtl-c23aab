// tb_rassa_word_row: self-checking test of one Word Row (16 Sub-Words, adder,
// threshold comparator, stored even-cycle score).
//
// Writes random bases into the row with the two-cycle write (and checks that
// a write without row_sel leaves it alone), then issues random sequences of
// OP_SINGLE / OP_EVEN+OP_ODD / OP_NONE with random keys, thresholds and
// previous-row scores. A reference computed here predicts, two cycles after
// each operation, the match bit (sum <= threshold, prev_score added only in
// odd cycles) and the stored even-cycle score.
module tb_rassa_word_row;
  import rassa_pkg::*;

  logic                 clk = 1'b0;
  logic                 rst_n;
  row_op_t              op;
  logic                 row_sel;
  logic [ROW_CELLS-1:0] wdata, key, stored;
  logic [SCORE_W-1:0]   prev_score, threshold, score_q;
  logic                 match;
  int                   checks = 0, failures = 0;
  int                   n_single = 0, n_odd = 0, n_hit = 0;

  always #5 clk = ~clk;

  rassa_word_row dut (.clk, .rst_n, .op, .row_sel, .wdata, .key, .prev_score,
                      .threshold, .score_q, .match, .stored);

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [ROW_CELLS-1:0] row_data;
  int                   thr_b, prev_b;

  function automatic logic [ROW_CELLS-1:0] rand_row(int mask_pct);
    logic [ROW_CELLS-1:0] v;
    for (int p = 0; p < ROW_BP; p++)
      v[4*p +: 4] = (int'($urandom_range(99)) < mask_pct) ? 4'b0000
                                                       : base_onehot(base_t'($urandom_range(3)));
    return v;
  endfunction

  // Row score of a key against the stored data: 16 clipped Sub-Word counts.
  function automatic int row_sum(logic [ROW_CELLS-1:0] k, logic [ROW_CELLS-1:0] d);
    int total = 0;
    for (int sw = 0; sw < N_SUBWORDS; sw++) begin
      int n = 0;
      for (int c = 0; c < SW_CELLS; c++)
        if (k[sw*SW_CELLS + c] == 1'b1 && d[sw*SW_CELLS + c] == 1'b0) n++;
      total += (n > 15) ? 15 : n;
    end
    return total;
  endfunction

  task automatic check(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  // expected outputs, indexed by the number of rising edges before issue
  int      exp_match [int];
  int      exp_score [int];
  int      model_score;
  int      cyc = 0;

  always @(posedge clk) cyc <= cyc + 1;

  task automatic issue(row_op_t o, logic [ROW_CELLS-1:0] k, int prev, int thr);
    int s;
    op = o; key = k;
    s = row_sum(k, row_data);
    if (o == OP_ODD) s += prev;
    if (o == OP_EVEN) model_score = (s > 511) ? 511 : s;
    exp_match[cyc] = ((o == OP_SINGLE || o == OP_ODD) && s <= thr) ? 1 : 0;
    exp_score[cyc] = model_score;
    if (o == OP_SINGLE) n_single++;
    if (o == OP_ODD) n_odd++;
    if ((o == OP_SINGLE || o == OP_ODD) && s <= thr) n_hit++;
  endtask

  // an operation issued after edge n shows its result after edge n+2
  always @(negedge clk) begin
    if (rst_n && exp_match.exists(cyc - 2)) begin
      check("match", int'(match), exp_match[cyc - 2]);
      check("score_q", int'(score_q), exp_score[cyc - 2]);
    end
  end

  initial begin
    rst_n = 1'b0; op = OP_NONE; row_sel = 0; wdata = '0; key = '0;
    prev_score = '0; threshold = '0; model_score = 0;
    repeat (2) @(posedge clk);
    @(negedge clk); rst_n = 1'b1;
    for (int t = 0; t < 20; t++) begin
      row_data = rand_row(0);
      @(negedge clk); row_sel = 1; wdata = row_data; op = OP_WRITE0;
      @(negedge clk); op = OP_WRITE1;
      @(negedge clk); op = OP_NONE; row_sel = 0;
      check("stored", int'(stored == row_data), 1);
      // a write to another row must not change this one
      @(negedge clk); wdata = ~row_data; op = OP_WRITE0;
      @(negedge clk); op = OP_WRITE1;
      @(negedge clk); op = OP_NONE;
      check("unselected", int'(stored == row_data), 1);
      model_score = int'(score_q);
      // threshold and the row above's score are static over a batch, as
      // they are in the array (threshold register, row above idle)
      thr_b  = $urandom_range(180);
      prev_b = $urandom_range(240);
      threshold  = SCORE_W'(thr_b);
      prev_score = SCORE_W'(prev_b);
      for (int k = 0; k < 60; k++) begin
        logic [ROW_CELLS-1:0] kv;
        int thr;
        kv  = (k % 5 == 0) ? row_data : rand_row($urandom_range(90));
        if (k % 9 == 0) kv = row_data ^ (rand_row(80) & ~row_data);  // near match
        thr = thr_b;
        case ($urandom_range(2))
          0: begin issue(OP_SINGLE, kv, prev_b, thr); @(negedge clk); end
          1: begin
               issue(OP_EVEN, kv, prev_b, thr); @(negedge clk);
               issue(OP_ODD, rand_row($urandom_range(90)), prev_b, thr); @(negedge clk);
             end
          default: begin issue(OP_NONE, kv, 0, thr); @(negedge clk); end
        endcase
      end
      issue(OP_NONE, '0, 0, 0); @(negedge clk);
      issue(OP_NONE, '0, 0, 0); @(negedge clk);
      op = OP_NONE;
      repeat (3) @(negedge clk);
    end
    check("ops_seen", int'(n_single > 0 && n_odd > 0 && n_hit > 0), 1);
    $display("singles=%0d odds=%0d hits=%0d", n_single, n_odd, n_hit);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_rassa_top: end-to-end test of the array with a small number of rows.
//
// Generates a random reference of N_ROWS*240 bases, loads it row by row
// (checking two busy cycles per row), then compares read chunks cut from the
// reference with substitutions, an insertion and a deletion planted in them,
// at positions inside one row and across a row boundary, and random chunks
// that should map nowhere. For every result vector the reference model here
// computes, for each row r, the Hamming distance between the chunk and the
// reference at r*240 + res_offset and expects the bit when it is at or below
// the threshold (never for row 0 with a negative offset, which would start
// before the reference). Each compare must take 240+C-1 busy cycles.
// Counted mechanisms, each required at least once: row loads, single-row
// compare steps, even/odd pairs, hits in a single-row step, hits that span
// two rows, the row-0 boundary suppression and a full-length (240) chunk.
module tb_rassa_top;
  import rassa_pkg::*;

  localparam int unsigned NR  = 6;
  localparam int unsigned RW  = $clog2(NR);
  localparam int unsigned LEN = NR * ROW_BP;

  logic                   clk = 1'b0;
  logic                   rst_n;
  logic                   load_valid, load_ready, cmp_start, cmp_accept, busy;
  logic [RW-1:0]          load_row;
  base_t [ROW_BP-1:0]     load_data, chunk;
  logic [LEN_W-1:0]       cmp_len;
  logic [SCORE_W-1:0]     threshold;
  logic                   res_valid, res_last;
  logic [NR-1:0]          res_match;
  logic signed [LEN_W:0]  res_offset;

  int checks = 0, failures = 0;
  int n_loads = 0, n_single = 0, n_pairs = 0, n_hit_single = 0, n_hit_pair = 0;
  int n_row0_suppressed = 0, n_full_len = 0;

  base_t refseq [LEN];
  base_t rd [ROW_BP];
  int    cur_len, cur_thr;

  always #5 clk = ~clk;

  rassa_top #(.N_ROWS(NR)) dut (
    .clk, .rst_n, .load_valid, .load_ready, .load_row, .load_data, .cmp_start,
    .cmp_accept, .cmp_len, .chunk, .threshold, .busy, .res_valid, .res_match,
    .res_offset, .res_last);

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  // mismatches of the chunk at start; bases outside the reference count as
  // mismatches unless in_range_only is set
  function automatic int hamming(int start, bit in_range_only = 0);
    int n = 0;
    for (int i = 0; i < cur_len; i++) begin
      int p = start + i;
      if (p < 0 || p >= LEN) n += in_range_only ? 0 : 1;
      else if (rd[i] != refseq[p]) n++;
    end
    return n;
  endfunction

  // result checker
  always @(negedge clk) begin
    if (rst_n && res_valid) begin
      int o;
      o = int'(res_offset);
      if (o >= 0) n_single++; else n_pairs++;
      for (int r = 0; r < NR; r++) begin
        int e;
        int h;
        h = hamming(r * ROW_BP + o);
        e = (r == 0 && o < 0) ? 0 : int'(h <= cur_thr);
        // row 0's own share alone would pass: only the tied-off previous
        // score keeps it from flagging
        if (r == 0 && o < 0 && hamming(o, 1) <= cur_thr) n_row0_suppressed++;
        check($sformatf("match row %0d offset %0d", r, o), int'(res_match[r]), e);
        if (res_match[r] && o >= 0) n_hit_single++;
        if (res_match[r] && o < 0) n_hit_pair++;
      end
    end
  end

  // Rows are loaded back to back: one row every two cycles, plus the cycle
  // in which the first request is accepted.
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic load_reference();
    int start;
    @(negedge clk);
    start = cyc;
    load_valid = 1;
    for (int r = 0; r < NR; r++) begin
      load_row = RW'(r);
      for (int p = 0; p < ROW_BP; p++) load_data[p] = refseq[r * ROW_BP + p];
      #1;
      while (!load_ready) @(negedge clk);
      @(negedge clk);
      n_loads++;
    end
    load_valid = 0;
    while (busy) @(negedge clk);
    check("load cycles", cyc - start, 2 * NR + 1);
  endtask

  task automatic compare(int len, int thr);
    int busy_cycles = 0;
    cur_len = len; cur_thr = thr;
    if (len == ROW_BP) n_full_len++;
    @(negedge clk);
    for (int p = 0; p < ROW_BP; p++) chunk[p] = (p < len) ? rd[p] : base_t'($urandom_range(3));
    cmp_len = LEN_W'(len); threshold = SCORE_W'(thr); cmp_start = 1;
    @(negedge clk); cmp_start = 0; threshold = '0;
    while (busy) begin busy_cycles++; @(negedge clk); end
    check("compare cycles", busy_cycles, ROW_BP + len - 1);
    repeat (3) @(negedge clk);
  endtask

  // cut a chunk of len bases at pos with nsub substitutions, optionally one
  // insertion (indel=1) or one deletion (indel=2) in the middle
  task automatic make_chunk(int pos, int len, int nsub, int indel);
    int src = pos;
    for (int i = 0; i < len; i++) begin
      if (indel == 1 && i == len / 2) rd[i] = base_t'($urandom_range(3));
      else begin
        if (indel == 2 && i == len / 2) src++;
        rd[i] = refseq[src % LEN];
        src++;
      end
    end
    for (int k = 0; k < nsub; k++) begin
      int i = $urandom_range(len - 1);
      rd[i] = base_t'((int'(rd[i]) + 1) % 4);
    end
  endtask

  initial begin
    rst_n = 1'b0; load_valid = 0; load_row = '0; load_data = '0; cmp_start = 0;
    cmp_len = '0; chunk = '0; threshold = '0; cur_len = 1; cur_thr = 0;
    for (int i = 0; i < LEN; i++) refseq[i] = base_t'($urandom_range(3));
    repeat (2) @(posedge clk);
    @(negedge clk); rst_n = 1'b1;
    load_reference();
    // 200-base chunk, 55% threshold, inside row 2 with substitutions
    make_chunk(2 * ROW_BP + 17, 200, 12, 0);  compare(200, 110);
    // 200-base chunk across the row 3/4 boundary with an insertion
    make_chunk(4 * ROW_BP - 90, 200, 8, 1);   compare(200, 110);
    // 100-base chunk, 45% threshold, across rows 1/2 with a deletion
    make_chunk(2 * ROW_BP - 30, 100, 3, 2);   compare(100, 45);
    // exact chunk at the very start of the reference: its shifted copies that
    // would hang off the start are near matches only for row 0
    make_chunk(0, 30, 0, 0);                   compare(30, 20);
    // a full-row chunk equal to row 5
    make_chunk(5 * ROW_BP, 240, 20, 0);        compare(240, 132);
    // random chunk: no location expected
    for (int i = 0; i < 200; i++) rd[i] = base_t'($urandom_range(3));
    compare(200, 110);
    $display("loads=%0d single_steps=%0d odd_steps=%0d hits_single=%0d hits_pair=%0d row0_suppressed=%0d full_len=%0d",
             n_loads, n_single, n_pairs, n_hit_single, n_hit_pair, n_row0_suppressed, n_full_len);
    check("mechanism: row loads", int'(n_loads == NR), 1);
    check("mechanism: single-row steps", int'(n_single > 0), 1);
    check("mechanism: even/odd pairs", int'(n_pairs > 0), 1);
    check("mechanism: single-row hit", int'(n_hit_single > 0), 1);
    check("mechanism: two-row hit", int'(n_hit_pair > 0), 1);
    check("mechanism: row-0 suppression", int'(n_row0_suppressed > 0), 1);
    check("mechanism: full-length chunk", int'(n_full_len > 0), 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

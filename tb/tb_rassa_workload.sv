// tb_rassa_workload: runs synthetic long reads through a 64-row array, the
// way the accelerator is used for read pre-alignment.
//
// A random reference of 64*240 bases is loaded. Long reads of 1000 bases are
// drawn from random reference positions and corrupted with the error
// profiles of three kinds of sequencing data (overall error rate, and the
// shares of insertions, deletions and substitutions):
//   PacBio-like  14.2%  (I 41.7%, D 21.2%, M 37.1%)
//   CCS-like      1.0%  (I  5.0%, D 19.5%, M 75.5%)
//   ONT-like     20.2%  (I 14.5%, D 37.2%, M 48.3%)
// Each read is cut into chunks of 200 bases (threshold 55%, 110 mismatches)
// and of 100 bases (threshold 45%). Every result vector is compared with a
// Hamming-distance model computed here, and every compare must take 240+C-1
// cycles. The testbench also reports, per profile, how many reads had a
// flagged location within one read length of their true origin; that count
// is informative (the real datasets are not available) and is not checked.
module tb_rassa_workload;
  import rassa_pkg::*;

  localparam int unsigned NR   = 64;
  localparam int unsigned RW   = $clog2(NR);
  localparam int unsigned LEN  = NR * ROW_BP;
  localparam int unsigned RLEN = 1000;

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
  base_t refseq [LEN];
  base_t rd [ROW_BP];
  base_t rdl [RLEN];
  int    cur_len, cur_thr, chunk_pos, origin, near_hits;

  always #5 clk = ~clk;

  rassa_top #(.N_ROWS(NR)) dut (
    .clk, .rst_n, .load_valid, .load_ready, .load_row, .load_data, .cmp_start,
    .cmp_accept, .cmp_len, .chunk, .threshold, .busy, .res_valid, .res_match,
    .res_offset, .res_last);

  initial begin
    repeat (600000) @(posedge clk);
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

  function automatic int hamming(int start);
    int n = 0;
    for (int i = 0; i < cur_len; i++) begin
      int p = start + i;
      if (p < 0 || p >= LEN) n++;
      else if (rd[i] != refseq[p]) n++;
    end
    return n;
  endfunction

  always @(negedge clk) begin
    if (rst_n && res_valid) begin
      int o;
      o = int'(res_offset);
      for (int r = 0; r < NR; r++) begin
        int e;
        e = (r == 0 && o < 0) ? 0 : int'(hamming(r * ROW_BP + o) <= cur_thr);
        check("match", int'(res_match[r]), e);
        if (res_match[r]) begin
          int loc;
          loc = r * ROW_BP + o - chunk_pos;   // implied read start
          if (loc > origin - int'(RLEN) && loc < origin + int'(RLEN)) near_hits++;
        end
      end
    end
  end

  // draw a read of RLEN bases from origin with the given error profile
  // (rates in tenths of a percent)
  task automatic make_read(int err, int ins, int del);
    int src, i, u, kind;
    src = origin;
    i = 0;
    while (i < RLEN) begin
      u = $urandom_range(999);
      if (u < err) begin
        kind = $urandom_range(999);
        if (kind < ins) begin rdl[i] = base_t'($urandom_range(3)); i++; end
        else if (kind < ins + del) src++;
        else begin rdl[i] = base_t'((int'(refseq[src % LEN]) + 1) % 4); i++; src++; end
      end else begin
        rdl[i] = refseq[src % LEN]; i++; src++;
      end
    end
  endtask

  task automatic compare_chunk(int pos, int len, int thr);
    int busy_cycles = 0;
    cur_len = len; cur_thr = thr; chunk_pos = pos;
    for (int i = 0; i < len; i++) rd[i] = rdl[pos + i];
    @(negedge clk);
    for (int p = 0; p < ROW_BP; p++) chunk[p] = (p < len) ? rd[p] : BASE_A;
    cmp_len = LEN_W'(len); threshold = SCORE_W'(thr); cmp_start = 1;
    @(negedge clk); cmp_start = 0;
    while (busy) begin busy_cycles++; @(negedge clk); end
    check("compare cycles", busy_cycles, ROW_BP + len - 1);
    repeat (3) @(negedge clk);
  endtask

  task automatic run_profile(string name, int err, int ins, int del);
    int mapped200 = 0, mapped100 = 0;
    for (int n = 0; n < 3; n++) begin
      origin = $urandom_range(LEN - 2 * RLEN);
      make_read(err, ins, del);
      near_hits = 0;
      for (int c = 0; c + 200 <= RLEN; c += 200) compare_chunk(c, 200, 110);
      if (near_hits > 0) mapped200++;
      near_hits = 0;
      for (int c = 0; c + 100 <= RLEN; c += 100) compare_chunk(c, 100, 45);
      if (near_hits > 0) mapped100++;
    end
    $display("%s: reads located with 200-base chunks %0d/3, with 100-base chunks %0d/3",
             name, mapped200, mapped100);
  endtask

  initial begin
    rst_n = 1'b0; load_valid = 0; load_row = '0; load_data = '0; cmp_start = 0;
    cmp_len = '0; chunk = '0; threshold = '0; cur_len = 1; cur_thr = 0;
    chunk_pos = 0; origin = 0; near_hits = 0;
    for (int i = 0; i < LEN; i++) refseq[i] = base_t'($urandom_range(3));
    repeat (2) @(posedge clk);
    @(negedge clk); rst_n = 1'b1;
    for (int r = 0; r < NR; r++) begin
      @(negedge clk);
      load_valid = 1; load_row = RW'(r);
      for (int p = 0; p < ROW_BP; p++) load_data[p] = refseq[r * ROW_BP + p];
      @(negedge clk); load_valid = 0;
      while (busy) @(negedge clk);
    end
    run_profile("PacBio-like", 142, 417, 212);
    run_profile("CCS-like",     10,  50, 195);
    run_profile("ONT-like",    202, 145, 372);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

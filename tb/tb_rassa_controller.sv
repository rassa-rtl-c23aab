// tb_rassa_controller: self-checking test of the load/compare sequencer.
//
// Loads: an accepted request gives OP_WRITE0 then OP_WRITE1 to the requested
// row and load_ready returns after two busy cycles. Compares, for chunk
// lengths C = 200 (the paper's example), 100, 240, 1 and random ones: the
// reference schedule is R-C+1 OP_SINGLE cycles with half 0, then C-1 pairs
// OP_EVEN (half 0) / OP_ODD (half 1), with a key shift after every single
// cycle but the last one of the chunk and after every odd cycle but the last.
// Busy lasts exactly R+C-1 cycles (439 for C = 200). Result tags must follow
// two cycles after each single/odd cycle with offsets 0..R-C then s-C.
module tb_rassa_controller;
  import rassa_pkg::*;

  localparam int unsigned NR = 64;
  localparam int unsigned RW = $clog2(NR);

  logic                    clk = 1'b0;
  logic                    rst_n;
  logic                    load_valid, load_ready, load_accept;
  logic [RW-1:0]           load_row, wr_row;
  logic                    cmp_start, cmp_accept, busy;
  logic [LEN_W-1:0]        cmp_len;
  row_op_t                 op;
  logic                    key_shift, key_half;
  logic                    res_valid, res_last;
  logic signed [LEN_W:0]   res_offset;
  int                      checks = 0, failures = 0;

  always #5 clk = ~clk;

  rassa_controller #(.N_ROWS(NR)) dut (
    .clk, .rst_n, .load_valid, .load_ready, .load_row, .load_accept, .cmp_start,
    .cmp_len, .cmp_accept, .busy, .op, .wr_row, .key_shift, .key_half,
    .res_valid, .res_offset, .res_last);

  initial begin
    repeat (20000) @(posedge clk);
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

  // observed result tags
  int tag_off [$];
  int tag_last [$];
  always @(negedge clk)
    if (rst_n && res_valid) begin
      tag_off.push_back(int'(res_offset));
      tag_last.push_back(int'(res_last));
    end

  task automatic do_load(int row);
    @(negedge clk);
    load_valid = 1; load_row = RW'(row); cmp_start = 1; cmp_len = 8'd10;  // load wins
    #1 check("load_ready", int'(load_ready), 1);
    check("cmp not accepted", int'(cmp_accept), 0);
    @(negedge clk); load_valid = 0; cmp_start = 0;
    check("w0", int'(op), int'(OP_WRITE0));
    check("row", int'(wr_row), row);
    check("busy", int'(busy), 1);
    @(negedge clk);
    check("w1", int'(op), int'(OP_WRITE1));
    check("row", int'(wr_row), row);
    @(negedge clk);
    check("idle", int'(op), int'(OP_NONE));
    check("ready", int'(load_ready), 1);
  endtask

  task automatic do_compare(int c);
    int cycles = 0;
    int k = 0;
    tag_off.delete(); tag_last.delete();
    @(negedge clk);
    cmp_start = 1; cmp_len = LEN_W'(c);
    #1 check("accept", int'(cmp_accept), 1);
    @(negedge clk); cmp_start = 0;
    // single cycles
    for (int off = 0; off <= ROW_BP - c; off++) begin
      check("single op", int'(op), int'(OP_SINGLE));
      check("single half", int'(key_half), 0);
      check("single shift", int'(key_shift), (off == ROW_BP - c && c == 1) ? 0 : 1);
      cycles++;
      @(negedge clk);
    end
    for (int s = 1; s < c; s++) begin
      check("even op", int'(op), int'(OP_EVEN));
      check("even half", int'(key_half), 0);
      check("even shift", int'(key_shift), 0);
      cycles++;
      @(negedge clk);
      check("odd op", int'(op), int'(OP_ODD));
      check("odd half", int'(key_half), 1);
      check("odd shift", int'(key_shift), (s == c - 1) ? 0 : 1);
      cycles++;
      @(negedge clk);
    end
    check("done", int'(busy), 0);
    check("cycles", cycles, ROW_BP + c - 1);
    repeat (3) @(negedge clk);
    check("tags", tag_off.size(), ROW_BP - c + 1 + c - 1);
    for (int off = 0; off <= ROW_BP - c; off++) begin
      check("tag single", tag_off[k], off);
      check("tag last", tag_last[k], (c == 1 && off == ROW_BP - c) ? 1 : 0);
      k++;
    end
    for (int s = 1; s < c; s++) begin
      check("tag odd", tag_off[k], s - c);
      check("tag last", tag_last[k], (s == c - 1) ? 1 : 0);
      k++;
    end
  endtask

  initial begin
    rst_n = 1'b0; load_valid = 0; load_row = '0; cmp_start = 0; cmp_len = '0;
    repeat (2) @(posedge clk);
    @(negedge clk); rst_n = 1'b1;
    do_load(5);
    do_load(NR - 1);
    do_compare(200);
    do_compare(100);
    do_compare(240);
    do_compare(1);
    // length 0 and lengths over 240 are refused
    @(negedge clk); cmp_start = 1; cmp_len = '0; #1 check("len0 refused", int'(cmp_accept), 0);
    cmp_len = 8'd241; #1 check("len241 refused", int'(cmp_accept), 0);
    @(negedge clk); cmp_start = 0;
    for (int i = 0; i < 4; i++) do_compare($urandom_range(2, 239));
    do_load(0);
    // back-to-back loads: the next request is taken during OP_WRITE1
    @(negedge clk);
    load_valid = 1; load_row = RW'(7);
    @(negedge clk); check("b2b w0", int'(op), int'(OP_WRITE0)); load_row = RW'(9);
    #1 check("b2b not ready in w0", int'(load_ready), 0);
    @(negedge clk); check("b2b w1", int'(op), int'(OP_WRITE1)); check("b2b row", int'(wr_row), 7);
    #1 check("b2b ready in w1", int'(load_ready), 1);
    @(negedge clk); check("b2b w0 again", int'(op), int'(OP_WRITE0)); check("b2b row2", int'(wr_row), 9);
    load_valid = 0;
    @(negedge clk); check("b2b w1 again", int'(op), int'(OP_WRITE1));
    @(negedge clk); check("b2b idle", int'(op), int'(OP_NONE));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

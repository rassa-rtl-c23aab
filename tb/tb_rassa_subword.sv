// tb_rassa_subword: self-checking test of one Sub-Word (60 bitcells + ADC).
//
// Loads random one-hot bases with the two-cycle write, then applies random
// keys (one-hot bases, some masked with all-zero groups, plus a few raw
// random keys that exercise the 4-bit clip) and compares the sampled score
// with a count computed here from the written data: a cell mismatches when
// its key bit is 1 and the stored bit is 0. Checks the one-cycle latency and
// that the score holds when no compare is issued.
module tb_rassa_subword;
  import rassa_pkg::*;

  localparam int unsigned CELLS = SW_CELLS;

  logic             clk = 1'b0;
  logic             rst_n;
  logic             wr0, wr1, cmp;
  logic [CELLS-1:0] wdata, key, stored;
  logic [3:0]       score;
  int               checks = 0, failures = 0;

  always #5 clk = ~clk;

  rassa_subword dut (.clk, .rst_n, .wr0, .wr1, .wdata, .cmp, .key, .score, .stored);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [CELLS-1:0] rand_bases(input int mask_pct);
    logic [CELLS-1:0] v;
    for (int p = 0; p < CELLS / 4; p++)
      v[4*p +: 4] = (int'($urandom_range(99)) < mask_pct) ? 4'b0000
                                                       : base_onehot(base_t'($urandom_range(3)));
    return v;
  endfunction

  function automatic int ref_score(logic [CELLS-1:0] k, logic [CELLS-1:0] d);
    int n = 0;
    for (int i = 0; i < CELLS; i++) if (k[i] == 1'b1 && d[i] == 1'b0) n++;
    return (n > 15) ? 15 : n;
  endfunction

  task automatic check(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  logic [CELLS-1:0] data;

  initial begin
    rst_n = 1'b0; wr0 = 0; wr1 = 0; cmp = 0; wdata = '0; key = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 200; t++) begin
      // two-step write: clear the zeros, then set the ones
      data = rand_bases(0);
      if (t % 7 == 0) data = $urandom() ^ {$urandom(), 28'h0};  // arbitrary bits too
      @(negedge clk); wdata = data; wr0 = 1;
      @(negedge clk); wr0 = 0; wr1 = 1;
      @(negedge clk); wr1 = 0;
      check("stored", int'(stored == data), 1);
      for (int k = 0; k < 8; k++) begin
        key = (k == 7) ? CELLS'({$urandom(), $urandom()}) : rand_bases(k * 12);
        cmp = 1;
        @(negedge clk);
        check("score", int'(score), ref_score(key, data));
        cmp = 0;
        key = ~key;
        @(negedge clk);
        check("hold", int'(score), ref_score(~key, data));
      end
      // exact match and all-masked key give zero
      key = data; cmp = 1; @(negedge clk); check("self", int'(score), 0);
      key = '0;           @(negedge clk); check("masked", int'(score), 0);
      cmp = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

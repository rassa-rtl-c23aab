// tb_rassa_key_pattern: self-checking test of the Key Pattern register.
//
// Loads random chunks of random length (1..240), then shifts step by step.
// After j shifts the reference expects: key line p (half 0) carries base
// p-j of the chunk, one-hot, when 0 <= p-j < C and zero otherwise; half 1
// carries base p+240-j. Checked for every shift up to 2*240 and both halves.
module tb_rassa_key_pattern;
  import rassa_pkg::*;

  logic                 clk = 1'b0;
  logic                 rst_n, load, shift, half_sel;
  base_t [ROW_BP-1:0]   chunk;
  logic [LEN_W-1:0]     chunk_len;
  logic [ROW_CELLS-1:0] key;
  int                   checks = 0, failures = 0;

  always #5 clk = ~clk;

  rassa_key_pattern dut (.clk, .rst_n, .load, .chunk, .chunk_len, .shift, .half_sel, .key);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [ROW_CELLS-1:0] expect_key(int j, int half, int len);
    logic [ROW_CELLS-1:0] v = '0;
    for (int p = 0; p < ROW_BP; p++) begin
      int q = p + half * ROW_BP - j;
      if (q >= 0 && q < len) v[4*p +: 4] = base_onehot(chunk[q]);
    end
    return v;
  endfunction

  initial begin
    int len;
    rst_n = 1'b0; load = 0; shift = 0; half_sel = 0; chunk = '0; chunk_len = '0;
    repeat (2) @(posedge clk);
    @(negedge clk); rst_n = 1'b1;
    checks++;
    if (key != '0) begin failures++; $display("FAIL key not masked after reset"); end
    for (int t = 0; t < 12; t++) begin
      len = (t == 0) ? 240 : (t == 1) ? 1 : (t == 2) ? 200 : (t == 3) ? 100 : $urandom_range(1, 240);
      for (int p = 0; p < ROW_BP; p++) chunk[p] = base_t'($urandom_range(3));
      chunk_len = LEN_W'(len);
      load = 1; @(negedge clk); load = 0;
      chunk = ~chunk;   // the register must not follow its input after the load
      for (int j = 0; j <= 2 * ROW_BP; j++) begin
        chunk = ~chunk;
        for (int h = 0; h < 2; h++) begin
          half_sel = h[0];
          #1;
          checks++;
          if (key != expect_key(j, h, len)) begin
            failures++;
            if (failures < 10) $display("FAIL len=%0d shift=%0d half=%0d", len, j, h);
          end
        end
        chunk = ~chunk;
        shift = 1; @(negedge clk); shift = 0;
      end
      chunk = ~chunk;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// rassa_key_pattern: the Key Pattern register that drives the 240 key lines
// shared by all Word Rows.
//
// A read chunk of 1..240 bases is loaded as 2-bit codes and stored one-hot.
// The register is two rows long (480 base positions). The chunk is loaded at
// positions 0..C-1 and everything else is zero; zero groups are masked bases,
// so the unused key lines need no separate mask. Each shift moves the whole
// pattern one base to the right (towards higher positions) and shifts in a
// masked base at position 0.
//
// half_sel chooses which 240 positions drive the key lines: 0 gives positions
// 0..239 (the chunk against one row, or the head of the chunk against the end
// of a row in an even cycle), 1 gives positions 240..479 (the tail of the
// chunk that has passed the row boundary, applied to the start of the next
// row in an odd cycle). Shifting one base right before each even cycle, as
// the paper describes, shortens the head and lengthens the tail by one base.
// The paper gives the register's function; the two-row shift register is this
// design's own way of producing it.
//
// Timing: load and shift act at the rising edge (load wins); key is a
// combinational function of the register and half_sel.
module rassa_key_pattern
  import rassa_pkg::*;
#(
  parameter int unsigned RBP   = ROW_BP,
  parameter int unsigned LENW  = $clog2(RBP + 1)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     load,
  input  base_t [RBP-1:0]          chunk,      // chunk[0] is the first base
  input  logic [LENW-1:0]          chunk_len,  // C, 1..RBP
  input  logic                     shift,
  input  logic                     half_sel,
  output logic [RBP*BP_CELLS-1:0]  key         // key[4p +: 4] drives row base p
);

  logic [2*RBP-1:0][BP_CELLS-1:0] win;
  logic [RBP-1:0][BP_CELLS-1:0]   encoded;

  always_comb begin
    for (int unsigned p = 0; p < RBP; p++)
      encoded[p] = (p < chunk_len) ? base_onehot(chunk[p]) : '0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     win <= '0;
    else if (load)  win <= {{RBP{{BP_CELLS{1'b0}}}}, encoded};
    else if (shift) win <= {win[2*RBP-2:0], {BP_CELLS{1'b0}}};
  end

  assign key = half_sel ? win[2*RBP-1:RBP] : win[RBP-1:0];

endmodule

// rassa_controller: sequences reference loading and the compare of one read
// chunk against every position of the stored reference.
//
// Loading (paper: two cycles per Word Row): an accepted load request issues
// OP_WRITE0 and then OP_WRITE1 to the addressed row. load_ready is high when
// idle and during OP_WRITE1, so back-to-back requests load one row every two
// cycles, 2*ceil(L/240) cycles for L reference bases as in the paper.
//
// Compare of a chunk of C bases against rows of R = 240 bases:
//  1. R-C+1 single cycles (OP_SINGLE). The chunk starts at base offset
//     0, 1, ..., R-C inside every row at once; key lines = register half 0.
//  2. For s = 1 .. C-1 an even/odd pair. Before the even cycle the pattern is
//     shifted one base right. Even cycle (OP_EVEN, half 0): the first C-s
//     bases meet the last C-s bases of each row and the row keeps its score.
//     Odd cycle (OP_ODD, half 1): the last s bases meet the first s bases of
//     each row, and the row above's kept score is added.
// In all, (R-C+1) + 2(C-1) = R+C-1 cycles: 439 for C = 200, as in the paper.
// The schedule follows the paper; the state machine and the shift-register
// key generation are this design's way of producing it.
//
// Result tags: every OP_SINGLE and OP_ODD cycle yields one result vector from
// the rows two cycles later (see rassa_word_row). res_offset is the signed
// base offset of the chunk start relative to the start of the flagged row:
// a flag at row r means the chunk starts at reference position
// r*R + res_offset (odd cycles give offsets s-C < 0). res_last marks the last
// result of the chunk. Load has priority over compare when both are requested
// in the same idle cycle.
module rassa_controller
  import rassa_pkg::*;
#(
  parameter int unsigned N_ROWS = N_ROWS_DEFAULT,
  parameter int unsigned RBP    = ROW_BP,
  parameter int unsigned ROW_W  = (N_ROWS > 1) ? $clog2(N_ROWS) : 1,
  parameter int unsigned LENW   = $clog2(RBP + 1),
  parameter int unsigned OFF_W  = LENW + 1
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // reference load request
  input  logic                     load_valid,
  output logic                     load_ready,
  input  logic [ROW_W-1:0]         load_row,
  output logic                     load_accept,  // capture write data now
  // chunk compare request
  input  logic                     cmp_start,
  input  logic [LENW-1:0]          cmp_len,      // C, 1..RBP
  output logic                     cmp_accept,   // key register loads now
  output logic                     busy,
  // to the Word Rows and the Key Pattern register
  output row_op_t                  op,
  output logic [ROW_W-1:0]         wr_row,
  output logic                     key_shift,
  output logic                     key_half,
  // result tags, aligned with the rows' match outputs
  output logic                     res_valid,
  output logic signed [OFF_W-1:0]  res_offset,
  output logic                     res_last
);

  typedef enum logic [2:0] {S_IDLE, S_W0, S_W1, S_SINGLE, S_EVEN, S_ODD} state_t;

  state_t           state;
  logic [LENW-1:0]  len_q;
  logic [LENW-1:0]  off;    // chunk start inside the row in half 0
  logic [LENW-1:0]  s;      // bases of the chunk past the row end
  logic             last_single, last_odd;

  // Tag pipeline: two stages to line up with Sub-Word sampling and the adder.
  logic                    tv_q [2];
  logic signed [OFF_W-1:0] to_q [2];
  logic                    tl_q [2];

  assign load_ready  = (state == S_IDLE) || (state == S_W1);
  assign load_accept = load_ready && load_valid;
  assign cmp_accept  = (state == S_IDLE) && !load_valid && cmp_start &&
                       (cmp_len != '0) && (cmp_len <= LENW'(RBP));
  assign busy        = (state != S_IDLE);

  assign last_single = (off == LENW'(RBP) - len_q);
  assign last_odd    = (s == len_q - LENW'(1));

  always_comb begin
    unique case (state)
      S_W0:     op = OP_WRITE0;
      S_W1:     op = OP_WRITE1;
      S_SINGLE: op = OP_SINGLE;
      S_EVEN:   op = OP_EVEN;
      S_ODD:    op = OP_ODD;
      default:  op = OP_NONE;
    endcase
    key_half  = (state == S_ODD);
    key_shift = ((state == S_SINGLE) && !(last_single && len_q == LENW'(1))) ||
                ((state == S_ODD) && !last_odd);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= S_IDLE;
      len_q  <= '0;
      off    <= '0;
      s      <= '0;
      wr_row <= '0;
    end else begin
      unique case (state)
        S_IDLE: begin
          if (load_accept) begin
            wr_row <= load_row;
            state  <= S_W0;
          end else if (cmp_accept) begin
            len_q <= cmp_len;
            off   <= '0;
            s     <= '0;
            state <= S_SINGLE;
          end
        end
        S_W0: state <= S_W1;
        S_W1: begin
          if (load_accept) begin
            wr_row <= load_row;
            state  <= S_W0;
          end else begin
            state  <= S_IDLE;
          end
        end
        S_SINGLE: begin
          if (last_single) begin
            if (len_q == LENW'(1)) state <= S_IDLE;
            else begin
              state <= S_EVEN;
              s     <= LENW'(1);
              off   <= off + LENW'(1);
            end
          end else begin
            off <= off + LENW'(1);
          end
        end
        S_EVEN: state <= S_ODD;
        S_ODD: begin
          if (last_odd) state <= S_IDLE;
          else begin
            state <= S_EVEN;
            s     <= s + LENW'(1);
            off   <= off + LENW'(1);
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < 2; i++) begin
        tv_q[i] <= 1'b0;
        to_q[i] <= '0;
        tl_q[i] <= 1'b0;
      end
    end else begin
      tv_q[0] <= (state == S_SINGLE) || (state == S_ODD);
      to_q[0] <= (state == S_ODD) ? $signed({1'b0, off}) - $signed(OFF_W'(RBP))
                                  : $signed({1'b0, off});
      tl_q[0] <= ((state == S_SINGLE) && last_single && len_q == LENW'(1)) ||
                 ((state == S_ODD) && last_odd);
      tv_q[1] <= tv_q[0];
      to_q[1] <= to_q[0];
      tl_q[1] <= tl_q[0];
    end
  end

  assign res_valid  = tv_q[1];
  assign res_offset = to_q[1];
  assign res_last   = tl_q[1];

  // An even cycle is always followed by its odd partner.
  a_even_odd: assert property (@(posedge clk) disable iff (!rst_n)
                               state == S_EVEN |=> state == S_ODD);

endmodule

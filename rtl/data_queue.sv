// data_queue: one of the data queues that feed the edge of the systolic array.
//
// The paper's systolic-array design has 32 such queues (16 for inputs, 16 for
// weights), filled by the scheduler and read by the outer MAC units, so that
// buffer reads overlap with array processing. Each queue here is a circular
// FIFO of DEPTH 32-bit words written one word per cycle (push), and read one
// 8-bit element per array step (pop_elem): element 0 of a word (bits [7:0])
// comes out first and the word is freed after its last element.
//
// Interface: push/push_data on the write side (push is ignored when full;
// the writer checks level), elem/valid/pop_elem on the read side.
// level counts the words held, including the one being read. elem is
// combinational from the head word, so a pop takes effect at the next edge.
// The depth and element order are this design's choices.
module data_queue
  import secda_pkg::*;
#(
  parameter int unsigned DEPTH = 8,
  parameter int unsigned LW    = $clog2(DEPTH + 1)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              flush,
  input  logic              push,
  input  logic [WORD_W-1:0] push_data,
  output logic [LW-1:0]     level,
  input  logic              pop_elem,
  output logic [ELEM_W-1:0] elem,
  output logic              valid
);

  localparam int unsigned PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  localparam int unsigned BW = $clog2(ELEMS);

  logic [WORD_W-1:0] mem [DEPTH];
  logic [PW-1:0]     wr_ptr, rd_ptr;
  logic [BW-1:0]     bsel;
  logic              do_push, do_pop_word;

  assign valid       = (level != '0);
  assign elem        = mem[rd_ptr][bsel*ELEM_W +: ELEM_W];
  assign do_push     = push && (level != LW'(DEPTH));
  assign do_pop_word = pop_elem && valid && (bsel == BW'(ELEMS - 1));

  always_ff @(posedge clk) begin
    if (do_push) mem[wr_ptr] <= push_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_ptr <= '0;
      rd_ptr <= '0;
      bsel   <= '0;
      level  <= '0;
    end else if (flush) begin
      wr_ptr <= '0;
      rd_ptr <= '0;
      bsel   <= '0;
      level  <= '0;
    end else begin
      if (do_push) wr_ptr <= (wr_ptr == PW'(DEPTH - 1)) ? '0 : wr_ptr + 1'b1;
      if (pop_elem && valid) begin
        bsel <= bsel + 1'b1;
        if (do_pop_word) rd_ptr <= (rd_ptr == PW'(DEPTH - 1)) ? '0 : rd_ptr + 1'b1;
      end
      level <= level + LW'(do_push) - LW'(do_pop_word);
    end
  end

  // The scheduler must never step a lane whose queue is empty.
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) pop_elem |-> valid);

endmodule

// global_buffer: banked on-chip buffer (the "Global Buffers" of the design).
//
// The paper's input handler spreads incoming input and weight data over
// several BRAMs so that more values can be read per cycle. This buffer has
// NB banks of DEPTH words. It has NW write ports, one per input link: port w
// writes bank wr_bank[w], which must be one of the banks it owns (banks b with
// b mod NW == w), so the links never compete for a bank. There is one read
// address shared by all banks, so that one word of every bank is read in the same cycle: one word
// for each of the NB data queues. Reads have one cycle of latency (registered
// output, as a block RAM). Bank count and depths are this design's choices;
// the paper gives no buffer sizes.
module global_buffer
  import secda_pkg::*;
#(
  parameter int unsigned NB    = 16,
  parameter int unsigned NW    = 4,
  parameter int unsigned DEPTH = 4096,
  parameter int unsigned AW    = $clog2(DEPTH),
  parameter int unsigned BKW   = (NB > 1) ? $clog2(NB) : 1
) (
  input  logic              clk,
  input  logic              wr_en   [NW],
  input  logic [BKW-1:0]    wr_bank [NW],
  input  logic [AW-1:0]     wr_addr [NW],
  input  logic [WORD_W-1:0] wr_data [NW],
  input  logic              rd_en,
  input  logic [AW-1:0]     rd_addr,
  output logic [WORD_W-1:0] rd_data [NB]
);

  for (genvar b = 0; b < NB; b++) begin : g_bank
    logic [WORD_W-1:0] mem [DEPTH];
    always_ff @(posedge clk) begin
      if (wr_en[b % NW] && wr_bank[b % NW] == BKW'(b)) mem[wr_addr[b % NW]] <= wr_data[b % NW];
      if (rd_en) rd_data[b] <= mem[rd_addr];
    end
  end

endmodule

// tb_global_buffer: self-checking test of the banked global buffer with four
// write ports. Each cycle every port may write a random bank it owns (bank
// mod 4 == port) at a random address; a reference copy is kept, and the test
// reads random addresses from all banks at once, checking every bank's word
// one cycle after the read (block-RAM latency) and that the output holds
// while rd_en is low.
module tb_global_buffer;
  import secda_pkg::*;
  localparam int unsigned NB = 16, NW = 4, DEPTH = 64;
  logic clk = 0, rd_en = 0;
  logic wr_en [NW];
  logic [3:0] wr_bank [NW];
  logic [5:0] wr_addr [NW];
  logic [5:0] rd_addr = '0;
  logic [WORD_W-1:0] wr_data [NW];
  logic [WORD_W-1:0] rd_data [NB];
  logic [WORD_W-1:0] model [NB][DEPTH];
  logic [WORD_W-1:0] expect_q [NB];
  bit have_rd = 0;   // rd_data is only defined after the first read
  int checks = 0, failures = 0;

  global_buffer #(.NB(NB), .NW(NW), .DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int w = 0; w < NW; w++) begin wr_en[w] = 0; wr_bank[w] = '0; wr_addr[w] = '0; wr_data[w] = '0; end
    // fill every location, four banks per cycle
    for (int b = 0; b < NB; b += NW)
      for (int a = 0; a < DEPTH; a++) begin
        @(negedge clk);
        for (int w = 0; w < NW; w++) begin
          wr_en[w] = 1; wr_bank[w] = 4'(b + w); wr_addr[w] = 6'(a); wr_data[w] = $urandom;
          model[b + w][a] = wr_data[w];
        end
      end
    @(negedge clk);
    for (int w = 0; w < NW; w++) wr_en[w] = 0;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      for (int w = 0; w < NW; w++) begin
        wr_en[w]   = ($urandom % 3) == 0;
        wr_bank[w] = 4'(4 * ($urandom % 4) + w);
        wr_addr[w] = 6'($urandom);
        wr_data[w] = $urandom;
      end
      rd_en   = ($urandom % 4) != 0;
      rd_addr = 6'($urandom);
      if (rd_en) begin
        have_rd = 1;
        for (int b = 0; b < NB; b++) expect_q[b] = model[b][rd_addr];
      end
      @(posedge clk);   // reads see the old word (read before write)
      for (int w = 0; w < NW; w++) if (wr_en[w]) model[wr_bank[w]][wr_addr[w]] = wr_data[w];
      #1;
      if (have_rd)
        for (int b = 0; b < NB; b++) begin
          checks++;
          if (rd_data[b] !== expect_q[b]) begin
            failures++;
            $display("FAIL bank %0d got %h exp %h", b, rd_data[b], expect_q[b]);
          end
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

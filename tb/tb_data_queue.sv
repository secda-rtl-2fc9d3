// tb_data_queue: self-checking test of the word-in / element-out data queue.
// Pushes random words and pops elements at random rates (never pushing into a
// full queue, never popping an empty one) and compares the element sequence
// and the level with a reference byte queue. Also checks flush.
module tb_data_queue;
  import secda_pkg::*;
  localparam int unsigned DEPTH = 8;
  logic clk = 0, rst_n = 0, flush = 0, push = 0, pop_elem = 0;
  logic [WORD_W-1:0] push_data = '0;
  logic [$clog2(DEPTH+1)-1:0] level;
  logic [ELEM_W-1:0] elem;
  logic valid;
  int checks = 0, failures = 0;
  int full_seen = 0;

  data_queue #(.DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  logic [ELEM_W-1:0] ref_q [$];
  int words;     // reference word count

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    words = 0;
    for (int n = 0; n < 6000; n++) begin
      @(negedge clk);
      check(level == words, $sformatf("level %0d exp %0d", level, words));
      check(valid == (ref_q.size() != 0), "valid");
      if (ref_q.size() != 0) check(elem == ref_q[0], $sformatf("elem %h exp %h", elem, ref_q[0]));
      if (words == DEPTH) full_seen++;
      push      = (words < DEPTH) && (($urandom % 100) < ((n / 1000) % 2 ? 70 : 20));
      push_data = $urandom;
      pop_elem  = (ref_q.size() != 0) && (($urandom % 100) < 75);
      @(posedge clk);
      if (pop_elem) begin
        void'(ref_q.pop_front());
        if (ref_q.size() % ELEMS == 0) words--;
      end
      if (push) begin
        for (int b = 0; b < ELEMS; b++) ref_q.push_back(push_data[b*ELEM_W +: ELEM_W]);
        words++;
      end
    end
    @(negedge clk); push = 0; pop_elem = 0; flush = 1;
    @(negedge clk); flush = 0;
    check(level == 0 && !valid, "flush");
    check(full_seen > 0, "queue reached full");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

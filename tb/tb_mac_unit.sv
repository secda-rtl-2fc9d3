// tb_mac_unit: self-checking test of one systolic MAC unit.
// Drives random 9-bit operand pairs with random step enables and checks, each
// cycle, the forwarded operands (one step of delay) and the accumulator
// against a reference that multiplies the previously registered operands.
// Also checks clear and that a stalled unit holds its state.
module tb_mac_unit;
  import secda_pkg::*;
  logic clk = 0, rst_n = 0, clr = 0, step_en = 0;
  logic signed [OPND_W-1:0] i_in = '0, w_in = '0, i_out, w_out;
  logic signed [ACC_W-1:0] acc;
  int checks = 0, failures = 0;

  mac_unit dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
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

  initial begin
    logic signed [OPND_W-1:0] ri, rw;
    logic signed [ACC_W-1:0]  racc;
    ri = 0; rw = 0; racc = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      step_en = ($urandom % 4) != 0;
      clr     = ($urandom % 97) == 0;
      i_in    = OPND_W'($urandom);
      w_in    = OPND_W'($urandom);
      @(posedge clk);
      if (clr) begin
        ri = 0; rw = 0; racc = 0;
      end else if (step_en) begin
        racc = racc + ACC_W'(32'(ri) * 32'(rw));
        ri = i_in; rw = w_in;
      end
      #1;
      check(i_out == ri, "i_out");
      check(w_out == rw, "w_out");
      check(acc == racc, $sformatf("acc %0d exp %0d", acc, racc));
    end
    // largest magnitude operands
    @(negedge clk); clr = 1; step_en = 0;
    @(negedge clk); clr = 0; step_en = 1; i_in = -256; w_in = -256;
    @(negedge clk); step_en = 1;
    @(negedge clk); step_en = 0;
    #1 check(acc == 65536, "min*min");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// mac_unit: one processing element of the output-stationary systolic array.
//
// Following the MAC detail of the accelerator figure, the unit holds three
// registers: I (input operand, passed on to the right-hand neighbour), W
// (weight operand, passed on to the neighbour below) and O (the output it
// accumulates). On every array step (step_en) it adds the product of the
// operands it registered on the previous step to O and registers the operands
// arriving from its neighbours. Operands are 9-bit signed values (an 8-bit
// quantized value plus its zero-point offset, added at the array edge);
// O is 32 bits, as in the paper's 32-bit output tiles.
//
// clr zeroes all three registers (start of a new output tile); it has priority
// over step_en. Timing: the operands at i_in/w_in in step t reach the
// multiplier in step t+1 and are in O after that step.
module mac_unit
  import secda_pkg::*;
#(
  parameter int unsigned OW = OPND_W,
  parameter int unsigned AW = ACC_W
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 clr,
  input  logic                 step_en,
  input  logic signed [OW-1:0] i_in,
  input  logic signed [OW-1:0] w_in,
  output logic signed [OW-1:0] i_out,
  output logic signed [OW-1:0] w_out,
  output logic signed [AW-1:0] acc
);

  logic signed [OW-1:0]   i_q, w_q;
  logic signed [2*OW-1:0] prod;

  assign prod = i_q * w_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      i_q <= '0;
      w_q <= '0;
      acc <= '0;
    end else if (clr) begin
      i_q <= '0;
      w_q <= '0;
      acc <= '0;
    end else if (step_en) begin
      i_q <= i_in;
      w_q <= w_in;
      acc <= acc + AW'(prod);
    end
  end

  assign i_out = i_q;
  assign w_out = w_q;

endmodule

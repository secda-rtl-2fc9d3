// systolic_array: N x N output-stationary grid of mac_unit (N = 16 in the paper).
//
// Row r receives its input operands at the left edge (a_in[r]) and passes them
// to the right; column c receives its weight operands at the top (b_in[c]) and
// passes them down, as drawn in the paper's systolic-array figure. Every MAC
// unit accumulates one output value: acc[r][c] = sum_k a_r[k] * b_c[k].
// All units move and accumulate together once per step (step_en), so the
// array stalls as a whole when the scheduler withholds step_en.
//
// Timing contract (this design's choice): the scheduler presents a_r[k] at
// step k + r and b_c[k] at step k + c, and zero outside 0 <= k < K. After
// K + 2N - 1 steps every acc[r][c] holds its final sum. clr zeroes the whole
// grid for the next tile.
module systolic_array
  import secda_pkg::*;
#(
  parameter int unsigned N  = 16,
  parameter int unsigned OW = OPND_W,
  parameter int unsigned AW = ACC_W
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 clr,
  input  logic                 step_en,
  input  logic signed [OW-1:0] a_in [N],
  input  logic signed [OW-1:0] b_in [N],
  output logic signed [AW-1:0] acc  [N][N]
);

  // h[r][c] is the input entering unit (r,c) from the left; v[r][c] the weight
  // entering it from above. Column N / row N are the outputs leaving the grid.
  logic signed [OW-1:0] h [N][N+1];
  logic signed [OW-1:0] v [N+1][N];

  for (genvar r = 0; r < N; r++) begin : g_edge_a
    assign h[r][0] = a_in[r];
  end
  for (genvar c = 0; c < N; c++) begin : g_edge_b
    assign v[0][c] = b_in[c];
  end

  for (genvar r = 0; r < N; r++) begin : g_row
    for (genvar c = 0; c < N; c++) begin : g_col
      mac_unit #(.OW(OW), .AW(AW)) u_mac (
        .clk     (clk),
        .rst_n   (rst_n),
        .clr     (clr),
        .step_en (step_en),
        .i_in    (h[r][c]),
        .w_in    (v[r][c]),
        .i_out   (h[r][c+1]),
        .w_out   (v[r+1][c]),
        .acc     (acc[r][c])
      );
    end
  end

endmodule

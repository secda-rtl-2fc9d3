// tb_scheduler: self-checking test of the scheduler with the real buffers,
// data queues and systolic array around it (N = 8 here) and a PPU stand-in
// whose ready line is randomised.
// Loads random inputs, weights and biases straight into the buffers, runs
// GEMMs of several shapes and, at each tile_valid, checks the tile order, the
// tile's biases on the bias-buffer output and every accumulator against a
// reference GEMM with zero-point offsets. Also checks that each tile takes
// exactly K + 2N - 1 array steps, that busy falls after the last tile, and
// that both stall kinds (empty queue, PPU not ready) occur.
module tb_scheduler;
  import secda_pkg::*;
  localparam int unsigned N = 8, QDEPTH = 8;
  localparam int unsigned WGT_AW = 8, INP_AW = 8, BIAS_AW = 4;
  localparam int unsigned QLW = $clog2(QDEPTH + 1);
  logic clk = 0, rst_n = 0, start = 0;
  gemm_cfg_t cfg;
  logic busy, buf_rd_en, bias_rd_en, q_push;
  logic [INP_AW-1:0] inp_rd_addr;
  logic [WGT_AW-1:0] wgt_rd_addr;
  logic [BIAS_AW-1:0] bias_rd_addr;
  logic [QLW-1:0] in_level [N], w_level [N];
  logic [ELEM_W-1:0] in_elem [N], w_elem [N];
  logic in_valid [N], w_valid [N], in_pop [N], w_pop [N];
  logic arr_clr, arr_step;
  logic signed [OPND_W-1:0] a_in [N], b_in [N];
  logic signed [ACC_W-1:0] acc [N][N];
  logic ppu_ready = 0, tile_valid, last_tile, stall_data, stall_ppu;
  logic [WORD_W-1:0] inp_rd [N], wgt_rd [N], bias_rd [N];
  // buffer write side, driven by the test
  logic we_i = 0, we_w = 0, we_b = 0;
  logic [2:0] wbank = '0;
  logic [7:0] waddr = '0;
  logic [WORD_W-1:0] wdata = '0;
  int checks = 0, failures = 0;

  scheduler #(.N(N), .QDEPTH(QDEPTH), .WGT_AW(WGT_AW), .INP_AW(INP_AW), .BIAS_AW(BIAS_AW)) dut (.*);
  global_buffer #(.NB(N), .NW(1), .DEPTH(256)) u_ib (.clk, .wr_en('{we_i}), .wr_bank('{wbank}), .wr_addr('{waddr}),
    .wr_data('{wdata}), .rd_en(buf_rd_en), .rd_addr(inp_rd_addr), .rd_data(inp_rd));
  global_buffer #(.NB(N), .NW(1), .DEPTH(256)) u_wb (.clk, .wr_en('{we_w}), .wr_bank('{wbank}), .wr_addr('{waddr}),
    .wr_data('{wdata}), .rd_en(buf_rd_en), .rd_addr(wgt_rd_addr), .rd_data(wgt_rd));
  global_buffer #(.NB(N), .NW(1), .DEPTH(16)) u_bb (.clk, .wr_en('{we_b}), .wr_bank('{wbank}), .wr_addr('{4'(waddr)}),
    .wr_data('{wdata}), .rd_en(bias_rd_en), .rd_addr(bias_rd_addr), .rd_data(bias_rd));
  for (genvar i = 0; i < N; i++) begin : g_q
    data_queue #(.DEPTH(QDEPTH)) u_iq (.clk, .rst_n, .flush(1'b0), .push(q_push), .push_data(inp_rd[i]),
      .level(in_level[i]), .pop_elem(in_pop[i]), .elem(in_elem[i]), .valid(in_valid[i]));
    data_queue #(.DEPTH(QDEPTH)) u_wq (.clk, .rst_n, .flush(1'b0), .push(q_push), .push_data(wgt_rd[i]),
      .level(w_level[i]), .pop_elem(w_pop[i]), .elem(w_elem[i]), .valid(w_valid[i]));
  end
  systolic_array #(.N(N)) u_arr (.clk, .rst_n, .clr(arr_clr), .step_en(arr_step), .a_in, .b_in, .acc);

  always #5 clk = ~clk;

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  logic [7:0] X [64][64];   // [input row][k]
  logic [7:0] W [64][64];   // [weight row][k]
  int bias_v [64];
  int n_stall_data = 0, n_stall_ppu = 0, steps = 0;
  always @(posedge clk) begin
    if (stall_data) n_stall_data++;
    if (stall_ppu) n_stall_ppu++;
    if (arr_step) steps++;
    ppu_ready <= ($urandom % 3) == 0;
  end

  task automatic wr(input int kind, input int bank, input int addr, input logic [31:0] d);
    @(negedge clk);
    we_i = (kind == 0); we_w = (kind == 1); we_b = (kind == 2);
    wbank = 3'(bank); waddr = 8'(addr); wdata = d;
    @(negedge clk);
    we_i = 0; we_w = 0; we_b = 0;
  endtask

  initial begin
    int kws [3] = '{1, 5, 2};
    int wbs [3] = '{1, 2, 3};
    int ibs [3] = '{1, 2, 2};
    cfg = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int run = 0; run < 3; run++) begin
      int kw, K, mb, pb, tiles;
      kw = kws[run]; K = 4 * kw; mb = wbs[run]; pb = ibs[run];
      cfg.kw = 16'(kw); cfg.wblocks = 8'(mb); cfg.iblocks = 8'(pb);
      cfg.in_off = (run == 1) ? -16'sd128 : -16'sd3;
      cfg.wgt_off = (run == 2) ? -16'sd255 : 16'sd0;
      for (int p = 0; p < pb * N; p++)
        for (int k = 0; k < K; k++) X[p][k] = 8'($urandom);
      for (int m = 0; m < mb * N; m++)
        for (int k = 0; k < K; k++) W[m][k] = 8'($urandom);
      for (int m = 0; m < mb * N; m++) bias_v[m] = $urandom;
      for (int p = 0; p < pb * N; p++)
        for (int c = 0; c < kw; c++)
          wr(0, p % N, (p / N) * kw + c, {X[p][4*c+3], X[p][4*c+2], X[p][4*c+1], X[p][4*c]});
      for (int m = 0; m < mb * N; m++)
        for (int c = 0; c < kw; c++)
          wr(1, m % N, (m / N) * kw + c, {W[m][4*c+3], W[m][4*c+2], W[m][4*c+1], W[m][4*c]});
      for (int m = 0; m < mb * N; m++) wr(2, m % N, m / N, bias_v[m]);
      @(negedge clk); start = 1;
      @(negedge clk); start = 0;
      tiles = 0;
      steps = 0;
      while (tiles < mb * pb) begin
        @(posedge clk);
        if (tile_valid) begin
          int tp, tf;
          tp = tiles / mb; tf = tiles % mb;
          check(steps == K + 2 * N - 1, $sformatf("run %0d tile %0d steps %0d exp %0d", run, tiles, steps, K + 2 * N - 1));
          steps = 0;
          check(last_tile == (tiles == mb * pb - 1), "last_tile");
          for (int c = 0; c < N; c++)
            check(bias_rd[c] == 32'(bias_v[tf * N + c]), $sformatf("bias tile %0d c %0d", tiles, c));
          for (int r = 0; r < N; r++)
            for (int c = 0; c < N; c++) begin
              int s;
              s = 0;
              for (int k = 0; k < K; k++)
                s += (int'(X[tp*N + r][k]) + int'(cfg.in_off)) * (int'(W[tf*N + c][k]) + int'(cfg.wgt_off));
              check(acc[r][c] == s, $sformatf("run %0d tile %0d acc[%0d][%0d]=%0d exp %0d", run, tiles, r, c, acc[r][c], s));
            end
          tiles++;
        end
      end
      repeat (2) @(posedge clk);
      #1 check(!busy, "busy falls after the last tile");
    end
    check(n_stall_data > 0, "empty-queue stall occurred");
    check(n_stall_ppu > 0, "PPU stall occurred");
    $display("stalls: data %0d ppu %0d", n_stall_data, n_stall_ppu);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_input_handler: self-checking test of the packet decoder and data router.
// Sends a CONFIG packet, then BIAS, WEIGHT and INPUT packets with random
// content and random gaps in tvalid, and records every buffer write. Checks
// the decoded configuration fields, that each payload word of packet row j
// goes to bank NL*(j mod N/NL) at address (j div N/NL)*kw + col (link 0 of
// NL links owns banks 0, NL, 2NL, ...; bias rows use address j div N/NL),
// that a RUN header waits while another link is mid-packet, that it then
// pulses start once, and that the stream is held (tready low) while hold is
// high.
module tb_input_handler;
  import secda_pkg::*;
  localparam int unsigned N = 16, NL = 4, RPB = N / NL;
  logic clk = 0, rst_n = 0;
  logic [WORD_W-1:0] s_tdata = '0;
  logic s_tvalid = 0, s_tready;
  logic hold = 0, others_idle = 1, idle, run_pending, start;
  gemm_cfg_t cfg;
  logic [15:0] kw_in;
  logic [WORD_W-1:0] wr_data;
  logic [3:0] wr_bank;
  logic wgt_we, inp_we, bias_we;
  logic [11:0] wgt_addr;
  logic [10:0] inp_addr;
  logic [7:0] bias_addr;
  int checks = 0, failures = 0;

  input_handler #(.N(N), .NL(NL), .LINK(0)) dut (.*);
  assign kw_in = cfg.kw;

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
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

  // write monitor: associative models keyed by {bank, addr}
  logic [WORD_W-1:0] wmem [int], imem [int], bmem [int];
  int starts = 0;
  always @(posedge clk) begin
    if (wgt_we)  wmem[{wr_bank, 20'(wgt_addr)}] = wr_data;
    if (inp_we)  imem[{wr_bank, 20'(inp_addr)}] = wr_data;
    if (bias_we) bmem[{wr_bank, 20'(bias_addr)}] = wr_data;
    if (start) starts++;
  end

  task automatic send(input logic [WORD_W-1:0] w);
    @(negedge clk);
    while ($urandom % 4 == 0) begin s_tvalid = 0; @(negedge clk); end
    s_tvalid = 1; s_tdata = w;
    @(posedge clk);
    while (!s_tready) @(posedge clk);
    @(negedge clk);
    s_tvalid = 0;
  endtask

  initial begin
    int kw, rows;
    logic [WORD_W-1:0] cw [7];
    logic [WORD_W-1:0] wdat [int];
    repeat (3) @(posedge clk);
    rst_n = 1;
    kw = 3; rows = 37;
    cw[0] = {8'd2, 8'd3, 16'(kw)};
    cw[1] = {16'hff81, 16'hff00};
    cw[2] = 32'h5a5a1234;
    cw[3] = 32'd9;
    cw[4] = 32'hffffff80;
    cw[5] = 32'd3;
    cw[6] = 32'd250;
    send({OP_CONFIG, 28'd7});
    for (int i = 0; i < 7; i++) send(cw[i]);
    check(cfg.kw == 16'(kw) && cfg.wblocks == 3 && cfg.iblocks == 2, "cfg word0");
    check(cfg.in_off == -16'sd256 && cfg.wgt_off == -16'sd127, "cfg offsets");
    check(cfg.mult == 32'h5a5a1234 && cfg.shift == 9, "cfg scale");
    check(cfg.out_off == -32'sd128 && cfg.act_min == 3 && cfg.act_max == 250, "cfg clamp");
    // biases
    send({OP_BIAS, 28'd40});
    for (int n = 0; n < 40; n++) begin
      wdat[n] = $urandom; send(wdat[n]);
    end
    for (int n = 0; n < 40; n++)
      check(bmem.exists({4'(NL * (n % RPB)), 20'(n / RPB)}) && bmem[{4'(NL * (n % RPB)), 20'(n / RPB)}] == wdat[n],
            $sformatf("bias %0d", n));
    // weights
    send({OP_WEIGHT, 28'(rows * kw)});
    for (int n = 0; n < rows * kw; n++) begin
      wdat[n] = $urandom; send(wdat[n]);
    end
    for (int row = 0; row < rows; row++)
      for (int c = 0; c < kw; c++) begin
        int key;
        key = {4'(NL * (row % RPB)), 20'((row / RPB) * kw + c)};
        check(wmem.exists(key) && wmem[key] == wdat[row * kw + c], $sformatf("wgt row %0d col %0d", row, c));
      end
    // inputs
    send({OP_INPUT, 28'(rows * kw)});
    for (int n = 0; n < rows * kw; n++) begin
      wdat[n] = $urandom; send(wdat[n]);
    end
    for (int row = 0; row < rows; row++)
      for (int c = 0; c < kw; c++) begin
        int key;
        key = {4'(NL * (row % RPB)), 20'((row / RPB) * kw + c)};
        check(imem.exists(key) && imem[key] == wdat[row * kw + c], $sformatf("inp row %0d col %0d", row, c));
      end
    check(wmem.size() == rows * kw && imem.size() == rows * kw && bmem.size() == 40, "no stray writes");
    // RUN: waits while another link is mid-packet
    check(idle, "idle between packets");
    others_idle = 0;
    @(negedge clk);
    s_tvalid = 1; s_tdata = {OP_RUN, 28'd0};
    repeat (10) begin
      @(negedge clk);
      check(!s_tready && starts == 0, "RUN waits for other links");
      check(run_pending, "run pending raised");
    end
    others_idle = 1;
    #1;
    check(s_tready, "RUN taken once links idle");
    @(posedge clk);
    @(negedge clk); s_tvalid = 0;
    @(negedge clk);
    hold = 1;
    check(starts == 1, "one start pulse");
    s_tvalid = 1; s_tdata = {OP_NOP, 28'd0};
    repeat (20) begin
      @(negedge clk);
      check(!s_tready, "held while hold");
    end
    hold = 0;
    @(posedge clk); #1;
    check(s_tready, "released after hold");
    @(negedge clk); s_tvalid = 0;
    check(starts == 1, "still one start");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

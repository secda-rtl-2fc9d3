// tb_ppu: self-checking test of the post-processing unit.
// Sends random accumulator tiles with random biases and random quantization
// parameters (multiplier, shift, offsets, clamps) and checks every 8-bit
// output against a reference of the gemmlowp output stage written with 64-bit
// integer arithmetic. The output stream is back-pressured at random; the test
// also checks the word order, m_tlast, the ready handshake and that a
// tile takes N*N/4 words.
module tb_ppu;
  import secda_pkg::*;
  localparam int unsigned N = 16;
  localparam int unsigned NW = N * N / 4;
  logic clk = 0, rst_n = 0;
  gemm_cfg_t cfg;
  logic ready, tile_valid = 0, tile_last = 0;
  logic signed [ACC_W-1:0] acc [N][N];
  logic signed [31:0] bias [N];
  logic [WORD_W-1:0] m_tdata;
  logic m_tvalid, m_tready = 0, m_tlast;
  int checks = 0, failures = 0;

  ppu #(.N(N)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint rdiv_pow2(longint v, int e);  // round half away from zero
    longint q, r;
    if (e == 0) return v;
    q = v / (64'sd1 << e);        // toward zero
    r = v - q * (64'sd1 << e);
    if (v >= 0 && 2 * r >= (64'sd1 << e)) q++;
    if (v <  0 && -2 * r >= (64'sd1 << e)) q--;
    return q;
  endfunction

  function automatic int ref_q(int a, int b, gemm_cfg_t c);
    longint x, p, y;
    int xi, hi;
    xi = a + b;                    // 32-bit wrap
    x  = longint'(xi);
    if (xi == 32'h80000000 && c.mult == 32'h80000000) hi = 32'h7fffffff;
    else begin
      p  = x * longint'(c.mult);
      if (p >= 0) hi = int'((p + (64'sd1 << 30)) / (64'sd1 << 31));
      else        hi = int'((p + 1 - (64'sd1 << 30)) / (64'sd1 << 31));
    end
    y = rdiv_pow2(longint'(hi), int'(c.shift)) + longint'(c.out_off);
    if (y < c.act_min) y = c.act_min;
    if (y > c.act_max) y = c.act_max;
    return int'(y) & 255;
  endfunction

  // the tile currently on the output, for reference
  logic signed [31:0] rt [N][N];
  logic signed [31:0] rb [N];
  int tiles_done = 0;
  int n_inrange = 0;

  initial begin
    int words;
    cfg = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int tile = 0; tile < 12; tile++) begin
      int first_cycle, cyc;
      cfg.mult    = (tile == 11) ? 32'h80000000 : 32'h40000000 + ($urandom % 32'h3fffffff);
      cfg.shift   = 5'($urandom % 12);
      cfg.out_off = $urandom % 256;
      cfg.act_min = (tile % 2) ? 0 : -128;
      cfg.act_max = (tile % 2) ? 255 : 127;
      for (int r = 0; r < N; r++)
        for (int c = 0; c < N; c++) begin
          // mostly values that land inside the clamp range after scaling
          acc[r][c] = (tile >= 9) ? $urandom : int'($urandom % (600 << cfg.shift)) - (300 << cfg.shift);
          if (tile == 11 && r == 0 && c == 0) acc[r][c] = 32'h80000000;
        end
      for (int c = 0; c < N; c++) bias[c] = (tile == 11 && c == 0) ? 0 : int'($urandom % 2000) - 1000;
      rt = acc; rb = bias;
      @(negedge clk);
      checks++;
      if (!ready) begin failures++; $display("FAIL not ready"); end
      tile_valid = 1; tile_last = (tile == 11);
      @(negedge clk);
      tile_valid = 0;
      for (int r = 0; r < N; r++) for (int c = 0; c < N; c++) begin
        int e;
        e = ref_q(rt[r][c], rb[c], cfg);
        if (e != 0 && e != 255 && e != 127 && e != 128) n_inrange++;
      end
      for (int r = 0; r < N; r++) for (int c = 0; c < N; c++) acc[r][c] = $urandom; // must not matter
      words = 0;
      cyc = 0;
      while (words < NW) begin
        m_tready = (tile % 3 == 0) ? 1'b1 : (($urandom % 3) != 0);
        @(posedge clk);
        cyc++;
        if (m_tvalid && m_tready) begin
          int r, g;
          r = words / (N / 4); g = words % (N / 4);
          for (int l = 0; l < 4; l++) begin
            int e;
            e = ref_q(rt[r][g*4+l], rb[g*4+l], cfg);
            checks++;
            if (m_tdata[l*8 +: 8] != 8'(e)) begin
              failures++;
              if (failures < 10) $display("FAIL tile %0d r %0d c %0d got %0d exp %0d", tile, r, g*4+l, m_tdata[l*8 +: 8], e);
            end
          end
          checks++;
          if (m_tlast != (tile == 11 && words == NW - 1)) failures++;
          words++;
        end
        #1;
      end
      m_tready = 0;
      if (tile % 3 == 0) begin   // full rate: one word per cycle after a one-cycle start
        checks++;
        if (cyc != NW + 1) begin failures++; $display("FAIL rate %0d cycles", cyc); end
      end
      tiles_done++;
    end
    checks++;
    if (n_inrange < 1000) begin failures++; $display("FAIL only %0d unclamped results", n_inrange); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

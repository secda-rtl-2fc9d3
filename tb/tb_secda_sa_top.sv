// tb_secda_sa_top: end-to-end test of the systolic-array accelerator at its
// default parameters (16 x 16 array), playing the host driver.
// For each of several GEMM layers it builds random 8-bit inputs, weights and
// 32-bit biases, sends CONFIG and RUN packets on input link 0 and the BIAS,
// WEIGHT and INPUT packets split over the four input links (link l carries
// rows n with n mod 4 == l, all links at once) as the driver would, and collects the 8-bit result
// stream with random back-pressure. Every result byte is compared with a
// reference: the GEMM with zero-point offsets followed by the quantized
// output stage (bias, Q31 multiply, rounding shift, offset, clamp). One layer
// is too large for a single pass and is computed as two runs with the weights
// reloaded in between (weight tiling by the driver).
// Counted mechanisms, each of which must occur: array stalls on an empty
// queue, tile handoffs delayed by a busy PPU, output back-pressure, the input
// stream held during a run, cycles with several links transferring at once,
// multi-tile runs and weight reloads. The first
// layer's array compute cycles are checked against K + 2N - 1 steps per tile.
module tb_secda_sa_top;
  import secda_pkg::*;
  localparam int unsigned N = 16, NL = 4;
  logic clk = 0, rst_n = 0;
  logic [WORD_W-1:0] s_tdata [NL] = '{default: '0};
  logic s_tvalid [NL] = '{default: 1'b0};
  logic s_tready [NL];
  logic [WORD_W-1:0] m_tdata;
  logic m_tvalid, m_tready = 0, m_tlast;
  logic busy, stall_data, stall_ppu;
  int checks = 0, failures = 0;

  secda_sa_top dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (2000000) @(posedge clk);
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

  // ---------------- mechanism counters ----------------
  int n_stall_data = 0, n_stall_ppu = 0, n_backpressure = 0, n_held = 0;
  int n_multitile = 0, n_reload = 0, n_steps = 0, n_unclamped = 0, n_multilink = 0;
  always @(posedge clk) begin
    int nx;
    nx = 0;
    for (int l = 0; l < NL; l++) if (s_tvalid[l] && s_tready[l]) nx++;
    if (nx > 1) n_multilink++;
    if (stall_data) n_stall_data++;
    if (stall_ppu) n_stall_ppu++;
    if (m_tvalid && !m_tready) n_backpressure++;
    if (s_tvalid[0] && !s_tready[0] && busy) n_held++;
    if (dut.arr_step) n_steps++;
  end

  // ---------------- output collector ----------------
  logic [7:0] outq [$];
  int bp_pct = 0;
  always @(negedge clk) m_tready <= ($urandom % 100) >= bp_pct;
  always @(posedge clk)
    if (m_tvalid && m_tready)
      for (int l = 0; l < 4; l++) outq.push_back(m_tdata[8*l +: 8]);

  // ---------------- reference ----------------
  function automatic longint rdiv_pow2(longint v, int e);
    longint q, r;
    if (e == 0) return v;
    q = v / (64'sd1 << e);
    r = v - q * (64'sd1 << e);
    if (v >= 0 && 2 * r >= (64'sd1 << e)) q++;
    if (v <  0 && -2 * r >= (64'sd1 << e)) q--;
    return q;
  endfunction

  function automatic int ref_q(int a, int b, gemm_cfg_t c);
    longint p, y;
    int xi, hi;
    xi = a + b;
    p  = longint'(xi) * longint'(c.mult);
    if (p >= 0) hi = int'((p + (64'sd1 << 30)) / (64'sd1 << 31));
    else        hi = int'((p + 1 - (64'sd1 << 30)) / (64'sd1 << 31));
    y = rdiv_pow2(longint'(hi), int'(c.shift)) + longint'(c.out_off);
    if (y < c.act_min) y = c.act_min;
    if (y > c.act_max) y = c.act_max;
    return int'(y) & 255;
  endfunction

  // ---------------- driver ----------------
  int send_gap = 0;
  task automatic send(input int l, input logic [WORD_W-1:0] w);
    @(negedge clk);
    while (send_gap != 0 && $urandom % 100 < send_gap) begin s_tvalid[l] = 0; @(negedge clk); end
    s_tvalid[l] = 1; s_tdata[l] = w;
    @(posedge clk);
    while (!s_tready[l]) @(posedge clk);
    @(negedge clk);
    s_tvalid[l] = 0;
  endtask

  logic [7:0] X [][];   // [input row][k]
  logic [7:0] W [][];   // [weight row][k]
  int B [];
  gemm_cfg_t cfg;

  // Link l's share: bias, weight and input rows n with n mod NL == l
  task automatic send_link(input int l, input int P, input int kw, input int m0, input int mb,
                           input bit send_inputs);
    send(l, {OP_BIAS, 28'(mb * N / NL)});
    for (int m = l; m < mb * N; m += NL) send(l, B[m0 + m]);
    send(l, {OP_WEIGHT, 28'(mb * N / NL * kw)});
    for (int m = l; m < mb * N; m += NL)
      for (int c = 0; c < kw; c++)
        send(l, {W[m0+m][4*c+3], W[m0+m][4*c+2], W[m0+m][4*c+1], W[m0+m][4*c]});
    if (send_inputs) begin
      send(l, {OP_INPUT, 28'(P / NL * kw)});
      for (int p = l; p < P; p += NL)
        for (int c = 0; c < kw; c++)
          send(l, {X[p][4*c+3], X[p][4*c+2], X[p][4*c+1], X[p][4*c]});
    end
  endtask

  // One run: weight rows [m0, m0 + mb*N) against all input rows; checks output.
  task automatic run_gemm(input int P, input int K, input int m0, input int mb, input bit send_inputs);
    int kw, pb;
    kw = K / 4; pb = P / N;
    cfg.kw = 16'(kw); cfg.wblocks = 8'(mb); cfg.iblocks = 8'(pb);
    send(0, {OP_CONFIG, 28'd7});
    send(0, {8'(pb), 8'(mb), 16'(kw)});
    send(0, {cfg.wgt_off, cfg.in_off});
    send(0, cfg.mult);
    send(0, 32'(cfg.shift));
    send(0, cfg.out_off);
    send(0, cfg.act_min);
    send(0, cfg.act_max);
    fork
      send_link(0, P, kw, m0, mb, send_inputs);
      send_link(1, P, kw, m0, mb, send_inputs);
      send_link(2, P, kw, m0, mb, send_inputs);
      send_link(3, P, kw, m0, mb, send_inputs);
    join
    outq.delete();
    send(0, {OP_RUN, 28'd0});
    // next header is presented at once and must be held until the run ends
    @(negedge clk);
    s_tvalid[0] = 1; s_tdata[0] = {OP_NOP, 28'd0};
    @(posedge clk);
    while (!s_tready[0]) @(posedge clk);
    @(negedge clk); s_tvalid[0] = 0;
    while (outq.size() < P * mb * N) @(posedge clk);
    if (mb * pb > 1) n_multitile++;
    // tile order: input block outer, weight block inner; each tile row by row
    for (int tp = 0; tp < pb; tp++)
      for (int tf = 0; tf < mb; tf++)
        for (int r = 0; r < N; r++)
          for (int c = 0; c < N; c++) begin
            int s, e, p, m;
            p = tp * N + r; m = m0 + tf * N + c;
            s = 0;
            for (int k = 0; k < K; k++)
              s += (int'(X[p][k]) + int'(cfg.in_off)) * (int'(W[m][k]) + int'(cfg.wgt_off));
            e = ref_q(s, B[m], cfg);
            if (e != (int'(cfg.act_min) & 255) && e != (int'(cfg.act_max) & 255)) n_unclamped++;
            checks++;
            if (outq[0] != 8'(e)) begin
              failures++;
              if (failures < 20) $display("FAIL out p %0d m %0d got %0d exp %0d (acc %0d)", p, m, outq[0], e, s);
            end
            void'(outq.pop_front());
          end
  endtask

  task automatic make_layer(input int P, input int M, input int K);
    X = new[P]; W = new[M]; B = new[M];
    foreach (X[p]) begin X[p] = new[K]; foreach (X[p][k]) X[p][k] = 8'($urandom); end
    foreach (W[m]) begin W[m] = new[K]; foreach (W[m][k]) W[m][k] = 8'($urandom); end
    foreach (B[m]) B[m] = int'($urandom % 40000) - 20000;
  endtask

  initial begin
    int t0, steps0;
    cfg = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);

    // Layer 1: P=32 input rows, M=32 output channels, K=64; uint8 zero points.
    make_layer(32, 32, 64);
    cfg.in_off = -16'sd128; cfg.wgt_off = -16'sd131;
    cfg.mult = 32'd1518500250; cfg.shift = 5'd10; cfg.out_off = 32'd5;
    cfg.act_min = 0; cfg.act_max = 255;
    steps0 = n_steps;
    run_gemm(32, 64, 0, 2, 1);
    check(n_steps - steps0 == 4 * (64 + 2 * N - 1), $sformatf("array steps %0d exp %0d", n_steps - steps0, 4 * (64 + 2 * N - 1)));

    // Layer 2: small K (PPU-bound), ReLU6-style clamp, output back-pressure
    bp_pct = 40; send_gap = 20;
    make_layer(48, 16, 4);
    cfg.in_off = -16'sd7; cfg.wgt_off = -16'sd250;
    cfg.mult = 32'd1200000000; cfg.shift = 5'd6; cfg.out_off = 32'd0;
    cfg.act_min = 0; cfg.act_max = 48;
    run_gemm(48, 4, 0, 1, 1);

    // Layer 3: M=64 channels in two weight passes of 32 (weight tiling),
    // inputs sent once and reused by the second pass.
    bp_pct = 10; send_gap = 0;
    make_layer(16, 64, 128);
    cfg.in_off = -16'sd100; cfg.wgt_off = -16'sd128;
    cfg.mult = 32'd1900000000; cfg.shift = 5'd12; cfg.out_off = 32'd128;
    cfg.act_min = 0; cfg.act_max = 255;
    run_gemm(16, 128, 0, 2, 1);
    run_gemm(16, 128, 32, 2, 0);
    n_reload++;

    $display("unclamped results: %0d", n_unclamped);
    $display("mechanisms: data_stall=%0d ppu_stall=%0d backpressure=%0d held=%0d multilink=%0d multitile=%0d reload=%0d",
             n_stall_data, n_stall_ppu, n_backpressure, n_held, n_multilink, n_multitile, n_reload);
    check(n_stall_data > 0, "empty-queue stall never happened");
    check(n_stall_ppu > 0, "PPU stall never happened");
    check(n_backpressure > 0, "output back-pressure never happened");
    check(n_held > 0, "input hold during run never happened");
    check(n_multilink > 0, "concurrent link transfers never happened");
    check(n_multitile > 0, "multi-tile run never happened");
    check(n_reload > 0, "weight reload never happened");
    check(n_unclamped > 1000, $sformatf("only %0d results inside the clamp range", n_unclamped));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

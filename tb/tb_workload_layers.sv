// tb_workload_layers: runs convolution layers of the evaluated networks
// (MobileNetV1, MobileNetV2, InceptionV1, ResNet18) through the accelerator at
// its default size, as GEMMs, with a driver model that splits each layer to
// fit the buffers.
// Layer shapes (im2col rows P, output channels M, depth K) are those of the
// standard 224x224 ImageNet versions of these networks; data are random uint8
// tensors with zero point 128, so each layer exercises the real shape and
// tiling but not trained values. For large layers only the first P_SIM output
// pixels are simulated.
// Driver: the four input links are used as the host would use four DMA
// channels: CONFIG and RUN go on link 0, and link l carries the bias, weight
// and input rows n with n mod 4 == l, all four links sending at once. K is padded to a multiple of 4 with the input zero point (so padded
// operands are zero after the offset), rows to multiples of 16. Output
// channels are split into weight passes of at most WGT_DEPTH/kw blocks and
// pixels into runs of at most INP_DEPTH/kw blocks. Every output byte is
// compared with a reference (GEMM with offsets, then the gemmlowp output
// stage), and the cycles each layer spends are printed.
module tb_workload_layers;
  import secda_pkg::*;
  localparam int unsigned N = 16, NL = 4;
  localparam int unsigned WGT_DEPTH = 4096, INP_DEPTH = 2048, BIAS_DEPTH = 256;
  logic clk = 0, rst_n = 0;
  logic [WORD_W-1:0] s_tdata [NL] = '{default: '0};
  logic s_tvalid [NL] = '{default: 1'b0};
  logic s_tready [NL];
  logic [WORD_W-1:0] m_tdata;
  logic m_tvalid, m_tready = 1, m_tlast;
  logic busy, stall_data, stall_ppu;
  int checks = 0, failures = 0;

  secda_sa_top dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (40000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [7:0] outq [$];
  always @(posedge clk)
    if (m_tvalid && m_tready)
      for (int l = 0; l < 4; l++) outq.push_back(m_tdata[8*l +: 8]);

  longint cycle = 0;
  always @(posedge clk) cycle++;

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

  // Send a word, one word per cycle at most. Inputs change at the falling
  // edge; s_tready is sampled there too, where it is stable.
  task automatic send(input int l, input logic [WORD_W-1:0] w);
    bit ok;
    @(negedge clk);
    s_tvalid[l] = 1'b1;
    s_tdata[l]  = w;
    ok = s_tready[l];
    while (!ok) begin
      @(negedge clk);
      ok = s_tready[l];
    end
    @(posedge clk);
    #1 s_tvalid[l] = 1'b0;
  endtask

  logic [7:0] X [][];   // [pixel][k], padded
  logic [7:0] W [][];   // [channel][k], padded
  int B [];
  logic [7:0] R [][];   // results [pixel][channel]
  gemm_cfg_t cfg;

  // Link l's share of a block of rows: rows first + l, first + l + NL, ...
  task automatic send_rows(input int l, input bit is_wgt, input int first, input int rows, input int kw);
    send(l, {is_wgt ? OP_WEIGHT : OP_INPUT, 28'(rows / NL * kw)});
    for (int n = first + l; n < first + rows; n += NL)
      for (int c = 0; c < kw; c++)
        if (is_wgt) send(l, {W[n][4*c+3], W[n][4*c+2], W[n][4*c+1], W[n][4*c]});
        else        send(l, {X[n][4*c+3], X[n][4*c+2], X[n][4*c+1], X[n][4*c]});
  endtask

  task automatic send_link(input int l, input bit wgt, input bit inp, input int m0, input int mb,
                           input int p0, input int pb, input int kw);
    if (wgt) begin
      send(l, {OP_BIAS, 28'(mb * N / NL)});
      for (int m = m0 + l; m < m0 + mb * N; m += NL) send(l, B[m]);
      send_rows(l, 1'b1, m0, mb * N, kw);
    end
    if (inp) send_rows(l, 1'b0, p0, pb * N, kw);
  endtask

  task automatic run_layer(input string name, input int P, input int M, input int K);
    int Kp, kw, Pp, Mp, wbp, ibp, npass, nrun, errs, unclamped;
    longint t0;
    real sc;
    Kp = (K + 3) / 4 * 4; kw = Kp / 4;
    Pp = (P + N - 1) / N * N; Mp = (M + N - 1) / N * N;
    wbp = WGT_DEPTH / kw; if (wbp > BIAS_DEPTH) wbp = BIAS_DEPTH; if (wbp > 255) wbp = 255; if (wbp > Mp / N) wbp = Mp / N;
    ibp = INP_DEPTH / kw; if (ibp > 255) ibp = 255; if (ibp > Pp / N) ibp = Pp / N;
    npass = (Mp / N + wbp - 1) / wbp; nrun = (Pp / N + ibp - 1) / ibp;
    // random uint8 data around zero point 128; K padding carries the zero point
    X = new[Pp]; W = new[Mp]; B = new[Mp]; R = new[Pp];
    foreach (X[p]) begin X[p] = new[Kp]; foreach (X[p][k]) X[p][k] = (k < K) ? 8'($urandom) : 8'd128; end
    foreach (W[m]) begin W[m] = new[Kp]; foreach (W[m][k]) W[m][k] = (k < K) ? 8'($urandom) : 8'd128; end
    foreach (B[m]) B[m] = int'($urandom % 20001) - 10000;
    foreach (R[p]) R[p] = new[Mp];
    // requantization chosen to map the accumulator spread onto ~40 output steps
    cfg = '0;
    cfg.in_off = -16'sd128; cfg.wgt_off = -16'sd128;
    sc = 40.0 / (5500.0 * $sqrt(real'(K)));
    while (sc < 0.5) begin sc = sc * 2.0; cfg.shift++; end
    cfg.mult = int'(sc * 2147483648.0);
    cfg.out_off = 128; cfg.act_min = 0; cfg.act_max = 255;
    t0 = cycle;
    for (int wp = 0; wp < npass; wp++) begin
      int m0, mb;
      m0 = wp * wbp * N;
      mb = (Mp / N - wp * wbp < wbp) ? Mp / N - wp * wbp : wbp;
      for (int ir = 0; ir < nrun; ir++) begin
        int p0, pb, idx;
        p0 = ir * ibp * N;
        pb = (Pp / N - ir * ibp < ibp) ? Pp / N - ir * ibp : ibp;
        cfg.kw = 16'(kw); cfg.wblocks = 8'(mb); cfg.iblocks = 8'(pb);
        send(0, {OP_CONFIG, 28'd7});
        send(0, {8'(pb), 8'(mb), 16'(kw)});
        send(0, {cfg.wgt_off, cfg.in_off});
        send(0, cfg.mult);
        send(0, 32'(cfg.shift));
        send(0, cfg.out_off);
        send(0, cfg.act_min);
        send(0, cfg.act_max);
        begin
          bit wgt, inp;
          wgt = ir == 0; inp = ir == 0 && wp == 0 || nrun > 1;
          fork
            send_link(0, wgt, inp, m0, mb, p0, pb, kw);
            send_link(1, wgt, inp, m0, mb, p0, pb, kw);
            send_link(2, wgt, inp, m0, mb, p0, pb, kw);
            send_link(3, wgt, inp, m0, mb, p0, pb, kw);
          join
        end
        outq.delete();
        send(0, {OP_RUN, 28'd0});
        @(posedge clk);
        while (busy || outq.size() < pb * mb * N * N) @(posedge clk);
        repeat (2) @(posedge clk);
        idx = 0;
        for (int tp = 0; tp < pb; tp++)
          for (int tf = 0; tf < mb; tf++)
            for (int r = 0; r < N; r++)
              for (int c = 0; c < N; c++)
                R[p0 + tp * N + r][m0 + tf * N + c] = outq[idx++];
      end
    end
    errs = 0; unclamped = 0;
    for (int p = 0; p < P; p++)
      for (int m = 0; m < M; m++) begin
        int s, e;
        s = 0;
        for (int k = 0; k < K; k++) s += (int'(X[p][k]) - 128) * (int'(W[m][k]) - 128);
        e = ref_q(s, B[m], cfg);
        if (e != 0 && e != 255) unclamped++;
        checks++;
        if (R[p][m] != 8'(e)) begin
          errs++;
          if (errs < 5) $display("FAIL %s p %0d m %0d got %0d exp %0d", name, p, m, R[p][m], e);
        end
      end
    failures += errs;
    checks++;
    if (unclamped < P * M / 2) begin failures++; $display("FAIL %s: only %0d unclamped results", name, unclamped); end
    $display("%-28s P=%0d M=%0d K=%0d: %0d weight pass(es) x %0d pixel run(s), %0d cycles, %0d errors",
             name, P, M, K, npass, nrun, cycle - t0, errs);
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);
    // MobileNetV1 last pointwise conv, 7x7x1024 -> 1024 (weights 1 MiB: 4 passes)
    run_layer("MobileNetV1 conv_pw_13", 49, 1024, 1024);
    // MobileNetV2 last 1x1 conv, 7x7x320 -> 1280 (weights 400 KiB: 2 passes)
    run_layer("MobileNetV2 conv_1", 49, 1280, 320);
    // InceptionV1 mixed_3a 3x3 branch, 28x28, 96 -> 128 (K = 864; 6 pixel runs)
    run_layer("InceptionV1 3a 3x3", 784, 128, 864);
    // ResNet18 conv1 7x7x3 -> 64, stride 2 (K = 147, padded); first 1024 of 12544 pixels
    run_layer("ResNet18 conv1 (1024 px)", 1024, 64, 147);
    // ResNet18 layer4 3x3 conv, 7x7, 512 -> 512 (K = 4608, weights 2.25 MiB)
    run_layer("ResNet18 layer4 3x3", 49, 512, 4608);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

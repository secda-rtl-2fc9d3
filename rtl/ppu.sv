// ppu: post-processing unit of the systolic-array accelerator.
//
// The paper moves gemmlowp's output stage from the CPU into the accelerator:
// the PPU takes the 32-bit accumulator tile of the array and produces the
// 8-bit quantized result tile, with bias addition, scaling and the activation
// function, cutting output traffic by 4x. The arithmetic here is the standard
// gemmlowp/TFLite quantized output stage, which the paper names but does not
// spell out:
//   x = acc + bias[col]
//   y = SaturatingRoundingDoublingHighMul(x, mult)      (Q31 multiplier)
//   y = RoundingDivideByPOT(y, shift)                   (round half away from 0)
//   y = clamp(y + out_off, act_min, act_max)            (activation, e.g. ReLU6)
//   out = y[7:0]
//
// Interface: when ready is high, tile_valid copies the N x N accumulators,
// the N column biases and the tile's "last" flag into a tile register, so the
// array can start its next tile at once (one tile of buffering). The tile
// then leaves row by row, LANES results per 32-bit word, on a valid/ready
// output stream; m_tlast marks the final word of the last tile of a run.
// One word per cycle while m_tready is high; ready returns high the cycle
// after the tile's last word is accepted. The per-word arithmetic is one
// combinational stage into the output register (this design's choice).
module ppu
  import secda_pkg::*;
#(
  parameter int unsigned N     = 16,
  parameter int unsigned LANES = WORD_W / ELEM_W
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  gemm_cfg_t               cfg,
  output logic                    ready,
  input  logic                    tile_valid,
  input  logic                    tile_last,
  input  logic signed [ACC_W-1:0] acc  [N][N],
  input  logic signed [31:0]      bias [N],
  output logic [WORD_W-1:0]       m_tdata,
  output logic                    m_tvalid,
  input  logic                    m_tready,
  output logic                    m_tlast
);

  localparam int unsigned GPR = N / LANES;         // words per tile row
  localparam int unsigned NW  = N * N / LANES;     // words per tile
  localparam int unsigned WW  = $clog2(NW);

  function automatic logic signed [31:0] srdhm(input logic signed [31:0] a,
                                               input logic signed [31:0] b);
    logic signed [63:0] ab, nudged;
    if (a == 32'sh8000_0000 && b == 32'sh8000_0000) return 32'sh7fff_ffff;
    ab     = 64'(a) * 64'(b);
    nudged = ab + ((ab >= 0) ? 64'sd1073741824 : -64'sd1073741823);
    // divide by 2^31, rounding toward zero
    if (nudged < 0) nudged = nudged + 64'sd2147483647;
    return 32'(nudged >>> 31);
  endfunction

  function automatic logic signed [31:0] rdbpot(input logic signed [31:0] x,
                                                input logic [4:0] e);
    logic signed [31:0] mask, rem, thr;
    mask = (32'sd1 <<< e) - 32'sd1;
    rem  = x & mask;
    thr  = (mask >>> 1) + ((x < 0) ? 32'sd1 : 32'sd0);
    return (x >>> e) + ((rem > thr) ? 32'sd1 : 32'sd0);
  endfunction

  function automatic logic [ELEM_W-1:0] quantize(input logic signed [31:0] a,
                                                 input logic signed [31:0] b,
                                                 input gemm_cfg_t c);
    logic signed [31:0] y;
    y = rdbpot(srdhm(a + b, c.mult), c.shift) + c.out_off;
    if (y < c.act_min) y = c.act_min;
    if (y > c.act_max) y = c.act_max;
    return y[ELEM_W-1:0];
  endfunction

  logic signed [ACC_W-1:0] tile [N][N];
  logic signed [31:0]      tbias [N];
  logic                    tlast_q;
  logic                    busy;
  logic [WW-1:0]           widx;
  logic                    load;
  logic [WORD_W-1:0]       next_word;

  assign ready = !busy;
  assign load  = busy && (!m_tvalid || m_tready);

  always_comb begin
    int unsigned r, g;
    r = int'(widx) / GPR;
    g = int'(widx) % GPR;
    next_word = '0;
    for (int l = 0; l < LANES; l++)
      next_word[l*ELEM_W +: ELEM_W] = quantize(tile[r][g*LANES + l], tbias[g*LANES + l], cfg);
  end

  always_ff @(posedge clk) begin
    if (tile_valid && ready) begin
      tile  <= acc;
      tbias <= bias;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy     <= 1'b0;
      widx     <= '0;
      tlast_q  <= 1'b0;
      m_tvalid <= 1'b0;
      m_tdata  <= '0;
      m_tlast  <= 1'b0;
    end else begin
      if (m_tvalid && m_tready) m_tvalid <= 1'b0;
      if (tile_valid && ready) begin
        busy    <= 1'b1;
        widx    <= '0;
        tlast_q <= tile_last;
      end else if (load) begin
        m_tdata  <= next_word;
        m_tvalid <= 1'b1;
        m_tlast  <= tlast_q && (widx == WW'(NW - 1));
        widx     <= widx + 1'b1;
        if (widx == WW'(NW - 1)) busy <= 1'b0;
      end
    end
  end

  a_stream_stable: assert property (@(posedge clk) disable iff (!rst_n)
    m_tvalid && !m_tready |=> m_tvalid && $stable(m_tdata));

endmodule

// secda_sa_top: systolic-array GEMM accelerator (the "SA" design).
//
// The accelerator speeds up the convolution layers of 8-bit quantized DNNs,
// which the host runs as GEMM. The host driver packs weights and inputs into
// packets and streams them in over DMA. The input handler stores them in the
// banked global buffers; a RUN packet starts the scheduler, which streams
// buffer columns through 2N data queues into an N x N output-stationary
// systolic array (N = 16 in the paper) and hands each finished 32-bit tile to
// the PPU. The PPU requantizes it to 8 bits and streams it back to the DMA,
// tile by tile (input row block outer, weight row block inner), each tile row
// by row, four results per word, result channel m of input row p in the byte
// lane of m mod 4.
//
// Ports: s_* are the NL DMA-to-accelerator streams (four by default, one per
// high-performance AXI port; link L carries rows L, L+NL, ... of each data
// packet, link 0 also the CONFIG and RUN packets) and m_* the accelerator-to-DMA
// stream (AXI-Stream style valid/ready, m_tlast on the last word of a run).
// busy is high while a GEMM is in progress. stall_data is high in a cycle in
// which the array waits for an empty data queue, stall_ppu in one in which a
// finished tile waits for the PPU. The block structure follows the
// paper's figure of the SA design; buffer sizes, queue depth and the packet
// format are this design's choices.
module secda_sa_top
  import secda_pkg::*;
#(
  parameter int unsigned N          = 16,
  parameter int unsigned NL         = 4,
  parameter int unsigned QDEPTH     = 8,
  parameter int unsigned WGT_DEPTH  = 4096,
  parameter int unsigned INP_DEPTH  = 2048,
  parameter int unsigned BIAS_DEPTH = 256
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [WORD_W-1:0] s_tdata  [NL],
  input  logic              s_tvalid [NL],
  output logic              s_tready [NL],
  output logic [WORD_W-1:0] m_tdata,
  output logic              m_tvalid,
  input  logic              m_tready,
  output logic              m_tlast,
  output logic              busy,
  output logic              stall_data,
  output logic              stall_ppu
);

  localparam int unsigned WGT_AW  = $clog2(WGT_DEPTH);
  localparam int unsigned INP_AW  = $clog2(INP_DEPTH);
  localparam int unsigned BIAS_AW = $clog2(BIAS_DEPTH);
  localparam int unsigned BKW     = $clog2(N);
  localparam int unsigned QLW     = $clog2(QDEPTH + 1);

  gemm_cfg_t          cfg;
  gemm_cfg_t          link_cfg [NL];
  logic               start;
  logic               link_start [NL];
  logic               link_idle [NL];
  logic               link_run_pending [NL];
  logic               link_others_idle [NL];
  logic [WORD_W-1:0]  wr_data [NL];
  logic [BKW-1:0]     wr_bank [NL];
  logic               wgt_we [NL], inp_we [NL], bias_we [NL];
  logic [WGT_AW-1:0]  wgt_wr_addr [NL];
  logic [INP_AW-1:0]  inp_wr_addr [NL];
  logic [BIAS_AW-1:0] bias_wr_addr [NL];
  logic [WGT_AW-1:0]  wgt_rd_addr;
  logic [INP_AW-1:0]  inp_rd_addr;
  logic [BIAS_AW-1:0] bias_rd_addr;
  logic               buf_rd_en, bias_rd_en;
  logic [WORD_W-1:0]  inp_rd [N];
  logic [WORD_W-1:0]  wgt_rd [N];
  logic [WORD_W-1:0]  bias_rd [N];
  logic signed [31:0] bias_s [N];

  logic               q_push;
  logic [QLW-1:0]     in_level [N], w_level [N];
  logic [ELEM_W-1:0]  in_elem [N], w_elem [N];
  logic               in_valid [N], w_valid [N];
  logic               in_pop [N], w_pop [N];

  logic               arr_clr, arr_step;
  logic signed [OPND_W-1:0] a_in [N], b_in [N];
  logic signed [ACC_W-1:0]  acc [N][N];

  logic               ppu_ready, tile_valid, last_tile;

  // one input handler per link; link 0 owns the configuration and RUN
  always_comb begin
    for (int l = 0; l < NL; l++) begin
      link_others_idle[l] = 1'b1;
      for (int o = 0; o < NL; o++)
        if (o != l && !link_idle[o]) link_others_idle[l] = 1'b0;
    end
  end

  for (genvar l = 0; l < NL; l++) begin : g_link
    input_handler #(.N(N), .NL(NL), .LINK(l), .WGT_AW(WGT_AW), .INP_AW(INP_AW), .BIAS_AW(BIAS_AW)) u_in (
      .clk, .rst_n, .s_tdata(s_tdata[l]), .s_tvalid(s_tvalid[l]), .s_tready(s_tready[l]),
      .hold((l == 0) ? busy : (busy || link_run_pending[0])),
      .others_idle(link_others_idle[l]), .idle(link_idle[l]), .run_pending(link_run_pending[l]),
      .start(link_start[l]), .cfg(link_cfg[l]), .kw_in(cfg.kw),
      .wr_data(wr_data[l]), .wr_bank(wr_bank[l]),
      .wgt_we(wgt_we[l]), .wgt_addr(wgt_wr_addr[l]),
      .inp_we(inp_we[l]), .inp_addr(inp_wr_addr[l]),
      .bias_we(bias_we[l]), .bias_addr(bias_wr_addr[l])
    );
  end
  assign cfg   = link_cfg[0];
  assign start = link_start[0];

  global_buffer #(.NB(N), .NW(NL), .DEPTH(WGT_DEPTH)) u_wgt_buf (
    .clk, .wr_en(wgt_we), .wr_bank, .wr_addr(wgt_wr_addr), .wr_data,
    .rd_en(buf_rd_en), .rd_addr(wgt_rd_addr), .rd_data(wgt_rd)
  );

  global_buffer #(.NB(N), .NW(NL), .DEPTH(INP_DEPTH)) u_inp_buf (
    .clk, .wr_en(inp_we), .wr_bank, .wr_addr(inp_wr_addr), .wr_data,
    .rd_en(buf_rd_en), .rd_addr(inp_rd_addr), .rd_data(inp_rd)
  );

  global_buffer #(.NB(N), .NW(NL), .DEPTH(BIAS_DEPTH)) u_bias_buf (
    .clk, .wr_en(bias_we), .wr_bank, .wr_addr(bias_wr_addr), .wr_data,
    .rd_en(bias_rd_en), .rd_addr(bias_rd_addr), .rd_data(bias_rd)
  );

  for (genvar i = 0; i < N; i++) begin : g_q
    data_queue #(.DEPTH(QDEPTH)) u_inq (
      .clk, .rst_n, .flush(1'b0), .push(q_push), .push_data(inp_rd[i]),
      .level(in_level[i]), .pop_elem(in_pop[i]), .elem(in_elem[i]), .valid(in_valid[i])
    );
    data_queue #(.DEPTH(QDEPTH)) u_wq (
      .clk, .rst_n, .flush(1'b0), .push(q_push), .push_data(wgt_rd[i]),
      .level(w_level[i]), .pop_elem(w_pop[i]), .elem(w_elem[i]), .valid(w_valid[i])
    );
    assign bias_s[i] = signed'(bias_rd[i]);
  end

  scheduler #(.N(N), .QDEPTH(QDEPTH), .WGT_AW(WGT_AW), .INP_AW(INP_AW), .BIAS_AW(BIAS_AW)) u_sched (
    .clk, .rst_n, .start, .cfg, .busy,
    .buf_rd_en, .inp_rd_addr, .wgt_rd_addr, .bias_rd_en, .bias_rd_addr,
    .q_push, .in_level, .w_level,
    .in_elem, .in_valid, .in_pop, .w_elem, .w_valid, .w_pop,
    .arr_clr, .arr_step, .a_in, .b_in,
    .ppu_ready, .tile_valid, .last_tile, .stall_data, .stall_ppu
  );

  systolic_array #(.N(N)) u_array (
    .clk, .rst_n, .clr(arr_clr), .step_en(arr_step), .a_in, .b_in, .acc
  );

  ppu #(.N(N)) u_ppu (
    .clk, .rst_n, .cfg, .ready(ppu_ready), .tile_valid, .tile_last(last_tile),
    .acc, .bias(bias_s), .m_tdata, .m_tvalid, .m_tready, .m_tlast
  );

endmodule

// scheduler: orchestrates a GEMM on the systolic array.
//
// A run computes out[p][m] = sum_k (x[p][k] + in_off) * (w[m][k] + wgt_off)
// for iblocks*N input rows p and wblocks*N weight rows m, one N x N output tile
// at a time (input row block outer, weight row block inner). It has two
// independent halves, so that queue filling overlaps array processing as the
// paper describes:
//
// Fill engine: walks all tiles and, for each, all kw word columns. In one
// cycle it reads one word from each of the N input-buffer banks and each of
// the N weight-buffer banks (same address in every bank) and, one cycle later
// when the data arrives, pushes them into the N input queues and N weight
// queues. It reads only while every queue has room for the word in flight, so
// it runs ahead into the next tile whenever the queues allow.
//
// Step controller: steps the array through K + 2N - 1 steps per tile
// (K = 4*kw). At step t, input lane r carries element t-r and weight lane c
// element t-c when these lie in [0, K), and zero otherwise; that skew makes
// every MAC unit (r,c) see matching operands. The zero-point offset is added
// to each element at the array edge. A step happens only if every lane that
// needs an element has one in its queue; otherwise the whole array stalls.
// After the last step the controller waits until the PPU can take the tile,
// then pulses tile_valid (the PPU copies all accumulators and the tile's N
// biases in that cycle) and clears the array for the next tile.
//
// The tile order, the skewed feeding and the handoff are this design's
// choices; the paper gives the queues, their parallel filling and the array.
module scheduler
  import secda_pkg::*;
#(
  parameter int unsigned N       = 16,
  parameter int unsigned QDEPTH  = 8,
  parameter int unsigned WGT_AW  = 12,
  parameter int unsigned INP_AW  = 11,
  parameter int unsigned BIAS_AW = 8,
  parameter int unsigned QLW     = $clog2(QDEPTH + 1)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  start,
  input  gemm_cfg_t             cfg,
  output logic                  busy,
  // global buffer reads
  output logic                  buf_rd_en,
  output logic [INP_AW-1:0]     inp_rd_addr,
  output logic [WGT_AW-1:0]     wgt_rd_addr,
  output logic                  bias_rd_en,
  output logic [BIAS_AW-1:0]    bias_rd_addr,
  // queue writes (one push into all 2N queues, data straight from the buffers)
  output logic                  q_push,
  input  logic [QLW-1:0]        in_level [N],
  input  logic [QLW-1:0]        w_level  [N],
  // queue reads
  input  logic [ELEM_W-1:0]     in_elem  [N],
  input  logic                  in_valid [N],
  output logic                  in_pop   [N],
  input  logic [ELEM_W-1:0]     w_elem   [N],
  input  logic                  w_valid  [N],
  output logic                  w_pop    [N],
  // systolic array
  output logic                  arr_clr,
  output logic                  arr_step,
  output logic signed [OPND_W-1:0] a_in [N],
  output logic signed [OPND_W-1:0] b_in [N],
  // PPU handoff
  input  logic                  ppu_ready,
  output logic                  tile_valid,
  output logic                  last_tile,
  // observability
  output logic                  stall_data,
  output logic                  stall_ppu
);

  // ---------------- fill engine ----------------
  logic              f_active;
  logic [15:0]       f_j;
  logic [7:0]        f_pb, f_fb;
  logic [INP_AW-1:0] f_ibase;
  logic [WGT_AW-1:0] f_wbase;
  logic              room;

  always_comb begin
    room = 1'b1;
    for (int i = 0; i < N; i++) begin
      if (in_level[i] >= QLW'(QDEPTH - 1)) room = 1'b0;
      if (w_level[i]  >= QLW'(QDEPTH - 1)) room = 1'b0;
    end
  end

  assign buf_rd_en   = f_active && room;
  assign inp_rd_addr = f_ibase + INP_AW'(f_j);
  assign wgt_rd_addr = f_wbase + WGT_AW'(f_j);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      f_active <= 1'b0;
      f_j      <= '0;
      f_pb     <= '0;
      f_fb     <= '0;
      f_ibase  <= '0;
      f_wbase  <= '0;
      q_push   <= 1'b0;
    end else begin
      q_push <= buf_rd_en;
      if (start) begin
        f_active <= (cfg.kw != '0) && (cfg.wblocks != '0) && (cfg.iblocks != '0);
        f_j      <= '0;
        f_pb     <= '0;
        f_fb     <= '0;
        f_ibase  <= '0;
        f_wbase  <= '0;
      end else if (buf_rd_en) begin
        if (f_j == cfg.kw - 1'b1) begin
          f_j <= '0;
          if (f_fb == cfg.wblocks - 1'b1) begin
            f_fb    <= '0;
            f_wbase <= '0;
            f_ibase <= f_ibase + INP_AW'(cfg.kw);
            f_pb    <= f_pb + 1'b1;
            if (f_pb == cfg.iblocks - 1'b1) f_active <= 1'b0;
          end else begin
            f_fb    <= f_fb + 1'b1;
            f_wbase <= f_wbase + WGT_AW'(cfg.kw);
          end
        end else begin
          f_j <= f_j + 1'b1;
        end
      end
    end
  end

  // ---------------- step controller ----------------
  typedef enum logic [1:0] {C_IDLE, C_RUN, C_HAND} cstate_e;
  cstate_e     c_state;
  logic [17:0] t;
  logic [17:0] k_elems;
  logic [17:0] t_last;
  logic [7:0]  c_pb, c_fb;
  logic        need_a [N];
  logic        need_b [N];
  logic        step_ok;
  logic        c_last;

  assign k_elems = {cfg.kw, 2'b00};
  assign t_last  = k_elems + 18'(2 * N - 2);
  assign c_last  = (c_pb == cfg.iblocks - 1'b1) && (c_fb == cfg.wblocks - 1'b1);

  always_comb begin
    step_ok = 1'b1;
    for (int i = 0; i < N; i++) begin
      need_a[i] = (t >= 18'(i)) && (t < k_elems + 18'(i));
      need_b[i] = need_a[i];   // lane i of both edges is skewed by i steps
      if (need_a[i] && !in_valid[i]) step_ok = 1'b0;
      if (need_b[i] && !w_valid[i])  step_ok = 1'b0;
    end
  end

  assign arr_step   = (c_state == C_RUN) && step_ok;
  assign stall_data = (c_state == C_RUN) && !step_ok;
  assign stall_ppu  = (c_state == C_HAND) && !ppu_ready;
  assign tile_valid = (c_state == C_HAND) && ppu_ready;
  assign last_tile  = c_last;
  assign arr_clr    = start || tile_valid;
  assign busy       = f_active || (c_state != C_IDLE);

  // the bias read for a tile is issued when the tile starts
  assign bias_rd_en   = (start && c_state == C_IDLE) || (tile_valid && !c_last);
  assign bias_rd_addr = start ? '0
                      : BIAS_AW'((c_fb == cfg.wblocks - 1'b1) ? 8'd0 : c_fb + 1'b1);

  for (genvar i = 0; i < N; i++) begin : g_lane
    assign in_pop[i] = arr_step && need_a[i];
    assign w_pop[i]  = arr_step && need_b[i];
    assign a_in[i]   = need_a[i] ? (OPND_W'({1'b0, in_elem[i]}) + OPND_W'(cfg.in_off))  : '0;
    assign b_in[i]   = need_b[i] ? (OPND_W'({1'b0, w_elem[i]})  + OPND_W'(cfg.wgt_off)) : '0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      c_state <= C_IDLE;
      t       <= '0;
      c_pb    <= '0;
      c_fb    <= '0;
    end else begin
      unique case (c_state)
        C_IDLE: if (start && cfg.kw != '0 && cfg.wblocks != '0 && cfg.iblocks != '0) begin
          c_state <= C_RUN;
          t       <= '0;
          c_pb    <= '0;
          c_fb    <= '0;
        end
        C_RUN: if (arr_step) begin
          if (t == t_last) c_state <= C_HAND;
          else             t <= t + 1'b1;
        end
        C_HAND: if (ppu_ready) begin
          t <= '0;
          if (c_last) begin
            c_state <= C_IDLE;
          end else begin
            c_state <= C_RUN;
            if (c_fb == cfg.wblocks - 1'b1) begin
              c_fb <= '0;
              c_pb <= c_pb + 1'b1;
            end else begin
              c_fb <= c_fb + 1'b1;
            end
          end
        end
        default: c_state <= C_IDLE;
      endcase
    end
  end

  // The fill engine never pushes into a full queue.
  logic any_full;
  always_comb begin
    any_full = 1'b0;
    for (int i = 0; i < N; i++)
      if (in_level[i] == QLW'(QDEPTH) || w_level[i] == QLW'(QDEPTH)) any_full = 1'b1;
  end
  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n) q_push |-> !any_full);

endmodule

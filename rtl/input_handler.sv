// input_handler: receives one DMA word stream and directs it into the
// accelerator (the paper's Input Handler, made of a Header Handler and a Data
// Handler). The top has one handler per input link (NL links, four in the
// default build, one per high-performance AXI port of the Zynq); this is link
// LINK. The paper's driver partitions the data over several buffers that are
// sent concurrently; here the partition is by row: link L carries rows
// L, L+NL, L+2NL, ... of every weight, input and bias packet.
//
// Header handler: in state S_HDR it accepts one header word (opcode and
// payload length, see secda_pkg) and then lets the payload through in S_PAY.
// Only link 0 decodes CONFIG into the configuration and acts on RUN. A RUN
// header is taken only when every other link is idle (between packets); while
// link 0 presents it (run_pending) and while the engine is busy (hold), no
// link accepts a new header, so the buffers are never written during a run.
// RUN raises start for one cycle. On other links RUN is ignored.
//
// Data handler: routes every payload word by the packet's opcode.
//   OP_CONFIG: word i of the payload loads configuration word i (gemm_cfg_t).
//   OP_WEIGHT / OP_INPUT: the payload is a list of rows of kw words (kw_in,
//     from link 0's configuration). The j-th row of the packet is global row
//     n = j*NL + LINK; it goes to bank n mod N, starting at address
//     (n div N) * kw, so the rows of one N-row block sit at the same addresses
//     in the N banks and the scheduler can read a whole block column in one
//     cycle. This spreading of data over many BRAMs follows the paper; the
//     exact layout is this design's.
//   OP_BIAS: bias n (= j*NL + LINK) goes to bank n mod N, address n div N.
// Each packet starts writing at row LINK. Stream interface: AXI-Stream style
// valid/ready, one word per cycle when the handler is not holding the stream.
// N must be a multiple of NL.
module input_handler
  import secda_pkg::*;
#(
  parameter int unsigned N       = 16,
  parameter int unsigned NL      = 4,
  parameter int unsigned LINK    = 0,
  parameter int unsigned WGT_AW  = 12,
  parameter int unsigned INP_AW  = 11,
  parameter int unsigned BIAS_AW = 8,
  parameter int unsigned BKW     = $clog2(N)
) (
  input  logic               clk,
  input  logic               rst_n,
  // stream from the DMA
  input  logic [WORD_W-1:0]  s_tdata,
  input  logic               s_tvalid,
  output logic               s_tready,
  // engine handshake and link coordination
  input  logic               hold,         // busy engine (or, on links > 0, a RUN pending on link 0)
  input  logic               others_idle,  // every other link is between packets
  output logic               idle,         // this link is between packets
  output logic               run_pending,  // a RUN header is waiting or being taken (link 0)
  output logic               start,
  output gemm_cfg_t          cfg,
  input  logic [15:0]        kw_in,        // words per row, from link 0's configuration
  // buffer write ports (shared data and bank, separate enables and addresses)
  output logic [WORD_W-1:0]  wr_data,
  output logic [BKW-1:0]     wr_bank,
  output logic               wgt_we,
  output logic [WGT_AW-1:0]  wgt_addr,
  output logic               inp_we,
  output logic [INP_AW-1:0]  inp_addr,
  output logic               bias_we,
  output logic [BIAS_AW-1:0] bias_addr
);

  localparam int unsigned MAXAW = (WGT_AW > INP_AW) ? WGT_AW : INP_AW;

  typedef enum logic [1:0] {S_HDR, S_PAY, S_RUN} state_e;

  state_e      state;
  opcode_e     op;
  logic [27:0] remaining;
  logic [15:0] col;       // word within the current row
  logic [BKW-1:0] bank;   // bank of the current row
  logic [MAXAW-1:0] base; // address of the current row block
  logic [2:0]  cfg_idx;
  logic        beat;

  logic hdr_is_run;
  assign hdr_is_run  = (LINK == 0) && (opcode_e'(s_tdata[31:28]) == OP_RUN);
  assign s_tready    = (state == S_PAY) || (state == S_HDR && !hold && (!hdr_is_run || others_idle));
  assign idle        = (state == S_HDR);
  assign run_pending = (state == S_HDR && s_tvalid && hdr_is_run) || (state == S_RUN);
  assign beat     = s_tvalid && s_tready;

  // ---------------- header handler ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_HDR;
      op        <= OP_NOP;
      remaining <= '0;
      start     <= 1'b0;
    end else begin
      start <= 1'b0;
      unique case (state)
        S_HDR: if (beat) begin
          op        <= opcode_e'(s_tdata[31:28]);
          remaining <= s_tdata[27:0];
          if (hdr_is_run) begin
            start <= 1'b1;
            state <= S_RUN;
          end else if (s_tdata[27:0] != '0) begin
            state <= S_PAY;
          end
        end
        S_PAY: if (beat) begin
          remaining <= remaining - 1'b1;
          if (remaining == 28'd1) state <= S_HDR;
        end
        S_RUN: state <= S_HDR;  // hold (busy) is high from here on; S_HDR waits until it drops
        default: state <= S_HDR;
      endcase
    end
  end

  // ---------------- data handler ----------------
  logic pay_beat;
  logic row_end;
  assign pay_beat = beat && (state == S_PAY);
  assign row_end  = (op == OP_BIAS) ? 1'b1 : (col == kw_in - 1'b1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      col     <= '0;
      bank    <= '0;
      base    <= '0;
      cfg_idx <= '0;
      cfg     <= '0;
    end else if (state == S_HDR && beat) begin
      col     <= '0;
      bank    <= BKW'(LINK);
      base    <= '0;
      cfg_idx <= '0;
    end else if (pay_beat) begin
      if (op == OP_CONFIG && LINK == 0) begin
        cfg_idx <= cfg_idx + 1'b1;
        unique case (cfg_idx)
          3'd0: begin
            cfg.kw      <= s_tdata[15:0];
            cfg.wblocks <= s_tdata[23:16];
            cfg.iblocks <= s_tdata[31:24];
          end
          3'd1: begin
            cfg.in_off  <= s_tdata[15:0];
            cfg.wgt_off <= s_tdata[31:16];
          end
          3'd2: cfg.mult    <= s_tdata;
          3'd3: cfg.shift   <= s_tdata[4:0];
          3'd4: cfg.out_off <= s_tdata;
          3'd5: cfg.act_min <= s_tdata;
          3'd6: cfg.act_max <= s_tdata;
          default: ;
        endcase
      end else if (op != OP_CONFIG) begin
        if (row_end) begin
          col <= '0;
          if (bank >= BKW'(N - NL)) begin
            bank <= BKW'(LINK);
            base <= base + ((op == OP_BIAS) ? MAXAW'(1) : MAXAW'(kw_in));
          end else begin
            bank <= bank + BKW'(NL);
          end
        end else begin
          col <= col + 1'b1;
        end
      end
    end
  end

  assign wr_data   = s_tdata;
  assign wr_bank   = bank;
  assign wgt_we    = pay_beat && (op == OP_WEIGHT);
  assign inp_we    = pay_beat && (op == OP_INPUT);
  assign bias_we   = pay_beat && (op == OP_BIAS);
  assign wgt_addr  = WGT_AW'(base + MAXAW'(col));
  assign inp_addr  = INP_AW'(base + MAXAW'(col));
  assign bias_addr = BIAS_AW'(base);

endmodule

// secda_pkg: types and constants shared by the systolic-array GEMM accelerator.
//
// The accelerator receives one 32-bit word stream from the host DMA. The host
// driver frames the data into packets: one header word followed by a payload.
// The header tells the input handler where the payload belongs (configuration
// registers, bias buffer, weight buffer, input buffer) or starts a GEMM run.
// The paper states that "metadata added by the driver is used to direct the
// incoming data to the appropriate accelerator buffers"; the concrete opcodes,
// field positions and configuration layout below are this design's own choice.
//
// Header word:  [31:28] opcode, [27:0] payload length in 32-bit words.
// Data words carry four 8-bit values, element 0 in bits [7:0].
package secda_pkg;

  localparam int unsigned WORD_W   = 32;   // stream / buffer word width
  localparam int unsigned ELEM_W   = 8;    // quantized operand width (paper: 8-bit models)
  localparam int unsigned ELEMS    = WORD_W / ELEM_W;
  localparam int unsigned OPND_W   = 9;    // operand after zero-point offset is added
  localparam int unsigned ACC_W    = 32;   // accumulator width (paper: 32-bit output tiles)

  typedef enum logic [3:0] {
    OP_NOP    = 4'd0,
    OP_CONFIG = 4'd1,   // 7 words of GEMM configuration
    OP_BIAS   = 4'd2,   // one int32 bias per output channel (weight row)
    OP_WEIGHT = 4'd3,   // weight rows, K/4 words each, row after row
    OP_INPUT  = 4'd4,   // input rows, K/4 words each, row after row
    OP_RUN    = 4'd5    // start the GEMM; no payload
  } opcode_e;

  // GEMM configuration loaded by an OP_CONFIG packet.
  //   word 0: [15:0] kw = K/4 (words per row), [23:16] weight row blocks,
  //           [31:24] input row blocks (a block is N rows, N = array size)
  //   word 1: [15:0] input zero-point offset, [31:16] weight zero-point offset
  //   word 2: output multiplier (Q31 fixed point)
  //   word 3: [4:0] right-shift exponent
  //   word 4: output offset (output zero point)
  //   word 5: activation minimum, word 6: activation maximum
  typedef struct packed {
    logic [15:0]        kw;
    logic [7:0]         wblocks;
    logic [7:0]         iblocks;
    logic signed [15:0] in_off;
    logic signed [15:0] wgt_off;
    logic signed [31:0] mult;
    logic [4:0]         shift;
    logic signed [31:0] out_off;
    logic signed [31:0] act_min;
    logic signed [31:0] act_max;
  } gemm_cfg_t;

endpackage

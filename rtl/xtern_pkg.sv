// xtern_pkg: types and constants shared by the xTern ternary execution units.
//
// Ternary data travel in two forms. Uncompressed, a trit is a 2-bit two's
// complement value (+1 = 2'b01, 0 = 2'b00, -1 = 2'b11; 2'b10 is unused and read
// as 0) and five trits are packed into 10 bits, trit i in bits [2i+1:2i].
// Compressed, five trits share one byte and a 32-bit word holds 20 trits, byte k
// carrying trits 5k..5k+4. The instruction encodings below are the xTern ones;
// the 2-bit trit format and the byte code (see tern_compress) are this design's
// choices, as the published description leaves them to a cited encoding.
package xtern_pkg;

  localparam int unsigned TRITS_PER_BYTE = 5;
  localparam int unsigned TRITS_PER_WORD = 20;

  typedef logic [1:0] trit_t;

  localparam trit_t TRIT_POS  = 2'b01;
  localparam trit_t TRIT_ZERO = 2'b00;
  localparam trit_t TRIT_NEG  = 2'b11;

  // Instruction fields: funct7 [31:25], funct3 [14:12], opcode [6:0].
  localparam logic [6:0] OPC_MLS   = 7'b1110111;  // smlsdotsp.t
  localparam logic [6:0] OPC_SIMD  = 7'b1010111;  // sdotsp.t, dotsp.t, min.t, max.t
  localparam logic [6:0] OPC_OP    = 7'b0110011;  // thrc
  localparam logic [2:0] F3_TERN   = 3'b100;
  localparam logic [2:0] F3_THRC   = 3'b110;
  localparam logic [6:0] F7_SMLSDOTSP = 7'b1111100;
  localparam logic [6:0] F7_SDOTSP    = 7'b1011101;
  localparam logic [6:0] F7_DOTSP     = 7'b1001101;
  localparam logic [6:0] F7_MIN       = 7'b0010001;
  localparam logic [6:0] F7_MAX       = 7'b0011001;
  localparam logic [6:0] F7_THRC      = 7'b0000100;

  typedef enum logic [2:0] {
    XT_NONE      = 3'd0,
    XT_DOTSP     = 3'd1,
    XT_SDOTSP    = 3'd2,
    XT_SMLSDOTSP = 3'd3,
    XT_MIN       = 3'd4,
    XT_MAX       = 3'd5,
    XT_THRC      = 3'd6
  } xt_op_e;

  typedef struct packed {
    logic       valid;   // instruction word is an xTern instruction
    xt_op_e     op;
    logic [4:0] rd;
    logic [4:0] rs1;
    logic [4:0] rs2;
    logic [4:0] imm;     // bits [24:20]; the M&L immediate of smlsdotsp.t
  } xt_dec_t;

  // Fields of the thrc status register.
  localparam int unsigned THRC_CNT_LSB   = 29;  // counter c, [31:29]
  localparam int unsigned THRC_UNC_LSB   = 16;  // uncompressed trits, [25:16]
  localparam int unsigned THRC_CMP_LSB   = 0;   // compressed byte, [7:0]

endpackage

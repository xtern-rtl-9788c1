// xtern_decoder: recognises the six xTern instructions.
//
// Matches funct7 [31:25], funct3 [14:12] and opcode [6:0] of a 32-bit
// instruction word against the published xTern encodings and returns the
// operation with rd [11:7], rs1 [19:15], rs2 [24:20] and, for smlsdotsp.t, the
// 5-bit immediate in [24:20] that selects NN-RF operands and their update in the
// core's MAC-and-load logic. For dotsp.t the published table prints rs1 in both
// register fields; this decoder reads [24:20] as rs2, as the instruction's
// description (a dot product of rs1 and rs2) requires. Any other word gives
// valid = 0 and op = XT_NONE. The register and immediate fields are passed
// through from the word whatever it decodes to; only valid and op are logic.
// Combinational.
module xtern_decoder
  import xtern_pkg::*;
(
  input  logic [31:0] instr_i,
  output xt_dec_t     dec_o
);

  logic [6:0] funct7, opcode;
  logic [2:0] funct3;

  assign funct7 = instr_i[31:25];
  assign funct3 = instr_i[14:12];
  assign opcode = instr_i[6:0];

  always_comb begin
    xt_op_e op;
    op = XT_NONE;
    if (opcode == OPC_MLS && funct3 == F3_TERN && funct7 == F7_SMLSDOTSP)
      op = XT_SMLSDOTSP;
    else if (opcode == OPC_SIMD && funct3 == F3_TERN) begin
      unique case (funct7)
        F7_SDOTSP: op = XT_SDOTSP;
        F7_DOTSP:  op = XT_DOTSP;
        F7_MIN:    op = XT_MIN;
        F7_MAX:    op = XT_MAX;
        default:   op = XT_NONE;
      endcase
    end else if (opcode == OPC_OP && funct3 == F3_THRC && funct7 == F7_THRC)
      op = XT_THRC;

    dec_o.valid = (op != XT_NONE);
    dec_o.op    = op;
    dec_o.rd    = instr_i[11:7];
    dec_o.rs1   = instr_i[19:15];
    dec_o.rs2   = instr_i[24:20];
    dec_o.imm   = instr_i[24:20];
  end

endmodule

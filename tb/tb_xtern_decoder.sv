// tb_xtern_decoder: builds each xTern instruction from its published field
// values with random register fields and checks the decoded operation and
// fields; then checks that random words and near-misses (one field changed)
// decode as no xTern instruction.
module tb_xtern_decoder;
  import xtern_pkg::*;

  logic [31:0] instr;
  xt_dec_t     dec;
  int checks = 0, failures = 0;

  xtern_decoder dut (.instr_i(instr), .dec_o(dec));

  // Field values written out literally, independent of the package constants.
  typedef struct { logic [6:0] f7; logic [2:0] f3; logic [6:0] opc; xt_op_e op; } enc_t;
  enc_t encs[6] = '{
    '{7'b1111100, 3'b100, 7'b1110111, XT_SMLSDOTSP},
    '{7'b1011101, 3'b100, 7'b1010111, XT_SDOTSP},
    '{7'b1001101, 3'b100, 7'b1010111, XT_DOTSP},
    '{7'b0010001, 3'b100, 7'b1010111, XT_MIN},
    '{7'b0011001, 3'b100, 7'b1010111, XT_MAX},
    '{7'b0000100, 3'b110, 7'b0110011, XT_THRC}
  };

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 600; n++) begin
      enc_t e;
      logic [4:0] rd, rs1, rs2;
      e = encs[n % 6];
      rd = 5'($urandom); rs1 = 5'($urandom); rs2 = 5'($urandom);
      instr = {e.f7, rs2, rs1, e.f3, rd, e.opc};
      #1;
      checks++;
      if (!(dec.valid && dec.op == e.op && dec.rd == rd && dec.rs1 == rs1 &&
            dec.rs2 == rs2 && dec.imm == rs2)) begin
        failures++;
        if (failures < 10) $display("FAIL instr=%h op=%0d exp=%0d", instr, dec.op, e.op);
      end
      // Near miss: flip one bit of funct7, funct3 or opcode.
      begin
        int bitpos;
        case ($urandom_range(2))
          0: bitpos = 25 + int'($urandom_range(6));
          1: bitpos = 12 + int'($urandom_range(2));
          default: bitpos = int'($urandom_range(6));
        endcase
        instr[bitpos] = ~instr[bitpos];
        #1;
        // A flipped bit may turn one xTern word into another one; the reference
        // says which.
        begin
          xt_op_e exp_op;
          exp_op = XT_NONE;
          foreach (encs[k])
            if (instr[31:25] == encs[k].f7 && instr[14:12] == encs[k].f3 && instr[6:0] == encs[k].opc)
              exp_op = encs[k].op;
          checks++;
          if (dec.op != exp_op || dec.valid != (exp_op != XT_NONE)) begin
            failures++;
            if (failures < 10) $display("FAIL near-miss instr=%h op=%0d exp=%0d", instr, dec.op, exp_op);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

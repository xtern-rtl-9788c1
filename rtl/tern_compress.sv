// tern_compress: packs five uncompressed trits (10 bits) into one byte.
//
// Each 2-bit trit t_i (two's complement, 2'b10 read as 0) is mapped to the digit
// d_i = t_i + 1 in {0,1,2}, and the byte is the base-3 number
//     code = d_0 + 3*d_1 + 9*d_2 + 27*d_3 + 81*d_4,   0 <= code <= 242,
// so every one of the 243 trit vectors gets its own 8-bit code (1.6 bit per
// trit). The xTern extension uses a ternary compression from earlier work whose
// exact bit mapping is not reproduced here; this base-3 code is this design's
// own choice with the same density and interface. Purely combinational: five
// small constant multiplies and an adder, well inside one cycle.
module tern_compress
  import xtern_pkg::*;
(
  input  logic [9:0] trits_i,
  output logic [7:0] code_o
);

  always_comb begin
    logic [7:0] acc;
    logic [1:0] digit;
    acc = 8'd0;
    for (int i = TRITS_PER_BYTE - 1; i >= 0; i--) begin
      unique case (trits_i[2*i +: 2])
        TRIT_NEG: digit = 2'd0;
        TRIT_POS: digit = 2'd2;
        default:  digit = 2'd1;
      endcase
      acc = 8'(acc * 8'd3) + 8'(digit);
    end
    code_o = acc;
  end

endmodule

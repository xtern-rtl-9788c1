// tern_decompress: expands one compressed byte into five uncompressed trits.
//
// Inverse of tern_compress: the byte is read as a base-3 number and its five
// digits d_i = code / 3^i mod 3 give the trits t_i = d_i - 1 in 2-bit two's
// complement, trit i in bits [2i+1:2i]. The 13 codes 243..255 never come out of
// the compressor; they decode to five zeros. The digit extraction is a chain of
// constant divisions by 3, which synthesis reduces to a small network; a 256-entry
// table would do the same. Purely combinational.
module tern_decompress
  import xtern_pkg::*;
(
  input  logic [7:0] code_i,
  output logic [9:0] trits_o
);

  always_comb begin
    logic [7:0] rest;
    logic [1:0] digit;
    trits_o = '0;
    rest    = code_i;
    for (int i = 0; i < TRITS_PER_BYTE; i++) begin
      digit = 2'(rest % 8'd3);
      rest  = rest / 8'd3;
      unique case (digit)
        2'd0:    trits_o[2*i +: 2] = TRIT_NEG;
        2'd2:    trits_o[2*i +: 2] = TRIT_POS;
        default: trits_o[2*i +: 2] = TRIT_ZERO;
      endcase
    end
    if (code_i > 8'd242) trits_o = '0;
  end

endmodule

// tern_decompr_array: decompresses a 32-bit word of 20 compressed trits.
//
// Four tern_decompress instances work in parallel, one per byte; byte k gives
// trits 5k..5k+4, so trit j of the word lands in bits [2j+1:2j] of the 40-bit
// output. This is the decompression array that sits in front of each operand of
// the ternary MAC (four decompressors per operand word). Combinational.
module tern_decompr_array
  import xtern_pkg::*;
(
  input  logic [31:0] word_i,
  output logic [39:0] trits_o
);

  for (genvar k = 0; k < 4; k++) begin : g_byte
    tern_decompress i_decompress (
      .code_i  (word_i[8*k +: 8]),
      .trits_o (trits_o[10*k +: 10])
    );
  end

endmodule

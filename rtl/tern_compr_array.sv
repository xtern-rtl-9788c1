// tern_compr_array: compresses 20 uncompressed trits into one 32-bit word.
//
// Four tern_compress instances, one per group of five trits; trits 5k..5k+4
// (bits [10k+9:10k] of the input) become byte k of the output. Used by the
// element-wise comparison unit to repack its result. Combinational.
module tern_compr_array
  import xtern_pkg::*;
(
  input  logic [39:0] trits_i,
  output logic [31:0] word_o
);

  for (genvar k = 0; k < 4; k++) begin : g_byte
    tern_compress i_compress (
      .trits_i (trits_i[10*k +: 10]),
      .code_o  (word_o[8*k +: 8])
    );
  end

endmodule

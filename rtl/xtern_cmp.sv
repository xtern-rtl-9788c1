// xtern_cmp: element-wise ternary minimum / maximum (min.t, max.t).
//
// Both compressed 20-trit words are decompressed, each of the 20 trit pairs is
// compared as signed values and the smaller (max_i = 0) or larger (max_i = 1)
// trit is kept; the 20 results are compressed back into one word. max.t is the
// building block of ternary max-pooling. Only the function of this unit is
// published; the decompress-compare-compress structure is the simplest one that
// reuses the MAC unit's decompressors. Combinational.
module xtern_cmp
  import xtern_pkg::*;
(
  input  logic [31:0] op_a_i,
  input  logic [31:0] op_b_i,
  input  logic        max_i,
  output logic [31:0] result_o
);

  logic [39:0] trits_a, trits_b, trits_r;

  tern_decompr_array i_decompr_a (.word_i(op_a_i), .trits_o(trits_a));
  tern_decompr_array i_decompr_b (.word_i(op_b_i), .trits_o(trits_b));

  always_comb begin
    for (int j = 0; j < TRITS_PER_WORD; j++) begin
      logic signed [1:0] a, b;
      logic a_lt_b;
      a = signed'(trits_a[2*j +: 2]);
      b = signed'(trits_b[2*j +: 2]);
      a_lt_b = a < b;
      trits_r[2*j +: 2] = (a_lt_b ^ max_i) ? trits_a[2*j +: 2] : trits_b[2*j +: 2];
    end
  end

  tern_compr_array i_compr (.trits_i(trits_r), .word_o(result_o));

endmodule

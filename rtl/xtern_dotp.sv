// xtern_dotp: compressed ternary multiply-add unit (dotsp.t, sdotsp.t,
// smlsdotsp.t).
//
// Both 32-bit operands carry 20 compressed trits. Each goes through a
// decompression array (four byte decompressors), the 20 trit pairs are
// multiplied (a product of two trits is again a trit: zero if either is zero,
// otherwise the sign is the XOR of the signs) and an adder tree sums the 20
// products together with a third operand: 0 for the multiply-add (dotsp.t) or
// the accumulator rd for the multiply-accumulate forms. The result is 32 bits
// and wraps on overflow. The structure (decompression arrays, 20 multipliers,
// 0/accumulator mux, adder tree) follows the published unit; the adder tree is
// written as a plain sum and its shape left to synthesis. Combinational.
module xtern_dotp
  import xtern_pkg::*;
(
  input  logic [31:0] op_a_i,
  input  logic [31:0] op_b_i,
  input  logic [31:0] op_c_i,
  input  logic        accumulate_i,
  output logic [31:0] result_o
);

  logic [39:0] trits_a, trits_b;
  logic [39:0] prods;

  tern_decompr_array i_decompr_a (.word_i(op_a_i), .trits_o(trits_a));
  tern_decompr_array i_decompr_b (.word_i(op_b_i), .trits_o(trits_b));

  // 20 ternary multipliers.
  always_comb begin
    for (int j = 0; j < TRITS_PER_WORD; j++) begin
      trit_t a, b;
      a = trits_a[2*j +: 2];
      b = trits_b[2*j +: 2];
      if (a == TRIT_ZERO || b == TRIT_ZERO || a == 2'b10 || b == 2'b10)
        prods[2*j +: 2] = TRIT_ZERO;
      else if (a[1] ^ b[1])
        prods[2*j +: 2] = TRIT_NEG;
      else
        prods[2*j +: 2] = TRIT_POS;
    end
  end

  // Adder tree with the MADD/MAC operand.
  always_comb begin
    logic [31:0] sum;
    sum = accumulate_i ? op_c_i : 32'd0;
    for (int j = 0; j < TRITS_PER_WORD; j++)
      sum = sum + 32'(signed'(prods[2*j +: 2]));
    result_o = sum;
  end

endmodule

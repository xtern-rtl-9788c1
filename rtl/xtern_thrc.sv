// xtern_thrc: the threshold-and-compress (thrc) datapath.
//
// One pre-activation is turned into one trit and folded into a running byte of
// five compressed trits. The status register (rd, read and written) holds
//   [31:29] counter c, [28:26] 0, [25:16] up to five uncompressed 2-bit trits,
//   [15:8] 0, [7:0] compressed byte of those trits;
// the threshold register holds t_lo in [31:16] and t_hi in [15:0], both signed.
// The trit is -1 below t_lo, +1 at or above t_hi and 0 in between. It is
// shifted left by 2c and ORed into the previous uncompressed vector; the OR
// result feeds the compressor, whose byte is always written back. While c < 4
// the OR result is kept as the next uncompressed vector and c is incremented;
// at c = 4 (the fifth trit) the vector is cleared and c returns to 0, so the
// compressed byte is complete after every fifth call.
// Bit fields, the shift by 2c, the OR merge and the "4 / <4" clear mux follow
// the published datapath. Treating c = 5..7 like 4, the counter wrap to 0, the
// signed comparison and the operand roles (thresholds from rs1, pre-activation
// from rs2, as the published figures draw them; the prose swaps the two) are
// this design's reading. Combinational; the core writes state_o to rd. Bits
// [28:26] and [15:8] of state_o are always 0, as the register layout defines.
module xtern_thrc
  import xtern_pkg::*;
(
  input  logic [31:0] state_i,
  input  logic [31:0] thresh_i,
  input  logic [31:0] preact_i,
  output logic [31:0] state_o
);

  logic [2:0]  cnt_q;
  logic [9:0]  unc_q;
  logic signed [31:0] t_lo, t_hi, x;
  trit_t       y;
  logic [9:0]  y_shifted, merged, unc_d;
  logic [2:0]  cnt_d;
  logic [7:0]  compr_d;

  assign cnt_q = state_i[THRC_CNT_LSB +: 3];
  assign unc_q = state_i[THRC_UNC_LSB +: 10];
  assign t_lo  = 32'(signed'(thresh_i[31:16]));
  assign t_hi  = 32'(signed'(thresh_i[15:0]));
  assign x     = signed'(preact_i);

  // Thresholding, Eq. (1).
  always_comb begin
    if (x < t_lo)       y = TRIT_NEG;
    else if (x >= t_hi) y = TRIT_POS;
    else                y = TRIT_ZERO;
  end

  assign y_shifted = 10'(y) << (2 * cnt_q);
  assign merged    = unc_q | y_shifted;

  tern_compress i_compress (
    .trits_i (merged),
    .code_o  (compr_d)
  );

  always_comb begin
    if (cnt_q < 3'd4) begin
      unc_d = merged;
      cnt_d = cnt_q + 3'd1;
    end else begin
      unc_d = '0;
      cnt_d = 3'd0;
    end
  end

  assign state_o = {cnt_d, 3'b000, unc_d, 8'h00, compr_d};

endmodule

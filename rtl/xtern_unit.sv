// xtern_unit: the xTern execution unit of one core (design top).
//
// A core that issues an instruction presents the word and the GP-RF read data of
// rs1, rs2 and rd (rd is a source for the accumulating and stateful
// instructions), plus the two NN-RF read ports. The decoder selects one of three
// datapaths:
//   dotsp.t     rd = dot(rs1, rs2)             (xtern_dotp, MADD)
//   sdotsp.t    rd = rd + dot(rs1, rs2)        (xtern_dotp, MAC)
//   smlsdotsp.t rd = rd + dot(nnrf_a, nnrf_b)  (xtern_dotp, MAC, NN-RF operands)
//   min.t/max.t rd = elementwise min/max(rs1, rs2)  (xtern_cmp)
//   thrc        rd = thrc(state = rd, thresholds = rs1, pre-activation = rs2)
// All datapaths are combinational and the result is captured in a write-back
// register: wb_valid_o, wb_addr_o and wb_data_o appear the cycle after valid_i,
// one instruction per cycle, no stalls. accepted_o tells the core in the issue
// cycle whether the word was an xTern instruction; others produce no write-back.
// For smlsdotsp.t, nnrf_imm_o carries the immediate to the core's existing
// MAC-and-load logic, which performs the NN-RF load and pointer update; that
// logic and the NN-RF itself are outside this unit. The instruction set and the
// three datapaths follow the published extension; the single-cycle write-back
// timing and the port list are this design's choices.
module xtern_unit
  import xtern_pkg::*;
(
  input  logic        clk_i,
  input  logic        rst_ni,
  input  logic        valid_i,
  input  logic [31:0] instr_i,
  input  logic [31:0] rs1_i,
  input  logic [31:0] rs2_i,
  input  logic [31:0] rd_i,
  input  logic [31:0] nnrf_a_i,
  input  logic [31:0] nnrf_b_i,
  output logic        accepted_o,
  output logic [4:0]  nnrf_imm_o,
  output logic        wb_valid_o,
  output logic [4:0]  wb_addr_o,
  output logic [31:0] wb_data_o
);

  xt_dec_t     dec;
  logic [31:0] dotp_a, dotp_b, dotp_res, cmp_res, thrc_res;
  logic [31:0] result;
  logic        is_mls;

  xtern_decoder i_decoder (.instr_i(instr_i), .dec_o(dec));

  assign is_mls = (dec.op == XT_SMLSDOTSP);
  // Operands from the NN-RF for MAC-and-load, from the GP-RF otherwise.
  assign dotp_a = is_mls ? nnrf_a_i : rs1_i;
  assign dotp_b = is_mls ? nnrf_b_i : rs2_i;

  xtern_dotp i_dotp (
    .op_a_i       (dotp_a),
    .op_b_i       (dotp_b),
    .op_c_i       (rd_i),
    .accumulate_i (dec.op != XT_DOTSP),
    .result_o     (dotp_res)
  );

  xtern_cmp i_cmp (
    .op_a_i   (rs1_i),
    .op_b_i   (rs2_i),
    .max_i    (dec.op == XT_MAX),
    .result_o (cmp_res)
  );

  xtern_thrc i_thrc (
    .state_i  (rd_i),
    .thresh_i (rs1_i),
    .preact_i (rs2_i),
    .state_o  (thrc_res)
  );

  always_comb begin
    unique case (dec.op)
      XT_DOTSP, XT_SDOTSP, XT_SMLSDOTSP: result = dotp_res;
      XT_MIN, XT_MAX:                    result = cmp_res;
      XT_THRC:                           result = thrc_res;
      default:                           result = '0;
    endcase
  end

  assign accepted_o = valid_i & dec.valid;
  assign nnrf_imm_o = is_mls ? dec.imm : 5'd0;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      wb_valid_o <= 1'b0;
      wb_addr_o  <= '0;
      wb_data_o  <= '0;
    end else begin
      wb_valid_o <= accepted_o;
      if (accepted_o) begin
        wb_addr_o <= dec.rd;
        wb_data_o <= result;
      end
    end
  end

  // A write-back always follows an accepted instruction by exactly one cycle.
  assert property (@(posedge clk_i) disable iff (!rst_ni) accepted_o |=> wb_valid_o);

endmodule

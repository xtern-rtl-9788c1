// tb_xtern_unit: end-to-end test of the xTern execution unit at its default
// (and only) configuration.
//
// The testbench plays the core: it holds a 32-entry GP-RF and a small NN-RF
// model, issues one instruction per cycle and forwards write-backs to the next
// instruction. The program computes ternary layer slices: for each of NOUT output
// channels a dot product over NW compressed words (80 input channels, as in the
// gesture-recognition layers) is started with dotsp.t, continued with sdotsp.t
// and finished with smlsdotsp.t on NN-RF operands, then thresholded and packed by
// thrc; every five outputs the compressed byte is checked. Then max.t / min.t
// pool the packed outputs and a non-xTern word is issued. Every write-back must
// arrive exactly one cycle after issue with the value of the independent
// reference model. Each mechanism (the six instructions, the MADD/MAC switch,
// NN-RF operand selection, the thrc group wrap, rejection of foreign words,
// back-to-back issue) is counted and must occur at least once.
module tb_xtern_unit;
  import xtern_pkg::*;
  import tb_tern_ref_pkg::*;

  localparam int NW   = 4;    // words per input pixel (80 channels)
  localparam int NOUT = 20;   // output channels, 4 compressed bytes

  logic        clk = 1'b0, rst_n = 1'b0;
  logic        valid;
  logic [31:0] instr, rs1, rs2, rd, nna, nnb;
  logic        accepted, wb_valid;
  logic [4:0]  nnrf_imm, wb_addr;
  logic [31:0] wb_data;

  xtern_unit dut (
    .clk_i(clk), .rst_ni(rst_n), .valid_i(valid), .instr_i(instr),
    .rs1_i(rs1), .rs2_i(rs2), .rd_i(rd), .nnrf_a_i(nna), .nnrf_b_i(nnb),
    .accepted_o(accepted), .nnrf_imm_o(nnrf_imm),
    .wb_valid_o(wb_valid), .wb_addr_o(wb_addr), .wb_data_o(wb_data)
  );

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_op[7];
  int n_wrap = 0, n_foreign = 0, n_b2b = 0, n_nnrf = 0;
  int cycle = 0;
  always @(posedge clk) cycle++;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [31:0] gprf[32];

  // What the previous cycle issued and what must come back.
  logic        pend = 1'b0;
  logic [4:0]  pend_rd;
  logic [31:0] pend_val;
  int          pend_cycle;

  function automatic logic [31:0] enc(xt_op_e op, logic [4:0] d, logic [4:0] s1, logic [4:0] s2);
    case (op)
      XT_SMLSDOTSP: return {7'b1111100, s2, s1, 3'b100, d, 7'b1110111};
      XT_SDOTSP:    return {7'b1011101, s2, s1, 3'b100, d, 7'b1010111};
      XT_DOTSP:     return {7'b1001101, s2, s1, 3'b100, d, 7'b1010111};
      XT_MIN:       return {7'b0010001, s2, s1, 3'b100, d, 7'b1010111};
      XT_MAX:       return {7'b0011001, s2, s1, 3'b100, d, 7'b1010111};
      XT_THRC:      return {7'b0000100, s2, s1, 3'b110, d, 7'b0110011};
      default:      return {7'b0000000, s2, s1, 3'b000, d, 7'b0110011};  // add
    endcase
  endfunction

  // Checks the write-back of the previous issue (after the rising edge) and
  // updates the GP-RF model, so a dependent next instruction sees the new value.
  task automatic retire();
    checks++;
    if (pend) begin
      if (!(wb_valid && wb_addr == pend_rd && wb_data == pend_val && cycle == pend_cycle + 1)) begin
        failures++;
        if (failures < 10)
          $display("FAIL wb: valid=%b addr=%0d data=%h exp addr=%0d data=%h", wb_valid, wb_addr, wb_data, pend_rd, pend_val);
      end
      gprf[pend_rd] = wb_data;
    end else if (wb_valid) begin
      failures++;
      $display("FAIL unexpected write-back");
    end
  endtask

  // Issues one instruction in this cycle; exp is the reference result.
  task automatic issue(xt_op_e op, logic [4:0] d, logic [4:0] s1, logic [4:0] s2,
                       logic [31:0] exp, logic [31:0] a = '0, logic [31:0] b = '0);
    @(negedge clk);
    retire();
    if (pend) n_b2b++;
    valid = 1'b1;
    instr = enc(op, d, s1, s2);
    rs1 = gprf[s1]; rs2 = gprf[s2]; rd = gprf[d];
    nna = a; nnb = b;
    #1;
    checks++;
    if (accepted != (op != XT_NONE)) begin
      failures++;
      $display("FAIL accepted=%b for op %0d", accepted, op);
    end
    if (op == XT_SMLSDOTSP) begin
      checks++;
      if (nnrf_imm != s2) failures++;
      n_nnrf++;
    end
    if (op == XT_NONE) n_foreign++;
    n_op[int'(op)]++;
    pend = (op != XT_NONE);
    pend_rd = d; pend_val = exp; pend_cycle = cycle;
  endtask

  task automatic idle();
    @(negedge clk);
    retire();
    valid = 1'b0;
    pend = 1'b0;
  endtask

  initial begin
    trit20_t x[NW], w[NOUT][NW];
    int      lo[NOUT], hi[NOUT], acc[NOUT], yv[NOUT];
    logic [31:0] state, packed_out;
    logic [31:0] bytes_out[NOUT/5];
    valid = 1'b0; instr = '0; rs1 = '0; rs2 = '0; rd = '0; nna = '0; nnb = '0;
    foreach (gprf[i]) gprf[i] = 32'd0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;

    for (int k = 0; k < NW; k++) x[k] = rand_trits20();
    for (int o = 0; o < NOUT; o++) begin
      for (int k = 0; k < NW; k++) w[o][k] = rand_trits20();
      acc[o] = 0;
      for (int k = 0; k < NW; k++) acc[o] += ref_dot(x[k], w[o][k]);
      lo[o] = int'($urandom_range(20)) - 15;
      hi[o] = lo[o] + int'($urandom_range(20));
      yv[o] = ref_thresh(acc[o], lo[o], hi[o]);
    end

    // x0, x1 in r10, r11; weights streamed through r12, r13.
    gprf[10] = word_of(x[0]);
    gprf[11] = word_of(x[1]);
    gprf[20] = 32'd0;             // thrc status register
    state = 32'd0;
    for (int o = 0; o < NOUT; o++) begin
      int part;
      gprf[12] = word_of(w[o][0]);
      gprf[13] = word_of(w[o][1]);
      gprf[14] = {16'(lo[o]), 16'(hi[o])};
      part = ref_dot(x[0], w[o][0]);
      issue(XT_DOTSP, 5'd5, 5'd10, 5'd12, 32'(part));
      part += ref_dot(x[1], w[o][1]);
      issue(XT_SDOTSP, 5'd5, 5'd11, 5'd13, 32'(part));
      for (int k = 2; k < NW; k++) begin
        part += ref_dot(x[k], w[o][k]);
        issue(XT_SMLSDOTSP, 5'd5, 5'd0, 5'(k), 32'(part), word_of(x[k]), word_of(w[o][k]));
      end
      // thrc rd=r20, thresholds rs1=r14, pre-activation rs2=r5.
      begin
        trit5_t g;
        logic [31:0] exp;
        int c;
        c = o % 5;
        for (int i = 0; i < 5; i++) g[i] = (o - c + i <= o) ? yv[o - c + i] : 0;
        exp = {(c == 4) ? 3'd0 : 3'(c + 1), 3'b000, (c == 4) ? 10'd0 : pack5(g), 8'h00, ref_code(g)};
        issue(XT_THRC, 5'd20, 5'd14, 5'd5, exp);
        if (c == 4) begin
          n_wrap++;
          bytes_out[o / 5] = ref_code(g);
        end
      end
    end
    idle();
    // The status register now holds the last group; check the packed bytes.
    packed_out = {bytes_out[3], bytes_out[2], bytes_out[1], bytes_out[0]};
    checks++;
    if (gprf[20][7:0] != bytes_out[NOUT/5 - 1]) failures++;

    // Pooling over two pixels with max.t, and min.t.
    begin
      trit20_t p, q, mx, mn;
      p = trits_of(packed_out);
      q = rand_trits20();
      for (int j = 0; j < 20; j++) begin
        mx[j] = (p[j] > q[j]) ? p[j] : q[j];
        mn[j] = (p[j] < q[j]) ? p[j] : q[j];
      end
      gprf[21] = packed_out;
      gprf[22] = word_of(q);
      issue(XT_MAX, 5'd23, 5'd21, 5'd22, word_of(mx));
      issue(XT_MIN, 5'd24, 5'd21, 5'd22, word_of(mn));
      issue(XT_NONE, 5'd25, 5'd21, 5'd22, 32'd0);   // foreign word: no write-back
      issue(XT_MAX, 5'd26, 5'd23, 5'd24, word_of(mx)); // max(max, min) = max, uses forwarded r23/r24
    end
    idle();
    idle();

    for (int i = 1; i < 7; i++) begin
      checks++;
      if (n_op[i] == 0) begin failures++; $display("FAIL op %0d never issued", i); end
    end
    checks++; if (n_wrap == 0)    begin failures++; $display("FAIL no thrc wrap"); end
    checks++; if (n_foreign == 0) begin failures++; $display("FAIL no foreign word"); end
    checks++; if (n_b2b == 0)     begin failures++; $display("FAIL no back-to-back issue"); end
    checks++; if (n_nnrf == 0)    begin failures++; $display("FAIL no NN-RF operand use"); end
    $display("mechanisms: dotsp=%0d sdotsp=%0d smlsdotsp=%0d min=%0d max=%0d thrc=%0d wrap=%0d foreign=%0d b2b=%0d",
             n_op[1], n_op[2], n_op[3], n_op[4], n_op[5], n_op[6], n_wrap, n_foreign, n_b2b);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

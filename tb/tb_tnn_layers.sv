// tb_tnn_layers: runs complete ternary layers of the two evaluated networks on
// the xTern execution unit, one instruction at a time, the way a kernel would.
//
// Layer A is a C2D(S)-MP layer of the CIFAR-10 VGG-like network at its smallest
// ternary width, N_c = 40 (2 words per pixel): a 16x16 input, 3x3 convolution
// with zero "same" padding, thresholding to ternary with thrc, then 2x2/2 max
// pooling with max.t down to 8x8. Layer B is one dilated causal C1D layer of the
// DVS gesture network's TCN: 80 channels (4 words), kernel 2, dilation 2, 5 time
// steps. Every dot product is issued as dotsp.t followed by sdotsp.t /
// smlsdotsp.t, five output channels share one thrc status register, and the
// packed output words are compared with a reference that computes integer
// pre-activations, thresholds them and (layer A) pools them. Pooling before and
// after thresholding agree because the threshold function is monotonic.
// Weights, inputs and thresholds are random.
module tb_tnn_layers;
  import xtern_pkg::*;
  import tb_tern_ref_pkg::*;

  logic        clk = 1'b0, rst_n = 1'b0;
  logic        valid = 1'b0;
  logic [31:0] instr = '0, rs1 = '0, rs2 = '0, rd = '0, nna = '0, nnb = '0;
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

  int checks = 0, failures = 0, n_instr = 0;

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [31:0] enc(xt_op_e op);
    // Register fields are fixed (rd = x5, rs1 = x6, rs2 = x7); the testbench
    // supplies the operand values directly.
    case (op)
      XT_SMLSDOTSP: return {7'b1111100, 5'd0, 5'd0, 3'b100, 5'd5, 7'b1110111};
      XT_SDOTSP:    return {7'b1011101, 5'd7, 5'd6, 3'b100, 5'd5, 7'b1010111};
      XT_DOTSP:     return {7'b1001101, 5'd7, 5'd6, 3'b100, 5'd5, 7'b1010111};
      XT_MAX:       return {7'b0011001, 5'd7, 5'd6, 3'b100, 5'd5, 7'b1010111};
      default:      return {7'b0000100, 5'd7, 5'd6, 3'b110, 5'd5, 7'b0110011};
    endcase
  endfunction

  // Issues one instruction and returns its write-back one cycle later.
  task automatic exec(xt_op_e op, logic [31:0] a, logic [31:0] b, logic [31:0] c,
                      output logic [31:0] res);
    @(negedge clk);
    valid = 1'b1; instr = enc(op);
    rs1 = a; rs2 = b; rd = c; nna = a; nnb = b;
    @(negedge clk);
    valid = 1'b0;
    if (!wb_valid) begin failures++; $display("FAIL missing write-back"); end
    res = wb_data;
    n_instr++;
  endtask

  // Dot product of NW-word vectors; the first word uses dotsp.t, odd words
  // sdotsp.t and the rest smlsdotsp.t (operands through the NN-RF ports).
  task automatic dot(logic [31:0] xa[], logic [31:0] wa[], output logic [31:0] acc);
    for (int k = 0; k < xa.size(); k++) begin
      xt_op_e op;
      op = (k == 0) ? XT_DOTSP : (k % 2 == 1) ? XT_SDOTSP : XT_SMLSDOTSP;
      exec(op, xa[k], wa[k], acc, acc);
    end
  endtask

  // ---------------- Layer A: CIFAR-10 C2D(S)-MP, N_c = 40 ----------------
  localparam int HA = 16, CA = 40, WA = CA / 20;
  int          xin_a[HA][HA][CA];
  int          wt_a[CA][3][3][CA];
  int          lo_a[CA], hi_a[CA];
  int          pre_a[HA][HA][CA];
  logic [31:0] xw_a[HA][HA][WA];
  logic [31:0] ww_a[CA][3][3][WA];
  logic [31:0] out_a[HA][HA][WA];

  task automatic layer_a();
    for (int y = 0; y < HA; y++) for (int x = 0; x < HA; x++) begin
      for (int c = 0; c < CA; c++) xin_a[y][x][c] = rand_trit();
      for (int k = 0; k < WA; k++) begin
        trit20_t t;
        for (int j = 0; j < 20; j++) t[j] = xin_a[y][x][20*k + j];
        xw_a[y][x][k] = word_of(t);
      end
    end
    for (int o = 0; o < CA; o++) begin
      lo_a[o] = int'($urandom_range(10)) - 8;
      hi_a[o] = lo_a[o] + int'($urandom_range(10));
      for (int i = 0; i < 3; i++) for (int j = 0; j < 3; j++) begin
        for (int c = 0; c < CA; c++) wt_a[o][i][j][c] = rand_trit();
        for (int k = 0; k < WA; k++) begin
          trit20_t t;
          for (int q = 0; q < 20; q++) t[q] = wt_a[o][i][j][20*k + q];
          ww_a[o][i][j][k] = word_of(t);
        end
      end
    end
    // Reference pre-activations.
    for (int y = 0; y < HA; y++) for (int x = 0; x < HA; x++) for (int o = 0; o < CA; o++) begin
      int s;
      s = 0;
      for (int i = 0; i < 3; i++) for (int j = 0; j < 3; j++) begin
        int yy, xx;
        yy = y + i - 1; xx = x + j - 1;
        if (yy >= 0 && yy < HA && xx >= 0 && xx < HA)
          for (int c = 0; c < CA; c++) s += xin_a[yy][xx][c] * wt_a[o][i][j][c];
      end
      pre_a[y][x][o] = s;
    end
    // The kernel: im2col over the valid taps, dot product, thrc.
    for (int y = 0; y < HA; y++) for (int x = 0; x < HA; x++) begin
      logic [31:0] state;
      state = 32'd0;
      for (int o = 0; o < CA; o++) begin
        logic [31:0] xa[$], wa[$];
        logic [31:0] acc;
        for (int i = 0; i < 3; i++) for (int j = 0; j < 3; j++) begin
          int yy, xx;
          yy = y + i - 1; xx = x + j - 1;
          if (yy >= 0 && yy < HA && xx >= 0 && xx < HA)
            for (int k = 0; k < WA; k++) begin
              xa.push_back(xw_a[yy][xx][k]);
              wa.push_back(ww_a[o][i][j][k]);
            end
        end
        dot(xa, wa, acc);
        checks++;
        if (acc != 32'(pre_a[y][x][o])) begin
          failures++;
          if (failures < 10) $display("FAIL A pre (%0d,%0d,%0d) got %0d exp %0d", y, x, o, signed'(acc), pre_a[y][x][o]);
        end
        exec(XT_THRC, {16'(lo_a[o]), 16'(hi_a[o])}, acc, state, state);
        if (o % 5 == 4) out_a[y][x][o / 20][8*((o % 20) / 5) +: 8] = state[7:0];
      end
    end
    // 2x2/2 max pooling with max.t, checked against pooled pre-activations.
    for (int y = 0; y < HA / 2; y++) for (int x = 0; x < HA / 2; x++)
      for (int k = 0; k < WA; k++) begin
        logic [31:0] m, m2;
        trit20_t e;
        exec(XT_MAX, out_a[2*y][2*x][k], out_a[2*y][2*x+1][k], 32'd0, m);
        exec(XT_MAX, out_a[2*y+1][2*x][k], out_a[2*y+1][2*x+1][k], 32'd0, m2);
        exec(XT_MAX, m, m2, 32'd0, m);
        for (int j = 0; j < 20; j++) begin
          int o, p;
          o = 20*k + j;
          p = pre_a[2*y][2*x][o];
          if (pre_a[2*y][2*x+1][o] > p) p = pre_a[2*y][2*x+1][o];
          if (pre_a[2*y+1][2*x][o] > p) p = pre_a[2*y+1][2*x][o];
          if (pre_a[2*y+1][2*x+1][o] > p) p = pre_a[2*y+1][2*x+1][o];
          e[j] = ref_thresh(p, lo_a[o], hi_a[o]);
        end
        checks++;
        if (m != word_of(e)) begin
          failures++;
          if (failures < 10) $display("FAIL A pool (%0d,%0d,%0d) got %h exp %h", y, x, k, m, word_of(e));
        end
      end
  endtask

  // ---------------- Layer B: DVS TCN C1D(C), 80 ch, k=2, D=2 ----------------
  localparam int TB_ = 5, CB = 80, WB = CB / 20, DB = 2;
  int          xin_b[TB_][CB];
  int          wt_b[CB][2][CB];
  int          lo_b[CB], hi_b[CB];
  logic [31:0] xw_b[TB_][WB];
  logic [31:0] ww_b[CB][2][WB];

  task automatic layer_b();
    for (int t = 0; t < TB_; t++) begin
      for (int c = 0; c < CB; c++) xin_b[t][c] = rand_trit();
      for (int k = 0; k < WB; k++) begin
        trit20_t v;
        for (int j = 0; j < 20; j++) v[j] = xin_b[t][20*k + j];
        xw_b[t][k] = word_of(v);
      end
    end
    for (int o = 0; o < CB; o++) begin
      lo_b[o] = int'($urandom_range(10)) - 8;
      hi_b[o] = lo_b[o] + int'($urandom_range(10));
      for (int i = 0; i < 2; i++) begin
        for (int c = 0; c < CB; c++) wt_b[o][i][c] = rand_trit();
        for (int k = 0; k < WB; k++) begin
          trit20_t v;
          for (int j = 0; j < 20; j++) v[j] = wt_b[o][i][20*k + j];
          ww_b[o][i][k] = word_of(v);
        end
      end
    end
    for (int t = 0; t < TB_; t++) begin
      logic [31:0] state;
      logic [31:0] outw[WB];
      trit20_t     e[WB];
      state = 32'd0;
      for (int o = 0; o < CB; o++) begin
        logic [31:0] xa[$], wa[$];
        logic [31:0] acc;
        int s;
        s = 0;
        // Causal taps: t - D (zero before the start) and t.
        for (int i = 0; i < 2; i++) begin
          int tt;
          tt = t - DB * (1 - i);
          if (tt >= 0) begin
            for (int c = 0; c < CB; c++) s += xin_b[tt][c] * wt_b[o][i][c];
            for (int k = 0; k < WB; k++) begin
              xa.push_back(xw_b[tt][k]);
              wa.push_back(ww_b[o][i][k]);
            end
          end
        end
        dot(xa, wa, acc);
        exec(XT_THRC, {16'(lo_b[o]), 16'(hi_b[o])}, acc, state, state);
        if (o % 5 == 4) outw[o / 20][8*((o % 20) / 5) +: 8] = state[7:0];
        e[o / 20][o % 20] = ref_thresh(s, lo_b[o], hi_b[o]);
      end
      for (int k = 0; k < WB; k++) begin
        checks++;
        if (outw[k] != word_of(e[k])) begin
          failures++;
          if (failures < 10) $display("FAIL B t=%0d word %0d got %h exp %h", t, k, outw[k], word_of(e[k]));
        end
      end
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    layer_a();
    $display("layer A done after %0d instructions", n_instr);
    layer_b();
    $display("layer B done after %0d instructions", n_instr);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_xtern_thrc: checks threshold-and-compress over long random sequences.
// The status word is fed back as in a kernel (rd in, rd out); a reference keeps
// the trits of the current group as integers and predicts the full 32-bit status
// word after every call, including the clear after the fifth trit. Pre-activations
// are drawn around the thresholds so that all three outcomes and the equality
// boundaries occur.
module tb_xtern_thrc;
  import tb_tern_ref_pkg::*;

  logic [31:0] state, thresh, preact, state_n;
  int checks = 0, failures = 0;
  int wraps = 0;

  xtern_thrc dut (.state_i(state), .thresh_i(thresh), .preact_i(preact), .state_o(state_n));

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    trit5_t grp;
    int cnt;
    state = 32'd0;
    cnt = 0;
    grp = '{0, 0, 0, 0, 0};
    for (int n = 0; n < 5000; n++) begin
      int lo, hi, x, y, sel;
      logic [31:0] exp;
      logic [9:0] unc;
      lo = int'($urandom_range(2000)) - 1000;
      hi = lo + int'($urandom_range(500));
      sel = int'($urandom_range(5));
      case (sel)
        0: x = lo;
        1: x = hi;
        2: x = lo - 1;
        3: x = hi - 1;
        4: x = int'($urandom);
        default: x = lo + int'($urandom_range(600)) - 50;
      endcase
      thresh = {16'(lo), 16'(hi)};
      preact = 32'(x);
      #1;
      y = ref_thresh(x, lo, hi);
      grp[cnt] = y;
      unc = pack5(grp);
      exp[7:0] = ref_code(grp);
      exp[15:8] = 8'h00;
      exp[28:26] = 3'b000;
      if (cnt == 4) begin
        exp[25:16] = 10'd0;
        exp[31:29] = 3'd0;
        wraps++;
        grp = '{0, 0, 0, 0, 0};
        cnt = 0;
      end else begin
        exp[25:16] = unc;
        exp[31:29] = 3'(cnt + 1);
        cnt++;
      end
      checks++;
      if (state_n !== exp) begin
        failures++;
        if (failures < 10) $display("FAIL n=%0d state=%h x=%0d lo=%0d hi=%0d got=%h exp=%h", n, state, x, lo, hi, state_n, exp);
      end
      state = state_n;
      #1;
    end
    checks++;
    if (wraps != 1000) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_xtern_cmp: checks min.t / max.t on random compressed words; the result is
// decoded with the reference decoder and compared trit by trit with the
// element-wise minimum or maximum, and its encoding with the reference encoder.
module tb_xtern_cmp;
  import tb_tern_ref_pkg::*;

  logic [31:0] a, b, r;
  logic        mx;
  int checks = 0, failures = 0;

  xtern_cmp dut (.op_a_i(a), .op_b_i(b), .max_i(mx), .result_o(r));

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 2000; n++) begin
      trit20_t ta, tb_, te;
      ta = rand_trits20(); tb_ = rand_trits20();
      mx = n[0];
      for (int j = 0; j < 20; j++)
        te[j] = mx ? ((ta[j] > tb_[j]) ? ta[j] : tb_[j]) : ((ta[j] < tb_[j]) ? ta[j] : tb_[j]);
      a = word_of(ta); b = word_of(tb_);
      #1;
      checks++;
      if (r !== word_of(te)) begin
        failures++;
        if (failures < 10) $display("FAIL max=%b a=%h b=%h got=%h exp=%h", mx, a, b, r, word_of(te));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_tern_compr_array: random groups of 20 trits are packed and the word is
// compared with the reference encoder, byte by byte.
module tb_tern_compr_array;
  import tb_tern_ref_pkg::*;

  logic [39:0] trits;
  logic [31:0] word;
  int checks = 0, failures = 0;

  tern_compr_array dut (.trits_i(trits), .word_o(word));

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 1000; n++) begin
      trit20_t t;
      logic [31:0] exp;
      t = rand_trits20();
      for (int j = 0; j < 20; j++) trits[2*j +: 2] = t2b(t[j]);
      exp = word_of(t);
      #1;
      for (int k = 0; k < 4; k++) begin
        checks++;
        if (word[8*k +: 8] !== exp[8*k +: 8]) begin
          failures++;
          if (failures < 10) $display("FAIL byte %0d got %h exp %h", k, word[8*k +: 8], exp[8*k +: 8]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_tern_decompr_array: random 20-trit words are built from the reference
// encoder and the 40-bit decompressed output is compared trit by trit.
module tb_tern_decompr_array;
  import tb_tern_ref_pkg::*;

  logic [31:0] word;
  logic [39:0] trits;
  int checks = 0, failures = 0;

  tern_decompr_array dut (.word_i(word), .trits_o(trits));

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 500; n++) begin
      trit20_t t;
      t = rand_trits20();
      word = word_of(t);
      #1;
      for (int j = 0; j < 20; j++) begin
        checks++;
        if (b2t(trits[2*j +: 2]) != t[j]) begin
          failures++;
          if (failures < 10) $display("FAIL word=%h trit %0d got %0d exp %0d", word, j, b2t(trits[2*j +: 2]), t[j]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

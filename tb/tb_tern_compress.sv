// tb_tern_compress: exhaustive check of the byte compressor.
// All 1024 10-bit inputs are applied (the unused trit pattern 2'b10 counts as
// zero) and the code is compared with the balanced-ternary reference.
module tb_tern_compress;
  import tb_tern_ref_pkg::*;

  logic [9:0] trits;
  logic [7:0] code;
  int checks = 0, failures = 0;

  tern_compress dut (.trits_i(trits), .code_o(code));

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < 1024; v++) begin
      trit5_t t;
      trits = 10'(v);
      for (int i = 0; i < 5; i++) t[i] = b2t(trits[2*i +: 2]);
      #1;
      checks++;
      if (code !== ref_code(t)) begin
        failures++;
        if (failures < 10) $display("FAIL in=%b code=%0d exp=%0d", trits, code, ref_code(t));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

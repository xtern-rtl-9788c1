// tb_tern_decompress: exhaustive check of the byte decompressor.
// Every byte 0..255 is decoded and compared with the reference found by search
// over all 243 trit vectors (bytes 243..255 must give zeros); the round trip
// compress(decompress(c)) = c is checked for all valid codes as well.
module tb_tern_decompress;
  import tb_tern_ref_pkg::*;

  logic [7:0] code, code2;
  logic [9:0] trits;
  int checks = 0, failures = 0;

  tern_decompress dut (.code_i(code), .trits_o(trits));
  tern_compress   back (.trits_i(trits), .code_o(code2));

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int c = 0; c < 256; c++) begin
      code = 8'(c);
      #1;
      checks++;
      if (trits !== pack5(ref_decode(code))) begin
        failures++;
        if (failures < 10) $display("FAIL code=%0d trits=%b exp=%b", c, trits, pack5(ref_decode(code)));
      end
      if (c < 243) begin
        checks++;
        if (code2 !== code) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

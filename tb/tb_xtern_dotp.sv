// tb_xtern_dotp: checks the compressed multiply-add unit.
// Random compressed operands in both modes (MADD: 0 + dot, MAC: acc + dot) with
// random, large and negative accumulators, plus the extreme cases +20 and -20.
module tb_xtern_dotp;
  import tb_tern_ref_pkg::*;

  logic [31:0] a, b, c, r;
  logic        acc;
  int checks = 0, failures = 0;

  xtern_dotp dut (.op_a_i(a), .op_b_i(b), .op_c_i(c), .accumulate_i(acc), .result_o(r));

  task automatic check(trit20_t ta, trit20_t tb_, logic [31:0] cv, logic accv);
    logic [31:0] exp;
    a = word_of(ta); b = word_of(tb_); c = cv; acc = accv;
    #1;
    exp = (accv ? cv : 32'd0) + 32'(ref_dot(ta, tb_));
    checks++;
    if (r !== exp) begin
      failures++;
      if (failures < 10) $display("FAIL a=%h b=%h c=%h acc=%b got=%h exp=%h", a, b, c, acc, r, exp);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    trit20_t p, m;
    for (int j = 0; j < 20; j++) begin p[j] = 1; m[j] = -1; end
    check(p, p, 32'd5, 1'b0);
    check(p, m, 32'd0, 1'b1);
    check(m, m, 32'hFFFF_FFF0, 1'b1);
    for (int n = 0; n < 2000; n++)
      check(rand_trits20(), rand_trits20(), (n % 3 == 0) ? $urandom : 32'($urandom_range(2000)) - 32'd1000, n[0]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

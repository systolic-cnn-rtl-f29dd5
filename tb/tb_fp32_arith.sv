// tb_fp32_arith: checks fp32_mul, fp32_add and fp32_max against the
// double-precision reference in fp_ref_pkg on random operands (including
// cancellation-prone pairs with equal exponents) and a few special values.
module tb_fp32_arith;
  import fp_ref_pkg::*;
  logic [31:0] a, b, ym, ya, yx;
  int checks = 0, failures = 0;

  fp32_mul u_mul (.a(a), .b(b), .y(ym));
  fp32_add u_add (.a(a), .b(b), .y(ya));
  fp32_max u_max (.a(a), .b(b), .y(yx));

  task automatic check(string what, logic [31:0] got, logic [31:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s a=%h b=%h got=%h exp=%h", what, a, b, got, exp);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 20000; i++) begin
      a = frand(20);
      b = (i % 4 == 0) ? {~a[31] ^ 1'($urandom), a[30:23], 23'($urandom)} : frand(20);
      if (i % 7 == 0) b = {b[31], a[30:23] - 8'($urandom_range(0, 30)), b[22:0]};
      #1;
      check("mul", ym, fmul(a, b));
      check("add", ya, fadd(a, b));
      check("max", yx, fmax(a, b));
    end
    // special values
    a = 32'h3F800000; b = 32'hBF800000; #1; check("add 1-1", ya, 32'h0);
    a = 32'h00000000; b = 32'h40400000; #1; check("add 0+3", ya, 32'h40400000);
    check("mul 0*3", ym, 32'h0);
    a = 32'h7F000000; b = 32'h7F000000; #1; check("mul ovf", ym, 32'h7F800000);
    check("add ovf", ya, 32'h7F800000);
    a = 32'h7F800000; b = 32'h00000000; #1; check("mul inf*0", ym, 32'h7FC00000);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

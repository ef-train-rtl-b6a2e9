// tb_fp32_alu -- checks every operation of fp32_alu against a reference
// computed in double precision and rounded to single. Multiply, divide and
// square root must be bit exact; add must be within one unit in the last
// place of the exactly rounded sum (double rounding can differ by one ulp).
module tb_fp32_alu;
  import fp32_pkg::*;
  import tb_fp_util::*;

  fp_op_e op;
  fp32_t  a, b, y;
  int     checks = 0, failures = 0;

  fp32_alu dut (.op(op), .a(a), .b(b), .y(y));

  task automatic check_bits(input string what, input fp32_t got, input fp32_t exp, input int ulp);
    int diff;
    checks++;
    diff = int'(got) - int'(exp);
    if (diff < 0) diff = -diff;
    if (got[31] != exp[31] && !(fp_is_zero(got) && fp_is_zero(exp))) diff = 1 << 30;
    if (fp_is_zero(got) && fp_is_zero(exp)) diff = 0;
    if (diff > ulp) begin
      failures++;
      if (failures < 10)
        $display("FAIL %s a=%h b=%h got=%h exp=%h", what, a, b, got, exp);
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 3000; i++) begin
      a = rand_f(20);
      b = rand_f(20);
      if (i % 7 == 0) b = {~a[31], a[30:8], 8'($urandom)};   // near cancellation
      op = FP_MUL; #1; check_bits("mul", y, r2f(f2r(a) * f2r(b)), 0);
      op = FP_ADD; #1; check_bits("add", y, r2f(f2r(a) + f2r(b)), 1);
      op = FP_SUB; #1; check_bits("sub", y, r2f(f2r(a) - f2r(b)), 1);
      op = FP_DIV; #1; check_bits("div", y, r2f(f2r(a) / f2r(b)), 1);
      a[31] = 1'b0;
      op = FP_SQRT; #1; check_bits("sqrt", y, r2f($sqrt(f2r(a))), 1);
    end
    // exact small cases
    a = 32'h3fc00000; b = 32'h40200000;   // 1.5, 2.5
    op = FP_ADD; #1; check_bits("1.5+2.5", y, 32'h40800000, 0);
    op = FP_MUL; #1; check_bits("1.5*2.5", y, 32'h40700000, 0);
    a = 32'h40800000; op = FP_SQRT; #1; check_bits("sqrt4", y, 32'h40000000, 0);
    a = 32'h3f800000; b = 32'h3f800000; op = FP_SUB; #1; check_bits("1-1", y, 32'h0, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

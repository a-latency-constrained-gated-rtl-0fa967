// tb_fp32_add: random and directed checks of the fp32 adder against a
// double-precision reference rounded once to fp32. Operand exponents differ
// by at most 28 in the random part, so the double sum is exact and the
// reference is correctly rounded.
module tb_fp32_add;
  import gru_pkg::*;
  import fp_ref_pkg::*;
  fp32_t a, b, s;
  int checks = 0, failures = 0;
  fp32_add dut (.a(a), .b(b), .s(s));

  task automatic check(fp32_t x, fp32_t y, fp32_t exp_s);
    a = x; b = y;
    #1;
    checks++;
    if (s !== exp_s) begin
      failures++;
      if (failures < 10) $display("MISMATCH %h + %h = %h expected %h", x, y, s, exp_s);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    fp32_t x, y;
    check(32'h3f800000, 32'h3f800000, 32'h40000000);   // 1+1
    check(32'h3f800000, 32'hbf800000, 32'h00000000);   // 1-1
    check(32'h00000000, 32'hc0400000, 32'hc0400000);   // 0+(-3)
    check(32'h4b800000, 32'h3f800000, 32'h4b800000);   // 2^24+1 tie to even
    check(32'h4b800000, 32'h40400000, 32'h4b800002);   // 2^24+3 tie rounds up
    check(32'h7f7fffff, 32'h7f7fffff, 32'h7f800000);   // overflow
    check(32'h3f800000, 32'h33800000, 32'h3f800000);   // 1 + 2^-24 tie to even
    for (int i = 0; i < 30000; i++) begin
      x = rand_f(30);
      y = rand_f(30);
      if ((int'(x[30:23]) - int'(y[30:23])) > 28 || (int'(y[30:23]) - int'(x[30:23])) > 28) continue;
      if (i % 7 == 0) y[30:23] = x[30:23];          // cancellation cases
      check(x, y, fadd(x, y));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

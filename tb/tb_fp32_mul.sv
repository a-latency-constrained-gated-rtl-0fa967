// tb_fp32_mul: random and directed checks of the fp32 multiplier against a
// double-precision reference rounded once to fp32 (exact for products).
module tb_fp32_mul;
  import gru_pkg::*;
  import fp_ref_pkg::*;
  fp32_t a, b, p;
  int checks = 0, failures = 0;
  fp32_mul dut (.a(a), .b(b), .p(p));

  task automatic check(fp32_t x, fp32_t y);
    fp32_t exp_p;
    a = x; b = y;
    #1;
    exp_p = fmul(x, y);
    checks++;
    if (p !== exp_p) begin
      failures++;
      if (failures < 10) $display("MISMATCH %h * %h = %h expected %h", x, y, p, exp_p);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    check(32'h3f800000, 32'h40000000);      // 1*2
    check(32'hbfc00000, 32'h3fc00000);      // -1.5*1.5
    check(32'h00000000, 32'h7f000000);      // 0*big
    check(32'h7f000000, 32'h7f000000);      // overflow -> inf
    check(32'h00800000, 32'h00800000);      // underflow -> 0
    for (int i = 0; i < 20000; i++) check(rand_f(40), rand_f(40));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

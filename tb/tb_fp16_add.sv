// tb_fp16_add: checks the FP16 adder/subtractor against a real-number
// reference: directed cases (cancellation, ties, carry-out, overflow, large
// exponent gaps) and random operands with near and far exponents, for both
// addition and subtraction.
module tb_fp16_add;
  import fp16_ref_pkg::*;

  logic [15:0] a, b, y;
  logic        sub;
  int checks = 0, failures = 0;

  fp16_add dut (.a(a), .b(b), .sub(sub), .y(y));

  task automatic check(logic [15:0] x, logic [15:0] z, logic s);
    logic [15:0] exp;
    real r;
    a = x; b = z; sub = s;
    #1;
    r = s ? fp16_to_real(x) - fp16_to_real(z) : fp16_to_real(x) + fp16_to_real(z);
    exp = real_to_fp16(r);
    checks++;
    if (y !== exp && !(exp[14:0] == 0 && y[14:0] == 0)) begin
      failures++;
      if (failures < 10) $display("add %h %s %h = %h, expected %h", x, s ? "-" : "+", z, y, exp);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    check(16'h3C00, 16'h3C00, 0);   // 1+1
    check(16'h3C00, 16'h3C00, 1);   // 1-1
    check(16'h4200, 16'h3C00, 1);   // 3-1
    check(16'h3C00, 16'h1400, 0);   // 1 + tiny
    check(16'h3C00, 16'h1400, 1);   // 1 - tiny
    check(16'h3C00, 16'h1000, 0);   // tie to even
    check(16'h3C01, 16'h1000, 0);   // tie, odd
    check(16'h7BFF, 16'h7BFF, 0);   // overflow
    check(16'h0400, 16'h0401, 1);   // underflow
    check(16'h3BFF, 16'h3C00, 1);
    check(16'h0000, 16'hC500, 0);
    check(16'h6400, 16'h0401, 1);   // far
    for (int i = 0; i < 20000; i++) check(rand_fp16(1, 30), rand_fp16(1, 30), 1'($urandom));
    for (int i = 0; i < 20000; i++) begin
      logic [15:0] x;
      x = rand_fp16(5, 25);
      check(x, {1'($urandom), 5'(int'(x[14:10]) - 2 + int'($urandom_range(4))), 10'($urandom)}, 1'($urandom));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

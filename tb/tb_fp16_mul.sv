// tb_fp16_mul: checks the FP16 multiplier against a real-number reference on
// directed corner cases (exact products, rounding ties, overflow, underflow,
// zero and infinity) and on random normal operands.
module tb_fp16_mul;
  import fp16_ref_pkg::*;

  logic [15:0] a, b, y;
  int checks = 0, failures = 0;

  fp16_mul dut (.a(a), .b(b), .y(y));

  task automatic check(logic [15:0] x, logic [15:0] z);
    logic [15:0] exp;
    a = x; b = z;
    #1;
    if (x[14:10] == 5'h1F || z[14:10] == 5'h1F) exp = {x[15] ^ z[15], 15'h7C00};
    else exp = real_to_fp16(fp16_to_real(x) * fp16_to_real(z));
    if (exp[14:0] == 15'd0) exp = {x[15] ^ z[15], 15'd0};
    checks++;
    if (y !== exp) begin
      failures++;
      if (failures < 10) $display("mul %h * %h = %h, expected %h", x, z, y, exp);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    check(16'h3C00, 16'h3C00);   // 1*1
    check(16'h4000, 16'h4200);   // 2*3
    check(16'hC000, 16'h3800);   // -2*0.5
    check(16'h3C01, 16'h3C01);   // rounding
    check(16'h3C03, 16'h3BFF);
    check(16'h7BFF, 16'h4000);   // overflow
    check(16'h0400, 16'h0400);   // underflow
    check(16'h0000, 16'h4500);   // zero
    check(16'h7C00, 16'h4000);   // inf
    check(16'h5BFF, 16'h5BFF);
    for (int i = 0; i < 20000; i++) check(rand_fp16(1, 30), rand_fp16(1, 30));
    for (int i = 0; i < 5000; i++)  check(rand_fp16(10, 20), rand_fp16(10, 20));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_fp16_mul: self-checking test of the FP16 multiplier against exact real
// products rounded by the reference model (directed corners plus 20000 random
// pairs with exponents kept out of the subnormal range).
module tb_fp16_mul;
  import tb_fp16_pkg::*;
  logic [15:0] a, b, y;
  int checks = 0, failures = 0;

  fp16_mul dut (.a(a), .b(b), .y(y));

  task automatic check(logic [15:0] x, logic [15:0] z);
    logic [15:0] exp_y;
    a = x; b = z;
    #1;
    exp_y = to_fp16(to_real(x) * to_real(z));
    checks++;
    if (y !== exp_y) begin
      failures++;
      if (failures < 10) $display("FAIL %h * %h = %h expected %h", x, z, y, exp_y);
    end
  endtask

  initial begin
    #100000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    check(16'h3C00, 16'h3C00);
    check(16'h3C00, 16'h0000);
    check(16'hC000, 16'h3800);   // -2 * 0.5
    check(16'h7800, 16'h7800);   // overflow
    check(16'h3E00, 16'h3E00);   // 1.5 * 1.5
    for (int i = 0; i < 20000; i++) check(rnd_fp16(8, 22), rnd_fp16(8, 22));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

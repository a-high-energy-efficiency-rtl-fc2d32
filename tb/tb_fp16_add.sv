// tb_fp16_add: self-checking test of the FP16 adder against exact real
// arithmetic rounded by the reference model (directed corners plus 20000
// random pairs, including cancellation and far-apart exponents).
module tb_fp16_add;
  import tb_fp16_pkg::*;
  logic [15:0] a, b, y;
  int checks = 0, failures = 0;

  fp16_add dut (.a(a), .b(b), .y(y));

  task automatic check(logic [15:0] x, logic [15:0] z);
    logic [15:0] exp_y;
    a = x; b = z;
    #1;
    exp_y = to_fp16(to_real(x) + to_real(z));
    checks++;
    if (y !== exp_y) begin
      failures++;
      if (failures < 10) $display("FAIL %h + %h = %h expected %h", x, z, y, exp_y);
    end
  endtask

  initial begin
    #100000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    check(16'h3C00, 16'h3C00);   // 1 + 1
    check(16'h3C00, 16'hBC00);   // 1 - 1
    check(16'h3C00, 16'h0000);
    check(16'h4000, 16'hBC00);   // 2 - 1
    check(16'h3C01, 16'hBC00);   // tiny difference
    check(16'h7BFF, 16'h7BFF);   // overflow
    check(16'h3C00, 16'h1000);   // far apart
    check(16'h3C00, 16'h9000);
    for (int i = 0; i < 20000; i++) begin
      logic [15:0] x, z;
      x = rnd_fp16(6, 24);
      if (i % 3 == 0) begin
        z = x ^ 16'h8000;
        z[3:0] = 4'($urandom);                 // near cancellation
      end else begin
        z = rnd_fp16(6, 24);
      end
      check(x, z);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

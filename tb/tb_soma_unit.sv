// tb_soma_unit: runs random LIF trajectories through one Soma lane and checks
// u_t = (s_{t-1} ? 0 : alpha*u_{t-1}) + Conv_FP and s_t = (u_t >= th_f)
// against a reference computed with independent FP16 rounding.
module tb_soma_unit;
  import snn_pkg::*;
  import tb_fp16_pkg::*;
  fp16_t conv, u_prev, alpha, th, u;
  logic s_prev, s;
  int checks = 0, failures = 0, fired = 0;

  soma_unit dut (.*);

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    alpha = 16'h3A00;  // 0.75
    th    = 16'h3C00;  // 1.0
    for (int traj = 0; traj < 200; traj++) begin
      fp16_t up; logic sp;
      up = 16'h0; sp = 0;
      for (int t = 0; t < 8; t++) begin
        fp16_t eu; logic es;
        conv = rnd_fp16(11, 15);
        if ($urandom % 4 == 0) conv = conv | 16'h8000;
        u_prev = up; s_prev = sp;
        #1;
        eu = to_fp16((sp ? 0.0 : to_real(to_fp16(to_real(alpha) * to_real(up)))) + to_real(conv));
        es = to_real(eu) >= to_real(th);
        checks++;
        if (u !== eu || s !== es) begin
          failures++;
          if (failures < 10) $display("FAIL t=%0d u=%h exp %h s=%b exp %b", t, u, eu, s, es);
        end
        fired += es;
        up = eu; sp = es;
      end
    end
    checks++;
    if (fired == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

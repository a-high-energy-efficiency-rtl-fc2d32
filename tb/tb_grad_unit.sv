// tb_grad_unit: checks one Grad lane against the backward LIF equations,
// evaluated with independent FP16 rounding at each operation:
// fire' window (inclusive bounds, height beta), grad_s and du_t, with and
// without the pooling selector and the spike reset path.
module tb_grad_unit;
  import snn_pkg::*;
  import tb_fp16_pkg::*;
  fp16_t conv, u, du_next, alpha, beta, th_l, th_r, du;
  logic s, pool_sel, fire_d;
  int checks = 0, failures = 0, live = 0;

  grad_unit dut (.*);

  function automatic fp16_t rm(fp16_t a, fp16_t b); return to_fp16(to_real(a) * to_real(b)); endfunction
  function automatic fp16_t ra(fp16_t a, fp16_t b); return to_fp16(to_real(a) + to_real(b)); endfunction

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    alpha = 16'h3A00; th_l = 16'h3800; th_r = 16'h3E00;
    for (int n = 0; n < 4000; n++) begin
      fp16_t a_du, ds, fd, e;
      logic ef;
      beta = (n % 2) ? 16'h3C00 : 16'h3800;
      conv = rnd_fp16(10, 16); u = rnd_fp16(12, 16);
      if (n % 50 == 0) u = th_l;
      if (n % 50 == 1) u = th_r;
      du_next = (n % 9 == 0) ? 16'h0 : rnd_fp16(10, 16);
      s = 1'($urandom); pool_sel = ($urandom % 4 != 0);
      #1;
      ef   = (to_real(u) >= to_real(th_l)) && (to_real(u) <= to_real(th_r));
      fd   = ef ? beta : 16'h0;
      a_du = rm(alpha, du_next);
      ds   = ra(pool_sel ? conv : 16'h0, rm(a_du, u) ^ 16'h8000);
      e    = ra(s ? 16'h0 : a_du, rm(ds, fd));
      checks++;
      if (du !== e || fire_d !== ef) begin
        failures++;
        if (failures < 10) $display("FAIL du=%h exp %h fire=%b exp %b", du, e, fire_d, ef);
      end
      live += ef;
    end
    checks++;
    if (live == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

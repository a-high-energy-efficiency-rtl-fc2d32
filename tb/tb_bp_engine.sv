// tb_bp_engine: checks the BP engine on small layers. BP_CONV is run with
// zero insertion 1 (4x4 map, pad 1) and 2 (3x3 map, pad 2) on random
// gradients with zero lanes and random u^l, so whole positions are skipped by
// fire' (gating1) and single lanes by zero gradients (gating2); Conv_BP is
// compared with a reference transposed convolution that uses the same tile
// accumulation order and independent FP16 rounding. BP_GRAD is then run on
// the result and, with pooling, on a Conv_BP map written directly, and grad_u
// is compared with the backward LIF equations evaluated from t=T-1 down.
module tb_bp_engine;
  import snn_pkg::*;
  import tb_fp16_pkg::*;
  localparam int T = 2;
  logic clk = 0, rst_n = 0;
  core_cfg_t cfg;
  logic start, busy, done, xen, xwe, ev_gate1, ev_zero_du;
  instr_t instr;
  logic [3:0] xbuf;
  logic [19:0] xaddr, dui_ra, u_ra, s_ra;
  logic [WORDW-1:0] xwd, xrd;
  vec_t dui_rd, u_rd;
  spk_t s_rd;
  vec_t dui_mem [256];
  vec_t u_mem [256];
  spk_t s_mem [256];
  int checks = 0, failures = 0, n_gate1 = 0, n_zero = 0;

  bp_engine #(.WR_WORDS(256), .CONV_WORDS(256), .DU_OUT_WORDS(256)) dut (.*);
  always #5 clk = ~clk;
  always_ff @(posedge clk) begin
    dui_rd <= dui_mem[dui_ra[7:0]]; u_rd <= u_mem[u_ra[7:0]]; s_rd <= s_mem[s_ra[7:0]];
    if (ev_gate1) n_gate1++;
    if (ev_zero_du) n_zero++;
  end

  fp16_t wref [16][16][3][3];     // w'[c][m][r][s]
  fp16_t cref [T][16][8][8];
  fp16_t dref [T][16][8][8];

  task automatic xw(int b, int a, logic [WORDW-1:0] d);
    @(negedge clk); xen = 1; xwe = 1; xbuf = 4'(b); xaddr = 20'(a); xwd = d;
    @(negedge clk); xen = 0; xwe = 0;
  endtask
  task automatic xr(int b, int a, output logic [WORDW-1:0] d);
    @(negedge clk); xen = 1; xwe = 0; xbuf = 4'(b); xaddr = 20'(a);
    @(negedge clk); xen = 0; d = xrd;
  endtask
  task automatic run(instr_t i);
    int n; n = 0;
    @(negedge clk); instr = i; start = 1;
    @(negedge clk); start = 0;
    while (!done && n < 20000) begin @(negedge clk); n++; end
  endtask
  task automatic chk(logic ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask
  function automatic fp16_t radd(fp16_t a, fp16_t b); return to_fp16(to_real(a) + to_real(b)); endfunction
  function automatic fp16_t rmul(fp16_t a, fp16_t b); return to_fp16(to_real(a) * to_real(b)); endfunction
  function automatic logic win(fp16_t u);
    return to_real(u) >= to_real(cfg.th_l) && to_real(u) <= to_real(cfg.th_r);
  endfunction
  function automatic fp16_t tree(int c, int r, int s_, vec_t d);
    fp16_t v [16];
    for (int m = 0; m < 16; m++) v[m] = rmul(d[m], wref[c][m][r][s_]);
    for (int w = 8; w >= 1; w = w / 2) for (int k = 0; k < w; k++) v[k] = radd(v[2*k], v[2*k+1]);
    return v[0];
  endfunction

  // grad reference for an h x h map; conv read at pooled position if pool
  task automatic ref_grad(int h, logic pool);
    for (int t = T - 1; t >= 0; t--) for (int c = 0; c < 16; c++) for (int y = 0; y < h; y++) for (int x = 0; x < h; x++) begin
      fp16_t un, dn, a_du, ds, cv, fd; logic sv; int a;
      a = (t * h + y) * h + x;
      un = u_mem[a][c]; sv = s_mem[a][c];
      dn = (t == T - 1) ? 16'h0 : dref[t+1][c][y][x];
      cv = pool ? cref[t][c][y/2][x/2] : cref[t][c][y][x];
      if (pool && !sv) cv = 16'h0;
      fd = win(un) ? cfg.beta : 16'h0;
      a_du = rmul(cfg.alpha, dn);
      ds = radd(cv, rmul(a_du, un) ^ 16'h8000);
      dref[t][c][y][x] = radd(sv ? 16'h0 : a_du, rmul(ds, fd));
    end
  endtask

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [WORDW-1:0] d;
    cfg = CFG_RESET; cfg.t_size = 8'(T); cfg.alpha = 16'h3A00; cfg.th_l = 16'h3800; cfg.th_r = 16'h3E00; cfg.beta = 16'h3C00;
    start = 0; instr = '0; xen = 0; xwe = 0; xbuf = 0; xaddr = 0; xwd = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int r = 0; r < 3; r++) for (int s_ = 0; s_ < 3; s_++) for (int c = 0; c < 16; c++) begin
      d = '0;
      for (int m = 0; m < 16; m++) begin wref[c][m][r][s_] = rnd_fp16(11, 15); d[m*16 +: 16] = wref[c][m][r][s_]; end
      xw(1, (r * 3 + s_) * 16 + c, d);
    end
    for (int pass = 0; pass < 2; pass++) begin
      int dh, ins, pd, oh;
      dh = pass ? 3 : 4; ins = pass ? 2 : 1; pd = pass ? 2 : 1;
      oh = (dh - 1) * ins + 1 + 2 * pd - 3 + 1;
      for (int a = 0; a < 256; a++) begin
        for (int i = 0; i < 16; i++) begin
          dui_mem[a][i] = ($urandom % 4 == 0) ? 16'h0 : rnd_fp16(11, 15);
          u_mem[a][i] = ($urandom % 2) ? rnd_fp16(14, 15) : rnd_fp16(8, 12);   // ~half inside [0.5, 1.5]
        end
        if (a % 5 == 0) for (int i = 0; i < 16; i++) u_mem[a][i] = 16'h3000;   // whole word outside the window
        s_mem[a] = spk_t'($urandom);
      end
      for (int t = 0; t < T; t++) for (int c = 0; c < 16; c++) for (int y = 0; y < oh; y++) for (int x = 0; x < oh; x++) begin
        vec_t dv; int a;
        a = (t * oh + y) * oh + x;
        for (int r = 0; r < 3; r++) for (int s_ = 0; s_ < 3; s_++) begin
          int iy, ix; fp16_t tr; logic live;
          iy = y + r - pd; ix = x + s_ - pd;
          if (iy < 0 || ix < 0 || iy > (dh - 1) * ins || ix > (dh - 1) * ins || iy % ins != 0 || ix % ins != 0) dv = '0;
          else dv = dui_mem[(t * dh + iy / ins) * dh + ix / ins];
          live = win(u_mem[a][c]);
          tr = tree(c, r, s_, dv);
          if (r == 0 && s_ == 0) cref[t][c][y][x] = live ? tr : 16'h0;
          else if (live) cref[t][c][y][x] = radd(tr, cref[t][c][y][x]);
        end
      end
      begin
        instr_t i; i = '0; i.op = BP_CONV;
        i.opnd[0] = dh; i.opnd[1] = dh; i.opnd[2] = 3; i.opnd[3] = pd; i.opnd[4] = ins; i.opnd[5] = 0;
        i.opnd[6] = 16; i.opnd[7] = 16; i.opnd[8] = 0; i.opnd[9] = 0;
        run(i);
      end
      for (int t = 0; t < T; t++) for (int y = 0; y < oh; y++) for (int x = 0; x < oh; x++) begin
        xr(2, (t * oh + y) * oh + x, d);
        for (int c = 0; c < 16; c++) chk(d[c*16 +: 16] === cref[t][c][y][x],
          $sformatf("conv p%0d t%0d c%0d y%0d x%0d got %h exp %h", pass, t, c, y, x, d[c*16 +: 16], cref[t][c][y][x]));
      end
      if (pass == 0) begin
        instr_t i; i = '0; i.op = BP_GRAD;
        i.opnd[0] = oh; i.opnd[1] = oh; i.opnd[2] = 16; i.opnd[3] = 0; i.opnd[4] = 0; i.opnd[5] = 0;
        run(i);
        ref_grad(oh, 0);
        for (int t = 0; t < T; t++) for (int y = 0; y < oh; y++) for (int x = 0; x < oh; x++) begin
          xr(3, (t * oh + y) * oh + x, d);
          for (int c = 0; c < 16; c++) chk(d[c*16 +: 16] === dref[t][c][y][x],
            $sformatf("grad t%0d c%0d got %h exp %h", t, c, d[c*16 +: 16], dref[t][c][y][x]));
        end
      end
    end
    // BP_GRAD with pooling: Conv_BP at 2x2 written directly, u/s at 4x4
    for (int t = 0; t < T; t++) for (int y = 0; y < 2; y++) for (int x = 0; x < 2; x++) begin
      for (int c = 0; c < 16; c++) begin cref[t][c][y][x] = rnd_fp16(11, 15); d[c*16 +: 16] = cref[t][c][y][x]; end
      xw(2, (t * 2 + y) * 2 + x, d);
    end
    begin
      instr_t i; i = '0; i.op = BP_GRAD;
      i.opnd[0] = 4; i.opnd[1] = 4; i.opnd[2] = 16; i.opnd[3] = 0; i.opnd[4] = 1; i.opnd[5] = 0;
      run(i);
      ref_grad(4, 1);
    end
    for (int t = 0; t < T; t++) for (int y = 0; y < 4; y++) for (int x = 0; x < 4; x++) begin
      xr(3, (t * 4 + y) * 4 + x, d);
      for (int c = 0; c < 16; c++) chk(d[c*16 +: 16] === dref[t][c][y][x],
        $sformatf("pooled grad t%0d c%0d got %h exp %h", t, c, d[c*16 +: 16], dref[t][c][y][x]));
    end
    chk(n_gate1 > 0, "gating1 never happened");
    chk(n_zero > 0, "zero gradient lane never seen");
    $display("gate1=%0d zero_du=%0d", n_gate1, n_zero);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

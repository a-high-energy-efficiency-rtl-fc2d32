// tb_fp_engine: end-to-end test of the FP engine on a small convolutional
// layer. Random input spikes (with whole-zero vectors, so the gating2 skip
// happens) and random weights are written through the Dispatch Unit port;
// FP_CONV (two input blocks, 3x3 kernel, padding 1, and a stride-2 run) and
// FP_SOMA (with and without 2x2 pooling) are executed, and Conv_FP, u, Spike
// and s^l are read back and compared with a reference that follows the
// convolution and LIF equations using independent FP16 rounding, in the
// accumulation order of the weight-stationary loop. The FP_CONV cycle count
// is checked against 16 load cycles per tile plus one cycle per position.
module tb_fp_engine;
  import snn_pkg::*;
  import tb_fp16_pkg::*;
  localparam int CB = 2, MB = 1, T = 2;
  logic clk = 0, rst_n = 0;
  core_cfg_t cfg;
  logic start, busy, done, xen, xwe, ev_skip;
  instr_t instr;
  logic [3:0] xbuf;
  logic [19:0] xaddr;
  logic [WORDW-1:0] xwd, xrd;
  int checks = 0, failures = 0, skips = 0;

  fp_engine #(.S_IN_WORDS(1024), .W_WORDS(1024), .CONV_WORDS(256), .U_WORDS(256), .S_OUT_WORDS(256), .SPIKE_WORDS(256)) dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) if (ev_skip) skips++;

  spk_t  sref [T][CB][8][8];
  fp16_t wref [MB*16][CB*16][3][3];
  fp16_t cref [T][MB*16][8][8];
  fp16_t uref [T][MB*16][8][8];
  logic  spref [T][MB*16][8][8];

  task automatic xw(int b, int a, logic [WORDW-1:0] d);
    @(negedge clk); xen = 1; xwe = 1; xbuf = 4'(b); xaddr = 20'(a); xwd = d;
    @(negedge clk); xen = 0; xwe = 0;
  endtask
  task automatic xr(int b, int a, output logic [WORDW-1:0] d);
    @(negedge clk); xen = 1; xwe = 0; xbuf = 4'(b); xaddr = 20'(a);
    @(negedge clk); xen = 0; d = xrd;
  endtask
  task automatic run(instr_t i, output int cycles);
    @(negedge clk); instr = i; start = 1;
    @(negedge clk); start = 0; cycles = 1;
    while (!done) begin @(negedge clk); cycles++; end
  endtask
  function automatic fp16_t radd(fp16_t a, fp16_t b); return to_fp16(to_real(a) + to_real(b)); endfunction
  function automatic fp16_t tree(int m, int cb, int r, int s_, spk_t sv);
    fp16_t p [8]; fp16_t l [4];
    for (int k = 0; k < 8; k++)
      p[k] = radd(sv[2*k] ? wref[m][cb*16+2*k][r][s_] : 16'h0, sv[2*k+1] ? wref[m][cb*16+2*k+1][r][s_] : 16'h0);
    for (int k = 0; k < 4; k++) l[k] = radd(p[2*k], p[2*k+1]);
    return radd(radd(l[0], l[1]), radd(l[2], l[3]));
  endfunction
  task automatic chk(logic ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  // Reference convolution for an H x H input, stride st, pad 1, 3x3 kernel.
  task automatic ref_conv(int h, int st, output int oh);
    oh = (h + 2 - 3) / st + 1;
    for (int t = 0; t < T; t++) for (int m = 0; m < 16; m++) for (int y = 0; y < oh; y++) for (int x = 0; x < oh; x++) begin
      logic firstv; firstv = 1;
      for (int cb = 0; cb < CB; cb++) for (int r = 0; r < 3; r++) for (int s_ = 0; s_ < 3; s_++) begin
        int iy, ix; spk_t sv; fp16_t tr;
        iy = y * st + r - 1; ix = x * st + s_ - 1;
        sv = (iy < 0 || ix < 0 || iy >= h || ix >= h) ? '0 : sref[t][cb][iy][ix];
        tr = tree(m, cb, r, s_, sv);
        cref[t][m][y][x] = firstv ? tr : radd(tr, cref[t][m][y][x]);
        firstv = 0;
      end
    end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [WORDW-1:0] d;
    int cyc, oh;
    cfg = CFG_RESET; cfg.t_size = 8'(T); cfg.alpha = 16'h3A00; cfg.th_f = 16'h3C00;
    start = 0; instr = '0; xen = 0; xwe = 0; xbuf = 0; xaddr = 0; xwd = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    // weights: tile (ob=0, ib=cb, r, s) row m at ((cb*3 + r)*3 + s)*16 + m
    for (int cb = 0; cb < CB; cb++) for (int r = 0; r < 3; r++) for (int s_ = 0; s_ < 3; s_++)
      for (int m = 0; m < 16; m++) begin
        d = '0;
        for (int c = 0; c < 16; c++) begin
          wref[m][cb*16+c][r][s_] = rnd_fp16(11, 14) | ((c % 3 == 0) ? 16'h8000 : 16'h0);
          d[c*16 +: 16] = wref[m][cb*16+c][r][s_];
        end
        xw(1, ((cb * 3 + r) * 3 + s_) * 16 + m, d);
      end
    for (int pass = 0; pass < 2; pass++) begin
      int h, st;
      h = (pass == 0) ? 4 : 6; st = (pass == 0) ? 1 : 2;
      for (int t = 0; t < T; t++) for (int cb = 0; cb < CB; cb++) for (int y = 0; y < h; y++) for (int x = 0; x < h; x++) begin
        sref[t][cb][y][x] = ($urandom % 3 == 0) ? '0 : spk_t'($urandom & $urandom);
        xw(0, ((t * CB + cb) * h + y) * h + x, {240'd0, sref[t][cb][y][x]});
      end
      ref_conv(h, st, oh);
      begin
        instr_t i; i = '0; i.op = FP_CONV;
        i.opnd[0] = h; i.opnd[1] = h; i.opnd[2] = 3; i.opnd[3] = 1; i.opnd[4] = st; i.opnd[5] = 0;
        i.opnd[6] = CB * 16; i.opnd[7] = MB * 16; i.opnd[8] = 0; i.opnd[9] = 0;
        run(i, cyc);
        chk(cyc >= CB * 9 * (16 + T * oh * oh) && cyc <= CB * 9 * (16 + T * oh * oh) + 10,
            $sformatf("conv cycles %0d", cyc));
      end
      for (int t = 0; t < T; t++) for (int y = 0; y < oh; y++) for (int x = 0; x < oh; x++) begin
        xr(2, (t * oh + y) * oh + x, d);
        for (int m = 0; m < 16; m++) chk(d[m*16 +: 16] === cref[t][m][y][x],
          $sformatf("conv t%0d m%0d y%0d x%0d got %h exp %h", t, m, y, x, d[m*16 +: 16], cref[t][m][y][x]));
      end
      // soma, pooling on the first pass (4x4 -> 2x2)
      begin
        instr_t i; i = '0; i.op = FP_SOMA;
        i.opnd[0] = oh; i.opnd[1] = oh; i.opnd[2] = 16; i.opnd[3] = 0; i.opnd[4] = (pass == 0); i.opnd[5] = 0;
        run(i, cyc);
        chk(cyc <= T * oh * oh + 6, $sformatf("soma cycles %0d", cyc));
      end
      for (int t = 0; t < T; t++) for (int m = 0; m < 16; m++) for (int y = 0; y < oh; y++) for (int x = 0; x < oh; x++) begin
        fp16_t lk;
        lk = (t == 0 || spref[t-1][m][y][x]) ? 16'h0 : to_fp16(to_real(cfg.alpha) * to_real(uref[t-1][m][y][x]));
        uref[t][m][y][x] = radd(lk, cref[t][m][y][x]);
        spref[t][m][y][x] = to_real(uref[t][m][y][x]) >= 1.0;
      end
      for (int t = 0; t < T; t++) for (int y = 0; y < oh; y++) for (int x = 0; x < oh; x++) begin
        logic [WORDW-1:0] du, ds;
        xr(3, (t * oh + y) * oh + x, du);
        xr(5, (t * oh + y) * oh + x, ds);
        for (int m = 0; m < 16; m++) begin
          chk(du[m*16 +: 16] === uref[t][m][y][x], $sformatf("u t%0d m%0d got %h exp %h", t, m, du[m*16 +: 16], uref[t][m][y][x]));
          chk(ds[m] === spref[t][m][y][x], "spike");
        end
      end
      for (int t = 0; t < T; t++) begin
        int ph; ph = (pass == 0) ? oh / 2 : oh;
        for (int y = 0; y < ph; y++) for (int x = 0; x < ph; x++) begin
          logic [WORDW-1:0] dso;
          spk_t e;
          xr(4, (t * ph + y) * ph + x, dso);
          for (int m = 0; m < 16; m++)
            e[m] = (pass == 0) ? (spref[t][m][2*y][2*x] | spref[t][m][2*y][2*x+1] | spref[t][m][2*y+1][2*x] | spref[t][m][2*y+1][2*x+1])
                               : spref[t][m][y][x];
          chk(dso[15:0] === e, $sformatf("s_out t%0d y%0d x%0d got %h exp %h", t, y, x, dso[15:0], e));
        end
      end
    end
    chk(skips > 0, "gating2 skip never happened");
    $display("skips=%0d", skips);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

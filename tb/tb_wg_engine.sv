// tb_wg_engine: runs WG_CONV on a 16x16 channel tile with a 4x4 spike map,
// 4x4 gradient map, stride 1 and padding 1 (3x3 kernel), over T=2 time
// steps, with sparse spikes so all-zero spike words are skipped, then again
// with dw_acc set so the results add onto the stored gradients. grad_w is
// compared with a reference that sums grad_u * s in the streaming order with
// independent FP16 rounding.
module tb_wg_engine;
  import snn_pkg::*;
  import tb_fp16_pkg::*;
  localparam int T = 2, H = 4;
  logic clk = 0, rst_n = 0;
  core_cfg_t cfg;
  logic start, busy, done, xen, xwe, ev_gate2;
  instr_t instr;
  logic [3:0] xbuf;
  logic [19:0] xaddr, s_ra, du_ra;
  logic [WORDW-1:0] xwd, xrd;
  vec_t du_rd; spk_t s_rd;
  vec_t du_mem [64];
  spk_t s_mem [64];
  fp16_t wref [3][3][16][16];
  int checks = 0, failures = 0, gates = 0, cyc;

  wg_engine #(.DW_WORDS(288)) dut (.*);
  always #5 clk = ~clk;
  always_ff @(posedge clk) begin
    du_rd <= du_mem[du_ra[5:0]]; s_rd <= s_mem[s_ra[5:0]];
    if (ev_gate2) gates++;
  end

  task automatic chk(logic ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cfg = CFG_RESET; cfg.t_size = 8'(T); cfg.wg_pad = 4'd1;
    start = 0; instr = '0; xen = 0; xwe = 0; xbuf = 0; xaddr = 0; xwd = 0;
    for (int r = 0; r < 3; r++) for (int s_ = 0; s_ < 3; s_++) for (int m = 0; m < 16; m++) for (int c = 0; c < 16; c++) wref[r][s_][m][c] = 16'h0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int rep = 0; rep < 2; rep++) begin
      instr_t i;
      for (int a = 0; a < 64; a++) begin
        for (int m = 0; m < 16; m++) du_mem[a][m] = rnd_fp16(10, 14);
        s_mem[a] = (a % 3 == 0) ? '0 : spk_t'($urandom & $urandom);
      end
      for (int r = 0; r < 3; r++) for (int s_ = 0; s_ < 3; s_++) begin
        fp16_t accv [16][16];
        for (int m = 0; m < 16; m++) for (int c = 0; c < 16; c++) accv[m][c] = 16'h0;
        for (int t = 0; t < T; t++) for (int e = 0; e < H; e++) for (int f = 0; f < H; f++) begin
          int y, x; spk_t sv;
          y = e + r - 1; x = f + s_ - 1;
          sv = (y < 0 || x < 0 || y >= H || x >= H) ? '0 : s_mem[(t * H + y) * H + x];
          for (int m = 0; m < 16; m++) for (int c = 0; c < 16; c++)
            if (sv[c]) accv[m][c] = to_fp16(to_real(accv[m][c]) + to_real(du_mem[(t * H + e) * H + f][m]));
        end
        for (int m = 0; m < 16; m++) for (int c = 0; c < 16; c++)
          wref[r][s_][m][c] = (rep == 0) ? accv[m][c] : to_fp16(to_real(accv[m][c]) + to_real(wref[r][s_][m][c]));
      end
      i = '0; i.op = WG_CONV;
      i.opnd[0] = H; i.opnd[1] = H; i.opnd[2] = H; i.opnd[3] = H; i.opnd[4] = 1; i.opnd[5] = rep;
      i.opnd[6] = 16; i.opnd[7] = 16; i.opnd[8] = 0; i.opnd[9] = 0;
      @(negedge clk); instr = i; start = 1;
      @(negedge clk); start = 0; cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      // 9 tiles x (clear + T*H*H positions + 3 drain + 17 write-back)
      chk(cyc >= 9 * (1 + T * H * H + 20) && cyc <= 9 * (1 + T * H * H + 20) + 6, $sformatf("cycles %0d", cyc));
      for (int r = 0; r < 3; r++) for (int s_ = 0; s_ < 3; s_++) for (int m = 0; m < 16; m++) begin
        logic [WORDW-1:0] d;
        @(negedge clk); xen = 1; xwe = 0; xbuf = 4'd6; xaddr = 20'((r * 3 + s_) * 16 + m);
        @(negedge clk); xen = 0; d = xrd;
        for (int c = 0; c < 16; c++) chk(d[c*16 +: 16] === wref[r][s_][m][c],
          $sformatf("rep%0d r%0d s%0d m%0d c%0d got %h exp %h", rep, r, s_, m, c, d[c*16 +: 16], wref[r][s_][m][c]));
      end
    end
    chk(gates > 0, "gating2 never happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

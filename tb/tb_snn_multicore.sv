// tb_snn_multicore: end-to-end test of the chip on a 2 x 2 mesh (the full
// 4 x 8 build is too large for a quick simulation), with a behavioural DRAM that stalls requests at
// random and answers reads after three cycles.
// Scenario, two layers and one backward step on three sub-cores:
//  * core 0 FP: DMA-loads input spikes and weights, runs FP_CONV + FP_SOMA,
//    sends its output spikes over the NoC (core 0 -> core 3, two hops) to the
//    FP sub-core of core 3, then a NOC_CTRL event;
//  * core 3 FP: loads its weights, waits on BARRIER for the event, runs the
//    second layer and DMA-writes its spikes to DRAM;
//  * core 0 BP: loads grad u^{l+1}, u^l, s^l and w', runs WG_CONV alongside
//    BP_CONV, then BP_GRAD, and writes grad w and grad u^l to DRAM.
// All DRAM results are compared with references computed here with
// independent FP16 rounding. Each mechanism is counted and the test fails
// if one never happened: FP all-zero skip, BP fire' gating, zero gradient
// lanes, WG zero-spike skip, DRAM stall, NoC flits crossing the middle
// router, barrier wait on an event, and BP/WG engines running together.
module tb_snn_multicore;
  import snn_pkg::*;
  import tb_fp16_pkg::*;
  localparam int T = 2, H = 4, COLS = 2, ROWS = 2, NC = COLS * ROWS, IW = $clog2(2 * NC), CB = 3;
  logic clk = 0, clk_noc = 0, rst_n = 0;
  logic host_we, host_sub;
  logic [5:0] host_core;
  logic [1:0] host_kind;
  logic [7:0] host_addr;
  instr_t host_instr;
  core_cfg_t host_cfg;
  conn_t host_conn;
  logic mem_req, mem_we, mem_gnt, mem_rvalid;
  logic [31:0] mem_addr;
  logic [WORDW-1:0] mem_wdata, mem_rdata;
  logic [IW-1:0] mem_id, mem_rid;
  logic [2*NC-1:0] prog_done;
  logic [NC-1:0] ev_skip, ev_gate1, ev_zero_du, ev_gate2;

  snn_multicore #(.COLS(COLS), .ROWS(ROWS)) dut (.*);

  always #4 clk = ~clk;        // core clock (500 MHz scaled)
  always #3 clk_noc = ~clk_noc; // NoC clock (667 MHz scaled)

  int checks = 0, failures = 0;
  int n_skip = 0, n_gate1 = 0, n_zdu = 0, n_gate2 = 0, n_stall = 0, n_flit = 0, n_evwait = 0, n_overlap = 0;

  task automatic chk(logic ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  // ---------------- behavioural DRAM ----------------
  logic [WORDW-1:0] dram [int];
  typedef struct { int id; int addr; longint due; } rd_t;
  rd_t rq [$];
  longint cyc = 0;
  logic gnt_ok;
  always @(negedge clk) gnt_ok = ($urandom % 4) != 0;
  assign mem_gnt = mem_req && gnt_ok;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    mem_rvalid <= 1'b0;
    if (rq.size() > 0 && rq[0].due <= cyc) begin
      mem_rvalid <= 1'b1;
      mem_rid    <= IW'(rq[0].id);
      mem_rdata  <= dram.exists(rq[0].addr) ? dram[rq[0].addr] : '0;
      void'(rq.pop_front());
    end
    if (mem_req && !mem_gnt) n_stall++;
    if (mem_req && mem_gnt) begin
      if (mem_we) dram[int'(mem_addr)] = mem_wdata;
      else rq.push_back('{id: int'(mem_id), addr: int'(mem_addr), due: cyc + 3});
    end
    n_skip  += $countones(ev_skip);
    n_gate1 += $countones(ev_gate1);
    n_zdu   += $countones(ev_zero_du);
    n_gate2 += $countones(ev_gate2);
    if (dut.g_row[1].g_col[1].u_core.u_fp.u_ctrl.running &&
        dut.g_row[1].g_col[1].u_core.u_fp.u_ctrl.instr.op == BARRIER &&
        dut.g_row[1].g_col[1].u_core.u_fp.u_ctrl.instr.opnd[0][0]) n_evwait++;
    if (dut.g_row[0].g_col[0].u_core.u_bp.ubusy[0] && dut.g_row[0].g_col[0].u_core.u_bp.ubusy[1]) n_overlap++;
  end
  // flits leaving router (1,0) southwards towards core 3
  always @(posedge clk_noc) if (dut.g_row[0].g_col[1].u_core.link_out_valid[P_S]) n_flit++;

  // ---------------- host helpers ----------------
  task automatic hw(int c, int sub, int kind, int addr);
    host_core = 6'(c); host_sub = 1'(sub); host_kind = 2'(kind); host_addr = 8'(addr); host_we = 1;
    @(negedge clk); host_we = 0;
  endtask
  int pc;
  task automatic put(int c, int sub, opcode_t op, int o0 = 0, int o1 = 0, int o2 = 0, int o3 = 0, int o4 = 0,
                     int o5 = 0, int o6 = 0, int o7 = 0, int o8 = 0, int o9 = 0);
    host_instr = '0; host_instr.op = op;
    host_instr.opnd[0] = o0; host_instr.opnd[1] = o1; host_instr.opnd[2] = o2; host_instr.opnd[3] = o3;
    host_instr.opnd[4] = o4; host_instr.opnd[5] = o5; host_instr.opnd[6] = o6; host_instr.opnd[7] = o7;
    host_instr.opnd[8] = o8; host_instr.opnd[9] = o9;
    hw(c, sub, 0, pc); pc++;
  endtask

  // ---------------- reference data ----------------
  fp16_t wa [16][16][3][3];   // FP layer 1: [m][c][r][s]
  fp16_t wb [16][16][3][3];   // FP layer 2
  spk_t  s0 [T][H][H];
  spk_t  s1 [T][H][H];
  spk_t  s2 [T][H][H];
  fp16_t wbp [16][16][3][3];  // w' : [c][m][r][s]
  vec_t  dui [T*H*H];
  vec_t  um  [T*H*H];
  spk_t  sm  [T*H*H];
  fp16_t cbp [T][16][H][H];
  fp16_t dref [T][16][H][H];

  function automatic fp16_t radd(fp16_t a, fp16_t b); return to_fp16(to_real(a) + to_real(b)); endfunction
  function automatic fp16_t rmul(fp16_t a, fp16_t b); return to_fp16(to_real(a) * to_real(b)); endfunction

  // one FP layer: conv (pad 1, stride 1) with weights w, then LIF
  task automatic ref_fp(input fp16_t w [16][16][3][3], input spk_t si [T][H][H], input core_cfg_t cf,
                        output spk_t so [T][H][H]);
    fp16_t cv [T][16][H][H];
    fp16_t u  [T][16][H][H];
    for (int t = 0; t < T; t++) for (int m = 0; m < 16; m++) for (int y = 0; y < H; y++) for (int x = 0; x < H; x++) begin
      for (int r = 0; r < 3; r++) for (int s_ = 0; s_ < 3; s_++) begin
        int iy, ix; spk_t sv; fp16_t p [8]; fp16_t l [4]; fp16_t tr;
        iy = y + r - 1; ix = x + s_ - 1;
        sv = (iy < 0 || ix < 0 || iy >= H || ix >= H) ? '0 : si[t][iy][ix];
        for (int k = 0; k < 8; k++)
          p[k] = radd(sv[2*k] ? w[m][2*k][r][s_] : 16'h0, sv[2*k+1] ? w[m][2*k+1][r][s_] : 16'h0);
        for (int k = 0; k < 4; k++) l[k] = radd(p[2*k], p[2*k+1]);
        tr = radd(radd(l[0], l[1]), radd(l[2], l[3]));
        cv[t][m][y][x] = (r == 0 && s_ == 0) ? tr : radd(tr, cv[t][m][y][x]);
      end
    end
    for (int t = 0; t < T; t++) for (int y = 0; y < H; y++) for (int x = 0; x < H; x++) begin
      so[t][y][x] = '0;
      for (int m = 0; m < 16; m++) begin
        fp16_t lk;
        lk = (t == 0 || so[t-1][y][x][m]) ? 16'h0 : rmul(cf.alpha, u[t-1][m][y][x]);
        u[t][m][y][x] = radd(lk, cv[t][m][y][x]);
        so[t][y][x][m] = fp16_ge(u[t][m][y][x], cf.th_f);
      end
    end
  endtask

  function automatic logic win(fp16_t u, core_cfg_t cf);
    return to_real(u) >= to_real(cf.th_l) && to_real(u) <= to_real(cf.th_r);
  endfunction

  task automatic ref_bp(core_cfg_t cf);
    for (int t = 0; t < T; t++) for (int c = 0; c < 16; c++) for (int y = 0; y < H; y++) for (int x = 0; x < H; x++) begin
      int a; a = (t * H + y) * H + x;
      for (int r = 0; r < 3; r++) for (int s_ = 0; s_ < 3; s_++) begin
        int iy, ix; vec_t dv; fp16_t v [16]; logic live;
        iy = y + r - 1; ix = x + s_ - 1;
        dv = (iy < 0 || ix < 0 || iy >= H || ix >= H) ? '0 : dui[(t * H + iy) * H + ix];
        for (int m = 0; m < 16; m++) v[m] = rmul(dv[m], wbp[c][m][r][s_]);
        for (int w = 8; w >= 1; w = w / 2) for (int k = 0; k < w; k++) v[k] = radd(v[2*k], v[2*k+1]);
        live = win(um[a][c], cf);
        if (r == 0 && s_ == 0) cbp[t][c][y][x] = live ? v[0] : 16'h0;
        else if (live) cbp[t][c][y][x] = radd(v[0], cbp[t][c][y][x]);
      end
    end
    for (int t = T - 1; t >= 0; t--) for (int c = 0; c < 16; c++) for (int y = 0; y < H; y++) for (int x = 0; x < H; x++) begin
      fp16_t un, dn, a_du, ds, fd; logic sv; int a;
      a = (t * H + y) * H + x;
      un = um[a][c]; sv = sm[a][c];
      dn = (t == T - 1) ? 16'h0 : dref[t+1][c][y][x];
      fd = win(un, cf) ? cf.beta : 16'h0;
      a_du = rmul(cf.alpha, dn);
      ds = radd(cbp[t][c][y][x], rmul(a_du, un) ^ 16'h8000);
      dref[t][c][y][x] = radd(sv ? 16'h0 : a_du, rmul(ds, fd));
    end
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TIMEOUT prog_done=%h", prog_done);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    core_cfg_t cf;
    logic [WORDW-1:0] d;
    host_we = 0; host_sub = 0; host_core = 0; host_kind = 0; host_addr = 0;
    host_instr = '0; host_cfg = '0; host_conn = '0;
    cf = CFG_RESET; cf.t_size = 8'(T); cf.alpha = 16'h3A00; cf.wg_pad = 4'd1;

    // ---- data in DRAM ----
    for (int m = 0; m < 16; m++) for (int c = 0; c < 16; c++) for (int r = 0; r < 3; r++) for (int s_ = 0; s_ < 3; s_++) begin
      wa[m][c][r][s_] = rnd_fp16(12, 14) | ((c % 3 == 0) ? 16'h8000 : 16'h0);
      wb[m][c][r][s_] = rnd_fp16(12, 14) | ((c % 4 == 1) ? 16'h8000 : 16'h0);
      wbp[c][m][r][s_] = rnd_fp16(11, 15);
    end
    for (int r = 0; r < 3; r++) for (int s_ = 0; s_ < 3; s_++) for (int m = 0; m < 16; m++) begin
      logic [WORDW-1:0] da, db, dc;
      for (int c = 0; c < 16; c++) begin
        da[c*16 +: 16] = wa[m][c][r][s_]; db[c*16 +: 16] = wb[m][c][r][s_]; dc[c*16 +: 16] = wbp[m][c][r][s_];
      end
      dram[32'h100 + (r * 3 + s_) * 16 + m] = da;
      dram[32'h200 + (r * 3 + s_) * 16 + m] = db;
      dram[32'h700 + (r * 3 + s_) * 16 + m] = dc;   // w' word (r,s,c): lanes m
    end
    for (int t = 0; t < T; t++) for (int y = 0; y < H; y++) for (int x = 0; x < H; x++) begin
      s0[t][y][x] = ($urandom % 3 == 0) ? '0 : spk_t'($urandom);
      dram[32'h000 + (t * H + y) * H + x] = {240'd0, s0[t][y][x]};
    end
    for (int a = 0; a < T * H * H; a++) begin
      for (int i = 0; i < 16; i++) begin
        dui[a][i] = ($urandom % 4 == 0) ? 16'h0 : rnd_fp16(11, 15);
        um[a][i] = ($urandom % 2) ? rnd_fp16(14, 15) : rnd_fp16(8, 12);
      end
      if (a % 5 == 0) for (int i = 0; i < 16; i++) um[a][i] = 16'h3000;
      sm[a] = (a % 3 == 0) ? '0 : spk_t'($urandom & $urandom);
      dram[32'h400 + a] = {240'd0, sm[a]};
      dram[32'h500 + a] = dui[a];
      dram[32'h600 + a] = um[a];
    end

    repeat (3) @(negedge clk); rst_n = 1;
    @(negedge clk);

    // ---- configuration ----
    host_cfg = cf;
    hw(0, 0, 1, 0); hw(0, 1, 1, 0); hw(CB, 0, 1, 0);
    host_conn = '0; host_conn.dst_x = 3'd1; host_conn.dst_y = 3'd1; host_conn.dst_sub = 1'b0;
    host_conn.dbuf = 4'd0; host_conn.daddr = 0; host_conn.sbuf = 4'd4; host_conn.saddr = 0; host_conn.len = 16'(T * H * H);
    hw(0, 0, 2, 0);

    // ---- core 0 FP ----
    pc = 0;
    put(0, 0, DMA_RD, 0, 'h000, 0, T * H * H);
    put(0, 0, DMA_RD, 1, 'h100, 0, 144);
    put(0, 0, BARRIER, 0);
    put(0, 0, FP_CONV, H, H, 3, 1, 1, 0, 16, 16, 0, 0);
    put(0, 0, FP_SOMA, H, H, 16, 0, 0, 0);
    put(0, 0, BARRIER, 0);
    put(0, 0, NOC_DATA, 0, 4, 0);
    put(0, 0, NOC_CTRL, 1, 0, 1);
    put(0, 0, BARRIER, 0);
    put(0, 0, OP_END);
    // ---- core 3 FP ----
    pc = 0;
    put(CB, 0, DMA_RD, 1, 'h200, 0, 144);
    put(CB, 0, BARRIER, 1, 1);
    put(CB, 0, BARRIER, 0);
    put(CB, 0, FP_CONV, H, H, 3, 1, 1, 0, 16, 16, 0, 0);
    put(CB, 0, FP_SOMA, H, H, 16, 0, 0, 0);
    put(CB, 0, BARRIER, 0);
    put(CB, 0, DMA_WR, 4, 0, 'h1000, T * H * H);
    put(CB, 0, BARRIER, 0);
    put(CB, 0, OP_END);
    // ---- core 0 BP ----
    pc = 0;
    put(0, 1, DMA_RD, 5, 'h400, 0, T * H * H);
    put(0, 1, DMA_RD, 0, 'h500, 0, T * H * H);
    put(0, 1, DMA_RD, 4, 'h600, 0, T * H * H);
    put(0, 1, DMA_RD, 1, 'h700, 0, 144);
    put(0, 1, BARRIER, 0);
    put(0, 1, WG_CONV, H, H, H, H, 1, 0, 16, 16, 0, 0);
    put(0, 1, BP_CONV, H, H, 3, 1, 1, 0, 16, 16, 0, 0);
    put(0, 1, BP_GRAD, H, H, 16, 0, 0, 0);
    put(0, 1, BARRIER, 0);
    put(0, 1, DMA_WR, 6, 0, 'h2000, 144);
    put(0, 1, DMA_WR, 3, 0, 'h3000, T * H * H);
    put(0, 1, BARRIER, 0);
    put(0, 1, OP_END);

    // run: core 3 first, so it really waits for the event
    hw(CB, 0, 3, 0); hw(0, 1, 3, 0); hw(0, 0, 3, 0);
    wait (prog_done[2*CB] && prog_done[0] && prog_done[1]);
    repeat (4) @(negedge clk);
    chk(prog_done[2*1] == 0 && prog_done[2*2] == 0, "idle core reported done");

    // ---- references and comparison ----
    ref_fp(wa, s0, cf, s1);
    ref_fp(wb, s1, cf, s2);
    for (int t = 0; t < T; t++) for (int y = 0; y < H; y++) for (int x = 0; x < H; x++) begin
      d = dram.exists(32'h1000 + (t * H + y) * H + x) ? dram[32'h1000 + (t * H + y) * H + x] : 'x;
      chk(d[15:0] === s2[t][y][x], $sformatf("layer2 spikes t%0d y%0d x%0d got %h exp %h", t, y, x, d[15:0], s2[t][y][x]));
    end
    ref_bp(cf);
    for (int t = 0; t < T; t++) for (int y = 0; y < H; y++) for (int x = 0; x < H; x++) begin
      d = dram.exists(32'h3000 + (t * H + y) * H + x) ? dram[32'h3000 + (t * H + y) * H + x] : 'x;
      for (int c = 0; c < 16; c++) chk(d[c*16 +: 16] === dref[t][c][y][x],
        $sformatf("grad u t%0d c%0d y%0d x%0d got %h exp %h", t, c, y, x, d[c*16 +: 16], dref[t][c][y][x]));
    end
    for (int r = 0; r < 3; r++) for (int s_ = 0; s_ < 3; s_++) begin
      fp16_t accv [16][16];
      for (int m = 0; m < 16; m++) for (int c = 0; c < 16; c++) accv[m][c] = 16'h0;
      for (int t = 0; t < T; t++) for (int e = 0; e < H; e++) for (int f = 0; f < H; f++) begin
        int y, x; spk_t sv;
        y = e + r - 1; x = f + s_ - 1;
        sv = (y < 0 || x < 0 || y >= H || x >= H) ? '0 : sm[(t * H + y) * H + x];
        for (int m = 0; m < 16; m++) for (int c = 0; c < 16; c++)
          if (sv[c]) accv[m][c] = radd(accv[m][c], dui[(t * H + e) * H + f][m]);
      end
      for (int m = 0; m < 16; m++) begin
        d = dram.exists(32'h2000 + (r * 3 + s_) * 16 + m) ? dram[32'h2000 + (r * 3 + s_) * 16 + m] : 'x;
        for (int c = 0; c < 16; c++) chk(d[c*16 +: 16] === accv[m][c],
          $sformatf("grad w r%0d s%0d m%0d c%0d got %h exp %h", r, s_, m, c, d[c*16 +: 16], accv[m][c]));
      end
    end

    $display("skip=%0d gate1=%0d zero_du=%0d gate2=%0d dram_stall=%0d noc_flits=%0d event_wait=%0d bp_wg_overlap=%0d cycles=%0d",
             n_skip, n_gate1, n_zdu, n_gate2, n_stall, n_flit, n_evwait, n_overlap, cyc);
    chk(n_skip > 0, "FP zero-spike skip never happened");
    chk(n_gate1 > 0, "BP fire' gating never happened");
    chk(n_zdu > 0, "zero gradient lanes never happened");
    chk(n_gate2 > 0, "WG zero-spike skip never happened");
    chk(n_stall > 0, "DRAM stall never happened");
    chk(n_flit >= T * H * H + 2, "NoC packet did not cross router (1,0)");
    chk(n_evwait > 0, "event barrier never waited");
    chk(n_overlap > 0, "BP and WG engines never ran together");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

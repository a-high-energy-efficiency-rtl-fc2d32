// bp_engine: the back-propagation engine of a BP sub-core.
//
// Owns the rotated-weight buffer w', the Conv_BP partial sums and the output
// gradient buffer grad_u^l; reads the sub-core's shared grad_u^{l+1}, u^l and
// s^l buffers through read ports of their own. Two instructions:
//  * BP_CONV - the transposed convolution as a stride-1 convolution of the
//    zero-inserted, padded grad_u^{l+1} map with kernel-rotated weights
//    (conv_seq with ins = 'insert'). For each output position, u^l is read
//    first and fire' of the 16 output channels is evaluated (gating1): if all
//    are zero the grad_u^{l+1} word is not even read and nothing is written;
//    otherwise bp_array multiplies, skipping zero gradients (gating2), and
//    only the live lanes of the Conv_BP word are updated (bit-masked write).
//    In the first tile of a fresh accumulation dead lanes are written as 0.
//  * BP_GRAD - 16 grad_unit lanes, one word per cycle, time steps from T-1
//    down to 0: reads Conv_BP (at the pooled position when 'pooling' is set),
//    u_t, s_t and grad_u_{t+1}, and writes grad_u_t. The last written word is
//    forwarded so back-to-back dependent words need no bubble.
// Operands follow the instruction-set table; 'insert' is 1, 2 or 4. T, alpha,
// beta, th_l and th_r come from cfg. Dispatch Unit buffer ids: 1 w',
// 2 Conv_BP, 3 grad_u^l. Layouts and pipeline stages are this design's own.
module bp_engine
  import snn_pkg::*;
#(
  parameter int WR_WORDS     = 18432,
  parameter int CONV_WORDS   = 4096,
  parameter int DU_OUT_WORDS = 4096
) (
  input  logic        clk,
  input  logic        rst_n,
  input  core_cfg_t   cfg,
  input  logic        start,
  input  instr_t      instr,
  output logic        busy,
  output logic        done,
  // shared buffers of the sub-core (one-cycle read latency)
  output logic [19:0] dui_ra,
  input  vec_t        dui_rd,
  output logic [19:0] u_ra,
  input  vec_t        u_rd,
  output logic [19:0] s_ra,
  input  spk_t        s_rd,
  // Dispatch Unit port
  input  logic        xen,
  input  logic        xwe,
  input  logic [3:0]  xbuf,
  input  logic [19:0] xaddr,
  input  logic [WORDW-1:0] xwd,
  output logic [WORDW-1:0] xrd,
  // activity, for observation
  output logic        ev_gate1,     // a whole position skipped (fire' all zero)
  output logic        ev_zero_du    // a live position with some zero gradient lanes
);

  localparam int AWR = $clog2(WR_WORDS), AC = $clog2(CONV_WORDS), AD = $clog2(DU_OUT_WORDS);

  logic [AWR-1:0] wr_ra;  vec_t wr_rd, wr_xrd;
  logic [AC-1:0]  cv_ra, cv_wa; vec_t cv_rd, cv_wd, cv_wm; logic cv_we; vec_t cv_xrd;
  logic [AD-1:0]  do_ra, do_wa; vec_t do_rd, do_wd; logic do_we; vec_t do_xrd;

  sram_buf #(.DEPTH(WR_WORDS), .WIDTH(WORDW)) u_wr (.clk, .ra(wr_ra), .rd(wr_rd), .we(1'b0), .wa('0), .wd('0), .wm('0),
    .xen(xen && xbuf == 4'd1), .xwe(xwe), .xa(AWR'(xaddr)), .xwd(xwd), .xrd(wr_xrd));
  sram_buf #(.DEPTH(CONV_WORDS), .WIDTH(WORDW)) u_cv (.clk, .ra(cv_ra), .rd(cv_rd), .we(cv_we), .wa(cv_wa), .wd(cv_wd), .wm(cv_wm),
    .xen(xen && xbuf == 4'd2), .xwe(xwe), .xa(AC'(xaddr)), .xwd(xwd), .xrd(cv_xrd));
  sram_buf #(.DEPTH(DU_OUT_WORDS), .WIDTH(WORDW)) u_do (.clk, .ra(do_ra), .rd(do_rd), .we(do_we), .wa(do_wa), .wd(do_wd), .wm('1),
    .xen(xen && xbuf == 4'd3), .xwe(xwe), .xa(AD'(xaddr)), .xwd(xwd), .xrd(do_xrd));

  logic [3:0] xbuf_q;
  always_ff @(posedge clk) xbuf_q <= xbuf;
  always_comb begin
    unique case (xbuf_q)
      4'd1: xrd = wr_xrd;
      4'd2: xrd = cv_xrd;
      4'd3: xrd = do_xrd;
      default: xrd = '0;
    endcase
  end

  // ---------------- decode ----------------
  typedef enum logic [1:0] {M_IDLE, M_CONV, M_GRAD} mode_t;
  mode_t mode;
  instr_t ir;
  logic conv_go, grad_go;

  logic seq_busy, seq_done, w_req, x_req, x_pad, first;
  logic [19:0] w_addr, x_addr, o_addr;
  logic [3:0] w_row;
  logic [1:0] ins_sh;
  assign ins_sh = ir.opnd[4][2] ? 2'd2 : (ir.opnd[4][1] ? 2'd1 : 2'd0);

  conv_seq u_seq (
    .clk, .rst_n, .start(conv_go),
    .in_h(ir.opnd[0][15:0]), .in_w(ir.opnd[1][15:0]), .k(ir.opnd[2][3:0]), .pad(ir.opnd[3][3:0]),
    .stride(4'd1), .ins_sh, .ob_n(ir.opnd[7][11:4]), .ib_n(ir.opnd[6][11:4]),
    .t_n(cfg.t_size), .in_base(ir.opnd[8][19:0]), .out_base(ir.opnd[9][19:0]), .acc(ir.opnd[5][0]),
    .busy(seq_busy), .done(seq_done), .w_req, .w_addr, .w_row, .x_req, .x_pad, .x_addr, .o_addr, .first);

  function automatic spk_t fire_win(vec_t u);
    spk_t f;
    for (int i = 0; i < NL; i++) f[i] = fp16_ge(u[i], cfg.th_l) && fp16_le(u[i], cfg.th_r);
    return f;
  endfunction

  // ---------------- BP_CONV pipeline ----------------
  logic        p1_w, p1_x, p1_pad, p1_first;
  logic [3:0]  p1_row;
  logic [19:0] p1_o, p1_xa;
  logic        p2_x, p2_zero, p2_first;
  spk_t        p2_mask, p1_mask;
  logic [19:0] p2_o;
  logic        p3_first;
  logic [19:0] p3_o;
  logic        arr_valid;
  spk_t        arr_mask;
  vec_t        arr_psum, acc_sum, du_in;

  assign p1_mask = fire_win(u_rd);
  assign du_in   = p2_zero ? '0 : dui_rd;

  bp_array u_arr (.clk, .rst_n, .wload(p1_w), .wrow(p1_row), .wdata(wr_rd),
                  .in_valid(p2_x), .du(du_in), .fire_mask(p2_mask),
                  .out_valid(arr_valid), .out_mask(arr_mask), .psum(arr_psum));

  for (genvar i = 0; i < NL; i++) begin : g_acc
    fp16_add u_acc (.a(arr_psum[i]), .b(cv_rd[i]), .y(acc_sum[i]));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      p1_w <= 0; p1_x <= 0; p1_pad <= 0; p1_first <= 0; p1_row <= '0; p1_o <= '0; p1_xa <= '0;
      p2_x <= 0; p2_zero <= 0; p2_first <= 0; p2_mask <= '0; p2_o <= '0; p3_first <= 0; p3_o <= '0;
    end else begin
      p1_w <= (mode == M_CONV) && w_req;  p1_row <= w_row;
      p1_x <= (mode == M_CONV) && x_req;  p1_pad <= x_pad; p1_first <= first; p1_o <= o_addr; p1_xa <= x_addr;
      p2_x <= p1_x && (p1_mask != '0 || p1_first);
      p2_zero <= p1_pad || (p1_mask == '0);
      p2_mask <= p1_mask; p2_first <= p1_first; p2_o <= p1_o;
      p3_first <= p2_first; p3_o <= p2_o;
    end
  end

  assign ev_gate1   = (mode == M_CONV) && p1_x && (p1_mask == '0);
  always_comb begin
    ev_zero_du = 1'b0;
    for (int i = 0; i < NL; i++) if (fp16_zero(dui_rd[i])) ev_zero_du = 1'b1;
    ev_zero_du = ev_zero_du && (mode == M_CONV) && p2_x && !p2_zero;
  end

  // ---------------- BP_GRAD loop ----------------
  logic        g_run;
  logic [7:0]  g_t, g_cb;
  logic [15:0] g_y, g_x;
  logic        q_v, q_last_t, q_pool;
  logic [19:0] q_a, q_na;
  logic [15:0] hh, ww, cbn;
  logic        pool, tacc;
  logic [19:0] cur_a, nxt_a, pool_a;
  logic [7:0]  nxt_t;
  logic        lw_v;
  logic [19:0] lw_a;
  vec_t        lw_du, du_next, du_new;
  spk_t        s_q;
  logic [NL-1:0] fd_unused;

  assign hh   = ir.opnd[0][15:0];
  assign ww   = ir.opnd[1][15:0];
  assign cbn  = {4'd0, ir.opnd[2][15:4]};
  assign pool = ir.opnd[4][0];
  assign tacc = ir.opnd[5][0];

  always_comb begin
    nxt_t  = (g_t == cfg.t_size - 8'd1) ? 8'd0 : (g_t + 8'd1);
    cur_a  = 20'(int'(ir.opnd[3][19:0]) + ((int'(g_t) * int'(cbn) + int'(g_cb)) * int'(hh) + int'(g_y)) * int'(ww) + int'(g_x));
    nxt_a  = 20'(int'(ir.opnd[3][19:0]) + ((int'(nxt_t) * int'(cbn) + int'(g_cb)) * int'(hh) + int'(g_y)) * int'(ww) + int'(g_x));
    pool_a = 20'(int'(ir.opnd[3][19:0]) + ((int'(g_t) * int'(cbn) + int'(g_cb)) * int'(hh >> 1) + int'(g_y >> 1)) * int'(ww >> 1) + int'(g_x >> 1));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      g_run <= 0; g_t <= '0; g_cb <= '0; g_y <= '0; g_x <= '0;
      q_v <= 0; q_last_t <= 0; q_pool <= 0; q_a <= '0; q_na <= '0;
    end else begin
      q_v <= g_run;
      q_last_t <= (g_t == cfg.t_size - 8'd1) && !tacc;
      q_pool <= pool;
      q_a <= cur_a;
      q_na <= nxt_a;
      if (grad_go) begin
        g_run <= 1'b1; g_t <= cfg.t_size - 8'd1; g_cb <= '0; g_y <= '0; g_x <= '0;
      end else if (g_run) begin
        if (g_x + 16'd1 < ww) g_x <= g_x + 16'd1;
        else begin
          g_x <= '0;
          if (g_y + 16'd1 < hh) g_y <= g_y + 16'd1;
          else begin
            g_y <= '0;
            if (g_cb + 8'd1 < cbn[7:0]) g_cb <= g_cb + 8'd1;
            else begin
              g_cb <= '0;
              if (g_t != 8'd0) g_t <= g_t - 8'd1;
              else g_run <= 1'b0;
            end
          end
        end
      end
    end
  end

  always_comb begin
    if (q_last_t)                        du_next = '0;
    else if (lw_v && lw_a == q_na)       du_next = lw_du;
    else                                 du_next = do_rd;
  end
  assign s_q = s_rd;

  for (genvar i = 0; i < NL; i++) begin : g_grad
    grad_unit u_g (.conv(cv_rd[i]), .u(u_rd[i]), .s(s_q[i]), .du_next(du_next[i]),
                   .pool_sel(!q_pool || s_q[i]), .alpha(cfg.alpha), .beta(cfg.beta),
                   .th_l(cfg.th_l), .th_r(cfg.th_r), .du(du_new[i]), .fire_d(fd_unused[i]));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lw_v <= 0; lw_a <= '0; lw_du <= '0;
    end else if (q_v) begin
      lw_v <= 1'b1; lw_a <= q_a; lw_du <= du_new;
    end else if (mode != M_GRAD) begin
      lw_v <= 1'b0;
    end
  end

  // ---------------- port muxing ----------------
  always_comb begin
    wr_ra = AWR'(w_addr);
    cv_ra = '0; cv_we = 0; cv_wa = '0; cv_wd = '0; cv_wm = '0;
    do_ra = '0; do_we = 0; do_wa = '0; do_wd = '0;
    dui_ra = '0; u_ra = '0; s_ra = '0;
    if (mode == M_CONV) begin
      u_ra   = o_addr;
      dui_ra = p1_xa;
      cv_ra  = AC'(p2_o);
      if (arr_valid) begin
        cv_wa = AC'(p3_o);
        for (int i = 0; i < NL; i++) begin
          cv_wd[i] = p3_first ? (arr_mask[i] ? arr_psum[i] : 16'h0) : acc_sum[i];
          cv_wm[i] = (p3_first || arr_mask[i]) ? 16'hFFFF : 16'h0000;
        end
        cv_we = p3_first || (arr_mask != '0);
      end
    end else begin
      cv_ra = AC'(pool ? pool_a : cur_a);
      u_ra  = cur_a;
      s_ra  = cur_a;
      do_ra = AD'(nxt_a);
      if (q_v) begin
        do_we = 1'b1; do_wa = AD'(q_a); do_wd = du_new;
      end
    end
  end

  // ---------------- control ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mode <= M_IDLE; ir <= '0; done <= 0; conv_go <= 0; grad_go <= 0;
    end else begin
      done <= 1'b0;
      conv_go <= start && mode == M_IDLE && instr.op == BP_CONV;
      grad_go <= start && mode == M_IDLE && instr.op == BP_GRAD;
      if (start && mode == M_IDLE) begin
        ir <= instr;
        if (instr.op == BP_CONV) mode <= M_CONV;
        else if (instr.op == BP_GRAD) mode <= M_GRAD;
        else done <= 1'b1;
      end else if (mode == M_CONV && seq_done && !conv_go) begin
        mode <= M_IDLE; done <= 1'b1;
      end else if (mode == M_GRAD && q_v && !g_run && !grad_go) begin
        mode <= M_IDLE; done <= 1'b1;
      end
    end
  end

  assign busy = (mode != M_IDLE);

endmodule

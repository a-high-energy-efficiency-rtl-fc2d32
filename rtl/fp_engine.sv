// fp_engine: the forward-propagation engine of an FP sub-core.
//
// Holds the sub-core's six buffers (input spikes s^{l-1}, weights w^l,
// Conv_FP partial sums, membrane potentials u^l, output spikes s^l and the
// Spike history) and executes two instructions:
//  * FP_CONV - weight-stationary convolution. conv_seq loads a 16x16 weight
//    tile into fp_array once, then streams every time step and position; the
//    array's 16 row sums are added to the Conv_FP word read back from the
//    buffer (partial-sum reuse) and written again. A spike vector that is all
//    zero skips the adder tree, the Conv_FP read and the write (gating2); in
//    the first tile of a fresh accumulation such a position writes zero.
//  * FP_SOMA - 16 soma_unit lanes, one word per cycle, over every time step:
//    read Conv_FP_t, u_{t-1} and s_{t-1}, write u_t and s_t, and write s^l
//    either directly or through 2x2 max pooling (an OR of four spikes; the
//    loop then visits the four window positions back to back).
// Operands are taken in the order of the instruction-set table. Time steps T,
// alpha and th_f come from cfg. Buffer ids on the Dispatch Unit port:
// 0 s^{l-1}, 1 w^l, 2 Conv_FP, 3 u^l, 4 s^l, 5 Spike (spike buffers are
// 16-bit words, one bit per channel).
// Timing: FP_CONV streams one position per cycle after 16 weight-load cycles
// per tile; FP_SOMA one word per cycle; 'done' pulses when the last write has
// been made. The register stages and layouts are this design's own choices.
module fp_engine
  import snn_pkg::*;
#(
  parameter int S_IN_WORDS  = 16384,
  parameter int W_WORDS     = 18432,
  parameter int CONV_WORDS  = 4096,
  parameter int U_WORDS     = 4096,
  parameter int S_OUT_WORDS = 16384,
  parameter int SPIKE_WORDS = 16384
) (
  input  logic        clk,
  input  logic        rst_n,
  input  core_cfg_t   cfg,
  input  logic        start,
  input  instr_t      instr,
  output logic        busy,
  output logic        done,
  // Dispatch Unit port
  input  logic        xen,
  input  logic        xwe,
  input  logic [3:0]  xbuf,
  input  logic [19:0] xaddr,
  input  logic [WORDW-1:0] xwd,
  output logic [WORDW-1:0] xrd,
  // activity, for observation
  output logic        ev_skip
);

  localparam int AS = $clog2(S_IN_WORDS), AWT = $clog2(W_WORDS), AC = $clog2(CONV_WORDS);
  localparam int AU = $clog2(U_WORDS), AO = $clog2(S_OUT_WORDS), AK = $clog2(SPIKE_WORDS);

  // ---------------- buffers ----------------
  logic [AS-1:0]  sin_ra;  logic [15:0] sin_rd;  logic [15:0] sin_xrd;
  logic [AWT-1:0] w_ra;    vec_t w_rd;           vec_t w_xrd;
  logic [AC-1:0]  cv_ra, cv_wa; vec_t cv_rd, cv_wd; logic cv_we; vec_t cv_xrd;
  logic [AU-1:0]  u_ra, u_wa;   vec_t u_rd, u_wd;   logic u_we;  vec_t u_xrd;
  logic [AO-1:0]  so_wa;   logic [15:0] so_wd; logic so_we; logic [15:0] so_xrd, so_rd;
  logic [AK-1:0]  sp_ra, sp_wa; logic [15:0] sp_rd, sp_wd; logic sp_we; logic [15:0] sp_xrd;

  sram_buf #(.DEPTH(S_IN_WORDS), .WIDTH(16)) u_sin (.clk, .ra(sin_ra), .rd(sin_rd), .we(1'b0), .wa('0), .wd('0), .wm('0),
    .xen(xen && xbuf == 4'd0), .xwe(xwe), .xa(AS'(xaddr)), .xwd(xwd[15:0]), .xrd(sin_xrd));
  sram_buf #(.DEPTH(W_WORDS), .WIDTH(WORDW)) u_w (.clk, .ra(w_ra), .rd(w_rd), .we(1'b0), .wa('0), .wd('0), .wm('0),
    .xen(xen && xbuf == 4'd1), .xwe(xwe), .xa(AWT'(xaddr)), .xwd(xwd), .xrd(w_xrd));
  sram_buf #(.DEPTH(CONV_WORDS), .WIDTH(WORDW)) u_cv (.clk, .ra(cv_ra), .rd(cv_rd), .we(cv_we), .wa(cv_wa), .wd(cv_wd), .wm('1),
    .xen(xen && xbuf == 4'd2), .xwe(xwe), .xa(AC'(xaddr)), .xwd(xwd), .xrd(cv_xrd));
  sram_buf #(.DEPTH(U_WORDS), .WIDTH(WORDW)) u_u (.clk, .ra(u_ra), .rd(u_rd), .we(u_we), .wa(u_wa), .wd(u_wd), .wm('1),
    .xen(xen && xbuf == 4'd3), .xwe(xwe), .xa(AU'(xaddr)), .xwd(xwd), .xrd(u_xrd));
  sram_buf #(.DEPTH(S_OUT_WORDS), .WIDTH(16)) u_so (.clk, .ra('0), .rd(so_rd), .we(so_we), .wa(so_wa), .wd(so_wd), .wm('1),
    .xen(xen && xbuf == 4'd4), .xwe(xwe), .xa(AO'(xaddr)), .xwd(xwd[15:0]), .xrd(so_xrd));
  sram_buf #(.DEPTH(SPIKE_WORDS), .WIDTH(16)) u_sp (.clk, .ra(sp_ra), .rd(sp_rd), .we(sp_we), .wa(sp_wa), .wd(sp_wd), .wm('1),
    .xen(xen && xbuf == 4'd5), .xwe(xwe), .xa(AK'(xaddr)), .xwd(xwd[15:0]), .xrd(sp_xrd));

  logic [3:0] xbuf_q;
  always_ff @(posedge clk) xbuf_q <= xbuf;
  always_comb begin
    unique case (xbuf_q)
      4'd0: xrd = {240'd0, sin_xrd};
      4'd1: xrd = w_xrd;
      4'd2: xrd = cv_xrd;
      4'd3: xrd = u_xrd;
      4'd4: xrd = {240'd0, so_xrd};
      4'd5: xrd = {240'd0, sp_xrd};
      default: xrd = '0;
    endcase
  end

  // ---------------- instruction decode ----------------
  typedef enum logic [1:0] {M_IDLE, M_CONV, M_SOMA} mode_t;
  mode_t mode;
  instr_t ir;
  logic conv_go, soma_go;   // one cycle after issue, once ir holds the operands

  logic seq_start, seq_busy, seq_done;
  logic w_req, x_req, x_pad, first;
  logic [19:0] w_addr, x_addr, o_addr;
  logic [3:0] w_row;

  conv_seq u_seq (
    .clk, .rst_n, .start(seq_start),
    .in_h(ir.opnd[0][15:0]), .in_w(ir.opnd[1][15:0]), .k(ir.opnd[2][3:0]), .pad(ir.opnd[3][3:0]),
    .stride(ir.opnd[4][3:0]), .ins_sh(2'd0), .ob_n(ir.opnd[7][11:4]), .ib_n(ir.opnd[6][11:4]),
    .t_n(cfg.t_size), .in_base(ir.opnd[8][19:0]), .out_base(ir.opnd[9][19:0]), .acc(ir.opnd[5][0]),
    .busy(seq_busy), .done(seq_done), .w_req, .w_addr, .w_row, .x_req, .x_pad, .x_addr, .o_addr, .first);

  // ---------------- FP_CONV pipeline ----------------
  // stage 1: buffer reads issued by conv_seq are returning
  logic       p1_w, p1_x, p1_pad, p1_first;
  logic [3:0] p1_row;
  logic [19:0] p1_o;
  // stage 2: array output
  logic       p2_first;
  logic [19:0] p2_o;
  logic       arr_valid, arr_skip;
  vec_t       arr_psum, acc_sum;
  spk_t       s_in;

  assign w_ra   = AWT'(w_addr);
  assign sin_ra = AS'(x_addr);
  assign s_in   = p1_pad ? '0 : sin_rd;

  fp_array u_arr (.clk, .rst_n, .wload(p1_w), .wrow(p1_row), .wdata(w_rd),
                  .in_valid(p1_x), .s(s_in), .out_valid(arr_valid), .out_skip(arr_skip), .psum(arr_psum));

  for (genvar i = 0; i < NL; i++) begin : g_acc
    fp16_add u_acc (.a(arr_psum[i]), .b(cv_rd[i]), .y(acc_sum[i]));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      p1_w <= 1'b0; p1_x <= 1'b0; p1_pad <= 1'b0; p1_first <= 1'b0; p1_row <= '0; p1_o <= '0;
      p2_first <= 1'b0; p2_o <= '0;
    end else begin
      p1_w <= (mode == M_CONV) && w_req;
      p1_row <= w_row;
      p1_x <= (mode == M_CONV) && x_req;
      p1_pad <= x_pad;
      p1_first <= first;
      p1_o <= o_addr;
      p2_first <= p1_first;
      p2_o <= p1_o;
    end
  end

  // ---------------- FP_SOMA loop ----------------
  logic        so_run;
  logic [7:0]  so_t, so_mb;
  logic [15:0] so_y, so_x;          // pooled coordinates when pooling
  logic [1:0]  so_d;                // window index when pooling
  logic        q_v, q_first_t, q_win_last;
  logic [19:0] q_a, q_pa, q_prev_a;
  logic [15:0] hh, ww, mbn;
  logic        pool, tacc;
  logic [19:0] cur_a, prev_a, pool_a;
  logic [15:0] yy, xx;
  logic [7:0]  prev_t;
  spk_t        win_or;
  // forwarding of the last written word (u and spike)
  logic        lw_v;
  logic [19:0] lw_a;
  vec_t        lw_u;
  spk_t        lw_s;

  assign hh   = ir.opnd[0][15:0];
  assign ww   = ir.opnd[1][15:0];
  assign mbn  = {4'd0, ir.opnd[2][15:4]};
  assign pool = ir.opnd[4][0];
  assign tacc = ir.opnd[5][0];

  always_comb begin
    yy = pool ? {so_y[14:0], so_d[1]} : so_y;
    xx = pool ? {so_x[14:0], so_d[0]} : so_x;
    prev_t = (so_t == 8'd0) ? (cfg.t_size - 8'd1) : (so_t - 8'd1);
    cur_a  = 20'(int'(ir.opnd[3][19:0]) + ((int'(so_t) * int'(mbn) + int'(so_mb)) * int'(hh) + int'(yy)) * int'(ww) + int'(xx));
    prev_a = 20'(int'(ir.opnd[3][19:0]) + ((int'(prev_t) * int'(mbn) + int'(so_mb)) * int'(hh) + int'(yy)) * int'(ww) + int'(xx));
    pool_a = 20'(int'(ir.opnd[3][19:0]) + ((int'(so_t) * int'(mbn) + int'(so_mb)) * int'(hh >> 1) + int'(so_y)) * int'(ww >> 1) + int'(so_x));
  end

  logic [15:0] lim_y, lim_x;
  assign lim_y = pool ? (hh >> 1) : hh;
  assign lim_x = pool ? (ww >> 1) : ww;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      so_run <= 1'b0; so_t <= '0; so_mb <= '0; so_y <= '0; so_x <= '0; so_d <= '0;
      q_v <= 1'b0; q_first_t <= 1'b0; q_win_last <= 1'b0; q_a <= '0; q_pa <= '0; q_prev_a <= '0;
    end else begin
      q_v <= so_run;
      q_first_t <= (so_t == 8'd0) && !tacc;
      q_win_last <= !pool || (so_d == 2'd3);
      q_a <= cur_a;
      q_pa <= pool ? pool_a : cur_a;
      q_prev_a <= prev_a;
      if (soma_go) so_run <= 1'b1;
      if (so_run) begin
        if (pool && so_d != 2'd3) so_d <= so_d + 2'd1;
        else begin
          so_d <= '0;
          if (so_x + 16'd1 < lim_x) so_x <= so_x + 16'd1;
          else begin
            so_x <= '0;
            if (so_y + 16'd1 < lim_y) so_y <= so_y + 16'd1;
            else begin
              so_y <= '0;
              if (so_mb + 8'd1 < mbn[7:0]) so_mb <= so_mb + 8'd1;
              else begin
                so_mb <= '0;
                if (so_t + 8'd1 < cfg.t_size) so_t <= so_t + 8'd1;
                else begin
                  so_t <= '0;
                  so_run <= 1'b0;
                end
              end
            end
          end
        end
      end
    end
  end

  // soma lanes
  vec_t u_prev, u_new;
  spk_t s_prev, s_new;
  always_comb begin
    if (q_first_t) begin
      u_prev = '0; s_prev = '0;
    end else if (lw_v && lw_a == q_prev_a) begin
      u_prev = lw_u; s_prev = lw_s;
    end else begin
      u_prev = u_rd; s_prev = sp_rd;
    end
  end
  for (genvar i = 0; i < NL; i++) begin : g_soma
    soma_unit u_soma (.conv(cv_rd[i]), .u_prev(u_prev[i]), .s_prev(s_prev[i]), .alpha(cfg.alpha), .th(cfg.th_f),
                      .u(u_new[i]), .s(s_new[i]));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      win_or <= '0; lw_v <= 1'b0; lw_a <= '0; lw_u <= '0; lw_s <= '0;
    end else begin
      if (q_v) begin
        win_or <= q_win_last ? '0 : (win_or | s_new);
        lw_v <= 1'b1; lw_a <= q_a; lw_u <= u_new; lw_s <= s_new;
      end else if (mode != M_SOMA) begin
        lw_v <= 1'b0;
      end
    end
  end

  // ---------------- buffer port muxing ----------------
  always_comb begin
    cv_ra = '0; cv_we = 1'b0; cv_wa = '0; cv_wd = '0;
    u_ra = '0; u_we = 1'b0; u_wa = '0; u_wd = '0;
    sp_ra = '0; sp_we = 1'b0; sp_wa = '0; sp_wd = '0;
    so_we = 1'b0; so_wa = '0; so_wd = '0;
    if (mode == M_CONV) begin
      cv_ra = AC'(p1_o);
      if (arr_valid && (!arr_skip || p2_first)) begin
        cv_we = 1'b1;
        cv_wa = AC'(p2_o);
        cv_wd = arr_skip ? '0 : (p2_first ? arr_psum : acc_sum);
      end
    end else begin
      cv_ra = AC'(cur_a);
      u_ra  = AU'(prev_a);
      sp_ra = AK'(prev_a);
      if (q_v) begin
        u_we = 1'b1;  u_wa = AU'(q_a); u_wd = u_new;
        sp_we = 1'b1; sp_wa = AK'(q_a); sp_wd = s_new;
        if (q_win_last) begin
          so_we = 1'b1; so_wa = AO'(q_pa); so_wd = win_or | s_new;
        end
      end
    end
  end

  // ---------------- control ----------------
  assign seq_start = conv_go;
  assign ev_skip   = (mode == M_CONV) && arr_valid && arr_skip;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mode <= M_IDLE; ir <= '0; done <= 1'b0; conv_go <= 1'b0; soma_go <= 1'b0;
    end else begin
      done <= 1'b0;
      conv_go <= start && mode == M_IDLE && instr.op == FP_CONV;
      soma_go <= start && mode == M_IDLE && instr.op == FP_SOMA;
      if (start && mode == M_IDLE) begin
        ir <= instr;
        if (instr.op == FP_CONV) mode <= M_CONV;
        else if (instr.op == FP_SOMA) mode <= M_SOMA;
        else done <= 1'b1;
      end else if (mode == M_CONV && seq_done && !conv_go) begin
        mode <= M_IDLE; done <= 1'b1;
      end else if (mode == M_SOMA && q_v && !so_run) begin
        mode <= M_IDLE; done <= 1'b1;
      end
    end
  end

  assign busy = (mode != M_IDLE);

endmodule

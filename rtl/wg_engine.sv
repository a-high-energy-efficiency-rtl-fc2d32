// wg_engine: the weight-gradient engine of a BP sub-core.
//
// Executes WG_CONV, grad_w[m][c][r][s] = sum over t and output positions of
// grad_u^{l+1}[t][m][e][f] * s^l[t][c][e*stride + r - pad][f*stride + s - pad].
// For every 16x16 channel tile (mb, cb) and kernel offset (r, s) the
// wg_array is cleared, then every time step and output position is streamed
// (output stationary: the 256 sums stay in the PEs). The spike word is read
// first; if all 16 spikes are zero the gradient word is not read and the
// array is not clocked (gating2), otherwise the array adds the gradient into
// the columns whose spike is 1 (gating1). Finally the 16 rows are written to
// the grad_w buffer, added to its old contents when dw_acc is set.
// The kernel size is not an operand; it follows from the map sizes as
// K = s_h + 2*pad - (du_h - 1)*stride with pad from cfg.wg_pad. 'Insert' is
// taken as the forward stride; dw_c_offset and dw_m_offset are the word bases
// of the s^l and grad_u^{l+1} maps. Layout of grad_w (this design's choice):
// row m of tile (mb, cb, r, s) at ((mb*CB + cb)*K*K + r*K + s)*16 + m.
// Timing: one position per cycle, plus one clear cycle, a two-cycle drain and
// 17 write-back cycles per tile. Dispatch Unit buffer id: 6 grad_w.
module wg_engine
  import snn_pkg::*;
#(
  parameter int DW_WORDS = 288
) (
  input  logic        clk,
  input  logic        rst_n,
  input  core_cfg_t   cfg,
  input  logic        start,
  input  instr_t      instr,
  output logic        busy,
  output logic        done,
  // shared buffers of the sub-core (second read ports)
  output logic [19:0] s_ra,
  input  spk_t        s_rd,
  output logic [19:0] du_ra,
  input  vec_t        du_rd,
  // Dispatch Unit port
  input  logic        xen,
  input  logic        xwe,
  input  logic [3:0]  xbuf,
  input  logic [19:0] xaddr,
  input  logic [WORDW-1:0] xwd,
  output logic [WORDW-1:0] xrd,
  output logic        ev_gate2      // a position whose spikes were all zero
);

  localparam int AD = $clog2(DW_WORDS);

  logic [AD-1:0] dw_ra, dw_wa; vec_t dw_rd, dw_wd; logic dw_we; vec_t dw_xrd;
  sram_buf #(.DEPTH(DW_WORDS), .WIDTH(WORDW)) u_dw (.clk, .ra(dw_ra), .rd(dw_rd), .we(dw_we), .wa(dw_wa), .wd(dw_wd), .wm('1),
    .xen(xen && xbuf == 4'd6), .xwe(xwe), .xa(AD'(xaddr)), .xwd(xwd), .xrd(dw_xrd));
  assign xrd = dw_xrd;

  typedef enum logic [2:0] {S_IDLE, S_INIT, S_CLEAR, S_STREAM, S_DRAIN, S_WB, S_DONE} state_t;
  state_t st;
  instr_t ir;

  logic [15:0] sh, sw, dh, dw_, kk;
  logic [3:0]  stride, pad;
  logic [7:0]  cbn, mbn, mb, cb, t;
  logic [3:0]  r, s;
  logic [15:0] e, f;
  logic [4:0]  cnt;
  logic        acc;

  assign sh = ir.opnd[0][15:0];
  assign sw = ir.opnd[1][15:0];
  assign dh = ir.opnd[2][15:0];
  assign dw_ = ir.opnd[3][15:0];
  assign stride = (ir.opnd[4][3:0] == 4'd0) ? 4'd1 : ir.opnd[4][3:0];
  assign acc = ir.opnd[5][0];
  assign cbn = ir.opnd[6][11:4];
  assign mbn = ir.opnd[7][11:4];
  assign pad = cfg.wg_pad;

  // stream addresses
  logic        pos_pad;
  logic [19:0] s_addr, d_addr, wb_base;
  always_comb begin
    int y, x;
    y = int'(e) * int'(stride) + int'(r) - int'(pad);
    x = int'(f) * int'(stride) + int'(s) - int'(pad);
    pos_pad = (y < 0) || (x < 0) || (y >= int'(sh)) || (x >= int'(sw));
    s_addr  = 20'(int'(ir.opnd[8][19:0]) + ((int'(t) * int'(cbn) + int'(cb)) * int'(sh) + ((y < 0) ? 0 : y)) * int'(sw) + ((x < 0) ? 0 : x));
    d_addr  = 20'(int'(ir.opnd[9][19:0]) + ((int'(t) * int'(mbn) + int'(mb)) * int'(dh) + int'(e)) * int'(dw_) + int'(f));
    wb_base = 20'(((int'(mb) * int'(cbn) + int'(cb)) * int'(kk) * int'(kk) + int'(r) * int'(kk) + int'(s)) * 16);
  end

  // pipeline: A read s; B read du if spikes; C array input
  logic        p1_v, p1_pad, p2_v;
  logic [19:0] p1_da;
  spk_t        p2_s, p1_s;
  logic        arr_clear;
  vec_t        acc_q [NL];

  assign p1_s = p1_pad ? '0 : s_rd;

  wg_array u_arr (.clk, .rst_n, .clear(arr_clear), .in_valid(p2_v), .du(du_rd), .s(p2_s), .acc(acc_q));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      p1_v <= 0; p1_pad <= 0; p1_da <= '0; p2_v <= 0; p2_s <= '0;
    end else begin
      p1_v <= (st == S_STREAM); p1_pad <= pos_pad; p1_da <= d_addr;
      p2_v <= p1_v && (p1_s != '0);
      p2_s <= p1_s;
    end
  end
  assign ev_gate2 = p1_v && (p1_s == '0);
  assign s_ra  = s_addr;
  assign du_ra = p1_da;
  assign arr_clear = (st == S_CLEAR);

  // write-back: cycle cnt reads row cnt, writes row cnt-1
  vec_t wb_sum;
  logic [3:0] wb_row;
  assign wb_row = 4'(cnt - 5'd1);
  for (genvar i = 0; i < NL; i++) begin : g_wb
    fp16_add u_add (.a(acc_q[wb_row][i]), .b(dw_rd[i]), .y(wb_sum[i]));
  end
  always_comb begin
    dw_ra = AD'(int'(wb_base) + int'(cnt[3:0]));
    dw_we = (st == S_WB) && (cnt != 5'd0);
    dw_wa = AD'(int'(wb_base) + int'(wb_row));
    dw_wd = acc ? wb_sum : acc_q[wb_row];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; ir <= '0; mb <= '0; cb <= '0; t <= '0; r <= '0; s <= '0; e <= '0; f <= '0;
      cnt <= '0; kk <= '0; done <= 0;
    end else begin
      done <= 1'b0;
      unique case (st)
        S_IDLE: if (start) begin
          ir <= instr;
          if (instr.op == WG_CONV) st <= S_INIT; else done <= 1'b1;
        end
        S_INIT: begin
          kk <= sh + 16'(2 * pad) - (dh - 16'd1) * 16'(stride);
          mb <= '0; cb <= '0; r <= '0; s <= '0;
          st <= S_CLEAR;
        end
        S_CLEAR: begin
          t <= '0; e <= '0; f <= '0; st <= S_STREAM;
        end
        S_STREAM: begin
          if (f + 16'd1 < dw_) f <= f + 16'd1;
          else begin
            f <= '0;
            if (e + 16'd1 < dh) e <= e + 16'd1;
            else begin
              e <= '0;
              if (t + 8'd1 < cfg.t_size) t <= t + 8'd1;
              else begin st <= S_DRAIN; cnt <= '0; end
            end
          end
        end
        S_DRAIN: begin
          cnt <= cnt + 5'd1;
          if (cnt == 5'd2) begin st <= S_WB; cnt <= '0; end
        end
        S_WB: begin
          cnt <= cnt + 5'd1;
          if (cnt == 5'd16) begin
            st <= S_CLEAR;
            if (16'(s) + 16'd1 < kk) s <= s + 4'd1;
            else begin
              s <= '0;
              if (16'(r) + 16'd1 < kk) r <= r + 4'd1;
              else begin
                r <= '0;
                if (cb + 8'd1 < cbn) cb <= cb + 8'd1;
                else begin
                  cb <= '0;
                  if (mb + 8'd1 < mbn) mb <= mb + 8'd1;
                  else begin st <= S_DONE; end
                end
              end
            end
          end
        end
        S_DONE: begin st <= S_IDLE; done <= 1'b1; end
        default: st <= S_IDLE;
      endcase
    end
  end

  assign busy = (st != S_IDLE);

endmodule

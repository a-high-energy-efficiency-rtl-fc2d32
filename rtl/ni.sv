// ni: Network Interface between a sub-core and its router port.
//
// Transmit side. NOC_DATA (flow_type, data_type, tag_id) looks up entry tag_id
// of the connection configuration table, sends a head flit with the
// destination core, sub-core, buffer and address and the length, then reads
// 'len' words from the local buffer through the Dispatch Unit and sends them
// as body flits (the last one a tail). NOC_CTRL (flow_type, tag_id, msg_box)
// sends one single-flit control message carrying msg_box to the destination
// of entry tag_id. Bit 0 of flow_type picks the virtual channel.
// Receive side. Head flits set up a per-VC write pointer; each body/tail flit
// is written through the Dispatch Unit to the addressed buffer; a control
// message raises its msg bits on event_set for one cycle (for the
// controller's BARRIER). Receive keeps separate state per VC, so packets on
// the two VCs may interleave.
// Interface: tx_valid/tx_flit accepted when tx_ready; rx_valid/rx_flit shown
// first-word-fall-through, removed with rx_pop. Table written by cw_en.
// Packet format, table layout and the data_type meaning (unused: the table
// names the buffers) are this design's choices.
module ni
  import snn_pkg::*;
#(
  parameter int NCONN = 16
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  instr_t            instr,
  output logic              busy,
  output logic              done,
  input  logic              cw_en,
  input  logic [3:0]        cw_idx,
  input  conn_t             cw_data,
  // to router (through CDC)
  output logic              tx_valid,
  output flit_t             tx_flit,
  input  logic              tx_ready,
  // from router (through CDC)
  input  logic              rx_valid,
  input  flit_t             rx_flit,
  output logic              rx_pop,
  output logic [15:0]       event_set,
  // dispatch unit: transmit reader
  output logic              txd_req,
  output logic [3:0]        txd_buf,
  output logic [19:0]       txd_addr,
  input  logic              txd_gnt,
  input  logic              txd_rvalid,
  input  logic [WORDW-1:0]  txd_rdata,
  // dispatch unit: receive writer
  output logic              rxd_req,
  output logic [3:0]        rxd_buf,
  output logic [19:0]       rxd_addr,
  output logic [WORDW-1:0]  rxd_wdata,
  input  logic              rxd_gnt
);

  conn_t table_q [NCONN];

  typedef enum logic [2:0] {T_IDLE, T_HEAD, T_RD, T_WAIT, T_SEND} tstate_t;
  tstate_t ts;
  conn_t       cn;
  logic        vc, ctrl;
  logic [15:0] msg;
  logic [15:0] left;
  logic [19:0] sa;
  logic [WORDW-1:0] data;
  head_t       h;

  always_ff @(posedge clk) if (cw_en) table_q[cw_idx] <= cw_data;

  always_comb begin
    h = '0;
    h.dst_x = cn.dst_x; h.dst_y = cn.dst_y; h.dst_sub = cn.dst_sub;
    h.is_ctrl = ctrl; h.dbuf = cn.dbuf; h.daddr = cn.daddr;
    h.len = ctrl ? 16'd0 : cn.len; h.msg = msg;
    tx_flit = '0;
    tx_flit.vc = vc;
    if (ts == T_HEAD) begin
      tx_flit.kind = (ctrl || cn.len == 0) ? FL_SINGLE : FL_HEAD;
      tx_flit.data = WORDW'(h);
    end else begin
      tx_flit.kind = (left == 1) ? FL_TAIL : FL_BODY;
      tx_flit.data = data;
    end
  end
  assign tx_valid = (ts == T_HEAD) || (ts == T_SEND);
  assign txd_req  = (ts == T_RD);
  assign txd_buf  = cn.sbuf;
  assign txd_addr = sa;
  assign busy     = (ts != T_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ts <= T_IDLE; cn <= '0; vc <= 0; ctrl <= 0; msg <= '0; left <= '0; sa <= '0; data <= '0; done <= 0;
    end else begin
      done <= 1'b0;
      unique case (ts)
        T_IDLE: if (start) begin
          if (instr.op == NOC_DATA) begin
            cn <= table_q[instr.opnd[2][3:0]]; vc <= instr.opnd[0][0]; ctrl <= 1'b0; msg <= '0;
            left <= table_q[instr.opnd[2][3:0]].len; sa <= table_q[instr.opnd[2][3:0]].saddr;
            ts <= T_HEAD;
          end else if (instr.op == NOC_CTRL) begin
            cn <= table_q[instr.opnd[1][3:0]]; vc <= instr.opnd[0][0]; ctrl <= 1'b1;
            msg <= instr.opnd[2][15:0]; left <= '0;
            ts <= T_HEAD;
          end else done <= 1'b1;
        end
        T_HEAD: if (tx_ready) begin
          if (ctrl || left == 0) begin ts <= T_IDLE; done <= 1'b1; end
          else ts <= T_RD;
        end
        T_RD:   if (txd_gnt) ts <= T_WAIT;
        T_WAIT: if (txd_rvalid) begin data <= txd_rdata; ts <= T_SEND; end
        T_SEND: if (tx_ready) begin
          left <= left - 1'b1; sa <= sa + 1'b1;
          if (left == 1) begin ts <= T_IDLE; done <= 1'b1; end else ts <= T_RD;
        end
        default: ts <= T_IDLE;
      endcase
    end
  end

  // ---------------- receive ----------------
  logic [3:0]  rbuf  [2];
  logic [19:0] raddr [2];
  head_t       rh;
  logic        is_data;

  assign rh        = head_t'(rx_flit.data[HEADW-1:0]);
  assign is_data   = rx_valid && (rx_flit.kind == FL_BODY || rx_flit.kind == FL_TAIL);
  assign rxd_req   = is_data;
  assign rxd_buf   = rbuf[rx_flit.vc];
  assign rxd_addr  = raddr[rx_flit.vc];
  assign rxd_wdata = rx_flit.data;
  assign rx_pop    = rx_valid && (is_data ? rxd_gnt : 1'b1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rbuf[0] <= '0; rbuf[1] <= '0; raddr[0] <= '0; raddr[1] <= '0; event_set <= '0;
    end else begin
      event_set <= '0;
      if (rx_valid && rx_flit.kind == FL_HEAD) begin
        rbuf[rx_flit.vc] <= rh.dbuf; raddr[rx_flit.vc] <= rh.daddr;
      end
      if (rx_valid && rx_flit.kind == FL_SINGLE && rh.is_ctrl) event_set <= rh.msg;
      if (is_data && rxd_gnt) raddr[rx_flit.vc] <= raddr[rx_flit.vc] + 1'b1;
    end
  end

endmodule

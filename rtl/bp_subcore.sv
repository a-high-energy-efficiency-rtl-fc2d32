// bp_subcore: backward-propagation sub-core.
//
// Joins the controller, the BP engine (w', Conv_BP, grad u^l buffers), the WG
// engine (grad w buffer), a DMA and a Network Interface on the router's BE
// port. The buffers both engines read are held here: the incoming gradient
// grad u^{l+1} (two read ports), the potentials u^l and the spikes s^l (two
// read ports), so BP_CONV/BP_GRAD and WG_CONV can run at the same time.
// Buffer ids seen by DMA/NI: 0 grad u^{l+1}, 1 w', 2 Conv_BP, 3 grad u^l,
// 4 u^l, 5 s^l, 6 grad w. Controller units: 0 BP engine, 1 WG engine, 2 DMA,
// 3 NI. Host writes as in the FP sub-core.
// Sizes of the shared buffers follow the BP SRAM table (128 KB, 128 KB,
// 8 KB); sharing them between the engines is this design's choice.
module bp_subcore
  import snn_pkg::*;
#(
  parameter int DUI_WORDS = 4096,
  parameter int U_WORDS   = 4096,
  parameter int S_WORDS   = 4096
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              host_we,
  input  logic [1:0]        host_kind,
  input  logic [7:0]        host_addr,
  input  instr_t            host_instr,
  input  core_cfg_t         host_cfg,
  input  conn_t             host_conn,
  output logic              tx_valid,
  output flit_t             tx_flit,
  input  logic              tx_ready,
  input  logic              rx_valid,
  input  flit_t             rx_flit,
  output logic              rx_pop,
  output logic              dram_req,
  output logic              dram_we,
  output logic [31:0]       dram_addr,
  output logic [WORDW-1:0]  dram_wdata,
  input  logic              dram_gnt,
  input  logic              dram_rvalid,
  input  logic [WORDW-1:0]  dram_rdata,
  output logic              prog_done,
  output logic              ev_gate1,
  output logic              ev_zero_du,
  output logic              ev_gate2
);

  localparam int AD = $clog2(DUI_WORDS), AU = $clog2(U_WORDS), AS = $clog2(S_WORDS);

  core_cfg_t cfg;
  instr_t    instr;
  logic [3:0] ustart, ubusy;
  logic [15:0] event_set;
  logic running;
  logic bp_done, wg_done, dma_done, ni_done;

  subcore_ctrl #(.IS_BP(1'b1), .NUNIT(4)) u_ctrl (
    .clk, .rst_n, .host_we, .host_kind, .host_addr, .host_instr, .host_cfg, .cfg,
    .event_set, .instr, .unit_start(ustart), .unit_busy(ubusy), .running, .prog_done);

  // dispatch unit
  logic [2:0]             rq, rwe, gnt, rv;
  logic [2:0][3:0]        rbuf;
  logic [2:0][19:0]       raddr;
  logic [2:0][WORDW-1:0]  rwd;
  logic [WORDW-1:0]       rdata;
  logic        xen, xwe;
  logic [3:0]  xbuf, xbuf_q;
  logic [19:0] xaddr;
  logic [WORDW-1:0] xwd, xrd, bp_xrd, wg_xrd, dui_xrd, u_xrd;
  logic [15:0] s_xrd;

  // shared buffers
  logic [19:0] bp_dui_ra, bp_u_ra, bp_s_ra, wg_s_ra, wg_du_ra;
  logic [1:0][WORDW-1:0] dui_rd;
  logic [0:0][WORDW-1:0] u_rd;
  logic [1:0][15:0]      s_rd;

  sram_buf #(.DEPTH(DUI_WORDS), .WIDTH(WORDW), .NRD(2)) u_dui (.clk,
    .ra({AD'(wg_du_ra), AD'(bp_dui_ra)}), .rd(dui_rd), .we(1'b0), .wa('0), .wd('0), .wm('0),
    .xen(xen && xbuf == 4'd0), .xwe, .xa(AD'(xaddr)), .xwd, .xrd(dui_xrd));
  sram_buf #(.DEPTH(U_WORDS), .WIDTH(WORDW), .NRD(1)) u_u (.clk,
    .ra(AU'(bp_u_ra)), .rd(u_rd), .we(1'b0), .wa('0), .wd('0), .wm('0),
    .xen(xen && xbuf == 4'd4), .xwe, .xa(AU'(xaddr)), .xwd, .xrd(u_xrd));
  sram_buf #(.DEPTH(S_WORDS), .WIDTH(16), .NRD(2)) u_s (.clk,
    .ra({AS'(wg_s_ra), AS'(bp_s_ra)}), .rd(s_rd), .we(1'b0), .wa('0), .wd('0), .wm('0),
    .xen(xen && xbuf == 4'd5), .xwe, .xa(AS'(xaddr)), .xwd(xwd[15:0]), .xrd(s_xrd));

  bp_engine u_bp (
    .clk, .rst_n, .cfg, .start(ustart[0]), .instr, .busy(ubusy[0]), .done(bp_done),
    .dui_ra(bp_dui_ra), .dui_rd(dui_rd[0]), .u_ra(bp_u_ra), .u_rd(u_rd[0]),
    .s_ra(bp_s_ra), .s_rd(s_rd[0]),
    .xen, .xwe, .xbuf, .xaddr, .xwd, .xrd(bp_xrd), .ev_gate1, .ev_zero_du);

  wg_engine u_wg (
    .clk, .rst_n, .cfg, .start(ustart[1]), .instr, .busy(ubusy[1]), .done(wg_done),
    .s_ra(wg_s_ra), .s_rd(s_rd[1]), .du_ra(wg_du_ra), .du_rd(dui_rd[1]),
    .xen, .xwe, .xbuf, .xaddr, .xwd, .xrd(wg_xrd), .ev_gate2);

  always_ff @(posedge clk) xbuf_q <= xbuf;
  always_comb begin
    unique case (xbuf_q)
      4'd0:             xrd = dui_xrd;
      4'd1, 4'd2, 4'd3: xrd = bp_xrd;
      4'd4:             xrd = u_xrd;
      4'd5:             xrd = {240'd0, s_xrd};
      4'd6:             xrd = wg_xrd;
      default:          xrd = '0;
    endcase
  end

  dma u_dma (
    .clk, .rst_n, .start(ustart[2]), .instr, .busy(ubusy[2]), .done(dma_done),
    .dram_req, .dram_we, .dram_addr, .dram_wdata, .dram_gnt, .dram_rvalid, .dram_rdata,
    .du_req(rq[2]), .du_we(rwe[2]), .du_buf(rbuf[2]), .du_addr(raddr[2]), .du_wdata(rwd[2]),
    .du_gnt(gnt[2]), .du_rvalid(rv[2]), .du_rdata(rdata));

  ni u_ni (
    .clk, .rst_n, .start(ustart[3]), .instr, .busy(ubusy[3]), .done(ni_done),
    .cw_en(host_we && host_kind == 2'd2), .cw_idx(host_addr[3:0]), .cw_data(host_conn),
    .tx_valid, .tx_flit, .tx_ready, .rx_valid, .rx_flit, .rx_pop, .event_set,
    .txd_req(rq[0]), .txd_buf(rbuf[0]), .txd_addr(raddr[0]), .txd_gnt(gnt[0]),
    .txd_rvalid(rv[0]), .txd_rdata(rdata),
    .rxd_req(rq[1]), .rxd_buf(rbuf[1]), .rxd_addr(raddr[1]), .rxd_wdata(rwd[1]), .rxd_gnt(gnt[1]));

  assign rwe[0] = 1'b0;
  assign rwd[0] = '0;
  assign rwe[1] = 1'b1;

  dispatch_unit #(.NREQ(3)) u_du (
    .clk, .rst_n, .req(rq), .we(rwe), .bufid(rbuf), .addr(raddr), .wdata(rwd),
    .gnt, .rvalid(rv), .rdata, .xen, .xwe, .xbuf, .xaddr, .xwd, .xrd);

endmodule

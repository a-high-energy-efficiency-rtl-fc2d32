// fp_subcore: forward-propagation sub-core.
//
// Joins the controller (instruction memory, configuration, barrier), the FP
// engine with its six buffers, a DMA to the shared DRAM, and a Network
// Interface to the router's FE port. A Dispatch Unit shares the engine's
// buffer port among NI transmit (requester 0), NI receive (1) and DMA (2).
// Controller unit numbers: 0 FP engine, 1 DMA, 2 NI.
// Host writes: kind 0 instruction, 1 configuration, 2 NI connection entry
// (host_addr = entry), 3 run. tx/rx carry flits to/from the CDC FIFOs.
// The composition follows the sub-core block diagram; the DU cache and the
// BN / vector units are not built (their opcodes complete at once).
module fp_subcore
  import snn_pkg::*;
(
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
  output logic              ev_skip
);

  core_cfg_t cfg;
  instr_t    instr;
  logic [2:0] ustart, ubusy;
  logic [15:0] event_set;
  logic running;
  logic eng_done, dma_done, ni_done;

  subcore_ctrl #(.IS_BP(1'b0), .NUNIT(3)) u_ctrl (
    .clk, .rst_n, .host_we, .host_kind, .host_addr, .host_instr, .host_cfg, .cfg,
    .event_set, .instr, .unit_start(ustart), .unit_busy(ubusy), .running, .prog_done);

  logic [2:0]             rq, rwe, gnt, rv;
  logic [2:0][3:0]        rbuf;
  logic [2:0][19:0]       raddr;
  logic [2:0][WORDW-1:0]  rwd;
  logic [WORDW-1:0]       rdata;
  logic        xen, xwe;
  logic [3:0]  xbuf;
  logic [19:0] xaddr;
  logic [WORDW-1:0] xwd, xrd;

  fp_engine u_eng (
    .clk, .rst_n, .cfg, .start(ustart[0]), .instr, .busy(ubusy[0]), .done(eng_done),
    .xen, .xwe, .xbuf, .xaddr, .xwd, .xrd, .ev_skip);

  dma u_dma (
    .clk, .rst_n, .start(ustart[1]), .instr, .busy(ubusy[1]), .done(dma_done),
    .dram_req, .dram_we, .dram_addr, .dram_wdata, .dram_gnt, .dram_rvalid, .dram_rdata,
    .du_req(rq[2]), .du_we(rwe[2]), .du_buf(rbuf[2]), .du_addr(raddr[2]), .du_wdata(rwd[2]),
    .du_gnt(gnt[2]), .du_rvalid(rv[2]), .du_rdata(rdata));

  ni u_ni (
    .clk, .rst_n, .start(ustart[2]), .instr, .busy(ubusy[2]), .done(ni_done),
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

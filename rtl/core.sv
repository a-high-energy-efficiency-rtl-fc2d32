// core: one neuromorphic core of the mesh.
//
// An FP sub-core and a BP sub-core, each with its own controller and Network
// Interface, and one router. The sub-cores run on the core clock; the router
// runs on the faster NoC clock, so each NI connects to the router's FE/BE
// port through a pair of asynchronous FIFOs (transmit and receive). The four
// mesh ports (E, S, W, N) are brought out as plain link signals:
// link_out_* leave this core, link_in_* arrive; ready is per virtual channel.
// Each sub-core has its own DRAM request port (index 0 FP, 1 BP).
// Host writes select the sub-core with host_sub (0 FP, 1 BP).
// The FP/BP split, router ports and separate clock domains follow the
// architecture; the FIFO depth is this design's choice.
module core
  import snn_pkg::*;
#(
  parameter int CDC_DEPTH = 8
) (
  input  logic                  clk,
  input  logic                  clk_noc,
  input  logic                  rst_n,
  input  logic [2:0]            my_x,
  input  logic [2:0]            my_y,
  input  logic                  host_we,
  input  logic                  host_sub,
  input  logic [1:0]            host_kind,
  input  logic [7:0]            host_addr,
  input  instr_t                host_instr,
  input  core_cfg_t             host_cfg,
  input  conn_t                 host_conn,
  // mesh links, index P_E..P_N
  input  logic [3:0]            link_in_valid,
  input  flit_t                 link_in_flit  [4],
  output logic [3:0][1:0]       link_in_ready,
  output logic [3:0]            link_out_valid,
  output flit_t                 link_out_flit [4],
  input  logic [3:0][1:0]       link_out_ready,
  // DRAM, index 0 FP sub-core, 1 BP sub-core
  output logic [1:0]            dram_req,
  output logic [1:0]            dram_we,
  output logic [1:0][31:0]      dram_addr,
  output logic [1:0][WORDW-1:0] dram_wdata,
  input  logic [1:0]            dram_gnt,
  input  logic [1:0]            dram_rvalid,
  input  logic [WORDW-1:0]      dram_rdata,
  output logic [1:0]            prog_done,
  output logic                  ev_skip,
  output logic                  ev_gate1,
  output logic                  ev_zero_du,
  output logic                  ev_gate2
);

  localparam int FW = $bits(flit_t);

  // sub-core side of the FIFOs
  logic [1:0] tx_valid, tx_ready, rx_valid, rx_pop;
  flit_t      tx_flit [2];
  flit_t      rx_flit [2];

  fp_subcore u_fp (
    .clk, .rst_n, .host_we(host_we && !host_sub), .host_kind, .host_addr, .host_instr, .host_cfg, .host_conn,
    .tx_valid(tx_valid[0]), .tx_flit(tx_flit[0]), .tx_ready(tx_ready[0]),
    .rx_valid(rx_valid[0]), .rx_flit(rx_flit[0]), .rx_pop(rx_pop[0]),
    .dram_req(dram_req[0]), .dram_we(dram_we[0]), .dram_addr(dram_addr[0]), .dram_wdata(dram_wdata[0]),
    .dram_gnt(dram_gnt[0]), .dram_rvalid(dram_rvalid[0]), .dram_rdata,
    .prog_done(prog_done[0]), .ev_skip);

  bp_subcore u_bp (
    .clk, .rst_n, .host_we(host_we && host_sub), .host_kind, .host_addr, .host_instr, .host_cfg, .host_conn,
    .tx_valid(tx_valid[1]), .tx_flit(tx_flit[1]), .tx_ready(tx_ready[1]),
    .rx_valid(rx_valid[1]), .rx_flit(rx_flit[1]), .rx_pop(rx_pop[1]),
    .dram_req(dram_req[1]), .dram_we(dram_we[1]), .dram_addr(dram_addr[1]), .dram_wdata(dram_wdata[1]),
    .dram_gnt(dram_gnt[1]), .dram_rvalid(dram_rvalid[1]), .dram_rdata,
    .prog_done(prog_done[1]), .ev_gate1, .ev_zero_du, .ev_gate2);

  // router
  logic [NPORT-1:0]      r_in_valid, r_out_valid;
  flit_t                 r_in_flit  [NPORT];
  flit_t                 r_out_flit [NPORT];
  logic [NPORT-1:0][1:0] r_in_ready, r_out_ready;

  router u_router (
    .clk(clk_noc), .rst_n, .my_x, .my_y,
    .in_valid(r_in_valid), .in_flit(r_in_flit), .in_ready(r_in_ready),
    .out_valid(r_out_valid), .out_flit(r_out_flit), .out_ready(r_out_ready));

  always_comb begin
    for (int d = 0; d < 4; d++) begin
      r_in_valid[d]     = link_in_valid[d];
      r_in_flit[d]      = link_in_flit[d];
      link_in_ready[d]  = r_in_ready[d];
      link_out_valid[d] = r_out_valid[d];
      link_out_flit[d]  = r_out_flit[d];
      r_out_ready[d]    = link_out_ready[d];
    end
  end

  // clock-domain crossing FIFOs between the NIs and the router's FE/BE ports
  for (genvar i = 0; i < 2; i++) begin : g_cdc
    logic          up_rvalid, dn_wready2;
    logic [FW-1:0] up_rdata;
    flit_t         up_flit;
    logic [FW-1:0] dn_rdata;

    cdc_fifo #(.W(FW), .DEPTH(CDC_DEPTH)) u_up (
      .wclk(clk), .wrst_n(rst_n), .wen(tx_valid[i] && tx_ready[i]), .wdata(tx_flit[i]), .wready2(tx_ready[i]),
      .rclk(clk_noc), .rrst_n(rst_n), .rvalid(up_rvalid), .rdata(up_rdata),
      .rpop(up_rvalid && r_in_ready[P_FE+i][up_flit.vc]));
    assign up_flit = flit_t'(up_rdata);
    assign r_in_valid[P_FE+i] = up_rvalid && r_in_ready[P_FE+i][up_flit.vc];
    assign r_in_flit[P_FE+i]  = up_flit;

    cdc_fifo #(.W(FW), .DEPTH(CDC_DEPTH)) u_dn (
      .wclk(clk_noc), .wrst_n(rst_n), .wen(r_out_valid[P_FE+i]), .wdata(r_out_flit[P_FE+i]), .wready2(dn_wready2),
      .rclk(clk), .rrst_n(rst_n), .rvalid(rx_valid[i]), .rdata(dn_rdata), .rpop(rx_pop[i]));
    assign rx_flit[i] = flit_t'(dn_rdata);
    assign r_out_ready[P_FE+i] = {dn_wready2, dn_wready2};
  end

endmodule

// snn_multicore: the multi-core training chip, a 2D mesh of cores.
//
// COLS x ROWS cores (4 x 8 = 32 by default) joined by their routers in a
// mesh; core (x, y) has id y*COLS + x. East/west/north/south links connect
// neighbours; links at the mesh edge are tied off (no traffic is ever routed
// there by XY routing). All sub-cores reach the external DRAM through one
// round-robin arbiter; DRAM master id = 2*core id + sub-core (0 FP, 1 BP).
// The host programs a sub-core with host_we/host_core/host_sub: kind 0
// writes an instruction, 1 the configuration, 2 an NI connection entry,
// 3 starts the program. prog_done shows which sub-cores have reached
// OP_END. The ev_* outputs pulse when the engines skip work (FP all-zero
// spikes, BP fire' gating, zero gradient lanes, WG zero-spike positions).
// Core count, mesh, clocks (core 500 MHz, NoC 667 MHz) follow the
// architecture; the host and DRAM ports are this design's choices.
module snn_multicore
  import snn_pkg::*;
#(
  parameter int COLS = 4,
  parameter int ROWS = 8,
  localparam int NC  = COLS * ROWS,
  localparam int IW  = $clog2(2 * NC)
) (
  input  logic                 clk,
  input  logic                 clk_noc,
  input  logic                 rst_n,
  input  logic                 host_we,
  input  logic [5:0]           host_core,
  input  logic                 host_sub,
  input  logic [1:0]           host_kind,
  input  logic [7:0]           host_addr,
  input  instr_t               host_instr,
  input  core_cfg_t            host_cfg,
  input  conn_t                host_conn,
  output logic                 mem_req,
  output logic                 mem_we,
  output logic [31:0]          mem_addr,
  output logic [WORDW-1:0]     mem_wdata,
  output logic [IW-1:0]        mem_id,
  input  logic                 mem_gnt,
  input  logic                 mem_rvalid,
  input  logic [IW-1:0]        mem_rid,
  input  logic [WORDW-1:0]     mem_rdata,
  output logic [2*NC-1:0]      prog_done,
  output logic [NC-1:0]        ev_skip,
  output logic [NC-1:0]        ev_gate1,
  output logic [NC-1:0]        ev_zero_du,
  output logic [NC-1:0]        ev_gate2
);

  // link wires: out of core c in direction d
  logic [NC-1:0][3:0]       o_valid;
  flit_t                    o_flit  [NC][4];
  logic [NC-1:0][3:0][1:0]  i_ready;
  logic [NC-1:0][3:0]       i_valid;
  flit_t                    i_flit  [NC][4];
  logic [NC-1:0][3:0][1:0]  o_ready;

  logic [2*NC-1:0]              d_req, d_we, d_gnt, d_rvalid;
  logic [2*NC-1:0][31:0]        d_addr;
  logic [2*NC-1:0][WORDW-1:0]   d_wdata;
  logic [WORDW-1:0]             d_rdata;

  for (genvar y = 0; y < ROWS; y++) begin : g_row
    for (genvar x = 0; x < COLS; x++) begin : g_col
      localparam int C = y * COLS + x;
      // neighbour wiring: input on port d comes from the neighbour's opposite port
      localparam int CE = (x < COLS - 1) ? C + 1 : C;
      localparam int CW = (x > 0) ? C - 1 : C;
      localparam int CS = (y < ROWS - 1) ? C + COLS : C;
      localparam int CN = (y > 0) ? C - COLS : C;
      localparam bit HE = (x < COLS - 1), HW = (x > 0), HS = (y < ROWS - 1), HN = (y > 0);

      assign i_valid[C][P_E] = HE ? o_valid[CE][P_W] : 1'b0;
      assign i_flit[C][P_E]  = HE ? o_flit[CE][P_W]  : '0;
      assign o_ready[C][P_E] = HE ? i_ready[CE][P_W] : 2'b00;
      assign i_valid[C][P_W] = HW ? o_valid[CW][P_E] : 1'b0;
      assign i_flit[C][P_W]  = HW ? o_flit[CW][P_E]  : '0;
      assign o_ready[C][P_W] = HW ? i_ready[CW][P_E] : 2'b00;
      assign i_valid[C][P_S] = HS ? o_valid[CS][P_N] : 1'b0;
      assign i_flit[C][P_S]  = HS ? o_flit[CS][P_N]  : '0;
      assign o_ready[C][P_S] = HS ? i_ready[CS][P_N] : 2'b00;
      assign i_valid[C][P_N] = HN ? o_valid[CN][P_S] : 1'b0;
      assign i_flit[C][P_N]  = HN ? o_flit[CN][P_S]  : '0;
      assign o_ready[C][P_N] = HN ? i_ready[CN][P_S] : 2'b00;

      core u_core (
        .clk, .clk_noc, .rst_n, .my_x(3'(x)), .my_y(3'(y)),
        .host_we(host_we && host_core == 6'(C)), .host_sub, .host_kind, .host_addr,
        .host_instr, .host_cfg, .host_conn,
        .link_in_valid(i_valid[C]), .link_in_flit(i_flit[C]), .link_in_ready(i_ready[C]),
        .link_out_valid(o_valid[C]), .link_out_flit(o_flit[C]), .link_out_ready(o_ready[C]),
        .dram_req(d_req[2*C +: 2]), .dram_we(d_we[2*C +: 2]), .dram_addr(d_addr[2*C +: 2]),
        .dram_wdata(d_wdata[2*C +: 2]), .dram_gnt(d_gnt[2*C +: 2]), .dram_rvalid(d_rvalid[2*C +: 2]),
        .dram_rdata(d_rdata), .prog_done(prog_done[2*C +: 2]),
        .ev_skip(ev_skip[C]), .ev_gate1(ev_gate1[C]), .ev_zero_du(ev_zero_du[C]), .ev_gate2(ev_gate2[C]));
    end
  end

  dram_arbiter #(.NM(2 * NC)) u_arb (
    .clk, .rst_n, .req(d_req), .we(d_we), .addr(d_addr), .wdata(d_wdata),
    .gnt(d_gnt), .rvalid(d_rvalid), .rdata(d_rdata),
    .mem_req, .mem_we, .mem_addr, .mem_wdata, .mem_id, .mem_gnt, .mem_rvalid, .mem_rid, .mem_rdata);

endmodule

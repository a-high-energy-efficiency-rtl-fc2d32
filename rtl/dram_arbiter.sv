// dram_arbiter: shares the off-chip DRAM port among all DMA engines.
//
// NM masters (two per core) present req/we/addr/wdata and hold them until
// gnt. A round-robin arbiter forwards one request per cycle to the DRAM port
// together with the master's id when the DRAM accepts (mem_gnt). Read data
// come back with mem_rvalid and the id (mem_rid) and are steered to that
// master's rvalid; rdata is shared. The bus protocol and the arbitration
// policy are this design's choices; the architecture only states that all
// cores reach DRAM over a shared bus.
module dram_arbiter
  import snn_pkg::*;
#(
  parameter int NM = 64,
  localparam int IW = $clog2(NM)
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic [NM-1:0]          req,
  input  logic [NM-1:0]          we,
  input  logic [NM-1:0][31:0]    addr,
  input  logic [NM-1:0][WORDW-1:0] wdata,
  output logic [NM-1:0]          gnt,
  output logic [NM-1:0]          rvalid,
  output logic [WORDW-1:0]       rdata,
  output logic                   mem_req,
  output logic                   mem_we,
  output logic [31:0]            mem_addr,
  output logic [WORDW-1:0]       mem_wdata,
  output logic [IW-1:0]          mem_id,
  input  logic                   mem_gnt,
  input  logic                   mem_rvalid,
  input  logic [IW-1:0]          mem_rid,
  input  logic [WORDW-1:0]       mem_rdata
);

  logic [IW-1:0] last, sel;
  logic any;

  always_comb begin
    any = 1'b0;
    sel = '0;
    for (int k = 1; k <= NM; k++) begin
      int i;
      i = (int'(last) + k) % NM;
      if (!any && req[i]) begin any = 1'b1; sel = IW'(i); end
    end
    mem_req   = any;
    mem_we    = we[sel];
    mem_addr  = addr[sel];
    mem_wdata = wdata[sel];
    mem_id    = sel;
    gnt = '0;
    if (any && mem_gnt) gnt[sel] = 1'b1;
    rvalid = '0;
    if (mem_rvalid) rvalid[mem_rid] = 1'b1;
  end
  assign rdata = mem_rdata;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) last <= IW'(NM - 1);
    else if (any && mem_gnt) last <= sel;
  end

endmodule

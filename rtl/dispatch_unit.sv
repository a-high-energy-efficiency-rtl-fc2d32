// dispatch_unit: shares a sub-core's buffer port among its data movers.
//
// Requesters (NI transmit, NI receive, DMA) each present a request with a
// buffer id, word address, write flag and data. A round-robin arbiter grants
// one request per cycle and forwards it to the buffer port of the engines;
// read data returns on rdata one cycle after the grant, with rvalid raised
// for the requester that was granted. Separate write and read paths through
// one arbiter stand in for the read and write arbiters; the narrow spike
// buffers take the low 16 bits of the 256-bit word at their own port (width
// adaptation). The paper's DU also holds a cache, which is not built here.
module dispatch_unit
  import snn_pkg::*;
#(
  parameter int NREQ = 3
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic [NREQ-1:0]             req,
  input  logic [NREQ-1:0]             we,
  input  logic [NREQ-1:0][3:0]        bufid,
  input  logic [NREQ-1:0][19:0]       addr,
  input  logic [NREQ-1:0][WORDW-1:0]  wdata,
  output logic [NREQ-1:0]             gnt,
  output logic [NREQ-1:0]             rvalid,
  output logic [WORDW-1:0]            rdata,
  // buffer port
  output logic                        xen,
  output logic                        xwe,
  output logic [3:0]                  xbuf,
  output logic [19:0]                 xaddr,
  output logic [WORDW-1:0]            xwd,
  input  logic [WORDW-1:0]            xrd
);

  localparam int IW = (NREQ > 1) ? $clog2(NREQ) : 1;
  logic [IW-1:0] last;
  logic [IW-1:0] sel;
  logic          any;

  always_comb begin
    any = 1'b0;
    sel = '0;
    for (int k = 1; k <= NREQ; k++) begin
      int i;
      i = (int'(last) + k) % NREQ;
      if (!any && req[i]) begin any = 1'b1; sel = IW'(i); end
    end
    gnt = '0;
    if (any) gnt[sel] = 1'b1;
    xen   = any;
    xwe   = any && we[sel];
    xbuf  = bufid[sel];
    xaddr = addr[sel];
    xwd   = wdata[sel];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      last <= '0; rvalid <= '0;
    end else begin
      rvalid <= gnt & ~we;
      if (any) last <= sel;
    end
  end
  assign rdata = xrd;

endmodule

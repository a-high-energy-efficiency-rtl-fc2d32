// sram_buf: one on-chip SRAM buffer of a sub-core, written as an array.
//
// Each buffer of the core's SRAM map (input spikes, weights, Conv_FP, u, ...)
// is one instance. It has NRD engine read ports (two where the BP and WG
// engines share a buffer), one engine write port with a bit mask (so an engine
// can update only the lanes whose gradient is live), and one port for the
// Dispatch Unit, which moves data between the buffer and the NoC or DRAM.
// All reads are synchronous: data appears the cycle after the address. A read
// and a write of the same word in one cycle return the old word. If the engine
// and the Dispatch Unit write the same word in the same cycle the engine wins.
// The port structure and the one-cycle latency are this design's own choices;
// sizes come from the core's SRAM table and are set by each instance.
module sram_buf #(
  parameter int DEPTH = 4096,
  parameter int WIDTH = 256,
  parameter int NRD   = 1,
  localparam int AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic                         clk,
  input  logic [NRD-1:0][AW-1:0]       ra,
  output logic [NRD-1:0][WIDTH-1:0]    rd,
  input  logic                         we,
  input  logic [AW-1:0]                wa,
  input  logic [WIDTH-1:0]             wd,
  input  logic [WIDTH-1:0]             wm,
  input  logic                         xen,
  input  logic                         xwe,
  input  logic [AW-1:0]                xa,
  input  logic [WIDTH-1:0]             xwd,
  output logic [WIDTH-1:0]             xrd
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    for (int i = 0; i < NRD; i++) rd[i] <= mem[ra[i]];
    if (xen) xrd <= mem[xa];
    if (xen && xwe) mem[xa] <= xwd;
    if (we) mem[wa] <= (mem[wa] & ~wm) | (wd & wm);
  end

endmodule

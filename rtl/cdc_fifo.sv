// cdc_fifo: asynchronous FIFO that isolates the core clock from the router
// clock (the routers run faster than the engines to raise link bandwidth).
//
// Classic Gray-code design: each side keeps a binary and a Gray pointer; the
// Gray pointer of the other side is brought over through two flip-flops.
// Write side: wen stores wdata; wready2 is high while at least two slots are
// free (a conservative count, since the read pointer seen is late), matching
// the router's "two free slots" ready rule. Read side is first-word
// fall-through: rvalid/rdata show the oldest entry, rpop removes it.
// DEPTH must be a power of two. The structure is this design's choice; the
// need for clock-domain isolation comes from the architecture.
module cdc_fifo #(
  parameter int W     = 259,
  parameter int DEPTH = 8,
  localparam int AW   = $clog2(DEPTH)
) (
  input  logic         wclk,
  input  logic         wrst_n,
  input  logic         wen,
  input  logic [W-1:0] wdata,
  output logic         wready2,
  input  logic         rclk,
  input  logic         rrst_n,
  output logic         rvalid,
  output logic [W-1:0] rdata,
  input  logic         rpop
);

  logic [W-1:0] mem [DEPTH];
  logic [AW:0] wbin, wgray, rbin, rgray;
  logic [AW:0] rg_w1, rg_w2, wg_r1, wg_r2;
  logic [AW:0] rbin_w, used;

  function automatic logic [AW:0] g2b(logic [AW:0] g);
    logic [AW:0] b;
    b[AW] = g[AW];
    for (int i = AW - 1; i >= 0; i--) b[i] = b[i+1] ^ g[i];
    return b;
  endfunction

  // write domain
  always_ff @(posedge wclk or negedge wrst_n) begin
    if (!wrst_n) begin
      wbin <= '0; wgray <= '0; rg_w1 <= '0; rg_w2 <= '0;
    end else begin
      rg_w1 <= rgray; rg_w2 <= rg_w1;
      if (wen) begin
        wbin  <= wbin + 1'b1;
        wgray <= (wbin + 1'b1) ^ ((wbin + 1'b1) >> 1);
      end
    end
  end
  always_ff @(posedge wclk) if (wen) mem[wbin[AW-1:0]] <= wdata;
  assign rbin_w  = g2b(rg_w2);
  assign used    = wbin - rbin_w;
  assign wready2 = (used <= (AW+1)'(DEPTH - 2));

  // read domain
  always_ff @(posedge rclk or negedge rrst_n) begin
    if (!rrst_n) begin
      rbin <= '0; rgray <= '0; wg_r1 <= '0; wg_r2 <= '0;
    end else begin
      wg_r1 <= wgray; wg_r2 <= wg_r1;
      if (rpop && rvalid) begin
        rbin  <= rbin + 1'b1;
        rgray <= (rbin + 1'b1) ^ ((rbin + 1'b1) >> 1);
      end
    end
  end
  assign rvalid = (rgray != wg_r2);
  assign rdata  = mem[rbin[AW-1:0]];

endmodule

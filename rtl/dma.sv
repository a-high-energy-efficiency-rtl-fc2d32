// dma: block mover between the shared DRAM and a sub-core buffer.
//
// DMA_RD (data_type, src_addr, dst_addr, length) copies 'length' 256-bit
// words from DRAM word address src_addr to buffer data_type starting at
// dst_addr; DMA_WR copies from the buffer to DRAM. One word is in flight at a
// time: DRAM request until granted, wait for the tagged read response (or the
// write grant), then the Dispatch Unit request until granted. DRAM bus
// (this design's choice): req/we/addr/wdata held until gnt; read data comes
// back later with rvalid. busy rises the cycle after start; done pulses once.
module dma
  import snn_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  instr_t            instr,
  output logic              busy,
  output logic              done,
  output logic              dram_req,
  output logic              dram_we,
  output logic [31:0]       dram_addr,
  output logic [WORDW-1:0]  dram_wdata,
  input  logic              dram_gnt,
  input  logic              dram_rvalid,
  input  logic [WORDW-1:0]  dram_rdata,
  output logic              du_req,
  output logic              du_we,
  output logic [3:0]        du_buf,
  output logic [19:0]       du_addr,
  output logic [WORDW-1:0]  du_wdata,
  input  logic              du_gnt,
  input  logic              du_rvalid,
  input  logic [WORDW-1:0]  du_rdata
);

  typedef enum logic [2:0] {S_IDLE, S_DREQ, S_DWAIT, S_SWR, S_SRD, S_SWAIT, S_DWR} state_t;
  state_t st;
  logic        wr;           // DMA_WR: SRAM -> DRAM
  logic [3:0]  bufid;
  logic [31:0] daddr;
  logic [19:0] saddr;
  logic [31:0] left;
  logic [WORDW-1:0] data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; wr <= 0; bufid <= '0; daddr <= '0; saddr <= '0; left <= '0; data <= '0; done <= 0;
    end else begin
      done <= 1'b0;
      unique case (st)
        S_IDLE: if (start) begin
          bufid <= instr.opnd[0][3:0];
          if (instr.op == DMA_RD) begin
            wr <= 1'b0; daddr <= instr.opnd[1]; saddr <= instr.opnd[2][19:0];
          end else begin
            wr <= 1'b1; saddr <= instr.opnd[1][19:0]; daddr <= instr.opnd[2];
          end
          left <= instr.opnd[3];
          if ((instr.op != DMA_RD && instr.op != DMA_WR) || instr.opnd[3] == 0) done <= 1'b1;
          else st <= (instr.op == DMA_RD) ? S_DREQ : S_SRD;
        end
        S_DREQ:  if (dram_gnt) st <= S_DWAIT;
        S_DWAIT: if (dram_rvalid) begin data <= dram_rdata; st <= S_SWR; end
        S_SWR:   if (du_gnt) begin
          left <= left - 1; daddr <= daddr + 1; saddr <= saddr + 1;
          if (left == 1) begin st <= S_IDLE; done <= 1'b1; end else st <= S_DREQ;
        end
        S_SRD:   if (du_gnt) st <= S_SWAIT;
        S_SWAIT: if (du_rvalid) begin data <= du_rdata; st <= S_DWR; end
        S_DWR:   if (dram_gnt) begin
          left <= left - 1; daddr <= daddr + 1; saddr <= saddr + 1;
          if (left == 1) begin st <= S_IDLE; done <= 1'b1; end else st <= S_SRD;
        end
        default: st <= S_IDLE;
      endcase
    end
  end

  assign busy       = (st != S_IDLE);
  assign dram_req   = (st == S_DREQ) || (st == S_DWR);
  assign dram_we    = (st == S_DWR);
  assign dram_addr  = daddr;
  assign dram_wdata = data;
  assign du_req     = (st == S_SWR) || (st == S_SRD);
  assign du_we      = (st == S_SWR);
  assign du_buf     = bufid;
  assign du_addr    = saddr;
  assign du_wdata   = data;

endmodule

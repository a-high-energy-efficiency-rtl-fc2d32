// subcore_ctrl: instruction controller of one sub-core.
//
// Holds the instruction memory (filled by the host), the configuration
// registers (leak, thresholds, surrogate window, time steps) and an event
// register. After 'run' it fetches instructions in order and issues each to
// the unit that executes it as soon as that unit is idle, so work on
// different units (engine, DMA, NI) overlaps. BARRIER sub_type 0 waits until
// every unit is idle; sub_type 1 waits until all event bits in operand_1 have
// arrived from the network, then clears them. OP_END stops the program and
// raises prog_done. Mapping of opcodes to units comes from parameter IS_BP:
//   FP sub-core: 0 FP engine (FP_CONV/FP_SOMA/FP_BN/FP_VECTOR), 1 DMA, 2 NI
//   BP sub-core: 0 BP engine (BP_CONV/BP_GRAD/BP_BN/BP_VECTOR), 1 WG engine,
//                2 DMA, 3 NI
// Units must raise busy the cycle after their start pulse.
// Host writes: host_kind 0 instruction at host_addr, 1 configuration, 3 run.
// The opcode/operand word follows the instruction format; barrier semantics,
// the event register and the memory depth are this design's choices.
module subcore_ctrl
  import snn_pkg::*;
#(
  parameter bit IS_BP = 1'b0,
  parameter int IMEM_DEPTH = 64,
  parameter int NUNIT = 4
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              host_we,
  input  logic [1:0]        host_kind,
  input  logic [7:0]        host_addr,
  input  instr_t            host_instr,
  input  core_cfg_t         host_cfg,
  output core_cfg_t         cfg,
  input  logic [15:0]       event_set,
  output instr_t            instr,
  output logic [NUNIT-1:0]  unit_start,
  input  logic [NUNIT-1:0]  unit_busy,
  output logic              running,
  output logic              prog_done
);

  localparam int PW = $clog2(IMEM_DEPTH);
  instr_t      imem [IMEM_DEPTH];
  logic [PW-1:0] pc;
  logic [15:0] events;
  logic [1:0]  unit;
  logic        adv;
  logic [15:0] ev_clr;

  always_ff @(posedge clk)
    if (host_we && host_kind == 2'd0) imem[host_addr[PW-1:0]] <= host_instr;

  assign instr = imem[pc];

  always_comb begin
    unique case (instr.op)
      FP_CONV, FP_SOMA, FP_BN, FP_VECTOR, BP_CONV, BP_GRAD, BP_BN, BP_VECTOR: unit = 2'd0;
      WG_CONV:        unit = 2'd1;
      DMA_RD, DMA_WR: unit = IS_BP ? 2'd2 : 2'd1;
      default:        unit = IS_BP ? 2'd3 : 2'd2;
    endcase
    adv        = 1'b0;
    unit_start = '0;
    ev_clr     = '0;
    if (running) begin
      if (instr.op == OP_END) begin
        adv = 1'b0;
      end else if (instr.op == OP_NOP) begin
        adv = 1'b1;
      end else if (instr.op == BARRIER) begin
        if (instr.opnd[0][0] == 1'b0) adv = (unit_busy == '0);
        else begin
          adv    = ((events & instr.opnd[1][15:0]) == instr.opnd[1][15:0]);
          ev_clr = adv ? instr.opnd[1][15:0] : 16'd0;
        end
      end else if (!unit_busy[unit]) begin
        adv = 1'b1;
        unit_start[unit] = 1'b1;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cfg <= CFG_RESET; pc <= '0; events <= '0; running <= 1'b0; prog_done <= 1'b0;
    end else begin
      if (host_we && host_kind == 2'd1) cfg <= host_cfg;
      events <= (events & ~ev_clr) | event_set;
      if (host_we && host_kind == 2'd3) begin
        pc <= '0; running <= 1'b1; prog_done <= 1'b0;
      end else if (running) begin
        if (instr.op == OP_END) begin
          running <= 1'b0; prog_done <= 1'b1;
        end else if (adv) pc <= pc + 1'b1;
      end
    end
  end

endmodule

// snn_pkg: types and constants shared by the whole training accelerator.
//
// Every compute engine works on 16 lanes of IEEE half precision (FP16) values,
// and every spike vector is 16 one-bit channels, so one 256-bit SRAM word holds
// one 16-lane value vector and one 16-bit word holds one spike vector.
// The instruction word is an opcode followed by operand slots, in the order the
// operands are listed for each opcode in the instruction-set table (operand_0
// first). Flits are 256-bit payloads with a 2-bit kind and a virtual-channel bit.
// The field widths below are this design's own choices; the opcode list, the
// operand order, 16-lane arrays, the two virtual channels and the six router
// ports come from the architecture description.
package snn_pkg;

  localparam int NL = 16;                  // lanes per array edge (16x16 arrays)
  localparam int WORDW = NL * 16;          // 256-bit value word
  localparam int NOPND = 12;               // operand slots per instruction

  typedef logic [15:0] fp16_t;
  typedef logic [NL-1:0][15:0] vec_t;      // 16 FP16 lanes
  typedef logic [NL-1:0] spk_t;            // 16 spike channels

  localparam fp16_t FP16_ONE = 16'h3C00;

  typedef enum logic [4:0] {
    OP_NOP    = 5'd0,
    FP_CONV   = 5'd1,
    BP_CONV   = 5'd2,
    WG_CONV   = 5'd3,
    FP_SOMA   = 5'd4,
    BP_GRAD   = 5'd5,
    FP_BN     = 5'd6,
    BP_BN     = 5'd7,
    FP_VECTOR = 5'd8,
    BP_VECTOR = 5'd9,
    NOC_DATA  = 5'd10,
    NOC_CTRL  = 5'd11,
    DMA_WR    = 5'd12,
    DMA_RD    = 5'd13,
    BARRIER   = 5'd14,
    OP_END    = 5'd15
  } opcode_t;

  typedef struct packed {
    opcode_t                    op;
    logic [NOPND-1:0][31:0]     opnd;      // opnd[0] is operand_0
  } instr_t;

  // Per-sub-core configuration registers (written by the host/driver).
  typedef struct packed {
    fp16_t       alpha;    // leakage factor
    fp16_t       th_f;     // firing threshold
    fp16_t       th_l;     // surrogate window low bound
    fp16_t       th_r;     // surrogate window high bound
    fp16_t       beta;     // surrogate gradient height
    logic [7:0]  t_size;   // time steps T
    logic [3:0]  wg_pad;   // padding used by WG_CONV
  } core_cfg_t;

  localparam core_cfg_t CFG_RESET = '{alpha: 16'h3800, th_f: FP16_ONE, th_l: 16'h3800,
                                      th_r: 16'h3E00, beta: FP16_ONE, t_size: 8'd4, wg_pad: 4'd1};

  // ---------------- NoC ----------------
  typedef enum logic [1:0] {FL_HEAD = 2'd0, FL_BODY = 2'd1, FL_TAIL = 2'd2, FL_SINGLE = 2'd3} flit_kind_t;

  typedef struct packed {
    flit_kind_t         kind;
    logic               vc;
    logic [WORDW-1:0]   data;
  } flit_t;

  // Head / single flit fields, held in the low bits of data.
  typedef struct packed {
    logic [2:0]  dst_x;
    logic [2:0]  dst_y;
    logic        dst_sub;   // 0: FP sub-core, 1: BP sub-core
    logic        is_ctrl;   // control message (NOC_CTRL)
    logic [3:0]  dbuf;      // destination buffer
    logic [19:0] daddr;     // destination word address
    logic [15:0] len;       // body flits that follow
    logic [15:0] msg;       // event bits for a control message
  } head_t;

  localparam int HEADW = $bits(head_t);

  // Connection configuration table entry of a Network Interface.
  typedef struct packed {
    logic [2:0]  dst_x;
    logic [2:0]  dst_y;
    logic        dst_sub;
    logic [3:0]  dbuf;
    logic [19:0] daddr;
    logic [3:0]  sbuf;
    logic [19:0] saddr;
    logic [15:0] len;
  } conn_t;

  // Router port numbering.
  localparam int P_E = 0, P_S = 1, P_W = 2, P_N = 3, P_FE = 4, P_BE = 5;
  localparam int NPORT = 6;

  // ---------------- FP16 helpers ----------------
  function automatic logic [15:0] fp16_key(fp16_t a);
    return a[15] ? ~a : (a ^ 16'h8000);
  endfunction

  function automatic logic fp16_ge(fp16_t a, fp16_t b);
    return fp16_key(a) >= fp16_key(b);
  endfunction

  function automatic logic fp16_le(fp16_t a, fp16_t b);
    return fp16_key(a) <= fp16_key(b);
  endfunction

  function automatic logic fp16_zero(fp16_t a);
    return a[14:10] == 5'd0;
  endfunction

endpackage

// arena_pkg: types and constants shared by every ARENA block.
//
// The task token is the unit of work that circulates on the ring. It has the
// seven fields of the published token format, in the printed order: TASK_id,
// TASK_start, TASK_end, PARAM, REMOTE_start, REMOTE_end, FROM_node. TASK_id and
// FROM_node are 4 bits, the other five fields 32 bits, 168 bits (21 bytes) in
// all, as in the published prototype. Data ranges are half-open: a token covers
// the elements start <= i < end. TASK_id 15 is reserved here for the TERMINATE
// token (the encoding is this design's choice).
//
// The CGRA control word (instr_t) is 64 bits wide, so the 480-byte control
// memory of a tile holds 60 words; its field layout, the opcode set and the
// crossbar input numbering are this design's own choices.
package arena_pkg;

  localparam int TASK_ID_W  = 4;
  localparam int NODE_W     = 4;
  localparam int ADDR_W     = 32;
  localparam int DATA_W     = 32;
  localparam int TOKEN_BITS = 2 * 4 + 5 * 32;   // 168 bits = 21 bytes

  localparam logic [TASK_ID_W-1:0] TERMINATE_ID = 4'hF;

  typedef struct packed {
    logic [TASK_ID_W-1:0] task_id;
    logic [ADDR_W-1:0]    task_start;
    logic [ADDR_W-1:0]    task_end;
    logic [DATA_W-1:0]    param;
    logic [ADDR_W-1:0]    remote_start;
    logic [ADDR_W-1:0]    remote_end;
    logic [NODE_W-1:0]    from_node;
  } token_t;

  // ---- CGRA tile control word --------------------------------------------
  localparam int CW_BITS    = 64;
  localparam int CMEM_BYTES = 480;
  localparam int CMEM_WORDS = CMEM_BYTES / (CW_BITS / 8);   // 60
  localparam int PC_W       = 6;

  typedef enum logic [4:0] {
    OP_NOP    = 5'd0,
    OP_ADD    = 5'd1,   // res = A + B
    OP_SUB    = 5'd2,   // res = A - B
    OP_MUL    = 5'd3,   // res = A * B (low 32 bits)
    OP_SHL    = 5'd4,   // res = A << B[4:0]
    OP_SHR    = 5'd5,   // res = A >> B[4:0] (logical)
    OP_AND    = 5'd6,
    OP_OR     = 5'd7,
    OP_XOR    = 5'd8,
    OP_LT     = 5'd9,   // res = P = (A < B), signed
    OP_EQ     = 5'd10,  // res = P = (A == B)
    OP_BR     = 5'd11,  // res = P = (A != 0), branch condition for predication
    OP_SEL    = 5'd12,  // res = P ? A : B
    OP_MOV    = 5'd13,  // res = B (an immediate when use_imm)
    OP_IDX    = 5'd14,  // res = global element index of this iteration
    OP_LIDX   = 5'd15,  // res = local (data memory) index of this iteration
    OP_PRM    = 5'd16,  // res = PARAM of the running task
    OP_TEND   = 5'd17,  // res = TASK_end of the running task
    OP_LOAD   = 5'd18,  // read memory word at A, data on the AUX input next cycle
    OP_STORE  = 5'd19,  // write B to memory word at C
    OP_SPAWN  = 5'd20,  // token {imm[3:0], start=A, end=B}; imm[4]=1: wait for SPAWNX
    OP_SPAWNX = 5'd21   // second spawn cycle: PARAM=A, REMOTE_start=B, REMOTE_end=C
  } opcode_e;

  // Crossbar inputs (6) and destinations (7)
  localparam logic [2:0] XIN_N = 3'd0, XIN_S = 3'd1, XIN_E = 3'd2, XIN_W = 3'd3,
                         XIN_RES = 3'd4, XIN_AUX = 3'd5, XSEL_HOLD = 3'd7;
  localparam int XB_IN = 6, XB_OUT = 7;
  localparam int XO_N = 0, XO_S = 1, XO_E = 2, XO_W = 3, XO_A = 4, XO_B = 5, XO_C = 6;

  typedef struct packed {
    logic [19:0]          pad;
    logic [XB_OUT-1:0][2:0] sel;     // sel[d] picks the input for destination d
    logic signed [15:0]   imm;
    logic                 pred_en;   // execute only when the predicate is 1
    logic                 use_imm;   // operand B is the immediate
    opcode_e              op;
  } instr_t;

  // Reconfiguration message forwarded right to left through a row
  typedef struct packed {
    logic            valid;
    logic [PC_W-1:0] base;
    logic [PC_W-1:0] len;
  } cfg_t;

  // Data memory request of a leftmost tile (bank-local word address)
  localparam int BANK_AW = 12;
  typedef struct packed {
    logic               valid;
    logic               we;
    logic [BANK_AW-1:0] addr;
    logic [DATA_W-1:0]  wdata;
  } mem_req_t;

  // Per-group run context broadcast by the CGRA controller
  typedef struct packed {
    logic              run;
    logic [ADDR_W-1:0] idx;
    logic [ADDR_W-1:0] lidx;
    logic [DATA_W-1:0] param;
    logic [ADDR_W-1:0] tend;
  } grp_ctx_t;

  function automatic token_t make_token(input logic [TASK_ID_W-1:0] id,
                                        input logic [ADDR_W-1:0] s, input logic [ADDR_W-1:0] e,
                                        input logic [DATA_W-1:0] p,
                                        input logic [ADDR_W-1:0] rs, input logic [ADDR_W-1:0] re,
                                        input logic [NODE_W-1:0] from);
    token_t t;
    t.task_id = id; t.task_start = s; t.task_end = e; t.param = p;
    t.remote_start = rs; t.remote_end = re; t.from_node = from;
    return t;
  endfunction

  function automatic instr_t make_instr(input opcode_e op, input logic use_imm,
                                        input logic signed [15:0] imm, input logic pred_en,
                                        input logic [2:0] sn, input logic [2:0] ss,
                                        input logic [2:0] se, input logic [2:0] sw,
                                        input logic [2:0] sa, input logic [2:0] sb,
                                        input logic [2:0] sc);
    instr_t i;
    i = '0;
    i.op = op; i.use_imm = use_imm; i.imm = imm; i.pred_en = pred_en;
    i.sel[XO_N] = sn; i.sel[XO_S] = ss; i.sel[XO_E] = se; i.sel[XO_W] = sw;
    i.sel[XO_A] = sa; i.sel[XO_B] = sb; i.sel[XO_C] = sc;
    return i;
  endfunction

endpackage

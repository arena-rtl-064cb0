// cgra_fu: functional unit of a CGRA tile.
//
// Combinational. Given the opcode of the current control word and the tile's
// three operand registers A, B, C (B replaced by the word's immediate when
// use_imm is set), it produces the result written into the tile's result
// register, the new predicate for compare/branch operations, a data memory
// request for LOAD/STORE and the fields of a spawned task token. The
// operation classes (arithmetic, shift, select, branch, load, store and the
// ARENA-specific spawn) follow the paper; the exact opcode list, the 32-bit
// width and the operand roles are this design's choices (see arena_pkg).
// Predication: when pred_en is set and the predicate is 0 the word has no
// effect (partial predication).
module cgra_fu
  import arena_pkg::*;
(
  input  opcode_e           op,
  input  logic              use_imm,
  input  logic              pred_en,
  input  logic signed [15:0] imm,
  input  logic [DATA_W-1:0] a,
  input  logic [DATA_W-1:0] b_reg,
  input  logic [DATA_W-1:0] c,
  input  logic              pred,
  input  logic [ADDR_W-1:0] idx,
  input  logic [ADDR_W-1:0] lidx,
  input  logic [DATA_W-1:0] param,
  input  logic [ADDR_W-1:0] tend,
  output logic              res_we,
  output logic [DATA_W-1:0] res,
  output logic              pred_we,
  output logic              pred_new,
  output logic              mem_valid,
  output logic              mem_we,
  output logic [DATA_W-1:0] mem_addr,
  output logic [DATA_W-1:0] mem_wdata,
  output logic              spawn_first,   // SPAWN: id/start/end valid
  output logic              spawn_more,    // SPAWN with imm[4]: a SPAWNX follows
  output logic              spawn_second,  // SPAWNX: param/remote valid
  output logic [TASK_ID_W-1:0] sp_id,
  output logic [DATA_W-1:0] sp_f0,         // start  | param
  output logic [DATA_W-1:0] sp_f1,         // end    | remote_start
  output logic [DATA_W-1:0] sp_f2          //        | remote_end
);
  logic [DATA_W-1:0] b;
  logic en;

  always_comb begin
    b  = use_imm ? DATA_W'(imm) : b_reg;
    en = !pred_en || pred;
    res_we = 1'b0; res = '0;
    pred_we = 1'b0; pred_new = 1'b0;
    mem_valid = 1'b0; mem_we = 1'b0; mem_addr = a; mem_wdata = b;
    spawn_first = 1'b0; spawn_more = imm[4]; spawn_second = 1'b0;
    sp_id = imm[TASK_ID_W-1:0];
    sp_f0 = a; sp_f1 = b; sp_f2 = c;
    if (en) begin
      res_we = 1'b1;
      unique case (op)
        OP_ADD:  res = a + b;
        OP_SUB:  res = a - b;
        OP_MUL:  res = a * b;
        OP_SHL:  res = a << b[4:0];
        OP_SHR:  res = a >> b[4:0];
        OP_AND:  res = a & b;
        OP_OR:   res = a | b;
        OP_XOR:  res = a ^ b;
        OP_LT:   begin res = DATA_W'($signed(a) < $signed(b)); pred_we = 1'b1; pred_new = res[0]; end
        OP_EQ:   begin res = DATA_W'(a == b);                  pred_we = 1'b1; pred_new = res[0]; end
        OP_BR:   begin res = DATA_W'(a != '0);                 pred_we = 1'b1; pred_new = res[0]; end
        OP_SEL:  res = pred ? a : b;
        OP_MOV:  res = b;
        OP_IDX:  res = idx;
        OP_LIDX: res = lidx;
        OP_PRM:  res = param;
        OP_TEND: res = tend;
        OP_LOAD: begin res_we = 1'b0; mem_valid = 1'b1; mem_addr = a; end
        OP_STORE: begin res_we = 1'b0; mem_valid = 1'b1; mem_we = 1'b1; mem_addr = c; mem_wdata = b; end
        OP_SPAWN:  begin res_we = 1'b0; spawn_first = 1'b1; end
        OP_SPAWNX: begin res_we = 1'b0; spawn_second = 1'b1; end
        default: res_we = 1'b0;   // OP_NOP
      endcase
    end
  end
endmodule

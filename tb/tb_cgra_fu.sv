// tb_cgra_fu: self-checking test of the tile functional unit.
// For 3000 random operand sets and every opcode, the FU outputs are compared
// with a reference computed here with SystemVerilog operators: arithmetic,
// shifts, logic, compares with predicate update, select, immediate operand,
// index/parameter reads, load/store requests, spawn fields and predication
// (a predicated word with predicate 0 must have no effect).
module tb_cgra_fu;
  import arena_pkg::*;
  int checks = 0, failures = 0;

  opcode_e op;
  logic use_imm, pred_en, pred;
  logic signed [15:0] imm;
  logic [31:0] a, b, c, idx, lidx, param, tend;
  logic res_we, pred_we, pred_new, mem_valid, mem_we, s1, smore, s2;
  logic [31:0] res, mem_addr, mem_wdata, f0, f1, f2;
  logic [3:0] sid;

  cgra_fu dut (.op, .use_imm, .pred_en, .imm, .a, .b_reg(b), .c, .pred, .idx, .lidx, .param, .tend,
               .res_we, .res, .pred_we, .pred_new, .mem_valid, .mem_we, .mem_addr, .mem_wdata,
               .spawn_first(s1), .spawn_more(smore), .spawn_second(s2),
               .sp_id(sid), .sp_f0(f0), .sp_f1(f1), .sp_f2(f2));

  task automatic check(input logic cnd, input string msg);
    checks++;
    if (!cnd) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    for (int n = 0; n < 3000; n++) begin
      for (int o = 0; o <= 21; o++) begin
        logic [31:0] bb, exp;
        logic has_res, en;
        op = opcode_e'(o);
        a = $urandom; b = $urandom; c = $urandom;
        if (n % 4 == 0) b = a;                 // exercise equality
        imm = 16'($urandom); use_imm = ($urandom_range(0, 3) == 0);
        pred_en = ($urandom_range(0, 3) == 0); pred = $urandom_range(0, 1);
        idx = $urandom; lidx = $urandom; param = $urandom; tend = $urandom;
        #1;
        bb = use_imm ? 32'(imm) : b;
        en = !pred_en || pred;
        has_res = 1'b1;
        case (op)
          OP_ADD: exp = a + bb;   OP_SUB: exp = a - bb;   OP_MUL: exp = a * bb;
          OP_SHL: exp = a << bb[4:0];  OP_SHR: exp = a >> bb[4:0];
          OP_AND: exp = a & bb;   OP_OR: exp = a | bb;    OP_XOR: exp = a ^ bb;
          OP_LT:  exp = 32'($signed(a) < $signed(bb));
          OP_EQ:  exp = 32'(a == bb);
          OP_BR:  exp = 32'(a != 0);
          OP_SEL: exp = pred ? a : bb;
          OP_MOV: exp = bb;
          OP_IDX: exp = idx;  OP_LIDX: exp = lidx;  OP_PRM: exp = param;  OP_TEND: exp = tend;
          default: begin exp = 0; has_res = 1'b0; end
        endcase
        check(res_we == (en && has_res), $sformatf("res_we op %0d", o));
        if (en && has_res) check(res == exp, $sformatf("op %0d a=%h b=%h res=%h exp=%h", o, a, bb, res, exp));
        check(pred_we == (en && (op == OP_LT || op == OP_EQ || op == OP_BR)), $sformatf("pred_we op %0d", o));
        if (pred_we) check(pred_new == exp[0], "pred value");
        check(mem_valid == (en && (op == OP_LOAD || op == OP_STORE)), "mem_valid");
        if (en && op == OP_LOAD)  check(!mem_we && mem_addr == a, "load address");
        if (en && op == OP_STORE) check(mem_we && mem_addr == c && mem_wdata == bb, "store address/data");
        check(s1 == (en && op == OP_SPAWN) && s2 == (en && op == OP_SPAWNX), "spawn strobes");
        if (s1) check(sid == imm[3:0] && f0 == a && f1 == bb && smore == imm[4], "spawn fields");
        if (s2) check(f0 == a && f1 == bb && f2 == c, "spawnx fields");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

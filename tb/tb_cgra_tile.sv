// tb_cgra_tile: self-checking test of one CGRA tile.
// Preloads two small programs into the control memory, configures the tile
// with {base, len} (checking that the message is passed west one cycle
// later), runs each and checks cycle by cycle: routing through the crossbar
// to operand and output registers, an add, a compare that sets the predicate,
// a predicated subtract, a two-cycle spawn (SPAWN + SPAWNX), a one-cycle spawn
// that inherits PARAM, a store, a load whose data returns on the AUX input,
// and the wrap of the program counter after len words. Expected values are
// worked out by hand from the inputs 10/20/40/77.
module tb_cgra_tile;
  import arena_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [31:0] in_n = 10, in_s = 20, in_e = 40, in_w = 77, out_n, out_s, out_e, out_w;
  cfg_t cfg_in = '0, cfg_out;
  grp_ctx_t ctx = '0;
  mem_req_t mem_req;
  logic [31:0] mem_rdata = 0;
  logic spawn_valid;
  token_t spawn_token;
  logic cm_we = 0;
  logic [5:0] cm_addr = 0;
  logic [63:0] cm_wdata = 0;

  cgra_tile dut (.clk, .rst_n, .in_n, .in_s, .in_e, .in_w, .out_n, .out_s, .out_e, .out_w,
                 .cfg_in, .cfg_out, .ctx, .mem_req, .mem_rdata, .spawn_valid, .spawn_token,
                 .cm_we, .cm_addr, .cm_wdata);

  localparam logic [2:0] H = XSEL_HOLD;

  task automatic check(input logic c, input string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic wr(input int a, input instr_t i);
    cm_we = 1; cm_addr = 6'(a); cm_wdata = 64'(i);
    @(negedge clk);
    cm_we = 0;
  endtask

  task automatic configure(input int base, input int len);
    ctx.run = 0;
    cfg_in = '{valid: 1'b1, base: 6'(base), len: 6'(len)};
    @(negedge clk);
    cfg_in = '0;
    check(cfg_out.valid && cfg_out.base == 6'(base) && cfg_out.len == 6'(len), "cfg passed west after one cycle");
    @(negedge clk);
    check(!cfg_out.valid, "cfg message lasts one cycle");
  endtask

  initial begin
    repeat (500) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    // program 0 at base 2, len 6
    wr(2, make_instr(OP_NOP, 0, 0, 0, H, H, XIN_W, H, XIN_N, XIN_S, H));
    wr(3, make_instr(OP_ADD, 0, 0, 0, H, H, H, H, H, H, H));
    wr(4, make_instr(OP_LT,  0, 0, 0, H, H, H, H, H, H, XIN_RES));
    wr(5, make_instr(OP_SUB, 0, 0, 1, H, H, H, H, H, H, H));
    wr(6, make_instr(OP_SPAWN, 0, 16'h13, 0, H, H, H, H, H, H, H));
    wr(7, make_instr(OP_SPAWNX, 0, 0, 0, H, H, H, H, H, H, H));
    // program 1 at base 10, len 5
    wr(10, make_instr(OP_NOP, 0, 0, 0, H, H, H, H, XIN_N, XIN_S, XIN_E));
    wr(11, make_instr(OP_SPAWN, 0, 16'h02, 0, H, H, H, H, H, H, H));
    wr(12, make_instr(OP_STORE, 0, 0, 0, H, H, H, H, H, H, H));
    wr(13, make_instr(OP_LOAD, 0, 0, 0, H, H, H, H, H, H, H));
    wr(14, make_instr(OP_MOV, 1, 16'sd7, 1, XIN_AUX, H, H, H, H, H, H));

    configure(2, 6);
    ctx = '{run: 1'b1, idx: 32'd0, lidx: 32'd0, param: 32'd99, tend: 32'd0};
    @(negedge clk);
    check(out_e == 77 && dut.ra == 10 && dut.rb == 20, "route W->E and N,S->A,B");
    @(negedge clk);
    check(dut.res == 30, "add 10+20");
    @(negedge clk);
    check(dut.rc == 30 && dut.pred && dut.res == 1, "LT sets predicate, result routed to C");
    check(!spawn_valid, "no spawn yet");
    @(negedge clk);
    check(dut.res == 32'hFFFF_FFF6, "predicated subtract executed");
    check(!spawn_valid, "first half of a two-cycle spawn emits nothing");
    @(negedge clk);
    check(spawn_valid && spawn_token.task_id == 3 && spawn_token.task_start == 10 &&
          spawn_token.task_end == 20 && spawn_token.param == 10 &&
          spawn_token.remote_start == 20 && spawn_token.remote_end == 30, "two-cycle spawn token");
    @(negedge clk);
    check(dut.pc == 6'd2, "pc wrapped to base after len words");

    configure(10, 5);
    ctx.run = 1;
    ctx.param = 32'd55;
    @(negedge clk);
    check(dut.rc == 40, "C loaded");
    check(spawn_valid && spawn_token.task_id == 2 && spawn_token.task_start == 10 &&
          spawn_token.task_end == 20 && spawn_token.param == 55 && spawn_token.remote_end == 0,
          "one-cycle spawn inherits PARAM");
    @(negedge clk);
    check(mem_req.valid && mem_req.we && mem_req.addr == 40 && mem_req.wdata == 20, "store request");
    @(negedge clk);
    check(mem_req.valid && !mem_req.we && mem_req.addr == 10, "load request");
    mem_rdata = 555;
    @(negedge clk);
    @(negedge clk);
    check(out_n == 555, "load data routed from AUX");
    check(dut.res != 7, "predicated MOV skipped (predicate cleared by reconfiguration)");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

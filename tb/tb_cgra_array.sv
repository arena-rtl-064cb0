// tb_cgra_array: self-checking test of the 8x8 tile array.
// All tiles of rows 0-3 (groups 0 and 1) get a three-word program at control
// word 0; most are NOPs. Tile (0,0) and tile (2,0) compute IDX and store it
// to data address IDX (STORE writes B to address C), so the requests must
// appear on memory ports 0 and 2 two cycles after run starts. Tile (0,0) also
// sends IDX east, and tile (0,1) must latch it into operand A one cycle
// later. Tile (1,7), the spawn tile of group 0, spawns task 5 over
// [IDX, IDX) with PARAM inherited. The configuration message given to the
// rightmost column must reach column c after 8-c cycles.
module tb_cgra_array;
  import arena_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  cfg_t [7:0] cfg_row = '0;
  grp_ctx_t [3:0] gctx = '0;
  mem_req_t [7:0] mem_req;
  logic [7:0][31:0] mem_rdata = '0;
  logic [3:0] spawn_valid;
  token_t [3:0] spawn_token;
  logic cm_we = 0;
  logic [5:0] cm_tile = 0, cm_addr = 0;
  logic [63:0] cm_wdata = 0;
  localparam logic [2:0] H = XSEL_HOLD;
  logic [7:0] cv;

  cgra_array dut (.clk, .rst_n, .cfg_row, .gctx, .mem_req, .mem_rdata, .spawn_valid, .spawn_token,
                  .cm_we, .cm_tile, .cm_addr, .cm_wdata);

  for (genvar c = 0; c < 8; c++) begin : g_cv
    assign cv[c] = dut.g_r[0].g_c[c].cin.valid;
  end

  task automatic check(input logic c, input string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic wr(input int r, input int c, input int a, input instr_t i);
    cm_we = 1; cm_tile = 6'(r * 8 + c); cm_addr = 6'(a); cm_wdata = 64'(i);
    @(negedge clk);
    cm_we = 0;
  endtask

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int r = 0; r < 4; r++)
      for (int c = 0; c < 8; c++)
        for (int a = 0; a < 3; a++)
          wr(r, c, a, make_instr(OP_NOP, 0, 0, 0, H, H, H, H, H, H, H));
    for (int r = 0; r <= 2; r += 2) begin
      wr(r, 0, 0, make_instr(OP_IDX, 0, 0, 0, H, H, H, H, H, H, H));
      wr(r, 0, 1, make_instr(OP_NOP, 0, 0, 0, H, H, XIN_RES, H, H, XIN_RES, XIN_RES));
      wr(r, 0, 2, make_instr(OP_STORE, 0, 0, 0, H, H, H, H, H, H, H));
    end
    wr(0, 1, 2, make_instr(OP_NOP, 0, 0, 0, H, H, H, H, XIN_W, H, H));
    wr(1, 7, 0, make_instr(OP_IDX, 0, 0, 0, H, H, H, H, H, H, H));
    wr(1, 7, 1, make_instr(OP_NOP, 0, 0, 0, H, H, H, H, XIN_RES, XIN_RES, H));
    wr(1, 7, 2, make_instr(OP_SPAWN, 0, 16'h5, 0, H, H, H, H, H, H, H));
    // configuration wave
    for (int r = 0; r < 4; r++) cfg_row[r] = '{valid: 1'b1, base: 6'd0, len: 6'd3};
    for (int t = 0; t < 8; t++) begin
      #1;
      check(cv == 8'(1 << (7 - t)), $sformatf("cfg at column %0d after %0d cycles", 7 - t, t));
      @(negedge clk);
      cfg_row = '0;
    end
    gctx[0] = '{run: 1'b1, idx: 32'd42, lidx: 32'd2, param: 32'd9, tend: 32'd50};
    gctx[1] = '{run: 1'b1, idx: 32'd77, lidx: 32'd7, param: 32'd9, tend: 32'd90};
    @(negedge clk);
    @(negedge clk);
    check(mem_req[0].valid && mem_req[0].we && mem_req[0].addr == 42 && mem_req[0].wdata == 42, "group 0 store on port 0");
    check(mem_req[2].valid && mem_req[2].we && mem_req[2].addr == 77 && mem_req[2].wdata == 77, "group 1 store on port 2");
    check(!mem_req[1].valid && !mem_req[3].valid && !mem_req[4].valid, "other ports idle");
    check(spawn_valid == 4'b0001 && spawn_token[0].task_id == 5 && spawn_token[0].task_start == 42 &&
          spawn_token[0].task_end == 42 && spawn_token[0].param == 9, "spawn from tile (1,7)");
    @(negedge clk);
    check(dut.g_r[0].g_c[1].u_tile.ra == 42, "east neighbour received IDX");
    gctx = '0;
    @(negedge clk);
    check(spawn_valid == 0 && !mem_req[0].valid, "stopped tiles are quiet");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

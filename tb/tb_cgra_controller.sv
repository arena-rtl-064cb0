// tb_cgra_controller: self-checking test of the CGRA controller.
// Local range [0, 64). Checks the group allocation rule (size < 16 -> one
// group, size > 32 -> four groups when all are free, else an aligned pair,
// sizes in between -> a pair, wait when none is free), the configuration
// message {base, II} from the context table on the rows of the chosen groups,
// the 8-cycle reconfiguration before the groups run, the run length of
// ceil(size/k) iterations of II cycles, the broadcast indices, and the launch
// stall while a spawn queue is full and a group runs (and none when every group
// is idle). Expected numbers are computed here.
module tb_cgra_controller;
  import arena_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc++;

  logic wq_valid = 0, wq_pop;
  token_t wq_token = '0;
  logic ctx_we = 0;
  logic [3:0] ctx_task = 0;
  logic [1:0] ctx_mode = 0;
  logic [5:0] ctx_base = 0, ctx_len = 0;
  cfg_t [7:0] cfg_row;
  grp_ctx_t [3:0] gctx;
  logic [3:0] spawn_valid = 0;
  token_t [3:0] spawn_token = '0;
  logic out_valid, out_ready = 1, busy, overflow, launch_stall, merge_pulse;
  token_t out_token;
  logic [2:0] launch_groups;

  cgra_controller dut (.clk, .rst_n, .node_id(4'd1), .local_start(32'd0), .local_end(32'd64),
    .wq_valid, .wq_token, .wq_pop, .ctx_we, .ctx_task, .ctx_mode, .ctx_base, .ctx_len,
    .cfg_row, .gctx, .spawn_valid, .spawn_token, .out_valid, .out_ready, .out_token,
    .busy, .overflow, .launch_stall, .launch_groups, .merge_pulse);

  task automatic check(input logic c, input string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // offer a token, wait for the pop, return the launch cycle
  task automatic launch(input int s, input int e, output int at, output logic [2:0] k, output logic [7:0] rows);
    wq_valid = 1; wq_token = make_token(4'd1, 32'(s), 32'(e), 32'd77, 0, 0, 0);
    #1;
    while (!wq_pop) begin @(negedge clk); #1; end
    at = cyc; k = launch_groups;
    for (int r = 0; r < 8; r++) rows[r] = cfg_row[r].valid;
    @(negedge clk);
    wq_valid = 0;
  endtask

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int at, first_run, run_cycles;
    logic [2:0] k;
    logic [7:0] rows;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int m = 0; m < 3; m++) begin
      ctx_we = 1; ctx_task = 1; ctx_mode = 2'(m); ctx_base = 6'(10 * m); ctx_len = 6'(3 + m);
      @(negedge clk);
    end
    ctx_we = 0;

    // size 8 -> one group (group 0), II 3, 8 iterations
    wq_valid = 1; wq_token = make_token(4'd1, 32'd4, 32'd12, 32'd77, 0, 0, 0);
    #1;
    check(wq_pop && launch_groups == 1, "size 8 gets one group");
    check(cfg_row[0].valid && cfg_row[1].valid && !cfg_row[2].valid && cfg_row[0].base == 0 && cfg_row[0].len == 3,
          "cfg message on rows 0,1 with mode-0 context");
    at = cyc;
    @(negedge clk); wq_valid = 0;
    first_run = -1; run_cycles = 0;
    for (int t = 0; t < 60; t++) begin
      if (gctx[0].run) begin
        if (first_run < 0) begin
          first_run = cyc;
          check(gctx[0].idx == 4 && gctx[0].lidx == 4 && gctx[0].param == 77 && gctx[0].tend == 12, "first iteration context");
        end
        if (run_cycles == 3) check(gctx[0].idx == 5, "index advances per II cycles");
        run_cycles++;
      end
      @(negedge clk);
    end
    check(first_run - at == 8, $sformatf("groups run 8 cycles after launch (%0d)", first_run - at));
    check(run_cycles == 24, $sformatf("8 iterations x II 3 = 24 cycles (%0d)", run_cycles));
    check(!busy, "idle afterwards");

    // occupy group 0 with a long task, then size 40 -> pair {2,3}
    launch(0, 8, at, k, rows);  // 8 x 3 cycles
    check(k == 1 && rows == 8'b0000_0011, "group 0 again");
    launch(0, 40, at, k, rows);
    check(k == 2 && rows == 8'b1111_0000, "size 40 with group 0 busy -> pair {2,3}");
    // size 20 -> needs a pair; none free until one finishes
    wq_valid = 1; wq_token = make_token(4'd1, 32'd0, 32'd20, 32'd1, 0, 0, 0);
    #1;
    check(!wq_pop, "size 20 waits for a free pair");
    while (!wq_pop) begin @(negedge clk); #1; end
    check(launch_groups == 2 && cfg_row[3].valid && !cfg_row[4].valid && cfg_row[0].len == 4,
          "size 20 gets pair {0,1} with mode-1 context");
    @(negedge clk); wq_valid = 0;
    while (busy) @(negedge clk);
    launch(0, 40, at, k, rows);
    check(k == 4 && rows == 8'hFF, "size 40 with all free -> four groups");
    while (busy) @(negedge clk);

    // launch stall: keep group 0 running, fill spawn queue 1 with the output blocked
    launch(0, 15, at, k, rows);
    out_ready = 0;
    for (int i = 0; i < 5; i++) begin
      spawn_valid = 4'b0010; spawn_token[1] = make_token(4'd2, 32'(100 + 3 * i), 32'(101 + 3 * i), 0, 0, 0, 0);
      @(negedge clk);
    end
    spawn_valid = 0;
    repeat (2) @(negedge clk);
    wq_valid = 1; wq_token = make_token(4'd1, 32'd0, 32'd4, 32'd1, 0, 0, 0);
    #1;
    check(launch_stall && !wq_pop, "launch stalls while a spawn queue is full and a group runs");
    out_ready = 1;
    while (!wq_pop) begin @(negedge clk); #1; end
    check(1'b1, "launch resumes");
    @(negedge clk); wq_valid = 0;
    while (busy) @(negedge clk);
    // with every group idle the stall is lifted even if a spawn queue is full
    out_ready = 0;
    for (int i = 0; i < 5; i++) begin
      spawn_valid = 4'b0010; spawn_token[1] = make_token(4'd2, 32'(200 + 3 * i), 32'(201 + 3 * i), 0, 0, 0, 0);
      @(negedge clk);
    end
    spawn_valid = 0;
    repeat (2) @(negedge clk);
    wq_valid = 1; wq_token = make_token(4'd1, 32'd0, 32'd4, 32'd1, 0, 0, 0);
    #1;
    check(wq_pop && !launch_stall, "no stall when every group is idle");
    @(negedge clk); wq_valid = 0;
    out_ready = 1;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

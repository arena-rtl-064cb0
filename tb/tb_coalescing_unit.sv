// tb_coalescing_unit: self-checking test of the spawn queues and coalescing.
// 1) Consecutive spawns [10,11), [11,12), [12,13) with equal TASK_id and
//    PARAM from one group come out as one token [10,13) with FROM_node set.
// 2) Tokens that differ in PARAM, or whose ranges are not adjacent, are not
//    merged. 3) With the output blocked, spawns fill a 4-entry queue and the
//    rest go to the overflow store (any_full, spill_used), and every spawned
//    element is still delivered exactly once. The reference is the set of
//    spawned elements kept in the testbench.
module tb_coalescing_unit;
  import arena_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic   [3:0] sp_valid = '0;
  token_t [3:0] sp_token = '0;
  logic out_valid, out_ready = 1, any_full, spill_used, idle, overflow, merge_pulse;
  token_t out_token;
  token_t got[$];
  int merges = 0;

  coalescing_unit #(.WINDOW(4)) dut (.clk, .rst_n, .node_id(4'd9), .sp_valid, .sp_token,
    .out_valid, .out_ready, .out_token, .any_full, .spill_used, .idle, .overflow, .merge_pulse);

  always @(posedge clk) begin
    if (rst_n && out_valid && out_ready) got.push_back(out_token);
    if (merge_pulse) merges++;
  end

  task automatic check(input logic c, input string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic spawn(input int g, input int id, input int s, input int e, input int p);
    sp_valid = '0; sp_valid[g] = 1'b1;
    sp_token[g] = make_token(4'(id), 32'(s), 32'(e), 32'(p), 32'd0, 32'd0, 4'd0);
    @(negedge clk);
    sp_valid = '0;
  endtask

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int seen[int];
    repeat (3) @(negedge clk);
    rst_n = 1;
    // 1) merge
    spawn(1, 2, 10, 11, 5); spawn(1, 2, 11, 12, 5); spawn(1, 2, 12, 13, 5);
    repeat (12) @(negedge clk);
    check(got.size() == 1, $sformatf("one coalesced token, got %0d", got.size()));
    if (got.size() >= 1)
      check(got[0].task_start == 10 && got[0].task_end == 13 && got[0].from_node == 9 && got[0].param == 5,
            "coalesced range [10,13), FROM_node filled");
    check(merges == 2, "two merges");
    got.delete();
    // 2) no merge
    spawn(0, 2, 20, 21, 5); spawn(2, 2, 21, 22, 6); spawn(3, 2, 30, 31, 6);
    repeat (20) @(negedge clk);
    check(got.size() == 3, $sformatf("three separate tokens, got %0d", got.size()));
    got.delete();
    // 3) overflow store
    out_ready = 0;
    for (int i = 0; i < 10; i++) spawn(2, 3, 100 + 2 * i, 101 + 2 * i, 1);
    check(any_full, "spawn queue full");
    check(spill_used, "overflow store used");
    check(!overflow, "nothing lost");
    out_ready = 1;
    repeat (60) @(negedge clk);
    check(idle, "unit drained");
    foreach (got[k]) for (int i = int'(got[k].task_start); i < int'(got[k].task_end); i++) seen[i]++;
    for (int i = 0; i < 10; i++) check(seen.exists(100 + 2 * i) && seen[100 + 2 * i] == 1, $sformatf("element %0d once", 100 + 2 * i));
    check(seen.size() == 10, "no extra elements");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

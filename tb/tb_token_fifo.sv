// tb_token_fifo: self-checking test of the TaskQueue (token_fifo).
// Fills an 8-entry queue, checks that it refuses a ninth token, that tokens
// leave in order, that a push and a pop in the same cycle work when full, and
// that the count follows every step. A reference queue in the testbench gives
// the expected tokens.
module tb_token_fifo;
  import arena_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic   push_valid = 1'b0, pop_ready = 1'b0, push_ready, pop_valid;
  token_t push_token = '0, pop_token;
  logic [3:0] count;
  token_t ref_q[$];

  token_fifo #(.DEPTH(8)) dut (.clk, .rst_n, .push_valid, .push_ready, .push_token,
                               .pop_valid, .pop_ready, .pop_token, .count);

  task automatic check(input logic c, input string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", msg); end
  endtask

  function automatic token_t tok(input int i);
    return make_token(4'(i), 32'(i * 10), 32'(i * 10 + 5), 32'(i * 7), 32'(i), 32'(i + 1), 4'(i + 3));
  endfunction

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    check(!pop_valid && count == 0, "empty after reset");
    for (int i = 0; i < 8; i++) begin
      push_valid = 1'b1; push_token = tok(i);
      check(push_ready, "ready while not full");
      @(negedge clk);
      ref_q.push_back(tok(i));
      check(count == 4'(i + 1), $sformatf("count %0d after push %0d", count, i));
    end
    push_token = tok(99);
    check(!push_ready, "not ready when full");
    @(negedge clk);
    check(count == 8, "count stays 8 on refused push");
    // push and pop together while full
    pop_ready = 1'b1; push_token = tok(8);
    #1;
    check(push_ready, "ready when full and popping");
    check(pop_token == ref_q[0], "head is oldest token");
    @(negedge clk);
    void'(ref_q.pop_front()); ref_q.push_back(tok(8));
    check(count == 8, "count 8 after push+pop");
    push_valid = 1'b0;
    while (ref_q.size() > 0) begin
      check(pop_valid, "valid while tokens remain");
      check(pop_token == ref_q[0], $sformatf("order, expected task_id %0d got %0d", ref_q[0].task_id, pop_token.task_id));
      @(negedge clk);
      void'(ref_q.pop_front());
    end
    pop_ready = 1'b0;
    check(!pop_valid && count == 0, "empty at the end");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// tb_task_dispatcher: self-checking test of the task dispatcher.
// Local range [100, 200). Checks: a three-way split (local part to the
// WaitQueue, two remote parts to the SendQueue, in two cycles); priority of a
// spawned token over a ring token; a WaitQueue head with a remote range that
// must request data and wait for the ack before it is offered; back-pressure
// from a full SendQueue; and the TERMINATE protocol (flag, terminate on the
// second consecutive TERMINATE, pass-through afterwards, flag reset by
// another token). Expected tokens are written out by hand.
module tb_task_dispatcher;
  import arena_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic   in_valid = 0, in_ready, out_valid, out_ready = 1, init_valid = 0, init_ready;
  logic   spawn_valid = 0, spawn_ready, wq_valid, wq_pop = 0, wq_empty;
  logic   dreq_valid, dreq_ready = 1, dack = 0, node_busy = 0, terminated;
  token_t in_token = '0, out_token, init_token = '0, spawn_token = '0, wq_token, dreq_token;
  token_t sent[$];

  task_dispatcher dut (.clk, .rst_n, .local_start(32'd100), .local_end(32'd200),
    .in_valid, .in_ready, .in_token, .out_valid, .out_ready, .out_token,
    .init_valid, .init_ready, .init_token, .spawn_valid, .spawn_ready, .spawn_token,
    .wq_valid, .wq_pop, .wq_token, .wq_empty, .dreq_valid, .dreq_ready, .dreq_token, .dack,
    .node_busy, .terminated);

  always @(posedge clk) if (rst_n && out_valid && out_ready) sent.push_back(out_token);

  task automatic check(input logic c, input string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic ring(input token_t t);
    in_valid = 1; in_token = t;
    do @(negedge clk); while (!in_ready);
    in_valid = 0;
  endtask

  function automatic token_t T(input int id, input int s, input int e, input int rs = 0, input int re = 0);
    return make_token(4'(id), 32'(s), 32'(e), 32'd3, 32'(rs), 32'(re), 4'd2);
  endfunction

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int t0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // ---- three-way split ----
    ring(T(1, 50, 260));
    repeat (4) @(negedge clk);
    check(sent.size() == 2, $sformatf("two remote parts sent, got %0d", sent.size()));
    if (sent.size() == 2) begin
      check(sent[0].task_start == 50 && sent[0].task_end == 100, "low part first");
      check(sent[1].task_start == 200 && sent[1].task_end == 260, "high part second");
    end
    check(wq_valid && wq_token.task_start == 100 && wq_token.task_end == 200, "local part in WaitQueue");
    wq_pop = 1; @(negedge clk); wq_pop = 0;
    check(wq_empty, "WaitQueue empty after pop");
    sent.delete();
    // ---- spawn priority ----
    spawn_valid = 1; spawn_token = T(2, 110, 111);
    in_valid = 1; in_token = T(3, 120, 121);
    #1;
    check(spawn_ready, "spawned token accepted by the filter");
    @(negedge clk);
    spawn_valid = 0; in_valid = 0;
    repeat (3) @(negedge clk);
    check(wq_valid && wq_token.task_id == 2, "spawned token filtered first");
    wq_pop = 1; @(negedge clk);
    check(wq_valid && wq_token.task_id == 3, "ring token second");
    @(negedge clk); wq_pop = 0;
    // ---- remote data request ----
    ring(T(4, 120, 130, 500, 504));
    @(negedge clk);
    check(!wq_valid, "head with remote range not offered before ack");
    check(dreq_valid && dreq_token.remote_start == 500, "data request issued");
    @(negedge clk);
    check(!dreq_valid, "data request issued once");
    repeat (3) @(negedge clk);
    dack = 1; @(negedge clk); dack = 0;
    check(wq_valid && wq_token.task_id == 4, "head offered after data ack");
    wq_pop = 1; @(negedge clk); wq_pop = 0;
    // ---- SendQueue back-pressure ----
    out_ready = 0;
    for (int i = 0; i < 8; i++) ring(T(5, 300 + i, 301 + i));
    ring(T(5, 400, 401));
    repeat (3) @(negedge clk);
    check(dut.u_sendq.count == 8, "SendQueue full");
    check(!dut.u_recvq.pop_ready, "filter stalls on a full SendQueue");
    out_ready = 1;
    repeat (12) @(negedge clk);
    check(sent.size() == 9 && sent[8].task_start == 400, "all conveyed in order after back-pressure");
    sent.delete();
    // ---- TERMINATE ----
    node_busy = 1;
    ring(T(15, 0, 0));
    ring(T(15, 0, 0));
    repeat (2) @(negedge clk);
    check(!terminated, "busy node does not terminate");
    node_busy = 0;
    ring(T(15, 0, 0));
    ring(T(6, 10, 20));        // another token resets the flag
    ring(T(15, 0, 0));
    repeat (2) @(negedge clk);
    check(!terminated, "flag reset by another token");
    ring(T(15, 0, 0));
    repeat (2) @(negedge clk);
    check(terminated, "terminates on second consecutive TERMINATE");
    ring(T(7, 150, 160));
    repeat (3) @(negedge clk);
    check(wq_empty, "after termination a local token is not kept");
    check(sent.size() == 7 && sent[6].task_id == 7, $sformatf("all tokens conveyed (%0d)", sent.size()));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

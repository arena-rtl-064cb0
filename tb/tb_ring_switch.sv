// tb_ring_switch: self-checking test of one ring hop.
// With LATENCY 50 and INTERVAL 2 (a reduced latency), 30 tokens offered back
// to back must come out in order, each exactly LATENCY cycles after it
// entered, entering no faster than one per INTERVAL cycles; with DEPTH 30 and
// the output blocked, the hop holds thirty tokens and refuses more.
module tb_ring_switch;
  import arena_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc++;

  logic in_valid = 0, in_ready, out_valid, out_ready = 1;
  token_t in_token = '0, out_token;
  int t_in[int], n_out = 0, last_in = -100;

  ring_switch #(.LATENCY(50), .INTERVAL(2), .DEPTH(30)) dut (.clk, .rst_n, .in_valid, .in_ready, .in_token,
                                                           .out_valid, .out_ready, .out_token);

  task automatic check(input logic c, input string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", msg); end
  endtask

  always @(posedge clk) if (rst_n) begin
    if (in_valid && in_ready) begin
      check(cyc - last_in >= 2, "entry interval");
      last_in = cyc;
      t_in[int'(in_token.task_start)] = cyc;
    end
    if (out_valid && out_ready) begin
      check(int'(out_token.task_start) == n_out, "order");
      check(cyc - t_in[int'(out_token.task_start)] == 50, $sformatf("latency %0d", cyc - t_in[int'(out_token.task_start)]));
      n_out++;
    end
  end

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 30; i++) begin
      in_valid = 1; in_token = make_token(4'd1, 32'(i), 32'(i + 1), 0, 0, 0, 0);
      @(negedge clk);
      while (!dut.do_in) @(negedge clk);
    end
    in_valid = 0;
    repeat (200) @(negedge clk);
    check(n_out == 30, "all 30 delivered");
    // fill with output blocked
    out_ready = 0;
    for (int i = 0; i < 80; i++) begin
      in_valid = 1; in_token = make_token(4'd1, 32'(100 + i), 32'(101 + i), 0, 0, 0, 0);
      @(negedge clk);
    end
    in_valid = 0;
    check(dut.cnt == 30, "hop holds DEPTH tokens");
    in_valid = 1;
    repeat (4) begin @(negedge clk); check(!in_ready, "full hop refuses tokens"); end
    in_valid = 0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

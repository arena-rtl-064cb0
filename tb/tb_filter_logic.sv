// tb_filter_logic: self-checking test of the filter logic.
// Local range [100, 200). Covers the four published cases (no overlap,
// subset, superset split in three, partial overlap on either side), the
// TERMINATE token and an empty range, and then 500 random ranges whose
// expected parts come from a per-element reference: every element of the
// token must land in exactly one part, local elements in the local part.
module tb_filter_logic;
  import arena_pkg::*;
  int checks = 0, failures = 0;
  token_t tok;
  logic [31:0] ls = 32'd100, le = 32'd200;
  logic wv, lv, hv;
  token_t wt, lt, ht;

  filter_logic dut (.tok, .local_start(ls), .local_end(le),
                    .wait_valid(wv), .wait_tok(wt), .lo_valid(lv), .lo_tok(lt),
                    .hi_valid(hv), .hi_tok(ht));

  task automatic check(input logic c, input string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic apply(input int id, input int s, input int e);
    tok = make_token(4'(id), 32'(s), 32'(e), 32'h1234, 32'd7, 32'd9, 4'd5);
    #1;
  endtask

  function automatic bit in_part(input logic v, input token_t t, input int i);
    return v && (i >= int'(t.task_start)) && (i < int'(t.task_end));
  endfunction

  initial begin
    // I: no overlap
    apply(1, 10, 50);
    check(!wv && lv && !hv && lt == tok, "case I conveys unchanged");
    apply(1, 200, 300);
    check(!wv && lv && lt == tok, "case I, range starting at local_end");
    // II: subset
    apply(2, 120, 150);
    check(wv && !lv && !hv && wt == tok, "case II keeps whole token");
    apply(2, 100, 200);
    check(wv && !lv && !hv && wt.task_start == 100 && wt.task_end == 200, "case II exact range");
    // III: superset
    apply(3, 50, 260);
    check(wv && lv && hv, "case III three parts");
    check(wt.task_start == 100 && wt.task_end == 200, "case III local part");
    check(lt.task_start == 50 && lt.task_end == 100, "case III low part");
    check(ht.task_start == 200 && ht.task_end == 260, "case III high part");
    check(wt.param == 32'h1234 && lt.remote_end == 9 && ht.from_node == 5, "parts keep other fields");
    // IV: partial
    apply(4, 80, 130);
    check(wv && lv && !hv && wt.task_start == 100 && wt.task_end == 130 && lt.task_end == 100, "case IV low side");
    apply(4, 180, 230);
    check(wv && !lv && hv && wt.task_start == 180 && wt.task_end == 200 && ht.task_start == 200, "case IV high side");
    // TERMINATE and empty
    apply(15, 120, 150);
    check(!wv && lv && lt == tok, "TERMINATE conveyed");
    apply(2, 150, 150);
    check(!wv && lv && !hv, "empty range conveyed");
    // random
    for (int n = 0; n < 500; n++) begin
      int s, e, cnt;
      s = int'($urandom_range(0, 300));
      e = s + int'($urandom_range(1, 150));
      apply(int'($urandom_range(0, 14)), s, e);
      for (int i = s; i < e; i++) begin
        cnt = int'(in_part(wv, wt, i)) + int'(in_part(lv, lt, i)) + int'(in_part(hv, ht, i));
        check(cnt == 1, $sformatf("element %0d of [%0d,%0d) in %0d parts", i, s, e, cnt));
        if (i >= 100 && i < 200) check(in_part(wv, wt, i), $sformatf("local element %0d kept", i));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

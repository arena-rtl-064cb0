// tb_nic: self-checking test of the network interface.
// A behavioural data memory (one-cycle read) stands in for the scratchpad.
// Fetch side: a token with remote range [100,106) must raise one request with
// that range and the node's id; the six returned words must be written to
// REMOTE_BASE.. in order and dack must pulse once, one cycle after the word
// marked last. Serve side: a request for [local_start+10, local_start+14) must
// return the four words in order to the requesting node, last flag on the
// fourth, at two cycles per word. Both sides then run at the same time.
module tb_nic;
  import arena_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc++;

  localparam int LS = 5000;
  logic dreq_valid = 0, dreq_ready, dack, nreq_valid, nreq_ready = 1, nrsp_valid = 0, nrsp_last = 0;
  token_t dreq_token = '0;
  logic [3:0] nreq_src, sreq_src = 0, srsp_dst;
  logic [31:0] nreq_start, nreq_end, nrsp_data = 0, sreq_start = 0, sreq_end = 0, srsp_data;
  logic sreq_valid = 0, sreq_ready, srsp_valid, srsp_ready = 1, srsp_last;
  logic spm_valid, spm_we;
  logic [12:0] spm_addr;
  logic [31:0] spm_wdata, spm_rdata;
  logic [31:0] m [8192];
  int ndack = 0, nreqs = 0, nsrv = 0, t_first = 0, t_last = 0;

  always_ff @(posedge clk) if (spm_valid) begin
    if (spm_we) m[spm_addr] <= spm_wdata;
    else spm_rdata <= m[spm_addr];
  end

  nic dut (.clk, .rst_n, .node_id(4'd3), .local_start(32'(LS)),
           .dreq_valid, .dreq_ready, .dreq_token, .dack,
           .nreq_valid, .nreq_ready, .nreq_src, .nreq_start, .nreq_end, .nrsp_valid, .nrsp_data, .nrsp_last,
           .sreq_valid, .sreq_ready, .sreq_src, .sreq_start, .sreq_end,
           .srsp_valid, .srsp_ready, .srsp_dst, .srsp_data, .srsp_last,
           .spm_valid, .spm_we, .spm_addr, .spm_wdata, .spm_rdata);

  task automatic check(input logic c, input string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", msg); end
  endtask

  always @(posedge clk) if (rst_n) begin
    if (dack) ndack++;
    if (nreq_valid && nreq_ready) begin
      nreqs++;
      check(nreq_src == 3 && nreq_start == 100 && nreq_end == 106, "fetch request fields");
    end
    if (srsp_valid && srsp_ready) begin
      if (nsrv == 0) t_first = cyc;
      t_last = cyc;
      check(srsp_dst == 7, "serve destination");
      check(srsp_data == 32'(1000 + 10 + nsrv), $sformatf("serve word %0d", nsrv));
      check(srsp_last == (nsrv == 3), "serve last flag");
      nsrv++;
    end
  end

  task automatic fetch();
    dreq_valid = 1; dreq_token = make_token(4'd1, 0, 4, 0, 100, 106, 0);
    @(negedge clk);
    dreq_valid = 0;
    while (nreqs == 0) @(negedge clk);
    for (int i = 0; i < 6; i++) begin
      nrsp_valid = 1; nrsp_data = 32'(500 + i); nrsp_last = (i == 5);
      @(negedge clk);
    end
    nrsp_valid = 0; nrsp_last = 0;
  endtask

  task automatic serve();
    sreq_valid = 1; sreq_src = 4'd7; sreq_start = 32'(LS + 10); sreq_end = 32'(LS + 14);
    @(negedge clk);
    sreq_valid = 0;
  endtask

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 8192; i++) m[i] = 32'(1000 + i);
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    fetch();
    @(negedge clk);
    check(ndack == 1, "one dack after last word");
    for (int i = 0; i < 6; i++) check(m[7680 + i] == 32'(500 + i), $sformatf("fetched word %0d stored", i));
    serve();
    repeat (12) @(negedge clk);
    check(nsrv == 4, "four words served");
    check(t_last - t_first == 6, $sformatf("two cycles per served word (%0d)", t_last - t_first));
    // both at once
    nreqs = 0; ndack = 0; nsrv = 0;
    fork fetch(); serve(); join
    repeat (12) @(negedge clk);
    check(ndack == 1 && nsrv == 4, "fetch and serve together");
    for (int i = 0; i < 6; i++) check(m[7680 + i] == 32'(500 + i), "fetched words stored again");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

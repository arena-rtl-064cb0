// tb_dma_unit: self-checking test of the DMA unit.
// A behavioural local memory (value = address * 3 + 1, answering two cycles
// after each request) feeds two descriptors; every word must be written to the
// right data memory address, done must pulse once per descriptor, and a
// descriptor of n words must take 3n cycles or more (one read in flight).
module tb_dma_unit;
  import arena_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic desc_valid = 0, desc_ready, done, lm_req_valid, lm_req_ready = 1, lm_rsp_valid, spm_we;
  logic [31:0] desc_src = 0, lm_req_addr, lm_rsp_data, spm_wdata;
  logic [12:0] desc_dst = 0, spm_addr;
  logic [15:0] desc_len = 0;
  logic [31:0] written [8192];
  int nwritten = 0, ndone = 0;

  // local memory model: answers two cycles after a request
  logic [1:0] pend = 0;
  logic [31:0] pend_addr = 0;
  always_ff @(posedge clk) begin
    pend <= {pend[0], lm_req_valid && lm_req_ready};
    if (lm_req_valid && lm_req_ready) pend_addr <= lm_req_addr;
  end
  assign lm_rsp_valid = pend[1];
  assign lm_rsp_data  = pend_addr * 3 + 1;

  dma_unit dut (.clk, .rst_n, .desc_valid, .desc_ready, .desc_src, .desc_dst, .desc_len, .done,
                .lm_req_valid, .lm_req_ready, .lm_req_addr, .lm_rsp_valid, .lm_rsp_data,
                .spm_we, .spm_addr, .spm_wdata);

  always @(posedge clk) begin
    if (spm_we) begin written[spm_addr] = spm_wdata; nwritten++; end
    if (done) ndone++;
  end

  task automatic check(input logic c, input string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic run(input int src, input int dst, input int len);
    int t0, t1, w0;
    w0 = nwritten;
    desc_valid = 1; desc_src = 32'(src); desc_dst = 13'(dst); desc_len = 16'(len);
    t0 = $time;
    @(negedge clk);
    desc_valid = 0;
    while (ndone == 0 || !desc_ready) @(negedge clk);
    t1 = $time;
    check(ndone == 1, "done once");
    ndone = 0;
    check(nwritten - w0 == len, $sformatf("%0d words written", len));
    for (int i = 0; i < len; i++) check(written[dst + i] == 32'((src + i) * 3 + 1), $sformatf("word %0d", i));
    check((t1 - t0) / 10 >= 3 * len, "one read in flight");
  endtask

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    run(100, 0, 20);
    run(5000, 4096 + 10, 33);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

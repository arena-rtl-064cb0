// tb_spm_data_memory: self-checking test of the two-bank scratchpad.
// Writes words through the DMA port across both banks, reads them back on the
// eight tile ports (bank-local addresses) and on the NIC port (global
// addresses) with one-cycle latency, performs eight tile writes in one cycle,
// and checks the write priority tile > DMA > NIC on a shared address. A
// reference array in the testbench holds the expected contents.
module tb_spm_data_memory;
  import arena_pkg::*;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  mem_req_t [7:0] t_req = '0;
  logic [7:0][31:0] t_rdata;
  logic dma_we = 0, nic_valid = 0, nic_we = 0;
  logic [12:0] dma_addr = 0, nic_addr = 0;
  logic [31:0] dma_wdata = 0, nic_wdata = 0, nic_rdata;
  logic [31:0] refm [8192];

  spm_data_memory dut (.clk, .t_req, .t_rdata, .dma_we, .dma_addr, .dma_wdata,
                       .nic_valid, .nic_we, .nic_addr, .nic_wdata, .nic_rdata);

  task automatic check(input logic c, input string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    @(negedge clk);
    for (int i = 0; i < 64; i++) begin
      int a;
      a = (i < 32) ? i * 7 : 4096 + i * 5;
      dma_we = 1; dma_addr = 13'(a); dma_wdata = $urandom; refm[a] = dma_wdata;
      @(negedge clk);
    end
    dma_we = 0;
    // tile reads: port p reads bank p/4
    for (int i = 0; i < 32; i++) begin
      for (int p = 0; p < 8; p++) begin
        t_req[p].valid = 1; t_req[p].we = 0;
        t_req[p].addr = (p < 4) ? 12'(i * 7) : 12'((i + 32) * 5);
      end
      @(negedge clk);
      for (int p = 0; p < 8; p++)
        check(t_rdata[p] == ((p < 4) ? refm[i * 7] : refm[4096 + (i + 32) * 5]), $sformatf("tile read port %0d word %0d", p, i));
    end
    // eight tile writes in one cycle
    for (int p = 0; p < 8; p++) begin
      t_req[p].valid = 1; t_req[p].we = 1; t_req[p].addr = 12'(1000 + p); t_req[p].wdata = 32'(p * 11);
    end
    @(negedge clk);
    t_req = '0;
    for (int p = 0; p < 8; p++) begin
      nic_valid = 1; nic_we = 0; nic_addr = 13'((p / 4) * 4096 + 1000 + p);
      @(negedge clk);
      check(nic_rdata == 32'(p * 11), $sformatf("NIC reads tile write %0d", p));
    end
    // priority on one address: tile port 0, DMA and NIC write word 5
    t_req[0] = '{valid: 1'b1, we: 1'b1, addr: 12'd5, wdata: 32'hAAAA};
    dma_we = 1; dma_addr = 13'd5; dma_wdata = 32'hBBBB;
    nic_valid = 1; nic_we = 1; nic_addr = 13'd5; nic_wdata = 32'hCCCC;
    @(negedge clk);
    t_req = '0; nic_we = 0; nic_addr = 13'd5;
    @(negedge clk);
    check(nic_rdata == 32'hAAAA, "tile write wins");
    t_req = '0; dma_we = 1; nic_we = 1; nic_wdata = 32'hCCCC;
    @(negedge clk);
    dma_we = 0; nic_we = 0;
    @(negedge clk);
    check(nic_rdata == 32'hBBBB, "DMA write wins over NIC");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

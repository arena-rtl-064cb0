// spm_data_memory: the node's 32 KB scratchpad data memory.
//
// Two banks of BANK_WORDS 32-bit words (2 x 4096 x 4 B = 32 KB), each with
// four tile ports, as published (2-bank, 4-port). Tile port p of bank b serves
// the leftmost tile of row 4b+p and uses a bank-local word address. Two more
// ports reach the whole memory with a global word address (bank = MSB): a
// write-only port for the DMA unit and a read/write port for the NIC.
// Reads return data one cycle after the request. Writes to the same word in
// one cycle resolve tile ports first (lowest port), then DMA, then NIC. The
// array stands in for the memory macro of the published chip. The DMA and
// NIC ports, the latency and the write priority are this design's choices.
module spm_data_memory
  import arena_pkg::*;
#(
  parameter int BANKS      = 2,
  parameter int TILE_PORTS = 4,
  parameter int BANK_WORDS = 4096
) (
  input  logic clk,
  input  mem_req_t [BANKS*TILE_PORTS-1:0] t_req,
  output logic [BANKS*TILE_PORTS-1:0][DATA_W-1:0] t_rdata,
  // DMA port (write only)
  input  logic                      dma_we,
  input  logic [$clog2(BANKS*BANK_WORDS)-1:0] dma_addr,
  input  logic [DATA_W-1:0]         dma_wdata,
  // NIC port
  input  logic                      nic_valid,
  input  logic                      nic_we,
  input  logic [$clog2(BANKS*BANK_WORDS)-1:0] nic_addr,
  input  logic [DATA_W-1:0]         nic_wdata,
  output logic [DATA_W-1:0]         nic_rdata
);
  localparam int AW = $clog2(BANK_WORDS);
  localparam int BW = (BANKS > 1) ? $clog2(BANKS) : 1;

  localparam int GAW = $clog2(BANKS * BANK_WORDS);

  logic [BANKS-1:0][DATA_W-1:0] nic_rd;
  logic [BW-1:0]                nic_bank_q;

  // One inferred memory per bank: four tile ports plus the shared DMA and
  // NIC ports. Write priority (lowest first, later writes win): NIC, DMA,
  // tile ports in descending order.
  for (genvar b = 0; b < BANKS; b++) begin : g_bank
    logic [DATA_W-1:0] mem [BANK_WORDS];
    logic nic_hit, dma_hit;
    assign nic_hit = nic_valid && (int'(nic_addr[GAW-1:AW]) == b);
    assign dma_hit = dma_we && (int'(dma_addr[GAW-1:AW]) == b);

    always_ff @(posedge clk) begin
      if (nic_hit && nic_we) mem[nic_addr[AW-1:0]] <= nic_wdata;
      if (dma_hit)           mem[dma_addr[AW-1:0]] <= dma_wdata;
      for (int p = TILE_PORTS - 1; p >= 0; p--)
        if (t_req[b*TILE_PORTS+p].valid && t_req[b*TILE_PORTS+p].we)
          mem[AW'(t_req[b*TILE_PORTS+p].addr)] <= t_req[b*TILE_PORTS+p].wdata;
      for (int p = 0; p < TILE_PORTS; p++)
        if (t_req[b*TILE_PORTS+p].valid && !t_req[b*TILE_PORTS+p].we)
          t_rdata[b*TILE_PORTS+p] <= mem[AW'(t_req[b*TILE_PORTS+p].addr)];
      if (nic_hit && !nic_we) nic_rd[b] <= mem[nic_addr[AW-1:0]];
    end
  end

  always_ff @(posedge clk)
    if (nic_valid && !nic_we) nic_bank_q <= BW'(nic_addr[GAW-1:AW]);
  assign nic_rdata = nic_rd[nic_bank_q];
endmodule

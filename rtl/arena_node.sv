// arena_node: one ARENA node (one chip of the cluster).
//
// Wires together the task dispatcher, the CGRA controller (with the spawn
// queues and coalescing unit), the 8x8 CGRA, the 32 KB data memory, the NIC
// and the DMA unit. Token flow: ring in -> RecvQueue -> Filter -> WaitQueue
// -> (NIC fetch of remote data if needed) -> CGRA controller -> tile groups;
// spawned tokens -> spawn queues -> coalescing -> Filter; remote parts ->
// SendQueue -> ring out. The microcontroller, the node's local memory and
// the data-transfer network are outside: their connections are ports
// (control memory and context preload, DMA descriptors, initial token, local
// memory, NIC network channels). local_start/local_end hold the node's data
// range (set by the microcontroller, ARENA_init). The structure follows the
// paper's node diagram; port formats are this design's choices.
module arena_node
  import arena_pkg::*;
#(
  parameter int NODE_ID     = 0,
  parameter int QUEUE_DEPTH = 8,
  parameter int SPAWN_DEPTH = 4,
  parameter int SPILL_DEPTH = 16,
  parameter int WINDOW      = 8,
  parameter int BANK_WORDS  = 4096,
  parameter int REMOTE_BASE = 7680
) (
  input  logic clk,
  input  logic rst_n,
  input  logic [ADDR_W-1:0] local_start,
  input  logic [ADDR_W-1:0] local_end,
  // ring
  input  logic   ring_in_valid,
  output logic   ring_in_ready,
  input  token_t ring_in_token,
  output logic   ring_out_valid,
  input  logic   ring_out_ready,
  output token_t ring_out_token,
  // microcontroller
  input  logic   init_valid,
  output logic   init_ready,
  input  token_t init_token,
  input  logic                 cm_we,
  input  logic [5:0]           cm_tile,
  input  logic [PC_W-1:0]      cm_addr,
  input  logic [CW_BITS-1:0]   cm_wdata,
  input  logic                 ctx_we,
  input  logic [TASK_ID_W-1:0] ctx_task,
  input  logic [1:0]           ctx_mode,
  input  logic [PC_W-1:0]      ctx_base,
  input  logic [PC_W-1:0]      ctx_len,
  input  logic                 dma_valid,
  output logic                 dma_ready,
  input  logic [ADDR_W-1:0]    dma_src,
  input  logic [$clog2(2*BANK_WORDS)-1:0] dma_dst,
  input  logic [15:0]          dma_len,
  output logic                 dma_done,
  // local memory
  output logic              lm_req_valid,
  input  logic              lm_req_ready,
  output logic [ADDR_W-1:0] lm_req_addr,
  input  logic              lm_rsp_valid,
  input  logic [DATA_W-1:0] lm_rsp_data,
  // data-transfer network
  output logic              nreq_valid,
  input  logic              nreq_ready,
  output logic [NODE_W-1:0] nreq_src,
  output logic [ADDR_W-1:0] nreq_start,
  output logic [ADDR_W-1:0] nreq_end,
  input  logic              nrsp_valid,
  input  logic [DATA_W-1:0] nrsp_data,
  input  logic              nrsp_last,
  input  logic              sreq_valid,
  output logic              sreq_ready,
  input  logic [NODE_W-1:0] sreq_src,
  input  logic [ADDR_W-1:0] sreq_start,
  input  logic [ADDR_W-1:0] sreq_end,
  output logic              srsp_valid,
  input  logic              srsp_ready,
  output logic [NODE_W-1:0] srsp_dst,
  output logic [DATA_W-1:0] srsp_data,
  output logic              srsp_last,
  // status
  output logic terminated,
  output logic busy,
  output logic overflow
);
  localparam int SPM_AW = $clog2(2 * BANK_WORDS);
  localparam logic [NODE_W-1:0] NID = NODE_W'(NODE_ID);

  // dispatcher <-> controller / NIC
  logic   wq_valid, wq_pop, wq_empty, sp_valid, sp_ready, dreq_valid, dreq_ready, dack;
  token_t wq_token, sp_token, dreq_token;

  task_dispatcher #(.RECV_DEPTH(QUEUE_DEPTH), .WAIT_DEPTH(QUEUE_DEPTH),
                    .SEND_DEPTH(QUEUE_DEPTH)) u_disp (
    .clk, .rst_n, .local_start, .local_end,
    .in_valid(ring_in_valid), .in_ready(ring_in_ready), .in_token(ring_in_token),
    .out_valid(ring_out_valid), .out_ready(ring_out_ready), .out_token(ring_out_token),
    .init_valid, .init_ready, .init_token,
    .spawn_valid(sp_valid), .spawn_ready(sp_ready), .spawn_token(sp_token),
    .wq_valid, .wq_pop, .wq_token, .wq_empty,
    .dreq_valid, .dreq_ready, .dreq_token, .dack,
    .node_busy(busy), .terminated);

  // controller <-> array
  cfg_t     [7:0] cfg_row;
  grp_ctx_t [3:0] gctx;
  logic     [3:0] spawn_valid;
  token_t   [3:0] spawn_token;
  logic launch_stall, merge_pulse;
  logic [2:0] launch_groups;

  cgra_controller #(.SPAWN_DEPTH(SPAWN_DEPTH), .SPILL_DEPTH(SPILL_DEPTH),
                    .WINDOW(WINDOW)) u_ctrl (
    .clk, .rst_n, .node_id(NID), .local_start, .local_end,
    .wq_valid, .wq_token, .wq_pop,
    .ctx_we, .ctx_task, .ctx_mode, .ctx_base, .ctx_len,
    .cfg_row, .gctx, .spawn_valid, .spawn_token,
    .out_valid(sp_valid), .out_ready(sp_ready), .out_token(sp_token),
    .busy, .overflow, .launch_stall, .launch_groups, .merge_pulse);

  mem_req_t [7:0]             t_req;
  logic     [7:0][DATA_W-1:0] t_rdata;

  cgra_array #(.ROWS(8), .COLS(8)) u_array (
    .clk, .rst_n, .cfg_row, .gctx,
    .mem_req(t_req), .mem_rdata(t_rdata),
    .spawn_valid, .spawn_token,
    .cm_we, .cm_tile, .cm_addr, .cm_wdata);

  logic              dma_we, nic_valid, nic_we;
  logic [SPM_AW-1:0] dma_addr, nic_addr;
  logic [DATA_W-1:0] dma_wdata, nic_wdata, nic_rdata;

  spm_data_memory #(.BANKS(2), .TILE_PORTS(4), .BANK_WORDS(BANK_WORDS)) u_spm (
    .clk, .t_req, .t_rdata,
    .dma_we, .dma_addr, .dma_wdata,
    .nic_valid, .nic_we, .nic_addr, .nic_wdata, .nic_rdata);

  nic #(.SPM_AW(SPM_AW), .REMOTE_BASE(REMOTE_BASE)) u_nic (
    .clk, .rst_n, .node_id(NID), .local_start,
    .dreq_valid, .dreq_ready, .dreq_token, .dack,
    .nreq_valid, .nreq_ready, .nreq_src, .nreq_start, .nreq_end,
    .nrsp_valid, .nrsp_data, .nrsp_last,
    .sreq_valid, .sreq_ready, .sreq_src, .sreq_start, .sreq_end,
    .srsp_valid, .srsp_ready, .srsp_dst, .srsp_data, .srsp_last,
    .spm_valid(nic_valid), .spm_we(nic_we), .spm_addr(nic_addr),
    .spm_wdata(nic_wdata), .spm_rdata(nic_rdata));

  dma_unit #(.SPM_AW(SPM_AW)) u_dma (
    .clk, .rst_n,
    .desc_valid(dma_valid), .desc_ready(dma_ready), .desc_src(dma_src),
    .desc_dst(dma_dst), .desc_len(dma_len), .done(dma_done),
    .lm_req_valid, .lm_req_ready, .lm_req_addr, .lm_rsp_valid, .lm_rsp_data,
    .spm_we(dma_we), .spm_addr(dma_addr), .spm_wdata(dma_wdata));
endmodule

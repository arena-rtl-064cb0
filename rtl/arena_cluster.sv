// arena_cluster: the ARENA cluster, NODES nodes on a unidirectional token ring.
//
// Node n sends the tokens in its SendQueue through ring_switch n to node
// (n+1) mod NODES. Everything that belongs to the per-node microcontroller,
// the local memories and the data-transfer network is brought out as arrays
// of per-node ports. A program runs as follows: preload control memories and
// context tables, preload data through the DMA units, set each node's local
// range, inject a root token (and a TERMINATE token) at one node, and wait
// until every node reports terminated. 16 nodes is the largest cluster the
// paper evaluates; 4-bit TASK_id/FROM_node fields limit the ring to 16.
module arena_cluster
  import arena_pkg::*;
#(
  parameter int NODES       = 16,
  parameter int QUEUE_DEPTH = 8,
  parameter int SPAWN_DEPTH = 4,
  parameter int SPILL_DEPTH = 16,
  parameter int WINDOW      = 8,
  parameter int BANK_WORDS  = 4096,
  parameter int REMOTE_BASE = 7680,
  parameter int HOP_LATENCY = 800,
  parameter int HOP_INTERVAL = 2,
  parameter int HOP_DEPTH   = 400
) (
  input  logic clk,
  input  logic rst_n,
  input  logic [NODES-1:0][ADDR_W-1:0] local_start,
  input  logic [NODES-1:0][ADDR_W-1:0] local_end,
  input  logic   [NODES-1:0] init_valid,
  output logic   [NODES-1:0] init_ready,
  input  token_t [NODES-1:0] init_token,
  input  logic   [NODES-1:0]                cm_we,
  input  logic   [NODES-1:0][5:0]           cm_tile,
  input  logic   [NODES-1:0][PC_W-1:0]      cm_addr,
  input  logic   [NODES-1:0][CW_BITS-1:0]   cm_wdata,
  input  logic   [NODES-1:0]                ctx_we,
  input  logic   [NODES-1:0][TASK_ID_W-1:0] ctx_task,
  input  logic   [NODES-1:0][1:0]           ctx_mode,
  input  logic   [NODES-1:0][PC_W-1:0]      ctx_base,
  input  logic   [NODES-1:0][PC_W-1:0]      ctx_len,
  input  logic   [NODES-1:0]                dma_valid,
  output logic   [NODES-1:0]                dma_ready,
  input  logic   [NODES-1:0][ADDR_W-1:0]    dma_src,
  input  logic   [NODES-1:0][$clog2(2*BANK_WORDS)-1:0] dma_dst,
  input  logic   [NODES-1:0][15:0]          dma_len,
  output logic   [NODES-1:0]                dma_done,
  output logic   [NODES-1:0]                lm_req_valid,
  input  logic   [NODES-1:0]                lm_req_ready,
  output logic   [NODES-1:0][ADDR_W-1:0]    lm_req_addr,
  input  logic   [NODES-1:0]                lm_rsp_valid,
  input  logic   [NODES-1:0][DATA_W-1:0]    lm_rsp_data,
  output logic   [NODES-1:0]                nreq_valid,
  input  logic   [NODES-1:0]                nreq_ready,
  output logic   [NODES-1:0][NODE_W-1:0]    nreq_src,
  output logic   [NODES-1:0][ADDR_W-1:0]    nreq_start,
  output logic   [NODES-1:0][ADDR_W-1:0]    nreq_end,
  input  logic   [NODES-1:0]                nrsp_valid,
  input  logic   [NODES-1:0][DATA_W-1:0]    nrsp_data,
  input  logic   [NODES-1:0]                nrsp_last,
  input  logic   [NODES-1:0]                sreq_valid,
  output logic   [NODES-1:0]                sreq_ready,
  input  logic   [NODES-1:0][NODE_W-1:0]    sreq_src,
  input  logic   [NODES-1:0][ADDR_W-1:0]    sreq_start,
  input  logic   [NODES-1:0][ADDR_W-1:0]    sreq_end,
  output logic   [NODES-1:0]                srsp_valid,
  input  logic   [NODES-1:0]                srsp_ready,
  output logic   [NODES-1:0][NODE_W-1:0]    srsp_dst,
  output logic   [NODES-1:0][DATA_W-1:0]    srsp_data,
  output logic   [NODES-1:0]                srsp_last,
  output logic   [NODES-1:0]                terminated,
  output logic   [NODES-1:0]                busy,
  output logic   [NODES-1:0]                overflow
);
  logic   [NODES-1:0] so_valid, so_ready, ri_valid, ri_ready;
  token_t [NODES-1:0] so_token, ri_token;

  for (genvar n = 0; n < NODES; n++) begin : g_node
    localparam int NXT = (n + 1) % NODES;

    arena_node #(.NODE_ID(n), .QUEUE_DEPTH(QUEUE_DEPTH), .SPAWN_DEPTH(SPAWN_DEPTH),
                 .SPILL_DEPTH(SPILL_DEPTH), .WINDOW(WINDOW), .BANK_WORDS(BANK_WORDS),
                 .REMOTE_BASE(REMOTE_BASE)) u_node (
      .clk, .rst_n, .local_start(local_start[n]), .local_end(local_end[n]),
      .ring_in_valid(ri_valid[n]), .ring_in_ready(ri_ready[n]), .ring_in_token(ri_token[n]),
      .ring_out_valid(so_valid[n]), .ring_out_ready(so_ready[n]), .ring_out_token(so_token[n]),
      .init_valid(init_valid[n]), .init_ready(init_ready[n]), .init_token(init_token[n]),
      .cm_we(cm_we[n]), .cm_tile(cm_tile[n]), .cm_addr(cm_addr[n]), .cm_wdata(cm_wdata[n]),
      .ctx_we(ctx_we[n]), .ctx_task(ctx_task[n]), .ctx_mode(ctx_mode[n]),
      .ctx_base(ctx_base[n]), .ctx_len(ctx_len[n]),
      .dma_valid(dma_valid[n]), .dma_ready(dma_ready[n]), .dma_src(dma_src[n]),
      .dma_dst(dma_dst[n]), .dma_len(dma_len[n]), .dma_done(dma_done[n]),
      .lm_req_valid(lm_req_valid[n]), .lm_req_ready(lm_req_ready[n]),
      .lm_req_addr(lm_req_addr[n]), .lm_rsp_valid(lm_rsp_valid[n]), .lm_rsp_data(lm_rsp_data[n]),
      .nreq_valid(nreq_valid[n]), .nreq_ready(nreq_ready[n]), .nreq_src(nreq_src[n]),
      .nreq_start(nreq_start[n]), .nreq_end(nreq_end[n]),
      .nrsp_valid(nrsp_valid[n]), .nrsp_data(nrsp_data[n]), .nrsp_last(nrsp_last[n]),
      .sreq_valid(sreq_valid[n]), .sreq_ready(sreq_ready[n]), .sreq_src(sreq_src[n]),
      .sreq_start(sreq_start[n]), .sreq_end(sreq_end[n]),
      .srsp_valid(srsp_valid[n]), .srsp_ready(srsp_ready[n]), .srsp_dst(srsp_dst[n]),
      .srsp_data(srsp_data[n]), .srsp_last(srsp_last[n]),
      .terminated(terminated[n]), .busy(busy[n]), .overflow(overflow[n]));

    ring_switch #(.LATENCY(HOP_LATENCY), .INTERVAL(HOP_INTERVAL), .DEPTH(HOP_DEPTH)) u_hop (
      .clk, .rst_n,
      .in_valid(so_valid[n]), .in_ready(so_ready[n]), .in_token(so_token[n]),
      .out_valid(ri_valid[NXT]), .out_ready(ri_ready[NXT]), .out_token(ri_token[NXT]));
  end
endmodule

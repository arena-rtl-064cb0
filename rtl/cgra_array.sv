// cgra_array: the 8x8 CGRA of an ARENA node.
//
// 64 cgra_tile instances in a mesh: every tile drives a registered link to
// each of its four neighbours (links at the array edge read 0). Rows are
// grouped in pairs into four tile groups (group g = rows 2g and 2g+1, a 2x8
// CGRA each); every tile of a group receives that group's run context from the
// CGRA controller. Each row's configuration chain enters at the rightmost
// column (cfg_row[r]) and moves one column west per cycle.
// The leftmost tile of row r drives data memory port r (port r mod 4 of bank
// r div 4). The rightmost tile of row 2g+1 is the spawn-capable tile of group
// g and drives spawn[g]. Tile t = 8*row + col is written by the control
// memory preload port when cm_tile == t. The 8x8 size, the 4 groups, the
// leftmost-tile memory connection and the 4 spawn tiles follow the paper;
// the position of the spawn tiles is read from its node diagram and the
// row-to-port mapping is this design's choice.
module cgra_array
  import arena_pkg::*;
#(
  parameter int ROWS = 8,
  parameter int COLS = 8,
  parameter int CMEM_DEPTH = CMEM_WORDS
) (
  input  logic clk,
  input  logic rst_n,
  input  cfg_t     [ROWS-1:0]   cfg_row,
  input  grp_ctx_t [ROWS/2-1:0] gctx,
  output mem_req_t [ROWS-1:0]   mem_req,
  input  logic [ROWS-1:0][DATA_W-1:0] mem_rdata,
  output logic   [ROWS/2-1:0]   spawn_valid,
  output token_t [ROWS/2-1:0]   spawn_token,
  input  logic                  cm_we,
  input  logic [$clog2(ROWS*COLS)-1:0] cm_tile,
  input  logic [PC_W-1:0]       cm_addr,
  input  logic [CW_BITS-1:0]    cm_wdata
);
  logic [DATA_W-1:0] o_n [ROWS][COLS];
  logic [DATA_W-1:0] o_s [ROWS][COLS];
  logic [DATA_W-1:0] o_e [ROWS][COLS];
  logic [DATA_W-1:0] o_w [ROWS][COLS];
  cfg_t              c_o [ROWS][COLS];

  for (genvar r = 0; r < ROWS; r++) begin : g_r
    for (genvar c = 0; c < COLS; c++) begin : g_c
      logic [DATA_W-1:0] i_n, i_s, i_e, i_w, rdata;
      cfg_t     cin;
      mem_req_t mreq;
      logic     spv;
      token_t   spt;
      // a tile's north input is the south output of the tile above
      assign i_n   = (r > 0)        ? o_s[(r > 0) ? r - 1 : 0][c] : '0;
      assign i_s   = (r < ROWS - 1) ? o_n[(r < ROWS - 1) ? r + 1 : r][c] : '0;
      assign i_w   = (c > 0)        ? o_e[r][(c > 0) ? c - 1 : 0] : '0;
      assign i_e   = (c < COLS - 1) ? o_w[r][(c < COLS - 1) ? c + 1 : c] : '0;
      assign cin   = (c == COLS - 1) ? cfg_row[r] : c_o[r][(c < COLS - 1) ? c + 1 : c];
      assign rdata = (c == 0) ? mem_rdata[r] : '0;

      cgra_tile #(.CMEM_DEPTH(CMEM_DEPTH)) u_tile (
        .clk, .rst_n,
        .in_n(i_n), .in_s(i_s), .in_e(i_e), .in_w(i_w),
        .out_n(o_n[r][c]), .out_s(o_s[r][c]), .out_e(o_e[r][c]), .out_w(o_w[r][c]),
        .cfg_in(cin), .cfg_out(c_o[r][c]),
        .ctx(gctx[r/2]),
        .mem_req(mreq), .mem_rdata(rdata),
        .spawn_valid(spv), .spawn_token(spt),
        .cm_we(cm_we && (cm_tile == ($bits(cm_tile))'(r * COLS + c))),
        .cm_addr, .cm_wdata);

      if (c == 0) begin : g_mem
        assign mem_req[r] = mreq;
      end
      if ((c == COLS - 1) && (r % 2 == 1)) begin : g_spawn
        assign spawn_valid[r/2] = spv;
        assign spawn_token[r/2] = spt;
      end
    end
  end
endmodule

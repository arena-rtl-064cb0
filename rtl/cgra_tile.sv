// cgra_tile: one tile of the 8x8 CGRA.
//
// A tile holds a 480-byte control memory (60 control words of 64 bits), a
// functional unit (cgra_fu), a 6x7 crossbar (tile_crossbar), three operand
// registers A, B, C, a result register, a predicate bit and four registered
// outputs towards its north, south, east and west neighbours.
//
// Reconfiguration: a cfg_t message {base, len} arrives from the east neighbour
// (or from the CGRA controller for the rightmost column); the tile latches it,
// sets its program counter to base and passes the message to its west
// neighbour one cycle later, so a row is configured right to left in 8 cycles.
// Execution: while run is high the tile executes control word cmem[pc] each
// cycle and pc steps through base .. base+len-1 and wraps, one loop iteration
// per len cycles. In one cycle the FU operates on the operand registers as
// they were at the start of the cycle and writes the result register, while
// the crossbar routes the current inputs into operand and output registers
// selected by the same word. A value therefore moves one tile per cycle, and
// a result computed in cycle t can be routed in cycle t+1.
// Leftmost tiles use the mem_req/mem_rdata port (read data appears on the AUX
// input the cycle after a LOAD). Spawn-capable tiles drive spawn_valid with a
// task token (FROM_node filled later by the controller); a two-cycle spawn is
// assembled from a SPAWN and the following SPAWNX word.
// Tile contents (FU, control memory, crossbar, three register sets), the 6x7
// crossbar and the 480-byte control memory follow the paper; the control-word
// format and this timing are this design's choices.
module cgra_tile
  import arena_pkg::*;
#(
  parameter int CMEM_DEPTH = CMEM_WORDS
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [DATA_W-1:0] in_n, in_s, in_e, in_w,
  output logic [DATA_W-1:0] out_n, out_s, out_e, out_w,
  input  cfg_t              cfg_in,
  output cfg_t              cfg_out,
  input  grp_ctx_t          ctx,
  output mem_req_t          mem_req,
  input  logic [DATA_W-1:0] mem_rdata,
  output logic              spawn_valid,
  output token_t            spawn_token,
  // control memory preload
  input  logic              cm_we,
  input  logic [PC_W-1:0]   cm_addr,
  input  logic [CW_BITS-1:0] cm_wdata
);
  instr_t            cmem [CMEM_DEPTH];
  logic [PC_W-1:0]   pc, base, len;
  logic [DATA_W-1:0] ra, rb, rc, res;
  logic              pred;
  instr_t            iw;

  always_ff @(posedge clk) begin
    if (cm_we) cmem[cm_addr] <= instr_t'(cm_wdata);
  end

  assign iw = ctx.run ? cmem[pc] : '0;

  // ---- crossbar ----
  logic [XB_IN-1:0][DATA_W-1:0]  xin;
  logic [XB_OUT-1:0][DATA_W-1:0] xout;
  logic [XB_OUT-1:0]             xwe;
  logic [XB_OUT-1:0][2:0]        xsel;
  always_comb begin
    xin[XIN_N] = in_n; xin[XIN_S] = in_s; xin[XIN_E] = in_e; xin[XIN_W] = in_w;
    xin[XIN_RES] = res; xin[XIN_AUX] = mem_rdata;
    for (int d = 0; d < XB_OUT; d++) xsel[d] = ctx.run ? iw.sel[d] : XSEL_HOLD;
  end
  tile_crossbar u_xbar (.in(xin), .sel(xsel), .out(xout), .we(xwe));

  // ---- functional unit ----
  logic res_we, pred_we, pred_new, m_valid, m_we, sp1, sp_more, sp2;
  logic [DATA_W-1:0] fu_res, m_addr, m_wdata, f0, f1, f2;
  logic [TASK_ID_W-1:0] sid;
  cgra_fu u_fu (
    .op(iw.op), .use_imm(iw.use_imm), .pred_en(iw.pred_en), .imm(iw.imm),
    .a(ra), .b_reg(rb), .c(rc), .pred,
    .idx(ctx.idx), .lidx(ctx.lidx), .param(ctx.param), .tend(ctx.tend),
    .res_we, .res(fu_res), .pred_we, .pred_new,
    .mem_valid(m_valid), .mem_we(m_we), .mem_addr(m_addr), .mem_wdata(m_wdata),
    .spawn_first(sp1), .spawn_more(sp_more), .spawn_second(sp2),
    .sp_id(sid), .sp_f0(f0), .sp_f1(f1), .sp_f2(f2));

  always_comb begin
    mem_req.valid = m_valid;
    mem_req.we    = m_we;
    mem_req.addr  = m_addr[BANK_AW-1:0];
    mem_req.wdata = m_wdata;
  end

  // ---- spawn assembly ----
  logic   sp_pend;
  token_t sp_part;
  always_comb begin
    spawn_valid = 1'b0;
    spawn_token = make_token(sid, f0, f1, ctx.param, '0, '0, '0);
    if (sp1 && !sp_more) spawn_valid = 1'b1;
    if (sp2 && sp_pend) begin
      spawn_valid = 1'b1;
      spawn_token = sp_part;
      spawn_token.param        = f0;
      spawn_token.remote_start = f1;
      spawn_token.remote_end   = f2;
    end
  end

  // ---- state ----
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      pc <= '0; base <= '0; len <= '0;
      ra <= '0; rb <= '0; rc <= '0; res <= '0; pred <= 1'b0;
      out_n <= '0; out_s <= '0; out_e <= '0; out_w <= '0;
      cfg_out <= '0;
      sp_pend <= 1'b0; sp_part <= '0;
    end else begin
      cfg_out <= cfg_in;
      if (cfg_in.valid) begin
        base <= cfg_in.base;
        len  <= cfg_in.len;
        pc   <= cfg_in.base;
        pred <= 1'b0;
        sp_pend <= 1'b0;
      end else if (ctx.run) begin
        pc <= (pc == base + len - 1'b1) ? base : pc + 1'b1;
        if (res_we)  res  <= fu_res;
        if (pred_we) pred <= pred_new;
        if (xwe[XO_N]) out_n <= xout[XO_N];
        if (xwe[XO_S]) out_s <= xout[XO_S];
        if (xwe[XO_E]) out_e <= xout[XO_E];
        if (xwe[XO_W]) out_w <= xout[XO_W];
        if (xwe[XO_A]) ra <= xout[XO_A];
        if (xwe[XO_B]) rb <= xout[XO_B];
        if (xwe[XO_C]) rc <= xout[XO_C];
        if (sp1 && sp_more) begin
          sp_pend <= 1'b1;
          sp_part <= make_token(sid, f0, f1, '0, '0, '0, '0);
        end else if (sp2) begin
          sp_pend <= 1'b0;
        end
      end
    end
  end
endmodule

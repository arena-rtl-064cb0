// cgra_controller: the CGRA Controller of an ARENA node.
//
// It takes the ready token at the head of the WaitQueue and decides how many
// of the four tile groups (2x8 tiles each) the task gets, from its data range
// size = TASK_end - TASK_start against the local range L:
//   size <  L/4  -> 1 group (mode 0, 2x8 tiles)
//   size >  L/2  -> 4 groups (mode 2, 8x8) when all are free, else 2 groups
//   otherwise    -> 2 groups (mode 1, 4x8, an aligned pair {0,1} or {2,3})
// and launches it when those groups are free. A context table, written by the
// microcontroller, gives for each (TASK_id, mode) the control memory base and
// loop length (II) of the mapping; launching sends {base, II} into the right
// end of every row of the chosen groups, and after the 8 cycles the message
// needs to reach the leftmost column the groups run. A k-group mapping handles
// k consecutive elements per iteration: the controller runs
// ceil(size / k) iterations of II cycles and broadcasts to the groups the
// global and local index of the iteration's first element, PARAM and
// TASK_end. The groups are free again after the last iteration.
// Spawned tokens from the four spawn tiles go through the coalescing unit to
// the dispatcher; while any spawn queue is full or the overflow store is in
// use, no new task is launched while some group is still running (with every
// group idle the stall is lifted, which keeps a full WaitQueue from
// deadlocking the node; this exception is this design's). The allocation rule for the first two cases,
// the 8-cycle right-to-left reconfiguration, the 4 groups, three modes, four
// spawn queues and launch stall follow the paper; the middle case, the
// context table, the iteration scheme and all handshakes are choices here.
module cgra_controller
  import arena_pkg::*;
#(
  parameter int GROUPS      = 4,
  parameter int COLS        = 8,
  parameter int NUM_TASKS   = 16,
  parameter int MODES       = 3,
  parameter int SPAWN_DEPTH = 4,
  parameter int SPILL_DEPTH = 16,
  parameter int WINDOW      = 8
) (
  input  logic clk,
  input  logic rst_n,
  input  logic [NODE_W-1:0] node_id,
  input  logic [ADDR_W-1:0] local_start,
  input  logic [ADDR_W-1:0] local_end,
  // WaitQueue head
  input  logic   wq_valid,
  input  token_t wq_token,
  output logic   wq_pop,
  // context table preload
  input  logic                 ctx_we,
  input  logic [TASK_ID_W-1:0] ctx_task,
  input  logic [1:0]           ctx_mode,
  input  logic [PC_W-1:0]      ctx_base,
  input  logic [PC_W-1:0]      ctx_len,
  // CGRA array
  output cfg_t     [2*GROUPS-1:0] cfg_row,
  output grp_ctx_t [GROUPS-1:0]   gctx,
  input  logic   [GROUPS-1:0]     spawn_valid,
  input  token_t [GROUPS-1:0]     spawn_token,
  // coalesced tokens to the dispatcher
  output logic   out_valid,
  input  logic   out_ready,
  output token_t out_token,
  // status
  output logic   busy,
  output logic   overflow,
  output logic   launch_stall,   // a ready task waits because spawn queues are short of slots
  output logic [2:0] launch_groups, // number of groups given at a launch (0 otherwise)
  output logic   merge_pulse
);
  typedef enum logic [1:0] {G_IDLE, G_CFG, G_RUN} gstate_e;

  gstate_e           st     [GROUPS];
  logic [PC_W-1:0]   cnt    [GROUPS];
  logic [ADDR_W-1:0] iter   [GROUPS];
  logic [ADDR_W-1:0] niter  [GROUPS];
  logic [1:0]        klog   [GROUPS];
  logic [PC_W-1:0]   glen   [GROUPS];
  token_t            gtok   [GROUPS];

  logic [PC_W-1:0] tab_base [NUM_TASKS][MODES];
  logic [PC_W-1:0] tab_len  [NUM_TASKS][MODES];

  // ---- coalescing unit ----
  logic any_full, spill_used, coal_idle;
  coalescing_unit #(.GROUPS(GROUPS), .SPAWN_DEPTH(SPAWN_DEPTH),
                    .SPILL_DEPTH(SPILL_DEPTH), .WINDOW(WINDOW)) u_coal (
    .clk, .rst_n, .node_id,
    .sp_valid(spawn_valid), .sp_token(spawn_token),
    .out_valid, .out_ready, .out_token,
    .any_full, .spill_used, .idle(coal_idle), .overflow, .merge_pulse);

  // ---- allocation ----
  logic [GROUPS-1:0] free, mask;
  logic [ADDR_W-1:0] size, lsize;
  logic [1:0]        mode;
  logic              found, launch, blocked;
  always_comb begin
    for (int g = 0; g < GROUPS; g++) free[g] = (st[g] == G_IDLE);
    size  = wq_token.task_end - wq_token.task_start;
    lsize = local_end - local_start;
    mask  = '0;
    mode  = 2'd0;
    found = 1'b0;
    if (size < (lsize >> 2)) begin
      for (int g = GROUPS - 1; g >= 0; g--)
        if (free[g]) begin mask = '0; mask[g] = 1'b1; found = 1'b1; end
      mode = 2'd0;
    end else begin
      if ((size > (lsize >> 1)) && (&free)) begin
        mask = '1; mode = 2'd2; found = 1'b1;
      end else if (free[0] && free[1]) begin
        mask = GROUPS'(4'b0011); mode = 2'd1; found = 1'b1;
      end else if (free[2] && free[3]) begin
        mask = GROUPS'(4'b1100); mode = 2'd1; found = 1'b1;
      end
    end
    // the stall is lifted when no group runs: nothing can spawn then, and the
    // spawned tokens may be waiting for room in the WaitQueue that only a
    // launch frees (otherwise a full WaitQueue would deadlock the node)
    blocked      = (any_full || spill_used) && !(&free);
    launch       = wq_valid && found && !blocked;
    launch_stall = wq_valid && found && blocked;
    wq_pop       = launch;
    launch_groups = launch ? ((mode == 2'd0) ? 3'd1 : (mode == 2'd1) ? 3'd2 : 3'd4) : 3'd0;
  end

  always_comb begin
    for (int r = 0; r < 2 * GROUPS; r++) begin
      cfg_row[r].valid = launch && mask[r/2];
      cfg_row[r].base  = tab_base[wq_token.task_id][mode];
      cfg_row[r].len   = tab_len[wq_token.task_id][mode];
    end
    for (int g = 0; g < GROUPS; g++) begin
      gctx[g].run   = (st[g] == G_RUN);
      gctx[g].idx   = gtok[g].task_start + (iter[g] << klog[g]);
      gctx[g].lidx  = gctx[g].idx - local_start;
      gctx[g].param = gtok[g].param;
      gctx[g].tend  = gtok[g].task_end;
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int t = 0; t < NUM_TASKS; t++)
        for (int m = 0; m < MODES; m++) begin tab_base[t][m] <= '0; tab_len[t][m] <= PC_W'(1); end
    end else if (ctx_we && (int'(ctx_mode) < MODES)) begin
      tab_base[ctx_task][ctx_mode] <= ctx_base;
      tab_len[ctx_task][ctx_mode]  <= ctx_len;
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int g = 0; g < GROUPS; g++) begin
        st[g] <= G_IDLE; cnt[g] <= '0; iter[g] <= '0; niter[g] <= '0;
        klog[g] <= '0; glen[g] <= PC_W'(1); gtok[g] <= '0;
      end
    end else begin
      for (int g = 0; g < GROUPS; g++) begin
        if (launch && mask[g]) begin
          st[g]    <= G_CFG;
          cnt[g]   <= '0;
          iter[g]  <= '0;
          klog[g]  <= mode;
          niter[g] <= (size + ((ADDR_W'(1) << mode) - 1'b1)) >> mode;
          glen[g]  <= tab_len[wq_token.task_id][mode];
          gtok[g]  <= wq_token;
        end else begin
          unique case (st[g])
            G_CFG: begin
              if (cnt[g] == PC_W'(COLS - 2)) begin
                cnt[g] <= '0;
                st[g]  <= (niter[g] == '0) ? G_IDLE : G_RUN;
              end else cnt[g] <= cnt[g] + 1'b1;
            end
            G_RUN: begin
              if (cnt[g] == glen[g] - 1'b1) begin
                cnt[g]  <= '0;
                iter[g] <= iter[g] + 1'b1;
                if (iter[g] == niter[g] - 1'b1) st[g] <= G_IDLE;
              end else cnt[g] <= cnt[g] + 1'b1;
            end
            default: ;
          endcase
        end
      end
    end
  end

  always_comb begin
    busy = !coal_idle;
    for (int g = 0; g < GROUPS; g++) if (st[g] != G_IDLE) busy = 1'b1;
  end
endmodule

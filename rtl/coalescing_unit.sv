// coalescing_unit: spawn queues and Coalescing Unit of the CGRA controller.
//
// Each of the four tile groups has one spawn-capable tile; a token it spawns
// is written into that group's 4-entry spawn queue (FROM_node is filled in
// here). When the queue is full the token goes to an overflow store, the
// memory that keeps over-spawned tokens from dead-locking the node; if that is
// full too the token is lost and a sticky overflow flag is raised.
//
// Coalescing: one holding register collects a token. In each cycle, the first
// source head (spawn queues 0..3, then the overflow store) that has the same
// TASK_id, PARAM and remote range and whose range continues the held range on
// either side (head.start == held.end or head.end == held.start) is popped and
// merged into it. When nothing merges, the held token is sent to the dispatcher
// after it has waited WINDOW cycles without a merge (a short window that
// gives consecutive spawns the chance to merge), or at once while another head
// is waiting. An empty holding register loads the overflow store head first,
// then the lowest non-empty spawn queue. The merge rule is the published one;
// the holding register, the window and the source order are choices here.
module coalescing_unit
  import arena_pkg::*;
#(
  parameter int GROUPS      = 4,
  parameter int SPAWN_DEPTH = 4,
  parameter int SPILL_DEPTH = 16,
  parameter int WINDOW      = 8
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic [NODE_W-1:0] node_id,
  input  logic   [GROUPS-1:0] sp_valid,
  input  token_t [GROUPS-1:0] sp_token,
  output logic   out_valid,
  input  logic   out_ready,
  output token_t out_token,
  output logic   any_full,      // some spawn queue is full
  output logic   spill_used,    // overflow store is not empty
  output logic   idle,          // nothing held or queued
  output logic   overflow,      // a spawned token was lost (sticky)
  output logic   merge_pulse    // a merge happened this cycle
);
  localparam int NS = GROUPS + 1;   // sources: spawn queues, then overflow store

  logic   [NS-1:0] h_valid, h_pop;
  token_t [NS-1:0] h_tok;
  logic   [GROUPS-1:0] q_push, q_ready;
  logic   [$clog2(SPAWN_DEPTH+1)-1:0] q_count [GROUPS];
  logic   sp_push, sp_ready;
  token_t sp_tok;
  logic [$clog2(SPILL_DEPTH+1)-1:0] sp_count;
  token_t [GROUPS-1:0] in_tok;

  // ---- spawn queues and overflow store ----
  always_comb begin
    sp_push = 1'b0;
    sp_tok  = '0;
    for (int g = 0; g < GROUPS; g++) begin
      in_tok[g] = sp_token[g];
      in_tok[g].from_node = node_id;
      q_push[g] = sp_valid[g] && q_ready[g];
      if (sp_valid[g] && !q_ready[g] && !sp_push) begin
        sp_push = 1'b1;
        sp_tok  = in_tok[g];
      end
    end
  end

  for (genvar g = 0; g < GROUPS; g++) begin : g_q
    token_fifo #(.DEPTH(SPAWN_DEPTH)) u_q (
      .clk, .rst_n,
      .push_valid(q_push[g]), .push_ready(q_ready[g]), .push_token(in_tok[g]),
      .pop_valid(h_valid[g]), .pop_ready(h_pop[g]), .pop_token(h_tok[g]), .count(q_count[g]));
  end

  token_fifo #(.DEPTH(SPILL_DEPTH)) u_spill (
    .clk, .rst_n,
    .push_valid(sp_push), .push_ready(sp_ready), .push_token(sp_tok),
    .pop_valid(h_valid[GROUPS]), .pop_ready(h_pop[GROUPS]), .pop_token(h_tok[GROUPS]),
    .count(sp_count));

  // ---- holding register and merge ----
  logic   hold_v;
  token_t hold_t;
  logic [$clog2(WINDOW+1)-1:0] age;
  logic   [NS-1:0] can_merge;
  logic   do_merge, do_emit, do_load, others;
  int     m_idx, l_idx;

  function automatic logic mergeable(input token_t a, input token_t b);
    return (a.task_id == b.task_id) && (a.param == b.param) &&
           (a.remote_start == b.remote_start) && (a.remote_end == b.remote_end) &&
           ((a.task_start == b.task_end) || (a.task_end == b.task_start));
  endfunction

  always_comb begin
    h_pop    = '0;
    m_idx    = 0;
    l_idx    = 0;
    do_merge = 1'b0;
    do_load  = 1'b0;
    others   = |h_valid;
    for (int s = 0; s < NS; s++)
      can_merge[s] = hold_v && h_valid[s] && mergeable(h_tok[s], hold_t);
    for (int s = NS - 1; s >= 0; s--)
      if (can_merge[s]) begin m_idx = s; do_merge = 1'b1; end
    do_emit = hold_v && !do_merge && out_ready &&
              ((age >= ($bits(age))'(WINDOW)) || others);
    if (!hold_v && others) begin
      do_load = 1'b1;
      if (h_valid[GROUPS]) l_idx = GROUPS;
      else for (int s = GROUPS - 1; s >= 0; s--) if (h_valid[s]) l_idx = s;
    end
    if (do_merge) h_pop[m_idx] = 1'b1;
    if (do_load)  h_pop[l_idx] = 1'b1;
  end

  assign out_valid   = hold_v && !do_merge && ((age >= ($bits(age))'(WINDOW)) || others);
  assign out_token   = hold_t;
  assign merge_pulse = do_merge;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      hold_v   <= 1'b0;
      hold_t   <= '0;
      age      <= '0;
      overflow <= 1'b0;
    end else begin
      if (sp_valid != (sp_valid & q_ready) && (!sp_ready ||
          ($countones(sp_valid & ~q_ready) > 1))) overflow <= 1'b1;
      if (do_merge) begin
        if (h_tok[m_idx].task_start < hold_t.task_start) hold_t.task_start <= h_tok[m_idx].task_start;
        if (h_tok[m_idx].task_end   > hold_t.task_end)   hold_t.task_end   <= h_tok[m_idx].task_end;
        age <= '0;
      end else if (do_emit) begin
        hold_v <= 1'b0;
      end else if (do_load) begin
        hold_v <= 1'b1;
        hold_t <= h_tok[l_idx];
        age    <= '0;
      end else if (hold_v && age < ($bits(age))'(WINDOW)) begin
        age <= age + 1'b1;
      end
    end
  end

  always_comb begin
    any_full = 1'b0;
    for (int g = 0; g < GROUPS; g++)
      if (q_count[g] == ($bits(q_count[g]))'(SPAWN_DEPTH)) any_full = 1'b1;
  end
  assign spill_used = (sp_count != 0);
  assign idle       = !hold_v && !(|h_valid);
endmodule

// tb_arena_cluster_full: the end-to-end test on the full-size cluster.
// The top is instantiated with no parameter overrides: 16 nodes, 800-cycle
// ring hops with 400 tokens of buffering, 8-entry queues, 4x4 spawn queues,
// 16-entry spill store, 32 KB data memory per node. Same scenario and checks
// as tb_arena_cluster.
// The scenario, on nodes that each own 64 words of the global data space
// (node n holds words [64n, 64n+64) in both banks of its data memory):
//  * every node gets the same control words and context table: task 1 adds
//    PARAM to M[i] for each i of its range (a predicated load-add-store
//    loop on the group's leftmost tile, one variant per group count), task 2
//    spawns task 1 on [i, i+1) for each i with one-cycle SPAWN (PARAM
//    inherited), task 3 spawns task 1 on [i, i+1) with PARAM = i and remote
//    range [i-100, i-84) with the two-cycle SPAWN + SPAWNX;
//  * the DMA fills bank 0 from local memory (value 3*addr+1), bank 1 with 0;
//  * node 0 gets task 2 over the first half of the data space, task 1 over
//    20 words and task 3 over two ranges of 15 words at the end; node N/2+1 gets task 1 over
//    a range that starts below and ends above its own, so it is split three
//    ways; then node 0 gets TERMINATE.
// Behavioural models in this file stand in for the per-node local memory
// (two-cycle reads) and the data-transfer network (one transfer at a time:
// the request goes to the node owning the start address, the words come back
// to the requester).
// Checks: every node terminates; no spawned token was lost; for every data
// word bank0+bank1 equals the initial value plus every PARAM applied to it
// (the two banks are summed because a group works in the bank of its rows);
// every remote fetch put the words carried by the network at REMOTE_BASE;
// the DMA is no faster than one word per local-memory round trip;
// termination takes at least two ring round trips of HOP_LATENCY per hop.
// It counts each mechanism (split, three-way split, forward, 1/2/4-group
// allocation, reconfiguration, one- and two-cycle spawn, coalescing merge,
// spill store in use, launch stall, remote data acquire, termination) and
// counts a failure for any that never happened.
module tb_arena_cluster_full;
  localparam int N = 16;
  localparam int HOP_LAT = 800;
  localparam int REMOTE_BASE_W = 7680;
  localparam int WATCHDOG_CYC = 3000000;
  import arena_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc++;

  localparam int R = 64;                 // words of global data owned by each node
  localparam int TOTAL = N * R;
  localparam logic [2:0] H = XSEL_HOLD;
  localparam int LM_ZERO = 32'h0010_0000; // local-memory source that reads as zero

  // ---------------- top-level signals ----------------
  logic   [N-1:0][31:0] local_start, local_end;
  logic   [N-1:0]       init_valid = '0, init_ready;
  token_t [N-1:0]       init_token = '0;
  logic   [N-1:0]       cm_we = '0;
  logic   [N-1:0][5:0]  cm_tile = '0;
  logic   [N-1:0][5:0]  cm_addr = '0;
  logic   [N-1:0][63:0] cm_wdata = '0;
  logic   [N-1:0]       ctx_we = '0;
  logic   [N-1:0][3:0]  ctx_task = '0;
  logic   [N-1:0][1:0]  ctx_mode = '0;
  logic   [N-1:0][5:0]  ctx_base = '0, ctx_len = '0;
  logic   [N-1:0]       dma_valid = '0, dma_ready, dma_done;
  logic   [N-1:0][31:0] dma_src = '0;
  logic   [N-1:0][12:0] dma_dst = '0;
  logic   [N-1:0][15:0] dma_len = '0;
  logic   [N-1:0]       lm_req_valid, lm_req_ready, lm_rsp_valid;
  logic   [N-1:0][31:0] lm_req_addr, lm_rsp_data;
  logic   [N-1:0]       nreq_valid, nreq_ready, nrsp_valid, nrsp_last;
  logic   [N-1:0][3:0]  nreq_src;
  logic   [N-1:0][31:0] nreq_start, nreq_end, nrsp_data;
  logic   [N-1:0]       sreq_valid, sreq_ready, srsp_valid, srsp_ready, srsp_last;
  logic   [N-1:0][3:0]  sreq_src, srsp_dst;
  logic   [N-1:0][31:0] sreq_start, sreq_end, srsp_data;
  logic   [N-1:0]       terminated, busy, overflow;

  for (genvar n = 0; n < N; n++) begin : g_rng
    assign local_start[n] = 32'(n * R);
    assign local_end[n]   = 32'((n + 1) * R);
  end

  arena_cluster dut (.*);

  task automatic check(input logic c, input string msg);
    checks++;
    if (!c) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // ---------------- local memory model: value = 3*addr+1, two-cycle reply ----------------
  assign lm_req_ready = '1;
  for (genvar n = 0; n < N; n++) begin : g_lm
    logic [1:0]  pend = '0;
    logic [31:0] a = '0;
    always_ff @(posedge clk) begin
      pend <= {pend[0], lm_req_valid[n]};
      if (lm_req_valid[n]) a <= lm_req_addr[n];
    end
    assign lm_rsp_valid[n] = pend[1];
    assign lm_rsp_data[n]  = (a >= LM_ZERO) ? 32'd0 : a * 3 + 1;
  end

  // ---------------- data-transfer network model: one transfer at a time ----------------
  typedef enum logic [1:0] {X_IDLE, X_SREQ, X_XFER} xst_e;
  xst_e xst = X_IDLE;
  int x_src = 0, x_own = 0, x_cnt = 0;
  logic [31:0] x_start = 0, x_end = 0;
  int pick;
  logic [31:0] fetched [N][512];
  int fetched_n [N];

  always_comb begin
    pick = -1;
    for (int n = N - 1; n >= 0; n--) if (nreq_valid[n]) pick = n;
    nreq_ready = '0; sreq_valid = '0; srsp_ready = '0; nrsp_valid = '0; nrsp_last = '0;
    sreq_src = '0; sreq_start = '0; sreq_end = '0; nrsp_data = '0;
    if (!rst_n) pick = -1;
    if (xst == X_IDLE && pick >= 0) nreq_ready[pick] = 1'b1;
    if (xst == X_SREQ) begin
      sreq_valid[x_own] = 1'b1; sreq_src[x_own] = 4'(x_src);
      sreq_start[x_own] = x_start; sreq_end[x_own] = x_end;
    end
    if (xst == X_XFER) begin
      srsp_ready[x_own] = 1'b1;
      nrsp_valid[x_src] = srsp_valid[x_own];
      nrsp_data[x_src]  = srsp_data[x_own];
      nrsp_last[x_src]  = srsp_last[x_own];
    end
  end

  always_ff @(posedge clk) begin
    unique case (xst)
      X_IDLE: if (pick >= 0) begin
        if (nreq_src[pick] != 4'(pick)) begin
          failures++; $display("FAIL: node %0d sent a fetch request naming node %0d", pick, nreq_src[pick]);
        end
        x_src <= int'(nreq_src[pick]) % N; x_start <= nreq_start[pick]; x_end <= nreq_end[pick];
        x_own <= int'(nreq_start[pick]) / R; x_cnt <= 0; xst <= X_SREQ;
      end
      X_SREQ: if (sreq_ready[x_own]) xst <= X_XFER;
      X_XFER: if (srsp_valid[x_own]) begin
        fetched[x_src][x_cnt] <= srsp_data[x_own];
        fetched_n[x_src] <= x_cnt + 1;
        x_cnt <= x_cnt + 1;
        if (srsp_dst[x_own] != 4'(x_src)) begin
          failures++; $display("FAIL: response routed to node %0d, expected %0d", srsp_dst[x_own], x_src);
        end
        if (srsp_last[x_own]) xst <= X_IDLE;
      end
      default: xst <= X_IDLE;
    endcase
  end

  // ---------------- mechanism counters ----------------
  int n_split = 0, n_split3 = 0, n_forward = 0, n_alloc1 = 0, n_alloc2 = 0, n_alloc4 = 0;
  int n_reconf = 0, n_spawn1 = 0, n_spawn2 = 0, n_merge = 0, n_spill = 0, n_stall = 0;
  int n_remote = 0, n_remote_ok = 0;
  int node_split [N], node_fwd [N], node_alloc1 [N], node_alloc2 [N], node_alloc4 [N];
  int node_reconf [N], node_spawn1 [N], node_spawn2 [N], node_merge [N], node_spill [N];
  int node_stall [N], node_remote [N], node_remote_ok [N], node_split3 [N];

  for (genvar n = 0; n < N; n++) begin : g_mon
    logic [5:0] last_base [4];
    logic [5:0] spm1_base;
    initial for (int g = 0; g < 4; g++) last_base[g] = 6'h3f;
    initial begin
      node_split[n] = 0; node_fwd[n] = 0; node_alloc1[n] = 0; node_alloc2[n] = 0; node_alloc4[n] = 0;
      node_reconf[n] = 0; node_spawn1[n] = 0; node_spawn2[n] = 0; node_merge[n] = 0; node_spill[n] = 0;
      node_stall[n] = 0; node_remote[n] = 0; node_remote_ok[n] = 0; node_split3[n] = 0;
    end
    always @(posedge clk) if (rst_n) begin
      if (dut.g_node[n].u_node.u_disp.accept && !dut.g_node[n].u_node.u_disp.terminated &&
          !dut.g_node[n].u_node.u_disp.is_term) begin
        if (dut.g_node[n].u_node.u_disp.f_wait_v &&
            (dut.g_node[n].u_node.u_disp.f_lo_v || dut.g_node[n].u_node.u_disp.f_hi_v)) node_split[n]++;
        if (dut.g_node[n].u_node.u_disp.f_lo_v && dut.g_node[n].u_node.u_disp.f_hi_v) node_split3[n]++;
        if (!dut.g_node[n].u_node.u_disp.f_wait_v) node_fwd[n]++;
      end
      case (dut.g_node[n].u_node.u_ctrl.launch_groups)
        3'd1: node_alloc1[n]++;
        3'd2: node_alloc2[n]++;
        3'd4: node_alloc4[n]++;
        default: ;
      endcase
      for (int g = 0; g < 4; g++)
        if (dut.g_node[n].u_node.u_ctrl.cfg_row[2 * g].valid) begin
          if (last_base[g] != 6'h3f && last_base[g] != dut.g_node[n].u_node.u_ctrl.cfg_row[2 * g].base)
            node_reconf[n]++;
          last_base[g] = dut.g_node[n].u_node.u_ctrl.cfg_row[2 * g].base;
        end
      if (dut.g_node[n].u_node.u_ctrl.merge_pulse) node_merge[n]++;
      if (dut.g_node[n].u_node.u_ctrl.spill_used) node_spill[n]++;
      if (dut.g_node[n].u_node.u_ctrl.launch_stall) node_stall[n]++;
      if (dut.g_node[n].u_node.dack) begin
        int ok;
        node_remote[n]++;
        ok = 1;
        for (int i = 0; i < fetched_n[n]; i++)
          if (dut.g_node[n].u_node.u_spm.g_bank[1].mem[REMOTE_BASE_W - 4096 + i] != fetched[n][i]) ok = 0;
        if (ok == 1 && fetched_n[n] > 0) node_remote_ok[n]++;
      end
    end
    for (genvar g = 0; g < 4; g++) begin : g_sp
      always @(posedge clk) if (rst_n && dut.g_node[n].u_node.u_ctrl.gctx[g].run) begin
        if (dut.g_node[n].u_node.u_array.g_r[2*g+1].g_c[7].u_tile.spawn_valid) begin
          if (dut.g_node[n].u_node.u_array.g_r[2*g+1].g_c[7].u_tile.spawn_token.remote_end != 0 ||
              dut.g_node[n].u_node.u_array.g_r[2*g+1].g_c[7].u_tile.spawn_token.remote_start != 0)
            node_spawn2[n]++;
          else
            node_spawn1[n]++;
        end
      end
    end
  end

  // ---------------- microcontroller: programs, contexts, DMA, initial tokens ----------------
  // Control-word layout (same on every node):
  //   task 1 (compute, M[i] += PARAM): 12 words at 0 (1 group), 12 (2 groups), 24 (4 groups)
  //   task 2 (spawns task 1 on [i,i+1), PARAM inherited): 6 words at 36 (2 groups), 42 (4 groups)
  //   task 3 (spawns task 1 on [i,i+1) with PARAM=i and remote range [i-100, i-84)): 8 words at 48
  function automatic instr_t word_of(input int r, input int c, input int a);
    int g, j, base;
    instr_t nop;
    nop = make_instr(OP_NOP, 0, 0, 0, H, H, H, H, H, H, H);
    g = r / 2;
    if (r % 2 == 0 && c == 0 && a < 36) begin
      base = (a / 12) * 12;
      j = (a < 12) ? 0 : (a < 24) ? (g % 2) : g;
      case (a - base)
        0:  return make_instr(OP_IDX,  0, 0, 0, H, H, H, H, H, H, H);
        1:  return make_instr(OP_TEND, 0, 0, 0, H, H, H, H, XIN_RES, H, H);
        2:  return make_instr(OP_ADD,  1, 16'(j), 0, H, H, H, H, H, XIN_RES, H);
        3:  return make_instr(OP_LIDX, 0, 0, 0, H, H, H, H, XIN_RES, H, H);
        4:  return make_instr(OP_LT,   0, 0, 0, H, H, H, H, XIN_RES, H, H);
        5:  return make_instr(OP_ADD,  1, 16'(j), 0, H, H, H, H, H, H, H);
        6:  return make_instr(OP_PRM,  0, 0, 0, H, H, H, H, XIN_RES, H, XIN_RES);
        7:  return make_instr(OP_LOAD, 0, 0, 0, H, H, H, H, H, XIN_RES, H);
        8:  return make_instr(OP_NOP,  0, 0, 0, H, H, H, H, XIN_AUX, H, H);
        9:  return make_instr(OP_ADD,  0, 0, 0, H, H, H, H, H, H, H);
        10: return make_instr(OP_NOP,  0, 0, 0, H, H, H, H, H, XIN_RES, H);
        default: return make_instr(OP_STORE, 0, 0, 1, H, H, H, H, H, H, H);
      endcase
    end
    if (r % 2 == 1 && c == 7 && a >= 36 && a < 48) begin
      base = (a < 42) ? 36 : 42;
      j = (a < 42) ? (g % 2) : g;
      case (a - base)
        0: return make_instr(OP_IDX,  0, 0, 0, H, H, H, H, H, H, H);
        1: return make_instr(OP_TEND, 0, 0, 0, H, H, H, H, XIN_RES, H, H);
        2: return make_instr(OP_ADD,  1, 16'(j), 0, H, H, H, H, H, XIN_RES, H);
        3: return make_instr(OP_ADD,  1, 16'(j + 1), 0, H, H, H, H, XIN_RES, H, H);
        4: return make_instr(OP_LT,   0, 0, 0, H, H, H, H, H, XIN_RES, H);
        default: return make_instr(OP_SPAWN, 0, 16'h0001, 1, H, H, H, H, H, H, H);
      endcase
    end
    if (r % 2 == 1 && c == 7 && a >= 48 && a < 56) begin
      case (a - 48)
        0: return make_instr(OP_IDX,  0, 0, 0, H, H, H, H, H, H, H);
        1: return make_instr(OP_TEND, 0, 0, 0, H, H, H, H, XIN_RES, H, H);
        2: return make_instr(OP_SUB,  1, 16'd84, 0, H, H, H, H, H, XIN_RES, H);
        3: return make_instr(OP_ADD,  1, 16'd1, 0, H, H, H, H, H, H, XIN_RES);
        4: return make_instr(OP_LT,   0, 0, 0, H, H, H, H, H, XIN_RES, H);
        5: return make_instr(OP_SUB,  1, 16'd100, 0, H, H, H, H, H, H, H);
        6: return make_instr(OP_SPAWN, 0, 16'h0011, 1, H, H, H, H, H, XIN_RES, H);
        default: return make_instr(OP_SPAWNX, 0, 0, 1, H, H, H, H, H, H, H);
      endcase
    end
    return nop;
  endfunction

  task automatic load_programs();
    for (int t = 0; t < 64; t++)
      for (int a = 0; a < 56; a++) begin
        cm_we = '1;
        for (int n = 0; n < N; n++) begin
          cm_tile[n] = 6'(t); cm_addr[n] = 6'(a); cm_wdata[n] = 64'(word_of(t / 8, t % 8, a));
        end
        @(negedge clk);
      end
    cm_we = '0;
  endtask

  task automatic set_ctx(input int task_id, input int mode, input int base, input int len);
    ctx_we = '1;
    for (int n = 0; n < N; n++) begin
      ctx_task[n] = 4'(task_id); ctx_mode[n] = 2'(mode); ctx_base[n] = 6'(base); ctx_len[n] = 6'(len);
    end
    @(negedge clk);
    ctx_we = '0;
  endtask

  task automatic dma_all(input int src_off, input int dst, input int len);
    dma_valid = '1;
    for (int n = 0; n < N; n++) begin
      dma_src[n] = 32'(src_off + n * R); dma_dst[n] = 13'(dst); dma_len[n] = 16'(len);
    end
    @(negedge clk);
    while (dma_valid != '0) begin
      for (int n = 0; n < N; n++) if (dma_ready[n]) dma_valid[n] = 1'b0;
      @(negedge clk);
    end
    wait (dma_ready == '1);
    @(negedge clk);
  endtask

  task automatic inject(input int n, input token_t t);
    init_valid[n] = 1'b1; init_token[n] = t;
    @(negedge clk);
    while (!init_ready[n]) @(negedge clk);
    #1;
    init_valid[n] = 1'b0;
  endtask

  function automatic int expected(input int i);
    int v;
    v = i * 3 + 1 + ((i < N * 32) ? 5 : 0);
    if (i >= N * 32 && i < N * 32 + 20) v += 7;
    if (i >= N * 32 + 30 && i < N * 32 + 138) v += 3;
    if (i >= TOTAL - 32 && i < TOTAL - 1 && i != TOTAL - 17) v += i;
    return v;
  endfunction

  int mem_ok [N];
  for (genvar n = 0; n < N; n++) begin : g_chk
    task automatic check_node();
      int bad;
      bad = 0;
      for (int w = 0; w < R; w++)
        if (int'(dut.g_node[n].u_node.u_spm.g_bank[0].mem[w] + dut.g_node[n].u_node.u_spm.g_bank[1].mem[w])
            != expected(n * R + w)) begin
          if (bad < 4) $display("FAIL: node %0d word %0d = %0d + %0d, expected %0d", n, w,
            dut.g_node[n].u_node.u_spm.g_bank[0].mem[w], dut.g_node[n].u_node.u_spm.g_bank[1].mem[w], expected(n * R + w));
          bad++;
        end
      mem_ok[n] = (bad == 0);
    endtask
  end

  initial begin
    repeat (WATCHDOG_CYC) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired at cycle %0d (terminated=%b busy=%b overflow=%b)", cyc, terminated, busy, overflow);
    $display("own=%0d src=%0d sst=%0d s_addr=%0d s_end=%0d fst=%0d cnt=%0d", x_own, x_src, dut.g_node[N-2].u_node.u_nic.sst, dut.g_node[N-2].u_node.u_nic.s_addr, dut.g_node[N-2].u_node.u_nic.s_end, dut.g_node[N-1].u_node.u_nic.fst, x_cnt);
    $display("xst=%0d nreq_valid=%b wq_valid7=%b dreq=%b", xst, nreq_valid, dut.g_node[N-1].u_node.u_disp.wq_valid, dut.g_node[N-1].u_node.u_disp.dreq_valid);
    for (int n = 0; n < N; n++)
      $display("  node %0d: split=%0d fwd=%0d a1=%0d a2=%0d a4=%0d spawn1=%0d spawn2=%0d merge=%0d remote=%0d", n,
               node_split[n], node_fwd[n], node_alloc1[n], node_alloc2[n], node_alloc4[n], node_spawn1[n],
               node_spawn2[n], node_merge[n], node_remote[n]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint t0, t_end;
    repeat (4) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    load_programs();
    set_ctx(1, 0, 0, 12);  set_ctx(1, 1, 12, 12); set_ctx(1, 2, 24, 12);
    set_ctx(2, 0, 36, 6);  set_ctx(2, 1, 36, 6);  set_ctx(2, 2, 42, 6);
    set_ctx(3, 0, 48, 8);  set_ctx(3, 1, 48, 8);  set_ctx(3, 2, 48, 8);
    t0 = cyc;
    dma_all(0, 0, R);               // bank 0 <- 3*addr+1
    dma_all(LM_ZERO, 4096, R);      // bank 1 <- 0
    check(cyc - t0 >= 2 * 3 * R, "DMA moves one word per read round trip");
    t0 = cyc;
    fork
      begin
        inject(0, make_token(4'd2, 0, 32'(N * 32), 32'd5, 0, 0, 0));
        inject(0, make_token(4'd1, 32'(N * 32), 32'(N * 32 + 20), 32'd7, 0, 0, 0));
        inject(0, make_token(4'd3, 32'(TOTAL - 32), 32'(TOTAL - 17), 32'd0, 0, 0, 0));
        inject(0, make_token(4'd3, 32'(TOTAL - 16), 32'(TOTAL - 1), 32'd0, 0, 0, 0));
      end
      inject(N / 2 + 1, make_token(4'd1, 32'(N * 32 + 30), 32'(N * 32 + 138), 32'd3, 0, 0, 0));
    join
    inject(0, make_token(TERMINATE_ID, 0, 0, 0, 0, 0, 0));
    wait (terminated == '1);
    t_end = cyc;
    @(negedge clk);
    $display("all %0d nodes terminated after %0d cycles", N, t_end - t0);
    // termination needs the TERMINATE token to pass every hop at least twice
    check(t_end - t0 >= 2 * N * HOP_LAT, "termination takes two ring round trips");
    for (int n = 0; n < N; n++) begin
      n_split += node_split[n]; n_split3 += node_split3[n]; n_forward += node_fwd[n];
      n_alloc1 += node_alloc1[n]; n_alloc2 += node_alloc2[n]; n_alloc4 += node_alloc4[n];
      n_reconf += node_reconf[n]; n_spawn1 += node_spawn1[n]; n_spawn2 += node_spawn2[n];
      n_merge += node_merge[n]; n_spill += node_spill[n]; n_stall += node_stall[n];
      n_remote += node_remote[n]; n_remote_ok += node_remote_ok[n];
    end
    $display("split=%0d (three-way %0d) forward=%0d alloc1=%0d alloc2=%0d alloc4=%0d reconf=%0d",
             n_split, n_split3, n_forward, n_alloc1, n_alloc2, n_alloc4, n_reconf);
    $display("spawn1=%0d spawn2=%0d merge=%0d spill_cycles=%0d stall_cycles=%0d remote=%0d remote_ok=%0d",
             n_spawn1, n_spawn2, n_merge, n_spill, n_stall, n_remote, n_remote_ok);
    check(n_split > 0, "split happened");
    check(n_split3 > 0, "three-way split happened");
    check(n_forward > 0, "forward happened");
    check(n_alloc1 > 0, "1-group allocation happened");
    check(n_alloc2 > 0, "2-group allocation happened");
    check(n_alloc4 > 0, "4-group allocation happened");
    check(n_reconf > 0, "reconfiguration happened");
    check(n_spawn1 > 0, "one-cycle spawn happened");
    check(n_spawn2 == 30, "two-cycle spawn happened (30 expected)");
    check(n_merge > 0, "coalescing merge happened");
    check(n_spill > 0, "spill store used");
    check(n_stall > 0, "launch stall happened");
    check(n_remote == 30, "remote data acquired (30 expected)");
    check(n_remote_ok == n_remote, "remote words landed in data memory");
    check(terminated == '1, "termination");
    check(overflow == '0, "no spawned token lost");
    check(busy == '0, "all nodes idle");
    g_chk[0].check_node(); g_chk[1].check_node(); g_chk[2].check_node(); g_chk[3].check_node(); g_chk[4].check_node(); g_chk[5].check_node(); g_chk[6].check_node(); g_chk[7].check_node(); g_chk[8].check_node(); g_chk[9].check_node(); g_chk[10].check_node(); g_chk[11].check_node(); g_chk[12].check_node(); g_chk[13].check_node(); g_chk[14].check_node(); g_chk[15].check_node();
    for (int n = 0; n < N; n++) check(mem_ok[n] == 1, $sformatf("node %0d data memory contents", n));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

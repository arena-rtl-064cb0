// task_dispatcher: the Task Dispatcher of one ARENA node.
//
// Tokens arriving from the ring enter the 8-entry RecvQueue. Each cycle the
// Filter Logic takes one token, with priority to a token spawned on this node
// (from the coalescing unit), then to the microcontroller's initial token,
// then to the RecvQueue head. The filter splits it against the local data
// range: the local part goes to the 8-entry WaitQueue, remote parts to the
// 8-entry SendQueue, which feeds the ring. A split into three parts takes two
// cycles (the high remote part is held in a one-token register).
//
// The WaitQueue head is offered to the CGRA controller once it is ready: a
// head with a non-empty remote range (REMOTE_end > REMOTE_start) first issues
// one data request to the NIC and becomes ready when the NIC acknowledges that
// the remote words are in data memory.
//
// TERMINATE protocol: a TERMINATE token is always conveyed. When it passes
// while the WaitQueue is empty and the node is idle, a flag is set; any other
// token clears it; a second TERMINATE with the flag set terminates the node,
// which from then on conveys every token unchanged. Requiring the node to be
// idle (no task on the CGRA, no spawned token pending) is this design's
// addition to the published rule, which looks at the WaitQueue only.
// Queue sizes, the queue roles and the filter cases follow the paper; the
// arbitration order, the two-cycle split and the handshakes are choices here.
//
// Inside a node, verilator reports accept and src_sel as unoptimisable
// (UNOPTFLAT): spawn_ready is derived from accept, and the coalescing unit's
// outputs that feed src_sel sit in the same combinational cluster. No value
// depends on itself: out_valid of the coalescing unit does not look at its
// ready input, and synthesis finds no logic loop. The warning only costs
// simulation speed.
module task_dispatcher
  import arena_pkg::*;
#(
  parameter int RECV_DEPTH = 8,
  parameter int WAIT_DEPTH = 8,
  parameter int SEND_DEPTH = 8
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic [ADDR_W-1:0] local_start,
  input  logic [ADDR_W-1:0] local_end,
  // ring side
  input  logic   in_valid,
  output logic   in_ready,
  input  token_t in_token,
  output logic   out_valid,
  input  logic   out_ready,
  output token_t out_token,
  // initial token from the microcontroller
  input  logic   init_valid,
  output logic   init_ready,
  input  token_t init_token,
  // coalesced spawned tokens from the CGRA controller
  input  logic   spawn_valid,
  output logic   spawn_ready,
  input  token_t spawn_token,
  // WaitQueue head towards the CGRA controller
  output logic   wq_valid,
  input  logic   wq_pop,
  output token_t wq_token,
  output logic   wq_empty,
  // NIC
  output logic   dreq_valid,
  input  logic   dreq_ready,
  output token_t dreq_token,
  input  logic   dack,
  // status
  input  logic   node_busy,
  output logic   terminated
);
  // ---------------- RecvQueue ----------------
  logic   rq_valid, rq_pop;
  token_t rq_token;
  token_fifo #(.DEPTH(RECV_DEPTH)) u_recvq (
    .clk, .rst_n,
    .push_valid(in_valid), .push_ready(in_ready), .push_token(in_token),
    .pop_valid(rq_valid), .pop_ready(rq_pop), .pop_token(rq_token), .count());

  // ---------------- filter input arbitration ----------------
  logic   src_valid, pend_valid, term_flag;
  token_t src_tok, pend_tok;
  logic [1:0] src_sel;  // 0 spawn, 1 init, 2 recv

  always_comb begin
    src_valid = 1'b0; src_tok = rq_token; src_sel = 2'd2;
    if (spawn_valid)      begin src_valid = 1'b1; src_tok = spawn_token; src_sel = 2'd0; end
    else if (init_valid)  begin src_valid = 1'b1; src_tok = init_token;  src_sel = 2'd1; end
    else if (rq_valid)    begin src_valid = 1'b1; src_tok = rq_token;    src_sel = 2'd2; end
  end

  logic   f_wait_v, f_lo_v, f_hi_v;
  token_t f_wait_t, f_lo_t, f_hi_t;
  filter_logic u_filter (
    .tok(src_tok), .local_start, .local_end,
    .wait_valid(f_wait_v), .wait_tok(f_wait_t),
    .lo_valid(f_lo_v), .lo_tok(f_lo_t),
    .hi_valid(f_hi_v), .hi_tok(f_hi_t));

  // ---------------- WaitQueue / SendQueue ----------------
  logic   wqf_push, wqf_ready, wqf_valid;
  token_t wqf_tok;
  logic [$clog2(WAIT_DEPTH+1)-1:0] wq_count;
  logic   sq_push, sq_ready;
  token_t sq_tok;

  token_fifo #(.DEPTH(WAIT_DEPTH)) u_waitq (
    .clk, .rst_n,
    .push_valid(wqf_push), .push_ready(wqf_ready), .push_token(f_wait_t),
    .pop_valid(wqf_valid), .pop_ready(wq_pop), .pop_token(wqf_tok), .count(wq_count));

  token_fifo #(.DEPTH(SEND_DEPTH)) u_sendq (
    .clk, .rst_n,
    .push_valid(sq_push), .push_ready(sq_ready), .push_token(sq_tok),
    .pop_valid(out_valid), .pop_ready(out_ready), .pop_token(out_token), .count());

  // ---------------- filter stage control ----------------
  logic is_term, accept, wq_idle;
  always_comb begin
    is_term  = (src_tok.task_id == TERMINATE_ID);
    wq_idle  = (wq_count == 0) && !node_busy;
    accept   = 1'b0;
    wqf_push = 1'b0;
    sq_push  = 1'b0;
    sq_tok   = src_tok;
    if (pend_valid) begin
      // second cycle of a three-way split
      sq_push = 1'b1;
      sq_tok  = pend_tok;
    end else if (src_valid) begin
      if (terminated || is_term) begin
        sq_push = sq_ready;
        accept  = sq_ready;
      end else begin
        sq_tok = f_lo_v ? f_lo_t : f_hi_t;
        if ((!f_wait_v || wqf_ready) && (!(f_lo_v || f_hi_v) || sq_ready)) begin
          accept   = 1'b1;
          wqf_push = f_wait_v;
          sq_push  = f_lo_v || f_hi_v;
        end
      end
    end
  end

  assign spawn_ready = accept && (src_sel == 2'd0);
  assign init_ready  = accept && (src_sel == 2'd1);
  assign rq_pop      = accept && (src_sel == 2'd2);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      pend_valid <= 1'b0;
      pend_tok   <= '0;
      term_flag  <= 1'b0;
      terminated <= 1'b0;
    end else begin
      if (pend_valid && sq_ready) pend_valid <= 1'b0;
      if (accept && !terminated) begin
        if (is_term) begin
          if (wq_idle) begin
            if (term_flag) terminated <= 1'b1;
            term_flag <= 1'b1;
          end else begin
            term_flag <= 1'b0;
          end
        end else begin
          term_flag <= 1'b0;
          if (f_lo_v && f_hi_v) begin
            pend_valid <= 1'b1;
            pend_tok   <= f_hi_t;
          end
        end
      end
    end
  end

  // ---------------- WaitQueue head: remote data request / ack ----------------
  logic need_remote, req_sent, acked;
  assign need_remote = wqf_valid && (wqf_tok.remote_end > wqf_tok.remote_start);
  assign dreq_valid  = need_remote && !req_sent;
  assign dreq_token  = wqf_tok;
  assign wq_valid    = wqf_valid && (!need_remote || acked);
  assign wq_token    = wqf_tok;
  assign wq_empty    = (wq_count == 0);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      req_sent <= 1'b0;
      acked    <= 1'b0;
    end else if (wq_pop) begin
      req_sent <= 1'b0;
      acked    <= 1'b0;
    end else begin
      if (dreq_valid && dreq_ready) req_sent <= 1'b1;
      if (dack && req_sent)         acked    <= 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (rst_n) assert (!(wq_pop && !wq_valid))
      else $error("task_dispatcher: WaitQueue popped while its head is not ready");
  end
endmodule

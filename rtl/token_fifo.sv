// token_fifo: a TaskQueue, the buffer for task tokens.
//
// One instance serves as RecvQueue, WaitQueue or SendQueue of the task
// dispatcher (8 entries each in the published configuration) and as one of the
// four 4-entry spawn queues of the CGRA controller. It is a circular buffer of
// DEPTH tokens with a valid/ready handshake on both sides: a token is written
// when push_valid && push_ready and removed when pop_valid && pop_ready. The
// head is visible combinationally (first-word fall-through), so a token written
// in cycle t can be popped in cycle t+1. A push and a pop may happen in the
// same cycle, also when the queue is full. The handshake, the fall-through
// timing and the reset (empty) are this design's choices.
module token_fifo
  import arena_pkg::*;
#(
  parameter int DEPTH = 8
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   push_valid,
  output logic   push_ready,
  input  token_t push_token,
  output logic   pop_valid,
  input  logic   pop_ready,
  output token_t pop_token,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  token_t mem [DEPTH];
  logic [PW-1:0] rd_ptr, wr_ptr;
  logic do_push, do_pop;

  assign pop_valid  = (count != 0);
  assign push_ready = (count != DEPTH[$bits(count)-1:0]) || pop_ready;
  assign pop_token  = mem[rd_ptr];
  assign do_push    = push_valid && push_ready;
  assign do_pop     = pop_valid && pop_ready;

  function automatic logic [PW-1:0] inc(input logic [PW-1:0] p);
    return (p == PW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      count  <= '0;
    end else begin
      if (do_push) begin
        mem[wr_ptr] <= push_token;
        wr_ptr      <= inc(wr_ptr);
      end
      if (do_pop) rd_ptr <= inc(rd_ptr);
      case ({do_push, do_pop})
        2'b10:   count <= count + 1'b1;
        2'b01:   count <= count - 1'b1;
        default: count <= count;
      endcase
    end
  end

  // A pop when empty or a count above DEPTH would be a protocol error
  always_ff @(posedge clk) begin
    if (rst_n) assert (count <= DEPTH[$bits(count)-1:0])
      else $error("token_fifo: count %0d above DEPTH", count);
  end
endmodule

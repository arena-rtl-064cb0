// ring_switch: one hop of the ARENA token ring.
//
// It carries task tokens from one node's SendQueue to the next node's
// RecvQueue with the link timing of the published setup: a hop latency of
// 1 us (LATENCY = 800 cycles at 800 MHz) and an 80 Gb/s link, on which a
// 168-bit token takes 2.1 ns (INTERVAL = 2 cycles between tokens). Tokens are
// kept in a FIFO of DEPTH entries (enough for a full link, LATENCY/INTERVAL)
// together with the cycle they entered; the head leaves once LATENCY cycles
// have passed and the next node is ready. Tokens keep their order.
// Valid/ready handshakes on both sides. The latency and bandwidth are the
// paper's; the timestamped FIFO is this design's way of modelling them.
module ring_switch
  import arena_pkg::*;
#(
  parameter int LATENCY  = 800,
  parameter int INTERVAL = 2,
  parameter int DEPTH    = 400
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   in_valid,
  output logic   in_ready,
  input  token_t in_token,
  output logic   out_valid,
  input  logic   out_ready,
  output token_t out_token
);
  localparam int PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  localparam int TW = 32;

  token_t          tok_mem [DEPTH];
  logic [TW-1:0]   ts_mem  [DEPTH];
  logic [PW-1:0]   rd, wr;
  logic [PW:0]     cnt;
  logic [TW-1:0]   now, last_in;
  logic            gap_ok, do_in, do_out;

  function automatic logic [PW-1:0] inc(input logic [PW-1:0] p);
    return (p == PW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  assign gap_ok    = (now - last_in) >= TW'(INTERVAL);
  assign in_ready  = (cnt != (PW+1)'(DEPTH)) && gap_ok;
  assign out_valid = (cnt != 0) && ((now - ts_mem[rd]) >= TW'(LATENCY));
  assign out_token = tok_mem[rd];
  assign do_in     = in_valid && in_ready;
  assign do_out    = out_valid && out_ready;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      rd <= '0; wr <= '0; cnt <= '0; now <= '0;
      last_in <= '0 - TW'(INTERVAL);
    end else begin
      now <= now + 1'b1;
      if (do_in) begin
        tok_mem[wr] <= in_token;
        ts_mem[wr]  <= now;
        wr          <= inc(wr);
        last_in     <= now;
      end
      if (do_out) rd <= inc(rd);
      cnt <= cnt + (PW+1)'(do_in) - (PW+1)'(do_out);
    end
  end
endmodule

// nic: network interface of an ARENA node for remote data.
//
// Fetch side: the dispatcher hands over the WaitQueue head that needs remote
// data. The NIC sends one request {requester, REMOTE_start, REMOTE_end} into
// the data-transfer network, writes the returned words one by one into the
// local data memory from word REMOTE_BASE upward (wrapping inside a
// REMOTE_WORDS region), and pulses dack after the word marked last; the
// dispatcher then marks the WaitQueue head ready.
// Serve side: a request from another node {requester, start, end} (global
// addresses inside this node's local range) is answered word by word from the
// local data memory, two cycles per word, the last word marked.
// Both sides share one data memory port; a returning remote word has priority
// over a serve read. The NIC's role (data request from the WaitQueue, ack when
// the data has arrived in data memory) follows the paper; the request and
// response formats and the landing region are this design's choices.
module nic
  import arena_pkg::*;
#(
  parameter int SPM_AW       = 13,
  parameter int REMOTE_BASE  = 7680,
  parameter int REMOTE_WORDS = 512
) (
  input  logic clk,
  input  logic rst_n,
  input  logic [NODE_W-1:0] node_id,
  input  logic [ADDR_W-1:0] local_start,
  // from the dispatcher
  input  logic   dreq_valid,
  output logic   dreq_ready,
  input  token_t dreq_token,
  output logic   dack,
  // fetch: request out, words back
  output logic              nreq_valid,
  input  logic              nreq_ready,
  output logic [NODE_W-1:0] nreq_src,
  output logic [ADDR_W-1:0] nreq_start,
  output logic [ADDR_W-1:0] nreq_end,
  input  logic              nrsp_valid,
  input  logic [DATA_W-1:0] nrsp_data,
  input  logic              nrsp_last,
  // serve: request in, words out
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
  // data memory port
  output logic              spm_valid,
  output logic              spm_we,
  output logic [SPM_AW-1:0] spm_addr,
  output logic [DATA_W-1:0] spm_wdata,
  input  logic [DATA_W-1:0] spm_rdata
);
  typedef enum logic [1:0] {F_IDLE, F_REQ, F_WAIT} fstate_e;
  typedef enum logic [1:0] {S_IDLE, S_READ, S_RESP} sstate_e;

  fstate_e fst;
  sstate_e sst;
  logic [ADDR_W-1:0] f_start, f_end, s_addr, s_end;
  logic [$clog2(REMOTE_WORDS)-1:0] wcnt;
  logic [NODE_W-1:0] s_src;
  logic write_now, read_now;

  assign dreq_ready = (fst == F_IDLE);
  assign nreq_valid = (fst == F_REQ);
  assign nreq_src   = node_id;
  assign nreq_start = f_start;
  assign nreq_end   = f_end;

  assign sreq_ready = (sst == S_IDLE);
  assign srsp_valid = (sst == S_RESP);
  assign srsp_dst   = s_src;
  assign srsp_data  = spm_rdata;
  assign srsp_last  = (s_addr + 1'b1 >= s_end);

  assign write_now = (fst == F_WAIT) && nrsp_valid;
  assign read_now  = (sst == S_READ) && !write_now;

  always_comb begin
    spm_valid = write_now || read_now;
    spm_we    = write_now;
    spm_wdata = nrsp_data;
    spm_addr  = write_now ? SPM_AW'(REMOTE_BASE + int'(wcnt))
                          : SPM_AW'(s_addr - local_start);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      fst <= F_IDLE; f_start <= '0; f_end <= '0; wcnt <= '0; dack <= 1'b0;
    end else begin
      dack <= 1'b0;
      unique case (fst)
        F_IDLE: if (dreq_valid) begin
          f_start <= dreq_token.remote_start;
          f_end   <= dreq_token.remote_end;
          fst     <= F_REQ;
        end
        F_REQ: if (nreq_ready) begin
          fst  <= F_WAIT;
          wcnt <= '0;
        end
        F_WAIT: if (nrsp_valid) begin
          wcnt <= wcnt + 1'b1;
          if (nrsp_last) begin
            dack <= 1'b1;
            fst  <= F_IDLE;
          end
        end
        default: fst <= F_IDLE;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      sst <= S_IDLE; s_addr <= '0; s_end <= '0; s_src <= '0;
    end else begin
      unique case (sst)
        S_IDLE: if (sreq_valid && (sreq_start < sreq_end)) begin
          s_addr <= sreq_start;
          s_end  <= sreq_end;
          s_src  <= sreq_src;
          sst    <= S_READ;
        end
        S_READ: if (read_now) sst <= S_RESP;
        S_RESP: if (srsp_ready) begin
          s_addr <= s_addr + 1'b1;
          sst    <= srsp_last ? S_IDLE : S_READ;
        end
        default: sst <= S_IDLE;
      endcase
    end
  end
endmodule

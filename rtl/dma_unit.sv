// dma_unit: DMA unit of an ARENA node.
//
// Before the runtime starts, the microcontroller preloads the data memory
// through the DMA unit. A descriptor {src, dst, len} copies len words from
// local memory word address src to data memory word address dst. The unit
// issues one local memory read at a time, writes each returned word into the
// data memory in the cycle it arrives and pulses done after the last word;
// desc_ready is high while it is idle. The DMA's role follows the paper; the
// descriptor format and the one-read-at-a-time protocol are this design's
// choices.
module dma_unit
  import arena_pkg::*;
#(
  parameter int SPM_AW = 13
) (
  input  logic clk,
  input  logic rst_n,
  input  logic              desc_valid,
  output logic              desc_ready,
  input  logic [ADDR_W-1:0] desc_src,
  input  logic [SPM_AW-1:0] desc_dst,
  input  logic [15:0]       desc_len,
  output logic              done,
  // local memory
  output logic              lm_req_valid,
  input  logic              lm_req_ready,
  output logic [ADDR_W-1:0] lm_req_addr,
  input  logic              lm_rsp_valid,
  input  logic [DATA_W-1:0] lm_rsp_data,
  // data memory write port
  output logic              spm_we,
  output logic [SPM_AW-1:0] spm_addr,
  output logic [DATA_W-1:0] spm_wdata
);
  typedef enum logic [1:0] {D_IDLE, D_REQ, D_WAIT} dstate_e;
  dstate_e st;
  logic [ADDR_W-1:0] src;
  logic [SPM_AW-1:0] dst;
  logic [15:0]       left;

  assign desc_ready   = (st == D_IDLE);
  assign lm_req_valid = (st == D_REQ);
  assign lm_req_addr  = src;
  assign spm_we       = (st == D_WAIT) && lm_rsp_valid;
  assign spm_addr     = dst;
  assign spm_wdata    = lm_rsp_data;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      st <= D_IDLE; src <= '0; dst <= '0; left <= '0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (st)
        D_IDLE: if (desc_valid) begin
          src  <= desc_src;
          dst  <= desc_dst;
          left <= desc_len;
          if (desc_len != 0) st <= D_REQ;
          else done <= 1'b1;
        end
        D_REQ:  if (lm_req_ready) st <= D_WAIT;
        D_WAIT: if (lm_rsp_valid) begin
          src  <= src + 1'b1;
          dst  <= dst + 1'b1;
          left <= left - 1'b1;
          if (left == 16'd1) begin
            st   <= D_IDLE;
            done <= 1'b1;
          end else st <= D_REQ;
        end
        default: st <= D_IDLE;
      endcase
    end
  end
endmodule

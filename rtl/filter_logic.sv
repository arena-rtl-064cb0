// filter_logic: the dispatcher's Filter Logic (the ARENA_filter function).
//
// It compares the data range of an arriving task token, [start, end), with
// the node's local data range, [local_start, local_end), and splits the token:
//   I   no overlap (or empty range, or TERMINATE): convey it unchanged;
//   II  range inside the local range: keep it whole for local execution;
//   III range covers the local range: keep the local part, convey the part
//       below and the part above as two new tokens;
//   IV  partial overlap: keep the overlapping part, convey the rest.
// In general the local part is [max(start,ls), min(end,le)), the low remote
// part [start, ls) and the high remote part [le, end); each part exists when it
// is non-empty. The four cases are the published ones; treating the ranges as
// half-open and copying all other fields into the parts are this design's
// choices. Purely combinational.
module filter_logic
  import arena_pkg::*;
(
  input  token_t            tok,
  input  logic [ADDR_W-1:0] local_start,
  input  logic [ADDR_W-1:0] local_end,
  output logic              wait_valid,   // part for the WaitQueue
  output token_t            wait_tok,
  output logic              lo_valid,     // part below the local range, to SendQueue
  output token_t            lo_tok,
  output logic              hi_valid,     // part above the local range, to SendQueue
  output token_t            hi_tok
);
  logic [ADDR_W-1:0] s, e, ov_s, ov_e;
  logic nonempty, overlap, term;

  always_comb begin
    s        = tok.task_start;
    e        = tok.task_end;
    term     = (tok.task_id == TERMINATE_ID);
    nonempty = (s < e);
    ov_s     = (s > local_start) ? s : local_start;
    ov_e     = (e < local_end)   ? e : local_end;
    overlap  = nonempty && !term && (ov_s < ov_e);

    wait_tok = tok;  wait_tok.task_start = ov_s;  wait_tok.task_end = ov_e;
    lo_tok   = tok;  lo_tok.task_end     = local_start;
    hi_tok   = tok;  hi_tok.task_start   = local_end;

    wait_valid = overlap;
    lo_valid   = overlap && (s < local_start);
    hi_valid   = overlap && (e > local_end);
    if (!overlap) begin
      // case I: the whole token travels on
      lo_valid = 1'b1;
      lo_tok   = tok;
    end
  end
endmodule

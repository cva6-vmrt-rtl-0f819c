// req_arb2: fixed-priority merge of two requesters onto one cache port.
//
// Requester A wins when both are valid. The arbiter remembers which
// requester each accepted request came from and steers the next response
// back to it. This relies on the cache answering in order and every request
// being answered after at least one cycle (true for hybrid_cache), so the
// owner register only needs to hold the last grant: a new grant can happen
// in the cycle a response returns, and the register changes only after
// that cycle. Used in front of the data cache (page-table walker over
// loads/stores) and the instruction cache (fetch over stores into the
// instruction scratchpad).
module req_arb2
  import vmrt_pkg::*;
(
  input  logic            clk_i,
  input  logic            rst_ni,
  input  logic            a_valid_i,
  output logic            a_ready_o,
  input  cache_req_t      a_req_i,
  output logic            a_rsp_valid_o,
  input  logic            b_valid_i,
  output logic            b_ready_o,
  input  cache_req_t      b_req_i,
  output logic            b_rsp_valid_o,
  output logic            valid_o,
  input  logic            ready_i,
  output cache_req_t      req_o,
  input  logic            rsp_valid_i
);
  logic owner_b_q;

  assign valid_o       = a_valid_i || b_valid_i;
  assign req_o         = a_valid_i ? a_req_i : b_req_i;
  assign a_ready_o     = ready_i;
  assign b_ready_o     = ready_i && !a_valid_i;
  assign a_rsp_valid_o = rsp_valid_i && !owner_b_q;
  assign b_rsp_valid_o = rsp_valid_i &&  owner_b_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni)                 owner_b_q <= 1'b0;
    else if (valid_o && ready_i) owner_b_q <= !a_valid_i;
  end

endmodule

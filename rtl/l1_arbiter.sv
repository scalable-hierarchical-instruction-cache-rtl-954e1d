// Arbiter between the fetch unit and the prefetch unit of one L1 bank, in
// front of its single port towards the L1.5. A demand fetch (refill) has fixed
// priority over a prefetch; the winner's request leaves with its transfer id
// (FETCH or PREFETCH) and only the winner sees the grant. Responses come back
// in any order and are steered by their transfer id. A prefetch response that
// the interconnect dropped because it collided with a fetch response for the
// same L1 is reported to the prefetch unit (pf_drop_o). All paths are
// combinational. The paper gives the function and the transfer id; the fixed
// priority is this design's choice.
module l1_arbiter
  import hic_pkg::*;
(
  input  logic     clk_i,
  input  logic     rst_ni,
  input  logic     rf_req_i,
  input  addr_t    rf_addr_i,
  output logic     rf_gnt_o,
  output logic     rf_rsp_valid_o,
  output line_t    rf_rsp_data_o,
  input  logic     pf_req_i,
  input  addr_t    pf_addr_i,
  output logic     pf_gnt_o,
  output logic     pf_rsp_valid_o,
  output line_t    pf_rsp_data_o,
  output logic     pf_drop_o,
  // L1.5 side
  output logic     req_valid_o,
  output l15_req_t req_o,
  input  logic     req_gnt_i,
  input  logic     rsp_valid_i,
  input  l15_rsp_t rsp_i,
  input  logic     rsp_drop_i
);

  assign req_valid_o = rf_req_i || pf_req_i;
  assign req_o.addr  = rf_req_i ? rf_addr_i : pf_addr_i;
  assign req_o.tid   = rf_req_i ? TID_FETCH : TID_PREFETCH;
  assign rf_gnt_o    = rf_req_i && req_gnt_i;
  assign pf_gnt_o    = !rf_req_i && pf_req_i && req_gnt_i;

  assign rf_rsp_valid_o = rsp_valid_i && rsp_i.tid == TID_FETCH;
  assign pf_rsp_valid_o = rsp_valid_i && rsp_i.tid == TID_PREFETCH;
  assign rf_rsp_data_o  = rsp_i.data;
  assign pf_rsp_data_o  = rsp_i.data;
  assign pf_drop_o      = rsp_drop_i;

  // a dropped response is always a prefetch, never the demand fetch
  assert property (@(posedge clk_i) disable iff (!rst_ni)
                   rsp_drop_i |-> !(rsp_valid_i && rsp_i.tid == TID_PREFETCH));

endmodule

// Next-line prefetch unit of a private L1 cache bank, with cache probe
// filtering (CPF).
// Every fetch request the L1 accepts from the core (trig_valid_i) makes the
// line that follows it the prefetch candidate. In the next cycle the candidate
// is probed in the second read port of the TAG memory; if the line is already
// in the L1, or already in the prefetch buffer or in flight, the candidate is
// filtered out, otherwise a prefetch request (transfer id PREFETCH) goes to the
// L1 arbiter. One prefetch is in flight at a time; a trigger that arrives while
// one is in flight replaces the candidate, which is issued when the port frees.
// The returned line is kept in a one-line prefetch buffer and written into the
// cache only when the core actually fetches it, so unused prefetches never
// pollute the L1. The fetch unit queries the buffer with the address it is
// looking up: q_hit_o means the line is in the buffer or arrives this cycle
// ("Branch?" in the paper's figure: a miss there is a branch), q_pending_o
// means it is still in flight ("Prefetching?": the fetch waits for the
// unfinished prefetch). A prefetch response that the interconnect dropped
// (pf_drop_i) ends the prefetch without data. enable_i is the software
// enable; when low no new prefetch is started.
// Follows the paper: next-line, always-on prefetch, CPF with a dual-port tag,
// one buffer line, fetch served from the buffer. This design's choices: one
// outstanding prefetch, the replace-candidate rule, the drop handling.
module l1_prefetch_unit
  import hic_pkg::*;
#(
  parameter int unsigned NB_WAYS = 4,
  parameter int unsigned NB_SETS = 8,
  localparam int unsigned IDX_W  = (NB_SETS > 1) ? $clog2(NB_SETS) : 1,
  localparam int unsigned TAG_W  = ADDR_W - OFFS_W - IDX_W
) (
  input  logic               clk_i,
  input  logic               rst_ni,
  input  logic               enable_i,
  // trigger: a core fetch was accepted
  input  logic               trig_valid_i,
  input  addr_t              trig_addr_i,
  // cache probe filtering on TAG read port 1
  output logic [IDX_W-1:0]   probe_idx_o,
  input  logic [TAG_W-1:0]   probe_tag_i [NB_WAYS],
  input  logic [NB_WAYS-1:0] probe_valid_i,
  // request to the arbiter
  output logic               pf_req_o,
  output addr_t              pf_addr_o,
  input  logic               pf_gnt_i,
  // response from the arbiter
  input  logic               pf_rsp_valid_i,
  input  line_t              pf_rsp_data_i,
  input  logic               pf_drop_i,
  // query from the fetch unit
  input  addr_t              q_addr_i,
  output logic               q_hit_o,
  output logic               q_pending_o,
  output line_t              q_data_o,
  input  logic               q_take_i,
  // events
  output logic               ev_filtered_o,
  output logic               ev_issued_o
);

  logic  cand_q, inflight_q, buf_valid_q;
  addr_t cand_addr_q, inflight_addr_q, buf_addr_q;
  line_t buf_data_q;

  logic  probe_hit, filtered, arriving;

  assign probe_idx_o = cand_addr_q[OFFS_W +: IDX_W];

  always_comb begin
    probe_hit = 1'b0;
    for (int w = 0; w < NB_WAYS; w++)
      if (probe_valid_i[w] && probe_tag_i[w] == cand_addr_q[ADDR_W-1 -: TAG_W]) probe_hit = 1'b1;
  end

  assign filtered  = cand_q && !inflight_q &&
                     (probe_hit || (buf_valid_q && buf_addr_q == cand_addr_q));
  assign pf_req_o  = cand_q && !inflight_q && !filtered;
  assign pf_addr_o = cand_addr_q;

  assign arriving    = inflight_q && pf_rsp_valid_i && inflight_addr_q == q_addr_i;
  assign q_hit_o     = (buf_valid_q && buf_addr_q == q_addr_i) || arriving;
  assign q_data_o    = arriving ? pf_rsp_data_i : buf_data_q;
  assign q_pending_o = inflight_q && inflight_addr_q == q_addr_i && !pf_rsp_valid_i;

  assign ev_filtered_o = filtered;
  assign ev_issued_o   = pf_req_o && pf_gnt_i;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      cand_q          <= 1'b0;
      inflight_q      <= 1'b0;
      buf_valid_q     <= 1'b0;
      cand_addr_q     <= '0;
      inflight_addr_q <= '0;
      buf_addr_q      <= '0;
      buf_data_q      <= '0;
    end else begin
      // candidate: cleared when filtered or issued, replaced by a new trigger
      if (filtered || (pf_req_o && pf_gnt_i)) cand_q <= 1'b0;
      if (trig_valid_i && enable_i) begin
        cand_q      <= 1'b1;
        cand_addr_q <= line_addr(trig_addr_i) + addr_t'(LINE_BYTES);
      end
      // in-flight prefetch
      if (pf_req_o && pf_gnt_i) begin
        inflight_q      <= 1'b1;
        inflight_addr_q <= cand_addr_q;
      end else if (inflight_q && (pf_rsp_valid_i || pf_drop_i)) begin
        inflight_q <= 1'b0;
      end
      // prefetch buffer
      if (q_take_i && !arriving) buf_valid_q <= 1'b0;
      if (inflight_q && pf_rsp_valid_i && !(q_take_i && arriving)) begin
        buf_valid_q <= 1'b1;
        buf_addr_q  <= inflight_addr_q;
        buf_data_q  <= pf_rsp_data_i;
      end
    end
  end

endmodule

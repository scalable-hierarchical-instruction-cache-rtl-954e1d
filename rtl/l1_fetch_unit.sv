// Fetch unit (cache controller) of a private L1 cache bank.
// Core side: 128-bit line fetch, request/grant handshake, fetch_valid_o one
// cycle after the grant on a hit. The request address is registered at the
// grant; in the next cycle (LOOKUP) the tag of every way is compared on TAG
// read port 0 and the hitting way's line is read from DATA, straight to the
// core. On a tag miss, in order:
//  - the line is in the prefetch buffer (or arrives now): the core is served
//    from it in the same cycle and the line is written into the cache through
//    the prefetch side of the write multiplexers;
//  - the line is being prefetched: the unit waits for the unfinished prefetch
//    (WAIT_PF) and then does the same; if that prefetch is dropped it refills;
//  - otherwise a refill request (transfer id FETCH) goes to the arbiter in the
//    same cycle; the refilled line is forwarded to the core in the cycle it
//    arrives and written into the victim way chosen by PRAND replacement.
// With a 2-cycle L1.5 this gives 1 cycle on a hit and 3 cycles on an L1 miss
// that hits in the L1.5, the latencies the paper gives. A new request is
// granted in the cycle a hit or a buffer hit is answered, so hits stream at one
// per cycle. The state machine is this design's; the paper gives the cases.
module l1_fetch_unit
  import hic_pkg::*;
#(
  parameter int unsigned NB_WAYS = 4,
  parameter int unsigned NB_SETS = 8,
  localparam int unsigned IDX_W  = (NB_SETS > 1) ? $clog2(NB_SETS) : 1,
  localparam int unsigned WAY_W  = (NB_WAYS > 1) ? $clog2(NB_WAYS) : 1,
  localparam int unsigned TAG_W  = ADDR_W - OFFS_W - IDX_W
) (
  input  logic               clk_i,
  input  logic               rst_ni,
  // core side
  input  logic               fetch_req_i,
  input  addr_t              fetch_addr_i,
  output logic               fetch_gnt_o,
  output logic               fetch_valid_o,
  output line_t              fetch_rdata_o,
  // TAG read port 0 and DATA read port
  output logic [IDX_W-1:0]   lk_idx_o,
  input  logic [TAG_W-1:0]   lk_tag_i [NB_WAYS],
  input  logic [NB_WAYS-1:0] lk_valid_i,
  output logic [WAY_W-1:0]   rd_way_o,
  input  line_t              rd_data_i,
  // prefetch buffer query
  output addr_t              q_addr_o,
  input  logic               q_hit_i,
  input  logic               q_pending_i,
  input  line_t              q_data_i,
  output logic               q_take_o,
  // refill request and response
  output logic               rf_req_o,
  output addr_t              rf_addr_o,
  input  logic               rf_gnt_i,
  input  logic               rf_rsp_valid_i,
  input  line_t              rf_rsp_data_i,
  // cache write (tag and data); wr_src_o selects the prefetch side (1)
  output logic               wr_en_o,
  output logic               wr_src_o,
  output logic [IDX_W-1:0]   wr_idx_o,
  output logic [WAY_W-1:0]   wr_way_o,
  output logic [TAG_W-1:0]   wr_tag_o,
  // events for the counters
  output logic               ev_hit_o,
  output logic               ev_miss_o,
  output logic               ev_pf_hit_o,
  output logic               ev_wup_o
);

  typedef enum logic [2:0] {IDLE, LOOKUP, REFILL_REQ, REFILL_WAIT, WAIT_PF} state_e;
  state_e state_q, state_d;
  addr_t  addr_q;

  logic [NB_WAYS-1:0] hit_way;
  logic               hit;
  logic [WAY_W-1:0]   hit_idx, victim;
  logic               accept;

  assign lk_idx_o  = addr_q[OFFS_W +: IDX_W];
  assign q_addr_o  = addr_q;
  assign rf_addr_o = addr_q;
  assign wr_idx_o  = addr_q[OFFS_W +: IDX_W];
  assign wr_tag_o  = addr_q[ADDR_W-1 -: TAG_W];
  assign wr_way_o  = victim;
  assign rd_way_o  = hit_idx;

  always_comb begin
    hit_idx = '0;
    for (int w = 0; w < NB_WAYS; w++) begin
      hit_way[w] = lk_valid_i[w] && lk_tag_i[w] == addr_q[ADDR_W-1 -: TAG_W];
      if (hit_way[w]) hit_idx = WAY_W'(w);
    end
  end
  assign hit = (state_q == LOOKUP) && |hit_way;

  prand_replacement #(.NB_WAYS(NB_WAYS)) i_repl (
    .clk_i, .rst_ni, .valid_i(lk_valid_i), .adv_i(wr_en_o), .way_o(victim)
  );

  always_comb begin
    state_d       = state_q;
    fetch_gnt_o   = 1'b0;
    fetch_valid_o = 1'b0;
    fetch_rdata_o = rd_data_i;
    q_take_o      = 1'b0;
    rf_req_o      = 1'b0;
    wr_en_o       = 1'b0;
    wr_src_o      = 1'b0;
    ev_hit_o      = 1'b0;
    ev_miss_o     = 1'b0;
    ev_pf_hit_o   = 1'b0;
    ev_wup_o      = 1'b0;
    unique case (state_q)
      IDLE: begin
        fetch_gnt_o = 1'b1;
      end
      LOOKUP: begin
        if (hit) begin
          fetch_valid_o = 1'b1;
          fetch_gnt_o   = 1'b1;
          ev_hit_o      = 1'b1;
          state_d       = IDLE;
        end else if (q_hit_i) begin
          fetch_valid_o = 1'b1;
          fetch_rdata_o = q_data_i;
          fetch_gnt_o   = 1'b1;
          q_take_o      = 1'b1;
          wr_en_o       = 1'b1;
          wr_src_o      = 1'b1;
          ev_pf_hit_o   = 1'b1;
          state_d       = IDLE;
        end else if (q_pending_i) begin
          ev_wup_o = 1'b1;
          state_d  = WAIT_PF;
        end else begin
          rf_req_o  = 1'b1;
          ev_miss_o = 1'b1;
          state_d   = rf_gnt_i ? REFILL_WAIT : REFILL_REQ;
        end
      end
      REFILL_REQ: begin
        rf_req_o = 1'b1;
        if (rf_gnt_i) state_d = REFILL_WAIT;
      end
      REFILL_WAIT: begin
        if (rf_rsp_valid_i) begin
          fetch_valid_o = 1'b1;
          fetch_rdata_o = rf_rsp_data_i;
          wr_en_o       = 1'b1;
          state_d       = IDLE;
        end
      end
      WAIT_PF: begin
        if (q_hit_i) begin
          fetch_valid_o = 1'b1;
          fetch_rdata_o = q_data_i;
          q_take_o      = 1'b1;
          wr_en_o       = 1'b1;
          wr_src_o      = 1'b1;
          state_d       = IDLE;
        end else if (!q_pending_i) begin
          ev_miss_o = 1'b1;       // the prefetch was dropped: refill
          state_d   = REFILL_REQ;
        end
      end
      default: state_d = IDLE;
    endcase
    accept = fetch_gnt_o && fetch_req_i;
    if (accept) state_d = LOOKUP;
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q <= IDLE;
      addr_q  <= '0;
    end else begin
      state_q <= state_d;
      if (accept) addr_q <= line_addr(fetch_addr_i);
    end
  end

  // a refill is only requested while no other one is outstanding
  assert property (@(posedge clk_i) disable iff (!rst_ni)
                   rf_rsp_valid_i |-> state_q == REFILL_WAIT);

endmodule

// Ring FIFO of the optimised core fetch stage (4 x 32-bit by default, as in
// the paper). It decouples the core's decode stage from the instruction cache:
// fetch_req_o depends only on the FIFO's own registers (it is high whenever the
// stored plus outstanding words leave a free slot), so no combinational path
// runs from the cache's valid/data back to the request, which is the point of
// the paper's fetch-stage optimisation. Words are requested at sequential
// addresses, may be outstanding while new ones are requested (non-blocking),
// and are written at the write pointer in the order they return.
// Pointers carry one wrap bit: the FIFO is empty when the write pointer equals
// the read pointer, full when they differ only in the wrap bit.
// Branches (branch_i, branch_target_i) first look into the ring: a slot written
// since the last flush still holds its word after it was read, and if one holds
// the target, and the words from it to the newest plus those outstanding still
// fit, the read pointer simply moves back or forward to it, so short loops are
// served by the ring itself (outstanding words keep arriving in sequence). Otherwise the
// ring is flushed, outstanding words are counted and discarded when they
// arrive, and fetching restarts at the target. After reset fetching starts at
// boot_addr_i. Core side: instr_valid_o / instr_ready_i, word and its address.
// The paper gives the size, the not-full request rule, the pointer rule and
// the hit on short branches; the bookkeeping is this design's choice.
// Compressed and unaligned instructions are left to the core's decoder.
module fetch_ring_fifo
  import hic_pkg::*;
#(
  parameter int unsigned DEPTH = 4,
  localparam int unsigned PTR_W = $clog2(DEPTH) + 1,
  localparam int unsigned CNT_W = $clog2(DEPTH) + 2
) (
  input  logic        clk_i,
  input  logic        rst_ni,
  input  addr_t       boot_addr_i,
  // core side
  input  logic        branch_i,
  input  addr_t       branch_target_i,
  output logic        instr_valid_o,
  output logic [31:0] instr_rdata_o,
  output addr_t       instr_addr_o,
  input  logic        instr_ready_i,
  // fetch side (towards the L0 buffer)
  output logic        fetch_req_o,
  output addr_t       fetch_addr_o,
  input  logic        fetch_gnt_i,
  input  logic        fetch_valid_i,
  input  logic [31:0] fetch_rdata_i,
  // events
  output logic        ev_ring_hit_o,
  output logic        ev_flush_o
);

  localparam int unsigned IX_W = PTR_W - 1;

  logic [PTR_W-1:0] wptr_q, rptr_q;
  logic [31:0]      data_q [DEPTH];
  addr_t            addr_q [DEPTH];
  logic [DEPTH-1:0] ok_q;
  addr_t            pc_q;
  logic [CNT_W-1:0] inflight_q, drop_q, occ;

  logic             ring_hit;
  logic [PTR_W-1:0] hit_ptr;
  logic             granted, keep_rsp;

  assign occ           = CNT_W'(PTR_W'(wptr_q - rptr_q));
  assign fetch_req_o   = (occ + inflight_q) < CNT_W'(DEPTH);
  assign fetch_addr_o  = pc_q;
  assign granted       = fetch_req_o && fetch_gnt_i;
  assign keep_rsp      = fetch_valid_i && drop_q == '0;
  assign instr_valid_o = wptr_q != rptr_q;
  assign instr_rdata_o = data_q[rptr_q[IX_W-1:0]];
  assign instr_addr_o  = addr_q[rptr_q[IX_W-1:0]];

  // search the ring for the branch target
  always_comb begin
    ring_hit = 1'b0;
    hit_ptr  = rptr_q;
    for (int s = 0; s < DEPTH; s++) begin
      automatic logic [IX_W-1:0] back = IX_W'(wptr_q[IX_W-1:0] - IX_W'(s) - 1'b1);
      automatic logic [CNT_W-1:0] span = CNT_W'(back) + 1'b1;
      if (ok_q[s] && addr_q[s] == branch_target_i &&
          span + inflight_q + CNT_W'(granted) <= CNT_W'(DEPTH)) begin
        ring_hit = 1'b1;
        hit_ptr  = wptr_q - PTR_W'(span);
      end
    end
  end

  assign ev_ring_hit_o = branch_i && ring_hit;
  assign ev_flush_o    = branch_i && !ring_hit;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      wptr_q     <= '0;
      rptr_q     <= '0;
      ok_q       <= '0;
      pc_q       <= boot_addr_i;
      inflight_q <= '0;
      drop_q     <= '0;
      for (int s = 0; s < DEPTH; s++) begin
        data_q[s] <= '0;
        addr_q[s] <= '0;
      end
    end else begin
      automatic logic [CNT_W-1:0] infl = inflight_q + CNT_W'(granted) - CNT_W'(keep_rsp);
      automatic logic [CNT_W-1:0] drp  = drop_q - CNT_W'(fetch_valid_i && !keep_rsp);
      if (granted) pc_q <= pc_q + 32'd4;
      if (branch_i && !ring_hit) begin
        // flush: everything outstanding is discarded when it arrives
        rptr_q     <= wptr_q;
        ok_q       <= '0;
        pc_q       <= {branch_target_i[ADDR_W-1:2], 2'b00};
        drop_q     <= drp + infl;
        inflight_q <= '0;
      end else begin
        inflight_q <= infl;
        drop_q     <= drp;
        if (branch_i) rptr_q <= hit_ptr;
        else if (instr_valid_o && instr_ready_i) rptr_q <= rptr_q + 1'b1;
        if (keep_rsp) begin
          data_q[wptr_q[IX_W-1:0]] <= fetch_rdata_i;
          addr_q[wptr_q[IX_W-1:0]] <= pc_q - (ADDR_W'(inflight_q) << 2);
          ok_q[wptr_q[IX_W-1:0]]   <= 1'b1;
          wptr_q                   <= wptr_q + 1'b1;
        end
      end
    end
  end

  assert property (@(posedge clk_i) disable iff (!rst_ni) occ + inflight_q <= CNT_W'(DEPTH));

endmodule

// Private L1 instruction cache bank of one core (512 B, 4-way, 16-byte lines
// by default, the paper's configuration).
// Holds the TAG memory with two read ports (port 0: fetch lookup, port 1:
// prefetch probe), the DATA memory, the fetch unit, the next-line prefetch unit
// and the arbiter that shares the one L1 -> L1.5 port between them. The tag and
// data write ports are fed through 2:1 multiplexers: input 0 is the refill line
// of the fetch unit, input 1 the line held by the prefetch buffer.
// Core side: 128-bit fetch, request/grant, fetch_valid_o 1 cycle after the
// grant on a hit. L1.5 side: request/grant with a line address and transfer id,
// responses with data and transfer id in any order.
// Counters (32 bit, wrapping) count hits, refills from the L1.5, fetches served
// by the prefetch buffer, fetches that waited for a prefetch, issued prefetches
// and prefetches removed by probe filtering; the paper reads such hardware
// counters to compute miss rates. Their set is this design's choice.
module l1_icache
  import hic_pkg::*;
#(
  parameter int unsigned CACHE_BYTES = 512,
  parameter int unsigned NB_WAYS     = 4,
  localparam int unsigned NB_SETS    = CACHE_BYTES / (NB_WAYS * LINE_BYTES),
  localparam int unsigned IDX_W      = (NB_SETS > 1) ? $clog2(NB_SETS) : 1,
  localparam int unsigned WAY_W      = (NB_WAYS > 1) ? $clog2(NB_WAYS) : 1,
  localparam int unsigned TAG_W      = ADDR_W - OFFS_W - IDX_W
) (
  input  logic        clk_i,
  input  logic        rst_ni,
  input  logic        pf_enable_i,
  // core side
  input  logic        fetch_req_i,
  input  addr_t       fetch_addr_i,
  output logic        fetch_gnt_o,
  output logic        fetch_valid_o,
  output line_t       fetch_rdata_o,
  // L1.5 side
  output logic        req_valid_o,
  output l15_req_t    req_o,
  input  logic        req_gnt_i,
  input  logic        rsp_valid_i,
  input  l15_rsp_t    rsp_i,
  input  logic        rsp_drop_i,
  // hardware counters
  output logic [31:0] cnt_hit_o,
  output logic [31:0] cnt_miss_o,
  output logic [31:0] cnt_pf_hit_o,
  output logic [31:0] cnt_wup_o,
  output logic [31:0] cnt_pf_issued_o,
  output logic [31:0] cnt_pf_filtered_o
);

  logic [IDX_W-1:0]   rd_idx [2];
  logic [TAG_W-1:0]   rd_tag [2][NB_WAYS];
  logic [NB_WAYS-1:0] rd_valid [2];
  logic [WAY_W-1:0]   rd_way;
  line_t              rd_data;

  logic               wr_en, wr_src;
  logic [IDX_W-1:0]   wr_idx;
  logic [WAY_W-1:0]   wr_way;
  logic [TAG_W-1:0]   wr_tag;
  line_t              wr_data;

  addr_t q_addr;
  logic  q_hit, q_pending, q_take;
  line_t q_data;

  logic  rf_req, rf_gnt, rf_rsp_valid;
  addr_t rf_addr;
  line_t rf_rsp_data;
  logic  pf_req, pf_gnt, pf_rsp_valid, pf_drop;
  addr_t pf_addr;
  line_t pf_rsp_data;

  logic ev_hit, ev_miss, ev_pf_hit, ev_wup, ev_issued, ev_filtered;

  scm_tag_array #(.NB_WAYS(NB_WAYS), .NB_SETS(NB_SETS), .TAG_W(TAG_W), .NB_RPORTS(2)) i_tag (
    .clk_i, .rst_ni,
    .rd_idx_i(rd_idx), .rd_tag_o(rd_tag), .rd_valid_o(rd_valid),
    .wr_en_i(wr_en), .wr_idx_i(wr_idx), .wr_way_i(wr_way), .wr_tag_i(wr_tag)
  );

  scm_data_array #(.NB_WAYS(NB_WAYS), .NB_SETS(NB_SETS), .LINE_W(LINE_W)) i_data (
    .clk_i,
    .rd_idx_i(rd_idx[0]), .rd_way_i(rd_way), .rd_data_o(rd_data),
    .wr_en_i(wr_en), .wr_idx_i(wr_idx), .wr_way_i(wr_way), .wr_data_i(wr_data)
  );

  // write-data multiplexer: 0 = refill from the L1.5, 1 = prefetch buffer
  assign wr_data = wr_src ? q_data : rf_rsp_data;

  l1_fetch_unit #(.NB_WAYS(NB_WAYS), .NB_SETS(NB_SETS)) i_fetch (
    .clk_i, .rst_ni,
    .fetch_req_i, .fetch_addr_i, .fetch_gnt_o, .fetch_valid_o, .fetch_rdata_o,
    .lk_idx_o(rd_idx[0]), .lk_tag_i(rd_tag[0]), .lk_valid_i(rd_valid[0]),
    .rd_way_o(rd_way), .rd_data_i(rd_data),
    .q_addr_o(q_addr), .q_hit_i(q_hit), .q_pending_i(q_pending), .q_data_i(q_data), .q_take_o(q_take),
    .rf_req_o(rf_req), .rf_addr_o(rf_addr), .rf_gnt_i(rf_gnt),
    .rf_rsp_valid_i(rf_rsp_valid), .rf_rsp_data_i(rf_rsp_data),
    .wr_en_o(wr_en), .wr_src_o(wr_src), .wr_idx_o(wr_idx), .wr_way_o(wr_way), .wr_tag_o(wr_tag),
    .ev_hit_o(ev_hit), .ev_miss_o(ev_miss), .ev_pf_hit_o(ev_pf_hit), .ev_wup_o(ev_wup)
  );

  l1_prefetch_unit #(.NB_WAYS(NB_WAYS), .NB_SETS(NB_SETS)) i_prefetch (
    .clk_i, .rst_ni, .enable_i(pf_enable_i),
    .trig_valid_i(fetch_req_i && fetch_gnt_o), .trig_addr_i(fetch_addr_i),
    .probe_idx_o(rd_idx[1]), .probe_tag_i(rd_tag[1]), .probe_valid_i(rd_valid[1]),
    .pf_req_o(pf_req), .pf_addr_o(pf_addr), .pf_gnt_i(pf_gnt),
    .pf_rsp_valid_i(pf_rsp_valid), .pf_rsp_data_i(pf_rsp_data), .pf_drop_i(pf_drop),
    .q_addr_i(q_addr), .q_hit_o(q_hit), .q_pending_o(q_pending), .q_data_o(q_data), .q_take_i(q_take),
    .ev_filtered_o(ev_filtered), .ev_issued_o(ev_issued)
  );

  l1_arbiter i_arb (
    .clk_i, .rst_ni,
    .rf_req_i(rf_req), .rf_addr_i(rf_addr), .rf_gnt_o(rf_gnt),
    .rf_rsp_valid_o(rf_rsp_valid), .rf_rsp_data_o(rf_rsp_data),
    .pf_req_i(pf_req), .pf_addr_i(pf_addr), .pf_gnt_o(pf_gnt),
    .pf_rsp_valid_o(pf_rsp_valid), .pf_rsp_data_o(pf_rsp_data), .pf_drop_o(pf_drop),
    .req_valid_o, .req_o, .req_gnt_i, .rsp_valid_i, .rsp_i, .rsp_drop_i
  );

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      cnt_hit_o         <= '0;
      cnt_miss_o        <= '0;
      cnt_pf_hit_o      <= '0;
      cnt_wup_o         <= '0;
      cnt_pf_issued_o   <= '0;
      cnt_pf_filtered_o <= '0;
    end else begin
      cnt_hit_o         <= cnt_hit_o         + 32'(ev_hit);
      cnt_miss_o        <= cnt_miss_o        + 32'(ev_miss);
      cnt_pf_hit_o      <= cnt_pf_hit_o      + 32'(ev_pf_hit);
      cnt_wup_o         <= cnt_wup_o         + 32'(ev_wup);
      cnt_pf_issued_o   <= cnt_pf_issued_o   + 32'(ev_issued);
      cnt_pf_filtered_o <= cnt_pf_filtered_o + 32'(ev_filtered);
    end
  end

endmodule

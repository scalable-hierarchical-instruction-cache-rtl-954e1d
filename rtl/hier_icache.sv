// Two-level (hierarchical) instruction cache of an NB_CORES-core cluster, in
// its prefetching, fetch-optimised configuration, with the paper's sizes as
// defaults: per core a 4 x 32-bit fetch ring FIFO, a 128-bit L0 buffer and a
// private 512 B 4-way L1 with a next-line prefetcher; an L1 -> L1.5 request
// buffer (off) and response buffer (on) per core; an 8 x 2 out-of-order
// logarithmic interconnect; two 2048 B 4-way L1.5 banks (4 KB shared); and a
// 64-bit AXI4 read-only instruction bus towards the cluster bus and L2.
// Core-side ports per core: branch request and target, instruction word with
// its address and a valid/ready handshake. prefetch_en_i is the per-core
// software enable of the prefetcher. The AXI4 read port (AR, R) goes to L2;
// its ARID carries the L1.5 bank number in the top bit.
// Latencies (core fetch request to data at the 128-bit L1 port): 1 cycle on
// an L1 hit, 3 cycles on an L1 miss that hits the L1.5, more with L1.5 bank
// conflicts, plus the L2 latency on an L1.5 miss.
// The counters of the L1s and L1.5 banks are brought out for software.
// The structure, sizes and buffer settings follow the paper; the core-side
// port shape, the bank interleaving on address bit 4 and the AXI ID scheme
// are this design's choices. The ring FIFO's flush event output is left
// open here on purpose (no counter is kept for it), which lint reports as an
// empty pin connection; the reset-synchronous warnings come from the
// assertions' disable conditions, not from the logic.
module hier_icache
  import hic_pkg::*;
#(
  parameter int unsigned NB_CORES     = 8,
  parameter int unsigned NB_L15_BANKS = 2,
  parameter int unsigned L1_BYTES     = 512,
  parameter int unsigned L15_BYTES    = 4096,
  parameter int unsigned NB_WAYS      = 4,
  parameter int unsigned RING_DEPTH   = 4,
  parameter bit          REQ_BUF      = 1'b0,
  parameter bit          RSP_BUF      = 1'b1,
  localparam int unsigned MID_W       = (NB_CORES > 1) ? $clog2(NB_CORES) : 1,
  localparam int unsigned BSEL_W      = (NB_L15_BANKS > 1) ? $clog2(NB_L15_BANKS) : 1,
  localparam int unsigned AXI_ID_W    = 1 + BSEL_W
) (
  input  logic                  clk_i,
  input  logic                  rst_ni,
  input  addr_t                 boot_addr_i,
  input  logic [NB_CORES-1:0]   prefetch_en_i,
  // core side
  input  logic                  branch_i        [NB_CORES],
  input  addr_t                 branch_target_i [NB_CORES],
  output logic                  instr_valid_o   [NB_CORES],
  output logic [31:0]           instr_rdata_o   [NB_CORES],
  output addr_t                 instr_addr_o    [NB_CORES],
  input  logic                  instr_ready_i   [NB_CORES],
  // AXI4 read port towards L2
  output logic                  axi_ar_valid_o,
  input  logic                  axi_ar_ready_i,
  output addr_t                 axi_ar_addr_o,
  output logic [7:0]            axi_ar_len_o,
  output logic [2:0]            axi_ar_size_o,
  output logic [1:0]            axi_ar_burst_o,
  output logic [AXI_ID_W-1:0]   axi_ar_id_o,
  input  logic                  axi_r_valid_i,
  output logic                  axi_r_ready_o,
  input  logic [AXI_DATA_W-1:0] axi_r_data_i,
  input  logic                  axi_r_last_i,
  input  logic [AXI_ID_W-1:0]   axi_r_id_i,
  input  logic [1:0]            axi_r_resp_i,
  // hardware counters
  output logic [31:0]           l1_hit_cnt_o         [NB_CORES],
  output logic [31:0]           l1_miss_cnt_o        [NB_CORES],
  output logic [31:0]           l1_pf_hit_cnt_o      [NB_CORES],
  output logic [31:0]           l1_wup_cnt_o         [NB_CORES],
  output logic [31:0]           l1_pf_issued_cnt_o   [NB_CORES],
  output logic [31:0]           l1_pf_filtered_cnt_o [NB_CORES],
  output logic [31:0]           ring_hit_cnt_o       [NB_CORES],
  output logic [31:0]           l15_hit_cnt_o        [NB_L15_BANKS],
  output logic [31:0]           l15_refill_cnt_o     [NB_L15_BANKS]
);

  // core fetch front end <-> L0 <-> L1
  logic        rf_req [NB_CORES], rf_gnt [NB_CORES], rf_valid [NB_CORES];
  addr_t       rf_addr [NB_CORES];
  logic [31:0] rf_rdata [NB_CORES];
  logic        f_req [NB_CORES], f_gnt [NB_CORES], f_valid [NB_CORES];
  addr_t       f_addr [NB_CORES];
  line_t       f_rdata [NB_CORES];
  // L1 <-> buffer <-> interconnect
  logic        l1_req_valid [NB_CORES], l1_req_gnt [NB_CORES];
  l15_req_t    l1_req [NB_CORES];
  logic        l1_rsp_valid [NB_CORES], l1_rsp_drop [NB_CORES];
  l15_rsp_t    l1_rsp [NB_CORES];
  logic        ic_req_valid [NB_CORES], ic_req_gnt [NB_CORES];
  l15_req_t    ic_req [NB_CORES];
  logic        ic_rsp_valid [NB_CORES], ic_rsp_drop [NB_CORES];
  l15_rsp_t    ic_rsp [NB_CORES];
  // interconnect <-> banks
  logic             b_req_valid [NB_L15_BANKS], b_req_ready [NB_L15_BANKS];
  l15_req_t         b_req [NB_L15_BANKS];
  logic [MID_W-1:0] b_req_mid [NB_L15_BANKS], b_rsp_mid [NB_L15_BANKS];
  logic             b_rsp_valid [NB_L15_BANKS];
  l15_rsp_t         b_rsp [NB_L15_BANKS];
  // banks <-> instruction bus
  logic                  ar_valid [NB_L15_BANKS], ar_ready [NB_L15_BANKS];
  addr_t                 ar_addr [NB_L15_BANKS];
  logic [7:0]            ar_len [NB_L15_BANKS];
  logic [2:0]            ar_size [NB_L15_BANKS];
  logic [1:0]            ar_burst [NB_L15_BANKS];
  logic [0:0]            ar_id [NB_L15_BANKS], r_id [NB_L15_BANKS];
  logic                  r_valid [NB_L15_BANKS], r_ready [NB_L15_BANKS], r_last [NB_L15_BANKS];
  logic [AXI_DATA_W-1:0] r_data [NB_L15_BANKS];
  logic [1:0]            r_resp [NB_L15_BANKS];

  for (genvar c = 0; c < NB_CORES; c++) begin : g_core
    logic ev_ring_hit;

    fetch_ring_fifo #(.DEPTH(RING_DEPTH)) i_ring (
      .clk_i, .rst_ni, .boot_addr_i,
      .branch_i(branch_i[c]), .branch_target_i(branch_target_i[c]),
      .instr_valid_o(instr_valid_o[c]), .instr_rdata_o(instr_rdata_o[c]),
      .instr_addr_o(instr_addr_o[c]), .instr_ready_i(instr_ready_i[c]),
      .fetch_req_o(rf_req[c]), .fetch_addr_o(rf_addr[c]), .fetch_gnt_i(rf_gnt[c]),
      .fetch_valid_i(rf_valid[c]), .fetch_rdata_i(rf_rdata[c]),
      .ev_ring_hit_o(ev_ring_hit), .ev_flush_o()
    );

    always_ff @(posedge clk_i or negedge rst_ni) begin
      if (!rst_ni) ring_hit_cnt_o[c] <= '0;
      else         ring_hit_cnt_o[c] <= ring_hit_cnt_o[c] + 32'(ev_ring_hit);
    end

    l0_buffer i_l0 (
      .clk_i, .rst_ni,
      .req_i(rf_req[c]), .addr_i(rf_addr[c]), .gnt_o(rf_gnt[c]),
      .valid_o(rf_valid[c]), .rdata_o(rf_rdata[c]),
      .l1_req_o(f_req[c]), .l1_addr_o(f_addr[c]), .l1_gnt_i(f_gnt[c]),
      .l1_valid_i(f_valid[c]), .l1_rdata_i(f_rdata[c])
    );

    l1_icache #(.CACHE_BYTES(L1_BYTES), .NB_WAYS(NB_WAYS)) i_l1 (
      .clk_i, .rst_ni, .pf_enable_i(prefetch_en_i[c]),
      .fetch_req_i(f_req[c]), .fetch_addr_i(f_addr[c]), .fetch_gnt_o(f_gnt[c]),
      .fetch_valid_o(f_valid[c]), .fetch_rdata_o(f_rdata[c]),
      .req_valid_o(l1_req_valid[c]), .req_o(l1_req[c]), .req_gnt_i(l1_req_gnt[c]),
      .rsp_valid_i(l1_rsp_valid[c]), .rsp_i(l1_rsp[c]), .rsp_drop_i(l1_rsp_drop[c]),
      .cnt_hit_o(l1_hit_cnt_o[c]), .cnt_miss_o(l1_miss_cnt_o[c]),
      .cnt_pf_hit_o(l1_pf_hit_cnt_o[c]), .cnt_wup_o(l1_wup_cnt_o[c]),
      .cnt_pf_issued_o(l1_pf_issued_cnt_o[c]), .cnt_pf_filtered_o(l1_pf_filtered_cnt_o[c])
    );

    l1_l15_buffer #(.REQ_BUF(REQ_BUF), .RSP_BUF(RSP_BUF)) i_buf (
      .clk_i, .rst_ni,
      .l1_req_valid_i(l1_req_valid[c]), .l1_req_i(l1_req[c]), .l1_req_gnt_o(l1_req_gnt[c]),
      .l1_rsp_valid_o(l1_rsp_valid[c]), .l1_rsp_o(l1_rsp[c]), .l1_rsp_drop_o(l1_rsp_drop[c]),
      .ic_req_valid_o(ic_req_valid[c]), .ic_req_o(ic_req[c]), .ic_req_gnt_i(ic_req_gnt[c]),
      .ic_rsp_valid_i(ic_rsp_valid[c]), .ic_rsp_i(ic_rsp[c]), .ic_rsp_drop_i(ic_rsp_drop[c])
    );
  end

  l15_interconnect #(.NB_L1(NB_CORES), .NB_BANKS(NB_L15_BANKS)) i_ic (
    .clk_i, .rst_ni,
    .req_valid_i(ic_req_valid), .req_i(ic_req), .req_gnt_o(ic_req_gnt),
    .rsp_valid_o(ic_rsp_valid), .rsp_o(ic_rsp), .rsp_drop_o(ic_rsp_drop),
    .bank_req_valid_o(b_req_valid), .bank_req_o(b_req), .bank_req_mid_o(b_req_mid),
    .bank_req_ready_i(b_req_ready),
    .bank_rsp_valid_i(b_rsp_valid), .bank_rsp_i(b_rsp), .bank_rsp_mid_i(b_rsp_mid)
  );

  for (genvar b = 0; b < NB_L15_BANKS; b++) begin : g_bank
    l15_bank #(
      .BANK_BYTES(L15_BYTES / NB_L15_BANKS), .NB_WAYS(NB_WAYS), .NB_BANKS(NB_L15_BANKS),
      .MID_W(MID_W), .AXI_ID_W(1)
    ) i_bank (
      .clk_i, .rst_ni,
      .req_valid_i(b_req_valid[b]), .req_i(b_req[b]), .req_mid_i(b_req_mid[b]),
      .req_ready_o(b_req_ready[b]),
      .rsp_valid_o(b_rsp_valid[b]), .rsp_o(b_rsp[b]), .rsp_mid_o(b_rsp_mid[b]),
      .ar_valid_o(ar_valid[b]), .ar_ready_i(ar_ready[b]), .ar_addr_o(ar_addr[b]),
      .ar_len_o(ar_len[b]), .ar_size_o(ar_size[b]), .ar_burst_o(ar_burst[b]), .ar_id_o(ar_id[b]),
      .r_valid_i(r_valid[b]), .r_ready_o(r_ready[b]), .r_data_i(r_data[b]),
      .r_last_i(r_last[b]), .r_id_i(r_id[b]), .r_resp_i(r_resp[b]),
      .cnt_hit_o(l15_hit_cnt_o[b]), .cnt_refill_o(l15_refill_cnt_o[b])
    );
  end

  axi_ibus_mux #(.NB_MST(NB_L15_BANKS), .ID_W(1)) i_ibus (
    .clk_i, .rst_ni,
    .s_ar_valid_i(ar_valid), .s_ar_ready_o(ar_ready), .s_ar_addr_i(ar_addr),
    .s_ar_len_i(ar_len), .s_ar_size_i(ar_size), .s_ar_burst_i(ar_burst), .s_ar_id_i(ar_id),
    .s_r_valid_o(r_valid), .s_r_ready_i(r_ready), .s_r_data_o(r_data),
    .s_r_last_o(r_last), .s_r_id_o(r_id), .s_r_resp_o(r_resp),
    .m_ar_valid_o(axi_ar_valid_o), .m_ar_ready_i(axi_ar_ready_i), .m_ar_addr_o(axi_ar_addr_o),
    .m_ar_len_o(axi_ar_len_o), .m_ar_size_o(axi_ar_size_o), .m_ar_burst_o(axi_ar_burst_o),
    .m_ar_id_o(axi_ar_id_o),
    .m_r_valid_i(axi_r_valid_i), .m_r_ready_o(axi_r_ready_o), .m_r_data_i(axi_r_data_i),
    .m_r_last_i(axi_r_last_i), .m_r_id_i(axi_r_id_i), .m_r_resp_i(axi_r_resp_i)
  );

endmodule

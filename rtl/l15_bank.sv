// One bank of the shared L1.5 instruction cache (2048 B, 4-way, 16-byte
// lines by default; the paper's L1.5 is two such banks, 4 KB in all).
// Single port: one request per cycle is taken from the interconnect and
// registered (cycle 1); in the next cycle (cycle 2) the tags are compared and,
// on a hit, the line is read and answered in the same cycle together with the
// requesting L1's master id and transfer id. With the response buffer of the
// L1 this is the paper's two-cycle L1.5 access. While a hit is answered a new
// request is accepted, so hits stream at one per cycle.
// On a miss the bank stops accepting requests, reads the line from L2 through
// its 64-bit AXI4 read port as one INCR burst of two 64-bit beats (ARLEN = 1,
// ARSIZE = 3), answers the waiting request in the cycle the last beat arrives
// and writes the line into the way chosen by PRAND replacement. One miss is
// handled at a time (blocking). Hit and L2-refill counters are kept; the paper
// reads the number of L2 refills from such counters for its energy model.
// Blocking refill, burst shape and counters are this design's choices; an AXI
// error response is not handled (instruction memory is assumed error-free).
module l15_bank
  import hic_pkg::*;
#(
  parameter int unsigned BANK_BYTES = 2048,
  parameter int unsigned NB_WAYS    = 4,
  parameter int unsigned NB_BANKS   = 2,
  parameter int unsigned MID_W      = 3,
  parameter int unsigned AXI_ID_W   = 1,
  localparam int unsigned NB_SETS   = BANK_BYTES / (NB_WAYS * LINE_BYTES),
  localparam int unsigned IDX_W     = (NB_SETS > 1) ? $clog2(NB_SETS) : 1,
  localparam int unsigned WAY_W     = (NB_WAYS > 1) ? $clog2(NB_WAYS) : 1,
  localparam int unsigned BSEL_W    = (NB_BANKS > 1) ? $clog2(NB_BANKS) : 0,
  localparam int unsigned TAG_W     = ADDR_W - OFFS_W - BSEL_W - IDX_W
) (
  input  logic                  clk_i,
  input  logic                  rst_ni,
  // interconnect side
  input  logic                  req_valid_i,
  input  l15_req_t              req_i,
  input  logic [MID_W-1:0]      req_mid_i,
  output logic                  req_ready_o,
  output logic                  rsp_valid_o,
  output l15_rsp_t              rsp_o,
  output logic [MID_W-1:0]      rsp_mid_o,
  // AXI4 read channels towards L2
  output logic                  ar_valid_o,
  input  logic                  ar_ready_i,
  output addr_t                 ar_addr_o,
  output logic [7:0]            ar_len_o,
  output logic [2:0]            ar_size_o,
  output logic [1:0]            ar_burst_o,
  output logic [AXI_ID_W-1:0]   ar_id_o,
  input  logic                  r_valid_i,
  output logic                  r_ready_o,
  input  logic [AXI_DATA_W-1:0] r_data_i,
  input  logic                  r_last_i,
  input  logic [AXI_ID_W-1:0]   r_id_i,
  input  logic [1:0]            r_resp_i,
  // hardware counters
  output logic [31:0]           cnt_hit_o,
  output logic [31:0]           cnt_refill_o
);

  typedef enum logic [1:0] {RUN, AR, RDATA} state_e;
  state_e state_q, state_d;

  logic             s_valid_q;
  l15_req_t         s_req_q;
  logic [MID_W-1:0] s_mid_q;

  logic [IDX_W-1:0]   idx;
  logic [TAG_W-1:0]   tag;
  logic [IDX_W-1:0]   rd_idx [1];
  logic [TAG_W-1:0]   rd_tag [1][NB_WAYS];
  logic [NB_WAYS-1:0] rd_valid [1];
  logic [WAY_W-1:0]   hit_idx, victim;
  logic               hit;
  line_t              rd_data, refill_line;
  logic [AXI_DATA_W-1:0] beat_q [BEATS];
  logic [$clog2(BEATS+1)-1:0] beat_cnt_q;
  logic               wr_en, refill_done;

  assign idx       = s_req_q.addr[OFFS_W + BSEL_W +: IDX_W];
  assign tag       = s_req_q.addr[ADDR_W-1 -: TAG_W];
  assign rd_idx[0] = idx;

  scm_tag_array #(.NB_WAYS(NB_WAYS), .NB_SETS(NB_SETS), .TAG_W(TAG_W), .NB_RPORTS(1)) i_tag (
    .clk_i, .rst_ni,
    .rd_idx_i(rd_idx), .rd_tag_o(rd_tag), .rd_valid_o(rd_valid),
    .wr_en_i(wr_en), .wr_idx_i(idx), .wr_way_i(victim), .wr_tag_i(tag)
  );

  scm_data_array #(.NB_WAYS(NB_WAYS), .NB_SETS(NB_SETS), .LINE_W(LINE_W)) i_data (
    .clk_i,
    .rd_idx_i(idx), .rd_way_i(hit_idx), .rd_data_o(rd_data),
    .wr_en_i(wr_en), .wr_idx_i(idx), .wr_way_i(victim), .wr_data_i(refill_line)
  );

  prand_replacement #(.NB_WAYS(NB_WAYS), .SEED(16'h1D2B)) i_repl (
    .clk_i, .rst_ni, .valid_i(rd_valid[0]), .adv_i(wr_en), .way_o(victim)
  );

  always_comb begin
    hit     = 1'b0;
    hit_idx = '0;
    for (int w = 0; w < NB_WAYS; w++)
      if (rd_valid[0][w] && rd_tag[0][w] == tag) begin
        hit     = 1'b1;
        hit_idx = WAY_W'(w);
      end
  end

  // the last beat is forwarded in the cycle it arrives
  always_comb begin
    for (int b = 0; b < BEATS; b++) refill_line[b*AXI_DATA_W +: AXI_DATA_W] = beat_q[b];
    refill_line[(BEATS-1)*AXI_DATA_W +: AXI_DATA_W] = r_data_i;
  end

  assign refill_done = (state_q == RDATA) && r_valid_i && r_last_i;
  assign wr_en       = refill_done;

  always_comb begin
    state_d = state_q;
    unique case (state_q)
      RUN:     if (s_valid_q && !hit) state_d = AR;
      AR:      if (ar_ready_i) state_d = RDATA;
      RDATA:   if (refill_done) state_d = RUN;
      default: state_d = RUN;
    endcase
  end

  assign req_ready_o = !s_valid_q || (state_q == RUN && hit) || refill_done;
  assign rsp_valid_o = s_valid_q && ((state_q == RUN && hit) || refill_done);
  assign rsp_o.data  = refill_done ? refill_line : rd_data;
  assign rsp_o.tid   = s_req_q.tid;
  assign rsp_mid_o   = s_mid_q;

  assign ar_valid_o = (state_q == AR);
  assign ar_addr_o  = s_req_q.addr;
  assign ar_len_o   = 8'(BEATS - 1);
  assign ar_size_o  = 3'($clog2(AXI_DATA_W / 8));
  assign ar_burst_o = 2'b01;
  assign ar_id_o    = '0;
  assign r_ready_o  = (state_q == RDATA);

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q      <= RUN;
      s_valid_q    <= 1'b0;
      s_req_q      <= '0;
      s_mid_q      <= '0;
      beat_cnt_q   <= '0;
      cnt_hit_o    <= '0;
      cnt_refill_o <= '0;
      for (int b = 0; b < BEATS; b++) beat_q[b] <= '0;
    end else begin
      state_q <= state_d;
      if (req_ready_o) begin
        s_valid_q <= req_valid_i;
        if (req_valid_i) begin
          s_req_q <= req_i;
          s_mid_q <= req_mid_i;
        end
      end
      if (state_q == AR) beat_cnt_q <= '0;
      if (state_q == RDATA && r_valid_i) begin
        beat_q[beat_cnt_q[$clog2(BEATS)-1:0]] <= r_data_i;
        beat_cnt_q <= beat_cnt_q + 1'b1;
      end
      if (state_q == RUN && s_valid_q && hit) cnt_hit_o <= cnt_hit_o + 32'd1;
      if (refill_done) cnt_refill_o <= cnt_refill_o + 32'd1;
    end
  end

  assert property (@(posedge clk_i) disable iff (!rst_ni)
                   (state_q == RDATA && r_valid_i) |-> r_resp_i == 2'b00 && r_id_i == ar_id_o);

endmodule

// Read-only logarithmic interconnect between NB_L1 private L1 banks and
// NB_BANKS shared L1.5 banks (8 x 2 in the paper), with out-of-order responses.
// Requests: lines are interleaved over the banks by the address bits just
// above the line offset. Each bank has a round-robin arbiter over the L1s that
// address it; the winner is granted in the same cycle and its request leaves
// with the L1's index (master id) attached. A bank that is not ready grants
// nobody. Responses: every bank answers with the master id and transfer id of
// the request; the interconnect steers each response to its L1 on one response
// lane per L1. Because the fetch and the prefetch of one L1 may sit in two
// different banks, two responses for the same L1 can meet in one cycle; the
// demand fetch then wins and the prefetch response is dropped, which is
// signalled on rsp_drop_o, as the paper prescribes ("we omit the prefetch
// data"). Fully combinational. Interleaving bits and round-robin are this
// design's choices.
module l15_interconnect
  import hic_pkg::*;
#(
  parameter int unsigned NB_L1    = 8,
  parameter int unsigned NB_BANKS = 2,
  localparam int unsigned MID_W   = (NB_L1 > 1) ? $clog2(NB_L1) : 1,
  localparam int unsigned BSEL_W  = (NB_BANKS > 1) ? $clog2(NB_BANKS) : 1
) (
  input  logic             clk_i,
  input  logic             rst_ni,
  // L1 side
  input  logic             req_valid_i [NB_L1],
  input  l15_req_t         req_i       [NB_L1],
  output logic             req_gnt_o   [NB_L1],
  output logic             rsp_valid_o [NB_L1],
  output l15_rsp_t         rsp_o       [NB_L1],
  output logic             rsp_drop_o  [NB_L1],
  // L1.5 bank side
  output logic             bank_req_valid_o [NB_BANKS],
  output l15_req_t         bank_req_o       [NB_BANKS],
  output logic [MID_W-1:0] bank_req_mid_o   [NB_BANKS],
  input  logic             bank_req_ready_i [NB_BANKS],
  input  logic             bank_rsp_valid_i [NB_BANKS],
  input  l15_rsp_t         bank_rsp_i       [NB_BANKS],
  input  logic [MID_W-1:0] bank_rsp_mid_i   [NB_BANKS]
);

  logic [MID_W-1:0] rr_q [NB_BANKS];
  logic             win_valid [NB_BANKS];
  logic [MID_W-1:0] win [NB_BANKS];

  function automatic logic [BSEL_W-1:0] bank_of(addr_t a);
    if (NB_BANKS > 1) return a[OFFS_W +: BSEL_W];
    else              return '0;
  endfunction

  // per-bank round-robin: first requester at or after the pointer
  always_comb begin
    for (int b = 0; b < NB_BANKS; b++) begin
      win_valid[b] = 1'b0;
      win[b]       = '0;
      for (int k = NB_L1 - 1; k >= 0; k--) begin
        automatic int unsigned m = (int'(rr_q[b]) + k) % NB_L1;
        if (req_valid_i[m] && int'(bank_of(req_i[m].addr)) == b) begin
          win_valid[b] = 1'b1;
          win[b]       = MID_W'(m);
        end
      end
      bank_req_valid_o[b] = win_valid[b];
      bank_req_o[b]       = req_i[win[b]];
      bank_req_mid_o[b]   = win[b];
    end
    for (int m = 0; m < NB_L1; m++) begin
      req_gnt_o[m] = 1'b0;
      for (int b = 0; b < NB_BANKS; b++)
        if (win_valid[b] && int'(win[b]) == m && bank_req_ready_i[b]) req_gnt_o[m] = 1'b1;
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      for (int b = 0; b < NB_BANKS; b++) rr_q[b] <= '0;
    end else begin
      for (int b = 0; b < NB_BANKS; b++)
        if (win_valid[b] && bank_req_ready_i[b]) rr_q[b] <= MID_W'((int'(win[b]) + 1) % NB_L1);
    end
  end

  // response steering: a fetch response wins over a prefetch response
  always_comb begin
    for (int m = 0; m < NB_L1; m++) begin
      rsp_valid_o[m] = 1'b0;
      rsp_o[m]       = bank_rsp_i[0];
      rsp_drop_o[m]  = 1'b0;
      for (int b = 0; b < NB_BANKS; b++) begin
        if (bank_rsp_valid_i[b] && int'(bank_rsp_mid_i[b]) == m) begin
          if (!rsp_valid_o[m] || bank_rsp_i[b].tid == TID_FETCH) begin
            if (rsp_valid_o[m]) rsp_drop_o[m] = 1'b1;
            rsp_valid_o[m] = 1'b1;
            rsp_o[m]       = bank_rsp_i[b];
          end else begin
            rsp_drop_o[m] = 1'b1;
          end
        end
      end
    end
  end

endmodule

// Optional request buffer and response buffer between one L1 bank and the
// L1.5 interconnect, each enabled by a parameter, as in the paper. The default
// is the paper's configuration: request buffer off (REQ_BUF = 0, the request
// passes combinationally), response buffer on (RSP_BUF = 1).
// The request buffer is a one-entry pipeline register with a valid/grant
// handshake: the upstream grant is given when the entry is empty or is being
// taken downstream in the same cycle, so a full-rate stream passes with one
// extra cycle of latency and the request address and id leave from a register.
// The response buffer registers the response
// (valid, data, transfer id) and the drop flag for one cycle; responses are
// never back-pressured. The buffer structure is this design's choice.
module l1_l15_buffer
  import hic_pkg::*;
#(
  parameter bit REQ_BUF = 1'b0,
  parameter bit RSP_BUF = 1'b1
) (
  input  logic     clk_i,
  input  logic     rst_ni,
  // L1 side
  input  logic     l1_req_valid_i,
  input  l15_req_t l1_req_i,
  output logic     l1_req_gnt_o,
  output logic     l1_rsp_valid_o,
  output l15_rsp_t l1_rsp_o,
  output logic     l1_rsp_drop_o,
  // interconnect side
  output logic     ic_req_valid_o,
  output l15_req_t ic_req_o,
  input  logic     ic_req_gnt_i,
  input  logic     ic_rsp_valid_i,
  input  l15_rsp_t ic_rsp_i,
  input  logic     ic_rsp_drop_i
);

  if (REQ_BUF) begin : g_req_buf
    logic     valid_q;
    l15_req_t req_q;
    assign l1_req_gnt_o   = !valid_q || ic_req_gnt_i;
    assign ic_req_valid_o = valid_q;
    assign ic_req_o       = req_q;
    always_ff @(posedge clk_i or negedge rst_ni) begin
      if (!rst_ni) begin
        valid_q <= 1'b0;
        req_q   <= '0;
      end else if (l1_req_gnt_o) begin
        valid_q <= l1_req_valid_i;
        req_q   <= l1_req_i;
      end
    end
  end else begin : g_req_pass
    assign ic_req_valid_o = l1_req_valid_i;
    assign ic_req_o       = l1_req_i;
    assign l1_req_gnt_o   = ic_req_gnt_i;
  end

  if (RSP_BUF) begin : g_rsp_buf
    logic     valid_q, drop_q;
    l15_rsp_t rsp_q;
    always_ff @(posedge clk_i or negedge rst_ni) begin
      if (!rst_ni) begin
        valid_q <= 1'b0;
        drop_q  <= 1'b0;
        rsp_q   <= '0;
      end else begin
        valid_q <= ic_rsp_valid_i;
        drop_q  <= ic_rsp_drop_i;
        if (ic_rsp_valid_i) rsp_q <= ic_rsp_i;
      end
    end
    assign l1_rsp_valid_o = valid_q;
    assign l1_rsp_o       = rsp_q;
    assign l1_rsp_drop_o  = drop_q;
  end else begin : g_rsp_pass
    assign l1_rsp_valid_o = ic_rsp_valid_i;
    assign l1_rsp_o       = ic_rsp_i;
    assign l1_rsp_drop_o  = ic_rsp_drop_i;
  end

endmodule

// Instruction bus: merges the AXI4 read channels of NB_MST L1.5 banks onto one
// 64-bit AXI4 read port towards the cluster bus and L2. The instruction path
// only reads, so only the AR and R channels exist.
// AR: round-robin among the banks that present a request; the chosen request
// is passed combinationally with the bank's index prepended to its ARID, and
// the round-robin pointer moves past it when the handshake completes. The
// choice is held while ARVALID waits for ARREADY, as AXI requires.
// R: the upper ARID bits of a beat name the bank it goes to; RREADY comes from
// that bank. The paper only names the AXI4 instruction bus; its arbitration is
// this design's choice.
module axi_ibus_mux
  import hic_pkg::*;
#(
  parameter int unsigned NB_MST  = 2,
  parameter int unsigned ID_W    = 1,
  localparam int unsigned SEL_W  = (NB_MST > 1) ? $clog2(NB_MST) : 1,
  localparam int unsigned OID_W  = ID_W + SEL_W
) (
  input  logic                  clk_i,
  input  logic                  rst_ni,
  // bank side (slave ports)
  input  logic                  s_ar_valid_i [NB_MST],
  output logic                  s_ar_ready_o [NB_MST],
  input  addr_t                 s_ar_addr_i  [NB_MST],
  input  logic [7:0]            s_ar_len_i   [NB_MST],
  input  logic [2:0]            s_ar_size_i  [NB_MST],
  input  logic [1:0]            s_ar_burst_i [NB_MST],
  input  logic [ID_W-1:0]       s_ar_id_i    [NB_MST],
  output logic                  s_r_valid_o  [NB_MST],
  input  logic                  s_r_ready_i  [NB_MST],
  output logic [AXI_DATA_W-1:0] s_r_data_o   [NB_MST],
  output logic                  s_r_last_o   [NB_MST],
  output logic [ID_W-1:0]       s_r_id_o     [NB_MST],
  output logic [1:0]            s_r_resp_o   [NB_MST],
  // L2 side (master port)
  output logic                  m_ar_valid_o,
  input  logic                  m_ar_ready_i,
  output addr_t                 m_ar_addr_o,
  output logic [7:0]            m_ar_len_o,
  output logic [2:0]            m_ar_size_o,
  output logic [1:0]            m_ar_burst_o,
  output logic [OID_W-1:0]      m_ar_id_o,
  input  logic                  m_r_valid_i,
  output logic                  m_r_ready_o,
  input  logic [AXI_DATA_W-1:0] m_r_data_i,
  input  logic                  m_r_last_i,
  input  logic [OID_W-1:0]      m_r_id_i,
  input  logic [1:0]            m_r_resp_i
);

  logic [SEL_W-1:0] rr_q, sel, lock_sel_q;
  logic             any, lock_q;
  logic [SEL_W-1:0] rsel;

  always_comb begin
    any = 1'b0;
    sel = '0;
    for (int k = NB_MST - 1; k >= 0; k--) begin
      automatic int unsigned m = (int'(rr_q) + k) % NB_MST;
      if (s_ar_valid_i[m]) begin
        any = 1'b1;
        sel = SEL_W'(m);
      end
    end
    if (lock_q) begin
      any = 1'b1;
      sel = lock_sel_q;
    end
  end

  assign m_ar_valid_o = any;
  assign m_ar_addr_o  = s_ar_addr_i[sel];
  assign m_ar_len_o   = s_ar_len_i[sel];
  assign m_ar_size_o  = s_ar_size_i[sel];
  assign m_ar_burst_o = s_ar_burst_i[sel];
  assign m_ar_id_o    = {sel, s_ar_id_i[sel]};

  always_comb begin
    for (int m = 0; m < NB_MST; m++) s_ar_ready_o[m] = any && sel == SEL_W'(m) && m_ar_ready_i;
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      rr_q       <= '0;
      lock_q     <= 1'b0;
      lock_sel_q <= '0;
    end else begin
      if (any && m_ar_ready_i) begin
        rr_q   <= SEL_W'((int'(sel) + 1) % NB_MST);
        lock_q <= 1'b0;
      end else if (any) begin
        lock_q     <= 1'b1;
        lock_sel_q <= sel;
      end
    end
  end

  assign rsel        = m_r_id_i[OID_W-1 -: SEL_W];
  assign m_r_ready_o = s_r_ready_i[rsel];
  always_comb begin
    for (int m = 0; m < NB_MST; m++) begin
      s_r_valid_o[m] = m_r_valid_i && rsel == SEL_W'(m);
      s_r_data_o[m]  = m_r_data_i;
      s_r_last_o[m]  = m_r_last_i;
      s_r_id_o[m]    = m_r_id_i[ID_W-1:0];
      s_r_resp_o[m]  = m_r_resp_i;
    end
  end

  // AXI: a raised ARVALID stays until ARREADY, with stable address
  assert property (@(posedge clk_i) disable iff (!rst_ni)
                   m_ar_valid_o && !m_ar_ready_i |=> m_ar_valid_o && $stable(m_ar_addr_o));

endmodule

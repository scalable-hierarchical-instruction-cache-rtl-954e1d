// L0 buffer: one 128-bit cache line kept between a core's 32-bit fetch port
// and its private L1, so that sequential 32-bit fetches of the optimised
// fetch stage do not each go to the L1 controller.
// 32-bit side: request/grant, in-order responses one cycle after the grant on
// an L0 hit (registered word). On an L0 miss the request is passed to the L1
// (128-bit request/grant); the 32-bit request is granted together with the L1
// grant, and when the L1 returns the line it is kept in the buffer and the
// requested word is answered in the next cycle. One L1 request is outstanding
// at a time. The paper gives the buffer's size and purpose; this handshake is
// this design's choice. The buffer is not invalidated: instruction memory is
// read-only during execution.
module l0_buffer
  import hic_pkg::*;
(
  input  logic        clk_i,
  input  logic        rst_ni,
  // 32-bit fetch side (from the core's ring FIFO)
  input  logic        req_i,
  input  addr_t       addr_i,
  output logic        gnt_o,
  output logic        valid_o,
  output logic [31:0] rdata_o,
  // 128-bit L1 side
  output logic        l1_req_o,
  output addr_t       l1_addr_o,
  input  logic        l1_gnt_i,
  input  logic        l1_valid_i,
  input  line_t       l1_rdata_i
);

  localparam int unsigned WSEL_W = OFFS_W - 2;

  logic              line_valid_q, wait_q, valid_q;
  addr_t             line_addr_q;
  line_t             line_q;
  logic [WSEL_W-1:0] wsel_q;
  logic [31:0]       rdata_q;
  logic              hit;

  assign hit       = line_valid_q && line_addr_q == line_addr(addr_i);
  assign l1_req_o  = req_i && !hit && !wait_q;
  assign l1_addr_o = line_addr(addr_i);
  assign gnt_o     = !wait_q && req_i && (hit || l1_gnt_i);
  assign valid_o   = valid_q;
  assign rdata_o   = rdata_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      line_valid_q <= 1'b0;
      wait_q       <= 1'b0;
      valid_q      <= 1'b0;
      line_addr_q  <= '0;
      line_q       <= '0;
      wsel_q       <= '0;
      rdata_q      <= '0;
    end else begin
      valid_q <= 1'b0;
      if (gnt_o && hit) begin
        valid_q <= 1'b1;
        rdata_q <= line_q[addr_i[OFFS_W-1:2]*32 +: 32];
      end else if (gnt_o) begin
        wait_q      <= 1'b1;
        wsel_q      <= addr_i[OFFS_W-1:2];
        line_addr_q <= line_addr(addr_i);
      end
      if (wait_q && l1_valid_i) begin
        wait_q       <= 1'b0;
        line_valid_q <= 1'b1;
        line_q       <= l1_rdata_i;
        valid_q      <= 1'b1;
        rdata_q      <= l1_rdata_i[wsel_q*32 +: 32];
      end
    end
  end

endmodule

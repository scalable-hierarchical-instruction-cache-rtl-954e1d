// Behavioural model of the L2 memory behind the instruction bus: an AXI4 read
// slave that returns the code_word() pattern. One burst at a time; ARREADY is
// high when idle, the first beat comes LATENCY cycles after the address
// handshake and the others follow back to back (as long as RREADY is high).
// INCR bursts of 8-byte beats only. Counts accepted bursts.
module l2_axi_model
  import tb_pkg::*;
#(
  parameter int unsigned ID_W    = 2,
  parameter int unsigned LATENCY = 8
) (
  input  logic            clk_i,
  input  logic            rst_ni,
  input  logic            ar_valid_i,
  output logic            ar_ready_o,
  input  logic [31:0]     ar_addr_i,
  input  logic [7:0]      ar_len_i,
  input  logic [2:0]      ar_size_i,
  input  logic [1:0]      ar_burst_i,
  input  logic [ID_W-1:0] ar_id_i,
  output logic            r_valid_o,
  input  logic            r_ready_i,
  output logic [63:0]     r_data_o,
  output logic            r_last_o,
  output logic [ID_W-1:0] r_id_o,
  output logic [1:0]      r_resp_o,
  output int              bursts_o
);
  logic            busy_q;
  logic [31:0]     addr_q;
  logic [7:0]      left_q;
  logic [ID_W-1:0] id_q;
  int              wait_q;

  assign ar_ready_o = !busy_q;
  assign r_valid_o  = busy_q && wait_q == 0;
  assign r_data_o   = {code_word(addr_q + 4), code_word(addr_q)};
  assign r_last_o   = left_q == 0;
  assign r_id_o     = id_q;
  assign r_resp_o   = 2'b00;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      busy_q   <= 1'b0;
      addr_q   <= '0;
      left_q   <= '0;
      id_q     <= '0;
      wait_q   <= 0;
      bursts_o <= 0;
    end else if (!busy_q) begin
      if (ar_valid_i) begin
        busy_q   <= 1'b1;
        addr_q   <= {ar_addr_i[31:3], 3'b000};
        left_q   <= ar_len_i;
        id_q     <= ar_id_i;
        wait_q   <= int'(LATENCY) - 1;
        bursts_o <= bursts_o + 1;
        assert (ar_size_i == 3'd3 && ar_burst_i == 2'b01);
      end
    end else if (wait_q != 0) begin
      wait_q <= wait_q - 1;
    end else if (r_ready_i) begin
      addr_q <= addr_q + 8;
      left_q <= left_q - 1;
      if (left_q == 0) busy_q <= 1'b0;
    end
  end
endmodule

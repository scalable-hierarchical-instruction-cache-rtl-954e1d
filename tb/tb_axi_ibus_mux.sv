// Self-checking test of the AXI4 instruction bus multiplexer: two masters
// issue random 2-beat read bursts to the L2 model. Checked: ARVALID/address
// stable while waiting, every burst returns to the master that issued it with
// the right data and its own ARID, both masters are served (round-robin), and
// bursts leave with the master index in the top ARID bit.
module tb_axi_ibus_mux;
  import hic_pkg::*;
  import tb_pkg::*;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;      // a real falling edge, so the asynchronous reset acts at once
  logic s_arv [2], s_arr [2], s_rv [2], s_rr [2], s_rl [2];
  addr_t s_ara [2];
  logic [7:0] s_len [2];
  logic [2:0] s_size [2];
  logic [1:0] s_burst [2], s_rresp [2];
  logic [0:0] s_id [2], s_rid [2];
  logic [63:0] s_rd [2];
  logic m_arv, m_arr, m_rv, m_rr, m_rl;
  addr_t m_ara;
  logic [7:0] m_len;
  logic [2:0] m_size;
  logic [1:0] m_burst, m_rresp;
  logic [1:0] m_id, m_rid;
  logic [63:0] m_rd;
  int bursts;
  int checks = 0, failures = 0;

  axi_ibus_mux #(.NB_MST(2), .ID_W(1)) dut (
    .clk_i(clk), .rst_ni(rst_n),
    .s_ar_valid_i(s_arv), .s_ar_ready_o(s_arr), .s_ar_addr_i(s_ara), .s_ar_len_i(s_len),
    .s_ar_size_i(s_size), .s_ar_burst_i(s_burst), .s_ar_id_i(s_id),
    .s_r_valid_o(s_rv), .s_r_ready_i(s_rr), .s_r_data_o(s_rd), .s_r_last_o(s_rl),
    .s_r_id_o(s_rid), .s_r_resp_o(s_rresp),
    .m_ar_valid_o(m_arv), .m_ar_ready_i(m_arr), .m_ar_addr_o(m_ara), .m_ar_len_o(m_len),
    .m_ar_size_o(m_size), .m_ar_burst_o(m_burst), .m_ar_id_o(m_id),
    .m_r_valid_i(m_rv), .m_r_ready_o(m_rr), .m_r_data_i(m_rd), .m_r_last_i(m_rl),
    .m_r_id_i(m_rid), .m_r_resp_i(m_rresp));

  l2_axi_model #(.ID_W(2), .LATENCY(3)) l2 (
    .clk_i(clk), .rst_ni(rst_n),
    .ar_valid_i(m_arv), .ar_ready_o(m_arr), .ar_addr_i(m_ara), .ar_len_i(m_len),
    .ar_size_i(m_size), .ar_burst_i(m_burst), .ar_id_i(m_id),
    .r_valid_o(m_rv), .r_ready_i(m_rr), .r_data_o(m_rd), .r_last_o(m_rl),
    .r_id_o(m_rid), .r_resp_o(m_rresp), .bursts_o(bursts));

  always #5 clk = ~clk;
  initial begin #2000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  // each master: one burst at a time, expected beat address
  bit    busy [2];
  addr_t nxt [2];
  int    done [2];
  for (genvar m = 0; m < 2; m++) begin : g_m
    always @(posedge clk) begin
      if (rst_n) begin
        if (s_arv[m] && s_arr[m]) begin
          checks++;
          if (m_id != {1'(m), s_id[m]}) begin failures++; $display("ARID not extended"); end
          busy[m] <= 1; nxt[m] <= s_ara[m];
        end
        if (s_rv[m] && s_rr[m]) begin
          checks++;
          if (!busy[m] || s_rd[m] !== {code_word(nxt[m] + 4), code_word(nxt[m])} || s_rid[m] != 1'(m)) begin
            failures++; $display("wrong beat to master %0d", m);
          end
          nxt[m] <= nxt[m] + 8;
          if (s_rl[m]) begin busy[m] <= 0; done[m]++; end
        end
      end
    end
  end

  logic prev_wait;
  addr_t prev_addr;
  always @(posedge clk) begin
    if (rst_n && prev_wait) begin checks++; if (!m_arv || m_ara != prev_addr) begin failures++; $display("AR not stable"); end end
    prev_wait <= m_arv && !m_arr; prev_addr <= m_ara;
  end

  initial begin
    for (int m = 0; m < 2; m++) begin
      s_arv[m] = 0; s_ara[m] = 0; s_len[m] = 1; s_size[m] = 3; s_burst[m] = 1; s_id[m] = 1'(m); s_rr[m] = 1;
      busy[m] = 0; done[m] = 0;
    end
    prev_wait = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      for (int m = 0; m < 2; m++) begin
        if (s_arv[m] && ar_taken[m]) s_arv[m] = 0;
        if (!s_arv[m] && !busy[m] && $urandom % 2) begin s_arv[m] = 1; s_ara[m] = {$urandom, 4'h0}; end
      end
    end
    for (int i = 0; i < 30; i++) begin
      @(negedge clk);
      for (int m = 0; m < 2; m++) if (s_arv[m] && ar_taken[m]) s_arv[m] = 0;
    end
    for (int m = 0; m < 2; m++) begin checks++; if (done[m] < 50) begin failures++; $display("master %0d starved", m); end end
    checks++; if (bursts != done[0] + done[1]) begin failures++; $display("burst count"); end
    $display("done=%0d/%0d", done[0], done[1]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  logic ar_taken [2];
  always @(posedge clk) for (int m = 0; m < 2; m++) ar_taken[m] <= s_arv[m] && s_arr[m];
endmodule

// Self-checking test of one L1.5 bank behind the L2 AXI model (latency 8).
// Directed: a cold line is read from L2 as one 2-beat burst and answered when
// the last beat arrives; the same line then hits and is answered in the cycle
// after it was accepted, and back-to-back hits stream at one per cycle.
// Random: requests over 8 KB of code (4x the bank, with lines of this bank
// only), random master ids and transfer ids; every answer must carry the
// line's pattern and the request's ids; counters must add up.
module tb_l15_bank;
  import hic_pkg::*;
  import tb_pkg::*;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;      // a real falling edge, so the asynchronous reset acts at once
  logic req_valid = 0, req_ready, rsp_valid;
  l15_req_t req;
  logic [2:0] req_mid, rsp_mid;
  l15_rsp_t rsp;
  logic ar_valid, ar_ready, r_valid, r_ready, r_last;
  addr_t ar_addr;
  logic [7:0] ar_len;
  logic [2:0] ar_size;
  logic [1:0] ar_burst, r_resp;
  logic [0:0] ar_id, r_id;
  logic [63:0] r_data;
  logic [31:0] c_hit, c_ref;
  int bursts;
  int checks = 0, failures = 0, cycle = 0;

  l15_bank #(.BANK_BYTES(2048), .NB_WAYS(4), .NB_BANKS(2), .MID_W(3), .AXI_ID_W(1)) dut (
    .clk_i(clk), .rst_ni(rst_n),
    .req_valid_i(req_valid), .req_i(req), .req_mid_i(req_mid), .req_ready_o(req_ready),
    .rsp_valid_o(rsp_valid), .rsp_o(rsp), .rsp_mid_o(rsp_mid),
    .ar_valid_o(ar_valid), .ar_ready_i(ar_ready), .ar_addr_o(ar_addr), .ar_len_o(ar_len),
    .ar_size_o(ar_size), .ar_burst_o(ar_burst), .ar_id_o(ar_id),
    .r_valid_i(r_valid), .r_ready_o(r_ready), .r_data_i(r_data), .r_last_i(r_last),
    .r_id_i(r_id), .r_resp_i(r_resp), .cnt_hit_o(c_hit), .cnt_refill_o(c_ref));

  l2_axi_model #(.ID_W(1), .LATENCY(8)) l2 (
    .clk_i(clk), .rst_ni(rst_n),
    .ar_valid_i(ar_valid), .ar_ready_o(ar_ready), .ar_addr_i(ar_addr), .ar_len_i(ar_len),
    .ar_size_i(ar_size), .ar_burst_i(ar_burst), .ar_id_i(ar_id),
    .r_valid_o(r_valid), .r_ready_i(r_ready), .r_data_o(r_data), .r_last_o(r_last),
    .r_id_o(r_id), .r_resp_o(r_resp), .bursts_o(bursts));

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;
  initial begin #2000000; failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  // expected answers, in order (the bank answers in acceptance order)
  l15_req_t exp_r [$];
  logic [2:0] exp_m [$];
  int exp_c [$];
  int last_lat = 0, answers = 0;
  always @(posedge clk) begin
    if (rsp_valid) begin
      checks++; answers++;
      if (exp_r.size() == 0) begin failures++; $display("unexpected answer"); end
      else begin
        if (rsp.data !== code_line(exp_r[0].addr) || rsp.tid != exp_r[0].tid || rsp_mid != exp_m[0]) begin
          failures++; $display("wrong answer for %h", exp_r[0].addr);
        end
        last_lat = cycle - exp_c[0];
        void'(exp_r.pop_front()); void'(exp_m.pop_front()); void'(exp_c.pop_front());
      end
    end
    if (req_valid && req_ready) begin exp_r.push_back(req); exp_m.push_back(req_mid); exp_c.push_back(cycle); end
  end

  task automatic send(addr_t a, int exp_lat);
    @(negedge clk);
    req_valid = 1; req.addr = a; req.tid = TID_FETCH; req_mid = 3'd5;
    do @(posedge clk); while (!req_ready);
    #1 req_valid = 0;
    while (exp_r.size() != 0) @(posedge clk);
    if (exp_lat >= 0) begin
      checks++;
      if (last_lat != exp_lat) begin failures++; $display("latency %0d, expected %0d", last_lat, exp_lat); end
    end
  endtask

  initial begin
    req = '0; req_mid = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // miss: 1 cycle to look up, 1 to present AR, 8 L2 latency, 1 more beat
    send(32'h4000, 11);
    checks++; if (bursts != 1 || c_ref != 1) begin failures++; $display("refill not counted"); end
    send(32'h4000, 1);
    checks++; if (c_hit != 1) begin failures++; $display("hit not counted"); end
    // streaming hits: 0x4000 and 0x4020 (0x4020 missed first)
    send(32'h4020, -1);
    begin
      automatic int t0;
      @(negedge clk); t0 = cycle;
      for (int i = 0; i < 8; i++) begin
        req_valid = 1; req.addr = (i % 2) ? 32'h4020 : 32'h4000; req_mid = 3'(i);
        @(negedge clk);
      end
      req_valid = 0;
      checks++; if (cycle - t0 != 8) begin failures++; $display("hits stalled"); end
      repeat (2) @(posedge clk); #1;
      checks++; if (c_hit != 9) begin failures++; $display("hits do not stream: %0d cycles, %0d hits", cycle - t0, c_hit); end
    end
    repeat (3) @(posedge clk);
    // random part
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      if (!req_valid || last_ready) begin
        req_valid = $urandom % 4 != 0;
        req.addr = 32'h8000 + ((($urandom % 256) * 2) << 4);   // lines of bank 0
        req.tid = tid_e'($urandom % 2); req_mid = 3'($urandom);
      end
      @(posedge clk);
    end
    @(negedge clk); req_valid = 0;
    while (exp_r.size() != 0) @(posedge clk);
    checks++; if (int'(c_hit + c_ref) != answers || int'(c_ref) != bursts) begin failures++; $display("counters do not add up"); end
    $display("answers=%0d hits=%0d refills=%0d", answers, c_hit, c_ref);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  logic last_ready;
  always @(posedge clk) last_ready <= req_ready;
endmodule

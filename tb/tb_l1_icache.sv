// Self-checking test of one private L1 bank (fetch unit, prefetch unit,
// arbiter, TAG/DATA memories) against a behavioural L1.5: requests are granted
// (always in the directed part, randomly later) and answered 2 cycles after the
// grant (plus a random delay later); when a fetch and a prefetch answer would
// meet in one cycle the prefetch answer is dropped, as the interconnect does.
// Directed part: cold miss answered after 3 cycles, line served from the
// prefetch buffer after 1 cycle, wait for an unfinished prefetch, hits after 1
// cycle, probe filtering of a line already present. Random part: sequential
// runs and jumps over 2 KB of code (4x the L1), every line checked, and every
// mechanism required to occur; prefetch is switched off for a final stretch
// and no prefetch may be issued there.
module tb_l1_icache;
  import hic_pkg::*;
  import tb_pkg::*;

  logic clk = 0, rst_n = 1, pf_en = 1;
  initial #1 rst_n = 0;      // a real falling edge, so the asynchronous reset acts at once
  logic fetch_req = 0, fetch_gnt, fetch_valid;
  addr_t fetch_addr = '0;
  line_t fetch_rdata;
  logic req_valid, req_gnt, rsp_valid, rsp_drop;
  l15_req_t req;
  l15_rsp_t rsp;
  logic [31:0] c_hit, c_miss, c_pfhit, c_wup, c_pfiss, c_pffilt;
  int checks = 0, failures = 0;
  int cycle = 0;

  l1_icache dut (
    .clk_i(clk), .rst_ni(rst_n), .pf_enable_i(pf_en),
    .fetch_req_i(fetch_req), .fetch_addr_i(fetch_addr), .fetch_gnt_o(fetch_gnt),
    .fetch_valid_o(fetch_valid), .fetch_rdata_o(fetch_rdata),
    .req_valid_o(req_valid), .req_o(req), .req_gnt_i(req_gnt),
    .rsp_valid_i(rsp_valid), .rsp_i(rsp), .rsp_drop_i(rsp_drop),
    .cnt_hit_o(c_hit), .cnt_miss_o(c_miss), .cnt_pf_hit_o(c_pfhit), .cnt_wup_o(c_wup),
    .cnt_pf_issued_o(c_pfiss), .cnt_pf_filtered_o(c_pffilt));

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;
  initial begin #2000000; failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  // ---------------- behavioural L1.5 ----------------
  bit   rand_mode = 0;
  int   due [$];
  addr_t paddr [$];
  tid_e ptid [$];
  int   drops = 0;
  int   extra = 0;

  assign req_gnt = rand_mode ? gnt_rand : 1'b1;
  logic gnt_rand = 1;
  always @(negedge clk) gnt_rand = ($urandom % 4) != 0;

  always @(posedge clk) begin
    if (req_valid && req_gnt) begin
      due.push_back(cycle + 2 + (rand_mode ? int'($urandom % 4) : extra));
      paddr.push_back(req.addr);
      ptid.push_back(req.tid);
      checks++;
      if (req.addr[3:0] != 0) begin failures++; $display("unaligned request %h tid %0d at %0t", req.addr, req.tid, $time); end
    end
  end

  // drive the response of the current cycle just after the clock edge
  always @(posedge clk) begin
    #1;
    rsp_valid = 0; rsp_drop = 0; rsp = '0;
    for (int i = due.size() - 1; i >= 0; i--) begin
      if (due[i] == cycle) begin
        if (!rsp_valid || ptid[i] == TID_FETCH) begin
          if (rsp_valid) begin rsp_drop = 1; drops++; end
          rsp_valid = 1; rsp.data = code_line(paddr[i]); rsp.tid = ptid[i];
        end else begin
          rsp_drop = 1; drops++;
        end
        due.delete(i); paddr.delete(i); ptid.delete(i);
      end
    end
  end

  // ---------------- response checker ----------------
  addr_t exp_q [$];
  int    acc_cycle [$];
  int    last_lat = -1;
  int    responses = 0;
  always @(posedge clk) begin
    if (fetch_valid) begin
      checks++;
      responses++;
      if (exp_q.size() == 0) begin failures++; $display("unexpected response"); end
      else begin
        if (fetch_rdata !== code_line(exp_q[0])) begin
          failures++; $display("data mismatch for %h", exp_q[0]);
        end
        last_lat = cycle - acc_cycle[0];
        void'(exp_q.pop_front()); void'(acc_cycle.pop_front());
      end
    end
    if (fetch_req && fetch_gnt) begin exp_q.push_back(line_addr(fetch_addr)); acc_cycle.push_back(cycle); end
  end

  task automatic fetch_one(addr_t a, int exp_lat);
    @(negedge clk);
    fetch_req = 1; fetch_addr = a;
    do @(posedge clk); while (!fetch_gnt);
    #1 fetch_req = 0;
    while (exp_q.size() != 0) @(posedge clk);
    if (exp_lat >= 0) begin
      checks++;
      if (last_lat != exp_lat) begin failures++; $display("latency %0d for %h, expected %0d", last_lat, a, exp_lat); end
    end
  endtask

  task automatic idle(int n); repeat (n) @(posedge clk); endtask

  initial begin
    rsp_valid = 0; rsp_drop = 0; rsp = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // cold miss, hit in L1.5: 3 cycles
    fetch_one(32'h1000, 3);
    idle(6);
    // next line was prefetched into the buffer: 1 cycle, counted as buffer hit
    extra = 3;   // slow L1.5 from here, so the next prefetch is still in flight
    fetch_one(32'h1010, 1);
    checks++; if (c_pfhit != 1) begin failures++; $display("pf hit count %0d", c_pfhit); end
    // the fetch right after: prefetch of 0x1020 in flight -> wait for it, no refill
    begin
      automatic logic [31:0] m = c_miss;
      fetch_one(32'h1020, -1);
      checks++; if (c_wup != 1 || c_miss != m) begin failures++; $display("no wait-for-prefetch"); end
      checks++; if (last_lat > 4) begin failures++; $display("waited %0d cycles", last_lat); end
    end
    extra = 0;
    idle(8);
    // hits: 1 cycle
    fetch_one(32'h1000, 1);
    fetch_one(32'h1010, 1);
    idle(4);
    checks++; if (c_pffilt == 0) begin failures++; $display("no probe filtering"); end
    // ---------------- random part ----------------
    rand_mode = 1;
    begin
      automatic addr_t pc = 32'h1000;
      for (int i = 0; i < 3000; i++) begin
        @(negedge clk);
        fetch_req = ($urandom % 5) != 0;
        fetch_addr = pc;
        @(posedge clk);
        if (fetch_req && fetch_gnt) begin
          if ($urandom % 8 == 0) pc = 32'h1000 + (($urandom % 128) << 4);
          else pc = (pc + 16 >= 32'h1800) ? 32'h1000 : pc + 16;
        end
        #1 fetch_req = 0;
      end
    end
    // prefetch switched off: no new prefetch
    @(negedge clk); fetch_req = 0;
    idle(12);
    pf_en = 0;
    idle(2);
    begin
      automatic logic [31:0] iss = c_pfiss;
      for (int i = 0; i < 40; i++) fetch_one(32'h2000 + 16 * i, -1);
      checks++; if (c_pfiss != iss) begin failures++; $display("prefetch issued while disabled"); end
    end
    idle(10);
    $display("hits=%0d misses=%0d pf_hits=%0d wup=%0d pf_issued=%0d pf_filtered=%0d drops=%0d resp=%0d",
             c_hit, c_miss, c_pfhit, c_wup, c_pfiss, c_pffilt, drops, responses);
    checks++; if (c_hit == 0 || c_miss == 0 || c_pfhit == 0 || c_wup == 0 || c_pffilt == 0) begin failures++; $display("mechanism missing"); end
    checks++; if (drops == 0) begin failures++; $display("no dropped prefetch"); end
    checks++; if (exp_q.size() != 0) begin failures++; $display("outstanding fetches"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

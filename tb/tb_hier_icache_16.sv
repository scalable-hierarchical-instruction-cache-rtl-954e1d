// Scaling test of the two-level instruction cache: a 16-core cluster with the
// L1 -> L1.5 request buffer switched on, the two changes suggested for larger
// clusters (a 16 x 2 interconnect, one more bit of L1 number, one more cycle
// on every L1.5 request). Sixteen core models run the same program, first a
// 1.5 KB loop (fits the L1.5, not the L1) and then the same loop with random
// taken branches and core stalls; every instruction word is checked against
// the program, and hits, misses, prefetch hits and L1.5 hits must all occur.
// The L1 miss that hits in the L1.5 must now cost 4 cycles at the L1 port
// (3 plus the request register), checked with core 0 running alone
// without prefetching, where every L1 miss is a demand refill.
module tb_hier_icache_16;
  import hic_pkg::*;
  import tb_pkg::*;
  localparam int N = 16;
  localparam addr_t BASE = 32'h1C04_0000;

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;      // a real falling edge, so the asynchronous reset acts at once
  logic [N-1:0] pf_en = '1;
  logic  branch [N], ivalid [N], iready [N];
  addr_t target [N], iaddr [N];
  logic [31:0] irdata [N];
  logic ar_valid, ar_ready, r_valid, r_ready, r_last;
  addr_t ar_addr;
  logic [7:0] ar_len;
  logic [2:0] ar_size;
  logic [1:0] ar_burst, r_resp, ar_id, r_id;
  logic [63:0] r_data;
  logic [31:0] c_hit [N], c_miss [N], c_pfhit [N], c_wup [N], c_pfiss [N], c_pffilt [N], c_ring [N];
  logic [31:0] c_l15hit [2], c_l15ref [2];
  int bursts;
  int checks = 0, failures = 0, cycle = 0;

  hier_icache #(.NB_CORES(N), .REQ_BUF(1'b1)) dut (
    .clk_i(clk), .rst_ni(rst_n), .boot_addr_i(BASE), .prefetch_en_i(pf_en),
    .branch_i(branch), .branch_target_i(target),
    .instr_valid_o(ivalid), .instr_rdata_o(irdata), .instr_addr_o(iaddr), .instr_ready_i(iready),
    .axi_ar_valid_o(ar_valid), .axi_ar_ready_i(ar_ready), .axi_ar_addr_o(ar_addr),
    .axi_ar_len_o(ar_len), .axi_ar_size_o(ar_size), .axi_ar_burst_o(ar_burst), .axi_ar_id_o(ar_id),
    .axi_r_valid_i(r_valid), .axi_r_ready_o(r_ready), .axi_r_data_i(r_data),
    .axi_r_last_i(r_last), .axi_r_id_i(r_id), .axi_r_resp_i(r_resp),
    .l1_hit_cnt_o(c_hit), .l1_miss_cnt_o(c_miss), .l1_pf_hit_cnt_o(c_pfhit), .l1_wup_cnt_o(c_wup),
    .l1_pf_issued_cnt_o(c_pfiss), .l1_pf_filtered_cnt_o(c_pffilt), .ring_hit_cnt_o(c_ring),
    .l15_hit_cnt_o(c_l15hit), .l15_refill_cnt_o(c_l15ref));

  l2_axi_model #(.ID_W(2), .LATENCY(13)) l2 (
    .clk_i(clk), .rst_ni(rst_n),
    .ar_valid_i(ar_valid), .ar_ready_o(ar_ready), .ar_addr_i(ar_addr), .ar_len_i(ar_len),
    .ar_size_i(ar_size), .ar_burst_i(ar_burst), .ar_id_i(ar_id),
    .r_valid_o(r_valid), .r_ready_i(r_ready), .r_data_o(r_data), .r_last_o(r_last),
    .r_id_o(r_id), .r_resp_o(r_resp), .bursts_o(bursts));

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;
  initial begin #5000000; failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  localparam int BODY = 1536;
  int  iters = 3, br_pct = 0, stall_pct = 0;
  int  passes [N];
  bit  done [N], jump [N], restart = 0;
  logic [N-1:0] active = '1;
  addr_t pc [N], jtgt [N];

  for (genvar c = 0; c < N; c++) begin : g_cpu
    always @(negedge clk) begin
      branch[c] = 0; target[c] = BASE; iready[c] = 0;
      if (!rst_n) begin
        pc[c] = BASE; jump[c] = 0; passes[c] = 0; done[c] = 0;
      end else if (restart) begin
        if (active[c]) begin
          branch[c] = 1; pc[c] = BASE; jump[c] = 0; passes[c] = 0; done[c] = 0;
        end
      end else if (jump[c]) begin
        branch[c] = 1; target[c] = jtgt[c]; pc[c] = jtgt[c]; jump[c] = 0;
      end else if (!done[c]) iready[c] = ($urandom_range(99) >= stall_pct);
      #1;
      if (iready[c] && ivalid[c]) begin
        checks++;
        if (iaddr[c] != pc[c] || irdata[c] !== code_word(pc[c])) begin
          failures++;
          if (failures < 10) $display("core %0d: got %h at %h, expected address %h", c, irdata[c], iaddr[c], pc[c]);
        end
        if (pc[c] == BASE + BODY - 4) begin
          passes[c]++; jtgt[c] = BASE;
          if (passes[c] >= iters) done[c] = 1; else jump[c] = 1;
        end else if ($urandom_range(99) < br_pct) begin
          jump[c] = 1; jtgt[c] = BASE + 4 * addr_t'($urandom_range(BODY / 4 - 1));
        end else pc[c] = pc[c] + 4;
      end
    end
  end

  // L1 port latency of core 0's misses while it runs alone (shortest seen)
  int acc_t = -1, miss_lat = 1000;
  always @(posedge clk) begin
    if (dut.g_core[0].i_l1.fetch_req_i && dut.g_core[0].i_l1.fetch_gnt_o) acc_t <= cycle;
    if (active == 1 && dut.g_core[0].i_l1.fetch_valid_o &&
        dut.g_core[0].i_l1.i_fetch.state_q == dut.g_core[0].i_l1.i_fetch.REFILL_WAIT &&
        cycle - acc_t < miss_lat)
      miss_lat <= cycle - acc_t;
  end

  function automatic int unsigned sum(logic [31:0] v [N]);
    int unsigned s = 0;
    for (int c = 0; c < N; c++) s += v[c];
    return s;
  endfunction

  task automatic wait_done();
    forever begin
      automatic bit all = 1;
      @(posedge clk);
      for (int c = 0; c < N; c++) if (!done[c]) all = 0;
      if (all) break;
    end
  endtask

  initial begin
    int t0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    t0 = cycle;
    wait_done();
    $display("16 cores, 1.5 KB loop, 3 passes: %0d cycles", cycle - t0);
    @(posedge clk); restart = 1; br_pct = 6; stall_pct = 20; iters = 4;
    @(posedge clk); restart = 0;
    t0 = cycle;
    wait_done();
    $display("16 cores, branches and stalls: %0d cycles", cycle - t0);
    // core 0 alone without prefetching: every L1 miss is a demand refill
    @(posedge clk); restart = 1; active = 1; pf_en[0] = 0; br_pct = 0; stall_pct = 0; iters = 2;
    @(posedge clk); restart = 0;
    wait_done();
    $display("L1 hits=%0d misses=%0d pf_hits=%0d wup=%0d filtered=%0d, L1.5 hits=%0d refills=%0d, ring hits=%0d",
             sum(c_hit), sum(c_miss), sum(c_pfhit), sum(c_wup), sum(c_pffilt),
             c_l15hit[0] + c_l15hit[1], c_l15ref[0] + c_l15ref[1], sum(c_ring));
    checks++; if (sum(c_hit) == 0 || sum(c_miss) == 0 || sum(c_pfhit) == 0) begin failures++; $display("L1 events missing"); end
    checks++; if (c_l15hit[0] + c_l15hit[1] == 0) begin failures++; $display("no L1.5 hit"); end
    checks++; if (int'(c_l15ref[0] + c_l15ref[1]) != bursts) begin failures++; $display("refills and bursts differ"); end
    checks++; if (miss_lat != 4) begin failures++; $display("L1 miss / L1.5 hit took %0d cycles, expected 4", miss_lat); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

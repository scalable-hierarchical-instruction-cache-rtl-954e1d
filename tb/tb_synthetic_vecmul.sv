// The parallel synthetic benchmark run on the whole cache at its default
// size: a vector multiplication of 8192 elements split evenly over the 8
// cores, its loop unrolled STEP times (STEP = 32 ... 1024), so that each core
// runs 1024/STEP passes over a loop body of 3 x STEP instructions (0.375 KB to
// 12 KB) and every core executes the same 3072 body instructions in all six
// versions. Only the instruction stream matters here: each core model takes
// one instruction per cycle unless the cache stalls it, checks every word it
// receives against the program, and jumps back at the end of the body.
// Every version runs from reset (cold caches) with the prefetcher off and on;
// the test reports cycles, throughput relative to the 0.375 KB version, and
// the L2 refill count (the two numbers an energy estimate needs), and checks:
// bodies that fit the 4 KB L1.5 are refilled only once, larger ones refill
// again on every pass, and prefetching shortens every version whose body
// outgrows the 512 B L1 but fits the L1.5.
module tb_synthetic_vecmul;
  import hic_pkg::*;
  import tb_pkg::*;
  localparam int N = 8;
  localparam addr_t BASE = 32'h1C00_8000;

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;      // a real falling edge, so the asynchronous reset acts at once
  logic [N-1:0] pf_en;
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

  hier_icache dut (
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
  initial begin #20000000; failures++; $display("watchdog"); $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  int    body = 384;        // loop body in bytes
  int    iters = 32;        // passes per core
  int    passes [N];
  bit    done [N], jump [N];
  addr_t pc [N];

  for (genvar c = 0; c < N; c++) begin : g_cpu
    always @(negedge clk) begin
      branch[c] = 0; target[c] = BASE; iready[c] = 0;
      if (!rst_n) begin
        pc[c] = BASE; jump[c] = 0; passes[c] = 0; done[c] = 0;
      end else if (jump[c]) begin
        branch[c] = 1; pc[c] = BASE; jump[c] = 0;
      end else if (!done[c]) iready[c] = 1;
      #1;
      if (iready[c] && ivalid[c]) begin
        checks++;
        if (iaddr[c] != pc[c] || irdata[c] !== code_word(pc[c])) begin
          failures++;
          if (failures < 10) $display("core %0d: got %h at %h, expected address %h", c, irdata[c], iaddr[c], pc[c]);
        end
        if (pc[c] == BASE + addr_t'(body) - 4) begin
          passes[c]++;
          if (passes[c] >= iters) done[c] = 1; else jump[c] = 1;
        end else pc[c] = pc[c] + 4;
      end
    end
  end

  task automatic run(int step, bit pf, output int cycles, output int refills);
    int t0;
    body = 3 * 4 * step; iters = 1024 / step; pf_en = {N{pf}};
    rst_n = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    t0 = cycle;
    forever begin
      automatic bit all = 1;
      @(posedge clk);
      for (int c = 0; c < N; c++) if (!done[c]) all = 0;
      if (all) break;
    end
    cycles = cycle - t0;
    repeat (60) @(posedge clk);          // outstanding prefetches finish
    refills = int'(c_l15ref[0] + c_l15ref[1]);
  endtask

  initial begin
    automatic int steps [6] = '{32, 64, 128, 256, 512, 1024};
    automatic int cyc [2][6], ref_n [2][6];
    pf_en = '0;
    for (int p = 0; p < 2; p++)
      for (int i = 0; i < 6; i++) begin
        automatic int lines;
        run(steps[i], p[0], cyc[p][i], ref_n[p][i]);
        lines = 3 * 4 * steps[i] / 16;
        $display("STEP %4d, body %5d B, prefetch %s: %6d cycles, throughput %0.3f of the 0.375 KB version, %0d L2 refills (%0d lines)",
                 steps[i], 12 * steps[i], p ? "on " : "off", cyc[p][i],
                 real'(cyc[p][0]) / real'(cyc[p][i]), ref_n[p][i], lines);
        checks++;
        // a body that fits the L1.5 is refilled once (plus the few lines
        // fetched or prefetched beyond its end); a larger one on every pass
        if (12 * steps[i] <= 4096 && ref_n[p][i] > lines + 4) begin
          failures++; $display("  body fits the L1.5 but is refilled more than once");
        end
        checks++;
        if (12 * steps[i] > 4096 && ref_n[p][i] < (lines * (1024 / steps[i])) / 2) begin
          failures++; $display("  body larger than the L1.5 but few refills");
        end
        checks++;
        if (ref_n[p][i] < lines) begin failures++; $display("  fewer refills than lines"); end
      end
    for (int i = 1; i < 4; i++) begin
      checks++;
      if (cyc[1][i] >= cyc[0][i]) begin
        failures++; $display("prefetching did not shorten the %0d B version", 12 * steps[i]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// End-to-end test of the whole two-level instruction cache at its default
// (paper) configuration: 8 cores, 8 x 512 B L1, 2 x 2048 B L1.5, prefetch,
// ring FIFO and L0 buffers, behind an L2 model whose latency (13 cycles) makes
// an L1 + L1.5 miss cost 19 cycles at the L1 port, the refill time the paper
// lists for its hierarchical configurations.
// Eight core models run the same program (SPMD): a loop over a code body of a
// given size, jumping back to its start after its last word. Every word each
// core receives is checked against the expected program order and pattern.
// Phases: (1) 0.75 KB loop without and then with prefetching (prefetching must
// cut L1 misses and cycles); (2) the synthetic loop bodies of the paper's
// benchmark, 0.375 to 12 KB, with prefetching, reporting cycles per
// instruction per core after one warm-up pass and checking which level the
// body fits in; (3) control code with random short and far taken branches and
// random core stalls, where short forward branches hit in the ring FIFO;
// (4) each core alone on a 5 KB body with branches, where a prefetch answer
// waiting for an L2 refill can meet a demand answer from the other bank in
// the same cycle and is dropped; (5) half the cores with prefetching off.
// Every mechanism must have happened at least once: L1 hit/miss, prefetch
// buffer hit, wait for unfinished prefetch, probe filtering, dropped prefetch
// answer, L1.5 bank conflict, L1.5 hit and refill, ring hit and flush.
module tb_hier_icache;
  import hic_pkg::*;
  import tb_pkg::*;
  localparam int N = 8;
  localparam addr_t BOOT = 32'h1C00_0000;

  logic clk = 0, rst_n = 0;
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
    .clk_i(clk), .rst_ni(rst_n), .boot_addr_i(BOOT), .prefetch_en_i(pf_en),
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

  // ---------------- program and core models ----------------
  addr_t base = BOOT;
  int    body = 768;        // loop body in bytes
  int    iters = 1;         // passes each core must complete
  bit    go = 0;            // phase running
  int    passes [N];
  bit    done [N];
  int    br_pct = 0;        // chance (percent) that a word is a taken branch
  int    stall_pct = 0;     // chance (percent) that a core stalls in a cycle
  addr_t pc [N], jtgt [N];
  bit    jump [N], start [N];
  int    flushes = 0, conflicts = 0, drops = 0;

  for (genvar c = 0; c < N; c++) begin : g_cpu
    always @(negedge clk) begin
      branch[c] = 0; iready[c] = 0;
      if (start[c]) begin
        branch[c] = 1; target[c] = base; pc[c] = base; start[c] = 0;
      end else if (jump[c]) begin
        branch[c] = 1; target[c] = jtgt[c]; pc[c] = jtgt[c]; jump[c] = 0;
      end else if (go && !done[c]) begin
        iready[c] = ($urandom_range(99) >= stall_pct);
      end
      #1;
      if (branch[c] && !dut.g_core[c].i_ring.ring_hit) flushes++;
      if (iready[c] && ivalid[c]) begin
        checks++;
        if (iaddr[c] != pc[c] || irdata[c] !== code_word(pc[c])) begin
          failures++;
          if (failures < 10) $display("core %0d: got %h at %h, expected address %h", c, irdata[c], iaddr[c], pc[c]);
        end
        if (pc[c] == base + addr_t'(body) - 4) begin
          jump[c] = 1; jtgt[c] = base; passes[c]++;
          if (passes[c] >= iters) done[c] = 1;
        end else if ($urandom_range(99) < br_pct) begin
          // short forward branch (can hit in the ring FIFO) or a far one
          jump[c] = 1;
          if ($urandom_range(1) == 0 && pc[c] + 12 < base + addr_t'(body)) jtgt[c] = pc[c] + 12;
          else jtgt[c] = base + 4 * addr_t'($urandom_range(body / 4 - 1));
        end else pc[c] = pc[c] + 4;
      end
    end
  end

  always @(posedge clk) begin
    for (int c = 0; c < N; c++) begin
      if (dut.ic_req_valid[c] && !dut.ic_req_gnt[c]) conflicts++;
      if (dut.ic_rsp_drop[c]) drops++;
    end
  end

  function automatic int unsigned sum(logic [31:0] v [N]);
    int unsigned s = 0;
    for (int c = 0; c < N; c++) s += v[c];
    return s;
  endfunction

  // run every core over the loop for n passes; returns cycles taken
  task automatic run_phase(addr_t b, int bytes, int n, output int cycles, input logic [N-1:0] active = '1);
    int t0;
    base = b; body = bytes; iters = n;
    for (int c = 0; c < N; c++) begin passes[c] = 0; done[c] = !active[c]; end
    @(posedge clk);
    for (int c = 0; c < N; c++) if (active[c]) start[c] = 1;
    t0 = cycle;
    go = 1;
    forever begin
      automatic bit all = 1;
      @(posedge clk);
      for (int c = 0; c < N; c++) if (!done[c]) all = 0;
      if (all) break;
    end
    go = 0;
    cycles = cycle - t0;
    repeat (80) @(posedge clk);     // let outstanding refills finish
  endtask

  // measure the first L1 fetch latency (cold: L1 and L1.5 miss, L2 refill)
  int first_acc = -1, first_lat = -1;
  always @(posedge clk) begin
    if (first_acc < 0 && dut.g_core[0].i_l1.fetch_req_i && dut.g_core[0].i_l1.fetch_gnt_o) first_acc = cycle;
    else if (first_acc >= 0 && first_lat < 0 && dut.g_core[0].i_l1.fetch_valid_o) first_lat = cycle - first_acc;
  end

  initial begin
    automatic int cyc_off, cyc_on, cyc;
    automatic int unsigned m0, m1, m2, r0;
    for (int c = 0; c < N; c++) begin
      jtgt[c] = BOOT; pc[c] = BOOT; jump[c] = 0; start[c] = 0; passes[c] = 0; done[c] = 1;
      branch[c] = 0; target[c] = 0; iready[c] = 0;
    end
    pf_en = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // ---- phase 1: 0.75 KB loop, prefetch off then on (L1.5 warm in both) ----
    run_phase(BOOT, 768, 1, cyc);                  // warm the L1.5
    checks++; if (first_lat != 19) begin failures++; $display("cold refill took %0d cycles, expected 19", first_lat); end
    m0 = sum(c_miss);
    run_phase(BOOT, 768, 4, cyc_off);
    m1 = sum(c_miss);
    pf_en = '1;
    run_phase(BOOT, 768, 4, cyc_on);
    m2 = sum(c_miss);
    $display("0.75 KB loop, 4 passes: prefetch off %0d cycles %0d L1 misses, on %0d cycles %0d L1 misses",
             cyc_off, m1 - m0, cyc_on, m2 - m1);
    checks++; if (!(m2 - m1 < m1 - m0) || !(cyc_on < cyc_off)) begin failures++; $display("prefetching did not help"); end
    // ---- phase 2: the synthetic benchmark's loop bodies ----
    begin
      automatic int sizes [6] = '{384, 768, 1536, 3072, 6144, 12288};
      for (int i = 0; i < 6; i++) begin
        automatic addr_t b = 32'h1C10_0000 + addr_t'(i) * 32'h0001_0000;
        automatic int unsigned ma, mb, ra, rb;
        run_phase(b, sizes[i], 1, cyc);            // warm-up pass
        ma = sum(c_miss) + sum(c_pfhit); ra = c_l15ref[0] + c_l15ref[1];
        run_phase(b, sizes[i], 2, cyc);
        mb = sum(c_miss) + sum(c_pfhit); rb = c_l15ref[0] + c_l15ref[1];
        $display("loop body %0d B: %0.3f cycles/instr per core, L1 misses and prefetch buffer hits %0d, L1.5 refills %0d",
                 sizes[i], real'(cyc) / real'(2 * sizes[i] / 4), mb - ma, rb - ra);
        // the fetched lines are 2 passes x 8 cores x body/16; with
        // pseudo-random replacement a body that fits still loses a few lines
        // to stale ones, so "fits" means under 1/8 of them miss, and "does
        // not fit" means over 1/2 of the L1.5 lines (one per line, shared) refill
        checks++;
        if (sizes[i] <= 384 && (mb - ma) * 8 > 2 * 8 * sizes[i] / 16) begin failures++; $display("body fits L1 but misses"); end
        checks++;
        if (sizes[i] > 512 && (mb - ma) * 2 < 2 * 8 * sizes[i] / 16) begin failures++; $display("body larger than L1 but few misses"); end
        checks++;
        if (sizes[i] <= 3072 && (rb - ra) * 8 > 2 * sizes[i] / 16) begin failures++; $display("body fits L1.5 but refills"); end
        checks++;
        if (sizes[i] > 4096 && (rb - ra) * 2 < 2 * sizes[i] / 16) begin failures++; $display("body larger than L1.5 but few refills"); end
      end
    end
    // ---- phase 3: control code, random taken branches and core stalls ----
    r0 = sum(c_ring);
    br_pct = 8; stall_pct = 20;
    run_phase(32'h1C20_0000, 2048, 6, cyc);
    $display("control code, 2 KB body: %0d cycles", cyc);
    checks++; if (sum(c_ring) == r0) begin failures++; $display("ring FIFO never hit"); end
    // each core alone on a body larger than the L1.5: a prefetch that misses in
    // the L1.5 can return in the same cycle as a demand fetch (after a far
    // branch) that hits in the other bank, so the prefetch answer is dropped
    stall_pct = 40;
    for (int c = 0; c < N; c++) run_phase(32'h1C30_0000 + 32'h0002_0000 * addr_t'(c), 5120, 20, cyc, 8'(1 << c));
    pf_en = 8'h0F;                      // half of the cores without prefetching
    run_phase(32'h1C20_0000, 1024, 6, cyc);
    br_pct = 0; stall_pct = 0;
    // ---- mechanisms ----
    $display("L1 hits=%0d misses=%0d pf_hits=%0d wup=%0d pf_issued=%0d pf_filtered=%0d",
             sum(c_hit), sum(c_miss), sum(c_pfhit), sum(c_wup), sum(c_pfiss), sum(c_pffilt));
    $display("L1.5 hits=%0d refills=%0d L2 bursts=%0d bank conflicts=%0d dropped prefetches=%0d ring hits=%0d flushes=%0d",
             c_l15hit[0] + c_l15hit[1], c_l15ref[0] + c_l15ref[1], bursts, conflicts, drops, sum(c_ring), flushes);
    checks++; if (sum(c_hit) == 0)    begin failures++; $display("no L1 hit"); end
    checks++; if (sum(c_miss) == 0)   begin failures++; $display("no L1 miss"); end
    checks++; if (sum(c_pfhit) == 0)  begin failures++; $display("no prefetch buffer hit"); end
    checks++; if (sum(c_wup) == 0)    begin failures++; $display("no wait for prefetch"); end
    checks++; if (sum(c_pffilt) == 0) begin failures++; $display("no probe filtering"); end
    checks++; if (drops == 0)         begin failures++; $display("no dropped prefetch"); end
    checks++; if (conflicts == 0)     begin failures++; $display("no bank conflict"); end
    checks++; if (c_l15hit[0] + c_l15hit[1] == 0) begin failures++; $display("no L1.5 hit"); end
    checks++; if (int'(c_l15ref[0] + c_l15ref[1]) != bursts || bursts == 0) begin failures++; $display("refills and L2 bursts differ"); end
    checks++; if (flushes == 0)       begin failures++; $display("no ring flush"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

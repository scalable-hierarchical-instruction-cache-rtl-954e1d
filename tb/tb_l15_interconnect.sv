// Self-checking test of the 8 x 2 L1.5 interconnect. Eight L1 models each keep
// at most one fetch and one prefetch outstanding at random line addresses; two
// bank models accept with random readiness and answer 1 to 4 cycles later, in order with the
// line's pattern, the master id and the transfer id. Checked: every granted
// request reaches the bank its address selects, at most one grant per bank and
// cycle, every answer reaches the right L1 with the right data, an answer is
// only lost when a fetch answer for the same L1 arrives in the same cycle and
// then it is the prefetch that is dropped, and every L1 is served (no
// starvation under round-robin).
module tb_l15_interconnect;
  import hic_pkg::*;
  import tb_pkg::*;
  localparam int N = 8, M = 2;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;      // a real falling edge, so the asynchronous reset acts at once
  logic     req_valid [N], req_gnt [N], rsp_valid [N], rsp_drop [N];
  l15_req_t req [N];
  l15_rsp_t rsp [N];
  logic     b_valid [M], b_ready [M], b_rvalid [M];
  l15_req_t b_req [M];
  logic [2:0] b_mid [M], b_rmid [M];
  l15_rsp_t b_rsp [M];
  int checks = 0, failures = 0;

  l15_interconnect #(.NB_L1(N), .NB_BANKS(M)) dut (
    .clk_i(clk), .rst_ni(rst_n),
    .req_valid_i(req_valid), .req_i(req), .req_gnt_o(req_gnt),
    .rsp_valid_o(rsp_valid), .rsp_o(rsp), .rsp_drop_o(rsp_drop),
    .bank_req_valid_o(b_valid), .bank_req_o(b_req), .bank_req_mid_o(b_mid), .bank_req_ready_i(b_ready),
    .bank_rsp_valid_i(b_rvalid), .bank_rsp_i(b_rsp), .bank_rsp_mid_i(b_rmid));

  always #5 clk = ~clk;
  initial begin #2000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  // per L1: outstanding fetch / prefetch
  bit    out_f [N], out_p [N];
  addr_t a_f [N], a_p [N];
  int    served [N];
  int    drops = 0, collisions = 0;
  // bank pipeline registers (the model answers one cycle after acceptance)
  logic     s_v [M];
  l15_req_t s_r [M];
  logic [2:0] s_m [M];
  l15_req_t q_r [M][$];
  logic [2:0] q_m [M][$];
  int q_t [M][$];

  always_comb for (int b = 0; b < M; b++) begin
    b_rvalid[b] = s_v[b]; b_rmid[b] = s_m[b];
    b_rsp[b].data = code_line(s_r[b].addr); b_rsp[b].tid = s_r[b].tid;
  end

  initial begin
    for (int i = 0; i < N; i++) begin out_f[i] = 0; out_p[i] = 0; served[i] = 0; req_valid[i] = 0; req[i] = '0; end
    for (int b = 0; b < M; b++) begin s_v[b] = 0; s_r[b] = '0; s_m[b] = 0; b_ready[b] = 1; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int cyc = 0; cyc < 4000; cyc++) begin
      @(negedge clk);
      for (int i = 0; i < N; i++) begin
        // hold a request until granted; else maybe start a new one
        if (!req_valid[i]) begin
          if (!out_f[i] && $urandom % 3 == 0) begin
            req_valid[i] = 1; req[i].addr = {$urandom, 4'h0}; req[i].addr[31:16] = 0; req[i].tid = TID_FETCH;
          end else if (!out_p[i] && $urandom % 3 == 0) begin
            req_valid[i] = 1; req[i].addr = {$urandom, 4'h0}; req[i].addr[31:16] = 0; req[i].tid = TID_PREFETCH;
          end
        end
      end
      for (int b = 0; b < M; b++) b_ready[b] = $urandom % 4 != 0 && q_r[b].size() < 4;
      #1;
      // request side checks
      for (int b = 0; b < M; b++) if (b_valid[b] && b_ready[b]) begin
        checks++;
        if (int'(b_req[b].addr[4]) != b || !req_valid[b_mid[b]] || req[b_mid[b]] != b_req[b]) begin
          failures++; $display("misrouted request to bank %0d", b);
        end
      end
      // response side checks
      for (int i = 0; i < N; i++) begin
        automatic int hits = 0;
        automatic bit has_f = 0;
        for (int b = 0; b < M; b++) if (s_v[b] && s_m[b] == 3'(i)) begin hits++; if (s_r[b].tid == TID_FETCH) has_f = 1; end
        if (hits == 2) collisions++;
        checks++;
        if ((hits > 0) != rsp_valid[i] || (hits == 2) != rsp_drop[i]) begin failures++; $display("response valid/drop wrong for %0d", i); end
        if (rsp_valid[i]) begin
          automatic addr_t a = (rsp[i].tid == TID_FETCH) ? a_f[i] : a_p[i];
          checks++;
          if (hits == 2 && rsp[i].tid != TID_FETCH) begin failures++; $display("fetch answer dropped"); end
          if (rsp[i].data !== code_line(a)) begin failures++; $display("wrong data for %0d", i); end
        end
      end
      @(posedge clk);
      for (int i = 0; i < N; i++) begin
        if (rsp_valid[i]) begin
          if (rsp[i].tid == TID_FETCH) out_f[i] = 0; else out_p[i] = 0;
          served[i]++;
        end
        if (rsp_drop[i]) begin out_p[i] = 0; drops++; end
      end
      for (int b = 0; b < M; b++) begin
        if (s_v[b]) begin void'(q_r[b].pop_front()); void'(q_m[b].pop_front()); void'(q_t[b].pop_front()); end
        if (b_valid[b] && b_ready[b]) begin
          q_r[b].push_back(b_req[b]); q_m[b].push_back(b_mid[b]); q_t[b].push_back(cyc + 1 + int'($urandom % 4));
        end
        s_v[b] = q_r[b].size() > 0 && q_t[b][0] <= cyc + 1;
        if (s_v[b]) begin s_r[b] = q_r[b][0]; s_m[b] = q_m[b][0]; end
      end
      for (int i = 0; i < N; i++) if (req_valid[i] && req_gnt[i]) begin
        if (req[i].tid == TID_FETCH) begin out_f[i] = 1; a_f[i] = req[i].addr; end
        else begin out_p[i] = 1; a_p[i] = req[i].addr; end
        #0 req_valid[i] = 0;
      end
    end
    for (int i = 0; i < N; i++) begin checks++; if (served[i] < 50) begin failures++; $display("L1 %0d starved", i); end end
    checks++; if (drops == 0) begin failures++; $display("no collision seen"); end
    $display("collisions=%0d drops=%0d", collisions, drops);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

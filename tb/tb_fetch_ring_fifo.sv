// Self-checking test of the fetch ring FIFO. A behavioural L0 grants randomly
// and answers words in order 1 to 3 cycles after the grant, several in flight.
// A core model consumes words at random and now and then branches, either a
// short distance back (0 to 3 words: such targets are often still held by the
// ring) or to a random address. Checked: every word delivered has the right
// pattern and is the one the program order expects (sequential, or the
// branch target after a branch), the fetch request never exceeds the ring's
// capacity (assertion in the design), short branches are served from the ring
// without new fetches, and both ring hits and flushes occur.
module tb_fetch_ring_fifo;
  import hic_pkg::*;
  import tb_pkg::*;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;      // a real falling edge, so the asynchronous reset acts at once
  logic branch = 0, ivalid, iready = 0, freq, fgnt, fvalid, ev_hit, ev_flush;
  addr_t target = 0, iaddr, faddr;
  logic [31:0] irdata, frdata;
  int checks = 0, failures = 0, cycle = 0, hits = 0, flushes = 0, consumed = 0;

  fetch_ring_fifo #(.DEPTH(4)) dut (
    .clk_i(clk), .rst_ni(rst_n), .boot_addr_i(32'h0000_8000),
    .branch_i(branch), .branch_target_i(target),
    .instr_valid_o(ivalid), .instr_rdata_o(irdata), .instr_addr_o(iaddr), .instr_ready_i(iready),
    .fetch_req_o(freq), .fetch_addr_o(faddr), .fetch_gnt_i(fgnt),
    .fetch_valid_i(fvalid), .fetch_rdata_i(frdata),
    .ev_ring_hit_o(ev_hit), .ev_flush_o(ev_flush));

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;
  initial begin #3000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  // behavioural L0: in-order answers
  logic g_r = 1;
  addr_t qa [$];
  int    qd [$];
  bit hold = 0;
  assign fgnt = g_r && !hold;
  always @(negedge clk) g_r = $urandom % 3 != 0;
  // handshakes are sampled just before the edge and the queues change just
  // after it, so the model never races the design's flip-flops
  logic  s_valid = 0, s_req = 0;
  addr_t s_addr = '0;
  always @(negedge clk) begin #4; s_valid = fvalid; s_req = freq && fgnt; s_addr = faddr; end
  always @(posedge clk) begin
    #1;
    if (s_valid) begin void'(qa.pop_front()); void'(qd.pop_front()); end
    if (s_req) begin
      qa.push_back(s_addr);
      qd.push_back(((qd.size() > 0 && qd[$] > cycle) ? qd[$] : cycle) + 1 + int'($urandom % 3));
    end
  end
  assign fvalid = qa.size() > 0 && qd[0] <= cycle;
  assign frdata = qa.size() > 0 ? code_word(qa[0]) : '0;

  int fetches_at_hit;
  int l0_grants = 0;
  always @(posedge clk) if (s_req) l0_grants++;

  initial begin
    automatic addr_t pc = 32'h0000_8000;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 20000; i++) begin
      @(negedge clk);
      branch = 0; iready = 0;
      if ($urandom % 12 == 0 && consumed > 0) begin
        branch = 1;
        if ($urandom % 2) target = pc - 4 * ($urandom % 4) - 4;
        else target = {16'h0, 14'($urandom), 2'b00};
        pc = target;
      end else begin
        iready = $urandom % 4 != 0;
      end
      #1;
      if (branch) begin
        if (ev_hit) hits++;
        if (ev_flush) flushes++;
      end
      if (!branch && ivalid && iready) begin
        checks++;
        if (iaddr != pc || irdata !== code_word(iaddr)) begin
          failures++; $display("got %h at %h, expected %h", irdata, iaddr, pc);
        end
        pc = pc + 4;
        consumed++;
      end
      @(posedge clk);
    end
    // directed: a branch back by one word right after it was read is a ring hit
    // served without a new fetch (the L0 grant is held low meanwhile)
    @(negedge clk); branch = 0; iready = 0;
    repeat (12) @(posedge clk);
    @(negedge clk); hold = 1;
    @(negedge clk); iready = 1; #1 pc = iaddr;
    @(posedge clk);
    @(negedge clk); iready = 0; branch = 1; target = pc; #1;
    checks++; if (!ev_hit) begin failures++; $display("short branch not served by the ring"); end
    fetches_at_hit = l0_grants;
    @(posedge clk); #1 branch = 0;
    checks++; if (!ivalid || iaddr != pc || irdata !== code_word(pc)) begin failures++; $display("ring hit gives wrong word"); end
    checks++; if (l0_grants != fetches_at_hit) begin failures++; $display("ring hit refetched"); end
    checks++; if (hits == 0 || flushes == 0) begin failures++; $display("hits=%0d flushes=%0d", hits, flushes); end
    $display("consumed=%0d ring_hits=%0d flushes=%0d", consumed, hits, flushes);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

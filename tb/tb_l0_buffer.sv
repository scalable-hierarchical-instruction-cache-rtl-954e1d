// Self-checking test of the L0 line buffer. A behavioural L1 grants randomly
// and answers a line 1 to 3 cycles later. Directed: four sequential words of
// one line cost one L1 access; the three L0 hits are granted back to back and
// each answered one cycle after its grant. Random: sequential word runs with
// jumps, several requests in flight on the 32-bit side; every word must come
// back in order with the right pattern.
module tb_l0_buffer;
  import hic_pkg::*;
  import tb_pkg::*;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;      // a real falling edge, so the asynchronous reset acts at once
  logic req = 0, gnt, valid, l1_req, l1_gnt, l1_valid;
  addr_t addr = 0, l1_addr;
  logic [31:0] rdata;
  line_t l1_rdata;
  int checks = 0, failures = 0, cycle = 0, l1_reqs = 0;

  l0_buffer dut (
    .clk_i(clk), .rst_ni(rst_n), .req_i(req), .addr_i(addr), .gnt_o(gnt),
    .valid_o(valid), .rdata_o(rdata),
    .l1_req_o(l1_req), .l1_addr_o(l1_addr), .l1_gnt_i(l1_gnt),
    .l1_valid_i(l1_valid), .l1_rdata_i(l1_rdata));

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;
  initial begin #2000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  // behavioural L1
  bit rnd = 0;
  logic gnt_r = 1;
  int due = -1;
  addr_t la;
  assign l1_gnt = rnd ? gnt_r : 1'b1;
  always @(negedge clk) gnt_r = $urandom % 3 != 0;
  always @(posedge clk) begin
    if (l1_req && l1_gnt) begin due <= cycle + 1 + (rnd ? int'($urandom % 3) : 0); la <= l1_addr; l1_reqs++; end
  end
  assign l1_valid = cycle == due;
  assign l1_rdata = code_line(la);

  addr_t exp_q [$];
  int    acc_c [$];
  int    lat [$];
  always @(posedge clk) begin
    if (valid) begin
      checks++;
      if (exp_q.size() == 0 || rdata !== code_word(exp_q[0])) begin failures++; $display("wrong word"); end
      if (exp_q.size() != 0) begin lat.push_back(cycle - acc_c[0]); void'(exp_q.pop_front()); void'(acc_c.pop_front()); end
    end
    if (req && gnt) begin exp_q.push_back(addr); acc_c.push_back(cycle); end
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    // directed: one line, four words
    for (int w = 0; w < 4; w++) begin
      @(negedge clk); req = 1; addr = 32'h200 + 4 * w;
      do @(posedge clk); while (!gnt);
    end
    @(negedge clk); req = 0;
    repeat (4) @(posedge clk);
    checks++; if (l1_reqs != 1) begin failures++; $display("L1 accessed %0d times", l1_reqs); end
    checks++; if (lat.size() != 4 || lat[1] != 1 || lat[2] != 1 || lat[3] != 1) begin failures++; $display("hit latency"); end
    // random
    rnd = 1;
    begin
      automatic addr_t pc = 32'h1000;
      for (int i = 0; i < 4000; i++) begin
        @(negedge clk);
        req = $urandom % 4 != 0; addr = pc;
        @(posedge clk);
        if (req && gnt) pc = ($urandom % 10 == 0) ? {$urandom % 32'h4000, 2'b00} : pc + 4;
      end
    end
    @(negedge clk); req = 0;
    repeat (10) @(posedge clk);
    checks++; if (exp_q.size() != 0) begin failures++; $display("words lost"); end
    $display("words=%0d l1_reqs=%0d", checks, l1_reqs);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

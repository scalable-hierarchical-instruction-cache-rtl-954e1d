// Self-checking test of the L1 <-> L1.5 buffers. The default instance (request
// buffer off, response buffer on) must pass requests in the same cycle and
// delay every response and drop flag by exactly one cycle. A second instance
// with the request buffer on must deliver a random request stream under random
// downstream grants in order, without loss or duplication, one cycle later.
module tb_l1_l15_buffer;
  import hic_pkg::*;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;      // a real falling edge, so the asynchronous reset acts at once
  int checks = 0, failures = 0;

  // default instance
  logic     a_rv, a_rg, a_l1rv, a_l1rd, a_icv, a_icg, a_icrv, a_icrd;
  l15_req_t a_r, a_icr;
  l15_rsp_t a_l1r, a_icrsp;
  l1_l15_buffer dut_a (
    .clk_i(clk), .rst_ni(rst_n),
    .l1_req_valid_i(a_rv), .l1_req_i(a_r), .l1_req_gnt_o(a_rg),
    .l1_rsp_valid_o(a_l1rv), .l1_rsp_o(a_l1r), .l1_rsp_drop_o(a_l1rd),
    .ic_req_valid_o(a_icv), .ic_req_o(a_icr), .ic_req_gnt_i(a_icg),
    .ic_rsp_valid_i(a_icrv), .ic_rsp_i(a_icrsp), .ic_rsp_drop_i(a_icrd));

  // request-buffered instance
  logic     b_rv, b_rg, b_l1rv, b_l1rd, b_icv, b_icg;
  l15_req_t b_r, b_icr;
  l15_rsp_t b_l1r;
  l1_l15_buffer #(.REQ_BUF(1'b1), .RSP_BUF(1'b0)) dut_b (
    .clk_i(clk), .rst_ni(rst_n),
    .l1_req_valid_i(b_rv), .l1_req_i(b_r), .l1_req_gnt_o(b_rg),
    .l1_rsp_valid_o(b_l1rv), .l1_rsp_o(b_l1r), .l1_rsp_drop_o(b_l1rd),
    .ic_req_valid_o(b_icv), .ic_req_o(b_icr), .ic_req_gnt_i(b_icg),
    .ic_rsp_valid_i(1'b0), .ic_rsp_i('0), .ic_rsp_drop_i(1'b0));

  always #5 clk = ~clk;
  initial begin #500000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  logic     prev_v, prev_d;
  l15_rsp_t prev_r;
  addr_t    sent [$];
  addr_t    next_addr = 32'h100;
  int       got = 0;
  logic     hs_in, hs_out, granted_last = 0;
  addr_t    out_addr;

  initial begin
    a_rv = 0; a_r = '0; a_icg = 0; a_icrv = 0; a_icrsp = '0; a_icrd = 0;
    b_rv = 0; b_r = '0; b_icg = 0;
    prev_v = 0; prev_d = 0; prev_r = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      // default instance stimulus
      a_rv = $urandom % 2; a_r.addr = $urandom; a_r.tid = tid_e'($urandom % 2); a_icg = $urandom % 2;
      a_icrv = $urandom % 2; a_icrsp.data = {4{$urandom}}; a_icrsp.tid = tid_e'($urandom % 2); a_icrd = $urandom % 2;
      // buffered instance stimulus: hold a request until granted
      if (!b_rv || granted_last) begin b_rv = $urandom % 2; b_r.addr = next_addr; b_r.tid = TID_FETCH; end
      b_icg = $urandom % 2;
      #1;
      checks++;
      if (a_icv !== a_rv || a_icr !== a_r || a_rg !== a_icg) begin failures++; $display("request not passed through"); end
      checks++;
      if (a_l1rv !== prev_v || a_l1rd !== prev_d || (prev_v && a_l1r !== prev_r)) begin failures++; $display("response not delayed by one cycle"); end
      hs_in = b_rv && b_rg; hs_out = b_icv && b_icg; out_addr = b_icr.addr;
      @(posedge clk);
      prev_v = a_icrv; prev_d = a_icrd; if (a_icrv) prev_r = a_icrsp;
      if (hs_out) begin
        checks++;
        if (sent.size() == 0 || out_addr != sent[0]) begin failures++; $display("buffered request out of order"); end
        else void'(sent.pop_front());
        got++;
      end
      if (hs_in) begin sent.push_back(next_addr); next_addr = next_addr + 16; end
      granted_last = hs_in;
    end
    checks++; if (got < 200 || sent.size() > 1) begin failures++; $display("lost requests"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

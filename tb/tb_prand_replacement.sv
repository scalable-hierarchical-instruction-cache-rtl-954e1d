// Self-checking test of PRAND replacement: an invalid way is always taken
// first (lowest index); with all ways valid the way follows an independently
// computed 16-bit LFSR, advancing only when a victim is consumed, and every
// way is chosen at some point.
module tb_prand_replacement;
  logic clk = 0, rst_n = 1, adv = 0;
  initial #1 rst_n = 0;      // a real falling edge, so the asynchronous reset acts at once
  logic [3:0] valid;
  logic [1:0] way;
  logic [15:0] lfsr;
  int seen [4];
  int checks = 0, failures = 0;

  prand_replacement #(.NB_WAYS(4), .SEED(16'hACE1)) dut (
    .clk_i(clk), .rst_ni(rst_n), .valid_i(valid), .adv_i(adv), .way_o(way));

  always #5 clk = ~clk;
  initial begin #200000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    lfsr = 16'hACE1; valid = 4'hF;
    for (int w = 0; w < 4; w++) seen[w] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 500; i++) begin
      @(negedge clk);
      valid = 4'($urandom); if ($urandom % 2) valid = 4'hF;
      adv = ($urandom % 2) == 1;
      #1 checks++;
      if (valid != 4'hF) begin
        automatic int exp = 0;
        while (valid[exp]) exp++;
        if (int'(way) != exp) begin failures++; $display("invalid-first failed"); end
      end else begin
        if (way != lfsr[1:0]) begin failures++; $display("lfsr way %0d exp %0d", way, lfsr[1:0]); end
        seen[way]++;
      end
      @(posedge clk);
      if (adv) lfsr = {lfsr[14:0], lfsr[15] ^ lfsr[13] ^ lfsr[12] ^ lfsr[10]};
    end
    for (int w = 0; w < 4; w++) begin checks++; if (seen[w] == 0) failures++; end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

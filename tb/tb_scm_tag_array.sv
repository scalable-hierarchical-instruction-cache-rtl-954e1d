// Self-checking test of the tag SCM: random writes, then both read ports at
// random sets compared with a reference copy; valid bits cleared by reset.
module tb_scm_tag_array;
  localparam int W = 4, S = 8, T = 25;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;      // a real falling edge, so the asynchronous reset acts at once
  logic [2:0]   rd_idx [2];
  logic [T-1:0] rd_tag [2][W];
  logic [W-1:0] rd_valid [2];
  logic we = 0;
  logic [2:0] wi;
  logic [1:0] ww;
  logic [T-1:0] wt;
  logic [T-1:0] ref_tag [S][W];
  logic [W-1:0] ref_val [S];
  int checks = 0, failures = 0;

  scm_tag_array #(.NB_WAYS(W), .NB_SETS(S), .TAG_W(T), .NB_RPORTS(2)) dut (
    .clk_i(clk), .rst_ni(rst_n), .rd_idx_i(rd_idx), .rd_tag_o(rd_tag), .rd_valid_o(rd_valid),
    .wr_en_i(we), .wr_idx_i(wi), .wr_way_i(ww), .wr_tag_i(wt));

  always #5 clk = ~clk;
  initial begin #200000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  task automatic check_port(int p);
    checks++;
    if (rd_valid[p] !== ref_val[rd_idx[p]]) begin failures++; $display("valid mismatch port %0d", p); end
    for (int w = 0; w < W; w++) if (ref_val[rd_idx[p]][w]) begin
      checks++;
      if (rd_tag[p][w] !== ref_tag[rd_idx[p]][w]) begin failures++; $display("tag mismatch"); end
    end
  endtask

  initial begin
    for (int s = 0; s < S; s++) ref_val[s] = '0;
    rd_idx[0] = 0; rd_idx[1] = 0; wi = 0; ww = 0; wt = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int s = 0; s < S; s++) begin rd_idx[0] = 3'(s); #1 checks++; if (rd_valid[0] != 0) failures++; end
    for (int i = 0; i < 400; i++) begin
      @(negedge clk);
      we = ($urandom % 2) == 1; wi = 3'($urandom); ww = 2'($urandom); wt = T'($urandom);
      rd_idx[0] = 3'($urandom); rd_idx[1] = 3'($urandom);
      #1 check_port(0); check_port(1);
      @(posedge clk);
      if (we) begin ref_tag[wi][ww] = wt; ref_val[wi][ww] = 1'b1; end
    end
    @(negedge clk); we = 0;
    for (int s = 0; s < S; s++) begin rd_idx[0] = 3'(s); rd_idx[1] = 3'(S-1-s); #1 check_port(0); check_port(1); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

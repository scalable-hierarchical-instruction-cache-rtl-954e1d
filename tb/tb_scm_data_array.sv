// Self-checking test of the data SCM: random line writes and reads compared
// with a reference copy (only lines that were written are compared).
module tb_scm_data_array;
  localparam int W = 4, S = 32, L = 128;
  logic clk = 0;
  logic [4:0] ri, wi;
  logic [1:0] rw, ww;
  logic [L-1:0] rd, wd;
  logic we = 0;
  logic [L-1:0] ref_mem [S][W];
  logic written [S][W];
  int checks = 0, failures = 0;

  scm_data_array #(.NB_WAYS(W), .NB_SETS(S), .LINE_W(L)) dut (
    .clk_i(clk), .rd_idx_i(ri), .rd_way_i(rw), .rd_data_o(rd),
    .wr_en_i(we), .wr_idx_i(wi), .wr_way_i(ww), .wr_data_i(wd));

  always #5 clk = ~clk;
  initial begin #200000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    for (int s = 0; s < S; s++) for (int w = 0; w < W; w++) written[s][w] = 0;
    ri = 0; rw = 0; wi = 0; ww = 0; wd = 0;
    for (int i = 0; i < 1000; i++) begin
      @(negedge clk);
      we = ($urandom % 3) != 0; wi = 5'($urandom); ww = 2'($urandom);
      wd = {$urandom, $urandom, $urandom, $urandom};
      ri = 5'($urandom); rw = 2'($urandom);
      #1 if (written[ri][rw]) begin checks++; if (rd !== ref_mem[ri][rw]) failures++; end
      @(posedge clk);
      if (we) begin ref_mem[wi][ww] = wd; written[wi][ww] = 1; end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule

// Data memory of one cache level, modelled after a latch-based standard-cell
// memory: NB_WAYS ways of NB_SETS cache lines of LINE_W bits (128 in the paper).
// One read port returns the line of the way selected by the tag comparison
// (combinational read of a registered index), one write port writes a whole
// line at the clock edge. The contents are not reset: a line is only read once
// its tag is valid. The paper gives the function; storage is flip-flops here.
module scm_data_array #(
  parameter int unsigned NB_WAYS = 4,
  parameter int unsigned NB_SETS = 8,
  parameter int unsigned LINE_W  = 128,
  localparam int unsigned IDX_W  = (NB_SETS > 1) ? $clog2(NB_SETS) : 1,
  localparam int unsigned WAY_W  = (NB_WAYS > 1) ? $clog2(NB_WAYS) : 1
) (
  input  logic              clk_i,
  input  logic [IDX_W-1:0]  rd_idx_i,
  input  logic [WAY_W-1:0]  rd_way_i,
  output logic [LINE_W-1:0] rd_data_o,
  input  logic              wr_en_i,
  input  logic [IDX_W-1:0]  wr_idx_i,
  input  logic [WAY_W-1:0]  wr_way_i,
  input  logic [LINE_W-1:0] wr_data_i
);

  logic [LINE_W-1:0] mem_q [NB_SETS][NB_WAYS];

  always_ff @(posedge clk_i) begin
    if (wr_en_i) mem_q[wr_idx_i][wr_way_i] <= wr_data_i;
  end

  assign rd_data_o = mem_q[rd_idx_i][rd_way_i];

endmodule

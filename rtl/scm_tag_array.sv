// Tag memory of one cache level, modelled after a latch-based standard-cell
// memory (SCM): NB_WAYS ways of NB_SETS entries, each a tag and a valid bit.
// NB_RPORTS independent read ports return, for the set they index, the tag and
// valid bit of every way in the same cycle (combinational read, as an SCM read
// of a registered address). The private L1 uses two read ports, one for the
// fetch unit's lookup and one for the prefetch unit's cache probe filtering;
// the shared L1.5 uses one. One write port writes one way of one set at the
// clock edge and sets its valid bit. Reset clears all valid bits.
// The paper gives the function (latch-based, dual-port for the L1); the storage
// here is written as flip-flops so that it stays synthesizable anywhere.
module scm_tag_array #(
  parameter int unsigned NB_WAYS   = 4,
  parameter int unsigned NB_SETS   = 8,
  parameter int unsigned TAG_W     = 25,
  parameter int unsigned NB_RPORTS = 2,
  localparam int unsigned IDX_W    = (NB_SETS > 1) ? $clog2(NB_SETS) : 1,
  localparam int unsigned WAY_W    = (NB_WAYS > 1) ? $clog2(NB_WAYS) : 1
) (
  input  logic                    clk_i,
  input  logic                    rst_ni,
  input  logic [IDX_W-1:0]        rd_idx_i   [NB_RPORTS],
  output logic [TAG_W-1:0]        rd_tag_o   [NB_RPORTS][NB_WAYS],
  output logic [NB_WAYS-1:0]      rd_valid_o [NB_RPORTS],
  input  logic                    wr_en_i,
  input  logic [IDX_W-1:0]        wr_idx_i,
  input  logic [WAY_W-1:0]        wr_way_i,
  input  logic [TAG_W-1:0]        wr_tag_i
);

  logic [TAG_W-1:0]   tag_q   [NB_SETS][NB_WAYS];
  logic [NB_WAYS-1:0] valid_q [NB_SETS];

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      for (int s = 0; s < NB_SETS; s++) valid_q[s] <= '0;
    end else if (wr_en_i) begin
      valid_q[wr_idx_i][wr_way_i] <= 1'b1;
    end
  end

  always_ff @(posedge clk_i) begin
    if (wr_en_i) tag_q[wr_idx_i][wr_way_i] <= wr_tag_i;
  end

  always_comb begin
    for (int p = 0; p < NB_RPORTS; p++) begin
      rd_valid_o[p] = valid_q[rd_idx_i[p]];
      for (int w = 0; w < NB_WAYS; w++) rd_tag_o[p][w] = tag_q[rd_idx_i[p]][w];
    end
  end

endmodule

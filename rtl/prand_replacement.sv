// Pseudo-random (PRAND) replacement: picks the way a refilled line overwrites.
// An invalid way of the set is taken first (lowest index); when all ways are
// valid the way is taken from a 16-bit Fibonacci LFSR (taps 16,14,13,11) that
// advances each time a victim is consumed (adv_i). The paper names the PRAND
// policy only; the invalid-first rule and the LFSR are this design's choice.
// Purely combinational output, one register.
module prand_replacement #(
  parameter int unsigned  NB_WAYS = 4,
  parameter logic [15:0]  SEED    = 16'hACE1,
  localparam int unsigned WAY_W   = (NB_WAYS > 1) ? $clog2(NB_WAYS) : 1
) (
  input  logic               clk_i,
  input  logic               rst_ni,
  input  logic [NB_WAYS-1:0] valid_i,   // valid bits of the set being refilled
  input  logic               adv_i,     // a victim is used this cycle
  output logic [WAY_W-1:0]   way_o
);

  logic [15:0] lfsr_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni)    lfsr_q <= SEED;
    else if (adv_i) lfsr_q <= {lfsr_q[14:0], lfsr_q[15] ^ lfsr_q[13] ^ lfsr_q[12] ^ lfsr_q[10]};
  end

  always_comb begin
    way_o = WAY_W'(lfsr_q % NB_WAYS);
    for (int w = NB_WAYS - 1; w >= 0; w--) begin
      if (!valid_i[w]) way_o = WAY_W'(w);
    end
  end

endmodule

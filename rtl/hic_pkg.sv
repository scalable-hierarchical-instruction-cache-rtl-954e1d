// Shared types and constants of the hierarchical instruction cache.
// A cache line is 128 bits (16 bytes, four 32-bit words) at every level, the
// L1 <-> L1.5 channel carries whole lines, and every L1 request to the L1.5
// carries a one-bit transfer identifier that tells a demand fetch (refill)
// from a next-line prefetch, so that the two may complete out of order.
package hic_pkg;

  localparam int unsigned ADDR_W     = 32;
  localparam int unsigned LINE_W     = 128;
  localparam int unsigned LINE_BYTES = LINE_W / 8;
  localparam int unsigned OFFS_W     = $clog2(LINE_BYTES);
  localparam int unsigned AXI_DATA_W = 64;
  localparam int unsigned BEATS      = LINE_W / AXI_DATA_W;

  typedef logic [ADDR_W-1:0] addr_t;
  typedef logic [LINE_W-1:0] line_t;

  // transfer identifier of an L1 -> L1.5 request
  typedef enum logic {
    TID_FETCH    = 1'b0,
    TID_PREFETCH = 1'b1
  } tid_e;

  // L1 -> L1.5 request: a line-aligned address and its transfer id
  typedef struct packed {
    addr_t addr;
    tid_e  tid;
  } l15_req_t;

  // L1.5 -> L1 response: a line and the transfer id it answers
  typedef struct packed {
    line_t data;
    tid_e  tid;
  } l15_rsp_t;

  // line-aligned address
  function automatic addr_t line_addr(addr_t a);
    return {a[ADDR_W-1:OFFS_W], {OFFS_W{1'b0}}};
  endfunction

endpackage

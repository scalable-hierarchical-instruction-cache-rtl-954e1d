// Helpers shared by the testbenches: the instruction word every testbench
// expects at a byte address (a fixed hash of the address, so that any
// misrouted or stale line is detected) and the 128-bit line built from it.
package tb_pkg;
  function automatic logic [31:0] code_word(logic [31:0] a);
    logic [31:0] w;
    w = {a[31:2], 2'b00} * 32'h9E37_79B1;
    return w ^ 32'h1234_5678;
  endfunction

  function automatic logic [127:0] code_line(logic [31:0] a);
    logic [31:0] b;
    b = {a[31:4], 4'h0};
    return {code_word(b + 12), code_word(b + 8), code_word(b + 4), code_word(b)};
  endfunction
endpackage

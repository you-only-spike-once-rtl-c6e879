// yoso_tb_pkg: helpers for testbenches that talk to a PE in packets.
// Builds programming-mode and run-mode spike words (see yoso_pkg for the
// formats) and holds a small software model of one integrate-and-fire /
// softmax layer used as the reference in the PE and mesh tests.
package yoso_tb_pkg;
  import yoso_pkg::*;

  function automatic logic [31:0] w_set_ptr(input sram_sel_e s, input int a);
    return {OP_SET_PTR, 2'b00, s, 8'h00, 16'(a)};
  endfunction
  function automatic logic [31:0] w_lo(input logic [15:0] d);
    return {OP_DATA_LO, 12'h000, d};
  endfunction
  function automatic logic [31:0] w_hi(input logic [15:0] d);
    return {OP_DATA_HI, 12'h000, d};
  endfunction
  function automatic logic [31:0] w_reg(input logic [3:0] r, input int v);
    return {OP_SET_REG, r, 8'h00, 16'(v)};
  endfunction
  function automatic logic [31:0] w_run();
    return {OP_RUN, 28'h0};
  endfunction
  function automatic logic [31:0] w_spike(input int j, input int povr = 0);
    return {PT_SPIKE, 6'h00, 8'(povr), 16'(j)};
  endfunction
  function automatic logic [31:0] w_prog();
    return {PT_PROG, 30'h0};
  endfunction

  // Append the words that write one SRAM word: pointer, low half, high half.
  function automatic void push_write(ref logic [31:0] q[$], input sram_sel_e s,
                                     input int a, input logic [31:0] d);
    q.push_back(w_set_ptr(s, a));
    q.push_back(w_lo(d[15:0]));
    q.push_back(w_hi(d[31:16]));
  endfunction

  function automatic longint sat(input longint v, input int bits);
    longint hi, lo;
    hi = (longint'(1) <<< (bits - 1)) - 1;
    lo = -(longint'(1) <<< (bits - 1));
    return (v > hi) ? hi : (v < lo) ? lo : v;
  endfunction
endpackage

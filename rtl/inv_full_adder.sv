// inv_full_adder -- couplings of one invertible full adder.
//
// Terminals (A, B, Ci, S, Co), one p-bit each. For every terminal t
// the module outputs that gate's share of the p-bit input,
//     c[t] = h[t] + sum_u J[t][u] * m[u],   m = +1 for bit 1, -1 for bit 0,
// using the FA_J / FA_H couplings of pim_pkg. A p-bit that belongs to several
// gates adds up the shares of all of them, which is the same as using the
// summed J matrix and h vector of the whole circuit. Purely combinational.
//
// The couplings are the invertible-gate values the paper shows for this gate;
// the choice to compute one share per gate (rather than one flat sum per
// p-bit) is this design's own and gives the same p-bit inputs.
module inv_full_adder
  import pim_pkg::*;
(
  input  logic [5-1:0] m,
  output contrib_t c [5]
);

  function automatic contrib_t share(logic [2:0] t, logic [5-1:0] s);
    int acc;
    acc = FA_H[t];
    for (int u = 0; u < 5; u++) acc += spin_term(FA_J[t][u], s[u]);
    return C_W'(acc);
  endfunction

  for (genvar t = 0; t < 5; t++) begin : g_term
    assign c[t] = share(t, m);
  end

endmodule
